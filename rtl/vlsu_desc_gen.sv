// vlsu_desc_gen: memory request interface and address-stream descriptor
// generator of the VLSU front end.
//
// A vector memory instruction from the sequencer (valid/ready) is turned
// into one descriptor that describes the whole access: starting address,
// remaining access length in bytes (vl * 4), stride, element width (fixed
// 32 bit here), access type (load/store, unit-stride/strided) and the
// register it reads or writes. The descriptor is held in an output register
// (one cycle latency); a new instruction is accepted whenever that register
// is empty or being emptied, so the front end accepts one instruction per
// cycle and never holds an instruction during its address expansion.
// The descriptor contents follow the paper; the encoding is this design's.
module vlsu_desc_gen
  import ara_opt_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   req_valid_i,
  output logic   req_ready_o,
  input  vinsn_t req_i,
  output logic   desc_valid_o,
  input  logic   desc_ready_i,
  output desc_t  desc_o
);
  assign req_ready_o = !desc_valid_o || desc_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      desc_valid_o <= 1'b0;
      desc_o       <= '0;
    end else begin
      if (desc_ready_i) desc_valid_o <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        desc_valid_o    <= 1'b1;
        desc_o.id       <= req_i.id;
        desc_o.is_store <= (req_i.fu == FU_ST);
        desc_o.mode     <= req_i.mode;
        desc_o.base     <= req_i.scalar;
        desc_o.stride   <= (req_i.mode == MODE_UNIT) ? 32'd4 : req_i.stride;
        desc_o.nbytes   <= 12'(req_i.vl) * 12'd4;
        desc_o.vl       <= req_i.vl;
        desc_o.vreg     <= req_i.vd;
        desc_o.prefetch <= 1'b0;
        desc_o.pf_slot  <= '0;
      end
    end
  end
endmodule
