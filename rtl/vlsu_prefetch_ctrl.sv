// vlsu_prefetch_ctrl: next-VL prefetch control unit.
//
// The controller watches the unit-stride loads that leave the descriptor
// buffer (obs_*). A load of n bytes at address B predicts that the stream
// continues with the next vector-length intervals B + n, B + 2n, ...,
// B + PF_DEPTH*n (the "1x / 2x / kx" prefetch depth). For each of these
// targets in turn the controller
//   - skips it if a prefetch window already covers its first byte,
//   - otherwise waits for a free prefetch-buffer slot, then emits a
//     prefetch descriptor (load, unit-stride, n bytes, slot number) to the
//     descriptor arbiter and allocates the slot in the same cycle.
// A newer observed load restarts the sequence from its own position, so the
// controller follows the most recent stream. Strided loads are not
// prefetched. pf_cnt_o counts emitted prefetches.
// Deriving the next-VL address from the current access follows the paper;
// the depth parameter's meaning (intervals ahead) and the restart rule are
// this design's reading of it.
module vlsu_prefetch_ctrl
  import ara_opt_pkg::*;
#(
  parameter int unsigned PF_DEPTH = 1
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  obs_valid_i,
  input  desc_t obs_i,
  // prefetch buffer
  input  logic  free_i,
  input  logic [AXI_IDW-1:0] free_slot_i,
  output logic  alloc_o,
  output addr_t cov_base_o,
  input  logic  covered_i,
  // prefetch descriptor
  output logic  pf_valid_o,
  input  logic  pf_ready_i,
  output desc_t pf_o,
  output logic [31:0] pf_cnt_o
);
  logic        act_q;
  addr_t       tgt_q;
  logic [11:0] n_q;
  logic [$clog2(PF_DEPTH+1):0] j_q;
  insn_id_t    id_q;

  assign cov_base_o = tgt_q;
  assign pf_valid_o = act_q && !covered_i && free_i;
  assign alloc_o    = pf_valid_o && pf_ready_i;

  always_comb begin
    pf_o          = '0;
    pf_o.id       = id_q;
    pf_o.is_store = 1'b0;
    pf_o.mode     = MODE_UNIT;
    pf_o.base     = tgt_q;
    pf_o.stride   = 32'd4;
    pf_o.nbytes   = n_q;
    pf_o.vl       = vl_t'(n_q / 12'd4);
    pf_o.prefetch = 1'b1;
    pf_o.pf_slot  = free_slot_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q    <= 1'b0;
      tgt_q    <= '0;
      n_q      <= '0;
      j_q      <= '0;
      id_q     <= '0;
      pf_cnt_o <= '0;
    end else begin
      if (alloc_o) pf_cnt_o <= pf_cnt_o + 1;
      if (obs_valid_i && obs_i.mode == MODE_UNIT && !obs_i.is_store) begin
        act_q <= 1'b1;
        tgt_q <= obs_i.base + addr_t'(obs_i.nbytes);
        n_q   <= obs_i.nbytes;
        j_q   <= 1;
        id_q  <= obs_i.id;
      end else if (act_q && (covered_i || alloc_o)) begin
        tgt_q <= tgt_q + addr_t'(n_q);
        j_q   <= j_q + 1'b1;
        if (int'(j_q) >= PF_DEPTH) act_q <= 1'b0;
      end
    end
  end
endmodule
