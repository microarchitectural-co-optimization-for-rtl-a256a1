// seq_instr_tracker: table of in-flight vector instructions in the main
// sequencer.
//
// Each issued instruction receives a free slot whose index is its
// instruction ID; the ID travels with the instruction through lanes and VLSU
// and identifies it in all status returns. The tracker records for each slot
// which unit has to report completion (the lanes for arithmetic and loads,
// the VLSU for stores). alloc_id_o is the lowest free slot and is valid while
// any slot is free; alloc_i takes it in the same cycle. complete_i is a bit
// mask of slots that finished this cycle and are freed at the clock edge.
// The paper only names this block; the slot count (8) and the lowest-free
// allocation are choices of this implementation.
module seq_instr_tracker
  import ara_opt_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  output logic               free_o,       // a slot is available
  output insn_id_t           alloc_id_o,
  input  logic               alloc_i,
  input  logic               alloc_vlsu_i, // completion reported by the VLSU
  input  logic [NR_INSN-1:0] complete_i,
  output logic [NR_INSN-1:0] busy_o,
  output logic [NR_INSN-1:0] by_vlsu_o,
  output logic [$clog2(NR_INSN+1)-1:0] inflight_o
);
  logic [NR_INSN-1:0] busy_q, vlsu_q;

  always_comb begin
    free_o     = 1'b0;
    alloc_id_o = '0;
    for (int i = NR_INSN - 1; i >= 0; i--)
      if (!busy_q[i]) begin
        free_o     = 1'b1;
        alloc_id_o = insn_id_t'(i);
      end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= '0;
      vlsu_q <= '0;
    end else begin
      busy_q <= busy_q & ~complete_i;
      if (alloc_i && free_o) begin
        busy_q[alloc_id_o] <= 1'b1;
        vlsu_q[alloc_id_o] <= alloc_vlsu_i;
      end
    end
  end

  always_comb begin
    inflight_o = '0;
    for (int i = 0; i < NR_INSN; i++) inflight_o += busy_q[i];
  end

  assign busy_o    = busy_q;
  assign by_vlsu_o = vlsu_q;

  a_complete_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                    (complete_i & ~busy_q) == '0)
    else $error("seq_instr_tracker: completion of an idle slot");
endmodule
