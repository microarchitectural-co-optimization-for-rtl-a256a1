// seq_completion: completion and response controller with the read-done
// aggregator.
//
// Every lane pulses read-done for an instruction ID once its operand
// requester has put all source operands of that instruction into the
// operand queues, and done once all its results of that instruction are
// written to the VRF. The VLSU pulses done for stores once all write
// responses are back. This block collects the per-lane pulses in one bit
// per (ID, lane) and raises, for one cycle each:
//   read_release_o[id]  when all lanes reported read-done for id
//   complete_o[id]      when all lanes reported done (arithmetic, loads), or
//                       when the VLSU reported done (stores, by_vlsu_i[id])
// Several IDs may release or complete in the same cycle. clear_i (issue of
// a new instruction under that ID) resets the ID's bits. Outputs are
// registered: one cycle after the last contributing pulse.
// The aggregation of lane read-done status follows the paper; the per-lane
// bit vectors and one-cycle timing are this design's choice.
module seq_completion
  import ara_opt_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  insn_id_t            clear_id_i,
  input  logic [NR_INSN-1:0]  by_vlsu_i,
  input  logic [NR_LANES-1:0] lane_rd_done_i,
  input  insn_id_t            lane_rd_done_id_i [NR_LANES],
  input  logic [NR_LANES-1:0] lane_done_i,
  input  insn_id_t            lane_done_id_i [NR_LANES],
  input  logic                vlsu_done_i,
  input  insn_id_t            vlsu_done_id_i,
  output logic [NR_INSN-1:0]  read_release_o,
  output logic [NR_INSN-1:0]  complete_o
);
  logic [NR_LANES-1:0] rd_q   [NR_INSN];
  logic [NR_LANES-1:0] done_q [NR_INSN];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NR_INSN; i++) begin
        rd_q[i]   <= '0;
        done_q[i] <= '0;
      end
      read_release_o <= '0;
      complete_o     <= '0;
    end else begin
      for (int i = 0; i < NR_INSN; i++) begin
        logic [NR_LANES-1:0] rd_n, done_n;
        logic vdone;
        rd_n   = rd_q[i];
        done_n = done_q[i];
        vdone  = vlsu_done_i && (vlsu_done_id_i == insn_id_t'(i));
        for (int l = 0; l < NR_LANES; l++) begin
          if (lane_rd_done_i[l] && lane_rd_done_id_i[l] == insn_id_t'(i)) rd_n[l]   = 1'b1;
          if (lane_done_i[l]    && lane_done_id_i[l]    == insn_id_t'(i)) done_n[l] = 1'b1;
        end
        read_release_o[i] <= &rd_n;
        complete_o[i]     <= by_vlsu_i[i] ? vdone : &done_n;
        if (&rd_n) rd_n = '0;
        if (by_vlsu_i[i] ? vdone : &done_n) done_n = '0;
        if (clear_i && clear_id_i == insn_id_t'(i)) begin
          rd_n   = '0;
          done_n = '0;
        end
        rd_q[i]   <= rd_n;
        done_q[i] <= done_n;
      end
    end
  end
endmodule
