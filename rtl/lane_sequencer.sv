// lane_sequencer: per-lane instruction queue with dynamic, release-aware
// local issue.
//
// Instructions broadcast by the main sequencer are accepted when the local
// queue (depth 4) has room. On acceptance every writing instruction
// registers its group count with the write-back network for completion;
// a load additionally marks its whole destination group not-written (its
// data comes from the VLSU, not through this queue) and is not queued.
// Arithmetic instructions and stores are queued and issued in order to the
// operand requester; arithmetic ones are also pushed into their functional
// unit's instruction queue in the same cycle.
//
// Issue condition. A static check would issue only when the operand
// requester is not busy. With DYN_LOCAL_ISSUE = 1 the requester also counts
// as free in the cycle in which its last outstanding request is being
// granted (last_fire_i): that occupancy is released at this clock edge, so
// the next instruction is handed over without a bubble. dyn_issue_o counts
// the issues that the static rule would have delayed.
// The joint occupancy / releasability check follows the paper; queue depth
// and the treatment of loads are this design's choices.
module lane_sequencer
  import ara_opt_pkg::*;
#(
  parameter bit DYN_LOCAL_ISSUE = 1'b1
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       valid_i,
  output logic       ready_o,
  input  vinsn_t     vinsn_i,
  // operand requester
  input  logic       opreq_busy_i,
  input  logic       opreq_last_fire_i,
  output logic       opreq_valid_o,
  output vinsn_t     opreq_insn_o,
  output logic [2:0] tq_a_o,
  output logic [2:0] tq_b_o,
  // functional-unit instruction queues
  output logic       alu_push_o,
  input  logic       alu_full_i,
  output logic       mul_push_o,
  input  logic       mul_full_i,
  // write-back network
  output logic       reg_o,
  output insn_id_t   reg_id_o,
  output grp_cnt_t   reg_groups_o,
  output logic       clr_range_o,
  output vaddr_t     clr_base_o,
  output grp_cnt_t   clr_n_o,
  // statistics
  output logic [31:0] dyn_issue_o,
  output logic [31:0] issue_block_o
);
  // operand queue indices
  localparam logic [2:0] Q_ALU_A = 3'd0, Q_ALU_B = 3'd1, Q_MUL_A = 3'd2,
                         Q_MUL_B = 3'd3, Q_ST = 3'd4;

  vinsn_t head;
  logic   empty, full, accept, issue, fu_ok, req_free;

  assign ready_o = !full;
  assign accept  = valid_i && !full;

  fifo_sync #(.T(vinsn_t), .DEPTH(4)) i_q (
    .clk_i, .rst_ni,
    .push_i (accept && vinsn_i.fu != FU_LD),
    .data_i (vinsn_i),
    .pop_i  (issue),
    .data_o (head),
    .full_o (full),
    .empty_o(empty),
    .count_o()
  );

  assign reg_o        = accept && vinsn_i.fu != FU_ST;
  assign reg_id_o     = vinsn_i.id;
  assign reg_groups_o = groups_of(vinsn_i.vl);
  assign clr_range_o  = accept && vinsn_i.fu == FU_LD;
  assign clr_base_o   = vaddr_t'(vinsn_i.vd) * vaddr_t'(GRP_PER_REG);
  assign clr_n_o      = groups_of(vinsn_i.vl);

  assign req_free = !opreq_busy_i || (DYN_LOCAL_ISSUE && opreq_last_fire_i);
  assign fu_ok    = (head.fu == FU_ALU) ? !alu_full_i :
                    (head.fu == FU_MUL) ? !mul_full_i : 1'b1;
  assign issue    = !empty && req_free && fu_ok;

  assign opreq_valid_o = issue;
  assign opreq_insn_o  = head;
  assign alu_push_o    = issue && head.fu == FU_ALU;
  assign mul_push_o    = issue && head.fu == FU_MUL;
  always_comb begin
    unique case (head.fu)
      FU_ALU:  begin tq_a_o = Q_ALU_A; tq_b_o = Q_ALU_B; end
      FU_MUL:  begin tq_a_o = Q_MUL_A; tq_b_o = Q_MUL_B; end
      default: begin tq_a_o = Q_ST;    tq_b_o = Q_ST;    end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dyn_issue_o   <= '0;
      issue_block_o <= '0;
    end else begin
      if (issue && opreq_busy_i) dyn_issue_o <= dyn_issue_o + 1;
      if (!empty && !issue)      issue_block_o <= issue_block_o + 1;
    end
  end
endmodule
