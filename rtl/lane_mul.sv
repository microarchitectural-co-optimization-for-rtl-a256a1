// lane_mul: multiplier unit of a lane (the FPU / MUL slot).
//
// The lane sequencer pushes each instruction for this unit into a small
// instruction queue (depth 4). The unit then consumes, for the instruction at
// the head, one element group per cycle: one 64-bit word from operand queue A
// and one from operand queue B, each holding two 32-bit elements. The result
// word is registered (one cycle latency) and presented both to the lane's
// result queue and, as a result channel, to the forwarding logic, tagged with
// the instruction ID and the destination word address vd*GRP_PER_REG + g.
// The unit stalls while an operand queue is empty or the result queue has no
// entry left for the word it would produce.
// Operation: 32 x 32 -> low 32-bit integer multiply (vmul). Floating-point
// arithmetic is not implemented. The paper names this unit only.
module lane_mul
  import ara_opt_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       insn_push_i,
  input  vinsn_t     insn_i,
  output logic       insn_full_o,
  input  logic       a_empty_i,
  input  lane_word_t a_i,
  output logic       a_pop_o,
  input  logic       b_empty_i,
  input  lane_word_t b_i,
  output logic       b_pop_o,
  input  logic [2:0] res_free_i,   // free entries in the result queue
  output logic       res_valid_o,  // result channel / result queue push
  output res_t       res_o,
  output logic [31:0] busy_cnt_o   // cycles in which a group was computed
);
  vinsn_t   head;
  logic     head_empty, fire, last;
  grp_cnt_t g_q;

  fifo_sync #(.T(vinsn_t), .DEPTH(4)) i_insn_q (
    .clk_i, .rst_ni,
    .push_i (insn_push_i),
    .data_i (insn_i),
    .pop_i  (fire && last),
    .data_o (head),
    .full_o (insn_full_o),
    .empty_o(head_empty),
    .count_o()
  );

  assign fire    = !head_empty && !a_empty_i && !b_empty_i &&
                   (int'(res_free_i) > (res_valid_o ? 1 : 0));
  assign last    = (g_q + 1'b1) >= groups_of(head.vl);
  assign a_pop_o = fire;
  assign b_pop_o = fire;

  function automatic logic [31:0] op32(vop_e op, logic [31:0] a, logic [31:0] b);
    logic [63:0] p;
    p = a * b;
    return (op == OP_MUL) ? p[31:0] : 32'd0;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      g_q         <= '0;
      res_valid_o <= 1'b0;
      res_o       <= '0;
      busy_cnt_o  <= '0;
    end else begin
      res_valid_o <= fire;
      if (fire) begin
        res_o.id    <= head.id;
        res_o.waddr <= vaddr_t'(head.vd) * vaddr_t'(GRP_PER_REG) + vaddr_t'(g_q);
        res_o.data  <= {op32(head.op, a_i[63:32], b_i[63:32]), op32(head.op, a_i[31:0], b_i[31:0])};
        g_q         <= last ? '0 : g_q + 1'b1;
        busy_cnt_o  <= busy_cnt_o + 1;
      end
    end
  end
endmodule
