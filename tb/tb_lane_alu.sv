// tb_lane_alu: self-checking testbench of the lane integer ALU.
// Random add/sub/and/or/xor instructions with random vl and destination are
// queued; operand words arrive in the A and B operand queues at random
// times and the result queue reports random free space. Every result word
// (instruction ID, VRF word address vd*4+group, two 32-bit elements) is
// compared in order with a reference computed here.
module tb_lane_alu;
  import ara_opt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       insn_push, insn_full, a_pop, b_pop, res_valid;
  vinsn_t     insn;
  logic [2:0] res_free;
  res_t       res;
  logic [31:0] busy;
  lane_word_t qa [$], qb [$];
  res_t       exp_q [$];

  lane_alu dut (
    .clk_i(clk), .rst_ni(rst_n), .insn_push_i(insn_push), .insn_i(insn), .insn_full_o(insn_full),
    .a_empty_i(qa.size() == 0), .a_i(qa.size() ? qa[0] : '0), .a_pop_o(a_pop),
    .b_empty_i(qb.size() == 0), .b_i(qb.size() ? qb[0] : '0), .b_pop_o(b_pop),
    .res_free_i(res_free), .res_valid_o(res_valid), .res_o(res), .busy_cnt_o(busy)
  );

  function automatic logic [31:0] ref_op(vop_e op, logic [31:0] a, logic [31:0] b);
    case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      default: return a ^ b;
    endcase
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // operand words waiting to be delivered, in instruction order
  lane_word_t pend_a [$], pend_b [$];
  int n_insn = 0, n_res = 0, total_res = 0;

  // consumer side: pop queues and check results
  always @(posedge clk) if (rst_n) begin
    if (a_pop) void'(qa.pop_front());
    if (b_pop) void'(qb.pop_front());
    if (res_valid) begin
      res_t e;
      e = exp_q.pop_front();
      check(res === e, $sformatf("result %0d: got %h expected %h", n_res, res, e));
      n_res++;
    end
  end

  initial begin
    insn_push = 0; insn = '0; res_free = 3'd4;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      // instruction producer
      for (int i = 0; i < 60; i++) begin
        vinsn_t v;
        v = '0;
        v.id = insn_id_t'(i);
        v.op = vop_e'($urandom_range(0, 4));
        v.fu = FU_ALU;
        v.vd = vreg_t'($urandom_range(0, 31) & ~3);
        v.vl = vl_t'($urandom_range(1, 32));
        for (int g = 0; g < groups_of(v.vl); g++) begin
          lane_word_t a, b;
          res_t e;
          a = {$urandom, $urandom};
          b = {$urandom, $urandom};
          pend_a.push_back(a);
          pend_b.push_back(b);
          e.id    = v.id;
          e.waddr = vaddr_t'(v.vd) * vaddr_t'(GRP_PER_REG) + vaddr_t'(g);
          e.data  = {ref_op(v.op, a[63:32], b[63:32]), ref_op(v.op, a[31:0], b[31:0])};
          exp_q.push_back(e);
          total_res++;
        end
        @(negedge clk);
        while (insn_full) @(negedge clk);
        insn = v; insn_push = 1;
        @(negedge clk);
        insn_push = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      // operand delivery at random times
      forever begin
        @(negedge clk);
        if (pend_a.size() && $urandom_range(0, 99) < 70) qa.push_back(pend_a.pop_front());
        if (pend_b.size() && $urandom_range(0, 99) < 70) qb.push_back(pend_b.pop_front());
        res_free = 3'($urandom_range(0, 4));
      end
    join_any
    while (n_res < total_res) @(posedge clk);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all results produced");
    check(busy == total_res, $sformatf("busy counter %0d vs %0d groups", busy, total_res));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
