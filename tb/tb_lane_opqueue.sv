// tb_lane_opqueue: self-checking testbench of the dual-source operand queue.
// Each cycle a VRF-read word (only when an entry is free, as the operand
// requester's credits guarantee) and a forwarded word may arrive. The
// reference model takes the VRF word first and the forwarded word only when
// a second entry is free; the testbench checks fwd_accept, dual-push
// reporting, free count and the order of the words popped by the consumer.
module tb_lane_opqueue;
  import ara_opt_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, duals = 0, refused = 0;

  logic vrf_v, fwd_v, fwd_acc, pop, empty, dual;
  lane_word_t vrf_d, fwd_d, dout;
  logic [$clog2(DEPTH+1)-1:0] free;

  lane_opqueue #(.DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .vrf_valid_i(vrf_v), .vrf_data_i(vrf_d),
    .fwd_valid_i(fwd_v), .fwd_data_i(fwd_d), .fwd_accept_o(fwd_acc),
    .pop_i(pop), .data_o(dout), .empty_o(empty), .free_o(free), .dual_o(dual)
  );

  lane_word_t ref_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    vrf_v = 0; fwd_v = 0; pop = 0; vrf_d = '0; fwd_d = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int space, exp_v, exp_f;
      @(negedge clk);
      check(empty === (ref_q.size() == 0), "empty flag");
      check(free === DEPTH - ref_q.size(), $sformatf("free %0d vs %0d", free, DEPTH - ref_q.size()));
      if (ref_q.size() != 0) check(dout === ref_q[0], "queue head");
      pop   = !empty && ($urandom_range(0, 99) < 55);
      space = DEPTH - ref_q.size() + (pop ? 1 : 0);
      vrf_v = (space >= 1) && ($urandom_range(0, 99) < 50);
      fwd_v = $urandom_range(0, 99) < 50;
      vrf_d = {$urandom, $urandom};
      fwd_d = {$urandom, $urandom};
      exp_v = vrf_v;
      exp_f = fwd_v && (space >= (vrf_v ? 2 : 1));
      #1;
      check(fwd_acc === exp_f[0], $sformatf("fwd_accept %0b, expected %0b (space %0d)", fwd_acc, exp_f, space));
      check(dual === (exp_v && exp_f), "dual push flag");
      if (exp_v && exp_f) duals++;
      if (fwd_v && !exp_f) refused++;
      @(posedge clk);
      if (pop) void'(ref_q.pop_front());
      if (exp_v) ref_q.push_back(vrf_d);
      if (exp_f) ref_q.push_back(fwd_d);
    end
    check(duals > 0, "dual pushes occurred");
    check(refused > 0, "forwarded words refused when space was short");
    $display("dual pushes %0d, refused forwards %0d", duals, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
