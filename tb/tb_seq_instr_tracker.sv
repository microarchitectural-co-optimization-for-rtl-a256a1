// tb_seq_instr_tracker: self-checking testbench of the instruction tracker.
// Random allocations and completions are mirrored in a reference model; the
// testbench checks the lowest-free-ID allocation, the free flag, the busy
// and VLSU-owned masks and the in-flight count, including the full state.
module tb_seq_instr_tracker;
  import ara_opt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_full = 0;

  logic free, alloc, alloc_vlsu;
  insn_id_t alloc_id;
  logic [NR_INSN-1:0] cmp, busy, by_vlsu;
  logic [$clog2(NR_INSN+1)-1:0] inflight;

  seq_instr_tracker dut (
    .clk_i(clk), .rst_ni(rst_n), .free_o(free), .alloc_id_o(alloc_id), .alloc_i(alloc),
    .alloc_vlsu_i(alloc_vlsu), .complete_i(cmp), .busy_o(busy), .by_vlsu_o(by_vlsu),
    .inflight_o(inflight)
  );

  logic [NR_INSN-1:0] rb, rv;

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
    alloc = 0; alloc_vlsu = 0; cmp = '0; rb = '0; rv = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int exp_id;
      @(negedge clk);
      exp_id = -1;
      for (int i = NR_INSN - 1; i >= 0; i--) if (!rb[i]) exp_id = i;
      check(free === (exp_id >= 0), "free flag");
      if (exp_id >= 0) check(alloc_id === insn_id_t'(exp_id), "lowest free ID");
      else n_full++;
      check(busy === rb, "busy mask");
      check(inflight === $countones(rb), "in-flight count");
      for (int i = 0; i < NR_INSN; i++) if (rb[i]) check(by_vlsu[i] === rv[i], "VLSU-owned flag");
      alloc      = $urandom_range(0, 99) < ((cyc / 500) % 2 ? 80 : 30);
      alloc_vlsu = $urandom_range(0, 1);
      cmp        = rb & NR_INSN'($urandom) & NR_INSN'($urandom);
      @(posedge clk);
      rb = rb & ~cmp;
      if (alloc && exp_id >= 0) begin rb[exp_id] = 1; rv[exp_id] = alloc_vlsu; end
    end
    check(n_full > 0, "tracker filled up");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
