// tb_seq_scoreboard: self-checking testbench of the sequencer scoreboard
// (read list / write list per in-flight instruction).
// Random issues, read releases and completions drive the DUT and a
// reference model. The hazard output must flag WAW (new write set overlaps
// a write list) and WAR (new write set overlaps a read list); read lists
// must be cleared on read release (early read-dependence release) while
// write lists stay until completion. RAW alone must not stall.
module tb_seq_scoreboard;
  import ara_opt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_war = 0, n_waw = 0, n_raw_only = 0, n_early = 0;

  vreg_mask_t new_wr, new_rd;
  logic hazard, war, issue;
  insn_id_t issue_id;
  logic [NR_INSN-1:0] rel, cmp;

  seq_scoreboard #(.EARLY_READ_RELEASE(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .new_wr_i(new_wr), .new_rd_i(new_rd), .hazard_o(hazard),
    .war_o(war), .issue_i(issue), .issue_id_i(issue_id), .read_release_i(rel), .complete_i(cmp)
  );

  vreg_mask_t wr_m [NR_INSN], rd_m [NR_INSN];
  bit busy [NR_INSN];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic vreg_mask_t rnd_mask();
    vreg_mask_t m;
    int b, n;
    b = $urandom_range(0, 31);
    n = 1 << $urandom_range(0, 2);
    m = '0;
    for (int i = 0; i < n; i++) m[(b + i) % 32] = 1'b1;
    return m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    new_wr = '0; new_rd = '0; issue = 0; issue_id = '0; rel = '0; cmp = '0;
    for (int i = 0; i < NR_INSN; i++) begin wr_m[i] = '0; rd_m[i] = '0; busy[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      vreg_mask_t wa, ra;
      bit exp_war, exp_haz;
      int free_id;
      @(negedge clk);
      new_wr = rnd_mask();
      new_rd = rnd_mask() | rnd_mask();
      wa = '0; ra = '0;
      for (int i = 0; i < NR_INSN; i++) begin wa |= wr_m[i]; ra |= rd_m[i]; end
      exp_war = |(new_wr & ra);
      exp_haz = exp_war || |(new_wr & wa);
      #1;
      check(war === exp_war, "WAR detection");
      check(hazard === exp_haz, "hazard detection");
      if (exp_war) n_war++;
      if (!exp_war && exp_haz) n_waw++;
      if (!exp_haz && |(new_rd & wa)) n_raw_only++;
      free_id = -1;
      for (int i = NR_INSN - 1; i >= 0; i--) if (!busy[i]) free_id = i;
      issue    = !exp_haz && free_id >= 0 && $urandom_range(0, 1);
      issue_id = insn_id_t'(free_id < 0 ? 0 : free_id);
      rel = '0; cmp = '0;
      for (int i = 0; i < NR_INSN; i++) if (busy[i] && !(issue && i == free_id)) begin
        if (rd_m[i] != '0 && $urandom_range(0, 9) == 0) rel[i] = 1'b1;
        else if ($urandom_range(0, 19) == 0) cmp[i] = 1'b1;
      end
      @(posedge clk);
      for (int i = 0; i < NR_INSN; i++) begin
        if (cmp[i]) begin wr_m[i] = '0; rd_m[i] = '0; busy[i] = 0; end
        else if (rel[i]) begin rd_m[i] = '0; n_early++; end
      end
      if (issue) begin wr_m[free_id] = new_wr; rd_m[free_id] = new_rd; busy[free_id] = 1; end
    end
    check(n_war > 0 && n_waw > 0 && n_raw_only > 0 && n_early > 0, "all hazard kinds exercised");
    $display("WAR %0d WAW %0d RAW-only %0d early releases %0d", n_war, n_waw, n_raw_only, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
