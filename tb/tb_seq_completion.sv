// tb_seq_completion: self-checking testbench of the completion and response
// controller with its read-done aggregator.
// For random in-flight instructions the four lanes report read-done and
// done in random order and at random times (several lanes may report
// different IDs in the same cycle). read_release_o must pulse exactly one
// cycle after the last of the four read-done reports, complete_o one cycle
// after the last lane's done, or after the VLSU's done for instructions
// completed by the VLSU.
module tb_seq_completion;
  import ara_opt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_rel = 0, n_cmp = 0;

  logic clear, vdone;
  insn_id_t clear_id, vdone_id;
  logic [NR_INSN-1:0] by_vlsu, rel, cmp;
  logic [NR_LANES-1:0] rd, dn;
  insn_id_t rd_id [NR_LANES], dn_id [NR_LANES];

  seq_completion dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .clear_id_i(clear_id), .by_vlsu_i(by_vlsu),
    .lane_rd_done_i(rd), .lane_rd_done_id_i(rd_id), .lane_done_i(dn), .lane_done_id_i(dn_id),
    .vlsu_done_i(vdone), .vlsu_done_id_i(vdone_id), .read_release_o(rel), .complete_o(cmp)
  );

  // per ID: which lanes still have to report
  bit active [NR_INSN];
  bit rd_left [NR_INSN][NR_LANES], dn_left [NR_INSN][NR_LANES];
  logic [NR_INSN-1:0] exp_rel, exp_cmp;

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
    clear = 0; clear_id = '0; vdone = 0; vdone_id = '0; by_vlsu = '0; rd = '0; dn = '0;
    for (int l = 0; l < NR_LANES; l++) begin rd_id[l] = '0; dn_id[l] = '0; end
    for (int i = 0; i < NR_INSN; i++) active[i] = 0;
    exp_rel = '0; exp_cmp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      logic [NR_INSN-1:0] nrel, ncmp;
      @(negedge clk);
      check(rel === exp_rel, $sformatf("read release %b expected %b", rel, exp_rel));
      check(cmp === exp_cmp, $sformatf("complete %b expected %b", cmp, exp_cmp));
      n_rel += $countones(rel); n_cmp += $countones(cmp);
      clear = 0; vdone = 0; rd = '0; dn = '0;
      nrel = '0; ncmp = '0;
      // start a new instruction in a free slot
      for (int i = 0; i < NR_INSN; i++) if (!active[i] && !clear && $urandom_range(0, 3) == 0) begin
        clear = 1; clear_id = insn_id_t'(i); active[i] = 1;
        by_vlsu[i] = $urandom_range(0, 3) == 0;
        for (int l = 0; l < NR_LANES; l++) begin rd_left[i][l] = 1; dn_left[i][l] = !by_vlsu[i]; end
      end
      // lane reports: each lane picks one random active ID (not the one being cleared)
      for (int l = 0; l < NR_LANES; l++) begin
        int i;
        i = $urandom_range(0, NR_INSN - 1);
        if (active[i] && !(clear && clear_id == i) && rd_left[i][l] && $urandom_range(0, 1)) begin
          rd[l] = 1; rd_id[l] = insn_id_t'(i); rd_left[i][l] = 0;
          if (!rd_left[i][0] && !rd_left[i][1] && !rd_left[i][2] && !rd_left[i][3]) nrel[i] = 1;
        end
        i = $urandom_range(0, NR_INSN - 1);
        if (active[i] && !(clear && clear_id == i) && !by_vlsu[i] && !rd_left[i][l] && dn_left[i][l] &&
            $urandom_range(0, 1)) begin
          dn[l] = 1; dn_id[l] = insn_id_t'(i); dn_left[i][l] = 0;
          if (!dn_left[i][0] && !dn_left[i][1] && !dn_left[i][2] && !dn_left[i][3]) begin
            ncmp[i] = 1; active[i] = 0;
          end
        end
      end
      begin
        int i;
        i = $urandom_range(0, NR_INSN - 1);
        if (active[i] && by_vlsu[i] && !(clear && clear_id == i) &&
            !rd_left[i][0] && !rd_left[i][1] && !rd_left[i][2] && !rd_left[i][3] && !nrel[i] &&
            $urandom_range(0, 1)) begin
          vdone = 1; vdone_id = insn_id_t'(i); ncmp[i] = 1; active[i] = 0;
        end
      end
      @(posedge clk);
      exp_rel = nrel; exp_cmp = ncmp;
    end
    check(n_rel > 100 && n_cmp > 100, "releases and completions exercised");
    $display("releases %0d, completions %0d", n_rel, n_cmp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
