// tb_lane_vrf: self-checking testbench of the 8-bank lane VRF slice.
// The whole slice is first written through both write ports; then random
// mixes of writes and reads are applied. A reference model checks the
// arbiter (writes first in port order, then reads, one access per bank and
// cycle, conflict_o when a request loses its bank), the one-cycle read
// latency through the crossbar and the stored data.
module tb_lane_vrf;
  import ara_opt_pkg::*;
  localparam int unsigned NW = 2, NR = 2, WORDS = VRF_WORDS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_conf = 0, n_reads = 0;

  logic       wreq [NW], wgnt [NW], rreq [NR], rgnt [NR], rvalid [NR], conflict;
  vaddr_t     waddr [NW], raddr [NR];
  lane_word_t wdata [NW], rdata [NR];

  lane_vrf #(.NR_RD(NR), .NR_WR(NW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wreq_i(wreq), .waddr_i(waddr), .wdata_i(wdata), .wgnt_o(wgnt),
    .rreq_i(rreq), .raddr_i(raddr), .rgnt_o(rgnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .conflict_o(conflict)
  );

  lane_word_t mem [WORDS];
  lane_word_t exp_rd [NR];
  bit         exp_rv [NR];

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
    for (int p = 0; p < NW; p++) begin wreq[p] = 0; waddr[p] = '0; wdata[p] = '0; end
    for (int p = 0; p < NR; p++) begin rreq[p] = 0; raddr[p] = '0; exp_rv[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // fill: two words per cycle, in different banks
    for (int a = 0; a < WORDS; a += 2) begin
      @(negedge clk);
      for (int p = 0; p < NW; p++) begin
        wreq[p] = 1; waddr[p] = vaddr_t'(a + p); wdata[p] = {$urandom, $urandom};
        mem[a + p] = wdata[p];
      end
      #1;
      for (int p = 0; p < NW; p++) check(wgnt[p] === 1'b1, "fill write granted");
    end
    @(negedge clk);
    for (int p = 0; p < NW; p++) wreq[p] = 0;
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      bit taken [NR_BANKS];
      bit egw [NW], egr [NR], econf;
      @(negedge clk);
      for (int p = 0; p < NR; p++) if (exp_rv[p]) begin
        check(rvalid[p] === 1'b1, "read valid one cycle after grant");
        check(rdata[p] === exp_rd[p], $sformatf("read data port %0d", p));
      end else check(rvalid[p] === 1'b0, "no read valid without grant");
      for (int p = 0; p < NW; p++) begin
        wreq[p] = $urandom_range(0, 99) < 40; waddr[p] = vaddr_t'($urandom_range(0, WORDS - 1));
        wdata[p] = {$urandom, $urandom};
      end
      for (int p = 0; p < NR; p++) begin
        rreq[p] = $urandom_range(0, 99) < 70; raddr[p] = vaddr_t'($urandom_range(0, WORDS - 1));
      end
      for (int b = 0; b < NR_BANKS; b++) taken[b] = 0;
      econf = 0;
      for (int p = 0; p < NW; p++) begin
        egw[p] = wreq[p] && !taken[waddr[p] % NR_BANKS];
        if (egw[p]) taken[waddr[p] % NR_BANKS] = 1; else if (wreq[p]) econf = 1;
      end
      for (int p = 0; p < NR; p++) begin
        egr[p] = rreq[p] && !taken[raddr[p] % NR_BANKS];
        if (egr[p]) taken[raddr[p] % NR_BANKS] = 1; else if (rreq[p]) econf = 1;
      end
      #1;
      for (int p = 0; p < NW; p++) check(wgnt[p] === egw[p], "write grant");
      for (int p = 0; p < NR; p++) check(rgnt[p] === egr[p], "read grant");
      check(conflict === econf, "conflict flag");
      if (econf) n_conf++;
      @(posedge clk);
      for (int p = 0; p < NR; p++) begin
        exp_rv[p] = egr[p];
        if (egr[p]) begin exp_rd[p] = mem[raddr[p]]; n_reads++; end
      end
      for (int p = 0; p < NW; p++) if (egw[p]) mem[waddr[p]] = wdata[p];
    end
    check(n_conf > 0, "bank conflicts exercised");
    $display("reads %0d, conflict cycles %0d", n_reads, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
