// tb_vlsu_mmu: self-checking testbench of the VLSU translation unit.
// Translation requests must answer exactly LATENCY cycles later with the
// page of the requested address (bare translation), with busy_o high in
// between; a flush cancels a pending translation. The access check must
// flag misaligned bases, accesses at or above the memory top and
// wrapping ranges.
module tb_vlsu_mmu;
  import ara_opt_pkg::*;
  localparam int unsigned LAT = 2;
  localparam logic [31:0] TOP = 32'h8000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, busy, rsp, flush, fault;
  addr_t vpage, ppage, base;
  logic [31:0] last;

  vlsu_mmu #(.LATENCY(LAT), .MEM_TOP(TOP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .vpage_i(vpage), .busy_o(busy),
    .rsp_valid_o(rsp), .ppage_o(ppage), .flush_i(flush), .chk_base_i(base),
    .chk_last_i(last), .chk_fault_o(fault)
  );

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
    req = 0; flush = 0; vpage = '0; base = '0; last = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      addr_t a;
      bit do_flush;
      a = addr_t'($urandom);
      do_flush = ($urandom_range(0, 9) == 0);
      @(negedge clk);
      check(!busy, "idle before request");
      req = 1; vpage = a;
      @(negedge clk);
      req = 0;
      for (int c = 1; c <= LAT; c++) begin
        if (do_flush && c == 1) begin
          flush = 1;
          @(negedge clk);
          flush = 0;
          check(!rsp, "no response after flush");
          break;
        end
        check(c == 1 ? busy : 1'b1, "busy while translating");
        check(!rsp, "no early response");
        @(negedge clk);
      end
      if (!do_flush) begin
        check(rsp, $sformatf("response after %0d cycles", LAT));
        check(ppage === {a[31:12], 12'h000}, "physical page");
      end
      // access check
      base = addr_t'($urandom) & ~32'h3;
      last = base + $urandom_range(0, 8192);
      if ($urandom_range(0, 4) == 0) base[1:0] = 2'($urandom_range(1, 3));
      #1;
      check(fault === (base[1:0] != 0 || base >= TOP || last >= TOP || last < base),
            $sformatf("fault check base %h last %h", base, last));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
