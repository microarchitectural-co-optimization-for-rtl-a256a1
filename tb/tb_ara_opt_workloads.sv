// tb_ara_opt_workloads: workload-level testbench of the complete vector unit.
//
// Runs, on the default configuration and a behavioural AXI memory with a
// 20-cycle read latency, the kernels whose problem sizes the evaluation uses
// and that the implemented instruction subset can express:
//   1. scal z = a * x for N = 512, 1024 and 2048 (problem-size sweep),
//      strip-mined with LMUL = 8 (256 elements per strip)
//   2. ger A = A + x * y^T on a 128 x 128 matrix of 32-bit integers,
//      one row per strip with LMUL = 4 (vl = 128): vle of the row, vmul.vx of
//      y by x[i], vadd.vv and vse of the row, alternating two register sets
//   3. gemm C = C + A * B on 32 x 32 integer matrices (LMUL = 1, vl = 32):
//      for each row of C, 32 steps of vle of a row of B, vmul.vx by an
//      element of A and vadd.vv into the accumulator register
// Integer multiply stands in for the single-precision arithmetic of the
// original kernels. Results are compared element by element with values
// computed here; cycle counts are reported together with the memory bound
// (bytes read / 16 bytes per cycle; reads and writes use separate AXI
// channels) and checked against a loose limit of three times that bound.
module tb_ara_opt_workloads;
  import ara_opt_pkg::*;
  `include "rvv_enc.svh"

  localparam addr_t X_BASE   = 32'h0000_1000;
  localparam addr_t Z_BASE   = 32'h0000_4000;
  localparam addr_t GX_BASE  = 32'h0000_8000;
  localparam addr_t GY_BASE  = 32'h0000_8400;
  localparam addr_t A_BASE   = 32'h0001_0000;
  localparam int unsigned M  = 128;
  localparam int unsigned G  = 32;
  localparam addr_t GA_BASE  = 32'h0000_9000;
  localparam addr_t GB_BASE  = 32'h0000_A000;
  localparam addr_t GC_BASE  = 32'h0000_B000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- DUT and memory ---------------------------------------------------------
  logic        insn_valid, insn_ready;
  logic [31:0] insn, rs1, rs2;
  logic        ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready;
  logic        w_valid, w_ready, b_valid, b_ready;
  axi_ax_t     ar, aw;
  axi_r_t      r;
  axi_w_t      w;
  axi_b_t      b;
  logic        idle, illegal, exc;
  insn_id_t    exc_id;
  vl_t         vl;
  logic [31:0] issued, stall_hazard, stall_war, early_release;
  lane_stats_t lstats [NR_LANES];
  vlsu_stats_t vstats;

  ara_opt dut (
    .clk_i(clk), .rst_ni(rst_n),
    .insn_valid_i(insn_valid), .insn_ready_o(insn_ready), .insn_i(insn),
    .rs1_i(rs1), .rs2_i(rs2),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_o(ar),
    .r_valid_i(r_valid), .r_ready_o(r_ready), .r_i(r),
    .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_o(aw),
    .w_valid_o(w_valid), .w_ready_i(w_ready), .w_o(w),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_i(b),
    .idle_o(idle), .illegal_o(illegal), .exc_o(exc), .exc_id_o(exc_id),
    .vl_o(vl), .issued_o(issued), .stall_hazard_o(stall_hazard),
    .stall_war_o(stall_war), .early_release_o(early_release),
    .lane_stats_o(lstats), .vlsu_stats_o(vstats)
  );

  axi_mem_model #(.MEM_BEATS(16384), .LATENCY(20)) mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_i(ar),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_o(r),
    .aw_valid_i(aw_valid), .aw_ready_o(aw_ready), .aw_i(aw),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_i(w),
    .b_valid_o(b_valid), .b_ready_i(b_ready), .b_o(b)
  );

  logic illegal_seen = 1'b0, exc_seen = 1'b0;
  always @(posedge clk) begin
    if (illegal) illegal_seen <= 1'b1;
    if (exc)     exc_seen <= 1'b1;
  end

  // watchdog
  initial begin
    repeat (300000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- helpers -------------------------------------------------------------------
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // drives an instruction from mid-cycle, samples ready just before the
  // edge that transfers it and withdraws it just after that edge
  task automatic issue(logic [31:0] i, logic [31:0] a = '0, logic [31:0] s = '0);
    @(negedge clk);
    insn       = i;
    rs1        = a;
    rs2        = s;
    insn_valid = 1'b1;
    #4;
    while (!insn_ready) begin
      @(negedge clk); #4;
    end
    @(posedge clk); #1;
    insn_valid = 1'b0;
  endtask

  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 8) begin
      @(posedge clk);
      quiet = idle ? quiet + 1 : 0;
    end
  endtask

  function automatic logic [31:0] x_of(int i);
    return 32'(i * 7 + 3) ^ 32'h0001_0000;
  endfunction
  function automatic logic [31:0] a_of(int i, int j);
    return 32'(i * 1000 + j * 3) ^ 32'h5A5A_0000;
  endfunction

  task automatic run_scal(int unsigned n, logic [31:0] a_sc);
    longint t0, cyc;
    int unsigned rem, vlc;
    int bad = 0;
    for (int i = 0; i < n; i++) mem.wr32(Z_BASE + 4 * i, 32'hDEAD_BEEF);
    mem.wr32(Z_BASE + 4 * n, 32'hDEAD_BEEF);
    t0  = cycle;
    rem = n;
    for (int off = 0; rem > 0; off += vlc) begin
      vlc = (rem > 256) ? 256 : rem;
      issue(enc_vsetvli(5, 10, 3), rem);
      issue(enc_vle32(0, 11), X_BASE + 4 * off);
      issue(enc_opmvx(F6_MUL, 8, 0, 12), a_sc);
      issue(enc_vse32(8, 13), Z_BASE + 4 * off);
      rem -= vlc;
    end
    wait_idle();
    cyc = cycle - t0 - 8;
    for (int i = 0; i < n; i++)
      if (mem.rd32(Z_BASE + 4 * i) !== a_sc * x_of(i)) begin
        if (bad < 4) $display("  scal N=%0d z[%0d] = %h, expected %h", n, i,
                              mem.rd32(Z_BASE + 4 * i), a_sc * x_of(i));
        bad++;
      end
    check(bad == 0, $sformatf("scal N=%0d: %0d wrong elements", n, bad));
    check(mem.rd32(Z_BASE + 4 * n) === 32'hDEAD_BEEF, $sformatf("scal N=%0d: word after z overwritten", n));
    $display("scal N=%0d: %0d cycles, memory bound %0d", n, cyc, n * 4 / 16);
    check(cyc < 3 * n * 4 / 16, $sformatf("scal N=%0d: %0d cycles exceeds three times the bound", n, cyc));
  endtask

  initial begin
    insn_valid = 1'b0; insn = '0; rs1 = '0; rs2 = '0;
    mem.clear_all();
    for (int i = 0; i < 2048; i++) mem.wr32(X_BASE + 4 * i, x_of(i));
    for (int i = 0; i < M; i++) begin
      mem.wr32(GX_BASE + 4 * i, 32'(i * 5 + 1));
      mem.wr32(GY_BASE + 4 * i, 32'(i * 11) - 32'd300);
      for (int j = 0; j < M; j++) mem.wr32(A_BASE + 4 * (M * i + j), a_of(i, j));
    end
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    // 1. scal size sweep
    run_scal(512, 32'd3);
    run_scal(1024, 32'd7);
    run_scal(2048, 32'hFFFF_FFFD);

    // 2. ger 128 x 128
    begin
      longint t0, cyc;
      int bad = 0;
      int o;
      t0 = cycle;
      issue(enc_vsetvli(5, 10, 2), M);
      issue(enc_vle32(0, 11), GY_BASE);
      for (int i = 0; i < M; i++) begin
        o = (i % 2) * 4;
        issue(enc_vle32(8 + o, 11), A_BASE + 4 * M * i);
        issue(enc_opmvx(F6_MUL, 16 + o, 0, 12), 32'(i * 5 + 1));
        issue(enc_opivv(F6_ADD, 24 + o, 16 + o, 8 + o));
        issue(enc_vse32(24 + o, 13), A_BASE + 4 * M * i);
      end
      wait_idle();
      cyc = cycle - t0 - 8;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++) begin
          logic [31:0] e;
          e = a_of(i, j) + 32'(i * 5 + 1) * (32'(j * 11) - 32'd300);
          if (mem.rd32(A_BASE + 4 * (M * i + j)) !== e) begin
            if (bad < 4) $display("  ger A[%0d][%0d] = %h, expected %h", i, j,
                                  mem.rd32(A_BASE + 4 * (M * i + j)), e);
            bad++;
          end
        end
      check(bad == 0, $sformatf("ger: %0d wrong elements", bad));
      $display("ger 128x128: %0d cycles, memory bound %0d", cyc, M * M * 4 / 16);
      check(cyc < 3 * M * M * 4 / 16, $sformatf("ger: %0d cycles exceeds three times the bound", cyc));
    end

    // 3. gemm 32 x 32: C = C + A * B, one row of C per outer step
    begin
      longint t0, cyc;
      int bad = 0;
      int o;
      logic [31:0] e;
      for (int i = 0; i < G; i++)
        for (int j = 0; j < G; j++) begin
          mem.wr32(GA_BASE + 4 * (G * i + j), 32'(i * 3 + j) - 32'd40);
          mem.wr32(GB_BASE + 4 * (G * i + j), 32'(i * j) ^ 32'h0000_0155);
          mem.wr32(GC_BASE + 4 * (G * i + j), 32'(i + j * 17));
        end
      t0 = cycle;
      issue(enc_vsetvli(5, 10, 0), G);
      for (int i = 0; i < G; i++) begin
        issue(enc_vle32(1, 11), GC_BASE + 4 * G * i);
        for (int k = 0; k < G; k++) begin
          o = (k % 2) * 4;
          issue(enc_vle32(8 + o, 11), GB_BASE + 4 * G * k);
          issue(enc_opmvx(F6_MUL, 16 + o, 8 + o, 12), 32'(i * 3 + k) - 32'd40);
          issue(enc_opivv(F6_ADD, 1, 16 + o, 1));
        end
        issue(enc_vse32(1, 13), GC_BASE + 4 * G * i);
      end
      wait_idle();
      cyc = cycle - t0 - 8;
      for (int i = 0; i < G; i++)
        for (int j = 0; j < G; j++) begin
          e = 32'(i + j * 17);
          for (int k = 0; k < G; k++) e += (32'(i * 3 + k) - 32'd40) * (32'(k * j) ^ 32'h0000_0155);
          if (mem.rd32(GC_BASE + 4 * (G * i + j)) !== e) begin
            if (bad < 4) $display("  gemm C[%0d][%0d] = %h, expected %h", i, j,
                                  mem.rd32(GC_BASE + 4 * (G * i + j)), e);
            bad++;
          end
        end
      check(bad == 0, $sformatf("gemm: %0d wrong elements", bad));
      $display("gemm 32x32: %0d cycles, %0d multiply-adds of %0d elements", cyc, G * G, G);
    end

    check(!illegal_seen, "no illegal instruction reported");
    check(!exc_seen, "no exception reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
