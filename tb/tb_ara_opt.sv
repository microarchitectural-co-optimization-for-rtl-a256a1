// tb_ara_opt: end-to-end testbench of the complete vector unit.
//
// The unit runs with its default configuration (4 lanes, VLEN 1024, 128-bit
// AXI, all four co-optimisations enabled) against a behavioural AXI memory.
// Instructions are injected as RVV 1.0 encodings with their scalar operands,
// as an ideal dispatcher would. The programs are strip-mined kernels:
//   1. scal  z = a * x            (N = 1024, LMUL = 8)
//   2. axpy  y = a * x + y        (N = 1024, LMUL = 8)
//   3. a chain of vsub/vand/vor/vxor/vadd/vmul on strided and unit-stride
//      loads with vl = 20 (partial last group), stored unit-stride and
//      strided (checks that bytes beyond vl are untouched)
//   4. illegal encodings (masked op, SEW = 64, indexed load)
//   5. faulting accesses (address beyond the memory top, misaligned
//      unit-stride base) and a store of the zero-filled faulting load
// Memory contents are compared with results computed here from the input
// data. Every mechanism of the design is counted through the unit's status
// counters (hazard stall, early read release, release-aware issue, operand
// forwarding, dual-source queue push, chaining wait, VRF bank conflict,
// prefetch issue and hit, address translation, exception, illegal
// instruction); a mechanism that never occurs counts as a failure. The
// sustained throughput of scal is checked against a cycle bound.
module tb_ara_opt;
  import ara_opt_pkg::*;
  `include "rvv_enc.svh"

  localparam int unsigned N  = 1024;
  localparam addr_t X_BASE   = 32'h0000_1000;
  localparam addr_t Y_BASE   = 32'h0000_2000;
  localparam addr_t Z_BASE   = 32'h0000_3000;
  localparam addr_t W_BASE   = 32'h0000_5000;
  localparam addr_t BAD_BASE = 32'h9000_0000;
  localparam logic [31:0] SENT = 32'hDEAD_BEEF;

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

  axi_mem_model #(.MEM_BEATS(8192), .LATENCY(20)) mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_i(ar),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_o(r),
    .aw_valid_i(aw_valid), .aw_ready_o(aw_ready), .aw_i(aw),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_i(w),
    .b_valid_o(b_valid), .b_ready_i(b_ready), .b_o(b)
  );

  // ---- event counters -----------------------------------------------------------
  int n_illegal = 0, n_exc = 0;
  always @(posedge clk) begin
    if (illegal) n_illegal++;
    if (exc)     n_exc++;
  end

  // watchdog
  initial begin
    repeat (100000) @(posedge clk);
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
  function automatic logic [31:0] y_of(int i);
    return 32'(i * 13) - 32'd5000;
  endfunction

  // ---- stimulus ------------------------------------------------------------------
  logic [31:0] a_sc = 32'd3;
  logic [31:0] yexp [N];
  logic [31:0] v1e [20], v2e [20], v3e [20], v4e [20], v5e [20], v6e [20],
               v7e [20], v9e [20];
  longint t0, scal_cycles, axpy_cycles;
  int unsigned rem, vlc;
  logic [31:0] s1 = 32'h00F0_0F0F, s2 = 32'h1234_5678;

  initial begin
    insn_valid = 1'b0; insn = '0; rs1 = '0; rs2 = '0;
    mem.clear_all();
    for (int i = 0; i < N; i++) begin
      mem.wr32(X_BASE + 4 * i, x_of(i));
      mem.wr32(Y_BASE + 4 * i, y_of(i));
      mem.wr32(Z_BASE + 4 * i, SENT);
    end
    for (int i = 0; i < 1024; i++) mem.wr32(W_BASE + 4 * i, SENT);
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    // 1. scal: z = a * x
    t0  = cycle;
    rem = N;
    for (int off = 0; rem > 0; off += vlc) begin
      vlc = (rem > 256) ? 256 : rem;
      issue(enc_vsetvli(5, 10, 3), rem);
      issue(enc_vle32(0, 11), X_BASE + 4 * off);
      issue(enc_opmvx(F6_MUL, 8, 0, 12), a_sc);
      issue(enc_vse32(8, 13), Z_BASE + 4 * off);
      rem -= vlc;
    end
    wait_idle();
    scal_cycles = cycle - t0 - 8;
    begin
      int bad = 0;
      for (int i = 0; i < N; i++)
        if (mem.rd32(Z_BASE + 4 * i) !== a_sc * x_of(i)) begin
          if (bad < 4) $display("  scal z[%0d] = %h, expected %h", i,
                                mem.rd32(Z_BASE + 4 * i), a_sc * x_of(i));
          bad++;
        end
      check(bad == 0, $sformatf("scal: %0d wrong elements", bad));
    end
    $display("scal N=%0d: %0d cycles", N, scal_cycles);

    // 2. axpy: y = a * x + y
    for (int i = 0; i < N; i++) yexp[i] = a_sc * x_of(i) + y_of(i);
    t0  = cycle;
    rem = N;
    for (int off = 0; rem > 0; off += vlc) begin
      vlc = (rem > 256) ? 256 : rem;
      issue(enc_vsetvli(5, 10, 3), rem);
      issue(enc_vle32(0, 11), X_BASE + 4 * off);
      issue(enc_vle32(8, 14), Y_BASE + 4 * off);
      issue(enc_opmvx(F6_MUL, 16, 0, 12), a_sc);
      issue(enc_opivv(F6_ADD, 24, 16, 8));
      issue(enc_vse32(24, 14), Y_BASE + 4 * off);
      rem -= vlc;
    end
    wait_idle();
    axpy_cycles = cycle - t0 - 8;
    begin
      int bad = 0;
      for (int i = 0; i < N; i++)
        if (mem.rd32(Y_BASE + 4 * i) !== yexp[i]) begin
          if (bad < 4) $display("  axpy y[%0d] = %h, expected %h", i,
                                mem.rd32(Y_BASE + 4 * i), yexp[i]);
          bad++;
        end
      check(bad == 0, $sformatf("axpy: %0d wrong elements", bad));
    end
    $display("axpy N=%0d: %0d cycles", N, axpy_cycles);

    // 3. dependent chain, vl = 20, LMUL = 1
    for (int i = 0; i < 20; i++) begin
      v1e[i] = x_of(2 * i);
      v2e[i] = yexp[i];
      v3e[i] = v1e[i] - v2e[i];
      v4e[i] = v3e[i] & v1e[i];
      v5e[i] = v4e[i] | s1;
      v6e[i] = v5e[i] ^ v2e[i];
      v7e[i] = v6e[i] + s2;
      v9e[i] = v7e[i] * v3e[i];
    end
    issue(enc_vsetvli(5, 10, 0), 32'd20);
    issue(enc_vlse32(1, 11, 15), X_BASE, 32'd8);
    issue(enc_vle32(2, 11), Y_BASE);
    issue(enc_opivv(F6_SUB, 3, 1, 2));
    issue(enc_opivv(F6_AND, 4, 3, 1));
    issue(enc_opivx(F6_OR, 5, 4, 12), s1);
    issue(enc_opivv(F6_XOR, 6, 5, 2));
    issue(enc_opivx(F6_ADD, 7, 6, 12), s2);
    issue(enc_opmvv(F6_MUL, 9, 7, 3));
    issue(enc_vse32(9, 13), W_BASE);
    issue(enc_vsse32(6, 13, 15), W_BASE + 32'h400, 32'd12);
    wait_idle();
    check(vl == 20, "vsetvli vl = 20");
    for (int i = 0; i < 24; i++) begin
      logic [31:0] got, exp;
      got = mem.rd32(W_BASE + 4 * i);
      exp = (i < 20) ? v9e[i] : SENT;
      check(got === exp, $sformatf("chain W[%0d] = %h, expected %h", i, got, exp));
    end
    for (int i = 0; i < 60; i++) begin
      logic [31:0] got, exp;
      got = mem.rd32(W_BASE + 32'h400 + 4 * i);
      exp = (i % 3 == 0 && i / 3 < 20) ? v6e[i / 3] : SENT;
      check(got === exp, $sformatf("strided store word %0d = %h, expected %h", i, got, exp));
    end

    // 4. illegal encodings
    issue(enc_opivv(F6_ADD, 1, 2, 3) & ~32'h0200_0000);          // masked
    issue((enc_vsetvli(5, 10, 0) & ~32'h0380_0000) | 32'h0180_0000, 32'd4); // e64
    issue(enc_vle32(1, 11) | 32'h0C00_0000, X_BASE);            // indexed
    repeat (4) @(posedge clk);
    check(n_illegal == 3, $sformatf("illegal instructions flagged: %0d", n_illegal));
    check(vl == 20, "illegal vsetvli leaves vl unchanged");

    // 5. faulting accesses
    issue(enc_vle32(10, 11), BAD_BASE);
    issue(enc_vse32(10, 13), W_BASE + 32'h800);
    issue(enc_vle32(11, 11), X_BASE + 4);                        // misaligned
    issue(enc_vse32(11, 13), W_BASE + 32'h900);
    issue(enc_vse32(9, 13), BAD_BASE);
    wait_idle();
    check(n_exc == 3, $sformatf("exceptions raised: %0d", n_exc));
    for (int i = 0; i < 20; i++) begin
      check(mem.rd32(W_BASE + 32'h800 + 4 * i) === 32'd0,
            $sformatf("faulting load element %0d is zero", i));
      check(mem.rd32(W_BASE + 32'h900 + 4 * i) === 32'd0,
            $sformatf("misaligned load element %0d is zero", i));
    end
    // work continues after the faults
    issue(enc_vle32(12, 11), X_BASE);
    issue(enc_opivx(F6_ADD, 13, 12, 12), 32'd1);
    issue(enc_vse32(13, 13), W_BASE + 32'hA00);
    wait_idle();
    for (int i = 0; i < 20; i++)
      check(mem.rd32(W_BASE + 32'hA00 + 4 * i) === x_of(i) + 1,
            $sformatf("post-fault element %0d", i));

    // ---- throughput and mechanisms -------------------------------------------------
    // scal moves 4 KiB each way over a 16-byte bus: 256 beats per direction.
    check(scal_cycles < 3 * 256, $sformatf("scal sustained throughput (%0d cycles)", scal_cycles));
    begin
      longint fwd = 0, dual = 0, chainw = 0, confl = 0, dyn = 0, alu = 0, mul = 0;
      for (int l = 0; l < NR_LANES; l++) begin
        fwd    += lstats[l].fwd;
        dual   += lstats[l].dual_push;
        chainw += lstats[l].chain_wait;
        confl  += lstats[l].conflicts;
        dyn    += lstats[l].dyn_issue;
        alu    += lstats[l].alu_busy;
        mul    += lstats[l].mul_busy;
      end
      $display("issued=%0d hazard_stall=%0d war_stall=%0d early_release=%0d",
               issued, stall_hazard, stall_war, early_release);
      $display("fwd=%0d dual_push=%0d chain_wait=%0d conflicts=%0d dyn_issue=%0d alu=%0d mul=%0d",
               fwd, dual, chainw, confl, dyn, alu, mul);
      $display("pf_issued=%0d pf_hits=%0d pf_beats=%0d ar=%0d aw=%0d translations=%0d",
               vstats.pf_issued, vstats.pf_hits, vstats.pf_beats, vstats.ar_txns,
               vstats.aw_txns, vstats.translations);
      check(stall_hazard > 0,        "mechanism: hazard stall");
      check(stall_war > 0,           "mechanism: WAR stall");
      check(early_release > 0,       "mechanism: early read release");
      check(dyn > 0,                 "mechanism: release-aware local issue");
      check(fwd > 0,                 "mechanism: operand forwarding");
      check(dual > 0,                "mechanism: dual-source queue push");
      check(chainw > 0,              "mechanism: chaining wait");
      check(confl > 0,               "mechanism: VRF bank conflict");
      check(vstats.pf_issued > 0,    "mechanism: prefetch issued");
      check(vstats.pf_hits > 0,      "mechanism: prefetch hit");
      check(vstats.pf_beats > 0,     "mechanism: prefetch beats delivered");
      check(vstats.translations > 0, "mechanism: address translation");
      check(n_exc > 0,               "mechanism: exception");
      check(n_illegal > 0,           "mechanism: illegal instruction");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
