// tb_ara_dispatcher: self-checking testbench of the instruction decoder,
// vector CSRs and dispatch control.
// vsetvli with random AVL and LMUL is checked against vl = min(AVL, VLMAX);
// random arithmetic and memory instructions are checked field by field on
// the decoded output (operation, unit, registers, scalar, stride, mode, vl,
// LMUL), under random back-pressure from the sequencer. Masked forms, other
// element widths, indexed accesses and unknown funct6 values must raise
// illegal_o and produce no output; instructions with vl = 0 are dropped.
module tb_ara_dispatcher;
  import ara_opt_pkg::*;
  `include "rvv_enc.svh"

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_ill = 0, n_out = 0;

  logic        in_v, in_r, out_v, out_r, illegal;
  logic [31:0] insn, rs1, rs2;
  vinsn_t      out;
  vl_t         vl;
  logic [3:0]  lmul;

  ara_dispatcher dut (
    .clk_i(clk), .rst_ni(rst_n), .insn_valid_i(in_v), .insn_ready_o(in_r), .insn_i(insn),
    .rs1_i(rs1), .rs2_i(rs2), .vinsn_valid_o(out_v), .vinsn_ready_i(out_r), .vinsn_o(out),
    .illegal_o(illegal), .vl_o(vl), .lmul_o(lmul)
  );

  vinsn_t exp_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (illegal) n_ill++;
    if (out_v && out_r) begin
      vinsn_t e;
      n_out++;
      if (exp_q.size() == 0) check(0, "unexpected decoded instruction");
      else begin
        e = exp_q.pop_front();
        check(out.op == e.op && out.fu == e.fu && out.vd == e.vd && out.vl == e.vl &&
              out.lmul == e.lmul && out.mode == e.mode,
              $sformatf("decoded fields op %0d/%0d vd %0d/%0d vl %0d/%0d", out.op, e.op,
                        out.vd, e.vd, out.vl, e.vl));
        if (e.use_vs1) check(out.use_vs1 && out.vs1 == e.vs1, "vs1 operand");
        if (e.use_vs2) check(out.use_vs2 && out.vs2 == e.vs2, "vs2 operand");
        if (e.use_scalar) check(out.use_scalar && out.scalar == e.scalar, "scalar operand");
        if (e.fu inside {FU_LD, FU_ST}) begin
          check(out.scalar === e.scalar, "memory base address");
          if (e.mode == MODE_STRIDED) check(out.stride === e.stride, "stride");
        end
      end
    end
  end

  task automatic send(logic [31:0] i, logic [31:0] a, logic [31:0] s);
    @(negedge clk);
    insn = i; rs1 = a; rs2 = s; in_v = 1;
    @(posedge clk);
    while (!in_r) @(posedge clk);
    @(negedge clk);
    in_v = 0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cur_vl, cur_lmul, exp_ill;
    in_v = 0; insn = '0; rs1 = '0; rs2 = '0; out_r = 1;
    fork forever begin @(negedge clk); out_r = $urandom_range(0, 99) < 60; end join_none
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // vl = 0 after reset: a vector instruction is dropped
    send(enc_opivv(F6_ADD, 1, 2, 3), 0, 0);
    cur_vl = 0; cur_lmul = 1; exp_ill = 0;
    for (int t = 0; t < 400; t++) begin
      int kind;
      kind = $urandom_range(0, 9);
      if (kind < 2) begin
        int lg, avl, vlmax;
        lg = $urandom_range(0, 3);
        avl = $urandom_range(0, 300);
        vlmax = (1 << lg) * 32;
        send(enc_vsetvli(5, (avl == 300) ? 0 : 10, lg), avl, 0);
        cur_lmul = 1 << lg;
        cur_vl = (avl == 300 || avl > vlmax) ? vlmax : avl;
        repeat (2) @(posedge clk);
        check(vl == cur_vl, $sformatf("vsetvli vl %0d expected %0d", vl, cur_vl));
        check(lmul == cur_lmul, "vsetvli lmul");
      end else if (kind == 9) begin
        int which;
        which = $urandom_range(0, 3);
        case (which)
          0: send(enc_opivv(F6_ADD, 1, 2, 3) & ~32'h0200_0000, 0, 0);   // masked
          1: send((enc_vsetvli(5, 10, 0) & ~32'h0380_0000) | 32'h0180_0000, 4, 0); // e64
          2: send(enc_vle32(1, 11) | 32'h0C00_0000, 0, 0);                // indexed
          default: send(enc_opivv(6'b111111, 1, 2, 3), 0, 0);             // unknown funct6
        endcase
        exp_ill++;
      end else begin
        vinsn_t e;
        int vd, v1, v2;
        logic [31:0] s, st;
        e = '0;
        vd = $urandom_range(0, 31); v1 = $urandom_range(0, 31); v2 = $urandom_range(0, 31);
        s = $urandom; st = $urandom;
        e.vd = vreg_t'(vd); e.vs1 = vreg_t'(v1); e.vs2 = vreg_t'(v2);
        e.vl = vl_t'(cur_vl); e.lmul = 4'(cur_lmul); e.mode = MODE_UNIT;
        case ($urandom_range(0, 6))
          0: begin e.op = OP_ADD; e.fu = FU_ALU; e.use_vs1 = 1; e.use_vs2 = 1; send(enc_opivv(F6_ADD, vd, v2, v1), s, st); end
          1: begin e.op = OP_SUB; e.fu = FU_ALU; e.use_scalar = 1; e.use_vs2 = 1; e.scalar = s; send(enc_opivx(F6_SUB, vd, v2, 12), s, st); end
          2: begin e.op = OP_XOR; e.fu = FU_ALU; e.use_vs1 = 1; e.use_vs2 = 1; send(enc_opivv(F6_XOR, vd, v2, v1), s, st); end
          3: begin e.op = OP_MUL; e.fu = FU_MUL; e.use_scalar = 1; e.use_vs2 = 1; e.scalar = s; send(enc_opmvx(F6_MUL, vd, v2, 12), s, st); end
          4: begin e.op = OP_LOAD; e.fu = FU_LD; e.scalar = s; send(enc_vle32(vd, 11), s, st); end
          5: begin e.op = OP_LOAD; e.fu = FU_LD; e.scalar = s; e.stride = st; e.mode = MODE_STRIDED; send(enc_vlse32(vd, 11, 15), s, st); end
          default: begin e.op = OP_STORE; e.fu = FU_ST; e.scalar = s; e.stride = st; e.mode = MODE_STRIDED; send(enc_vsse32(vd, 11, 15), s, st); end
        endcase
        if (cur_vl != 0) exp_q.push_back(e);
      end
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d decoded instructions missing", exp_q.size()));
    check(n_ill == exp_ill, $sformatf("illegal count %0d expected %0d", n_ill, exp_ill));
    $display("decoded %0d, illegal %0d", n_out, n_ill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
