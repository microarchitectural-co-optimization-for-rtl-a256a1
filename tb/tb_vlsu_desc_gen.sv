// tb_vlsu_desc_gen: self-checking testbench of the address-stream descriptor
// generator. Random load/store instructions (unit-stride and strided, random
// vl, base and stride) are offered under random back-pressure; each
// descriptor must carry the instruction ID, access type, mode, base, stride
// (4 for unit-stride), byte length vl*4, vl and register, in order and
// without loss or duplication.
module tb_vlsu_desc_gen;
  import ara_opt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_out = 0;

  logic   req_v, req_r, d_v, d_r;
  vinsn_t req;
  desc_t  d;

  vlsu_desc_gen dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_v), .req_ready_o(req_r), .req_i(req),
    .desc_valid_o(d_v), .desc_ready_i(d_r), .desc_o(d)
  );

  desc_t exp_q [$];

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

  always @(posedge clk) if (rst_n && d_v && d_r) begin
    desc_t e;
    n_out++;
    if (exp_q.size() == 0) check(0, "unexpected descriptor");
    else begin
      e = exp_q.pop_front();
      check(d.id == e.id && d.is_store == e.is_store && d.mode == e.mode, "descriptor kind");
      check(d.base == e.base && d.stride == e.stride, "descriptor address stream");
      check(d.nbytes == e.nbytes && d.vl == e.vl && d.vreg == e.vreg, "descriptor length / register");
      check(!d.prefetch, "demand descriptor");
    end
  end

  initial begin
    req_v = 0; req = '0; d_r = 0;
    fork forever begin @(negedge clk); d_r = $urandom_range(0, 99) < 60; end join_none
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      vinsn_t v;
      desc_t e;
      v = '0;
      v.id = insn_id_t'(t);
      v.fu = $urandom_range(0, 1) ? FU_ST : FU_LD;
      v.op = (v.fu == FU_ST) ? OP_STORE : OP_LOAD;
      v.mode = $urandom_range(0, 1) ? MODE_STRIDED : MODE_UNIT;
      v.scalar = $urandom;
      v.stride = $urandom;
      v.vl = vl_t'($urandom_range(1, 256));
      v.vd = vreg_t'($urandom_range(0, 31));
      e = '0;
      e.id = v.id; e.is_store = (v.fu == FU_ST); e.mode = v.mode; e.base = v.scalar;
      e.stride = (v.mode == MODE_UNIT) ? 32'd4 : v.stride;
      e.nbytes = 12'(v.vl * 4); e.vl = v.vl; e.vreg = v.vd;
      exp_q.push_back(e);
      @(negedge clk);
      req = v; req_v = 1;
      @(posedge clk);
      while (!req_r) @(posedge clk);
      @(negedge clk);
      req_v = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0 && n_out == 500, $sformatf("%0d descriptors out of 500", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
