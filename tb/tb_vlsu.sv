// tb_vlsu: self-checking testbench of the vector load/store unit with its
// descriptor front end, address generation, transaction queues and issuer,
// next-VL prefetch, VLDU and VSTU, against a behavioural AXI memory with
// random back-pressure.
// A random program of unit-stride and strided loads and stores (random vl,
// base, stride) is issued, with many loads continuing the previous
// unit-stride stream so that next-VL prefetches hit, loads that overlap
// earlier stores (ordering), and a few accesses beyond the memory top
// (exceptions). A shadow memory updated in program order gives the expected
// load rows (checked element by element in order) and the final memory
// contents. Store completion is checked by ID. Prefetch issue, prefetch
// hits, translations and exceptions must each occur.
module tb_vlsu;
  import ara_opt_pkg::*;

  localparam int unsigned MEMB = 8192;               // 128 KiB model
  localparam addr_t       BAD  = 32'h9000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        req_v, req_r;
  vinsn_t      req;
  logic        ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready;
  logic        w_valid, w_ready, b_valid, b_ready;
  axi_ax_t     ar, aw;
  axi_r_t      r;
  axi_w_t      w;
  axi_b_t      b;
  logic        ld_v, ld_r, st_pop, st_done, exc;
  ld_row_t     ld;
  logic [NR_LANES-1:0] st_v;
  lane_word_t  st_d [NR_LANES];
  insn_id_t    st_done_id, exc_id;
  vlsu_stats_t stats;

  vlsu dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_v), .req_ready_o(req_r), .req_i(req),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_o(ar),
    .r_valid_i(r_valid), .r_ready_o(r_ready), .r_i(r),
    .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_o(aw),
    .w_valid_o(w_valid), .w_ready_i(w_ready), .w_o(w),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_i(b),
    .ld_valid_o(ld_v), .ld_ready_i(ld_r), .ld_o(ld),
    .st_valid_i(st_v), .st_data_i(st_d), .st_pop_o(st_pop),
    .st_done_o(st_done), .st_done_id_o(st_done_id), .exc_o(exc), .exc_id_o(exc_id),
    .stats_o(stats)
  );

  axi_mem_model #(.MEM_BEATS(MEMB), .LATENCY(12), .STALL_PCT(15)) mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_i(ar),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_o(r),
    .aw_valid_i(aw_valid), .aw_ready_o(aw_ready), .aw_i(aw),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_i(w),
    .b_valid_o(b_valid), .b_ready_i(b_ready), .b_o(b)
  );

  // expected load rows (with a mask of elements that must match)
  typedef struct { insn_id_t id; vaddr_t waddr; logic [DLEN-1:0] data; logic [7:0] mask; int t; } erow_t;
  erow_t exp_rows [$];
  lane_word_t st_q [NR_LANES][$];
  logic [31:0] shadow [int];
  bit st_busy [NR_INSN];
  int n_rows = 0, n_st_done = 0, n_st = 0, n_exc = 0, exp_exc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // lanes: accept rows at random, supply store words
  always_comb for (int l = 0; l < NR_LANES; l++) begin
    st_v[l] = st_q[l].size() != 0;
    st_d[l] = st_v[l] ? st_q[l][0] : '0;
  end
  always @(negedge clk) ld_r <= $urandom_range(0, 99) < 80;
  always @(posedge clk) if (rst_n) begin
    if (st_pop) for (int l = 0; l < NR_LANES; l++) void'(st_q[l].pop_front());
    if (ld_v && ld_r) begin
      erow_t e;
      n_rows++;
      if (exp_rows.size() == 0) check(0, "unexpected load row");
      else begin
        e = exp_rows.pop_front();
        check(ld.id == e.id && ld.waddr == e.waddr, $sformatf("row id/address %0d/%0d vs %0d/%0d",
              ld.id, ld.waddr, e.id, e.waddr));
        for (int k = 0; k < 8; k++) if (e.mask[k])
          check(ld.data[32*k +: 32] === e.data[32*k +: 32],
                $sformatf("row %0d (instruction %0d) element %0d: %h vs %h", n_rows, e.t, k, ld.data[32*k +: 32], e.data[32*k +: 32]));
      end
    end
    if (st_done) begin
      check(st_busy[st_done_id], "store done for a store in flight");
      st_busy[st_done_id] = 0;
      n_st_done++;
    end
    if (exc) n_exc++;
  end

  function automatic logic [31:0] sh(addr_t a);
    return shadow.exists(int'(a)) ? shadow[int'(a)] : 32'h0;
  endfunction

  task automatic send(vinsn_t v);
    @(negedge clk);
    req = v; req_v = 1;
    @(posedge clk);
    while (!req_r) @(posedge clk);
    @(negedge clk);
    req_v = 0;
  endtask

  initial begin
    addr_t stream_next;
    int    stream_vl;
    req_v = 0; req = '0;
    for (int i = 0; i < NR_INSN; i++) st_busy[i] = 0;
    mem.clear_all();
    for (int a = 0; a < 32'h10000; a += 4) begin
      logic [31:0] d;
      d = $urandom;
      mem.wr32(a, d);
      shadow[a] = d;
    end
    stream_next = 32'h100; stream_vl = 64;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 160; t++) begin
      vinsn_t v;
      int kind, id, nelem;
      bit bad;
      kind = $urandom_range(0, 9);
      id = t % NR_INSN;
      while (st_busy[id]) @(posedge clk);       // an ID is reused only when free
      v = '0;
      v.id = insn_id_t'(id);
      v.vd = vreg_t'($urandom_range(0, 3) * 8);
      bad = ($urandom_range(0, 29) == 0);
      if (kind < 4) begin                         // unit-stride load continuing a stream
        v.mode = MODE_UNIT; v.scalar = stream_next; v.vl = vl_t'(stream_vl);
        stream_next += 4 * stream_vl;
        if (stream_next > 32'hE000) begin
          stream_next = addr_t'($urandom_range(0, 32'h800) * 16);
          stream_vl = 8 * $urandom_range(1, 32);
        end
      end else if (kind < 6) begin                // random load
        v.mode = $urandom_range(0, 1) ? MODE_STRIDED : MODE_UNIT;
        v.vl = vl_t'($urandom_range(1, 256));
        v.stride = 4 * $urandom_range(1, 16);
        v.scalar = addr_t'($urandom_range(0, 32'h800) * 16);
      end else begin                              // store
        v.mode = $urandom_range(0, 1) ? MODE_STRIDED : MODE_UNIT;
        v.vl = vl_t'($urandom_range(1, 256));
        v.stride = 4 * $urandom_range(1, 16);
        v.scalar = addr_t'($urandom_range(0, 32'h600) * 16);
      end
      if (v.mode == MODE_UNIT) v.stride = 4;
      if (bad) v.scalar = BAD;
      v.fu = (kind < 6) ? FU_LD : FU_ST;
      v.op = (kind < 6) ? OP_LOAD : OP_STORE;
      nelem = v.vl;
      if (bad) exp_exc++;
      if (v.fu == FU_LD) begin
        for (int g = 0; g < (nelem + 7) / 8; g++) begin
          erow_t e;
          e.id = v.id; e.waddr = vaddr_t'(v.vd) * vaddr_t'(GRP_PER_REG) + vaddr_t'(g);
          e.data = '0; e.mask = '0; e.t = t;
          for (int k = 0; k < 8; k++) if (8 * g + k < nelem) begin
            e.mask[k] = 1'b1;
            e.data[32*k +: 32] = bad ? 32'h0 : sh(v.scalar + v.stride * (8 * g + k));
          end
          exp_rows.push_back(e);
        end
      end else begin
        logic [31:0] el [256];
        for (int k = 0; k < 256; k++) el[k] = $urandom;
        for (int g = 0; g < (nelem + 7) / 8; g++)
          for (int l = 0; l < NR_LANES; l++) st_q[l].push_back({el[8*g + 2*l + 1], el[8*g + 2*l]});
        if (!bad) for (int k = 0; k < nelem; k++) shadow[int'(v.scalar + v.stride * k)] = el[k];
        st_busy[id] = 1;
        n_st++;
      end
      send(v);
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    while (exp_rows.size() != 0 || n_st_done < n_st) @(posedge clk);
    repeat (20) @(posedge clk);
    begin
      int bad_words = 0;
      for (int a = 0; a < 32'h10000; a += 4)
        if (mem.rd32(a) !== shadow[a]) begin
          if (bad_words < 4) $display("  mem[%h] = %h, expected %h", a, mem.rd32(a), shadow[a]);
          bad_words++;
        end
      check(bad_words == 0, $sformatf("final memory: %0d wrong words", bad_words));
    end
    check(n_exc == exp_exc, $sformatf("exceptions %0d expected %0d", n_exc, exp_exc));
    check(exp_exc > 0, "exceptions exercised");
    check(stats.pf_issued > 0, "prefetches issued");
    check(stats.pf_hits > 0, "prefetch hits");
    check(stats.translations > 0, "translations");
    $display("rows %0d stores %0d pf_issued %0d pf_hits %0d ar %0d aw %0d", n_rows, n_st_done,
             stats.pf_issued, stats.pf_hits, stats.ar_txns, stats.aw_txns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
