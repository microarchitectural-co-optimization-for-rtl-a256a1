// tb_lane_fwd_match: self-checking testbench of the forwarding match and
// bypass select logic. Random result channels (load, ALU, MUL) and operand
// queries are applied; each query must hit exactly when a valid channel
// carries the requested VRF word address, with the data of the
// lowest-numbered matching channel.
module tb_lane_fwd_match;
  import ara_opt_pkg::*;
  localparam int unsigned NS = 3, NQ = 2;

  int checks = 0, failures = 0, hits = 0;
  logic       ch_v [NS];
  res_t       ch   [NS];
  logic       q_v  [NQ];
  vaddr_t     q_a  [NQ];
  logic       hit  [NQ];
  lane_word_t dat  [NQ];

  lane_fwd_match #(.NR_SRC(NS), .NR_Q(NQ)) dut (
    .ch_valid_i(ch_v), .ch_i(ch), .q_valid_i(q_v), .q_addr_i(q_a), .hit_o(hit), .data_o(dat)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int s = 0; s < NS; s++) begin
        ch_v[s]     = $urandom_range(0, 1);
        ch[s].id    = insn_id_t'($urandom);
        ch[s].waddr = vaddr_t'($urandom_range(0, 7));   // small range: frequent matches
        ch[s].data  = {$urandom, $urandom};
      end
      for (int q = 0; q < NQ; q++) begin
        q_v[q] = $urandom_range(0, 3) != 0;
        q_a[q] = vaddr_t'($urandom_range(0, 7));
      end
      #1;
      for (int q = 0; q < NQ; q++) begin
        bit exp_hit;
        lane_word_t exp_d;
        exp_hit = 0;
        exp_d   = '0;
        for (int s = 0; s < NS; s++)
          if (!exp_hit && q_v[q] && ch_v[s] && ch[s].waddr == q_a[q]) begin
            exp_hit = 1;
            exp_d   = ch[s].data;
          end
        check(hit[q] === exp_hit, $sformatf("query %0d hit %0b expected %0b", q, hit[q], exp_hit));
        if (exp_hit) begin
          hits++;
          check(dat[q] === exp_d, $sformatf("query %0d data", q));
        end
      end
    end
    check(hits > 100, "enough forwarding hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
