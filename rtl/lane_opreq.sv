// lane_opreq: operand requester of a lane, with chaining, forwarding use
// and read-done reporting.
//
// The requester works on one instruction at a time and fetches its source
// operands element group by element group (one 64-bit lane word per group):
//   operand A: vs2 (arithmetic) or the store data register (stores)
//   operand B: vs1, or the scalar replicated to both 32-bit elements (.vx)
// Each operand goes to its own operand queue (NQ queues; which one depends
// on the functional unit). For group g of a vector source at word address
// src*GRP_PER_REG + g the requester, each cycle,
//   1. needs a free queue entry, after subtracting VRF reads still in flight;
//   2. if the word is already written (written_i), asks the VRF for it; the
//      data returns one cycle after the grant and is pushed to the queue;
//   3. otherwise (FORWARDING = 1) raises a forwarding query; if a producer's
//      result for that word appears on a result channel this cycle, the word
//      is pushed straight into the queue and the VRF re-read is skipped;
//   4. otherwise waits: this is element-group chaining on a producer that is
//      still running.
// Both operands may advance in the same cycle. As the slower operand
// passes group g, the destination word vd*GRP_PER_REG + g is marked
// not-written (clear_o) so that later consumers chain on this instruction.
// last_fire_o is high in the cycle the final request of the instruction is
// granted; busy_o stays high until then. A new instruction is taken whenever
// insn_valid_i is high (the lane sequencer decides when). One cycle after
// the last request rd_done_o reports the instruction's ID: all its source
// operands are then in the operand queues.
// Chaining on element groups and forwarding into the queues follow the
// paper; the two-operand organisation and the readiness bitmap are this
// design's own.
module lane_opreq
  import ara_opt_pkg::*;
#(
  parameter bit          FORWARDING = 1'b1,
  parameter int unsigned NQ         = 5,
  parameter int unsigned QW         = 3   // width of a queue free count
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          insn_valid_i,
  input  vinsn_t        insn_i,
  input  logic [2:0]    tq_a_i,          // target queue of operand A
  input  logic [2:0]    tq_b_i,          // target queue of operand B
  output logic          busy_o,
  output logic          last_fire_o,
  // operand queues
  input  logic [QW-1:0] q_free_i   [NQ],
  output logic          q_vrf_valid_o [NQ],
  output lane_word_t    q_vrf_data_o  [NQ],
  output logic          q_fwd_valid_o [NQ],
  output lane_word_t    q_fwd_data_o  [NQ],
  input  logic          q_fwd_accept_i[NQ],
  // VRF read ports (0: operand A, 1: operand B)
  output logic          rreq_o   [2],
  output vaddr_t        raddr_o  [2],
  input  logic          rgnt_i   [2],
  input  logic          rvalid_i [2],
  input  lane_word_t    rdata_i  [2],
  // forwarding queries
  output logic          fq_valid_o [2],
  output vaddr_t        fq_addr_o  [2],
  input  logic          fq_hit_i   [2],
  input  lane_word_t    fq_data_i  [2],
  // chaining status
  input  logic [VRF_WORDS-1:0] written_i,
  output logic          clear_o,
  output vaddr_t        clear_addr_o,
  // read-done
  output logic          rd_done_o,
  output insn_id_t      rd_done_id_o,
  // statistics
  output logic [31:0]   fwd_cnt_o,
  output logic [31:0]   vrd_cnt_o,
  output logic [31:0]   chain_wait_o
);
  logic       busy_q;
  vinsn_t     insn_q;
  grp_cnt_t   ng_q;
  grp_cnt_t   g_q   [2];
  logic [2:0] tq_q  [2];
  logic       use_q [2];
  logic       scal_b_q;
  vaddr_t     base_q[2];
  // VRF reads in flight (issued last cycle) and their target queues
  logic       rinf_q [2];
  logic [2:0] rtq_q  [2];

  logic       fire   [2];
  logic       need   [2];
  logic       fwd_do [2];
  vaddr_t     addr   [2];
  grp_cnt_t   g_n    [2];
  logic       waiting;

  function automatic int credit(input logic [2:0] q, input logic [QW-1:0] fr,
                                input logic i0, input logic [2:0] t0,
                                input logic i1, input logic [2:0] t1);
    return int'(fr) - ((i0 && t0 == q) ? 1 : 0) - ((i1 && t1 == q) ? 1 : 0);
  endfunction

  // request phase: what each operand asks for this cycle
  logic want_fwd [2];   // forwarding query (or scalar) would feed the queue
  logic want_scal[2];
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rreq_o[p]     = 1'b0;
      fq_valid_o[p] = 1'b0;
      want_scal[p]  = 1'b0;
      need[p]       = busy_q && use_q[p] && (g_q[p] < ng_q);
      addr[p]       = base_q[p] + vaddr_t'(g_q[p]);
      raddr_o[p]    = addr[p];
      fq_addr_o[p]  = addr[p];
      if (need[p] && credit(tq_q[p], q_free_i[tq_q[p]], rinf_q[0], rtq_q[0], rinf_q[1], rtq_q[1]) >= 1) begin
        if (p == 1 && scal_b_q)       want_scal[p]  = 1'b1;
        else if (written_i[addr[p]])  rreq_o[p]     = 1'b1;
        else if (FORWARDING)          fq_valid_o[p] = 1'b1;
      end
    end
  end

  // push phase: forwarded / scalar words and returning VRF reads
  always_comb begin
    waiting = 1'b0;
    for (int p = 0; p < 2; p++) begin
      fwd_do[p] = want_scal[p] || (fq_valid_o[p] && fq_hit_i[p]);
      if (need[p] && !rreq_o[p] && !fwd_do[p] && !(p == 1 && scal_b_q)) waiting = 1'b1;
    end
    for (int q = 0; q < NQ; q++) begin
      q_fwd_valid_o[q] = 1'b0;
      q_fwd_data_o[q]  = '0;
      q_vrf_valid_o[q] = 1'b0;
      q_vrf_data_o[q]  = '0;
      for (int p = 0; p < 2; p++) begin
        if (fwd_do[p] && tq_q[p] == 3'(q)) begin
          q_fwd_valid_o[q] = 1'b1;
          q_fwd_data_o[q]  = want_scal[p] ? {insn_q.scalar, insn_q.scalar} : fq_data_i[p];
        end
        if (rinf_q[p] && rvalid_i[p] && rtq_q[p] == 3'(q)) begin
          q_vrf_valid_o[q] = 1'b1;
          q_vrf_data_o[q]  = rdata_i[p];
        end
      end
    end
  end

  // grant phase
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      fire[p] = (rreq_o[p] && rgnt_i[p]) || (fwd_do[p] && q_fwd_accept_i[tq_q[p]]);
      g_n[p]  = g_q[p] + (fire[p] ? 1'b1 : 1'b0);
    end
  end

  assign last_fire_o = busy_q && (fire[0] || fire[1]) &&
                       (!use_q[0] || g_n[0] >= ng_q) && (!use_q[1] || g_n[1] >= ng_q);
  assign busy_o = busy_q;

  // destination clear as the slower operand passes a group
  always_comb begin
    grp_cnt_t gmin_q, gmin_n;
    gmin_q = use_q[1] ? ((g_q[0] < g_q[1]) ? g_q[0] : g_q[1]) : g_q[0];
    gmin_n = use_q[1] ? ((g_n[0] < g_n[1]) ? g_n[0] : g_n[1]) : g_n[0];
    clear_o      = busy_q && (insn_q.fu != FU_ST) && (gmin_n > gmin_q);
    clear_addr_o = vaddr_t'(insn_q.vd) * vaddr_t'(GRP_PER_REG) + vaddr_t'(gmin_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q   <= 1'b0;
      insn_q   <= '0;
      ng_q     <= '0;
      scal_b_q <= 1'b0;
      for (int p = 0; p < 2; p++) begin
        g_q[p]    <= '0;
        tq_q[p]   <= '0;
        use_q[p]  <= 1'b0;
        base_q[p] <= '0;
        rinf_q[p] <= 1'b0;
        rtq_q[p]  <= '0;
      end
      rd_done_o    <= 1'b0;
      rd_done_id_o <= '0;
      fwd_cnt_o    <= '0;
      vrd_cnt_o    <= '0;
      chain_wait_o <= '0;
    end else begin
      for (int p = 0; p < 2; p++) begin
        g_q[p]    <= g_n[p];
        rinf_q[p] <= rreq_o[p] && rgnt_i[p];
        if (rreq_o[p] && rgnt_i[p]) rtq_q[p] <= tq_q[p];
      end
      rd_done_o    <= last_fire_o;
      rd_done_id_o <= insn_q.id;
      if (last_fire_o) busy_q <= 1'b0;
      if (insn_valid_i) begin
        busy_q    <= 1'b1;
        insn_q    <= insn_i;
        ng_q      <= groups_of(insn_i.vl);
        g_q[0]    <= '0;
        g_q[1]    <= '0;
        tq_q[0]   <= tq_a_i;
        tq_q[1]   <= tq_b_i;
        use_q[0]  <= 1'b1;
        use_q[1]  <= (insn_i.fu == FU_ALU || insn_i.fu == FU_MUL);
        scal_b_q  <= insn_i.use_scalar;
        base_q[0] <= vaddr_t'((insn_i.fu == FU_ST) ? insn_i.vd : insn_i.vs2) * vaddr_t'(GRP_PER_REG);
        base_q[1] <= vaddr_t'(insn_i.vs1) * vaddr_t'(GRP_PER_REG);
      end
      fwd_cnt_o    <= fwd_cnt_o + 32'(fwd_do[0] && fire[0])
                                + 32'(fwd_do[1] && fire[1] && !scal_b_q);
      vrd_cnt_o    <= vrd_cnt_o + 32'(rreq_o[0] && rgnt_i[0]) + 32'(rreq_o[1] && rgnt_i[1]);
      if (waiting) chain_wait_o <= chain_wait_o + 1;
    end
  end

  a_no_overlap: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 insn_valid_i |-> (!busy_q || last_fire_o))
    else $error("lane_opreq: new instruction while the previous one is still requesting");
endmodule
