// lane: one lane of the vector processor.
//
// A lane owns a 64-bit slice of every element group (elements 2l and 2l+1 of
// each 256-bit row for lane l) and contains:
//   lane_sequencer  - local instruction queue, release-aware issue
//   lane_opreq      - operand requester (VRF reads, chaining, forwarding)
//   lane_vrf        - 8-bank VRF slice, VRF arbiter, read crossbar
//   lane_fwd_match  - forwarding match and bypass select on three result
//                     channels: load write-back, ALU, multiplier
//   5 x lane_opqueue - dual-source operand queues: ALU A/B, MUL A/B, store
//   lane_alu, lane_mul - functional units
//   lane_result_wb  - result queues, write-back network, readiness bits,
//                     per-instruction completion
// Instructions arrive from the main sequencer (valid/ready, all lanes in the
// same cycle). Load data arrive as this lane's slice of a row (ld_*); store
// data leave as 64-bit words (st_*), popped by the VSTU. The lane reports
// read-done (all source operands of an ID queued) and done (all results of
// an ID written) to the sequencer. The structure follows the paper's lane
// diagram; the port widths and queue sizes are this design's choices.
module lane
  import ara_opt_pkg::*;
#(
  parameter bit FORWARDING      = 1'b1,
  parameter bit DYN_LOCAL_ISSUE = 1'b1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  output logic        ready_o,
  input  vinsn_t      vinsn_i,
  input  logic        ld_valid_i,
  input  res_t        ld_i,
  output logic        ld_ready_o,
  output logic        st_valid_o,
  output lane_word_t  st_data_o,
  input  logic        st_pop_i,
  output logic        rd_done_o,
  output insn_id_t    rd_done_id_o,
  output logic        done_o,
  output insn_id_t    done_id_o,
  output lane_stats_t stats_o
);
  localparam int unsigned NQ = 5;

  // lane sequencer <-> operand requester / VFUs / write-back
  logic       oq_valid, req_busy, req_last;
  vinsn_t     oq_insn;
  logic [2:0] tq_a, tq_b;
  logic       alu_push, alu_full, mul_push, mul_full;
  logic       reg_v, clr_range, clr_one;
  insn_id_t   reg_id;
  grp_cnt_t   reg_groups, clr_n;
  vaddr_t     clr_base, clr_addr;
  logic [VRF_WORDS-1:0] written;

  // operand queues
  logic       q_vrf_v [NQ], q_fwd_v [NQ], q_fwd_acc [NQ], q_pop [NQ], q_empty [NQ], q_dual [NQ];
  lane_word_t q_vrf_d [NQ], q_fwd_d [NQ], q_head [NQ];
  logic [2:0] q_free [NQ];

  // VRF
  logic       rreq [2], rgnt [2], rvalid [2];
  vaddr_t     raddr [2];
  lane_word_t rdata [2];
  logic       wreq [2], wgnt [2];
  vaddr_t     waddr [2];
  lane_word_t wdata [2];
  logic       conflict;

  // forwarding
  logic       fq_v [2], fq_hit [2];
  vaddr_t     fq_a [2];
  lane_word_t fq_d [2];
  logic       ch_v [3];
  res_t       ch   [3];

  // VFU results
  logic       alu_rv, mul_rv;
  res_t       alu_r, mul_r;
  logic [2:0] alu_free, mul_free;
  logic [31:0] alu_busy, mul_busy, fwd_cnt, vrd_cnt, wait_cnt, dyn_cnt, blk_cnt;
  logic [31:0] conf_cnt, dual_cnt;

  lane_sequencer #(.DYN_LOCAL_ISSUE(DYN_LOCAL_ISSUE)) i_seq (
    .clk_i, .rst_ni,
    .valid_i, .ready_o, .vinsn_i,
    .opreq_busy_i     (req_busy),
    .opreq_last_fire_i(req_last),
    .opreq_valid_o    (oq_valid),
    .opreq_insn_o     (oq_insn),
    .tq_a_o(tq_a), .tq_b_o(tq_b),
    .alu_push_o(alu_push), .alu_full_i(alu_full),
    .mul_push_o(mul_push), .mul_full_i(mul_full),
    .reg_o(reg_v), .reg_id_o(reg_id), .reg_groups_o(reg_groups),
    .clr_range_o(clr_range), .clr_base_o(clr_base), .clr_n_o(clr_n),
    .dyn_issue_o(dyn_cnt), .issue_block_o(blk_cnt)
  );

  lane_opreq #(.FORWARDING(FORWARDING), .NQ(NQ), .QW(3)) i_opreq (
    .clk_i, .rst_ni,
    .insn_valid_i(oq_valid), .insn_i(oq_insn), .tq_a_i(tq_a), .tq_b_i(tq_b),
    .busy_o(req_busy), .last_fire_o(req_last),
    .q_free_i(q_free), .q_vrf_valid_o(q_vrf_v), .q_vrf_data_o(q_vrf_d),
    .q_fwd_valid_o(q_fwd_v), .q_fwd_data_o(q_fwd_d), .q_fwd_accept_i(q_fwd_acc),
    .rreq_o(rreq), .raddr_o(raddr), .rgnt_i(rgnt), .rvalid_i(rvalid), .rdata_i(rdata),
    .fq_valid_o(fq_v), .fq_addr_o(fq_a), .fq_hit_i(fq_hit), .fq_data_i(fq_d),
    .written_i(written), .clear_o(clr_one), .clear_addr_o(clr_addr),
    .rd_done_o, .rd_done_id_o,
    .fwd_cnt_o(fwd_cnt), .vrd_cnt_o(vrd_cnt), .chain_wait_o(wait_cnt)
  );

  for (genvar q = 0; q < NQ; q++) begin : gen_q
    lane_opqueue #(.DEPTH(4)) i_q (
      .clk_i, .rst_ni,
      .vrf_valid_i(q_vrf_v[q]), .vrf_data_i(q_vrf_d[q]),
      .fwd_valid_i(q_fwd_v[q]), .fwd_data_i(q_fwd_d[q]), .fwd_accept_o(q_fwd_acc[q]),
      .pop_i(q_pop[q]), .data_o(q_head[q]), .empty_o(q_empty[q]), .free_o(q_free[q]),
      .dual_o(q_dual[q])
    );
  end

  lane_vrf #(.NR_RD(2), .NR_WR(2)) i_vrf (
    .clk_i, .rst_ni,
    .wreq_i(wreq), .waddr_i(waddr), .wdata_i(wdata), .wgnt_o(wgnt),
    .rreq_i(rreq), .raddr_i(raddr), .rgnt_o(rgnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .conflict_o(conflict)
  );

  assign ch_v[0] = ld_valid_i && ld_ready_o;
  assign ch[0]   = ld_i;
  assign ch_v[1] = alu_rv;
  assign ch[1]   = alu_r;
  assign ch_v[2] = mul_rv;
  assign ch[2]   = mul_r;

  lane_fwd_match #(.NR_SRC(3), .NR_Q(2)) i_fwd (
    .ch_valid_i(ch_v), .ch_i(ch), .q_valid_i(fq_v), .q_addr_i(fq_a),
    .hit_o(fq_hit), .data_o(fq_d)
  );

  lane_alu i_alu (
    .clk_i, .rst_ni,
    .insn_push_i(alu_push), .insn_i(oq_insn), .insn_full_o(alu_full),
    .a_empty_i(q_empty[0]), .a_i(q_head[0]), .a_pop_o(q_pop[0]),
    .b_empty_i(q_empty[1]), .b_i(q_head[1]), .b_pop_o(q_pop[1]),
    .res_free_i(alu_free), .res_valid_o(alu_rv), .res_o(alu_r), .busy_cnt_o(alu_busy)
  );

  lane_mul i_mul (
    .clk_i, .rst_ni,
    .insn_push_i(mul_push), .insn_i(oq_insn), .insn_full_o(mul_full),
    .a_empty_i(q_empty[2]), .a_i(q_head[2]), .a_pop_o(q_pop[2]),
    .b_empty_i(q_empty[3]), .b_i(q_head[3]), .b_pop_o(q_pop[3]),
    .res_free_i(mul_free), .res_valid_o(mul_rv), .res_o(mul_r), .busy_cnt_o(mul_busy)
  );

  lane_result_wb #(.NR_WR(2)) i_wb (
    .clk_i, .rst_ni,
    .alu_valid_i(alu_rv), .alu_i(alu_r), .alu_free_o(alu_free),
    .mul_valid_i(mul_rv), .mul_i(mul_r), .mul_free_o(mul_free),
    .ld_valid_i, .ld_i, .ld_ready_o,
    .wreq_o(wreq), .waddr_o(waddr), .wdata_o(wdata), .wgnt_i(wgnt),
    .clr_range_i(clr_range), .clr_base_i(clr_base), .clr_n_i(clr_n),
    .clr_one_i(clr_one), .clr_addr_i(clr_addr), .written_o(written),
    .reg_i(reg_v), .reg_id_i(reg_id), .reg_groups_i(reg_groups),
    .done_o, .done_id_o
  );

  // store data to the VSTU
  assign st_valid_o = !q_empty[4];
  assign st_data_o  = q_head[4];
  assign q_pop[4]   = st_pop_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      conf_cnt <= '0;
      dual_cnt <= '0;
    end else begin
      if (conflict) conf_cnt <= conf_cnt + 1;
      if (q_dual[0] || q_dual[1] || q_dual[2] || q_dual[3] || q_dual[4]) dual_cnt <= dual_cnt + 1;
    end
  end

  assign stats_o = '{alu_busy: alu_busy, mul_busy: mul_busy, fwd: fwd_cnt, vrf_reads: vrd_cnt,
                     chain_wait: wait_cnt, conflicts: conf_cnt, dyn_issue: dyn_cnt, dual_push: dual_cnt};
endmodule
