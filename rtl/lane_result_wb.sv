// lane_result_wb: result queues and write-back network of a lane, with the
// per-word readiness (chaining) status and per-instruction completion count.
//
// Three result sources feed queues of depth 4: the ALU, the multiplier and
// the load path (this lane's 64-bit slice of rows from the VLSU). Each cycle
// up to NR_WR queue heads are offered to the VRF write ports, in a rotating
// priority order so no source starves; a head leaves its queue when the VRF
// arbiter grants its write.
//
// written_o has one bit per VRF word: 1 when the word holds the result of
// the latest writer. It resets to all ones. A word is cleared when a writer
// of it enters the lane (clr_range_* for loads, a whole register group at
// once; clr_one_* from the operand requester for arithmetic, group by group)
// and set again when the write is granted. Consumers chain on these bits.
//
// Completion: the lane sequencer registers for each writing instruction the
// number of groups it will write (reg_*). Granted writes are counted per ID;
// when the count reaches the expected number the ID is reported on done_o,
// one ID per cycle (others wait a cycle).
// The queue-and-network structure is named in the paper; the readiness bits,
// counting and priority are this design's.
module lane_result_wb
  import ara_opt_pkg::*;
#(
  parameter int unsigned NR_WR = 2
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       alu_valid_i,
  input  res_t       alu_i,
  output logic [2:0] alu_free_o,
  input  logic       mul_valid_i,
  input  res_t       mul_i,
  output logic [2:0] mul_free_o,
  input  logic       ld_valid_i,
  input  res_t       ld_i,
  output logic       ld_ready_o,
  // VRF write ports
  output logic       wreq_o  [NR_WR],
  output vaddr_t     waddr_o [NR_WR],
  output lane_word_t wdata_o [NR_WR],
  input  logic       wgnt_i  [NR_WR],
  // readiness bits
  input  logic       clr_range_i,
  input  vaddr_t     clr_base_i,
  input  grp_cnt_t   clr_n_i,
  input  logic       clr_one_i,
  input  vaddr_t     clr_addr_i,
  output logic [VRF_WORDS-1:0] written_o,
  // completion
  input  logic       reg_i,
  input  insn_id_t   reg_id_i,
  input  grp_cnt_t   reg_groups_i,
  output logic       done_o,
  output insn_id_t   done_id_o
);
  localparam int unsigned NS = 3;

  res_t             head  [NS];
  logic             empty [NS];
  logic             pop   [NS];
  logic [2:0]       cnt   [NS];
  logic             full_ld;
  logic [1:0]       rr_q;
  int               src_of [NR_WR];

  fifo_sync #(.T(res_t), .DEPTH(4)) i_alu_q (.clk_i, .rst_ni, .push_i(alu_valid_i), .data_i(alu_i),
    .pop_i(pop[0]), .data_o(head[0]), .full_o(), .empty_o(empty[0]), .count_o(cnt[0]));
  fifo_sync #(.T(res_t), .DEPTH(4)) i_mul_q (.clk_i, .rst_ni, .push_i(mul_valid_i), .data_i(mul_i),
    .pop_i(pop[1]), .data_o(head[1]), .full_o(), .empty_o(empty[1]), .count_o(cnt[1]));
  fifo_sync #(.T(res_t), .DEPTH(4)) i_ld_q  (.clk_i, .rst_ni, .push_i(ld_valid_i), .data_i(ld_i),
    .pop_i(pop[2]), .data_o(head[2]), .full_o(full_ld), .empty_o(empty[2]), .count_o(cnt[2]));

  assign alu_free_o = 3'(4) - cnt[0];
  assign mul_free_o = 3'(4) - cnt[1];
  assign ld_ready_o = !full_ld;

  // ---- write-back selection ----------------------------------------------
  always_comb begin
    int w;
    w = 0;
    for (int p = 0; p < NR_WR; p++) begin
      wreq_o[p]  = 1'b0;
      waddr_o[p] = '0;
      wdata_o[p] = '0;
      src_of[p]  = 0;
    end
    for (int k = 0; k < NS; k++) begin
      int s;
      s = (int'(rr_q) + k) % NS;
      if (!empty[s] && w < NR_WR) begin
        wreq_o[w]  = 1'b1;
        waddr_o[w] = head[s].waddr;
        wdata_o[w] = head[s].data;
        src_of[w]  = s;
        w++;
      end
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) pop[s] = 1'b0;
    for (int p = 0; p < NR_WR; p++)
      if (wreq_o[p] && wgnt_i[p]) pop[src_of[p]] = 1'b1;
  end

  // ---- readiness bits -----------------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      written_o <= '1;
      rr_q      <= '0;
    end else begin
      logic [VRF_WORDS-1:0] wr_n;
      wr_n = written_o;
      if (clr_range_i)
        for (int i = 0; i < MAX_GROUPS; i++)
          if (grp_cnt_t'(i) < clr_n_i) wr_n[clr_base_i + vaddr_t'(i)] = 1'b0;
      if (clr_one_i) wr_n[clr_addr_i] = 1'b0;
      for (int p = 0; p < NR_WR; p++)
        if (wreq_o[p] && wgnt_i[p]) wr_n[waddr_o[p]] = 1'b1;
      written_o <= wr_n;
      rr_q      <= (rr_q == 2'(NS - 1)) ? '0 : rr_q + 1'b1;
    end
  end

  // ---- completion counting --------------------------------------------------
  grp_cnt_t           exp_q [NR_INSN];
  grp_cnt_t           cnt_q [NR_INSN];
  logic [NR_INSN-1:0] act_q, fin_q;

  always_comb begin
    done_o    = 1'b0;
    done_id_o = '0;
    for (int i = NR_INSN - 1; i >= 0; i--)
      if (fin_q[i]) begin
        done_o    = 1'b1;
        done_id_o = insn_id_t'(i);
      end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q <= '0;
      fin_q <= '0;
      for (int i = 0; i < NR_INSN; i++) begin
        exp_q[i] <= '0;
        cnt_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NR_INSN; i++) begin
        grp_cnt_t c;
        c = cnt_q[i];
        for (int p = 0; p < NR_WR; p++)
          if (wreq_o[p] && wgnt_i[p] && head[src_of[p]].id == insn_id_t'(i)) c = c + 1'b1;
        cnt_q[i] <= c;
        if (act_q[i] && c >= exp_q[i]) begin
          act_q[i] <= 1'b0;
          fin_q[i] <= 1'b1;
        end
        if (done_o && done_id_o == insn_id_t'(i)) fin_q[i] <= 1'b0;
        if (reg_i && reg_id_i == insn_id_t'(i)) begin
          act_q[i] <= 1'b1;
          exp_q[i] <= reg_groups_i;
          cnt_q[i] <= '0;
        end
      end
    end
  end
endmodule
