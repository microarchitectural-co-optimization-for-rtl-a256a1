// vlsu: vector load/store unit with a decoupled memory front end and
// next-VL prefetch.
//
// Front end, with a buffering boundary between every stage:
//   vlsu_desc_gen   memory request interface and address-stream descriptor
//   vlsu_desc_buf   descriptor buffer and arbiter (demand / prefetch, hits)
//   vlsu_addrgen    address-generation FSM, address expansion, transaction
//                   generation, with vlsu_mmu for translation and checks
//   2 x fifo_sync   read and write transaction queues
//   vlsu_txn_issuer AXI AR / AW issue and write-response tracking
// Prefetch: vlsu_prefetch_ctrl derives next-VL prefetch descriptors from
// unit-stride loads; their data return with AXI IDs 1..3 into
// vlsu_prefetch_buf, from where a later load that hits is served.
// Data units: vlsu_vldu (load rows to the lanes, load result queue) and
// vlsu_vstu (store rows from the lanes to the W channel).
// Interfaces: instruction request from the sequencer (valid/ready), one
// 128-bit AXI4 master port (AR, R, AW, W, B as valid/ready channels), load
// rows to all lanes (valid with a common ready), store words from every
// lane, store completion and exceptions to the sequencer side.
// R beats with ID 0 go to the VLDU, all others to the prefetch buffer.
module vlsu
  import ara_opt_pkg::*;
#(
  parameter bit          PREFETCH = 1'b1,
  parameter int unsigned PF_DEPTH = 1,
  parameter int unsigned MMU_LAT  = 2,
  parameter logic [31:0] MEM_TOP  = 32'h8000_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  vinsn_t      req_i,
  // AXI master
  output logic        ar_valid_o,
  input  logic        ar_ready_i,
  output axi_ax_t     ar_o,
  input  logic        r_valid_i,
  output logic        r_ready_o,
  input  axi_r_t      r_i,
  output logic        aw_valid_o,
  input  logic        aw_ready_i,
  output axi_ax_t     aw_o,
  output logic        w_valid_o,
  input  logic        w_ready_i,
  output axi_w_t      w_o,
  input  logic        b_valid_i,
  output logic        b_ready_o,
  input  axi_b_t      b_i,
  // lanes
  output logic        ld_valid_o,
  input  logic        ld_ready_i,
  output ld_row_t     ld_o,
  input  logic [NR_LANES-1:0] st_valid_i,
  input  lane_word_t  st_data_i [NR_LANES],
  output logic        st_pop_o,
  // status
  output logic        st_done_o,
  output insn_id_t    st_done_id_o,
  output logic        exc_o,
  output insn_id_t    exc_id_o,
  output vlsu_stats_t stats_o
);
  desc_t      dg_desc, pf_desc, ag_desc, obs;
  logic       dg_valid, dg_ready, pf_valid, pf_ready, ag_valid, ag_ready, obs_valid;
  logic       ldc_push, ldc_full, stc_push, stc_full;
  ldst_cmd_t  cmd;
  addr_t      look_base, inv_base, cov_base, mmu_vpage, mmu_ppage, chk_base;
  logic [11:0] look_nb;
  addr_t      inv_last;
  logic       ld_done;
  insn_id_t   ld_done_id;
  logic       pf_hit, pf_claim, inv, covered, pf_free, pf_alloc;
  logic [AXI_IDW-1:0] pf_hit_slot, pf_free_slot, pf_rd_slot, abort_slot;
  logic [5:0] pf_hit_beat, pf_rd_beat;
  logic       pf_rd_valid, pf_release, pf_abort;
  logic [AXI_DW-1:0] pf_rd_data;
  logic       mmu_req, mmu_rsp, mmu_busy, chk_fault;
  logic [31:0] chk_last;
  logic       txn_valid, txn_ready;
  txn_t       txn, rd_head, wr_head;
  logic       rd_full, rd_empty, rd_pop, wr_full, wr_empty, wr_pop;
  logic       vldu_r_ready;
  logic [31:0] pf_cnt, hit_cnt, pfb_cnt, ar_cnt, aw_cnt, tr_cnt;

  vlsu_desc_gen i_desc_gen (
    .clk_i, .rst_ni,
    .req_valid_i, .req_ready_o, .req_i,
    .desc_valid_o(dg_valid), .desc_ready_i(dg_ready), .desc_o(dg_desc)
  );

  vlsu_desc_buf #(.PREFETCH(PREFETCH)) i_desc_buf (
    .clk_i, .rst_ni,
    .dem_valid_i(dg_valid), .dem_ready_o(dg_ready), .dem_i(dg_desc),
    .pf_valid_i(pf_valid), .pf_ready_o(pf_ready), .pf_i(pf_desc),
    .ag_valid_o(ag_valid), .ag_ready_i(ag_ready), .ag_o(ag_desc),
    .ld_cmd_push_o(ldc_push), .ld_cmd_full_i(ldc_full),
    .st_cmd_push_o(stc_push), .st_cmd_full_i(stc_full), .cmd_o(cmd),
    .look_base_o(look_base), .look_nbytes_o(look_nb),
    .pf_hit_i(pf_hit), .pf_hit_slot_i(pf_hit_slot), .pf_hit_beat_i(pf_hit_beat),
    .pf_claim_o(pf_claim),
    .inv_o(inv), .inv_base_o(inv_base), .inv_last_o(inv_last),
    .st_done_i(st_done_o), .st_done_id_i(st_done_id_o),
    .ld_done_i(ld_done), .ld_done_id_i(ld_done_id),
    .obs_valid_o(obs_valid), .obs_o(obs), .hits_o(hit_cnt)
  );

  vlsu_prefetch_ctrl #(.PF_DEPTH(PF_DEPTH)) i_pf_ctrl (
    .clk_i, .rst_ni,
    .obs_valid_i(obs_valid && PREFETCH), .obs_i(obs),
    .free_i(pf_free), .free_slot_i(pf_free_slot), .alloc_o(pf_alloc),
    .cov_base_o(cov_base), .covered_i(covered),
    .pf_valid_o(pf_valid), .pf_ready_i(pf_ready), .pf_o(pf_desc),
    .pf_cnt_o(pf_cnt)
  );

  vlsu_prefetch_buf #(.SLOTS(3), .SLOT_BEATS(64)) i_pf_buf (
    .clk_i, .rst_ni,
    .free_o(pf_free), .free_slot_o(pf_free_slot),
    .alloc_i(pf_alloc), .alloc_base_i(pf_desc.base), .alloc_nbytes_i(pf_desc.nbytes),
    .abort_i(pf_abort), .abort_slot_i(abort_slot),
    .cov_base_i(cov_base), .covered_o(covered),
    .r_valid_i(r_valid_i && r_i.id != '0), .r_i,
    .look_base_i(look_base), .look_nbytes_i(look_nb),
    .hit_o(pf_hit), .hit_slot_o(pf_hit_slot), .hit_beat_o(pf_hit_beat), .claim_i(pf_claim),
    .inv_i(inv), .inv_base_i(inv_base), .inv_last_i(inv_last),
    .rd_slot_i(pf_rd_slot), .rd_beat_i(pf_rd_beat), .rd_valid_o(pf_rd_valid), .rd_data_o(pf_rd_data),
    .release_i(pf_release), .release_slot_i(pf_rd_slot)
  );

  vlsu_mmu #(.LATENCY(MMU_LAT), .MEM_TOP(MEM_TOP)) i_mmu (
    .clk_i, .rst_ni,
    .req_i(mmu_req), .vpage_i(mmu_vpage), .busy_o(mmu_busy),
    .rsp_valid_o(mmu_rsp), .ppage_o(mmu_ppage), .flush_i(1'b0),
    .chk_base_i(chk_base), .chk_last_i(chk_last), .chk_fault_o(chk_fault)
  );

  logic exc_store;
  vlsu_addrgen i_addrgen (
    .clk_i, .rst_ni,
    .desc_valid_i(ag_valid), .desc_ready_o(ag_ready), .desc_i(ag_desc),
    .mmu_req_o(mmu_req), .mmu_vpage_o(mmu_vpage), .mmu_rsp_i(mmu_rsp), .mmu_ppage_i(mmu_ppage),
    .chk_base_o(chk_base), .chk_last_o(chk_last), .chk_fault_i(chk_fault),
    .txn_valid_o(txn_valid), .txn_ready_i(txn_ready), .txn_o(txn),
    .exc_o, .exc_id_o, .exc_store_o(exc_store), .pf_abort_o(pf_abort), .pf_abort_slot_o(abort_slot),
    .trans_cnt_o(tr_cnt)
  );

  assign txn_ready = txn.is_store ? !wr_full : !rd_full;

  fifo_sync #(.T(txn_t), .DEPTH(4)) i_rd_txn_q (
    .clk_i, .rst_ni, .push_i(txn_valid && !txn.is_store && !rd_full), .data_i(txn),
    .pop_i(rd_pop), .data_o(rd_head), .full_o(rd_full), .empty_o(rd_empty), .count_o()
  );
  fifo_sync #(.T(txn_t), .DEPTH(4)) i_wr_txn_q (
    .clk_i, .rst_ni, .push_i(txn_valid && txn.is_store && !wr_full), .data_i(txn),
    .pop_i(wr_pop), .data_o(wr_head), .full_o(wr_full), .empty_o(wr_empty), .count_o()
  );

  vlsu_txn_issuer i_issuer (
    .clk_i, .rst_ni,
    .rd_empty_i(rd_empty), .rd_head_i(rd_head), .rd_pop_o(rd_pop),
    .wr_empty_i(wr_empty), .wr_head_i(wr_head), .wr_pop_o(wr_pop),
    .ar_valid_o, .ar_ready_i, .ar_o, .aw_valid_o, .aw_ready_i, .aw_o,
    .b_valid_i, .b_ready_o, .b_i,
    .st_done_o, .st_done_id_o, .ar_cnt_o(ar_cnt), .aw_cnt_o(aw_cnt)
  );

  vlsu_vldu i_vldu (
    .clk_i, .rst_ni,
    .cmd_push_i(ldc_push), .cmd_i(cmd), .cmd_full_o(ldc_full),
    .r_valid_i, .r_i, .r_ready_o(vldu_r_ready),
    .pf_slot_o(pf_rd_slot), .pf_beat_o(pf_rd_beat), .pf_valid_i(pf_rd_valid), .pf_data_i(pf_rd_data),
    .pf_release_o(pf_release),
    .exc_i(exc_o && !exc_store), .exc_id_i(exc_id_o),
    .row_valid_o(ld_valid_o), .row_ready_i(ld_ready_i), .row_o(ld_o),
    .pf_beats_o(pfb_cnt),
    .ld_done_o(ld_done), .ld_done_id_o(ld_done_id)
  );

  assign r_ready_o = (r_i.id == '0) ? vldu_r_ready : 1'b1;

  vlsu_vstu i_vstu (
    .clk_i, .rst_ni,
    .cmd_push_i(stc_push), .cmd_i(cmd), .cmd_full_o(stc_full),
    .st_valid_i, .st_data_i, .st_pop_o,
    .w_valid_o, .w_ready_i, .w_o,
    .exc_i(exc_o && exc_store), .exc_id_i(exc_id_o)
  );

  assign stats_o = '{pf_issued: pf_cnt, pf_hits: hit_cnt, pf_beats: pfb_cnt,
                     ar_txns: ar_cnt, aw_txns: aw_cnt, translations: tr_cnt};
endmodule
