// ara_sequencer: main sequencer with instruction tracker, scoreboard and
// hazard manager, VFU issue arbiter and completion/response controller.
//
// Decoded instructions arrive in program order from the dispatcher. The
// instruction at the head is issued when
//   - the instruction tracker has a free ID,
//   - the scoreboard reports no WAW/WAR hazard (RAW is chained in the lanes),
//   - every lane can accept it, and for loads/stores the VLSU can accept it.
// The issue arbiter sends arithmetic instructions to the lanes, loads to the
// lanes (which own the write-back) and the VLSU, and stores to the lanes
// (which read the store data) and the VLSU. An instruction is broadcast to
// all lanes in the same cycle. Completion comes back through seq_completion;
// the read-done aggregate releases the scoreboard read list early.
// Issue is combinational from the head: one instruction per cycle at most.
// Statistic outputs count issued instructions and stall cycles by cause.
// Early read release follows the paper; the issue conditions and unit
// routing are this design's reading of the Ara organisation it describes.
module ara_sequencer
  import ara_opt_pkg::*;
#(
  parameter bit EARLY_READ_RELEASE = 1'b1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // from dispatcher
  input  logic                vinsn_valid_i,
  output logic                vinsn_ready_o,
  input  vinsn_t              vinsn_i,
  // to lanes (broadcast)
  output logic                lane_valid_o,
  input  logic [NR_LANES-1:0] lane_ready_i,
  output vinsn_t              lane_vinsn_o,
  // to VLSU
  output logic                vlsu_valid_o,
  input  logic                vlsu_ready_i,
  output vinsn_t              vlsu_vinsn_o,
  // status from lanes and VLSU
  input  logic [NR_LANES-1:0] lane_rd_done_i,
  input  insn_id_t            lane_rd_done_id_i [NR_LANES],
  input  logic [NR_LANES-1:0] lane_done_i,
  input  insn_id_t            lane_done_id_i [NR_LANES],
  input  logic                vlsu_done_i,
  input  insn_id_t            vlsu_done_id_i,
  // status
  output logic                idle_o,
  output logic [31:0]         issued_o,
  output logic [31:0]         stall_hazard_o,
  output logic [31:0]         stall_war_o,
  output logic [31:0]         early_release_o
);
  logic               free;
  insn_id_t           alloc_id;
  logic [NR_INSN-1:0] busy, by_vlsu, complete, read_release;
  logic               hazard, war;
  vreg_mask_t         new_wr, new_rd;
  logic               is_mem, writes, units_ready, issue;
  logic [$clog2(NR_INSN+1)-1:0] inflight;

  // register lists of the candidate
  always_comb begin
    new_wr = '0;
    new_rd = '0;
    writes = (vinsn_i.fu != FU_ST);
    if (writes) new_wr = vreg_group_mask(vinsn_i.vd, vinsn_i.lmul);
    else        new_rd = vreg_group_mask(vinsn_i.vd, vinsn_i.lmul);
    if (vinsn_i.use_vs2) new_rd |= vreg_group_mask(vinsn_i.vs2, vinsn_i.lmul);
    if (vinsn_i.use_vs1) new_rd |= vreg_group_mask(vinsn_i.vs1, vinsn_i.lmul);
  end

  // VFU issue arbiter
  assign is_mem      = (vinsn_i.fu == FU_LD) || (vinsn_i.fu == FU_ST);
  assign units_ready = (&lane_ready_i) && (!is_mem || vlsu_ready_i);
  assign issue       = vinsn_valid_i && free && !hazard && units_ready;

  assign vinsn_ready_o = issue;
  assign lane_valid_o  = issue;
  assign vlsu_valid_o  = issue && is_mem;
  always_comb begin
    lane_vinsn_o    = vinsn_i;
    lane_vinsn_o.id = alloc_id;
  end
  assign vlsu_vinsn_o = lane_vinsn_o;

  seq_instr_tracker i_tracker (
    .clk_i, .rst_ni,
    .free_o      (free),
    .alloc_id_o  (alloc_id),
    .alloc_i     (issue),
    .alloc_vlsu_i(vinsn_i.fu == FU_ST),
    .complete_i  (complete),
    .busy_o      (busy),
    .by_vlsu_o   (by_vlsu),
    .inflight_o  (inflight)
  );

  seq_scoreboard #(.EARLY_READ_RELEASE(EARLY_READ_RELEASE)) i_scoreboard (
    .clk_i, .rst_ni,
    .new_wr_i      (new_wr),
    .new_rd_i      (new_rd),
    .hazard_o      (hazard),
    .war_o         (war),
    .issue_i       (issue),
    .issue_id_i    (alloc_id),
    .read_release_i(read_release),
    .complete_i    (complete)
  );

  seq_completion i_completion (
    .clk_i, .rst_ni,
    .clear_i          (issue),
    .clear_id_i       (alloc_id),
    .by_vlsu_i        (by_vlsu),
    .lane_rd_done_i, .lane_rd_done_id_i,
    .lane_done_i, .lane_done_id_i,
    .vlsu_done_i, .vlsu_done_id_i,
    .read_release_o   (read_release),
    .complete_o       (complete)
  );

  assign idle_o = (busy == '0) && !vinsn_valid_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      issued_o        <= '0;
      stall_hazard_o  <= '0;
      stall_war_o     <= '0;
      early_release_o <= '0;
    end else begin
      if (issue) issued_o <= issued_o + 1;
      if (vinsn_valid_i && free && hazard) stall_hazard_o <= stall_hazard_o + 1;
      if (vinsn_valid_i && free && war)    stall_war_o    <= stall_war_o + 1;
      // read lists released while the instruction is still in flight
      for (int i = 0; i < NR_INSN; i++)
        if (EARLY_READ_RELEASE && read_release[i] && !complete[i] && busy[i])
          early_release_o <= early_release_o + 1;
    end
  end
endmodule
