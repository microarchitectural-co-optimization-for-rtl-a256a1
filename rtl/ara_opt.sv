// ara_opt: top level of the multi-lane chaining vector processor.
//
// The vector unit executes a subset of RVV 1.0 at SEW = 32 with four lanes,
// VLEN = 1024 and DLEN = 256 (each lane handles 64 bits, i.e. two elements,
// of every element group per cycle) and one 128-bit AXI4 memory port.
// Instruction path: instructions and their scalar operands are injected
// (valid/ready, as by an ideal dispatcher) into ara_dispatcher, which
// decodes them and keeps vl/vtype; ara_sequencer checks hazards with early
// read-dependence release and broadcasts each instruction to the four lanes
// and, for memory instructions, to the VLSU. Lanes chain dependent
// instructions element group by element group and forward results into
// their operand queues; the VLSU streams data through its decoupled front
// end and next-VL prefetch buffer.
// The four mechanisms can be switched off for comparison through the
// parameters EARLY_READ_RELEASE, DYN_LOCAL_ISSUE, FORWARDING and PREFETCH;
// all are on by default. Slide, mask and further units are not part of
// this RTL.
// Status outputs: idle_o (nothing in flight), illegal_o (an instruction was
// not recognised), exc_o/exc_id_o (a memory access faulted) and counters.
module ara_opt
  import ara_opt_pkg::*;
#(
  parameter bit          EARLY_READ_RELEASE = 1'b1,
  parameter bit          DYN_LOCAL_ISSUE    = 1'b1,
  parameter bit          FORWARDING         = 1'b1,
  parameter bit          PREFETCH           = 1'b1,
  parameter int unsigned PF_DEPTH           = 1,
  parameter logic [31:0] MEM_TOP            = 32'h8000_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // instruction injection
  input  logic        insn_valid_i,
  output logic        insn_ready_o,
  input  logic [31:0] insn_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  // AXI4 master port (128 bit)
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
  // status
  output logic        idle_o,
  output logic        illegal_o,
  output logic        exc_o,
  output insn_id_t    exc_id_o,
  output vl_t         vl_o,
  output logic [31:0] issued_o,
  output logic [31:0] stall_hazard_o,
  output logic [31:0] stall_war_o,
  output logic [31:0] early_release_o,
  output lane_stats_t lane_stats_o [NR_LANES],
  output vlsu_stats_t vlsu_stats_o
);
  logic       d_valid, d_ready;
  vinsn_t     d_insn, l_insn, m_insn;
  logic [3:0] lmul;  // current LMUL (informational)
  logic       l_valid, m_valid, m_ready, seq_idle;
  logic [NR_LANES-1:0] l_ready, rd_done, done, ld_ready, st_valid;
  insn_id_t   rd_done_id [NR_LANES];
  insn_id_t   done_id    [NR_LANES];
  lane_word_t st_data    [NR_LANES];
  logic       ld_valid, st_pop, st_done;
  ld_row_t    ld_row;
  insn_id_t   st_done_id;

  ara_dispatcher i_dispatcher (
    .clk_i, .rst_ni,
    .insn_valid_i, .insn_ready_o, .insn_i, .rs1_i, .rs2_i,
    .vinsn_valid_o(d_valid), .vinsn_ready_i(d_ready), .vinsn_o(d_insn),
    .illegal_o, .vl_o, .lmul_o(lmul)
  );

  ara_sequencer #(.EARLY_READ_RELEASE(EARLY_READ_RELEASE)) i_sequencer (
    .clk_i, .rst_ni,
    .vinsn_valid_i(d_valid), .vinsn_ready_o(d_ready), .vinsn_i(d_insn),
    .lane_valid_o(l_valid), .lane_ready_i(l_ready), .lane_vinsn_o(l_insn),
    .vlsu_valid_o(m_valid), .vlsu_ready_i(m_ready), .vlsu_vinsn_o(m_insn),
    .lane_rd_done_i(rd_done), .lane_rd_done_id_i(rd_done_id),
    .lane_done_i(done), .lane_done_id_i(done_id),
    .vlsu_done_i(st_done), .vlsu_done_id_i(st_done_id),
    .idle_o(seq_idle), .issued_o, .stall_hazard_o, .stall_war_o, .early_release_o
  );

  for (genvar l = 0; l < NR_LANES; l++) begin : gen_lane
    res_t ld_slice;
    assign ld_slice = '{id: ld_row.id, waddr: ld_row.waddr, data: ld_row.data[l*LANE_W +: LANE_W]};
    lane #(.FORWARDING(FORWARDING), .DYN_LOCAL_ISSUE(DYN_LOCAL_ISSUE)) i_lane (
      .clk_i, .rst_ni,
      .valid_i(l_valid), .ready_o(l_ready[l]), .vinsn_i(l_insn),
      .ld_valid_i(ld_valid && (&ld_ready)), .ld_i(ld_slice), .ld_ready_o(ld_ready[l]),
      .st_valid_o(st_valid[l]), .st_data_o(st_data[l]), .st_pop_i(st_pop),
      .rd_done_o(rd_done[l]), .rd_done_id_o(rd_done_id[l]),
      .done_o(done[l]), .done_id_o(done_id[l]),
      .stats_o(lane_stats_o[l])
    );
  end

  vlsu #(.PREFETCH(PREFETCH), .PF_DEPTH(PF_DEPTH), .MEM_TOP(MEM_TOP)) i_vlsu (
    .clk_i, .rst_ni,
    .req_valid_i(m_valid), .req_ready_o(m_ready), .req_i(m_insn),
    .ar_valid_o, .ar_ready_i, .ar_o, .r_valid_i, .r_ready_o, .r_i,
    .aw_valid_o, .aw_ready_i, .aw_o, .w_valid_o, .w_ready_i, .w_o,
    .b_valid_i, .b_ready_o, .b_i,
    .ld_valid_o(ld_valid), .ld_ready_i(&ld_ready), .ld_o(ld_row),
    .st_valid_i(st_valid), .st_data_i(st_data), .st_pop_o(st_pop),
    .st_done_o(st_done), .st_done_id_o(st_done_id),
    .exc_o, .exc_id_o, .stats_o(vlsu_stats_o)
  );

  assign idle_o = seq_idle && !d_valid && !insn_valid_i;
endmodule
