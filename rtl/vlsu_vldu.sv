// vlsu_vldu: vector load data unit with the load result queue.
//
// Load commands arrive in program order (cmd_*, queue depth 4). For the
// command at the head the VLDU takes data from one of three sources:
//   - demand data: AXI read beats with ID 0 (r_*);
//   - the prefetch data buffer, for a load that hit a prefetch window: it
//     reads the slot beat by beat from pf_beat on and releases the slot
//     after the last one;
//   - nothing, if address generation flagged the load as faulting (exc_*):
//     the destination is then written with zeros so the instruction still
//     completes.
// Unit-stride data is packed two 16-byte beats per 32-byte row; strided data
// carries one 4-byte element per beat at byte offset addr % 16, and eight
// elements fill a row. Each row, tagged with the instruction ID and the
// lane word address vreg*GRP_PER_REG + row, goes into the load result queue
// (depth 4), from where it is broadcast to all lanes once every lane can
// take it. A beat is accepted only when the result queue has room, so one
// row per cycle can be sustained.
// ld_done_* reports the ID of a command in the cycle its last row enters
// the result queue: from then on it reads no more memory, and a younger
// store to the same addresses may proceed.
// Delivery of prefetch hits through the VLDU and result queue follows the
// paper; row packing and the fault path are this design's.
module vlsu_vldu
  import ara_opt_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cmd_push_i,
  input  ldst_cmd_t cmd_i,
  output logic      cmd_full_o,
  input  logic      r_valid_i,
  input  axi_r_t    r_i,
  output logic      r_ready_o,
  output logic [AXI_IDW-1:0] pf_slot_o,
  output logic [5:0] pf_beat_o,
  input  logic      pf_valid_i,
  input  logic [AXI_DW-1:0] pf_data_i,
  output logic      pf_release_o,
  input  logic      exc_i,
  input  insn_id_t  exc_id_i,
  output logic      row_valid_o,
  input  logic      row_ready_i,
  output ld_row_t   row_o,
  output logic [31:0] pf_beats_o,
  // command finished: all its data has been taken from memory
  output logic      ld_done_o,
  output insn_id_t  ld_done_id_o
);
  ldst_cmd_t c;
  logic      c_empty, c_pop;
  logic      lrq_full, lrq_empty, push_row;
  addr_t     ea_cur;
  ld_row_t   row_d;
  logic [8:0] cnt_q;        // beats (unit) or elements (strided) done
  addr_t     ea_q;          // address of the next strided element
  row_t      buf_q;
  logic [NR_INSN-1:0] exc_q;

  fifo_sync #(.T(ldst_cmd_t), .DEPTH(4)) i_cmd (
    .clk_i, .rst_ni, .push_i(cmd_push_i), .data_i(cmd_i), .pop_i(c_pop),
    .data_o(c), .full_o(cmd_full_o), .empty_o(c_empty), .count_o()
  );

  fifo_sync #(.T(ld_row_t), .DEPTH(4)) i_lrq (
    .clk_i, .rst_ni, .push_i(push_row), .data_i(row_d), .pop_i(row_valid_o && row_ready_i),
    .data_o(row_o), .full_o(lrq_full), .empty_o(lrq_empty), .count_o()
  );
  assign row_valid_o = !lrq_empty;

  logic [8:0] total, rows;
  logic       faulted, take, last, row_end;
  logic [AXI_DW-1:0] beat;
  logic [8:0] row_idx;
  always_comb begin
    rows    = 9'(groups_of(c.vl));
    total   = (c.mode == MODE_UNIT) ? 9'((c.vl + 3) / 4) : 9'(c.vl);
    faulted = exc_q[c.id];
    beat    = c.from_pf ? pf_data_i : r_i.data;
    ea_cur  = (cnt_q == 0) ? c.base : ea_q;
    pf_slot_o = c.pf_slot;
    pf_beat_o = c.pf_beat + 6'(cnt_q);
    take    = 1'b0;
    if (!c_empty && !lrq_full) begin
      if (faulted)        take = 1'b1;
      else if (c.from_pf) take = pf_valid_i;
      else                take = r_valid_i && r_i.id == '0;
    end
    r_ready_o = !c_empty && !lrq_full && !faulted && !c.from_pf && r_i.id == '0;
    // position inside the row
    if (faulted) begin
      last    = (cnt_q + 1 >= rows);
      row_end = 1'b1;
      row_idx = cnt_q;
    end else if (c.mode == MODE_UNIT) begin
      last    = (cnt_q + 1 >= total);
      row_end = cnt_q[0] || last;
      row_idx = cnt_q >> 1;
    end else begin
      last    = (cnt_q + 1 >= total);
      row_end = (cnt_q[2:0] == 3'd7) || last;
      row_idx = cnt_q >> 3;
    end
    row_d       = '0;
    row_d.id    = c.id;
    row_d.waddr = vaddr_t'(c.vreg) * vaddr_t'(GRP_PER_REG) + vaddr_t'(row_idx);
    row_d.data  = buf_q;
    if (faulted) row_d.data = '0;
    else if (c.mode == MODE_UNIT) begin
      if (cnt_q[0]) row_d.data[AXI_DW +: AXI_DW] = beat;
      else          row_d.data = {{AXI_DW{1'b0}}, beat};
    end else begin
      row_d.data[cnt_q[2:0]*32 +: 32] = beat[ea_cur[3:2]*32 +: 32];
    end
    push_row     = take && row_end;
    c_pop        = take && last;
    pf_release_o = c_pop && c.from_pf && !faulted;
    ld_done_o    = c_pop;
    ld_done_id_o = c.id;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q      <= '0;
      ea_q       <= '0;
      buf_q      <= '0;
      exc_q      <= '0;
      pf_beats_o <= '0;
    end else begin
      if (take) begin
        buf_q <= row_end ? '0 : row_d.data;
        cnt_q <= last ? '0 : cnt_q + 1'b1;
        ea_q  <= last ? '0 : ea_cur + c.stride;
        if (c.from_pf && !faulted) pf_beats_o <= pf_beats_o + 1;
      end
      if (c_pop) exc_q[c.id] <= 1'b0;
      if (exc_i) exc_q[exc_id_i] <= 1'b1;
    end
  end
endmodule
