// vlsu_vstu: vector store unit.
//
// Store commands arrive in program order (cmd_*, queue depth 4). For the
// command at the head the VSTU takes one element group at a time from the
// lanes' store operand queues - all lanes together, lane l supplying bytes
// [8l +: 8] of the 32-byte row - and turns it into AXI write beats:
//   unit-stride: two 16-byte beats per row; the last beat's strobe covers
//                only the bytes of the vector; WLAST follows the same burst
//                split as the address generator (burst_beats);
//   strided:     one beat per element, the 4 bytes placed at addr % 16 with a
//                4-bit strobe, WLAST on every beat.
// A row is reloaded in the cycle its last beat is sent, so unit-stride
// stores run at one beat per cycle. A store flagged as faulting (exc_*)
// consumes the lanes' data without writing anything.
// The paper names the VSTU; its beat formatting is this design's.
module vlsu_vstu
  import ara_opt_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cmd_push_i,
  input  ldst_cmd_t cmd_i,
  output logic      cmd_full_o,
  input  logic [NR_LANES-1:0] st_valid_i,
  input  lane_word_t st_data_i [NR_LANES],
  output logic      st_pop_o,
  output logic      w_valid_o,
  input  logic      w_ready_i,
  output axi_w_t    w_o,
  input  logic      exc_i,
  input  insn_id_t  exc_id_i
);
  ldst_cmd_t c;
  logic      c_empty, c_pop;
  logic      have_q;
  row_t      row_q;
  logic [8:0] cnt_q;      // beats (unit) or elements (strided) sent
  logic [4:0] bcnt_q;     // beats sent in the current burst
  addr_t     ea_q;
  logic [NR_INSN-1:0] exc_q;
  int unsigned burst_beats_q;  // beats of the burst in progress

  fifo_sync #(.T(ldst_cmd_t), .DEPTH(4)) i_cmd (
    .clk_i, .rst_ni, .push_i(cmd_push_i), .data_i(cmd_i), .pop_i(c_pop),
    .data_o(c), .full_o(cmd_full_o), .empty_o(c_empty), .count_o()
  );

  logic [8:0] total;
  logic       faulted, lanes_ok, send, last, row_done;
  addr_t      ea;
  int unsigned nb;
  logic [11:0] bytes_left;
  row_t       lane_row;

  always_comb begin
    for (int l = 0; l < NR_LANES; l++) lane_row[l*LANE_W +: LANE_W] = st_data_i[l];
    lanes_ok   = &st_valid_i;
    total      = (c.mode == MODE_UNIT) ? 9'((c.vl + 3) / 4) : 9'(c.vl);
    faulted    = exc_q[c.id];
    ea         = (cnt_q == 0) ? c.base : ea_q;
    nb         = burst_beats(ea, int'(total - cnt_q));
    bytes_left = 12'(c.vl) * 12'd4 - 12'(cnt_q) * 12'(BEAT_BYTES);
    last       = (cnt_q + 1 >= total);
    row_done   = (c.mode == MODE_UNIT) ? (cnt_q[0] || last) : ((cnt_q[2:0] == 3'd7) || last);
    w_o        = '0;
    if (c.mode == MODE_UNIT) begin
      w_o.data = cnt_q[0] ? row_q[AXI_DW +: AXI_DW] : row_q[0 +: AXI_DW];
      w_o.strb = (bytes_left >= 12'(BEAT_BYTES)) ? '1 : (AXI_DW/8)'((1 << bytes_left) - 1);
      w_o.last = (bcnt_q == 0) ? (nb == 1) : (32'(bcnt_q) + 1 >= burst_beats_q);
    end else begin
      w_o.data = (AXI_DW)'(row_q[cnt_q[2:0]*32 +: 32]) << (ea[3:2] * 32);
      w_o.strb = (AXI_DW/8)'(4'hF) << (ea[3:2] * 4);
      w_o.last = 1'b1;
    end
    w_valid_o = !c_empty && have_q && !faulted;
    send      = have_q && (faulted ? 1'b1 : w_ready_i) && !c_empty;
    // a new row is loaded when none is held or the held one is finished now
    st_pop_o  = !c_empty && lanes_ok && (!have_q || (send && row_done && !last));
    c_pop     = send && last;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      have_q        <= 1'b0;
      row_q         <= '0;
      cnt_q         <= '0;
      bcnt_q        <= '0;
      ea_q          <= '0;
      exc_q         <= '0;
      burst_beats_q <= 0;
    end else begin
      if (send) begin
        cnt_q <= last ? '0 : cnt_q + 1'b1;
        ea_q  <= last ? '0 : ea + ((c.mode == MODE_UNIT) ? addr_t'(BEAT_BYTES) : c.stride);
        if (c.mode == MODE_UNIT) begin
          if (bcnt_q == 0) burst_beats_q <= nb;
          bcnt_q <= w_o.last ? '0 : bcnt_q + 1'b1;
        end
        if (row_done) have_q <= 1'b0;
      end
      if (st_pop_o) begin
        have_q <= 1'b1;
        row_q  <= lane_row;
      end
      if (c_pop) exc_q[c.id] <= 1'b0;
      if (exc_i) exc_q[exc_id_i] <= 1'b1;
    end
  end
endmodule
