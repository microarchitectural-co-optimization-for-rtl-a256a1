// vlsu_txn_issuer: transaction issuer of the VLSU.
//
// Read and write transactions wait in two separate transaction queues, so a
// stalled write address channel never holds back reads and vice versa. The
// issuer sends the head of the read queue on the AXI AR channel and the
// head of the write queue on the AW channel, each whenever the bus is ready
// (one transaction per channel and cycle). For every write transaction it
// records (instruction ID, last-of-instruction) in a response tracker; write
// responses return in order (all demand writes use AXI ID 0), and the
// response of an instruction's last transaction reports the store done.
// A `fault` write transaction is not sent on the bus: it passes through the
// tracker in order and completes without a response.
// Separate read/write issue follows the paper; the tracker is this design's.
module vlsu_txn_issuer
  import ara_opt_pkg::*;
#(
  parameter int unsigned TRACK_DEPTH = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // read / write transaction queues
  input  logic     rd_empty_i,
  input  txn_t     rd_head_i,
  output logic     rd_pop_o,
  input  logic     wr_empty_i,
  input  txn_t     wr_head_i,
  output logic     wr_pop_o,
  // AXI address channels and write response
  output logic     ar_valid_o,
  input  logic     ar_ready_i,
  output axi_ax_t  ar_o,
  output logic     aw_valid_o,
  input  logic     aw_ready_i,
  output axi_ax_t  aw_o,
  input  logic     b_valid_i,
  output logic     b_ready_o,
  input  axi_b_t   b_i,
  // store completion
  output logic     st_done_o,
  output insn_id_t st_done_id_o,
  output logic [31:0] ar_cnt_o,
  output logic [31:0] aw_cnt_o
);
  typedef struct packed {
    insn_id_t id;
    logic     last;
    logic     fault;
  } trk_t;

  trk_t trk_head;
  logic trk_full, trk_empty, trk_push, trk_pop;

  // read side
  assign ar_valid_o = !rd_empty_i;
  assign ar_o       = '{id: rd_head_i.axi_id, addr: rd_head_i.addr, len: rd_head_i.len, size: rd_head_i.size};
  assign rd_pop_o   = ar_valid_o && ar_ready_i;

  // write side
  assign aw_valid_o = !wr_empty_i && !wr_head_i.fault && !trk_full;
  assign aw_o       = '{id: wr_head_i.axi_id, addr: wr_head_i.addr, len: wr_head_i.len, size: wr_head_i.size};
  assign wr_pop_o   = !wr_empty_i && !trk_full && (wr_head_i.fault || aw_ready_i);
  assign trk_push   = wr_pop_o;

  fifo_sync #(.T(trk_t), .DEPTH(TRACK_DEPTH)) i_trk (
    .clk_i, .rst_ni,
    .push_i (trk_push),
    .data_i ('{id: wr_head_i.insn, last: wr_head_i.last, fault: wr_head_i.fault}),
    .pop_i  (trk_pop),
    .data_o (trk_head),
    .full_o (trk_full),
    .empty_o(trk_empty),
    .count_o()
  );

  assign b_ready_o    = !trk_empty && !trk_head.fault;
  assign trk_pop      = !trk_empty && (trk_head.fault || b_valid_i);
  assign st_done_o    = trk_pop && trk_head.last;
  assign st_done_id_o = trk_head.id;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_cnt_o <= '0;
      aw_cnt_o <= '0;
    end else begin
      if (rd_pop_o) ar_cnt_o <= ar_cnt_o + 1;
      if (aw_valid_o && aw_ready_i) aw_cnt_o <= aw_cnt_o + 1;
    end
  end

  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                ar_valid_o && !ar_ready_i |=> ar_valid_o && $stable(ar_o))
    else $error("vlsu_txn_issuer: AR changed while waiting");
  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                aw_valid_o && !aw_ready_i |=> aw_valid_o && $stable(aw_o))
    else $error("vlsu_txn_issuer: AW changed while waiting");
endmodule
