// fifo_sync: synchronous first-in first-out buffer.
//
// Used wherever the design puts a buffering boundary between two stages:
// the VLSU transaction queues, the descriptor buffer, the load result queue
// and the lane result queues. Storage is a register array of DEPTH entries of
// type T; push and pop may happen in the same cycle (also when full, as long
// as pop is asserted). Data at the head is visible combinationally (data_o),
// so a pop removes the entry shown in the same cycle. `count_o` gives the
// occupancy for credit-style flow control.
module fifo_sync #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       push_i,
  input  T                           data_i,
  input  logic                       pop_i,
  output T                           data_o,
  output logic                       full_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                           mem_q [DEPTH];
  logic [PW-1:0]              rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  logic do_push, do_pop;
  assign do_pop  = pop_i && (cnt_q != 0);
  assign do_push = push_i && ((cnt_q != DEPTH) || do_pop);

  assign data_o  = mem_q[rd_q];
  assign full_o  = (cnt_q == DEPTH);
  assign empty_o = (cnt_q == 0);
  assign count_o = cnt_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem_q[wr_q] <= data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   push_i && full_o |-> pop_i)
    else $error("fifo_sync: push into full FIFO");
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   pop_i |-> !empty_o)
    else $error("fifo_sync: pop from empty FIFO");
endmodule
