// lane_opqueue: dual-source operand queue.
//
// An operand FIFO between the operand requester and one functional-unit
// input that can be written from two sources in the same cycle: the VRF read
// path (vrf_*) and the forwarding network (fwd_*, which also carries scalar
// operands). When both arrive together and two entries are free, both are
// enqueued, the VRF-read word first: in this design a VRF read returns one
// cycle after it was issued, so it always belongs to an older element group
// than a word forwarded in the same cycle. When only one entry is free the
// VRF-read word is taken and the forwarded word is refused (fwd_accept_o = 0)
// so the requester keeps the request and retries. free_o reports free entries
// for the requester's credit check. Pop and head are like fifo_sync.
// The dual-write behaviour and the preference for the VRF-read word follow
// the paper; the depth (4) is this design's choice.
module lane_opqueue
  import ara_opt_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       vrf_valid_i,
  input  lane_word_t                 vrf_data_i,
  input  logic                       fwd_valid_i,
  input  lane_word_t                 fwd_data_i,
  output logic                       fwd_accept_o,
  input  logic                       pop_i,
  output lane_word_t                 data_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] free_o,
  output logic                       dual_o      // both sources written this cycle
);
  localparam int unsigned PW = $clog2(DEPTH);
  lane_word_t                 mem_q [DEPTH];
  logic [PW-1:0]              rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic                       do_pop, push_v, push_f;
  logic [$clog2(DEPTH+1)-1:0] space;

  assign do_pop = pop_i && (cnt_q != 0);
  // entries that can be written this cycle (a pop frees one at the same edge)
  assign space  = $bits(space)'(DEPTH) - cnt_q + (do_pop ? 1'b1 : 1'b0);
  assign push_v = vrf_valid_i && (space >= 1);
  assign push_f = fwd_valid_i && (space >= (push_v ? 2 : 1));
  assign fwd_accept_o = push_f;
  assign dual_o       = push_v && push_f;

  assign data_o  = mem_q[rd_q];
  assign empty_o = (cnt_q == 0);
  assign free_o  = $bits(free_o)'(DEPTH) - cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      wr_q  <= wr_q + PW'(push_v) + PW'(push_f);
      if (do_pop) rd_q <= rd_q + 1'b1;
      cnt_q <= cnt_q + (push_v ? 1'b1 : 1'b0) + (push_f ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_v) mem_q[wr_q] <= vrf_data_i;
    if (push_f) mem_q[push_v ? PW'(wr_q + 1'b1) : wr_q] <= fwd_data_i;
  end

  a_vrf_has_space: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                    vrf_valid_i |-> space >= 1)
    else $error("lane_opqueue: VRF read data without a reserved entry");
endmodule
