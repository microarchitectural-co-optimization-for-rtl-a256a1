// lane_fwd_match: forwarding match and bypass select.
//
// Watches NR_SRC result channels (in this design: load write-back, ALU and
// multiplier results of the lane) and compares each pending operand query of
// the operand requester with them. A query hits when a channel carries, in
// this cycle, the result word for exactly the requested VRF word address
// (register and element group). The requester only raises a query for a word
// whose producer has not written it yet, which supplies the dependence part
// of the match. On a hit the word is selected from the channel (lowest
// channel index first) and the VRF re-read is skipped. Purely combinational.
// The match criteria follow the paper; the channel set is limited to the
// units this design builds.
module lane_fwd_match
  import ara_opt_pkg::*;
#(
  parameter int unsigned NR_SRC = 3,
  parameter int unsigned NR_Q   = 2
) (
  input  logic       ch_valid_i [NR_SRC],
  input  res_t       ch_i       [NR_SRC],
  input  logic       q_valid_i  [NR_Q],
  input  vaddr_t     q_addr_i   [NR_Q],
  output logic       hit_o      [NR_Q],
  output lane_word_t data_o     [NR_Q]
);
  always_comb begin
    for (int q = 0; q < NR_Q; q++) begin
      hit_o[q]  = 1'b0;
      data_o[q] = '0;
      for (int s = NR_SRC - 1; s >= 0; s--) begin
        if (q_valid_i[q] && ch_valid_i[s] && ch_i[s].waddr == q_addr_i[q]) begin
          hit_o[q]  = 1'b1;
          data_o[q] = ch_i[s].data;
        end
      end
    end
  end
endmodule
