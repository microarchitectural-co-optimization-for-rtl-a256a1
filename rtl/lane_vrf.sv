// lane_vrf: one lane's slice of the vector register file with its VRF
// arbiter and read crossbar.
//
// The slice holds VRF_WORDS words of 64 bit in NR_BANKS = 8 single-port
// banks; word address a lives in bank a % 8, row a / 8. Each cycle up to
// NR_WR write requests (from the write-back network) and NR_RD read requests
// (from the operand requester) compete. The arbiter grants each bank to one
// request, writes first, then reads, lower port index first; a request that
// loses its bank is not granted and must be repeated (a bank conflict).
// Granted reads return their data one cycle later on rdata_o / rvalid_o
// through the crossbar that routes each bank's output to the read port that
// owns it. Write grants take effect at the clock edge. conflict_o flags a
// cycle in which at least one request lost its bank.
// The 8 banks come from the paper's figure; the port counts, priority order
// and one-cycle read latency are choices of this design.
module lane_vrf
  import ara_opt_pkg::*;
#(
  parameter int unsigned NR_RD = 2,
  parameter int unsigned NR_WR = 2
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       wreq_i  [NR_WR],
  input  vaddr_t     waddr_i [NR_WR],
  input  lane_word_t wdata_i [NR_WR],
  output logic       wgnt_o  [NR_WR],
  input  logic       rreq_i  [NR_RD],
  input  vaddr_t     raddr_i [NR_RD],
  output logic       rgnt_o  [NR_RD],
  output logic       rvalid_o[NR_RD],
  output lane_word_t rdata_o [NR_RD],
  output logic       conflict_o
);
  localparam int unsigned ROWS = VRF_WORDS / NR_BANKS;
  localparam int unsigned BW   = $clog2(NR_BANKS);

  lane_word_t bank_q [NR_BANKS][ROWS];

  // ---- VRF arbiter ----------------------------------------------------------
  logic [NR_BANKS-1:0] taken;
  always_comb begin
    taken      = '0;
    conflict_o = 1'b0;
    for (int w = 0; w < NR_WR; w++) begin
      wgnt_o[w] = 1'b0;
      if (wreq_i[w]) begin
        if (!taken[waddr_i[w][BW-1:0]]) begin
          wgnt_o[w] = 1'b1;
          taken[waddr_i[w][BW-1:0]] = 1'b1;
        end else conflict_o = 1'b1;
      end
    end
    for (int r = 0; r < NR_RD; r++) begin
      rgnt_o[r] = 1'b0;
      if (rreq_i[r]) begin
        if (!taken[raddr_i[r][BW-1:0]]) begin
          rgnt_o[r] = 1'b1;
          taken[raddr_i[r][BW-1:0]] = 1'b1;
        end else conflict_o = 1'b1;
      end
    end
  end

  // ---- banks ----------------------------------------------------------------
  logic [BW-1:0] rbank_q [NR_RD];
  lane_word_t    bank_rdata_q [NR_BANKS];

  always_ff @(posedge clk_i) begin
    for (int w = 0; w < NR_WR; w++)
      if (wgnt_o[w]) bank_q[waddr_i[w][BW-1:0]][waddr_i[w][$bits(vaddr_t)-1:BW]] <= wdata_i[w];
    for (int r = 0; r < NR_RD; r++)
      if (rgnt_o[r]) bank_rdata_q[raddr_i[r][BW-1:0]] <= bank_q[raddr_i[r][BW-1:0]][raddr_i[r][$bits(vaddr_t)-1:BW]];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < NR_RD; r++) begin
        rvalid_o[r] <= 1'b0;
        rbank_q[r]  <= '0;
      end
    end else begin
      for (int r = 0; r < NR_RD; r++) begin
        rvalid_o[r] <= rgnt_o[r];
        if (rgnt_o[r]) rbank_q[r] <= raddr_i[r][BW-1:0];
      end
    end
  end

  // ---- read crossbar --------------------------------------------------------
  always_comb
    for (int r = 0; r < NR_RD; r++) rdata_o[r] = bank_rdata_q[rbank_q[r]];
endmodule
