// seq_scoreboard: scoreboard and hazard manager of the main sequencer, with
// early read-dependence release.
//
// For every in-flight instruction ID the scoreboard keeps a write list (the
// vector registers it will write) and a read list (the registers it reads).
// A new instruction is checked against the union of all lists:
//   WAW: its destination group overlaps any write list  -> stall
//   WAR: its destination group overlaps any read list   -> stall
//   RAW: its sources overlap a write list                -> allowed; the lanes
//        chain on element-group granularity (see lane_opreq)
// Write lists are cleared only when the producer completes (complete_i).
// Read lists are cleared early, as soon as all lanes have put the
// instruction's source operands into their operand queues (read_release_i),
// when EARLY_READ_RELEASE = 1; with 0 they are held until completion.
// Release and completion inputs are bit masks over IDs, all applied at the
// next clock edge; hazard_o is combinational from the current lists.
// The split into read and write lists and the release points follow the
// paper; the register masks and the RAW-chaining rule are this design's.
module seq_scoreboard
  import ara_opt_pkg::*;
#(
  parameter bit EARLY_READ_RELEASE = 1'b1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // candidate instruction
  input  vreg_mask_t         new_wr_i,
  input  vreg_mask_t         new_rd_i,
  output logic               hazard_o,
  output logic               war_o,     // the stall is (also) due to a read list
  // issue of the candidate under ID issue_id_i
  input  logic               issue_i,
  input  insn_id_t           issue_id_i,
  // status returns
  input  logic [NR_INSN-1:0] read_release_i,
  input  logic [NR_INSN-1:0] complete_i
);
  vreg_mask_t wr_q [NR_INSN];
  vreg_mask_t rd_q [NR_INSN];
  vreg_mask_t wr_all, rd_all;

  always_comb begin
    wr_all = '0;
    rd_all = '0;
    for (int i = 0; i < NR_INSN; i++) begin
      wr_all |= wr_q[i];
      rd_all |= rd_q[i];
    end
  end

  assign war_o    = |(new_wr_i & rd_all);
  assign hazard_o = |(new_wr_i & wr_all) || war_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NR_INSN; i++) begin
        wr_q[i] <= '0;
        rd_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NR_INSN; i++) begin
        if (complete_i[i]) begin
          wr_q[i] <= '0;
          rd_q[i] <= '0;
        end else if (EARLY_READ_RELEASE && read_release_i[i]) begin
          rd_q[i] <= '0;
        end
      end
      if (issue_i) begin
        wr_q[issue_id_i] <= new_wr_i;
        rd_q[issue_id_i] <= new_rd_i;
      end
    end
  end
endmodule
