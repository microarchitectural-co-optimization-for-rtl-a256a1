// vlsu_prefetch_buf: prefetch data buffer of the next-VL prefetcher.
//
// SLOTS slots of SLOT_BEATS 16-byte beats each (1 KiB: the largest single
// load, LMUL = 8). A slot is allocated by the prefetch controller together
// with its window (base, length) and owns AXI read ID 1 + slot; returned
// beats of that ID are written in arrival order (AXI keeps order per ID).
// Slot states:
//   FREE     - unused
//   FILL     - window valid, data arriving or arrived; can be hit
//   CLAIMED  - a load that hit is reading it through the VLDU read port
// A unit-stride load hits when its whole byte range lies inside the window
// of a FILL slot that is not stale; the descriptor buffer then claims the
// slot. The VLDU reads beat by beat (rd_valid_o when the beat has arrived)
// and releases the slot at the end. A store overlapping a FILL window marks
// it stale (no longer hit); stale slots, and slots released while beats of
// their burst are still arriving, become FREE once all beats are in. A
// prefetch that faulted in address generation is freed at once (abort_i).
// Lookups are combinational; writes and state changes take effect at the
// clock edge. The buffer, the separate AXI IDs and hit delivery follow the
// paper; slot count, size and states are this design's.
module vlsu_prefetch_buf
  import ara_opt_pkg::*;
#(
  parameter int unsigned SLOTS      = 3,
  parameter int unsigned SLOT_BEATS = 64
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  // allocation (prefetch controller)
  output logic  free_o,
  output logic [AXI_IDW-1:0] free_slot_o,
  input  logic  alloc_i,
  input  addr_t alloc_base_i,
  input  logic [11:0] alloc_nbytes_i,
  input  logic  abort_i,
  input  logic [AXI_IDW-1:0] abort_slot_i,
  // coverage query (prefetch controller)
  input  addr_t cov_base_i,
  output logic  covered_o,
  // returned prefetch data
  input  logic  r_valid_i,
  input  axi_r_t r_i,
  // hit lookup and claim (descriptor buffer)
  input  addr_t look_base_i,
  input  logic [11:0] look_nbytes_i,
  output logic  hit_o,
  output logic [AXI_IDW-1:0] hit_slot_o,
  output logic [5:0] hit_beat_o,      // beat index of look_base_i in the slot
  input  logic  claim_i,
  // store invalidation
  input  logic  inv_i,
  input  addr_t inv_base_i,
  input  addr_t inv_last_i,
  // VLDU read port
  input  logic [AXI_IDW-1:0] rd_slot_i,
  input  logic [$clog2(SLOT_BEATS)-1:0] rd_beat_i,
  output logic  rd_valid_o,
  output logic [AXI_DW-1:0] rd_data_o,
  input  logic  release_i,
  input  logic [AXI_IDW-1:0] release_slot_i
);
  typedef enum logic [1:0] { P_FREE, P_FILL, P_CLAIMED } pstate_e;
  localparam int unsigned BW = $clog2(SLOT_BEATS);

  pstate_e      st_q    [SLOTS];
  addr_t        base_q  [SLOTS];
  logic [11:0]  nb_q    [SLOTS];
  logic [BW:0]  total_q [SLOTS];
  logic [BW:0]  recv_q  [SLOTS];
  logic         stale_q [SLOTS];
  logic [AXI_DW-1:0] data_q [SLOTS][SLOT_BEATS];

  function automatic logic inside_win(addr_t b, logic [11:0] n, addr_t wb, logic [11:0] wn);
    return (b >= wb) && ({1'b0, b} + 33'(n) <= {1'b0, wb} + 33'(wn));
  endfunction

  always_comb begin
    free_o      = 1'b0;
    free_slot_o = '0;
    hit_o       = 1'b0;
    hit_slot_o  = '0;
    covered_o   = 1'b0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (st_q[s] == P_FREE) begin
        free_o      = 1'b1;
        free_slot_o = AXI_IDW'(s);
      end
      if (st_q[s] == P_FILL && !stale_q[s] && inside_win(look_base_i, look_nbytes_i, base_q[s], nb_q[s])) begin
        hit_o      = 1'b1;
        hit_slot_o = AXI_IDW'(s);
      end
      if (st_q[s] != P_FREE && !stale_q[s] && inside_win(cov_base_i, 12'd1, base_q[s], nb_q[s]))
        covered_o = 1'b1;
    end
    hit_beat_o = 6'((look_base_i - base_q[hit_slot_o]) / BEAT_BYTES);
    rd_valid_o = (st_q[rd_slot_i] == P_CLAIMED) && ({1'b0, rd_beat_i} < recv_q[rd_slot_i]);
    rd_data_o  = data_q[rd_slot_i][rd_beat_i];
  end

  logic [AXI_IDW-1:0] r_slot;
  assign r_slot = r_i.id - 1'b1;

  always_ff @(posedge clk_i) begin
    if (r_valid_i && r_i.id != '0)
      data_q[r_slot][recv_q[r_slot][BW-1:0]] <= r_i.data;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < SLOTS; s++) begin
        st_q[s]    <= P_FREE;
        base_q[s]  <= '0;
        nb_q[s]    <= '0;
        total_q[s] <= '0;
        recv_q[s]  <= '0;
        stale_q[s] <= 1'b0;
      end
    end else begin
      for (int s = 0; s < SLOTS; s++) begin
        logic [BW:0] rcv;
        rcv = recv_q[s];
        if (r_valid_i && r_i.id != '0 && r_slot == AXI_IDW'(s)) rcv = rcv + 1'b1;
        recv_q[s] <= rcv;
        if (st_q[s] == P_FILL && stale_q[s] && rcv == total_q[s]) st_q[s] <= P_FREE;
        if (inv_i && st_q[s] == P_FILL &&
            !(inv_last_i < base_q[s] ||
              {1'b0, base_q[s]} + 33'(nb_q[s]) <= {1'b0, inv_base_i}))
          stale_q[s] <= 1'b1;
        if (claim_i && hit_slot_o == AXI_IDW'(s)) st_q[s] <= P_CLAIMED;
        if (release_i && release_slot_i == AXI_IDW'(s)) begin
          if (rcv == total_q[s]) st_q[s] <= P_FREE;
          else begin
            st_q[s]    <= P_FILL;
            stale_q[s] <= 1'b1;
          end
        end
        if (abort_i && abort_slot_i == AXI_IDW'(s)) st_q[s] <= P_FREE;
        if (alloc_i && free_slot_o == AXI_IDW'(s)) begin
          st_q[s]    <= P_FILL;
          base_q[s]  <= alloc_base_i;
          nb_q[s]    <= alloc_nbytes_i;
          total_q[s] <= (BW+1)'((alloc_nbytes_i + 12'(BEAT_BYTES - 1)) / 12'(BEAT_BYTES));
          recv_q[s]  <= '0;
          stale_q[s] <= 1'b0;
        end
      end
    end
  end
endmodule
