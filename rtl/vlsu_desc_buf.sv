// vlsu_desc_buf: descriptor buffer and arbiter of the VLSU front end.
//
// Demand descriptors from the descriptor generator wait in a FIFO (depth 4)
// and leave it in order. At the head:
//   - a unit-stride load that lies completely inside a valid prefetch window
//     (pf_hit_i from the prefetch data buffer) is a prefetch hit: it claims
//     the buffer slot and goes straight to the VLDU; no bus traffic;
//   - any other load or store goes to the address generator; its command is
//     pushed to the VLDU or VSTU in the same cycle, so the data units see
//     the accesses in program order.
// Prefetch descriptors from the next-VL prefetch controller reach the address
// generator only in cycles the demand head does not use it (demand first).
// Memory ordering: stores in flight are recorded by ID with their byte range
// until the VLSU reports them done; a load or prefetch whose range overlaps
// one of them waits, and a store invalidates overlapping prefetch windows
// when it is dispatched. Loads in flight are recorded the same way until the
// VLDU has delivered all their data (ld_done_*), and a store that overlaps
// one of them waits: AXI does not order the read and write channels, so a
// younger store must not reach memory before an older load has read it. Loads of unit-stride type are shown to the
// prefetch controller (obs_*) as they leave.
// The buffer-plus-arbiter stage follows the paper; hit routing, demand
// priority and the store-overlap rule are this design's.
module vlsu_desc_buf
  import ara_opt_pkg::*;
#(
  parameter bit PREFETCH = 1'b1
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      dem_valid_i,
  output logic      dem_ready_o,
  input  desc_t     dem_i,
  input  logic      pf_valid_i,
  output logic      pf_ready_o,
  input  desc_t     pf_i,
  // address generator
  output logic      ag_valid_o,
  input  logic      ag_ready_i,
  output desc_t     ag_o,
  // data-unit command queues
  output logic      ld_cmd_push_o,
  input  logic      ld_cmd_full_i,
  output logic      st_cmd_push_o,
  input  logic      st_cmd_full_i,
  output ldst_cmd_t cmd_o,
  // prefetch data buffer
  output addr_t     look_base_o,
  output logic [11:0] look_nbytes_o,
  input  logic      pf_hit_i,
  input  logic [AXI_IDW-1:0] pf_hit_slot_i,
  input  logic [5:0] pf_hit_beat_i,
  output logic      pf_claim_o,
  output logic      inv_o,
  output addr_t     inv_base_o,
  output addr_t     inv_last_o,   // last byte a strided store can touch
  // store completion
  input  logic      st_done_i,
  input  insn_id_t  st_done_id_i,
  // load completion (all data of the load delivered by the VLDU)
  input  logic      ld_done_i,
  input  insn_id_t  ld_done_id_i,
  // to prefetch controller
  output logic      obs_valid_o,
  output desc_t     obs_o,
  output logic [31:0] hits_o
);
  desc_t h;
  logic  empty, full, pop, is_lu, hit, blocked, pf_blocked, dem_to_ag;

  fifo_sync #(.T(desc_t), .DEPTH(4)) i_fifo (
    .clk_i, .rst_ni,
    .push_i (dem_valid_i && dem_ready_o),
    .data_i (dem_i),
    .pop_i  (pop),
    .data_o (h),
    .full_o (full),
    .empty_o(empty),
    .count_o()
  );
  assign dem_ready_o = !full;

  // pending store and load ranges, by instruction ID
  logic [NR_INSN-1:0] st_v_q, ld_v_q;
  addr_t              st_lo_q [NR_INSN], ld_lo_q [NR_INSN];
  addr_t              st_hi_q [NR_INSN], ld_hi_q [NR_INSN];  // last byte
  addr_t              h_lo, h_hi;

  function automatic logic overlaps(addr_t b, logic [11:0] n, logic [31:0] stride, mem_mode_e m,
                                    logic [NR_INSN-1:0] v, addr_t lo [NR_INSN], addr_t hi [NR_INSN]);
    addr_t last;
    last = (m == MODE_UNIT) ? b + addr_t'(n) - 1 : b + stride * addr_t'(n / 4 - 1) + 3;
    overlaps = 1'b0;
    for (int i = 0; i < NR_INSN; i++)
      if (v[i] && !(last < lo[i] || b > hi[i])) overlaps = 1'b1;
    // negative strides: be conservative
    if (m != MODE_UNIT && last < b && v != '0) overlaps = 1'b1;
  endfunction

  assign is_lu      = !empty && !h.is_store && h.mode == MODE_UNIT;
  assign look_base_o   = h.base;
  assign look_nbytes_o = h.nbytes;
  assign hit        = PREFETCH && is_lu && pf_hit_i;
  assign blocked    = h.is_store ? overlaps(h.base, h.nbytes, h.stride, h.mode, ld_v_q, ld_lo_q, ld_hi_q)
                               : overlaps(h.base, h.nbytes, h.stride, h.mode, st_v_q, st_lo_q, st_hi_q);
  assign pf_blocked = overlaps(pf_i.base, pf_i.nbytes, pf_i.stride, pf_i.mode, st_v_q, st_lo_q, st_hi_q);

  always_comb begin
    pop           = 1'b0;
    dem_to_ag     = 1'b0;
    ld_cmd_push_o = 1'b0;
    st_cmd_push_o = 1'b0;
    pf_claim_o    = 1'b0;
    if (!empty) begin
      if (h.is_store) begin
        dem_to_ag = !blocked;
        pop = !blocked && ag_ready_i && !st_cmd_full_i;
        st_cmd_push_o = pop;
      end else if (hit) begin
        pop = !ld_cmd_full_i;
        ld_cmd_push_o = pop;
        pf_claim_o    = pop;
      end else if (!blocked) begin
        dem_to_ag = 1'b1;
        pop = ag_ready_i && !ld_cmd_full_i;
        ld_cmd_push_o = pop;
      end
    end
  end

  assign ag_valid_o = dem_to_ag ? (h.is_store ? !st_cmd_full_i : !ld_cmd_full_i)
                                : (pf_valid_i && !pf_blocked);
  assign ag_o       = dem_to_ag ? h : pf_i;
  assign pf_ready_o = !dem_to_ag && ag_ready_i && !pf_blocked;

  always_comb begin
    cmd_o         = '0;
    cmd_o.id      = h.id;
    cmd_o.mode    = h.mode;
    cmd_o.base    = h.base;
    cmd_o.stride  = h.stride;
    cmd_o.vl      = h.vl;
    cmd_o.vreg    = h.vreg;
    cmd_o.from_pf = hit;
    cmd_o.pf_slot = pf_hit_slot_i;
    cmd_o.pf_beat = pf_hit_beat_i;
  end

  assign inv_o        = st_cmd_push_o;
  assign inv_base_o   = h_lo;
  assign inv_last_o   = h_hi;
  assign obs_valid_o  = pop && is_lu;
  assign obs_o        = h;

  // byte range of the head access (negative strides: everything)
  assign h_lo = (h.mode == MODE_UNIT || !h.stride[31]) ? h.base : 32'd0;
  assign h_hi = (h.mode == MODE_UNIT) ? h.base + addr_t'(h.nbytes) - 1 :
                (h.stride[31] ? 32'hFFFF_FFFF : h.base + h.stride * addr_t'(h.nbytes / 4 - 1) + 3);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_v_q <= '0;
      ld_v_q <= '0;
      hits_o <= '0;
      for (int i = 0; i < NR_INSN; i++) begin
        st_lo_q[i] <= '0;
        st_hi_q[i] <= '0;
        ld_lo_q[i] <= '0;
        ld_hi_q[i] <= '0;
      end
    end else begin
      if (st_done_i) st_v_q[st_done_id_i] <= 1'b0;
      if (ld_done_i) ld_v_q[ld_done_id_i] <= 1'b0;
      if (st_cmd_push_o) begin
        st_v_q[h.id]  <= 1'b1;
        st_lo_q[h.id] <= h_lo;
        st_hi_q[h.id] <= h_hi;
      end
      if (ld_cmd_push_o) begin
        ld_v_q[h.id]  <= 1'b1;
        ld_lo_q[h.id] <= h_lo;
        ld_hi_q[h.id] <= h_hi;
      end
      if (pf_claim_o) hits_o <= hits_o + 1;
    end
  end
endmodule
