// ara_opt_pkg: shared parameters, types and helper functions of the
// multi-lane chaining vector processor.
//
// The configuration is the one the design is evaluated in: 4 lanes,
// VLEN = 1024 bit, DLEN = 256 bit (64 bit per lane and cycle), 128-bit AXI.
// SEW is fixed at 32 bit and LMUL may be 1, 2, 4 or 8; these limits and all
// widths not tied to those four numbers are choices of this implementation.
//
// Register-file layout: a vector register occupies GRP_PER_REG element groups
// ("rows") of DLEN bits. Row r of register v lives in every lane at word
// address v*GRP_PER_REG + r; lane l holds bits [64l +: 64] of the row, i.e.
// elements 2l and 2l+1 of that row. A register group (LMUL > 1) is therefore a
// contiguous run of word addresses, so an instruction simply walks
// ceil(vl/ELEMS_PER_ROW) consecutive words starting at vreg*GRP_PER_REG.
package ara_opt_pkg;

  // ---- configuration ------------------------------------------------------
  localparam int unsigned NR_LANES      = 4;
  localparam int unsigned VLEN          = 1024;
  localparam int unsigned DLEN          = 256;
  localparam int unsigned ELEN          = 32;
  localparam int unsigned LANE_W        = DLEN / NR_LANES;      // 64
  localparam int unsigned AXI_DW        = 128;
  localparam int unsigned AXI_AW        = 32;
  localparam int unsigned AXI_IDW       = 2;
  localparam int unsigned NR_VREGS      = 32;
  localparam int unsigned NR_BANKS      = 8;
  localparam int unsigned GRP_PER_REG   = VLEN / DLEN;          // 4
  localparam int unsigned ELEMS_PER_ROW = DLEN / ELEN;          // 8
  localparam int unsigned VRF_WORDS     = NR_VREGS * GRP_PER_REG; // 128 per lane
  localparam int unsigned MAX_LMUL      = 8;
  localparam int unsigned VLMAX_MAX     = MAX_LMUL * VLEN / ELEN; // 256
  localparam int unsigned MAX_GROUPS    = VLMAX_MAX / ELEMS_PER_ROW; // 32
  localparam int unsigned NR_INSN       = 8;  // in-flight vector instructions
  localparam int unsigned BEAT_BYTES    = AXI_DW / 8;           // 16
  localparam int unsigned ROW_BYTES     = DLEN / 8;             // 32

  // ---- basic types --------------------------------------------------------
  typedef logic [$clog2(NR_INSN)-1:0]     insn_id_t;
  typedef logic [4:0]                     vreg_t;
  typedef logic [$clog2(VLMAX_MAX+1)-1:0] vl_t;        // 0..256
  typedef logic [$clog2(MAX_GROUPS+1)-1:0] grp_cnt_t;  // 0..32
  typedef logic [$clog2(VRF_WORDS)-1:0]   vaddr_t;     // lane word address
  typedef logic [LANE_W-1:0]              lane_word_t;
  typedef logic [DLEN-1:0]                row_t;
  typedef logic [AXI_AW-1:0]              addr_t;
  typedef logic [NR_VREGS-1:0]            vreg_mask_t;

  typedef enum logic [3:0] {
    OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_MUL, OP_LOAD, OP_STORE
  } vop_e;

  typedef enum logic [1:0] { FU_ALU, FU_MUL, FU_LD, FU_ST } fu_e;

  typedef enum logic [1:0] { MODE_UNIT, MODE_STRIDED, MODE_INDEXED } mem_mode_e;

  // decoded vector instruction as it travels from dispatcher to the units
  typedef struct packed {
    insn_id_t  id;
    vop_e      op;
    fu_e       fu;
    vreg_t     vd;        // destination, or store-data source (vs3)
    vreg_t     vs1;
    vreg_t     vs2;
    logic      use_vs1;   // operand B from vs1
    logic      use_vs2;   // operand A from vs2 (also the store data source)
    logic      use_scalar;// operand B is the scalar
    logic [31:0] scalar;  // rs1 value (.vx) or base address (memory)
    logic [31:0] stride;  // rs2 value for strided memory accesses
    mem_mode_e mode;
    logic [3:0] lmul;     // 1, 2, 4 or 8
    vl_t       vl;
  } vinsn_t;

  // one row of load data for all lanes
  typedef struct packed {
    insn_id_t id;
    vaddr_t   waddr;
    row_t     data;
  } ld_row_t;

  // result of one VFU for one element group in one lane
  typedef struct packed {
    insn_id_t   id;
    vaddr_t     waddr;
    lane_word_t data;
  } res_t;

  // address-stream descriptor (VLSU front end)
  typedef struct packed {
    insn_id_t  id;
    logic      is_store;
    mem_mode_e mode;
    addr_t     base;
    logic [31:0] stride;
    logic [11:0] nbytes;  // remaining access length in bytes (<= 1024)
    vl_t       vl;
    vreg_t     vreg;      // vd for loads, vs3 for stores
    logic      prefetch;  // descriptor created by the next-VL prefetcher
    logic [AXI_IDW-1:0] pf_slot;
  } desc_t;

  // bus transaction produced by the transaction generator
  typedef struct packed {
    logic      is_store;
    logic [AXI_IDW-1:0] axi_id;
    addr_t     addr;
    logic [7:0] len;      // beats - 1
    logic [2:0] size;
    insn_id_t  insn;
    logic      last;      // last transaction of the descriptor
    logic      fault;     // no bus access: the descriptor faulted
  } txn_t;

  // command passed from address generation to VLDU / VSTU
  typedef struct packed {
    insn_id_t  id;
    mem_mode_e mode;
    addr_t     base;
    logic [31:0] stride;
    vl_t       vl;
    vreg_t     vreg;
    logic      from_pf;   // served by the prefetch buffer
    logic [AXI_IDW-1:0] pf_slot;
    logic [5:0] pf_beat;  // first beat of the access inside the slot
  } ldst_cmd_t;

  // per-lane event counters (for performance analysis)
  typedef struct packed {
    logic [31:0] alu_busy;     // cycles the ALU computed a group
    logic [31:0] mul_busy;     // cycles the multiplier computed a group
    logic [31:0] fwd;          // operands taken from the forwarding network
    logic [31:0] vrf_reads;    // operand words read from the VRF
    logic [31:0] chain_wait;   // cycles an operand waited for its producer
    logic [31:0] conflicts;    // cycles with a VRF bank conflict
    logic [31:0] dyn_issue;    // issues enabled by release-aware issue
    logic [31:0] dual_push;    // cycles an operand queue took two words
  } lane_stats_t;

  // ---- AXI4 channel payloads (128-bit data) ------------------------------
  localparam int unsigned MAX_BURST  = 16;    // beats per transaction
  localparam int unsigned PAGE_BYTES = 4096;  // AXI 4 KiB boundary, MMU page

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    addr_t              addr;
    logic [7:0]         len;    // beats - 1
    logic [2:0]         size;   // log2(bytes per beat)
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DW-1:0]   data;
    logic [AXI_DW/8-1:0] strb;
    logic                last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [AXI_DW-1:0]  data;
    logic               last;
  } axi_r_t;

  typedef struct packed {
    logic [AXI_IDW-1:0] id;
    logic [1:0]         resp;
  } axi_b_t;

  // beats of the next unit-stride burst starting at 16-byte aligned addr:
  // limited by the remaining beats, MAX_BURST and the 4 KiB boundary
  function automatic int unsigned burst_beats(addr_t addr, int unsigned remaining);
    int unsigned to_page;
    to_page = (PAGE_BYTES - (int'(addr) % PAGE_BYTES)) / BEAT_BYTES;
    burst_beats = remaining;
    if (burst_beats > MAX_BURST) burst_beats = MAX_BURST;
    if (burst_beats > to_page)   burst_beats = to_page;
  endfunction

  // VLSU event counters
  typedef struct packed {
    logic [31:0] pf_issued;    // prefetch descriptors emitted
    logic [31:0] pf_hits;      // loads served by the prefetch buffer
    logic [31:0] pf_beats;     // beats delivered from the prefetch buffer
    logic [31:0] ar_txns;      // read transactions issued
    logic [31:0] aw_txns;      // write transactions issued
    logic [31:0] translations; // MMU translations waited for
  } vlsu_stats_t;

  // number of element groups (rows) an instruction of length vl touches
  function automatic grp_cnt_t groups_of(vl_t vl);
    return grp_cnt_t'((vl + ELEMS_PER_ROW - 1) / ELEMS_PER_ROW);
  endfunction

  // registers covered by register group (base, lmul)
  function automatic vreg_mask_t vreg_group_mask(vreg_t base, logic [3:0] lmul);
    vreg_mask_t m;
    m = '0;
    for (int i = 0; i < MAX_LMUL; i++)
      if (i < int'(lmul)) m[(int'(base) + i) % NR_VREGS] = 1'b1;
    return m;
  endfunction

endpackage
