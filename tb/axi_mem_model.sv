// axi_mem_model: behavioural AXI4 slave memory for simulation only (not
// synthesizable, not part of the design).
//
// Stands in for the memory interconnect and memory behind the vector unit's
// 128-bit AXI port. MEM_BEATS 16-byte words, addressed by addr[.. : 4].
// Reads: accepted AR requests wait LATENCY cycles, then return their beats
// in order of acceptance, one per cycle (the whole 16-byte word for narrow
// transfers). Writes: AW and W are queued independently (W may come first);
// each beat is written with its byte strobes and a B response follows the
// last beat. With STALL_PCT > 0 the ready signals drop at random.
// Testbenches reach the contents with the rd32 / wr32 functions.
module axi_mem_model
  import ara_opt_pkg::*;
#(
  parameter int unsigned MEM_BEATS = 4096,
  parameter int unsigned LATENCY   = 20,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    ar_valid_i,
  output logic    ar_ready_o,
  input  axi_ax_t ar_i,
  output logic    r_valid_o,
  input  logic    r_ready_i,
  output axi_r_t  r_o,
  input  logic    aw_valid_i,
  output logic    aw_ready_o,
  input  axi_ax_t aw_i,
  input  logic    w_valid_i,
  output logic    w_ready_o,
  input  axi_w_t  w_i,
  output logic    b_valid_o,
  input  logic    b_ready_i,
  output axi_b_t  b_o
);
  logic [AXI_DW-1:0] mem [MEM_BEATS];

  typedef struct { axi_ax_t ax; longint t; } rq_t;
  rq_t     rq [$];
  axi_ax_t awq [$];
  axi_w_t  wq [$];
  axi_b_t  bq [$];
  longint  now;
  int      rbeat;
  int      wbeat;
  logic    stall_ar, stall_aw, stall_w;

  function automatic int idx(addr_t a);
    return int'((a >> 4) % MEM_BEATS);
  endfunction

  function automatic logic [31:0] rd32(addr_t a);
    return mem[idx(a)][a[3:2]*32 +: 32];
  endfunction

  function automatic void wr32(addr_t a, logic [31:0] d);
    mem[idx(a)][a[3:2]*32 +: 32] = d;
  endfunction

  function automatic void clear_all();
    for (int i = 0; i < MEM_BEATS; i++) mem[i] = '0;
  endfunction

  assign ar_ready_o = !stall_ar && rq.size() < 8;
  assign aw_ready_o = !stall_aw && awq.size() < 8;
  assign w_ready_o  = !stall_w && wq.size() < 64;

  always_comb begin
    r_valid_o = 1'b0;
    r_o       = '0;
    if (rq.size() > 0 && now >= rq[0].t) begin
      r_valid_o = 1'b1;
      r_o.id    = rq[0].ax.id;
      r_o.data  = mem[idx(rq[0].ax.addr + addr_t'(rbeat * (1 << rq[0].ax.size)))];
      r_o.last  = (rbeat == int'(rq[0].ax.len));
    end
    b_valid_o = (bq.size() > 0);
    b_o       = (bq.size() > 0) ? bq[0] : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      now   <= 0;
      rbeat <= 0;
      wbeat <= 0;
      rq.delete();
      awq.delete();
      wq.delete();
      bq.delete();
      stall_ar <= 1'b0;
      stall_aw <= 1'b0;
      stall_w  <= 1'b0;
    end else begin
      now <= now + 1;
      stall_ar <= ($urandom_range(99) < STALL_PCT);
      stall_aw <= ($urandom_range(99) < STALL_PCT);
      stall_w  <= ($urandom_range(99) < STALL_PCT);
      if (ar_valid_i && ar_ready_o) rq.push_back('{ax: ar_i, t: now + LATENCY});
      if (r_valid_o && r_ready_i) begin
        if (r_o.last) begin
          void'(rq.pop_front());
          rbeat <= 0;
        end else rbeat <= rbeat + 1;
      end
      if (aw_valid_i && aw_ready_o) awq.push_back(aw_i);
      if (w_valid_i && w_ready_o) wq.push_back(w_i);
      if (b_valid_o && b_ready_i) void'(bq.pop_front());
      // retire one write beat per cycle once its address is known
      if (awq.size() > 0 && wq.size() > 0) begin
        addr_t a;
        a = awq[0].addr + addr_t'(wbeat * (1 << awq[0].size));
        for (int b = 0; b < AXI_DW / 8; b++)
          if (wq[0].strb[b]) mem[idx(a)][b*8 +: 8] = wq[0].data[b*8 +: 8];
        if (wbeat == int'(awq[0].len)) begin
          bq.push_back('{id: awq[0].id, resp: 2'b00});
          void'(awq.pop_front());
          wbeat <= 0;
        end else wbeat <= wbeat + 1;
        void'(wq.pop_front());
      end
    end
  end
endmodule
