// vlsu_addrgen: address-generation control FSM, address expansion unit and
// transaction generator of the VLSU.
//
// One descriptor is processed at a time. The FSM
//   IDLE   -> accepts a descriptor; the whole access range is checked by the
//             MMU (and unit-stride bases must be 16-byte aligned here);
//             a faulting descriptor raises exc_o and produces no bus access
//             (a store sends one `fault` transaction so its completion is
//             still reported in order; a prefetch frees its buffer slot)
//   TRANS  -> waits for the translation of the current page
//   EXPAND -> expands addresses and emits transactions:
//               unit-stride: bursts of up to MAX_BURST 16-byte beats that do
//                            not cross a 4 KiB page (see burst_beats)
//               strided:     one single-beat 4-byte transaction per element
//             and returns to TRANS whenever the next address is on a new page.
// A transaction is emitted per cycle when the queue downstream takes it.
// Demand transactions carry AXI ID 0; prefetch ones carry 1 + buffer slot.
// Indexed accesses are not generated (they need index operands from the
// lanes that this design does not route to the VLSU).
// FSM, expansion modes and translation wait follow the paper; burst size,
// page rule and fault handling are this design's.
module vlsu_addrgen
  import ara_opt_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  desc_valid_i,
  output logic  desc_ready_o,
  input  desc_t desc_i,
  // MMU
  output logic  mmu_req_o,
  output addr_t mmu_vpage_o,
  input  logic  mmu_rsp_i,
  input  addr_t mmu_ppage_i,
  output addr_t chk_base_o,
  output logic [31:0] chk_last_o,
  input  logic  chk_fault_i,
  // transactions
  output logic  txn_valid_o,
  input  logic  txn_ready_i,
  output txn_t  txn_o,
  // exceptions
  output logic  exc_o,
  output insn_id_t exc_id_o,
  output logic  exc_store_o,
  output logic  pf_abort_o,
  output logic [AXI_IDW-1:0] pf_abort_slot_o,
  output logic [31:0] trans_cnt_o
);
  typedef enum logic [1:0] { S_IDLE, S_TRANS, S_EXPAND, S_FAULT } state_e;
  state_e state_q;
  desc_t  d_q;
  addr_t  va_q, ppage_q;
  logic [8:0] rem_q;   // beats (unit) or elements (strided) still to go
  logic   req_sent_q;

  logic   fault;
  int unsigned nb;
  addr_t  va_next;

  assign chk_base_o = desc_i.base;
  assign chk_last_o = (desc_i.mode == MODE_UNIT) ? desc_i.base + addr_t'(desc_i.nbytes) - 1 :
                      desc_i.base + desc_i.stride * addr_t'(desc_i.nbytes / 4 - 1) + 3;
  assign fault      = chk_fault_i || (desc_i.mode == MODE_UNIT && desc_i.base[3:0] != 4'h0) ||
                      (desc_i.mode == MODE_INDEXED);
  assign desc_ready_o = (state_q == S_IDLE);

  assign mmu_req_o   = (state_q == S_TRANS) && !req_sent_q;
  assign mmu_vpage_o = {va_q[AXI_AW-1:12], 12'h000};

  always_comb begin
    nb = (d_q.mode == MODE_UNIT) ? burst_beats(va_q, int'(rem_q)) : 1;
    txn_o          = '0;
    txn_o.is_store = d_q.is_store;
    txn_o.axi_id   = d_q.prefetch ? AXI_IDW'(d_q.pf_slot + 1'b1) : '0;
    txn_o.addr     = {ppage_q[AXI_AW-1:12], va_q[11:0]};
    txn_o.len      = 8'(nb - 1);
    txn_o.size     = (d_q.mode == MODE_UNIT) ? 3'd4 : 3'd2;
    txn_o.insn     = d_q.id;
    txn_o.last     = (int'(rem_q) == nb);
    txn_o.fault    = (state_q == S_FAULT);
    if (state_q == S_FAULT) txn_o.last = 1'b1;
    txn_valid_o    = (state_q == S_EXPAND) || (state_q == S_FAULT);
    va_next        = (d_q.mode == MODE_UNIT) ? va_q + addr_t'(nb * BEAT_BYTES) : va_q + d_q.stride;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q         <= S_IDLE;
      d_q             <= '0;
      va_q            <= '0;
      ppage_q         <= '0;
      rem_q           <= '0;
      req_sent_q      <= 1'b0;
      exc_o           <= 1'b0;
      exc_id_o        <= '0;
      exc_store_o     <= 1'b0;
      pf_abort_o      <= 1'b0;
      pf_abort_slot_o <= '0;
      trans_cnt_o     <= '0;
    end else begin
      exc_o      <= 1'b0;
      pf_abort_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (desc_valid_i) begin
          d_q        <= desc_i;
          va_q       <= desc_i.base;
          rem_q      <= (desc_i.mode == MODE_UNIT) ? 9'((desc_i.nbytes + 12'(BEAT_BYTES - 1)) / 12'(BEAT_BYTES))
                                                   : 9'(desc_i.vl);
          req_sent_q <= 1'b0;
          if (fault) begin
            if (desc_i.prefetch) begin
              pf_abort_o      <= 1'b1;
              pf_abort_slot_o <= desc_i.pf_slot;
            end else begin
              exc_o    <= 1'b1;
              exc_id_o <= desc_i.id;
              exc_store_o <= desc_i.is_store;
            end
            state_q <= (desc_i.is_store && !desc_i.prefetch) ? S_FAULT : S_IDLE;
          end else begin
            state_q <= S_TRANS;
          end
        end
        S_TRANS: begin
          if (mmu_req_o) begin
            req_sent_q  <= 1'b1;
            trans_cnt_o <= trans_cnt_o + 1;
          end
          if (mmu_rsp_i && req_sent_q) begin
            ppage_q    <= mmu_ppage_i;
            req_sent_q <= 1'b0;
            state_q    <= S_EXPAND;
          end
        end
        S_EXPAND: if (txn_ready_i) begin
          va_q  <= va_next;
          rem_q <= rem_q - 9'(nb);
          if (txn_o.last)                             state_q <= S_IDLE;
          else if (va_next[31:12] != va_q[31:12])     state_q <= S_TRANS;
        end
        S_FAULT: if (txn_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
