// ara_dispatcher: instruction decoder, vector CSRs (vl, vtype) and dispatch
// control.
//
// Instructions arrive one at a time on a valid/ready port together with the
// values of the scalar registers rs1 and rs2, as an ideal dispatcher or a
// scalar core would provide them. The decoder recognises a subset of RVV 1.0:
//   vsetvli                          (SEW must be e32; LMUL 1/2/4/8)
//   vle32.v / vlse32.v               (unit-stride / strided loads)
//   vse32.v / vsse32.v               (unit-stride / strided stores)
//   vadd, vsub, vand, vor, vxor      (.vv and .vx, OPIVV / OPIVX)
//   vmul                             (.vv and .vx, OPMVV / OPMVX)
// Only unmasked forms (vm = 1) are accepted. vsetvli is executed here: it
// sets vl = min(AVL, VLMAX) with VLMAX = LMUL * VLEN / 32 (AVL = rs1 value,
// or VLMAX when rs1 = x0). Vector instructions are then issued to the
// sequencer as a decoded vinsn_t carrying the current vl and LMUL; with
// vl = 0 they are retired without being issued. Unsupported encodings raise
// illegal_o for one cycle and are dropped.
//
// Timing: one instruction per cycle when the sequencer is ready; the decoded
// instruction is registered (one cycle latency). The paper names the decoder,
// CSR and dispatch control; the supported subset and the encodings handling
// are this implementation's choice.
module ara_dispatcher
  import ara_opt_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // instruction injection
  input  logic        insn_valid_i,
  output logic        insn_ready_o,
  input  logic [31:0] insn_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  // to sequencer
  output logic        vinsn_valid_o,
  input  logic        vinsn_ready_i,
  output vinsn_t      vinsn_o,
  // status
  output logic        illegal_o,
  output vl_t         vl_o,
  output logic [3:0]  lmul_o
);
  localparam logic [6:0] OPC_V  = 7'b1010111;
  localparam logic [6:0] OPC_LD = 7'b0000111;
  localparam logic [6:0] OPC_ST = 7'b0100111;

  vl_t        vl_q;
  logic [3:0] lmul_q;
  logic       out_valid_q;
  vinsn_t     out_q;

  // ---- decode ---------------------------------------------------------------
  logic [6:0] opc;
  logic [2:0] f3;
  logic [5:0] f6;
  logic       vm;
  vreg_t      rd, r1, r2;
  assign opc = insn_i[6:0];
  assign f3  = insn_i[14:12];
  assign f6  = insn_i[31:26];
  assign vm  = insn_i[25];
  assign rd  = insn_i[11:7];
  assign r1  = insn_i[19:15];
  assign r2  = insn_i[24:20];

  typedef enum logic [1:0] { D_ILLEGAL, D_CFG, D_VEC } dkind_e;
  dkind_e     kind;
  vinsn_t     dec;
  logic [3:0] new_lmul;
  vl_t        new_vl;

  always_comb begin
    logic [31:0] vlmax;
    kind     = D_ILLEGAL;
    dec      = '0;
    dec.vd   = rd;
    dec.vs1  = r1;
    dec.vs2  = r2;
    dec.scalar = rs1_i;
    dec.stride = rs2_i;
    dec.lmul = lmul_q;
    dec.vl   = vl_q;
    dec.mode = MODE_UNIT;
    new_lmul = lmul_q;
    new_vl   = vl_q;
    vlmax    = 32'd0;
    unique case (opc)
      OPC_V: begin
        if (f3 == 3'b111 && !insn_i[31]) begin
          // vsetvli: zimm[10:0] = insn[30:20]; vsew = zimm[5:3], vlmul = zimm[2:0]
          if (insn_i[25:23] == 3'b010 && insn_i[22] == 1'b0) begin
            unique case (insn_i[21:20])
              2'd0: new_lmul = 4'd1;
              2'd1: new_lmul = 4'd2;
              2'd2: new_lmul = 4'd4;
              default: new_lmul = 4'd8;
            endcase
            vlmax = 32'(new_lmul) * (VLEN / ELEN);
            if (r1 == '0)           new_vl = vl_t'(vlmax);
            else if (rs1_i > vlmax) new_vl = vl_t'(vlmax);
            else                    new_vl = vl_t'(rs1_i);
            kind = D_CFG;
          end
        end else if (vm) begin
          dec.use_vs2 = 1'b1;
          dec.fu      = FU_ALU;
          unique case (f3)
            3'b000, 3'b100: begin // OPIVV / OPIVX
              dec.use_vs1    = (f3 == 3'b000);
              dec.use_scalar = (f3 == 3'b100);
              kind = D_VEC;
              unique case (f6)
                6'b000000: dec.op = OP_ADD;
                6'b000010: dec.op = OP_SUB;
                6'b001001: dec.op = OP_AND;
                6'b001010: dec.op = OP_OR;
                6'b001011: dec.op = OP_XOR;
                default:   kind   = D_ILLEGAL;
              endcase
            end
            3'b010, 3'b110: begin // OPMVV / OPMVX
              dec.use_vs1    = (f3 == 3'b010);
              dec.use_scalar = (f3 == 3'b110);
              dec.fu         = FU_MUL;
              dec.op         = OP_MUL;
              kind = (f6 == 6'b100101) ? D_VEC : D_ILLEGAL;
            end
            default: kind = D_ILLEGAL;
          endcase
        end
      end
      OPC_LD, OPC_ST: begin
        // width 110 = 32-bit elements, mew = 0, nf = 0, lumop/sumop = 0
        if (f3 == 3'b110 && vm && insn_i[31:28] == 4'b0000) begin
          dec.op      = (opc == OPC_LD) ? OP_LOAD : OP_STORE;
          dec.fu      = (opc == OPC_LD) ? FU_LD : FU_ST;
          dec.use_vs2 = 1'b0;
          unique case (insn_i[27:26])
            2'b00: begin dec.mode = MODE_UNIT; kind = (r2 == '0) ? D_VEC : D_ILLEGAL; end
            2'b10: begin dec.mode = MODE_STRIDED; kind = D_VEC; end
            default: kind = D_ILLEGAL; // indexed: needs index operands from the lanes
          endcase
        end
      end
      default: kind = D_ILLEGAL;
    endcase
  end

  // ---- dispatch control ----------------------------------------------------
  logic out_free;
  assign out_free     = !out_valid_q || vinsn_ready_i;
  assign insn_ready_o = out_free;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q        <= '0;
      lmul_q      <= 4'd1;
      out_valid_q <= 1'b0;
      out_q       <= '0;
      illegal_o   <= 1'b0;
    end else begin
      illegal_o <= 1'b0;
      if (out_free) out_valid_q <= 1'b0;
      if (insn_valid_i && out_free) begin
        unique case (kind)
          D_CFG: begin
            vl_q   <= new_vl;
            lmul_q <= new_lmul;
          end
          D_VEC: begin
            if (vl_q != '0) begin
              out_valid_q <= 1'b1;
              out_q       <= dec;
            end
          end
          default: illegal_o <= 1'b1;
        endcase
      end
    end
  end

  assign vinsn_valid_o = out_valid_q;
  assign vinsn_o       = out_q;
  assign vl_o          = vl_q;
  assign lmul_o        = lmul_q;
endmodule
