// rvv_enc.svh: RVV 1.0 instruction encoders used by the testbenches.
// x-register numbers only label the operands; their values are passed
// separately on the rs1/rs2 inputs of the vector unit. The file is included
// inside a testbench module, so each testbench gets its own copy.
function automatic logic [31:0] enc_vsetvli(int rd, int rs1, int lmul_log2);
  // vtype: vma=0 vta=0 vsew=010 (e32) vlmul
  logic [10:0] zimm;
  zimm = {5'b0, 3'b010, 3'(lmul_log2)};
  return {1'b0, zimm, 5'(rs1), 3'b111, 5'(rd), 7'b1010111};
endfunction
function automatic logic [31:0] enc_vle32(int vd, int rs1);
  return {3'b000, 1'b0, 2'b00, 1'b1, 5'b00000, 5'(rs1), 3'b110, 5'(vd), 7'b0000111};
endfunction
function automatic logic [31:0] enc_vlse32(int vd, int rs1, int rs2);
  return {3'b000, 1'b0, 2'b10, 1'b1, 5'(rs2), 5'(rs1), 3'b110, 5'(vd), 7'b0000111};
endfunction
function automatic logic [31:0] enc_vse32(int vs3, int rs1);
  return {3'b000, 1'b0, 2'b00, 1'b1, 5'b00000, 5'(rs1), 3'b110, 5'(vs3), 7'b0100111};
endfunction
function automatic logic [31:0] enc_vsse32(int vs3, int rs1, int rs2);
  return {3'b000, 1'b0, 2'b10, 1'b1, 5'(rs2), 5'(rs1), 3'b110, 5'(vs3), 7'b0100111};
endfunction
// funct6 values
localparam logic [5:0] F6_ADD = 6'b000000, F6_SUB = 6'b000010, F6_AND = 6'b001001,
                       F6_OR  = 6'b001010, F6_XOR = 6'b001011, F6_MUL = 6'b100101;
function automatic logic [31:0] enc_opivv(logic [5:0] f6, int vd, int vs2, int vs1);
  return {f6, 1'b1, 5'(vs2), 5'(vs1), 3'b000, 5'(vd), 7'b1010111};
endfunction
function automatic logic [31:0] enc_opivx(logic [5:0] f6, int vd, int vs2, int rs1);
  return {f6, 1'b1, 5'(vs2), 5'(rs1), 3'b100, 5'(vd), 7'b1010111};
endfunction
function automatic logic [31:0] enc_opmvv(logic [5:0] f6, int vd, int vs2, int vs1);
  return {f6, 1'b1, 5'(vs2), 5'(vs1), 3'b010, 5'(vd), 7'b1010111};
endfunction
function automatic logic [31:0] enc_opmvx(logic [5:0] f6, int vd, int vs2, int rs1);
  return {f6, 1'b1, 5'(vs2), 5'(rs1), 3'b110, 5'(vd), 7'b1010111};
endfunction
