// rv_asm_pkg: RV32I instruction encoders for the testbenches.
//
// Each function returns the 32-bit encoding of one RV32I instruction, using
// the field layouts of the RISC-V unprivileged specification. Branch and jump
// offsets are byte offsets relative to the instruction's own address.
package rv_asm_pkg;
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] enc_i(int imm, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    logic [11:0] v = 12'(imm);
    return {v, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] enc_s(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [11:0] v = 12'(imm);
    return {v[11:5], rs2, rs1, f3, v[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [12:0] v = 13'(imm);
    return {v[12], v[10:5], rs2, rs1, f3, v[4:1], v[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] LUI(logic [4:0] rd, int imm20);   return {20'(imm20), rd, 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(logic [4:0] rd, int imm20); return {20'(imm20), rd, 7'b0010111}; endfunction
  function automatic logic [31:0] JAL(logic [4:0] rd, int off);
    logic [20:0] v = 21'(off);
    return {v[20], v[10:1], v[11], v[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b1100111); endfunction

  function automatic logic [31:0] BEQ (logic [4:0] a, logic [4:0] b, int off); return enc_b(off, b, a, 3'b000); endfunction
  function automatic logic [31:0] BNE (logic [4:0] a, logic [4:0] b, int off); return enc_b(off, b, a, 3'b001); endfunction
  function automatic logic [31:0] BLT (logic [4:0] a, logic [4:0] b, int off); return enc_b(off, b, a, 3'b100); endfunction
  function automatic logic [31:0] BGE (logic [4:0] a, logic [4:0] b, int off); return enc_b(off, b, a, 3'b101); endfunction
  function automatic logic [31:0] BLTU(logic [4:0] a, logic [4:0] b, int off); return enc_b(off, b, a, 3'b110); endfunction
  function automatic logic [31:0] BGEU(logic [4:0] a, logic [4:0] b, int off); return enc_b(off, b, a, 3'b111); endfunction

  function automatic logic [31:0] LB (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LW (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU(logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LHU(logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b101, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SB (logic [4:0] rs2, logic [4:0] rs1, int imm); return enc_s(imm, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] SH (logic [4:0] rs2, logic [4:0] rs1, int imm); return enc_s(imm, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] SW (logic [4:0] rs2, logic [4:0] rs1, int imm); return enc_s(imm, rs2, rs1, 3'b010); endfunction

  function automatic logic [31:0] ADDI (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTI (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b010, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTIU(logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b011, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ORI  (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b110, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI (logic [4:0] rd, logic [4:0] rs1, int imm); return enc_i(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI (logic [4:0] rd, logic [4:0] rs1, int sh); return enc_i(sh & 31, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRLI (logic [4:0] rd, logic [4:0] rs1, int sh); return enc_i(sh & 31, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI (logic [4:0] rd, logic [4:0] rs1, int sh); return enc_i((sh & 31) | 32'h400, rs1, 3'b101, rd, 7'b0010011); endfunction

  function automatic logic [31:0] ADD (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h20, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLL (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b001, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b010, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b011, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRL (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b101, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRA (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h20, b, a, 3'b101, rd, 7'b0110011); endfunction
  function automatic logic [31:0] OR  (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b110, rd, 7'b0110011); endfunction
  function automatic logic [31:0] AND (logic [4:0] rd, logic [4:0] a, logic [4:0] b); return enc_r(7'h00, b, a, 3'b111, rd, 7'b0110011); endfunction
endpackage
