// grvi_cmp: the GRVI dedicated comparator.
//
// Combinational. Compares the two execute-stage operands for the six RV32I
// conditional branches (funct3 BEQ/BNE/BLT/BGE/BLTU/BGEU) and produces the
// set-less-than bit for SLT/SLTI (funct3 010) and SLTU/SLTIU (funct3 011).
// A dedicated comparator is the paper's; the funct3 encodings are RISC-V's.
module grvi_cmp #(
  parameter int unsigned XLEN = 32
) (
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  logic [2:0]      funct3,
  output logic            take,   // branch condition holds
  output logic            lt      // SLT / SLTU result
);
  logic eq, lts, ltu;
  assign eq  = (a == b);
  assign lts = ($signed(a) < $signed(b));
  assign ltu = (a < b);

  always_comb begin
    unique case (funct3)
      3'b000:  take = eq;
      3'b001:  take = !eq;
      3'b100:  take = lts;
      3'b101:  take = !lts;
      3'b110:  take = ltu;
      3'b111:  take = !ltu;
      default: take = 1'b0;
    endcase
    lt = funct3[0] ? ltu : lts;   // 010 SLT, 011 SLTU
  end
endmodule
