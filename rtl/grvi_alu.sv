// grvi_alu: the GRVI execute-stage ALU.
//
// Combinational: add, subtract, and, or, xor, and pass-B (used by LUI). The
// paper's core has no shifter of its own (shifts go to a shifter shared by a
// PE pair) and a separate comparator for branches and SLT, so this ALU is
// only the adder and logic unit. The operation encoding is this design's.
module grvi_alu
  import grvi_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  alu_op_e         op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_AND:   y = a & b;
      ALU_OR:    y = a | b;
      ALU_XOR:   y = a ^ b;
      ALU_PASSB: y = b;
      default:   y = a + b;
    endcase
  end
endmodule
