// tb_grvi_alu: random operands through every ALU operation, compared with the
// SystemVerilog operators.
`timescale 1ns/1ps
module tb_grvi_alu;
  import grvi_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;
  grvi_alu dut (.*);
  initial begin
    for (int n = 0; n < 3000; n++) begin
      a = $urandom; b = (n % 7 == 0) ? a : $urandom;
      op = alu_op_e'($urandom_range(5));
      #1;
      case (op)
        ALU_ADD: e = a + b;  ALU_SUB: e = a - b;  ALU_AND: e = a & b;
        ALU_OR:  e = a | b;  ALU_XOR: e = a ^ b;  default: e = b;
      endcase
      checks++;
      if (y !== e) begin failures++; $display("FAIL op %0d %h %h -> %h", op, a, b, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
