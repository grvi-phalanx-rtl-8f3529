// tb_grvi_cmp: the comparator's branch decision for all six branch funct3
// codes and the SLT/SLTU bit, on random and corner-case operands.
`timescale 1ns/1ps
module tb_grvi_cmp;
  logic [31:0] a, b;
  logic [2:0]  funct3;
  logic        take, lt, e;
  int checks = 0, failures = 0;
  logic [31:0] corner [6] = '{32'h0, 32'h1, 32'h7FFFFFFF, 32'h80000000, 32'hFFFFFFFF, 32'h12345678};
  grvi_cmp dut (.*);
  initial begin
    for (int n = 0; n < 4000; n++) begin
      a = (n % 3 == 0) ? corner[$urandom_range(5)] : $urandom;
      b = (n % 5 == 0) ? a : ((n % 3 == 1) ? corner[$urandom_range(5)] : $urandom);
      funct3 = 3'($urandom);
      #1;
      case (funct3)
        3'b000: e = a == b;
        3'b001: e = a != b;
        3'b100: e = $signed(a) < $signed(b);
        3'b101: e = $signed(a) >= $signed(b);
        3'b110: e = a < b;
        3'b111: e = a >= b;
        default: e = 0;
      endcase
      checks++;
      if (take !== e) begin failures++; $display("FAIL take f3=%b %h %h", funct3, a, b); end
      if (funct3 == 3'b010 || funct3 == 3'b011) begin
        checks++;
        if (lt !== (funct3[0] ? (a < b) : ($signed(a) < $signed(b)))) begin
          failures++; $display("FAIL lt f3=%b %h %h", funct3, a, b);
        end
      end
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
