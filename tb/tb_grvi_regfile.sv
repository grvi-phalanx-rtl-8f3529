// tb_grvi_regfile: checks the 2R/1W register file against a reference array:
// random writes, both read ports every cycle, x0 always zero.
`timescale 1ns/1ps
module tb_grvi_regfile;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [4:0]  ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic        we;
  logic [31:0] ref_regs [32];
  int checks = 0, failures = 0;

  grvi_regfile dut (.*);

  initial begin
    we = 1;
    for (int i = 0; i < 32; i++) begin
      wa = 5'(i); wd = $urandom; ref_regs[i] = (i == 0) ? 0 : wd;
      @(posedge clk); #1;
    end
    for (int n = 0; n < 2000; n++) begin
      we = $urandom_range(1); wa = 5'($urandom); wd = $urandom;
      ra1 = 5'($urandom); ra2 = 5'($urandom);
      #1;
      checks += 2;
      if (rd1 !== ref_regs[ra1]) begin failures++; $display("FAIL rd1 r%0d", ra1); end
      if (rd2 !== ref_regs[ra2]) begin failures++; $display("FAIL rd2 r%0d", ra2); end
      @(posedge clk);
      if (we && wa != 0) ref_regs[wa] = wd;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
