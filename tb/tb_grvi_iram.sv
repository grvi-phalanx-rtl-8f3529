// tb_grvi_iram: loads the IRAM through its write port (one word per cycle, so
// 1024 words take 1024 cycles), then reads both ports at random against a
// reference copy, checking that a NOC write takes port B (b_gnt low) and that
// a read register holds its word while its port is idle.
`timescale 1ns/1ps
module tb_grvi_iram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        a_en, b_en, b_gnt, we;
  logic [9:0]  a_addr, b_addr, waddr;
  logic [31:0] a_rdata, b_rdata, wdata;
  logic [31:0] refm [1024];
  logic [31:0] ea, eb;
  int checks = 0, failures = 0, cycles = 0;
  grvi_iram dut (.*);
  initial begin
    a_en = 0; b_en = 0; we = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 1024; i++) begin
      we = 1; waddr = 10'(i); wdata = $urandom; refm[i] = wdata;
      @(posedge clk); #1; cycles++;
    end
    we = 0;
    checks++;
    if (cycles != 1024) failures++;
    ea = 'x; eb = 'x;
    for (int n = 0; n < 3000; n++) begin
      a_en = (n == 0) || $urandom_range(1); b_en = (n == 0) || $urandom_range(1);
      a_addr = 10'($urandom); b_addr = 10'($urandom);
      we = (n > 0) && ($urandom_range(7) == 0); waddr = 10'($urandom); wdata = $urandom;
      #1;
      checks++;
      if (b_gnt !== !we) begin failures++; $display("FAIL b_gnt"); end
      if (a_en) ea = refm[a_addr];
      if (b_en && !we) eb = refm[b_addr];
      @(posedge clk);
      if (we) refm[waddr] = wdata;
      #1;
      if (n > 0) begin
        checks += 2;
        if (a_rdata !== ea) begin failures++; $display("FAIL port A %h vs %h", a_rdata, ea); end
        if (b_rdata !== eb) begin failures++; $display("FAIL port B %h vs %h", b_rdata, eb); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
