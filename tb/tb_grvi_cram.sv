// tb_grvi_cram: random traffic on the CRAM's four PE bank ports (byte-enabled
// word writes and reads, bank b receiving addresses with addr[3:2] = b) and on
// its 256-bit line port in the same cycles, against a 32 KB reference. Data
// written through one kind of port is read back through the other, which
// checks that both interleavings address the same bytes. Reads return one
// cycle after the request. At the end every line is read through the wide
// port and compared.
`timescale 1ns/1ps
module tb_grvi_cram;
  import grvi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  mem_req_t [3:0]    preq;
  logic [3:0][31:0]  prdata;
  logic              wen, wwe;
  logic [9:0]        waddr;
  logic [255:0]      wwdata, wrdata;
  int checks = 0, failures = 0;
  grvi_cram dut (.*);

  logic [31:0]  refm [8192];
  logic [3:0]   ev;
  logic [31:0]  ed [4];
  logic         ewv;
  logic [255:0] ewd;

  initial begin
    preq = '0; wen = 0; wwe = 0;
    // clear through the wide port
    for (int l = 0; l < 1024; l++) begin
      wen = 1; wwe = 1; waddr = 10'(l); wwdata = '0;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 8192; i++) refm[i] = 0;
    ev = 0; ewv = 0;
    for (int n = 0; n < 6000; n++) begin
      // wide port
      wen = $urandom_range(1); wwe = $urandom_range(1); waddr = 10'($urandom_range(63));
      for (int k = 0; k < 8; k++) wwdata[32*k +: 32] = $urandom;
      // PE ports, avoiding the line the wide port writes this cycle
      for (int b = 0; b < 4; b++) begin
        preq[b].valid = $urandom_range(1);
        preq[b].we    = $urandom_range(1);
        preq[b].be    = 4'($urandom);
        preq[b].wdata = $urandom;
        preq[b].addr  = {17'd0, 6'($urandom), 1'($urandom), 2'(b), 2'b00};
        if (wen && wwe && preq[b].addr[14:5] == waddr) preq[b].valid = 0;
      end
      #1;
      // reads see the memory before this cycle's writes
      ev = 0; ewv = 0;
      for (int b = 0; b < 4; b++) if (preq[b].valid && !preq[b].we) begin
        ev[b] = 1; ed[b] = refm[int'(preq[b].addr[14:2])];
      end
      if (wen && !wwe) begin
        ewv = 1;
        for (int k = 0; k < 8; k++) ewd[32*k +: 32] = refm[8*int'(waddr) + k];
      end
      @(posedge clk); #1;
      for (int b = 0; b < 4; b++) if (ev[b]) begin
        checks++;
        if (prdata[b] !== ed[b]) begin failures++; $display("FAIL PE port %0d: %h vs %h", b, prdata[b], ed[b]); end
      end
      if (ewv) begin
        checks++;
        if (wrdata !== ewd) begin failures++; $display("FAIL wide read"); end
      end
      for (int b = 0; b < 4; b++) if (preq[b].valid && preq[b].we)
        for (int j = 0; j < 4; j++) if (preq[b].be[j]) refm[int'(preq[b].addr[14:2])][8*j +: 8] = preq[b].wdata[8*j +: 8];
      if (wen && wwe) for (int k = 0; k < 8; k++) refm[8*int'(waddr) + k] = wwdata[32*k +: 32];
    end
    preq = '0;
    for (int l = 0; l < 64; l++) begin
      wen = 1; wwe = 0; waddr = 10'(l);
      @(posedge clk); #1;
      checks++;
      for (int k = 0; k < 8; k++)
        if (wrdata[32*k +: 32] !== refm[8*l + k]) begin failures++; $display("FAIL final line %0d word %0d", l, k); end
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
