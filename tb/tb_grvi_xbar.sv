// tb_grvi_xbar: four masters send random reads and writes to the four
// interleaved banks and to the MMIO target of the crossbar. The testbench
// models the banks (synchronous read, one cycle) and an MMIO target that
// accepts at random. Checks: at most one grant per target and cycle, a
// request is granted whenever its bank is free of competitors' grants
// (work-conserving), the bank sees exactly the granted request, read data
// returns to the right master one cycle after its grant, the final bank
// contents match a reference, conflicts occur and are resolved with a
// round-robin wait bound (a bank request waits at most three cycles).
`timescale 1ns/1ps
module tb_grvi_xbar;
  import grvi_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  mem_req_t [3:0]       mreq, breq;
  logic [3:0]           mgnt, mrvalid;
  logic [3:0][31:0]     mrdata, brdata;
  mem_req_t             ioreq;
  logic                 iognt;
  logic [31:0]          iordata;
  int checks = 0, failures = 0, conflicts = 0;
  grvi_xbar #(.M(4)) dut (.*);

  logic [31:0] bank [4][64];
  logic [31:0] refm [256];
  logic [3:0]  exp_v;
  logic [31:0] exp_d [4];
  int          waitc [4];

  always_ff @(posedge clk) begin
    for (int b = 0; b < 4; b++)
      if (breq[b].valid) begin
        if (breq[b].we) bank[b][breq[b].addr[9:4]] <= breq[b].wdata;
        else brdata[b] <= bank[b][breq[b].addr[9:4]];
      end
    if (ioreq.valid && iognt) iordata <= {16'hA5A5, 13'd0, ioreq.pe};
  end

  initial begin
    for (int b = 0; b < 4; b++) for (int i = 0; i < 64; i++) bank[b][i] = 0;
    for (int i = 0; i < 256; i++) refm[i] = 0;
    mreq = '0; iognt = 0; exp_v = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      for (int m = 0; m < 4; m++)
        if (!mreq[m].valid && $urandom_range(3) != 0) begin
          mreq[m].valid = 1;
          mreq[m].we    = $urandom_range(1);
          mreq[m].addr  = ($urandom_range(9) == 0) ? 32'h4000_0000 : {22'd0, 8'($urandom), 2'b00};
          mreq[m].wdata = $urandom;
          mreq[m].be    = 4'hF;
          mreq[m].pe    = 3'(m);
        end
      iognt = $urandom_range(1);
      #1;
      // responses of last cycle's grants
      for (int m = 0; m < 4; m++) begin
        checks++;
        if (mrvalid[m] !== exp_v[m] || (exp_v[m] && mrdata[m] !== exp_d[m])) begin
          failures++; $display("FAIL response master %0d: v=%b d=%h exp %b %h", m, mrvalid[m], mrdata[m], exp_v[m], exp_d[m]);
        end
      end
      exp_v = 0;
      // grants
      for (int t = 0; t < 5; t++) begin
        int ng, nreq;
        ng = 0; nreq = 0;
        for (int m = 0; m < 4; m++) if (mreq[m].valid) begin
          int tt;
          tt = (mreq[m].addr[31:30] == 2'b01) ? 4 : int'(mreq[m].addr[3:2]);
          if (tt == t) begin
            nreq++;
            if (mgnt[m]) begin
              ng++;
              if (t < 4) begin
                checks++;
                if (breq[t].valid !== 1'b1 || breq[t].addr !== mreq[m].addr || breq[t].we !== mreq[m].we) begin
                  failures++; $display("FAIL bank %0d sees wrong request", t);
                end
              end
              if (!mreq[m].we) begin
                exp_v[m] = 1;
                exp_d[m] = (t < 4) ? refm[mreq[m].addr[9:2]] : {16'hA5A5, 13'd0, 3'(m)};
              end else if (t < 4) refm[mreq[m].addr[9:2]] = mreq[m].wdata;
            end
          end
        end
        checks++;
        if (ng > 1 || (nreq > 0 && ng == 0 && (t < 4 || iognt))) begin
          failures++; $display("FAIL target %0d: %0d requests, %0d grants", t, nreq, ng);
        end
        if (nreq > 1) conflicts++;
      end
      for (int m = 0; m < 4; m++) begin
        checks++;
        if (mgnt[m] && !mreq[m].valid) begin failures++; $display("FAIL grant without request"); end
        if (mreq[m].valid && !mgnt[m] && mreq[m].addr[31:30] == 2'b00) waitc[m]++; else waitc[m] = 0;
        if (waitc[m] > 3) begin failures++; $display("FAIL master %0d starved", m); end
      end
      @(posedge clk); #1;
      for (int m = 0; m < 4; m++) if (mgnt[m]) mreq[m].valid = 0;
    end
    for (int i = 0; i < 256; i++) begin
      checks++;
      if (bank[i % 4][i / 4] !== refm[i]) begin failures++; $display("FAIL memory %0d", i); end
    end
    checks++;
    if (conflicts < 100) failures++;
    $display("conflicts=%0d", conflicts);
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
