// tb_grvi_noc_itf: drives the NOC interface from the crossbar side (MMIO
// send stores and id loads) and from the router side (deliveries of every
// kind, a router that accepts injections at random, an external client).
// The CRAM's 256-bit port is modelled by the testbench. Checks: each send
// produces one message with the header from the store data and the 32 bytes
// of the named CRAM line, in order; a send store is refused while a send is
// in flight; a delivered CRAM line is written in its own cycle, IRAM words,
// run enables and HOST messages reach their outputs; the external client
// goes first; the id load returns {x,y,pe} and the busy bit.
`timescale 1ns/1ps
module tb_grvi_noc_itf;
  import grvi_pkg::*;
  localparam int MX = 3, MY = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  mem_req_t    ioreq;
  logic        iognt;
  logic [31:0] iordata;
  logic        cram_en, cram_we;
  logic [9:0]  cram_addr;
  logic [255:0] cram_wdata, cram_rdata;
  logic        iram_we;
  logic [9:0]  iram_waddr;
  logic [31:0] iram_wdata;
  logic [7:0]  run;
  noc_msg_t    inj, dlv, ext_inj, ext_dlv;
  logic        inj_rdy, ext_inj_rdy;
  int checks = 0, failures = 0, refused = 0, sends = 0, ext_sent = 0;

  grvi_noc_itf #(.MY_X(MX), .MY_Y(MY)) dut (.*);

  logic [255:0] lines [128];
  always_ff @(posedge clk)
    if (cram_en) begin
      if (cram_we) lines[cram_addr[6:0]] <= cram_wdata;
      else         cram_rdata <= lines[cram_addr[6:0]];
    end

  noc_msg_t expq [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic noc_msg_t rnd_msg();
    noc_msg_t m;
    m = '0;
    m.valid = 1; m.dx = 3'($urandom); m.dy = 4'($urandom); m.kind = kind_e'($urandom_range(3));
    m.addr = {3'b001, 7'($urandom)};   // received CRAM lines land in 64..127
    for (int k = 0; k < 8; k++) m.data[32*k +: 32] = $urandom;
    return m;
  endfunction

  initial begin
    for (int i = 0; i < 128; i++) for (int k = 0; k < 8; k++) lines[i][32*k +: 32] = $urandom;
    ioreq = '0; dlv = '0; ext_inj = '0; inj_rdy = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // id load
    ioreq.valid = 1; ioreq.we = 0; ioreq.pe = 3'd5; ioreq.addr = 32'h4000_0000;
    #1 chk(iognt, "id load granted");
    @(posedge clk); #1;
    ioreq = '0;
    chk(iordata == {1'b0, 21'd0, 3'(MX), 4'(MY), 3'd5}, "id value");
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] wd;
      logic [6:0]  ln;
      // crossbar side: a send store when none is pending
      if (!ioreq.valid && sends < 300 && $urandom_range(1)) begin
        ln = 7'($urandom_range(63));
        wd = $urandom;
        ioreq.valid = 1; ioreq.we = 1; ioreq.wdata = wd;
        ioreq.addr  = 32'h4000_0000 | (32'(ln) << 5);
      end
      // router side
      inj_rdy = $urandom_range(2) != 0;
      dlv = ($urandom_range(2) == 0) ? rnd_msg() : '0;
      if (!ext_inj.valid && $urandom_range(15) == 0) ext_inj = rnd_msg();
      #1;
      // combinational checks
      if (ext_inj.valid) chk(inj == ext_inj && ext_inj_rdy == inj_rdy, "external client first");
      else chk(!ext_inj_rdy, "no ext ready without request");
      if (dlv.valid && dlv.kind == K_CRAM)
        chk(cram_en && cram_we && cram_addr == dlv.addr && cram_wdata == dlv.data, "receive CRAM line");
      else chk(!(cram_en && cram_we), "no CRAM write without delivery");
      chk(iram_we == (dlv.valid && dlv.kind == K_IRAM) &&
          (!iram_we || (iram_waddr == dlv.addr && iram_wdata == dlv.data[31:0])), "receive IRAM word");
      chk(ext_dlv.valid == (dlv.valid && dlv.kind == K_HOST) && (!ext_dlv.valid || ext_dlv.data == dlv.data), "HOST delivery");
      if (!ext_inj.valid && inj.valid && inj_rdy) begin
        noc_msg_t e;
        if (expq.size() == 0) chk(0, "unexpected send");
        else begin
          e = expq.pop_front();
          chk(inj.dx == e.dx && inj.dy == e.dy && inj.kind == e.kind && inj.addr == e.addr &&
              inj.data == e.data, "sent message");
        end
      end
      if (ioreq.valid) begin
        if (iognt) begin
          noc_msg_t e;
          e = '0;
          e.valid = 1; e.addr = ioreq.wdata[9:0]; e.dy = ioreq.wdata[13:10];
          e.dx = ioreq.wdata[16:14]; e.kind = kind_e'(ioreq.wdata[18:17]);
          e.data = lines[ioreq.addr[11:5]];
          expq.push_back(e);
          sends++;
        end else refused++;
      end
      @(posedge clk); #1;
      if (ioreq.valid && iognt) ioreq = '0;
      if (ext_inj.valid && ext_inj_rdy) begin ext_inj = '0; ext_sent++; end
      if (dlv.valid && dlv.kind == K_CTRL) chk(run == dlv.data[7:0], "run enables");
    end
    ioreq = '0; dlv = '0; ext_inj = '0; inj_rdy = 1;
    repeat (10) @(posedge clk);
    chk(expq.size() == 0, "all sends left");
    chk(refused > 0 && sends > 100 && ext_sent > 10, "traffic mix");
    $display("sends=%0d refused=%0d ext=%0d", sends, refused, ext_sent);
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
