// tb_grvi_cluster: one eight-PE cluster, end to end, driven only through its
// NOC ports. Through the external client port the testbench
//   1. loads all 1024 IRAM words, one message per cycle, and checks that this
//      takes 1024 cycles;
//   2. clears the CRAM lines the kernel uses with 32-byte CRAM messages;
//   3. starts the eight PEs with a CTRL message.
// The PEs run the test kernel (grvi_test_kernel_pkg). Each PE finally sends
// the eight sums as a HOST message; the first which must come out of the external port
// with the right values; the byte and shift results are read from the CRAM.
// A second copy of the kernel sends the line to a neighbour (0,1) through the
// router's south output. Counted and required: crossbar bank conflicts,
// concentrator contention, shifter contention, IRAM port steals.
`timescale 1ns/1ps
module tb_grvi_cluster;
  import grvi_pkg::*;
  import grvi_test_kernel_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  noc_msg_t xi, yi, xo, yo, ext_inj, ext_dlv;
  logic     ext_inj_rdy;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  grvi_cluster #(.MY_X(0), .MY_Y(0)) dut (.*);

  // mechanism counters
  int bank_conflicts = 0, conc_contention = 0, shift_contention = 0, iram_steals = 0;
  always @(posedge clk) if (!rst) begin
    for (int t = 0; t < 4; t++) begin
      int n;
      n = 0;
      for (int m = 0; m < 4; m++)
        if (dut.mreq[m].valid && dut.mreq[m].addr[31:30] == 2'b00 && dut.mreq[m].addr[3:2] == 2'(t)) n++;
      if (n > 1) bank_conflicts++;
    end
    for (int q = 0; q < 4; q++) begin
      if (dut.dreq[2*q].valid && dut.dreq[2*q+1].valid) conc_contention++;
      if (dut.sh_req[2*q] && dut.sh_req[2*q+1]) shift_contention++;
      if (dut.im_en[2*q+1] && !dut.im_gnt[2*q+1]) iram_steals++;
    end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(noc_msg_t m);
    ext_inj = m;
    #1;
    while (!ext_inj_rdy) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    ext_inj = '0;
  endtask

  function automatic noc_msg_t msg(kind_e k, int addr, logic [255:0] d);
    noc_msg_t m = '0;
    m.valid = 1; m.dx = 0; m.dy = 0; m.kind = k; m.addr = 10'(addr); m.data = d;
    return m;
  endfunction

  function automatic logic [31:0] cram_word(int byte_addr);
    int w = byte_addr >> 2;
    case (w % 8)
      0: return dut.u_cram.g_bram[0].mem[w / 8];
      1: return dut.u_cram.g_bram[1].mem[w / 8];
      2: return dut.u_cram.g_bram[2].mem[w / 8];
      3: return dut.u_cram.g_bram[3].mem[w / 8];
      4: return dut.u_cram.g_bram[4].mem[w / 8];
      5: return dut.u_cram.g_bram[5].mem[w / 8];
      6: return dut.u_cram.g_bram[6].mem[w / 8];
      default: return dut.u_cram.g_bram[7].mem[w / 8];
    endcase
  endfunction

  noc_msg_t host_msg;
  bit       host_seen = 0;
  always @(posedge clk) if (ext_dlv.valid) begin host_msg <= ext_dlv; host_seen <= 1; end

  task automatic run_kernel(int to_x, int to_y);
    longint t0;
    // 1. kernel, one word per message
    ext_inj = '0;
    t0 = cyc;
    for (int i = 0; i < 1024; i++)
      send(msg(K_IRAM, i, 256'(kernel_word(i, int'(K_HOST), 0, to_x, to_y))));
    chk(cyc - t0 == 1024, $sformatf("IRAM load took %0d cycles, expected 1024", cyc - t0));
    // 2. clear lines 8..15
    for (int l = 8; l < 16; l++) send(msg(K_CRAM, l, '0));
    // 3. start all PEs
    send(msg(K_CTRL, 0, 256'hFF));
  endtask

  initial begin
    xi = '0; yi = '0; ext_inj = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    run_kernel(-1, -1);
    while (!host_seen && cyc < 20000) @(posedge clk);
    #1;
    chk(host_seen, "HOST message from the PEs");
    for (int p = 0; p < 8; p++) begin
      chk(host_msg.data[32*p +: 32] == 32'(100 * (p + 1)), $sformatf("sum of PE %0d in message", p));
      chk(cram_word(32'h180 + 4 * p) == (32'(100 * (p + 1)) << p), $sformatf("shift result of PE %0d", p));
      chk(cram_word(32'h140 + (p & 4))[8 * (p % 4) +: 8] == 8'(p), $sformatf("byte of PE %0d", p));
    end
    // stop, reload a kernel that sends to (0,1): the message must leave south
    send(msg(K_CTRL, 0, 256'h0));
    run_kernel(0, 1);
    begin
      bit seen = 0;
      for (int k = 0; k < 20000 && !seen; k++) begin
        @(posedge clk); #1;
        if (yo.valid) begin
          seen = 1;
          chk(yo.dx == 0 && yo.dy == 1 && yo.kind == K_HOST && yo.data[63:32] == 32'd200, "message to (0,1) on the south output");
        end
      end
      chk(seen, "message left through the south output");
    end
    $display("bank_conflicts=%0d conc_contention=%0d shift_contention=%0d iram_steals=%0d",
             bank_conflicts, conc_contention, shift_contention, iram_steals);
    chk(bank_conflicts > 0, "bank conflict seen");
    chk(conc_contention > 0, "concentrator contention seen");
    chk(shift_contention > 0, "shifter contention seen");
    chk(iram_steals > 0, "IRAM write took a fetch port");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
