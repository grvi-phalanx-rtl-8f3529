// grvi_phalanx_tb_body.svh: body shared by the array testbenches
// tb_grvi_phalanx (reduced array) and tb_grvi_phalanx_full (default array).
// The including module declares NX and NY and instantiates the array as dut
// after this text.
//
// End to end through the external port of cluster (0,0):
//   1. loads the test kernel into the IRAMs of every cluster, one word per
//      message, interleaving the clusters;
//   2. clears the kernel's CRAM lines of every cluster with CRAM messages;
//   3. starts the eight PEs of every cluster with a CTRL message.
// In each cluster the PEs run the kernel of grvi_test_kernel_pkg; every PE
// sends the cluster's eight sums as one 32-byte HOST message to cluster (0,0),
// the message's address field carrying the sender's {pe,x,y}. All the
// messages converge on one router, so X-ring traffic is deflected. The
// testbench checks that exactly one message arrives from every PE with the
// right sums, and counts NOC deflections, crossbar bank conflicts and shifter
// contention (each must happen) and injections the external port had to
// repeat (reported only: the loading phase leaves the rings idle).

  import grvi_pkg::*;
  import grvi_test_kernel_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  noc_msg_t ext_inj, ext_dlv;
  logic     ext_inj_rdy;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;


  int deflections = 0, refused = 0, bank_conflicts = 0, shift_contention = 0;
  for (genvar y = 0; y < NY; y++) begin : g_my
    for (genvar x = 0; x < NX; x++) begin : g_mx
      always @(posedge clk) if (!rst) begin
        if (dut.g_row[y].g_col[x].u_cluster.u_router.x_turn &&
            dut.g_row[y].g_col[x].u_cluster.u_router.yi.valid) deflections++;
        for (int t = 0; t < 4; t++) begin
          int n;
          n = 0;
          for (int m = 0; m < 4; m++)
            if (dut.g_row[y].g_col[x].u_cluster.mreq[m].valid &&
                dut.g_row[y].g_col[x].u_cluster.mreq[m].addr[31:30] == 2'b00 &&
                dut.g_row[y].g_col[x].u_cluster.mreq[m].addr[3:2] == 2'(t)) n++;
          if (n > 1) bank_conflicts++;
        end
        for (int q = 0; q < 4; q++)
          if (dut.g_row[y].g_col[x].u_cluster.sh_req[2*q] &&
              dut.g_row[y].g_col[x].u_cluster.sh_req[2*q+1]) shift_contention++;
      end
    end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(noc_msg_t m);
    ext_inj = m;
    #1;
    while (!ext_inj_rdy) begin refused++; @(posedge clk); #1; end
    @(posedge clk); #1;
    ext_inj = '0;
  endtask

  function automatic noc_msg_t msg(int x, int y, kind_e k, int addr, logic [255:0] d);
    noc_msg_t m = '0;
    m.valid = 1; m.dx = XW'(x); m.dy = YW'(y); m.kind = k; m.addr = 10'(addr); m.data = d;
    return m;
  endfunction

  int got [8*NX*NY];
  int host_msgs = 0;
  always @(posedge clk) if (!rst && ext_dlv.valid) begin
    int sx, sy, sp;
    bit ok;
    sx = int'(ext_dlv.addr[6:4]);
    sy = int'(ext_dlv.addr[3:0]);
    ok = sx < NX && sy < NY;
    sp = int'(ext_dlv.addr[9:7]);
    for (int p = 0; p < 8; p++) if (ext_dlv.data[32*p +: 32] != 32'(100 * (p + 1))) ok = 0;
    checks++;
    if (!ok) begin failures++; $display("FAIL HOST message from (%0d,%0d)", sx, sy); end
    else got[sp * NX * NY + sy * NX + sx]++;
    host_msgs++;
  end

  initial begin
    longint t0;
    ext_inj = '0;
    foreach (got[i]) got[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    t0 = cyc;
    for (int i = 0; i <= KERNEL_WORDS; i++)
      for (int c = 0; c < NX * NY; c++)
        send(msg(c % NX, c / NX, K_IRAM, i, 256'(kernel_word(i, int'(K_HOST), 0, 0, 0))));
    for (int c = 0; c < NX * NY; c++)
      for (int l = 8; l < 16; l++) send(msg(c % NX, c / NX, K_CRAM, l, '0));
    $display("loaded %0d clusters in %0d cycles", NX * NY, cyc - t0);
    for (int c = 0; c < NX * NY; c++) send(msg(c % NX, c / NX, K_CTRL, 0, 256'hFF));
    t0 = cyc;
    while (host_msgs < 8 * NX * NY && cyc < t0 + 20000) @(posedge clk);
    repeat (100) @(posedge clk);
    $display("run took %0d cycles; deflections=%0d refused=%0d bank_conflicts=%0d shift_contention=%0d",
             cyc - t0, deflections, refused, bank_conflicts, shift_contention);
    for (int c = 0; c < 8 * NX * NY; c++)
      chk(got[c] == 1, $sformatf("PE %0d of cluster (%0d,%0d) reported %0d times",
                                 c / (NX * NY), c % NX, (c / NX) % NY, got[c]));
    chk(deflections > 0, "NOC deflection seen");
    chk(bank_conflicts > 0, "bank conflict seen");
    chk(shift_contention > 0, "shifter contention seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
