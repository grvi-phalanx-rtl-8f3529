// tb_hoplite_router: a 4 x 3 torus of Hoplite routers. First, single
// messages in an empty network check the latency (one cycle per hop plus one
// for delivery). Then every client injects random messages at a high rate;
// the testbench checks that every message is delivered exactly once, at the
// router it was addressed to, with its payload intact, that deflections
// happen (X traffic bumped by Y traffic) and that nothing is lost when the
// injection stops and the network drains.
`timescale 1ns/1ps
module tb_hoplite_router;
  import grvi_pkg::*;
  localparam int NX = 4, NY = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  noc_msg_t xo [NY][NX];
  noc_msg_t yo [NY][NX];
  noc_msg_t co [NY][NX];
  noc_msg_t ci [NY][NX];
  logic     rdy [NY][NX];

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      hoplite_router #(.MY_X(x), .MY_Y(y)) u_r (
        .clk, .rst,
        .xi(xo[y][(x + NX - 1) % NX]), .yi(yo[(y + NY - 1) % NY][x]),
        .ci(ci[y][x]), .ci_rdy(rdy[y][x]),
        .xo(xo[y][x]), .yo(yo[y][x]), .co(co[y][x]));
    end
  end

  int checks = 0, failures = 0, deflections = 0;
  int sent = 0, got = 0;
  bit delivered [int];
  int dest_of [int];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // count X-ring messages that wanted to turn but were bumped
  always @(posedge clk)
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++) begin
        noc_msg_t xi, yi;
        xi = xo[y][(x + NX - 1) % NX];
        yi = yo[(y + NY - 1) % NY][x];
        if (xi.valid && xi.dx == XW'(x) && yi.valid) deflections++;
      end

  // delivery monitor
  always @(posedge clk) if (!rst)
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        if (co[y][x].valid) begin
          int id;
          id = int'(co[y][x].data[31:0]);
          checks++;
          if (!dest_of.exists(id) || delivered.exists(id) || dest_of[id] != y * NX + x ||
              co[y][x].dx != XW'(x) || co[y][x].dy != YW'(y) ||
              co[y][x].data[255:224] !== ~co[y][x].data[31:0]) begin
            failures++; $display("FAIL delivery of id %0d at (%0d,%0d)", id, x, y);
          end
          delivered[id] = 1;
          got++;
        end

  function automatic noc_msg_t mk(int id, int dx, int dy);
    noc_msg_t m = '0;
    m.valid = 1; m.dx = XW'(dx); m.dy = YW'(dy); m.kind = K_CRAM;
    m.data[31:0] = id; m.data[255:224] = ~id;
    m.data[127:96] = $urandom;
    return m;
  endfunction

  initial begin
    for (int y = 0; y < NY; y++) for (int x = 0; x < NX; x++) ci[y][x] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // latency in an empty network
    for (int k = 0; k < 20; k++) begin
      int sx, sy, tx, ty, hops;
      longint t0;
      sx = $urandom_range(NX - 1); sy = $urandom_range(NY - 1);
      tx = $urandom_range(NX - 1); ty = $urandom_range(NY - 1);
      hops = (tx - sx + NX) % NX + (ty - sy + NY) % NY;
      ci[sy][sx] = mk(sent, tx, ty); dest_of[sent] = ty * NX + tx; sent++;
      #1;
      checks++;
      if (!rdy[sy][sx]) begin failures++; $display("FAIL injection refused in empty network"); end
      t0 = cyc;
      @(posedge clk); #1;
      ci[sy][sx] = '0;
      while (got < sent && cyc < t0 + 50) begin @(posedge clk); #1; end
      checks++;
      // co is valid hops+1 cycles after injection; the monitor counts it
      // at the edge that ends that cycle, one more
      if (cyc - t0 != longint'(hops + 2)) begin
        failures++; $display("FAIL latency %0d for %0d hops", cyc - t0, hops);
      end
    end
    // random load
    for (int n = 0; n < 3000; n++) begin
      for (int y = 0; y < NY; y++)
        for (int x = 0; x < NX; x++)
          if (!ci[y][x].valid && $urandom_range(1)) begin
            int tx, ty;
            tx = $urandom_range(NX - 1); ty = $urandom_range(NY - 1);
            ci[y][x] = mk(sent, tx, ty); dest_of[sent] = ty * NX + tx; sent++;
          end
      #1;
      @(posedge clk); #1;
    end
    // let the pending injections go in, then drain
    for (int k = 0; k < 200; k++) @(posedge clk);
    repeat (200) @(posedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL sent %0d delivered %0d", sent, got); end
    checks++;
    if (deflections == 0) begin failures++; $display("FAIL no deflection seen"); end
    $display("sent=%0d deflections=%0d", sent, deflections);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the injected message is removed once the router took it
  always @(posedge clk)
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        if (!rst && ci[y][x].valid && rdy[y][x]) ci[y][x].valid <= 1'b0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
