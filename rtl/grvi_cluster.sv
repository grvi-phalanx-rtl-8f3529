// grvi_cluster: an eight-PE GRVI cluster with its Hoplite router.
//
// Eight GRVI cores in four pairs. Each pair shares a 4 KB IRAM, a shifter and
// a 2:1 concentrator onto one port of the 4x4 crossbar, which connects the
// four concentrators to the four interleaved PE banks of the 32 KB CRAM and to
// the NOC interface's memory-mapped region. The NOC interface moves 32-byte
// messages between the CRAM's 256-bit port and the router, loads the IRAMs
// from the NOC and holds the PEs' run enables (a PE is in reset until a
// control message starts it). The router links the cluster into the torus.
// Interface: xi/yi in from the west/north neighbours, xo/yo out to the
// east/south, and an external client port (ext_*) shared with the cluster's
// own NOC interface.
// The organisation is the paper's Fig. 2 without the optional accelerator.
module grvi_cluster
  import grvi_pkg::*;
#(
  parameter int unsigned MY_X = 0,
  parameter int unsigned MY_Y = 0
) (
  input  logic     clk,
  input  logic     rst,
  input  noc_msg_t xi,
  input  noc_msg_t yi,
  output noc_msg_t xo,
  output noc_msg_t yo,
  input  noc_msg_t ext_inj,
  output logic     ext_inj_rdy,
  output noc_msg_t ext_dlv
);
  localparam int unsigned NPE = 8;
  localparam int unsigned NP  = NPE / 2;

  logic [7:0] run;

  // PE <-> IRAM
  logic [NPE-1:0]       im_en, im_gnt;
  logic [NPE-1:0][9:0]  im_addr;
  logic [NPE-1:0][31:0] im_rdata;
  // PE <-> concentrator
  core_req_t [NPE-1:0]  dreq;
  logic [NPE-1:0]       dgnt, drvalid;
  logic [NP-1:0][31:0]  crdata;
  // PE <-> shifter
  logic [NPE-1:0]       sh_req, sh_gnt;
  logic [NPE-1:0][31:0] sh_a;
  logic [NPE-1:0][4:0]  sh_amt;
  sh_op_e [NPE-1:0]     sh_op;
  logic [NP-1:0][31:0]  sh_y;
  // concentrator <-> xbar
  mem_req_t [NP-1:0]    mreq;
  logic [NP-1:0]        mgnt, mrvalid;
  logic [NP-1:0][31:0]  mrdata;
  // xbar <-> CRAM / NOC interface
  mem_req_t [NP-1:0]    breq;
  logic [NP-1:0][31:0]  brdata;
  mem_req_t             ioreq;
  logic                 iognt;
  logic [31:0]          iordata;
  // NOC interface
  logic                 cram_en, cram_we;
  logic [9:0]           cram_addr;
  logic [LINE_W-1:0]    cram_wdata, cram_rdata;
  logic                 iram_we;
  logic [9:0]           iram_waddr;
  logic [31:0]          iram_wdata;
  noc_msg_t             inj, dlv;
  logic                 inj_rdy;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    grvi_core u_core (
      .clk, .rst(rst || !run[p]),
      .imem_en(im_en[p]), .imem_addr(im_addr[p]), .imem_gnt(im_gnt[p]), .imem_rdata(im_rdata[p]),
      .dreq(dreq[p]), .dgnt(dgnt[p]), .drvalid(drvalid[p]), .drdata(crdata[p/2]),
      .sh_req(sh_req[p]), .sh_a(sh_a[p]), .sh_amt(sh_amt[p]), .sh_op(sh_op[p]),
      .sh_gnt(sh_gnt[p]), .sh_y(sh_y[p/2]));
  end

  for (genvar q = 0; q < NP; q++) begin : g_pair
    grvi_iram u_iram (
      .clk,
      .a_en(im_en[2*q]),   .a_addr(im_addr[2*q]),   .a_rdata(im_rdata[2*q]),
      .b_en(im_en[2*q+1]), .b_addr(im_addr[2*q+1]), .b_gnt(im_gnt[2*q+1]), .b_rdata(im_rdata[2*q+1]),
      .we(iram_we), .waddr(iram_waddr), .wdata(iram_wdata));
    assign im_gnt[2*q] = 1'b1;

    grvi_shifter #(.N(2)) u_shift (
      .clk, .rst,
      .req(sh_req[2*q +: 2]), .a(sh_a[2*q +: 2]), .amt(sh_amt[2*q +: 2]), .op(sh_op[2*q +: 2]),
      .gnt(sh_gnt[2*q +: 2]), .y(sh_y[q]));

    grvi_concentrator #(.PAIR(q)) u_conc (
      .clk, .rst,
      .creq(dreq[2*q +: 2]), .cgnt(dgnt[2*q +: 2]), .crvalid(drvalid[2*q +: 2]), .crdata(crdata[q]),
      .mreq(mreq[q]), .mgnt(mgnt[q]), .mrvalid(mrvalid[q]), .mrdata(mrdata[q]));
  end

  grvi_xbar #(.M(NP)) u_xbar (
    .clk, .rst, .mreq, .mgnt, .mrvalid, .mrdata, .breq, .brdata,
    .ioreq, .iognt, .iordata);

  grvi_cram u_cram (
    .clk, .preq(breq), .prdata(brdata),
    .wen(cram_en), .wwe(cram_we), .waddr(cram_addr), .wwdata(cram_wdata), .wrdata(cram_rdata));

  grvi_noc_itf #(.MY_X(MY_X), .MY_Y(MY_Y)) u_itf (
    .clk, .rst, .ioreq, .iognt, .iordata,
    .cram_en, .cram_we, .cram_addr, .cram_wdata, .cram_rdata,
    .iram_we, .iram_waddr, .iram_wdata, .run,
    .inj, .inj_rdy, .dlv, .ext_inj, .ext_inj_rdy, .ext_dlv);

  hoplite_router #(.MY_X(MY_X), .MY_Y(MY_Y)) u_router (
    .clk, .rst, .xi, .yi, .ci(inj), .ci_rdy(inj_rdy), .xo, .yo, .co(dlv));
endmodule
