// grvi_noc_itf: the cluster's interface between its PEs, CRAM and IRAMs and
// its Hoplite router.
//
// Sending: a PE formats a 32-byte message in CRAM and then stores one word to
// the memory-mapped region (addr[31:30] = 01). The store address bits [14:5]
// name the local CRAM line to send; the store data names the destination:
// [9:0] remote line (or IRAM word), [13:10] row y, [16:14] column x,
// [18:17] message kind. The interface accepts the store (iognt) when it is
// idle, reads the whole line through the CRAM's 256-bit port, and offers the
// 300-bit message to the router until it is taken; the whole 32 bytes leave
// in one cycle. A second send store waits (the PE stalls) until then.
// Receiving: a delivered message is never refused. Kind CRAM writes its 32
// bytes into the addressed CRAM line in one cycle; kind IRAM writes data[31:0]
// into that word of all four IRAMs of the cluster (one message per word, so a
// 1K-word kernel loads in 1024 cycles); kind CTRL sets the eight PE run
// enables from data[7:0] (a stopped PE is held in reset); kind HOST goes out
// on the external port. Receive writes have priority on the 256-bit port.
// A load from the region returns, one cycle later, the PE's id
// {x[9:7], y[6:3], pe[2:0]} and the send-busy flag in bit 31.
// An external client (e.g. a host bridge) may inject through ext_inj, ahead
// of the cluster's own sends.
// Message send/receive through CRAM by an MMIO store is the paper's; the
// encodings, message kinds, run control and id register are this design's.
module grvi_noc_itf
  import grvi_pkg::*;
#(
  parameter int unsigned MY_X = 0,
  parameter int unsigned MY_Y = 0
) (
  input  logic        clk,
  input  logic        rst,
  // MMIO port from the crossbar
  input  mem_req_t    ioreq,
  output logic        iognt,
  output logic [31:0] iordata,
  // CRAM 256-bit port
  output logic        cram_en,
  output logic        cram_we,
  output logic [9:0]  cram_addr,
  output logic [LINE_W-1:0] cram_wdata,
  input  logic [LINE_W-1:0] cram_rdata,
  // IRAM write (all IRAMs of the cluster)
  output logic        iram_we,
  output logic [9:0]  iram_waddr,
  output logic [31:0] iram_wdata,
  // PE run enables
  output logic [7:0]  run,
  // router client side
  output noc_msg_t    inj,
  input  logic        inj_rdy,
  input  noc_msg_t    dlv,
  // external client
  input  noc_msg_t    ext_inj,
  output logic        ext_inj_rdy,
  output noc_msg_t    ext_dlv
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_CAPT, S_SEND} send_e;
  send_e    st;
  noc_msg_t msg;
  logic [9:0] line;
  logic       rx_cram;

  assign rx_cram = dlv.valid && dlv.kind == K_CRAM;

  // MMIO
  assign iognt = ioreq.valid && (!ioreq.we || st == S_IDLE);

  always_ff @(posedge clk)
    iordata <= {(st != S_IDLE), 21'd0, 3'(MY_X), 4'(MY_Y), ioreq.pe};

  // CRAM wide port
  always_comb begin
    cram_en    = rx_cram || st == S_READ;
    cram_we    = rx_cram;
    cram_addr  = rx_cram ? dlv.addr : line;
    cram_wdata = dlv.data;
  end

  // IRAM loading
  assign iram_we    = dlv.valid && dlv.kind == K_IRAM;
  assign iram_waddr = dlv.addr;
  assign iram_wdata = dlv.data[31:0];

  // Injection: external client first
  always_comb begin
    ext_inj_rdy = 1'b0;
    if (ext_inj.valid) begin
      inj         = ext_inj;
      ext_inj_rdy = inj_rdy;
    end else begin
      inj       = msg;
      inj.valid = (st == S_SEND);
    end
  end

  always_comb begin
    ext_dlv       = dlv;
    ext_dlv.valid = dlv.valid && dlv.kind == K_HOST;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st  <= S_IDLE;
      run <= '0;
    end else begin
      if (dlv.valid && dlv.kind == K_CTRL) run <= dlv.data[7:0];
      unique case (st)
        S_IDLE: if (ioreq.valid && ioreq.we) begin
          msg  <= send_header(ioreq.wdata);
          line <= ioreq.addr[14:5];
          st   <= S_READ;
        end
        S_READ: if (!rx_cram) st <= S_CAPT;
        S_CAPT: begin
          msg.data <= cram_rdata;
          st       <= S_SEND;
        end
        S_SEND: if (!ext_inj.valid && inj_rdy) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
