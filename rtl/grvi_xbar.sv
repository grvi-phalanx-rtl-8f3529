// grvi_xbar: 4x4 crossbar from the 2:1 concentrators to the CRAM banks.
//
// The cluster RAM is four-way word interleaved for the PEs: a request goes to
// bank addr[3:2]. Requests to the NOC interface's memory-mapped region
// (addr[31:30] = 01) go to a fifth target, the NOC interface. Each target has
// its own round-robin arbiter: when several concentrators address the same
// target in one cycle, one is granted and the others see mgnt low and hold
// their request (their PEs stall). A granted request reaches the bank in the
// same cycle (breq is combinational); the bank's synchronous read data comes
// back one cycle later and is returned on mrvalid/mrdata of the master that
// was granted. The NOC interface may refuse a request (iognt low).
// The crossbar, the interleaving and arbitrate-and-stall are the paper's; the
// round-robin policy and the MMIO target are this design's choices.
module grvi_xbar
  import grvi_pkg::*;
#(
  parameter int unsigned M = 4     // masters = banks
) (
  input  logic                clk,
  input  logic                rst,
  input  mem_req_t [M-1:0]    mreq,
  output logic     [M-1:0]    mgnt,
  output logic     [M-1:0]    mrvalid,
  output logic     [M-1:0][31:0] mrdata,
  output mem_req_t [M-1:0]    breq,
  input  logic     [M-1:0][31:0] brdata,
  output mem_req_t            ioreq,
  input  logic                iognt,
  input  logic     [31:0]     iordata
);
  localparam int unsigned T  = M + 1;          // banks + MMIO
  localparam int unsigned MW = $clog2(M);
  localparam int unsigned TW = $clog2(T);

  logic [M-1:0][TW-1:0] tgt;
  logic [T-1:0][M-1:0]  want;
  logic [T-1:0][MW-1:0] last, win;
  logic [T-1:0]         any;

  always_comb begin
    want = '0;
    for (int unsigned m = 0; m < M; m++) begin
      tgt[m] = (mreq[m].addr[31:30] == REGION_MMIO) ? TW'(M) : TW'(mreq[m].addr[MW+1:2]);
      if (mreq[m].valid) want[tgt[m]][m] = 1'b1;
    end
    for (int unsigned t = 0; t < T; t++) begin
      win[t] = last[t];
      any[t] = 1'b0;
      for (int unsigned k = 1; k <= M; k++) begin
        logic [MW-1:0] i;
        i = MW'(int'(last[t]) + int'(k));
        if (!any[t] && want[t][i]) begin
          win[t] = i;
          any[t] = 1'b1;
        end
      end
    end
    for (int unsigned b = 0; b < M; b++) begin
      breq[b]       = mreq[win[b]];
      breq[b].valid = any[b];
    end
    ioreq       = mreq[win[M]];
    ioreq.valid = any[M];
  end

  // Grants, apart from the request muxes: the MMIO grant depends on ioreq.
  always_comb begin
    mgnt = '0;
    for (int unsigned t = 0; t < T; t++)
      if (any[t] && (t < M || iognt)) mgnt[win[t]] = 1'b1;
  end

  // Read response routing: one cycle after the grant.
  logic [T-1:0]         rv;
  logic [T-1:0][MW-1:0] rm;

  always_ff @(posedge clk) begin
    for (int unsigned t = 0; t < T; t++) begin
      if (rst) begin
        last[t] <= MW'(M - 1);
        rv[t]   <= 1'b0;
      end else begin
        rv[t] <= any[t] && !mreq[win[t]].we && (t < M || iognt);
        if (any[t] && (t < M || iognt)) last[t] <= win[t];
      end
      rm[t] <= win[t];
    end
  end

  always_comb begin
    mrvalid = '0;
    mrdata  = '0;
    for (int unsigned t = 0; t < T; t++)
      if (rv[t]) begin
        mrvalid[rm[t]] = 1'b1;
        mrdata[rm[t]]  = (t < M) ? brdata[t] : iordata;
      end
  end
endmodule
