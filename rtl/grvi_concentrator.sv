// grvi_concentrator: 2:1 concentrator between a PE pair and one crossbar port.
//
// Each cycle a round-robin arbiter picks one of the two PEs' data requests and
// forwards it to the 4x4 crossbar; the chosen PE's cgnt is the crossbar's
// grant, the other PE waits (its execute stage stalls). Read data returns one
// cycle after the grant and is steered to the PE that was granted.
// The concentrator also holds the byte/halfword logic that the paper removes
// from every core and shares: for a store it builds byte enables and copies
// the byte or halfword into its lanes; for a load it remembers the size and
// byte offset of the granted request and shifts and sign/zero-extends the
// returned word. PAIR numbers the PE pair so requests carry the PE index.
// The 2:1 concentrator is the paper's; the round-robin policy and placing the
// sub-word logic here are this design's choices.
module grvi_concentrator
  import grvi_pkg::*;
#(
  parameter int unsigned PAIR = 0
) (
  input  logic                clk,
  input  logic                rst,
  input  core_req_t [1:0]     creq,
  output logic      [1:0]     cgnt,
  output logic      [1:0]     crvalid,
  output logic      [31:0]    crdata,
  output mem_req_t            mreq,
  input  logic                mgnt,
  input  logic                mrvalid,
  input  logic      [31:0]    mrdata
);
  logic      last, sel;
  core_req_t r;

  always_comb begin
    // prefer the PE not served last, if it is asking
    if (creq[!last].valid) sel = !last;
    else                   sel = last;
    r = creq[sel];

    mreq       = '0;
    mreq.valid = r.valid;
    mreq.we    = r.we;
    mreq.addr  = {r.addr[31:2], 2'b00};
    mreq.pe    = 3'(PAIR * 2) + {2'b00, sel};
    unique case (r.size)
      SZ_B: begin
        mreq.wdata = {4{r.wdata[7:0]}};
        mreq.be    = 4'b0001 << r.addr[1:0];
      end
      SZ_H: begin
        mreq.wdata = {2{r.wdata[15:0]}};
        mreq.be    = r.addr[1] ? 4'b1100 : 4'b0011;
      end
      default: begin
        mreq.wdata = r.wdata;
        mreq.be    = 4'b1111;
      end
    endcase
  end

  // Grants, apart from the request mux: mgnt depends on mreq.
  always_comb begin
    cgnt      = '0;
    cgnt[sel] = r.valid && mgnt;
  end

  // Response bookkeeping for the granted load.
  logic       p_sel, p_uns;
  size_e      p_size;
  logic [1:0] p_off;

  always_ff @(posedge clk) begin
    if (rst) last <= 1'b1;
    else if (r.valid && mgnt) last <= sel;
    if (r.valid && mgnt) begin
      p_sel  <= sel;
      p_uns  <= r.uns;
      p_size <= r.size;
      p_off  <= r.addr[1:0];
    end
  end

  logic [31:0] sh;
  always_comb begin
    sh = mrdata >> {p_off, 3'b000};
    unique case (p_size)
      SZ_B:    crdata = p_uns ? {24'd0, sh[7:0]}  : {{24{sh[7]}},  sh[7:0]};
      SZ_H:    crdata = p_uns ? {16'd0, sh[15:0]} : {{16{sh[15]}}, sh[15:0]};
      default: crdata = mrdata;
    endcase
    crvalid        = '0;
    crvalid[p_sel] = mrvalid;
  end
endmodule
