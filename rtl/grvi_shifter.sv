// grvi_shifter: a barrel shifter shared by N GRVI cores (N = 2, a PE pair).
//
// The paper removes the shifter from each core and shares it between two or
// more cores of the cluster. Each core raises req with its operand, amount
// and type (SLL/SRL/SRA) from its execute stage. A round-robin arbiter grants
// one requester per cycle; the result y is combinational and valid in the
// cycle of the grant, so the granted core completes its shift in that cycle
// and a losing core stalls one cycle per lost round. Arbitration policy and
// single-cycle result are this design's choices.
module grvi_shifter
  import grvi_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [N-1:0]         req,
  input  logic [N-1:0][31:0]   a,
  input  logic [N-1:0][4:0]    amt,
  input  sh_op_e [N-1:0]       op,
  output logic [N-1:0]         gnt,
  output logic [31:0]          y
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last, sel;
  logic          any;

  // Round robin: first requester after the last one granted.
  always_comb begin
    sel = last;
    any = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (!any && req[i]) begin
        sel = IW'(i);
        any = 1'b1;
      end
    end
    gnt = '0;
    if (any) gnt[sel] = 1'b1;
  end

  always_ff @(posedge clk)
    if (rst)      last <= IW'(N - 1);
    else if (any) last <= sel;

  always_comb begin
    unique case (op[sel])
      SH_SLL:  y = a[sel] << amt[sel];
      SH_SRL:  y = a[sel] >> amt[sel];
      SH_SRA:  y = 32'($signed(a[sel]) >>> amt[sel]);
      default: y = a[sel];
    endcase
  end
endmodule
