// grvi_regfile: the GRVI 2R/1W register file (32 x 32 bits).
//
// Two asynchronous read ports feed the decode-stage operand multiplexers; the
// one write port is written by the execute stage at the end of the cycle in
// which an instruction completes. On an FPGA this maps to LUT RAM, which is why
// the reads are combinational and there is no reset. x0 always reads as zero.
// The 2R/1W organisation is the paper's; the x0 handling is this design's.
module grvi_regfile #(
  parameter int unsigned XLEN = 32
) (
  input  logic            clk,
  input  logic [4:0]      ra1,
  input  logic [4:0]      ra2,
  output logic [XLEN-1:0] rd1,
  output logic [XLEN-1:0] rd2,
  input  logic            we,
  input  logic [4:0]      wa,
  input  logic [XLEN-1:0] wd
);
  logic [XLEN-1:0] regs [32];

  always_ff @(posedge clk)
    if (we && wa != 5'd0) regs[wa] <= wd;

  assign rd1 = (ra1 == 5'd0) ? '0 : regs[ra1];
  assign rd2 = (ra2 == 5'd0) ? '0 : regs[ra2];
endmodule
