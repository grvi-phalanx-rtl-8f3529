// grvi_iram: 4 KB instruction RAM shared by a pair of GRVI PEs.
//
// One dual-ported 1Kx32 block RAM. Port A is PE0's fetch port; port B is PE1's
// fetch port and also the write port through which the NOC interface loads a
// kernel. Reads are synchronous: the word addressed while a_en/b_en is high
// (and granted) appears on a_rdata/b_rdata in the next cycle, and each read
// register holds its value while its port is not read, so a stalled PE keeps
// its instruction. A NOC write has priority on port B; b_gnt tells PE1 that
// its fetch was not taken in that cycle and must be repeated.
// The size and the pair sharing are the paper's; the write-port arrangement
// is this design's choice.
module grvi_iram #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [AW-1:0] a_addr,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output logic          b_gnt,
  output logic [31:0]   b_rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata
);
  logic [31:0] mem [WORDS];

  assign b_gnt = !we;

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
    if (we)        mem[waddr] <= wdata;
    else if (b_en) b_rdata    <= mem[b_addr];
  end
endmodule
