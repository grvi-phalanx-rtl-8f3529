// grvi_cram: the 32 KB cluster shared data RAM (CRAM).
//
// Eight 1Kx32 dual-ported block RAMs. Word w = addr[14:2] lives in BRAM w[2:0]
// at row w[12:3]. Port A of the BRAMs serves the PEs as four 32-bit banks,
// four-way interleaved: PE bank b (b = addr[3:2]) covers BRAMs b and b+4 and
// addr[4] picks between them. Port B of all eight BRAMs together is one
// 256-bit port that reads or writes a whole 32-byte line (row) in one cycle;
// the NOC interface uses it to send and receive messages. All reads are
// synchronous (data in the next cycle); PE writes use byte enables.
// Sizes, the 4 + 8 port split and the 256-bit port are the paper's; the
// address-to-BRAM mapping that makes both interleavings hold is this
// design's. The paper's alternative use of the eight 32-bit ports by an
// accelerator is not built.
module grvi_cram
  import grvi_pkg::*;
#(
  parameter int unsigned BANKS = 8,
  parameter int unsigned ROWS_PER_BANK = 1024
) (
  input  logic                        clk,
  input  mem_req_t [BANKS/2-1:0]      preq,
  output logic     [BANKS/2-1:0][31:0] prdata,
  input  logic                        wen,
  input  logic                        wwe,
  input  logic [$clog2(ROWS_PER_BANK)-1:0] waddr,
  input  logic [BANKS*32-1:0]         wwdata,
  output logic [BANKS*32-1:0]         wrdata
);
  localparam int unsigned RW = $clog2(ROWS_PER_BANK);
  localparam int unsigned PB = BANKS / 2;     // PE banks
  localparam int unsigned PBW = $clog2(PB);

  logic [PB-1:0] hi_q;     // which BRAM of the pair was read

  for (genvar k = 0; k < BANKS; k++) begin : g_bram
    logic [31:0] mem [ROWS_PER_BANK];
    logic [31:0] qa, qb;
    logic        sel_a;
    logic [RW-1:0] ra;
    localparam int unsigned PBANK = k % PB;

    assign sel_a = preq[PBANK].valid && (preq[PBANK].addr[PBW+2] == (k >= PB));
    assign ra    = preq[PBANK].addr[RW+PBW+2:PBW+3];

    // port A: PE bank
    always_ff @(posedge clk)
      if (sel_a) begin
        if (preq[PBANK].we) begin
          for (int unsigned j = 0; j < 4; j++)
            if (preq[PBANK].be[j]) mem[ra][j*8 +: 8] <= preq[PBANK].wdata[j*8 +: 8];
        end else begin
          qa <= mem[ra];
        end
      end

    // port B: one lane of the 256-bit line port
    always_ff @(posedge clk)
      if (wen) begin
        if (wwe) mem[waddr] <= wwdata[k*32 +: 32];
        else     qb <= mem[waddr];
      end

    assign wrdata[k*32 +: 32] = qb;
  end

  always_ff @(posedge clk)
    for (int unsigned b = 0; b < PB; b++)
      if (preq[b].valid) hi_q[b] <= preq[b].addr[PBW+2];

  for (genvar b = 0; b < PB; b++) begin : g_pout
    assign prdata[b] = hi_q[b] ? g_bram[b+PB].qa : g_bram[b].qa;
  end
endmodule
