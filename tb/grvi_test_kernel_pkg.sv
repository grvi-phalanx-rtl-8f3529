// grvi_test_kernel_pkg: the SPMD test kernel used by the cluster and array
// testbenches, and the expected results it leaves in a cluster's CRAM.
//
// Every PE of a cluster runs the same code. It starts with a shift (the two
// PEs of a pair start together, so they contend for their shifter), reads its id from the NOC
// interface (pe = id[2:0]), sums pe+1 a hundred times in a loop, and stores
//   0x100 + 4*pe : 100*(pe+1)            (word store, bank conflicts)
//   0x140 + pe   : pe                    (byte store)
//   0x180 + 4*pe : (100*(pe+1)) << pe    (shift on the shared shifter)
//   0x1C0 + 4*pe : 1                     (done flag)
// Every PE then polls the eight flags and sends the line at 0x100 (the eight
// sums) as a message of kind send_kind to cluster (to_x,to_y), or to its own
// cluster when to_x < 0. The message's address field is send_line ORed with
// the sender's {pe[2:0], x[2:0], y[3:0]}. Eight sends per cluster queue at
// the NOC interface. The PE then spins.
package grvi_test_kernel_pkg;
  import rv_asm_pkg::*;

  localparam int KERNEL_WORDS = 40;

  // send_kind: message kind of PE 0's message (2 bits), send_line: remote line;
  // to_x/to_y: destination, or -1 for the cluster itself.
  function automatic logic [31:0] kernel_word(int i, int send_kind, int send_line, int to_x, int to_y);
    logic [31:0] p [KERNEL_WORDS];
    int n = 0;
    p[n++] = SLLI(0, 0, 1);             // both PEs of a pair start together: shifter contention
    p[n++] = LUI(1, 32'h40000);
    p[n++] = LW(2, 1, 0);
    p[n++] = ANDI(3, 2, 7);
    p[n++] = SLLI(4, 3, 2);
    p[n++] = ADDI(5, 3, 1);
    p[n++] = ADDI(6, 0, 0);
    p[n++] = ADDI(7, 0, 0);
    p[n++] = ADD(6, 6, 5);              // 8: loop
    p[n++] = ADDI(7, 7, 1);
    p[n++] = SLLI(10, 7, 1);            // two back-to-back shifts per
    p[n++] = SRLI(10, 10, 1);           // iteration load the shared shifter
    p[n++] = SLTI(8, 7, 100);
    p[n++] = BNE(8, 0, -20);
    p[n++] = SW(6, 4, 32'h100);
    p[n++] = SB(3, 3, 32'h140);
    p[n++] = SLL(9, 6, 3);
    p[n++] = SW(9, 4, 32'h180);
    p[n++] = ADDI(11, 0, 1);
    p[n++] = SW(11, 4, 32'h1C0);
    p[n++] = ADDI(0, 0, 0);             // 20
    p[n++] = ADDI(12, 0, 0);
    p[n++] = ADDI(13, 0, 32);
    p[n++] = LW(14, 12, 32'h1C0);       // 23: poll the flags
    p[n++] = BEQ(14, 0, -4);
    p[n++] = ADDI(12, 12, 4);
    p[n++] = BNE(12, 13, -12);
    if (to_x < 0) begin
      p[n++] = SRLI(15, 2, 3);
      p[n++] = ANDI(15, 15, 32'h7F);
    end else begin
      p[n++] = ADDI(15, 0, (to_x << 4) | to_y);
      p[n++] = ADDI(0, 0, 0);
    end
    p[n++] = SLLI(15, 15, 10);
    p[n++] = LUI(16, send_kind << 5);
    p[n++] = ORI(15, 15, send_line);
    p[n++] = OR(15, 15, 16);
    p[n++] = SRLI(17, 2, 3);            // the remote address also carries
    p[n++] = ANDI(17, 17, 32'h7F);      // the sender's {x,y}
    p[n++] = OR(15, 15, 17);
    p[n++] = ANDI(18, 2, 7);            // and the sending PE
    p[n++] = SLLI(18, 18, 7);
    p[n++] = OR(15, 15, 18);
    p[n++] = SW(15, 1, 32'h100);        // 39: send
    if (i < KERNEL_WORDS) return p[i];
    return (i == KERNEL_WORDS) ? JAL(0, 0) : ADDI(0, 0, 0);
  endfunction
endpackage
