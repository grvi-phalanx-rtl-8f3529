// tb_grvi_phalanx: the GRVI Phalanx array end to end, reduced to 3 rows by 2
// columns (six clusters, 48 PEs) so that it builds and runs quickly. Loads the
// test kernel over the NOC, starts every cluster and checks the message each
// PE sends back; see grvi_phalanx_tb_body.svh for the steps and checks.
`timescale 1ns/1ps
module tb_grvi_phalanx;
  localparam int NX = 2, NY = 3;
`include "tb/grvi_phalanx_tb_body.svh"
  grvi_phalanx #(.COLS(NX), .ROWS(NY)) dut (.*);
endmodule
