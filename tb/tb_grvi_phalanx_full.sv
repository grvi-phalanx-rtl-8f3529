// tb_grvi_phalanx_full: the same end-to-end test as tb_grvi_phalanx on the
// array at its default size, 10 rows by 5 columns of clusters (400 PEs), with
// the array's parameters left at their defaults.
`timescale 1ns/1ps
module tb_grvi_phalanx_full;
  localparam int NX = 5, NY = 10;   // the array's defaults
`include "tb/grvi_phalanx_tb_body.svh"
  grvi_phalanx dut (.*);
endmodule
