// grvi_phalanx: the GRVI Phalanx array, ROWS x COLS clusters on a Hoplite torus.
//
// The default is the paper's KU040 system: 10 rows by 5 columns of eight-PE
// clusters, 400 GRVI cores, joined by a 300-bit Hoplite NOC. Cluster (x, y)
// sends east to (x+1 mod COLS, y) and south to (x, y+1 mod ROWS). Everything
// the array does starts with messages: kernels are loaded into the IRAMs, data
// into the CRAMs and the PEs are started by NOC messages. The external client
// port of cluster (0,0) is brought out (ext_*) so that an I/O core, such as a
// host bridge, can inject messages and receive those of kind HOST.
// Array size and NOC width are the paper's; the external port is this
// design's stand-in for the PCIe/Ethernet/DRAM cores the paper does not build.
module grvi_phalanx
  import grvi_pkg::noc_msg_t;
#(
  parameter int unsigned COLS = 5,
  parameter int unsigned ROWS = 10
) (
  input  logic     clk,
  input  logic     rst,
  input  noc_msg_t ext_inj,
  output logic     ext_inj_rdy,
  output noc_msg_t ext_dlv
);
  noc_msg_t xo [ROWS][COLS];
  noc_msg_t yo [ROWS][COLS];
  noc_msg_t dl [ROWS][COLS];
  logic     rdy [ROWS][COLS];

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      localparam int unsigned XW_ = (x == 0) ? COLS - 1 : x - 1;
      localparam int unsigned YN_ = (y == 0) ? ROWS - 1 : y - 1;
      grvi_cluster #(.MY_X(x), .MY_Y(y)) u_cluster (
        .clk, .rst,
        .xi(xo[y][XW_]), .yi(yo[YN_][x]),
        .xo(xo[y][x]),   .yo(yo[y][x]),
        .ext_inj((x == 0 && y == 0) ? ext_inj : '0),
        .ext_inj_rdy(rdy[y][x]),
        .ext_dlv(dl[y][x]));
    end
  end

  assign ext_inj_rdy = rdy[0][0];
  assign ext_dlv     = dl[0][0];
endmodule
