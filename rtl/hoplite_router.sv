// hoplite_router: one router of the Hoplite NOC, a unidirectional 2D torus.
//
// Bufferless and deflection routed. Each router has three inputs, xi from the
// west neighbour (X ring), yi from the north neighbour (Y ring) and ci from
// its client, and two registered outputs, xo to the east and yo to the south.
// Messages go X first, then Y:
//   - a message on yi is already in its destination column; it has priority
//     for the south output mux;
//   - a message on xi whose column is this one turns south if the south mux is
//     free, otherwise it is deflected east and goes once more round its row;
//     any other xi message continues east;
//   - the client injects only into an output that no ring message needs
//     (ci_rdy tells it the message was taken).
// The client output is the south output mux: a message leaving it whose row
// is this one is delivered on co (next cycle) instead of travelling south.
// Every message therefore takes one cycle per hop. Delivery cannot be refused.
// The paper only names Hoplite and gives its width (300 bits) and the array;
// the switching described here is the published Hoplite router, not a detail
// of this paper. Multicast is not built.
module hoplite_router
  import grvi_pkg::*;
#(
  parameter int unsigned MY_X = 0,
  parameter int unsigned MY_Y = 0
) (
  input  logic     clk,
  input  logic     rst,
  input  noc_msg_t xi,
  input  noc_msg_t yi,
  input  noc_msg_t ci,
  output logic     ci_rdy,
  output noc_msg_t xo,
  output noc_msg_t yo,
  output noc_msg_t co
);
  logic     x_turn, x_east, c_south;
  noc_msg_t s_mux, e_mux;

  always_comb begin
    x_turn  = xi.valid && (xi.dx == XW'(MY_X));
    x_east  = xi.valid && (!x_turn || yi.valid);        // through or deflected
    c_south = ci.valid && (ci.dx == XW'(MY_X));

    s_mux = '0;
    if (yi.valid)                s_mux = yi;
    else if (x_turn)             s_mux = xi;
    else if (c_south)            s_mux = ci;

    e_mux = '0;
    if (x_east)                  e_mux = xi;
    else if (ci.valid && !c_south) e_mux = ci;

    ci_rdy = ci.valid && (c_south ? (!yi.valid && !x_turn) : !x_east);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      xo <= '0;
      yo <= '0;
      co <= '0;
    end else begin
      xo <= e_mux;
      yo <= s_mux;
      co <= s_mux;
      if (s_mux.dy == YW'(MY_Y)) yo.valid <= 1'b0;
      else                       co.valid <= 1'b0;
    end
  end
endmodule
