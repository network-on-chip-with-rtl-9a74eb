// xy_route -- routing controller of one input channel.
//
// Dimension-ordered XY routing: a flit first travels along X (east/west) until
// its column matches, then along Y (north/south), and is delivered on the port
// named in its destination address once it has reached the destination router.
// North is +y and east is +x. The module is purely combinational: the request it
// produces is valid in the same cycle as the flit on its input.
//
//   dst      destination address taken from the flit
//   valid    a flit is present on the input channel
//   req      one-hot output-port request (all zero when valid is low)
//
// XY routing is the paper's; the orientation (north = +y) and the port codes
// are this design's choice.
module xy_route
  import rtsnoc_pkg::*;
#(
  parameter int unsigned X_POS = 0,
  parameter int unsigned Y_POS = 0
) (
  input  addr_t         dst,
  input  logic          valid,
  output logic [NP-1:0] req
);

  localparam logic [X_W-1:0] MY_X = X_W'(X_POS);
  localparam logic [Y_W-1:0] MY_Y = Y_W'(Y_POS);

  port_e out_port;

  always_comb begin
    if (dst.x > MY_X)      out_port = P_EE;
    else if (dst.x < MY_X) out_port = P_WW;
    else if (dst.y > MY_Y) out_port = P_NN;
    else if (dst.y < MY_Y) out_port = P_SS;
    else                   out_port = dst.port;
  end

  always_comb begin
    req = '0;
    if (valid) req[out_port] = 1'b1;
  end

endmodule
