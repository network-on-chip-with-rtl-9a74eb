// rtsnoc_pkg -- types and constants shared by the RTSNoC router and mesh.
//
// Every flit carries its own routing information, so the network can route and
// arbitrate each flit on its own (flit-by-flit interleaving). A flit is 19 bits
// wide in the default 2x2 mesh:
//
//   [18]    ctrl : marker bit, set in header and tail flits (not interpreted by
//                  the routers)
//   [17:13] tag  : address-sized field carried through unchanged; the routers do
//                  not interpret it (the reference packets hold zero here)
//   [12:8]  dst  : destination {x, y, port}; x and y select the router, port the
//                  router port the destination core hangs on
//   [7:0]   data : payload
//
// The 19-bit width, the marker bit and the value of the destination field
// ({x=0,y=1,port=NN} = 5'b01000 for the core on port NN of router (0,1)) are
// read off the reference packets; the split of the remaining bits, the port
// codes and the data width are this design's choice.
package rtsnoc_pkg;

  // Mesh coordinate widths (2x2 mesh) and payload width.
  localparam int X_W    = 1;
  localparam int Y_W    = 1;
  localparam int PORT_W = 3;
  localparam int DATA_W = 8;
  localparam int ADDR_W = X_W + Y_W + PORT_W;
  localparam int TAG_W  = ADDR_W;
  localparam int FLIT_W = 1 + TAG_W + ADDR_W + DATA_W;

  // Number of router ports (cardinal points).
  localparam int NP = 8;

  // Port codes, clockwise from north.
  typedef enum logic [PORT_W-1:0] {
    P_NN = 3'd0,
    P_NE = 3'd1,
    P_EE = 3'd2,
    P_SE = 3'd3,
    P_SS = 3'd4,
    P_SW = 3'd5,
    P_WW = 3'd6,
    P_NW = 3'd7
  } port_e;

  typedef struct packed {
    logic [X_W-1:0] x;
    logic [Y_W-1:0] y;
    port_e          port;
  } addr_t;

  typedef struct packed {
    logic              ctrl;
    logic [TAG_W-1:0]  tag;
    addr_t             dst;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Weight (priority-counter reload value) of an input channel.
  localparam int WGT_W = 4;
  typedef logic [WGT_W-1:0] wgt_t;

endpackage
