// rtsnoc_mesh -- top level: a 2-D mesh of eight-port RTSNoC routers.
//
// MESH_X x MESH_Y routers (default 2x2) are joined through their NN/SS and
// EE/WW ports; router r = y*MESH_X + x sits at column x, row y, with north
// (+y) up and east (+x) to the right. Every router port that does not face a
// neighbouring router is a core port, so the default mesh has 4 routers and
// 24 core ports (six per router). Each core port has a network interface made
// of two ni_fifo buffers, one towards the network and one from it; these are
// the only buffers apart from the routers' single-flit output buffers.
//
// Core-side interface, indexed [router][port] (port codes as in rtsnoc_pkg):
//   c_din, c_wr, c_wait   core to network; a write while c_wait is high is lost
//   c_dout, c_nd, c_rd    network to core; c_rd with c_nd high takes a flit
// The entries of a port that joins two routers are unused (outputs are zero,
// inputs ignored).
//
// Between routers, the upstream output buffer drives the downstream input
// channel (o_dout -> i_din, o_nd -> i_wr) and is emptied when the downstream
// router takes the flit (i_rd = i_wr and not o_wait).
// This i_rd is combinational along a flit's path (see router). A simulator or
// linter that treats r_rd/r_wait as whole vectors may report them as circular
// logic (Verilator: UNOPTFLAT). It is not a loop: bit by bit, the path follows
// XY-routing turns, which never close a cycle, so the warning stands.
//
// WEIGHT[r][p] is the number of flits input p of router r may send in a row
// (see wrr_arbiter). The default follows the flows of the reference
// experiment: router 2 takes two flows on SS (from cores 3 and 7) and two on EE
// (from cores 18 and 23); every other channel has weight 1. The topology, XY
// routing and 24-core placement are the paper's; the FIFO depth and the
// weights as a design-time table are this design's choice.
module rtsnoc_mesh
  import rtsnoc_pkg::*;
#(
  parameter int unsigned MESH_X   = 2,
  parameter int unsigned MESH_Y   = 2,
  parameter int unsigned NI_DEPTH = 4,
  parameter logic [MESH_X*MESH_Y-1:0][NP-1:0][WGT_W-1:0] WEIGHT = default_weights(MESH_X, MESH_Y)
) (
  input  logic          clk,
  input  logic          rst,
  input  flit_t         c_din  [MESH_X*MESH_Y][NP],
  input  logic [NP-1:0] c_wr   [MESH_X*MESH_Y],
  output logic [NP-1:0] c_wait [MESH_X*MESH_Y],
  output flit_t         c_dout [MESH_X*MESH_Y][NP],
  output logic [NP-1:0] c_nd   [MESH_X*MESH_Y],
  input  logic [NP-1:0] c_rd   [MESH_X*MESH_Y]
);

  localparam int unsigned NR = MESH_X * MESH_Y;

  // Weights of the reference experiment on the 2x2 mesh; 1 elsewhere.
  function automatic logic [MESH_X*MESH_Y-1:0][NP-1:0][WGT_W-1:0]
      default_weights(int unsigned mx, int unsigned my);
    logic [MESH_X*MESH_Y-1:0][NP-1:0][WGT_W-1:0] w;
    for (int r = 0; r < MESH_X*MESH_Y; r++)
      for (int p = 0; p < NP; p++)
        w[r][p] = WGT_W'(1);
    if (mx == 2 && my == 2) begin
      w[2][P_SS] = WGT_W'(2);
      w[2][P_EE] = WGT_W'(2);
    end
    return w;
  endfunction

  // One router's weights as the array the router takes.
  function automatic wgt_t router_weight(int unsigned r, int unsigned p);
    return WEIGHT[r][p];
  endfunction

  // Router-side signals.
  flit_t         r_din  [NR][NP];
  logic [NP-1:0] r_wr   [NR];
  logic [NP-1:0] r_wait [NR];
  flit_t         r_dout [NR][NP];
  logic [NP-1:0] r_nd   [NR];
  logic [NP-1:0] r_rd   [NR];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned R = y * MESH_X + x;

      localparam logic [NP-1:0] LINKS =
        NP'((y + 1 < MESH_Y) ? (1 << P_NN) : 0) | NP'((y > 0) ? (1 << P_SS) : 0) |
        NP'((x + 1 < MESH_X) ? (1 << P_EE) : 0) | NP'((x > 0) ? (1 << P_WW) : 0);

      router #(
        .X_POS (x),
        .Y_POS (y),
        .LINK  (LINKS),
        .WEIGHT('{router_weight(R, 0), router_weight(R, 1), router_weight(R, 2),
                  router_weight(R, 3), router_weight(R, 4), router_weight(R, 5),
                  router_weight(R, 6), router_weight(R, 7)})
      ) u_router (
        .clk   (clk),
        .rst (rst),
        .i_din (r_din[R]),
        .i_wr  (r_wr[R]),
        .o_wait(r_wait[R]),
        .o_dout(r_dout[R]),
        .o_nd  (r_nd[R]),
        .i_rd  (r_rd[R])
      );

      for (genvar p = 0; p < NP; p++) begin : g_p
        // Neighbour across port p, if any.
        localparam bit HAS_N = (p == P_NN) && (y + 1 < MESH_Y);
        localparam bit HAS_S = (p == P_SS) && (y > 0);
        localparam bit HAS_E = (p == P_EE) && (x + 1 < MESH_X);
        localparam bit HAS_W = (p == P_WW) && (x > 0);
        localparam bit IS_LINK = HAS_N || HAS_S || HAS_E || HAS_W;
        localparam int unsigned NB = HAS_N ? R + MESH_X :
                                     HAS_S ? R - MESH_X :
                                     HAS_E ? R + 1 :
                                     HAS_W ? R - 1 : R;
        localparam int unsigned OPP = (p == P_NN) ? int'(P_SS) :
                                      (p == P_SS) ? int'(P_NN) :
                                      (p == P_EE) ? int'(P_WW) :
                                      (p == P_WW) ? int'(P_EE) : p;

        if (IS_LINK) begin : g_link
          assign r_din[R][p]  = r_dout[NB][OPP];
          assign r_wr[R][p]   = r_nd[NB][OPP];
          // Our output p is read when the neighbour takes it on its input OPP.
          assign r_rd[R][p]   = r_wr[NB][OPP] && !r_wait[NB][OPP];
          assign c_wait[R][p] = 1'b0;
          assign c_dout[R][p] = '0;
          assign c_nd[R][p]   = 1'b0;
        end else begin : g_core
          ni_fifo #(.DEPTH(NI_DEPTH)) u_tx (
            .clk   (clk),
            .rst (rst),
            .i_din (c_din[R][p]),
            .i_wr  (c_wr[R][p]),
            .o_wait(c_wait[R][p]),
            .o_dout(r_din[R][p]),
            .o_nd  (r_wr[R][p]),
            .i_rd  (r_wr[R][p] && !r_wait[R][p])
          );
          logic rx_full;
          ni_fifo #(.DEPTH(NI_DEPTH)) u_rx (
            .clk   (clk),
            .rst (rst),
            .i_din (r_dout[R][p]),
            .i_wr  (r_nd[R][p]),
            .o_wait(rx_full),
            .o_dout(c_dout[R][p]),
            .o_nd  (c_nd[R][p]),
            .i_rd  (c_rd[R][p])
          );
          assign r_rd[R][p] = !rx_full;
        end
      end
    end
  end

endmodule
