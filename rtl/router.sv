// router -- eight-port RTSNoC router.
//
// Ports are named after the cardinal points (NN, NE, EE, SE, SS, SW, WW, NW);
// each one is an input channel and an output channel and may connect a core or
// a neighbouring router. Flits are routed one at a time: each input's routing
// controller (XY routing) requests one output, each output's arbiter grants one
// request per arbitration cycle, and the crossbar copies the granted flit into
// that output's single-flit buffer. Flits of different packets that share an
// output are therefore interleaved flit by flit. Router-to-router inputs can be
// given a weight (the number of flows they carry) so that they may send that
// many flits in a row before dropping to the lowest priority.
//
// Interface per port p:
//   i_din[p], i_wr[p], o_wait[p]  input channel: the sender holds the flit with
//                                 i_wr high until a clock with o_wait low
//   o_dout[p], o_nd[p], i_rd[p]   output channel: o_nd marks a flit in the
//                                 output buffer, taken when i_rd is high
// Timing: a flit that arrives on an idle router is in the output buffer two
// clocks later; an output delivers at most one flit every two clocks. o_wait
// depends combinationally on i_rd of the output the flit is going to.
//
// PORT_MASK disables ports (a five- to eight-port router): a disabled input is
// ignored and a disabled output never shows a flit. X_POS/Y_POS give the
// router's place in the mesh; WEIGHT the per-input priority counts; LINK the
// ports that face other routers (see allocator).
//
// Between routers the acknowledge is combinational along a flit's path: when
// an output buffer is read in the same clock as its arbiter transfers, the
// buffer is emptied and refilled at one clock edge. That is what lets a
// router-to-router channel carry one flit every two clocks with a single
// buffer per output port.
module router
  import rtsnoc_pkg::*;
#(
  parameter int unsigned   X_POS     = 0,
  parameter int unsigned   Y_POS     = 0,
  parameter logic [NP-1:0] PORT_MASK = '1,
  parameter wgt_t          WEIGHT [NP] = '{default: wgt_t'(1)},
  parameter logic [NP-1:0] LINK      = '0
) (
  input  logic          clk,
  input  logic          rst,
  input  flit_t         i_din  [NP],
  input  logic [NP-1:0] i_wr,
  output logic [NP-1:0] o_wait,
  output flit_t         o_dout [NP],
  output logic [NP-1:0] o_nd,
  input  logic [NP-1:0] i_rd
);

  logic [NP-1:0][NP-1:0] req_in;
  logic [NP-1:0][NP-1:0] gnt;
  logic [NP-1:0]         xfer;
  logic [NP-1:0]         ack;
  logic [NP-1:0]         out_free;
  logic [NP-1:0]         nd_int;
  flit_t                 in_flit  [NP];
  flit_t                 xbar_out [NP];

  for (genvar p = 0; p < NP; p++) begin : g_port
    input_if #(.X_POS(X_POS), .Y_POS(Y_POS), .ENABLE(PORT_MASK[p])) u_in (
      .clk   (clk),
      .rst (rst),
      .i_din (i_din[p]),
      .i_wr  (i_wr[p]),
      .o_wait(o_wait[p]),
      .ack   (ack[p]),
      .req   (req_in[p]),
      .flit  (in_flit[p])
    );

    output_if u_out (
      .clk      (clk),
      .rst    (rst),
      .load     (xfer[p]),
      .load_flit(xbar_out[p]),
      .out_free (out_free[p]),
      .o_dout   (o_dout[p]),
      .o_nd     (nd_int[p]),
      .i_rd     (i_rd[p])
    );

    assign o_nd[p] = PORT_MASK[p] && nd_int[p];
  end

  allocator #(.WEIGHT(WEIGHT), .LINK(LINK)) u_alloc (
    .clk     (clk),
    .rst   (rst),
    .req_in  (req_in),
    .out_free(out_free),
    .gnt     (gnt),
    .xfer    (xfer),
    .ack     (ack)
  );

  crossbar u_xbar (
    .in_flit (in_flit),
    .sel     (gnt),
    .out_flit(xbar_out)
  );

endmodule
