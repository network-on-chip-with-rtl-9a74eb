// input_if -- input interface, routing controller and flow control of one
// router input channel.
//
// The sender (a core's network interface or a neighbouring router's output
// buffer) presents a flit on i_din with i_wr high and holds both until the flit
// is taken. The routing controller (xy_route) turns the flit's destination into
// a one-hot request for one output port. The input itself stores nothing: the
// flit stays in the sender's buffer until the output port's arbiter
// acknowledges it (`ack`, high in the arbiter's transfer clock), at the end of
// which clock the sender drops or replaces it. o_wait tells the sender that the
// presented flit has not been taken in this clock (i_wr and not ack).
//
// The absence of an input buffer follows the paper (buffers only on the end
// points and one flit per output port); the valid/wait handshake is this
// design's choice, shaped after the signal names of the paper's waveform.
module input_if
  import rtsnoc_pkg::*;
#(
  parameter int unsigned X_POS  = 0,
  parameter int unsigned Y_POS  = 0,
  parameter bit          ENABLE = 1'b1
) (
  input  logic          clk,
  input  logic          rst,
  input  flit_t         i_din,
  input  logic          i_wr,
  output logic          o_wait,
  input  logic          ack,
  output logic [NP-1:0] req,
  output flit_t         flit
);

  logic valid;

  assign valid  = ENABLE && i_wr;
  assign flit   = i_din;
  assign o_wait = valid && !ack;

  xy_route #(.X_POS(X_POS), .Y_POS(Y_POS)) u_route (
    .dst  (i_din.dst),
    .valid(valid),
    .req  (req)
  );

  // Handshake rule: a flit that was not taken stays on the channel unchanged.
  a_hold: assert property (@(posedge clk) disable iff (rst)
                           (valid && o_wait) |=> (i_wr && $stable(i_din)));
  a_ack_valid: assert property (@(posedge clk) disable iff (rst)
                                ack |-> valid);

endmodule
