// output_if -- output interface of one router port: the single-flit buffer.
//
// The router keeps exactly one flit per output port. The crossbar writes the
// buffer when the port's arbiter is in its transfer clock (`load`). The buffer
// shows its flit on o_dout with o_nd high until the receiver takes it with
// i_rd (taken at the clock edge where o_nd and i_rd are both high).
// `out_free` tells the arbiter that the buffer can take a flit in this clock:
// it is empty, or its flit is being read in this clock, in which case the old
// flit leaves and the new one arrives at the same clock edge. The arbiter only
// transfers when out_free is high, so no flit is ever overwritten.
//
// One buffer per output port is the paper's; the o_dout/o_nd/i_rd names follow
// the paper's waveform, the exact handshake is this design's choice.
module output_if
  import rtsnoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  load,
  input  flit_t load_flit,
  output logic  out_free,
  output flit_t o_dout,
  output logic  o_nd,
  input  logic  i_rd
);

  logic pop;

  assign pop      = o_nd && i_rd;
  assign out_free = !o_nd || pop;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      o_nd   <= 1'b0;
      o_dout <= '0;
    end else if (load) begin
      o_nd   <= 1'b1;
      o_dout <= load_flit;
    end else if (pop) begin
      o_nd   <= 1'b0;
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (rst)
                                   load |-> out_free);

endmodule
