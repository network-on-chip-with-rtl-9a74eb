// allocator -- the router's switch allocator.
//
// Holds one wrr_arbiter per output port. It turns the per-input one-hot routing
// requests into per-output request vectors, hands each output's grant to the
// crossbar and the output buffer, and returns to each input channel its
// acknowledge: input i is acknowledged in the transfer clock of the output
// whose arbiter granted it. Since an input requests only one output at a time,
// at most one acknowledge reaches an input.
//
//   req_in[i]   one-hot output request of input i
//   out_free[o] output o's buffer is empty or being read in this clock
//   gnt[o]      one-hot winner of output o, valid while xfer[o] is high
//   xfer[o]     output o is in its transfer clock
//   ack[i]      input i's flit is taken in this clock
//
// LINK marks the ports that face another router. Between two such ports a
// flit never leaves by the port it came in on (no U-turn), and one that entered
// on NN or SS never turns to EE or WW (XY routing finishes X before Y). Those
// input/output pairs are left out of the allocator altogether. Besides saving
// logic, this keeps the acknowledge paths between routers free of
// combinational loops: an acknowledge depends on the downstream router's
// acknowledge only along turns XY routing can take, and those never close a
// cycle. Verilator, which tracks whole vectors, may still report the vectors
// as circular (UNOPTFLAT); at bit level there is no loop.
//
// The allocator is named in the paper's router diagram; how it is built is this
// design's choice.
module allocator
  import rtsnoc_pkg::*;
#(
  parameter wgt_t          WEIGHT [NP] = '{default: wgt_t'(1)},
  parameter logic [NP-1:0] LINK        = '0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [NP-1:0][NP-1:0] req_in,
  input  logic [NP-1:0]         out_free,
  output logic [NP-1:0][NP-1:0] gnt,
  output logic [NP-1:0]         xfer,
  output logic [NP-1:0]         ack
);

  logic [NP-1:0][NP-1:0] req_out;

  // Input/output pairs that XY routing can use.
  function automatic bit legal(int unsigned i, int unsigned o);
    if (!LINK[i] || !LINK[o]) return 1'b1;
    if (i == o) return 1'b0;
    if ((i == int'(P_NN) || i == int'(P_SS)) && (o == int'(P_EE) || o == int'(P_WW))) return 1'b0;
    return 1'b1;
  endfunction

  always_comb begin
    for (int o = 0; o < NP; o++)
      for (int i = 0; i < NP; i++)
        req_out[o][i] = legal(i, o) && req_in[i][o];
  end

  for (genvar o = 0; o < NP; o++) begin : g_arb
    wrr_arbiter #(.WEIGHT(WEIGHT)) u_arb (
      .clk     (clk),
      .rst   (rst),
      .req     (req_out[o]),
      .out_free(out_free[o]),
      .gnt     (gnt[o]),
      .xfer    (xfer[o])
    );
  end

  always_comb begin
    ack = '0;
    for (int o = 0; o < NP; o++)
      for (int i = 0; i < NP; i++)
        if (legal(i, o) && xfer[o] && gnt[o][i]) ack[i] = 1'b1;
  end

endmodule
