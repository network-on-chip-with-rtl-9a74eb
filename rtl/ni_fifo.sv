// ni_fifo -- FIFO of a network interface, between a core and a router port.
//
// The network keeps flits buffered only at its end points: every core port of
// the mesh has one FIFO towards the network (the core writes, the router reads)
// and one from the network (the router writes, the core reads). The FIFO is a
// circular buffer of DEPTH flits with show-ahead output: the head flit is on
// o_dout while o_nd is high.
//
//   i_din, i_wr, o_wait  write side; a write with o_wait (full) high is lost
//   o_dout, o_nd, i_rd   read side; i_rd with o_nd high removes the head flit
// A written flit is visible on the read side one clock later.
//
// Buffers at the end points are the paper's; their depth B is not given and
// DEPTH=4 is this design's choice.
module ni_fifo
  import rtsnoc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst,
  input  flit_t i_din,
  input  logic  i_wr,
  output logic  o_wait,
  output flit_t o_dout,
  output logic  o_nd,
  input  logic  i_rd
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t            mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;
  logic             do_wr, do_rd;

  assign o_wait = (count == (AW+1)'(DEPTH));
  assign o_nd   = (count != '0);
  assign o_dout = mem[rptr];
  assign do_wr  = i_wr && !o_wait;
  assign do_rd  = i_rd && o_nd;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= incr(wptr);
      if (do_rd) rptr <= incr(rptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= i_din;
  end

endmodule
