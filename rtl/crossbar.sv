// crossbar -- the router's crossbar switch.
//
// For every output port it selects the flit of the input port named by that
// output's one-hot grant. Purely combinational; an output whose grant is all
// zero sees an all-zero flit. The crossbar is named in the paper's router
// diagram; the one-hot AND-OR form is this design's choice.
//
//   in_flit[i]  flit presented by input channel i
//   sel[o]      one-hot grant of output o (bit i selects input i)
//   out_flit[o] flit steered to output o
module crossbar
  import rtsnoc_pkg::*;
(
  input  flit_t                  in_flit  [NP],
  input  logic  [NP-1:0][NP-1:0] sel,
  output flit_t                  out_flit [NP]
);

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      out_flit[o] = '0;
      for (int i = 0; i < NP; i++)
        if (sel[o][i]) out_flit[o] = out_flit[o] | in_flit[i];
    end
  end

endmodule
