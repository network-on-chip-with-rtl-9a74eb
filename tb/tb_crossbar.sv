// tb_crossbar -- random check of the crossbar switch.
//
// Applies random flits and, for every output, a random one-hot or empty
// selection; each output must show the selected input's flit, or zero.
module tb_crossbar;
  import rtsnoc_pkg::*;

  int checks = 0, failures = 0;
  flit_t in_flit [NP];
  flit_t out_flit [NP];
  logic [NP-1:0][NP-1:0] sel;
  int pick [NP];

  crossbar dut (.in_flit(in_flit), .sel(sel), .out_flit(out_flit));

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NP; i++) in_flit[i] = flit_t'($urandom);
      for (int o = 0; o < NP; o++) begin
        pick[o] = $urandom_range(0, NP);     // NP means no selection
        sel[o]  = (pick[o] == NP) ? '0 : NP'(1) << pick[o];
      end
      #1;
      for (int o = 0; o < NP; o++) begin
        checks++;
        if (out_flit[o] !== ((pick[o] == NP) ? flit_t'(0) : in_flit[pick[o]])) begin
          failures++;
          $display("FAIL out %0d pick %0d: got %h", o, pick[o], out_flit[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
