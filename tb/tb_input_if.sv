// tb_input_if -- check of the input interface with its routing controller.
//
// A sender presents random flits and holds each until it is acknowledged; the
// acknowledge arrives at random. Every clock the request vector (XY route of
// the flit seen from router (1,0)), the flit passed to the crossbar and o_wait
// are compared with values worked out in the testbench.
module tb_input_if;
  import rtsnoc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  flit_t i_din, flit;
  logic i_wr, o_wait, ack;
  logic [NP-1:0] req;
  int taken = 0;

  input_if #(.X_POS(1), .Y_POS(0)) dut (.clk, .rst, .i_din, .i_wr, .o_wait, .ack, .req, .flit);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Router (1,0): west of it is column 0, north of it row 1.
  function automatic logic [NP-1:0] route(flit_t f);
    if (f.dst.x == 1'b0) return NP'(1) << 6;
    if (f.dst.y == 1'b1) return NP'(1) << 0;
    return NP'(1) << int'(f.dst.port);
  endfunction

  initial begin
    i_wr = 0; ack = 0; i_din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (!i_wr && $urandom_range(0, 1) == 1) begin
        i_wr  = 1'b1;
        i_din = flit_t'($urandom);
      end
      ack = i_wr && ($urandom_range(0, 2) == 0);
      #1;
      check("req", req == (i_wr ? route(i_din) : '0));
      check("flit", flit == i_din);
      check("o_wait", o_wait == (i_wr && !ack));
      @(posedge clk);
      if (ack) begin i_wr = 1'b0; taken++; end
    end
    check("flits taken", taken > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
