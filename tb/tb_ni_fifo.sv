// tb_ni_fifo -- random check of the network-interface FIFO.
//
// Random writes and reads against a queue model: the head flit, o_nd (not
// empty) and o_wait (full) are compared every clock, and flits written while
// full must be dropped. Runs with the default depth.
module tb_ni_fifo;
  import rtsnoc_pkg::*;

  localparam int DEPTH = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  flit_t i_din, o_dout;
  logic i_wr, o_wait, o_nd, i_rd;
  flit_t q[$];
  int full_seen = 0;

  ni_fifo dut (.clk, .rst, .i_din, .i_wr, .o_wait, .o_dout, .o_nd, .i_rd);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t (q=%0d)", what, $time, q.size()); end
  endtask

  initial begin
    i_wr = 0; i_rd = 0; i_din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // Phases that favour filling, then draining.
      i_wr  = ($urandom_range(0, 99) < ((t / 200) % 2 ? 30 : 80));
      i_rd  = ($urandom_range(0, 99) < ((t / 200) % 2 ? 80 : 30));
      i_din = flit_t'($urandom);
      #1;
      check("o_nd", o_nd == (q.size() != 0));
      check("o_wait", o_wait == (q.size() == DEPTH));
      if (q.size() != 0) check("o_dout", o_dout == q[0]);
      if (o_wait) full_seen++;
      @(posedge clk);
      if (i_rd && q.size() != 0) void'(q.pop_front());
      if (i_wr && q.size() + ((i_rd && o_nd) ? 1 : 0) <= DEPTH && !o_wait) q.push_back(i_din);
    end
    check("full reached", full_seen > 0);
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
