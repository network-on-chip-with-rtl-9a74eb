// tb_output_if -- check of the single-flit output buffer.
//
// Drives random reads and random loads (only in clocks where the buffer can
// take a flit, as the arbiter does), and compares o_nd, o_dout and
// out_free every clock with a one-entry reference model.
module tb_output_if;
  import rtsnoc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic load, i_rd, out_free, o_nd;
  flit_t load_flit, o_dout;
  logic  m_full;
  flit_t m_data;
  logic  free_seen;

  output_if dut (.clk, .rst, .load, .load_flit, .out_free, .o_dout, .o_nd, .i_rd);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    load = 0; i_rd = 0; load_flit = '0;
    m_full = 0; m_data = '0; free_seen = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      i_rd      = ($urandom_range(0, 1) == 1);
      load      = (!m_full || i_rd) && ($urandom_range(0, 2) != 0);
      load_flit = flit_t'($urandom);
      #1;
      check("o_nd", o_nd == m_full);
      if (m_full) check("o_dout", o_dout == m_data);
      check("out_free", out_free == (!m_full || i_rd));
      @(posedge clk);
      if (load) begin m_full = 1; m_data = load_flit; end
      else if (m_full && i_rd) m_full = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
