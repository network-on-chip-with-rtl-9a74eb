// tb_interleave_latency -- latency of a short packet against long competitors.
//
// A 9-flit packet from core 7 (router 1, port EE) to core 12 (router 2,
// port NN) shares its path with two competing flows to the same core: core 3
// (router 0, port SW) and core 13 (router 2, port NE). Each competitor sends a
// single packet of S flits, for S = 0, 100, 1000 and 65536, and starts 30
// clocks before the 9-flit packet. Flits are generated on the fly, so the
// long packets take no memory in the testbench. Core 12 reads every clock.
//
// Because the routers interleave flits instead of reserving a path for a whole
// packet, the short packet's latency must not grow with S. Measured from its
// header being presented to router 1 to its tail leaving router 2 for core 12,
// it is checked against the bound  sum(2*N_i) + 2*k*(f-1)  with N_i = 1, 2, 3
// flows at the three hops, k = 3 flows and f = 9: 12 + 48 = 60 clocks. The
// latencies for S = 100, 1000 and 65536 must also lie within 4 clocks of each
// other. Every flit of every packet must reach core 12 once and in order;
// the run ends when all of them have arrived.
module tb_interleave_latency;
  import rtsnoc_pkg::*;

  localparam int NR = 4;
  localparam int NF = 3;              // flows: 0 = core 7, 1 = core 3, 2 = core 13
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  flit_t         c_din  [NR][NP];
  logic [NP-1:0] c_wr   [NR];
  logic [NP-1:0] c_wait [NR];
  flit_t         c_dout [NR][NP];
  logic [NP-1:0] c_nd   [NR];
  logic [NP-1:0] c_rd   [NR];
  int cyc = 0;

  rtsnoc_mesh dut (.clk, .rst, .c_din, .c_wr, .c_wait, .c_dout, .c_nd, .c_rd);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  int src_core [NF] = '{7, 3, 13};
  int src_r    [NF] = '{1, 0, 2};
  int src_p    [NF] = '{2, 5, 1};
  int len      [NF];               // packet length per flow
  int sent     [NF];               // flits written into the sender's interface
  int rcvd     [NF];               // flits delivered to core 12
  bit go       [NF];

  int t_in = -1, t_out = -1;

  function automatic flit_t mkf(int fl, int n);
    flit_t f;
    f.ctrl = (n == 0) || (n == len[fl] - 1);
    f.tag = TAG_W'(src_core[fl]);
    f.dst.x = 1'b0;
    f.dst.y = 1'b1;
    f.dst.port = P_NN;
    f.data = DATA_W'(n);
    return f;
  endfunction

  always @(negedge clk) begin
    for (int r = 0; r < NR; r++) begin
      c_wr[r] = '0;
      c_rd[r] = '0;
      for (int p = 0; p < NP; p++) c_din[r][p] = '0;
    end
    c_rd[2][P_NN] = 1'b1;
    for (int fl = 0; fl < NF; fl++)
      if (go[fl] && sent[fl] < len[fl]) begin
        c_wr[src_r[fl]][src_p[fl]]  = 1'b1;
        c_din[src_r[fl]][src_p[fl]] = mkf(fl, sent[fl]);
      end
  end

  always @(posedge clk) begin
    if (!rst) begin
      for (int fl = 0; fl < NF; fl++)
        if (c_wr[src_r[fl]][src_p[fl]] && !c_wait[src_r[fl]][src_p[fl]]) sent[fl]++;
      if (c_nd[2][P_NN]) begin
        flit_t f;
        int fl;
        f = c_dout[2][P_NN];
        fl = -1;
        for (int i = 0; i < NF; i++) if (int'(f.tag) == src_core[i]) fl = i;
        checks++;
        if (fl < 0 || rcvd[fl] >= len[fl] || f != mkf(fl, rcvd[fl])) begin
          failures++;
          $display("FAIL core 12 got unexpected %h", f);
        end else rcvd[fl]++;
      end
      // Router-level probes for the 9-flit packet.
      if (dut.r_wr[1][P_EE] && int'(dut.r_din[1][P_EE].tag) == 7 && t_in < 0) t_in = cyc;
      if (dut.r_nd[2][P_NN] && dut.r_rd[2][P_NN] && int'(dut.r_dout[2][P_NN].tag) == 7 &&
          dut.r_dout[2][P_NN].ctrl && dut.r_dout[2][P_NN].data == DATA_W'(len[0] - 1))
        t_out = cyc;
    end
  end

  function automatic bit done();
    for (int fl = 0; fl < NF; fl++) if (rcvd[fl] != len[fl]) return 0;
    return 1;
  endfunction

  task automatic run(int s, output int lat);
    len[0] = 9; len[1] = s; len[2] = s;
    for (int fl = 0; fl < NF; fl++) begin sent[fl] = 0; rcvd[fl] = 0; go[fl] = 0; end
    t_in = -1; t_out = -1;
    @(negedge clk);
    go[1] = 1; go[2] = 1;
    repeat (30) @(negedge clk);
    go[0] = 1;
    while (!done() && cyc < 2_000_000) @(posedge clk);
    repeat (10) @(posedge clk);
    check($sformatf("S=%0d: all flits delivered", s), done());
    lat = t_out - t_in;
    $display("competitors of %0d flits: 9-flit packet latency %0d clocks (bound 60)", s, lat);
    check($sformatf("S=%0d: latency measured", s), t_in >= 0 && t_out > t_in);
    check($sformatf("S=%0d: latency within bound", s), lat <= 60);
  endtask

  initial begin
    int lat [4];
    int sizes [4] = '{0, 100, 1000, 65536};
    for (int r = 0; r < NR; r++) begin c_wr[r] = '0; c_rd[r] = '0; end
    for (int fl = 0; fl < NF; fl++) begin go[fl] = 0; sent[fl] = 0; rcvd[fl] = 0; len[fl] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 4; i++) run(sizes[i], lat[i]);
    // Alone, the packet needs 3 hops of 2 clocks and one flit per 2 clocks.
    check("uncontended latency", lat[0] >= 2 * 3 + 2 * 8 && lat[0] <= 2 * 3 + 2 * 8 + 4);
    for (int i = 2; i < 4; i++)
      check($sformatf("latency independent of competitor length (%0d vs %0d)", sizes[i], sizes[1]),
            lat[i] - lat[1] <= 4 && lat[1] - lat[i] <= 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_500_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
