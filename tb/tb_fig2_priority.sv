// tb_fig2_priority -- the priority-channel example: four flows to one core.
//
// Four cores send to one destination core on router 2 (port NN): flow 1 from
// router 1 port SE, flow 2 from router 1 port NE, flow 3 from router 0 port SS
// and flow 4 from router 2 port NE. Flows 1 and 2 cross router 0's EE input;
// flows 1, 2 and 3 then share router 2's SS input. Two meshes run the same
// traffic side by side:
//   weighted  : EE of router 0 has weight 2 and SS of router 2 weight 3, as in
//               the example, so every flow should get about a quarter of the
//               destination channel;
//   plain     : every weight 1 (plain round-robin): flow 4 gets about half,
//               flow 3 a quarter and flows 1 and 2 an eighth each.
// All senders keep their FIFOs full and the destination reads every clock.
// Deliveries are counted per flow over 4000 clocks after a warm-up, and every
// flow's flits must arrive in order.
module tb_fig2_priority;
  import rtsnoc_pkg::*;

  localparam int NR = 4;
  typedef logic [NR-1:0][NP-1:0][WGT_W-1:0] wtab_t;

  function automatic wtab_t weights(bit fig2);
    wtab_t w;
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < NP; p++) w[r][p] = WGT_W'(1);
    if (fig2) begin
      w[0][P_EE] = WGT_W'(2);
      w[2][P_SS] = WGT_W'(3);
    end
    return w;
  endfunction

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  // Flow sources: router, port; destination router 2 port NN.
  int src_r [4] = '{1, 1, 0, 2};
  int src_p [4] = '{3, 1, 4, 1};

  flit_t         c_din  [2][NR][NP];
  logic [NP-1:0] c_wr   [2][NR];
  logic [NP-1:0] c_wait [2][NR];
  flit_t         c_dout [2][NR][NP];
  logic [NP-1:0] c_nd   [2][NR];
  logic [NP-1:0] c_rd   [2][NR];

  rtsnoc_mesh #(.WEIGHT(weights(1'b1))) dut_w (
    .clk, .rst, .c_din(c_din[0]), .c_wr(c_wr[0]), .c_wait(c_wait[0]),
    .c_dout(c_dout[0]), .c_nd(c_nd[0]), .c_rd(c_rd[0]));
  rtsnoc_mesh #(.WEIGHT(weights(1'b0))) dut_p (
    .clk, .rst, .c_din(c_din[1]), .c_wr(c_wr[1]), .c_wait(c_wait[1]),
    .c_dout(c_dout[1]), .c_nd(c_nd[1]), .c_rd(c_rd[1]));

  int  seq_tx [2][4];
  int  seq_rx [2][4];
  int  cnt [2][4];
  bit  counting = 0;
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic flit_t mkf(int flow, int n);
    flit_t f;
    f = '0;
    f.tag = TAG_W'(flow);
    f.dst.x = 1'b0;
    f.dst.y = 1'b1;
    f.dst.port = P_NN;
    f.data = DATA_W'(n);
    return f;
  endfunction

  always @(negedge clk) begin
    for (int m = 0; m < 2; m++) begin
      for (int r = 0; r < NR; r++) begin
        c_wr[m][r] = '0;
        c_rd[m][r] = '0;
        for (int p = 0; p < NP; p++) c_din[m][r][p] = '0;
      end
      c_rd[m][2][P_NN] = 1'b1;
      for (int f = 0; f < 4; f++) begin
        c_wr[m][src_r[f]][src_p[f]]  = !rst;
        c_din[m][src_r[f]][src_p[f]] = mkf(f, seq_tx[m][f]);
      end
    end
  end

  always @(posedge clk) begin
    if (!rst) begin
      for (int m = 0; m < 2; m++) begin
        for (int f = 0; f < 4; f++)
          if (c_wr[m][src_r[f]][src_p[f]] && !c_wait[m][src_r[f]][src_p[f]]) seq_tx[m][f]++;
        if (c_nd[m][2][P_NN]) begin
          flit_t g;
          int fl;
          g = c_dout[m][2][P_NN];
          fl = int'(g.tag);
          checks++;
          if (fl > 3 || g.data != DATA_W'(seq_rx[m][fl])) begin
            failures++;
            $display("FAIL mesh %0d: flit %h out of order", m, g);
          end else begin
            seq_rx[m][fl]++;
            if (counting) cnt[m][fl]++;
          end
        end
      end
    end
  end

  initial begin
    int tot [2];
    for (int m = 0; m < 2; m++)
      for (int f = 0; f < 4; f++) begin seq_tx[m][f] = 0; seq_rx[m][f] = 0; cnt[m][f] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (300) @(posedge clk);
    counting = 1;
    repeat (4000) @(posedge clk);
    counting = 0;
    for (int m = 0; m < 2; m++) begin
      tot[m] = 0;
      for (int f = 0; f < 4; f++) tot[m] += cnt[m][f];
      $display("%s: flits per flow %0d %0d %0d %0d of %0d", m == 0 ? "weighted" : "plain   ",
               cnt[m][0], cnt[m][1], cnt[m][2], cnt[m][3], tot[m]);
    end
    check_true("destination busy (weighted)", tot[0] > 1800);
    check_true("destination busy (plain)", tot[1] > 1800);
    // Weighted: each flow within 20..30 % of the channel.
    for (int f = 0; f < 4; f++)
      check_true($sformatf("weighted share of flow %0d", f + 1),
                 cnt[0][f] * 100 >= 20 * tot[0] && cnt[0][f] * 100 <= 30 * tot[0]);
    // Plain round-robin: 1/8, 1/8, 1/4, 1/2.
    check_true("plain share flow 1", cnt[1][0] * 100 >= 10 * tot[1] && cnt[1][0] * 100 <= 15 * tot[1]);
    check_true("plain share flow 2", cnt[1][1] * 100 >= 10 * tot[1] && cnt[1][1] * 100 <= 15 * tot[1]);
    check_true("plain share flow 3", cnt[1][2] * 100 >= 22 * tot[1] && cnt[1][2] * 100 <= 28 * tot[1]);
    check_true("plain share flow 4", cnt[1][3] * 100 >= 45 * tot[1] && cnt[1][3] * 100 <= 55 * tot[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_true(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
