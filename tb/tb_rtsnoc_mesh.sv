// tb_rtsnoc_mesh -- end-to-end test of the default 2x2 mesh (24 cores).
//
// Runs the top with all parameters at their defaults.
// Part A replays the reference latency experiment: cores 3, 13, 18 and 23 send
// six-flit packets to core 12 without pause, and once the network is loaded
// core 7 sends a single packet to core 12 (flits 40871, 00872 .. 00875,
// 40876 hex; the other flows use 3, D, E, F in place of 7). Core 12 reads every
// clock. Measured at the router ports: the header latency from the flit being
// presented to router 1 to its arrival in router 2's NN output buffer, and the
// packet latency up to the tail's arrival there. Both are checked against the
// worst-case bound  sum(2*N_i) + 2*k*(f-1)  with N_i the flows competing at each
// hop (1, 2 and 5 here), k = 5 flows to core 12 and f = 6, i.e. 16 + 50 = 66.
// While the destination is saturated, flits must leave for core 12 every
// second clock. Every flow must arrive complete and in order.
// Part B sends random packets between all 24 cores with random read pauses and
// checks that every flit arrives once, at the right core, in order per
// source/destination pair.
// Counted mechanisms (each must occur): flit interleaving on a channel, a
// weighted channel sending two flits in a row, a sender held by o_wait/c_wait,
// a full network-interface FIFO, and an XY turn (X hop then Y hop).
module tb_rtsnoc_mesh;
  import rtsnoc_pkg::*;

  localparam int NR = 4;
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

  // Core placement of the reference 24-core network: router and port.
  int core_r [24] = '{0,0,0,0,0,0, 1,1,1,1,1,1, 2,2,2,2,2,2, 3,3,3,3,3,3};
  int core_p [24] = '{1,3,4,5,6,7, 1,2,3,4,5,7, 0,1,3,5,6,7, 0,1,2,3,5,7};
  int core_at [NR][NP];

  flit_t txq [24][$];
  flit_t expq [24][24][$];     // [src][dst]
  int    rd_pct = 100;
  bit    part_b = 0;

  // Mechanism counters.
  int n_interleave = 0, n_burst = 0, n_wait = 0, n_full = 0, n_turn = 0;

  // Part A bookkeeping.
  int  flow_next [16];          // next expected flit number per flow nibble
  int  flow_cnt [16];
  int  t_hdr_in = -1, t_hdr_out = -1, t_tail_out = -1;
  int  last_out_cyc = -1, last_flow = -1;
  int  gaps_2 = 0, gaps_bad = 0;
  int  delivered = 0;

  function automatic flit_t mkf(int src, int dst, int data, bit ctrl);
    flit_t f;
    f.ctrl = ctrl;
    f.tag = TAG_W'(src);
    f.dst.x = X_W'(core_r[dst] % 2);
    f.dst.y = Y_W'(core_r[dst] / 2);
    f.dst.port = port_e'(core_p[dst]);
    f.data = DATA_W'(data);
    return f;
  endfunction

  // Cores write into their network interfaces; core ports read theirs.
  always @(negedge clk) begin
    for (int r = 0; r < NR; r++) begin
      c_wr[r] = '0;
      c_rd[r] = '0;
      for (int p = 0; p < NP; p++) c_din[r][p] = '0;
    end
    for (int c = 0; c < 24; c++) begin
      int r, p;
      r = core_r[c]; p = core_p[c];
      if (txq[c].size() != 0) begin
        c_wr[r][p]  = !c_wait[r][p];
        c_din[r][p] = txq[c][0];
      end
      c_rd[r][p] = ($urandom_range(1, 100) <= rd_pct);
    end
  end

  always @(posedge clk) begin
    if (!rst) begin
      for (int c = 0; c < 24; c++) begin
        int r, p;
        r = core_r[c]; p = core_p[c];
        if (c_wr[r][p] && !c_wait[r][p]) void'(txq[c].pop_front());
        if (txq[c].size() != 0 && c_wait[r][p]) n_full++;
        if (c_nd[r][p] && c_rd[r][p]) begin
          flit_t f;
          int src;
          f = c_dout[r][p];
          delivered++;
          checks++;
          if (!part_b) begin
            int fl, num;
            fl  = int'(f.data[7:4]);
            num = int'(f.data[3:0]);
            if (c != 12 || num != flow_next[fl] ||
                f.ctrl != (num == 1 || num == 6) || f.tag != '0) begin
              failures++;
              $display("FAIL core %0d got %h, flow %0h expected flit %0d", c, f, fl, flow_next[fl]);
            end
            flow_next[fl] = (num == 6) ? 1 : num + 1;
            flow_cnt[fl]++;
          end else begin
            src = int'(f.tag);
            if (src >= 24 || expq[src][c].size() == 0 || expq[src][c][0] != f) begin
              failures++;
              $display("FAIL core %0d got unexpected %h", c, f);
            end else void'(expq[src][c].pop_front());
          end
        end
      end
      // Router-level probes.
      for (int r = 0; r < NR; r++) n_wait += $countones(dut.r_wait[r]);
      if (dut.r_wr[1][P_EE] && dut.r_din[1][P_EE] == 19'h40871 && t_hdr_in < 0) t_hdr_in = cyc;
      // Router 0: flit of core 7 arrives on EE (X hop) and leaves on NN (Y hop).
      if (dut.r_nd[0][P_NN] && dut.r_rd[0][P_NN] && dut.r_dout[0][P_NN].data[7:4] == 4'h7 && !part_b)
        n_turn++;
      // Router 2 NN output = core 12's channel.
      if (dut.r_nd[2][P_NN] && dut.r_rd[2][P_NN] && !part_b) begin
        flit_t f;
        int fl;
        f = dut.r_dout[2][P_NN];
        fl = int'(f.data[7:4]);
        if (f == 19'h40871) t_hdr_out = cyc;
        if (f == 19'h40876) t_tail_out = cyc;
        if (last_flow >= 0 && fl != last_flow) n_interleave++;
        // Two flits in a row from the same weighted channel (SS: flows 3 and
        // 7, EE: flows E and F).
        if (((fl == 3 || fl == 7) && (last_flow == 3 || last_flow == 7)) ||
            ((fl == 'hE || fl == 'hF) && (last_flow == 'hE || last_flow == 'hF))) n_burst++;
        // Spacing while core 7's packet is in flight.
        if (t_hdr_in >= 0 && t_tail_out < 0 && last_out_cyc >= 0) begin
          if (cyc - last_out_cyc == 2) gaps_2++; else gaps_bad++;
        end
        last_out_cyc = cyc;
        last_flow = fl;
      end
    end
  end

  function automatic bit all_empty();
    for (int i = 0; i < 24; i++) begin
      if (txq[i].size() != 0) return 0;
      for (int o = 0; o < 24; o++) if (expq[i][o].size() != 0) return 0;
    end
    return 1;
  endfunction

  // Table II packet of flow nibble fl.
  task automatic push_packet(int core, int fl);
    for (int n = 1; n <= 6; n++) begin
      flit_t f;
      f = flit_t'({(n == 1 || n == 6) ? 3'b100 : 3'b000, 8'h08, fl[3:0], n[3:0]});
      txq[core].push_back(f);
    end
  endtask

  initial begin
    int sent_a [16];
    int wcl;
    foreach (sent_a[i]) sent_a[i] = 0;
    foreach (flow_next[i]) begin flow_next[i] = 1; flow_cnt[i] = 0; end
    for (int r = 0; r < NR; r++) begin c_wr[r] = '0; c_rd[r] = '0; end
    repeat (3) @(posedge clk);
    rst = 0;

    // ---- Part A: reference experiment.
    check("Table II header of core 7 addresses core 12",
          19'h40871 == mkf(0, 12, 'h71, 1'b1));
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (txq[3].size()  < 6) begin push_packet(3, 'h3);  sent_a['h3]++; end
      if (txq[13].size() < 6) begin push_packet(13, 'hD); sent_a['hD]++; end
      if (txq[18].size() < 6) begin push_packet(18, 'hE); sent_a['hE]++; end
      if (txq[23].size() < 6) begin push_packet(23, 'hF); sent_a['hF]++; end
      if (t == 150) begin push_packet(7, 'h7); sent_a['h7]++; end
    end
    for (int w = 0; w < 2000 && !all_empty(); w++) @(posedge clk);
    repeat (50) @(posedge clk);
    check("part A drained", all_empty());
    foreach (sent_a[i])
      if (sent_a[i] != 0)
        check($sformatf("flow %0h: %0d flits of %0d packets", i, flow_cnt[i], sent_a[i]),
              flow_cnt[i] == 6 * sent_a[i]);
    wcl = 2 * (1 + 2 + 5) + 2 * 5 * (6 - 1);
    $display("core 7 packet: header latency %0d, packet latency %0d clocks (bound %0d; paper measured 12 and 62)",
             t_hdr_out - t_hdr_in, t_tail_out - t_hdr_in, wcl);
    check("header measured", t_hdr_in >= 0 && t_hdr_out > t_hdr_in);
    check("header latency within sum 2*N_i = 16", t_hdr_out - t_hdr_in <= 16);
    check("header latency at least 2 per hop", t_hdr_out - t_hdr_in >= 6);
    check("packet latency within bound", t_tail_out - t_hdr_in <= wcl);
    check("destination channel runs at one flit per two clocks", gaps_2 > 20 && gaps_bad == 0);

    // ---- Part B: random traffic between all cores.
    part_b = 1;
    rd_pct = 60;
    for (int n = 0; n < 1500; n++) begin
      int s, d, len;
      s = $urandom_range(0, 23);
      d = $urandom_range(0, 23);
      len = $urandom_range(1, 6);
      for (int k = 0; k < len; k++) begin
        flit_t f;
        f = mkf(s, d, n * 7 + k, (k == 0 || k == len - 1));
        txq[s].push_back(f);
        expq[s][d].push_back(f);
      end
    end
    for (int w = 0; w < 200000 && !all_empty(); w++) @(posedge clk);
    check("part B drained", all_empty());

    $display("mechanisms: interleave=%0d weighted_burst=%0d wait=%0d ni_full=%0d xy_turn=%0d delivered=%0d",
             n_interleave, n_burst, n_wait, n_full, n_turn, delivered);
    check("interleaving happened", n_interleave > 0);
    check("weighted burst happened", n_burst > 0);
    check("router o_wait happened", n_wait > 0);
    check("NI FIFO full happened", n_full > 0);
    check("XY turn happened", n_turn == 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
