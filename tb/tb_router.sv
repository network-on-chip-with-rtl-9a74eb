// tb_router -- check of one eight-port router, placed at (0,0) of a 2x2 mesh.
//
// Each port has a sender that holds a flit until the router takes it and a
// receiver that reads its output buffer. The tag field of every flit carries
// the number of its input port so that the receiver can tell flows apart.
//  1. Latency: one flit on an idle router appears in the output buffer two
//     clocks after it is presented.
//  2. Interleaving and rate: inputs WW, SW and NW each send six flits to port
//     NE while NE reads every clock. Deliveries must be two clocks apart and
//     follow round-robin order WW, NW, SW, WW, ... (SW already sent once in
//     step 1 and so starts at the lowest priority).
//  3. Random traffic from all eight inputs to random destinations, with random
//     reads: every flit must arrive once, at the XY-routed port, and the flits
//     of one input to one output in the order they were sent.
// A second router with PORT_MASK = NN, NE, EE, SE, SS only (a five-port
// router) sees the same input wires and read enables. Throughout the run its
// three disabled outputs must never show a flit, its disabled inputs must
// never be waited on, and no flit from a disabled input may appear anywhere;
// the enabled ports must deliver flits.
module tb_router;
  import rtsnoc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  flit_t i_din [NP], o_dout [NP];
  logic [NP-1:0] i_wr, o_wait, o_nd, i_rd;
  int cyc = 0;

  router #(.X_POS(0), .Y_POS(0)) dut (.clk, .rst, .i_din, .i_wr, .o_wait, .o_dout, .o_nd, .i_rd);

  localparam logic [NP-1:0] MASK5 = 8'b0001_1111;
  flit_t o_dout5 [NP];
  logic [NP-1:0] o_wait5, o_nd5;
  int delivered5 = 0;
  router #(.X_POS(0), .Y_POS(0), .PORT_MASK(MASK5)) dut5 (
    .clk, .rst, .i_din, .i_wr, .o_wait(o_wait5), .o_dout(o_dout5), .o_nd(o_nd5), .i_rd);

  always @(posedge clk) begin
    if (!rst) begin
      checks++;
      if ((o_nd5 & ~MASK5) != '0 || (o_wait5 & ~MASK5) != '0) begin
        failures++;
        $display("FAIL five-port router: disabled port active (nd %b wait %b)", o_nd5, o_wait5);
      end
      for (int p = 0; p < NP; p++)
        if (o_nd5[p] && i_rd[p]) begin
          delivered5++;
          if (!MASK5[o_dout5[p].tag[2:0]]) begin
            failures++;
            $display("FAIL five-port router: flit %h from a disabled input", o_dout5[p]);
          end
        end
    end
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // Output port a flit leaves router (0,0) by.
  function automatic int out_port(flit_t f);
    if (f.dst.x != 0) return 2;    // EE
    if (f.dst.y != 0) return 0;    // NN
    return int'(f.dst.port);
  endfunction

  flit_t txq [NP][$];                 // flits waiting to be presented, per input
  flit_t expq [NP][NP][$];            // expected per [input][output]
  int    rd_pct = 100;
  int    deliveries [$];              // cycle of each delivery (phase 2)
  int    order [$];                   // source of each delivery (phase 2)
  int    delivered = 0;

  // Senders: present the head flit, drop it when taken.
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      i_wr[p]  = (txq[p].size() != 0);
      i_din[p] = i_wr[p] ? txq[p][0] : '0;
      i_rd[p]  = ($urandom_range(1, 100) <= rd_pct);
    end
  end

  always @(posedge clk) begin
    if (!rst) begin
      for (int p = 0; p < NP; p++) begin
        if (i_wr[p] && !o_wait[p]) void'(txq[p].pop_front());
        if (o_nd[p] && i_rd[p]) begin
          int src;
          src = int'(o_dout[p].tag);
          delivered++;
          deliveries.push_back(cyc);
          order.push_back(src);
          checks++;
          if (expq[src][p].size() == 0) begin
            failures++;
            $display("FAIL unexpected flit %h on port %0d", o_dout[p], p);
          end else if (expq[src][p][0] != o_dout[p]) begin
            failures++;
            $display("FAIL port %0d got %h expected %h", p, o_dout[p], expq[src][p][0]);
          end else void'(expq[src][p].pop_front());
        end
      end
    end
  end

  function automatic flit_t mk(int src, int x, int y, int port, int data);
    flit_t f;
    f.ctrl = 1'b0;
    f.tag  = TAG_W'(src);
    f.dst.x = X_W'(x);
    f.dst.y = Y_W'(y);
    f.dst.port = port_e'(port);
    f.data = DATA_W'(data);
    return f;
  endfunction

  task automatic send(int src, flit_t f);
    txq[src].push_back(f);
    expq[src][out_port(f)].push_back(f);
  endtask

  function automatic bit all_empty();
    for (int i = 0; i < NP; i++) begin
      if (txq[i].size() != 0) return 0;
      for (int o = 0; o < NP; o++) if (expq[i][o].size() != 0) return 0;
    end
    return 1;
  endfunction

  initial begin
    int t_in, t_out;
    i_wr = '0; i_rd = '0;
    for (int p = 0; p < NP; p++) i_din[p] = '0;
    repeat (3) @(posedge clk);
    rst = 0;

    // 1. Latency of a single flit, SW -> NE.
    @(negedge clk);
    send(5, mk(5, 0, 0, 1, 8'hA5));
    rd_pct = 0;
    @(posedge clk); t_in = cyc;
    while (!o_nd[1]) @(posedge clk);
    t_out = cyc;
    check($sformatf("router latency %0d == 2", t_out - t_in), t_out - t_in == 2);
    rd_pct = 100;
    repeat (4) @(posedge clk);
    check("latency flit delivered", all_empty());

    // 2. Three inputs to one output.
    deliveries.delete(); order.delete();
    @(negedge clk);
    for (int k = 0; k < 6; k++) begin
      send(6, mk(6, 0, 0, 1, 8'h60 + k));
      send(5, mk(5, 0, 0, 1, 8'h50 + k));
      send(7, mk(7, 0, 0, 1, 8'h70 + k));
    end
    repeat (60) @(posedge clk);
    check("18 flits delivered", deliveries.size() == 18);
    for (int k = 1; k < deliveries.size(); k++)
      check($sformatf("delivery spacing %0d", deliveries[k] - deliveries[k-1]),
            deliveries[k] - deliveries[k-1] == 2);
    for (int k = 0; k < order.size(); k++)
      check($sformatf("interleave order %0d", k), order[k] == ((k % 3 == 0) ? 6 : (k % 3 == 1) ? 7 : 5));

    // 3. Random traffic.
    rd_pct = 70;
    for (int n = 0; n < 3000; n++) begin
      int s = $urandom_range(0, NP - 1);
      send(s, mk(s, $urandom_range(0, 1), $urandom_range(0, 1), $urandom_range(0, 7), n));
    end
    for (int w = 0; w < 40000 && !all_empty(); w++) @(posedge clk);
    check("random traffic drained", all_empty());
    check("deliveries counted", delivered == 3000 + 18 + 1);
    check("five-port router delivered flits", delivered5 > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
