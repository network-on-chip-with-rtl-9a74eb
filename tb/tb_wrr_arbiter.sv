// tb_wrr_arbiter -- check of one output-port arbiter against a list model.
//
// Inputs raise requests at random and hold them until granted, as input
// channels do; out_free is random. Every clock the DUT's xfer and gnt are
// compared with the reference model (see arb_model below). Weights 3 on SS and 2
// on EE exercise the priority counters. A final directed phase keeps all eight
// requests up with out_free high and checks the two-clock grant cadence and the
// exact grant sequence.
module tb_wrr_arbiter;
  import rtsnoc_pkg::*;

  // Reference model of the output-port arbitration rules. The priority order
  // is an explicit list (index 0 = highest): a granted input moves to the end
  // of the list unless its weight counter still allows another grant, in which
  // case only the counter drops by one. After reset the list is NN, SS, EE, WW,
  // NE, SE, SW, NW (port codes 0, 4, 2, 6, 1, 3, 5, 7). The model also follows
  // the two-clock ARB/XFER cycle; a transfer waits in XFER until out_free.
  class arb_model;
    int order[$];
    int cnt [8];
    int weight [8];
    bit in_xfer;
    int gnt;          // winner while in_xfer, -1 otherwise

    function new(int w [8]);
      weight = w;
      reset();
    endfunction

    function void reset();
      order = '{0, 4, 2, 6, 1, 3, 5, 7};
      foreach (cnt[i]) cnt[i] = (weight[i] < 1) ? 1 : weight[i];
      in_xfer = 0;
      gnt = -1;
    endfunction

    // One clock edge, with req and out_free as seen before it.
    function void step(logic [7:0] req, bit out_free);
      if (!in_xfer) begin
        if (req != 0) begin
          foreach (order[k]) begin
            if (req[order[k]]) begin
              gnt = order[k];
              break;
            end
          end
          in_xfer = 1;
        end
      end else if (out_free) begin
        if (cnt[gnt] > 1) begin
          cnt[gnt]--;
        end else begin
          cnt[gnt] = (weight[gnt] < 1) ? 1 : weight[gnt];
          foreach (order[k]) begin
            if (order[k] == gnt) begin
              order.delete(k);
              break;
            end
          end
          order.push_back(gnt);
        end
        in_xfer = 0;
        gnt = -1;
      end
    endfunction
  endclass

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [NP-1:0] req, gnt;
  logic out_free, xfer;
  int   wts [8] = '{1, 1, 2, 1, 3, 1, 1, 1};
  arb_model m;
  int seq[$];
  int exp_seq[$];
  int bursts = 0;
  int last_gnt = -1;

  wrr_arbiter #(.WEIGHT('{wgt_t'(1), wgt_t'(1), wgt_t'(2), wgt_t'(1),
                          wgt_t'(3), wgt_t'(1), wgt_t'(1), wgt_t'(1)})) dut (
    .clk, .rst, .req, .out_free, .gnt, .xfer);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic cycle(logic [NP-1:0] new_req, bit free);
    @(negedge clk);
    req      = req | new_req;
    out_free = free;
    #1;
    check("xfer", xfer == (m.in_xfer && free));
    if (m.in_xfer && free) begin
      check("gnt", gnt == (NP'(1) << m.gnt));
      seq.push_back(m.gnt);
      if (m.gnt == last_gnt) bursts++;
      last_gnt = m.gnt;
    end
    @(posedge clk);
    begin
      int g;
      bit fired;
      g = m.gnt; fired = m.in_xfer && free;
      m.step(req, free);
      if (fired) req[g] = 1'b0;   // acknowledged: request drops
    end
  endtask

  initial begin
    m = new(wts);
    req = '0; out_free = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 4000; t++)
      cycle(NP'($urandom) & NP'($urandom), $urandom_range(0, 3) != 0);
    // Let the random phase drain, then restart from reset for the directed part.
    @(negedge clk);
    rst = 1; req = '0; m.reset();
    @(negedge clk);
    rst = 0;
    seq.delete();
    // All inputs keep a request: grants come every second clock in the order
    // NN, SS x3, EE x2, WW, NE, SE, SW, NW, NN, SS x3, ...
    for (int t = 0; t < 40; t++) cycle('1, 1'b1);
    exp_seq = '{0, 4, 4, 4, 2, 2, 6, 1, 3, 5, 7, 0, 4, 4, 4, 2, 2, 6, 1, 3};
    check("grant count", seq.size() == 20);
    foreach (exp_seq[k]) if (k < seq.size()) check($sformatf("seq[%0d]", k), seq[k] == exp_seq[k]);
    check("weighted bursts seen", bursts > 0);
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
