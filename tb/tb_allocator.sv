// tb_allocator -- check of the switch allocator (eight arbiters).
//
// Each input holds a one-hot request for a random output until acknowledged.
// Every clock the allocator's xfer, gnt and ack are compared with eight copies
// of the arbiter reference model, and every acknowledge must go to an input
// that requested the transferring output. Input EE has weight 2.
module tb_allocator;
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
  logic [NP-1:0][NP-1:0] req_in, gnt;
  logic [NP-1:0] out_free, xfer, ack;
  int   wts [8] = '{1, 1, 2, 1, 1, 1, 1, 1};
  arb_model m [NP];
  int acks = 0;

  allocator #(.WEIGHT('{wgt_t'(1), wgt_t'(1), wgt_t'(2), wgt_t'(1),
                        wgt_t'(1), wgt_t'(1), wgt_t'(1), wgt_t'(1)})) dut (
    .clk, .rst, .req_in, .out_free, .gnt, .xfer, .ack);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [NP-1:0] col(int o);
    logic [NP-1:0] v;
    for (int i = 0; i < NP; i++) v[i] = req_in[i][o];
    return v;
  endfunction

  initial begin
    foreach (m[o]) m[o] = new(wts);
    req_in = '0; out_free = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 4000; t++) begin
      logic [NP-1:0] exp_ack;
      @(negedge clk);
      for (int i = 0; i < NP; i++)
        if (req_in[i] == '0 && $urandom_range(0, 2) == 0)
          req_in[i] = NP'(1) << $urandom_range(0, NP - 1);
      out_free = NP'($urandom) | NP'($urandom);
      #1;
      exp_ack = '0;
      for (int o = 0; o < NP; o++) begin
        check($sformatf("xfer[%0d]", o), xfer[o] == (m[o].in_xfer && out_free[o]));
        if (m[o].in_xfer) begin
          check($sformatf("gnt[%0d]", o), gnt[o] == (NP'(1) << m[o].gnt));
          check("granted input still requests", req_in[m[o].gnt][o]);
          if (out_free[o]) exp_ack[m[o].gnt] = 1'b1;
        end
      end
      check("ack", ack == exp_ack);
      acks += $countones(ack);
      @(posedge clk);
      for (int o = 0; o < NP; o++) m[o].step(col(o), out_free[o]);
      for (int i = 0; i < NP; i++) if (exp_ack[i]) req_in[i] = '0;
    end
    check("acks seen", acks > 1000);
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
