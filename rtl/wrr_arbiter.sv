// wrr_arbiter -- arbiter of one router output port.
//
// Each output port owns one arbiter that collects the routing requests of the
// input channels. Priorities are kept in a matrix (prio[i][j] set: input i
// beats input j). After reset the order is NN, SS, EE, WW, NE, SE, SW, NW, so
// the four channels that join neighbouring routers start on top. A request is
// granted when it has the highest priority among the pending requests (or is
// the only one). A granted channel normally drops to the lowest priority, which
// gives round-robin among competing channels. A channel with a weight W above 1
// (a router-to-router channel that carries W flows) keeps its place for W
// grants in a row: a counter loaded with W is decremented on each grant and the
// channel only drops to the lowest priority when the counter runs out.
//
// Timing: one arbitration cycle takes two clocks. In the ARB clock the winner
// among the pending requests is registered. In the XFER clock the flit is
// moved through the crossbar into the output buffer and the winner is
// acknowledged, provided the buffer can take it in that clock (out_free: it is
// empty or its flit is being read in the same clock); otherwise the arbiter
// stays in XFER with the same winner. A flit therefore spends two clocks in a
// router and an output accepts at most one flit every two clocks.
//
//   req[i]    input i has a flit for this output (held until acknowledged)
//   out_free  this output's buffer can take a flit in this clock
//   gnt       one-hot winner, valid in the XFER clock
//   xfer      the transfer happens in this clock (XFER and out_free)
//
// The priority rules are the paper's; the matrix form, the reset order inside
// the two groups and the two-clock ARB/XFER split are this design's choice
// (made so that the router latency is the two clocks the paper states).
// xfer depends combinationally on out_free, which lets a full output buffer be
// read and refilled at the same clock edge.
module wrr_arbiter
  import rtsnoc_pkg::*;
#(
  parameter wgt_t WEIGHT [NP] = '{default: wgt_t'(1)}
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [NP-1:0] req,
  input  logic          out_free,
  output logic [NP-1:0] gnt,
  output logic          xfer
);

  // Reset rank of every port: NN, SS, EE, WW first, then NE, SE, SW, NW.
  function automatic int unsigned init_rank(int unsigned p);
    case (port_e'(p))
      P_NN: return 0;
      P_SS: return 1;
      P_EE: return 2;
      P_WW: return 3;
      P_NE: return 4;
      P_SE: return 5;
      P_SW: return 6;
      default: return 7;
    endcase
  endfunction

  function automatic wgt_t eff_weight(int unsigned p);
    return (WEIGHT[p] == '0) ? wgt_t'(1) : WEIGHT[p];
  endfunction

  typedef enum logic {ARB, XFER} phase_e;

  phase_e               phase;
  logic [NP-1:0][NP-1:0] prio;
  wgt_t                 cnt [NP];
  logic [NP-1:0]        win;

  // Winner: a requester that no other requester beats.
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      win[i] = req[i];
      for (int j = 0; j < NP; j++)
        if (j != i && req[j] && prio[j][i]) win[i] = 1'b0;
    end
  end

  assign xfer = (phase == XFER) && out_free;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      phase <= ARB;
      gnt   <= '0;
      for (int i = 0; i < NP; i++) begin
        cnt[i] <= eff_weight(i);
        for (int j = 0; j < NP; j++)
          prio[i][j] <= (i != j) && (init_rank(i) < init_rank(j));
      end
    end else begin
      case (phase)
        ARB: begin
          if (|req) begin
            gnt   <= win;
            phase <= XFER;
          end
        end
        XFER: begin
          if (out_free) begin
            phase <= ARB;
            gnt   <= '0;
            for (int w = 0; w < NP; w++) begin
              if (gnt[w]) begin
                if (cnt[w] > wgt_t'(1)) begin
                  cnt[w] <= cnt[w] - wgt_t'(1);
                end else begin
                  cnt[w] <= eff_weight(w);
                  for (int j = 0; j < NP; j++) begin
                    if (j != w) begin
                      prio[w][j] <= 1'b0;
                      prio[j][w] <= 1'b1;
                    end
                  end
                end
              end
            end
          end
        end
        default: phase <= ARB;
      endcase
    end
  end

  // A granted request stays pending until it is transferred.
  a_req_held: assert property (@(posedge clk) disable iff (rst)
                               (phase == XFER) |-> ((gnt & req) == gnt));
  a_gnt_onehot: assert property (@(posedge clk) disable iff (rst)
                                 (phase == XFER) |-> $onehot(gnt));

endmodule
