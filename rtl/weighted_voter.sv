// weighted_voter: the error weighted voter (RF-EW) that fuses the 1-bit
// outputs of the L decision trees into the forest's decision.
//
// For binary classes the MAP decision reduces to
//     y_hat = 1  when  sum_l [y_l == 1] * p'_l  >  1/2,   else 0,
// with p'_l = p_l / sum(p) and p_l = P(R_l|eta=0)(1 - p_eta,l)
// + (1 - P(R_l|eta=0)) p_eta,l, so a tree with a higher timing-error rate
// gets a smaller weight. The voter follows the block diagram of that scheme:
// each vote drives a 2:1 multiplexer that passes either 0 or p'_l, a binary
// adder tree sums the multiplexer outputs, and a slicer compares the sum
// with 1/2. The weights are computed during training and are inputs here.
// With all weights equal to 1/L the same hardware is a strict majority voter,
// and with p_eta = 0 it is the conventional weighted voter.
//
// Number format (this design's choice): p'_l is an unsigned fraction of
// WEIGHT_W bits, value weight/2^WEIGHT_W; 1/2 is 2^(WEIGHT_W-1). The sum is
// carried at full width so it cannot overflow.
//
// Purely combinational, as drawn; the trees' registers precede it.
module weighted_voter #(
  parameter int unsigned L        = 10,
  parameter int unsigned WEIGHT_W = rf_pkg::WEIGHT_W,
  parameter int unsigned SUM_W    = WEIGHT_W + $clog2(L + 1)
) (
  input  logic [L-1:0]               votes,    // y_a,l of every tree
  input  logic [L-1:0][WEIGHT_W-1:0] weight,   // normalized weights p'_l
  output logic [SUM_W-1:0]           sum,      // weighted vote for class 1
  output logic                       y_hat     // final decision
);

  localparam int unsigned LEVELS = (L > 1) ? $clog2(L) : 0;
  localparam int unsigned NLEAF  = 1 << LEVELS;
  localparam logic [SUM_W-1:0] HALF = SUM_W'(1) << (WEIGHT_W - 1);

  // Level 0 holds the multiplexer outputs (zero-padded to a power of two);
  // level k holds the NLEAF >> k partial sums of the adder tree.
  for (genvar k = 0; k <= LEVELS; k++) begin : g_lvl
    localparam int unsigned N = NLEAF >> k;
    logic [SUM_W-1:0] s [N];
    for (genvar i = 0; i < N; i++) begin : g_node
      if (k == 0) begin : g_mux
        if (i < L) begin : g_vote
          assign s[i] = votes[i] ? SUM_W'(weight[i]) : '0;
        end else begin : g_pad
          assign s[i] = '0;
        end
      end else begin : g_add
        assign s[i] = g_lvl[k-1].s[2*i] + g_lvl[k-1].s[2*i+1];
      end
    end
  end

  assign sum   = g_lvl[LEVELS].s[0];
  assign y_hat = (sum > HALF);     // slicer

endmodule
