// rf_ew_classifier: random-forest binary classifier with error weighted
// voting (RF-EW), built to stay accurate when its gates suffer timing errors
// at near-threshold supply voltage.
//
// L decision trees work in parallel on the same M-feature test vector. Tree
// l compares NODES selected features with trained thresholds (Stage 1),
// looks the comparator pattern up in its trained truth table (Stage 2) and
// registers its 1-bit vote. The weighted voter then adds the normalized
// weights p'_l of the trees that voted 1 and decides 1 when that sum exceeds
// 1/2. The weights come from training and fold in each tree's timing-error
// rate, so trees that fail more often count less.
//
// Precision diversity: with DIVERSE = 1 each tree runs at its own precision
// between PREC_MIN and PREC_MAX bits (rf_pkg::dt_precision, a fixed pseudo-
// random draw from PREC_SEED), which gives the trees different critical
// paths and hence less correlated timing errors. The default seed yields
// the precisions 6,5,6,8,7,7,8,5,4,4 for trees 0..9: every value twice. DIVERSE = 0 gives every tree
// PREC_MAX bits, the uniform 8b forests used with majority (all weights 1/L)
// or conventional weighted voting.
//
// Interface: the trained model (feature selects, thresholds, truth tables,
// weights) enters on static configuration ports, which must be stable while
// vectors are classified. One vector is accepted per clock with in_valid;
// y_hat, vote_sum and votes are valid while out_valid is high, one clock after
// the vector was sampled (the tree registers are the only pipeline stage; the
// voter is combinational after them, as drawn). Reset is asynchronous and
// active low. Assertions check that the configuration stays stable while
// vectors are in flight; their `disable iff` on rst_n is why lint reports
// rst_n as used both synchronously and asynchronously. L = 10 trees and the 4..8 bit precision range follow the
// source; M = 30 (the feature count of the breast-cancer data set), NODES = 7
// comparators per tree, the configuration ports, the valid signals and the
// weight format are this design's choices.
module rf_ew_classifier #(
  parameter int unsigned L         = 10,
  parameter int unsigned M         = 30,
  parameter int unsigned NODES     = 7,
  parameter int unsigned FEAT_W    = rf_pkg::FEAT_W,
  parameter int unsigned WEIGHT_W  = rf_pkg::WEIGHT_W,
  parameter int unsigned PREC_MIN  = 4,
  parameter int unsigned PREC_MAX  = 8,
  parameter int unsigned PREC_SEED = 11,
  parameter bit          DIVERSE   = 1'b1,
  parameter int unsigned SEL_W     = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned SUM_W     = WEIGHT_W + $clog2(L + 1)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // test vector
  input  logic                                 in_valid,
  input  logic [M-1:0][FEAT_W-1:0]             x,
  // trained model
  input  logic [L-1:0][NODES-1:0][SEL_W-1:0]   cfg_sel,
  input  logic [L-1:0][NODES-1:0][FEAT_W-1:0]  cfg_thr,
  input  logic [L-1:0][(1<<NODES)-1:0]         cfg_lut,
  input  logic [L-1:0][WEIGHT_W-1:0]           cfg_weight,
  // decision
  output logic                                 out_valid,
  output logic                                 y_hat,
  output logic [SUM_W-1:0]                     vote_sum,
  output logic [L-1:0]                         votes
);

  logic [L-1:0] dt_valid;

  for (genvar l = 0; l < L; l++) begin : g_dt
    localparam int unsigned PREC =
      rf_pkg::dt_precision(l, PREC_SEED, PREC_MIN, PREC_MAX, DIVERSE);
    decision_tree #(
      .M(M), .NODES(NODES), .FEAT_W(FEAT_W), .PREC(PREC), .SEL_W(SEL_W)
    ) u_dt (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .x         (x),
      .sel       (cfg_sel[l]),
      .thr       (cfg_thr[l]),
      .table_bits(cfg_lut[l]),
      .y         (votes[l]),
      .y_valid   (dt_valid[l])
    );
  end

  weighted_voter #(.L(L), .WEIGHT_W(WEIGHT_W), .SUM_W(SUM_W)) u_voter (
    .votes (votes),
    .weight(cfg_weight),
    .sum   (vote_sum),
    .y_hat (y_hat)
  );

  // All trees share in_valid, so their valid bits are equal.
  assign out_valid = &dt_valid;

  // Configuration rules. The trees read the model when they sample a vector,
  // and the voter reads the weights while the result is shown, so the model
  // must not change on the edge that samples a vector, nor while a result
  // is on the outputs.
  a_cfg_stable_sample: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid && $past(in_valid) |-> $stable(cfg_sel) && $stable(cfg_thr) && $stable(cfg_lut))
    else $error("rf_ew_classifier: tree configuration changed between accepted vectors");
  a_cfg_stable_result: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid |-> $stable(cfg_weight))
    else $error("rf_ew_classifier: weights changed while a result was shown");

endmodule
