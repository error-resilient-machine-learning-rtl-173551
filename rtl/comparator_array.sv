// comparator_array: Stage 1 of one decision tree (DT) of the random forest.
//
// Each of the NODES internal nodes of the tree compares one feature of the
// test vector with the threshold found by training and reports the sign of
// (x - T) as one bit: gt[i] = 1 when the feature is greater than the
// threshold, as the ">" comparators of the forest's block diagram show.
//
// Which feature a node looks at is chosen by sel[i] (an index into x); the
// node-to-feature mapping is part of the trained model and is therefore an
// input here. The tree works at PREC bits (4..8 in the error weighted forest):
// the feature and the threshold are both reduced to their PREC most
// significant bits before the comparison. Truncation of the low bits is this
// design's choice; the source only states that input and thresholds share the
// tree's precision. A select beyond the last feature reads a zero feature.
// The low FEAT_W-PREC bits of features and thresholds are unused by design,
// which lint reports as unused signal bits.
//
// Purely combinational; the tree's register follows its look-up table.
module comparator_array #(
  parameter int unsigned M      = 30,          // features in the test vector
  parameter int unsigned NODES  = 7,           // comparators (M_l) in this tree
  parameter int unsigned FEAT_W = rf_pkg::FEAT_W,
  parameter int unsigned PREC   = 8,           // data-path precision of this tree
  parameter int unsigned SEL_W  = (M > 1) ? $clog2(M) : 1
) (
  input  logic [M-1:0][FEAT_W-1:0]     x,      // test vector
  input  logic [NODES-1:0][SEL_W-1:0]  sel,    // feature index per node
  input  logic [NODES-1:0][FEAT_W-1:0] thr,    // threshold per node (full width)
  output logic [NODES-1:0]             gt      // 1: x[sel[i]] > thr[i]
);

  initial begin
    assert (PREC >= 1 && PREC <= FEAT_W)
      else $error("comparator_array: PREC must lie in 1..FEAT_W");
  end

  always_comb begin
    for (int unsigned i = 0; i < NODES; i++) begin
      logic [FEAT_W-1:0] feat;
      logic [PREC-1:0]   xq;
      logic [PREC-1:0]   tq;
      feat  = (32'(sel[i]) < M) ? x[sel[i]] : '0;
      xq    = feat[FEAT_W-1 -: PREC];
      tq    = thr[i][FEAT_W-1 -: PREC];
      gt[i] = (xq > tq);
    end
  end

endmodule
