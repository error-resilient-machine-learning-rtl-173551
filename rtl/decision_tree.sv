// decision_tree: one two-stage DT weak learner of the random forest.
//
// Stage 1 (comparator_array) compares NODES selected features with their
// trained thresholds at the tree's precision PREC; Stage 2 (dt_lut) maps the
// comparator pattern to the label of the reached leaf; the register "D"
// after the table holds the tree's output y_a,l for the voter. This is the
// structure of the forest's block diagram.
//
// Timing: x, sel, thr and table_bits are sampled at the rising clock edge on
// which in_valid is high; y and y_valid show the result from that edge on,
// one cycle of latency with one new vector accepted every cycle. The valid
// bit and the active-low asynchronous reset (clearing y and y_valid) are
// this design's additions; the source draws only the data register.
module decision_tree #(
  parameter int unsigned M      = 30,
  parameter int unsigned NODES  = 7,
  parameter int unsigned FEAT_W = rf_pkg::FEAT_W,
  parameter int unsigned PREC   = 8,
  parameter int unsigned SEL_W  = (M > 1) ? $clog2(M) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [M-1:0][FEAT_W-1:0]     x,
  input  logic [NODES-1:0][SEL_W-1:0]  sel,
  input  logic [NODES-1:0][FEAT_W-1:0] thr,
  input  logic [(1<<NODES)-1:0]        table_bits,
  output logic                         y,          // registered label y_a,l
  output logic                         y_valid
);

  logic [NODES-1:0] gt;
  logic             y_comb;

  comparator_array #(
    .M(M), .NODES(NODES), .FEAT_W(FEAT_W), .PREC(PREC), .SEL_W(SEL_W)
  ) u_stage1 (
    .x(x), .sel(sel), .thr(thr), .gt(gt)
  );

  dt_lut #(.NODES(NODES)) u_stage2 (
    .addr(gt), .table_bits(table_bits), .y(y_comb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= 1'b0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= in_valid;
      if (in_valid) y <= y_comb;
    end
  end

endmodule
