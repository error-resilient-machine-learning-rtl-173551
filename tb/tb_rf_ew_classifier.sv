// tb_rf_ew_classifier: end-to-end test of the RF-EW classifier at its
// default size (10 trees, 30 features, 7 comparators per tree, 8-bit weights).
//
// Each of several random forests is built here: every tree is a random
// depth-3 tree (node i has children 2i+1 and 2i+2, "greater" goes right)
// with random feature selects, thresholds and leaf labels, turned into a
// truth table; every tree gets an out-of-bag accuracy A_l and a timing-error
// rate e_l, and its weight p_l = A_l (1 - e_l) + (1 - A_l) e_l is normalized
// and rounded to 8 bits. Random vectors are streamed with gaps in in_valid.
// The reference walks every tree on the features at that tree's precision,
// forms the weighted sum and the decision (sum > 1/2) and checks votes,
// vote_sum, y_hat and out_valid one clock after the vector was sampled.
//
// Mechanisms that must each occur at least once: a decision where the error
// weighted vote differs from a plain majority, a comparator whose outcome
// is changed by the tree's reduced precision, a gap in in_valid during which
// the outputs hold, and a forest with at least two distinct tree precisions.
module tb_rf_ew_classifier;
  localparam int unsigned L = 10, M = 30, NODES = 7, FW = 8, SW = 5, WW = 8;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [M-1:0][FW-1:0]             x;
  logic [L-1:0][NODES-1:0][SW-1:0]  cfg_sel;
  logic [L-1:0][NODES-1:0][FW-1:0]  cfg_thr;
  logic [L-1:0][(1<<NODES)-1:0]     cfg_lut;
  logic [L-1:0][WW-1:0]             cfg_weight;
  logic        out_valid, y_hat;
  logic [11:0] vote_sum;
  logic [L-1:0] votes;

  logic [L-1:0][7:0] leaf;
  int unsigned prec [L];
  int checks = 0, failures = 0;
  int n_ew_override = 0, n_prec_effect = 0, n_bubble = 0, n_diverse = 0;

  rf_ew_classifier dut (
    .clk, .rst_n, .in_valid, .x, .cfg_sel, .cfg_thr, .cfg_lut, .cfg_weight,
    .out_valid, .y_hat, .vote_sum, .votes);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Walk tree l on x at precision p; also report whether any comparator on
  // the path would have gone the other way at full precision.
  function automatic logic walk(int l, int unsigned p, output bit differs);
    int node;
    int unsigned f, t;
    bit g, g8;
    node = 0;
    differs = 1'b0;
    while (node < NODES) begin
      f  = int'(x[cfg_sel[l][node]]);
      t  = int'(cfg_thr[l][node]);
      g  = (f >> (FW - p)) > (t >> (FW - p));
      g8 = f > t;
      if (g != g8) differs = 1'b1;
      node = g ? 2 * node + 2 : 2 * node + 1;
    end
    return leaf[l][node - NODES];
  endfunction

  task automatic build_forest();
    real acc, er, p [L], tot;
    tot = 0.0;
    for (int l = 0; l < L; l++) begin
      leaf[l] = 8'($urandom);
      for (int i = 0; i < NODES; i++) begin
        cfg_sel[l][i] = SW'($urandom_range(M - 1));
        cfg_thr[l][i] = FW'($urandom_range(64, 191));
      end
      for (int a = 0; a < (1 << NODES); a++) begin
        int node;
        node = 0;
        while (node < NODES) node = a[node] ? 2 * node + 2 : 2 * node + 1;
        cfg_lut[l][a] = leaf[l][node - NODES];
      end
      acc  = 0.80 + 0.18 * real'($urandom_range(1000)) / 1000.0;
      er   = (l % 3 == 0) ? 0.45 : 0.01 * real'($urandom_range(10));
      p[l] = acc * (1.0 - er) + (1.0 - acc) * er;
      tot += p[l];
    end
    for (int l = 0; l < L; l++) cfg_weight[l] = WW'($rtoi(p[l] / tot * 256.0 + 0.5));
  endtask

  initial begin
    bit diff;
    logic [L-1:0] exp_votes, last_votes;
    int s, nvotes;
    logic exp_y;
    x = '0; cfg_sel = '0; cfg_thr = '0; cfg_lut = '0; cfg_weight = '0; leaf = '0;
    for (int l = 0; l < L; l++) begin
      prec[l] = rf_pkg::dt_precision(l, 11, 4, 8, 1'b1);
      checks++;
      if (prec[l] < 4 || prec[l] > 8) begin failures++; $display("FAIL precision %0d", prec[l]); end
      if (prec[l] != prec[0]) n_diverse++;
    end
    #12;
    checks++;
    if (out_valid !== 1'b0 || votes !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;
    last_votes = '0;
    for (int f = 0; f < 8; f++) begin
      @(negedge clk);
      in_valid = 1'b0;
      @(negedge clk);  // let the last result leave before the model changes
      build_forest();
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        for (int j = 0; j < M; j++) x[j] = FW'($urandom);
        in_valid = ($urandom_range(4) != 0);
        s = 0; nvotes = 0;
        for (int l = 0; l < L; l++) begin
          exp_votes[l] = walk(l, prec[l], diff);
          if (diff) n_prec_effect++;
          if (exp_votes[l]) begin s += int'(cfg_weight[l]); nvotes++; end
        end
        exp_y = (s > 128);
        @(posedge clk);
        #1;
        checks++;
        if (in_valid) begin
          if (out_valid !== 1'b1 || votes !== exp_votes || int'(vote_sum) != s || y_hat !== exp_y) begin
            failures++;
            $display("FAIL forest %0d vec %0d votes=%b exp=%b sum=%0d exp=%0d y=%b exp=%b",
                     f, n, votes, exp_votes, vote_sum, s, y_hat, exp_y);
          end
          if (exp_y != (nvotes > L / 2)) n_ew_override++;
          last_votes = exp_votes;
        end else begin
          n_bubble++;
          if (out_valid !== 1'b0 || votes !== last_votes) begin
            failures++; $display("FAIL hold forest %0d vec %0d", f, n);
          end
        end
      end
    end
    $display("mechanisms: ew_override=%0d precision_effect=%0d bubble=%0d diverse_trees=%0d",
             n_ew_override, n_prec_effect, n_bubble, n_diverse);
    checks += 4;
    if (n_ew_override == 0) begin failures++; $display("FAIL no error-weighted override"); end
    if (n_prec_effect == 0) begin failures++; $display("FAIL precision never mattered"); end
    if (n_bubble == 0)      begin failures++; $display("FAIL no in_valid gap"); end
    if (n_diverse == 0)     begin failures++; $display("FAIL all trees at one precision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
