// tb_rf_ntv_workload: classification workload under injected timing errors,
// comparing error weighted voting (RF-EW) with majority voting (RF-M) and
// conventional weighted voting (RF-W) on the same forest.
//
// Data: a synthetic two-class stand-in for a 30-feature, 8-bit diagnostic
// data set. The label is a fair coin; every feature is 150 (class 1) or 106
// (class 0) plus uniform noise in [-70, 70], clipped to 8 bits.
// Forest: the default rf_ew_classifier (10 trees of 7 comparators, per-tree
// precision 4..8 bits). Each tree compares random features with 128 and its
// leaves take the majority of the three comparisons on their path.
// Timing errors: ntv_error_source flips tree outputs with a rate that grows
// with the tree's precision (longer comparators have longer critical paths):
// 4..8 bits -> 0.5, 3, 10, 25, 40 %. These rates are illustrative.
//
// Flow: (1) 400 error-free validation vectors give each tree's accuracy A_l
// from its registered vote. Then, for three error levels (the rates above
// scaled by 0.1, 0.5 and 1, standing in for falling supply voltage):
// (2) weights are formed: RF-EW from p_l = A_l (1 - e_l) + (1 - A_l) e_l with
// that level's e_l, RF-W from p_l = A_l, RF-M as 25/256 each (a strict
// majority of 10), and a single tree (the 8-bit tree 3, weight 255/256);
// (3) 2000 test vectors run with errors injected into the tree outputs, the
// erroneous vote vector feeding four weighted_voter instances. Every voter
// output is checked against a sum formed here. Detection rates must satisfy,
// at every level: error-free forest >= 0.85, RF-EW >= RF-M - 0.01 and
// RF-EW >= RF-W - 0.01; at the highest level RF-EW > RF-M must hold strictly
// and the 10-tree majority must beat the single tree.
module tb_rf_ntv_workload;
  localparam int unsigned L = 10, M = 30, NODES = 7, FW = 8, SW = 5, WW = 8;
  localparam int NVAL = 400, NTEST = 2000;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, err_en = 1'b0;
  logic [M-1:0][FW-1:0]             x;
  logic [L-1:0][NODES-1:0][SW-1:0]  cfg_sel;
  logic [L-1:0][NODES-1:0][FW-1:0]  cfg_thr;
  logic [L-1:0][(1<<NODES)-1:0]     cfg_lut;
  logic [L-1:0][WW-1:0]             w_ew, w_w, w_m;
  logic        out_valid, y_hat;
  logic [11:0] vote_sum, s_ew, s_w, s_m;
  logic [L-1:0] votes, y_err, eta;
  logic        d_ew, d_w, d_m, d_1;
  logic [L-1:0][WW-1:0] w_1;
  logic [11:0] s_1;
  real         mu [L];
  real         er [L];
  int unsigned prec [L];
  int checks = 0, failures = 0;

  rf_ew_classifier dut (
    .clk, .rst_n, .in_valid, .x, .cfg_sel, .cfg_thr, .cfg_lut, .cfg_weight(w_ew),
    .out_valid, .y_hat, .vote_sum, .votes);

  ntv_error_source #(.L(L)) u_err (
    .clk, .enable(err_en), .mu, .y_o(votes), .y_a(y_err), .eta);

  weighted_voter #(.L(L)) v_ew (.votes(y_err), .weight(w_ew), .sum(s_ew), .y_hat(d_ew));
  weighted_voter #(.L(L)) v_w  (.votes(y_err), .weight(w_w),  .sum(s_w),  .y_hat(d_w));
  weighted_voter #(.L(L)) v_m  (.votes(y_err), .weight(w_m),  .sum(s_m),  .y_hat(d_m));
  weighted_voter #(.L(L)) v_1  (.votes(y_err), .weight(w_1),  .sum(s_1),  .y_hat(d_1));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Inverse of the standard normal CDF, by bisection (only used for set-up).
  function automatic real probit(real p);
    real lo = -8.0, hi = 8.0, mid, c;
    for (int k = 0; k < 60; k++) begin
      mid = 0.5 * (lo + hi);
      c = 0.5 * (1.0 + erf_approx(mid / 1.4142135623730951));
      if (c < p) lo = mid; else hi = mid;
    end
    return 0.5 * (lo + hi);
  endfunction

  // Abramowitz-Stegun 7.1.26 approximation of erf.
  function automatic real erf_approx(real z);
    real t, y, s;
    s = (z < 0.0) ? -1.0 : 1.0;
    z = (z < 0.0) ? -z : z;
    t = 1.0 / (1.0 + 0.3275911 * z);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t
               - 0.284496736) * t + 0.254829592) * t * $exp(-z * z);
    return s * y;
  endfunction

  function automatic int wsum(logic [L-1:0] v, logic [L-1:0][WW-1:0] w);
    int s = 0;
    for (int l = 0; l < L; l++) if (v[l]) s += int'(w[l]);
    return s;
  endfunction

  task automatic draw_vector(output logic c);
    int v;
    c = 1'($urandom);
    for (int j = 0; j < M; j++) begin
      v = (c ? 150 : 106) + $urandom_range(140) - 70;
      x[j] = FW'((v < 0) ? 0 : (v > 255) ? 255 : v);
    end
  endtask

  initial begin
    logic c, c_prev;
    int correct [L];
    real a, p [L], tot_ew, tot_w, pd_clean, pd_ew, pd_w, pd_m;

    // Forest: random features, thresholds 128, majority-of-path leaves.
    for (int l = 0; l < L; l++) begin
      prec[l] = rf_pkg::dt_precision(l, 11, 4, 8, 1'b1);
      case (prec[l])
        4: er[l] = 0.005;  5: er[l] = 0.03;  6: er[l] = 0.10;
        7: er[l] = 0.25;   default: er[l] = 0.40;
      endcase
      mu[l] = probit(er[l]);
      for (int i = 0; i < NODES; i++) begin
        cfg_sel[l][i] = SW'($urandom_range(M - 1));
        cfg_thr[l][i] = 8'd128;
      end
      for (int a_ = 0; a_ < (1 << NODES); a_++) begin
        int node, ones;
        node = 0; ones = 0;
        while (node < NODES) begin
          ones += a_[node];
          node = a_[node] ? 2 * node + 2 : 2 * node + 1;
        end
        cfg_lut[l][a_] = (ones >= 2);
      end
      correct[l] = 0;
      w_m[l] = 8'd25;
      w_1[l] = (l == 3) ? 8'd255 : 8'd0;
    end
    w_ew = {L{8'd25}};
    w_w  = {L{8'd25}};
    x = '0;
    #12 rst_n = 1'b1;

    // (1) validation without errors
    @(negedge clk);
    draw_vector(c_prev);
    in_valid = 1'b1;
    for (int n = 0; n < NVAL; n++) begin
      @(posedge clk); #1;
      for (int l = 0; l < L; l++) if (votes[l] == c_prev) correct[l]++;
      @(negedge clk);
      if (n < NVAL - 1) draw_vector(c_prev);
    end
    in_valid = 1'b0;
    @(negedge clk);

    for (int lv = 0; lv < 3; lv++) begin
      real scale;
      int n_clean, n_ew, n_w, n_m, n_1, n_err_vec;
      real pd_1;
      scale = (lv == 0) ? 0.1 : (lv == 1) ? 0.5 : 1.0;
      n_clean = 0; n_ew = 0; n_w = 0; n_m = 0; n_1 = 0; n_err_vec = 0;

      // (2) weights for this error level
      tot_ew = 0.0; tot_w = 0.0;
      for (int l = 0; l < L; l++) begin
        mu[l] = probit(scale * er[l]);
        a = real'(correct[l]) / real'(NVAL);
        p[l] = a * (1.0 - scale * er[l]) + (1.0 - a) * scale * er[l];
        tot_ew += p[l];
        tot_w  += a;
      end
      for (int l = 0; l < L; l++) begin
        w_ew[l] = WW'($rtoi(p[l] / tot_ew * 256.0 + 0.5));
        w_w[l]  = WW'($rtoi(real'(correct[l]) / real'(NVAL) / tot_w * 256.0 + 0.5));
        if (lv == 2)
          $display("tree %0d: %0d bits, accuracy %0.3f, error rate %0.3f, weight EW %0d W %0d",
                   l, prec[l], real'(correct[l]) / real'(NVAL), scale * er[l], w_ew[l], w_w[l]);
      end

      // (3) test with injected errors
      @(negedge clk);
      draw_vector(c_prev);
      in_valid = 1'b1;
      err_en = 1'b1;
      for (int n = 0; n < NTEST; n++) begin
        @(posedge clk); #1;
        checks++;
        if (!out_valid || int'(vote_sum) != wsum(votes, w_ew) || y_hat !== (wsum(votes, w_ew) > 128)
            || y_err !== (votes ^ eta)
            || int'(s_ew) != wsum(y_err, w_ew) || d_ew !== (wsum(y_err, w_ew) > 128)
            || int'(s_w)  != wsum(y_err, w_w)  || d_w  !== (wsum(y_err, w_w)  > 128)
            || int'(s_m)  != wsum(y_err, w_m)  || d_m  !== (wsum(y_err, w_m)  > 128)
            || int'(s_1)  != wsum(y_err, w_1)  || d_1  !== (wsum(y_err, w_1)  > 128)) begin
          failures++; $display("FAIL level %0d vector %0d", lv, n);
        end
        if (eta != '0) n_err_vec++;
        if (y_hat == c_prev) n_clean++;
        if (d_ew == c_prev) n_ew++;
        if (d_w  == c_prev) n_w++;
        if (d_m  == c_prev) n_m++;
        if (d_1  == c_prev) n_1++;
        @(negedge clk);
        if (n < NTEST - 1) draw_vector(c_prev);
      end
      in_valid = 1'b0;
      @(negedge clk);
      err_en = 1'b0;

      pd_clean = real'(n_clean) / NTEST;
      pd_ew = real'(n_ew) / NTEST;
      pd_w  = real'(n_w) / NTEST;
      pd_m  = real'(n_m) / NTEST;
      pd_1  = real'(n_1) / NTEST;
      $display("error level x%0.1f: P_det error-free %0.4f  RF-EW %0.4f  RF-W %0.4f  RF-M %0.4f  single tree %0.4f  (vectors with errors: %0d of %0d)",
               scale, pd_clean, pd_ew, pd_w, pd_m, pd_1, n_err_vec, NTEST);
      checks += 4;
      if (pd_clean < 0.85)      begin failures++; $display("FAIL error-free accuracy too low"); end
      if (pd_ew < pd_m - 0.01)  begin failures++; $display("FAIL RF-EW below RF-M"); end
      if (pd_ew < pd_w - 0.01)  begin failures++; $display("FAIL RF-EW below RF-W"); end
      if (n_err_vec == 0)       begin failures++; $display("FAIL no timing errors injected"); end
      if (lv == 2) begin
        checks += 2;
        if (pd_ew < pd_m)       begin failures++; $display("FAIL RF-EW not above RF-M at the highest error level"); end
        if (pd_m <= pd_1)       begin failures++; $display("FAIL ensemble not above a single tree"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
