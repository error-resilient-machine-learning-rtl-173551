// ntv_error_source: behavioural model (simulation only, not synthesizable)
// of the timing errors that near-threshold operation causes at the outputs
// of the decision trees.
//
// Each tree output is modelled as y_a = y_o XOR eta. The error bit follows
// the dichotomized-Gaussian recipe: draw u ~ N(mu_l, 1) and set eta = 1 when
// u >= 0, so the error rate of tree l is Phi(mu_l). The Gaussian samples are
// made with the Box-Muller transform from $urandom. The latent variables of
// different trees are drawn independently (diagonal covariance), which is
// this model's simplification; a fitted model would also carry their
// correlation. A new error pattern is drawn at every rising clock edge on
// which `enable` is high and is held otherwise.
module ntv_error_source #(
  parameter int unsigned L = 10
) (
  input  logic         clk,
  input  logic         enable,
  input  real          mu [L],     // latent mean per tree; error rate Phi(mu)
  input  logic [L-1:0] y_o,        // error-free tree outputs
  output logic [L-1:0] y_a,        // outputs with timing errors
  output logic [L-1:0] eta         // the injected error pattern
);

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1_000_000, 1))) / 1_000_001.0;
    u2 = (real'($urandom_range(1_000_000, 0))) / 1_000_001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial eta = '0;

  always @(posedge clk) begin
    if (enable)
      for (int l = 0; l < L; l++) eta[l] <= ((mu[l] + gauss()) >= 0.0);
  end

  assign y_a = y_o ^ eta;

endmodule
