// tb_weighted_voter: self-checking test of the error weighted voter.
//
// Instances with L = 10 (power-of-two padding in the adder tree) and L = 3
// get random votes and random weights; the expected sum is added up here
// and the expected decision is sum > 2^(WEIGHT_W-1), i.e. above 1/2.
// Directed cases use weights from the error-weighting formula
// p_l = A_l (1 - e_l) + (1 - A_l) e_l (A_l: out-of-bag accuracy, e_l: timing
// error rate), normalized and rounded to 8 bits, and check a case where an
// error-prone majority is outvoted by reliable trees, plus sums exactly at
// 1/2 (decision 0) and one LSB above (decision 1).
module tb_weighted_voter;
  localparam int unsigned WW = 8;
  logic [9:0]         v10;
  logic [9:0][WW-1:0] w10;
  logic [11:0]        s10;
  logic               y10;
  logic [2:0]         v3;
  logic [2:0][WW-1:0] w3;
  logic [9:0]         s3;
  logic               y3;
  int checks = 0, failures = 0;

  weighted_voter #(.L(10)) dut10 (.votes(v10), .weight(w10), .sum(s10), .y_hat(y10));
  weighted_voter #(.L(3))  dut3  (.votes(v3),  .weight(w3),  .sum(s3),  .y_hat(y3));

  task automatic check10();
    int s = 0;
    #1;
    for (int l = 0; l < 10; l++) if (v10[l]) s += int'(w10[l]);
    checks++;
    if (int'(s10) != s || y10 !== (s > 128)) begin
      failures++; $display("FAIL L10 votes=%b sum=%0d exp=%0d y=%b", v10, s10, s, y10);
    end
  endtask

  task automatic check3();
    int s = 0;
    #1;
    for (int l = 0; l < 3; l++) if (v3[l]) s += int'(w3[l]);
    checks++;
    if (int'(s3) != s || y3 !== (s > 128)) begin
      failures++; $display("FAIL L3 votes=%b sum=%0d exp=%0d y=%b", v3, s3, s, y3);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc [10], er [10], p [10], tot;
    for (int n = 0; n < 3000; n++) begin
      v10 = 10'($urandom);
      for (int l = 0; l < 10; l++) w10[l] = WW'($urandom);
      v3 = 3'($urandom);
      for (int l = 0; l < 3; l++) w3[l] = WW'($urandom);
      check10();
      check3();
    end
    // Error weighted case: trees 0..5 have high timing-error rates, 6..9 are clean.
    tot = 0.0;
    for (int l = 0; l < 10; l++) begin
      acc[l] = 0.9;
      er[l]  = (l < 6) ? 0.45 : 0.0;
      p[l]   = acc[l] * (1.0 - er[l]) + (1.0 - acc[l]) * er[l];
      tot   += p[l];
    end
    for (int l = 0; l < 10; l++) w10[l] = WW'($rtoi(p[l] / tot * 256.0 + 0.5));
    v10 = 10'b00_0011_1111;  // the six error-prone trees vote 1
    check10();
    checks++;
    if (y10 !== 1'b0) begin failures++; $display("FAIL reliable trees not winning"); end
    v10 = 10'b11_1100_0000;  // the four clean trees vote 1
    check10();
    checks++;
    if (y10 !== 1'b1) begin failures++; $display("FAIL reliable trees should decide 1"); end
    // exactly one half and one LSB above
    w10 = '0; w10[0] = 8'd64; w10[1] = 8'd64; w10[2] = 8'd1; v10 = 10'b00_0000_0011;
    check10();
    checks++;
    if (y10 !== 1'b0) begin failures++; $display("FAIL sum of 1/2 must give 0"); end
    v10 = 10'b00_0000_0111;
    check10();
    checks++;
    if (y10 !== 1'b1) begin failures++; $display("FAIL sum above 1/2 must give 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
