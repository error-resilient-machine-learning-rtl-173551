// tb_comparator_array: self-checking test of the decision-tree Stage 1.
//
// Two instances, at 5-bit and 8-bit precision, get random feature vectors,
// feature selects (including selects past the last feature) and thresholds.
// The expected comparator bits are computed here by shifting feature and
// threshold right by (8 - PREC) and comparing. Directed cases put the
// feature equal to the threshold after truncation (must give 0) and one
// step above it (must give 1).
module tb_comparator_array;
  localparam int unsigned M = 30, NODES = 7, FW = 8, SW = 5;

  logic [M-1:0][FW-1:0]    x;
  logic [NODES-1:0][SW-1:0] sel;
  logic [NODES-1:0][FW-1:0] thr;
  logic [NODES-1:0]         gt5, gt8;
  int checks = 0, failures = 0;

  comparator_array #(.M(M), .NODES(NODES), .PREC(5)) dut5 (.x, .sel, .thr, .gt(gt5));
  comparator_array #(.M(M), .NODES(NODES), .PREC(8)) dut8 (.x, .sel, .thr, .gt(gt8));

  function automatic logic [NODES-1:0] ref_gt(int unsigned prec);
    logic [NODES-1:0] r;
    for (int i = 0; i < NODES; i++) begin
      int unsigned f, t;
      f = (sel[i] < M) ? int'(x[sel[i]]) : 0;
      t = int'(thr[i]);
      r[i] = (f >> (FW - prec)) > (t >> (FW - prec));
    end
    return r;
  endfunction

  task automatic check();
    #1;
    checks += 2;
    if (gt5 !== ref_gt(5)) begin
      failures++; $display("FAIL prec5 gt=%b exp=%b", gt5, ref_gt(5));
    end
    if (gt8 !== ref_gt(8)) begin
      failures++; $display("FAIL prec8 gt=%b exp=%b", gt8, ref_gt(8));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random vectors
    for (int n = 0; n < 2000; n++) begin
      for (int j = 0; j < M; j++) x[j] = FW'($urandom);
      for (int i = 0; i < NODES; i++) begin
        sel[i] = SW'($urandom);
        thr[i] = FW'($urandom);
      end
      check();
    end
    // directed: feature equal to threshold, and just above it, at 5 bits
    for (int n = 0; n < 200; n++) begin
      for (int j = 0; j < M; j++) x[j] = FW'($urandom);
      for (int i = 0; i < NODES; i++) begin
        sel[i] = SW'($urandom_range(M - 1));
        thr[i] = x[sel[i]];
        if (n % 2 == 1) thr[i] = {thr[i][FW-1:3], 3'b111};  // equal at 5 bits
      end
      check();
      for (int i = 0; i < NODES; i++)
        if (thr[i][FW-1:3] != 5'h00) thr[i] = thr[i] - 8'd8;  // one 5-bit step below
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
