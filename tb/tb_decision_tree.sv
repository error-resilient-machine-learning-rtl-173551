// tb_decision_tree: self-checking test of one two-stage decision tree.
//
// A random depth-3 tree (7 comparators, 8 labelled leaves, node i has
// children 2i+1 and 2i+2, "greater" goes right) is programmed as feature
// selects, thresholds and a truth table. Random vectors are streamed with
// random gaps in in_valid; the reference walks the tree on the features
// reduced to the tree's 6-bit precision. The output must appear exactly one
// clock after the vector is sampled and hold while in_valid is low.
module tb_decision_tree;
  localparam int unsigned M = 30, NODES = 7, FW = 8, SW = 5, PREC = 6;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [M-1:0][FW-1:0]     x;
  logic [NODES-1:0][SW-1:0] sel;
  logic [NODES-1:0][FW-1:0] thr;
  logic [(1<<NODES)-1:0]    tbl;
  logic y, y_valid;
  logic [7:0] leaf;
  int checks = 0, failures = 0, cycles = 0;

  decision_tree #(.M(M), .NODES(NODES), .PREC(PREC)) dut (
    .clk, .rst_n, .in_valid, .x, .sel, .thr, .table_bits(tbl), .y, .y_valid);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic walk();
    int node;
    int unsigned f, t;
    node = 0;
    while (node < NODES) begin
      f = int'(x[sel[node]]) >> (FW - PREC);
      t = int'(thr[node]) >> (FW - PREC);
      node = (f > t) ? 2 * node + 2 : 2 * node + 1;
    end
    return leaf[node - NODES];
  endfunction

  initial begin
    logic exp_y, last_y;
    x = '0; sel = '0; thr = '0; tbl = '0; leaf = '0;
    #12;
    checks++;
    if (y !== 1'b0 || y_valid !== 1'b0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;
    last_y = 1'b0;
    for (int tree = 0; tree < 10; tree++) begin
      leaf = 8'($urandom);
      for (int i = 0; i < NODES; i++) begin
        sel[i] = SW'($urandom_range(M - 1));
        thr[i] = FW'($urandom);
      end
      for (int a = 0; a < (1 << NODES); a++) begin
        int node;
        node = 0;
        while (node < NODES) node = a[node] ? 2 * node + 2 : 2 * node + 1;
        tbl[a] = leaf[node - NODES];
      end
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        for (int j = 0; j < M; j++) x[j] = FW'($urandom);
        in_valid = ($urandom_range(3) != 0);
        exp_y = walk();
        @(posedge clk);
        #1;
        checks++;
        if (in_valid) begin
          if (y_valid !== 1'b1 || y !== exp_y) begin
            failures++; $display("FAIL tree %0d vec %0d y=%b exp=%b v=%b", tree, n, y, exp_y, y_valid);
          end
          last_y = exp_y;
        end else begin
          if (y_valid !== 1'b0 || y !== last_y) begin
            failures++; $display("FAIL hold tree %0d vec %0d", tree, n);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
