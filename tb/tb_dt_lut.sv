// tb_dt_lut: self-checking test of the decision-tree Stage 2 look-up table.
//
// For several random truth tables every address is applied and the output
// is compared with the table bit at that address. The tables are also built
// from random depth-3 trees (node i has children 2i+1 and 2i+2, a set bit
// goes right) and each address is checked against a walk of that tree.
module tb_dt_lut;
  localparam int unsigned NODES = 7;
  logic [NODES-1:0]      addr;
  logic [(1<<NODES)-1:0] tbl;
  logic                  y;
  int checks = 0, failures = 0;

  dt_lut #(.NODES(NODES)) dut (.addr(addr), .table_bits(tbl), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20; n++) begin
      logic [(1<<NODES)-1:0] t;
      for (int w = 0; w < (1 << NODES); w++) t[w] = 1'($urandom);
      tbl = t;
      for (int a = 0; a < (1 << NODES); a++) begin
        addr = NODES'(a);
        #1;
        checks++;
        if (y !== t[a]) begin
          failures++; $display("FAIL table %0d addr %0d y=%b exp=%b", n, a, y, t[a]);
        end
      end
    end
    // tables derived from tree leaves
    for (int n = 0; n < 20; n++) begin
      logic [7:0] leaf;
      leaf = 8'($urandom);
      for (int a = 0; a < (1 << NODES); a++) begin
        int node;
        node = 0;
        while (node < NODES) node = a[node] ? 2 * node + 2 : 2 * node + 1;
        tbl[a] = leaf[node - NODES];
      end
      for (int a = 0; a < (1 << NODES); a++) begin
        int node;
        addr = NODES'(a);
        #1;
        node = 0;
        while (node < NODES) node = addr[node] ? 2 * node + 2 : 2 * node + 1;
        checks++;
        if (y !== leaf[node - NODES]) begin
          failures++; $display("FAIL tree %0d addr %0d", n, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
