// dt_lut: Stage 2 of one decision tree, the look-up table that turns the
// comparator decisions into the tree's 1-bit class label.
//
// The NODES comparator outputs form the address of a 2^NODES-entry truth
// table. Every root-to-leaf path of the trained tree fixes the bits of the
// nodes on that path, so the table holds the leaf's label at every address
// that agrees with the path; bits of nodes not on the path are don't-cares.
// The table contents come from training and enter as the `table_bits` input
// (one bit per address, address 0 in bit 0). Holding the table as an input
// rather than as synthesized logic keeps the forest reprogrammable; the
// reference forests instead fold the table into logic at generation time.
//
// Purely combinational.
module dt_lut #(
  parameter int unsigned NODES = 7
) (
  input  logic [NODES-1:0]        addr,        // comparator decisions
  input  logic [(1<<NODES)-1:0]   table_bits,  // trained truth table
  output logic                    y            // class label 0/1
);

  always_comb y = table_bits[addr];

endmodule
