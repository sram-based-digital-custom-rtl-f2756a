// imc_leaf_cell: the repeated unit of the array, made of two 10T cells and
// the full adder they share.
//
// The two cells sit in the same column of two consecutive rows. Each one
// multiplies its stored weight bit by the input of its own row (XNOR on
// its read bit line RBL). The full adder between them adds the two
// products and the carry from the leaf cell of the previous column. The
// sum bit leaves the array towards the adder tree, and the carry goes on
// to the next column. With the adder inside the array, two rows need one
// routing track per column plus one for the final carry, not two per
// column.
//
// Interface: index 0 of the two-bit word-line buses is the upper row and
// index 1 the lower row. Both cells share the column's write bit lines.
// Timing: combinational from the word lines and cin to sum/cout, and the
// writes take effect at the rising clock edge. Following the paper: two
// cells of consecutive rows feeding one full adder. This design's own
// choice: the upper cell drives adder input A and the lower one input B,
// which does not change the result.
module imc_leaf_cell (
  input  logic       clk,
  input  logic [1:0] wwl,   // write word lines (upper, lower)
  input  logic       bl,    // column write bit line
  input  logic       blb,   // column complement write bit line
  input  logic [1:0] rwl,   // read word lines (upper, lower)
  input  logic [1:0] rwlb,  // complement read word lines
  input  logic       cin,   // carry from the previous column
  output logic       sum,   // sum bit towards the adder tree
  output logic       cout,  // carry to the next column
  output logic [1:0] q      // stored bits
);

  logic [1:0] rbl;
  logic [1:0] rblb;  // XOR outputs; the in-array adder uses the XNOR side

  for (genvar r = 0; r < 2; r++) begin : g_cell
    bitcell_10t u_cell (
      .clk  (clk),
      .wwl  (wwl[r]),
      .bl   (bl),
      .blb  (blb),
      .rwl  (rwl[r]),
      .rwlb (rwlb[r]),
      .rbl  (rbl[r]),
      .rblb (rblb[r]),
      .q    (q[r])
    );
  end

  full_adder_14t u_fa (
    .a     (rbl[0]),
    .b     (rbl[1]),
    .cin   (cin),
    .sum   (sum),
    .carry (cout)
  );

endmodule
