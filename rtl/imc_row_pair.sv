// imc_row_pair: two rows of the array with their full adders chained into
// one ripple-carry adder.
//
// Each row stores a COLS-bit weight word. In compute mode each row gives
// the bitwise XNOR of its word with that row's input bit. The COLS leaf
// cells of the pair add the two rows' words bit by bit. The carry runs
// from column 0 (the least significant bit) to column COLS-1, and the
// last carry becomes bit COLS of the sum. For COLS = 8 the pair therefore
// sends a 9-bit partial sum to the adder tree, 9 tracks where separate
// rows would need 16.
//
// Timing: combinational from the word lines to psum, and writes at the
// rising clock edge. Following the paper: the chain, the 9-bit output and
// the carry running towards the last column. This design's own choice:
// the carry into column 0 is tied low.
module imc_row_pair #(
  parameter int unsigned COLS = imc_pkg::IMC_COLS
) (
  input  logic            clk,
  input  logic [1:0]      wwl,   // write word lines (upper, lower row)
  input  logic [COLS-1:0] bl,    // write bit lines
  input  logic [COLS-1:0] blb,   // complement write bit lines
  input  logic [1:0]      rwl,   // read word lines
  input  logic [1:0]      rwlb,  // complement read word lines
  output logic [COLS:0]   psum,  // partial sum of the two rows
  output logic [1:0][COLS-1:0] q // stored words (upper, lower)
);

  logic [COLS:0] carry;

  assign carry[0] = 1'b0;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [1:0] q_col;
    imc_leaf_cell u_leaf (
      .clk  (clk),
      .wwl  (wwl),
      .bl   (bl[c]),
      .blb  (blb[c]),
      .rwl  (rwl),
      .rwlb (rwlb),
      .cin  (carry[c]),
      .sum  (psum[c]),
      .cout (carry[c+1]),
      .q    (q_col)
    );
    assign q[0][c] = q_col[0];
    assign q[1][c] = q_col[1];
  end

  assign psum[COLS] = carry[COLS];

endmodule
