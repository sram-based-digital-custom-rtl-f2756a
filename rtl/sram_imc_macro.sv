// sram_imc_macro: the ROWS x COLS SRAM in-memory compute macro.
//
// The macro stores ROWS weight words of COLS bits. Rows 2k and 2k+1 form
// row pair k, whose in-array ripple-carry adder adds the two rows' XNOR
// words. The macro's only compute outputs are the ROWS/2 pair sums of
// COLS+1 bits each: 8 x 9 = 72 wires for the 16 x 8 array, where sending
// every row out would take 128.
//
// Interface: one write and one read word line pair per row, and one write
// bit line pair per column, shared by all rows. The word lines are driven
// by imc_peripheral. Timing: pair sums are combinational in the word
// lines, and writes land at the rising clock edge. Following the paper:
// the 16 x 8 size, the pairing of consecutive rows and the 9-bit pair
// outputs. The q port, which shows the stored contents, is this design's
// own addition for observation.
module sram_imc_macro #(
  parameter int unsigned ROWS = imc_pkg::IMC_ROWS,
  parameter int unsigned COLS = imc_pkg::IMC_COLS
) (
  input  logic                              clk,
  input  logic [ROWS-1:0]                   wwl,
  input  logic [COLS-1:0]                   bl,
  input  logic [COLS-1:0]                   blb,
  input  logic [ROWS-1:0]                   rwl,
  input  logic [ROWS-1:0]                   rwlb,
  output logic [ROWS/2-1:0][COLS:0]         psum, // pair sums to the tree
  output logic [ROWS-1:0][COLS-1:0]         q     // stored weight words
);

  if (ROWS % 2 != 0) begin : g_bad_rows
    $error("sram_imc_macro: ROWS must be even, rows are used in pairs");
  end

  for (genvar p = 0; p < ROWS/2; p++) begin : g_pair
    logic [1:0][COLS-1:0] q_pair;
    imc_row_pair #(.COLS(COLS)) u_pair (
      .clk  (clk),
      .wwl  (wwl[2*p+1 -: 2]),
      .bl   (bl),
      .blb  (blb),
      .rwl  (rwl[2*p+1 -: 2]),
      .rwlb (rwlb[2*p+1 -: 2]),
      .psum (psum[p]),
      .q    (q_pair)
    );
    assign q[2*p]   = q_pair[0];
    assign q[2*p+1] = q_pair[1];
  end

endmodule
