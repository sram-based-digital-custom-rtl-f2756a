// imc_pkg: constants and types shared by the SRAM in-memory compute engine.
//
// The array is 16 rows by 8 columns of 10T cells. Each row holds one 8-bit
// weight word, and rows are paired so that one full adder per column sits
// between two cells of consecutive rows. The modes are the operating
// conditions of the cell's biasing table (hold, write, read) plus the XNOR
// compute mode. The 2-bit mode encoding is this design's own choice.
package imc_pkg;

  localparam int unsigned IMC_ROWS = 16;  // rows of the array (weight words)
  localparam int unsigned IMC_COLS = 8;   // columns (bits per weight word)

  typedef enum logic [1:0] {
    MODE_HOLD    = 2'd0,  // WWL low, RWL and RWLB high: nothing changes
    MODE_WRITE   = 2'd1,  // WWL high on one row, BL/BLB carry the data
    MODE_READ    = 2'd2,  // one row RWL high / RWLB low, the rest hold
    MODE_COMPUTE = 2'd3   // every row RWL = I, RWLB = ~I (XNOR multiply)
  } imc_mode_e;

  // Width of the sum of N values, each W bits wide.
  function automatic int unsigned sum_width(int unsigned w, int unsigned n);
    return w + $clog2(n);
  endfunction

endpackage
