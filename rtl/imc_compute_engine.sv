// imc_compute_engine: SRAM-based binary multiply-accumulate engine with the
// first level of accumulation inside the memory array.
//
// The engine stores ROWS weight words of COLS bits in 10T SRAM cells. A
// compute request carries one input bit per row. Every cell XNORs its
// weight bit with its row's input, which is a +1/-1 multiply with +1 coded
// as 1. Consecutive rows share one full adder per column inside the
// array. Those adders form a ripple-carry adder per row pair, and each
// pair sends a (COLS+1)-bit sum to a binary adder tree. The result is the
// sum over all rows of the COLS-bit XNOR words, W_OUT = 12 bits for the
// default 16 x 8 array:
//     result = sum_r ( act[r] ? W[r] : ~W[r] )
// Requests can also write a weight word or read one back.
//
// Blocks: imc_peripheral (request register, decoder, word line drivers,
// result register), sram_imc_macro (cells and in-array adders) and
// adder_tree (three levels of 14T ripple-carry adders).
// Timing: a request sampled at edge t gives resp_valid after edge t+1.
// One request is taken every clock. Following the paper: the array, the
// in-array adders and the tree. The registers and the request interface
// are this design's own.
module imc_compute_engine
  import imc_pkg::*;
#(
  parameter int unsigned ROWS = IMC_ROWS,
  parameter int unsigned COLS = IMC_COLS,
  localparam int unsigned AW    = $clog2(ROWS),
  localparam int unsigned W_OUT = COLS + 1 + $clog2(ROWS / 2)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       req_valid,
  input  imc_mode_e                  req_mode,
  input  logic [AW-1:0]              req_addr,
  input  logic [COLS-1:0]            req_wdata,
  input  logic [ROWS-1:0]            req_act,
  output logic                       resp_valid,
  output imc_mode_e                  resp_mode,
  output logic [W_OUT-1:0]           resp_data,
  // the routing tracks from the array to the tree, for observation
  output logic [ROWS/2-1:0][COLS:0]  pair_sum
);

  logic [ROWS-1:0]            wwl;
  logic [COLS-1:0]            bl;
  logic [COLS-1:0]            blb;
  logic [ROWS-1:0]            rwl;
  logic [ROWS-1:0]            rwlb;
  logic [W_OUT-1:0]           tree_sum;
  logic [ROWS-1:0][COLS-1:0]  q_unused;  // stored contents, not needed here

  imc_peripheral #(.ROWS(ROWS), .COLS(COLS)) u_periph (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (req_valid),
    .req_mode   (req_mode),
    .req_addr   (req_addr),
    .req_wdata  (req_wdata),
    .req_act    (req_act),
    .wwl        (wwl),
    .bl         (bl),
    .blb        (blb),
    .rwl        (rwl),
    .rwlb       (rwlb),
    .tree_sum   (tree_sum),
    .resp_valid (resp_valid),
    .resp_mode  (resp_mode),
    .resp_data  (resp_data)
  );

  sram_imc_macro #(.ROWS(ROWS), .COLS(COLS)) u_macro (
    .clk  (clk),
    .wwl  (wwl),
    .bl   (bl),
    .blb  (blb),
    .rwl  (rwl),
    .rwlb (rwlb),
    .psum (pair_sum),
    .q    (q_unused)
  );

  adder_tree #(.N_IN(ROWS / 2), .W_IN(COLS + 1)) u_tree (
    .din (pair_sum),
    .sum (tree_sum)
  );

endmodule
