// adder_tree: binary tree of ripple-carry adders that sums the pair sums
// coming out of the SRAM macro.
//
// Level l (counting from 0) pairs up the N_IN >> l values of width W_IN+l
// and adds each pair with a (W_IN+l)-bit ripple_carry_adder, so every
// level is one bit wider than the one before. Nothing is ever truncated.
// For the default eight 9-bit inputs the tree has three levels:
// 4 x 9-bit, 2 x 10-bit and 1 x 11-bit adders, 67 full adders in all,
// giving the 12-bit result. Because the first addition already happens
// inside the array, this tree is one level shorter than one fed by
// separate rows.
//
// Purely combinational: no registers between levels. N_IN must be a power
// of two. Following the paper: the level count, the widths and the full
// adder count. This design's own choice: no pipelining.
module adder_tree #(
  parameter int unsigned N_IN = 8,
  parameter int unsigned W_IN = 9
) (
  input  logic [N_IN-1:0][W_IN-1:0]          din,
  output logic [W_IN+$clog2(N_IN)-1:0]       sum
);

  localparam int unsigned LEVELS = $clog2(N_IN);

  if (N_IN != (1 << LEVELS)) begin : g_bad_size
    $error("adder_tree: N_IN must be a power of two");
  end

  // Level l takes N_IN >> l values of W_IN + l bits and gives half as many
  // values, one bit wider.
  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned W = W_IN + l;
    localparam int unsigned N = N_IN >> l;
    logic [N-1:0][W-1:0]   vin;
    logic [N/2-1:0][W:0]   vout;

    if (l == 0) begin : g_first
      assign vin = din;
    end else begin : g_next
      assign vin = g_level[l-1].vout;
    end

    for (genvar i = 0; i < N / 2; i++) begin : g_add
      ripple_carry_adder #(.N(W)) u_rca (
        .a (vin[2*i]),
        .b (vin[2*i+1]),
        .s (vout[i])
      );
    end
  end

  assign sum = g_level[LEVELS-1].vout[0];

endmodule
