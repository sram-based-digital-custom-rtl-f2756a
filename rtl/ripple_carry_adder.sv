// ripple_carry_adder: N-bit ripple-carry adder built from full_adder_14t.
//
// Bit i adds a[i], b[i] and the carry from bit i-1. The carry out of the
// top bit becomes bit N of the result, so the sum never overflows. The
// adder tree is built only from these adders: one 14T full adder per bit.
//
// Purely combinational. The delay grows with N through the carry chain.
// Following the paper: the ripple-carry adder made of 14T full adders.
// This design's own choice: the carry into bit 0 is tied low.
module ripple_carry_adder #(
  parameter int unsigned N = 9
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   s
);

  logic [N:0] c;

  assign c[0] = 1'b0;

  for (genvar i = 0; i < N; i++) begin : g_bit
    full_adder_14t u_fa (
      .a     (a[i]),
      .b     (b[i]),
      .cin   (c[i]),
      .sum   (s[i]),
      .carry (c[i+1])
    );
  end

  assign s[N] = c[N];

endmodule
