// full_adder_14t: one-bit full adder with the structure of the 14-transistor
// full-swing adder.
//
// The circuit first forms A XOR B and A XNOR B. These two nodes then work
// as selects for pass-gate pairs. The Sum pair passes Cin or its
// complement, and the Carry pair passes Cin or B:
//     Sum   = (A XOR B) ? ~Cin : Cin
//     Carry = (A XOR B) ?  Cin : B
// When A and B are equal, B is also the carry. When they differ, the carry
// in propagates. The same cell is used between two multiplying cells
// inside the SRAM array and in every ripple-carry adder of the adder tree.
//
// Purely combinational. Following the paper: the XOR/XNOR node names and
// the use of Cin and B as the data into the pass gates. The select
// equations above are the only ones that make the cell a full adder.
module full_adder_14t (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic carry
);

  logic a_xor_b;
  logic a_xnor_b;

  always_comb begin
    a_xor_b  = a ^ b;
    a_xnor_b = ~a_xor_b;
    // Sum stage: Cin passes inverted when A XOR B, straight when A XNOR B.
    sum   = a_xor_b ? ~cin : cin;
    // Carry stage: Cin passes when A XOR B, B passes when A XNOR B.
    carry = a_xnor_b ? b : cin;
  end

endmodule
