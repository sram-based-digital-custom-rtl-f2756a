// bitcell_10t: read-decoupled 10T SRAM cell that multiplies by XNOR.
//
// A 6T core stores one weight bit W (node Q; QB is its complement). It is
// written like a 6T cell: with WWL high, the differential bit lines BL/BLB
// force the value. Four more transistors form the decoupled read port.
// M7 and M8 connect RBL to RWL and RWLB, and M9 and M10 connect RBLB to
// RWL and RWLB. Q and QB gate them, so that RBL is tied to RWL when Q=1
// and to RWLB when Q=0, and RBLB the other way round. Both read bit lines
// are precharged high and can only be pulled low. A bit line therefore
// ends at the level of the word line it is tied to:
//     RBL  = Q ? RWL  : RWLB
//     RBLB = Q ? RWLB : RWL
// Putting the input I on RWL and ~I on RWLB gives RBL = W XNOR I and
// RBLB = W XOR I. In binary neural networks that is the product of two
// +1/-1 values coded 1/0. Holding both word lines high leaves both bit
// lines high, which is the hold state. RWL high with RWLB low reads Q on
// RBL and QB on RBLB.
//
// Timing: the transistor-level precharge and evaluate phases become one
// combinational evaluation of rbl/rblb. The write is taken at the rising
// edge of clk while wwl is high, which stands in for the static latch of
// the silicon cell. Following the paper: the read port equations and the
// biasing table. This design's own choices: the clocked write, ignoring a
// write whose bit lines are not complementary, and having no reset (the
// cell powers up holding an arbitrary value, like any SRAM cell).
module bitcell_10t (
  input  logic clk,
  input  logic wwl,   // write word line
  input  logic bl,    // write bit line
  input  logic blb,   // complement write bit line
  input  logic rwl,   // read word line: input I in compute mode
  input  logic rwlb,  // complement read word line: ~I in compute mode
  output logic rbl,   // evaluated read bit line: W XNOR I
  output logic rblb,  // evaluated complement read bit line: W XOR I
  output logic q      // storage node Q
);

  logic q_node;

  // Write through the access transistors M5/M6. Only a differential drive
  // (BL != BLB) flips the cell.
  always_ff @(posedge clk) begin
    if (wwl && (bl != blb)) q_node <= bl;
  end

  // Decoupled read port: M7/M8 on RBL, M9/M10 on RBLB.
  always_comb begin
    rbl  = q_node ? rwl  : rwlb;
    rblb = q_node ? rwlb : rwl;
  end

  assign q = q_node;

  // A write needs complementary write bit lines.
  a_write_differential: assert property (@(posedge clk) wwl |-> (bl != blb))
    else $error("bitcell_10t: write with BL == BLB");

endmodule
