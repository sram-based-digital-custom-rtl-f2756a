// tb_bitcell_10t: checks the 10T cell against its biasing table and the
// XNOR truth table.
// For each stored value (written with WWL high and complementary bit
// lines) it applies all four read word line levels:
//   RWL=1, RWLB=1 (hold)      -> RBL = RBLB = 1
//   RWL=1, RWLB=0 (read)      -> RBL = Q, RBLB = QB
//   RWL=I, RWLB=~I (compute)  -> RBL = W XNOR I, RBLB = W XOR I
//   RWL=0, RWLB=0             -> both bit lines discharged
// It also checks that a cell with WWL low keeps its value.
module tb_bitcell_10t;
  logic clk = 1'b0;
  logic wwl, bl, blb, rwl, rwlb, rbl, rblb, q;
  int checks = 0, failures = 0;

  bitcell_10t dut (.clk(clk), .wwl(wwl), .bl(bl), .blb(blb), .rwl(rwl),
                   .rwlb(rwlb), .rbl(rbl), .rblb(rblb), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write_bit(input logic d);
    @(negedge clk);
    wwl = 1'b1; bl = d; blb = ~d;
    @(negedge clk);
    wwl = 1'b0; bl = 1'b1; blb = 1'b1;
  endtask

  initial begin
    wwl = 1'b0; bl = 1'b1; blb = 1'b1; rwl = 1'b1; rwlb = 1'b1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int w = 0; w < 2; w++) begin
        write_bit(1'(w));
        check(q, 1'(w), "stored value");
        // hold
        rwl = 1'b1; rwlb = 1'b1; #1;
        check(rbl, 1'b1, "hold RBL"); check(rblb, 1'b1, "hold RBLB");
        // memory read: Q on RBL, QB on RBLB
        rwl = 1'b1; rwlb = 1'b0; #1;
        check(rbl, 1'(w), "read RBL"); check(rblb, ~1'(w), "read RBLB");
        // XNOR multiply for both input values
        for (int i = 0; i < 2; i++) begin
          rwl = 1'(i); rwlb = ~1'(i); #1;
          check(rbl,  (w == i) ? 1'b1 : 1'b0, "XNOR on RBL");
          check(rblb, (w != i) ? 1'b1 : 1'b0, "XOR on RBLB");
        end
        rwl = 1'b0; rwlb = 1'b0; #1;
        check(rbl, 1'b0, "both word lines low, RBL");
        check(rblb, 1'b0, "both word lines low, RBLB");
        rwl = 1'b1; rwlb = 1'b1;
        // no write while WWL is low, even with data on the bit lines
        @(negedge clk); bl = ~1'(w); blb = 1'(w);
        @(negedge clk); bl = 1'b1; blb = 1'b1;
        check(q, 1'(w), "hold without WWL");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
