// tb_imc_leaf_cell: two cells and their shared full adder.
// Random weights are written into both cells through the shared column bit
// lines, one row at a time. Random word line levels and carry in are then
// applied. sum/cout must equal the integer sum of the two cells' read bit
// lines (RBL = Q ? RWL : RWLB) and cin.
module tb_imc_leaf_cell;
  logic       clk = 1'b0;
  logic [1:0] wwl, rwl, rwlb, q;
  logic       bl, blb, cin, sum, cout;
  logic [1:0] w;
  int checks = 0, failures = 0;

  imc_leaf_cell dut (.clk(clk), .wwl(wwl), .bl(bl), .blb(blb), .rwl(rwl),
                     .rwlb(rwlb), .cin(cin), .sum(sum), .cout(cout), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic rbl_of(logic qv, logic wl, logic wlb);
    return qv ? wl : wlb;
  endfunction

  initial begin
    wwl = '0; bl = 1'b1; blb = 1'b1; rwl = '1; rwlb = '1; cin = 1'b0;
    for (int t = 0; t < 200; t++) begin
      w = 2'($urandom);
      for (int r = 0; r < 2; r++) begin
        @(negedge clk);
        wwl = 2'b01 << r; bl = w[r]; blb = ~w[r];
      end
      @(negedge clk);
      wwl = '0; bl = 1'b1; blb = 1'b1;
      checks++;
      if (q !== w) begin failures++; $display("FAIL stored %b expected %b", q, w); end
      for (int k = 0; k < 4; k++) begin
        int exp;
        // compute-style drive (I / ~I) or any level pair
        if (k < 2) begin
          rwl = 2'($urandom); rwlb = ~rwl;
        end else begin
          rwl = 2'($urandom); rwlb = 2'($urandom);
        end
        cin = 1'($urandom);
        #1;
        exp = int'(rbl_of(w[0], rwl[0], rwlb[0])) + int'(rbl_of(w[1], rwl[1], rwlb[1])) + int'(cin);
        checks++;
        if ({cout, sum} != 2'(exp)) begin
          failures++;
          $display("FAIL w=%b rwl=%b rwlb=%b cin=%0d -> %0d%0d expected %0d", w, rwl, rwlb, cin, cout, sum, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
