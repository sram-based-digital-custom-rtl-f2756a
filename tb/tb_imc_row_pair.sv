// tb_imc_row_pair: two 8-bit rows and their in-array ripple-carry adder.
// Random words are written into both rows, and random input bits are
// applied as RWL = I, RWLB = ~I per row. psum must equal
// xnor(W0, I0) + xnor(W1, I1) as 8-bit unsigned numbers. Corner cases
// (all ones in both rows, so the final carry is set) are forced too, and
// the hold bias (both rows read as all ones) is checked.
module tb_imc_row_pair;
  localparam int unsigned COLS = 8;
  logic                  clk = 1'b0;
  logic [1:0]            wwl, rwl, rwlb;
  logic [COLS-1:0]       bl, blb;
  logic [COLS:0]         psum;
  logic [1:0][COLS-1:0]  q;
  logic [1:0][COLS-1:0]  w;
  int checks = 0, failures = 0, carries = 0;

  imc_row_pair #(.COLS(COLS)) dut (.clk(clk), .wwl(wwl), .bl(bl), .blb(blb),
                                  .rwl(rwl), .rwlb(rwlb), .psum(psum), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xnor_word(logic [COLS-1:0] wv, logic i);
    logic [COLS-1:0] p;
    p = i ? wv : ~wv;
    return int'(p);
  endfunction

  task automatic write_rows();
    for (int r = 0; r < 2; r++) begin
      @(negedge clk);
      wwl = 2'b01 << r; bl = w[r]; blb = ~w[r];
    end
    @(negedge clk);
    wwl = '0; bl = '1; blb = '1;
  endtask

  initial begin
    wwl = '0; bl = '1; blb = '1; rwl = '1; rwlb = '1;
    for (int t = 0; t < 300; t++) begin
      if (t == 0)      w = '{8'hFF, 8'hFF};
      else if (t == 1) w = '{8'h00, 8'h00};
      else             w = {COLS'($urandom), COLS'($urandom)};
      write_rows();
      checks++;
      if (q !== w) begin failures++; $display("FAIL stored words"); end
      // hold: both rows read as all ones
      rwl = '1; rwlb = '1; #1;
      checks++;
      if (int'(psum) != 2 * ((1 << COLS) - 1)) begin failures++; $display("FAIL hold psum=%0d", psum); end
      for (int k = 0; k < 4; k++) begin
        int exp;
        rwl = 2'(k); rwlb = ~rwl; #1;
        exp = xnor_word(w[0], rwl[0]) + xnor_word(w[1], rwl[1]);
        checks++;
        if (int'(psum) != exp) begin
          failures++;
          $display("FAIL w=%h/%h I=%b psum=%0d expected %0d", w[0], w[1], rwl, psum, exp);
        end
        if (psum[COLS]) carries++;
      end
      rwl = '1; rwlb = '1;
    end
    checks++;
    if (carries == 0) begin failures++; $display("FAIL final carry never set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
