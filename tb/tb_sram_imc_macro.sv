// tb_sram_imc_macro: the full 16 x 8 array with its in-array adders.
// All 16 rows are written through one-hot write word lines. Then:
//   compute: random input bits per row (RWL = I, RWLB = ~I); each of the
//            eight pair sums must equal xnor(W[2k], I[2k]) + xnor(W[2k+1], I[2k+1]);
//   read:    one row RWL=1/RWLB=0, the rest hold; the pair holding the row
//            gives W + 255 and every other pair gives 510.
// The stored contents (q) are also compared with what was written.
module tb_sram_imc_macro;
  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 8;
  localparam int unsigned ONES = (1 << COLS) - 1;
  logic                        clk = 1'b0;
  logic [ROWS-1:0]             wwl, rwl, rwlb;
  logic [COLS-1:0]             bl, blb;
  logic [ROWS/2-1:0][COLS:0]   psum;
  logic [ROWS-1:0][COLS-1:0]   q;
  logic [COLS-1:0]             w [ROWS];
  int checks = 0, failures = 0;

  sram_imc_macro #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .wwl(wwl), .bl(bl), .blb(blb), .rwl(rwl), .rwlb(rwlb), .psum(psum), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xnor_word(logic [COLS-1:0] wv, logic i);
    logic [COLS-1:0] p;
    p = i ? wv : ~wv;
    return int'(p);
  endfunction

  initial begin
    wwl = '0; bl = '1; blb = '1; rwl = '1; rwlb = '1;
    for (int t = 0; t < 40; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        w[r] = (t == 0) ? COLS'(ONES) : COLS'($urandom);
        @(negedge clk);
        wwl = ROWS'(1) << r; bl = w[r]; blb = ~w[r];
      end
      @(negedge clk);
      wwl = '0; bl = '1; blb = '1;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (q[r] !== w[r]) begin failures++; $display("FAIL row %0d holds %h expected %h", r, q[r], w[r]); end
      end
      // compute
      for (int k = 0; k < 8; k++) begin
        rwl = ROWS'($urandom); rwlb = ~rwl; #1;
        for (int p = 0; p < ROWS / 2; p++) begin
          int exp;
          exp = xnor_word(w[2*p], rwl[2*p]) + xnor_word(w[2*p+1], rwl[2*p+1]);
          checks++;
          if (int'(psum[p]) != exp) begin
            failures++;
            $display("FAIL compute pair %0d: %0d expected %0d", p, psum[p], exp);
          end
        end
      end
      // read each row
      for (int r = 0; r < ROWS; r++) begin
        rwl = '1; rwlb = '1; rwlb[r] = 1'b0; #1;
        for (int p = 0; p < ROWS / 2; p++) begin
          int exp;
          exp = (p == r / 2) ? int'(w[r]) + ONES : 2 * ONES;
          checks++;
          if (int'(psum[p]) != exp) begin
            failures++;
            $display("FAIL read row %0d pair %0d: %0d expected %0d", r, p, psum[p], exp);
          end
        end
      end
      rwl = '1; rwlb = '1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
