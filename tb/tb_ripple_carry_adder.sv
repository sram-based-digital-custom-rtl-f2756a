// tb_ripple_carry_adder: the N-bit adder at its default width (9 bits,
// the first tree level) with every operand pair, and a 4-bit and 11-bit
// instance with random operands. s must equal a + b with no truncation.
module tb_ripple_carry_adder;
  logic        clk = 1'b0;
  logic [8:0]  a9, b9;
  logic [9:0]  s9;
  logic [3:0]  a4, b4;
  logic [4:0]  s4;
  logic [10:0] a11, b11;
  logic [11:0] s11;
  int checks = 0, failures = 0;

  ripple_carry_adder            dut9  (.a(a9),  .b(b9),  .s(s9));
  ripple_carry_adder #(.N(4))   dut4  (.a(a4),  .b(b4),  .s(s4));
  ripple_carry_adder #(.N(11))  dut11 (.a(a11), .b(b11), .s(s11));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 512; x++) begin
      for (int y = 0; y < 512; y++) begin
        a9 = 9'(x); b9 = 9'(y); #1;
        checks++;
        if (int'(s9) != x + y) begin
          failures++;
          if (failures < 10) $display("FAIL 9-bit %0d + %0d = %0d", x, y, s9);
        end
      end
    end
    for (int t = 0; t < 2000; t++) begin
      a4 = 4'($urandom); b4 = 4'($urandom); a11 = 11'($urandom); b11 = 11'($urandom); #1;
      checks += 2;
      if (int'(s4) != int'(a4) + int'(b4)) failures++;
      if (int'(s11) != int'(a11) + int'(b11)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
