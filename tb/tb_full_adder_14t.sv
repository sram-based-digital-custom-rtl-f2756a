// tb_full_adder_14t: exhaustive check of the one-bit full adder.
// All eight input combinations are applied, and {carry, sum} is compared
// with the integer sum a + b + cin.
module tb_full_adder_14t;
  logic clk = 1'b0;
  logic a, b, cin, sum, carry;
  int checks = 0, failures = 0;

  full_adder_14t dut (.a(a), .b(b), .cin(cin), .sum(sum), .carry(carry));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({carry, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d -> carry=%0d sum=%0d", a, b, cin, carry, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
