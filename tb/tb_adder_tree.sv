// tb_adder_tree: the default tree (eight 9-bit inputs, 12-bit result).
// Random inputs, all-zero and all-maximum inputs are applied, and the
// result is compared with the integer sum. A four-input instance checks
// that the tree scales with N_IN.
module tb_adder_tree;
  logic             clk = 1'b0;
  logic [7:0][8:0]  din;
  logic [11:0]      sum;
  logic [3:0][5:0]  din4;
  logic [7:0]       sum4;
  int checks = 0, failures = 0;

  adder_tree                          dut  (.din(din),  .sum(sum));
  adder_tree #(.N_IN(4), .W_IN(6))    dut4 (.din(din4), .sum(sum4));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int exp, exp4;
      exp = 0; exp4 = 0;
      for (int i = 0; i < 8; i++) begin
        din[i] = (t == 0) ? 9'h1FF : (t == 1) ? 9'h000 : 9'($urandom);
        exp += int'(din[i]);
      end
      for (int i = 0; i < 4; i++) begin
        din4[i] = 6'($urandom);
        exp4 += int'(din4[i]);
      end
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL sum=%0d expected %0d", sum, exp);
      end
      checks++;
      if (int'(sum4) != exp4) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
