// tb_bnn_dot_product: uses the engine for binary neural network neurons.
//
// A neuron with 16 weights w[r] and inputs x[r], each +1 or -1, has the
// dot product sum_r w[r] * x[r]. Coding +1 as 1 and -1 as 0 turns each
// product into XNOR, so the dot product is 2 * popcount(XNOR) - 16.
// Each weight goes into bit 0 of its row, with the other seven bits 0.
// A row with input 0 then also contributes ~0000000 = 254 from bits 1..7,
// and one with input 1 contributes nothing there. So
//     popcount = result - 254 * (number of inputs that are 0)
// The test writes random +/-1 weight vectors, applies random +/-1 input
// vectors, recovers the dot product from the engine's result and compares
// it with the dot product worked out in integers.
module tb_bnn_dot_product;
  import imc_pkg::*;
  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 8;

  logic                      clk = 1'b0;
  logic                      rst_n;
  logic                      req_valid;
  imc_mode_e                 req_mode;
  logic [3:0]                req_addr;
  logic [COLS-1:0]           req_wdata;
  logic [ROWS-1:0]           req_act;
  logic                      resp_valid;
  imc_mode_e                 resp_mode;
  logic [11:0]               resp_data;
  logic [ROWS/2-1:0][COLS:0] pair_sum;
  int checks = 0, failures = 0;

  imc_compute_engine dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_mode(req_mode),
    .req_addr(req_addr), .req_wdata(req_wdata), .req_act(req_act),
    .resp_valid(resp_valid), .resp_mode(resp_mode), .resp_data(resp_data),
    .pair_sum(pair_sum));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic request(input imc_mode_e m, input logic [3:0] ad,
                         input logic [COLS-1:0] wd, input logic [ROWS-1:0] act);
    req_valid = 1'b1; req_mode = m; req_addr = ad; req_wdata = wd; req_act = act;
    @(negedge clk);
    req_valid = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    logic [ROWS-1:0] wbits, xbits;
    rst_n = 1'b0; req_valid = 1'b0; req_mode = MODE_HOLD; req_addr = '0;
    req_wdata = '0; req_act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 50; n++) begin
      wbits = ROWS'($urandom);
      for (int r = 0; r < ROWS; r++) request(MODE_WRITE, 4'(r), COLS'(wbits[r]), '0);
      for (int k = 0; k < 20; k++) begin
        int dot_ref, zeros, popcount, dot_hw;
        xbits = (k == 0) ? wbits : (k == 1) ? ~wbits : ROWS'($urandom);
        dot_ref = 0; zeros = 0;
        for (int r = 0; r < ROWS; r++) begin
          dot_ref += (wbits[r] ? 1 : -1) * (xbits[r] ? 1 : -1);
          if (!xbits[r]) zeros++;
        end
        request(MODE_COMPUTE, '0, '0, xbits);
        checks++;
        popcount = int'(resp_data) - 254 * zeros;
        dot_hw = 2 * popcount - ROWS;
        if (!resp_valid || resp_mode != MODE_COMPUTE || dot_hw != dot_ref) begin
          failures++;
          $display("FAIL neuron %0d: w=%h x=%h dot %0d expected %0d", n, wbits, xbits, dot_hw, dot_ref);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
