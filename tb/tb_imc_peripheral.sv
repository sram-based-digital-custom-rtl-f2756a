// tb_imc_peripheral: the request register, word line drivers and result
// register, checked without the array.
// Each request is applied before a rising edge. In the following cycle the
// array drive must match the biasing table for its mode:
//   hold:    wwl = 0, rwl = rwlb = all ones
//   write:   wwl one-hot on the row, bl = data, blb = ~data, rwl = rwlb = 1
//   read:    wwl = 0, rwl = all ones, rwlb low only on the row
//   compute: rwl = act, rwlb = ~act
// The test stands in for the adder tree with a random tree_sum. After
// the next edge, resp_valid/resp_mode/resp_data must follow: tree_sum for
// compute, tree_sum - 15*255 for read, 0 otherwise. The response must come
// one cycle after the request register takes the request.
module tb_imc_peripheral;
  import imc_pkg::*;
  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 8;
  localparam int unsigned W_OUT = 12;
  localparam int unsigned OFFSET = (ROWS - 1) * ((1 << COLS) - 1);

  logic             clk = 1'b0;
  logic             rst_n;
  logic             req_valid;
  imc_mode_e        req_mode;
  logic [3:0]       req_addr;
  logic [COLS-1:0]  req_wdata;
  logic [ROWS-1:0]  req_act;
  logic [ROWS-1:0]  wwl, rwl, rwlb;
  logic [COLS-1:0]  bl, blb;
  logic [W_OUT-1:0] tree_sum;
  logic             resp_valid;
  imc_mode_e        resp_mode;
  logic [W_OUT-1:0] resp_data;
  int checks = 0, failures = 0;

  imc_peripheral #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_mode(req_mode),
    .req_addr(req_addr), .req_wdata(req_wdata), .req_act(req_act),
    .wwl(wwl), .bl(bl), .blb(blb), .rwl(rwl), .rwlb(rwlb), .tree_sum(tree_sum),
    .resp_valid(resp_valid), .resp_mode(resp_mode), .resp_data(resp_data));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    rst_n = 1'b0; req_valid = 1'b0; req_mode = MODE_HOLD; req_addr = '0;
    req_wdata = '0; req_act = '0; tree_sum = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // after reset: hold bias, no response
    expect_eq(32'(wwl), 0, "reset wwl"); expect_eq(32'(rwl), 32'hFFFF, "reset rwl");
    expect_eq(32'(rwlb), 32'hFFFF, "reset rwlb"); expect_eq(32'(resp_valid), 0, "reset resp_valid");
    for (int t = 0; t < 2000; t++) begin
      imc_mode_e m;
      logic [3:0] ad; logic [COLS-1:0] wd; logic [ROWS-1:0] act; logic [W_OUT-1:0] ts;
      logic v;
      logic [ROWS-1:0] act_b;
      logic [COLS-1:0] wd_b;
      int unsigned exp_data;
      m  = imc_mode_e'($urandom_range(0, 3));
      v  = ($urandom_range(0, 7) != 0);
      ad = 4'($urandom); wd = COLS'($urandom); act = ROWS'($urandom);
      ts = W_OUT'($urandom_range(OFFSET, 4095));
      // request, sampled at the next rising edge
      req_valid = v; req_mode = m; req_addr = ad; req_wdata = wd; req_act = act;
      @(negedge clk);
      req_valid = 1'b0;
      if (!v) m = MODE_HOLD;
      act_b = ~act;
      wd_b  = ~wd;
      unique case (m)
        MODE_HOLD: begin
          expect_eq(32'(wwl), 0, "hold wwl");
          expect_eq(32'(rwl), 32'hFFFF, "hold rwl"); expect_eq(32'(rwlb), 32'hFFFF, "hold rwlb");
        end
        MODE_WRITE: begin
          expect_eq(32'(wwl), 32'(1) << ad, "write wwl");
          expect_eq(32'(bl), 32'(wd), "write bl"); expect_eq(32'(blb), 32'(wd_b), "write blb");
          expect_eq(32'(rwl), 32'hFFFF, "write rwl"); expect_eq(32'(rwlb), 32'hFFFF, "write rwlb");
        end
        MODE_READ: begin
          logic [ROWS-1:0] sel_b;
          sel_b = '1;
          sel_b[ad] = 1'b0;
          expect_eq(32'(wwl), 0, "read wwl");
          expect_eq(32'(rwl), 32'hFFFF, "read rwl");
          expect_eq(32'(rwlb), 32'(sel_b), "read rwlb");
        end
        default: begin
          expect_eq(32'(wwl), 0, "compute wwl");
          expect_eq(32'(rwl), 32'(act), "compute rwl"); expect_eq(32'(rwlb), 32'(act_b), "compute rwlb");
        end
      endcase
      tree_sum = ts;
      expect_eq(32'(resp_valid), 0, "no response before one cycle");
      @(negedge clk);
      exp_data = (m == MODE_COMPUTE) ? ts : (m == MODE_READ) ? ts - OFFSET : 0;
      expect_eq(32'(resp_valid), 32'(v), "resp_valid one cycle later");
      expect_eq(32'(resp_mode), 32'(m), "resp_mode");
      expect_eq(32'(resp_data), exp_data, "resp_data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
