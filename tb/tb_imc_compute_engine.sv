// tb_imc_compute_engine: end-to-end test of the engine at its default
// size (16 x 8 array, 12-bit result), with no parameter overrides.
//
// A reference model keeps its own copy of the 16 weight words. The test
// first writes every row and reads every row back. It then sends a random
// stream of write, read, compute and hold requests, some back to back and
// some with idle cycles between them. Every request's expected response
// is worked out in the model when the request is issued:
//   compute: sum over r of (act[r] ? W[r] : ~W[r]) as 8-bit numbers
//   read:    W[addr]
//   write/hold: 0
// Responses must come in order and exactly two rising edges after the
// request is presented. Directed cases make the result use the top bit
// (all-ones weights with all-ones inputs give 16 * 255 = 4080) and the
// final carry of the in-array adders. The test counts how often each
// mechanism happened and fails if one never did: write, read, compute,
// hold, back-to-back requests, an in-array final carry, and a result in
// the top bit of the 12-bit output.
module tb_imc_compute_engine;
  import imc_pkg::*;
  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 8;
  localparam int unsigned N_OPS = 4000;

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

  imc_compute_engine dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_mode(req_mode),
    .req_addr(req_addr), .req_wdata(req_wdata), .req_act(req_act),
    .resp_valid(resp_valid), .resp_mode(resp_mode), .resp_data(resp_data),
    .pair_sum(pair_sum));

  typedef struct {
    imc_mode_e   mode;
    int unsigned data;
    longint      due;   // cycle in which the response must be seen
  } exp_t;

  logic [COLS-1:0] w_model [ROWS];
  exp_t            expq[$];
  longint          cycle = 0;
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_compute = 0, n_hold = 0;
  int n_back2back = 0, n_pair_carry = 0, n_top_bit = 0;
  logic            prev_valid = 1'b0;
  imc_mode_e       drive_mode = MODE_HOLD;  // mode the array is biased in

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (N_OPS * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned model_compute(logic [ROWS-1:0] act);
    int unsigned s = 0;
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] p;
      p = act[r] ? w_model[r] : ~w_model[r];
      s += 32'(p);
    end
    return s;
  endfunction

  // Present one request for one cycle (or an idle cycle if v is 0).
  task automatic issue(input logic v, input imc_mode_e m, input logic [3:0] ad,
                       input logic [COLS-1:0] wd, input logic [ROWS-1:0] act);
    exp_t e;
    req_valid = v; req_mode = m; req_addr = ad; req_wdata = wd; req_act = act;
    if (v) begin
      if (prev_valid) n_back2back++;
      e.mode = m;
      e.due  = cycle + 2;
      unique case (m)
        MODE_WRITE:   begin e.data = 0; w_model[ad] = wd; n_write++; end
        MODE_READ:    begin e.data = 32'(w_model[ad]); n_read++; end
        MODE_COMPUTE: begin e.data = model_compute(act); n_compute++;
                            if (e.data >= 2048) n_top_bit++; end
        default:      begin e.data = 0; n_hold++; end
      endcase
      expq.push_back(e);
    end
    prev_valid = v;
    @(negedge clk);
  endtask

  // Response checker: sampled at each falling edge.
  always @(negedge clk) begin
    if (rst_n) begin
      if (resp_valid) begin
        checks++;
        if (expq.size() == 0) begin
          failures++;
          $display("FAIL unexpected response at cycle %0d", cycle);
        end else begin
          exp_t e;
          e = expq.pop_front();
          if (resp_mode != e.mode || int'(resp_data) != int'(e.data) || cycle != e.due) begin
            failures++;
            $display("FAIL cycle %0d: mode %s data %0d, expected %s data %0d due cycle %0d",
                     cycle, resp_mode.name(), resp_data, e.mode.name(), e.data, e.due);
          end
        end
      end else if (expq.size() != 0 && expq[0].due < cycle) begin
        failures++;
        $display("FAIL response missing, due cycle %0d", expq[0].due);
        void'(expq.pop_front());
      end
    end
  end

  // Watch the routing tracks while the array computes.
  always @(negedge clk) begin
    if (drive_mode == MODE_COMPUTE) begin
      for (int p = 0; p < ROWS / 2; p++) if (pair_sum[p][COLS]) n_pair_carry++;
    end
  end
  always @(posedge clk) drive_mode <= req_valid ? req_mode : MODE_HOLD;

  task automatic mech_check(input int n, input string what);
    checks++;
    $display("mechanism %-28s happened %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    rst_n = 1'b0; req_valid = 1'b0; req_mode = MODE_HOLD; req_addr = '0;
    req_wdata = '0; req_act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill and read back every row
    for (int r = 0; r < ROWS; r++) issue(1'b1, MODE_WRITE, 4'(r), COLS'($urandom), '0);
    for (int r = 0; r < ROWS; r++) issue(1'b1, MODE_READ, 4'(r), '0, '0);
    // largest result: every row all ones, every input +1
    for (int r = 0; r < ROWS; r++) issue(1'b1, MODE_WRITE, 4'(r), '1, '0);
    issue(1'b1, MODE_COMPUTE, '0, '0, '1);
    issue(1'b1, MODE_COMPUTE, '0, '0, '0);   // every input -1: result 0
    issue(1'b1, MODE_HOLD, '0, '0, '0);
    // random traffic
    for (int t = 0; t < N_OPS; t++) begin
      logic v;
      imc_mode_e m;
      int unsigned pick;
      v = ($urandom_range(0, 5) != 0);
      pick = $urandom_range(0, 9);
      unique case (pick)
        0, 1, 2:       m = MODE_WRITE;
        3, 4:          m = MODE_READ;
        9:             m = MODE_HOLD;
        default:       m = MODE_COMPUTE;
      endcase
      issue(v, m, 4'($urandom), COLS'($urandom), ROWS'($urandom));
    end
    issue(1'b0, MODE_HOLD, '0, '0, '0);
    issue(1'b0, MODE_HOLD, '0, '0, '0);
    issue(1'b0, MODE_HOLD, '0, '0, '0);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d responses never arrived", expq.size());
    end
    mech_check(n_write, "write");
    mech_check(n_read, "read");
    mech_check(n_compute, "compute (XNOR MAC)");
    mech_check(n_hold, "hold request");
    mech_check(n_back2back, "back-to-back requests");
    mech_check(n_pair_carry, "in-array final carry");
    mech_check(n_top_bit, "result in top bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
