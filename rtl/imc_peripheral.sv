// imc_peripheral: periphery of the SRAM compute macro. It holds the
// request register, the row decoder, the word line and bit line drivers
// and the result register.
//
// One request is taken per clock. The request register holds it for one
// cycle, and during that cycle the drivers bias the array as in the
// cell's biasing table:
//   hold    : WWL low, RWL and RWLB high on every row. The precharged read
//             bit lines stay high.
//   write   : WWL high on the addressed row, BL = data, BLB = ~data.
//             RWLB stays high, and RWL (a don't-care) is held high.
//   read    : RWL high and RWLB low on the addressed row, so its cells put
//             Q on RBL. Every other row holds, and its cells then put a 1
//             on RBL.
//   compute : every row gets RWL = I and RWLB = ~I from its activation
//             bit, and each cell gives W XNOR I.
// At the end of the cycle the result register captures the adder tree's
// output. In a read, the tree sees the addressed word plus ROWS-1 rows of
// all ones, so the periphery subtracts the constant (ROWS-1)*(2^COLS-1)
// to give back the word. A write returns 0.
//
// Timing: a request sampled at clock edge t drives the array between t
// and t+1. Its response is valid after edge t+1 (resp_valid one cycle
// after req_valid was sampled, two edges from the request). A request can
// be taken on every clock, with no back-pressure. Following the paper:
// the biasing table, and the input I/~I on RWL/RWLB. This design's own
// choices: the registers, the request/response interface, reading a row
// through the adder path and the synchronous active-low reset.
module imc_peripheral
  import imc_pkg::*;
#(
  parameter int unsigned ROWS = IMC_ROWS,
  parameter int unsigned COLS = IMC_COLS,
  localparam int unsigned AW    = $clog2(ROWS),
  localparam int unsigned W_OUT = COLS + 1 + $clog2(ROWS / 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  // request
  input  logic             req_valid,
  input  imc_mode_e        req_mode,
  input  logic [AW-1:0]    req_addr,   // row to write or read
  input  logic [COLS-1:0]  req_wdata,  // weight word to write
  input  logic [ROWS-1:0]  req_act,    // one input bit per row (compute)
  // array drive
  output logic [ROWS-1:0]  wwl,
  output logic [COLS-1:0]  bl,
  output logic [COLS-1:0]  blb,
  output logic [ROWS-1:0]  rwl,
  output logic [ROWS-1:0]  rwlb,
  // adder tree output
  input  logic [W_OUT-1:0] tree_sum,
  // response
  output logic             resp_valid,
  output imc_mode_e        resp_mode,
  output logic [W_OUT-1:0] resp_data
);

  // Value the tree adds in a read: every other row reads as all ones.
  localparam logic [W_OUT-1:0] READ_OFFSET =
      W_OUT'((ROWS - 1) * ((1 << COLS) - 1));

  logic            cur_valid;
  imc_mode_e       cur_mode;
  logic [AW-1:0]   cur_addr;
  logic [COLS-1:0] cur_wdata;
  logic [ROWS-1:0] cur_act;

  // Request register.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur_mode  <= MODE_HOLD;
      cur_addr  <= '0;
      cur_wdata <= '0;
      cur_act   <= '0;
    end else begin
      cur_valid <= req_valid;
      cur_mode  <= req_valid ? req_mode : MODE_HOLD;
      cur_addr  <= req_addr;
      cur_wdata <= req_wdata;
      cur_act   <= req_act;
    end
  end

  // Word line and bit line drivers.
  always_comb begin
    wwl  = '0;
    bl   = '1;
    blb  = '1;
    rwl  = '1;
    rwlb = '1;
    unique case (cur_mode)
      MODE_HOLD: ;
      MODE_WRITE: begin
        wwl[cur_addr] = 1'b1;
        bl            = cur_wdata;
        blb           = ~cur_wdata;
      end
      MODE_READ: begin
        rwlb[cur_addr] = 1'b0;
      end
      MODE_COMPUTE: begin
        rwl  = cur_act;
        rwlb = ~cur_act;
      end
      default: ;
    endcase
  end

  // Result register.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_mode  <= MODE_HOLD;
      resp_data  <= '0;
    end else begin
      resp_valid <= cur_valid;
      resp_mode  <= cur_mode;
      unique case (cur_mode)
        MODE_COMPUTE: resp_data <= tree_sum;
        MODE_READ:    resp_data <= tree_sum - READ_OFFSET;
        default:      resp_data <= '0;
      endcase
    end
  end

  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      req_valid && (req_mode inside {MODE_WRITE, MODE_READ}) |-> (32'(req_addr) < ROWS))
    else $error("imc_peripheral: row address out of range");

endmodule
