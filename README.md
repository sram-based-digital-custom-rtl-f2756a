# XNOR compute engine in 10T SRAM with in-array full adders

Binary neural networks restrict weights and activations to +1 and -1. Coding
+1 as logic 1 and -1 as logic 0 turns their product into an XNOR. An SRAM
cell that can form that XNOR on its own read bit line does the multiply
where the weight is stored. The sum of the products still needs an adder
tree. In a plain in-memory array every row sends all its product bits out
to that tree: 8 wires per row, 128 wires for a 16 x 8 array. The tree then
needs four levels.

This design moves the first level of the adder tree into the array. One
full adder sits between each cell and the cell of the next row in the same
column. The adders of a column pair are chained into a ripple-carry adder,
so every two rows send one 9-bit sum out of the array instead of two 8-bit
words. The array now needs 72 wires instead of 128, and the tree outside
has three levels (4 x 9-bit, 2 x 10-bit, 1 x 11-bit adders, 67 full adders)
instead of four (131 full adders). The SystemVerilog here describes this
engine at the logic level: the 10T cell's read port, the full adder, the
leaf cell, the array, the tree and a small periphery that drives the word
lines.

## What the engine computes

The array holds `ROWS` = 16 weight words `W[r]` of `COLS` = 8 bits. A
compute request carries one binary input bit `I[r]` per row. Every cell
forms `W[r][c] XNOR I[r]`. The row's 8 product bits are then added as an
8-bit unsigned number, exactly as the array's adders see them:

    result = sum over r = 0..15 of ( I[r] ? W[r] : ~W[r] )      (12 bits, 0..4080)

Rows 2k and 2k+1 form pair k. Pair k's in-array adder gives
`pair_sum[k] = xnor(W[2k], I[2k]) + xnor(W[2k+1], I[2k+1])` (9 bits). The
tree adds the eight pair sums.

Weights are stored as 8-bit words and inputs are one bit per row. One read
word line pair per row carries the input, so every cell of a row sees the
same input bit. The original comparison table lists the precision as
8-bit input by 8-bit weight, but the circuit description supplies only a
binary input per row. An 8-bit input mode is not built here.

## The 10T cell and its read port (`bitcell_10t`)

The cell is a 6T latch (Q, QB) with four extra read transistors. Two of
them connect the read bit line RBL to the read word lines: to RWL when
Q = 1 and to RWLB when Q = 0. The other two connect RBLB the opposite way
round. Both read bit lines are precharged high, and a transistor can only
pull a bit line down to a low word line. After evaluation each bit line
therefore sits at the level of the word line it is connected to:

    RBL  = Q ? RWL  : RWLB
    RBLB = Q ? RWLB : RWL

| bias            | WWL | RWL | RWLB | result                          |
|-----------------|-----|-----|------|---------------------------------|
| hold            | 0   | 1   | 1    | RBL = RBLB = 1                  |
| write 0/1       | 1   | x   | 1    | Q <- BL (BLB = ~BL)             |
| read            | 0   | 1   | 0    | RBL = Q, RBLB = QB              |
| read, reversed  | 0   | 0   | 1    | RBL = QB, RBLB = Q              |
| compute (input I) | 0 | I   | ~I   | RBL = W XNOR I, RBLB = W XOR I  |

The RTL folds precharge and evaluation into one combinational expression.
It writes the latch at the rising clock edge while WWL is high, ignoring a
write whose bit lines are not complementary (an assertion flags one). The
cell has no reset, like any SRAM cell. Inside the array only RBL (the XNOR
side) is used. RBLB is kept as a port of the cell.

## The full adder (`full_adder_14t`)

The adder follows the structure of a 14-transistor full-swing full adder.
An XOR/XNOR stage forms `A XOR B` and `A XNOR B`. These two nodes select
pass-gate pairs:

    Sum   = (A XOR B) ? ~Cin : Cin
    Carry = (A XOR B) ?  Cin : B

Every adder in the design is this cell: the 64 inside the array and the 67
in the tree. The transistor-level advantages (area, full swing) do not show
in RTL. The RTL keeps the cell boundary so that the adder count of the
netlist matches the circuit.

## Leaf cell, row pair and macro

- `imc_leaf_cell` is the repeated unit: two cells of consecutive rows in one
  column, with the upper cell's RBL on adder input A, the lower cell's RBL
  on B, and the carry from the previous column on Cin.
- `imc_row_pair` chains `COLS` leaf cells. Column 0 is the least
  significant bit, and its carry in is tied low. The carry out of column
  `COLS-1` becomes bit `COLS` of the 9-bit pair sum.
- `sram_imc_macro` stacks `ROWS/2` row pairs. The write bit lines (BL/BLB)
  run down whole columns, and each row has its own WWL, RWL and RWLB. Its
  outputs are the 72 pair-sum wires. It also exposes the stored words on
  `q` for observation.

## Adder tree (`adder_tree`, `ripple_carry_adder`)

`ripple_carry_adder #(N)` chains N full adders and returns all N+1 bits.
`adder_tree #(N_IN, W_IN)` has `log2(N_IN)` levels. Level l adds pairs of
(W_IN+l)-bit values, and nothing is truncated. With the defaults (8 x 9 bits)
it is 4 x 9-bit + 2 x 10-bit + 1 x 11-bit = 67 full adders and a 12-bit
result. The tree is combinational, as in the circuit. `N_IN` must be a
power of two.

## Periphery and timing (`imc_peripheral`, `imc_compute_engine`)

The circuit description names a peripheral region but does not describe
it. The periphery here is this design's own minimal version:

- a request register (`req_valid`, `req_mode`, `req_addr`, `req_wdata`,
  `req_act`) that takes one request per clock, with no back-pressure;
- a row decoder and drivers that bias the array for one cycle according to
  the table above. Idle cycles and `MODE_HOLD` requests hold every row.
  Bit lines that are not being written are held high;
- a result register that captures the tree output at the end of that cycle.

A request sampled at rising edge t biases the array between t and t+1.
Its response (`resp_valid`, `resp_mode`, `resp_data`) is valid after edge
t+1. Requests can follow each other on every cycle, and responses come in
order. Responses are:

| mode      | `resp_data`                                   |
|-----------|-----------------------------------------------|
| compute   | the 12-bit result above                       |
| read      | the stored word `W[addr]`                     |
| write     | 0 (the word is in the array from edge t+1 on) |
| hold      | 0                                             |

**Reading a word back.** In this array each RBL feeds an adder, not a shared
column bit line. A stored word therefore leaves through the adders. The
addressed row gets the read bias (RWL = 1, RWLB = 0, so RBL = Q), and every
other row holds (RBL = 1). The tree then sees `W[addr] + 15 * 255`, and the
periphery subtracts that constant, `(ROWS-1) * (2^COLS - 1)`. This read
path is this design's own: the circuit description gives the cell's read
bias but not how a read word leaves the proposed array.

Reset (`rst_n`) is synchronous and active low. It clears the two registers
and leaves the array in hold. It does not clear the stored weights.

## Parameters

| parameter | default | where                               | meaning                   |
|-----------|---------|-------------------------------------|---------------------------|
| `ROWS`    | 16      | engine, periphery, macro            | weight words (even)       |
| `COLS`    | 8       | engine, periphery, macro, row pair  | bits per word             |
| `N`       | 9       | `ripple_carry_adder`                | adder width               |
| `N_IN`, `W_IN` | 8, 9 | `adder_tree`                      | number and width of inputs |

The result is `COLS + 1 + log2(ROWS/2)` bits wide. `imc_pkg` holds the
default sizes and the mode type `imc_mode_e` (`MODE_HOLD`, `MODE_WRITE`,
`MODE_READ`, `MODE_COMPUTE`).

## Where this departs from the circuit description

- Everything analogue is abstracted: precharge, sensing, the transistor
  sizes of the 14T adder, and all delays. The latency and area comparisons
  (in picoseconds and square micrometres) have no counterpart here.
- The registers, the request/response interface, the reset and the read
  path through the adder tree are additions needed to make a usable digital
  block.
- The input is one bit per row. An 8-bit input mode is not built.
- The conventional architecture (separate rows into a four-level tree) is
  only a point of comparison and is not included.

## Files and simulation

`rtl/` holds one module or package per file. The top is
`imc_compute_engine`. Each block has a self-checking testbench in `tb/`,
named `tb_<module>.sv`, which prints `TB_RESULT checks=N failures=M`:

| testbench                | what it checks                                                         |
|--------------------------|------------------------------------------------------------------------|
| `tb_full_adder_14t`      | all 8 input combinations                                               |
| `tb_bitcell_10t`         | write, hold, read and XNOR/XOR for both stored values and inputs       |
| `tb_imc_leaf_cell`       | random weights, word line levels and carry in against the integer sum  |
| `tb_imc_row_pair`        | random and all-ones words, every input pair, final carry               |
| `tb_sram_imc_macro`      | 16-row writes, all eight pair sums in compute, read of every row       |
| `tb_ripple_carry_adder`  | every 9-bit operand pair; random 4- and 11-bit                         |
| `tb_adder_tree`          | random, all-zero and all-maximum inputs; a 4-input instance            |
| `tb_imc_peripheral`      | word line decode per mode, response data, one-cycle latency            |
| `tb_imc_compute_engine`  | end to end at the default size against a reference model               |
| `tb_bnn_dot_product`     | +1/-1 neurons: weights in bit 0, dot product recovered from the result |

The end-to-end test runs about 4000 random requests against a reference
model. It checks every response value and its arrival exactly two edges
after the request. It counts writes, reads, computes, holds, back-to-back
requests, in-array final carries and results using the top output bit, and
fails if any of them never happens.

`tb_bnn_dot_product` shows the engine as a binary neuron. Each row's
weight is stored in bit 0 and the other bits are 0. A row whose input is 0
then adds 254 from bits 1..7, so `popcount = result - 254 * (inputs that
are 0)`, and the +/-1 dot product is `2 * popcount - 16`.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wall -Wno-fatal -Irtl -y rtl -y tb \
        rtl/imc_pkg.sv tb/tb_imc_compute_engine.sv --top-module tb_imc_compute_engine
    ./obj_dir/Vtb_imc_compute_engine

Change `tb_imc_compute_engine` to run another testbench. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/imc_pkg.sv rtl/<module>.sv`.
The only lint warning expected is the unused RBLB (XOR) output inside the
leaf cell.
