# Overmind: one PE array for neural layers, symbolic reasoning and nonlinear functions

Neuro-symbolic models alternate between two kinds of work. The neural half is dense
matrix arithmetic. The symbolic half is vector-symbolic algebra: binding by circular
convolution, similarity search over codebooks with large strides, and fuzzy-logic
operators. Both halves are full of nonlinear functions (exp, sigmoid, tanh, softmax).
Accelerators built for neural networks handle the first kind well. They leave the
nonlinear functions to lookup tables or post-processing units, and they feed symbolic
operations through cache levels that those operations hardly reuse.

This RTL implements an accelerator that treats all three in one array of processing
elements (PEs):

* **Nonlinear functions are rational (Padé) approximations** computed inside the PE
  array. Numerator and denominator are polynomials, so they are plain
  multiply-accumulate chains. Each row of the array has one divider that forms the
  quotient. Higher orders use more PE columns and are more accurate.
* **There is no L2 buffer between the SRAM and the PEs.** The SRAM streams a tensor
  region over one broadcast bus. Each PE row owns a small *dual-window* filter that
  picks out, by address tag, the elements its thread needs. The next instruction's
  windows are loaded while the current instruction is still running.
* **Circular convolution needs no shift registers.** Each PE reads its local register
  file at an index offset by its own column number, modulo N.

The default configuration is 32 rows × 16 columns of PEs and 32 KB of SRAM. Each row
is one thread.

## Block map

```
            host port / UART            DRAM (off chip)
                 |                           |
                 v                           v
   +--------- controller ----------+       DMA
   | queue, pre-decode, sequencing |        |
   +---+--------+---------+--------+        |
       |        |         |                 |
  predict   edge gen   shadow windows       |
   unit        |          |                 |
   (COL,ROW,   v          v                 v
   FULL)  SRAM read --> broadcast bus --> 32 x dual-window filter
                             |                 |
                             v                 v
                  32 rows x (16 PEs + divider) -- results --> write-back --> SRAM write
```

| File | Block |
|---|---|
| `rtl/om_pkg.sv` | Word and address types, instruction format, fixed-point helpers |
| `rtl/om_pe.sv` | Processing element: MAC, element-wise function, one Padé chain stage |
| `rtl/om_pe_row.sv` | One thread: 16 PEs wired per operation, plus the row's divider |
| `rtl/om_divider.sv` | Pipelined fixed-point divider with a fixed latency |
| `rtl/om_dual_window.sv` | Per-row window filter with shadow registers and row enable |
| `rtl/om_edge_gen.sv` | SRAM address generator and tagged broadcast |
| `rtl/om_sram.sv` | 8192 × 32-bit single-level SRAM |
| `rtl/om_predict_unit.sv` | Columns, rows, masks and the FULL flag of a task |
| `rtl/om_controller.sv` | Instruction queue, pre-decode, stream/flush/drain sequencing, DMA launch |
| `rtl/om_writeback.sv` | Arbiter for the single SRAM write port |
| `rtl/om_dma.sv` | Background block copies between DRAM and SRAM |
| `rtl/om_uart_host.sv` | Serial host link: write word, push instruction, read word |
| `rtl/om_top.sv` | The whole accelerator |

## Number format

Every datapath word is a signed 32-bit fixed-point value with 16 fractional bits
(Q15.16). Adders and multipliers saturate rather than wrap. The evaluated models are
quantised to INT8. INT8 tensors are therefore stored one per SRAM word,
sign-extended. GEMM, convolution and element-wise operations treat words as integers,
and their accumulators wrap at 32 bits. Padé evaluation treats words as Q15.16, so
its inputs, coefficients and results carry fractions. The architecture does not say
how wide its words are. The 32-bit Q15.16 format is this RTL's choice: it leaves
enough room for a degree-8 polynomial at |x| ≤ 2 without overflow.

## Padé evaluation inside the PE array

This is the least obvious part of the design.

A Padé approximant of order m is

    R(x) = (a0 + a1 x + ... + am x^m) / (1 + b1 x + ... + bm x^m)

In row r, PE columns 0…m−1 form the **numerator chain** and columns m…2m−1 form the
**denominator chain**. So order m occupies 2m columns. Order 5 uses 10 of the 16
columns, and any order up to 8 fits.

Every stage of a chain receives a bundle `(x, x^(i-1), partial sum, tag)` from its
left neighbour. Stage i owns the coefficient register A = a_i (or b_i). It works in
two phases on its one multiplier:

1. `B = x^(i-1) · x`. This is *exponent accumulation*: the power of x is built up as
   the element moves along the chain, so no PE computes a power from scratch.
2. `sum += A · B`. The bundle then moves on with `x^i` in the power field.

Both chains start on the same element in the same cycle. The numerator starts with
sum = a0, power = 1, and the denominator with sum = 1, power = 1. They have the same
length, so both sums leave their last stage together and enter the row's divider as
one pair. Each stage takes 2 cycles and the divider takes 50. The quotient for an
element therefore appears **2m + 50 cycles** after the element enters the row.

Because every PE has only one multiplier, a row accepts a new Padé element **every
second cycle**. The chains are fully pipelined: with m = 4, eight elements are in the
stages and up to 25 in the divider at once.

Coefficients are loaded once for all rows by a `LOADC` instruction. It streams one
line `a0, a1…am, b1…bm` from the SRAM. Element 0 goes to the row's a0 register and
element j ≥ 1 to the A register of PE j−1. Changing the approximation order, and
with it accuracy and speed, needs only a different coefficient line and a different
`order` field. The hardware stays the same.

Within one instruction, all threads take their elements in the same cycle. To allow
this, the edge generator streams a Padé tensor **column by column**: element j of
every line, then element j+1. The 32 rows then hand their results to the write-back
in a fixed, staggered order. With a single line (one thread), the edge generator
leaves a gap after every element instead.

During GEMM, convolution and element-wise work the dividers receive nothing. The
end-to-end test counts the cycles in which this holds.

The divider is a 48-stage restoring divider computing `(num << 16) / den`. It
saturates, and returns the largest value with the numerator's sign when the
denominator is zero. Its latency (`DIV_LATENCY = DW + FRAC + 2 = 50`) is fixed, so
the chains and the write-back need no handshake.

### Accuracy against order in Q15.16

`tb/tb_om_pade_orders.sv` runs the same 512 inputs, x in [−2, 2], through several
approximants on the full-size array. Maximum errors against the true function:

| function | order | PE columns | max error |
|---|---|---|---|
| exp | 3 | 6 | 0.0099 |
| exp | 4 | 8 | 0.00064 |
| exp | 5 | 10 | 0.0021 |
| exp | 6 | 12 | 0.00038 |
| tanh | 3 | 6 | 0.010 |
| tanh | 5 | 10 | 0.00003 |
| tanh | 7 | 14 | 0.00048 |

Raising the order from 3 to 4 or 5 gains one to two decimal digits. Above that,
16 fractional bits become the limit. The top coefficients shrink to a few LSBs: the
highest term of exp [5/5] is 1/30240, and tanh's 1/135135 rounds to zero. Rounding
in the products then dominates the error. A design that needs orders 6 and up to pay
off needs more fractional bits (`FRAC` in `om_pkg`).

## Broadcast and the dual-window filter

An instruction names a source region:

* `src_base`: first word
* `src_stride`: words between lines
* `nlines`: number of lines
* `len`: elements per line

The edge generator walks this region. For line `l` and column `c` it reads address
`src_base + l·src_stride + c`. It drives the word onto the broadcast bus with the tag
pair `(l, c)`, two cycles after the walk starts, and reports the range of lines it is
streaming as the current segment.

Each row has an `om_dual_window` with three registers:

* **batch start**: the first (line, column) of the row's window
* **row boundary**: the last line
* **column boundary**: the last column

An element is selected when its line lies between batch start and the row boundary
and its column lies between batch start and the column boundary. The row then
receives the element together with its position inside the window, `(li, lj)`.

How a row's window follows from the instruction:

* LOADV, GEMM, CCONV, ELEM and PADE: row r takes line r, so thread r gets its own vector.
* LOADW and LOADC: every row opens the same window, so a matrix or a coefficient line
  reaches all rows at once.

The rows compare tags only. No data is copied into a buffer in front of the array.

**Row enable.** A row is enabled when its window intersects the segment being
broadcast. `row_active` shows which rows are enabled. Rows outside the task (beyond
`rows`) are also masked off by the predict unit, which here stands in for power
gating.

**Pre-decode.** Each window exists twice, as active registers and as shadow
registers. Suppose instruction n is streaming, flushing or draining, and the next
queue entry is a compute instruction. The controller then decodes that entry and
writes its windows into every row's shadow registers (`pre_valid`). When n+1 starts,
one `swap` pulse copies shadow to active. No cycles are spent setting up windows
between instructions. `preload_cnt` counts how often this happened.

## Circular convolution by index remapping

Binding two hypervectors means computing `C[i] = Σ_j A[j] · B[(i−j) mod N]`. Many
designs rotate one operand through a shift register. Here:

1. `LOADV` writes each row's vector A_r into the register file of every PE in that
   row.
2. `CCONV` streams B_r. When element j passes, PE i adds
   `RGF[(i − j) mod N] · B_r[j]`.

The offset depends only on the PE's column and the element's column tag. Each PE
therefore reads the wrapped operand it needs directly, and nothing moves between
PEs. N is the instruction's `cols` field and can be at most 16, the row width.

## Instructions and the controller

An instruction (`instr_t`, 168 bits) has these fields:

* `op`, `fn`: operation and element-wise function
* `order`: Padé order m
* `rows`, `cols`: threads and PE columns used
* `src_base`, `src_stride`, `nlines`, `len`: source region
* `dst_base`, `dst_stride`: destination
* `dram_addr`, `dma_len`: DMA block

| op | effect |
|---|---|
| `LOADW` | shared matrix W[k][c] → register-file entry k of PE column c, all rows |
| `LOADV` | per-row vector V_r[j] → entry j of every PE in row r |
| `LOADC` | Padé coefficients → a0 and coefficient registers, all rows |
| `GEMM` | out[r][c] = Σ_k X[r][k] · W[k][c] |
| `CCONV` | out[r][i] = Σ_j B_r[j] · A_r[(i−j) mod N] |
| `ELEM` | out[r][j] = f(X[r][j], V_r[j]), f ∈ ADD, SUB, MUL, MAX (fuzzy OR), MIN (fuzzy AND), RELU |
| `PADE` | out[r][j] = R(X[r][j]) |
| `DMA_IN` / `DMA_OUT` | background copy DRAM → SRAM / SRAM → DRAM |
| `WAIT` | hold the queue until the DMA is idle |

The controller takes instructions from an 8-entry queue and runs one at a time. A
compute instruction goes through these states:

1. **START**: load the predict unit, swap windows, clear the task's accumulators.
2. **STREAM**: the edge generator walks the source region.
3. **FLUSH**: wait until every row's chains and divider are empty.
4. **DRAIN**: only for GEMM, CCONV and ELEM. Write each accumulator to
   `dst_base + r·dst_stride + c`.

Padé results do not drain. Each is written as it leaves its divider, to
`dst_base + r·dst_stride + element`.

The **predict unit** computes the task's footprint:

* COL: 2m for Padé, `cols` otherwise
* ROW: `rows`
* the column and row masks
* FULL: the task occupies every row, so nothing can be placed beside it

A task larger than the array is refused and counted in `err_cnt`.

## Memory ports, DMA and host

The SRAM has one read port and one write port.

* **Reads:** the edge generator wins, then the DMA, then the parallel host port, then
  the UART.
* **Writes:** Padé results win, then accumulator drain, then DMA, then host.

A DMA copy therefore stalls whenever results are being written, and proceeds while
the array streams. The end-to-end test counts both. DRAM is reached through a plain
request/grant port with read data returned later (`dram_rvalid`). The DMA keeps one
word in flight.

The UART (8N1, 16 clocks per bit by default) carries three commands:

* `0x01 addr[15:0] data[31:0]`: write a word
* `0x02 instr[167:0]`: push an instruction, MSB first
* `0x03 addr[15:0]`: read a word, answered with 4 bytes

The parallel host port offers the same three operations.

## Where this RTL departs from or goes beyond the architecture

* **One task at a time.** The architecture places a second task in the rows a
  running task leaves free. Its figure shows a 2-thread Padé-5 task and a 2-thread
  Padé-4 task stacked in one array, with FULL set once every row is taken. Here the
  predict unit computes the footprint and FULL, but the controller does not
  co-schedule a second task.
* **Column placement.** Active columns start at column 0. The architecture's figure
  draws them at the right-hand end of the row, which makes no functional difference.
* **Not built:** the compiler and runtime that pick Padé orders, place tensors and
  gate power. Only the column and row enables exist.
* **Circular offset in the PE.** The circular offset is applied to the PE's
  register-file index, not to the row's window start. The arithmetic is the same.
* **This RTL's own choices:** the instruction format, the load formats, the
  controller states, the queue depth, the port priorities, the DMA and UART
  protocols, the number format and the divider algorithm.
* **SRAM model.** The SRAM is a plain array with one read and one write port. Banks
  are not modelled.
* **Orders.** The numerator and denominator always have the same order m.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/om_dram_model.sv` is a
behavioural DRAM with a fixed read latency and random grant delays.

```
verilator --binary --timing --assert -Irtl -Itb rtl/om_pkg.sv rtl/om_top.sv \
          tb/om_dram_model.sv tb/tb_om_top.sv --top tb_om_top
./obj_dir/Vtb_om_top
```

`tb_om_top` runs the full 32 × 16 design at its default parameters. It takes about
two minutes to build and seconds to run, and does the following:

* loads data over the host port
* runs DMA_IN, LOADW + GEMM (32 × 16 × 16), LOADV + CCONV (N = 16), LOADV + ELEM max,
  LOADC + PADE ([4/4] exp on 32 threads, then on one thread), a refused 33-row task,
  and DMA_OUT
* reads every result back, and one word through the UART

Every word is compared with a reference computed in the testbench, including a
bit-exact model of the Padé chains. Each Padé result is also checked to be within
0.01 of the real exp. The run counts these mechanisms and fails if any of them never
occurs:

* Padé results
* GEMM with idle dividers
* wrapped convolution indices
* pre-decode
* row gating
* DMA overlapping computation
* DMA stalled by result writes
* FULL
* the UART path

`tb_om_pade_orders` also runs at the default size. It covers exp at orders 3–6 and
tanh at orders 3, 5 and 7, and checks that each order occupies 2m columns.

The unit testbenches cover the rest:

* `tb_om_pe_row` checks Padé latency (2m + 50) against a fixed-point model and accuracy against the real function.
* `tb_om_divider` checks the 50-cycle latency and saturation.
* `tb_om_dual_window` checks window edges and the shadow swap.
* `tb_om_edge_gen` checks address order and the gap insertion.
