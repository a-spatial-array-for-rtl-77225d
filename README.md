# An 8x8 spatial array for wireless kernels

Baseband processing for large antenna arrays spends most of its time in a few
kernels: matrix-vector and matrix-matrix products, FIR and matched filters,
element-wise products such as magnitude squared, and sums of outer products.
A classical systolic array runs matrix products well. It does poorly on the
others, because it can only sum partial products down a column. The spatial
array described here is a systolic array with a few additions that let every
one of those kernels run on the same 64 multipliers:

* each processing element (PE) keeps several weights and can select any of them;
* each PE has a programmable delay line on its left input, so a FIR filter can be
  folded onto a grid;
* each PE can also keep its own sum (output-stationary) or capture one operand
  pair addressed to it (element-wise);
* under the array sits a row of accumulators that can be chained sideways, ending
  in one extra accumulator.

This RTL implements that array, its SRAM banks, the accumulator row and a
kernel sequencer in synthesizable SystemVerilog. The defaults are the published
configuration: 8x8 PEs, one bank per row on the left with one read per cycle,
and one bank per column on top with two reads per cycle. Several points are
choices made here, because the source description does not cover them:

* the word widths and bank depth;
* the control that sequences a kernel;
* the cycle-level protocol between the parts.

They are marked as such below and in each file's header.

## 1. The array at a glance

```
             column banks C0..C7 (2 reads/cycle each)
                 |      |            |
   row bank R0 ->PE00 ->PE01 -> ... ->PE07        operands move right (x)
   row bank R1 ->PE10 ->PE11 -> ... ->PE17        and down (weights, a/b pairs)
      ...          |      |            |
   row bank R7 ->PE70 ->PE71 -> ... ->PE77        partial sums / results move down
                 |      |            |
              ACC0 -> ACC1 -> ...  -> ACC7 -> extra ACC
                 |      |            |            |
             written back into the column banks
```

Every PE has three ports:

* the left port carries an `inp_t` bundle: the operand x, plus phase, weight
  entry, first/last and tag;
* the top port carries a `dat_t` bundle: weights being loaded, or a/b operand
  pairs, each with a destination row;
* the result port carries a `res_t` bundle down the column.

Each bundle describes itself, so the array needs no broadcast control: a PE
acts on what arrives, one cycle after its neighbour did. The only global input
is the kernel configuration (`cfg_t`), which is constant while a kernel runs.

The column banks are drawn twice in the block diagram, once read at the top and
once written at the bottom. Here they are the same physical banks with a
separate write port, so the result of one kernel can feed the next.

## 2. Inside a processing element

A PE (`sa_pe`) has the following parts:

* one real 16x16 multiplier;
* one 32-bit adder;
* a PARTIALS register;
* a 4-entry weight and data buffer (`sa_wbuf`);
* an input delay line (`sa_inbuf`);
* a holding register in front of the result output;
* multiplexers that choose what the multiplier and the adder see.

Because there is only one real multiplier, a complex multiply-accumulate takes
four cycles, called phases:

| phase | product        | feeds          |
|-------|----------------|----------------|
| 0     | w.re * x.re    | real part      |
| 1     | -w.im * x.im   | real part      |
| 2     | w.re * x.im    | imaginary part |
| 3     | +w.im * x.re   | imaginary part |

With `conj` set, the signs of phases 1 and 3 flip, which multiplies by the
conjugate of w (used by the matched filter and by the conjugated outer
product). Real data takes one cycle per multiply-accumulate.

The PE runs in one of three modes:

* **Weight-stationary (WS), "accumulate".** The operand chooses a weight entry.
  The product is added to the partial sum arriving from the PE above, and the sum
  leaves downward.
  - For complex data, the real part is complete after phase 1 and is sent on at
    once. The imaginary part follows after phase 3.
  - The PE below therefore runs two cycles behind rather than four, so the
    row-to-row skew of complex WS kernels is 2 cycles.
  - The PE asserts that a valid partial sum is present whenever it needs one
    (`a_ws_align`).
* **Output-stationary (OS).** x arrives from the left, y from the top, and
  PARTIALS accumulates the whole stream.
  - When the operand marked `last` has been used, the sum moves into the holding
    register.
  - The holding register drains down the result path (see below).
* **Element-wise (EW).** Operand pairs travel down the column, each addressed to
  a row.
  - The PE whose row matches captures the pair and multiplies it: a*b or
    a*conj(b), taking four cycles for complex data.
  - It then places the product in its holding register.
  - Eight pairs per column occupy the eight rows, so a column finishes one product
    per cycle on average.

**Result path.** In OS and EW mode, a PE's finished result must share the
result path with traffic from above.

* Traffic from above always has priority. A PE's own result waits in the holding
  register until the path is free; the testbench counts these as deferred
  results.
* The mappings keep at most one result waiting per PE. The assertions
  `a_hold_free` and `a_ew_free` check this.

## 3. Kernel mappings and memory layout

A kernel is described by a `desc_t` and started with one pulse. Its fields:

* `mode`, `cplx`, `conj`, `fir`;
* `n`: the number of vectors or elements;
* `kt`, `mt`: tile counts;
* five base addresses: `w_base`, `x_base`, `a_base`, `b_base`, `out_base`.

All banks hold `cword_t` words (two 32-bit halves). Operands are read from the
low 16 bits of each half, and results are written at full 32-bit width. The
table uses these names: Rr is row bank r, Cc is column bank c, and KT and MT are
the `kt` and `mt` fields.

| Kernel | Mode | Operands | Result |
|---|---|---|---|
| Y = X W, real or complex, K = 8 KT, M = 8 MT | WS | Rr: X[n][8kt+r] at `x_base+n*KT+kt`. Cc: weight tile t=mt*KT+kt, row r at `w_base+8t+r` | Y[n][8mt+c] in Cc at `out_base+n*MT+mt` |
| FIR / matched filter, 8 KT taps | WS + `fir` | Cc: h[8c+r] at `w_base+r`. Every Rr: x[i] at `x_base+i` | y[n] in C(KT-1) at `out_base+n` |
| C = sum_n x_n y_n^T (y conjugated if `conj`), KT x MT tiles of 8x8 | OS | Rr: x[n][8ti+r] at `x_base+ti*N+n`. Cc: y[n][8tj+c] at `a_base+tj*N+n` | C[8ti+r][8tj+c] in Cc at `out_base+(8ti+r)*MT+tj` |
| z = a .* b (b conjugated if `conj`), N a multiple of 8 | EW | Cc: a[8j+c] at `a_base+j` and b[8j+c] at `b_base+j` (both ports in the same cycle) | z[8j+c] in Cc at `out_base+j` |

Magnitude squared is the EW kernel with b = a and `conj` set.

**Weight tiles.** In a WS matrix product, the sequencer first loads all KT*MT
weight tiles, 8 cycles per tile, down the columns into the PE buffers; the
buffers hold 4 tiles. It then streams X once. For every row vector n it cycles
through the M tiles and, inside each, the K tiles, choosing the buffer entry on
the operand's `entry` field.

Partial sums for the K tiles of one output leave column c one after another.
They are marked `first` and `last`, and column accumulator c adds them before
writing. K and M larger than 8 therefore cost no extra memory traffic.

## 4. Folding a FIR filter: input delays and the accumulator chain

This is the least obvious mapping. A filter with 8 KT taps is laid out on KT
columns, with tap 8c+r held by PE(r,c).

* **Input delays.** Every row bank holds the whole input x. Row r reads sample
  s-PRE-r in time slot s, where PRE = 8(KT-1), and reads zero before the start.
  - An input sample travelling right would reach column c only c cycles later.
  - Each PE therefore delays its left input by 8P+1 cycles: 9 for real data and
    33 for complex data (P is the number of phases).
  - With that delay, column c works on the sample 8c positions earlier than
    column 0. Column c thus computes the partial filter over taps 8c..8c+7.
* **Column sums.** Within a column, the partial sums run down the rows as in a
  matrix product.
* **Accumulator chain.** The per-column totals are added sideways by the chain
  under the array. Column c's total for output n leaves one cycle after column
  c-1's, which matches the chain's one register per column. The extra
  accumulator writes the completed y[n] into the last used column bank.

The delay line (`sa_inbuf`) is a 33-entry circular buffer. It behaves exactly
like `inp_delay` register stages. The chain is enabled by `cfg.red_cols`, which
gives how many columns it sums.

A complex matched filter is the same mapping with `conj` set, so the taps are
conjugated.

## 5. The sequencer

The source describes the mappings' performance but not the control, so
`sa_ctrl` is this design's own: the simplest sequencer that runs the mappings
above. It has four states:

* **IDLE.**
* **LOAD** (WS only): weights go down the columns.
* **STREAM.**
  - Nested counters produce one reference beat per cycle, giving the vector,
    tile and phase.
  - A shift register delays the beat by the systolic skew:
    - r cycles for row r, or 2r for complex WS;
    - c cycles for column c in OS mode.
  - Each lane turns its beat into a bank address. One cycle later it presents
    the word read as a bundle at its edge of the array.
* **DRAIN.** Waits until the accumulator row has written the expected number of
  results, then pulses `done` and leaves the kernel's cycle count on `cycles`.
  Results are written at `out_base + tag`, where the tag travels with the data
  from the edge to the accumulator.

## 6. Using the top level

`sa_top` has parameters `ROWS=8, COLS=8, NBUF=4, DMAX=33` and these ports:

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, active-low asynchronous reset |
| `start`, `desc` | in | start pulse and kernel descriptor |
| `busy`, `done`, `cycles` | out | kernel running, one-cycle completion pulse, cycle count of the last kernel |
| `host_we`, `host_re`, `host_col`, `host_bank`, `host_addr`, `host_wdata` | in | bank access while idle: `host_col`=1 selects column bank `host_bank`, 0 selects a row bank |
| `host_rdata` | out | read data, one cycle after `host_re` |

Host accesses are ignored while `busy` is high. The sequence of use is: load
operands, set `desc`, pulse `start`, wait for `done`, read results.

## 7. Cycle counts

The testbench `tb_sa_table1` runs, at default parameters, the published benchmark sizes. The
paper's counts in the last column come from its own (denser) mappings.

| Kernel (published size) | This RTL, cycles | Published, cycles |
|---|---|---|
| Real matrix product (1024,4) x (4,8) | 1051 | 527 |
| Real matrix product (1024,4) x (4,16) | 2083 | 1039 |
| Real matrix product (1024,8) x (8,8) | 1051 | 1039 |
| Real matrix product (1024,8) x (8,16) | 2083 | 2063 |
| Real matrix product (1024,16) x (16,8) | 2083 | 2063 |
| Real matrix product (1024,16) x (16,16) | 4147 | 4119 |
| Complex matrix-vector (1024,4) x (4,1) | 4130 | 530 |
| Complex matrix-vector (1024,8) x (8,1) | 4130 | 1042 |
| Complex matrix-vector (1024,16) x (16,1) | 8234 | 2066 |
| Real FIR, 1024 samples, 32 taps | 1073 | 464 |
| Complex matched filter, 1024 samples, 32 taps | 4224 | 2232 |
| Complex matched filter, 8 channels run one after another | 33792 | 18180 |
| Complex magnitude squared, 512 elements | 81 | 64 |
| Complex magnitude squared, 1024 elements | 145 | 128 |
| Complex outer product (1024,8) x (1024,8) | 4123 | 4132 |

Where the array is fully occupied, it matches the published rate:

* matrix products with K and M multiples of 8;
* outer products;
* element-wise kernels, apart from a fill of about 17 cycles.

Where it is not fully occupied, it is slower, because each mapping here fills
one PE per weight or tap and does not pack more work onto the array:

* **Matrix-vector:** only one column is used.
* **FIR filters:** only KT columns are used, and complex data takes four cycles
  per product.
* **Small K:** for K < 8, rows are left idle.

The published counts imply that several independent slices of the work share
the array, for example several vectors or output phases side by side. That
packing is not described and is not implemented.

**Outer products larger than 8 columns.** For (1024,32) and beyond, one kernel
call would need more than 4096 words per bank, and more tiles than the 4-bit
tile fields allow. These are run as one call per 8x8 output tile. For example,
(1024,32) takes 16 calls of about 4120 cycles.

**The 8-channel matched filter** is run as 8 calls of the 1024-sample filter.

## 8. Where this design departs from or adds to the source

* **Sizes chosen here:**
  - 16-bit operands, 32-bit accumulators and bank words (no rounding or
    saturation; sums wrap);
  - 4096-word banks;
  - 4 weight-buffer entries;
  - a 33-stage input delay;
  - 16-bit tags.
* **No timing or power work.** The source reports synthesis results in a 32 nm
  library. Nothing here targets a clock rate or models power. The banks are
  register arrays with a one-cycle read, standing in for SRAM macros.
* **Own design choices:**
  - the sequencer and descriptor format;
  - the self-describing bundles;
  - the result-path priority rule;
  - the host port.
* **Output-stationary mode.** The outer-product mapping needs PEs that keep
  their own sums. The source's PE drawing has a PARTIALS register that is used
  this way here. The source names only the accumulate and element-wise modes.
* **Routing element-wise results.** The source says element-wise results
  are routed using the PE buffer, without giving details. Here each PE has a
  separate holding register and shares the result path down the column.
* **Denser mappings** for small K, matrix-vector and FIR, which the published
  latencies imply, are not implemented (section 7).
* **Bank reload between calls.** Kernels that exceed one call (large outer
  products, multi-channel matched filters) need the host to reload the banks
  between calls.

## 9. Files and simulation

Design (`rtl/`):

| File | Contents |
|---|---|
| `sa_pkg.sv` | widths, bundle structs, modes, kernel descriptor |
| `sa_wbuf.sv` | PE weight and data buffer |
| `sa_inbuf.sv` | PE programmable input delay line |
| `sa_pe.sv` | processing element |
| `sa_array.sv` | 8x8 grid of PEs |
| `sa_row_sram.sv`, `sa_col_sram.sv` | row bank (1R1W), column bank (2R1W) |
| `sa_acc_row.sv` | accumulator row, horizontal chain, extra accumulator |
| `sa_ctrl.sv` | kernel sequencer |
| `sa_top.sv` | top level |

Testbenches (`tb/`):

* There is one testbench per module, `tb_<module>.sv`. Each testbench:
  - is self-checking against values computed independently in the bench;
  - has a watchdog;
  - ends by printing `TB_RESULT checks=<n> failures=<n>`.
* `tb_sa_top` runs seven kernels end to end at the default size. It counts how
  often each mechanism occurs and fails if one never does. The mechanisms are:
  - several weight tiles;
  - K accumulation in the accumulator row;
  - the chain;
  - the input delay;
  - deferred results;
  - each mode.
* `tb_sa_table1` runs the published benchmark sizes listed in section 7.

To simulate with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/sa_pkg.sv rtl/sa_wbuf.sv rtl/sa_inbuf.sv rtl/sa_pe.sv rtl/sa_array.sv \
    rtl/sa_row_sram.sv rtl/sa_col_sram.sv rtl/sa_acc_row.sv rtl/sa_ctrl.sv \
    rtl/sa_top.sv tb/tb_sa_top.sv --top-module tb_sa_top
./obj_dir/Vtb_sa_top
```

The same command with `tb/tb_sa_table1.sv` and `--top-module tb_sa_table1`
runs the benchmark sizes, which takes a few seconds. `ROWS` and `COLS` are
parameters throughout, but the descriptor's tile arithmetic and all the
testbenches assume an 8x8 array, and only that size has been simulated.
