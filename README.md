# DiP: a weight-stationary systolic array without skew buffers

A conventional weight-stationary (WS) systolic array, such as the matrix
unit of a TPU, has to feed each input row into the array as a diagonal wave.
Row *r* of the array gets its element *r* cycles late, and the results leave
the bottom of the array just as skewed. The skew is made by two triangles of
FIFOs, one at the input and one at the output, each holding N(N-1)/2 words.
They cost area and power, and the wave also leaves most PEs idle while it
fills and drains the array.

DiP (Diagonal-Input, Permutated weight stationary) removes both triangles. A
whole input row enters the top PE row in one cycle. On its way down, each PE
row hands the row to the next one *rotated by one column*. The weights are
permutated to match, so each PE still multiplies the right pair of values,
and a whole output row leaves the bottom PE row in one cycle, in natural
column order. This RTL implements the DiP array, its processing element, a
control sequencer, and a multi-bank weight buffer that can permutate the
weights at run time. By default the array is 64 × 64 (4096 INT8 MACs).

## Why the rotation works

Write the input row as x[0..N-1] and the weight tile as W (N × N). The
product is y[c] = Σ_k x[k]·W[k][c].

* **Diagonal links.** The registered input of PE(r, c) goes to PE(r+1, c-1).
  The leftmost PE(r, 0) wraps around to the rightmost PE(r+1, N-1). A row
  entering row 0 unchanged therefore reaches row r rotated left by r places:
  PE(r, c) holds x[(r + c) mod N].
* **Permutated weights.** Column c of the weight tile is rotated up by c
  places before loading: W_perm[r][c] = W[(r + c) mod N][c]. PE(r, c) holds
  W_perm[r][c].
* **Column sums.** PE(r, c) therefore computes x[k]·W[k][c] with
  k = (r + c) mod N. As r runs over 0..N-1, k takes every value once. The
  psum that runs down column c collects exactly y[c].

The 3 × 3 case, with inputs (1 2 3 / 4 5 6 / 7 8 9) and weights
(a d g / b e h / c f i):

| PE row | weights held | input row 1 seen as | psum leaving the row (column 0, 1, 2) |
|---|---|---|---|
| 0 | a e i | 1 2 3 | 1a, 2e, 3i |
| 1 | b f g | 2 3 1 | 1a+2b, 2e+3f, 3i+1g |
| 2 | c d h | 3 1 2 | 1a+2b+3c, 2e+3f+1d, 3i+1g+2h |

The bottom row's psums are the first row of the product, in column order.
`tb_dip_example3` checks every entry of this table on the RTL.

## The processing element (`dip_pe`)

Each PE has four registers, each with its own enable:

| register | enable | holds | goes to |
|---|---|---|---|
| weight | `wshift` | stationary weight | the multiplier, and the PE below (while loading) |
| input | `pe_en` | input element | the multiplier, and the next row via the diagonal link |
| product | `mul_en` | input × weight (16-bit signed) | the adder |
| psum | `adder_en` | psum from above + product (32-bit) | the PE below (`pe_output`) |

The MAC is therefore pipelined in two stages (S = 2). A pair of operands
registered at edge E gives its product at E+1 and its psum at E+2. Operands
are signed two's-complement INT8. The accumulator is 32 bits wide.

## Control and timing (`dip_ctrl`)

`wshift` is a single signal shared by all PEs. `pe_en`, `mul_en` and
`adder_en` come one per PE row and are shared along the row. The sequencer
makes them as follows.

**Weight load.** For N cycles `wshift` is high. The buffer supplies permutated
row N-1 first, then N-2, and so on down to 0. Each row shifts one PE row down
per cycle, so after N edges row j of the tile sits in PE row j. The first
input row may enter in the last of these N cycles, together with the last
weight row.

**Streaming.** Every accepted input row puts a one-bit token into a shift
register `v`. The enables of PE row r are taken from it:

```
pe_en[r]    = v[r]      (row accepted r cycles ago)
mul_en[r]   = v[r+1]
adder_en[r] = v[r+2]
out_valid   = v[N+2]
```

So a register is enabled only in the cycle in which it takes live data. Rows
can follow each other every cycle, and gaps cost nothing.

**Figures.** If input row 0 is registered at edge E0:

* row r's input register is loaded at E_r;
* the last PE row is busy from the N-th cycle on, i.e. the time to full PE
  utilisation is N cycles;
* output row k is registered at E_(k+N+1);
* a tile of N input rows is complete after 2N + S - 2 = 2N edges;
* in steady state the array retires one output row (N dot products) per cycle.

For comparison, the equivalent WS array needs 3N + S - 3 cycles and 2N - 1
cycles to fill, plus N(N-1) FIFO words. Many input tiles can stream against
one resident weight tile, so these start-up costs are paid once per weight
tile.

**Drain before reloading.** Because `wshift` moves every weight in the array
at once, a new tile must not start shifting in while a row still has to
multiply with the old weights. When a load is requested, the sequencer stops
accepting rows. It grants the load once no row above the bottom one will
multiply again. The bottom row's last multiply may share a cycle with the
first shift, since the product register samples the weight before that edge
changes it. The cost is about N cycles per weight tile, overlapped with the
tail of the previous tile.

Two assertions guard this: a load is granted only when the array has
drained, and an input row enters only when a weight tile is resident or is
completing.

## Weight permutation (`dip_wbuf`)

The weight tile can be permutated in two ways:

* **In software.** The rows are written already permutated, and `sw_perm` is
  set.
* **At run time.** The buffer has one bank per array column, and bank c holds
  column c of the natural tile. To read permutated row j, bank c is addressed
  at word (j + c) mod N. All banks are read in the same cycle and no data
  moves. This is the default (`sw_perm` = 0).

The banks are register arrays with a combinational read. At N = 64 they hold
4 KiB, one tile.

## Using the core (`dip_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `wr_en`, `wr_row`, `wr_data` | in | 1, log2 N, N×8 | write one weight row into the buffer |
| `sw_perm` | in | 1 | buffer rows are already permutated |
| `wload_valid` / `wload_ready` | in / out | 1 | request to shift the buffered tile into the array |
| `wloaded` | out | 1 | a complete tile is resident |
| `in_valid` / `in_ready`, `in_row` | in / out, in | 1, N×8 | input rows, one per accepted cycle |
| `psum_take` | out | 1 | `psum_in` is being read in this cycle |
| `psum_in` | in | N×32 | psums added to the row accepted two cycles before |
| `out_valid`, `out_row` | out | 1, N×32 | output row, natural column order |

A row accepted in cycle t appears on `out_row` in cycle t + N + 2.

Rules:

* Do not write the buffer while a tile is shifting in (`wload` granted,
  `wloaded` not yet set); an assertion checks this. Writing while the array
  computes is allowed, so the next tile can be staged during the current one.
* Hold `sw_perm` steady from the load request until `wloaded`.

**Large products.** A product (M × K) · (K × Kc) is cut into 64 × 64 tiles
of the second operand. For each weight tile the M matching rows of the
first operand stream through. The K/64 partial results of one output tile
are accumulated through `psum_in`: feed zero (or a bias) for the first
inner tile, then the previous psum row. Because of the drain and load
times, the psum of row m is always out of the array before the next tile
needs it. Softmax, activation functions and requantisation are not part of
the core.

## Departures from the paper and choices of this design

* The control sequencer, both handshakes, the drain rule and the top-level
  port protocol are this design's own. The paper names the four control
  signals and shows a cycle-by-cycle schedule, but no controller.
* The paper's 3 × 3 walk-through advances one PE row per cycle, with outputs
  in cycles 3, 4 and 5; that matches a single-stage MAC. This PE has the
  two-stage MAC of the paper's PE drawing, so every output comes one cycle
  later, and the tile latency is 2N (the paper's formula 2N + S - 2 with
  S = 2).
* The paper conflicts on `wshift`. Its figure says it is shared by all PEs;
  the text says it is shared per PE row, like the other three enables. One
  array-wide `wshift` is used here.
* The paper states only INT8 precision. Operand signedness, the 32-bit
  accumulator and the reset behaviour are this design's choices.
* The paper mentions run-time permutation "across multi-bank memories" but
  does not organise it; the bank layout above is this design's.
* The paper accumulates psum tiles somewhere outside the array and does not
  say where. Here the array's top-row psum inputs are exposed for that, and
  the memories that hold the operands are outside the core.
* The paper's area, power and energy figures come from a 22 nm layout at
  1 GHz. None of them can be checked with this RTL.

## Files

| file | contents |
|---|---|
| `rtl/dip_pkg.sv` | defaults (N = 64, 8-bit data, 32-bit psums, S = 2), the latency formula, the permutation index |
| `rtl/dip_pe.sv` | processing element |
| `rtl/dip_array.sv` | N × N array with diagonal input links |
| `rtl/dip_ctrl.sv` | sequencer: load, streaming, drain, output valid |
| `rtl/dip_wbuf.sv` | multi-bank weight buffer with run-time permutation |
| `rtl/dip_top.sv` | the core |
| `tb/tb_dip_pe.sv` | PE against a register-level reference, random enables |
| `tb/tb_dip_array.sv` | array at N = 4, driven by hand, random bubbles and psums |
| `tb/tb_dip_ctrl.sv` | every control output against the acceptance history; drain rule |
| `tb/tb_dip_wbuf.sv` | both permutation modes, N = 5 and the 3 × 3 example |
| `tb/tb_dip_example3.sv` | the 3 × 3 walk-through, state by state |
| `tb/tb_dip_top.sv` | tiled 10×12 · 12×8 product at N = 4, both permutation modes, stalls, accumulation |
| `tb/tb_dip_full.sv` | default 64 × 64 core: 64×128 · 128×64, latency 2N and full utilisation after N cycles |
| `tb/tb_dip_transformer.sv` | default core: input projection, Q·Kᵀ, S·V, output projection, FFN1 and FFN2 (with bias) of an l = 64, d_model = 512, d_k = 64, d_FFN = 2048 layer |

Every testbench checks its results and ends with a line
`TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5, for example for the end-to-end test:

```
verilator --binary --timing --assert -Irtl rtl/dip_pkg.sv \
    rtl/dip_pe.sv rtl/dip_array.sv rtl/dip_ctrl.sv rtl/dip_wbuf.sv rtl/dip_top.sv \
    tb/tb_dip_top.sv --top-module tb_dip_top
./obj_dir/Vtb_dip_top
```

For another test, swap the testbench file and top module name; a block's
test needs only `dip_pkg.sv` and the files that block uses. At N = 64 the
Verilator build takes about 1.5 minutes. The run itself takes seconds: about
49,000 cycles for each FFN product.

Lint with `verilator --lint-only -Wall`. The remaining warnings are expected:

* unused package constants;
* the unused registered inputs and weights of the bottom PE row, which have
  nowhere to go;
* `rst_n` being used both as an asynchronous reset and in an assertion's
  `disable iff`.

Coarse synthesis of the default core gives 4096 multiply-accumulate cells,
about 262k flip-flop bits in the array and sequencer, and 32 Kibit in the
weight buffer.

To change the size, override `N` on `dip_top`. Any N ≥ 2 works, including
sizes that are not powers of two.
