# T-REX-style transformer accelerator in SystemVerilog

Most of the energy a transformer accelerator spends goes to fetching weights from
external DRAM, not to arithmetic. This design, modelled on the T-REX chip
(ISSCC 2024, paper 23.1), attacks that cost in three ways:

1. **Factorized weights.** Every weight matrix is trained as a product
   `W = W_S * W_D`. `W_S` is dense but *shared by all layers*: it is loaded into
   the chip once and stays there. `W_D` is *per layer* but very sparse, with a
   fixed number of non-zeros per column. A layer computes `(X * W_S) * W_D`:
   first a dense product, then a sparse one. Only the small `W_D` is fetched
   for each layer.
2. **Compression.** `W_S` is stored as 4-bit indices into a 16-entry table of
   non-uniform levels. Each non-zero of `W_D` is stored as a 5-bit difference
   from the previous row index, plus a 6-bit uniformly quantized value.
   Columns need no pointer because every column has the same number of
   non-zeros.
3. **Dynamic batching.** The hardware is sized for 128-token inputs. An input
   of at most 64 (32) tokens is processed together with one (three) others.
   Every weight fetched is then used two (four) times, and the cores stay busy.

A fourth idea keeps the MAC arrays fed. The core buffers are *two-direction
register files* (TRFs): square register arrays that can be written and read by
row or by column. A matrix can arrive row by row and leave column by column,
with no extra memory passes.

This repository gives synthesizable RTL for the datapath, the buffers and a
command-driven controller, together with self-checking testbenches. The
chip's RISC-V control core and I/O interface are not included. The top level
takes their place with a command port and an external-memory port.

## Block map

```
              ext memory port                    command port (cmd_t)
                     |                                   |
                  +-----+                         +-------------+
                  | dma |                         |  trex_ctrl  |--- rel_addr_gen
                  +-----+                         +-------------+
                     | port 0                       | port 1 | starts / loads / reads
              +-----------------+                   |        |
              |  global_buffer  |-------------------+        |
              +-----------------+                            |
        +----------------+----------------+------------------+----------------+
   4 x dmm_core                     4 x smm_core                      2 x afu
   (nu_dequant, 3 TRFs,             (uniform_dequant, line buffer,    (exp / GELU LUTs,
    4x4 dmm_pe of 4x4 mac_unit)      TRFs, 8x8 mac_unit, bias)         64 lanes, int2bf/bf2int)
                                   batch_ctrl: input length -> batch mode, core assignment
```

| File | Role |
|---|---|
| `trex_pkg.sv` | precision, batch mode, AFU operation and command types; global-buffer map |
| `mac_unit.sv` | 4b x 4b digit-serial MAC with a 32b accumulator |
| `digit_seq.sv` | shared schedule of digit pairs for one multi-cycle MAC step |
| `dmm_pe.sv` | 4x4 MACs computing a 4x4 outer product |
| `trf.sv` | two-direction accessible register file |
| `nu_dequant.sv` | 16-level LUT dequantizer for `W_S` |
| `dmm_core.sv` | dense 16x16-tile matrix-multiply core |
| `uniform_dequant.sv` | 6b to 16b dequantizer for the `W_D` values |
| `rel_addr_gen.sv` | turns delta-encoded indices into addresses |
| `smm_core.sv` | sparse matrix-multiply core, 8x8 MACs |
| `afu.sv`, `int2bf.sv`, `bf2int.sv` | softmax, layer normalization, GELU, residual add, BF16 conversion |
| `batch_ctrl.sv` | dynamic-batching decision |
| `global_buffer.sv` | 1280 kB on-chip memory, two ports |
| `dma.sv` | external memory <-> global buffer copies |
| `trex_ctrl.sv` | executes commands; all data movement goes through the global buffer |
| `trex_top.sv` | top level |

## Digit-serial MACs: one 4-bit multiplier for 4, 8 and 16-bit data

Every MAC unit in the design, in both the dense and the sparse cores, has a
4-bit by 4-bit multiplier and a 32-bit accumulator. Wider operands are split
into 4-bit digits, `a = sum_i a_i * 16^i`. The product `a*b` is the sum of the
`D*D` digit products `a_i*b_j`, each weighted by `16^(i+j)`. One digit pair is
processed per cycle. A 16-bit product (D=4) therefore takes 16 cycles, an 8-bit
product 4 cycles and a 4-bit product 1 cycle. Throughput is four times higher
at 8 bits, and sixteen times higher at 4 bits, than at 16 bits.

Inside `mac_unit`, the product of the two digits is shifted left by
`4*(i+j)` bits before it is added. Each digit product therefore carries its own
weight, so:

* the order of the digit pairs does not matter;
* products from different K steps can share one accumulator.

Signed numbers work as follows. Only the most significant digit of a
two's-complement operand is negative. The caller raises `sgn1`/`sgn2` for that
digit, and the unit sign-extends that digit to 5 bits. The multiplier is
therefore really 5b x 5b. In 4-bit and 8-bit mode, the operand sits in the low
4 or 8 bits of a 16-bit lane. `digit_seq` produces the schedule (`di`, `dj`,
the sign flags, the shift and `last`). One `digit_seq` drives all the MACs of
a core.

## Dense core: `X * W_S` as 16x16 outer products

`dmm_core` multiplies a 16x16 tile of `X` by a 16x16 tile of `W_S` as 16 outer
products. At K step `k` it reads:

* column `k` of `X` from the input TRF;
* row `k` of `W_S` from the input-or-parameter TRF.

The 16 PEs each take a 4-element slice of both vectors. Together they update
all 256 partial sums. If `b_deq=1`, the low 4 bits of every `W_S` entry are a
code, and the LUT dequantizer turns it into a 16-bit level. The LUT can be
reloaded, because encoder and decoder, and attention and feed-forward layers,
each have their own `W_S` and their own levels. If `b_deq=0`, the second
buffer holds ordinary activations, as for `Q*K^T`.

Timing of a run:

* **Compute:** `k_len*D*D` cycles.
* **Drain:** 16 cycles. The accumulator copies the 16x16 sums into the 32-bit
  output TRF, one column per cycle. With `acc=1` it adds them to what the TRF
  already holds, so that longer K dimensions can be built from several tiles.
* **Done:** `done` is raised `k_len*D*D + 17` cycles after `start`.

`Y` is written column-wise, because the sparse core consumes it by columns.
Reading the output TRF gives a 16-bit value: an arithmetic right shift by
`o_shift`, then saturation to 16 bits. The read works in either direction.

## Sparse core: only the non-zeros of `W_D`

Column `c` of `Z = Y * W_D` is a weighted sum of the columns of `Y` that the
non-zeros of column `c` of `W_D` select. `smm_core` handles up to 8 non-zeros
(one *group*) at a time.

**Loading a group.**

* Non-zero `k` goes into slot `k` of the line buffer. Its 6-bit code is
  dequantized on the way in:
  `value = ((code * (M-m)) >>> 5) + sign(code) * m`, saturated to 16 bits.
  During training, `W_D` was shifted toward zero by its smallest magnitude
  `m`, and quantized over the range `[m, M]`. This formula undoes that shift.
* The input vector that non-zero `k` selects goes into line `k` of the 8x8
  input TRF. That vector is 8 rows of one column of `Y`.

**Multiplying.** MAC `(r, k)` multiplies element `r` of line `k` by non-zero
`k`. All 64 MACs run in parallel for `D*D` cycles.

**Finishing.** The accumulator adds the 8 MACs of each row, and the post-bias
adder adds the bias. The result is shifted, saturated and written as one line
of the 8x8 output TRF.

A column with more than 8 non-zeros is processed as several groups. Only the
first group clears the MACs (`clr`), and only the last one finishes (`fin`).

**Finding the inputs without decoding the indices.** The row indices are stored
as 5-bit deltas; the first delta of a column is taken from 0. `rel_addr_gen`
holds a current-address register. Each delta is added to it, and the sum
addresses the global-buffer word of the matching `Y` column directly. Example
from the paper: indices 5, 12, 18, 26, 32 are stored as 5, 7, 6, 8, 6. For
small deltas, the columns of `W_S` and the rows of `W_D` are reordered during
training; the product stays the same.

**Row and column products.** The same array computes a *row* product when the
sparse matrix is on the left, with `row_mode=1`. In that case:

* a line of the input TRF holds a row of the dense right-hand matrix;
* the result is one row of the output;
* the bias is added per element (`bias_base + r`) instead of once per output
  column;
* the result is written into the output TRF as a row instead of a column.

The input TRF can also be filled in either direction (`in_dir`). All lines of
one group must use the same direction.

`done` is raised `D*D+1` cycles after `start`, or `D*D+2` cycles with `fin`.

## Two-direction register files

`trf` is an `N x N` array of registers with one write port and one read port.
Each port has a direction bit: 0 selects row `addr`, 1 selects column `addr`.
Reads are combinational. A second output, `q`, exposes the whole array, for
the sparse core, whose 64 MACs read all cells at once. In the dense core:

* `X` is written row by row, as it comes from memory, and read column by
  column;
* `W_S` is read row by row;
* results are written column by column and can be read out in either
  direction.

## Dynamic batching

`batch_ctrl` maps the current input length to a batch mode:

| Input length | Batch mode | Cores per input |
|---|---|---|
| 65 to 128 | one input (`NB_1`) | all four cores share it |
| 33 to 64 | two inputs (`NB_2`) | cores 0-1 and 2-3 |
| 1 to 32 | four inputs (`NB_4`) | one core each |

It also reports which input each DMM/SMM core pair serves and which part of
that input's work it takes. When several SMM cores work on one input, their
partial results must be added. Like all data movement, this goes through the
global buffer, using the AFU's residual addition. The host reads the
assignment from the top-level outputs `core_input`/`core_part` and issues
per-core commands to match.

Inside the AFU, batching changes how the softmax is computed. A 128-position
row is split into four quarters of 32 positions, and each quarter has its own
max and sum unit. A combining tree then joins the quarters that belong to the
same input: all four (`NB_1`), pairs (`NB_2`) or none (`NB_4`). Positions at
or beyond the input length within their input are masked out.

## Auxiliary function unit

`afu` holds a row of 128 32-bit values in buffer A, plus buffer B for the
second operand of an addition or the layer-norm `gamma`/`beta`. It
processes 64 lanes per cycle, so a pass over the row takes 2 cycles.

**Softmax** makes three passes, and `done` comes after 7 cycles:

1. Maximum of each input.
2. `e = EXP_LUT[min(255, (max - x) >> in_shift)]`, and the sum of `e` for
   each input.
3. Four dividers, one per quarter, form `floor(2^32 / sum)`. Each lane then
   outputs `min(65535, (e * recip) >> 16)`: an unsigned probability with 16
   fraction bits.

The other operations each take one pass, and `done` comes after 3 cycles:

* **GELU:** table lookup on `x >>> in_shift` over [-128, 127]. Above that
  range the result is `x` itself; below it, 0.
* **Residual:** saturating 32-bit `A + B`.
* **INT32 to BF16:** rounds to nearest, ties to even.
* **BF16 to INT32:** truncates toward zero and saturates.

Both LUTs (256 x 16b each) are written at run time, so any scaling of the
exponent and GELU inputs can be chosen by software.

**Layer normalization** uses the same integer lanes. It is split into three
operations, so that a hidden vector longer than one 128-value row (768 or
1024 values) can be normalized a row at a time:

1. **`LN_STAT`** adds `sum(x)`, `sum(x*x)` and the count of valid positions
   to statistics registers kept per quarter. It runs once per row of the
   vector, and `done` comes after 3 cycles.
2. **`LN_NORM`** does the rest for the row in buffer A, and `done` comes
   after 37 cycles:
   * joins the quarters of each input with the softmax tree;
   * forms `mean = sum/n` and `var = sum(x*x)/n - mean^2`;
   * clears the statistics;
   * computes `s = isqrt(var << 16)` with a restoring square root that
     takes two bits per cycle (32 cycles);
   * forms `rstd = floor(2^48 / s)`;
   * normalizes the row.
3. **`LN_APPLY`** normalizes each further row of the same vector with the
   stored mean and `rstd`, and `done` comes after 3 cycles.

Per position, the output is
`y = ((((x-mean)*rstd >>> 24) * gamma >>> 12) + (beta << 4)) >>> in_shift`,
saturated to 32 bits. `gamma` and `beta` are signed Q4.12 values, packed in
the upper and lower halves of buffer B. The normalized value before `gamma`
carries 16 fraction bits. The testbench holds it to 0.5 % of the exact real
value.

## Memory, DMA and the command set

`global_buffer` is a single word-addressed array of 40960 words of 256 bits
(1280 kB). Each word is one line of 16 16-bit values. It has two synchronous
ports with one cycle of read latency: port 0 belongs to the DMA, port 1 to the
controller. The regions, with word addresses from `trex_pkg`, are:

| Region | Word addresses | Size |
|---|---|---|
| I/O area #0 | 0 to 8191 | 256 kB |
| I/O area #1 | 8192 to 16383 | 256 kB |
| Encoder output | 16384 to 20479 | 128 kB |
| Shared `W_S` | 20480 to 32767 | 384 kB |
| Distinct `W_D` | 32768 to 40959 | 256 kB |

`dma` copies `len` words between external memory and the global buffer, one
request in flight at a time. External requests use a valid/ready handshake;
read data comes back on `ext_rsp_valid`.

`trex_ctrl` accepts one `cmd_t` when `cmd_ready` is high and runs it to the
end before it accepts the next. Every command is a copy between the global
buffer and one kind of unit, or a start of units. Cores in `unit_mask` are
loaded with the same data.

| Command | Action |
|---|---|
| `DMA_RD`, `DMA_WR` | start the DMA and wait |
| `DMM_LDA`, `DMM_LDB` | 16 words into the input buffer or the input-or-parameter buffer, in direction `dir`. With `flag_c`, B receives 4b codes packed 64 per word. |
| `DMM_LUT` | one word = 16 dequantizer levels |
| `DMM_RUN` | K steps = `len`, `prec`; `flag_a` accumulate; `flag_b` dequantize |
| `DMM_ST` | 16 output lines (direction `dir`, right shift `shift`) to 16 words |
| `SMM_BIAS` | 16 biases to entries `sel..sel+15`; with `flag_b`, the scale and offset |
| `SMM_COL` | one group of non-zeros (details below) |
| `SMM_ST` | 8 output lines (low half of each word) |
| `AFU_LD` | 8 words (128 values) into buffer A, or into B if `flag_a`. With `flag_b`, only the upper 16 bits of each lane are written, for `gamma` above `beta` or for 32-bit values. |
| `AFU_LUT` | 256 LUT entries from 16 words (exp, or GELU if `flag_b`) |
| `AFU_RUN` | operation `sel[2:0]`, shift `sub` |
| `AFU_ST` | 8 words, low 16 bits of each lane |
| `SET_LEN` | current input length; this sets the batch mode |

`SMM_COL` works as follows:

* The word at `gb_addr` holds 8 slots of `{delta[10:6], code[5:0]}`, and
  `len` gives the number of valid slots.
* The input vector for index `x` is half `sub[0]` of word `gb_addr2 + x`.
* `flag_a` starts a new column (clears the MACs and resets the address
  register), `flag_b` finishes, and `flag_c` selects row-product mode.
* `sel` is the bias base and `sub[3:1]` is the output line.

Loading `N` lines takes `N+1` cycles.

## Sizes

| Parameter | Value | Paper |
|---|---|---|
| DMM cores / SMM cores / AFUs | 4 / 4 / 2 | same |
| PEs per DMM core, MACs per PE | 4x4, 4x4 | same |
| DMM tile | 16x16 | same |
| SMM MACs | 8x8 | same |
| MAC | 4b multiplier, 32b accumulator, 16/4/1 cycles at 16/8/4 bit | same |
| `W_S` code / levels / dequantized width | 4b / 16 / 16b | same |
| `W_D` index delta / value code | 5b / 6b | same |
| Maximum input length | 128 | same |
| AFU integer lanes | 64 | same ("64 IAUs") |
| Global buffer | 1280 kB, 256b words | 1,320 kB on-chip memory in total; split not given |
| SMM bias buffer | 256 x 32b | not given |

## What follows the paper and what does not

Taken from the paper:

* the block structure and the unit counts;
* the MAC organization;
* the outer-product dense cores with LUT dequantization;
* the sparse cores, with line buffer, uniform dequantizer, bias buffer,
  post-bias adder and row/column switching;
* relative addressing through a current-address register in the top control;
* the TRF-based buffers and the access direction of each matrix;
* the batching thresholds and core assignment;
* the AFU's exponential and GELU LUTs and its four sum units and dividers
  joined by batch mode;
* the BF16/INT32 converters;
* all data movement going through memory.

Choices made for this RTL, where the paper is silent:

* signed-digit handling, and placing the 4-bit shifter on the product;
* all handshakes and the command set;
* the global-buffer word width, ports and region sizes;
* the bit formats of the packed `W_S` codes and `W_D` slots;
* the fixed-point step of the `W_D` dequantizer (`>>> 5`);
* output rescaling by shift and saturation;
* the softmax arithmetic (max subtraction, LUT indexing, reciprocal);
* GELU range handling;
* the whole layer-normalization recipe: statistics gathered over several
  rows, integer square root, and gamma/beta packing;
* rounding in the converters;
* resets to zero.

Not built:

* **The RISC-V controller and its firmware.** The command port replaces them,
  so a layer's schedule (which tiles go where, when batched results are added)
  is up to the host.
* **The I/O interface.** The external-memory port replaces it.
* **The AFU's 16 floating-point units.** The paper names them but does not
  say what they compute. Layer normalization, which the paper lists among
  the AFU's operations, is therefore built in integer arithmetic on the
  64 lanes.
* **SRAM macros.** The global buffer is an array; a chip would use SRAM macros.
* **Bit accuracy against trained T-REX models.** No trained weights are
  available, so none is claimed.

Two differences of detail:

* The paper's figure labels the dequantizer output `8b x 16`, while its text
  says 16-bit integers. This RTL uses 16 bits.
* The global buffer has no banking, so all units share one compute-side port.
  The chip's throughput figures therefore cannot be reproduced cycle for cycle.

## Fit of the evaluated models

The paper evaluates ViT-Base, RD-NMT, S2T-Medium and BERT-Large, with at most
128 tokens. 128 tokens matches the built maximum length, and each input length
maps to one of the three batch modes.

After compression, the models take 6.65, 3.04, 5.16 and 37.9 MB. The paper
does not say how much of this is `W_S` and how much is the per-layer `W_D`,
so whether a layer's `W_D` fits the 256 kB distinct region cannot be decided
in general. BERT-Large averages more than 1.5 MB per layer (assuming 24 layers,
which is not taken from the paper), more than the whole global buffer, so its
layers must be streamed in parts. The commands allow this, because `SMM_COL`
reads one group of non-zeros at a time from any address.

## Simulation

Every module has a self-checking testbench in `tb/`. Each testbench ends by
printing `TB_RESULT checks=N failures=M`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/trex_pkg.sv tb/tb_dmm_core.sv \
          --top-module tb_dmm_core -o sim && ./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_mac_unit` | signed products at 4/8/16 bits; cycles per product |
| `tb_dmm_pe` | accumulated 4x4 outer products |
| `tb_trf` | random row and column writes and reads against a model |
| `tb_nu_dequant` | LUT reloads and lookups |
| `tb_dmm_core` | 16b activations, 8b with dequantized `W_S`, 4b accumulated onto an earlier result; latency `K*D*D+17` |
| `tb_uniform_dequant` | all 64 codes for random scales and offsets |
| `tb_rel_addr_gen` | random delta-encoded columns, including the paper's example |
| `tb_smm_core` | a two-group column product with bias, an 8-bit row product; latencies |
| `tb_afu` | softmax in all three batch modes, GELU, residual, both converters, layer normalization over two rows of a two-input batch and against real arithmetic |
| `tb_int2bf` | both converters against real-number references |
| `tb_batch_ctrl` | every length from 0 to 255 |
| `tb_global_buffer` | both ports against a model |
| `tb_dma` | transfers against a memory model with random stalls and latency |
| `tb_trex_top` | the full-size design end to end (below) |
| `tb_trex_batch` | dynamic batching on all four DMM cores (below) |

`tb_trex_top` runs the full-size design end to end, with an external memory
model. The DMA brings in `X`, the packed `W_S` codes, the LUT, the `W_D`
non-zeros (10 per column), the biases and the AFU tables. Then:

1. DMM core 0 computes `Y = X * W_S` as two accumulated K tiles at 8 bits,
   and stores `Y` by columns.
2. SMM cores 0 and 1 compute `Z = Y * W_D` by column products, in two groups
   per column. SMM core 2 runs the same non-zeros as row products.
3. The AFUs compute softmax at lengths 100, 50 and 20 (all three batch
   modes), GELU, a residual addition and a layer normalization. The
   layer normalization gets `gamma` and `beta` through two 16-bit loads.
4. The DMA writes everything back.

The testbench compares the results with its own model. It also counts each
mechanism (dequantization, accumulation, both product modes, multi-group
columns, relative addressing, each batch mode, both store directions, both DMA
directions, layer normalization), and any mechanism that never occurs
counts as a failure. The run takes about 4,400 cycles; compiling the testbench takes most of the wall time.

`tb_trex_batch` runs the dense half of a layer, `Y = X * deq(W_S)`, on a
128-slot token buffer. It runs three input lengths:

* 128: one input;
* 50: two inputs;
* 20: four inputs.

For each length, the host reads the batch mode and the core assignment from
the top. It loads `W_S` into all four DMM cores once, and gives each core the
16-row tiles of its input. Tiles without a valid token are skipped. Every
round starts all four cores together, and all outputs are checked, including
the zero padding rows.

The same four 20-token inputs are also run one at a time, reloading `W_S`
for each. That schedule leaves two cores idle and takes 724 cycles, against
494 cycles batched. The testbench requires the batched schedule to be faster.
