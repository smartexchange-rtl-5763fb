# A rebuild-on-chip DNN accelerator: decomposed weights, sparse rows, bit-serial MACs

Moving DNN weights from DRAM and SRAM costs far more energy than computing with
them. This accelerator therefore never stores ordinary weights. Each 3D filter of
a layer is stored in a decomposed form:

* a small **basis** matrix `B` (S x S, 8-bit entries, S = 3);
* a large, sparse **coefficient** matrix `Ce` with one row per (input channel,
  kernel row). Each non-zero entry is a signed power of two.

A kernel row is rebuilt as `W[r][x] = sum_i Ce[r][i] * B[i][x]`. Because every
coefficient is `+-2^-k`, this is a sum of shifted basis elements. Small
**rebuild engines (REs)** do it next to the multipliers, so the buffers only
hold the compact form.

Two kinds of sparsity are exploited, and both work on whole rows:

* **Coefficient rows that are all zero.** A 1-bit index per row marks them.
* **Input rows that are all zero.** These are detected when the row is written
  into the input buffer.

A row pair (input row, kernel row) is processed only if both rows are non-zero.
On top of that, the multipliers are **bit-serial**. Each activation is
radix-4 Booth recoded, and a product costs one cycle per non-zero digit
(at least one cycle).

## Array organisation

| level | count (default) | what it holds / does |
|---|---|---|
| accelerator | 1 | controller, input GB, weight-index GB, output GB, output collector |
| PE slice | `DIM_M` = 64 | one filter (output channel): weight buffer, 16 PE lines, 8 adder trees, accumulation buffer, output FIFO |
| PE line | `DIM_C` = 16 per slice | 8 bit-serial MACs, a 10-entry input FIFO (double buffered), two REs |
| MAC | `DIM_F` = 8 per line | one output pixel of a row |

This gives 64 x 16 x 8 = 8192 bit-serial multipliers. The other defaults:

* input GB: 32 banks of 16 KB;
* output GB: 2 x 2 KB;
* weight buffer: 2 x 2 KB per slice;
* 8-bit activations and basis entries, 4-bit coefficients.

All slices receive the same input rows and the same job lists. They differ
only in the filter held in their weight buffer. One input row read therefore
serves 64 filters.

## The PE line and 1D row stationary

A PE line computes 8 neighbouring outputs of one output row. It works through
a *job list* of up to S jobs. A job is one 1D convolution of an input row
segment with one rebuilt kernel row. A job takes S steps:

1. The job's input row segment (F + S - 1 = 10 activations) is in the front
   FIFO buffer.
2. In step s, the active RE produces weight `W[s]` of the kernel row. Every MAC
   multiplies that one weight by its own FIFO entry.
3. After each step the FIFO shifts by one entry. After S steps, MAC f has
   added `sum_s W[s] * I[f+s]`.

The psums stay in the MACs across all jobs of the list. In 2D CONV mode, the
jobs are the 3 kernel rows of one input channel. At the end, each MAC holds
one channel's contribution to a 2D output pixel.

**Step length.** A step lasts until every MAC has used up the non-zero Booth
digits of its activation. So the line's timing depends only on its
activations.

**Double buffering.** While the front buffer is being computed, the next
selected row is read from the input GB into the back buffer. A row read
therefore overlaps the S or more cycles of computing on the previous row.

**The two REs.** `re_act` selects the RE whose weights feed the MACs.

* The other RE can be loaded with the *next* filter's basis while this one
  computes. This is the ping-pong use that keeps basis loading off the
  critical path.
* In **cluster mode** (FC and squeeze-and-excite layers) both REs compute.
  MACs 0-3 take RE A's weight and MACs 4-7 take RE B's. RE A uses the low
  coefficient row of the slot and RE B the high one, so the two halves of the
  array compute two different outputs from the same input row.

Each RE has one load port, which selects among three sources:

* a coefficient row;
* a basis row;
* an original 8-bit weight row, for layers that were not decomposed.

An output selector bypasses the shift-and-add for original weights.

## Sparsity: job selection

Before each step, the controller forms each line's job list from the layer
geometry:

* **2D CONV:** line c of channel group g takes channel g*16 + c, and job j
  reads input row e + j.
* **Depth-wise:** line c takes kernel row c of a single channel.

For each job, the controller looks up two bits:

* the coefficient row's index bit, from the weight-index GB;
* the input row's zero flag, from the input GB.

The index selector keeps the jobs where the index bit is 1 and the zero flag is
0. A job that is dropped is neither read nor computed.

The zero flags are computed by the "==0" detector as each row is written into
the input GB. Unwritten rows read as zero.

## Sequencing (controller)

The controller runs a small program from its instruction memory
(`se_pkg::instr_t`). There are two operations.

* **`OP_BASIS`** reads S basis rows into RE A or RE B of every line of every
  slice, and makes that RE active.
* **`OP_CONV`** runs one pass. For each output row `e < n_e` and each channel
  group `g < n_g`:
  1. Read the coefficient words and the index word.
  2. Form the job lists.
  3. Start all lines, and wait until every slice reports done.
  4. Load (first group) or add (later groups) the adder-tree sums into the
     accumulation buffer.
  5. After the last group, emit the output row into the slice FIFOs, stalling
     while any FIFO is full.

  If `nb_valid` is set, the next basis is read into the idle RE while the lines
  compute. The REs swap at the end of the pass.

**Emission.** Emitted values go through optional ReLU, then an arithmetic right
shift by `shift`, then saturation to 8 bits.

**Output collection.** A round-robin collector drains the 64 slice FIFOs into
the output GB, one word per cycle. Each output row goes to address
`out_base + e*64 + m`.

**Counters.** The `cnt_*` outputs count:

* steps;
* skipped weight rows and skipped input rows;
* basis rows loaded during compute, and basis rows loaded as a stall;
* FIFO stall cycles;
* steps per mode.

### Data layout (this design's own convention)

* **Input GB:** input channel `ch` lives in bank `ch mod 32`, at row
  `in_base + (ch div 32)*h_stride + y`. One word is a 10-activation row
  segment. Activation i is in bits `[8i+7:8i]`.
* **Weight buffer:** one word is 16 slots of 24 bits, and slot c belongs to
  line c.
  * A basis word carries basis row i in slot 0, 3 bytes.
  * A coefficient word for step (g, j) sits at `wb_base + g*rows + j`. Slot c
    holds the coefficient row j of channel g*16 + c, as 3 codes of 4 bits. The
    next 12 bits hold the second row used in cluster mode.
  * A raw-weight word holds 3 signed bytes per slot.
* **Coefficient code:** `{sign, k[2:0]}` means `+-2^-k`, and `k = 7` means
  zero. The rebuilt weight is saturated to 8 bits.
* **Weight-index word** for group g: bit `c*3 + j` is set if that coefficient
  row is non-zero.

## How faithful this is

**Follows the source:**

* the slice / line / MAC hierarchy and its sizes;
* the basis register file with shift-and-add rebuilding, the three load paths
  and the bypass;
* the 1D row-stationary FIFO of F + S - 1 entries, double buffered;
* the two REs used ping-pong;
* cluster mode built from the two REs and per-MAC multiplexers;
* mapping kernel rows onto lines in depth-wise mode;
* 1-bit row indexing with zero-row detection on the inputs;
* Booth-encoded bit-serial MACs;
* the adder trees, the per-slice output FIFO and the three global buffers.

**This design's own choices**, where the source says nothing:

* the instruction set;
* all word formats and the coefficient code;
* the job-list handshake and fixed-priority bank arbitration;
* the accumulation and requantisation at emission;
* the FIFO depth (4) and the index-buffer depth (512 words);
* running all slices in lockstep, with slice 0's read requests serving all of
  them.

**Limits:**

* Kernel width is fixed at S = 3, and only stride 1 without dilation is
  computed. 7x7 and 5x5 kernels and atrous convolution are not supported.
  Strided layers can be computed at stride 1 and subsampled.
* In depth-wise mode every slice sees the same channel, so the slices compute
  different filters of one channel.
* DMA, DRAM and the host compiler are outside the RTL. The top exposes the
  buffer fill and read ports they would drive.

## Files

* `rtl/se_pkg.sv`: sizes, enums, the instruction format and saturation helpers.
* Datapath: `rebuild_engine`, `booth_encoder`, `mac`, `pe_line`, `adder_tree`,
  `out_fifo`, `pe_slice`.
* Buffers: `input_gb`, `weight_buffer`, `widx_gb`, `output_gb`.
* Control: `index_sel`, `controller`.
* Top: `se_accel`.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/se_accel_env.svh`: the shared end-to-end environment. It holds buffer
  images, a reference model of whole programs, and an output comparison.
* `tb/tb_se_accel.sv`: a six-pass program at 16 slices x 4 lines x 4 banks:
  * 2D CONV with accumulation over groups and basis prefetch;
  * original weights;
  * a pass on the prefetched basis;
  * cluster mode;
  * depth-wise mode with bank conflicts;
  * a zero-input run that fills the output FIFOs.

  Every output word is checked. It also fails if any of these never happens:
  weight-row skip, input-row skip, basis overlap, RE swap, raw steps, cluster
  steps, depth-wise steps, FIFO stall, accumulation, multi-cycle and
  single-cycle bit-serial steps, row prefetch, bank conflict.
* `tb/tb_se_accel_full.sv`: the top at full default size, running one basis
  load and a 2-row CONV pass with all 128 outputs checked.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Itb -y rtl rtl/se_pkg.sv tb/tb_se_accel.sv --top-module tb_se_accel -Mdir obj -o sim && obj/sim
```

The full-size top contains 1024 PE lines. It takes several minutes to compile.
