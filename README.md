# A bit-wise processing-in-memory engine for pruned, quantized CNN layers

This is synthesizable SystemVerilog for a processing-in-memory (PIM) engine built
from SOT-MRAM sub-arrays, following the engine described in "A SOT-MRAM-based
Processing-In-Memory Engine for Highly Compressed DNN Implementation" (Yuan, Ma,
Lin, Li, Ding). The RTL is an independent rendering of that description. The
authors did not write it.

The engine computes the multiply-accumulates of a convolution layer inside
memory. It never multiplies two numbers. Each kernel's inputs and weights are
stored as bit-planes. Opening two rows at once, one input bit-plane and one
weight bit-plane, lets the sense amplifiers read the bit-wise AND of the two rows.
Counting the ones in that AND, shifting the count, and adding it up gives the dot
product:

    I*W = sum_{m=0}^{M-1} sum_{n=0}^{N-1} 2^(m+n) * bitcount( c_m(I) AND c_n(W) )

Here `c_m(I)` is bit m of every input under the kernel, `c_n(W)` is bit n of
every weight, and M and N are the input and weight bit-lengths.

The engine is meant to run a model that was compressed in training by structured
pruning and quantization. Each form of compression removes hardware:

| compression | effect on the engine | in this RTL |
|---|---|---|
| channel pruning (whole input channels removed) | fewer PEs | smaller `NUM_PE` |
| filter pruning (whole filters removed) | fewer weight sub-arrays per PE | smaller `NFILT` |
| kernel pruning (single (filter, channel) kernels removed) | some sub-arrays unused | marked in a LUT and skipped at run time, at no cycle cost |
| quantization to fewer bits | fewer rows per sub-array | smaller `IBITS` / `WBITS` |

## A worked example

Take a 2x2 kernel with 3-bit values: inputs `I = [1 0 4 3]` and weights
`W = [5 2 3 1]`. Each value takes one column, and bit m of every value goes in
row m, LSB first:

    input sub-array            weight sub-array
    row 0: 1 0 0 1             row 0: 1 0 1 1
    row 1: 0 0 0 1             row 1: 0 1 1 0
    row 2: 0 0 1 0             row 2: 1 0 0 0

Opening input row 0 and weight row 0 gives `1 0 0 1` AND `1 0 1 1` = `1 0 0 1`.
That has two ones and weight 2^0. Summing all nine (m, n) pairs this way gives
5 + 0 + 12 + 3 = 20. `tb/pe_checker.sv` runs exactly this case, with
`KSIZE=4` and `IBITS=WBITS=3`.

## Organisation

```
pim_engine
 ├─ kernel_lut        1 bit per (PE, filter): kernel pruned
 ├─ pim_controller    one sequencing lane per PE
 └─ pim_pe  x NUM_PE  one input channel each
     ├─ row_decoder      opens two word lines at once (input row + weight row)
     ├─ col_decoder      column enables for writes
     ├─ sot_subarray     input sub-array, IBITS x KSIZE
     ├─ sot_subarray     x NFILT weight sub-arrays, WBITS x KSIZE (one filter's kernel each)
     ├─ sense_amp_array  one sense amplifier per column, shared by all sub-arrays
     └─ computing_set    bit_counter -> shifter -> accumulator
```

Each PE handles one input channel. Its input sub-array holds the KSIZE inputs of
that channel under the current kernel window. Weight sub-array f holds filter f's
kernel for that channel. So the PE for channel c computes, for every kept filter
f, the partial dot product `sum_k x[c][k] * w[f][c][k]`. All PEs run at the same
time.

**Rows and columns.** Columns are kernel elements (`KSIZE`, 9 for a 3x3 kernel).
Rows are bits. Inside a PE the row decoder numbers all rows in one space:

- rows `0 .. IBITS-1` are the input sub-array;
- rows `IBITS + f*WBITS + n` are bit n of filter f.

Element (i, j) of a kx x ky kernel can go in any column, as long as inputs and
weights use the same column. The testbenches use column `kx*i + j`.

**How the AND is read.** `sot_subarray` models each bit line digitally. Column c
reads 1 only if every opened cell in that column stores 1, and it reads 1 when no
row is open. `sense_amp_array` ANDs the shares of all sub-arrays and latches the
result. With exactly one input row and one weight row open, the latched value is
their bit-wise AND. This stands in for the analog sensing of two MTJ cells on one
bit line. Resistances, reference levels and sensing margins are not modelled.

## Schedule and timing

For each PE, `pim_controller` steps through the kept filters in ascending order.
For each kept filter it steps through input bit m (outer loop) and weight bit n
(inner loop), issuing one operation per cycle. Each operation is a `pe_op_t`,
defined in `pim_pkg`: `valid`, `first`, `last`, `filt`, `ibit`, `wbit`.

**Skipping pruned kernels.** A priority search over the PE's LUT row finds the
next kept filter, so a pruned kernel costs no cycle. Each PE has its own lane. A
PE whose channel keeps fewer kernels goes idle early, and the engine finishes
when its busiest PE does.

**Pipeline inside a PE** (the op is issued in cycle t):

| edge | what happens |
|---|---|
| end of t | sense amplifiers latch the AND; the op tag is registered beside them |
| end of t+1 | bit-count and shift (combinational), then accumulate. On the kernel's last op, `res_valid`, `res_filt` and `res` are presented |

**Run time.** Count clock edges from the edge that samples `start` (edge 0). Then:

- `done` is high for one cycle after edge `Kmax*IBITS*WBITS + 1`, where `Kmax` is
  the largest number of kept kernels in any PE;
- the last results appear in that same cycle;
- a dense run at the defaults (16 filters, 8x8 bit pairs) takes 1025 cycles;
- keeping 4 of 16 kernels in every PE cuts a run to 257 cycles;
- if every kernel is pruned, `done` follows `start` by one cycle.

This is where the throughput gain from filter and kernel pruning comes from.

## Host interface (`pim_engine`)

| port | meaning |
|---|---|
| `wr_en, wr_pe, wr_sub, wr_row, wr_all_cols, wr_col, wr_data[KSIZE]` | Writes one row of one sub-array. `wr_sub` 0 is the input sub-array, `f+1` is filter f. `wr_row` is the bit. With `wr_all_cols`, all KSIZE columns take `wr_data`. Without it, only column `wr_col` does. One write per cycle. |
| `lut_wr_en, lut_wr_pe, lut_wr_filt, lut_wr_pruned` | Sets or clears the pruned mark of one kernel. Reset clears all marks. |
| `start`, `busy`, `done` | `start` is sampled when the engine is not busy. `done` is a one-cycle pulse. |
| `res_valid[p], res_filt[p], res[p]` | One result stream per PE, one result per kept kernel. `res` is `IBITS+WBITS+clog2(KSIZE+1)` bits wide (20 at the defaults), so it cannot overflow. |

The memories and the LUT must not be written while `busy`. An assertion flags
it, and the write is dropped. Weights are written once and stay in the array,
which is non-volatile and has no reset. For each new output position the host
rewrites only the input sub-arrays (IBITS rows per PE) and pulses `start` again.

**Adding up the channels is left to the host.** The engine returns per-channel
partial sums. The host sums them over PEs for each filter to get an output pixel.
The source design does not describe this step.

## Parameters

| parameter | default | source |
|---|---|---|
| `IBITS`, `WBITS` | 8 | 8-bit quantization, as in the evaluated configuration |
| `KSIZE` | 9 | this design's choice (3x3 kernels). The source ties the column count to the kernel size but gives no number |
| `NFILT` | 16 | this design's choice |
| `NUM_PE` | 16 | this design's choice |

The `pe_op_t` fields allow up to 256 filters and up to 16-bit operands. `pim_pe`
checks this at elaboration. After synthesis, the default engine has about 81k
word-level cells, 1.8k flip-flop bits and 19,584 memory bits
(16 PEs x 17 sub-arrays x 8 x 9).

## What follows the source and what does not

Taken from the source design:

- the bit-wise convolution equation;
- one PE per input channel, holding an input sub-array and one weight sub-array
  per filter;
- rows = bit-length, columns = kernel size;
- two rows opened per AND, with the result taken from the sense amplifiers;
- the row decoder, column decoder and computing set (bit-count, shifter,
  accumulator) in each PE;
- a controller and a LUT that marks pruned sub-arrays so they are skipped;
- PEs working in parallel and independently.

This design's own choices:

- the two-port row decoder;
- the write port and the column decoder's role in it;
- one-cycle writes. Real SOT-MRAM writes are slower, but the source gives no
  figure;
- the two-stage pipeline and the `first`/`last` framing;
- per-PE controller lanes, the loop order, and zero-cost skipping;
- the result width;
- reset behaviour (the LUT clears, the memory arrays do not reset);
- unsigned operands. The source's equation is unsigned and signed weights are
  not discussed. To handle signed data, split it into offset or
  positive/negative parts on the host.

Not built:

- the ADC that the source includes in its power and area figures. Its place in
  the datapath is not given;
- the buffers and on-chip interconnect, which are only named;
- physical removal of kernel-pruned sub-arrays, which would give PEs different
  sizes. The source offers it as an alternative to skipping. Here every PE has
  `NFILT` sub-arrays and the LUT skips the pruned ones;
- cross-channel summation;
- tiling of layers larger than the engine;
- the ADMM compression, which is offline training software.

## Fit of the evaluated networks

The layer sizes below are standard network dimensions, not figures from the
source.

- **VGG-16, ResNet-18, ResNet-50 and AlexNet** have layers with 64 to 2048
  channels and filters. The default engine holds a 16 x 16 tile of such a layer,
  with 3x3 or 1x1 kernels, per pass. Larger kernels (5x5, 7x7, 11x11) need a
  larger `KSIZE`.
- **LeNet-5** conv2 (6 -> 16 channels, 5x5) fits entirely with `KSIZE=25` and
  `NUM_PE=6`.

## Testbenches and simulation

Every testbench is self-checking and ends with
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_row_decoder`, `tb_col_decoder`, `tb_bit_counter`, `tb_shifter` | exhaustive or random checks against a reference |
| `tb_sot_subarray` | row and single-cell writes; reads of single rows and row pairs (AND) |
| `tb_sense_amp_array` | AND across sub-arrays; hold when disabled; reset |
| `tb_accumulator`, `tb_computing_set` | framed sums against `sum 2^(m+n) popcount`; one-edge latency |
| `tb_kernel_lut` | set/clear/reset of marks |
| `tb_pim_controller` | the exact op stream of every lane; skipping; a start while busy is ignored; `done` timing |
| `tb_pim_pe` (with `pe_checker`) | default-size PE and the worked example; every result and its two-edge latency |
| `tb_pim_engine` | the whole engine at its default size. Runs dense, random-pruned (one PE fully pruned), new-window and evenly pruned cases. Counts row and cell writes, skipped kernels, uneven PE finish, weight reuse and shortened runs, and fails if any of them never happened |
| `tb_lenet5_conv2` | a full LeNet-5 conv2 layer (10x10x16 outputs from 6x14x14 inputs, 40% of kernels pruned), compared with a direct convolution |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  rtl/pim_pkg.sv tb/tb_pim_engine.sv --top-module tb_pim_engine -o sim
./obj_dir/sim
```

Every run finishes in seconds. The LeNet-5 layer takes about 15 s.
