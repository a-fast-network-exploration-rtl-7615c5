# A keyword-spotting CNN accelerator with output-channel tiling

This is a small FPGA-class accelerator for keyword spotting. Its job is to decide which of
30 spoken keywords ("up", "down", "left", ...) a one-second audio clip contains. Software
turns the clip into a 44 x 13 MFCC spectrum, which is 44 frames of 13 cepstral coefficients.
The accelerator then runs a compact CNN on that spectrum in low-precision fixed point and
returns 30 class scores.

The network comes in a family `NN<q, s>`:
- `q` is the bit width of every weight and activation.
- `s` scales the number of filters in every layer.

The hardware scales with the network. It is an array of `P` processing engines (PEs), each
with `M` multipliers. Parallelism comes from **output-channel tiling**:
- Every PE computes a different output channel of the same output pixel.
- All PEs receive the same input word, which holds `M` input channels.
- The array therefore finishes `P` output channels of one pixel in `9 * ceil(Cin/M)` cycles.

With `P = 16 s`, almost every PE is busy in every layer.

The defaults are the main configuration: `q = 4`, `s = 4.5`, `P = 72`, `M = 8`.

## The network

The source network gives the kernel size, the filter counts and the layer order. Its filter
counts are 64s, 32s and 32s, with a 64s-neuron hidden layer. At `s = 4.5`:

| # | layer | input | output | weights | notes |
|---|-------|-------|--------|---------|-------|
| 0 | conv 3x3, 288 filters | 44x13x1 | 42x11x288 | 2,592 | no padding |
| 1 | max-pool 2x2 / 2 | 42x11x288 | 21x5x288 | – | |
| 2 | conv 3x3, 144 filters | 21x5x288 | 21x5x144 | 373,248 | zero padding 1 ("same") |
| 3 | max-pool 2x2 / 2 | 21x5x144 | 10x2x144 | – | odd row/column dropped |
| 4 | conv 3x3, 144 filters | 10x2x144 | 10x2x144 | 186,624 | zero padding 1 |
| 5 | max-pool 2x2 / 2 | 10x2x144 | 5x1x144 | – | |
| 6 | fully connected | 720 | 288 | 207,360 | |
| 7 | fully connected | 288 | 30 | 8,640 | no ReLU: class scores |

The total is 778,464 weights, or 389 KB at 4 bits.

The source states neither padding nor biases. Two things fixed the choices above:
- The first convolution is unpadded because the largest feature map then equals the published
  size, 3.70·q·s² KB (42·11·288 values).
- The later convolutions are padded so that three pool stages still leave a 5x1 map.

The table is not hard-coded. `build_net()` in `rtl/kws_pkg.sv` computes it at elaboration
from the top-level parameters `Q, P, M, IN_H, IN_W, F1, F2, F3, FC1, N_OUT`. So the same RTL
serves any `NN<q, s>` after re-elaboration. For each layer the function also works out:
- its channel-word counts,
- the number of output tiles,
- the weight base address,
- the right shift used for requantisation.

### Arithmetic and requantisation

Every product is a signed q-bit × signed q-bit multiply. The accumulator is wide enough that
no layer can overflow it.

At the end of an output pixel, the accumulator is processed in this order:
1. It is shifted right arithmetically by `shift_for(q, terms)`. That is
   `(q-3) + ceil(log2(terms))/2`, where `terms` is the number of products in the sum.
2. ReLU is applied, on every layer except the last.
3. The result is saturated to q bits.

There are no biases and no batch-norm folding. The source names biases only in its general
description of CNNs. This requantisation scheme is this design's own; a trained network would
bring per-layer scales of its own (see "Where this departs from the source").

## Dataflow and tiling

Consider a convolution with `Cin` input channels and `Cout` output channels.
- It runs as `tiles = ceil(Cout/P)` passes over the output map.
- In tile `t`, PE `p` computes output channel `t·P + p`.
- For each output pixel, the convolution address generator steps through 3 rows × 3 columns ×
  `ceil(Cin/M)` channel words. That is one feature word and one weight word per PE per cycle.
- The feature word is broadcast to all PEs. Each PE gets its own weight word from its own bank.
- Each PE sums its `M` products in one adder tree and adds the sum to its accumulator.

The first layer has a single input channel. Only one lane of each word is live, so it uses
1/M of the multipliers. This is the "first layer" term of the source's latency model.

A fully connected layer reuses the same array:
- The flattened input is one "pixel" of `H·W·ceil(C/M)` words.
- Each PE computes one output neuron per tile.

The flattening order is the memory order described under "Memory layout": pixel-major, then
channel words. A trained model's FC weights must be permuted to match.

Pooling does not use the PE array. The max-pool block reads the four words of each 2x2
window, one per cycle, and keeps a lane-wise signed running maximum. It writes one word per
window.

### Layer sequence and the ping-pong memories

The block diagram shows one feature-map memory and one output memory. Here they are two
identical activation memories that swap roles after every layer:
- Layer `i` reads from memory `i mod 2` and writes to the other.
- The input spectrum is loaded into memory 0.
- After eight layers the class scores end up back in memory 0.

The top control FSM has four states: idle, layer start, run and layer end. For each layer it:
1. presents the layer's entry from the table,
2. sets the multiplexers,
3. starts the address generator or the pool block,
4. waits until that engine and the PE pipeline have drained,
5. flips the memories.

## The multiplexers S1 and S2

Two multiplexers choose which address generator drives the memories and the PE array:
- **S1** carries the feature-map read address.
- **S2** carries the weight read address, together with the output pixel and tile number that
  travel with it.

Select value 1 picks the convolution generator and 0 the fully connected one, as labelled in
the block diagram. During pooling the pool block owns both activation memory ports, and
neither generator is running.

## Pipeline timing and the write-back stall

This is the part of the design that needs the most care.

An issue is one feature-word/weight-word pair, together with its flags (first, last, padding,
output pixel, tile). One issue leaves the selected generator per cycle:

| cycle | what happens |
|-------|--------------|
| t | generator issues addresses; memories are read |
| t+1 | feature word (or zeros, for a padding tap) and P weight words reach the PEs; products summed into `sum_q` |
| t+2 | `sum_q` loaded into (first word) or added to the accumulator |
| t+3 | on the pixel's last word, `res_valid`: P shifted, ReLU'd, saturated results |
| t+4 … | write-back: P/M output words written, one per cycle |

The flags travel alongside the data in a three-stage tag pipeline (`tag_a/b/c` in
`kws_accel`). An assertion checks that the tags stay aligned with the PE results.

Padding taps never reach the memory. The generator flags them, and the top substitutes a
zero word for the memory output.

**Write-back serialisation.** A pixel's P results are P·q bits wide, but the output memory
takes only one M·q-bit word per cycle.
- `out_writeback` copies the results into a shadow register and writes them out over the
  next P/M cycles.
- It skips words whose channels lie beyond `Cout`, and zeroes unused lanes of a partial last
  word.
- This frees the PE array to start the next pixel at once.

**Stall rule.** The write-back must finish before the next result arrives. The top control
therefore holds the generator on the *last* word of a pixel when either of these is true:
- a previous last word is still in flight in the PE pipeline, or
- more than `PIPE_LAT + 1` write-back words remain.

A stall freezes the generator only; nothing already issued is held. The convolutions have
`9·ceil(Cin/M)` ≥ P/M cycles per pixel, so the full-size network never stalls. Configurations
with many PEs per input word do stall, for example the reduced test build with `P = 32`,
`M = 2`. An assertion in `out_writeback` catches any overrun.

**Cycle count.** A layer costs its issue count plus a few cycles to drain the pipeline.

| layers | issues or reads |
|--------|-----------------|
| conv 0 / 2 / 4 | 16,632 / 68,040 / 6,480 issues |
| FC 6 / 7 | 360 / 36 issues |
| pool 1 / 3 / 5 | 15,120 / 1,440 / 360 reads |

The full network takes **108,569 cycles**, which is 1.09 ms at 100 MHz, with no stalls. The
`cycle_count` and `stall_count` outputs report both numbers after each run.

## Memory layout

All memories are M·q bits wide (32 bits by default) with a synchronous, one-cycle read.

**Activation memories.**
- Each is `amem_depth()` words deep: the largest feature map, 16,632 words (42·11·288/8).
- Pixel `(y, x)` of a map with `C` channels starts at word `(y·W + x)·ceil(C/M)`.
- Lane `l` of word `g` holds channel `g·M + l`, at bits `[l·q +: q]`.
- The input spectrum uses lane 0 of word `y·13 + x`. Its other lanes must be zero.

**Weight memory.**
- There are P banks, each `wmem_depth()` words deep (1,404 words by default). All banks share
  one read address.
- Output channel `co = t·P + p` lives in bank `p`, starting at `w_base + t·k_words`.
- For a convolution, `k_words = 9·ceil(Cin/M)`. Words run tap by tap, row-major over the 3x3
  window. Each word holds the M input channels of that tap, in the lane order above.
- For a fully connected layer, `k_words = H·W·ceil(C/M)`, in the activation order.
- Layers follow each other in the order 0, 2, 4, 6, 7. Their `w_base` values come from
  `build_net()`.

## Host interface (`kws_accel`)

All host accesses take place while `busy` is low.

| port | use |
|------|-----|
| `w_wr_en, w_wr_bank, w_wr_addr, w_wr_data` | write one weight word into one bank |
| `fm_wr_en, fm_wr_addr, fm_wr_data` | write the input spectrum into activation memory 0 |
| `start` | one-cycle pulse: run all eight layers |
| `busy`, `done` | running; one-cycle pulse at the end |
| `res_rd_en, res_rd_addr, res_rd_data` | read result words (one cycle latency) from the memory holding the output |
| `cycle_count`, `stall_count` | length of the last run and its stalled cycles |

Results: class `k` is lane `k mod M` of word `k / M`. The values are signed q-bit scores, and
the largest marks the keyword.

## Files

| file | content |
|------|---------|
| `rtl/kws_pkg.sv` | types, layer-table functions (`build_net`, `wmem_depth`, `amem_depth`, `shift_for`) |
| `rtl/mac_pe.sv` | one PE: M multipliers, adder tree, accumulator, requantisation |
| `rtl/pe_array.sv` | P PEs sharing one feature word |
| `rtl/weight_memory.sv` | P weight banks, common read address |
| `rtl/act_memory.sv` | activation memory (used twice, as feature-map and output memory) |
| `rtl/conv_addr_gen.sv` | convolution address generator with zero-padding flags |
| `rtl/fc_addr_gen.sv` | fully connected address generator |
| `rtl/maxpool_unit.sv` | 2x2 max-pool block with comparator |
| `rtl/out_writeback.sv` | serialises a PE-array result into output-memory words |
| `rtl/top_control.sv` | layer sequencer, multiplexer selects, memory swap, stall rule, counters |
| `rtl/kws_accel.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_kws_accel.sv` | end-to-end test at reduced size (P = 32, M = 2, 12x13 input) |
| `tb/tb_kws_accel_full.sv` | end-to-end test at the default, full size |
| `tb/tb_kws_workloads.sv`, `tb/kws_workload_run.sv` | end-to-end tests of the other eleven evaluated sizes of the family, run side by side |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and ends. A watchdog stops a hung
run. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/kws_pkg.sv rtl/*.sv tb/tb_kws_accel.sv --top-module tb_kws_accel
./obj_dir/Vtb_kws_accel
```

Replace `tb_kws_accel` with any other testbench name.

The end-to-end testbenches do the following:
- They fill the weights and the input with random data.
- They compute the whole network in an integer reference model, built from the same layer
  table.
- They compare every class score.
- They check the issue count and the run length.
- They count how often each mechanism occurred: padding taps, pool windows, FC issues, tiles
  beyond the first, skipped write-back words, memory swaps, and (in the reduced build) stalls.

The full-size run needs about a second of simulation time once compiled. To try another
`NN<q, s>`, override the top's parameters, for example
`Q=8, P=32, F1=128, F2=64, F3=64, FC1=128` for `q = 8, s = 2`.

`tb_kws_workloads` does exactly that for the other sizes the family was evaluated at:
- `q = 4` with `s = 1, 2, 2.5, 3.5, 4`
- `q = 8` with `s = 1, 2, 2.5, 3, 3.5, 4`

Each size uses `P = 16 s`. Each size is one full inference, checked against the reference
model. To build it, add `tb/kws_workload_run.sv` before the testbench file on the command
line. The runs take these cycle counts at 100 MHz, and no size stalls:

| s | cycles | time |
|---|--------|------|
| 1 | 37,114 | 0.37 ms |
| 2 | 57,524 | 0.58 ms |
| 2.5 | 67,733 | 0.68 ms |
| 3 | 77,942 | 0.78 ms |
| 3.5 | 88,151 | 0.88 ms |
| 4 | 98,360 | 0.98 ms |
| 4.5 | 108,569 | 1.09 ms |

These counts do not depend on `q`. The time grows linearly in `s`, as the source's latency
model `s + C` predicts.

## How far it can be trusted

- Every module passes its own randomised self-checking testbench. Each testbench was also
  shown to fail against a deliberately broken copy of its module.
- The whole accelerator matches a bit-exact reference model at full size and at a reduced
  size that exercises stalls and partial words.
- The code compiles cleanly with Verilator and with the slang front end of Yosys.
- It has not been synthesised for a real FPGA. Nothing is known about its timing closure or
  resource use.
- The reference model was written from the same layer table as the RTL. It therefore checks
  the datapath and control, not the choices in the table: padding, shifts and memory order.

## Where this departs from the source

- **Not included:** the MFCC front end runs in software (librosa) and has no hardware here.
  The energy and accuracy regression models are offline analysis, not hardware.
- **Padding and biases** are not specified by the source and were chosen as described above.
  The resulting model is 389 KB of 4-bit weights. The source reports 340 KB, so its exact
  layer shapes must differ somewhat.
- **Requantisation** (shift, ReLU, saturate) is a fixed rule from the layer size, not trained
  scales.
- **Two activation memories** in ping-pong replace the diagram's separate feature-map and
  output memories, which lets all layers run back to back.
- **Memory sizes.** The source's memory formulas divide the feature-map size by P. Here every
  activation memory holds a whole map, which the broadcast dataflow needs. The weight bank
  depth (1,404 words) is computed from the network. It differs slightly from the source's
  estimate, which corresponds to about 1,351 words.
- **Write-back serialiser and stall rule** are this design's own. The source names the output
  memory but not how P results reach it.
- **Max-pool block.** The source describes it as sorting the window with a comparator. Here it
  keeps a running maximum, which gives the same result.
- **Latency.** Here it is 108,569 cycles (1.09 ms at 100 MHz). The source reports 0.70 ms for
  the same configuration. The source does not give enough of its schedule (overlap of pooling
  with convolution, or more work per cycle in the first layer) to match it.
- **Data width** runs from 2 to 32 bits through `Q`, as in the source. Only `q = 4` and
  `q = 8` were simulated end to end.
