# Frequency-compensated weight memory packing for dataflow CNN accelerators

A dataflow CNN accelerator gives every layer its own compute engine and keeps
every layer's weights on chip, next to that engine. Each engine has several
processing elements (PEs), and each PE reads one weight word every clock
cycle, so every PE gets its own weight buffer in its own block RAM. In
practice these buffers are a poor fit for the RAMs. A buffer that is 16 bits
wide and 256 words deep uses a quarter of an 18-bit x 1024-word RAM. For
large networks such as a binarized ResNet-50, on-chip memory rather than
logic then limits the design.

The idea here is to put several buffers into one RAM and to clock that RAM
faster than the compute logic. A two-port RAM does two reads per memory
clock. Clock it at R_F times the compute clock and it can supply 2·R_F buffers
at one word per compute cycle each:

| bin height (buffers per RAM) | memory clock / compute clock |
|---|---|
| 2 | 1 (ordinary, unpacked) |
| 3 | 1.5 |
| 4 | 2 |

To make this work, the weight memory has to live in a clock domain of its
own. Each layer is split into two islands, a design style called GALS
(globally asynchronous, locally synchronous):

- a **memory island** on the fast memory clock, which reads the packed RAMs
  and emits a stream of weights;
- a **compute island** on the compute clock, which runs the
  matrix-vector-activation unit (MVAU) and consumes that stream.

An asynchronous FIFO connects the two islands.

This repository holds the SystemVerilog for that scheme. It contains the
packed weight streamers for both the integer (R_F = 2) and fractional
(R_F = 1.5) cases, and the GALS MVAU layer built from them. These are used
in a residual block (ResBlock) datapath of a quantized ResNet-50.

## The packed streamer (bin height 4, R_F = 2)

`packed_streamer` wraps one RAM (`tdp_bram`, 18 x 1024 by default). It holds
four buffers of 256 words each, stacked at addresses 0, 256, 512 and 768:

- buffers 0 and 1 are read through port B;
- buffers 2 and 3 are read through port A;
- each buffer has a small output FIFO (`stream_fifo`, 4 deep).

On every memory clock each port's address generator does the following:

1. It picks its next buffer in round-robin order and reads that buffer's
   next word.
2. The word arrives one cycle later and is pushed into that buffer's FIFO.
3. A buffer whose FIFO is almost full (3 of 4 entries) is skipped. Its slot
   goes to the next buffer on the same port that can take a word. This is
   **adaptive slot allocation**, and the `slot_redistributed` output pulses
   when it happens.
4. Each buffer is read cyclically: after its last word it starts again at the
   first. The MVAU uses the same weights for every input vector.

Why the almost-full level is 3 of 4: a read takes one cycle to land, and a
buffer is picked at most once per cycle. So at most one word can be in flight
when the flag rises, and it still has room.

The configuration is set by the parameters `BUF_BASE`, `BUF_LEN` and
`BUF_PORT`. Any even number of buffers can be split over the two ports.

Weights are loaded before `run` is raised. Loading uses raw RAM writes
through port A (`cfg_*`), so the loader must know the layout.

## The fractional streamer (bin height 3, R_F = 1.5)

Three buffers cannot be split evenly over two ports. `fractional_streamer`
solves this by storing buffer 1 as two halves on different ports:

| RAM range | content | port |
|---|---|---|
| 0 .. LEN-1 | buffer 0 | B |
| LEN .. LEN+LEN/2-1 | odd words of buffer 1 | B |
| LEN+LEN/2 .. 2·LEN-1 | even words of buffer 1 | A |
| 2·LEN .. 3·LEN-1 | buffer 2 | A |

Word k of buffer 1 is stored at `LEN + k/2` if k is odd, and at
`LEN + LEN/2 + k/2` if k is even. `LEN` must be even. The default is 340,
so 3·340 = 1020 words of the 1024 are used.

This gives each port a demand of exactly one read per memory cycle:

- buffer 0 or 2 needs 2/3 of a read per memory cycle;
- each half of buffer 1 needs 1/3.

Plain round robin would give buffer 0 only half of port B's slots. Full
rate therefore depends on the adaptive allocation: the half-rate buffer's
FIFO fills up, raises almost-full, and hands its surplus slots to buffer 0.

After the RAM, buffer 1 is put back together in two steps:

1. `axis_combiner` pairs one EVEN word with one ODD word.
2. `dwc_2to1`, a 2:1 width converter, emits the pair as word 2k, then
   word 2k+1.

Inside, the fractional streamer reuses `packed_streamer`. It sets up four
physical buffers of lengths LEN, LEN/2, LEN/2 and LEN.

## The GALS MVAU layer

`gals_mvau` is one convolution layer, built as a chain of three parts.

- **`stream_generator`, on `clk_mem`:**
  - It holds PE buffers, BIN_HEIGHT of them per RAM. With bin height 3 it
    uses `fractional_streamer`; otherwise it uses `packed_streamer`.
  - Buffer p holds the weights of PE p in the order they are used: for each
    neuron fold nf, then each synapse fold sf, it stores
    `W[nf*PE + p][sf*SIMD +: SIMD]`.
  - It merges the per-PE streams into one wide beat per compute step. A beat
    is sent when every PE stream has a word.
- **`async_fifo`:** a dual-clock FIFO using Gray-code pointers and two-flop
  synchronizers, 16 deep.
- **`mvau_stream`, on `clk_c`:**
  - It takes a whole input vector (MW activations) per beat.
  - For each neuron fold it accumulates MW/SIMD weight beats. The beat is cut
    into per-PE words by plain slicing, which plays the role of a stream
    splitter.
  - PE p computes output row nf*PE + p.
  - After the last fold it applies per-row multi-thresholds. The output is
    (number of thresholds reached) − 2^(OBITS−1), a signed value.
  - One input vector takes NF·SF fold cycles plus one cycle to hand over the
    result, where NF = MH/PE and SF = MW/SIMD.

Binary weights are encoded as bit 1 = +1 and bit 0 = −1. With `WBITS = 2`,
a weight is a two's-complement value, which covers ternary weights.

With the memory clock at R_F = BIN_HEIGHT/2 times the compute clock, the
MVAU never waits for weights in steady state. The testbench checks this
cycle by cycle in both configurations: bin height 4 at R_F = 2, and bin
height 3 at R_F = 1.5.

## The residual block (top: `fcmp_resblock`)

`fcmp_resblock` is a ResNet-50 identity ("type B") bottleneck block. It
processes one pixel per beat, and a pixel is a vector of 4-bit channel
values.

```
in (C x 4b) -> stream_duplicator -+-> bypass FIFO (8 pixels) --------------------+
                                  |                                              v
                                  +-> thresholding (4b->2b) -> conv1 1x1 C->M -> conv2 1x1 M->C (4b) -> eltwise_add -> out
```

With `TYPE_A = 1` the block takes the form used where the channel count
changes (C in, `C_OUT` out). The input is requantized first, and the bypass
path gets its own 1x1 convolution:

```
in -> thresholding (4b->2b) -> stream_duplicator -+-> bypass FIFO -> convB 1x1 C->C_OUT (4b) ---+
                                                  |                                              v
                                                  +-> conv1 1x1 C->M -> conv2 1x1 M->C_OUT (4b) -> eltwise_add -> out
```

In this form the slowest convolution sets the pixel rate.

Defaults:

| parameter | value |
|---|---|
| C (channels in and out) | 256 |
| M (middle channels) | 64 |
| PE | 4 |
| SIMD | 16 |
| weights | binary |

At these defaults, each convolution's weights (256 x 64 bits) fill exactly
one 16 x 1024 RAM at bin height 4.

Each convolution is a `gals_mvau` with its own weight RAM on `clk_mem`. Set
`clk_mem` to at least twice `clk_c`.

The adder saturates to the signed 4-bit range. Both branches use the same
scale, so the add is a plain integer add.

Steady-state throughput is one pixel every 257 compute cycles. The two
convolutions work on successive pixels at the same time.

Ports:

- `in_*` / `out_*`: AXI-Stream style valid/ready, channel c at
  `[c*4 +: 4]`.
- `wcfg_*`: loads weight RAMs on `clk_mem`.
  - `wcfg_layer`: 0 = conv1, 1 = conv2, 2 = convB (type A).
  - `wcfg_addr`: the raw RAM address, using the layout above.
- `thr_*`: loads thresholds on `clk_c`.
  - `thr_unit`: 0 = input thresholding, 1 = conv1, 2 = conv2, 3 = convB.
- `run`: starts the weight streamers.

## Where this departs from the original design

- **No 3x3 convolution.** A real bottleneck block is 1x1 → 3x3 → 1x1. The
  3x3 layer needs a sliding-window (im2col) generator with line buffers, and
  that generator is not part of this design. The block here is therefore
  1x1 → 1x1. With only 1x1 layers, the bypass FIFO never needs more than a
  few pixels. A 3x3 layer would need it to hold several image rows.
- **One block, not the network.** Both block types are built, but only
  one block at a time. The rest of the network is not built: the stem and
  classifier layers, the chain of 16 blocks across the chip, DMA, and clock
  generation. The two clocks are top-level inputs. Type A blocks that
  downsample (stride 2) are not modelled.
- **Whole vectors per beat.** The MVAU takes and produces whole vectors per
  beat instead of SIMD-wide slices. Bin packing does not depend on this
  choice.
- **Own choices for unspecified details.** FIFO depths, the almost-full
  level, the weight-word order, the weight encoding, the threshold semantics,
  reset (synchronous, active-high, control state only) and the
  weight-loading port are all this design's own choices.
- **Bin height 3 not reachable from the top.** The top's default channel
  counts are not multiples of 3. So the fractional (bin height 3) streamer is
  used only when `gals_mvau` / `stream_generator` is instantiated with
  `BIN_HEIGHT = 3` and PE a multiple of 3.
- **Packing is per layer, not across layers.** A packing tool may put
  buffers of *different* convolution layers into one RAM, chosen by a
  bin-packing search. Here each layer owns its RAMs, and the buffers sit in
  fixed address order. `packed_streamer` itself takes any layout through
  `BUF_BASE` / `BUF_LEN` / `BUF_PORT`. Sharing a RAM between layers would
  also need its output streams routed to the different layers' FIFOs. That
  wiring is not built.

## Files

`rtl/`, one module per file:

- `fcmp_pkg`: shared constants and types
- `tdp_bram`
- `stream_fifo`
- `packed_streamer`
- `axis_combiner`
- `dwc_2to1`
- `fractional_streamer`
- `stream_generator`
- `async_fifo`
- `mvau_stream`
- `gals_mvau`
- `thresholding`
- `stream_duplicator`
- `eltwise_add`
- `fcmp_resblock` (top)

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_fcmp_resblock` runs the top at its default size, 24 pixels, against a
  behavioural model.
  - It checks the pixel rate and that no weight waits occur in steady state.
  - It counts that each mechanism happens: output stalls, start-up weight
    waits, slot redistribution, bypass occupancy above one pixel, and adder
    saturation.
- `tb_fcmp_resblock_w2a2` runs the same end-to-end test with ternary
  (2-bit) weights at a reduced size: 128/32 channels, SIMD 8.
- `tb_fcmp_resblock_type_a` runs the type A form at a reduced size:
  64 → 16 → 128 channels, three packed RAMs.
- `tb_gals_mvau` checks both packing ratios.

## Simulating

With Verilator 5, the package goes first:

```
verilator --binary --timing --assert -Irtl rtl/fcmp_pkg.sv \
    $(ls rtl/*.sv | grep -v fcmp_pkg) tb/tb_fcmp_resblock.sv \
    --top-module tb_fcmp_resblock -o sim
./obj_dir/sim
```

Substitute any other testbench name. The full-size ResBlock test takes
about ten seconds.

Verilator's lint reports a few empty pin connections. These are
almost-full and count outputs that are deliberately unused.
