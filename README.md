# Adaptable butterfly accelerator — SystemVerilog implementation

Attention-based networks spend most of their time in two kinds of dense
work: the linear (fully connected) layers and the attention itself. Both
can be approximated with far fewer operations by *butterfly* structures. A
butterfly matrix is a product of log2 N sparse factors, each of which only
mixes element pairs (i, i + s). The FFT has exactly the same pair pattern,
with fixed complex twiddle factors instead of learned weights. A network
built from such layers (FFT along the sequence and hidden dimensions for
token mixing, butterfly matrices for the linear layers) therefore needs
one kind of engine only: one that streams a vector through log2 N stages
of pairwise 2x2 operations, and that can switch per layer between
learned real weights and complex twiddles.

This repository holds a synthesizable SystemVerilog model of such an
accelerator. Its centre is that adaptable engine, plus the
post-processing (shortcut addition and layer normalisation) and an
optional attention processor for the layers that keep full attention.

## Architecture at a glance

```
                 +-------------------- abf_top ---------------------+
  weights  ----> |  bfly_processor: P_BE x bfly_engine               |
  streams  <---> |     each: S2P -> 2*P_BU banks -> coalesce ->      | --> out streams
                 |           P_BU x bfly_unit -> recover -> banks    |
                 |           -> P2S,  weight_buffer                  |
                 |        engine 0 --(route_postp)--> postp --------- | --> pp stream
  shortcut --->  |  onchip_buffer (shortcut) ---------^               |
  Q/K/V    --->  |  attention_processor: P_HEAD x attention_engine   | --> per-head out
                 |     each: qk_unit -> sv_unit, Q/K/V buffer slices |
                 +---------------------------------------------------+
```

Default parameters are the final design point: `P_BE = 64` engines,
`P_BU = 4` butterfly units per engine, `P_QK = P_SV = 0`, and buffers of
depth 1024. With `P_QK = P_SV = 0` no attention processor is generated,
because the chosen network has no attention blocks. The multiplier count
is `P_BE*P_BU*4 + P_HEAD*(P_QK + P_SV)`, which is 1024 real multipliers
at the defaults.

## The adaptable butterfly unit (`bfly_unit`)

The unit has four real multipliers, an add/subtract stage, an add stage
and a complex adder/subtractor. Multiplexers in front of the multipliers
select the operands by mode:

* **Butterfly linear (BLT)**, real data, four weights per pair:
  `out1 = in1*w1 + in2*w3`, `out2 = in1*w2 + in2*w4`.
* **FFT**, complex data, twiddle `w = w1 + j*w2`: the four multipliers
  form `t = in2*w` (the add/subtract stage gives the real part, the adder
  the imaginary part). Then `out1 = in1 + t` and `out2 = in1 - t`.

It is fully pipelined with a latency of two cycles.

## The memory system: why nothing ever conflicts

An engine holds one vector of N = 2^log2n elements in `NBANK = 2*P_BU`
single-port banks, and every cycle must read the `NBANK` operands of
`P_BU` pairs from different banks. Element `i` lives in column
`c = i / NBANK` at row `r = i % NBANK`. The serial-to-parallel converter
(`s2p`) rotates each column down by its *starting position*
`popcount(c)`, so:

    bank(i) = (r + popcount(c)) mod NBANK

For strides smaller than `NBANK`, both elements of a pair are in the same
column, and the rotation keeps them in distinct banks. For larger strides,
the pair is in columns `c` and `c + s/NBANK`. These two column numbers
differ in exactly one bit, so their rotations differ by one. The index
generator (`bfly_index_gen`) takes the same row pair from two such
columns: units 0..P_BU-1 take rows (0,1), (2,3), ... in one cycle, then
the odd/even complement in the next. This touches every bank exactly once.
The testbench checks this bank coverage for every cycle of every stage,
up to N = 512.

`index_coalesce` turns the index set into bank read addresses (bit-count +
add + crossbar) and, one cycle later, delivers the bank outputs to the
unit slots. `recover` is the inverse crossbar: results are written back to
the bank and column their operands came from. Every stage therefore works
in place, and after log2 N stages the vector is in storage order.
`p2s` undoes the rotation on the way out.

### One set of memories, two modes (`bfly_buffer`)

Each bank is two 16-bit memories, A and B.

* In BLT mode (real data) A and B are two independent ping-pong halves.
  One vector is computed in one of them while the next loads into the
  other, and the previous one drains.
* In FFT mode an element is complex (32 bit). The lower halves of A
  (real) and B (imaginary) form ping-pong bank 0, and the upper halves form
  bank 1. The same RAM thus holds half as many complex elements without
  extra storage.

### Overlap rules (`bfly_engine`)

Each ping-pong bank is EMPTY, FULL (loaded) or DONE (computed). Three
sequencers move vectors through the banks in order: load, compute and
output.

* **BLT**: loading the next vector and emitting the previous one both run
  during computation.
* **FFT**: computation needs the read and write ports of both A and B, so
  it runs alone. Only the output of one vector overlaps the load of the
  next.

When a sequencer has to wait, `in_ready` falls (an input stall) or the
output waits. A short flag (`ld_wait`) holds the input between the last
element of a vector and the write of its last column. Without it, the
first element of the following vector could be taken before the load bank
switched. Each vector uses exactly `log2n * N / NBANK` compute cycles,
plus a three-cycle gap between stages so each stage's results are back in
the banks before the next stage reads them.

Weights (BLT) or twiddles (FFT) are stored in the `weight_buffer` in the
order the schedule consumes them: one word of `P_BU` weight sets per
compute cycle. That is `log2n * N / 8` words per layer, and the buffer is
double-buffered so the next layer's weights can load during the current
layer.

Output order is storage order, so an FFT result leaves in bit-reversed
frequency order.

## Post-processing (`postp`)

The engine-0 output can be routed (`route_postp`) into `postp`, which adds
the shortcut operand read from the double-buffered shortcut buffer and
then normalises the vector:

1. y = x + shortcut, stored locally, with running sums of y and y².
2. mean = Σy >> log2n and var = Σy² >> log2n − mean² + 1 LSB.
3. A 16-step bit-serial integer square root, then one division for 1/σ.
4. Output (y − mean)·(1/σ)·γ + β, with γ and β loaded per element.

Latency per vector is N input cycles, 18 cycles of statistics, and N
output cycles.

## Attention processor (`attention_processor`, `attention_engine`, `qk_unit`, `sv_unit`)

There is one engine per head. Each head has its own slices of the query,
key and value buffers. Q and K are split into `P_QK` banks and V into
`P_SV` banks, column mod P, so each unit reads P elements per cycle.

* `qk_unit` computes the dot products of one query row with all L keys in
  `L*d/P_QK` cycles. It keeps the maximum, then spends L cycles on
  exponentials and L cycles on normalised outputs. exp(x) is evaluated as
  2^(x·log2 e), with the integer part as a shift and the fraction
  linearised (2^-t ≈ 1 − t/2), which is accurate to a few percent. Scores
  are scaled by 1/sqrt(d) as a shift of log2(d)/2 bits, which is exact
  when d is an even power of two.
* `sv_unit` holds two rows of S. While it multiplies one row with V
  (`L*d/P_SV` cycles), the QK unit produces the next row. This is the
  row-level pipelining between QK and SV.
* A row of Q is started as soon as it is in the buffer (`q_rows_ready`),
  so attention can begin while the producer of Q is still working.

## Number format and departures from the published design

* **Arithmetic**: 16-bit signed fixed point Q8.8 everywhere, with
  truncating multiplies and wrapping adds. The published design uses
  16-bit half-precision floating point. Word widths, and hence memory
  sizes, are the same; dynamic range is not. Inputs must be scaled so that
  intermediate stage results stay within ±128.
* **Softmax** uses the exponential approximation above.
* **Layer norm** requires power-of-two vector lengths. A 768-wide hidden
  vector is padded to 1024.
* **Not built**: the transpose unit drawn between the butterfly processor
  and memory (its function is not described), and the off-chip memory and
  its controller. All streams that would come from memory are top-level
  ports.
* **Own choices**: the weight-buffer depth (2048 words per half), the head
  width (64) and head count (12) of the optional attention processor, and
  all handshakes.

## Capacity at the default sizes

* A BLT vector fits up to `NBANK*DEPTH = 8192` elements, and an FFT up to
  4096 complex elements.
* Weights limit both to `log2n*N/8 ≤ 2048`, so N ≤ 1024.
* This covers hidden sizes up to 1024 and sequences up to 1024. Sequence
  FFTs of 2048 or 4096 points need a larger `WDEPTH` (2816 or 6144 words).

## Files

| File | Contents |
|---|---|
| `rtl/abf_pkg.sv` | types (`cplx_t`, `bfly_w_t`, mode enum), fixed-point multiply, popcount and bank mapping |
| `rtl/bfly_unit.sv` | adaptable butterfly unit |
| `rtl/s2p.sv`, `rtl/p2s.sv` | serial/parallel conversion with column rotation |
| `rtl/bfly_index_gen.sv` | pair schedule and weight addressing |
| `rtl/index_coalesce.sv`, `rtl/recover.sv` | read and write crossbars |
| `rtl/bfly_buffer.sv`, `rtl/weight_buffer.sv` | engine memories |
| `rtl/bfly_engine.sv`, `rtl/bfly_processor.sv` | engine and processor |
| `rtl/onchip_buffer.sv` | double-buffered RAM |
| `rtl/postp.sv` | shortcut add + layer norm |
| `rtl/qk_unit.sv`, `rtl/sv_unit.sv`, `rtl/attention_engine.sv`, `rtl/attention_processor.sv` | attention path |
| `rtl/abf_top.sv` | top level |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_abf_top.sv` | end-to-end test at reduced sizes |
| `tb/tb_abf_top_full.sv` | one layer through all 64 engines at the default sizes |

## Simulating

Each testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/abf_pkg.sv tb/tb_abf_top.sv --top-module tb_abf_top
./obj_dir/Vtb_abf_top
```

Swap in any other `tb_*` file. The end-to-end test runs these layers in
sequence:

1. BLT.
2. FFT.
3. BLT through post-processing.
4. FFT with attention running concurrently.
5. BLT through post-processing.

It checks results against bit-exact and floating-point references. It
counts input stalls, each overlap mode, mode switches, post-processed
vectors, QK/SV row overlap, Q rows arriving during attention, and both
processors busy together. It fails if any of these never occurs. The
full-size test takes about a minute to build and run.

## How far to trust it

Every block has a directed-random testbench against an independent model.
The engine is checked bit-exactly and against a floating-point DFT for
N = 8…512. Each testbench was also shown to fail on a deliberately broken
copy of its block.

Synthesis of individual blocks is straightforward. Synthesising the
whole default top (64 engines with all their memories) needs a large
memory budget. The RTL has not been timed against a 200 MHz target on an
FPGA.
