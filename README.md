# MSD-first adder-tree engine for delay-and-sum beamforming

Delay-and-sum ultrasound beamforming forms every image pixel by adding up the
delay-aligned samples of all receive channels. For a 64-channel probe that is
one 64-input sum of signed 16-bit numbers per pixel, hundreds of millions of
additions per second. A conventional adder tree does each sum in one wide
combinational pass. This design does it *most significant digit first*
instead. Every sample is cut into bit planes, the sign plane first. A tree of
small left-to-right (online) adders passes signed digits down a fully
registered pipeline. A shift-and-add accumulator turns the result stream back
into an ordinary binary number.

Because the most significant part of the sum is formed first, the core can
stop feeding bit planes after any number K of them. With K = 16 the sum is
exact. With a smaller K, each sample is cut to its top K bits, so the sum
becomes coarser but is ready sooner and toggles less logic. K is a run-time
setting. It changes at frame boundaries, and no part of the datapath changes
with it.

The RTL implements the architecture of *Dynamic Ultrasound Beamforming Using
Left-to-Right Arithmetic Adders on FPGA* (Usman, Khan, Merhof). That
architecture has three parts: a 64-input tree of left-to-right adder (LRA)
cells, a core built around the tree, and a multi-core system that replicates
the core. The sections below explain how each part works, what the paper
fixes and what this implementation had to choose, and where the two differ.

## Files

| file | contents |
|---|---|
| `rtl/lra_pkg.sv` | signed-digit type `sd_t`, core state enum, default sizes, `compute_cycles()` |
| `rtl/lra_cell.sv` | one left-to-right adder cell (2 full adders, 5 registers) |
| `rtl/lra_tree.sv` | balanced binary tree of N-1 cells |
| `rtl/msdf_encoder.sv` | bit-plane encoder: samples to signed-digit streams |
| `rtl/sd_accumulator.sv` | shift-and-add converter: digit stream to two's complement |
| `rtl/serial_input_port.sv`, `rtl/register_file.sv` | sample entry and N x 16-bit store of a core |
| `rtl/fsm_control.sv` | load / compute / drain sequencing of a core |
| `rtl/output_register.sv` | result holding register of a core |
| `rtl/lra64_core.sv` | one complete core |
| `rtl/precision_control.sv` | shared K setting, applied per frame |
| `rtl/pixel_dispatcher.sv`, `rtl/output_collector.sv` | round-robin fan-out and in-order fan-in |
| `rtl/lra64_system.sv` | top level: K control, dispatcher, cores, collector |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus two workload benches |

## Number representation

A signed digit has one of the values -1, 0 or +1. It travels as two wires,
`p` and `n`, and its value is `p - n` (the struct `lra_pkg::sd_t`). The pair
`p = n = 1` is legal and means 0. A stream of such digits, most significant
first, is a number in redundant binary.

A 16-bit two's-complement sample `b` is worth
`-b[15]*2^15 + b[14]*2^14 + ... + b[0]`. The encoder sends it as 16 digits:

- **plane 0:** digit `-b[15]`, carried on the `n` wire;
- **planes 1..15:** digit `+b[15-j]`, carried on the `p` wire.

After plane K-1 the encoder sends only zero digits. Cutting the stream after
K planes therefore hands the tree `floor(b / 2^(16-K))`, which is the sample
rounded toward minus infinity to its top K bits.

## The LRA cell

`lra_cell` adds two digit streams x and y and produces their sum as a digit
stream z, one digit per clock. It is the classic radix-2 online adder, in the
form the paper draws: two full adders and five flip-flops.

```
  x.p ---+
 ~x.n ---+--[FA1]--g--(not)--[D]--(not)--+
  y.p ---+    |                          +--[FA2]--t--(not)--[D]----------> z.n
              +--h (undelayed) ----------+    |
  y.n ----------------------------[D]--(not)--+    +--w--[D]--[D]---------> z.p
```

- **First full adder:** adds `x.p + (1 - x.n) + y.p = 2h + g`. The value at
  the current digit position is now `2h - (1-g) - y.n`. That is a positive
  transfer `h` into the next-higher position and two negative bits at this
  position.
- **Second full adder:** one cycle later it adds the transfer `h` of the
  *next-lower* position, which arrives then, to this position's two negative
  bits, both inverted: `h + g + (1 - y.n) = 2t + w`. This gives a sum bit `w`
  and a transfer `t` into the position above.
- **Output digit:** each position's digit is `z = w - (1 - t_below)`. So
  `z.p` is `w` delayed twice and `z.n` is the inverted `t` delayed once.

No transfer moves more than one position, so the critical path is two full
adders deep, whatever the word length.

The registers store `~g`, `y.n`, `~t` and `w`, so a zero input stream leaves
them all at 0. Reset and a zero flush therefore put the cell in the same
state, and consecutive operations need no extra clearing.

**Timing:** the online delay is 2. If the operand digits of weight
2^-1, 2^-2, ... enter in cycles 0, 1, ..., the output digits of weight
2^0, 2^-1, ... leave in cycles 2, 3, .... The sum stream starts two cycles
later than the operands and is one digit longer, because it has one more
integer digit.

## The tree and why the compute phase lasts K + 18 cycles

`lra_tree` arranges 63 cells as a 6-level balanced binary tree over the 64
channel streams. Every level ends in registers, so the tree's clock rate does
not depend on its size.

Each level delays the stream by 2 cycles and adds one digit to it. When the
first bit plane enters the leaves in cycle 0:

- the root's first digit (weight 2^6 times the weight of the sign plane)
  appears in cycle 12;
- the stream is K + 6 digits long;
- its last digit appears in cycle K + 17.

The core therefore runs its compute phase for `K + 3*log2(N)` = **K + 18**
cycles, as given by `lra_pkg::compute_cycles`. During all of it the
accumulator executes `S = 2S + z.p - z.n`. The digits before cycle 12 are
zeros and do not disturb it. After the last cycle, S equals
`sum floor(x_i / 2^(16-K))` exactly.

The paper quotes K + 12 compute cycles (K + 76 in all). Those 6 cycles cover
the tree's 6 extra integer digits. A design that stopped after K + 12 cycles
would lose the sum's 6 least significant digits, yet the paper also states
that K = 16 reproduces the full-precision sum. This implementation keeps the
exact result and accepts the 6 cycles. It is the main timing departure; see
[Departures from the paper](#departures-from-the-paper).

## A core

`lra64_core` chains the blocks of the paper's core diagram:

```
s_* -> serial_input_port -> register_file (64 x 16) -> msdf_encoder -> lra_tree -> sd_accumulator -> rescale -> output_register -> r_*
                                  fsm_control (load / compute / drain)  <-  K
```

| phase | cycles | what happens |
|---|---|---|
| LOAD | 64 | One sample per accepted handshake is written to the next register-file entry. On the last sample, K is sampled and the accumulator is cleared. |
| COMPUTE | K + 18 | Bit plane `cnt` of all 64 samples is encoded. Planes at or beyond K are zeros. The root digit is accumulated every cycle. |
| DRAIN | 1, or more on stall | The result is written to the output register once it is free. Otherwise the core stalls (`stall`). |

A pixel occupies a core for 64 + K + 19 cycles: 99 at K = 16 and 84 at K = 1.

**Result and scaling.** The result is rescaled to full weight: `r_sum` =
`2^(16-K) * sum floor(x_i / 2^(16-K))`, a 22-bit signed number. It is tagged
with the K that produced it (`r_k`). The error against the exact sum lies in
`[0, 64 * 2^(16-K))`. The result is exact for K = 16.

**Register file.** There is a single register file, so loading the next
pixel waits until the current one has finished computing. The paper's
latency figure (a 64-cycle load plus the compute phase) implies the same.

## Precision control

`precision_control` holds two registers:

- **pending:** written by the host through `k_wr`/`k_wdata`. Values are
  clamped to 1..16.
- **active:** loaded from pending when a frame starts, which is when the
  dispatcher accepts the first sample of a frame.

Every core samples the active K when it starts computing a pixel. As a result:

- a whole frame uses one K;
- a write in the middle of a frame waits for the next frame;
- a pixel in flight never changes K.

Reset selects K = 16.

## The multi-core system

`lra64_system` replicates the core. The default is 15 cores: the paper finds
room for 15 instances on a Zynq XC7Z010, and its system diagram draws six.

- **Dispatcher.** `pixel_dispatcher` takes one stream of samples, 64
  consecutive samples per pixel with channel 0 first. It sends each pixel
  whole to one core, cycling through the cores in fixed order. If the next
  core is still busy, the input waits (`in_stall`) rather than skipping that
  core.
- **Collector.** `output_collector` reads the cores in the same order. Results
  therefore leave in input order, each tagged with its index in the frame and
  a frame-last flag. A frame has 244608 sums by default: 122304 complex
  pixels, with real and imaginary parts summed separately.
- **Back-pressure.** It propagates all the way. A slow reader holds result
  registers full, cores then stall in DRAIN, and finally the input stalls.

**Throughput.** The input is a single 16-bit stream, so the system takes at
most one sample per cycle. That is one pixel every 64 cycles, or 6.4 frames/s
at 100 MHz. Two cores are enough to keep that stream busy. The paper's figure
of 66.9 frames/s for 15 instances is a projection that multiplies one
instance's rate by 15. Reaching it would need 15 independent sample streams,
one per core. The paper does not describe the input side, and this design
does not provide one. To get that throughput, drive each `lra64_core`
directly instead of going through the dispatcher.

### Top-level ports (`lra64_system`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `k_wr`, `k_wdata` | in | 1, 5 | write the pending precision K |
| `k_active`, `k_pending` | out | 5 | K in force; K for the next frame |
| `s_valid`, `s_ready`, `s_data` | in/out/in | 1, 1, 16 | sample stream (hold `s_data` until taken) |
| `m_valid`, `m_ready` | out/in | 1 | result stream handshake |
| `m_sum` | out | 22 | sum, rescaled to full weight |
| `m_k` | out | 5 | K used for this sum |
| `m_index`, `m_frame_last` | out | 18, 1 | position in the frame |
| `frame_start`, `in_stall` | out | 1 | status: first sample of a frame accepted; input waiting |
| `core_stall`, `core_busy` | out | NUM_CORES | status per core |
| `dispatch_core` | out | 4 | core that receives the next sample |

Parameters: `N` (channels, a power of two, default 64), `DATA_W` (default
16), `NUM_CORES` (default 15) and `FRAME_SUMS` (default 244608). `SUM_W`,
`FW` and `CW` are derived and should be left at their defaults.

## Departures from the paper

What the paper fixes:

- the cell structure (two full adders, five registers, online delay 2);
- the 64-input, 6-level, 63-cell tree;
- sign-first bit-plane encoding with zero flush;
- the shift-and-add reconstruction;
- K from 1 to 16 chosen at run time;
- the core's block chain;
- round-robin dispatch to replicated cores with a shared K and an output
  collector.

This design's own choices:

- **Cycle count.** Compute is K + 18 cycles, not the paper's K + 12, and a
  pixel takes 64 + K + 19 cycles, not K + 76. The reason is given above:
  exactness at K = 16 is kept.
- **Inversions in the cell.** The figure does not show which full-adder
  output is the transfer, nor an inversion on the `z.n` path. Both were
  derived so that the arithmetic is correct.
- **Encoding.** The paper describes the magnitude bits as spread "across
  positive and negative channels". Here, two's-complement samples put the
  sign on the negative channel and every other bit on the positive one.
- **Stopping after K planes.** The paper describes precision selection as
  stopping the computation clock after the wanted number of cycles. Here the
  clock runs on. A counter in the controller ends the data planes at K and
  the compute phase at K + 18; clock gating is left to the FPGA tools.
- **Reduced-K results.** They are presented rescaled to full weight and
  tagged with K. The paper does not say how they are presented.
- **Interfaces and timing of K.** All handshakes (valid/ready), the
  pending/active K pair, clamping, reset values, the single input stream, the
  strict rotation and the frame tags are this design's choices.
- **Not included.** Delay computation, apodization, envelope detection and
  log compression lie outside the design, before and after it. The design's
  input is already-aligned samples.
- **Resource use.** The register file is a plain array of flip-flops. A
  generic synthesis of one core gives about 1400 flip-flop bits, against the
  2314 FFs the paper reports for its FPGA build; the FPGA figures were not
  reproduced.

## Verification

Every module has a self-checking testbench. Each one:

- compares outputs with values computed independently in the testbench;
- checks the cycle counts where a latency is defined;
- prints `TB_RESULT checks=N failures=M`.

Highlights:

- **`tb_lra_cell`, `tb_lra_tree`:** random digit streams using all four digit
  codes, plus the all-maximum and all-minimum streams. They check the sum and
  the exact digit window (delay 2 per level).
- **`tb_msdf_encoder`:** every plane and every K. It checks that k planes
  fold back to `floor(x / 2^(16-k))`.
- **`tb_lra64_core`:** every K, with sum and latency checked, then random
  traffic with a slow reader that forces stalls.
- **`tb_lra64_system`:** 3 cores and 10-sum frames, with random K writes,
  some in mid-frame, and random back-pressure. It requires every mechanism to
  occur at least once: K < 16, K = 16, a K switch at a frame boundary, a
  deferred write, input stall, core stall, round-robin wrap, parallel cores
  and frame end.
- **`tb_precision_sweep`:** one core. It runs the paper's operating points
  K = 1, 4, 8, 10, 12, 14, 16 and then every K. It checks sums, the error
  bound and exactly 64 + K + 19 cycles per pixel, and prints the cycle table.
- **`tb_lra64_system_full`:** the default configuration with no parameter
  changes: one whole frame of 244608 exact sums through 15 cores, input never
  stalled, 244608 x 64 input cycles. It takes a few minutes.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -y rtl rtl/lra_pkg.sv tb/tb_lra64_system.sv --top-module tb_lra64_system
./obj_dir/Vtb_lra64_system
```

Replace the testbench name to run the others. The testbenches use
`$urandom`, so each run draws new random data.
