# A dual-dataflow CNN accelerator: weight-stationary or output-stationary per layer

Convolution layers in small vision networks differ a lot in shape. 1x1
(pointwise) layers have many channels and no spatial filter. They run best when
every processing element (PE) keeps one weight and pixels stream past it:
*weight stationary* (WS). The first layer, depthwise layers and many 3x3 layers
have few channels and a large image. They run best when every PE owns one
output pixel and accumulates it in place: *output stationary* (OS). No single
dataflow suits a whole network such as SqueezeNet, SqueezeNext or MobileNet.

This design builds both dataflows on one PE array, so each layer can use the
better one. Only the data fed to the array changes between modes. Switching
modes costs nothing: an operation in the other mode can start in the cycle
after the previous one ends. The architecture follows the "Squeezelerator"
described by Kwon, Amid, Gholami, Wu, Asanovic and Keutzer in *Co-Design of
Deep Neural Nets and Neural Net Accelerators for Embedded Vision Applications*.
That description gives the block diagram, the PE datapath, the buffer sizes and
the operation sequence of each mode. It gives no cycle-level detail. Everything
at that level (timing, protocols, data layouts, number formats) is this RTL's
own choice. These choices are marked below and in each file's header.

## Block structure

```
                 +---------------------- global buffer (128 KB) ----------------------+
  external  <->  DMA controller         |  1 read + 1 write port, fixed-priority switch |
  memory bus                            +---^-----------^--------------------------^----+
                                            |           |                          | results
                                   preload buffer   stream buffer                  |
                                            |           |                          |
                                            v           v                          |
                                      top row    broadcast buffer --> every row    |
                                      +------------------------------------+       |
                                      |  N x N PE array (N = 16)           |       |
                                      |  operands and partial sums move    |-------+
                                      |  down, from row to row             | bottom row
                                      +------------------------------------+
                        layer controller: sequences one operation, drives all PEs in lock-step
```

| Block | File | Role |
|---|---|---|
| PE | `rtl/pe.sv` | operand register, 16x16 multiplier, adder, 16-entry register file |
| PE array | `rtl/pe_array.sv` | N x N PEs. Top row fed by the preload buffer, bottom row goes to the global buffer |
| Broadcast buffer | `rtl/broadcast_buffer.sv` | side input of every row: one pixel per row (WS) or one weight for all (OS) |
| Preload buffer | `rtl/preload_buffer.sv` | fetches rows ahead of use and pushes them into the top row |
| Stream buffer | `rtl/stream_buffer.sv` | streams pixel vectors (WS) or only the non-zero weights (OS) |
| Global buffer | `rtl/global_buffer.sv` | 128 KB of lines, each N words wide, plus the port arbitration |
| DMA controller | `rtl/dma_controller.sv` | copies lines between external memory and the global buffer |
| Layer controller | `rtl/layer_controller.sv` | runs one WS or OS operation |
| Top | `rtl/squeezelerator.sv` | wires the above together and brings out the command ports and the memory bus |
| Shared types | `rtl/sqz_pkg.sv` | widths, `pe_ctrl_t`, `op_desc_t`, `dma_cmd_t`, requantisation function |

Default sizes: N = 16 (a 16x16 array), 16-bit operands, 32-bit partial sums,
16 register-file entries per PE and a 128 KB global buffer. The global buffer
holds 4096 lines of 16 words. The source gives N = 8 to 32 as the range. Its
per-layer comparisons use 32x32, while its description of the WS mode uses a
16x16 array; 16 is the default here. The register file has 16 entries: the
source first used 8, then doubled it to 16 after tuning for SqueezeNext.

## The processing element

```
 act_in (from PE above / preload) --[act_ld]--> act_q --+--> act_out (to PE below)
                                                        |
 bcast_in (broadcast buffer) ------------------------> MUL (mul_en, else 0)
                                                        |
 psum_in (from PE above) --+                            v
                           +--MUX(add_top)--> addend-> ADD --+--> psum_q --> psum_out (to PE below)
 rf[rf_addr] (rf_clr: 0) --+                                 +--> rf[rf_addr] (rf_we)
```

All PEs receive the same command (`pe_ctrl_t`) in the same cycle. The multiply
and the add complete in one cycle. Two registers can take the sum: the
partial-sum register (`out_we`) and a register-file entry (`rf_we`). The same
few controls give all three uses of the array:

| Use | act_ld | mul_en | add_top | rf_we | out_we |
|---|---|---|---|---|---|
| push a row in from the top | 1 | 0 | - | 0 | 0 |
| WS: multiply and add to the sum from above | 0 | 1 | 1 | 0 | 1 |
| OS: multiply and accumulate into `rf[k]` | 0 | 1 | 0 | 1 | 0 |
| OS drain, first cycle: copy `rf[k]` into `psum_q` | 0 | 0 | 0 | 0 | 1 |
| OS drain, later cycles: pass the sum from above | 0 | 0 | 1 | 0 | 1 |

## Weight-stationary operation

Use it for 1x1 convolutions and fully-connected slices with up to N input
channels and N output channels.

1. **Preload (N cycles).** The preload buffer pushes the N weight rows through
   the top of the array, last row first. PE (r, c) then holds the weight from
   input channel r to output channel c.
2. **Stream (one pixel per cycle).** The stream buffer hands out one pixel
   vector per cycle (a line of N input channels). The broadcast buffer gives
   word r to row r, *delayed by r cycles*. Each column is a chain of registered
   adders from top to bottom. The delay makes row r's product meet the partial
   sum coming from row r-1. Pixel p enters row 0 in cycle t. Its N
   output-channel sums appear at the bottom row in cycle t+N and are written to
   line `out_base + p`.
3. **Flush.** The array keeps clocking for N cycles after the last pixel, until
   its result has been written.

An operation takes N + n_pix + N cycles, plus a few cycles of fetch latency.
With N = 16 and 64 pixels, the end-to-end test measures 104 cycles (96 + 8).

## Output-stationary operation

Use it for an F x F convolution, stride 1 or 2, on an N x N block of output pixels,
with C input channels and K filters (K <= 16).

PE (r, c) owns output pixel (r, c). Register-file entry k holds the pixel's
partial sum for filter k. Every input the PE holds is therefore used for all K
filters before it moves on. The tile's input is (N+F-1) x (N+F-1) pixels per
channel. The schedule:

```
clear rf[0..K-1] in all PEs                                 K cycles
for ch in 0..C-1:
  for kx in 0..F-1:
    push N input rows, y = N+F-2 down to F-1, columns offset by kx    N cycles
        -> PE (r,c) holds in(ch, r+F-1, c+kx)
    for ky = F-1 down to 0:
      for each filter k whose weight w(k,ch,ky,kx) != 0:   one cycle each
        broadcast w to all PEs; every PE: rf[k] += act * w
      if ky > 0: push one more row (y = ky-1)               1 cycle
        -> every operand moves one PE down, so PE (r,c) now holds in(ch, r+ky-1, c+kx)
drain: for k in 0..K-1, shift rf[k] out through the bottom row        N cycles each
```

Moving the window by one row is a single push from the top. Each PE takes the
operand of the PE above it, and only the top row reads a new row from the
preload buffer. The preload buffer also applies the column offset kx. It reads
two adjacent global-buffer lines (pixels 0..N-1 and N..2N-1 of an input row)
and picks words kx..kx+N-1. It fetches rows ahead of use into a 4-row FIFO, so
it fetches while the array computes.

**Zero skipping.** A weight line holds the weights of one tap (ch, ky, kx) for
filters 0..K-1. The stream buffer hands out only the non-zero ones, lowest k
first, with their index k. So a zero weight costs no cycle. A tap whose K
weights are all zero costs one idle cycle, which marks the end of the tap.

**Drain.** The results leave through the adder chain, which WS mode uses for
its sums. In the first drain cycle for filter k, every PE copies `rf[k]` into
its partial-sum register. In the next N-1 cycles each PE passes down the value
from above. The bottom row therefore shows output rows N-1, N-2, ... 0 in turn.
Each is requantised and written to line `out_base + k*N + r`. Draining K
filters takes K*N cycles, the "extra time for the final store" that makes OS
slow on small feature maps.

**Splitting channels.** The input channels of one output block can be split
over several operations. `os_hold` skips the drain, and `os_keep` skips the
clear, so the register files keep their sums between operations. This lets a
layer whose tile does not fit the global buffer run in pieces.

**Stride 2** (`os_s2`). PE (r, c) now needs input (2r+ky, 2c+kx). A push from
the top still moves every operand one PE down, but that is now a step of two
input rows. So each filter column runs in two phases. The first phase takes
filter rows F-1, F-3, ... after a preload of rows 2r+F-1. The second takes
rows F-2, F-4, ... after a preload of rows 2r+F-2. The preload buffer spaces
the rows it fetches by two and picks pixels 2c+kx. The pixels come from a
window over three lines, because a stride-2 row spans up to 2N+F-2 pixels.
This is the mode for the strided first layers of the networks below.

OS cycles ≈ K + C·F·(N+F-1) + (non-zero weights, plus one per all-zero tap)
+ K·N, plus fetch stalls. With stride 2 the row pushes become C·F·(2N+F-2)
at most (two preloads per filter column).

## Data layout in the global buffer

All addresses count lines of N 16-bit words. Word c of a line is bits
[16c+15:16c].

| Data | Layout |
|---|---|
| WS weights | line `w_base + r`, word c = weight from input channel r to output channel c (N lines) |
| WS pixels | line `in_base + p`, word r = pixel p of input channel r |
| WS outputs | line `out_base + p`, word c = output channel c |
| OS input tile, stride 1 | T = N+F-1 rows. Channel ch, row y: lines `in_base + (ch*T + y)*2` (pixels x = 0..N-1) and `+1` (x = N..2N-1) |
| OS input tile, stride 2 | T = 2(N-1)+F rows. Channel ch, row y: lines `in_base + (ch*T + y)*3 + j`, j = 0..2, with pixels x = jN..jN+N-1 |
| OS weights | line `w_base + (ch*F + kx)*F + j`, word k = weight of filter k. Words k >= K are ignored. j is the position of filter row ky in the order used: ky = F-1 down to 0 (stride 1); F-1, F-3, ... then F-2, F-4, ... (stride 2) |
| OS outputs | line `out_base + k*N + r`, word c = output (k, r, c) |

Results are stored as 16-bit words: `sat16(sum >>> shift)`, an arithmetic
right shift by the operation's `shift` field, then saturation.

## Commands and interfaces

- **Operations.** `op_start` with `op` (`op_desc_t`: mode, w_base, in_base,
  out_base, n_pix, f, n_ch, n_k, shift, os_keep, os_hold, os_s2). The command is taken
  while `op_busy` is low, and `op_done` pulses for one cycle at the end.
- **DMA.** `dma_start` with `dma_cmd` (direction, external line address,
  global-buffer line address, length). The command is taken while `dma_busy`
  is low. A DMA copy can run during an operation, because the DMA uses the
  global-buffer ports only when the array side leaves them free. Use this to
  fill one half of the buffer while the array works on the other (double
  buffering).
- **External bus.** One line (32 bytes) per transfer. Requests use
  valid/ready (`ext_req_*`, with write flag, address and data). Read
  responses come back in order (`ext_rsp_*`, with ready). Many reads may be
  outstanding.
- **Global-buffer priorities.** Reads: stream buffer, then preload buffer,
  then DMA. Writes: array results, then DMA. Result writes always win, because
  the WS pipeline cannot stall. An assertion in the top checks this.

## Departures from the source description, and limits

- Only the vertical neighbour links of the mesh are built. The OS window moves
  vertically, and a new row enters from the top; the column offset comes from
  the preload buffer. The source calls the array a mesh and shows inputs from
  several adjacent PEs. Its exact movement pattern is not given.
- The skewed WS feed, the registered adder chain, the clear phase, the drain
  through the adder chain, all data layouts, the FIFO depths, the arbitration,
  the bus protocols and the requantisation are this design's own.
- Stride 2 is this design's addition. The source gives no stride, but it runs
  first layers on the OS dataflow, and in the networks it evaluates those
  layers have stride 2. Larger strides (AlexNet's stride 4) are not built.
- Not built, because the source does not describe them: pooling, activation
  functions, and any non-convolution layer unit. WS partial sums of more than
  N input channels are not added on chip. A 1x1 layer with more input
  channels is exact as an OS operation with F = 1, which accumulates any
  number of channels in the register files.
- At most K = min(N, 16) filters per OS operation. F <= 15, and F <= N+1
  (stride 1) or N+2 (stride 2).
- The global buffer is a plain array with one read and one write port. A chip
  would use a two-port SRAM macro there.
- The external DRAM is not part of the design. `tb/dram_model.sv` models it
  behaviourally: 100-cycle latency and one line per cycle, i.e. 16 GB/s at
  500 MHz (the source's modelling numbers).

Pooling is missing, so no complete network (SqueezeNet, SqueezeNext,
MobileNet, Tiny Darknet, AlexNet) runs end to end on this RTL alone. Their
stride-1 and stride-2 square convolution layers do run, tiled through the
global buffer.

## Simulating

Every testbench checks its own results. It prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. To build and run one
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sqz_pkg.sv tb/tb_squeezelerator.sv \
          -y rtl -y tb --top-module tb_squeezelerator -o sim
./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_pe` | 4000 random commands against a model, plus the latency of one MAC |
| `tb_pe_array` (N = 8) | WS column sums at exactly N cycles, OS accumulation, window shift and drain order |
| `tb_broadcast_buffer` | the row-r delay of r cycles in WS, the same-cycle broadcast in OS, and mode switches |
| `tb_preload_buffer` | windowed two-line rows, one-line rows, stride-2 three-line rows in both phases, random pops, the fetch-ahead limit |
| `tb_stream_buffer` | only non-zero weights, in order, with end-of-line marks; WS at one line per cycle |
| `tb_global_buffer` (128 KB) | arbitration priorities, one-cycle read latency, per-requester read valid, writes landing |
| `tb_dma_controller` | load and store of 60 lines under contention and bus stalls; overlapped reads |
| `tb_layer_controller` (N = 8) | WS, OS 3x3, OS 1x1, split-channel OS and stride-2 OS (F = 3 and 2), against reference convolutions |
| `tb_squeezelerator` | the full-size design end to end (see below) |
| `tb_squeezenet_tile` | the first layers of SqueezeNet v1.1 on one 16x16 output tile at full size, with per-layer cycle counts |

`tb_squeezelerator` runs the full default configuration with no parameter
overrides. It covers a WS 1x1 layer (16 to 16 channels, 64 pixels) and then,
with no gap, an OS 3x3 layer (3 channels, 8 filters, 40 % zero weights). Next
it runs a second OS layer split over two operations, whose data was loaded by
DMA during the first. Then it runs a stride-2 3x3 layer, shaped like a first
layer. All results are stored back by DMA and all 7168 output words are
compared with a reference. The test also counts every mechanism
above and fails if one never happens. It runs in well under a second.

`tb_squeezenet_tile` runs four layers at their real shapes, with random data
and 40 % zero weights:
- conv1 (3x3, stride 2, 3 to 64 channels), as four stride-2 OS operations;
- fire2 squeeze (1x1, 64 to 16), as one OS operation with F = 1;
- fire2 expand1x1 (16 to 64 over 256 pixels), as four WS operations;
- fire2 expand3x3 (16 to 64), as four OS operations.

It measures 5003, 2618, 1188 and 12096 cycles for these (DMA time excluded).
The layers do not feed each other: the output layout of an operation is not
the input layout of the next. Re-layout, pooling and activation are left to
the host.

To change the array size, override `N` (and `RF_DEPTH`, `GB_BYTES`) on
`squeezelerator`. The layouts above scale with N.
