# PatchINR engine: patch-based SIREN inference in SystemVerilog

An implicit neural representation (INR) stores an image as the weights of a
small neural network that maps a coordinate to a colour. Decoding an
H x W image the usual way means one network evaluation per pixel, H*W of them.
The patch-based variant changes the question the network answers: the image is
cut into non-overlapping P x P patches, the network is queried once per patch
coordinate, and its output layer returns all 3*P*P colour values of the patch
at once. The number of queries falls to H*W/P^2 (a quarter for P = 2), while
only the last layer grows (for 2 x 2 patches by about 0.6 % of the weights).

This RTL is an inference engine for such a network with sine activations
(SIREN). It takes patch coordinates and weight tiles as streams, runs the
network on a 16 x 16 array of multipliers in either FP32 or INT8 arithmetic,
and returns one patch per query.

## The network it runs

Default configuration (all parameters of `patchinr_top`):

| layer | inputs | outputs | activation |
|-------|--------|---------|------------|
| 0     | 2 (x, y) + bias | 512 | sin |
| 1..3  | 512 + bias      | 512 | sin |
| 4     | 512 + bias      | 3*P*P = 12 | none (linear) |

`NUM_LAYERS = 5`, `HIDDEN = 512`, `PATCH = 2`, `CHANNELS = 3`. The hidden
width is not written down in the source publication; 512 is the width for
which its printed parameter-growth figures (0.6 / 3 / 12 / 50 / 200 % more
weights for patch sizes 2 / 4 / 8 / 16 / 32) and its per-frame operation count
(about 3.3 TFLOP for a 1080p frame, i.e. about 0.8 M multiply-adds per pixel)
come out right for a 2-512-512-512-512-3P^2 network.

SIREN's frequency factor (usually 30) is expected to be folded into the
weights before loading, so every hidden neuron computes `sin(w . a + b)`.

## How one query is computed

Every layer is a matrix-vector product, cut into 16 x 16 tiles:

* output tile `ot` covers output neurons `16*ot .. 16*ot+15` (array rows);
* input tile `kt` covers input elements `16*kt .. 16*kt+15` (array columns).

The bias is treated as one more input: element number `in_dim` of every layer
is the constant 1, and the weight that multiplies it is the neuron's bias. A
layer with `in_dim` inputs therefore has `ceil((in_dim+1)/16)` input tiles,
and one with `out_dim` outputs `ceil(out_dim/16)` output tiles. For the
default network a query is

    32*1 + 3*(32*33) + 1*33 = 3233 tiles,

issued at one tile per cycle. For each output tile the controller issues its
input tiles back to back, innermost. Per cycle:

1. `control_fsm` pops one weight tile from `weight_fifo` and names the layer
   and input tile;
2. `data_dispatcher` reads the 16 activations of that input tile from its
   activation bank (or the bias constant, or zero past the end);
3. `mac_array` forms all 256 products `w[r][c] * a[c]` and registers them;
4. `accum_act` reduces each row with an adder tree and adds the row sum to a
   per-row accumulator (the first input tile loads it instead);
5. after the last input tile, `accum_act` applies the activation to all 16
   rows and hands the vector back to `data_dispatcher`, which writes it into
   the other activation bank (ping-pong) or, for the last layer, into the
   patch buffer.

A layer must be complete before the next one reads it, so after the last
tile of a layer the controller waits until the array and accumulator are
empty (4 cycles). With weights always available the latency of a query, from
the cycle its coordinate leaves the queue to the first cycle of `out_valid`,
is `1 + tiles + 4*NUM_LAYERS` cycles: 3254 cycles for the defaults, about
16 us at 200 MHz. The end-to-end tests check this number exactly.

256 multipliers at 200 MHz are 102.4 GFLOP/s (a multiply-add counted as two
operations), the throughput the engine is meant to have; the array is busy
on every cycle except the 4 drain cycles per layer.

## Arithmetic

Every lane is 32 bits. `mode` is sampled when a query starts and held for it.

**FP32.** IEEE-754 single precision with two simplifications: subnormal
inputs and results are flushed to zero, and NaN is neither produced nor
propagated (overflow gives infinity). Products and sums round to nearest
even. The sine is computed in fixed point: the FP32 pre-activation is
converted to Q7.24 (saturating at +-128 rad), passed through the sine unit
and converted back from Q1.30. The last layer returns the FP32 sum as is.

**INT8.** Each lane carries a sign-extended 8-bit value:

* coordinates and activations are Q0.7 (value/128);
* weights are Q2.5 by default (`W_FRAC = 5`, value/32, range about +-4);
* the bias input is 127 (the largest Q0.7 value, 127/128, stands for 1);
* products are exact 16-bit integers, sums exact 32-bit integers, so the
  accumulator holds the pre-activation with 7 + W_FRAC fractional bits;
* hidden layers: shift to Q7.24, sine, then `round(sin*128)` saturated to
  +-127;
* output layer: `round(acc / 2^W_FRAC)` saturated to +-127.

**Sine unit.** `sine_unit` reduces its argument modulo 2*pi (multiply by
1/(2*pi), round, subtract), folds it into [-pi/2, pi/2] using
sin(pi - r) = sin(r), and evaluates the odd Taylor polynomial up to r^9 by
Horner's rule in Q2.29. Its error is below 4e-6 over the input range.

## Interface of `patchinr_top`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `mode` | in | `MODE_FP32` (0) or `MODE_INT8` (1), sampled at query start |
| `coord_valid`, `coord_ready`, `coord_x`, `coord_y` | in/out/in/in | patch coordinate, taken when valid and ready are both high |
| `w_valid`, `w_ready`, `w_tile` | in/out/in | one 16 x 16 weight tile (8192 bits), same handshake |
| `out_valid`, `out_ready`, `out_patch` | out/in/out | finished patch, `OUT_DIM` lanes, held until `out_ready` |
| `busy` | out | a query is in progress |
| `stall` | out | the array is waiting for a weight tile |

**Weight stream.** The engine does not keep the network: the complete set of
tiles must be streamed once per query, in the order the controller consumes
them:

    for layer = 0 .. NUM_LAYERS-1
      for ot = 0 .. ceil(out_dim/16)-1
        for kt = 0 .. ceil((in_dim+1)/16)-1
          tile[r][c] = W_layer[16*ot + r][16*kt + c]

where column `in_dim` of `W_layer` is the bias and entries outside the matrix
are zero. In INT8 mode only the low 8 bits of each lane are used. The weight
queue holds 64 tiles; when it runs empty the array stalls (`stall` high) and
resumes when a tile arrives, so a slower weight source only slows the engine
down.

**Output order.** `out_patch[i]` is output neuron `i` of the last layer. How
the 3*P*P values map to pixels and channels is decided by how the output
layer was trained; the hardware does not reorder them.

Coordinates are FP32 values (for example in [-1, 1]) or Q0.7 integers in INT8
mode. Up to 512 coordinates can wait in the coordinate queue.

## Files

| file | block |
|------|-------|
| `rtl/patchinr_pkg.sv` | shared types (`tag_t`, tile and vector types, `prec_mode_e`) and FP32 / fixed-point functions |
| `rtl/pe.sv` | processing element: FP32 or INT8 multiplier with product register |
| `rtl/mac_array.sv` | 16 x 16 grid of PEs |
| `rtl/accum_act.sv` | row adder trees, accumulators, activation |
| `rtl/sine_unit.sv` | fixed-point sine |
| `rtl/coord_fifo.sv` | coordinate queue (512 x 64 bits) |
| `rtl/weight_fifo.sv` | weight queue (64 tiles x 8192 bits) |
| `rtl/data_dispatcher.sv` | activation banks (16 lane memories), operand routing, patch buffer |
| `rtl/control_fsm.sv` | IDLE / RUN / DRAIN / DONE sequencer |
| `rtl/patchinr_top.sv` | the engine |

`coord_fifo`, `weight_fifo` and `data_dispatcher` together make up what is
usually drawn as the data management unit.

## What the surrounding system has to provide

The engine is meant to sit in an FPGA system with a host processor, DDR
memory and an AXI interconnect, with a large on-chip buffer (eight 288 Kb
UltraRAM blocks) caching operands in front of the engine's queues. None of
these parts is included; the engine exposes plain valid/ready streams where
they would connect.

Feeding the array at full rate needs one 1 KiB tile per cycle, about
205 GB/s at 200 MHz, and the default FP32 network is 3.2 MB (0.8 MB in INT8)
per query. That is more than eight UltraRAM blocks (288 KiB) can hold, so in a
real system the weight source, not the array, is likely to set the speed.

## Verification

Each block has a self-checking testbench in `tb/` that compares against a
model written independently of the RTL (real arithmetic and `$sin` for FP32,
exact integers for INT8), prints `TB_RESULT checks=N failures=M` and has a
watchdog.

| testbench | what it shows |
|-----------|---------------|
| `tb_pe` | FP32 products within 1 ulp of the real product, exact INT8 products, hold when disabled |
| `tb_mac_array` | all 256 products and the tag, one cycle after the inputs |
| `tb_sine_unit` | sine error below 2e-5 over +-100 rad (measured 3.5e-6) |
| `tb_accum_act` | sums, sine and linear outputs in both precisions, result exactly 2 cycles after the last tile |
| `tb_coord_fifo`, `tb_weight_fifo` | order, full/empty flags, refusal when full |
| `tb_data_dispatcher` | bank ping-pong, bias lane, zero padding, patch buffer |
| `tb_control_fsm` | tile order and tags, stall on missing weights, drain before each layer, output handshake |
| `tb_patchinr_top` | whole engine at HIDDEN = 40, PATCH = 4 (three output tiles): six queries in both precisions against a reference network; weight stalls, weight-queue back-pressure, queued coordinates, output back-pressure and precision switches each occur and are counted |
| `tb_patchinr_p8` | 8 x 8 patches (192 outputs, 12 output tiles) on a 24-wide network, four queries in both precisions |
| `tb_patchinr_full` | whole engine at its default size: one FP32 and one INT8 query, exact latency of 3254 cycles |

Measured accuracy against the reference: FP32 outputs within 1e-5, INT8
outputs bit-exact with the integer model.

To run one with Verilator (package files first):

    verilator --binary --timing --assert -Wno-fatal \
        rtl/patchinr_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_patchinr_full.sv \
        --top-module tb_patchinr_full -o sim
    ./obj_dir/sim

(`rtl/*.sv` repeats the package; Verilator warns and continues, or list the
files without it.) The full-size test takes about half a minute including
compilation.

## Where this design departs from, or fills in, the source

* **Hidden width and depth** are derived as described above, not stated.
* **Processing elements** are one multiplier and one register each. The
  source describes deeply pipelined DSP-based PEs; deeper pipelining would add
  latency to every query but change nothing else.
* **The array's data movement** is a broadcast: each activation reaches its
  whole column in the same cycle, and products leave the array in parallel
  to per-row adder trees. The source's block diagram draws operands entering
  from the left and from the top and passing from PE to PE; a systolic
  version would need skew registers and is not built.
* **Bias as a constant input**, the INT8 number formats, FIFO depths,
  handshakes, the tile order and the controller's states are this design's
  own; the source does not give them.
* **One query at a time**: layers and queries do not overlap.
* **Latency does not match the published curve.** The source's plot shows
  about 0.26 million cycles for a whole Kodak image (768 x 512) with 2 x 2
  patches. With 256 multipliers and a 0.8 M-multiply network, the 98,304
  queries need at least 3.0e8 cycles; this engine takes 3.2e8. The published
  figure implies either a much smaller network or far more multipliers
  (its resource table lists 5,130 DSP slices for the MAC array, and its
  floorplan shows one region per layer, which suggests a layer-per-region
  pipeline rather than one shared 16 x 16 array).
* **Patch sizes other than 2** need `PATCH` set; only the output layer
  changes (3*P*P outputs, `ceil(3*P*P/16)` output tiles).
* **Only SIREN** is supported; other INR types (Gabor-wavelet or
  variable-periodic activations) would need another activation unit.

## Changing it

* `PATCH`, `HIDDEN`, `NUM_LAYERS` are parameters of `patchinr_top`; the
  controller derives all loop bounds from them. `HIDDEN` need not be a
  multiple of 16.
* `ARRAY_ROWS` / `ARRAY_COLS` live in `patchinr_pkg`; the dispatcher's lane
  memories assume they are equal.
* `W_FRAC` moves the INT8 weight binary point.
* `COORD_DEPTH` and `W_DEPTH` size the queues.
