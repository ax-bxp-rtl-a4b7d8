# Ax-BxP: an approximate blocked-computation DNN accelerator in SystemVerilog

DNN layers need different precisions, often anywhere from 2 to 8 bits. Bit-serial and
digit-serial hardware handles this flexibly, but pays heavily when a layer needs all 8 bits.
Ax-BxP (approximate blocked fixed point) takes another route. Every operand is cut into blocks
of K bits, and a multiplication becomes a sum of block products, each shifted by its place value.
The design then simply **leaves most of those block products out**.

An 8-bit operand has N = ceil(8/K) blocks, so an exact product needs N² block products. Ax-BxP
keeps only NT_W blocks of each weight and NT_A blocks of each activation. That gives
L = NT_W·NT_A block products per multiply-accumulate (MAC), with L ≤ N. A processing element
(PE) holds exactly N small multipliers. When L < N, one PE can therefore finish several MACs per
cycle. Throughput grows as the approximation gets coarser, and the memory footprint shrinks with
it, because the dropped blocks are never stored.

This RTL implements such an accelerator: a 32×32 output-stationary systolic array of Ax-BxP PEs
fed from a 2 MB scratchpad. It also has the per-row and per-column control units that turn packed
Ax-BxP operands into multiplier inputs, and the ToAx-BxP converters that put results back into
Ax-BxP form. The block size K is fixed when the design is built; the default is K = 2 (N = 4).

## 1. Number format

An operand is an 8-bit sign-magnitude number: a sign bit and a 7-bit magnitude. The magnitude
splits into N blocks of K bits, and block *i* has place value 2^(i·K). For K = 2 these are blocks
3..0; block 3 holds only one magnitude bit.

An Ax-BxP element keeps NT consecutive blocks, from a top index I down to I−NT+1:

    value ≈ ± Σ_{t=0}^{NT-1} block[I−t] · 2^((I−t)·K)

There are two ways to choose I:

* **Static mode.** One I for the whole tensor. It is set per layer and broadcast to the hardware.
* **Dynamic mode.** I is the index of the element's most significant non-zero block, so small
  values keep their resolution. Each element stores its own index, as the offset I−(NT−1). If
  fewer than NT blocks lie at or below that block, the window is pushed up so that it ends at
  block 0. The offset therefore always lies in 0..N−NT and needs ceil(log2(N−NT+1)) bits.

Example: K = 2, NT = 1, magnitude 13 = 0b0001101 has blocks 0,0,3,1.
* Dynamic mode keeps block 1 (value 3·4 = 12) and stores offset 1.
* Static mode with I = 3 keeps block 3 and stores 0.

The design space for K = 2, written (K, NT_W, NT_A), is (2,1,4), (2,1,3), (2,2,2), (2,1,2) and
(2,1,1). Activations always keep at least as many blocks as weights.

## 2. Packed operand words — how N multipliers serve several MACs

This is the part that takes the most explaining. Each cycle, each row of the array gets one
*pack* of activation data and each column gets one pack of weight data. A pack (`pack_t`,
`PACK_W` = N·K + N + N·IDX_W bits, 20 for K = 2) has three fields:

| bits (K = 2)  | field       | meaning                                         |
|---------------|-------------|-------------------------------------------------|
| `[7:0]`       | `blk[3:0]`  | four K-bit block slots, slot *s* at `[2s+1:2s]` |
| `[11:8]`      | `sign[3:0]` | sign of element *m*                             |
| `[19:12]`     | `idx[3:0]`  | index offset of element *m* (dynamic mode)      |

A pack carries M = floor(N / L) elements. Element *m* uses slots m·NT … m·NT+NT−1, most
significant first, plus `sign[m]` and `idx[m]`. Because M·NT ≤ M·L ≤ N, the slots always suffice.
As a result, the scratchpad holds only the kept blocks, and a coarser configuration needs fewer
words per layer.

Inside the PE, multiplier lane *l* handles MAC m = l / L. Within that MAC it computes partial
product r = l mod L = p·NT_A + q, which pairs weight block *p* with activation block *q*. The
row and column control units each work out their half of this mapping on their own, from NT_A
and NT_W:

| config (K,NT_W,NT_A) | L | MACs per PE per cycle (M) | lanes used |
|----------------------|---|---------------------------|------------|
| (2,1,4)              | 4 | 1                         | 4          |
| (2,1,3)              | 3 | 1                         | 3          |
| (2,2,2)              | 4 | 1                         | 4          |
| (2,1,2)              | 2 | 2                         | 4          |
| (2,1,1)              | 1 | 4                         | 4          |

When L does not divide N, the left-over lanes carry zeros.

## 3. Datapath

**Control units (`axbxp_control`).** There is one unit per row, for activations, and one per
column, for weights. A unit takes a pack and produces the N lanes. For each lane it finds the
element and block, then applies the element's sign to the K-bit block, which gives a signed
(K+1)-bit value. It also computes the block's shift i·K. In static mode, i comes from the
broadcast I; in dynamic mode it comes from the element's stored offset plus NT−1. The unit is
combinational.

**PE (`axbxp_pe`).** The PE has N signed (K+1)×(K+1) multipliers. Product *j* is shifted left
by s_a[j]+s_w[j], the N terms are summed, and the sum is added into a 32-bit accumulator. All of
this happens in one cycle. The activation lanes move one PE to the right per cycle, and the
weight lanes move one PE down.

**Array (`axbxp_array`).** The array is ROWS×COLS PEs (32×32). Row *r* is delayed by *r*
registers after its control unit, and column *c* by *c* registers. An input taken at clock edge
E is therefore added into PE(r,c) at edge E+r+c.

**ToAx-BxP (`toaxbxp`).** There is one converter per column. It turns a 32-bit sum into one
Ax-BxP element in three steps:
1. It takes sign and magnitude, shifts the magnitude right by `out_shift`, and saturates it to
   127.
2. It picks the NT blocks: the top non-zero block with clamping in dynamic mode, or the broadcast
   I in static mode.
3. It drops the rest. This is truncation, not rounding.

**Scratchpad (`scratchpad`).** The scratchpad is 2 MB, built from 640-bit words (32 packs), for
26 214 words. It has two synchronous read ports, one for activations and one for weights, and
one write port. Read data arrives one cycle after the address.

## 4. Running a tile (`axbxp_accel`)

The top level computes one 32×32 tile of output activations at a time:
C[r][c] = Σ_t Σ_m A_t[r][m] · W_t[c][m].

1. Write the activation words and weight words into the scratchpad through `host_we`,
   `host_waddr` and `host_wdata`. Lane *p* (bits `[p·PACK_W +: PACK_W]`) of an activation word
   is row *p*'s pack; lane *p* of a weight word is column *p*'s pack.
2. Set `cfg` and the addresses, then pulse `start`. `cfg` (`layer_cfg_t`) holds the mode, the
   NT and I of A, W and the output, and `out_shift`. The addresses are `a_base`, `w_base` and
   `o_base`, plus `n_steps`.
3. The sequencer latches `cfg` (the per-layer broadcast) and clears the accumulators. It then
   streams `n_steps` word pairs, waits ROWS+COLS−1 cycles for the wavefront to pass, and drains
   one array row per cycle through the ToAx-BxP units. Row *r* goes to word `o_base+r`; column
   *c*'s element sits in lane *c*, element 0.
4. `done` pulses **n_steps + 2·ROWS + COLS** cycles after the edge that took `start`. This is 1
   cycle of clear, n_steps of streaming, ROWS+COLS−1 of flush and ROWS of drain. `sat_count`
   gives the number of saturated outputs in the tile. While `busy` is high, host writes are
   ignored and host reads are not served.

A layer with reduction length D takes ceil(D/M) streamed words per tile. That is where the
speed-up of small L comes from.

## 5. Where this design follows the paper and where it departs

These parts follow the paper's description:
* the blocked format and static and dynamic index selection;
* the L ≤ N and regular-shape (L = NT_W·NT_A) restrictions;
* a PE with N (K+1)-bit signed multipliers, N shifters and a 32-bit accumulator;
* control units that split operands into signed (K+1)-bit blocks with shifts i·K;
* NT and I broadcast per layer, or read per element in dynamic mode;
* output-stationary flow in a 32×32 array, with ToAx-BxP at the column outputs;
* a 2 MB scratchpad, and K fixed at build time.

These are this design's own choices, where the description stops short:
* **Sign storage.** Each element stores its sign as a separate bit. A kept block below the top
  block has no room for a sign bit. The cost is one bit per element more than a 4+2-bit count
  for (2,2,2) dynamic would suggest.
* **Multiplier sharing.** The lane mapping and pack layout that let M = floor(N/L) MACs share
  one PE.
* **Window clamp.** The clamp of the dynamic window at block 0.
* **Output rescaling.** The shift, saturation and truncation in ToAx-BxP. There is no
  activation function; apply ReLU etc. outside.
* **Tile handling.** The skew registers, the sequencer, the start/busy/done interface and the
  host load port. The host port stands in for an off-chip memory, which is not modelled.
* **Output layout.** Output words hold one element per pack. Re-packing for the next layer, and
  arranging convolution inputs, are left to whoever loads the scratchpad.
* **One datapath for both modes.** A single datapath handles static and dynamic mode, selected
  by a `cfg` bit. A static-only PE needs fewer shift amounts and would be smaller.

Limits:
* Exact 8-bit layers (L = N² = 16 for K = 2) cannot be issued, because a PE only takes L ≤ N
  partial products per MAC. Networks whose first and last layers stay at full 8-bit precision
  need those layers run elsewhere.
* The default build is K = 2. K = 3 (N = 3) and K = 4 (N = 2) are one edit in `axbxp_pkg`. The
  unit tests and the reduced top-level test also pass at those values; the full-size run has
  only been done at K = 2.

Outside the hardware: choosing NT_W, NT_A (and I in static mode) for each layer is done offline.
The method is a greedy per-layer search with retraining. The result reaches the hardware only
as the `cfg` of each tile and as the way the operands are packed.

## 6. Files

`rtl/` (synthesizable):

| file                | content                                              |
|---------------------|------------------------------------------------------|
| `axbxp_pkg.sv`      | K, N, widths, `lane_t`, `pack_t`, `layer_cfg_t`      |
| `axbxp_pe.sv`       | processing element                                   |
| `axbxp_control.sv`  | row / column operand control unit                    |
| `axbxp_array.sv`    | systolic array with control units and skew           |
| `toaxbxp.sv`        | output converter                                     |
| `scratchpad.sv`     | on-chip buffer                                       |
| `axbxp_accel.sv`    | top level with sequencer                             |

`tb/` (self-checking; each prints `TB_RESULT checks=… failures=…`):

| file                       | what it checks                                                                 |
|----------------------------|--------------------------------------------------------------------------------|
| `axbxp_ref_pkg.sv`         | integer reference: kept-block values by modular arithmetic, dynamic index by repeated division, pack builder |
| `axbxp_pe_tb.sv`           | random lanes against Σ a·w·2^(s_a+s_w), forwarding, clear                      |
| `axbxp_control_tb.sv`      | a row unit and a column unit paired; the lane dot product must equal Σ_m A_m·W_m for all configurations and both modes |
| `toaxbxp_tb.sv`            | conversion, stored index, sign and saturation flag                            |
| `axbxp_array_tb.sv`        | 4×3 array, every accumulator, exact wavefront latency                          |
| `scratchpad_tb.sv`         | both read ports, latency, read-during-write                                    |
| `axbxp_accel_driver.sv`    | end-to-end stimulus and checker for the top level                              |
| `axbxp_accel_tb.sv`        | 4×4 array, 30 tiles                                                            |
| `axbxp_accel_full_tb.sv`   | default 32×32 / 2 MB build, 12 tiles, about 40 s                               |
| `axbxp_workload_tb.sv`     | default build, five layer-shaped tiles (below), about 20 s                     |

The two top-level tests run every configuration of the built K in both modes. They check every output
element and the exact start-to-done latency. They also require each of these to happen at least
once:
* several MACs per PE per cycle;
* output saturation;
* a dynamic index below the top block;
* output words reused as the next tile's activations.

`axbxp_workload_tb` runs the same driver in its layer mode. Each tile is a 32-channel × 32-pixel
block of one convolution layer, with the layer's whole reduction length streamed in one tile and
checked element by element:

| tile | layer (standard shape)                  | inputs per output | (K, NT_W, NT_A) | words per operand |
|------|-----------------------------------------|-------------------|-----------------|-------------------|
| 0    | AlexNet conv2, 5×5×48                   | 1200              | (2,1,2)         | 600               |
| 1    | ResNet50 3×3 conv, 3×3×64               | 576               | (2,1,2)         | 288               |
| 2    | MobileNetV2 1×1 projection              | 384               | (2,2,2)         | 384               |
| 3    | AlexNet layer, per-layer mixed setting   | 1200              | (2,1,1)         | 300               |
| 4    | MobileNetV2 layer, per-layer mixed setting | 384               | (2,1,2)         | 192               |

Operand values are random, not trained weights, so these tiles exercise the datapath at layer
length; they say nothing about network accuracy.

To run one test with plain Verilator, list the package files first:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/axbxp_pkg.sv tb/axbxp_ref_pkg.sv rtl/axbxp_pe.sv rtl/axbxp_control.sv \
      rtl/axbxp_array.sv rtl/toaxbxp.sv rtl/scratchpad.sv rtl/axbxp_accel.sv \
      tb/axbxp_accel_driver.sv tb/axbxp_accel_tb.sv --top-module axbxp_accel_tb -o sim
    ./obj_dir/sim

## 7. Changing it

* **Block size.** Edit `K` in `axbxp_pkg.sv`; N, the widths and `PACK_W` follow from it. The
  testbenches pick the matching configuration list (`cfg_table` in `axbxp_ref_pkg`).
* **Array size.** Use `ROWS`, `COLS` and `SPAD_BYTES` on `axbxp_accel`. The scratchpad word is
  max(ROWS, COLS) packs wide.
* **Accumulator.** `ACC_W` sets its width. It wraps on overflow.
