# LightMamba RTL: a W4A4 decode engine for Mamba2 with online Hadamard rotation

When a large language model generates text one token at a time, almost all of the work is
matrix–vector products against weights that have to come from DRAM. The memory bandwidth
therefore sets the token rate. For a Mamba2 model there is a second, smaller cost: the
state-space (SSM) layer. It is element-wise arithmetic on a per-layer hidden state that also
lives off chip.

This design attacks both costs:

* **4-bit weights and activations (W4A4).** Each weight and each activation is an INT4 value with
  one scale per group of 128. This halves the bytes per weight compared with 8 bits.
  Quantising the activations to 4 bits normally fails because a few channels carry large
  outliers, and for Mamba those channels change from token to token. The fix is to rotate the
  activation vector with a Hadamard matrix before quantising it. The rotation spreads every
  outlier over all channels, and the same rotation is folded into the weights offline, so the
  product is unchanged. Two of the three rotations can be folded away completely. The third sits
  in front of the output projection, after the SSM, so it must be done *online* in hardware.
  That is the Hadamard transform unit (HTU).
* **An INT8 SSM with power-of-two scales.** Every re-quantisation inside the SSM is then an
  arithmetic shift with rounding, not a multiply.
* **A schedule that overlaps the SSM with the input projection.** The input-projection rows are
  produced in an order chosen so that the SSM of head *h* runs while the matrix unit is still
  producing head *h+1*.
* **Tiling the SSM into 2 × 8 state tiles.** No whole intermediate tensor is ever stored.

The RTL implements one Mamba2 block (one layer) for one decode step. Its default sizes are those
of Mamba2-2.7B:

| Size | Value |
|---|---|
| d_model | 2560 |
| d_inner | 5120 |
| heads × head dimension | 80 × 64 |
| d_state | 128 |
| conv width | 4 |

A host sequences the layers. It streams the residual vector in, the weights in, and the SSM
hidden state in and out.

## One token through the block

```
x_l ──► RMSNorm-1 ──► INT4 group quantiser ──► MMU (input projection, reordered rows)
                                                        │ one element per cycle
                                                        ▼
        h_{t-1} tiles ─────────────────────────────► SSM unit ──► h_t tiles
                                                        │ y (INT8, 2 channels per beat)
                                                        ▼
                     RMSNorm-2 (with gain) ──► HTU (5120-point rotation) ──► rotated buffer
                                                                                │
x_{l+1} ◄── + x_l ◄── MMU (output projection) ◄── INT4 group quantiser ◄────────┘
```

`lightmamba_top` steps through five phases:

1. **NORM1.** The residual `x_l` (INT32) is stored and passed through RMSNorm-1. The first
   norm's gain is assumed folded into the input-projection weights, so this norm only divides by
   the RMS. The result is quantised to INT4 in groups of 128, with one power-of-two exponent
   per group.
2. **INPROJ.** The matrix unit (MMU) computes the input projection. It takes D_OUT = 4 output
   rows at a time, and each row is a sweep of 16-wide weight tiles. Every finished block of 4
   results is serialised into the SSM unit one element per cycle. The SSM unit starts as soon as
   the first rows arrive (see the next section).
3. **ROT.** The SSM outputs pass, one element per cycle, through RMSNorm-2 (with its per-channel
   gain) into the HTU. The 5120 rotated values are written to a buffer.
4. **QUANT2.** The buffer is read back through the same INT4 group quantiser.
5. **OUTPROJ.** The same MMU computes the output projection. Each block of 4 results is shifted
   right by `op_shift`, added to the stored residual and sent out as `y` (saturated INT32).
   `done` pulses with the last beat.

NORM1 and QUANT2 share one quantiser, and INPROJ and OUTPROJ share one MMU. On-chip memory is
mainly these buffers:

* the residual, 2560 × INT32;
* the quantised activations with their group exponents, 5120 × INT4;
* the rotated vector, 5120 × 29 bits;
* the HTU transpose buffer, 40 × 128 words;
* the conv1d state, 5376 × 3 × INT8.

## The reordered input projection

In Mamba2 the input projection produces, per token, these values, in 10576 rows in all:

* Δ, one per head (80);
* B and C (128 each);
* x and z (5120 each).

The SSM of a head needs that head's Δ, B, C and x, and its gate needs z. If the rows come out in
the usual order (z, x, B, C, Δ), no head can start until nearly all rows are done. Here the weight
rows are laid out as:

```
Δ[0..79], B[0..127], C[0..127], then for each head h: x_h[0..63], z_h[0..63]
```

So the SSM unit holds Δ, B and C for the whole token after 336 rows. From then on it receives
one complete head every 128 rows. While the MMU produces the rows of head *h+1*, the SSM unit
works through head *h*.

The reordering costs nothing in hardware. It is just the order in which the weight rows are
stored. The host must lay out W_in in this order; the matching conv1d channels are listed
under *Configuration* below.

The SSM unit holds x and z for two heads (ping-pong). A head's bank is freed when its last state
tile has been processed. If the MMU gets two heads ahead, the SSM unit's `in_ready` falls. The
serialiser then holds its block of four results, and the MMU holds the last weight tile of the
next row block (`w_ready` low) until the serialiser is free. The weight stream is the only place
where this stall becomes visible outside the block.

## The SSM unit

Per head *h* and token, the SSM computes:

```
Δ      = softplus(dt_raw + dt_bias[h])          one per head
Ā      = exp(Δ · A[h])                          A[h] < 0
B̄[n]   = Δ · B[n]
h[p,n] = Ā · h_prev[p,n] + B̄[n] · x[p]          p < 64, n < 128
y[p]   = Σ_n h[p,n] · C[n] + D[h] · x[p]
out[p] = y[p] · SiLU(z[p])
```

Before use, x, B and C go through a width-4 causal depthwise convolution and SiLU. Every product
is INT8 × INT8. Its result is brought back to INT8 by `round(v / 2^s)` with saturation, where `s`
is a configurable shift for that tensor role; together these shifts form `ssm_shifts_t`.
Rounding is half up (add 2^(s−1), then arithmetic shift). The sums `Āh + B̄x` and `y + Dx` are
saturating INT8 additions. The final `y` sum over the 128 states is kept in a wide accumulator
and shifted once.

The unit has two parts, and the input sequencer feeds both:

* **The Δ path and the x/B/C path.** Δ values go through:
  1. an INT8 add of the bias;
  2. the softplus table;
  3. the Δ·A multiplier;
  4. the exp table.

  The results, Δ and Ā, are written per head into small buffers. B, C and x go through the
  conv1d (taps and state held per channel) and a shared SiLU table. B and C go to a B/C buffer
  and x into the head bank. z is re-quantised, passed through SiLU and stored in the head bank.
* **The tile engine.** For every full head bank it walks p-tiles of 2 rows (outer loop) and
  n-tiles of 8 states (inner loop). Each step takes one 2 × 8 tile of `h_prev` from the
  `h_in` stream. The tile passes through an eight-stage pipeline:
  1. read Δ, Ā, B, C and x;
  2. multiply B̄ = Δ·B (1 × 8 lanes), Āh and B̄x (2 × 8 lanes);
  3. add: h_t = Āh + B̄x, which is also sent to `h_out`;
  4. multiply h_t·C (2 × 8 lanes);
  5. reduce the lanes into the per-row y accumulators;
  6. re-quantise y and form D·x;
  7. add the skip term;
  8. multiply by SiLU(z) and output.

  After the 16th n-tile of a p-tile, two outputs leave (`out_data`, 2 channels per beat).

The engine accepts one tile per cycle when `h_in` keeps up. A head takes 64/2 × 128/8 = 512
cycles. That is far less than the 2 × 64 rows × 160 tiles = 20480 cycles the MMU needs to produce
the head, so the SSM is never the bottleneck at these sizes. The multiplier groups sized "1 × 8"
and "2 × 8" are where the tile size comes from.

Nothing intermediate is stored at tensor size:
* Ā·h, B̄·x and h·C are used in the cycle after they are formed;
* h_t goes straight to DRAM;
* only Δ, Ā, B, C (per token) and two heads of x/z are buffered.

## The online Hadamard rotation (HTU)

The output projection's input has 5120 = 40 × 128 elements. A Hadamard matrix of that order is
built as a Kronecker product:

```
H5120 = H40 ⊗ H128,   out[k·128 + j] = Σ_k' H40[k,k'] · (H128 · seg_k')[j]
```

The input vector is split into 40 segments of 128, and the rotation is applied in two steps:

1. **128-point FHT on each segment** (`ht128`). The unit is a streaming fast Hadamard transform
   of seven radix-2 stages with butterfly distances 64, 32, …, 1. Each stage (`ht_stage`) holds
   the first half of a block in an input FIFO. When the second half arrives, it pairs the
   elements:
   * the sum `a+b` goes on at once;
   * the difference `a−b` is parked in an output FIFO;
   * the parked differences leave while the next block's first half fills the input FIFO.

   One element enters and one leaves every cycle. The word grows one bit per stage; there is no
   1/√128 scaling.
2. **A transpose.** Segment *k*'s FHT outputs go to bank *k* of a 40-bank buffer (`htu`). When
   all 40 segments are in, address *j* is read from every bank at once, giving the 40-vector
   {k·128 + j}.
3. **40-point transform** (`ht40`). A small matrix unit multiplies the 40-vector by a fixed ±1
   matrix: adds and subtracts only, one vector per cycle. H40 is [[H20, H20], [H20, −H20]], with
   H20 the Paley type-I Hadamard matrix of the prime 19. It is computed at elaboration by a
   constant function. The offline rotation of the weights must use the same matrix and the same
   index map. The output is beat *j*: elements k·128 + j for k = 0…39.

RMSNorm-2 has 16-bit output. The result is 16 + 7 + 6 = 29 bits wide and exact: H·Hᵀ = 5120·I.
No scaling is lost, because the per-group quantiser after it picks its own exponent.

One token's rotation takes 5120 cycles to collect, 128 cycles to transpose and 40-way transform,
and the FHT pipeline latency (about 128 cycles).

## The matrix unit

`mmu` takes 16 INT4 activations and a 4 × 16 tile of INT4 weights per cycle. It computes 4
dot products of 16 through a registered adder tree.

The products use DSP packing, in `dsp_pack`. Two weights that share an activation are packed
into one operand, `(w_hi << 8) + w_lo`, and multiplied once. The low product is the bottom 8
bits (signed). The high product is what remains, shifted down by 8 after the borrow from the
low product is removed. 64 MACs therefore take 32 multipliers.

For group scaling, the unit keeps a running sum of tile results for each lane. At the last tile
of a 128-wide group, it:
1. multiplies the group's partial sum by the row's 8-bit unsigned weight-group scale;
2. shifts it left by the activation group's exponent;
3. adds it into a 64-bit accumulator.

At the last tile of the row block, the 4 accumulators are saturated to INT32 and output. Latency
is two cycles after the last tile.

A tile of 64 INT4 weights is 32 bytes. At 400 MHz that is 12.8 GB/s, which matches the 12 GB/s
DRAM bandwidth of the VCK190 board the design targets. A wider MMU would only wait for weights.

## Normalisation and quantisation

**`rmsnorm`** works in four steps:
1. It buffers the N-element vector while accumulating the sum of squares.
2. It divides the sum by N.
3. It takes the integer square root of the mean, after normalising it by an even shift so that
   the root keeps about 31 significant bits.
4. It forms inv = 2^62 / root by restoring division.

Steps 2–4 are sequential, one bit per cycle: about 80 + 32 + 63 cycles. Each element is then
multiplied by `inv` (and by its 16-bit gain with 12 fractional bits, if enabled), shifted and saturated to
a 16-bit output with 10 fractional bits. Output is one element per cycle with valid/ready.

**`act_quant`** buffers a group of 128 values and finds the largest magnitude. It picks the
exponent `s = max(0, bitlength − 3)` and emits `round(x / 2^s)` saturated to [−8, 7], together
with `s`.

## Configuration and number formats

| Item | Format |
|---|---|
| Weights | INT4, groups of 128 along the input dimension, one 8-bit unsigned scale per output row and group (`w_scale`, constant within a row) |
| Activations into the MMU | INT4, groups of 128, power-of-two scale |
| SSM tensors | INT8; Δ and SiLU outputs Q3.4, Ā Q0.7 |
| `dt_bias`, `A`, `D` | INT8 per head (`ssm_cfg_*`, selected by `ssm_cfg_e`) |
| conv1d | 4 INT8 taps (oldest first) and a 16-bit bias per channel (`conv_*`); channels 0…5119 are x, 5120…5247 B, 5248…5375 C |
| RMSNorm-2 gain | 16 bits with 12 fractional bits, per channel (`g_*`) |
| Non-linear tables | 256 entries each, computed from `ln`, `exp` at elaboration |
| `sh` | 12 shifts, one per SSM re-quantisation point |
| `op_shift` | output-projection result → residual scale |

## Interface and stream orders (`lightmamba_top`)

* `start` begins a token when `busy` is low. `done` pulses with the last `y` beat.
* `x_valid/x_ready/x_data` carries the residual: 2560 INT32 values. It is accepted only in NORM1.
* `w_valid/w_ready/w_data/w_scale` carries weight tiles, 4 rows × 16 columns per beat.
  * Input projection: 2644 row blocks in the reordered row order above, each 160 tiles along
    d_model.
  * Output projection: then 640 row blocks, each 320 tiles along d_inner.
  * `w_ready` can fall on a row block's last tile (see above).
* `h_in_valid/h_in_ready/h_in` carries h_{t−1} tiles of 2 × 8 INT8. The order is head, then
  p-tile (2 rows), then n-tile (8 states), row-major inside a tile.
* `h_out_valid/h_out` carries h_t in the same order. There is no back-pressure.
* `y_valid/y_data` carries x_{l+1}, 4 INT32 per beat in row order. There is no back-pressure.

At full size one token and layer takes about 730k cycles in simulation, with the bench inserting
gaps in every input stream. The MMU-bound minimum is 2644 × 160 + 640 × 320 = 628k cycles. At
400 MHz that is 1.6–1.8 ms per layer, or about 8.5–10 tokens/s for 64 layers.

## Where this RTL follows the source design and where it chooses

These parts follow the published architecture:
* the three units: the time-shared MMU with d_in × d_out packed MACs, the fully pipelined SSM
  unit, and the HTU;
* the 7-stage streaming FHT;
* the 40-point transform as a fixed ±1 matrix unit;
* the reordering of Δ, B, C first and then x and z head by head;
* tiling of the SSM state;
* INT4 group-128 linear layers and the INT8 power-of-two SSM.

These are choices made here, because the source does not give them:
* d_in = 16, d_out = 4, and p_p × n_p = 2 × 8;
* the DSP packing layout;
* the exact H40 matrix and how the two transforms are joined;
* group scales: an 8-bit integer for weights, power-of-two for activations;
* one power-of-two exponent per tensor role in the SSM, where the source says "per group";
* the conv1d arithmetic and clear-on-reset;
* the RMSNorm algorithm;
* the table-based softplus/exp/SiLU and their fixed-point formats;
* all handshakes, the phase controller, and the stream orders.

Known differences from the source design:
* The SSM unit is one fused register pipeline. The source describes operator units joined by
  FIFOs, with parallelism balanced per operator. The arithmetic is the same; the buffering
  differs.
* The block diagram of the source labels the Δ·A, D·x and y·SiLU(z) multipliers as 8 lanes wide.
  Here Δ·A is one lane, because there is one Δ per head. D·x and y·SiLU(z) are 2 lanes wide,
  because a 2 × 8 tile completes only 2 output channels at a time; 8 lanes would sit idle.
* The source describes Δ as indexed by (head, p) in one figure. Mamba2 and the surrounding text
  use one Δ per head, which is what is built.
* Only the W4A4 configuration is built. The W8A8 mode that was also evaluated would need an INT8
  MMU and quantiser.
* The cross-segment Hadamard is fixed at 40 points. Smaller Mamba2 models (d_inner 1536–4096)
  need 12-, 16-, 24- or 32-point matrices, so the defaults only fit the 2.7B model.
* The host, DMA engines and DRAM are outside the RTL. Their streams are the top's ports.
* Layer sequencing and embedding/LM-head are left to the host.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:
* compares against a model written independently inside the bench;
* uses `$urandom` stimulus;
* has a watchdog;
* ends with a `TB_RESULT checks=… failures=…` line.

| Bench | What it checks |
|---|---|
| `tb_dsp_pack` | every weight/activation combination, both products |
| `tb_mmu` | random rows with group scales, and the two-cycle latency |
| `tb_ht128` | every output against the Walsh–Hadamard sum, with the input back to back and with gaps |
| `tb_ht40` | against the matrix, and orthogonality |
| `tb_htu` | full 5120-point rotation of random vectors against H40 ⊗ H128 |
| `tb_emu`, `tb_nl_lut` | rounding and saturation; every table entry to within 1 LSB |
| `tb_act_quant` | group exponents and values |
| `tb_conv1d` | several tokens through the state history |
| `tb_rmsnorm` | against a real-valued model, to within 2 LSB, under random output back-pressure |
| `tb_ssmu` | two tokens, 4 heads: every h_t element and every output is bit-exact against a reference of the formulas above; h_in arrives with random gaps, and the head-buffer stall must occur |
| `tb_lightmamba_top` | reduced size (4 heads of 160, d_model 256, state 16, segments of 16): two tokens end to end |
| `tb_lightmamba_full` | the same bench at the default (2.7B) sizes, no parameter overrides: one token, about half a minute in Verilator |

The two top-level benches check:
* every MMU result of both projections, against a reference built from the unit's own quantised
  activations;
* every `y` value;
* the order in which MMU results enter the SSM unit and SSM outputs enter RMSNorm-2;
* every rotated element, against H40 ⊗ H (Sylvester) applied in the bench to the HTU's input;
* conservation of energy through the HTU;
* all beat counts and one `done` per token;
* that the token's cycle count lies between the MMU-bound minimum and 4× it.

They also count mechanisms, and fail any that never happens:
* the weight-stream stall;
* SSM back-pressure on the serialiser;
* both SSM head banks full;
* quantiser back-pressure on RMSNorm-1;
* gaps in the hidden-state stream;
* all five phases.

To run a bench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/lm_pkg.sv rtl/*.sv tb/tb_ssmu.sv --top-module tb_ssmu
./obj_dir/Vtb_ssmu
```

(List `lm_pkg.sv` first. A repeated file name on the command line is harmless.)

## Files

| Area | Files |
|---|---|
| Package | `rtl/lm_pkg.sv`: sizes, types, SSM config enum, shift struct, `requant8` and `add8` |
| Matrix unit | `rtl/dsp_pack.sv`, `rtl/mmu.sv` |
| Rotation | `rtl/ht_stage.sv`, `rtl/ht128.sv`, `rtl/ht40.sv`, `rtl/htu.sv` |
| SSM | `rtl/emu.sv`, `rtl/nl_lut.sv`, `rtl/conv1d.sv`, `rtl/ssmu.sv` |
| Norm / quantiser | `rtl/rmsnorm.sv`, `rtl/act_quant.sv` |
| Top | `rtl/lightmamba_top.sv` |
| Benches | `tb/tb_<block>.sv`, `tb/tb_lightmamba_top.sv`, `tb/tb_lightmamba_full.sv` |
