# A trilinear compute-in-memory attention engine in SystemVerilog

## The idea

In a Transformer the projection weights W_Q, W_K, W_V are fixed after
training, but attention multiplies two quantities computed at run time
(Q·K^T, then scores·V). A conventional non-volatile compute-in-memory array
can multiply a stored matrix by an input vector. It cannot multiply two
run-time operands without first writing one of them into the cells, and
ferroelectric writes are slow, costly and wear out the device.

A double-gate FeFET has a second, back gate. To first order its drain
current is

    I = V_DS · G0 · (1 + η · V_BG)

so a single read multiplies three things: the drain voltage (a row input),
the stored conductance (a weight) and the back-gate voltage (a second input).
With that three-operand primitive, attention can be rewritten so that only
the static projection weights ever sit in the cells:

| stage | computes | row input | stored | back gate | back-gate drive |
|---|---|---|---|---|---|
| 1 | R1 = X[n]·W_Qᵀ / √d_k | X[n] | W_Qᵀ | 1/√d_k | one constant on all columns |
| 2 | score[m] = R1·W_K·X[m]ᵀ | R1 | W_K | X[m] | one value per column, columns summed in the array |
| 3 | out[n] = Σ_i p[i]·X[i]·W_Vᵀ | X[i] | W_Vᵀ | p[i] | one value on all columns, arrays summed outside |

Stage 2 relies on Q·Kᵀ = X·W_Q·W_Kᵀ·Xᵀ. Stage 3 relies on P·V = P·X·W_V,
with the scalar probability p[i] applied through the back gate. No cell is
rewritten during inference.

## Chip organisation

`tcim_chip` has these parts:

- Four tiles. Each tile has 2×2 processing elements (PEs), and each PE has
  2×2 subarrays of 64×64 cells.
- A 4 MB global buffer with 64-byte words. One word holds one INT8 token.
- A chip accumulation unit.
- A special function unit (SFU) with softmax, LayerNorm and GELU.
- One controller.

The stages are mapped to tiles as follows:

| tile | holds | used by |
|---|---|---|
| 0 | W_Qᵀ | stage 1 |
| 1 | W_K | stage 2 |
| 2 | W_Vᵀ | stage 3, even tokens |
| 3 | W_Vᵀ (same weights) | stage 3, odd tokens |

A 64×64 projection occupies 8 of a tile's 16 subarrays (8 weight columns
per subarray, see below). Tiles 2 and 3 let stage 3 handle two tokens per
step. The accumulation unit adds the two tiles' results, which is the
inter-crossbar addition, and keeps a running sum over the sequence.

For each query token n the controller does this:

1. Read X[n] and run stage 1. Requantise the result: R1 = sat8(raw >>> SH_R1).
2. For every key token m, read X[m] and run stage 2. The tile's column sum,
   requantised, is score[m].
3. Run the softmax over the SEQ scores.
4. For i = 0, 2, 4, …, read X[i] and X[i+1] and run tiles 2 and 3 together
   with back gates p[i] and p[i+1]. Accumulate the results.
5. Write sat8(acc >>> SH_OUT) to the destination word.

Stages run one after another. Tokens are not overlapped.

## Inside a subarray read (`cim_array`)

This is the part that needs the most care.

**Signed weights.** Each signed 8-bit weight is stored as two magnitudes, a
positive one and a negative one. Each magnitude is cut into four 2-bit cells.
A weight column therefore takes 8 physical columns: pos[1:0], pos[3:2], …,
neg[7:6]. That is exactly the span of one 8:1 column multiplexer. So each
ADC serves one weight column, and a 64-column subarray holds 8 weight
columns. While the multiplexer steps through the 8 columns, the adder
shifts each ADC code by 2·slice. It adds positive slices and subtracts
negative ones.

**Signed inputs.** The row input is applied one bit at a time, LSB first.
The last bit, bit 7, is weighted −2⁷ (two's complement).

**Removing the "1".** The device law has a term G0·V_DS that does not depend
on the back gate. For every input bit the array is read twice with the same
wordlines:

- a reference read with all back-gate codes at 0;
- the modulated read.

The shift register accumulates (modulated − reference) << bit. What remains
is proportional to x·w·bg.

**Timing.** Each read has one sense cycle and 8 conversion cycles. Eight bits
× two reads × 9 cycles, plus one final cycle, gives 145 cycles. The PE adds
one register stage on each side (147 cycles), and so does the tile (149
cycles).

**Units.** The back-gate code is signed 9 bits. Code 256 stands for the "1"
of the device law. The ADC LSB equals one level-1 cell at zero bias. Each
column result is therefore about x·w·bg / 256. Every ADC reading is floored
and clipped at 255, and the subarray reports any clip. With `ADC_SH = 0` and
a wide ADC the result is exactly x·w·bg. The unit testbenches use that
setting to check the arithmetic, and check the default, lossy setting
against a bit-exact model.

## Number formats in the special function unit

These formats were chosen for this design.

**Softmax** (`softmax_unit`, 4 pipeline stages):

- Scores are signed Q3.4.
- Stage 1 finds the maximum with a comparator tree.
- Stage 2 looks up e = round(255·exp(−d/16)), where d = max − x.
- Stage 3 sums the e values with an adder tree.
- Stage 4 normalises the sum to 8 bits and looks up r = ⌊2¹⁵/m⌋.
- Output: p = min(255, (e·r) >> L), an unsigned 8-bit probability with
  256 = 1.0.
- The probabilities sum to about 256.

**LayerNorm** (`layernorm_unit`, 3·D + 3 cycles):

- Pass 1 computes the floor mean.
- Pass 2 computes the floor variance.
- The variance is scaled by 4ᵏ into [0, 255]. The inverse square root comes
  from the table round(4096/√m), capped at 4095.
- Pass 3 applies γ (Q1.6) and β.
- Output is Q2.5 (32 = 1.0).

**GELU** (`gelu_unit`, 3 stages):

- GELU(x) ≈ x·σ(1.702x).
- 1.702x is formed by shift-and-add as x·109/64.
- σ comes from the table round(256/(1+exp(−s/16))).
- A multiply completes the product.

**Tables.** The four tables live in `rtl/*.mem` and are read with
`$readmemh("rtl/<name>.mem")`. Simulations must therefore start in the
directory that contains `rtl/`. Each table follows the formula given above
and in its module header.

## Analog parts

`dgfefet_crossbar` and `adc_model` are behavioural models, not circuits:

- Cell currents are integers.
- A cell never conducts backwards: a negative (256 + bg) is clamped to zero.
- The ADC is ideal and uniform.

Programming writes one weight per cycle, to all 8 of its cells.

## Where this departs from the source architecture

- The grid is fixed at 2×2 at every level. The mapping of stages to tiles is
  fixed, as above.
- The attention head is fixed to d_model = d_k = 64. A wider model would need
  row tiling, which is not built.
- Stages and tokens run sequentially, with no pipelining between tokens.
  Stage 3 time-multiplexes two tiles over the sequence, instead of giving
  each token its own crossbar.
- The H-tree interconnect is plain parallel wiring. Its latency is covered
  only by the register stages of the PE and the tile.
- The requantisation shifts `SH_R1`, `SH_SCORE` and `SH_OUT` and the stage-1
  code `S1_BG = 32` (256/√64) are parameters. They are not calibrated values.
- Only the attention datapath is built. LayerNorm and GELU are available as
  separate commands on buffer words. The feed-forward layers are not mapped
  to the tiles.
- The bilinear and digital baselines the architecture is compared against
  are not part of this design.

## Lint notes

Verilator reports SYNCASYNCNET on `rst_n`. The cause is that the assertions
use `disable iff (!rst_n)` while the flops reset asynchronously. This is
harmless. The `*_busy` outputs of sub-blocks are unused at the level above,
because sequencing uses `done`.

## Simulating

Run from the directory that holds `rtl/` and `tb/`, for example:

    verilator --binary --timing --assert -Irtl rtl/tcim_pkg.sv \
      rtl/dgfefet_crossbar.sv rtl/adc_model.sv rtl/cim_array.sv \
      tb/tb_cim_array.sv --top-module tb_cim_array -o sim
    ./obj_dir/sim

Every testbench prints `TB_RESULT checks=N failures=M`.

- Unit testbenches: `tb_dgfefet_crossbar`, `tb_adc_model`, `tb_cim_array`,
  `tb_cim_pe`, `tb_cim_tile`, `tb_global_buffer`, `tb_accum_unit`,
  `tb_softmax_unit`, `tb_layernorm_unit`, `tb_gelu_unit`.
- End-to-end testbench: `tb_tcim_chip`. It runs the full-size tiles at a
  sequence length of 4 with a 4 KB buffer:
  - It programs random weights and runs a head, comparing every output with
    a bit-exact model of the readout, softmax and requantisation.
  - It runs a saturated head that forces ADC clipping.
  - It then runs LayerNorm and GELU.
  - It counts each mechanism and fails if one never occurs.

  Building it with verilator takes several minutes, because of the sixty-four
  64×64 crossbar models.

No testbench runs the chip at the full 64-token sequence with the 4 MB
buffer. The largest configuration simulated end to end is 4 tokens. At 64
tokens one head takes roughly 64 × (1 + 64 + 32) × 150 ≈ 0.93 M cycles.
