# A hybrid analog–digital normalizing-flow sampler for lattice field theory

Lattice field theory needs many statistically independent field
configurations φ drawn from p(φ) ∝ e^(−S(φ)). Markov-chain methods such as
hybrid Monte Carlo produce correlated samples one after another. A
normalizing flow instead turns independent Gaussian noise into proposals
φ in a fixed number of steps, and it also reports the density q(φ) of each
proposal. A Metropolis accept/reject step then corrects the remaining
mismatch between q and p.

Almost all of the flow's arithmetic is matrix–vector multiplication with
frozen weights. This design therefore splits the work in two:

* A **resistive-memory crossbar** stores the frozen base weights as
  conductances. It multiplies a whole input vector by a weight block in a
  single analog read (Ohm's law per cell, Kirchhoff's law per line).
* **Digital logic** does everything small, exact or changeable. This
  covers the low-rank (LoRA) weight corrections used to fine-tune the
  model to new action parameters, normalization, time embeddings, the
  coupling-layer update of the field, and the bookkeeping of the
  log-density.

The RTL here is that digital half: a complete, cycle-accurate solver. It is
paired with a behavioural model of the analog crossbar and its converters.
The default size is a 4 × 4 lattice with a 32 × 32 crossbar, the size at
which such a system has been run on real resistive-memory silicon.

## 1. What one sample costs: the flow step

The field x (L × L, default L = 4) lives in `coupling_update`. The host
loads a Gaussian prior sample x⁰ into it. The solver then runs `n_steps`
timesteps (default and maximum 8). Every step uses the same network
weights; only the time embedding differs from step to step.

1. **Split.** A checkerboard mask decides which half of the lattice is
   frozen at step t:
   `M[i][j] = (t mod 2)` if `i + j` is even, else `1 − (t mod 2)`.
   Sites with M = 1 form x_a. Because the mask flips with the parity of
   t, every site is transformed every other step.
2. **Network.** x_a, with the other sites set to 0, is copied into the
   feature buffer in patch order (P × P patches, default P = 2). The
   network then computes two numbers per site, s1 and s2.
3. **Update.** Each non-frozen site becomes `x ← (x − s1) · e^(−s2)`.
   Frozen sites keep their value. s2 of every rewritten site is added to
   a 32-bit accumulator.

After the last step the field holds φ, and `logdet = Σ_t Σ_k s2` (Q8.8).
The host obtains the proposal density as
`log q(φ) = log r(x⁰) − logdet`, where r is the Gaussian prior. It then
runs the accept/reject step. Neither the prior sampler nor the
accept/reject step is in hardware here.

## 2. The analog half (`analog_mvm_core`)

This file is a behavioural model of an analog macro and its converters, not
logic to synthesize. It models:

* **Cells.** 32 × 32 one-transistor-one-resistor cells. Each cell holds an
  integer conductance code in µS (7 bits). After reset every cell holds
  50 µS. A cell can be written in two ways. `prog_*` stores a value
  directly. `pulse_*` applies one SET or RESET pulse, as a real device
  needs. A SET with word-line code `wl` moves the cell up to about
  `wl·5/12` µS; it never lowers a cell. The code counts 2 mV steps above
  0.90 V, so the linear set characteristic spans 0–100 µS. A spread of
  −4…+3 µS from an LFSR stands in for device variation. A RESET lowers
  the cell by 6–9 µS. `verify_row`/`verify_col` select one cell, and
  `verify_g` reads its conductance back.
* **Signed weights from positive conductances.** Column 31 is a reference
  line, programmed to the middle of the 20–80 µS window (50 µS). The
  amplifier of column j takes the difference between its current and the
  reference current. The effective weight of cell (r, j) is therefore
  `(G[r][j] − G[r][31]) / 16`, which covers [−1.875, +1.875]. This leaves
  31 usable output columns.
* **Inputs.** Each row has a DAC register. Its 16-bit code stands for a
  read voltage proportional to the code; in the modelled system the full
  scale is ±0.1 V. The code is the Q8.8 activation itself.
* **Read-out.** An optional ReLU sits in the trans-impedance amplifier,
  followed by a 14-bit ADC with saturation. The ADC code of column j is

      sat14( relu?( floor( Σ_r (G[r][j] − G[r][31]) · v[r] / 16 ) ) >> 2 )

  Digital logic multiplies it by 4 to get back a Q8.8 value. The ADC
  therefore spans ±128.0 with a resolution of 4 Q8.8 LSBs.
* **Timing.** `read_start` samples the DAC registers, and `adc_valid`
  pulses `READ_CYCLES` = 2 clocks later. That figure covers a read path of
  under 18 ns at a 100 MHz digital clock: a 10 ns read pulse, 6.1 ns of
  input decoding, two 0.8 ns conversions and 0.19 ns of shift-and-add.

Apart from the programming spread, the model is deliberately ideal. It has
no read noise, drift or line resistance. The ±3 µS errors left after
write-verify show up in the weights; in the real system they are meant to
be absorbed by
the digital LoRA weights, which can be retrained without touching the array.

## 3. Mapping the network onto the crossbar: layer descriptors

This is the part that takes the most explaining.

The coupling network is an MLP-mixer:

* **Patch embedding.** An FC layer maps each P × P patch to C channels,
  giving a matrix X of size S × C, where S = L²/P² is the number of
  patches.
* **m mixer blocks.** Each block has two parts:
  * Token mixing: `U[:,c] = X[:,c] + W2 σ(W1 BN(X + t)[:,c])` for every
    channel c.
  * Channel mixing: `Y[s,:] = U[s,:] + W4 σ(W3 BN(U)[s,:])` for every
    patch s.
  * W1…W4 each have a LoRA branch B·A in parallel.
* **Output embedding.** A transposed convolution with kernel = stride = P
  maps C channels back to 2 values per pixel. Because patches do not
  overlap, this is the same as an FC layer of C → 2P² per patch.
* **Regression.** A per-pixel FC layer of 2 → 2 produces s1 and s2.

Every one of these is "one matrix applied to many vectors". `layer_engine`
runs exactly that. Each layer is one `layer_desc_t` word (see `anf_pkg`) in
a table of 16 entries inside `anf_solver`:

| field | meaning |
|---|---|
| `src_base`, `src_vstride`, `src_estride` | input element e of vector v is at `src_base + v·src_vstride + e·src_estride` |
| `dst_base`, `dst_vstride`, `dst_estride` | same for outputs |
| `n_vec`, `in_len`, `out_len` | number of vectors, input length (crossbar rows, ≤ 32), output length (crossbar columns, ≤ 31) |
| `row_base`, `col_base` | the crossbar block that holds this layer's weights |
| `temb_en`, `bn_en`, `chan_is_vec`, `bn_base` | add the time embedding, then batch-normalize; the channel index is the vector index (token mixing) or the element index (channel mixing) |
| `relu_analog` | ReLU in the amplifier, before the LoRA sum |
| `lora_en`, `lora_base` | add `B(A x)`; A and B stored from `lora_base` |
| `relu_digital` | ReLU after the LoRA sum |
| `residual` | add the old destination value (the skip connection) |

A **transpose** costs nothing: the token-mixing layer reads X with stride
C between elements and stride 1 between vectors, and the channel-mixing
layer swaps the two strides.

A **skip connection** is a `residual` flag on the second layer of each
MLP, with its destination set to the first layer's source. The engine
then reads the old value, adds, and writes back in place.

The **LoRA sum** can sit at either of two points. With `relu_analog`, the
LoRA output is added after the ReLU, which is where the block diagram of
the modelled system draws the sum. With `relu_digital`, it is added before
the ReLU, which is what the equations σ((W + BA)x) say. Both are provided
and a descriptor picks one.

For each vector the engine goes through four phases:

* **LOAD.** One element per cycle: gather, add the time embedding,
  normalize, keep a copy for LoRA, and write the DAC row.
* **FIRE.** Start the crossbar read and the LoRA unit together.
* **WAIT.** Wait for both.
* **WB.** One output per cycle: `4·adc + lora`, then ReLU, then residual,
  then saturate and write.

The DAC rows are cleared when a layer starts, so rows belonging to other
layers contribute 0. All weight blocks can therefore share the array as
long as their (row, column) rectangles do not overlap.

The end-to-end test uses the following mapping for L = 4, P = 2, C = 8,
D_S = 8 and m = 1. Its feature buffer layout is: x_a at 0, X at 32, token
hidden at 64, channel hidden at 128, output embedding at 160, s1/s2 at 192.

| # | layer | vectors × (in → out) | rows | cols | options |
|---|---|---|---|---|---|
| 0 | patch embedding | 4 × (4 → 8) | 0–3 | 0–7 | analog ReLU |
| 1 | token W1 | 8 × (4 → 8), strided input | 0–3 | 8–15 | temb, BN per vector, LoRA, digital ReLU |
| 2 | token W2 | 8 × (8 → 4), strided output | 4–11 | 0–3 | LoRA, residual |
| 3 | channel W3 | 4 × (8 → 8) | 4–11 | 4–11 | BN per element, analog ReLU, LoRA |
| 4 | channel W4 | 4 × (8 → 8) | 4–11 | 12–19 | LoRA, residual |
| 5 | output embedding | 4 × (8 → 8) | 4–11 | 20–27 | – |
| 6 | per-pixel regression | 16 × (2 → 2) | 12–13 | 0–1 | – |

This mapping uses 292 crossbar weights. A layer larger than 32 × 31 would
have to be split across several reprogrammings of the array, and the
engine does not do that.

## 4. Arithmetic

All digital values are signed 16-bit Q8.8. Every narrowing step rounds
towards −∞ (arithmetic shift) and saturates.

* **Time embedding:** `sat(x + t[step][chan])`. The host writes a table of
  8 steps × 32 channels.
* **Batch normalization:** `sat(floor(x·γ / 256) + β)`, 64 (γ, β) entries.
  Mean and variance are folded into γ and β. After reset every entry is
  the identity.
* **LoRA:** `h = sat(floor(A x / 256))` (rank 2), then
  `y = sat(floor(B h / 256))`. This uses one multiplier with a 32-bit
  accumulator and takes `2·in_len + 2·out_len + 1` cycles. Weights are
  laid out as A row-major from `lora_base`, then B row-major.
* **e^(−s) (`exp_neg_unit`):**
  1. Compute `u = −s·log₂e`, with log₂e as 5909 / 4096.
  2. Split u into an integer part n = ⌊u⌋ and a fraction f.
  3. Take 2^f from the table `round(16384 · 2^(k/16))`, k = 0…16, with
     linear interpolation on the low 4 bits of f.
  4. Shift by n.

  Error is about 0.2 % plus one LSB. Results above 127.996 saturate.
* **Update:** `sat(floor((x − s1)·e^(−s2) / 256))`.

## 5. Modules

| file | role |
|---|---|
| `anf_pkg.sv` | types, widths, `layer_desc_t`, `mask_bit()`, `patch_addr()`, `sat16()` |
| `analog_mvm_core.sv` | behavioural model of the crossbar, amplifiers and converters |
| `write_verify_ctrl.sv` | closed-loop programming of one cell: pulse, verify, repeat |
| `time_embedding.sv` | embedding table and adder |
| `batchnorm_unit.sv` | (γ, β) table and affine map |
| `lora_unit.sv` | LoRA weight memory and sequential A-then-B multiply-accumulate |
| `layer_engine.sv` | feature buffer (256 words) and per-layer sequencer; instantiates the three units above |
| `exp_neg_unit.sv` | combinational e^(−s) |
| `coupling_update.sv` | field memory, mask, update, log-Jacobian accumulator |
| `anf_solver.sv` | top: descriptor table, step/layer loop; instantiates crossbar model, write-verify controller, engine, update |

### Write-verify programming

`write_verify_ctrl` programs one cell at a time. It reads the cell first.
If the cell is within ±3 µS of the target (the published window is
±3.5 µS, and codes are whole µS), it is done. If the cell is too low, the
controller applies a SET. The word-line code comes from the linear set
characteristic, `target·12/5`, plus a boost that grows by 2 with each
further SET. If the cell is too high, the controller applies a RESET and
restarts the boost. After 30 pulses without success it gives up with
`ok = 0`; the published loop converges in about 20–30 cycles. Each pulse
takes two clocks: the pulse, then the verify read.

### Using the top level

1. Hold `rst_n` low for at least one clock edge.
2. Program the crossbar. Use the write-verify port one cell at a time:
   pulse `wv_start` with `wv_row`, `wv_col`, `wv_target`, then wait for
   `wv_done` and check `wv_ok`. Or write codes directly through `prog_*`.
   Program column 31 too if the reference should differ from 50 µS.
3. Write the descriptors (`desc_*`), LoRA weights (`lora_*`),
   normalization pairs (`bn_*`) and time embeddings (`temb_*`).
4. Write x⁰ (`x_*`, row-major).
5. Pulse `start`, with `n_layers`, `n_steps`, `in_base` (where x_a goes)
   and `out_base` (where the last layer leaves its s1/s2 pairs, patch
   order, s1 first).
6. Wait for `done`, then read φ through `x_raddr`/`x_rdata` and take
   `logdet`.

Do not program cells while `busy` is high; an assertion flags it. While
`busy` is high, writes to the descriptor table, the field and the
feature buffer are ignored. To fine-tune to new action parameters, rewrite
the LoRA weights and leave the crossbar alone.

### Cycle counts

* Write-verify of one cell: 2 cycles per pulse plus 2 (start and final
  verify), so at most 62 cycles with the 30-pulse budget.

* Loading x_a: L² cycles.
* Each layer: per vector, `in_len + 2 + max(READ_CYCLES, LoRA cycles) +
  out_len` cycles.
* Update: L² + 1 cycles.
* Plus a few cycles of sequencing per layer and step.

## 6. Verification

Every unit has a self-checking testbench in `tb/`, and each prints
`TB_RESULT checks=N failures=M`:

* `tb_analog_mvm_core` checks the weighted sums against an independent
  integer model, including ReLU, ADC saturation, `dac_clr` and the
  2-cycle read latency. It also checks the pulse port: where a SET
  lands, that a weak SET does not lower a cell, and the size of a RESET.
* `tb_write_verify_ctrl` programs 120 cells from random start values to
  targets across the window. For each cell it checks success, the ±3 µS
  result, the pulse count, the start-to-done time and the 30-pulse
  budget. An unreachable
  target must fail after exactly 30 pulses, and a bystander cell must
  stay untouched.
* `tb_time_embedding` and `tb_batchnorm_unit` check random tables and
  saturation.
* `tb_lora_unit` checks several shapes and base addresses, saturation,
  and the cycle count `2·in + 2·out + 1`.
* `tb_coupling_update` checks that frozen sites are untouched, that
  updated sites are within tolerance of real-valued `(x − s1)·exp(−s2)`,
  the exact log-Jacobian sum, `acc_clr`, the L² + 1 cycle time and
  saturation.
* `tb_layer_engine` runs five descriptors covering every option and
  compares the whole feature buffer word by word with the reference model
  `anf_ref_pkg`.
* `tb_anf_solver_l6` runs the same flow on a 6 × 6 lattice (parameter
  L = 6).
* `tb_anf_solver` is the end-to-end test at the default parameters. It
  maps the seven-layer network of section 3 and generates three samples
  of 8 steps each: a normal one, one after reloading the LoRA weights,
  and one that saturates the ADC and the outputs. The patch-embedding
  block of the crossbar is written through the write-verify port, and
  the reference uses the conductances the cells actually reached. It
  compares φ and
  `logdet` bit for bit with `anf_ref_pkg`. It also requires every
  mechanism to have occurred: both ReLUs, the residual, LoRA, the time
  embedding, normalization, ADC saturation, output saturation, clipping
  of the exponential, both mask parities, SET and RESET pulses, and the
  exact number of crossbar reads.

Run a testbench with plain Verilator, for example:

    verilator --binary --timing --assert rtl/anf_pkg.sv tb/anf_ref_pkg.sv \
        rtl/*.sv tb/tb_anf_solver.sv --top-module tb_anf_solver
    ./obj_dir/Vtb_anf_solver

All memories that are read are reset or written before use, so the
testbenches run the same under two-state simulation with random initial
values.

## 7. How far this follows the modelled system, and where it departs

**Taken from the system as published:**

* the 32 × 32 crossbar with a 16-bit DAC input and 14-bit ADC output;
* signed weights from positive conductances in the 20–80 µS window;
* the ReLU inside the amplifier;
* the analog/digital split: base weights in analog; LoRA, normalization,
  time embedding and the sample update in digital;
* the coupling layer: checkerboard mask, `(x − s1)·e^(−s2)`, weights
  shared across steps, Jacobian `Π e^(s2)`, `q = r · Π J⁻¹`;
* the MLP-mixer structure of the network;
* the read-path latency;
* iterative write-verify programming with the published ±3.5 µS window
  (rounded to ±3 µS) and a 30-pulse budget.

**Choices of this design** (the source does not give them):

* all number formats (Q8.8) and the rounding rules;
* the reference column as the way of forming signed currents;
* the descriptor table, feature buffer and strided addressing;
* the single-multiplier LoRA unit and its rank (2);
* the embedding table size, the number of steps (8) and the patch size
  (2);
* the table-based exponential;
* the SET/RESET decision rule of the write-verify loop and the device
  pulse model (linear set level, spread, RESET step);
* the host interface and the reset behaviour.

**Points to watch:**

* The density formula above follows the published convention (log q =
  log r − Σ s2). For the update direction used, a change-of-variables
  derivation gives the opposite sign. The hardware only reports Σ s2, so
  the host can apply either convention.
* The published text places the batch normalization both on the input
  of W1/W3 (equations) and after the analog output (block diagram). This
  design normalizes on the input side.
* The published prose also calls the mixer's normalization "layer
  normalization", while its equations say batch normalization. This
  design follows the equations: a fixed per-channel scale and offset.
  True layer normalization would need the mean and variance of each
  vector at run time, and is not built.
* The published text describes the output as source-line current in one
  place and as column current in another. The model simply sums per
  output line.

**Not built:**

* the row multiplexer and shift register that fan 8 DAC channels out to
  64 inputs (the model gives every row its own DAC register);
* device non-idealities beyond the programming spread (read noise,
  drift, conductance relaxation);
* pulse widths and bit-line voltages of the programming pulses;
* the host-side Gaussian sampler and the accept/reject step;
* splitting a layer larger than 32 × 31 across several array
  programmings.

The published experiments used lattices of 4 and 6 on real silicon, and
12, 24 and 48 only in simulation. At the default L = 4 the design holds and
runs the 4 × 4 case. With the parameter L = 6, the 6 × 6 case runs too.
`tb_anf_solver_l6` maps a 9-token mixer onto the array, using 536 weights,
and fits it into the 256-word buffer by reusing regions. Lattices of 8 and
above need a larger feature buffer (its address width is 8 bits in
`anf_pkg`). The sizes the published work only simulated (12, 24, 48) also
need more crossbar capacity than one 32 × 32 array offers.
