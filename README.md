# E-PUR: a four-gate LSTM inference engine with weight-locality scheduling

This is synthesizable SystemVerilog for an accelerator that runs the layers
of LSTM recurrent networks, such as those used in speech recognition and
machine translation. It puts low energy per inference first.

The main cost in such networks is moving weights. A layer evaluates two
matrix-vector products per gate for every element of an input sequence:
one with the layer's input x_t (the *forward* connections) and one with its
own previous output h_{t-1} (the *recurrent* connections). Sequences run to
thousands of elements, and the same weights are used for every element.

The engine therefore keeps one layer's weights on chip and reuses them over
the whole sequence. It also reorders the work so that the forward weights
never need to be on chip all at once. This reordering is called *Maximizing
Weight Locality* (MWL) below.

The arithmetic is IEEE-754 single precision (FP32). The default sizes follow
the reference design:

- 16-wide dot-product units;
- 2 MB of weight storage per gate;
- a 4 KB forward-weight row buffer per gate;
- 6 MB of on-chip memory for intermediate results;
- functional-unit latencies of 2 cycles (add), 4 cycles (multiply) and
  5 cycles (exponential), at a 500 MHz clock.

## 1. What one layer computes

For every step t of the sequence, each of the H neurons of the layer
computes the following. σ is the logistic function and φ is tanh. The W_ic,
W_fc and W_oc terms are optional element-wise *peephole* weights.

```
i_t = σ(W_ix·x_t + W_ih·h_{t-1} + W_ic ⊙ c_{t-1} + b_i)     input gate
f_t = σ(W_fx·x_t + W_fh·h_{t-1} + W_fc ⊙ c_{t-1} + b_f)     forget gate
g_t = φ(W_gx·x_t + W_gh·h_{t-1} + b_g)                       cell updater
c_t = f_t ⊙ c_{t-1} + i_t ⊙ g_t
o_t = σ(W_ox·x_t + W_oh·h_{t-1} + W_oc ⊙ c_t + b_o)          output gate
h_t = o_t ⊙ φ(c_t)
```

A bidirectional layer is two such passes: one forward in time, and one
backward from x_T to x_1. The two results are placed side by side in the
output vector. The engine runs one pass at a time; `cfg.reverse` selects
the direction.

## 2. Organisation

```
                 +-----------------------------------------------+
 x_t (OM row) ==>|  CU input    CU forget    CU cell    CU output|
                 |     | i_t        | f_t      ^  |c_t    |      |
                 |     +------------+--------->|  +------>|      |
                 |  c_t -> input buffers of CU i, f, g     |      |
                 |  h_t -> input buffers of all CUs, and OM <-----+
                 +-----------------------------------------------+
```

There is one *Computation Unit* (CU, `cu.sv`) per gate. All four work in
lock-step on the same neuron and the same time step. Each CU has the
following parts:

| Part | Module | Contents |
|---|---|---|
| weight buffer | `weight_buffer.sv` | 2 MB: the gate's recurrent weight matrix, plus one {bias, peephole} pair per neuron |
| row buffer | `row_buffer.sv` | 4 KB: the forward weights of the *one* neuron being evaluated in MWL step 1 |
| input buffer | `input_buffer.sv` | h_{t-1} and h_t in two ping-pong banks, and the cell state c |
| DPU | `dpu.sv` | dot-product unit: N = 16 FP multipliers, a 4-level adder tree and an accumulator |
| MU | `mu.sv` | multifunctional unit: a small register file and FADD / FMUL / FEXP / FRECP / FCMP units, running the gate's post-processing program |

The CUs are connected as follows:

- Three point-to-point links (`mu_link.sv`, 2-cycle latency) carry i_t and
  f_t to the cell-updater MU, and c_t and φ(c_t) to the output MU.
- Two broadcast pipes in the top (`epur.sv`) return results. They also take
  2 cycles.
  - c_t goes to the input buffers of the input, forget and cell-updater
    CUs, where it becomes c_{t-1} of the next step.
  - h_t goes to the input buffers of all four CUs and to the OM.
- The on-chip memory for intermediate results (`om.sv`) holds the layer's
  input sequence and its output sequence. These sit in two equal halves
  that swap roles from layer to layer, so the previous layer's outputs are
  never overwritten while they are still being read. The OM also holds the
  MWL partial results (section 3).

The sequencer `epur_ctrl.sv` issues all dot products. The package
`epur_pkg.sv` holds the shared types, the FP arithmetic functions and the MU
programs.

## 3. Maximizing Weight Locality: the evaluation order

A straightforward order evaluates all H neurons for x_1, then for x_2, and
so on. That needs both weight matrices (W_x and W_h) of all four gates on
chip.

MWL notices that the forward products W_x·x_t do not depend on the
recurrence. All x_t of the pass are already in the OM, so these products
can be done in any order. A pass is split into two steps.

**Step 1: forward connections, neuron by neuron.**

1. For neuron k, the controller raises `wrow_req` / `wrow_k`.
2. The memory system answers with row W_x[k] of every gate. This is
   `cfg.kx` beats of 16 words per gate. The rows go into the four row
   buffers.
3. The controller then runs W_x[k]·x_t for every t of the sequence. Each
   x_t is read from the OM one 16-word row per cycle and broadcast to the
   four DPUs.
4. The row of neuron k is never needed again, so each forward weight is
   fetched once per pass and only one row per gate is on chip.

The MU of each gate turns every result o into an 8-bit integer and stores it
in the OM. The conversion is `q = round(β·o)`, saturated to ±127, with a
per-gate scale β = 127/α. Here α bounds the magnitude of the partials,
which is usually small. The four gates' bytes for (step s, neuron k) are
packed into one 32-bit OM word, one byte lane per gate. The partial region
therefore costs T·H words, the same as the h_t output of the pass.

**Step 2: recurrent connections, step by step.**

1. For each step s, the controller runs W_h[k]·h_{t-1} for every neuron k.
   The recurrent weights come from the weight buffer and h_{t-1} from the
   input buffer. At the first step h_{t-1} is zero.
2. Each MU adds the partial of (s, k) from step 1. The partial goes back to
   FP32 through a 256-entry look-up table (`deq_lut.sv`) that the host
   fills with `q/β`.
3. The MU then adds the peephole term and the bias, and applies the
   non-linearity.
4. The cell-updater MU combines i_t, f_t, g_t and c_{t-1} into c_t.
5. The output MU forms h_t. h_t is written into the *other* bank of every
   input buffer and into the output half of the OM at
   `t·cfg.h_stride + cfg.h_col + k`.

Step s+1 may not start before all H values of h_t have arrived. The
controller counts the write-backs and stalls otherwise. This *recurrent
dependency wait* is inherent to LSTMs; the pipeline depth (DPU 9 cycles
plus an MU program of several tens of cycles) makes it visible for small H.

Between the steps, the controller waits until every CU is idle. This makes
sure every partial is in the OM before step 2 reads it.

Because of the reordering, the weight buffer only needs to hold W_h, the
biases and the peepholes. The forward weights stream through the 4 KB row
buffer.

## 4. The Multifunctional Unit programs

Each DPU result enters the MU's 8-entry FIFO, tagged with the phase
(step 1 or step 2), the neuron index k, the step s and the time index t.
The MU runs one instruction at a time from a constant per-gate program
(`mu_prog` in the package). An instruction waits for its unit's latency:

| Instruction | Latency |
|---|---|
| ADD | 2 |
| MUL | 4 |
| EXP | 5 |
| RCP | 4 |
| memory reads (LDW, LDC, DEQ) | 1–2 |
| RECV / SEND | wait for link data or link credit |

The four programs are:

| Program | Sequence |
|---|---|
| step 1, every gate | `R0 = dot; R0 *= β; store round(R0) to OM lane` |
| step 2, input and forget gates | `dot + deq(partial) [+ W_c·c_{t-1}] + b`; sigmoid; `SEND` to the cell updater |
| step 2, cell updater | `dot + deq + b`; tanh → g_t; `RECV` i_t, f_t; `c_t = f_t·c_{t-1} + i_t·g_t`; write c_t back; `SEND` c_t; tanh(c_t); `SEND` φ(c_t) |
| step 2, output gate | `dot + deq + b`; `RECV` c_t; `+ W_oc·c_t`; sigmoid; `RECV` φ(c_t); `h_t = o_t·φ(c_t)`; write h_t back |

The non-linearities are built from the functional units:

- sigmoid: `σ(x) = 1/(1+e^-x)`;
- tanh: `(e^x − e^-x)/(e^x + e^-x)`.

There is no divider: a division is a reciprocal followed by a multiply.
Instructions marked as peephole operations are skipped when
`cfg.peephole` is 0.

The DPU starts the next neuron while the MU works. The CU only lets a new
dot product start when the MU FIFO has room for it, counting dot products
still in flight in the DPU pipeline. Otherwise the controller stalls all
four CUs: the *MU-room stall*.

## 5. Arithmetic

The arithmetic units are `fp_add`, `fp_mul`, `fp_exp`, `fp_rcp` and
`fp_cmp`. Each is a combinational function from the package followed by a
LAT-stage pipeline with valid bits. The number format has these rules:

- FP32 throughout.
- Results are truncated, not rounded to nearest.
- Denormal inputs and results are flushed to zero.
- Overflow gives infinity.

`fp_exp` computes 2^(x·log2 e):

1. The integer part of x·log2 e goes into the exponent.
2. 2^frac is evaluated in fixed point, as a Horner series of e^(frac·ln 2)
   up to the 8th power.

The relative error is below 1e-6.

`fp_rcp` divides 2^47 by the 24-bit significand.

The quantiser (`quant8.sv`) uses two comparators against ±127 for
saturation. It rounds half away from zero.

Known limit: tanh from exponentials overflows for |x| above about 44, where
e^x is infinite, and then gives NaN. That is far outside the range LSTM
pre-activations take in practice, but there is no clamp.

## 6. Running a layer

The engine is a slave of a host that owns main memory. One pass over a
layer runs as follows.

1. Write each gate's recurrent weights into its weight buffer (`wb_we[g]`,
   `wb_waddr`, one 16-word row per write).
   - Neuron k's row W_h[k] occupies rows `k·kh .. k·kh+kh−1`, with
     kh = ceil(H/16).
   - The pair {bias, peephole weight} of neuron k sits at word
     `cfg.wb_param + 2k`.
   - Padding words must be zero.
2. Fill the four dequantisation tables (`lut_we[g]`): entry q holds
   (signed q)/β_g.
3. For the first layer, write the input sequence into an OM half through
   `om_host_*`. x_t occupies kx rows starting at row `t·kx` of that half,
   with kx = ceil(I/16), zero-padded.
4. Set `cfg`:

   | Field | Meaning |
   |---|---|
   | `n_hid` | H |
   | `kx`, `kh` | sub-vectors per forward and recurrent dot product |
   | `seq_len` | T |
   | `reverse`, `peephole` | pass direction and peephole connections |
   | `src_half` | which OM half holds x |
   | `h_stride`, `h_col` | layout of h_t in the other half |
   | `wb_param` | start of the {bias, peephole} pairs |
   | `beta[g]` | per-gate quantisation scale |

5. Pulse `start`.
6. Answer each `wrow_req` with `kx` beats on `wrow_valid` / `wrow_data`
   (row j of W_x[k] for all four gates).
7. Wait for `done`. h_t of the pass is then in the other half, laid out to
   serve as x of the next layer. Set `h_stride` = 16·kx of that layer; use
   `h_col` = H for the backward pass of a bidirectional layer.

`events` reports per cycle:

- bit 0: an MU-room stall;
- bit 1: waiting for a forward-weight row;
- bit 2: the recurrent dependency wait.

### Memory map of the OM

The OM is 6 MB, seen as three 2 MB regions of 32-bit words:

- half 0 at word 0;
- half 1 at word 524288;
- MWL partials at word 1048576. The word for (step s, neuron k) is
  `s·H + k`, with byte lane g for gate g.

The OM is built as four byte-wide lanes so that each gate's MU writes its
own byte. The h_t write-back writes whole words. The DPU broadcast and the
host read whole 16-word rows.

## 7. Sizes, and what fits

All sizes are top-level parameters: `N`, `WB_BYTES`, `RB_BYTES`,
`IB_DEPTH`, `OM_BYTES` and `LINK_LAT`. The defaults are the reference
design's numbers. They bound a layer as follows:

- H ≤ 1024 neurons. The input buffer and the counters allow this much, and
  the recurrent weights must fit in 2 MB: H·ceil(H/16) + ceil(H/8) rows of
  64 B, at most 32768. That holds H up to about 720.
- At most 1024 inputs per neuron (the 4 KB row buffer).
- T·(output width) ≤ 524288 words per OM half, and T·H ≤ 524288 partial
  words.

The five networks of the reference evaluation give these results. Layer
sizes are from that evaluation; sequence lengths are not given, beyond
"thousands of elements".

| Network | Layers × neurons | Recurrent weights per gate (FP32) | Fits |
|---|---|---|---|
| BYSDNE | 5 × 512 | 1.0 MB | yes, for T ≤ 1024 |
| RLDRADSPR | 10 × 1024 | 4.0 MB | no |
| EESEN (bidirectional) | 5 × 2 × 320 | 0.4 MB | yes, for T ≤ 819 |
| LDLRNN | 2 × 128 | 0.06 MB | yes, for T ≤ 4096 |
| GMAT | 17 × 1024 | 4.0 MB | no |

The 1024-neuron networks need 4 MB of recurrent weights per gate in FP32.
The reference design's 2 MB per gate holds them only with 16-bit weights.
The reference mentions both FP16 and FP32, while this RTL implements FP32.
Longer sequences than the limits above would need the OM to be larger, or
a pass to be split.

## 8. Where this RTL departs from the reference design, or fills gaps

- **Input buffer size.** The reference gives 4 KB per CU, which is one
  1024-word vector. This design needs h_{t-1}, h_t and c at the same time,
  so the input buffer has three banks of `IB_DEPTH` = 1024 words (12 KB).
- **Inside the MU.** The MU runs its program one instruction at a time. The
  reference overlaps some steps. This matters for throughput. In step 2
  the cell-updater program takes several tens of cycles per neuron, while
  the DPU needs only kh = ceil(H/16) cycles per neuron. For the layer sizes
  evaluated, the MU therefore sets the pace of step 2 and the DPUs wait
  (the MU-room stall). Step 1 is affected less. Its program is four
  instructions, about ten cycles, so it only limits layers with fewer than
  about 160 inputs. The reference's overlapped schedule would shorten the
  programs; a faster MU would need that overlap, or a second MU per CU.
- **Rounding for the quantiser.** The reference extends the MU with AND,
  OR and SHIFT units and rounds with a short instruction sequence. Here a
  dedicated rounding and saturation unit (`quant8.sv`) does the same job
  in one MU instruction (QNT).
- **Host, DRAM and control interfaces.** These are this design's own. So
  are the OM memory map, the packing of partials into byte lanes, the
  instruction encoding and the register count (8).
- **Choices where the reference is silent:**
  - FRECP latency (4 cycles);
  - the comparator's use for quantiser saturation;
  - round-half-away-from-zero in the quantiser;
  - one dequantisation table per gate;
  - truncating FP arithmetic.
- **Not built.** The reference design's non-MWL configuration (4 MB weight
  buffers, no partial storage) is only a point of comparison and is not
  built. Main memory and the host are outside the design; their signals
  are ports.

## 9. Simulation

Every block has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench, with real arithmetic or
behavioural models, and ends with the line
`TB_RESULT checks=<n> failures=<m>`. Build any of them with Verilator. The
package files must come first:

```
verilator --binary --timing --assert --top-module tb_epur \
    rtl/epur_pkg.sv tb/tb_util_pkg.sv $(ls rtl/*.sv | grep -v epur_pkg) tb/tb_epur.sv
./obj_dir/Vtb_epur
```

`tb_epur` runs the top at its default sizes: 2 MB weight buffers, 6 MB OM.
It has two layers:

- a 20-input, 24-neuron peephole layer over 5 steps;
- a bidirectional 16+16-neuron layer without peepholes that reads the
  first layer's output from the other OM half.

The testbench plays the host and the DRAM. It checks every h_t against an LSTM
model in `real` arithmetic that quantises the forward partials the same
way. It counts the
mechanisms and fails if any never happened:

- MU-room stalls;
- weight-row waits;
- recurrent dependency waits;
- quantiser saturation;
- the backward pass;
- peephole on and off;
- both OM halves as source.

`tb_epur_workload` runs layers shaped like three of the networks above,
again through the full-size design:

- LDLRNN: two 128-neuron layers, T = 4;
- EESEN: one bidirectional 2 × 320-neuron peephole layer, T = 3;
- BYSDNE: one 512-neuron peephole layer with 1024 inputs, T = 2.

The input widths and the short sequence lengths are this testbench's own
choice. It also reads every quantised partial back from the OM and checks
it. Where the exact forward sum lies on a rounding boundary of the
quantiser, the FP32 sum may round either way, and the design's value is
accepted.

The block testbenches check each unit's latency against its parameter,
among other things. `tb_mu` runs all four MU programs together over the
real links against an LSTM model.
