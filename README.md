# A spiking-network layer engine with computed and bitmap-indexed synapses

In a digital neuromorphic accelerator that learns on chip, most of the energy goes
into the synapse memory: reading weights in the forward pass, then reading them again
in *transposed* order in the backward pass, and writing the updated values back. How
the connectivity is stored decides how many of those accesses are needed and how big
(and thus how costly per access) the memories are. This RTL implements a single
learning layer of a spiking neural network (SNN) built around that idea. Its
connectivity can come from either of two sources:

* **Functional encoding** for convolutional layers. Which synapses exist is *computed*
  by a few adders, not stored. Only the shared kernel weights occupy memory. The
  backward pass reads the same small weight table through the inverse function, so
  it needs no transposed copy and no index table.
* **Pointer-based bitmap (PB-BMP)** for sparse, fully connected layers. A bitmap
  marks the synapses that exist, and one pointer per presynaptic neuron locates that
  neuron's nonzero weights in a compacted weight table. The bitmap and pointer tables
  sit in their own memories, apart from the weights.

The encodings are taken from the paper "Memory Organization for Energy-Efficient
Learning and Inference in Digital Neuromorphic Accelerators" (Schaefer, Faley, Neftci,
Joshi, 2020). The paper proposes the functional encoding and recommends PB-BMP for the
sparse fully connected layers it evaluates. It compares both against a crossbar and a
compressed-sparse-row organisation, and reports energies from synthesised
controllers, datapaths and memories. This RTL is an independent implementation. The
paper describes the encodings, the neuron model, the quantisers and the
connectivity-generator diagram. Everything else is this design's own: the
controller, the sequencing, the interfaces, the number formats and the memory sizes.
Section "Departures and gaps" lists the differences.

## 1. Neuron and learning model

Time is discrete. For a postsynaptic neuron *i* and presynaptic neuron *j*:

```
U_i[n]   = sum_j W_ij * P_j[n]  -  delta * R_i[n]       membrane potential
S_i[n]   = 1 if U_i[n] >= theta else 0                  output spike
Q_j[n+1] = alpha * Q_j[n] + S_j[n]                      synaptic trace (input spike S_j)
P_j[n+1] = beta  * P_j[n] + Q_j[n]                      membrane trace
R_i[n+1] = gamma * R_i[n] + S_i[n]                      refractory state
```

The weights multiply the presynaptic *trace* P, not the spike. A spike reaches P two
steps later, so after reset the forward pass has nothing to do for the first two time
steps.

**Binary mode.** With `bin_mode` set, the model reduces to an ordinary binary
network: Q stays 0, R is left out of U, and P[n+1] = S[n], so the weights multiply
the previous step's input spike. Setting the decay constants to zero would not be
enough, because P would then lag the spike by two steps.

Learning follows surrogate-gradient backpropagation. For each postsynaptic neuron:

```
delta_i  = Q_E(err_i) * sg(M_i - theta)            sg: normalised fast-sigmoid derivative
e_j     += W_ij * delta_i                          error passed to the layer below
W_ij    <- Q_W( W_ij - Q_G(delta_i * P_j) )        in-place weight update
```

* `err_i` is supplied from outside the engine (the loss is computed off chip).
* `M_i` is the membrane potential stored during the forward pass.
* `P_j` is the trace that the forward pass used.

Number formats (package `snn_pkg`):

| quantity | format |
|---|---|
| weight W | signed, b = `WB` bits (default 8; tested at 2, 8 and 12), range ±(2^(b−1)−1) |
| traces Q, P, R | unsigned 16 bit, 8 fractional bits (a spike adds 1.0 = 256), saturating |
| alpha, beta, gamma | 8-bit fractions of 256 |
| accumulated input, U, theta | signed 32 bit, unit = weight LSB × trace LSB |
| stored membrane M | signed 16 bit, `U >>> m_shift`, saturated |
| quantised error | signed 8 bit |
| surrogate derivative | 0..255, 255 = 1.0 |
| delta | signed 17 bit (error × surrogate) |
| quantised gradient | signed 16 bit in weight LSBs |

## 2. Computed connectivity (`conv_conn_gen`)

A convolution connects input neuron (ci, r, c) to output neuron (co, r+pr, c+pc) for
every kernel position (pr, pc) in 0..k−1, through weight w[co][ci][pr][pc].
Both directions are therefore simple arithmetic:

```
forward  (anchor = presynaptic):  PostR = PreR + PosR,   PostC = PreC + PosC
backward (anchor = postsynaptic): PreR  = PostR - PosR,  PreC  = PostC - PosC
```

The generator holds the anchor in Pre (or Post) registers. It steps a kernel iterator
(PosR, PosC) and, around it, a channel counter over the *other* side of the layer:
output channels going forward, input channels going backward. It yields one candidate
synapse per cycle. For each candidate:

1. **Adders** form the target row and column (one extra bit catches negatives).
2. **Bounds check** compares the target with the map size of the other side (`out_h`,
   `out_w` forward; `in_h`, `in_w` backward), which is held in configuration registers.
3. **Access gate**: `out_valid` rises only for in-range targets. An out-of-range
   candidate (`out_gated`) starts no memory access at all, so edges of the map cost
   nothing but a cycle.
4. **Address generation**:
   * neuron address `(ch*H + r)*W + c`;
   * weight address `((co*in_ch + ci)*k + PosR)*k + PosC`.

   The weight address is the same in both directions. This is the point of the
   encoding: the backward pass walks the same 3×3×32×32 = 9216-word table as the
   forward pass, with no transposed index structure.

Outputs are registered (the Post registers), so a candidate appears one cycle after its
iterator value. A run takes `n_ch·k·k` cycles, and `done` comes `n_ch·k·k + 1` cycles
after `start`. Since Pos counts 0..k−1 and is added, the layer computes a true
convolution whose output map is aligned to the top-left of the input. With a 28×28
output for a 28×28 input and a 3×3 kernel, the right and bottom edges see only part of
the kernel.

## 3. Bitmap-indexed connectivity (`bmp_conn_gen`)

Two tables, each in its own memory:

* `bitmap[j]`: one row of `N_COLS` bits per presynaptic neuron j. Bit i is set when
  synapse (j, i) exists.
* `ptr[j]`: the weight-table address of row j's first nonzero weight. The nonzero
  weights of a row are stored contiguously in column order, so synapse (j, i) sits at
  `ptr[j] + popcount(bitmap[j][i-1:0])`.

**Forward** (anchor row j): one read fetches the whole row and its pointer. A
find-first-set then visits the set bits, one per cycle, skipping absent synapses with
no memory access. This costs row population + 3 cycles.

**Backward** (anchor column i): this is the transposed access, which an index-based
format makes expensive. Every row j is read in turn (pipelined, one row per cycle), and
where bit i is set the address is `ptr[j] + popcount(row below i)`. This costs
`n_rows + 3` cycles per postsynaptic neuron, whatever the density. The difference
from the functional encoding is the reason both exist: for a convolution the
backward pass costs the same as the forward pass.

Tables are written through the configuration bus (a whole bitmap row per write). Bits
at or above `n_cols` are ignored.

## 4. The layer engine (`snn_layer`)

### Memories

| memory | depth × width (defaults) | contents |
|---|---|---|
| synapse memory | 262144 × 8 | weights (kernel weights, or compacted PB-BMP weights) |
| bitmap | 728 × 400 | PB-BMP connectivity |
| row pointer | 728 × 18 | PB-BMP indirection |
| trace | 2·25088 × 32 | {Q, P} per presynaptic neuron, two banks |
| input spike | 25088 × 1 | spikes of the current step |
| refractory | 25088 × 16 | R per postsynaptic neuron |
| membrane | 25088 × 16 | stored M (after Q_M) |
| error | 25088 × 16 | incoming errors |
| forward accumulators | 25088 × 32 | inside the forward `mac_unit` |
| backward accumulators | 25088 × 32 | inside the backward `mac_unit` |

All are instances of `sram_1r1w`: synchronous read with one cycle of latency,
read-before-write on a same-address collision, and no reset of contents.

### One time step

`step_start` runs the forward pass:

1. **Presynaptic scan.** For each presynaptic neuron j (4 cycles + fan-out):
   * read its traces and input spike;
   * if `P_j ≠ 0`, start the connectivity generator (forward). Each emitted synapse
     reads its weight in the same cycle, and one cycle later the forward MAC adds
     `W·P_j` to the target's accumulator;
   * write the updated traces (`syn_trace`) to the *other* bank and clear the spike.

   A neuron with `P_j = 0` is skipped without touching the synapse memory.
2. **Neuron update.** For each postsynaptic neuron (2 cycles): read and clear its
   accumulator, apply `lif_neuron` and write R. Write `M = Q_M(U)` to the membrane
   memory, and emit a spike on `out_spk_*`. The trace banks then swap.

`bwd_start` runs the backward pass. First the host writes every postsynaptic error
with `err_*`; `quant_error` tracks the largest |error| as they are written.

3. **Backward scan.** For each postsynaptic neuron i (4 cycles + fan-in):
   * read err and M, and form `delta_i = Q_E(err)·sg(M − theta)`;
   * if `delta_i ≠ 0`, start the generator backward. Each emitted synapse (j, addr)
     reads the weight and the bank of `P_j` that the forward pass used. One cycle
     later the backward MAC adds `W·delta_i` to j's accumulator, and, with learning
     on, `Q_W(W − Q_G(delta_i·P_j))` is written back to the same address.
4. **Error output.** The backward accumulators are read out, cleared and streamed on
   `err_out_*` (one per cycle).

Hazards are handled as follows:

* Within one anchor, both generators never repeat a target neuron or a weight
  address.
* Between anchors, the controller waits for the generator's `done` plus one cycle, so
  a weight written by one anchor is read back correctly by the next. This matters
  for convolution kernels, which every output position updates in turn.
* The MACs forward their last write, so back-to-back hits on one accumulator are
  exact.

### Mode switch

Register 0 selects the encoding per layer (`conn_mode`), plus `learn_en`, `sr_en`
(stochastic rounding) and `bin_mode`. The same engine can be reprogrammed from a convolutional layer
to a PB-BMP layer. After a change, re-run `init_start`, which clears traces,
refractory state and accumulators in max(2·MAX_PRE, MAX_POST) cycles.

## 5. Quantisers

* **Q_W** (`quant_weight`): clips to [−1+σ, 1−σ] with σ = 2^(1−b), i.e. ±(2^(b−1)−1)
  LSBs. The most negative code is never used.
* **Q_M** (`quant_membrane`): arithmetic right shift by `m_shift`, then symmetric
  saturation to 16 bits. The threshold goes through the same unit so that
  `M − theta_m` is consistent.
* **Q_E** (`quant_error`): normalises by the greatest |error| of the step. To avoid a
  divider this uses a power of two: the leading one of the maximum is moved to bit 6,
  so the largest error maps into 64..127 and the others keep their ratio (floored).
  Then it clips to ±127.
* **Q_G** (`quant_grad`): `(delta·P + r) >>> lr_shift`, saturated to 16 bits.
  * With stochastic rounding, r is uniform in [0, 2^lr_shift), taken from a 32-bit
    Galois LFSR (x^32+x^22+x^2+x+1) that steps once per update.
  * Otherwise r = 2^(lr_shift−1), i.e. round to nearest. This mode exists to make
    the engine bit-exactly predictable.
* **Surrogate derivative** (`surrogate_grad`): 1/(1+|x|)², normalised to 1.0 = 255,
  read from a 64-entry constant table `sg[k] = floor(16320/(8+k)²)`, with
  `k = min(|M − theta_m| >> sg_shift, 63)`.

## 6. Programming

Configuration bus (only while `busy` is low): `cfg_we`, `cfg_target`, `cfg_addr`,
`cfg_wdata`, `cfg_bits`. `cfg_target` is one of:

* `CFG_REG`, the registers below;
* `CFG_WMEM`, a weight at `cfg_addr`;
* `CFG_BMP`, bitmap row `cfg_addr` from `cfg_bits`;
* `CFG_PTR`, row pointer `cfg_addr` from `cfg_wdata`.

| reg | field | reg | field |
|---|---|---|---|
| 0 | {bin_mode, sr_en, learn_en, conn_mode} | 10/11/12 | alpha / beta / gamma |
| 1/2/3 | in_ch / in_h / in_w | 13 | delta (refractory magnitude, U units per 1.0 of R) |
| 4/5/6 | out_ch / out_h / out_w | 14 | theta (signed) |
| 7 | k | 15 | m_shift |
| 8/9 | n_pre / n_post (PB-BMP) | 16/17 | sg_shift / lr_shift |

In functional mode the neuron counts are in_ch·in_h·in_w and out_ch·out_h·out_w.

Typical sequence:

1. reset, write the registers and tables, then `init_start` and wait for `done`;
2. per time step: write the input spikes (`spk_*`), pulse `step_start`, wait for
   `done` and collect `out_spk_*`;
3. to learn: write all errors (`err_*`), pulse `bwd_start`, wait for `done` and
   collect `err_out_*`.

Weights can be read back with `host_rd_*` (data one cycle later). The `mon_*` outputs
pulse once per event: forward and backward synapse accesses, gated candidates, skipped
anchors, changed weights and Q_W clipping. They are intended for activity and energy
accounting.

Cycle counts:

* forward ≈ n_pre·4 + Σ fan-out + 2·n_post;
* backward ≈ n_post·4 + Σ fan-in + n_pre.

For the 28×28×32 convolution a forward step with every trace nonzero takes about
25088·(4+288) ≈ 7.3 M cycles.

## 7. What fits at the default sizes

| workload (sizes from the paper) | needed | built |
|---|---|---|
| FC 728×128, 75 % density, 2–12 bit | 69 888 weights, 728×128 bitmap | 262 144 words, 728×400 bitmap; width = `WB` |
| FC 728×128 at 5–100 % density | up to 93 184 weights | fits |
| Conv 28×28, 3×3, 32→32 | 25 088 in / 25 088 out neurons (output size assumed), 9 216 weights | fits |
| 700-400-250 SNN, 27 % sparsity | layer 1: 204 400 weights, 700×400 bitmap; layer 2: 73 000 | each layer fits one engine; two engines, or reprogramming, needed |

A dense 700×400 layer (280 000 weights) would not fit the default synapse memory;
raise `WMEM_DEPTH`.

## 8. Departures and gaps

Follows the paper:

* the neuron and trace equations;
* the weight range of Q_W;
* the steps of Q_E (normalise by the maximum, then clip and quantise) and Q_G
  (stochastic rounding);
* a stored membrane for the backward pass;
* the forward and inverse connectivity functions, with registers for Pre, Pos and
  Post, bounds checking, address generation and access gating;
* PB-BMP, with indirection tables in memories separate from the weights.

This design's own choices, not from the paper:

* everything about the controller and its interfaces;
* number formats and all widths except the weight width;
* the power-of-two normalisation in Q_E;
* the surrogate table;
* the LFSR;
* the two-bank trace memory;
* the skipping of zero-trace and zero-delta anchors;
* offering the binary-network reduction as a mode bit;
* the channel loop and address formulas of the functional generator;
* the one-row-per-word bitmap with popcount addressing;
* the default memory sizes.

Where the paper is ambiguous:

* The spike condition is taken as `U >= theta`. The text also states the step as
  firing at U = 0.
* The "negative part" of the fast-sigmoid surrogate is not defined; the symmetric
  derivative is used.

Not built:

* **Full backpropagation through time.** The backward pass here runs once per time
  step, using that step's traces and membrane. Nothing is stored across steps, so
  gradients do not flow back through time.
* **The loss.** In the paper's experiments the van Rossum distance is computed in
  floating point and left out of the energy figures. The engine only takes the
  resulting errors.
* **Per-layer weight scaling η.** The paper scales weights by a power of two to avoid
  overflow. Here that is a host-side choice of the loaded weights and threshold.
* **The crossbar and CSR organisations.** These are the paper's comparison
  baselines.
* **Parallel, multi-bank evaluation of the connectivity function.** The paper
  mentions it as a possibility; one candidate per cycle is built.
* **Process-level memory macros.** Memories are generic RTL arrays.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each compares against values
computed independently in the testbench, counts checks and failures, ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

* `tb_conv_conn_gen`: synapse lists generated by definition of a convolution, for the
  paper's 28×28 / 3×3 / 32→32 geometry and 60 random geometries. Also checks the
  cycle count and the gated count.
* `tb_bmp_conn_gen`: random sparse bitmaps at several densities, every row and
  column, addresses and cycle counts.
* `tb_mac_unit`: random accumulation with back-to-back hits on one index.
* `tb_quant_*`, `tb_syn_trace`, `tb_lif_neuron`, `tb_surrogate_grad`: random and
  corner-case vectors against integer models. Q_G's stochastic mode is checked for
  range and for bias (mean within 0.1 LSB over 4000 samples).
* `tb_snn_layer` (reduced memories) and `tb_snn_layer_full` (default sizes) are
  end-to-end tests. A step-level reference model in the testbench predicts every
  output spike, every error sent down and the final weight table; these are compared
  exactly with round-to-nearest gradients. Both encodings run with learning on, and
  the testbench counts each mechanism (forward and backward accesses, gated
  candidates, skipped anchors, weight updates, Q_W clipping, spikes, the mode switch).
  The full-size test runs three steps of the 28×28×32 convolution, then three steps
  of a 700×400 PB-BMP layer at 73 % density.
* `tb_snn_layer_fc_w2` and `tb_snn_layer_fc_w12` run the same end-to-end checks on a
  728×128 PB-BMP layer at 75 % density, with 2-bit and 12-bit weights: the two ends
  of the weight widths the engine is meant for. The 2-bit test runs in binary mode. Threshold, refractory magnitude and
  learning shift scale with the weight range.

Run any of them with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
          rtl/snn_pkg.sv tb/tb_snn_layer.sv --top-module tb_snn_layer
./obj_dir/Vtb_snn_layer
```

The full-size testbench needs about 2 minutes to compile and under a minute to run.
Numbers such as sizes, decay constants and the learning rate live in the
testbenches' `localparam`s and set-up code; to try another geometry, change them
there.

## Files

* `rtl/snn_pkg.sv`: shared widths, enums (`conn_mode_e`, `dir_e`, `cfg_target_e`)
  and the `conv_cfg_t` struct.
* `rtl/snn_layer.sv`: the layer engine (top).
* `rtl/conv_conn_gen.sv`, `rtl/bmp_conn_gen.sv`: the two connectivity generators.
* `rtl/mac_unit.sv`, `rtl/syn_trace.sv`, `rtl/lif_neuron.sv`: the datapath.
* `rtl/quant_weight.sv`, `rtl/quant_membrane.sv`, `rtl/quant_error.sv`,
  `rtl/quant_grad.sv`, `rtl/surrogate_grad.sv`: the quantisers and the surrogate.
* `rtl/sram_1r1w.sv`: the memory.
* `tb/tb_<module>.sv`: one testbench per module, plus `tb/tb_snn_layer_full.sv`.
