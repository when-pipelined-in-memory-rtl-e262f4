# PipeSDFA: on-chip training of spiking MLPs in RRAM crossbars

Training a spiking neural network (SNN) with ordinary backpropagation is
costly on an edge device for two reasons. First, the error has to travel
backwards layer by layer, and each layer waits for the one above it
("backward locking"). Second, the network runs for T timesteps per
sample, so that chain repeats T times, and every intermediate value has
to be kept until it is consumed.

This design replaces backpropagation with **spiking direct feedback
alignment (SDFA)**. The output error of a sample, δ_L, is sent straight
to every hidden layer through a fixed random matrix B_l:

    δ_l = (B_l · δ_L) ⊙ f'_l        f'_l = surrogate derivative of layer l's neurons

No layer waits for another, and B_l·δ_L depends only on the sample, not
on the timestep. It is therefore computed **once per sample** and reused
for all T timesteps. The forward weights W_l and the feedback matrices
B_l both sit in RRAM crossbars, so every matrix-vector product is one
analogue read. Gradients accumulate over the T timesteps and the B
samples of a batch, and each layer updates once per batch:
W_l ← W_l − η·ΣΔW_l.

With the error chain removed, the work can be overlapped on three levels.
The **timestep-level**, **data-level** and **batch-level** pipeline keeps
every forward and backward core busy in almost every cycle. A run of
N_B batches takes

    cycles = (L + T + T·B) · N_B + L − 1

against roughly (2L+T+TB−1)·N_B for a layer-pipelined backpropagation
accelerator.

## Block overview

    in_spikes ─► F_1 ─► F_2 ─► … ─► F_L ─► Err (spike count − T·onehot(label) = δ_L)
                 │      │             │        │
             data buf  data buf   data buf     ▼
             mask buf  mask buf   mask buf   error propagation core
                 │      │             │        (B_1..B_{L-1} crossbars, error buffer)
                 ▼      ▼             ▼        │ e_l = B_l δ_L, e_L = δ_L
                B_1    B_2    …     B_L  ◄─────┘
                 │      │             │
                 └──── weight/bias update at the batch's last item ───► F_l

| Module | Role |
|---|---|
| `sdfa_pkg` | Shared constants (array size, 4-bit weights, 2-bit cells), the pipeline token struct, a saturation helper |
| `rram_crossbar` | Behavioural model of a 1T1R RRAM array: 2-bit cells, column currents as integer sums, row programming, and stochastic programming that uses cell write variation |
| `shift_add` | Combines the high-cell and low-cell column sums of 4-bit weights and removes the offset-binary bias |
| `pe_core` | One processing element: N_CB crossbars side by side, holding an ARRAY_ROWS-input × N-neuron block of 4-bit weights |
| `tile` | Several PEs covering a layer with more inputs than one crossbar has rows; adds their partial sums |
| `spiking_neuron` | IF/LIF neuron array: integrate, fire, reset, and the 1-bit surrogate derivative |
| `forward_core` | One layer's forward pass: tile + bias + neurons; applies the batch update |
| `circ_buffer` | FIFO ring that keeps each item's layer input h_{l−1} and mask f'_l until its backward pass |
| `error_calc` | Counts output spikes over T timesteps and forms δ_L and the predicted class |
| `error_prop_core` | Feedback crossbars B_l; computes all e_l = B_l δ_L in one cycle and buffers them per sample |
| `backward_core` | Per layer: δ_l = e_l ⊙ f'_l, accumulates ΔW = δ_l h_{l−1}ᵀ and Δb, and issues the update |
| `pipeline_ctrl` | Issues one (sample, timestep) item per cycle and times every stage through a delay line |
| `pipesdfa_top` | Wires L layers together into the accelerator |

## Weights in 2-bit cells

A weight is 4 bits signed (−8..7). Each RRAM cell holds 2 bits, so a
weight takes two cells in **offset binary**: u = w + 8 (0..15),
u = 4·hi + lo. The high cell sits on an even column and the low cell on
the odd column next to it. With a binary spike vector s on the wordlines,
the two column sums are S_hi = Σ s·hi and S_lo = Σ s·lo, and

    y = Σ s·w = 4·S_hi + S_lo − 8·popcount(s)

This is exactly what `shift_add` computes. A 256-column array therefore
holds 128 neurons. With N_CB = 2 arrays per PE, one PE covers 256 inputs ×
256 neurons. When a layer has more inputs than one array has rows
(`ARRAY_ROWS`), `tile` splits the inputs into slices of ARRAY_ROWS. It zero-pads
the last slice and adds the partial sums of the PEs.

**Feedback matrices** need only a few levels. They use one cell per
entry, and code k ∈ {0,1,2,3} stands for 2k−3 ∈ {−3,−1,+1,+3}, so the
matrix has zero mean. The product with a signed δ_L on the wordlines is
then e = 2·S − 3·Σδ_L, where S is the raw column sum.

To make the matrices random, every cell is programmed at once with the
same mid-level pulse (`rand_init`). The model draws each cell's result
from the sum of four uniform 8-bit variables, which is close to Gaussian
(mean 510, σ≈148). The result is binned into codes at 362, 510 and 658,
giving about 16 %, 34 %, 34 % and 16 %. The real device would get this
spread from its write variation. The histogram and the zero mean are
checked in `tb_rram_crossbar`.

## The three-level schedule

The controller numbers the items: batch b, sample d (0..B−1), timestep
t (0..T−1). It issues item (b, d, t) at cycle

    s = b·(L + T + T·B) + d·T + t

so timesteps of one sample enter on consecutive cycles (timestep level).
The samples of a batch follow each other with no gap (data level). A
token carrying (t, d, error-buffer slot, label, first/last flags) travels
down a delay line, and each stage takes the token at a fixed tap:

| Stage | Tap (cycles after issue) | Works on |
|---|---|---|
| F_l, forward pass of layer l | l − 1 | every item |
| Err, output error | L | last timestep of each sample |
| B_l, backward pass of layer l | T + L + l − 1 | every item |

A sample's Err happens at tap L of its last timestep, T−1 cycles after
its first item. The backward passes start only after that, hence the
offset T+L. Because every B_l has the same spacing as every F_l, all
layers do their backward pass in the same cycle order. There is no chain
from B_L down to B_1: each layer reads its own e_l from the error buffer.

**Batch level.** After the B·T items of a batch, the controller stays idle
for T+L cycles. Then the first forward pass of the next batch at layer l
falls exactly one cycle after the last backward pass of the previous batch
at layer l. That backward pass carries the `last_item` flag: in that cycle
the backward core sends the batch's accumulated, scaled ΔW_l to the
forward core, which writes it at the clock edge. So the next batch already
uses the updated weights, and no cycle is lost. A batch takes
L + T + T·B cycles, and the run ends L−1 cycles after the last B_1 once
B_L is done. For the defaults (L=3, T=16, B=8) a batch takes 147 cycles
and one batch runs in 149.

The timing was read from a two-layer, two-timestep timing diagram and
generalised to L layers and T timesteps. The check of the generalisation
is that it reproduces the closed-form cycle count above for every tested
(L, T, B, N_B).

## Buffers

* **Data buffer** (one per layer, ring of `T+L` entries × N bits). It
  stores layer l's input spikes h_{l−1} when F_l runs. It releases them
  when B_l needs them for the outer product, T+L cycles later. At that
  moment the ring is full, which the end-to-end testbench checks.
* **Mask buffer** (one per layer, same depth). It stores f'_l, written
  one cycle after F_l, when the neurons' registered output appears.
* **Error buffer** (inside `error_prop_core`, EDEPTH = ⌈(T+L−1)/T⌉
  slots, 2 for the defaults). It holds e_1..e_{L−1} and δ_L for each
  sample whose backward passes are still running. A sample's slot is
  written at its Err cycle and read at all T of its B_l cycles. The next
  sample's Err comes while the previous one is still being read, so at
  least two slots are needed. In general, sample d's last read (B_L of
  its last timestep) is at d·T + 2T + 2L − 2. The slot is next written
  by sample d+EDEPTH at (d+EDEPTH)·T + T + L − 1. A write in the same
  cycle as the last read is safe, because reads are combinational and
  the write lands at the clock edge. That gives EDEPTH·T ≥ T+L−1.

The depth T+L is the same for every layer: each item waits the same time
T+L between F_l and B_l. A shorter buffer for the deeper layers would be
enough only if the backward pass ran in reverse layer order, which SDFA
makes unnecessary.

## Neurons, error and update arithmetic

* Neurons: v' = v − (leak ? v>>>k : 0) + I, where I is the crossbar sum
  plus the bias. The neuron fires if v' ≥ V_th and then resets to 0. It
  starts at 0 on every new sample. Leak off gives the IF neuron and leak
  on the LIF neuron; both are runtime choices.
* Surrogate derivative: f' = 1 if V_th/2 < v' < 3V_th/2, else 0. It is one
  bit, so δ_l = f' ? e_l : 0 needs no multiplier.
* Output error: δ_L = count − T·onehot(label), i.e. T·(mean output rate −
  target).
* Gradient: ΔW[i][j] += δ_l[i]·h_{l−1}[j]. h is binary, so this is
  conditional addition. The sum runs over the T·B items of the batch.
* Update: W ← sat₄(W − sat₅(ΣΔW >>> η_l)), b ← sat₈(b − sat₅(Σδ >>> η_l)),
  with a per-layer shift η_l.

## Where this design departs from the source description

* **Loss.** The source describes a cross-entropy loss. Here δ_L is the
  difference between the spike count and T times the one-hot target,
  which needs no exponent or divider. The output layer's surrogate
  derivative f'_L is still applied, per timestep, in layer L's backward
  pass, just as f'_l is in the hidden layers.
* **Buffer depth.** The text gives the circular buffers L entries. The
  timing diagram, once generalised, needs T+L, which is what is built.
* **Network-on-chip.** The layers are wired point to point; the NoC is not
  described in enough detail to build.
* **Convolution.** Convolutional layers, their kernel mapping and
  max-pooling are not built. The design trains fully connected spiking
  networks only.
* **eDRAM.** The error buffer and the data and mask buffers are register
  arrays, not eDRAM macros.
* **RRAM.** The crossbar is a behavioural model with exact integer column
  sums: no ADC, no read noise, no device non-linearity. Only stochastic
  programming is modelled. Weight updates write the new 4-bit value
  directly.
* **Chosen where the source is silent:** all widths; the bias register;
  the power-of-two learning rate; the feedback value encoding; the leak as
  a shift; the host interface (the host must present the requested item's
  spikes and label in the same cycle, with no back-pressure).

## Parameters (top level)

| Parameter | Default | Meaning |
|---|---|---|
| `L` | 3 | Layers (a 3-layer MLP is the main configuration) |
| `T` | 16 | Timesteps per sample |
| `B` | 8 | Batch size |
| `N` | 256 | Inputs and neurons per layer |
| `ARRAY_ROWS` | 256 | Wordlines per crossbar; N > ARRAY_ROWS makes each layer a tile of several PEs |
| `N_CB` | 2 | Crossbars per PE |
| `V_W`, `DW_W`, `B_W` | 20, 5, 8 | Membrane, update-step and bias widths |

Runtime configuration: `cfg_num_batches`, `cfg_vth`, `cfg_leak_en`,
`cfg_leak_shift`, `cfg_eta_shift[L]`.

## Interface and use

1. Hold `rst_n` low, then release it.
2. Program the weights row by row (`prog_en`, `prog_layer`, `prog_row`,
   `prog_w[N]`) and the biases (`prog_bias_en`, `prog_bias[N]`).
3. Program the feedback matrices: pulse `fb_rand_init` for random
   matrices, or load them with `fb_prog_*`. They are internal to the
   error propagation core; the testbenches read them hierarchically.
4. Set the `cfg_*` inputs and pulse `start`.
5. In every cycle `in_req` is high, drive `in_spikes` and `in_label` for
   item (`in_b`, `in_d`, `in_t`).
6. `err_valid`/`err_pred` report each sample's prediction.
   `upd_pulse[l]` marks each layer's weight update. `done` pulses at the
   end, and `cycles` then holds the run length.

## Simulation

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. The package must come first on the
command line. For example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -Itb \
        rtl/sdfa_pkg.sv tb/tb_pipesdfa_top.sv --top-module tb_pipesdfa_top
    ./obj_dir/Vtb_pipesdfa_top

| Testbench | What it checks |
|---|---|
| `tb_rram_crossbar` | Signed/unsigned column sums, row programming, stochastic code histogram and zero mean |
| `tb_shift_add`, `tb_pe_core`, `tb_tile` | 4-bit dot products, programming, saturating updates, partial-sum accumulation |
| `tb_spiking_neuron`, `tb_forward_core` | IF/LIF dynamics, reset, mask window, bias, updates against a software neuron |
| `tb_circ_buffer`, `tb_error_calc`, `tb_error_prop_core`, `tb_backward_core` | Buffer order and fill; δ_L and argmax; B_l·δ_L with the offset correction; accumulation and update timing |
| `tb_pipeline_ctrl` | Issue times, stage taps, batch gap and run length for several (L, T, B, N_B) |
| `tb_pipesdfa_top` | Small network (L=3, T=4, B=2, N=16 on 8-row crossbars, 3 batches) against a sequential SDFA golden model: every prediction, every final weight and bias, cycle count; counts each pipeline mechanism |
| `tb_pipesdfa_full` | The same checks at the default size (L=3, T=16, B=8, N=256), two batches (296 cycles) |

The golden model in `tb_pipesdfa_body.svh` is a plain sequential SDFA
trainer: it loops over samples and timesteps, with none of the
pipeline's overlap. The pipelined hardware is correct only if it gives
bit-identical weights after every batch, because reordering the work must
not change the result.
