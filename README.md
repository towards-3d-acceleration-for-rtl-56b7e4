# Spiking MoE and multi-head attention accelerators in SystemVerilog

A spiking transformer encoder spends almost all of its work in two layer
types: the spiking multi-head self-attention (MHA) and the feed-forward
block, which in a Mixture-of-Experts (MoE) model is replaced by a router plus
several expert networks. Activations are binary spikes over a few timesteps,
so "matrix multiplication" becomes selection and accumulation of weights, and
every output is passed through a leaky integrate-and-fire (LIF) neuron.

This RTL implements two accelerators built around that observation, each made
of four identical *modularized expert cores*:

* **MoE accelerator** (`moe_accel`): a routing score array and a token router
  send each token to its best expert; up to four experts run at once on four
  spiking-expert (SE) cores, each a 16 x 128 systolic array with LIF
  generators; the router then puts every token's output spikes back in place.
* **MHA accelerator** (`mha_accel`): a dispatcher cuts Q, K and V into
  16-feature heads and gives one head to each of four spiking-attention (SA)
  cores; each core computes `A = Q K^T` and `X = A V` in one reconfigurable
  16 x 16 array that keeps the attention map inside its PEs, then LIF
  neurons turn X into output spikes, and the heads are concatenated back.

The architecture was conceived for a two-tier face-to-face bonded 3D stack:
buffers and spike generators on the top die, the compute arrays and their
operand buffers on the bottom die, and wide vertical connections between them
("3D extraction" of all PE accumulators at once). In RTL the two tiers are
simply different modules connected by wide buses; nothing here models the
bonding itself. The module comments say which tier each part belongs to.

`spiking_transformer_top` places both accelerators side by side.

## Number formats and neuron model

| quantity | format |
|---|---|
| spikes | 1 bit |
| expert and routing weights | 8-bit signed |
| synaptic integration, membrane potential | 16-bit signed |
| routing scores | 20-bit signed |
| attention map entries | 8-bit unsigned counts |
| memory words | 128 bits |

Each output neuron, per timestep t:

    V[t] = sat16(V[t-1] + X[t] - Vleak)
    S[t] = V[t] > Vth ;  if S[t] then V[t] = 0

with `V[-1] = 0`. `Vth` and `Vleak` are run-time inputs of each accelerator.
The number of timesteps is 4 by default in the MoE path (a parameter,
`snn_pkg::T_DEF`) and a run-time value (1 to 15) in the attention path.

## The MoE accelerator

### Data layout

Work is organised in **tiles of 32 tokens x 4 timesteps = 128 columns**,
which is exactly one row of the SE array and one 128-bit word.

* Act GLB (8K x 128b): word `in_base + k` holds input feature `k` of the
  tile, bit `j*4 + t` = spike of token `j` at timestep `t`. Outputs are
  written the same way at `out_base + o` for output neuron `o`.
* Weight GLB A and B (8K x 128b each): expert `e` lives in GLB A if
  `e mod 4 < 2`, else in GLB B, at word `((e/4)*2 + e mod 2) * 1024`.
  Inside, word `oc*d_in + k` holds the 8-bit weights `W[e][k][16*oc + r]`,
  `r = 0..15`, at bits `[8r +: 8]`. So GLB A serves cores 0 and 1, GLB B
  serves cores 2 and 3, and each GLB holds up to four 128 x 128 experts.
* Routing weights `Wr[t][k][e]` are in GLB A at `4096 + t*d_in + k`, expert
  `e` at bits `[8e +: 8]` (up to 8 experts).

### One tile, step by step

`start` runs one tile; the host loops over tiles.

1. **Routing scores.** For each half of the tile (16 tokens) the sequencer
   streams the `d_in * T` (feature, timestep) pairs through the 16 x 8
   routing score array: each step one word of spikes is read from the Act
   GLB and one word of routing weights from GLB A. The array accumulates
   `I[n][e] = sum_{t,k} Wr[t][k][e] * S[n][t][k]`.
2. **Top-K.** The token router takes the 16 x 8 scores and stores a binary
   top-K mask per token (K = 1 by default; ties go to the lower expert, only
   the first `num_experts` experts compete).
3. **Dispatch.** Each input-feature word is read once more; the router
   packs, for each core, the tokens routed to that core's expert into the
   lowest columns, in token order, and the word is written into the core's
   activation local buffer (3K x 128b).
4. **Preload.** Each active core receives its expert's weights (`d_in *
   d_out / 16` words) from its weight GLB into its weight local buffer. Cores
   0 and 2 load in parallel, then 1 and 3, because two cores share each GLB.
   A core that already holds the wanted expert from an earlier tile is
   skipped, so with four or fewer experts the weights are loaded once.
5. **Compute.** All active cores run in parallel (below).
6. **Merge.** For each output neuron the sequencer reads the output word of
   every core, and the router moves each token's spikes from its packed
   column back to its own column (ORing over experts if K > 1). The result
   is written to the Act GLB.

With more than four experts, steps 3 to 6 repeat in *rounds*: expert `e`
runs on core `e mod 4` in round `e / 4`. In later rounds the merge reads
the word written before and ORs into it.

### The SE core and its systolic array

The SE core (`se_core`) computes, for the packed tokens of one expert,
`X[o][col] = sum_k W[k][o] * S[col][k]` and the LIF outputs.

The array (`se_pe_array`) has 16 rows (output neurons) and 128 columns
((token, timestep) pairs). Each cycle one input feature is applied: the 16
weights of that feature enter at the left edge, one per row, and move right
one PE per cycle ("weight reuse" across tokens and timesteps); the 128
spikes enter at the top, one per column, and move down ("spike reuse" across
neurons). Input skew registers delay row `r` by `r` cycles and column `c` by
`c` cycles, so the operands of feature `k` meet in PE(r,c) at the same
cycle. Each PE is *integration-stationary*: a 2:1 multiplexer picks 0 or the
weight depending on the spike, and an adder accumulates into its 16-bit
register. After the last feature, `ROWS + COLS - 1` more clock edges
complete the far corner, and then all 2048 accumulators are visible at once
on the `si` output (the 3D extraction port).

The core processes output neurons in groups of 16:

| phase | cycles |
|---|---|
| clear array | 1 |
| stream `d_in` (weight word, spike word) pairs from the two LBs | d_in |
| drain | ROWS + COLS + 1 |
| extract one PE row per cycle into the generators, write outputs | ROWS + 2 |
| next group | 1 |

that is `d_in + 2*ROWS + COLS + 5` cycles per group (293 cycles for
d_in = 128 at the default size). The generators evaluate a whole row at once
as 32 neurons x 4 chained timesteps, so the membrane never leaves the
generator: the four timesteps of a token sit in adjacent columns. Outputs
go back into the activation LB at address `1024 + o`.

## The MHA accelerator

### Data layout

* Act GLB (8K x 128b): one word per (timestep `t`, token `n`) with all 128
  features: Q at `q_base + t*n_tok + n`, likewise K, V, and the output at
  `out_base + t*n_tok + n`. Head `h` is features `16h .. 16h+15`.
* In each SA core, local buffer A holds Q (from 0) and K (from 1536), local
  buffer B holds V (from 0) and the output spikes (from 1536). A word packs
  8 tokens x 16 features of one timestep: address `t*(n_tok/8) + n/8`, bit
  `(n mod 8)*16 + f`. The synaptic-integration local buffer keeps one
  membrane per (token, feature) between timesteps, 8 per word.

### Dispatcher

For every round of up to four heads (head `h` on core `h mod 4`) the
dispatcher reads every Q, K and V word once, cuts out each core's 16-bit
slice, collects 8 tokens per word and writes it to the core. After the cores
finish, it reads each core's output words and writes every token word of the
Act GLB with a bit mask that covers only the heads of this round; this is
how the heads are concatenated without read-modify-write.

### The reconfigurable attention array

The SA array (`rpe_array`) is 16 x 16; row `nq` belongs to a query token,
column `nk` to a key token. Each R-PE has a vertical 1-bit register (the key
in mode 0, the value in mode 1), a horizontal 1-bit query register, an 8-bit
attention register and a 16-bit X register.

* **Mode 0, A = Q K^T.** For each of the 16 features, query spikes enter on
  the left and keys at the top (both skewed); every PE adds `q AND k` to its
  attention register. After 16 features the 16 x 16 attention map of this
  (query tile, key tile, timestep) stays in the PEs.
* **Mode 1, X = A V.** For each feature `f`, the value spikes `V[nk][f]`
  enter at the top and move down. Along each row a partial sum moves right:
  PE(nq,nk) adds its attention value if its value spike is 1. The sum that
  leaves the right edge of row `nq` is `sum_nk A[nq][nk] * V[nk][f]`; row
  `nq` delivers feature `f` exactly `nq + 17` cycles after `f` was applied,
  tagged by `x_valid`.

The multi-bit attention map never moves; only spikes enter the array and
only X leaves it.

### The SA core schedule

For each timestep `t` and query tile `qt` (16 tokens): for every key tile
`kt` the K and V tiles (and once the Q tile) are loaded from the local
buffers into tile registers, the array runs mode 0 and then mode 1, and the
X values leaving the array are added into a 16 x 16 accumulator. After the
last key tile, eight LIF generators process the 256 neurons: read the
membrane of the previous timestep from the synaptic-integration buffer (zero
at `t = 0`), update, fire, write the membrane back. The 16 x 16 output
spikes are then written to local buffer B. This takes
`3 + (n_tok/16)*108 + 99` cycles per (t, qt).

## Mapping the evaluated model

The network evaluated for this architecture uses 128 features, 4 x 4 patches
of 32 x 32 CIFAR images (64 tokens), attention heads of 16 features (8
heads) and top-1 routing over 1, 4 or 6 experts, with 8-bit weights and
16-bit integrations. At the default sizes:

* an MoE layer 128 -> 128 with up to 8 experts fits: every expert is 1024
  words, each weight GLB holds four, each weight LB (3072 words) holds one;
  64 tokens are two tiles. Six experts run as two rounds (4 + 2).
* an attention layer of 64 tokens, 8 heads, T timesteps uses 3 x 64T words of
  the Act GLB for Q, K, V and 64T for the output; each core needs 16T words
  of local buffer per matrix. T up to 15 fits.
* the number of timesteps of the evaluated model and the hidden size of its
  expert MLPs are not known here. An expert whose weights exceed 3072 words
  (for example 128 x 512) must be processed in several `d_out` slices by the
  host.

## Where this RTL departs from, or adds to, the source design

The array sizes, memory sizes and word widths, number formats, the four-core
organisation, the two weight GLBs, the PE contents of both arrays, the
two-mode attention PE, the step order of both dataflows and the top-1 routing
follow the published description. The following are choices made here
because the description does not fix them:

* the timestep count (4), tile size (32 tokens), every memory map, the host
  interface and the run-time configuration inputs;
* the input skew of both arrays, the valid tagging of row outputs, and all
  cycle counts;
* which weight GLB serves which core, and Wr kept in GLB A;
* rounds of four experts/heads when there are more than four;
* skipping an expert preload when the core already holds those weights;
* merging several experts of one token by OR (only relevant for top-K > 1);
* the LIF saturation at 16 bits and the generator widths (one 32 x 4 row per
  cycle in the SE core, 8 neurons per cycle in the SA core);
* the small Q, K/V, S and X buffers of the attention core are registers
  sized for one 16 x 16 tile, not 96-word SRAMs;
* the scaling ("shift") step of spiking self-attention is not applied; it
  can be folded into `Vth`;
* the steps of a tile run one after another, without overlap of preload,
  dispatch and compute;
* the 3D aspects (tier partitioning, bond vias, the physical flow) are not
  modelled; the SRAMs are plain synchronous arrays with a bit write mask.

## Files

| file | contents |
|---|---|
| `rtl/snn_pkg.sv` | shared widths, timestep default, saturation function |
| `rtl/sram_sp.sv` | single-port SRAM with bit mask, 1-cycle read |
| `rtl/se_pe.sv`, `rtl/se_pe_array.sv` | expert PE and 16 x 128 systolic array |
| `rtl/lif_generator.sv` | parallel LIF generators, optional timestep chaining |
| `rtl/routing_score_array.sv` | 16 x 8 routing score array |
| `rtl/token_router.sv` | top-K mask, token packing, aligned merge |
| `rtl/se_core.sv` | spiking expert core |
| `rtl/moe_accel.sv` | MoE accelerator |
| `rtl/rpe.sv`, `rtl/rpe_array.sv` | reconfigurable attention PE and array |
| `rtl/sa_core.sv` | spiking attention core |
| `rtl/mha_accel.sv` | MHA accelerator with dispatcher |
| `rtl/spiking_transformer_top.sv` | both accelerators |
| `tb/tb_*.sv` | one self-checking testbench per module, `tb_ref_pkg.sv` holds the reference LIF |

## Simulation

Every testbench is self-checking: it computes the expected result with plain
SystemVerilog arithmetic, compares, and prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_moe_accel \
      -y rtl -y tb +libext+.sv rtl/snn_pkg.sv tb/tb_ref_pkg.sv tb/tb_moe_accel.sv
    ./obj_dir/Vtb_moe_accel

`tb_spiking_transformer_top` runs the whole design at its default sizes: an
attention layer (64 tokens, 4 timesteps, 8 heads), whose output spikes the
host re-lays out as the input of a 128 -> 128 MoE layer with six experts in
two 32-token tiles. It checks every output spike of both layers and that
multi-round dispatch, multi-round expert processing, preloads, preload
skips and routing to several experts all happened.

The unit testbenches use smaller arrays where that keeps them short
(`tb_se_pe_array` 6 x 10, `tb_se_core` 4 x 16); the accelerator tests run at
the default sizes with fewer features or tokens.

## Changing the design

* Array sizes are parameters (`ROWS`, `COLS` of `se_pe_array`/`se_core`,
  `P` of `sa_core`). The MoE sequencer assumes a tile of exactly two
  16-token routing halves (`COLS / TSTEPS = 32`).
* `TOPK` of `moe_accel` selects top-K routing; merging then ORs the experts'
  spikes.
* Memory depths are parameters of `sram_sp`; the memory maps above are
  `localparam`s/parameters of `moe_accel`, `se_core`, `sa_core` and
  `mha_accel`.
