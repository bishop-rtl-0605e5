# Bishop: a token-time-bundle accelerator for spiking transformers

A spiking transformer runs every layer over three axes: T time points, N tokens and D
features. Its activations are single bits, and most of them are zero. If you handle those
zeros one spike at a time, the control costs more than the work it saves. If you ignore the
zeros, weights are fetched again and again for multiplications that add nothing.

This design groups spikes into **token-time bundles (TTBs)**. A TTB holds the spikes of one
feature for `BS_N` tokens over `BS_T` time points. Here `BS_T = 2` and `BS_N = 5`, so every
bundle has `BV = 10` lanes. A bundle is *active* if any of its lanes spikes.

Work is scheduled, skipped and pruned a whole bundle at a time:

* Inside a bundle, one 8-bit weight serves all ten lanes, since they share a feature.
* An inactive bundle costs nothing in the sparse core.
* In attention, whole query rows and key tokens are removed before the score map is
  computed.

The accelerator has three compute engines around a shared memory:

| engine | used for | how it works |
|---|---|---|
| dense core | projection or MLP inputs that spike a lot | 32 x 16 output-stationary systolic array, select-accumulate PEs |
| sparse core | inputs that spike rarely | 128 select-accumulate units fed only with active bundles |
| attention core | Q·Kᵀ and S·V of one head | 16 x 32 reconfigurable array: AND-accumulate, then select-accumulate |

A **stratifier** decides, for each input feature, which of the first two cores handles it.
A **spike generator** of 512 leaky integrate-and-fire (LIF) neurons turns the sums into
the next layer's spikes. Pruning of attention inputs (**ECP**, error-constrained bundle
pruning) and a **Y buffer** with a power-of-two shifter complete the attention path.

## Data layout

Everything in the spike buffers is one *feature word* per address.

* **Spike GLB word, 160 bits.** A word holds one feature for the 16 bundles of a tile.
  Bundle `j` is bits `[j*10 +: 10]`. Inside a bundle, lane `k` is time point `k / 5` and
  token `k % 5`.
* **Key/value word.** K and V are read as tokens rather than bundles. The low
  `NK * BS_T = 64` bits hold 32 tokens of 2 time points each, token `j` at bits
  `[j*2 +: 2]`.
* **Weight GLB word, 512 bits.** A word holds the 64 signed 8-bit weights that one input
  feature sends to 64 output features. The weight for output `o` is at bits `[o*8 +: 8]`.
  A tile computes 32 outputs, and the command bit `w_half` picks the lower or upper 32.
* **Spike GLB banks.** There are two 12 KB banks of 614 words each, used as a ping-pong
  pair. A command reads the bank it names in `src_bank`, and its results are written to
  the other bank. There are no fixed regions: Q, K, V, inputs and outputs are placed
  wherever the command's base addresses point.

## Commands

The accelerator runs one tile per command (`cmd_t` in `bishop_pkg`). The command is taken
on `cmd_valid && cmd_ready`, and `done` pulses at the end. The fields:

| field | meaning |
|---|---|
| `op` | `OP_PROJ` (projection or MLP tile) or `OP_ATTN` (attention tile) |
| `src_bank` | spike bank read; outputs go to `!src_bank` |
| `in_base`, `n_feat` | first input word (Q for attention) and number of input (head) features |
| `w_base`, `w_half` | weight row of input feature 0; which 32 of the 64 outputs |
| `k_base`, `v_base` | attention: first K word, first V word (32 V features) |
| `out_base` | first of the 32 output words written |
| `theta_s` | stratification threshold (active bundles of a feature) |
| `theta_q`, `theta_k` | ECP thresholds |
| `y_accum`, `y_fire`, `y_shift` | attention: add to the Y buffer instead of overwriting; fire after this key tile; right shift applied to Y |
| `vm_init` | tile carries the first time points of its neurons: membranes start at zero |
| `v_th`, `v_leak` | LIF threshold and leak |

The statistics outputs (`st_*`) report, for the last tile:

* the number of dense and sparse features;
* how many bundles the sparse core skipped;
* the ECP keep masks;
* the spike count;
* the cycle count.

## Projection tile: stratify, split, add

A projection tile computes 32 output features for 16 bundles (80 tokens and 2 time points)
from up to 384 input features. It runs in four steps:

1. **Stratify.** Each input word is read once. The stratifier counts its active bundles.
   A count above `theta_s` puts the feature index into the dense list; otherwise it goes
   into the sparse list. These lists are the feature index buffer. The count covers only
   the 16 bundles of the tile, so one pass is enough.
2. **Integrate.** Both cores run at the same time, using separate read ports of both GLBs.
   * *Dense core.* Each dense feature enters as one spike word plus its weight row, one
     per cycle.
     - Bundles enter at the top of the 16 columns and flow down.
     - The 32 weights enter at the left of the 32 rows and flow right.
     - Both edges are skewed, so that PE (row f, column j) sees bundle j and weight f
       together.
     - Each PE adds its weight into the lanes whose spike is set. It needs no multiplier:
       one multiplexer and one adder per lane.
     - Partial sums stay in the PE, because the array is output-stationary.
   * *Sparse core.* This core takes the sparse features one at a time. Each cycle it
     gives up to 4 of the feature's active bundles to the 4 groups of 32 units, one unit
     per output feature. Inactive bundles are never given out.
     - A feature with `a` active bundles takes `max(ceil(a/4), 1)` cycles.
     - A feature with no active bundle is dropped when it is read.
3. **Fire.** The spike generator runs 10 steps, one per lane of the bundle.
   * In each step, all 512 neurons (16 bundles x 32 features) each add their dense and
     sparse partial sums (the sparse-dense addition).
   * They then apply `V = V + I - V_leak`, fire when `V > V_th`, and reset to 0.
   * Steps 0 to 4 are time point 0 of tokens 0 to 4. Steps 5 to 9 are time point 1 of
     the same tokens. So each PE keeps one membrane per token slot, and time runs in
     order within a bundle.
4. **Write back.** The 32 output words go to the other bank, where they are the next
   layer's input bundles.

**Membrane order.** Membranes stay in the spike generator from one tile to the next. If a
neuron's time bundles come in successive tiles, a command with `vm_init = 0` continues
them. No other tile may run in between: the membrane state is not saved to memory. This
ordering rule is the main constraint a scheduler for this design must follow.

**Dense core timing.** A dense core input is done `32 + 16` cycles after it enters (the
`busy` output). The sparse core is done when `idle` is high. The projection tile goes on
to firing only when both cores are done and both lists have been used up.

## Attention tile: prune, AND, select

An attention tile takes one head. It pairs 16 query bundles with 32 key tokens over
`n_feat` head features, and gives Y for 32 value features.

1. **ECP.** Q and K are read once, side by side.
   * For every query row (bundle), the filter counts the features in which the bundle is
     active.
   * For every key token, it counts the features in which that token spikes at either
     time point.
   * A row or token whose count is below its threshold is pruned. Pruning a key token
     also prunes its value, because both share the token column. The thresholds in the
     published evaluation were 6, and 10 for the event-camera model.
2. **Mode 1: scores (AND-accumulate).**
   * Q bundles flow right along the 16 rows; K tokens flow down the 32 columns.
   * Each PE holds `S` for its 10 lanes and adds `Q[k] & K[t(k)]`. Lane `k` uses the key
     spike at its own time point.
   * `S` is 10 bits wide and saturates.
   * Pruned rows and tokens enter as zeros, so their `S` stays zero.
3. **Mode 2: output (select-accumulate).**
   * `S` stays in place. V tokens flow down; a Y partial sum enters each row from the left.
   * Each PE adds its `S` lane to Y where the V token spikes at that lane's time point.
   * Row `i`'s result leaves the right edge `i + 33` cycles after its feature entered.
4. **Y buffer.**
   * A key tile with `y_accum = 0` overwrites the Y buffer. Later key tiles of the same
     queries set `y_accum = 1` and add to it, so sequences longer than 32 keys are handled
     in key tiles.
   * The tile that sets `y_fire` sends `Y >> y_shift` through the spike generator, with
     zero as the second input. The resulting 32 spike words are written back like a
     projection output.

## Block list

| module | role |
|---|---|
| `bishop_pkg` | sizes, widths, bundle/weight types, opcodes, command struct |
| `weight_glb` | 144 KB weight buffer, 512-bit words, 2 read ports |
| `spike_glb` | two 12 KB spike-bundle banks, 2 read ports |
| `stratifier` | active-bundle count, dense/sparse feature lists |
| `dense_pe`, `dense_core` | select-accumulate PE and the 32 x 16 skewed array |
| `sparse_core` | active-bundle distribution to 4 x 32 units, per-output accumulators |
| `ecp_filter` | Q-row and K-token pruning masks |
| `attn_pe`, `attn_core` | two-mode PE and the 16 x 32 array with edge masking and skew |
| `y_buffer` | Y placement, overwrite/accumulate, right shift |
| `spike_gen_pe`, `spike_gen` | LIF neuron with sparse-dense addition, 512 of them |
| `bishop_top` | memories, engines and the tile sequencer |

## Where this design departs from the published architecture

* **Bundle size.** The bundle is fixed at 2 x 5. Smaller bundles can be used by leaving
  lanes empty, but the hardware is not reconfigurable in bundle shape.
* **Sparse core.**
  - The published design uses a SIGMA-style flexible distribution and reduction network.
    Here a fixed priority picker gives the first four active bundles to four fixed unit
    groups.
  - No adder tree is used, because one input feature per step never sends two terms to
    the same output.
  - The function is the same, but the flexible mapping across layer shapes is not
    reproduced.
* **Array orientation.** In the dense core, rows are output features and columns are
  bundles. One description of the original reads the other way round, but its weight-reuse
  dataflow (weights passed along a row) requires this orientation.
* **Attention array split.** The 512-PE attention array is arranged as 16 query bundles by
  32 key tokens. ECP pruning zeroes the inputs of pruned rows and columns. It does not
  re-pack the surviving work onto free PEs, so it saves switching activity but not cycles.
* **Stratification scope.** Stratification counts over one tile (16 bundles), not over a
  whole layer.
* **Not modelled.**
  - Off-chip DRAM and its controller: the `ld_*`/`rd_*` ports stand in for them.
  - Double buffering of the weight buffer.
  - Clock and process targets (500 MHz, 28 nm).
* **Widths.** The partial sums, `Y` and membranes are 20, 18 and 24 bits. These widths
  are chosen to hold D = 384 inputs of 8-bit weights and 256 keys of 10-bit scores.
  They are not published.
* **Input width.** A layer with more than 384 inputs per neuron, such as a 4D-wide MLP
  hidden layer, cannot be split across tiles. A tile always fires after it integrates.

## Sizes and workloads

At its default parameters, the design holds the published evaluation models in tiles:

* D of 128 or 384.
* T of 4 to 20, which is 2 to 10 time bundles.
* N of 64 to 256, which is 13 to 52 token bundles. These make 1 to 4 projection tiles
  and 2 to 8 key tiles per time bundle.

A 384 x 384 weight matrix is 2304 words, which is exactly the weight buffer. A 384-input
projection tile uses 416 of the 614 words of a spike bank.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and contains a watchdog. To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        --top-module tb_dense_core rtl/bishop_pkg.sv tb/tb_dense_core.sv
    ./obj_dir/Vtb_dense_core

The block testbenches compare against reference models written in the testbench. They
also check the latencies stated above:

* dense drain `NF + NB`;
* attention Y at `i + NK + 1`;
* sparse-core cycles equal to the bundle-skip formula.

`tb_bishop_top` runs the whole accelerator at its default sizes:

* two projection tiles of the same neurons, with the membranes carried over;
* two attention key tiles (overwrite, then accumulate and fire);
* a bit-exact comparison of every output word against a behavioural model.

It counts each mechanism and fails if one never occurred:

* dense and sparse features;
* skipped bundles;
* pruned query rows and key tokens;
* Y accumulation;
* spikes;
* ping-pong bank use.

Its C++ build is large; allow several minutes of compile time.
