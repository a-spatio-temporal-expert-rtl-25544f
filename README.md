# Spatio-temporal expert prediction for MoE inference: prediction unit and PE arrays in SystemVerilog

Mixture-of-Experts language models pick a few experts (top-K out of tens or
hundreds) per token and per layer. Because the choice is only known once the
layer's gating network has run, the expert weights have to be fetched from
DRAM on demand, and that transfer stalls the computation. This design hides
most of that transfer by *predicting* the experts of the next layer while the
current one is still running, and prefetching them during the next layer's
attention phase.

The prediction rests on two observed correlations:

* **spatial**: the experts a token uses in layer *i* say a lot about the ones
  it will use in layer *i+1*;
* **temporal**: consecutive decoded tokens tend to use overlapping experts in
  the same layer.

Each correlation is captured by a small table, and the tables are kept up to
date online with 2-bit saturating confidence counters, in the manner of a
branch predictor. Mispredictions never change the model's output: experts that
were selected but not prefetched are simply fetched late.

The RTL here covers the prediction hardware and the compute arrays. The
surrounding accelerator (router, mapping unit, buffers, memory interface,
controller) is described below as context, but is not part of this RTL; its
signals are the ports of the top module.

## The two tables

**Cross-layer Correlation Table (CCT).** One row per expert of the current
layer (256 rows, so up to 256 experts per layer). Each row holds 8 candidate
experts of the next layer, each with a 2-bit confidence:
`11` strongly preferred, `10` preferred, `01` not preferred, `00` strongly
not preferred. An entry is 10 bits (8-bit expert index, 2-bit score). The
rows come out of an offline profiling pass: for each expert, the 8 experts of
the next layer it co-occurs with most often, all starting at `10`.

**History Table (HT).** The 8 experts the previous token actually used in the
layer being predicted. Each has a fixed score of `10`; the whole table is
overwritten after every layer with the latest router result.

Both tables live in DRAM, one CCT per pair of adjacent layers and one HT per
layer. The unit holds one of each at a time and loads and writes back rows
through its `cct_wr_*`/`cct_rd_*` and `ht_*` ports. Only the k rows indexed
by the current selection are ever read or changed, so per layer only those k
rows need to move.

## Prediction

Given the k experts `sel` that the router picked for layer *i*:

1. for every expert `f`, score(f) = sum of the confidences of `f` over the k
   CCT rows `sel[0..k-1]` (one row per clock cycle);
2. every expert in the HT adds 2 to its score;
3. the predicted set is every expert with score >= 2.

So an HT expert is always predicted, a CCT candidate at `10` or `11` is
always predicted, and two weak (`01`) votes from different rows also make it.
The result is a 256-bit bitmap `pred_set` that stays valid until the next
prediction starts; the prefetcher can read it whenever it is ready to issue.
`pred_done` pulses k+2 cycles after `pred_start`.

## Verification and table update

When the router has produced the actual selection `act` of layer *i+1*:

* **verification** (`stmoe_top`, combinational while `act_valid` is high):
  each selected expert that is in `pred_set` is a hit; the others form
  `miss_set`, the experts that must be fetched on demand. `hit_cnt` and
  `miss_cnt` count them.
* **update** (`upd_start`, k cycles): in each of the k CCT rows used by the
  last prediction, a candidate that appears in `act` gains 1 (saturating at
  `11`), one that does not loses 1, and one that was already at `00` is
  replaced by an expert of `act` that the row does not yet contain, starting
  at `10`. The HT is then overwritten with `act`. `upd_done` pulses when done.

Within a row the replacement takes the first expert of `act` (in router
order) not yet in the row, and marks it used so two retired candidates never
receive the same expert. If every expert of `act` is already in the row, the
retired candidate stays at `00`. The original algorithm only asks for "any"
such expert.

## Where this sits in a layer

Per MoE layer, the intended sequence (held by an external controller) is:

```
layer i   : attention | router | verify | load missed experts | compute
                                 \__ predict layer i+1 (pred_start with sel)
layer i+1 : attention (prefetch pred_set near its end) | router | verify ...
```

The prediction made during layer *i* waits in the unit while layer *i+1*
runs attention. The prefetch is issued near the end of that attention, so the
expert transfers overlap it. After layer *i+1*'s router, verification decides
which experts still have to be fetched, the same router result drives the
table update, and then the prediction for layer *i+2* follows.

## Compute arrays

Each of the 8 processing elements serves one selected expert per layer. Its
core is `mac_array`, an N x N systolic array of bfloat16 multiply / fp32
accumulate cells (`mac_cell`, `bf16_mac`):

* one operand is *stationary*: it is loaded one column per cycle
  (`ld_col`, `ld_data[r]` -> S[r][ld_col]);
* the other is streamed as vectors indexed by the reduction dimension. Row r
  is skewed by r cycles, operands move right and partial sums move down;
* column c produces `out[c] = sum_r v[r] * S[r][c]`; a de-skew stage aligns
  all columns, so one full output vector leaves per cycle,
  2N-1 cycles after its input vector went in.

The same array supports both dataflows that the PE is meant to choose
between:

* **weight stationary**: the columns are the expert's weight columns and the
  streamed vectors are tokens. Out comes one row of the result per token.
  This pays off when many tokens share the expert.
* **input stationary**: the columns are tokens and the streamed vectors are
  weight columns. Out comes one result column per weight column. This pays
  off when there are few tokens and many output columns.

Arithmetic: products of two bfloat16 values are exact in fp32. The additions
truncate and flush subnormals to zero, and overflow saturates to infinity.
NaN is not handled. Results leave the array in fp32.

## Files and parameters

| file | what it is |
|---|---|
| `rtl/stmoe_pkg.sv` | types (`cand_t`, `expert_t`, `bf16_t`), confidence constants, fp helpers |
| `rtl/epu.sv` | Expert Prediction Unit: CCT, HT, prediction, update |
| `rtl/mac_array.sv`, `rtl/mac_cell.sv`, `rtl/bf16_mac.sv` | systolic MAC array, its cell, the MAC |
| `rtl/stmoe_top.sv` | EPU + verification + NUM_PE MAC arrays |

| parameter | default | meaning |
|---|---|---|
| `epu.MAX_E` | 256 | CCT rows (largest expert count per layer) |
| `epu.CAND` | 8 | candidates per CCT row |
| `epu.KMAX` | 8 | HT entries, largest top-K |
| `mac_array.N` | 64 | array is N x N |
| `stmoe_top.N` | 40 | array size inside the top (see below) |
| `stmoe_top.NUM_PE` | 8 | number of arrays (PEs) |

The runtime input `cfg_k` (1..8) sets the top-K of the model being run, so
one build serves models with 60 experts / top-4 up to 160 experts / top-8.

`stmoe_top` uses N = 40 rather than 64. Elaborating eight 64 x 64 arrays
(32,768 fp32 MAC cells) takes about 47 GB in the open-source elaboration
flow, about 1.45 MB per cell. At N = 40 it needs about 19 GB. The array
module itself keeps 64, and `stmoe_top #(.N(64))` is legal RTL.

## What is not here

These parts of the accelerator are not in this RTL. Their connections are
ports of `stmoe_top`:

* the **router**, an M x K MAC array that computes the gating scores and
  the top-K selection;
* the **expert mapping unit**, which maps selected experts to PEs, tracks
  which experts are resident on chip, and configures the permutation
  network;
* the **permutation network**;
* the **expert/KV buffer** (16 MB) and the **activation buffer** (4 MB);
* each PE's local controller, reuse, input and output buffers, and the
  output-to-input forwarding path;
* the **memory interface and prefetcher**, the **controller** and
  instruction queue, the **activation unit**, the host link and the DRAM.

The offline profiling that produces the initial CCT is also not in the RTL:
count how often each pair of experts is used together in adjacent layers,
then keep the top 8 per row.

The core therefore does not sequence whole experts. It computes one N x N
weight tile per PE per pass, and splitting an expert into tiles and
accumulating across them is left to the surrounding logic.

## Simulating

Every testbench checks itself and ends with a
`TB_RESULT checks=<n> failures=<n>` line. Plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/stmoe_pkg.sv tb/tb_util_pkg.sv tb/tb_epu.sv --top-module tb_epu
./obj_dir/Vtb_epu
```

* `tb_bf16_mac` compares the MAC against double-precision arithmetic.
* `tb_mac_array` streams back-to-back vectors through an 8 x 8 array and
  checks the exact integer results, the 2N-1 cycle latency and the
  one-vector-per-cycle throughput.
* `tb_epu` compares 40 predict/update rounds (k = 8 and k = 4) against a
  software model of the prediction and update rules, including replacements
  and the k+2 cycle prediction latency.
* `tb_stmoe_top` runs 12 layers of a correlated expert stream through the
  core. Each layer does predict, verify (hits and misses), update, and
  compute on all 8 PEs. The run fails if a prediction, a hit, a miss, a CCT
  replacement or a PE computation never happens. It uses N = 8 and 64
  experts, the largest configuration simulated. The top has not been
  simulated at its default sizes.
