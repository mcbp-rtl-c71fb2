# MCBP accelerator core in SystemVerilog

LLM inference on a single device is limited by three things:
- the weight GEMMs / GEMVs;
- moving weights from DRAM;
- reading the KV cache during attention.

This design attacks all three at the level of *bit slices*. An 8-bit weight
matrix is treated as eight 1-bit matrices (slices), and each slice is
multiplied with the activations separately. Seen this way, three effects
appear that an integer datapath cannot use:

1. **Repetition (BRCR, bit-slice repetitiveness computation reduction).**
   Cut a slice into groups of m = 4 rows. Each column of a group is then a
   4-bit pattern, and only 15 non-zero patterns exist. All columns with the
   same pattern can add their activations once into a *group sum*
   z[pattern]. The four row results follow from the 15 group sums by a fixed
   network of additions.
2. **Sparsity (BSTC, bit-slice two-state coding).** With sign-magnitude
   weights, the high-order magnitude slices are mostly zero. A 4-bit column
   is stored as the single bit `0` when it is zero, or as `1` followed by its
   four bits. The decoder is tiny and bit-serial, so many of them run in
   parallel.
3. **Early pruning of keys (BGPP, bit-grained progressive prediction).**
   Attention scores q·k are computed one key bit plane at a time, most
   significant first. After every plane, keys whose partial score is far
   below the best one are dropped, and their remaining bit planes are never
   fetched.

The RTL here implements the accelerator core around these three ideas. It
has:
- 20 PE clusters, each fed by 4 BSTC decoding lanes with their weight SRAM
  banks;
- 4 BGPP units with on-demand key fetchers;
- token and temp SRAMs, an output quantizer, a controller and a bank of
  40 BSTC encoders.

The main memory (HBM), the embedding table and the non-linear function unit
are outside the core. Their connections are top-level ports.

## Number formats

| quantity | format |
|---|---|
| weights | 8-bit sign-magnitude: slices 0..6 are the magnitude bits, slice 7 the sign |
| activations | 8-bit unsigned (what the quantizer produces) |
| group sums | 20 bit |
| row results of one slice | 23 bit |
| cluster accumulators | 32-bit signed |
| queries (BGPP) | 8-bit two's complement |
| keys (BGPP) | 8-bit sign-magnitude, stored as bit planes |
| BGPP partial scores | 32-bit signed |

The package `mcbp_pkg` holds these widths and the BSTC slice selection
`BSTC_CODED = 8'b0111_1100`. Slices 2..6 are coded. Slices 0, 1 (too dense
to gain) and 7 (the sign) are stored raw.

## BRCR: how one PE multiplies a bit slice

A PE (`brcr_pe`) takes one magnitude slice of a 64 × 32 weight chunk and
32 activations, and produces the 64 row results of that slice. The slice is
16 groups of 4 rows × 32 columns. It is loaded as 512 four-bit columns into
a CAM (`cam_match`).

**CAM.** The CAM stores every column twice, split into its high-order and
low-order 2-bit halves. Each half has a bank of four one-hot rows, one per
2-bit value, and each row holds one bit per column. A search for key k:
- reads row k[3:2] of the HO bank and row k[1:0] of the LO bank;
- ANDs them.

This gives, in one cycle, a 512-bit bitmap of every column equal to k.
Key 0000 is never searched: its columns contribute nothing, so the CAM is
left idle, the clock-gating case, counted on `key_gated_o`.

**Index conversion and merging.** The bitmap is cut into 16 slices of 32
bits, one per 4-row group. Sixteen index converters (`index_converter`) turn
each slice into column indices, lowest first, one per cycle. The activations
at those indices go to 16 addition-merge units (`addition_merge_unit`), one
per group. Each AMU adds them into register z[k] of its group-sum buffer
(15 × 20 bit).

**Sweep timing.** The PE sweeps k = 1..15. Per key:
- 1 cycle of search;
- 1 cycle to load the bitmap into the converters;
- max(1, largest match count among the 16 groups) cycles of merging.

**Reconstruction.** After the sweep, one shared reconstruction unit
(`reconstruction_unit`) serves all 16 groups, four rows each (64 cycles).
Row r of a group is the sum of the z[k] whose pattern has bit 3−r set.
These are 8 of the 15 group sums, added by four two-input adders and a
small tree. The PE output is registered. The total is

    cycles = 2 + Σ_{k=1..15} (2 + max(1, maxpop_k)) + 64 + 1

so a typical sparse slice takes about 110 – 170 cycles instead of
64 × 32 multiply-adds.

**The cluster (`brcr_cluster`).** The cluster runs one PE per magnitude
slice, all in parallel on the same activation chunk. It then adds
Σ_b y_b << b into 64 output-stationary 32-bit accumulators, which collect
all chunks of the K dimension.

**Signs.** Sign-magnitude weights raise a problem the repetition trick does
not solve: rows in the same 4-row group can have different signs, so a group
sum cannot carry one sign. The cluster therefore runs every chunk twice:
- pass 1 uses the magnitude bits of the positive weights (bit ∧ ¬sign);
- pass 2 uses those of the negative weights (bit ∧ sign), and its result is
  subtracted.

The sign slice needs no PE of its own. That is why a cluster has seven PEs
where the published configuration counts eight.

## BSTC: compressed weight storage and decoding

**Sub-weights.** Each cluster has four lanes (`bstc_lane`). A lane holds one
64-bit × 1024-row SRAM bank and a bit-serial decoder (`bstc_decoder`). The
weight tile is cut into *sub-weights*: one bit slice of one 4-row group over
one 32-column chunk. Sub-weight s = 4·b + q of chunk c is:
- slice b of group 4·q + lane;
- entry 32·c + s of the lane's address area.

**Bank layout.** Rows 0..63 of a bank are the address area. Each row holds
four 16-bit entries {10-bit row, 6-bit column}, entry 0 in bits 63:48.
Each entry points at the first bit of a sub-weight's stream. Streams follow
from row 64 on, packed back to back. A stream may cross row boundaries, and
bit column c of a row is bit 63−c.

**Decoding.** On `start_i`, a lane:
1. reads the entry;
2. reads the rows in turn and shifts one bit per cycle into its decoder;
3. prefetches the next row during the last bit of the current one, so the
   stream has no bubbles.

A coded column is `0`, or `1 b3 b2 b1 b0` (bit 3 = row 0 of the group). A
raw column (bypass) is `b3 b2 b1 b0`. Decoding a sub-weight of n bits takes
n + 3 cycles. With typical weights, about two thirds of the raw bits are
streamed; the full-size test streams 1.75 M of 2.62 M bits.

**Encoders.** The bank of 40 BSTC encoders (`bstc_encoder`, one comparator
and a mux each) is brought out as a combinational port. Code generation is
an offline step in this core: the testbench builds the bank images with the
same rule.

## BGPP: progressive key pruning

A BGPP unit (`bgpp_unit`) handles one block of 64 keys of dimension 64. For
round r = 0 .. n_rounds−1, it uses key magnitude bit 6−r:

- **Fetch.** For each beat of 16 keys that still holds a live key, the key
  fetcher (`kv_fetcher`) reads that bit plane for the live keys only. In
  round 0 it also reads the sign planes, which the unit keeps. A beat
  without live keys is skipped entirely. These are the saved KV-cache
  accesses.
- **Scores.** 16 bit-serial inner-product units (`bgpp_ip_unit`) update the
  partial scores A ← 2A + Σ_j q_j · (±bit_j). The sign decision negates q_j
  for negative key elements. A 64-input adder tree sums the terms.
- **Threshold.** The progressive filter (`progressive_filter`) tracks the
  maximum and minimum of the live scores. At the end of the round it forms
  θ = max − α_r · 3 and keeps only keys with A > θ. α_r is a fraction with
  4 bits (16 = 1.0). If θ < min, every live key would survive. The clipping
  step is then skipped (the clock-gated case) and the mask is unchanged.

Because the comparison is strict, α_r = 0 removes every key. Useful values
are 1..16.

**Key memory layout.** Keys live in main memory as bit planes. Plane p
(0..6 magnitude, 7 sign) of key n is one 64-bit word at
`kv_base + p·4096 + n`.

**Round timing.** Each live beat costs 1 + (memory latency + 1) + 1 cycles,
a skipped beat 1 cycle, and each round 2 more for threshold and clipping.
The final 64-bit masks are written to the temp SRAM.

## Top level and controller

`mcbp_top` wires it all together. The controller (`mcbp_controller`) runs two
jobs that may overlap.

**GEMV** (`gemv_start`, `gemv_n_chunks` ≤ 8, `gemv_act_base`). For each
32-column chunk:
1. all 80 lanes decode their 32 sub-weights in turn. Raw slices are in
   bypass, and lane l writes group {q, l} of its cluster;
2. the activation word `act_base + chunk` (32 × 8 bit) is read from token
   SRAM and loaded into every cluster;
3. all clusters run both sign passes.

Then the 1280 accumulators are drained one per cycle through the quantizer:
y = sat₀..₂₅₅(round(acc · scale / 2¹⁶) + bias), per-channel scale and bias.
They appear on `res_valid / res_ch / res_q / res_acc`, followed by
`gemv_done`. Channel ch is row ch mod 64 of cluster ch / 64.

GEMV timing, with L the longest lane time per sub-weight step and C the
cluster time per chunk:

    2 + n_chunks · (Σ_steps (2 + L) + 4 + C) + 1280 + 2

**BGPP** (`bgpp_start`). This job:
1. reads the 64-element query from token SRAM words `q_addr`, `q_addr+1`;
2. starts the four units on blocks `key_base + 64·u`, each with its
   64-bit presence mask;
3. writes the four result masks to temp SRAM at `tmp_base + u`.

GEMV has priority on the shared token SRAM read port.

**Memories.**
- Token SRAM: 12288 × 256 bit (384 KB).
- Temp SRAM: 12288 × 64 bit (96 KB).
- Weight banks: 80 × 8 KB (640 KB).

All three are `sram_bank` instances: one write and one registered read
port.

**Counters.** The `stat_*` outputs report:
- gated CAM searches;
- gated filter rounds;
- skipped beats;
- key words fetched;
- weight bits streamed.

## Where this design departs from the published one

- **7 PEs per cluster, two sign passes per chunk** (see BRCR above); the
  published cluster has 8 PEs.
- **One activation vector per run.** The published tiling
  (T_M = 64, T_K = 256, T_N = 32) processes 32 tokens per weight tile. Here
  T_M = 64 and T_K = 256 are kept, but prefill would have to be issued as 32
  GEMVs.
- **Sub-weights are short,** one slice × 4 rows × 32 columns, so the address
  area holds 256 entries in 64 rows instead of a few entries for long
  sub-matrices.
- **Weight SRAM is 640 KB** (80 banks of 64 × 1024) against 768 KB in the
  published configuration.
- **Integer quantizer.** The quantizer is integer with a fixed-point scale;
  the FP16 conversion path and the special-function unit are not
  implemented.
- **BGPP data formats.** Queries are 8 bit. The key bit-plane memory layout,
  keeping the sign planes locally, and the 4-bit α fraction are this
  design's own choices.
- **Table 2 lists 20 clusters while the text mentions scaling to 16;** 20 is
  used.
- **Throughput choices.**
  - Decode and compute are not overlapped.
  - The AMUs add one activation per cycle.
  - The threshold unit folds 16 scores per cycle.
  - Hence the cycle counts are this design's, not the published
    throughput.
- **Encoders are not in the dataflow.** Only the encoders' existence and
  count are published. Here they are a free-standing port.

## Verification

Every block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
compares against an independent integer model, checks cycle counts where the
timing is defined, and ends with a `TB_RESULT checks=… failures=…` line. For
example:

    verilator --binary --timing -Irtl -Itb rtl/mcbp_pkg.sv tb/tb_brcr_pe.sv \
        --top-module tb_brcr_pe -o sim && ./obj_dir/sim

`tb_mcbp_top` runs the complete core at its default size (20 clusters,
1280 channels, 4 BGPP units). It takes about five minutes, mostly C++
compilation; the simulation itself runs about 37 000 cycles. The test:
- compresses a random 1280 × 256 weight tile (eight chunks, the full
  T_K) into the bank layout;
- runs a GEMV and a BGPP job at the same time;
- checks all 1280 accumulators and quantized outputs, the four key masks
  and every counter against models;
- counts each mechanism: key-0 gating, coded and raw decoding, negative
  pass, filter clipping and gating, beat skipping, on-demand key fetches,
  quantizer saturation both ways, token-port sharing, encoders.

A mechanism that never fires is a failure. Each testbench was also shown to
fail against a deliberately broken copy of its module.

Coarse synthesis of the whole core at the default size is heavy: 140 PEs,
each with a 512-column CAM and a 512-column weight store per slice. Every
block synthesises on its own.
