# SHEARer encoder: a BRAM-addressed hyperdimensional encoder with approximate popcount trees

Hyperdimensional (HD) classification maps every input sample to a long
vector, the *encoding hypervector*, and compares it with one stored vector per
class. Most of the work is in the encoding. For a sample with `DIV` quantized
features, dimension `d` of the encoding is

    H[d] = sum over features k of ( L[level_k][d] XOR ID_k[d] )

Here `L[0..15]` are the *level hypervectors*, one per quantization level of a
feature. `ID_k` is the *ID (position) hypervector* of feature `k`. Bipolar
values are stored as bits (−1 as 0), so `H[d]` is a popcount over `DIV` bits.
Every dimension therefore needs a `DIV`-input popcount, and there are
thousands of dimensions.

This RTL implements an FPGA encoder built on two ideas:

1. **Approximate popcount trees.** HD models tolerate many bit errors, so the
   per-dimension adder tree can be built from cheaper approximate nodes:
   * local majority votes (`MAJ`, `MAJ-2`);
   * adders fed more inputs than they can sum exactly (*overfeeding*);
   * adders that drop their least significant bit (*truncation*).

   Each one trades a little accuracy for far fewer LUTs. The same
   approximation has to be used when the class hypervectors are trained, in
   software.
2. **Memory addressing instead of multiplexers.**
   * Each feature's quantized value becomes a block-RAM address, so no
     16-to-1 level multiplexer is needed per feature and dimension.
   * Only one ID hypervector, the *seed*, is stored. `ID_k` is the seed
     rotated by `k`. One wide memory row therefore serves all features of a
     cycle, wired to them at fixed offsets.

## Dataflow and schedule

The encoder handles `DMEM` = 64 dimensions (a *segment*) and `F` features (a
*feature group*) in each clock cycle:

```
 sample ──► feature_buffer ──(F levels of group g)──► level_bram_group x ceil(F/2) ──┐ F x 64 level bits
                                                                                     ├─► bind_xor ─► 64 x popcount tree ─► partial_sum_buffer ─► out_enc[64]
 (seg,g) ─► id_address_controller ─► id_memory ──(DMEM+F-1 seed-ID bits)────────────┘
   ▲
 encoder_controller: for seg in 0..SEGS-1 { for g in 0..NGROUPS-1 { one cycle } }
```

* `SEGS = ceil(DHV/DMEM)`, `NGROUPS = ceil(DIV/F)`.
* One sample takes `SEGS × NGROUPS` cycles. At the defaults that is
  40 × 2 = 80 cycles: 2560 dimensions from 617 features, with F = 310.
* A finished segment of 64 dimensions leaves every `NGROUPS` cycles.
* The next sample is accepted in the last issue cycle of the current one, so
  back-to-back samples leave no gap.

Pipeline, counted from the clock edge that accepts a sample:

| stage | cycles | what happens |
|---|---|---|
| issue | 1 per group | the controller steps `(seg, g)`; the level and ID addresses are formed combinationally |
| memory read | 1 | block RAM read (registered) |
| bind + tree | `LAT` | XOR, first LUT layer, then one register per adder stage |
| accumulate | 1 | group results are added; the last group's sum is registered at the output |

The first result appears `NGROUPS + LAT + 2` cycles after acceptance. `LAT`
is `hd_pkg::tree_latency(MODE, F)`. For F = 310 it is 8 (exact, truncated),
6 (MAJ), 3 (MAJ-2) and 7 (overfeed). The testbenches check this count and
the spacing of the results.

## The approximate trees

All trees take the `F` bound bits of one dimension. Four of them first reduce
the bits with a layer of small LUT functions (`hd_pkg`). Then comes a
registered binary tree of 2-input adders (`adder_tree`), padded with zeros to
a power of two.

| `MODE` | first layer | rest of the tree | result ≈ | LUT saving |
|---|---|---|---|---|
| `ENC_EXACT` | 3-input 1-bit adders (2-bit sum) | exact adders, one bit wider per stage | popcount | 0 |
| `ENC_MAJ` | 6-input majority, then 3-input adders | exact | popcount / 6 | ~71 % |
| `ENC_MAJ2` | two stages of 6-input majority, then 3-input adders | exact | popcount / 36 | ~83 % |
| `ENC_OVERFEED` | 5 inputs → `floor(sum/2)` on 2 bits (0–1→0, 2–3→1, 4–5→2) | exact | popcount / 2 | ~40 % |
| `ENC_TRUNC` | 3-input adders | stages 2..K: `(a+b)>>1`, 2-bit output; later stages exact | popcount / 2^(K−1) | 37.5 % (K=3), 43.75 % (K=4) |

The saving column is the expected LUT saving relative to the exact tree, as
published for this design. It was not measured on this RTL.

**Majority ties.** A 6-input vote is undecided when exactly three inputs are
1. The tie goes to a fixed bit per tree, so per output lane. The bits are the
parameter `TIE_BITS`. They should be random, and they must match the
software that trains the classes. All majority LUTs of a tree use the same
tie bit, in both stages of `MAJ-2`.

**Truncation depth.** `K` counts the exact first stage. With `K = 3`, adder
stages 2 and 3 truncate. This matches the resource equation, which gives
savings of 25 %, 37.5 % and 43.75 % for k = 2, 3, 4. The published
description of the "trunc-3/trunc-4" experiments instead speaks of three or
four *intermediate* stages. With that reading, K would be 4 or 5. The
published drawing of the truncated tree agrees with K = 3: three stages
with 2-bit outputs, then a stage with a 3-bit output.

**Padding.** If `F` is not a multiple of the group size (3, 5, 6), the last
group is padded with zeros. So is the last, partly filled feature group of a
sample (617 = 310 + 307, so three slots are zero in the second cycle). A zero
can change a majority vote. The training software has to pad the same way.

The scaled results (÷6, ÷2, …) are not rescaled in hardware. Classification
compares similarities, so a common scale factor does not matter.

## Memories and what the host writes into them

A *memory group* (`level_bram_group`) holds all 16 level hypervectors. It
consists of `ceil(LEVELS·DHV / (512·64))` block RAMs of 512 × 64 bits, which
is 2 at the defaults. Each group serves two features, one per BRAM port. The
encoder has `ceil(F/2)` = 155 groups, that is 310 BRAMs. All groups hold the
same data. `lvl_wr_*` writes to all of them at once.

* Level row `r = level·SEGS + seg` holds bits `seg·64 … seg·64+63` of level
  hypervector `level`. It is stored in BRAM `r / 512`, row `r mod 512`.
* Only the addressed BRAM of a group is enabled in a cycle. Its index is
  registered with the read and selects the group's output multiplexer.

The *seed-ID memory* (`id_memory`) is `DMEM + F − 1` = 373 bits wide. It is
built from `ceil(373/64)` = 6 BRAMs side by side.

* Row `seg·NGROUPS + g` must hold
  `window[i] = seed[(seg·64 + g·F + i) mod DHV]` for `i = 0 … DMEM+F−2`.
* Feature slot `j` of the group uses `window[j … j+63]`. Dimension `d` of
  feature `k = g·F + j` therefore sees `seed[(d + k) mod DHV]`, which is the
  seed rotated by `k`.
* The wiring from the window to the slots is fixed. No shifter is needed.
* The ID memory needs `SEGS·NGROUPS` ≤ 512 rows.

The level hypervectors are usually built as follows. Level 0 is random.
Level `l+1` is level `l` with `DHV/(2·LEVELS)` random bits flipped. Levels 0
and 15 then end up nearly orthogonal. The testbenches build them this way.
The hardware does not depend on how they were made.

## Interface of `shearer_encoder`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of the control and valid state (memories are not reset) |
| `in_valid`, `in_ready`, `in_sample[DIV]` | in/out/in | one sample of `DIV` level indices (4 bits each); taken when both valid and ready are high |
| `lvl_wr_en`, `lvl_wr_row`, `lvl_wr_data[DMEM]` | in | load a level row, broadcast to all memory groups |
| `id_wr_en`, `id_wr_row`, `id_wr_data[DMEM+F-1]` | in | load a seed-ID window row |
| `out_valid`, `out_seg`, `out_last`, `out_enc[DMEM]` | out | dimensions `out_seg·64 …+63` of the current sample; `out_last` marks the last segment |

* Loading is allowed only while no sample is in flight. An assertion checks
  this.
* `in_sample` is copied into `feature_buffer` when the sample is accepted.
  The source can present the next sample at once.
* Features arrive already quantized. Quantization and off-chip transfer are
  not part of this RTL.

## Parameters and the four benchmark builds

| parameter | default | meaning |
|---|---|---|
| `DHV` | 2560 | hypervector length |
| `DIV` | 617 | features per sample |
| `F` | 310 | features per cycle (= tree input count) |
| `DMEM` | 64 | dimensions per cycle = BRAM width = number of trees |
| `LEVELS` | 16 | quantization levels |
| `ROWS` | 512 | BRAM depth |
| `MODE` | `ENC_MAJ` | tree kind |
| `TRUNC_K` | 3 | truncation depth for `ENC_TRUNC` |
| `TIE_BITS` | fixed 64-bit constant | per-tree tie values for the majority trees |

The defaults are the speech benchmark (ISOLET). The design is sized at
synthesis time, so each benchmark is a separate build. `tb_shearer_full`
simulates the speech build and `tb_shearer_workloads` the other three, all at
full size:

| benchmark | DIV | DHV | F | BRAMs per group | level + ID BRAMs | cycles per sample |
|---|---|---|---|---|---|---|
| speech | 617 | 2560 | 310 | 2 | 310 + 6 | 80 |
| activity | 561 | 3072 | 281 | 2 | 282 + 6 | 96 |
| face | 608 | 6144 | 203 | 3 | 306 + 5 | 288 |
| digit | 784 | 2048 | 392 | 1 | 196 + 8 | 64 |

`F` is the largest feature count that the 445 block RAMs of a Kintex-7
XC7K325T allow, spread evenly over the cycles. The cycle counts match the
published ones: 80 for speech, 288 for face and 64 for digit. At the
published 200 MHz, the speech build encodes one sample every 400 ns.

## Where this RTL goes beyond or departs from the published design

* The FPGA LUT primitives are not instantiated. The trees are written as
  behavioural SystemVerilog: majority and adder functions. How many LUTs
  they map to depends on the synthesis tool. The published LUT counts were
  not reproduced.
* One pipeline register after the first LUT layer and after every adder
  stage is an assumption. The only published detail is that the adder stages
  are pipelined.
* These are choices of this design, not published ones:
  * the ID-memory row layout (one precomputed window per segment and group);
  * the level-row layout;
  * the whole-sample input handshake;
  * the broadcast load ports;
  * zero padding;
  * the accumulator width (`ceil(log2(DIV+1))`, no overflow possible).
* Associative search (similarity with class hypervectors) is not included.
  The encoder here ends at the encoding hypervector.
* Training is also not included. Class hypervectors are trained in software
  with the same approximate encoding.

## Files

* `rtl/hd_pkg.sv`: mode enum, LUT functions, size and latency functions.
* `rtl/shearer_encoder.sv`: top level.
* `rtl/encoder_controller.sv`, `rtl/feature_buffer.sv`: schedule and input
  sample.
* `rtl/level_bram_group.sv`, `rtl/level_to_address.sv`,
  `rtl/bram_512x64.sv`: level memory.
* `rtl/id_memory.sv`, `rtl/id_address_controller.sv`: seed-ID memory.
* `rtl/bind_xor.sv`: binding with fixed rotation wiring.
* `rtl/popcount_{exact,maj,maj2,overfeed,trunc}.sv`, `rtl/adder_tree.sv`,
  `rtl/popcount_lane.sv`: trees.
* `rtl/partial_sum_buffer.sv`: accumulators.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/tb_hd_ref_pkg.sv`: reference model. It builds the item memories and
  computes expected encodings from the definitions above, with behavioural
  tree models.
* `tb/tb_shearer_env.sv`: drives and checks one encoder instance.
* `tb/tb_shearer_encoder.sv`: all five tree kinds (and K = 4) at reduced
  size. It also checks that majority ties, truncation and overfeed losses,
  back-to-back samples and masked feature slots all occur.
* `tb/tb_shearer_full.sv`: the default build, two complete samples.
* `tb/tb_shearer_workloads.sv`: the activity, face and digit builds at full
  size. It takes several minutes to compile.

## Simulating

Compile the packages first, then the RTL, then the testbench:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/hd_pkg.sv tb/tb_hd_ref_pkg.sv rtl/*.sv tb/tb_shearer_env.sv tb/tb_shearer_full.sv \
  --top-module tb_shearer_full -o sim
./obj_dir/sim
```

* A unit testbench needs only `rtl/hd_pkg.sv rtl/*.sv tb/tb_<module>.sv`.
* The full-size build takes about a minute to compile. It simulates in under
  a second.
* The testbenches use `$urandom` without a fixed seed. Add
  `+verilator+seed+N` to repeat a run.
