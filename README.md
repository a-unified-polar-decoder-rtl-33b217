# Serial adaptive SC / SCL-8 polar decoder

This is a polar decoder for devices where area and energy matter more than throughput.
Successive-cancellation (SC) decoding is recursive: a node of the decoding tree computes its
children's LLRs, waits for their hard decisions, and combines them. The decoder does not build
one processing unit per tree node, and it does not build one SC decoder per list path either.
A single small datapath runs one *sub-process* (SP) at a time. An SP is the piece of the tree
traversal that leads from one decision to the next. A finite-state machine calls SPs until the
whole tree has been walked.

List decoding uses the same datapath: the paths of the list are processed **one after another**.
The PEs, the bit decision and the sorter are shared by all paths, so no crossbar between
paths is needed. Surviving paths are never copied. Only small per-stage storage indices are
switched.

On top of this sits an *adaptive* mode. Every packet is first decoded by plain SC, which is
cheap. Only if the CRC fails is the packet decoded again with a list of 8 paths, whose best
8 paths are CRC-checked (SCL8T8). At high SNR almost every packet stops after the SC pass.

Default configuration: code length N = 256, 6-bit LLRs, list size L = 8, T = 8 CRC checks,
P = 8 processing elements, 11-bit CRC, nodes up to stage 4 decided in one step (`FAST`).

## Decoding tree and notation

The N = 2^n leaves u_0 … u_{N-1} sit at stage 0 and the root at stage n. A node v at stage s
owns 2^s LLRs α_v. Its children are computed by the PEs:

* left child: α_l[i] = sign(α_v[i]) · sign(α_v[i+h]) · min(|α_v[i]|, |α_v[i+h]|) (f−, min-sum)
* right child: α_r[i] = (−1)^{β_l[i]} · α_v[i] + α_v[i+h] (f+), where h = 2^(s−1)

Here β_l are the partial sums returned by the left child. When both children have returned,
the node's partial sums are β_v = (β_l ⊕ β_r, β_r). Encoding uses the same butterfly,
x = u·F^{⊗n}, with (a, b) → (a⊕b, b), and u_0 is the first leaf.

Each leaf is one of three kinds:

* **frozen**: always 0.
* **information**: in list mode, the path splits into two.
* **good**: an information bit reliable enough to be decided without splitting.

The leaf kinds are a configuration input (`leaf_type`). The information bits, in index
order, are the message followed by its 11-bit CRC (generator x^11+x^10+x^9+x^5+1).

Some subtrees are decided as a whole, in one SP, when their root is at stage 2 to `FAST`:

* *rate-0*: all leaves frozen;
* *rate-1*: all leaves can be decided without splitting. That means all non-frozen in SC
  mode, and all good in list mode;
* *repetition* (SC mode only): all leaves frozen but the last;
* *single parity check* (SC mode only): only the first leaf frozen.

The node's size 2^s may not be more than 2P, so that its LLRs can be read in one cycle.

## One sub-process

An SP ends at a single leaf, or at one of the nodes above, at stage sd. Where nodes of
several stages qualify, the largest is taken. Below, a single leaf is the case sd = 0.

The SP of leaf i starts where the previous one turned around. For i = 0 that is the root
(stage n). Otherwise it is stage t = 1 + the number of trailing zeros of i; the node there
already holds its LLRs, and leaf i lies in its right subtree.

1. **Edge traversal.** From stage t down to stage sd, one child is computed per stage: f+
   for the first step (when i > 0), f− below it. Stage step s → s−1 takes
   ⌈2^(s−1)/P⌉ cycles, with P LLRs per cycle.
2. **Bit decision.**
   * Node, in one cycle from its 2^sd LLRs α. The leaf bits are u = β·F, since F is its
     own inverse. A node counts as an SSP in list mode.
     * Rate-0: β = 0. In list mode, |α| of every negative α is added to the path metric.
     * Rate-1: the hard decisions β = (α < 0); the metric is kept.
     * Repetition: every β is the sign of Σα.
     * Single parity check: the hard decisions, and if their parity is odd the one with
       the smallest |α| is flipped (the lowest index on ties).
   * SC mode: the SC bit decision (0 for frozen leaves, sign of the LLR otherwise).
   * List mode, frozen or good leaf: a *simplified SP* (SSP). Frozen leaves add |LLR| to
     the path metric when the LLR is negative; good leaves keep the metric.
   * List mode, information leaf: a *full SP* (FSP). Each path proposes two candidates:
     the hard decision with its metric unchanged, and the other bit with |LLR| added.
3. **Sorting and index switching (FSP only).** The candidates go to the serial sorter, one
   path per cycle. After the last path the sorter holds the best L, best first. Survivor k
   takes slot k. It inherits its metric, its parent's CRC register and its parent's storage
   indices.
4. **Partial sums.** The decided bit, or the node's β, is combined upward with the stored
   left-sibling sums, one stage per cycle, until a left child is complete; that child's
   sums are stored. Information bits also enter the path's CRC register, up to 16 bits in
   one cycle for a node.

In an SSP each path runs steps 1, 2 and 4 before the next path starts. In an FSP every path
runs steps 1 and 2, then step 3 runs once, then every path runs step 4. After the last leaf,
up to T paths are CRC-checked, best metric first, one per cycle. The first path that passes
is chosen. If none passes, the best path is output with `crc_pass = 0`. In list mode the
decoded word is then read back from the decision memory, one leaf per cycle. In SC mode
there is only one path, so its decisions are written straight to the output.

## Why paths never have to be copied

This is the least obvious part of the design; it is in `path_manager`.

Every path slot l owns one region of the LLR storage (`llr_mem`) and one of the partial-sum
storage (`psum_mem`). For every stage s, the path manager also keeps two indices:

* `aptr[l][s]` names the slot whose region holds path l's LLRs of stage s;
* `bptr[l][s]` does the same for partial sums.

When a path writes a stage, it always writes its own region and sets the index to itself.
When survivors are applied, slot k gets a copy of its parent's index tables. That is at most
L × n × 3 bits per table, moved in one cycle.

Why this is safe: all paths of the list are always at the same leaf. In any SP the stages a
path writes are stages that every path rewrites in that same SP before reading them. The
stages it reads through a shared index are above the turning stage, and no path writes those
in this SP. So a region is never overwritten while another path still needs it.

The decoded bits are handled the same way. `trace_mem` stores, for each leaf and slot, the
decided bit and the parent slot. The winner's word is rebuilt at the end by following
parents from leaf N−1 back to leaf 0.

## Adaptive control

`adaptive_ctrl` starts the core in SC mode (one path). A CRC pass ends the decode. A CRC
fail starts the core again on the same stored channel LLRs in list mode. There is no
1 → 2 → 4 → 8 ladder: the list size jumps from 1 straight to L. Two more modes exist for
test and for other configurations: `MODE_SC` (SC only) and `MODE_SCL` (list only).

## Blocks and files

| file | block |
|---|---|
| `rtl/polar_pkg.sv` | sizes, `leaf_t`, `dec_mode_t`, candidate struct `cand_t`, CRC step, saturating metric add |
| `rtl/pe_array.sv` | P PEs, f− / f+ with saturation to ±31 |
| `rtl/channel_llr_mem.sv` | channel LLRs (stage n) |
| `rtl/llr_mem.sv` | intermediate LLRs, one region per path, stage s at addresses 2^s … 2^(s+1)−1 |
| `rtl/psum_mem.sv` | partial sums of the last left child of each stage, per path |
| `rtl/bit_decision_sc.sv` | SC leaf decision |
| `rtl/bit_decision_scl.sv` | list leaf decision and metric update |
| `rtl/path_sorter.sv` | serial insertion sorter with its temporary list |
| `rtl/path_manager.sv` | path metrics and per-stage storage indices |
| `rtl/crc_unit.sv` | one CRC register per path |
| `rtl/trace_mem.sv` | decided bits and parents, for the final traceback |
| `rtl/polar_core.sv` | the SP state machine, the node decisions and the datapath wiring |
| `rtl/adaptive_ctrl.sv` | SC first, SCL on CRC failure |
| `rtl/polar_decoder_top.sv` | top level |

## Interface and timing (`polar_decoder_top`)

1. Write the N channel LLRs through `llr_we` / `llr_addr` / `llr_data`, one per cycle. They
   are two's complement and positive means bit 0. The value −32 is stored as −31.
2. Hold `leaf_type` and `mode` stable, and pulse `start` for one cycle.
3. `done` pulses when `u_hat` holds the decoded word, with frozen positions at 0.
   * `crc_pass` says whether that word passed its CRC.
   * `used_scl` says whether the list pass ran.
4. `ev_ssp`, `ev_fsp` and `ev_check` pulse once per SSP, per FSP and per CRC check.
5. The reset `rst_n` is asynchronous and active low.

Measured latency at the default size, from `start` to `done`:

| mode | cycles |
|---|---|
| SC | 266 |
| SCL8T8 alone | about 7500 |
| adaptive, SC failed and SCL ran | about 7770 |

In list mode 256 of these cycles are the traceback. The latency does not depend on the
data, apart from the CRC check, which takes 1 to T+1 cycles.

## Where this RTL departs from the design it follows

* **Fewer multi-bit decisions.** The original design decides whole subtrees at stages 2
  to 4 in one step:
  * SC: rate-1, SPC, REP, dual-SPC, dual-REP, PCR and RPC nodes;
  * list mode: flip-syndrome decisions at stage 2, and all-good or all-frozen nodes.

  Here the rate-1, repetition and parity nodes (SC) and the all-frozen and all-good
  nodes (list mode) are built, with rate-0 in both modes. The dual and combined SC node
  types and the flip-syndrome decision are not. Any other subtree is decoded leaf by leaf.
  SC takes 266 cycles instead of about 170. SCL8T8 takes about 7500 instead of about 1260,
  mostly because every information leaf is a full SP of its own.
* **One set of 8 PEs.** The original design chains a second set of 4 PEs behind the 8 and
  so does not store the LLRs of stages 3, 5 and 7. Here all stages are stored.
* **Register arrays, not SRAM macros.** The storages are arrays with asynchronous read. An
  SRAM with registered read would need one more pipeline stage in the edge traversal.
* **Choices of this design.** These were not given and were chosen here:
  * the min-sum approximation;
  * the 12-bit saturating path metric;
  * the CRC polynomial;
  * the tie rules;
  * the traceback memory;
  * the index-per-stage scheme;
  * the exact node rules, which follow the usual fast-SSC style;
  * the cycle schedule.
* **No Fano decoder.** The same platform also hosts a Fano (sequential) decoder, with a
  candidate stack, retrace-data storage and path recovery. It is not included.

## Verification

Every block has a self-checking testbench in `tb/`. `tb/polar_ref_pkg.sv` is a software
model used by the larger tests. It builds codes: frozen set from the polarisation-weight
order, message plus CRC, encoding, BPSK over AWGN with noise variance 10^(−Es/N0/10), and
LLRs quantised in steps of 0.5. It also decodes them. Its decoder keeps a full copy of every
path, re-encodes decided bits for the partial sums, and copies whole paths after sorting,
so it shares none of the hardware's index tricks. It does use the same quantised arithmetic,
node rules and tie rules, so the words must match bit for bit.

* `tb_polar_decoder_top`: the default size, N = 256, K = 128 including the CRC, 16 good
  bits.
  * Packets run in SC, SCL and adaptive mode at Es/N0 from 0.5 to 3 dB.
  * The word, `crc_pass` and `used_scl` must match the reference.
  * The SC latency must match the cycle schedule above.
  * Each of these must happen at least once: SSPs, FSPs, an adaptive switch to SCL, an SC
    success, several CRC checks in one decode, and a CRC failure after all T checks.
  * The code must contain every node kind the decoder handles.
* `tb_workload_n256`: the rate-1/2 evaluation workload at the default size. It runs 200
  packets at each Es/N0 from 0.5 to 3 dB in adaptive mode, bit-exact against the
  reference. It reports the results below. It checks that adaptive decoding never has
  more block errors than SC, and that the average latency drops as most packets stop
  after SC.
* `tb_polar_core`: the core at N = 64, L = 4, T = 2, P = 4, with nodes up to stage 3,
  against the reference. It also counts SSPs, FSPs and CRC checks per decode, and checks
  that every node kind occurs.

Measured with `tb_workload_n256` (200 packets per point; the SCL8T8-alone column is the
reference model's):

| Es/N0 (dB) | BLER SC | BLER SCL8T8 | BLER adaptive | packets ending after SC | average cycles |
|---|---|---|---|---|---|
| 0.5 | 0.730 | 0.365 | 0.365 | 54 | 5746 |
| 1.0 | 0.590 | 0.170 | 0.170 | 82 | 4694 |
| 1.5 | 0.275 | 0.025 | 0.025 | 145 | 2329 |
| 2.0 | 0.120 | 0.015 | 0.015 | 176 | 1166 |
| 2.5 | 0.065 | 0 | 0 | 187 | 753 |
| 3.0 | 0.010 | 0 | 0 | 198 | 341 |

The adaptive decoder matches SCL8T8 at every point and costs little more than SC at high
SNR. This is the behaviour the design is meant to have.
* Unit testbenches for the PEs, storages, decisions, sorter (with many ties), path manager,
  CRC unit and controller. Each compares against a small model.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/polar_pkg.sv tb/polar_ref_pkg.sv \
    tb/tb_polar_decoder_top.sv --top-module tb_polar_decoder_top -o sim
./obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.
