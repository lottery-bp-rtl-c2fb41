# PolyQec: a Lottery-BP + OSD decoder for the space-time surface code

A surface-code quantum memory measures its stabilizers for d rounds. The
decoder gets the resulting syndrome and must say which data qubits or
measurements failed. This RTL does that for the unrotated surface code of
distance d ≤ 27.

It works in two stages:

- **Local decoder.** A fast normalized min-sum belief-propagation (BP)
  decoder, extended with a *lottery*: a random, targeted sign flip that
  breaks the symmetric deadlocks in which plain BP oscillates forever.
- **Global decoder.** An OSD-0 solver (ordered-statistics decoding) for the
  frames BP cannot finish. It sorts the BP reliabilities and solves
  H·e = s over GF(2) on the most likely columns.

The code's Tanner graph is never stored. Every unit regenerates "which
variable node sits on edge b of check i" from (d, X/Z) with closed-form
index arithmetic. The same hardware therefore serves any d up to the build
size.

## The graph being decoded

For distance d, each round has:

- m = d(d−1) X checks (or as many Z checks);
- n = d² + (d−1)² data qubits.

The qubits form two sub-lattices, A (d×d) and B ((d−1)×(d−1)). The
space-time matrix H_st stacks d copies of the round matrix along the
diagonal. It adds one measurement-error column per check and round. That
column touches the check in its own round and in the next one.

Numbering:

| Item | Index |
|---|---|
| Check i (CN) | round t = i / m, position j = i % m |
| Data VN of qubit q in round t | t·n + q |
| Measurement VN of check i | d·n + i |

At d = 27 that gives 18 954 CNs and 56 889 VNs.

Every check has six edge slots ("banks"):

| Bank | X check j = r·d + c | Z check j = r·(d−1) + c |
|---|---|---|
| 0 | A(r,c) = j + tn | A(r,c) = j + j/(d−1) + tn |
| 1 | A(r+1,c) = bank0 + d | A(r,c+1) = bank0 + 1 |
| 2 | B(r,c−1) = d² + j − 1 − j/d + tn, absent if c = 0 | B(r−1,c) = d² + j − d + 1 + tn, absent if r = 0 |
| 3 | bank2 + 1, absent if c = d−1 | bank2 + (d−1), absent if r = d−1 |
| 4 | measurement VN of the same check last round, d·n + i − m, absent in round 0 | (same) |
| 5 | measurement VN of this round, d·n + i | (same) |

Every VN has at most two checks. Banks 0, 2 and 5 carry a VN's first edge
("slot 0"), and banks 1, 3 and 4 its second ("slot 1"). `lbp_pkg::cn_vn()`
implements this table. The units that use it are the converters, the sign
flip and the VN selector.

## Data layouts and the message memories

The messages live in two layouts.

**CN layout.** Used by the CN memory (C2V messages β) and the VN memory
(V2C messages α), both `msg_mem`.

- There are six banks. Row r holds checks r·ARRAY … r·ARRAY+ARRAY−1, and
  bank b holds each check's edge b.
- One read gives the CNU array a full row: ARRAY checks × 6 edges.
- With ARRAY = 256 and d = 27 there are R = 75 rows.

**VN layout.** Used by the C2V converter, the V2C converter and the LLR
register.

- Each VN has two slots, and 2·ARRAY VNs make one group.
- There are G = 112 groups at d = 27.
- The VNU array reads one group per cycle, so the VNU is twice as wide as
  the CNU. Each VN has only two edges where a check has six.

Moving between the layouts:

- **`c2v_conv` (CN → VN).** Scatters a CN row into its VN-layout buffers.
  Each (check, bank) goes to (cn_vn, slot).
- **`v2c_conv` (VN → CN).** Gathers one CN row. It fetches each edge's slot
  from the VN-layout α buffer and hard-decision buffer, and produces a mask
  of edges that exist.

Messages are 8-bit two's complement with 4 fraction bits (Int3.4). They
saturate symmetrically to ±127.

## One BP iteration (`lbp_decoder`)

Here R is the number of CN rows and G the number of VN groups at the
frame's d.

**Once per decode:**

- CLR sweeps the converters.
- INIT sets every α = μ. It runs the VNU with β = 0 and gathers into the VN
  memory.

**Every iteration runs these passes:**

1. **V2C processing (R+1 cycles).**
   - Read a VN-memory row.
   - Apply the lottery sign flip (`sign_flip`).
   - Run the normalized min-sum CNU (`cnu_array`): for each edge, the
     smallest |α| of the other edges, scaled by 1 − 2^−(i+1). Its sign is
     the product of the other signs and the measured syndrome bit.
   - Write the CN memory.
2. **C2V processing (R+1 cycles).** Read the CN memory and scatter it into
   VN layout.
3. **VNU (G cycles).**
   - λ = μ + β0 + β1 goes into the LLR register.
   - α0 = λ − β0 and α1 = λ − β1 go to the V2C converter buffers.
   - ê = (λ ≤ 0).
4. **Lottery.** Runs only from iteration 6 on; see below.
5. **Gather (R+1 cycles).**
   - Rebuild the VN memory in CN layout.
   - At the same time, XOR the gathered hard decisions per check
     (`synd_est`).
   - Compare with the measured syndrome (`synd_cmp`).
   - Store the unmatch bits in the CN selector and the 1-bit C2V converter.
   - Count the mismatches (`early_term`).
6. **Check (2 cycles).** No mismatch means success. Otherwise iteration
   `max_iter` ends the run as a failure, and the top hands the frame to OSD.

An iteration without the lottery therefore takes 3R + G + 5 cycles: 342
cycles at d = 27, and 9 cycles at d = 3.

**Why the passes run in sequence.** The hardware the design follows overlaps
these passes in two pipelines: V2C and C2V processing stream
simultaneously. Here they run one after another. This keeps the control
simple and every intermediate state observable. The price is about 2× the
cycles per iteration. The arithmetic and the results per iteration are the
same.

## The lottery

Min-sum BP on the surface code often stalls on degenerate patterns. Two
equal-weight corrections look exactly alike to every node, so the messages
stay symmetric and never converge. The lottery breaks the tie on purpose.
After the VNU pass of iteration i ≥ 6 it does the following:

1. **Pick an unsatisfied check at random.** `cn_selector` holds the unmatch
   bits of iteration i−1 and their count N. It takes r ∈ [0,1) from the
   `rand_r` port (16-bit fraction) and picks the ⌊r·N⌋-th unsatisfied check
   in index order, scanning one row per cycle.
2. **Pick the VN to flip.** `vn_selector` regenerates the six neighbours of
   that check. For each neighbour, `c2v_1b_conv` reports how many of its
   checks are unsatisfied. The VN with the most wins; ties go to the
   smallest |λ|, then to the lowest bank.
3. **Flip it.** Flip that VN's belief. The memory holds α = λ − β, not λ, so
   the next V2C pass rewrites every message of that VN as α − 2λ*, which
   equals −λ* − β. This is done on the fly by `sign_flip`.

`n_flips` counts the iterations in which a flip was applied. The random
source is outside the design: `rand_r` is a top-level input.

## OSD-0 (`bitonic_sorter`, `osd_solver`)

When BP gives up, the top runs three steps.

**Sort.** It streams the final LLRs into `bitonic_sorter`.

- The LLRs and their indices are padded to a power of two P. Padding
  always sorts last.
- They are sorted ascending, so the most likely error comes first.
- The sorter uses ARRAY compare-and-swap units per cycle over
  log2P·(log2P+1)/2 stages.

**Eliminate.** `osd_solver` then walks the columns in sorted order.

- It keeps U (a working copy of H), L and a permuted syndrome s′, all stored
  densely in ARRAY-bit chunks.
- For each column it looks for a pivot among the rows not yet final. If it
  finds one, it:
  - swaps that row up;
  - XORs it into every lower row with a one in that column;
  - records each such XOR in L.
- The pivot row is then final. Forward substitution y = L⁻¹s′ for that row
  is done immediately, so LU and forward substitution run as one pass.
- It stops at full rank or when the columns run out.

**Solve.** Backward substitution solves U·e_S = y on the pivot columns. All
other columns stay 0, so the result is the unique OSD-0 solution for that
column order.

`H` must be loaded into the solver through `h_wr_*` (rows = checks, columns
= VNs in the numbering above). The solver does not regenerate H.

## Top level (`polyqec`)

Load the frame:

- the syndrome with `s_wr_*`: 256 checks per row, fanned out to both
  decoders;
- H with `h_wr_*`, needed only if OSD may be used;
- `code_d`, `is_z`, `mu` (prior LLR, Int3.4) and `max_iter`.

Then pulse `start`. BP runs first. If it converges, `converged` is set;
otherwise the top runs the sort and OSD and sets `osd_used`. `done` pulses
at the end, and the error vector can then be read 256 bits at a time
through `err_rd_chunk`/`err_rd_data`, in VN order. Also reported:
`iterations`, `n_flips` and `osd_rank`.

Default parameters are the full build: `D_MAX = 27`, `ARRAY = 256`,
`LOTTERY_SKIP = 6`, `IW = 9` and a 65 536-entry sorter. Smaller distances
run on the same build through `code_d`.

## How far it can be trusted

Each module has a self-checking testbench in `tb/`. The reference values
are computed independently of the RTL. The converters, sign flip, VN
selector, OSD and the end-to-end tests rebuild the check matrix from the
lattice geometry itself, not from the bank table, and check that X and Z
checks commute.

| What | Checked |
|---|---|
| Message arithmetic | VNU and CNU against min-sum definitions on random data |
| Index mapping | every converter, at d = 3 and 5, X and Z, against geometry |
| Lottery | CN choice ⌊r·N⌋, VN choice rule, α − 2λ* rewrite, no flip before iteration 6 |
| BP | single errors converge; converged results satisfy H·ê = s; 3R+G+5 cycles per iteration |
| Sorter | order, index permutation, cycle count |
| OSD | H·e = s, support inside the reference basis, rank (including a rank-deficient H) |
| Top (full build) | BP success, immediate exit on a zero syndrome, BP give-up → OSD, lottery flips, X and Z, d = 3 and 5; every answer satisfies H·e = s |

A single error on a degree-1 VN in the last round (for example a boundary
data qubit) has an equal-weight twin: the last-round measurement error of
the same check. Min-sum cannot separate the two, and neither can the
lottery, whose flips leave the symmetric posterior positive. BP then gives
up and OSD answers.

The testbenches do not measure logical error rates. They check that the
RTL computes what the algorithm says.

## Where this design departs from the hardware it follows

- **Schedule.** The passes of an iteration are sequential (see above); the
  original overlaps them.
- **Sorter.** The sorter uses one memory with ARRAY compare-and-swap pairs
  per cycle. The original's two-bank LLR/index memories and its write-back
  swap, which avoid bank conflicts, are not modelled. Timing therefore
  differs, but the result does not.
- **OSD input.** OSD takes H from a write port rather than generating it.
  The dense H/L/U storage is the same (about 1.1 Gbit each for H and U at
  d = 27).
- **VNU width.** The VNU array is 2 × ARRAY wide. A block diagram of the
  original labels it 3 × ARRAY while its text says twice; the text was
  followed.
- **Round-0 measurement edge.** Bank 4 does not exist in round 0. The
  original's published non-zero counts imply an extra edge there, but its
  matrix definition does not; the definition was followed.
- **Row filling.** Rows of the CN layout hold consecutive checks:
  0…ARRAY−1 in row 0.
- **Scaling.** The CNU scaling truncates: m − (m >> (i+1)).
- **Not built.** The SRAM macros (written as arrays) and the random number
  generator (a port).
- **Supported codes.** Only the unrotated surface code is supported. BB
  codes and circuit-level detector error models would need a stored sparse
  graph, which this design does not have.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/lbp_pkg.sv \
    tb/tb_polyqec.sv --top-module tb_polyqec -Mdir obj && ./obj/Vtb_polyqec
```

`tb_polyqec` uses the full default build: building takes about 30 s, and
the simulation needs about 310 MB and a few seconds. The other testbenches
set small parameters, such as D_MAX = 5 and ARRAY = 8, so that boundary
rows and several groups are exercised.
