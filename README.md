# LIMO macro: an SRAM compute-in-memory annealer for small travelling-salesman problems

LIMO is a mixed-signal macro built around an 80×80 8T-SRAM crossbar. It has two uses:

- **Annealing mode.** It holds five independent travelling-salesman problems (TSPs) of up to 16 cities. It improves their tours by annealed greedy insertion: each tour is built city by city, left to right. At every position the nearest unvisited city is chosen, except that a random, distance-weighted mask sometimes hides some of the candidates first. The mask's strength decays pass after pass. The shortest tour seen so far is kept for each problem.
- **VMM mode.** The same crossbar is a weight-stationary array of ternary weights (−1, 0, +1). One read computes 40 dot products of an 80-element binary input vector and returns only their signs (1-bit partial sums).

Larger TSPs are meant to be broken into clusters of at most 16 cities, each solved as an open tour between fixed entry and exit cities, and stitched together by a host. Many macros would sit in a tiled spatial architecture. Neither the host software nor the spatial architecture is part of this RTL. This repository is the macro itself.

Nothing is scaled down. Every parameter default is the size of the described macro: 5 problems × 16 cities, 4-bit distances, 80×80 array, 16-bit global random word. The end-to-end testbench runs at exactly these defaults.

## 1. How a tour is built (the insertion algorithm)

For one problem with start city `s`, a *pass* builds a tour τ = [s, c2, c3, …]:

```
for position k = 2 .. last:
    prev = τ[k-1]
    d_j  = distance(prev, j)         for every city j, 4 bits, 0..15
    cand = unvisited cities
    if g_bit (drawn once per pass, P = r_ref / 2^16):
        keep city j only if r_j > d_j   (r_j a fresh uniform 4-bit word)
        -> a far city survives with probability (15 - d_j)/16
        if nothing survives, keep all candidates
    τ[k] = the surviving candidate with the smallest d_j (lowest index on ties)
close the tour (back to s, or to the fixed exit city in open mode)
if the tour is strictly shorter than the best: store it as the new best
r_ref -= slope(pass)
```

With `g_bit = 0` a pass is pure nearest-neighbour construction. With `g_bit = 1` the local gates randomly remove candidates, and near cities are more likely to be kept. The nearest survivor then wins, so the pass explores tours that differ from the greedy one. Because `r_ref` decays, such passes become rarer. Annealing stops when `r_ref` is smaller than the next decrement, or after a programmed number of passes.

All five problems advance in lock-step: at each position the macro serves problem 0, 1, …, 4 in turn. They share the pass's global bit and the position's local random words.

## 2. Crossbar organisation

Problem `p` owns rows `16p … 16p+15`. Row `16p + k` holds two things:

| columns | content |
|---|---|
| `16b + j`, b = 0..3 | bit `3-b` of the distance from city `k` to city `j` (four 16-column bit planes, MSB plane first) |
| `64 + j` | one-hot spin of tour position `k+1`: bit `j` set when city `j` is at that position |

So one row read returns the whole distance row of one city (64 sense-amplifier bits) together with one tour entry (16 bits). The *shift-and-add* unit is only a re-wiring: it gathers `{col j, col 16+j, col 32+j, col 48+j}` into the 4-bit `d_j`.

Row 0 of each problem must hold the start city. In open mode, row `index_count−1` must hold the exit city. The remaining spin rows are overwritten during annealing, so what is programmed into them does not matter.

In VMM mode, column pair `(2k, 2k+1)` holds ternary weight `k` of each row: `(0,1)` is +1, `(1,0)` is −1 and `(0,0)` is 0. Both read word-lines of every row are driven with the input bit. The two columns of a pair act as a current sink and a current source, and their source lines are joined. Column `2k+1` therefore carries the net signed current, and its sense amplifier outputs `vmm_out[k] = (Σ_r x_r·w_rk > 0)`. In the model, currents are exact integers counted in single-cell currents (`cim_array`). Device mismatch and bit-line saturation are not modelled.

## 3. The control sequence and its timing

The controller (`limo_controller`) is one FSM. Each state does one thing to the array and lasts a fixed number of clocks:

| state | clocks | work |
|---|---|---|
| IDLE | – | waits for `start`; samples the configuration |
| PRG_ROW | 80 | writes one row per clock from `prg_data`; latches each problem's start/exit city |
| GEN | 1 | once per pass: draws the global word, `g_bit = [r_g < r_ref]`, lowers `r_ref`, clears candidate masks |
| LEN | 6 | only if `g_bit`: generates the sixteen 4-bit local words (continues 2 clocks into SS_RD) |
| SS_RD | 2 | reads the spin row of the previous position → previous city |
| W_RD | 1 | reads that city's distance row → `d_j`, gates, comparator tree |
| STO_SOLN | 2 | clock 1: writes the winner's spin into the current position's row, clears it from the candidate mask, adds `d` to the running sum. Clock 2: writes it to the scratch SRAM and reads the winner's own row, so the closing edge is available at the last position |
| LAST_CITY | 1 | at the last position only, per problem: adds the closing edge, compares with the best, toggles parity on improvement, resets sum and mask |
| AI_RD | 1 | VMM: input vector on the read word-lines; result valid the next clock |

The loops nest as pass → position → problem. One position takes 2+1+2 = 5 clocks per problem, so 25 clocks for all five problems, plus 6 for LEN when `g_bit` is set. A whole pass over `P` positions (P = N−1 closed, N−2 open) with `Q` problems takes

```
1 (GEN) + P·(5·Q + 6·g_bit) + Q (LAST_CITY)       clocks
```

For example, 381 clocks for five 16-city closed tours with `g_bit = 0`. This works out to about five clocks per insertion per problem. The testbenches check all of these lengths clock by clock.

The 4-bit local words take 8 clocks because each random bit costs two clocks: a read clock and a write clock (section 4). The schedule hides two of those 8 clocks in SS_RD, which leaves LEN 6 clocks long.

## 4. Random bits

**Cell.** Each random source is an STT-MTJ (magnetic tunnel junction) sensed by a differential sense amplifier, with a write driver that can push current either way. `stt_trng_cell` models it in two phases:

- **Read.** RD latches the junction's state onto OUT.
- **Write.** WRITE pushes the junction toward the *opposite* of what was just read, with 50% switching probability.

Both transitions are random, so no deterministic reset write is needed between bits. This is a behavioural model: the coin flip comes from a per-cell pseudo-random stream seeded from `$urandom`, and it does not synthesize.

**Bank.** `trng_bank` XORs two cells per unit, which cancels device bias, and alternates read and write clocks. The macro has two banks:

- 16 units read in parallel give the global word `r_g`.
- 16 units shifted 4 times give the local words `r_i`.

**Schedule.** `anneal_schedule` loads a 16-bit word `r_ref` (the initial stochasticity `p0·2^16`) at the end of programming. At every GEN it lowers `r_ref` by a slope that depends on the pass number:

| table | slope 10 | 8 | 7 | 5 | 4 | 3 | 2 | 1 |
|---|---|---|---|---|---|---|---|---|
| β = 0.9995 (`sched_sel=0`) | passes < 267 | < 575 | < 940 | < 1386 | < 1961 | < 2772 | < 4158 | after |
| β = 0.995 (`sched_sel=1`) | < 27 | < 57 | < 94 | < 138 | < 196 | < 277 | after | – |

These piecewise-linear tables follow `r_ref·β^pass`. They start at slope 10 = r_ref·(1−β), which fits a starting word near 20000 for β = 0.9995 and near 2000 for β = 0.995. Other starting words still work; the decay is then only roughly geometric.

## 5. Keeping the best tour

- Each problem has a running sum, a best-sum register (reset to all ones) and a parity bit.
- The 6T scratch SRAM (`scratch_sram`) has two 16-row sub-arrays per problem.
- The tour being built is always written into sub-array `parity[p]`. When a finished tour is strictly shorter than the best, `best_sum[p]` takes its length and `parity[p]` toggles. The just-written sub-array then becomes the protected best copy, and the next pass writes into the other one.
- Outside the macro, the best tour of problem `p` is read from sub-array `~parity[p]` through `sc_re / sc_rprob / sc_rrow`, with one clock of latency. Row `k−1` holds the one-hot city at tour position `k`.

## 6. Using the macro

1. Hold the configuration on the inputs and pulse `start` for one clock:
   - `mode_ai`
   - `open_loop`
   - `index_count` (2..16 cities)
   - `pass_count` (0 = run until the schedule ends)
   - `problem_count` (1..5; 0 = all five): only problems 0..Q−1 are annealed
   - `sched_sel`
   - `r_ref_init`
2. For the next 80 clocks the macro shows a row number on `prg_row`. Drive `prg_data` with that row's contents in the same clock; the macro writes it at the end of that clock.
3. Then one of two things happens:
   - **VMM mode:** `vmm_in` must be valid in the clock after the last row. `vmm_out` and `vmm_valid` appear one clock later.
   - **Annealing mode:** the macro runs until `done` pulses. `best_sum[p]` and the scratch read port then hold the results.

Each VMM includes a fresh programming phase, as in the state table.

`busy` is high from `start` to `done`, and `state_o` shows the FSM state. Reset is asynchronous and active low. The crossbar and scratch arrays are not reset, like the SRAMs they stand for.

Tour lengths are 10-bit: 16 edges × 15 fits. Cities are numbered 0..`index_count−1`; unused columns and rows above `index_count` are ignored.

## 7. Where this RTL interprets or departs from the source description

- **Direction of the local gate.** The prose states the local gate as `s_i = [r_i < d_i]`. The algorithm and the gating figure instead want the keep-probability to *fall* with distance (`P = 1 − d/d_max`). The RTL keeps city `i` when `r_i > d_i`, following the algorithm.
- **Selection among survivors.** The algorithm samples a survivor in proportion to its probability. The hardware description takes the nearest survivor through a comparator tree. The RTL does the latter.
- **When the global bit is drawn.** The algorithm draws the global bit at every position. The state table draws it once per pass in GEN and reuses it for every position and problem. The RTL follows the state table.
- **Best-tour update.** One description updates the best when the new sum "exceeds" it. The algorithm updates on a strictly shorter tour. The RTL uses strictly shorter.
- **When `r_ref` decays.** It decays at GEN, the start of a pass. Another passage says it decays at the end of the pass; the difference is one pass of offset.
- **Own choices, not given by the source:**
  - If the global bit is set and no candidate survives the local gates, all candidates are kept (greedy fallback).
  - Ties go to the lowest city index.
  - The running sum adds the winning distance straight from the comparator tree. The source senses each new edge by reading the chosen city's row; here that read, in the second STO_SOLN clock, is used only for the closing edge. The two agree for symmetric distance matrices.
  - A zero `pass_count` or `problem_count` meaning "no limit" or "all five".
  - The row layout of section 2.
  - The exact meaning of each clock inside two-clock states.
- **Power-saving mechanisms.** Operand isolation is written out: the bit-line and word-line drivers are ANDed with their state's enable. Clock-gating cells are not; the register enables are where a synthesis tool inserts them.

## 8. Not included

- The tiled spatial architecture for neural-network inference, and the on-chip network around many macros.
- The host-side PCA clustering, entry/exit binding, stitching and 2-opt refinement used for large TSPs.
- Any multi-bit VMM accumulation. The macro returns 1-bit partial sums; 3-bit weights and activations are handled by bit-slicing and tiling outside it.

As a consequence:

- A single macro solves random TSPs of up to 16 cities (the source's 9..24-city benchmarks fit only up to 16).
- Large benchmark instances (up to 85,900 cities) are reachable only through the external divide-and-conquer flow: at least 85900/16 cluster solves, five per macro run. A one-level version of that flow is simulated in section 9.
- Whole CNNs (a ResNet-20 for CIFAR-10, a ResNet-based face detector) need the missing tiling fabric. A single layer tile runs on one macro (see section 9).

## 9. Files

| file | contents |
|---|---|
| `rtl/limo_pkg.sv` | sizes, state encoding, state lengths, slope tables |
| `rtl/limo_macro.sv` | top level |
| `rtl/limo_controller.sv` | FSM, loops, candidate masks, sums, best/parity |
| `rtl/cim_array.sv` | 80×80 crossbar: writes, row reads, accumulation, ternary VMM |
| `rtl/stage_drivers.sv` | per-state word-line decoders and bit-line drivers |
| `rtl/sense_amp_array.sv` | one sense amplifier per column |
| `rtl/shift_add_gating.sv` | distance realignment, local gates, candidate AND, fallback |
| `rtl/comparator_tree.sv` | minimum of the surviving distances |
| `rtl/scratch_sram.sv` | best-tour storage, two sub-arrays per problem |
| `rtl/anneal_schedule.sv` | reference word, slope tables, global gate, end of schedule |
| `rtl/trng_bank.sv` | XOR-paired TRNG units, read/write sequencing, shift registers |
| `rtl/stt_trng_cell.sv` | behavioural STT-MTJ random-bit cell (simulation only) |

Every module has a self-checking testbench `tb/tb_<module>.sv`, which prints `TB_RESULT checks=… failures=…`.

`tb_limo_macro` runs the full-size macro end to end:
- five annealing runs: greedy, long stochastic, open-loop, one ended by exhaustion, and one with only two problems;
- eight VMMs;
- a reference model that predicts every city choice from the random words the macro actually drew;
- checks on every pass length, the best sums and the tours read back from the scratch SRAM;
- a count of each mechanism that must occur: greedy and stochastic passes, local-gate filtering, fallback, best update and no improvement, exhaustion, pass limit, open and closed closing edge, fewer problems than slots, VMM.

`tb_random_tsp_workload` runs the random-TSP benchmark on the full-size macro:
- cities uniform in the unit square, N = 9, 12 and 16, ten instances per size;
- distances quantised to 4 bits relative to each instance's longest edge;
- the 0.995 table from a word of 2000, which runs about 545 passes;
- results compared with the exact optimum (Held-Karp) and with nearest-neighbour.

Mean best/optimum ratios come out near 1.02 (N = 9), 1.07 (N = 12) and 1.13 (N = 16). Longer schedules (the 0.9995 table) trade run time for quality.

`tb_clustered_tsp_workload` shows how the macro serves a TSP larger than 16 cities, with the testbench acting as the host:
- 80 random cities are split by recursive median bisection along the principal axis into 8 clusters of 10;
- the cluster order is a closed tour over the centroids, solved on the macro;
- consecutive clusters are joined at their closest pair of cities, which fixes each cluster's entry and exit;
- each cluster is solved on the macro as an open problem from entry to exit, five per run;
- the paths are stitched into one tour, with no 2-opt refinement.

The stitched tours come out at about the length of a nearest-neighbour tour (0.92 to 1.08 of it). Competitive quality on large instances depends on the host-side refinement, which is not part of this RTL.

`tb_resnet20_tile_workload` runs one convolution tile of a quantised ResNet-20 through the VMM mode:
- a stage-1 3×3 layer with 16 input and 16 output channels, evaluated on a 6×6 patch (4×4 outputs);
- the 144 inputs of an output pixel are split into two row tiles of 72 rows;
- each signed 3-bit weight `w` in [−3, 3] becomes two ternary slices, `w = 2·t1 + t0`, in column pairs `2c` and `2c+1`;
- each 3-bit activation is applied as three bit planes, one VMM per plane;
- in total 96 VMMs; every output bit is checked against the sign of the exact partial sum;
- the partial sums are recombined with weights `2^(plane+slice)` and unit scale factors.

On random data the recombined output correlates with the exact convolution at about 0.9. The test requires a correlation above 0.6. This tiling is one possible mapping, not the only one.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Irtl -y rtl rtl/limo_pkg.sv tb/tb_limo_macro.sv --top-module tb_limo_macro
obj_dir/Vtb_limo_macro
```

Replace `tb_limo_macro` with any other testbench name. The full-size end-to-end run finishes in about a second.

Synthesis: every module that does not contain the behavioural TRNG cell synthesizes as written; the cell, the TRNG bank and the top do not, because of the cell's simulation randomness. For a gate-level flow, replace `stt_trng_cell` with the real analog macro.
