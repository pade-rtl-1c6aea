# PADE: sparse attention without a predictor, in SystemVerilog

Attention over long sequences spends most of its work on keys whose softmax
weight ends up negligible. Sparse attention accelerators usually find those
keys with a separate, cheap *predictor* pass (low-precision scores, hashing)
and then compute the real scores for the survivors, paying twice and trusting
an approximation. This design has no predictor. Keys are scored **bit plane by
bit plane, most significant bit first**, and after every plane the hardware
knows a guaranteed interval for the final score. A key is abandoned as soon as
the upper end of its interval can no longer come close to the best lower end
seen so far for the same query. The partial sums that drive this decision are
the real computation: a key that survives all eight planes leaves with its
exact score. Filtering and scoring are one stage.

The RTL follows the PADE architecture (predictor-free sparse attention with
bit-serial execution and stage fusion) as published, with the sizes of its
28 nm implementation where they are given: 64-dimensional heads, 8-bit queries
and keys, 8 query rows x 16 bit-wise PE lanes, 32-entry scoreboards, an 8 x 16
INT8 systolic array, 128 exponential units and a 320 KB key/value buffer.
Where the published description stops, this design makes its own choices; they
are listed in each file's header and collected at the end of this document.

## 1. The arithmetic of bit-serial scoring

A key element is an 8-bit two's-complement number
`k = -2^7 b0 + 2^6 b1 + ... + 2^0 b7`, where plane `r = 0` is the sign bit.
After planes `0 .. r` the partial score of query `q` and key `k` is

    S_r = sum_j q_j * (value of k_j's known bits)

The bits still unknown form an unsigned number `u_j` in `[0, 2^(7-r) - 1]`,
so the final score is `S_r + sum_j q_j u_j`, which lies in

    [ S_r + I_min(r),  S_r + I_max(r) ]
    I_max(r) = Qpos * (2^(7-r) - 1),  Qpos = sum of the positive q_j
    I_min(r) = Qneg * (2^(7-r) - 1),  Qneg = sum of the negative q_j

(`bui_generator.sv`). Both are computed once per query with shifts and
subtractions; at `r = 7` they are zero and `S_7` is the exact dot product.
Each plane adds `dS_r = sum_j q_j b_rj` shifted by `7 - r`, negated for the
sign plane (`pe_lane.sv`).

### Threshold (BUI-GF)

Each query row has one threshold module (`bui_gf_module.sv`). Every partial
score a lane produces becomes a lower bound `S_r + I_min(r)`; the module keeps
the running maximum over the whole pass and broadcasts

    T = max(lower bounds) - alpha * radius

A key is pruned when `S_r + I_max(r) <= T` (`decision_unit.sv`). Since the
maximum of lower bounds never exceeds the best true score, a pruned key's
score is at least `alpha * radius` below the best key of its row, so its
softmax weight is below `2^-(alpha*radius*exp_scale/65536)` of the largest.
`alpha` (`alpha_q/256`) trades accuracy for work; `radius` is given in raw
score units, so a radius of 5 in natural-log softmax units becomes
`5 / ln 2 * 65536 / exp_scale` raw units.

### Cheap plane products: bidirectional sparsity

`dS_r` is the sum of the query elements whose key bit is 1. The 64 bits are
split into 8 sub-groups of 8. A sub-group with more than four ones is flipped
("0-mode"): the hardware then adds the elements whose bit is 0 and subtracts
them from the precomputed sub-group sum of the query (`qsum_generator.sv`).
Either way at most four elements per sub-group are needed, so each sub-group
has only four 5:1 multiplexers, an AND with a valid bit and a small adder
(`gsat.sv`).

The multiplexer controls come from the BS scheduler (`bs_scheduler.sv`):
one priority encoder per sub-group, reused over four cycles. At step `t` it
looks at the five bits `t .. t+4`, reports the offset of the first remaining 1
(or "none"), and clears it. Because every earlier bit is already consumed and
at most four bits are set, four steps always find all of them, and mux `t`
only ever needs inputs `q_t .. q_t+4`. One plane takes 4 cycles to schedule;
the scheduler accepts a new plane every 5 cycles.

## 2. The PE lane: out-of-order bit planes

A plane of a key arrives from the key buffer tens of cycles after it is
requested, and whether the next plane is wanted at all is only known after
this one is scored. A lane therefore works on many keys at once
(`pe_lane.sv`):

1. When it starts a key it requests only the sign plane.
2. Any returned plane passes the BS scheduler and the GSAT; the lane's
   **scoreboard** (`scoreboard.sv`, 32 entries of valid + 9-bit token + 3-bit
   plane + 32-bit partial score = 45 bits) is searched by token, and on a hit
   the stored `S` is continued.
3. The decision unit keeps or prunes the key. Kept keys with planes left
   are written back and their next plane is queued; at the last plane the
   exact score is reported and the entry freed. Pruned keys free their entry
   and are never fetched again.
4. Requests for next planes go first; otherwise a new key is started if the
   scoreboard has room. At most 4 requests are in flight per lane, which
   sizes its response FIFO.

Planes of different keys are thus processed in whatever order they return,
which is what hides the fetch latency. Lane `l` owns window positions
`l, l+16, l+32, ...`.

## 3. The QK unit

`qk_pu.sv` holds 8 rows of 16 lanes. Loading a query (one row per cycle)
also computes its sub-group sums and bound table with the shared generators.
Each row has one plane-request port into the key buffer (`k_buffer.sv`,
keys stored as 64-bit planes at address `token*8 + plane`, 24-cycle fetch),
shared by its 16 lanes through a round-robin arbiter. A window of up to 512
keys is processed at a time; a row's threshold persists across windows of the
same pass (a maximum over fewer keys is still a safe lower estimate).

Surviving keys are written to the **retained-key board**: a valid flag per
row and window position (cleared when a window starts) and the exact score,
kept in one 32-entry memory per (row, lane). The V unit reads it one tile of
16 positions at a time, which is exactly one entry of each lane's memory.

## 4. The V unit: tiled online softmax

`vpu.sv` consumes the board tile by tile (16 consecutive positions; tiles
that no row retained are skipped) and maintains per row the running maximum
`m`, the running sum `l` and the 64-element accumulator `O`:

    m'   = max(m, retained scores of the tile)
    p_v  = exp(s_v - m')        (APM, 8 x 16 in parallel; 0 for pruned keys)
    c    = exp(m - m')
    l    = c*l + sum_v p_v,     O = c*O + sum_v p_v V_v
    out  = O / l                (after the last window)

so the full score row never exists anywhere. Exponentials (`apm.sv`) are
base 2 in fixed point: the score difference times `exp_scale/4096` gives a
count of 1/16 steps of log2; a 16-entry table `round(256*2^(-f/16))` gives the
fraction and a shift the integer part (`pade_pkg::exp2q`). Weights are 8-bit
(255 = 1.0, saturated) so that they feed the INT8 systolic array; `c` has 8
fraction bits.

The V vectors a tile needs are fetched once each from the value buffer into a
local tile register, in an order chosen by the **reuse-aware reorder
scheduler** (`rars_scheduler.sv`). Each V has a mask of the rows that need
it. RARS files V ids into an ID buffer indexed by mask, then fills rounds
greedily from the most-shared masks downwards, with each row taking at most
`RCAP` Vs per round; when nothing more fits, a new round starts. For four rows,
eight Vs and two Vs per row per round, where row 0 needs V0-V3, rows 1 and 3
need V2, V3, V4, V7 and row 2 needs V4-V7, it issues {V2, V3, V5, V6} and
then {V0, V1, V4, V7}.

The tile product `P (8 x n) * V (n x 64)` runs on the output-stationary
8 x 16 systolic array (`systolic_array.sv`) in four 16-column slices, each
cleared, fed `n` cycles and drained `8+16+1` cycles before being added to `O`.
A final serial divider produces `out = (O << 8) / l`, one element per cycle,
as signed Q8.8.

## 5. Top level and its sequencing

`pade_top.sv` contains the query buffer (512 x 64 B), the key buffer
(160 KB, 2560 keys as 20480 planes), the value buffer (160 KB, 2560 vectors),
the QK unit and the V unit. A pass, started by `start` with `q_base` and
`n_keys`:

1. reads queries `q_base .. q_base+7` into the QK rows and clears the softmax
   state;
2. visits the windows of 512 keys in **head-tail interleaved** order
   (first, last, second, second-to-last, ...), so that both the first tokens
   and the most recent ones, which usually hold the largest scores, raise the
   thresholds early; for each window the QK unit runs, then the V unit;
3. divides and pulses `done`.

| port | meaning |
|---|---|
| `q_wr_*`, `v_wr_*` | write one 64-byte vector; element `d` in bits `8d+7:8d` |
| `k_wr_*` | write one key plane: address `token*8 + r`, bit `j` = bit `7-r` of element `j` |
| `alpha_q`, `radius`, `exp_scale` | threshold and softmax scaling, see section 1 |
| `start`, `q_base`, `n_keys` | start a pass; `busy` until `done` |
| `out_o[8][64]`, `out_l[8]` | outputs (Q8.8) and softmax sums, held until the next pass |
| `cnt_*` | event counters: planes scored, keys pruned, scoreboard hits, out-of-order planes, retained keys, scoreboard-full waits, arbiter stalls, V tiles, skipped tiles, V loads, maximum updates, RARS rounds, windows, head-tail jumps |

## 6. Simulating

Every file in `rtl/` is one module or the package `pade_pkg`; `tb/` holds one
self-checking testbench per module. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/pade_pkg.sv \
        tb/tb_pade_top.sv --top-module tb_pade_top -Mdir obj_top
    ./obj_top/Vtb_pade_top

Each testbench ends with `TB_RESULT checks=N failures=M`. What they check:

* `tb_bs_scheduler`, `tb_gsat`: every plane's selection covers all set bits;
  the grouped product equals the plain dot product.
* `tb_bui_generator`: the bound table against brute-force extremes and the
  worked example `q = (6, -5, 9, -4)`, giving `[-9*127, 15*127]` after the
  sign plane.
* `tb_pe_lane`: random out-of-order plane delivery; retained scores exact,
  no key above the final threshold lost, scoreboard full waits with a
  4-entry scoreboard.
* `tb_qk_pu`: 8 x 16 lanes with the real key buffer over several windows;
  exact retained scores and safe pruning.
* `tb_vpu`: bit-exact model of the fixed-point online softmax, including the
  counters.
* `tb_rars_scheduler`: the four-row example above and random schedules
  (each V once, capacities respected, round count at least the lower bound).
* `tb_pade_top`: full default configuration, 1100/300/512 keys; outputs
  within 6.0 (in value units, values are int8) of a floating-point base-2
  attention over all keys, observed error about 2.6; every mechanism above
  must occur. It builds in a few minutes and simulates in under one.

Assertions (`--assert`) check internal invariants: no unselected bit left in
the BS scheduler, no scoreboard allocation when full, no FIFO overflow, planes
of a key in sequence.

## 7. Where this design departs from the published one

* **QK then V per window.** The published design overlaps the QK and V units
  as a staggered pipeline; here they alternate per 512-key window. Results are
  the same; throughput is lower.
* **Exponentials** are base-2 fixed point with 8-bit weights instead of FP16
  units; the softmax scale is folded into `exp_scale`. Output accuracy is
  about 1-2 % of the value range.
* **Window and tile sizes.** 512-key windows (9-bit tokens, matching the
  45-bit scoreboard entry), 16-position V tiles, 4 Vs per row per RARS round,
  24-cycle key fetch and 4 outstanding plane requests per lane are this
  design's choices.
* **Head-tail interleaving** is done at window granularity.
* **V tiles** are 16 consecutive window positions (skipped when no row
  retained any of them) rather than the next 16 retained keys; this keeps the
  board a plain array and lets RARS see which rows share each V.
* **Buffer row layout.** Query and value rows hold 64 bytes of one vector;
  the published on-chip layout packs different bits of one element per row.
  Keys use the published bit-plane rows.
* **Threshold scope.** BUI-GF maxima are kept for the whole pass (all
  windows), which is safe for the same reason as tile-level pruning: a
  maximum over a subset never exceeds the maximum over the full row.
* **Buffers** are split 160 KB keys / 160 KB values out of the 320 KB total
  and filled through plain write ports; the memory controller, HBM2 memory,
  output buffer and host integration are outside this RTL.
* **Capacity.** One pass holds up to 2560 keys of one 64-dimensional head.
  Heads of 128 dimensions or sequences longer than 2560 tokens would need
  passes over split heads or K/V refills, which the top does not sequence.
* The scoreboard-full wait exists in each lane but cannot occur at the
  default sizes (32 entries, at most 32 keys per lane and window).
* In `qk_pu` the threshold modules' `max_lb`/`have_max` outputs are left
  unconnected: they are observation outputs used only by the module's own
  testbench.
* Synthesis of the complete top is slow (over ten minutes for coarse
  synthesis) because of the 128 lanes with associative scoreboards and the
  wide V-unit datapath; a single PE lane synthesizes in seconds.
