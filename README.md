# Golden code sphere decoder: a one-node-per-cycle tree-search core

The Golden code is a full-rate, full-diversity space-time block code for a
2x2 MIMO link. It sends four QAM symbols `a, b, c, d` as a 2x2 complex codeword
over two channel uses. After the real and imaginary parts are separated,
the codeword, the channel and the received samples become an 8-dimensional
real lattice problem:

    y = H G s + z = M s + z,      s in {±1, ±3, …, ±(Q-1)}^8   (Q-PAM per real dimension)

Maximum-likelihood (ML) decoding means finding the lattice point closest to
`y`. Once `M = QR` has been factored (`R` upper triangular) and
`y~ = Q^T y` formed, the problem becomes

    s_hat = argmin_s || y~ - R s ||^2 .

This SystemVerilog implements the **tree search** that solves this problem
exactly. It is a depth-first Schnorr–Euchner sphere decoder that evaluates
**one tree node per clock cycle**. The modulation is chosen per codeword at run
time: 4-, 16- or 64-QAM, which is 2-, 4- or 8-PAM per real dimension. The
architecture follows Cerato, Masera and Viterbo, *"Decoding the Golden Code: a
VLSI design"*. Where this RTL makes its own choices, they are stated below and
in each file's header comment. The QR decomposition that produces `R` and `y~`
is not part of this core.

The core also decodes uncoded 4x4 MIMO, which gives the same 8-level real
tree, and it can be scaled to other lattice dimensions through the parameter
`N`.

---

## 1. The search as a tree

The squared distance splits level by level because `R` is triangular. Number
the levels `l = N-1 … 0` from the root side (the RTL uses 0-based levels, and
level 0 is the leaves). Then:

    psi^(N)   = y~                                   (vector of N entries)
    psi^(l)   = psi^(l+1) - R[:,l] * s_l             (cancel symbol s_l from all entries)
    T^(l)     = T^(l+1) + ( psi^(l)[l] )^2           (partial metric, T^(N) = 0)

`psi^(l)[l] = psi^(l+1)[l] - R_ll s_l` is the term a node adds to the metric.
`T^(0)` is the full distance `||y~ - R s||^2`. A node whose partial metric is
already no smaller than the best full distance found so far (the *radius*)
cannot lead to a better leaf, so its subtree is pruned.

The search is **Schnorr–Euchner (SE)**:

* There is no initial radius. The radius starts at "infinity" (all ones), and
  the first descent is the greedy path (the nearest point at each level).
* Every leaf reached inside the radius becomes the new best solution, and the
  radius shrinks to its metric.
* The points of a level are visited in order of growing distance from
  `psi_l / R_ll`. Because of this order, once one point of a level is pruned,
  all later points of that level are pruned too, and the search moves up
  instead.

The result is exact ML. The testbenches check this against independent
exhaustive searches.

## 2. Picking points without computing every metric

A decoder that computes the metrics of all `Q` children of a node needs `Q`
multipliers per level. This design computes one metric per cycle and
**selects** the right child instead. Two units do this.

**Nearest point by division (`gc_divisor`, inside `gc_u_psi`).** The nearest
PAM point to `x = psi_l / R_ll` needs only `log2 Q` quotient bits, so the unit
uses the first `log2 Q` steps of a shift-and-subtract divider:

1. The dividend is offset by `Q·R_ll`. This maps the constellation span
   `[-Q, Q)·R_ll` onto `[0, 2Q·R_ll)`.
2. Each step subtracts the divisor `2R_ll` shifted left by `log2Q-1 … 0` and
   keeps the difference if it is not negative (restoring division). The sign
   of each difference is one bit of the point index `j`, most significant bit
   first.
3. The symbol is `s = 2j + 1 - Q`.

Values outside the constellation saturate to the outer points without extra
logic. One more comparison, of the final remainder with `R_ll`, gives the sign
of `Δ = s - x`, which tells whether `x` was rounded up or down. The run-time
`log2q` input sets how many steps take effect. The steps are unrolled into one
combinational chain, so a node can still be expanded every cycle.

**Next point by recurrence (`gc_pam_next`, inside `gc_u_psi_step`).** The
following points of a level alternate around `x` with growing distance:

    s_(k) = s_(k-1) - (-1)^k · sign(Δ) · (k-1) · A,     A = 2

With `s_(1) = +1` and `Δ > 0`, the order is `+1, -1, +3, -3, …`. This needs
only the previous point, its index `k` and the one sign bit stored when the
level was entered, so no second division is needed.

Near the edge of the constellation, one side runs out. When `s_(k)` falls
outside `±(Q-1)`, the unit returns `s_(k+1)`, the next point on the other
side, in the same cycle. This is how the **mapping constraint** is enforced
for the modulation selected at run time.

## 3. One node per cycle: son and alternative in parallel

The key to the throughput is that after a pruning, the next node is already
computed. In the cycle in which a node at level `l` is current, three things
happen side by side:

```
            psi_cur (psi^(l)), t_par (T^(l+1))          <- registers: the current node
                 |                    |
   +-------------+------+      +------+------------------+
   | gc_metric_compute  |      | gc_u_psi (son)          |   divider + N mult + N sub
   | T = t_par + psi_l^2|      | s_(l-1), psi^(l-1)      |
   +---------+----------+      +-----------+-------------+
             |                             |  0
             v                             v
     gc_control_unit  ---- sel_alt ---->  MUX  ---> psi_cur, t_par (next node)
     T < radius ?                          ^  1
             ^                             |
             |                 +-----------+-------------+
             |                 | gc_u_psi_step (alt.)    |   eq. above + N mult + N sub
             |                 | next s_m, psi^(m)       |
             |                 +-----------+-------------+
             |                             ^ psi^(m+1), T^(m+1)
             +---- alt level m ------> gc_psi_memory / gc_metric_memory
```

* **Metric.** `gc_metric_compute` evaluates `T` of the current node.
* **Son.** `gc_u_psi` chooses the best son at level `l-1` and computes its
  vector `psi^(l-1) = psi^(l) - R[:,l-1]·s`.
* **Alternative.** `gc_u_psi_step` prepares the node to go to if the current
  one is rejected. This is the next unvisited sibling at the **lowest level
  `m > l` that still has unvisited points**. Its vector is recomputed from the
  father vector `psi^(m+1)`, which is read from the psi memory.

At the clock edge, the control unit decides:

| Condition            | Action |
|----------------------|--------|
| `T < radius`, `l > 0` | Descend: the son becomes current. The current `psi^(l)` and `T` are written to row `l-1` of the psi and metric memories, as the son's father data. |
| `T < radius`, `l = 0` | Leaf: store the path as the best solution and set `radius = T`. Then take the alternative. |
| `T >= radius`         | Prune: take the alternative. Its father metric comes from the metric memory. |
| No alternative left   | Done: output the best path. |

The control unit finds the alternative level with a priority search over
per-level "points visited" counters. A level is exhausted after `Q` points, so
climbing several levels at once costs no extra cycle. Every cycle of the search
therefore evaluates exactly one node. A codeword takes **`node_count + 3`
cycles** from `start` to the end of `done`: one cycle to register the inputs,
one for the root, one per node, and one for `done`.

Per level, the control unit keeps four values: the point now held (`s`), its
zig-zag index `k`, the sign of `Δ`, and the visited count. The psi memory is
`N x N` words, the `N^2` growth expected for this architecture. It holds only
*father* vectors (row `l` = `psi^(l+1)`; row `N-1` = `y~`), because the current
node's own vector sits in the `psi_cur` register.

## 4. Files

| File | Content |
|------|---------|
| `rtl/gc_pkg.sv` | Default sizes (`N_DIM=8`, `DP_W=16`, `LOG2Q_MAX=3`), the modulation enum `qam_e`, the control-state enum |
| `rtl/gc_divisor.sv` | `log2 Q`-step restoring slicer: nearest PAM point and sign of Δ |
| `rtl/gc_psi_update.sv` | N parallel `psi - R·s` with saturation (shared by both units) |
| `rtl/gc_u_psi.sv` | Son unit: divisor + psi update |
| `rtl/gc_pam_next.sv` | Zig-zag recurrence with the mapping-constraint skip |
| `rtl/gc_u_psi_step.sv` | Alternative unit: recurrence + psi update |
| `rtl/gc_metric_compute.sv` | `T + psi^2` |
| `rtl/gc_psi_memory.sv`, `rtl/gc_metric_memory.sv` | Path storage (register files) |
| `rtl/gc_control_unit.sv` | SE control: prune/descend/leaf, alternative search, radius, result |
| `rtl/golden_sd_top.sv` | The decoder core |

## 5. Interface and number formats

`golden_sd_top` has these parameters: `N` (8), `W` (16), `LOG2Q_MAX` (3), and
the derived widths `SW = LOG2Q_MAX+1`, `KW = LOG2Q_MAX+2`,
`MW = 2W + clog2(N)` and `CW = 32` (width of the saturating `node_count`).

| Port | Dir | Meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | Clock; synchronous active-low reset |
| `start` | in | When idle: register `r_in`, `y_in`, `log2q` and begin |
| `log2q` | in | 1: 4-QAM, 2: 16-QAM, 3: 64-QAM (log2 of the PAM size) |
| `r_in[N][N]` | in | `R`, row-major, upper triangular, **positive diagonal** |
| `y_in[N]` | in | `y~ = Q^T y` |
| `busy`, `done` | out | Searching; one-cycle result strobe |
| `s_hat[N]` | out | ML symbols, odd integers in `±(Q-1)`, index = real dimension |
| `metric_hat` | out | `‖y~ - R s_hat‖^2`, exact |
| `found` | out | At least one leaf was reached (always, with the infinite start radius) |
| `node_count` | out | Nodes evaluated for this codeword |
| `ev_descend`, `ev_prune`, `ev_leaf`, `ev_skip`, `ev_climb` | out | One-cycle event flags, for profiling |

The results hold until the next `start`.

**Number formats.**

* `R` and `y~` are `W`-bit two's complement numbers with a common binary point
  that can sit anywhere. Because the symbols are integers, the arithmetic never
  rounds: `psi - R·s` is exact and only saturates at the `W`-bit limits.
* The square is kept at full precision, and the `MW`-bit metric holds the sum
  of `N` squares. Metrics are therefore the exact distances of the quantised
  inputs.
* Fixed-point studies for this decoder put 16-QAM at about 12 bits and 64-QAM
  at 14 bits (6 integer, 8 fraction). A 16-bit datapath is the comparison
  point. Such data fit the default `W = 16`; set `W` lower to build a narrower
  datapath.
* For a fixed modulation (the "parametrizable" variant), tie `log2q` to a
  constant and let synthesis trim the rest.

## 6. Where this RTL departs from, or adds to, the source architecture

* **The divider is unrolled.** The source draws the divider as one
  subtractor stage with a feedback multiplexer, iterated `log2 Q` times. It
  also requires a new node every cycle. Here the stages are chained
  combinationally to meet the second requirement. Restoring division, the
  `Q·R` offset and the one-bit Δ are choices of this RTL.
* **The metric input.** The source block diagram feeds the metric unit with
  a selected `R_ll s_l` next to `psi`. This RTL uses `psi^(l)[l]`, which
  already equals `psi_l - R_ll s_l`. The result is the same with one
  multiplexer fewer.
* **Choices the source leaves open.** This RTL makes its own choices for:
  * the alternative node at the lowest non-exhausted level above the current
    one, found in the same cycle;
  * the per-level visited counters;
  * the strict `<` pruning test;
  * the infinite starting radius;
  * saturation of `psi`;
  * the metric width;
  * the register-file memories;
  * the start/done handshake and the reset.
* **Not included.**
  * QR decomposition / zero-forcing preprocessing (only surveyed in the
    source).
  * The optional column reordering.
* **Throughput.** The source reports an average of about 24 cycles per
  decoded vector for 16-QAM at 20 dB SNR: 146 Mbit/s at 217 MHz, measured on
  uncoded 4x4 MIMO. The workload testbench below measures
  **38 cycles (90.6 Mbit/s at 217 MHz)** for that case, and 48 cycles per
  Golden codeword. The testbench's SNR definition (received signal power per
  antenna over `N0`) and the absence of column reordering may account for the
  difference. The same testbench at 25 dB needs 21.6 cycles, so the reported
  figure lies within a few dB of this SNR scale; a different SNR convention
  (per bit, or per transmit antenna) shifts it by that much. The source defines neither its SNR nor its preprocessing for
  that figure. The one-node-per-cycle property itself is checked exactly.

## 7. Verification

Every testbench is self-checking. Each ends with
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `tb_gc_divisor` | 20 000 random and boundary divisions, all three PAM sizes, against `2·floor(x/2)+1` clipped, and the sign of Δ |
| `tb_gc_u_psi` | Slicer result and all N updated entries, including saturation |
| `tb_gc_u_psi_step` | Complete enumerations: every point once, distances never decreasing, mapping skips used |
| `tb_gc_metric_compute` | `T + psi^2` against 64-bit arithmetic, including saturation |
| `tb_gc_psi_memory`, `tb_gc_metric_memory` | Register files against a shadow copy |
| `tb_gc_control_unit` | Hand-worked two-level trees (a QPSK tree and a 4-PAM tree) cycle by cycle: level, alternative state, mux select, memory writes, result, node count |
| `tb_golden_sd_top` | The whole core at default size on 60 random problems with interleaved 4/16/64-QAM. Compares against an exact natural-order ML search, checks latency = `node_count + 2` edges, and requires descents, prunings, radius updates, mapping skips, multi-level climbs and modulation switches all to occur |
| `tb_golden_sd_configs` | Other sizes through the helper `gc_cfg_runner`: N = 8 with W = 12 (up to 16-QAM) and W = 14 (up to 64-QAM), N = 12 and N = 6 with W = 16; random problems against exact ML and the latency rule |
| `tb_golden_workload` | Real Golden code transmissions, then uncoded 4x4 MIMO, with Rayleigh fading at 20 dB (uncoded also at 25 and 30 dB; table below) |

`tb_golden_workload` builds each channel from the Golden codeword
definition, factors it by Gram-Schmidt QR, and quantises to 16 bits. The
decoder must match exact ML on every codeword. Results at the default size:

| Case | Nodes per vector | Cycles per vector | Mbit/s at 217 MHz |
|------|-----------------:|------------------:|------------------:|
| Golden 2x2, 4-QAM  | 15.9  | 18.9  | 91.8 |
| Golden 2x2, 16-QAM | 45.0  | 48.0  | 72.3 |
| Golden 2x2, 64-QAM | 132.9 | 135.9 | 38.3 |
| Uncoded 4x4, 16-QAM | 35.3 | 38.3  | 90.6 |
| Uncoded 4x4, 16-QAM, 25 dB | 18.6 | 21.6 | 160.6 |
| Uncoded 4x4, 16-QAM, 30 dB | 17.1 | 20.1 | 172.9 |

To simulate with Verilator (5.x), from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/gc_pkg.sv \
          tb/tb_golden_sd_top.sv --top-module tb_golden_sd_top -o sim
./obj_dir/sim
```

To run another bench, replace `tb_golden_sd_top` with its name. Verilator finds
the other modules through `-Irtl` and `-Itb` by file name. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/gc_pkg.sv rtl/<module>.sv`.
