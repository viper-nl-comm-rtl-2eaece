# ViPer NL-COMM precoder in SystemVerilog

A base station that sends independent data streams to several single-antenna
users at once has to pre-distort the transmitted signal so that each user
sees only its own symbol. Linear precoding (zero forcing or regularised
zero forcing) does this by multiplying the symbol vector by a pseudo-inverse
of the channel. When the channel is badly conditioned, that pseudo-inverse
blows up the transmit power, and after power normalisation every user gets a
weak signal.

Vector perturbation (VP) avoids this. Before the channel inversion, the
transmitter adds a multiple of a fixed interval `tau` to each symbol:
`u = v - tau*t`, where `t` is a vector of Gaussian integers. Each receiver
removes the offset with a modulo-`tau` operation, so `t` costs the users
nothing. The transmitter picks the `t` that makes `||H^+ u||^2` smallest. The
exact search is a closest-lattice-point problem and is too expensive for
hardware.

This design follows the ViPer NL-COMM approach, which makes the search cheap
in two ways:

* **Paths are chosen from the channel alone.** The candidates are ranked
  before any data arrives, so the ranking costs nothing per data vector.
  For each user, the candidate perturbations are the 9 Gaussian integers
  nearest the ideal value: the closest and its 8 neighbours, ranked by
  distance. A *path* gives one rank `p_l` in 1..9 to each user. The cost of
  going down a path is estimated by `MoP(p) = sum_l |Rinv_ll|^2 (p_l - 1)`.
  Once per channel, the K paths with the smallest cost are kept.
* **The channel inverse comes from a QR decomposition without any divider
  or matrix inversion.** One sorted QR-type factorisation is done on the
  extended matrix `[H  lambda*I]`. It gives the triangular factor, its
  inverse and the transmit-side unitary factor together.

For each data vector, the design evaluates the K stored paths exactly,
keeps the one with the lowest power, and outputs the normalised precoded
vector.

## The arithmetic behind the blocks

Notation:

* `NR` users (rows of `H`) and `NT` antennas (columns of `H`).
* `lambda = sigma / E|s|` is the Tikhonov weight.
* `P` is a row permutation.

**Sorted RQ of the extended channel.** `P [H lambda*I] = Rbar Qbar`:

* `Rbar` is `NR x NR` and lower triangular.
* The rows of `Qbar` (`NR x (NT+NR)`) are orthonormal.
* Rows are processed in order of increasing remaining norm. At step `i`,
  the remaining row with the smallest norm becomes row `i`. Its norm becomes
  `Rbar_ii`, it is normalised into row `i` of `Qbar`, and its projection is
  removed from all later rows (modified Gram-Schmidt).

Split `Qbar = [Q1 Q2]`, with `Q1` of size `NR x NT` and `Q2` of size
`NR x NR`. Because `Rbar Q2 = P * lambda * I`:

    Rinv = Rbar^-1 = Q2 P^T / lambda

So the inverse is the last `NR` columns of `Qbar`, column-permuted and scaled
by one constant. Also, `Rbar Q1 = P H`, which gives the regularised pseudo-inverse

    H^+ = H^H (H H^H + lambda^2 I)^-1 = Q1^H Rinv P

Neither `H^+` nor any division by a matrix entry is ever formed.

**Effective point and path evaluation.** The work is done in the sorted user
order, with `vs = P v` and `ytilde = Rinv vs`. Because `Rinv` is lower
triangular, the users are processed one at a time, `l = 0 .. NR-1`:

    acc_l  = ytilde_l - tau * sum_{k<l} Rinv_lk t_k
    shat_l = acc_l * Rbar_ll / tau              (the ideal t_l, no divider)
    t_l    = DEMAP(shat_l, p_l)                 (p_l-th nearest Gaussian integer)
    z_l    = acc_l - tau * Rinv_ll * t_l
    d      = sum_l |z_l|^2

`z` equals `Rinv P (v - tau t)`, so the transmit vector is `w = Q1^H z`. The
power factor is `gamma = ||w||^2`, and the output is `x = w / sqrt(gamma)`.

**Demapping by region.** Let `f = shat - round(shat)`. The order of the 9
neighbours by distance depends mainly on which of 8 regions `f` falls in.
The region is set by the sign of Re f, the sign of Im f, and whether
`|Re f| >= |Im f|`. For the region `Re f >= Im f >= 0`, the order used is:

    (0,0) (1,0) (0,1) (1,1) (0,-1) (-1,0) (1,-1) (-1,1) (-1,-1)

This is the exact distance order at the point (0.3, 0.15). The other seven
regions use the same list, mirrored in sign and/or with real and imaginary
parts swapped. So the look-up is a single 9-entry constant table plus a
3-bit region code, with no sorting.

## Block structure

Preprocessing runs once per channel (`pre_start` to `pre_done`):

| module | does |
|---|---|
| `sorted_rq` | sorted modified Gram-Schmidt on `[H lambda I]`. Gives `Qbar`, the diagonal of `Rbar`, the full `Rbar` and `perm` |
| `tri_inversion` | `Rinv` from `Q2`, `perm` and `1/lambda` |
| `mpp_select` | K-best search over the 9 ranks per user, using MoP. Gives K paths |
| `channel_inversion` (load) | keeps `Q1^H` for postprocessing |

Postprocessing runs once per data vector (`post_start` to `out_valid`):

| module | does |
|---|---|
| `sorter` | `vs[i] = v[perm[i]]` |
| `vp_vector` | `ytilde = Rinv vs` |
| `path_search` | `NPE` copies of `path_pe`. Each takes one path per round, and the `ceil(K/NPE)` rounds enter on consecutive cycles |
| `path_pe` | the per-user recursion above, pipelined with one stage per user, taking a new path every cycle. Contains one `demap_lut` per stage |
| `min_select` | index of the smallest `d` |
| `channel_inversion` (apply) | `w = Q1^H z` |
| `gamma_gen` | `gamma = ||w||^2` |
| `pv_gen` | `x = w * rsqrt(gamma)` |

Shared modules:

* `rsr` is an iterative reciprocal square root. It is used in `sorted_rq`
  (row norms), `tri_inversion` (`1/lambda = rsqrt(lambda^2)`) and `pv_gen`.
* `viper_pkg` holds the number types and the saturating and rounding helpers.

`viper_top` wires all of this together with two small state machines: one
for preprocessing and one for postprocessing. The perturbation it reports,
`t`, is put back into the users' original order.

## Number formats

| type | width | format | used for |
|---|---|---|---|
| `word_t` | 16 | Q8.8 signed | `H`, `lambda`, `v`, `Qbar`, `Rbar`, `Rinv` |
| `acc_t` | 32 | Q24.8 signed | `ytilde`, `z`, sums of products |
| `pow_t` | 32 | Q16.16 unsigned-valued | norms, `d`, `gamma`, rsqrt input/output |
| `tsym_t` | 2 x 8 | signed integers | perturbation symbols |
| `pidx_t` | 4 | 0..8 | rank `p-1` inside a path |
| output `x` | 16 per part | Q3.13 signed | precoded vector, `||x|| = 1` |

Details of the arithmetic:

* Products are rounded to the nearest value, with ties rounded up (add half
  an LSB, then shift right arithmetically).
* Every narrowing saturates.
* `tau` must be a power of two: `log2tau` = 2, 3, 4 or 5 for QPSK, 16-, 64-
  or 256-QAM on the odd-integer grid. With a power of two, multiplying and
  dividing by `tau` are shifts.

## Timing

Everything is synchronous to `clk`, with an active-low asynchronous `rst_n`.
Each block has a `start` pulse and gives `busy`, plus a `done` pulse that
marks its outputs valid. The outputs are held until the next start. The
exceptions are `path_pe`, which streams (`in_valid`/`out_valid`), and
`sorter`, which is a one-cycle register stage.

Latencies at the default size (`NR = NT = K = NPE = 8`, `NITER = 4`),
measured by the testbenches:

| block | cycles | formula |
|---|---|---|
| `rsr` | 6 | `NITER + 2` |
| `sorted_rq` | 191 | `NC + NR*(NITER+3) + (NR-1)*(NC+1)`, with `NC = NT + NR` |
| `tri_inversion` | 6 | `NITER + 2` |
| `mpp_select` | 584 | `NR*(9K+1)` |
| `sorter` | 1 | |
| `vp_vector` | 9 | `NR + 1` |
| `path_pe` | 8 | `NR`, with a new path accepted every cycle |
| `path_search` | 10 | `ceil(K/NPE) + NR + 1` |
| `min_select` | 9 | `K + 1` |
| `channel_inversion` | 9 | `NR + 1` |
| `gamma_gen` | 9 | `NT + 1` |
| `pv_gen` | 7 | `NITER + 3` |

For the whole design, preprocessing takes 785 cycles per channel from
`pre_start` to `pre_done`. This is the three stages plus 4 hand-over
cycles. Postprocessing takes 55 cycles per data vector from `post_start` to
`out_valid`. This is the seven stages plus 1 hand-over cycle. A new vector
is accepted only when the previous one has left. The end-to-end
testbenches check both numbers exactly.

## Where this RTL departs from the published architecture

* **Sequential postprocessing around pipelined path elements.** The
  published design pipelines the whole postprocessing datapath and
  interleaves blocks of subcarriers through it. Here only the path elements
  are pipelined: each takes a new path every cycle, as published. The
  stages around them run one after another on one vector, and a path
  element's shared inputs (`ytilde`, `Rinv`) belong to that one vector. The
  results are the same, but the throughput is 55 cycles per vector instead
  of about one. A 100 MHz 5G NR carrier (about 39k vectors and 3.3k
  channel updates per 0.5 ms slot at 8x8) therefore does not fit in real
  time with one instance: it needs about 4.7M cycles. The 8-resource-block
  bandwidth used for link simulations does fit: about 139k cycles per slot,
  0.46 ms at 300 MHz.
* **Number of path elements.** One part of the published description
  instantiates 8 path elements and another mentions four. This design uses
  `NPE = 8`, with `NPE` as a parameter. With fewer elements than paths,
  the paths are folded over several rounds.
* **Internal precision.** The published description quotes 16-bit Q8.8
  internally, and elsewhere 13 fractional bits for its results. Here Q8.8
  is used for all stored words, wider accumulators are used inside the
  arithmetic, and only the final output uses 13 fractional bits.
* **Power factor.** One published formula takes `gamma` as the winning
  path's distance `d`, which is the norm of `z` in the sorted triangular
  domain. Another takes it as `||w||^2`, the actual transmit power. This
  design uses `||w||^2`, so `x` always has unit norm.
* **Scale factor and noise input.** The transmit power scale `sqrt(P_T)` is
  a constant gain and is left outside. The noise level enters only as
  `lambda`, which the host computes.
* **Reciprocal square root.** It uses an even-shift normalisation, a 2-way
  seed and 4 Newton steps. The published unit is described as a
  "scaling-less" Newton-Raphson design, and its insides are not given.
* **Neighbour table.** The 9-entry order above is this design's choice. The
  published description says only that a small table indexed by region
  holds a typical ordering.
* **Orientation of the triangular factor.** Lower triangular with users as
  rows, following the published pseudo-code. One sentence of the published
  text calls the factor upper triangular.
* **Not built:**
  * the replication of path preselection across subcarriers;
  * reuse of one decomposition for a transposed channel;
  * the host link (PCIe);
  * the surrounding PHY (channel estimation, coding, modulation, OFDM).

## Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`, that
compares against values computed independently in the testbench and checks
the cycle counts in the table above. Each prints a
`TB_RESULT checks=N failures=M` line. What each testbench checks:

| testbench | checks |
|---|---|
| `tb_rsr` | against `1/sqrt` in floating point over the whole Q16.16 range |
| `tb_sorted_rq` | against a floating-point sorted Gram-Schmidt. Also orthonormality of `Qbar` and reconstruction of `P[H lambda I]`. Channels whose two smallest row norms are within 0.05 are skipped for the order comparison, because there fixed-point rounding may legitimately pick the other row |
| `tb_mpp_select` | against a reference K-best search with a stable sort (same tie order). Also recomputes each path's metric and checks the list is ascending |
| `tb_demap_lut` | at random points: the 9 ranks cover the 3x3 neighbourhood once each, ranks 1 to 3 are the true three nearest points, and all ranks match a distance sort at the region's representative point |
| `tb_path_pe` | streams 5 paths back to back. Checks each chosen symbol against a floating-point recomputation of the effective point, `z` and `d` against floating point, and that each result leaves exactly `NR` cycles after its path entered |
| `tb_path_search` | compares `NPE = 8` with a folded `NPE = 3` instance (three rounds streamed) |

End-to-end testbenches:

* `tb_viper_top` runs two instances:
  * the default 8x8 with 64-QAM;
  * an overloaded 8-user, 4-antenna design with `K = 16`, 4-QAM and folded
    path rounds.

  Each output `x` is compared with a floating-point regularised
  zero-forcing reference, `H^H (H H^H + lambda^2 I)^-1 (v - tau t)`,
  normalised and solved by Gaussian elimination. The testbench also counts
  how often each mechanism occurred: user re-ordering, non-zero
  perturbation, a winning path other than the first, folded rounds, and
  several vectors per channel. A mechanism that never occurred is a
  failure.
* `tb_viper_full` runs the top with all parameters at their defaults, for
  10 channels with 10 vectors each.

## Simulating and changing it

With Verilator 5:

    verilator --binary --timing -Irtl -y rtl -y tb rtl/viper_pkg.sv \
        tb/tb_viper_full.sv --top-module tb_viper_full
    ./obj_dir/Vtb_viper_full

Any other testbench runs the same way with its name. Sizes are parameters of
`viper_top`:

* `NR` (users), `NT` (antennas), `K` (number of preselected paths), `NPE`
  (path elements).
* Index widths follow from these parameters.
* `NR > NT` (overloading) is allowed, because the `lambda*I` block keeps
  the extended matrix at full rank.
* Sizes above 8 users are allowed by the parameters but have not been
  simulated. Check the Q8.8 range of `Rinv` (about `1/lambda`) before
  using a small `lambda` with large arrays.
