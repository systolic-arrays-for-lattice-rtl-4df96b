# Lattice-reduction-aided MIMO detection on one systolic array

A MIMO receiver with `m` transmit and `m` receive antennas has to recover the
transmitted QAM vector `x` from `y = H x + n`. Linear detectors and
successive interference cancellation (SIC) are cheap, but they do poorly when
the columns of `H` are far from orthogonal. Lattice-reduction-aided detection
(LRAD) helps here. It first finds a better basis `H~ = H T` of the same
lattice, with `T` unimodular (integer entries, `|det T| = 1`). It then
detects `z = T^-1 x` in that basis with the cheap detector, rounds `z` to
integers and maps back with `x = T z`.

This RTL builds the whole LRAD back end on **one `M x M` systolic array of
processing elements (PEs)**. The QR decomposition of the channel,
`Q^H H = R`, is done elsewhere and loaded into the cells. The array then
does three jobs in place:

* **Lattice reduction.** It runs an LLL variant on `R` while keeping `Q^H`
  and `T` up to date. Two controller flows are provided: *FSR-LLL* (LLL with
  a full size reduction in every iteration) and *ASLR* (all-swap lattice
  reduction, which swaps every even or every odd column pair at once). Both
  test the Siegel condition instead of the Lovász condition.
* **Detection**, with the reduced `Q~^H`, `R~` and `T` still stored in the
  cells: `v = Q~^H y`, then back substitution `x^ = R~^-1 v` (linear) or the
  SIC recursion, then rounding, then `T x_q`.
* **MMSE** as well as zero-forcing (ZF). For MMSE the extended channel
  `[H; sigma I]` is used, and every cell stores both halves of the `m x 2m`
  matrix `Q~^H`.

The arrangement of the cells, the cell operations, the order of the size
reduction wavefront, the two algorithms and the word lengths of `R`, `Q^H`,
`T` and `mu` come from Wang, Biglieri and Yao, *Systolic Arrays for
Lattice-Reduction-Aided MIMO Detection*. That paper describes the array at
the level of cell operations and data flows. Everything below that level
(handshakes, bus formats, clocking of each step, number formats of the
detection data, the divider) is this design's own. Those choices are listed
at the end.

Default configuration: `M = 4` (4x4 MIMO), 16-QAM, `delta = 0.99`.

---

## 1. What is computed

With `Q^H` (`m x m` for ZF; for MMSE the two halves `Q1^H`, `Q2^H`) and an
upper-triangular `R` loaded, lattice reduction repeats the following until
no column pair needs a swap:

1. **Full size reduction.** For `j = m .. 2` and `i = j-1 .. 1`:
   `mu = [[r_ij / r_ii]]`, then `column_j -= mu * column_i` in both `R` and
   `T`. `[[.]]` rounds each of the real and imaginary parts to the nearest
   integer.
2. **Siegel test** on each pair of neighbouring rows:
   `|r_i+1,i+1|^2 < (delta - 1/2) |r_ii|^2` means the pair must be swapped.
3. **For each chosen pair** (rows/columns `b`, `b+1`, 0-based), a **Givens
   rotation** of rows `b`, `b+1` of `R` and `Q^H`. It zeroes `r_b+1,b+1` and
   uses `r_b,b+1` as the pivot, so that after the next step `R` is upper
   triangular again.
4. **Column swap** of columns `b`, `b+1` of `R` and `T`.

The choice of pairs is the only difference between the two algorithms:

| | FSR-LLL | ASLR |
|---|---|---|
| pairs per iteration | one: the first flagged pair at or after index `k` | all flagged pairs of the current parity ("order", even first); if none, all flagged pairs of the other parity |
| next iteration | `k := max(k'-1, 2)` (1-based `k'`) | order := the parity not just used |
| stop | no flagged pair at or after `k` | no flagged pair of either parity |

Detection (ZF or MMSE) then uses the stored values:

```
v   = Q~^H y          (MMSE: v = Q1 y1 + Q2 y2, y2 = the extra m entries)
x^  = R~^-1 v         linear:  x^_j = (v_j - sum_{i>j} r_ji x^_i) / r_jj
                      SIC:     the same recursion with x^_i replaced by round(x^_i)
x_q = round(x^)
x_LR = Q( T x_q )     Q(.) clips each part into the constellation
```

QAM symbols are taken on the integer lattice `{0, .., sqrt(QAM)-1}` per real
and imaginary part (16-QAM: `{0,1,2,3}^2`). The caller scales and shifts the
received vector to match.

## 2. The array

```
          col 0      col 1      col 2      col 3
row 0    [D00]------[O01]------[O02]------[O03]
           |   (V)     |   (R)     |   (R)     |      V = vectoring cell of pair 0, column 1
row 1    [O10]------[D11]------[O12]------[O13]      R = rotation cells
           |   (R)     |   (R)     |   (V)     |      ...pair 1: V in column 2
row 2    [O20]------[O21]------[D22]------[O23]
           |   (R)     |   (R)     |   (R)     |  (V) pair 2: V in column 3
row 3    [O30]------[O31]------[O32]------[D33]
```

Cell `(i,j)` holds `r_ij`, `q_ij`, `q2_ij` (second MMSE half) and `t_ij`.
The lower-triangle cells hold zeros of `R`, but they hold real entries of
`Q^H` and `T`, so every cell takes part. Between rows `b` and `b+1` there is
one **vectoring cell**, in column `b+1` (below `O_b,b+1`, above
`D_b+1,b+1`), and a **rotation cell** in every other column.

| module | role |
|---|---|
| `diag_cell` | `D_ii`: relays the "#" token, runs the Siegel test, updates `t_ii`, divides by `r_ii` during back substitution |
| `offdiag_cell` | `O_ij`: computes `mu`, does the column updates of `r_ij`, `t_ij`, multiply-add for `Q^H y` and `T x`, back-substitution step; super-diagonal cells also round in SIC mode |
| `vectoring_cell` | computes the Givens angle `Theta = (eta1, eta2)` and applies it to its own column |
| `rotation_cell` | applies a passing `Theta` to its column and hands it on one clock later |
| `lr_array` | the grid of all of the above, the switches and the column-exchange links |

Links between neighbours only, and each is a separate bus:

* `(r, t)` messages with a tag bit (`*`, "sent by a diagonal cell") go left
  to right along each row.
* `mu` goes up **and** down the columns from the upper-triangle cells. Below
  the diagonal it goes down only.
* The control token "#" and the value `r_ii` go from each diagonal cell to the
  one above-left. "#" also spreads up and down each column.
* Detection words go top to bottom and left to right (matrix-vector
  products), or right to left and bottom to top (back substitution).
* `Theta` goes along the row pair, outward from the vectoring cell.

## 3. The full size reduction wavefront

This is the least obvious part of the design. No cell ever knows the loop
indices `i`, `j`. The order of the column operations comes from the timing
of the token and of the tagged messages alone.

Every cell is in one of two modes, chosen by whether a "#" has arrived:

* **Data mode** (a "#" arrived). A diagonal cell `D_ii` passes the "#" to
  `D_i-1,i-1` along with its `r_ii`, spreads "#" to the cells above and below,
  and sends its `(r_ii, t_ii)*` to the right. An off-diagonal cell passes "#"
  on along its column and sends its own `(r_ij, t_ij)` (untagged) to the
  right.
* **Size-reduction mode** (the default). A cell that receives a *tagged*
  `(r_ii, t_ii)*` computes `mu = [[r_ij / r_ii]]`, updates
  `r_ij -= mu r_ii`, `t_ij -= mu t_ii`, and sends `mu` up and down. A cell that
  receives an *untagged* `(r, t)` together with a `mu` from above or below
  performs the same update with that `mu`. All messages are forwarded.

The controller starts a size reduction with one pulse on `fsr_go`, which
plays the part of the "#" entering `D_mm`. From then on the wave runs by
itself. The column operation (column `j` minus `mu` times column `i`) starts
when `(r_ii, t_ii)*` reaches `O_ij`, at normalised cycle `m + j - 2i`. The
last operation, on column `m`, is over at cycle `3m - 3`. In this RTL each
cell registers its outputs, so one normalised cycle is one clock. From the
clock in which `fsr_go` is high to the clock in which `fsr_busy` falls,
**`3M - 3 + 2` clocks** pass (11 for `M = 4`, 17 for `M = 6`). The extra two
are the "#" entering the array and the busy flag falling. `tb_lr_array`
checks this at both sizes.

The wave reproduces the sequential order of the algorithm exactly: `j` from
`m` down to 2, `i` from `j-1` down to 1. Column `j` is reduced by columns
that have not yet been reduced themselves. `tb_lr_array` compares every
entry of `R` and `T` bit for bit with that sequential loop.

`mu` uses no divider. With `p = r_ij * conj(r_ii)` and `d = |r_ii|^2`, each
part of `p/d` is rounded by comparing `2|p|` with `d` and with `3d`. The
result is 0, +-1 or +-2. Larger values saturate at +-2, which is why a single
size reduction can leave a column not fully reduced. The next iteration's
size reduction finishes the job. An entry of `R` that would leave the
(18,13) range saturates.

## 4. Siegel test, rotation and column exchange

While `D_ii` is in data mode it receives `r_i+1,i+1` along with the "#".
It computes

```
swap_i = |r_i+1,i+1|^2 * 2^16 < 32113 * |r_ii|^2        (32113 = round(0.49 * 2^16))
```

This is the Siegel condition with `delta = 0.99`, in squared form so that no
division or square root is needed. `swap[b]` (pair `b` = rows `b`, `b+1`)
therefore comes from `D_bb`, and it is valid once the size reduction is over.
The last diagonal cell has no pair below it and only relays.

The controller closes a **switch** `sw[b]` for one clock. The vectoring cell
of pair `b` runs only if `swap[b]` is also set. It takes
`alpha = r_b,b+1` (cell above) and `beta = r_b+1,b+1` (cell below) and
computes

```
n = sqrt(|alpha|^2 + |beta|^2)      (Newton-Raphson reciprocal square root)
eta1 = alpha / n,   eta2 = beta / n
G = [ conj(eta1)  conj(eta2) ]
    [   -eta2        eta1    ]
```

It writes `G (alpha; beta) = (n; 0)` back into its own two cells, together
with the rotated `q` and `q2` entries of that column. One clock later it sends
`Theta` left and right. Each rotation cell applies `G` to the `(r, q, q2)`
of the cells above and below it and passes `Theta` on one clock later. The
rotation of a pair is over within `M + 1` clocks (`rot_busy` falls).

After the rotation, a one-clock pulse on `cswap[b]` makes every cell in
columns `b` and `b+1` take its neighbour's `(r, t)`. `Q^H` is not permuted.
Rotation followed by exchange leaves `R` upper triangular, with the former
`r_b,b+1` column now carrying `n` on the diagonal. ASLR closes several
switches and exchanges several column pairs in the same clocks. Its pairs
never overlap, because they all have the same parity.

## 5. The controllers

`lr_controller` runs the iteration as four phases, one after the other:

```
IDLE --start--> FSR ("#" sent) --> wait for !fsr_busy --> DECIDE
DECIDE: no pair chosen           --> done
        n_iter reached MAX_ITER  --> done, hit_limit
        otherwise                --> sw[chosen] for one clock --> wait for !rot_busy
                                     --> cswap[chosen] for one clock --> FSR ...
```

It also provides these counters: `n_iter` (full size reductions), `n_swap`
(swap steps; an ASLR step that swaps several pairs counts once), `n_pairs`
(column pairs exchanged) and `cycles` (clocks from start to done).

`det_controller` runs detection as three fixed steps of `2M + 2` clocks
each. That is long enough for the last word to cross the array.

1. `MODE_QY`: `y_j` enters column `j` from the top at clock `j`. For MMSE,
   `y2_j` follows one clock later and is multiplied by the `q2` entries.
   Each row's result leaves on the right. `mmse_combiner` adds the one or
   two words of each row into `v_i`.
2. `MODE_RINV` or `MODE_SIC`: `v_i` enters row `i` from the right at clock
   `M-1-i` (last row first). Each diagonal cell divides the partial sum
   arriving from the right by `r_ii` and sends the quotient up its column.
   Each off-diagonal cell subtracts `r_ij * x^_j` from the partial sum
   passing left. In SIC mode the super-diagonal cells round `x^_j` first
   and pass the rounded value upward. `x^_j` leaves column `j` at the top.
   `round_unit` gives `x_q`.
3. `MODE_TX`: `x_q` enters from the top like `y`, the rows' `T x_q` leave on
   the right, and `const_quant` rounds and clips each part into
   `{0..sqrt(QAM)-1}`.

`done` rises `3(2M+2) + 2` clocks after `start` is applied (32 for `M = 4`).
`lrad_top` sets the array mode to `MODE_LR` while the lattice reduction is
busy, and to the detection controller's mode otherwise. `lr_start` and
`det_start` must not overlap.

## 6. Number formats

`(W,F)` means W bits two's complement with F fraction bits. Each complex
value is a packed struct `{re, im}`.

| quantity | format | origin |
|---|---|---|
| `R` | (18,13) | published FPGA build |
| `Q^H`, both halves | (14,13) | published FPGA build |
| `T` | (8,0) | published FPGA build |
| `mu` | (3,0), saturated at +-2 | published FPGA build |
| detection data `y, v, x^, T x_q` | (24,12) | own choice |
| rotation coefficients `eta` | (18,16) | own choice |
| `1/|r|^2`, `1/n` | 32 bits, 16 fraction bits | own choice |

Products are formed at full width (64 bits) and rounded half up when scaled
back. Results saturate at the format's limits.

## 7. Interfaces

`lrad_top` (parameters `M = 4`, `QAM = 16`, `MAX_ITER = 64`):

| port | dir | meaning |
|---|---|---|
| `ld`, `ld_r[M][M]`, `ld_q[M][M]`, `ld_q2[M][M]` | in | load `R`, `Q1^H`, `Q2^H` (zeros for ZF); sets `T = I` |
| `algo`, `lr_start` | in | 0 FSR-LLL, 1 ASLR; start |
| `lr_busy`, `lr_done`, `lr_hit_limit` | out | status; `lr_done` is a one-clock pulse |
| `lr_iter`, `lr_swaps`, `lr_pairs`, `lr_cycles` | out | counters (section 5) |
| `det_start`, `sic`, `mmse`, `y[M]`, `y2[M]` | in | start one detection; SIC or linear; feed `y2` |
| `det_busy`, `det_done` | out | status |
| `v`, `xhat`, `xq`, `tx`, `x_lr`, `v_words`, `det_cycles` | out | intermediate and final results |
| `r_o`, `q_o`, `q2_o`, `t_o` | out | the stored `R~`, `Q~^H`, `T` |

Types and constants are in `lr_pkg`. Inputs are sampled on the rising clock
edge. `rst_n` is an asynchronous active-low reset.

## 8. Where this design departs from the paper, or fills gaps

* **Phases run one after another.** The paper notes that a rotation may start
  as soon as its `r_k-1,k` is updated, and that the column swap may overlap
  the rotation of `Q^H`. Here each phase waits for the previous one to be
  over (busy flags), so an iteration takes
  `(3M-3+2) + rotation + 2` clocks or so.
* **Which diagonal cell raises `swap`.** One sentence of the paper says that
  only `D_k'k'` passes "swap" to the vectoring cell. Its worked example and
  the ASLR description say that `D_k-1,k-1` tests `|r_kk|^2 / |r_k-1,k-1|^2`
  and that its switch is closed. This design follows the latter.
* **Givens matrix.** The paper prints `G = [conj(eta1) eta2; -eta2 eta1]`.
  The RTL conjugates `eta2` in the first row, which keeps `G` unitary for
  complex entries. The two agree whenever `r_kk` is real.
* **Diagonal cell in back substitution.** One of the paper's operation
  tables (the SIC figure) prints the diagonal operation as
  "`y_out = y_in / r`". The linear-detection table prints "`y_out = x_in / r`".
  The latter is used: the partial sum from the right divided by `r_ii`.
* **Division** is `x * conj(r) * (1/|r|^2)` with a Newton-Raphson reciprocal
  (3 iterations), and `1/n` is a Newton-Raphson reciprocal square root
  (5 iterations). Both are combinational. The paper says only that the
  divisions use Newton-Raphson.
* **Separate buses** for lattice-reduction messages and detection data,
  registered cell outputs (one normalised cycle = one clock), a fixed
  `2M + 2`-clock budget per detection step, and an iteration limit
  (`MAX_ITER`). None of these is specified by the paper.
* **Rounding ties** go upward. The constellation is `{0..sqrt(QAM)-1}` per
  part.
* **Not built: the QR decomposition.** The QR (or sorted QR) decomposition
  that feeds the array is taken from other work in the paper and is not part
  of this RTL. The testbenches compute it in floating point. The paper also
  suggests one rotation cell per row pair as a cheaper option; this RTL keeps
  a rotation cell in every column, as in the main design.

## 9. How far it has been checked

Each block has a self-checking testbench that compares it with a model
written independently in the testbench:

| testbench | what it checks |
|---|---|
| `tb_nr_recip` | relative error below 2^-12 for both 1/x and 1/sqrt x over the used range |
| `tb_round_unit`, `tb_const_quant` | against `floor(x + 1/2)` and clipping |
| `tb_mmse_combiner` | sums and word counts, enable gating |
| `tb_diag_cell`, `tb_offdiag_cell` | every mode, bit-exact, including `mu` saturation and SIC rounding |
| `tb_vectoring_cell`, `tb_rotation_cell` | rotated values against floating point; `Theta` timing and direction |
| `tb_lr_array` | full size reduction bit-exact against the sequential loop at `M = 4` and `M = 6`; `3M-3+2` clocks; Siegel flags; rotation + exchange keep `R` triangular and the basis consistent |
| `tb_lr_controller` | both flows against a software model, with a stand-in array; handshake order; iteration limit; counters |
| `tb_det_controller` | detection on a real array: `v`, `x^` (linear and SIC), `x_q`, `T x_q`, clipping, ZF and MMSE, latency |
| `tb_lrad_top` | end to end at the default size: QR in floating point, both algorithms, ZF and MMSE. `T` unimodular, `R~ = Q~^H H T`, `R~` size reduced and Siegel-reduced, noise-free vectors detected exactly, clipping at the constellation edge. Every mechanism counted. |
| `tb_lrad_sizes` | the same end-to-end test with the top built for `M = 8` (an 8x8 system); detection latency exactly `3(2M+2)+1` clocks |

The end-to-end test uses random 4x4 channels with entries of about 0.35
standard deviation, so that `R` stays inside the (18,13) range. Channels
with much larger gains need to be scaled before loading. No bit-error-rate
simulations were run.

The end-to-end testbench also prints the average number of swap steps and
clocks per reduction for each algorithm. With seed 1 it reports 3.65 swap
steps and 83.5 clocks for FSR-LLL, and 2.05 swap steps and 53.0 clocks for
ASLR. These are averages over only 20 runs of each algorithm, at `M = 4`.
They show the same trend as Fig. 8, where ASLR needs fewer swap steps than
LLL because it swaps pairs in parallel. They are not a repeat of the paper's
statistics.
At `M = 8` the same test reports 6.83 swap steps and 258 clocks for
FSR-LLL, and 4.58 swap steps and 185 clocks for ASLR.

One trial at `M = 16` (two channels per combination; not kept, because its
Verilator build alone takes about five minutes) passed 481 of 482 checks.
One reduced `R~` was not size reduced. The cause has not been established.
One possibility is the 3-bit `mu`, which saturates at +-2 (Section 6): a
size reduction then leaves `|mu| > 1/2`, and if no swap follows, nothing
reduces that entry again. Sizes above `M = 8` should be treated as
untested.

## 10. Simulating

All files are plain SystemVerilog. `lr_pkg.sv` must be read first:

```
verilator --binary --timing --assert -Irtl rtl/lr_pkg.sv rtl/*.sv tb/tb_lrad_top.sv \
          --top-module tb_lrad_top -o sim
./obj_dir/sim
```

Replace `tb_lrad_top` with any other testbench in `tb/`. Every testbench
ends with one line `TB_RESULT checks=N failures=F` and has a watchdog. Each
finishes in well under a second. To try another size, change `M` on
`lrad_top`. The end-to-end testbench's `M` is a local parameter at the top of
the file.
