# Combinational projection onto the parity polytope and the probability simplex

ADMM-based linear-programming decoders for LDPC codes spend most of their
time on one operation: the Euclidean projection of a short real vector (one
per parity check, of length equal to the check degree d) onto the
**parity polytope** PP_d. PP_d is the convex hull of the even-weight
vertices of the unit cube {0,1}^d. Software projections of this kind are
iterative and data-dependent, which suits hardware poorly. The design
here computes the projection with a fixed, input-independent circuit:
every input takes the same path through the same operators, with no loop
and no state. Its core is a second projection, onto the **probability
simplex** S_d = {x : x >= 0, sum x = 1}. That projection is built from a
sorting network, a parallel prefix adder, a "largest index" selector and a
min-tree.

The RTL is parameterised SystemVerilog. The default configuration is d = 9
with 8-bit two's-complement words (1 sign bit, 1 integer bit, 6 fraction
bits). The whole datapath is combinational, with no pipeline registers.
Area grows as d (log d)^2 and delay as (log d)^2, both set by the sorting
network.

## The algorithm

Write clip(v) for the projection onto the unit cube, that is, each entry
clipped to [0,1]. For a 0/1 vector f, T_f(v) replaces v_i by 1 - v_i
wherever f_i = 1. T_f is its own inverse, and it commutes with clip.

Parity polytope projection of v:

1. vhat = clip(v).
2. f_i = 1 if vhat_i > 1/2, else 0. This is the nearest cube vertex.
3. If f has even weight, flip f at the index where |1/2 - vhat_i| is
   smallest. f is now the nearest odd-weight vertex, and it names the facet
   of PP_d that vhat would violate, if it violates any.
4. vt = T_f(v).
5. If sum_i clip(vt)_i >= 1, then vhat already lies in PP_d, and the result
   is vhat.
6. Otherwise the result is T_f(Pi_S(vt)), where Pi_S is the simplex
   projection.

Step 5 is the facet test of the cut-search method written in the
transformed coordinates. Step 6 holds because, after the change of
variables T_f, projecting onto that facet is a projection onto the simplex.

Simplex projection of v (the sort-based method of Duchi et al.):

1. mu = v sorted in descending order.
2. s_i = (mu_1 + ... + mu_i - 1) / i for i = 1..d.
3. rho = the largest i with mu_i > s_i.
4. w_i = max(v_i - s_rho, 0).

Step 4 works on the unsorted v, so the sort never has to be undone.

Both procedures are evaluated in full for every input. The hardware
computes vhat and the simplex branch side by side, and step 5 drives only
the final multiplexer.

## Datapath

```
 v ──► clip ──► vhat ──┬──► (vhat > 1/2) ──► f0 ──► parity ──┐
                       │                                     ▼
                       └──► |1/2 - vhat| ──► argmin ──► flip one bit ──► f
                                                                         │
 v ──► T_f ──► vt ──► simplex_projection ──► u ──► T_f ──┐               │
 vhat ──► T_f ──► sum ──► (>= 1) ── in_box ──────────► select ──► format ──► w
                                                     vhat ┘
 simplex_projection:
 vt ──► sort_network ──► mu ──► prefix_sum ──► (c_i - 1)·recip(i) ──► s_i
                          └─────────── mu_i > s_i ──► max_index ──► rho (one-hot)
 vt ──► (vt_i - s_rho), clipped at 0 ──► u
```

`parity_polytope_projection` (top) holds the clip, the threshold, the
parity fix, both T_f transforms, the membership sum and the output select.
It instantiates `argmin` and `simplex_projection`. The membership sum adds
T_f(vhat) rather than clip(T_f(v)); the two are equal because T_f and clip
commute. The top also brings out two status bits. `in_box` says that step 5
returned vhat. `parity_flip` says that step 3 flipped a bit.

### Sorting network (`sort_network`, `compare_swap`)

The network is Batcher's merge-exchange network (Knuth's Algorithm 5.2.2M),
which is Batcher's odd-even merge sort generalised to any d without padding.
Stage s compares lane i with lane i + d_s whenever (i AND p_s) = r_s. The
triples (p_s, d_s, r_s) are generated at elaboration time by
`proj_pkg::sort_stage`, which replays the loops of Algorithm M.

Each comparator is a `compare_swap`: one signed compare and two
multiplexers, with the larger value sent toward lane 0.

| d  | stages | comparators |
|----|--------|-------------|
| 3  | 3      | 3           |
| 8  | 6      | 19          |
| 9  | 10     | 26          |
| 16 | 10     | 63          |
| 33 | 21     | 207         |
| 70 | 28     | 646         |

The jump in depth just above each power of two (8 → 9, 16 → 17) is the
jump seen in measured area and delay curves for this kind of circuit.

### Prefix sums (`prefix_sum`)

This is a parallel prefix adder of minimum depth (the depth-optimal member of
the Ladner–Fischer family, shaped like Sklansky's adder). It has
ceil(log2 d) levels. At level l, each lane with bit l of its index set adds
the running sum of the last lane in the lower half of its 2^(l+1)-wide
block. Outputs are widened by ceil(log2 d) bits so that no sum can overflow.

### Division by i

There is no divider. The term (c_i - 1) is multiplied by the constant
round(2^RF / i) and shifted right by RF, which floors the result to the
input's fraction precision. RF defaults to F_IN + ceil(log2 d) + 2. In
the default format, the error of the reciprocal then moves s_i by less
than a quarter of an LSB. The flooring of s_i adds up to one LSB. The
unit-cube accuracy figures below still alternate between odd and even
widths, which follows from how well fractions such as 1/3 fit the given
number of bits.

### Largest qualifying index (`max_index`)

Output bit i is set when request bit i is set and no higher request bit is.
The "no higher bit" terms are a suffix AND of the inverted requests. They
are computed by the same prefix structure as the adder, with AND in place
of +, applied to the reversed vector. The one-hot rho then selects s_rho
through an AND-OR multiplexer. For the simplex, bit 0 always qualifies,
because s_1 = mu_1 - 1 is exact, so rho always exists.

### Argmin tree (`argmin`)

This is a recursive min-tree. Each node splits its inputs, takes the
(minimum, one-hot) pair from each half, zeroes the one-hot of the half with
the larger minimum and concatenates the two. Ties go to the lower index.
The tree has ceil(log2 d) comparator levels.

## Number formats

All words are two's-complement fixed point. The top has a width W and the
fraction counts F_IN (input) and F_OUT (output). Internally:

- T_f(v) = 1 - v can reach 1 + 2^(W-1-F_IN). The top therefore carries
  every lane with two extra bits, and the simplex projection inside it
  works at that width.
- In the simplex projection, prefix sums and thresholds carry
  ceil(log2 d) + 2 extra bits.
- The result is computed at F_IN fraction bits. It is then shifted to
  F_OUT, which drops low bits when F_OUT < F_IN (truncation, not rounding),
  and finally saturated to W bits. Results lie in [0,1]. A format with no
  integer bit (F = W-1) saturates the value 1.0 to 1 - 2^-F.

`simplex_projection` can also be used on its own, with separate W_IN/F_IN
and W_OUT/F_OUT.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `parity_polytope_projection` | D | 9 | dimension |
| | W | 8 | input and output width |
| | F_IN, F_OUT | 6, 6 | fraction bits of input / output |
| `simplex_projection` | D, W_IN, F_IN, W_OUT, F_OUT | 9, 8, 6, 8, 6 | as above |
| | RF | F_IN + ceil(log2 D) + 2 | fraction bits of the reciprocals 1/i |
| `sort_network` | D, W | 9, 8 | |
| `prefix_sum` | D, W_IN, W_OUT | 9, 9, W_IN + ceil(log2 D) | |
| `max_index` | D | 9 | |
| `argmin` | N, W | 9, 6 | |

Any D >= 2 elaborates. D = 70 has been linted with Verilator and
elaborated with Yosys (slang front end). F_IN must be at least 1, so that
1/2 can be represented.

## Accuracy

`tb/tb_fixed_point_accuracy.sv` measures accuracy on the RTL. The error
measure is the mean of ||w - p||^2 / d, where p is the double-precision
projection of the unquantized input.

Points uniform in the unit cube, d = 3, input and output with no integer
bit (F = W - 1):

| width | quantized input | parity projection | simplex projection |
|---|---|---|---|
| 2  | 5.2e-2  | 5.6e-2  | 4.5e-2  |
| 4  | 1.8e-3  | 5.0e-3  | 4.0e-3  |
| 8  | 5.1e-6  | 2.5e-5  | 1.5e-5  |
| 12 | 2.0e-8  | 1.0e-7  | 6.3e-8  |
| 16 | 7.8e-11 | 3.9e-10 | 2.5e-10 |

Entries drawn from N(0, 16), d = 9, I integer bits at the input and 1
integer bit at the output:

| width | I=0 | I=1 | I=2 | I=3 | I=4 |
|---|---|---|---|---|---|
| 8  | 2.0e-2 | 2.0e-3 | 5.8e-5  | 1.2e-4 | 9.4e-4 |
| 12 | 2.0e-2 | 1.9e-3 | 1.8e-7  | 5.1e-7 | 3.3e-6 |
| 16 | 2.0e-2 | 1.9e-3 | 8.0e-10 | 2.1e-9 | 1.3e-8 |

With 0 or 1 integer bits the error saturates, because inputs clip at ±1 or
±2. With 3 or more integer bits it falls about 4x per added bit, and 3
integer bits beat 4 at every width. One result departs from the published
evaluation of this method. There, 2 integer bits saturate near 1e-5. Here
they do not, because T_f(v) has its own extra bits, and clipping inputs at
±4 hardly moves the projection: entries that large end up at 0 or 1
anyway. The published design's internal widths are unknown, so this
difference cannot be resolved.

## How far it is tested

Every module has a self-checking testbench in `tb/`. Reference models in
`tb/tb_ref_pkg.sv` share no code with the RTL.

- `tb_sort_network`: all 0/1 inputs (which, by the 0-1 principle, proves
  sorting) for d = 2, 3, 5, 8, 9, 16, 17, plus random words, and d = 33 at
  random.
- `tb_prefix_sum`, `tb_max_index`, `tb_argmin`, `tb_compare_swap`:
  exhaustive where the input space allows, random elsewhere. The argmin
  test uses tie-heavy data.
- `tb_simplex_projection`: bit-exact against an integer model, and within
  3 LSB of the double-precision projection, for d = 9 (W = 8, F = 6) and
  for d = 3 with no integer bit.
- `tb_parity_polytope_projection`: the default configuration, no
  overrides, 40 000 vectors (unit-cube, full-range, Gaussian σ = 1 and σ = 4,
  and directed). Each result is bit-exact against the integer model and
  within 3 LSB of the ideal projection. The ideal projection itself is
  checked against the definition of a projection on a subset of vectors:
  membership in PP_9, and (v - p)·(e - p) <= 0 for all 256 even-weight
  vertices e. The test counts the box branch, the simplex branch, parity
  flips, odd-weight inputs, and clipping below 0 and above 1, and fails if
  any of them never occurs.

Not verified: timing or area on any FPGA or process, and behaviour for D
above 33 in simulation (only lint and elaboration were run there).

## Differences from the published design

- **Sorting networks for d <= 16.** The published design uses Knuth's
  delay-optimal networks up to d = 16 and Batcher's merge sort above that.
  Those comparator lists are not reproduced here. The Batcher network is
  used at every size instead. It is equally correct and as deep up to
  d = 8, but it is up to three stages deeper for 9 <= d <= 16 (10 stages at
  d = 9, against 7 for the best known 9-input network).
- **Prefix adder area.** The depth-optimal Ladner–Fischer form is used. It
  meets the ceil(log2 d) adder depth, but its area is O(d log d), not
  linear.
- **Design-specific choices** where the method leaves the detail open:
  - the reciprocal precision RF and the flooring of s_i;
  - two guard bits on T_f(v);
  - output saturation;
  - ties in the argmin go to the lowest index;
  - the `in_box` and `parity_flip` status outputs;
  - the membership sum is a plain adder chain, not a balanced tree.

## Simulating

All testbenches are self-contained and print
`TB_RESULT checks=N failures=M`. To build one with Verilator 5, pass the
package files first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/proj_pkg.sv tb/tb_ref_pkg.sv \
  rtl/compare_swap.sv rtl/sort_network.sv rtl/prefix_sum.sv rtl/max_index.sv \
  rtl/argmin.sv rtl/simplex_projection.sv rtl/parity_polytope_projection.sv \
  tb/tb_parity_polytope_projection.sv --top-module tb_parity_polytope_projection
./obj_dir/Vtb_parity_polytope_projection
```

Replace the last file and the top name to run another testbench.
`tb_fixed_point_accuracy` instantiates about 60 projection circuits and
takes a minute or two to build. It prints the accuracy tables above.

## Files

- `rtl/proj_pkg.sv`: sort-stage and reciprocal constant functions
- `rtl/compare_swap.sv`, `rtl/sort_network.sv`: descending sorting network
- `rtl/prefix_sum.sv`: parallel prefix adder
- `rtl/max_index.sv`: highest set bit, one-hot
- `rtl/argmin.sv`: recursive min-tree
- `rtl/simplex_projection.sv`: projection onto the simplex
- `rtl/parity_polytope_projection.sv`: projection onto the parity polytope (top)
- `tb/tb_ref_pkg.sv`: integer and double-precision reference models
- `tb/tb_*.sv`: one testbench per module, plus `tb_fixed_point_accuracy.sv`
