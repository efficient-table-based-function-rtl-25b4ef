# Table-based function approximation with interval splitting

This design evaluates an elementary function y = f(x), such as log, exp, tan,
tanh, the sigmoid or a Gaussian, on FPGA fabric. It uses one table lookup and
one linear interpolation per input. The result stays within a chosen absolute
error bound E_a.

A lookup table with evenly spaced breakpoints must use the spacing that the
steepest-curving part of the interval needs. That spacing then applies
everywhere, even where the function is almost straight. Interval splitting
removes that waste:

- The input interval [x_0, x_0 + a) is cut into n sub-intervals.
- Each sub-interval gets its own spacing, as coarse as its own curvature
  allows.
- All sub-tables are stored back to back in one dual-port block RAM.

For log(x) on [0.625, 15.625) with E_a ≈ 2^-20, four sub-intervals need 1795
table entries instead of 8690, 79 % fewer. The table then fits in two
1024 × 32 block RAMs instead of sixteen.

The hardware is a fully pipelined datapath. It takes one input per clock and
returns each result 9 clock cycles later. Everything that depends on the
function — the bounds, spacings, reciprocals, base addresses and table
contents — is computed from parameters when the design is elaborated.

## Spacing and table size

With linear interpolation between breakpoints δ apart, the error on a segment
is at most δ²/8 · max|f''|. Each sub-interval [p_j, p_j+1) therefore uses

    δ_j = sqrt(8 · E_a / max over [p_j, p_j+1) of |f''(x)|)

and stores K_j = ceil((p_j+1 − p_j) / δ_j) + 1 breakpoints. The memory
footprint is M_F = Σ K_j words of W_Y bits. The table needs
AW = ceil(log2 M_F) address bits, which takes 2^(AW−10) 36-kbit BRAMs in
1024 × 32 mode.

Some details of how these are computed here:

- δ_j is rounded down to a whole number of input LSBs. Every breakpoint then
  lies exactly on the input grid, and the error bound still holds.
- max|f''| is found by sampling 4097 evenly spaced points of the sub-interval,
  both ends included. For functions whose f'' is monotone on the sub-interval
  this gives the exact maximum.
- All of this is in `fa_pkg`. Its functions are called only to build
  localparams and the table's initial contents, so none of them becomes logic.

**Choosing the partition.** The partition P = {p_0, …, p_n} is an input to
the design; it is not computed in hardware. It comes from an offline search
that scans the interval in small steps. The search has two parts:

- For every candidate split point, it measures how much footprint the split
  would save.
- It then splits hierarchically: at the point of greatest saving first, then
  recursively inside the halves. It stops splitting where the saving falls
  below a threshold.

The default partition came from that procedure, with a step of 0.015 and the
threshold set so that n = 4:

    P = {0.625, 1.405, 3.085, 6.85, 15.625}

| j | p_j .. p_j+1 | δ_j (input LSBs, 2^-28) | K_j | base address |
|---|--------------|-------------------------|-----|--------------|
| 0 | 0.625 .. 1.405 | 463 408   | 453 | 0    |
| 1 | 1.405 .. 3.085 | 1 041 742 | 434 | 453  |
| 2 | 3.085 .. 6.85  | 2 287 384 | 443 | 887  |
| 3 | 6.85 .. 15.625 | 5 078 956 | 465 | 1330 |

## Pipeline

```
 x_i ─▶[in reg]─▶ interval_selector ─▶ address_generator ─▶ A_i ─┬─▶ table_bram port A ─ y_i ──┐
                  (2 stages)          (1 stage)                  └─+1─▶ port B ─ y_i+1 ────────┤
                    │ p_j, base_j, δ_j, 1/δ_j, x ──▶ 2 alignment registers ───────────────────────┤
                                                   A_i ──▶ 1 alignment register ─────────────────┤
                                                                            linear_interp (5 stages) ─▶ y_o
```

The clock edges are numbered from the one that loads the input register:

| edge | unit | work |
|------|------|------|
| 0 | input register | captures x |
| 1 | interval_selector, stage 1 | every node of a balanced comparator tree compares x ≥ p_k in parallel |
| 2 | interval_selector, stage 2 | walks the tree over the registered comparison bits to get j; looks up p_j, base_j, δ_j, 1/δ_j and K_j − 2 |
| 3 | address_generator | A_i = base_j + clamp(floor((x − p_j) · 1/δ_j), 0, K_j − 2) |
| 4 | table_bram | synchronous read of y_i at A_i and y_i+1 at A_i + 1; the other signals ride in alignment registers |
| 5–9 | linear_interp | y = y_i + (x − x_i)/δ_j · (y_i+1 − y_i); the register at edge 9 is the output register |

- The selector and the address generator together take 3 cycles. The table
  takes 1 and the interpolation 5. The latency is therefore fixed at 9.
- The latency does not depend on the function, the number formats or n. The
  selector always uses two stages, whatever the depth of its tree.
- A new input may enter on every cycle, and there is no back-pressure.
- `valid_i` and `valid_o` mark which cycles carry data. The valid chain has an
  asynchronous active-low reset `rst_n`.
- The data registers have no reset.

**Comparator tree.** The inner bounds p_1 … p_n−1 are laid out as a binary
search tree. The tree is padded to 2^L − 1 nodes, where L = ceil(log2 n); the
padding nodes never fire. This keeps the tree balanced for any n and gives a
walk of L levels of 2:1 multiplexers. All comparisons happen in the first
stage, and only the short walk and the constant lookup happen in the second.

## Fixed-point arithmetic

A format (S, W, F) means: sign flag, total width, fraction bits. The input is
(S_X, W_X, F_X) and the output (S_Y, W_Y, F_Y). The table entries use the
output format. Internally, x, p_j and δ_j are integers in input LSBs, carried
one bit wider than the input (XW = W_X + 1) so that differences cannot
overflow.

**Division by δ as a multiplication.** The design never divides. The selector
supplies 1/δ_j = ceil(2^48 / δ_j), so it has INV_FRAC = 48 fraction bits
relative to one input LSB.

- Address: i = (x − p_j) · 1/δ_j >> 48. Because the reciprocal is rounded up,
  i is never too small. It can be one too large only when x lies within a
  tiny fraction of δ below a breakpoint.
- Weight: the interpolator computes r = x − p_j − i·δ_j and
  t = r · 1/δ_j >> (48 − T_FRAC), with T_FRAC = 24 fraction bits.
- t is clamped to [0, 1]. This turns the rare "one too large" case above into
  t = 0 at a breakpoint whose value is within rounding of the true result.
- The output is y_i + round(t · (y_i+1 − y_i) / 2^24), saturated to the
  output format.

**Error budget.** The total error is at most E_a plus a few output LSBs:

- the interpolation error itself, at most E_a;
- rounding of the table entries, half an LSB;
- quantisation of t, 2^-24 of one segment's rise;
- rounding of the product, half an LSB.

The testbenches accept E_a + 3 output LSBs. Measured errors are within about
1 % of E_a; for the default, the worst case seen was 9.51e-7 against
E_a = 9.5367e-7.

**Inputs outside the interval.**

- Inputs below x_0 return f(x_0).
- Inputs at or above the last stored breakpoint return its value. That
  breakpoint lies slightly beyond x_0 + a, because K_j is rounded up.

## Table contents

`table_bram` holds a `W_Y`-bit array of M_F words. An `initial` block fills it
with entry base_j + k = round(f(p_j + k·δ_j) · 2^F_Y), saturated. The
formula, not a data file, defines the table. Both ports are registered
synchronous reads, which FPGA synthesis maps onto one true dual-port block
RAM. Because each sub-interval stores its own first and last breakpoint, A_i
and A_i + 1 always belong to the same sub-interval.

## Parameters of `func_approx_top`

| parameter | default | meaning |
|-----------|---------|---------|
| FUNC | FN_LOG | FN_LOG, FN_EXP, FN_TAN, FN_TANH, FN_SIGMOID (1/(1+e^−x)), FN_GAUSS (e^(−x²/2)) |
| EA | 9.5367e-7 | error bound E_a |
| S_X, W_X, F_X | 0, 32, 28 | input format |
| S_Y, W_Y, F_Y | 1, 32, 29 | output format |
| N_INT | 4 | number of sub-intervals n (at most 32) |
| BOUNDS | see above | p_0 … p_n in input LSBs (`fa_pkg::seg_arr_t`) |
| INV_FRAC | 48 | fraction bits of 1/δ |
| T_FRAC | 24 | fraction bits of the interpolation weight |

The widths of the address, spacing and reciprocal (AW, DW, IW) are derived.

To approximate a new function:

1. Add its value and |f''| to `fn_eval` and `fn_d2abs` in `fa_pkg`.
2. Choose the formats and the partition.
3. Pass them as parameters.

`tb/fa_workloads_tb.sv` shows six such configurations:

| function | interval | n | M_F (uniform-spacing table) |
|----------|----------|---|------------------------------|
| exp | [0, 5) | 2 | 13 670 (22 054) |
| log | [0.625, 15.625) | 8 | 1 445 |
| tanh | [−8, 8) | 9 | 2 061 (5 080) |
| sigmoid | [−10, 10) | 9 | 1 258 (2 248) |
| Gaussian | [−6, 6) | 14 | 1 888 (4 346) |
| tan | [−1.5, 1.5) | 3 | 20 295 (81 542) |

## Files

| file | contents |
|------|----------|
| `rtl/fa_pkg.sv` | function enum, elaboration-time math, default configuration |
| `rtl/func_approx_top.sv` | top level: input register, units, alignment registers, +1 adder |
| `rtl/interval_selector.sv` | comparator tree and per-sub-interval constants |
| `rtl/address_generator.sv` | A_i from x, p_j, base_j and 1/δ_j |
| `rtl/table_bram.sv` | dual-port function table |
| `rtl/linear_interp.sv` | five-stage interpolator |
| `rtl/pipe_delay.sv` | register chain used for alignment |
| `tb/*_tb.sv` | self-checking testbenches, one per unit plus end-to-end and workloads |

## Simulation

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each also
has a watchdog. With Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/fa_pkg.sv tb/func_approx_top_tb.sv \
          --top-module func_approx_top_tb -Wno-fatal
./obj_dir/Vfunc_approx_top_tb
```

Use the same command for `interval_selector_tb`, `address_generator_tb`,
`table_bram_tb`, `linear_interp_tb` and `fa_workloads_tb`. For the workloads
test, also give `tb/fa_wl_check.sv`.

- `func_approx_top_tb` runs the top with every parameter at its default. It
  checks about 40 000 inputs against the real-valued logarithm and checks the
  exact 9-cycle latency.
- It also counts each mechanism and fails if one never happens:
  - every sub-interval selected;
  - inputs exactly on breakpoints;
  - inputs below and above the interval;
  - idle cycles;
  - a run of at least 64 back-to-back results.
- The unit testbenches use smaller or unusual configurations: 5 sub-intervals
  with a signed 17-bit input, wide reciprocals, and a small exp table. Each
  compares against a model computed independently in the testbench.

## Departures and limits

- **Table.** The table is an inferred memory with initial contents; no vendor
  BRAM primitive is instantiated. Tools that cannot evaluate real arithmetic
  in an `initial` block cannot build the table. One open-source synthesis
  front end is among them; Verilator and simulation are fine.
- **Partition.** The partition search itself is offline and not part of the
  RTL; the default partition is one of its results. Other functions and
  other n need a new elaboration with their own BOUNDS. One build serves one
  function.
- **tan(x).** The greedy search cannot make a useful first cut, because
  tan'' is odd-symmetric and steepest at both ends. Its partition
  {−1.5, −1.29, 1.29, 1.5} was instead the best pair of cut points on a
  0.015 grid.
- **Derived parameters in `interval_selector`.** The defaults of DELTA, INV,
  BASE and LAST follow from its other parameters. When instantiating it
  directly with a different partition, pass these explicitly, as the top
  does: some tools do not recompute array-valued parameter defaults after an
  override.
- **Sigmoid.** The sigmoid is implemented as 1/(1+e^−x). One place in the
  source uses this formula and another uses 1/(1+e^x).
- **Gaussian output format.** A signed (1, 32, 32) output cannot represent
  e^(−x²/2) ≥ 0.5, so the Gaussian example uses an unsigned (0, 32, 32)
  output.
- **Error bound.** The bound is E_a plus rounding (see above), not strictly
  E_a.
- **Added features.** Clamping of out-of-range inputs and the valid/reset
  signalling are additions to the original description.
