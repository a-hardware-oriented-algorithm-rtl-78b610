# Complex constant matrix-vector multiplier with 3N(M+1)/2 real multipliers

This RTL computes

    y = A x,    A: constant complex M x N matrix,  x: complex N-vector (N even)

fully in parallel, one vector per clock, using far fewer hardware multipliers
than the obvious design. A schoolbook implementation needs MN complex
products, that is 4MN real multipliers. Here two classic tricks are stacked:

* **Winograd's inner-product formula.** For each row m and each column pair
  (2k, 2k+1),

      (a_{m,2k+1} + x_{2k}) * (a_{m,2k} + x_{2k+1})
          = a_{m,2k} x_{2k} + a_{m,2k+1} x_{2k+1}      (the two wanted terms)
          + a_{m,2k} a_{m,2k+1}                        (constants only)
          + x_{2k} x_{2k+1}                            (inputs only)

  so one product covers two matrix entries. Summed over k,

      y_m = sum_k (a_{m,2k+1} + x_{2k})(a_{m,2k} + x_{2k+1}) - c_m - xi
      c_m = sum_k a_{m,2k} a_{m,2k+1}      fixed by the matrix, precomputed
      xi  = sum_k x_{2k}   x_{2k+1}        depends on x only, same for all rows

  The rows need MN/2 complex products. xi needs N/2 more, computed once and
  shared by all rows. c_m costs nothing at run time.
* **Gauss's trick.** Each complex product uses three real multipliers, not
  four.

Together these give 3(MN/2 + N/2) = **3N(M+1)/2 real multipliers**. For the
4 x 3 example used throughout (N = 4, M = 3) that is 24 instead of 48. The
price is extra additions. This suits FPGAs whose scarce resource is the
embedded multiplier, and the 16-bit default data width was chosen so that the
multiplier operands are 18 bits, the size of common embedded multiplier
blocks.

The algorithm and its data-flow structure follow A. Cariow and G. Cariowa,
"A Hardware-oriented Algorithm for Complex-valued Constant Matrix-vector
Multiplication". That work describes the computation as a data-flow graph
and matrix factorisation. The clocking, interface, word widths and default
constants here are this implementation's own choices (see
[Choices and departures](#choices-and-departures)).

## Real-component form and the index bookkeeping

Most of the difficulty in reading this design is in the indexing. The
algorithm works on real vectors, with every complex number stored as real
part then imaginary part. The RTL keeps exactly that layout, so every internal
array can be checked against a formula.

| vector | length | element at index | meaning |
|---|---|---|---|
| `X^(1)` | N | `2k + c` | component c (0 = re, 1 = im) of x_{2k}, the even inputs |
| `X^(2)` | N | `2k + c` | component c of x_{2k+1}, the odd inputs |
| `A^(1)` | MN | `2Mk + 2m + c` | component c of a_{m,2k+1} |
| `A^(2)` | MN | `2Mk + 2m + c` | component c of a_{m,2k} |
| `A^(1) + P X^(1)` | MN | `2Mk + 2m + c` | component c of u = a_{m,2k+1} + x_{2k} |
| `S` | 3MN/2 | `3l + j`, `l = Mk + m` | Gauss operand j of v = a_{m,2k} + x_{2k+1} |
| products | 3MN/2 | `3l + j` | Gauss product j of pair (m, k) |
| Σ output | 3M | `3m + j` | product j summed over k |
| `z` | 2M | `2m + c` | complex row value before corrections |

`P = I_{N/2} ⊗ (1_{M×1} ⊗ I_2)` is only wiring: it copies complex input k
to all M rows of block k.

### The Gauss operand forms

The two factors of a product are expanded in two different ways:

    u = (ur, ui)  ->  T  : ( ur,       ui,       ur - ui )
    v = (vr, vi)  ->  T~ : ( vr - vi,  vr + vi,  vi      )

    p0 = ur (vr - vi),   p1 = ui (vr + vi),   p2 = (ur - ui) vi
    re = p0 + p2 = ur vr - ui vi
    im = p1 + p2 = ui vr + ur vi

The `+ p2` folding, `T_{2×3} = [1 0 1; 0 1 1]`, is done after the sum over
k. This is legal because it is linear, and it means only 2M such adders are
needed rather than 2M per column pair.

## Data flow

```
                      stage 1            |  stage 2            |  stage 3
x_re/x_im --> x1_q (X^(1)), x2_q (X^(2)) |                     |
                                         |                     |
 X^(1) -> enc_add(+A^(1)) -> gauss_pre T  --\                  |
                                             mult_array -> p_q -> sigma_add -> gauss_post -> corr_add -> y
 X^(2) -> s_unit: enc_add(+A^(2)) -> gauss_pre T~ --/  (3MN/2)  |   (3M adders,  (T_{2x3})    (-C, -xi)
                                                                |    N/2 terms)
 X^(1), X^(2) -> xi_unit (3N/2 multipliers) ----------> xi_q ---------------------------------^
```

| module | what it does | paper's matrices |
|---|---|---|
| `enc_add` | adds the constant matrix entries to the routed inputs (the "encoders") | `A + P X` |
| `gauss_pre` | Gauss pre-additions, `TILDE` selects the form | `I ⊗ T_{3×2}`, `I ⊗ T~_{3×2}` |
| `s_unit` | odd inputs plus `A^(2)`, then the T~ form: the multiplier operands S | procedure (6) |
| `mult_array` | one real multiplier per element | `D_{3MN/2}`, `Ψ_{3N/2}` |
| `sigma_add` | N/2-input adders over the column pairs | `Σ = 1_{1×N/2} ⊗ I_{3M}` |
| `gauss_post` | Gauss post-additions | `I_M ⊗ T_{2×3}` |
| `xi_unit` | xi = Σ_k x_{2k} x_{2k+1}, built from gauss_pre, mult_array, sigma_add and gauss_post | procedure (7) |
| `corr_add` | holds C and subtracts C and xi from every row | `C`, `Ξ`, eq. (3) |
| `ccmvm_top` | splits x into even and odd halves, holds the pipeline registers, wires the above | procedure (5) |
| `ccmvm_pkg` | default sizes and the default constant matrix | – |

### The constant table C

`c_m` depends only on the matrix. `corr_add` works it out at elaboration with
a constant function from its `A_RE`/`A_IM` parameters. It therefore appears
in the netlist as constant operands of 2M subtractors, with no lookup memory
and no multiplier. Changing the matrix means re-elaborating, as for the
`enc_add` constants.

## Interface and timing (`ccmvm_top`)

| port | dir | width | |
|---|---|---|---|
| `clk` | in | 1 | |
| `rst_n` | in | 1 | asynchronous, active low, clears the valid pipeline |
| `in_valid` | in | 1 | a vector is presented this cycle |
| `x_re[N]`, `x_im[N]` | in | W signed | input vector |
| `out_valid` | out | 1 | `y` holds a result this cycle |
| `y_re[M]`, `y_im[M]` | out | YW = 2W + 5 + clog2(N/2) signed | exact result |

| parameter | default | |
|---|---|---|
| `N` | 4 | complex inputs, must be even |
| `M` | 3 | complex outputs |
| `W` | 16 | component width of x and of the constants |
| `A_RE`, `A_IM` | `ccmvm_pkg::demo_matrix` | constant matrix, entry (m,n) at bits `[(m*N+n)*W +: W]` |

The design has three register stages: the inputs, then the products together
with xi, then y. A vector presented in cycle t is on the outputs in cycle t+3.
A new vector can enter every cycle. There is no stall and no back-pressure,
and bubbles (cycles with `in_valid` low) simply travel through. Data
registers load only in valid cycles, and only the valid bits are reset.

## Word widths and exactness

Every stage keeps full precision. The constant adders give W+1 bits, the
Gauss pre-adders W+2, the products 2W+4, the N/2-input sums add clog2(N/2),
and the post-adders add one more bit. The result width YW is at least two
bits more than the true product `A x` needs (2W + 1 + clog2(N) bits).
`corr_add` works modulo 2^YW. The final y is exact even though the
uncorrected sum and the corrections could each be larger, because
two's-complement wrap-around cancels in a sum whose true value fits.
`ccmvm_sizes_tb` checks this with every constant and every input at
-2^(W-1).

## Resource count

At the defaults (N = 4, M = 3):

| resource | this RTL | formula |
|---|---|---|
| real multipliers | 18 (`mult_array`) + 6 (`xi_unit`) = 24 | 3N(M+1)/2 |
| constant adders (`enc_add`, C subtractors) | 24 + 6 = 30 | 2M(N+1) |
| N/2-input adders | 9 + 3 = 12 | 3(M+1) |
| other two-input adders | 38 | see below |

The source gives M(N+4) + 1.5N + 2 = 32 for the last row. The RTL uses
1.5MN + 4M + 1.5N + 2 = 38:

* T~ on the row operands: MN
* T on the row operands: MN/2
* T_{2×3}: 2M
* xi subtraction: 2M
* the xi path: 1.5N + 2

The difference, MN/2, is the `ur - ui` subtractor of the T form on the row
side. The formula appears to leave it out, but the matrices and the data-flow
figure both contain it (dashed lines into every s_2).

## Choices and departures

* **Sign of the corrections.** The scalar formula subtracts c_m and xi. The
  matrix form of the same procedure writes `Y = Ξ + {C + ...}` and draws the
  C and Ξ nodes without subtraction marks. This RTL subtracts, which gives
  `A x`. Storing −c_m and computing −xi would be the equivalent "add" form.
* **Clocking.** The algorithm is a combinational data flow. The three
  register stages, the valid bit and the reset are this design's own.
* **Encoders.** Adders with a constant operand are used. The source allows
  either hard-wired encoders or ordinary adders, and synthesis
  constant-folds these anyway.
* **Widths.** W = 16 and full-precision growth are this design's own; the
  source gives no word length.
* **Default matrix.** The source gives no constants. `ccmvm_pkg::demo_coef`
  fills the default matrix from a fixed formula with mixed signs and
  magnitudes, up to M·N·W ≤ 8192 bits. A real use passes its own `A_RE`
  and `A_IM`.
* **Odd N** is not handled, as in the source: pad x and A with a zero
  column.
* **Naming.** The source prints both Gauss pre-matrices under the name
  `T_{3×2}` in one place. Here the form used with the S operands is `T~`, as
  its defining equation says.

## Simulation

Each module has a self-checking testbench in `tb/` that compares against
values computed directly in the testbench, with 64-bit integers:

| testbench | covers |
|---|---|
| `enc_add_tb`, `gauss_pre_tb`, `mult_array_tb`, `sigma_add_tb`, `gauss_post_tb` | the arithmetic primitives, including full-scale operands; `gauss_pre_tb` also checks that the two forms really reconstruct a complex product |
| `s_unit_tb`, `xi_unit_tb`, `corr_add_tb` | the composite units; `xi_unit_tb` at N = 4 and N = 8 |
| `ccmvm_top_tb` | the whole multiplier at default parameters: 2000 vectors, back-to-back and with bubbles, zero and full-scale vectors, exact latency |
| `ccmvm_sizes_tb` | all-extreme constants at the default size, and N = 8, M = 5, W = 12 |

Every testbench ends with the line `TB_RESULT checks=<n> failures=<n>`.
To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ccmvm_pkg.sv \
    tb/ccmvm_top_tb.sv --top-module ccmvm_top_tb
./obj_dir/Vccmvm_top_tb
```

Each takes well under a second. To use a different matrix, override `A_RE`
and `A_IM` (and `N`, `M`, `W` as needed) on `ccmvm_top`. `ccmvm_sizes_tb`
shows how to build such a parameter with a constant function.
