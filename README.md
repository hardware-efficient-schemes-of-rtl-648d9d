# Quaternion multiplying units for 2D discrete quaternion Fourier transforms

A discrete quaternion Fourier transform (DQFT) treats each colour pixel as one
quaternion, q = q0 + q1·i + q2·j + q3·k, and transforms all of its colour
components at once. In one common way of computing the 2D DQFT, the inner loops
need only three kinds of quaternion product:

| product | left factor                | right factor               | used for               |
|---------|----------------------------|----------------------------|------------------------|
| `s·q`   | s = α + β·i (i-quaternion) | –                          | left-sided transform   |
| `q·t`   | –                          | t = γ + δ·j (j-quaternion) | right-sided transform  |
| `s·q·t` | s = α + β·i                | t = γ + δ·j                | two-sided transform    |

Here α, β, γ and δ are real constants, typically twiddle factors such as cos and
−sin of 2πk/N. A general quaternion product costs 16 real multiplications and 12
additions. Because s and t are really complex numbers, and their constants are
known in advance, much cheaper circuits are possible. This RTL builds:

* **`sq_kernel`**: `s·q` with 6 multipliers and 6 two-input adders.
* **`qt_kernel`**: `q·t` with 6 multipliers and 6 two-input adders.
* **`sqt_kernel`**: `s·q·t` with 9 multipliers, 5 two-input adders and 4
  four-input adders.
* **`coef_mem`**: a memory of the precomputed constants that the kernels use
  instead of α…δ.
* **`qmu_top`**: one quaternion stream and one constant memory feeding all three
  kernels.

The constants are always precomputed. None of the circuits spends an adder or a
multiplier on α…δ themselves.

## The one-sided products: two independent 2×2 blocks

Multiplying out s·q with ij = k, ik = −j gives

    y0 = α·q0 − β·q1        y2 = α·q2 − β·q3
    y1 = β·q0 + α·q1        y3 = β·q2 + α·q3

So s·q is two copies of the same 2×2 rotation-like block, [[α, −β], [β, α]]. One
copy acts on (q0, q1) and the other on (q2, q3). A 2×2 block of this form is a
complex multiplication, and it needs only three real multiplications:

    pre-add      u = (x0 − x1,  x0,  x1)                        1 adder
    multiply     m = (α·u0,  (α+β)·u1,  (α−β)·u2)               3 multipliers
    post-add     out1 = m1 − m0 ;  out0 = m0 + m2               2 adders

Check: m0 + m2 = α·x0 − α·x1 + α·x1 − β·x1 = α·x0 − β·x1. Two blocks give the 6
multipliers and 6 adders. The constants α, α+β and α−β come from memory.

`q·t` works the same way after one relabelling. Multiplying out with kj = −i:

    y0 = γ·q0 − δ·q2        y1 = γ·q1 − δ·q3
    y2 = δ·q0 + γ·q2        y3 = δ·q1 + γ·q3

The blocks now pair (q0, q2) and (q1, q3). The kernel therefore swaps q1 and q2 on
the way in and on the way out. Each block (a, b) uses a second three-multiplier
form:

    pre-add      u = (a,  b,  a − b)                             1 adder
    multiply     m = ((γ−δ)·u0,  (γ+δ)·u1,  δ·u2)                3 multipliers
    post-add     a' = m0 + m2 ;  b' = m1 + m2                    2 adders

Both kernels are three register stages deep, matching the three layers above:
pre-addition, multiplication and post-addition.

## The two-sided product as a Kronecker product

This is the least obvious part of the design. Written as a 4×4 matrix acting on
(q0, q1, q2, q3), s·q·t is

    M = [ γ·S   −δ·S ]        S = [ α  −β ]
        [ δ·S    γ·S ]            [ β   α ]

This is the Kronecker product M = T ⊗ S. Here T = [[γ, −δ], [δ, γ]] is the
right-sided block and S is the left-sided block. Both blocks have a three-multiply
factorisation of the form A·D·B, namely the two forms shown above. The Kronecker
product of two such factorisations is again a factorisation:

    M = (A_T ⊗ A_S) · (D_T ⊗ D_S) · (B_T ⊗ B_S)

`sqt_kernel` builds exactly this:

1. **Pre-addition, B_T ⊗ B_S** (5 two-input adders). Let u = (q0, q1) and
   v = (q2, q3). First form the three pairs w0 = u, w1 = v and w2 = u − v
   (2 adders). Then form (x0 − x1, x0, x1) from each pair (3 adders). This gives
   nine values z[3k + j].
2. **Multiplication, D_T ⊗ D_S** (9 multipliers). Each multiplier computes
   m[3k + j] = z[3k + j] · p[3k + j]. The constant is p[3k + j] = t_k · s_j, with
   t = (γ−δ, γ+δ, δ) and s = (α, α+β, α−β). The nine products of constants are
   precomputed, so no multiplier is spent on them.
3. **Post-addition, A_T ⊗ A_S** (4 four-input adders). Each output is a signed sum
   of four products:

        y0 =  m0 + m2 + m6 + m8        y1 = −m0 + m1 − m6 + m7
        y2 =  m3 + m5 + m6 + m8        y3 = −m3 + m4 − m6 + m7

Applying s and then t with the one-sided kernels would cost 12 multipliers and add
a second rounding point. The Kronecker form costs 9 multipliers, and the product
stays exact.

## Constants and the constant memory

Each `coef_mem` word (`coef_set_t`, 408 bits) holds everything the three kernels
need for one (s, t) pair:

| field          | contents                                        | width (bits) |
|----------------|-------------------------------------------------|--------------|
| `sq.alpha/d1/d2`  | α, α+β, α−β                                  | 3 × 17       |
| `qt.g1/g2/delta`  | γ−δ, γ+δ, δ                                  | 3 × 17       |
| `sqt[n]`, n = 3k+j | (γ−δ, γ+δ, δ)[k] · (α, α+β, α−β)[j]         | 9 × 34       |

The host writes the words through the write port (`coef_we`, `coef_waddr`,
`coef_wdata`). In a transform there would be one word per twiddle index. The
function `make_coef` in `tb/tb_qmul_pkg.sv` shows the arithmetic. The read is
synchronous, with one clock of latency. When a word is read and written in the same
clock, the read returns the old word. The array is not reset.

## Number formats

* **Input.** Quaternion components are `DATA_W` = 16-bit two's complement.
  α…δ are `COEF_W` = 16-bit two's complement.
* **Constant widths.** Sums of two constants take 17 bits, and products of two
  such sums take 34 bits. Both are set in `qmul_pkg`.
* **Arithmetic.** Nothing is rounded or saturated. Output components are 34 bits
  for s·q and q·t, and 50 bits for s·q·t. These widths are enough for every input
  and constant value, including the most negative ones.
* **Fixed-point scale.** Suppose α…δ are fixed-point numbers with F fractional
  bits, for example F = 14 for twiddles. Then s·q and q·t carry a scale of 2^F and
  s·q·t carries a scale of 2^(2F). The user chooses which bits to keep downstream.
* **Internal sums.** Internal sums are kept at the output width and wrap modulo
  2^width. This is exact because the true result always fits.

## `qmu_top`: timing and interface

| clock | what happens                                                     |
|-------|------------------------------------------------------------------|
| n     | `in_valid`, `q` and `coef_addr` presented                         |
| n+1   | constant word read; q held in a register to stay aligned with it |
| n+2…n+4 | kernel stages: pre-add, multiply, post-add                     |
| n+4   | `out_valid` with `y_sq`, `y_qt`, `y_sqt`                          |

* **Latency.** 4 clocks from `in_valid` to `out_valid`. Each kernel on its own
  has a latency of 3 clocks.
* **Throughput.** One quaternion per clock. There is no back-pressure, and the
  kernels never stall.
* **Reset.** `rst_n` is a synchronous, active-low reset of the valid bits only.
* **Checking.** An assertion checks that the three kernels' valid pipelines stay
  in step.

The surrounding transform processor is not part of this RTL. It would order the
pixels, produce `coef_addr` for each one and collect the results, and it connects
through these ports.

## How this RTL relates to the published scheme

It follows the published scheme in these points:

* The one-sided kernels as two 2×2 blocks.
* The 6-multiplier / 6-adder counts.
* The constants α+β, α−β, γ−δ and γ+δ.
* The post-addition matrix of the q·t kernel.
* Precomputing the constant products and keeping them in memory.
* Building s·q·t from 9 constant multipliers and 4 four-input adders.

The published equations have misprints, and the RTL corrects them:

* **s·q:** the printed diagonal repeats its constants in the wrong order for the
  second block. The RTL uses (α, α+β, α−β) for both blocks.
* **q·t:** the printed permutation and pre-addition rows do not produce q·t, and
  the diagonal is not given. The RTL uses the q1↔q2 swap and the (a, b, a−b) form
  above.
* **s·q·t:** the published factorisation cannot be used. Its output matrix is not
  given, and its constants are partly duplicated. The Kronecker factorisation above
  replaces it. It uses 5 two-input adders where the published count is 6. It has no
  separate 2×2 butterfly (H2) stages. Three of its nine constants coincide with
  published ones: αδ, α(γ−δ) and (α−β)(γ−δ).

Everything else is this design's own choice. That covers:

* the word widths and exact full-precision outputs;
* the three-stage pipelines;
* the valid-strobe interface;
* the memory depth (64 words), word layout and read timing;
* joining the three kernels in one top.

## Verification

Each module has a self-checking testbench in `tb/`. The testbenches compare against
a plain 64-bit Hamilton product (`tb_qmul_pkg`), which shares no code or
factorisation with the kernels.

* **`sq_kernel_tb`, `qt_kernel_tb`, `sqt_kernel_tb`.** Each sends 3000 random
  quaternions with random gaps in `in_valid`. Every quaternion gets fresh random
  constants, and extreme values are included. The benches check all four result
  components, the 3-clock latency, and that no result appears without an input.
* **`coef_mem_tb`.** Fills the memory and reads it back in random order. It then
  mixes reads and writes, including same-clock reads of the word being written.
* **`qmu_top_tb`.** Runs the whole unit at its default parameters.
  1. It loads all 64 words: 32 DFT twiddle pairs, cos(2πk/32) − sin(2πk/32)·i and
     cos(2πk/32) − sin(2πk/32)·j, in 14 fractional bits, plus 32 random words.
  2. It streams 4000 quaternions while rewriting memory words, sometimes the very
     word being read in that clock.
  3. It checks all three products and the 4-clock latency.
  4. It counts back-to-back results, idle clocks, rewrites, same-clock rewrites,
     twiddle words and random words, and fails if any count is zero.

Every testbench ends by printing `TB_RESULT checks=N failures=M`.

To simulate with Verilator, for example the whole unit:

    verilator --binary --timing --assert --top-module qmu_top_tb \
        rtl/qmul_pkg.sv tb/tb_qmul_pkg.sv rtl/coef_mem.sv rtl/sq_kernel.sv \
        rtl/qt_kernel.sv rtl/sqt_kernel.sv rtl/qmu_top.sv tb/qmu_top_tb.sv
    ./obj_dir/Vqmu_top_tb

A kernel testbench needs only `rtl/qmul_pkg.sv`, `tb/tb_qmul_pkg.sv`, the kernel
and its testbench.

## Changing the design

* **Widths.** `DATA_W` and `COEF_W` are in `rtl/qmul_pkg.sv`. All other widths
  follow from them.
* **Memory depth.** Set it with the `COEF_DEPTH` parameter of `qmu_top`.
* **Output scale.** To reduce outputs to a fixed scale, add a rounding stage after
  the kernels. The kernels deliberately leave this to the user.
* **Pipelining.** Fewer pipeline stages means removing the registers between the
  pre-addition, multiplication and post-addition layers of a kernel. The latency
  checks in the testbenches would then need updating.
