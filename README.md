# A BCH-protected GF(2^m) multiplier

Finite-field multipliers over GF(2^m) are large arrays of simple gates, and a
single faulty gate (a manufacturing defect or a soft error) silently corrupts
the product. This design protects the product with an error-correcting code:
the multiplier output is treated as a message, encoded with a binary BCH code,
and a BCH decoder later locates and flips up to `T` wrong bits. The result is a
multiplier that reports whether its result was disturbed (`err_detected`) and
delivers the corrected product.

The RTL follows a published architecture for fault-tolerant polynomial-basis
multiplication ("High-Speed Area-Efficient Hardware Architecture for the
Efficient Detection of Faults in a Bit-Parallel Multiplier Utilizing the
Polynomial Basis of GF(2^m)", Nabipour and Javidan). That description gives
block diagrams and the algorithms' names but leaves most circuit details
open. The sections below say which parts come from it and which are choices
made here.

The default configuration is the main one of that work: a 45-bit multiplier
(GF(2^45)) protected by the BCH(63,45) code, which corrects 3 errors and works
in GF(2^6).

```
 a,b,f ──► pb_multiplier ──C──► bch_encoder ──code_out──►  (channel:  ──rx_in──► bch_decoder ──► product
              (M cycles)          ▲    │                    faults act                          err_detected
                                  │    └── reenc parity ───────────────────────────► here)
                                  └──────── reenc msg ◄──────────────────────────────┘
```

## The multiplier: one NAND-built step per clock

`pb_multiplier` computes `C = A·B mod f(x)` with the classic MSB-first
interleaved method. Starting from `P = 0`, each clock performs

```
P ← (x·P mod f)  XOR  b[M-k]·A          k = 1 .. M
```

and after `M` steps `P = C`. Two identical combinational cells do the work:

* **G** (`gh_cell`) computes `x·P mod f`: its data input is `P` shifted left by
  one, its select bit is the bit that fell off (`p[M-1]`), and its conditional
  operand is the field polynomial `f`.
* **H** (another `gh_cell`) adds `A` when the current multiplier bit is 1.

Both are the same function, `I3 = I2 XOR (i AND I1)`. The point of the
original design is that this XOR is built only from NAND gates, using
`a XOR b = NAND(NAND(a, n), NAND(b, n))` with `n = NAND(a, b)`. Per bit:
one AND forms `b = i·I1`, a three-input NAND gives `n = NAND(I2, i, I1)`, and
two more NAND levels finish the XOR. The cell is written at that gate level
on purpose, so a synthesis run sees the intended structure.

`f` is an input port (the low `M` coefficients; the `x^M` term is implicit), so
the same hardware works for any irreducible polynomial of degree `M`. The
testbenches use `x^45 + x^4 + x^3 + x + 1` and `x^16 + x^5 + x^3 + x + 1`.

The original is titled a bit-parallel multiplier, but the architecture it
actually draws is this sequential one, one iteration per clock. That drawing
is what is built: a product takes one load cycle plus `M` iterations.

## Protecting the product: the BCH code

`bch_encoder` is a systematic encoder. The codeword is `{C, parity}`, with
`parity(x) = C(x)·x^R mod g(x)`. It is written as the bit-serial LFSR division,
unrolled over all message bits, so it becomes one XOR tree per parity bit. The
generator polynomial `g(x)` is not a stored table. `gf_pkg::bch_gen_poly`
computes it at elaboration as the least common multiple of the minimal
polynomials of `α, α^3, …, α^(2T-1)`, and `R` is its degree. For the defaults
this yields the textbook BCH(63,45) generator `1701317` (octal), `R = 18`.

The arithmetic of the decoder lives in `gf_pkg`. GF(2^MD) elements are
carried in a 10-bit `gfe_t`, of which the low `MD` bits are used. The field is
defined by a fixed primitive polynomial per `MD` (`prim_poly`):
`x^5+x^2+1`, `x^6+x+1`, `x^7+x^3+1`, and so on.

Between encoder and decoder lies what the original calls the channel. Here
that is simply wherever faults corrupt the result. It is not logic, so the top
level exposes both sides: `code_out` leaves the block and `rx_in` comes back.
A system wires them together; a testbench XORs error patterns in between.

## Decoding

`bch_decoder` follows the standard three-step BCH decoder, with a FIFO that
holds the received word until its error vector is known:

```
rx ─┬─► re-encode ─► syndrome_calc ─► ibm_solver ─► brs_chien_locator ─e─┐
    │                  (S1..S2T)        (λ(x))          (error vector)    ▼
    └──────────────────────► codeword_fifo ────────────────────────────► XOR ─► corrected
```

### Re-encoding and syndromes

The syndromes of a received word `r(x)` are `S_j = r(α^j)`, `j = 1..2T`.
Because `g(α^j) = 0`, the remainder `r(x) mod g(x)` has the same syndromes.
That remainder is cheap to get: push the received message bits through the
encoder again and XOR the new parity with the received parity. The encoder is
idle at that moment anyway, because the multiplier is still busy with the
next product. So the decoder has no encoder of its own. It borrows the
system's encoder through `reenc_msg`/`reenc_parity`, and the top level puts a
multiplexer in front of the encoder. In the cycle the multiplier finishes, the
encoder encodes the product. In the next cycle, when the word comes back,
it re-encodes.

`syndrome_calc` then evaluates only the `R`-bit remainder instead of the
`N`-bit word. The odd syndromes are constant XOR networks. The even ones come
from squarers, since `S_2j = S_j^2` for binary codes. `err_detected` is simply
"some syndrome is non-zero".

### Key equation: simplified inversionless Berlekamp–Massey

`ibm_solver` turns the syndromes into the error-locator polynomial `λ(x)`.
Its roots are the inverses of the error positions. The original names an
iBM/"FiBM" solver without detail, so the RTL uses the common
inversion-free form for binary BCH codes:

```
λ = 1, B = 1, γ = 1, k = 0
for r = 0, 2, …, 2T-2:                 (one clock each)
    δ  = Σ λ_i S_(r+1-i)
    λ' = γ·λ + δ·x·B
    if δ ≠ 0 and k ≥ 0:  B' = x·λ,   γ' = δ, k' = -k
    else:                B' = x²·B,  γ' = γ, k' = k + 2
```

For a binary code every second discrepancy is zero, so those steps are folded
into the `x²` shift: only `T` iterations are needed. The result is `λ` up to a
non-zero constant factor, which does not move its roots.

### Finding the roots: BRS tables plus a Chien step

This is the part of the design that departs most from a textbook decoder. A
Chien search evaluates `λ(α^-p)` for every position `p`. Done in parallel, it
costs `T` variable×constant multipliers per position. The
Berlekamp–Rumsey–Solomon idea removes most of them by using linearized
polynomials.

A polynomial with only the powers `y, y^2, y^4, …`, such as
`L(y) = f1·y + f2·y^2 + f4·y^4`, is linear over GF(2). Write
`y = Σ y_k α^k` in the polynomial basis. Then `L(y) = Σ y_k L(α^k)`: once the
`MD` values `L(α^k)` are known, `L` at any point is an XOR of some of them,
picked by the bits of `y`. An affine polynomial is such an `L` plus a
constant.

`brs_chien_locator` splits the locator polynomial (degree ≤ 5) as

```
λ(y) = A0(y) + y^3 · A1(y)
A0(y) = f0 + (f1 y + f2 y^2 + f4 y^4)        A1(y) = f3 + (f5 y^2)
```

The design runs in two stages:

1. **Table stage** (one clock): compute `L0(α^k)` and `L1(α^k)` for
   `k = 0..MD-1`. These are `2·MD` small tables, and only constant multipliers
   are needed, because `α^k` is fixed.
2. **Evaluation stage** (one clock, all positions in parallel): position `p`
   uses the fixed point `y = α^(2^MD-1-p)`. Since `y`'s bits are constants,
   `A0(y)` and `A1(y)` are pure XORs of table entries. The remaining factor
   `y^3` is a multiplication by a per-position constant, exactly like one
   Chien-search cell. Position `p` is in error when the sum is zero. This uses
   the rule that a root `α^i` marks component `n-i`.

For `T = 3`, `f4 = f5 = 0` and `A1` is just the constant `f3`. The split also
covers `T = 4` and `T = 5`, and the locator is tested at `T = 5`. Larger `T`
needs a different grouping and is rejected at elaboration.

### FIFO and correction

`codeword_fifo` is a first-word-fall-through FIFO over a memory array. It
stands in for the SRAM-based FIFO of the original. When the locator is done,
the oldest word is popped and XORed with the error vector. The depth is 4. At
the decoder's fastest input rate two words are in flight; inside the
fault-tolerant multiplier there is only one.

## Timing

All blocks use one clock and a synchronous active-low reset (`rst_n`).

| step | cycles (default M = 45, T = 3) |
|---|---|
| `start` → multiplier `done` | M + 1 = 46 (load + M iterations) |
| `done` → `code_valid` (encoded word out) | 1 |
| `code_valid` → syndromes registered | 1 |
| syndromes → `λ` ready | T + 1 = 4 |
| `λ` → error vector → `out_valid` | 2 |
| **`start` → `out_valid`** | **M + T + 6 = 54** |

A new multiplication can start in the cycle the previous one finishes, so the
throughput is one product per `M + 1` cycles. Decoding overlaps with the next
multiplication. `rx_in` is sampled in the cycle `code_valid` is high, so the
channel is assumed to be combinational. The decoder alone accepts a word every
`T + 2` cycles.

## Parameters and code sizes

`ft_multiplier_top #(M, MD, T, DEPTH)`: `M` is the multiplier width and
message length, `MD` the decoder field `GF(2^MD)`, `T` the number of
correctable errors. `R` and `N = M + R` are derived. `N` may be shorter than
`2^MD - 1`, which gives a shortened code.

| configuration | parameters | code |
|---|---|---|
| default, 45-bit, 3 errors | `M=45 MD=6 T=3` | BCH(63,45) |
| 16-bit, 3 errors | `M=16 MD=5 T=3` | BCH(31,16) |
| 45-bit, 4 errors | `M=45 MD=7 T=4` | shortened BCH(127,99) → (73,45) |
| 45-bit, 5 errors | `M=45 MD=7 T=5` | shortened BCH(127,92) → (80,45) |

The original states both that its 45-bit design is built on BCH(63,45) and
that it corrects up to 5 errors. A length-63 code with 45 message bits cannot
correct more than 3, so the default is BCH(63,45) with `T = 3`. The 4- and
5-error variants use the shortened length-127 codes above. Those codes are a
choice made here; the original does not name codes for them.

## Departures and additions

* **Sequential, not bit-parallel, multiplier.** See above. It is `M + 1` cycles
  per product.
* **Key-equation solver:** a standard simplified inversionless BM. The
  original's specific solver is only cited, not described.
* **Root finder:** the BRS split shown above (degree ≤ 5) is this design's
  concrete reading of "BRS in conjunction with Chien search". The original
  describes the principle through a GF(2^3) example.
* **Encoder, syndrome unit, FIFO:** their inner structure (fully parallel
  encoder and syndromes, FIFO depth 4, one register per stage) and all
  handshakes are choices made here.
* **Primitive and field polynomials:** textbook choices; the field polynomial
  `f` is a port.
* **Not included:** no indication of a decoding failure (more than `T` errors
  can be miscorrected, though any pattern of up to `2T` errors is still
  flagged by `err_detected`). No area, power or delay figures are reproduced.

## Files

`rtl/` holds one module or package per file:

* `gf_pkg`: field arithmetic and the generator polynomial.
* `gh_cell`: the G/H cell.
* `pb_multiplier`
* `bch_encoder`
* `syndrome_calc`
* `ibm_solver`
* `brs_chien_locator`
* `codeword_fifo`
* `bch_decoder`
* `ft_multiplier_top`: the top level.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each ends
with a `TB_RESULT checks=… failures=…` line. They share reference arithmetic
from `tb_ref_pkg.sv`, written independently of `gf_pkg`.
`tb_ft_multiplier_top` runs the top at its default size: 400 products with
0–4 injected errors, latency checks, and counts of each case.
`tb_ft_workloads` (with `ft_workload_driver`) runs the four configurations of
the table above side by side.

To simulate, for example the top level:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gf_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_ft_multiplier_top.sv --top-module tb_ft_multiplier_top -o sim
./obj_dir/sim
```

For `tb_ft_workloads`, also add `tb/ft_workload_driver.sv`. Every testbench
runs in well under a second.
