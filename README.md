# Erasure-only Reed-Solomon decoder over GF(2^32)

In a hybrid-ARQ link, a receiver gets a block of packets. Some packets are
lost, and the receiver knows which ones. If every packet is one symbol of a
Reed-Solomon codeword, a lost packet is an *erasure*: its position is known
and only its value is missing. An RS(n,k) code can restore up to `n-k`
erasures. If more are lost, the receiver asks for a retransmission.

Symbols of 32 bits (GF(2^32)) let an RS code be very long, but they make the
usual decoder hardware too costly. This design is a decoder that corrects
erasures only. It keeps the cost down in three ways:

* It does no error location, so there is no Chien search over 2^32
  candidates. The erasure locators `X_j = alpha^(i_j)` come straight from
  the known positions `i_j`.
* Every step runs on a few identical **processing units**. Each unit is one
  single-cycle GF(2^32) multiplier with an XOR adder and a few registers.
  All polynomials sit in one dual-port RAM.
* Forney's formula is evaluated at `z = X_j` itself, so only one field
  inversion is needed per erasure, and even that inversion uses the
  multiplier.

The number of units `NUM_PE` (P) trades area for speed. Decoding time
grows with the square of the erasure count and falls roughly as 1/P.

The default configuration is RS(200,136): k = 136 data symbols, n-k = 64
parity symbols, up to 64 erasures, and one unit.

## Files

| file | content |
|---|---|
| `rtl/rs_pkg.sv` | field constants, unit opcodes, memory map functions |
| `rtl/gf_mult.sv` | combinational GF(2^32) multiplier (Z-matrix form) |
| `rtl/gf_pe.sv` | processing unit |
| `rtl/dp_ram.sv` | true dual-port RAM (one block RAM) |
| `rtl/rs_ctrl.sv` | controller: the whole decoding schedule |
| `rtl/rs_erasure_decoder.sv` | top: controller + RAM + row of units |
| `tb/rs_ref_pkg.sv` | independent reference arithmetic and codeword generator |
| `tb/rs_word_runner.sv` | helper that decodes one random word on one decoder instance |
| `tb/tb_*.sv` | self-checking testbenches (see *Verification*) |

## Arithmetic

Field elements are 32-bit words in polynomial basis: bit i is the
coefficient of x^i. The field is generated by the pentanomial

    P(x) = 1 + x + x^3 + x^31 + x^32        (rs_pkg::GF_POLY = 32'h8000_000B)

GF(2^32) has no primitive trinomial. Of the primitive pentanomials, this one
gives the smallest multiplier. `alpha = x` (the word `2`) is the primitive
element.

`gf_mult` computes `c = a*b` as a GF(2) matrix-vector product `c = Z(a) b`.
Column j of Z is `a(x) * x^j mod P(x)`. That column is `a` shifted left by
j, plus one row of a constant Q matrix for each bit of `a` that leaves the
top. Row r of Q is `x^(32+r) mod P(x)`. Q is computed at elaboration time
by a function, so any `POLY` parameter works, and the multiplier becomes a
fixed AND/XOR network with no clock.

## The decoding algorithm

The code has generator `G(z) = prod_{i=0}^{n-k-1} (z - alpha^i)`, with
first root exponent m0 = 0. Let the received word be `R(z)`, with erasures
at positions `i_1 < ... < i_e`. Set `X_j = alpha^(i_j)`. Then:

1. syndromes `s_i = R(alpha^i)`, for i = 0..n-k-1
2. erasure locator `Lambda(z) = prod_j (1 + X_j z)`. Minus and plus are the
   same in GF(2^m).
3. erasure evaluator `Omega(z) = Lambda(z) S(z) mod z^(n-k)`. When only
   erasures are present, Omega has degree e-1, so only `omega_0..omega_{e-1}`
   are computed.
4. Forney, with m0 = 0: `Y_j = Omega(z) / (z Lambda'(z))` at `z = 1/X_j`.
   Here `z Lambda'(z)` is the sum of the odd-degree terms of Lambda.

Computing `1/X_j` would cost one inversion per erasure. Instead, numerator
and denominator are both multiplied by a power of `X_j`:

    num = sum_{t<e}         omega_t  X^(e-t)  = X^e * Omega(1/X)
    den = sum_{t<=e, t odd} lambda_t X^(e-t)  = X^e * [z Lambda'(z)] at z = 1/X
    Y   = num / den

Both sums are Horner evaluations at `z = X_j`. The numerator runs over
`omega_0..omega_{e-1}, 0`. The denominator runs over `lambda_0..lambda_e`
with the even terms forced to 0. Both are e+1 steps long.

The one remaining inversion is `den^-1 = den^(2^32-2)`. It is computed as
31 squarings interleaved with 30 multiplications by `den`, which is
2m-3 = 61 products on the same multiplier.

The corrected symbol is `R[i_j] + Y_j`.

## Datapath: the row of processing units

```
             port A (broadcast) ───────┬──────────┬───── ... ──┐
             port B ──┐                │          │            │
                      ▼                ▼          ▼            ▼
                  chain0 ──► [ unit 0 ] ──► [ unit 1 ] ─► ... [ unit P-1 ] ──► Lambda write-back
                                 │            │                 │
                               acc_q        acc_q             acc_q  ──► result writes (port B)
```

Each unit (`gf_pe`) holds four 32-bit registers:

* `acc`: the accumulator.
* `coef`: a held operand, which is `alpha^j`, `X_j` or the value being
  inverted.
* `aux`: the z^-1 tap of the locator, or the held Forney numerator.
* `chain`: the value passed to the next unit.

An operand switch in front of the single multiplier selects one of these
forms:

| op | effect | used for |
|---|---|---|
| `LOADC` | coef <= a | load alpha^j / X_j |
| `HORNER` | acc <= acc*coef + a | syndromes, Forney numerator/denominator |
| `LAM` | chain <= chain_in + coef*aux; aux <= chain_in | Lambda update, one factor per unit |
| `SHIFT`, `MAC` | chain <= chain_in; acc <= acc + a*chain_in | Omega, P coefficients at once |
| `HOLD` | aux <= acc | keep the numerator |
| `INVLD`, `SQR`, `MULC` | coef <= acc; acc <= acc^2; acc <= acc*coef | inversion |
| `MULH` | acc <= acc*aux | Y = num * den^-1 |

The `first` input makes a Horner or MAC sequence start from zero.

In the locator stream, the start-of-polynomial mark (`chain_first`) travels
down the row with the data. Each unit therefore clears its z^-1 tap exactly
when the coefficient `lambda_0` reaches it.

## The schedule (rs_ctrl)

The RAM returns read data one cycle after the address. So the controller
generates each unit operation together with its read address (stage 0), and
applies it one cycle later together with the data (stage 1). Port A carries
every broadcast read. Port B carries the syndrome stream of the Omega step
and all result writes.

| step | what happens | cycles (one word) |
|---|---|---|
| locators | A register multiplies by alpha once per position p = 0..n-1. It writes `a_p = alpha^p` (for p < n-k) on port A and `X_j` on port B when p hits the next erased position. Each erasure costs two extra cycles to fetch the next position. | ~ n + 2e |
| syndromes | P units at a time each load one `a_j`. Then `r_{n-1}..r_0` stream on port A (Horner). Then P writes. | ~ (n-k)/P · (n + 2P) |
| Lambda | Each pass loads P locators, one per unit, then streams `lambda_0..lambda_d` (plus zeros) from port A through the row. The last unit's output is written back in place P cycles later. A drain of P+1 cycles keeps the row shifting until the last write. | ~ e/P · (d + 2P) |
| Omega | For each group of P coefficients: P-1 cycles pre-load syndromes into the chain, then `lambda_t` is broadcast on A while `s_{i0-t}` enters on B and shifts down the row. Unit p accumulates `omega_{i0+p}`. | ~ e^2/2P |
| Forney | For each group of P erasures: load X_j, numerator Horner (e+1 cycles), HOLD, denominator Horner (e+1), inversion (1 + 61), MULH, then 3 cycles per erasure to fetch the position, read `R[i_j]` and write `R[i_j] + Y_j`. | ~ e/P · (2e + 66 + 3P) |

For RS(200,136) with e = 64 the totals are:

| units | cycles | Mbit/s at 100 MHz | throughput reported for the original FPGA build |
|---|---|---|---|
| 1 | 30,471 | 14.3 | 14.7 |
| 2 | 15,755 | 27.6 | 29.1 |
| 4 | 8,394 | 51.8 | 57.1 |
| 8 | 4,711 | 92.4 | 101 |

Throughput here means data bits (136 × 32) per decode time. The schedule
wastes a few cycles per group: the unit-loading cycles, the drain, and the
three-cycle correction. These cycles explain the 3–9 % gap, and the gap
grows with P.

## Interface and memory map

`rs_erasure_decoder #(N, K, NUM_PE)` ports:

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | one-cycle pulse while idle: decode the word in memory |
| `busy` | out | 1 | high from the cycle after `start` until `done` |
| `done` | out | 1 | one-cycle pulse at the end |
| `retx_req` | out | 1 | valid with `done`: e > n-k, nothing was changed (retransmission needed) |
| `host_we/addr/wdata` | in | 1/AW/32 | memory port A; writes only while `busy` is low (asserted) |
| `host_rdata` | out | 32 | port A read data, one cycle after the address |
| `y_valid`, `y_pos`, `y_val` | out | 1/16/32 | one pulse per erasure: position and error value Y_j |

Memory words (AW = 10 bits, 1024 words for the defaults; `rs_pkg` functions
give the bases for any N, K):

| region | base (RS(200,136)) | size | content |
|---|---|---|---|
| control | 0 | 1 | e, the number of erasures (written by the host) |
| positions | 1 | n-k | erased positions `i_1 < i_2 < ...`, strictly increasing, < n (host) |
| R | `base_r` = 65 | n | received symbols r_0..r_{n-1}, where r_i is the coefficient of z^i (host); corrected in place |
| S | `base_s` = 265 | n-k | syndromes |
| Lambda | `base_lam` = 329 | n-k+1 | lambda_0..lambda_e |
| Omega | `base_omg` = 394 | n-k | omega_0..omega_{e-1} |
| X | `base_x` = 458 | n-k | X_j |
| a | `base_a` = 522 | n-k | alpha^j |

The values held at erased positions of R do not matter. After `done`, the
R region holds the corrected codeword. If e = 0, the decoder finishes at
once. The code is non-systematic as far as the decoder is concerned: it
restores all n symbols, so whichever symbols carry the data are restored.

## Where this design departs from, or adds to, the original description

* **Ours, not described:** the memory map, the host port, the start/busy/done
  handshake, reset, the opcode set, the register roles inside a unit, the way
  several units cooperate in the Lambda and Omega steps (chained
  streaming and shifting), the write-back of corrected symbols, and
  `retx_req`.
* **Locators.** `X_j` and `alpha^j` are generated by a multiply-by-alpha
  register in the controller (a fixed shift-and-XOR), not on a unit. This
  matches the ~n+2e cycle cost given for this step.
* **Omega.** Only the e coefficients that Forney uses are computed, at a cost
  of ~e^2/2P cycles. The original cost estimate is e(n-k)/2P. The two are
  equal in the worst case e = n-k.
* **Forney scaling.** The numerator and denominator are scaled by `X^e`,
  not `X^-(n-k)`. The ratio is the same, and both sums become equally long
  Horner runs.
* **Unit count.** The architecture drawing labels the units 0 to 2t-1. The
  parameter follows the quoted results instead: 1, 2, 4 or 8 multipliers.
* **Size.** The original FPGA build reports 188 flip-flops for one unit.
  This RTL uses about 312: 128 in the unit's four registers and 184 in the
  controller, which keeps 16-bit counters. The RAM is a 1024 × 32 array,
  which maps onto one 36-kbit block RAM.

## Verification

All testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M`
and has a cycle watchdog. Reference values come from `rs_ref_pkg`, which is
independent of the RTL. It provides shift-and-add multiplication, inversion
by exponentiation, and codewords built as `D(z)G(z)`.

| testbench | what it shows |
|---|---|
| `tb_gf_mult` | 20,000 random products, reduction corner cases, a·a^-1 = 1 |
| `tb_gf_pe` | each unit operation: Horner, locator stream, MAC, 61-step inversion, HOLD/MULH, enable |
| `tb_dp_ram` | random two-port traffic against a model |
| `tb_rs_ctrl` | RS(24,12), 2 units: every intermediate region (a_j, X_j, S, Lambda, Omega) and the corrected R, `busy`/`done` |
| `tb_rs_erasure_decoder` | RS(40,24), 3 units, 12 words. Covers e = 0, e = n-k, e > n-k (retransmission), partly used unit groups and multi-pass Lambda; each is counted and must occur. Also checks every y output and the cycle budget. |
| `tb_rs_full` | default build, RS(200,136), one unit, e = 64: the whole word is corrected, and the time is within 10 % of 14.7 Mbit/s at 100 MHz |
| `tb_rs_table3` | RS(200,136), e = 64, with 2, 4 and 8 units: correctness, and time within 15 % of the reported 29.1 / 57.1 / 101 Mbit/s |
| `tb_rs_fig4` | one unit on RS(102,70), RS(288,256), RS(198,70) and RS(384,256) with e = n-k: correctness, cycles against the summed complexity estimates, speed trend in k and n-k |

To run one with Verilator, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rs_pkg.sv tb/rs_ref_pkg.sv tb/tb_rs_full.sv --top-module tb_rs_full
./obj_dir/Vtb_rs_full
```

Each testbench runs in seconds.

## Changing the design

* Code size: set `N` and `K` on `rs_erasure_decoder`. The memory depth
  follows from `rs_pkg::mem_depth`. Positions are 16-bit, so n < 65536.
* Speed and area: set `NUM_PE`. Any value of at least 1 works, including
  values that do not divide n-k.
* Field: `GF_M`/`GF_POLY` in `rs_pkg`. The multiplier takes any polynomial.
  The controller's 2M-3-step inversion and its multiply-by-alpha follow M and
  POLY. The polynomial must be primitive, because alpha = x is used as the
  primitive element.
