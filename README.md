# Single-component DFT engines based on cyclotomic polynomials

When only one bin V_k of an N-point DFT is needed (tone detection, a few spectral probes), the
usual hardware is the Goertzel filter: a second-order recursion with one real multiplication
per input sample, N multiplications per component. This design computes V_k with far fewer
multiplications by exploiting the order of the twiddle factor.

W_N^k = e^(-j2πk/N) is a root of unity of order L = N / gcd(N, k). It is therefore a root of the
L-th cyclotomic polynomial Φ_L(x), whose degree is φ(L) (Euler's totient) and whose
coefficients are integers, and for every L below 105 only 0, +1 and −1. Since Φ_L(W_N^k) = 0,
V_k = v(W_N^k) equals R(W_N^k), where R(x) = v(x) mod Φ_L(x). Dividing by Φ_L needs no
multiplier at all; only the short remainder (φ(L) coefficients) has to be weighted by complex
constants. Two engines are built on this:

* **JCO filter** (`rtl/jco_filter.sv`): a recursive filter whose denominator is Φ_L(z⁻¹).
  The recursion has no multiplier, and its numerator is evaluated once per block, which costs
  at most 2(φ(L) − 1) real multiplications.
* **JCO-Goertzel engine** (`rtl/jco_goertzel.sv`): reduces the block modulo Φ_L, then runs
  the φ(L)-coefficient remainder through the classic two-register Goertzel division. That costs
  φ(L) multiplications in all.

The top level `jco_dft` feeds one sample stream to both engines and returns both results.
Its defaults are the worked case N = 1024, k = 128. There W_1024^128 = W_8 has order 8,
Φ_8(x) = x⁴ + 1, and V_128 costs 2 real multiplications instead of 1024.

## The JCO filter

The plain single-pole filter H(z) = 1/(1 − W_N^−k z⁻¹), fed v_0 … v_(N−1) and then one zero,
returns y_N = V_k. Multiply numerator and denominator by the product of (1 − W_N^−i z⁻¹) over
the other φ(L) − 1 roots of order L. The denominator then becomes Φ_L(z⁻¹):

    H(z) = (1 + a_1 z^-1 + ... + a_M z^-M) / (1 + b_1 z^-1 + ... + b_phi z^-phi),   M = phi - 1

The poles, and so the output y_N, are unchanged. In direct form:

    w_n = x_n - b_1 w_(n-1) - ... - b_phi w_(n-phi)      (adds and subtracts only)
    y_n = w_n + a_1 w_(n-1) + ... + a_M w_(n-M)

Only y_N is needed. So the hardware runs just the w recursion for N cycles. Then, in the cycle
that feeds the closing zero, it forms w_N and the numerator sum in one go. The a_j products
exist for that single cycle and their result is registered. For N = 1024, k = 128:

    H(z) = (1 + (1+j)/sqrt2 z^-1 + j z^-2 + (-1+j)/sqrt2 z^-3) / (1 + z^-4)

The recursion is w_n = x_n − w_(n−4). Both a_1 and a_3 have real and imaginary parts of equal
magnitude. The RTL spots such taps and reuses one product for both parts, so this case
synthesises two constant multipliers by 1/√2.

Timing: in_ready is high except in the zero cycle. A block takes N + 1 cycles. out_valid
pulses N + 1 cycles after the first sample is accepted when samples arrive every cycle.

## The JCO-Goertzel engine

This is the less obvious part. The block is processed in three phases:

1. **Reduction modulo Φ_L** (`cyclo_divider`). This is a Galois-form division register of φ(L)
   stages. Each accepted coefficient u updates R(x) ← x·R(x) + u. The overflowing x^φ term is
   then folded back through the integer coefficients of the monic Φ_L. That is one add or
   subtract per nonzero coefficient, with no multiplier.
2. **Goertzel division** (`goertzel_divider`). The φ(L) remainder coefficients are shifted out,
   highest first, one per cycle, into the two-register circuit that divides by
   p_k(x) = x² − A x + 1, where A = 2cos(2πk/N). Each step is r_0 ← u − r_1 and
   r_1 ← r_0 + A·r_1, one real multiplication. φ(L) − 2 of these steps do real work, since
   r_1 is zero for the first two.
3. **Evaluation**. V_k = r_0 + r_1·W, with two real multiplications, r_1·cos and r_1·sin.

Sample order matters here. A division register consumes the highest coefficient first, so the
method as written feeds v_(N−1) first and evaluates at W = W_N^k (`ARRIVAL_ORDER = 0`). That
needs the whole block stored and reversed. The engine also has an arrival-order mode
(`ARRIVAL_ORDER = 1`), which the top level uses. Here v_0 is fed first and one zero is
appended, the same stream the JCO filter takes. The register then reduces x·ṽ(x), where ṽ is
the reversed block polynomial. Since x·ṽ(x) evaluated at W_N^−k equals V_k, the only change is
the sign of the sine term in the evaluation. This mode is an addition of this design. It keeps
both engines on one unbuffered stream.

Timing: in_ready is high only in the load phase. A block takes N cycles of load, plus 1 zero
cycle in arrival order, plus φ(L) cycles of drain and 1 cycle of evaluation. For the default
that is 1024 + 1 + 4 + 1 = 1030 cycles.

## Top level `jco_dft`

A sample is taken only when both engines are ready (`in_ready = f_ready & g_ready`). At every
block boundary the JCO filter finishes first and then waits about φ(L) + 1 cycles for the
JCO-Goertzel drain. `stall_o` flags a valid sample held back. The two results (`jco_*`,
`jcog_*`) come out in block order on separate one-cycle `*_valid` pulses. If only one engine is
wanted, instantiate `jco_filter` or `jco_goertzel` directly. Both have the same stream
interface.

| port | width (default) | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; synchronous active-low reset |
| `in_valid`, `in_ready`, `in_data` | 1, 1, DATA_W = 16 | real samples, two's complement, v_0 first |
| `stall_o` | 1 | in_valid high while in_ready low |
| `jco_valid`, `jco_re`, `jco_im` | 1, 48, 48 | V_k from the JCO filter, scaled by 2^FRAC |
| `jcog_valid`, `jcog_re`, `jcog_im` | 1, 48, 48 | V_k from the JCO-Goertzel engine, scaled by 2^FRAC |

Output width is DATA_W + ⌈log2(N+1)⌉ + FRAC + 1. This holds any |V_k| ≤ N·2^(DATA_W−1).

## Constants from N and k (`jco_pkg`)

Every module takes only `N`, `K` and word-length parameters. All constants are computed at
elaboration by constant functions in `rtl/jco_pkg.sv`:

* L = N / gcd(N, k); φ(L) by counting the integers coprime to L.
* Φ_L(x) = ∏_{d|L} (x^d − 1)^μ(L/d). It is formed by multiplying all factors with Möbius
  value +1, then dividing exactly by those with −1.
* Denominator coefficients b_j come from Φ_L reversed. They equal Φ_L itself for L ≥ 2, since
  Φ_L is then palindromic.
* Numerator a_j come from synthetic division of the denominator by (1 − W_N^−k u):
  a_0 = 1 and a_j = b_j + W_N^−k·a_(j−1). They are rounded to FRAC fraction bits.
* A = 2cos(2πk/N), cos and sin, from Taylor series, also rounded to FRAC bits.
* Register widths come from worst-case gains. For the filter recursion this is the sum of
  |h_n| over N + 1 samples. The impulse response h of 1/Φ_L(u) is periodic with period L. For
  the division register it is the largest sum of |x^i mod Φ_L| coefficients. The integer
  datapaths therefore never overflow.

`MAXDEG = 256` bounds the polynomial arrays. It covers every L up to 120 and powers of two up to
256. Raising it supports larger L at the cost of slower elaboration.

## Precision

The integer recursions and the Φ_L reduction are exact. Rounding enters only through the
FRAC-bit constants (default 20) and the truncation of A·r_1.

* **JCO filter.** The error is bounded by Σ|w|·2^−FRAC. With random full-scale 16-bit data
  the results agree with a double-precision DFT to within about one unit for the table sizes
  (N ≤ 120) and stay inside that bound (a few units) for N = 1024.
* **JCO-Goertzel engine.** The Goertzel division amplifies the rounding of A roughly with the
  square of the remainder length. For φ(L) = 82 (N = 83) errors of about 20 units were seen on
  results of order 10^5 to 10^6, about 5·10⁻⁶ of full scale. Raise FRAC if that matters.

## Departures from the method as published, and limits

* Only real input samples are supported. The method also allows complex v_n.
* The JCO filter produces y_N only, not the whole y_n sequence drawn at its output. The
  closing zero input is generated inside the block.
* The method gives no circuit for the JCO-Goertzel algorithm. Its sequencing (load, zero,
  drain, evaluate), the reuse of the reduction registers as the drain shift register, and the
  arrival-order mode are this design's.
* Pairing the two engines on one stream in `jco_dft` is this design's choice.
* Word lengths, FRAC, the valid/ready handshake and the reset are this design's choices.
* Each instance computes one fixed (N, k). Another component needs another instance.
* For L ≥ 105, Φ_L can have coefficients of magnitude 2 or more. These become small constant
  multipliers, and MAXDEG must be raised.

## Verification

Each testbench in `tb/` is self-checking. It compares with floating-point DFT sums or
long-division results computed in the testbench, and prints `TB_RESULT checks=… failures=…`.

* `tb_jco_filter`: N = 1024/k = 128 and N = 12/k = 1. Random, impulse, constant and on-bin
  cosine blocks, with and without input gaps. Latency N + 1 and a single not-ready cycle.
* `tb_cyclo_divider`: remainders modulo Φ_8, Φ_12 and Φ_30, written out as tables and
  compared with schoolbook long division.
* `tb_goertzel_divider`: remainders modulo x² − A x + 1 for two angles, and r_0 + r_1 W^k
  against direct polynomial evaluation.
* `tb_jco_goertzel`: both sample orders, N = 1024/12/83. Latency N + φ(L) + 1 (+1).
* `tb_jco_dft`: the top at its default parameters, eight 1024-sample blocks, back to back and
  with gaps. Both engines are checked, with a block period of 1030 cycles. It counts the
  filter's zero cycles, JCO-Goertzel drains, stalls and input gaps, and fails if any of them
  never occurred.
* `tb_jco_table`: eighteen (N, k) pairs with N = 12, 32, 48, 83 and 120 through the top. It
  checks L, φ(L) and the multiplication counts 2(φ(L) − 1) and φ(L) against the published
  table, and the computed V_k.

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        --top-module tb_jco_dft rtl/jco_pkg.sv tb/tb_jco_dft.sv
    ./obj_dir/Vtb_jco_dft

To build another component, set the parameters, for example
`jco_dft #(.N(120), .K(1))` for a bin whose order is 120 (φ = 32).
