# Fault-detecting modular exponentiation by partial recomputation

Modular exponentiation, x^y mod N, is the core of RSA, Diffie-Hellman,
ElGamal and several newer signature schemes. An attacker who can disturb the
computation with a voltage glitch, a clock glitch, a laser or a bit flip in
an operand can often learn a secret from the faulty output. The usual
countermeasure is to compute twice and compare, but that doubles the cost.

This design computes the exponentiation once in full. It then recomputes
only the first `l` exponent bits, on operands that have been re-encoded so
that the second pass does not handle the same bit patterns as the first.
The result is released only when the two passes agree on:

* the partial power x^(y mod 2^l) mod N, and
* the Hamming weight (number of 1 bits) of the reduced exponent.

The partial power of the first pass is an intermediate value of the full
computation, so the first pass costs nothing extra. The second pass costs
about `l/|y|` of a full exponentiation. With `l = 128` and 2048-bit
exponents that is about 6%.

The RTL is SystemVerilog (IEEE 1800-2017). It synthesizes, and its default
sizes are 2048-bit operands, 50-bit random coefficients and `l = 128`.

## The encodings, and why no decoding is needed

Each pass encodes its inputs with fresh random coefficients `k`:

    base:      x_enc = x + k_x * N          (x_enc mod N = x mod N)
    exponent:  y_enc = y + k_y * phi(N)     (x^(k*phi(N)) = 1 mod N when gcd(x, N) = 1)

Neither encoding changes the value of the exponentiation. The core begins by
reducing `x_enc mod N` and `y_enc mod phi(N)`. In a fault-free run, both
passes therefore arrive at the same reduced base and exponent, yet every
value entering the encoders, the reducers and the buses in between differs
between the passes. Without the encodings, a permanent fault, or the same
transient fault hitting both passes, would give two equal wrong answers and
go unseen.

A consequence worth keeping in mind: `phi` must really be Euler's totient of
N, or another multiple of the order of x. Otherwise the released result is
x^(y mod phi) rather than x^y. Both passes agree either way, so the check
cannot catch a wrong `phi`. For a prime N, phi = N-1. For RSA, e*d - 1 is a
multiple of phi(N) and can be used instead.

## What the check covers, and what it does not

The two passes share the reduced operands, so the comparison catches:

* any corruption of `x`, `x_enc` or the reduced base in either pass. The
  partial powers then differ, except with negligible probability.
* corruption of the exponent in either pass. This shows up when the low `l`
  bits of the reduced exponent change (the partial powers differ) or when
  its Hamming weight changes (HW differs). A single flipped bit always
  changes the Hamming weight. A multi-bit fault above bit `l` that keeps
  the weight is missed. This is why exponent faults are detected at rates
  slightly below 100%.
* faults in the arithmetic of the first `l` loop iterations of either pass.

It does **not** cover a fault in the multiply or square steps of the first
pass after iteration `l`. Such a fault corrupts the full result but neither
the partial power nor the Hamming weight. The scheme targets faults on the
operands. The arithmetic after bit `l` is protected only as far as its
inputs are.

## Structure

    x ──► base_encoder  (x + k·N) ──┐
                                    ├──► modexp_alg2 ──► result ─────────► result_register ──► result
    y ──► power_encoder (y + k·φ) ──┘      │  mod_reduce ×2   result_partial ┐      ▲
              ▲  k1x/k1y (t1)              │  mod_mult   ×2   hw ────────────┴► fd_comparator
              └─ k2x/k2y (t2)              │                                        │
                                  fd_controller: ENC1 → RUN1 → ENC2 → RUN2 → CMP → DONE

| module | role |
|---|---|
| `modexp_fd_top` | top level: the two-round check around one exponentiation core |
| `fd_controller` | six-phase sequencer; its `round2` output is the t1/t2 switch |
| `base_encoder`, `power_encoder` | `a + k*m`, serial shift-and-add, K_W cycles |
| `modexp_alg2` | right-to-left exponentiation with partial result and Hamming weight |
| `mod_reduce` | serial `a mod m` (restoring), one input bit per cycle |
| `mod_mult` | serial `(a*b) mod m` (interleaved, radix 2), one bit per cycle |
| `fd_comparator` | holds Q1partial and HW1, compares them with Q2partial and HW2 |
| `result_register` | holds Q1, releases it only on a match |
| `modexp_pkg` | default sizes, width helpers, phase enum |

The random coefficients are inputs. How they are generated (a TRNG, a DRBG)
is outside this design. They do not affect the result, only the
diversity between the passes.

## The exponentiation core (`modexp_alg2`)

The core runs the right-to-left binary method. Scanning y from the least
significant bit, every bit squares the base, and a 1 bit also multiplies the
running result by the base:

    result = 1; x = x_enc mod N; y = y_enc mod phi; counter = hw = 0
    while y != 0:
        if y[0]: result = result*x mod N; hw++
        x = x*x mod N; y >>= 1; counter++
        if counter == l: result_partial = result
    (partial pass: stop multiplying once counter == l, keep shifting and counting hw)

Points specific to this implementation:

* The multiply and the square of a bit are independent in the right-to-left
  method. They run in parallel on two `mod_mult` instances, so one exponent
  bit costs one multiplier latency (W+2 cycles including hand-off). The
  multiply runs for 0 bits too and its product is discarded, so every bit
  does the same work.
* In the recomputation pass (`partial = 1`), once `l` bits are done no more
  multiplications start. The remaining bits are shifted out one per cycle,
  so that `hw` is still the weight of the whole reduced exponent.
* If the reduced exponent has fewer than `l` significant bits, the loop ends
  before iteration `l`, and the partial result is taken to be the final
  result. That is the value it would have had after `l` iterations.
* The loop stops when the exponent register reaches zero. The run time
  therefore depends on the bit length of the reduced exponent. Its Hamming
  weight does not affect it.

## Arithmetic units

`mod_mult` computes `(a*b) mod m` MSB-first, Blakley style:
`r = 2r + a_i*b`, followed by at most two conditional subtractions of m.
The remainder stays below m, so the datapath is W+2 bits wide and no
2W-bit product is ever formed. It works for any modulus `m >= 1` (no
odd-modulus requirement as in Montgomery multiplication) and takes exactly
W cycles. This is the simplest correct choice, not a fast one. Replacing
it with a wider or Montgomery multiplier only needs the same
start/busy/done/p interface.

`mod_reduce` reduces the (W+K_W+1)-bit encoded operands with one
conditional subtraction per input bit. The base and the exponent are
reduced in parallel in EW = W+K_W+1 cycles.

The encoders add `k_i * (m << i)` for each set bit of k, always spending
K_W cycles.

## Interface of `modexp_fd_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `start` | in | 1 | one-cycle strobe, accepted when `busy` is low |
| `x`, `y`, `n`, `phi` | in | W | base, exponent, modulus, phi(N); hold for the whole operation |
| `k1x`, `k1y`, `k2x`, `k2y` | in | K_W | random coefficients for pass 1 and pass 2; hold |
| `l` | in | clog2(W+1) | number of recomputed exponent bits (128 is the main setting) |
| `state` | out | 3 | current phase (`fd_state_e`) |
| `busy`, `done` | out | 1 | operation in progress / one-cycle completion pulse |
| `result_valid` | out | 1 | result accepted |
| `result` | out | W | x^y mod N if accepted, else 0 |
| `fault_detected` | out | 1 | comparison failed |
| `q_mismatch`, `hw_mismatch` | out | 1 | which comparison failed |

The outputs are valid from the cycle after `done` until the next `start`.
Each pass re-reads `x`, `y`, `n`, `phi` and its own coefficients, which is
what lets a test model an operand fault by changing an input between passes.
Requirements: `N >= 2`, `phi` nonzero, and `gcd(x, N) = 1` whenever y may
exceed phi.

### Timing

Let W be the operand width, K the coefficient width, EW = W+K+1, b1 and b2
the bit lengths of the reduced exponents of the two passes, and
m2 = min(b2, l). Counting clock edges from the one that samples `start`
through the one after which `done` is high:

    2(K+2) + 2(EW+5) + (b1 + m2)(W+2) + (b2 - m2) + 2

At the defaults (W = 2048, K = 50) and a full-length exponent this is
4 464 983 cycles, of which about 6% is the recomputation pass. The
testbenches check this count exactly.

## Sizes

| parameter | default | note |
|---|---|---|
| `W` (`OP_W`) | 2048 | modulus, base, exponent and phi width |
| `K_W` | 50 | width of the random coefficients |
| `l` | 128 at run time | `L_DEF` in the package; any value 0..W works |
| encoded width | W+K_W+1 = 2099 | enough for any x, k, N |

At the defaults the top has about 54k flip-flop bits, mostly wide operand
registers.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values computed with SystemVerilog wide arithmetic, not with the DUT:

* `tb_mod_mult`, `tb_mod_reduce`, `tb_base_encoder`, `tb_power_encoder`:
  full 2048-bit width, edge cases and random operands, exact latency.
* `tb_modexp_alg2`: 64-bit operands, full and partial mode, l in
  {0, 10, 20, 50, 64}, short exponents, exact cycle count.
* `tb_fd_comparator`, `tb_result_register`, `tb_fd_controller`: decisions,
  strobes and phase order.
* `tb_modexp_fd_top`: end to end at 64 bits. Moduli are RSA-style products
  of two primes and prime powers. Scenarios: clean runs (checked against
  x^y mod N from the unreduced exponent), base faults, exponent faults above
  and below bit `l` (the former caught only by the Hamming weight), and
  first-pass faults (result must be withheld). Each mechanism must occur.
* `tb_modexp_fd_full`: all defaults (2048 bits, l = 128), one clean and one
  faulty operation, N = 3^1292. It takes about 20 s.
* `tb_fault_coverage`: the four fault models (total random, single bit,
  k-bit random and k-bit burst with k = 3, 5, 15) on the base or the
  exponent of the first pass, for l = 10, 20, 50, at 128 bits. Two moduli
  are used: the prime 2^127-1 and (2^89-1)(2^31-1). It also runs combined
  faults: both operands of pass 1, both of pass 2 (detected even though the
  released result would have been correct), and all four. For every
  operation it checks that the decision matches the prediction from the
  values each pass used, and it prints the detection rate per group.

Run any of them with verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/modexp_pkg.sv \
        tb/tb_modexp_fd_top.sv --top-module tb_modexp_fd_top -o sim
    ./obj_dir/sim

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
The testbenches draw random values with `$urandom` and need no data files.

## Where this RTL departs from, or goes beyond, the scheme as published

* Only the partial-recomputation scheme is built. The full-recomputation
  variant (compute twice, compare full results) and the unprotected
  exponentiator are references, not part of this design.
* The modular multiplier, the reducers, the encoder datapaths, the
  sequencer and all handshakes are this design's own choices. The
  published description gives their functions only.
* Published FPGA latencies of about 1080 cycles cannot be compared with
  this bit-serial datapath (about 4.5 M cycles at 2048 bits). The operand
  width of those runs is not stated, and the multiplier behind them is not
  described.
* The recommended `l` is given both as 12% of the exponent size and as 128
  (6.25% of 2048). Here `l` is an input, and 128 is used as the main
  setting.
* A rejected result is forced to zero. The published diagram only shows the
  release path.
* The Hamming weight in the recomputation pass is counted over the whole
  reduced exponent without multiplying past bit `l`. This matches the
  quantity the scheme compares (the weight of y mod phi(N)), not the
  literal loop.
* The partial result for exponents shorter than `l` is defined (see above).
  The literal algorithm leaves it unset.
