# Encrypted feedback control on Paillier ciphertexts

This RTL implements a feedback controller that never sees the signals it
controls. The plant's sensor readings are encrypted with the Paillier
public-key scheme before they leave the plant. The controller evaluates a
linear dynamic control law directly on the ciphertexts. The resulting
encrypted control input is decrypted only at the actuator. Paillier is
additively homomorphic:

* multiplying two ciphertexts (mod N^2) adds their plaintexts;
* raising a ciphertext to a plaintext integer power multiplies its
  plaintext by that integer.

So a matrix-vector product with plaintext coefficients and encrypted
vectors becomes a set of modular exponentiations whose results are
multiplied together. The whole design rests on one arithmetic unit, a
Montgomery exponentiator, with three small engines sequencing it. Every
latency is deterministic: it depends on sizes, never on data.

The default configuration is a balance controller for a rotary inverted
pendulum:

* 256-bit key N;
* 4 controller states, 3 measured outputs, 1 control input;
* plaintexts in Z_2^32 (n' = 32) with 7 fractional bits (m = 7).

## The control law and its encoding

The plaintext controller is

    x[k+1] = A x[k] + B (s[k] - y[k])    if (k+1) mod T != 0
    x[k+1] = 0                           if (k+1) mod T == 0
    u[k]   = C x[k]

Here `s` is the setpoint and `T` the reset period. The state must be reset
periodically because every multiplication on encrypted fixed-point numbers
adds fractional bits, and bits cannot be truncated under encryption.

Values are fixed-point numbers mapped into the ring Z_2^n'. The
coefficients are plaintext integers `a_hat`, `b_hat` and `c_hat`, each n'
bits. The B coefficients must carry the growing scale of the state. The
controller therefore uses `B[k] = b_hat << ((k mod T) m) mod 2^n'`, where
`b_hat = 2^m B`. With `t_period = 0` there is no reset and B stays
constant. That is the pendulum configuration: its state is only a delay
line, so it never accumulates.

The encrypted law is:

    e_j  = y_j^(2^n' - 1) * s_j                         (s - y, since 2^n'-1 == -1)
    x'_i = prod_j x_j^A_ij * prod_j e_j^B_ij[k]        (mod N^2)
    u_i  = prod_j x_j^C_ij

All ciphertexts are kept in Montgomery form, as c*R mod N^2. A reset writes
`R mod N^2`, the Montgomery form of E(0) with r = 1.

The decrypted control input is the low n' bits of the plaintext. Read as a
two's-complement number, it is the control value scaled by 2^m or by
2^((k mod T + 2)m). Rounding and clamping to the actuator range happen
outside this RTL.

## Montgomery arithmetic (`mont_mult`, `mont_exp`)

**Radix.** One radix, R = 2^(16(w+1)), is used everywhere. Here w is the
number of 16-bit words needed for the largest modulus, N^2 + 2. For a
256-bit key, w = 32, so every operand register is 528 bits wide.

**`mont_mult`** is the modified CIOS Montgomery multiplication with 16-bit
words. In each clock cycle it multiplies all of X by one 16-bit word of Y
and reduces the sum:

    Z = X * y_i
    m = (T + Z) * M' mod 2^16
    T = (T + Z + m M) / 2^16

After w+1 words, T = X Y R^-1 mod M, with T < 2M. The final conditional
subtraction is left out. That is safe because R > 4M: any output below 2M
can feed the next multiplication. The extra M disappears only at a final
Montgomery multiplication by 1, which the engines perform wherever a value
must leave Montgomery form.

The multiplier's modulus is chosen per operation from three:

| `mod_sel`  | modulus   | use                                   |
|------------|-----------|---------------------------------------|
| `MOD_N2`   | N^2       | all ciphertext arithmetic             |
| `MOD_N2P2` | N^2 + 2   | the exact division by N in decryption |
| `MOD_N`    | N         | the multiplication by mu              |

The latency is w+2 cycles: one load cycle and w+1 word steps.

**`mont_exp`** uses right-to-left binary exponentiation with two
multipliers working side by side. In every iteration one multiplier squares
the base, `B <- B*B`. The other forms `P*B`. A multiplexer, driven by the
low bit of the exponent shift register, decides whether that product
replaces the power register P. Both products are computed in every
iteration, so an l-bit exponent always takes `1 + l(w+3)` cycles.

The same unit performs single Montgomery products (`op = OP_MULT`, w+4
cycles) on its second multiplier. This lets each engine own exactly one
arithmetic resource. The exponent length is given per operation:

* the plant interface uses 256-bit exponents (N and lambda);
* the controller uses 32-bit exponents (its coefficients).

## Plant interface (`plant_interface`)

One exponentiator and one control FSM handle three operation sequences.

**r^N.** `z_i = MontExp(r_i, N)`. The random r_i is deliberately *not*
converted to Montgomery form. Treating it as the Montgomery form of
r' = r R^-1 gives r'^N in Montgomery form. Because r -> r R^-1 mod N is a
bijection, r' is as uniformly random as r.

**Encryption.** This uses (N+1)^y = 1 + N y (mod N^2), so no exponentiation
by y is needed:

    v   = MontMult(N R mod N^2, y)         = N y
    v   = MontMult(v + 1, R^2 mod N^2)     = (1 + N y) R
    c   = MontMult(z, v)                   = E(y) R

**Decryption** computes L(c^lambda mod N^2) mu mod N, with L(u) = (u-1)/N.
The division by N is done exactly, as a multiplication by N^-1 modulo
N^2 + 2. That modulus is odd, coprime with N and larger than the quotient.

    t = MontExp(c, lambda);          t = MontMult(t, 1)          mod N^2
    t = MontMult(t - 1, N^-1 R^2);   t = MontMult(t, 1)          mod N^2+2
    t = MontMult(t, mu R^2);         t = MontMult(t, 1)          mod N
    u = t mod 2^n'

**Scheduling** works in this order:

1. A pending decryption runs first.
2. Next, a pending sample is encrypted, if its r^N values are ready.
3. r^N for the next sample is computed only once the current sample's
   control input has been decrypted (or before the first sample).

Rule 3 lets the longest job, NY exponentiations with 256-bit exponents,
overlap the controller's state update. It never delays an actuation.

Each vector element is processed in turn. All key-dependent constants are
inputs, computed off-chip once per key:

* R, R^2 and N R mod N^2;
* N^-1 R^2 mod (N^2+2);
* mu R^2 mod N;
* M' for each modulus.

## Controller (`secure_controller`)

Each arriving vector of encrypted outputs starts one step:

1. **Control output.** u = C x is computed first and sent at once. It
   depends only on x[k].
2. **Errors.** The encrypted errors e_j are formed.
3. **State update.** Each state row is computed as a running product of
   NX + NY exponentiations. On a reset step, steps 2 and 3 are skipped and
   the state becomes E(0).

The new state is committed only when all rows are done, because every row
reads the old state. The exponentiator's base multiplexer selects among:

* the state register;
* the received sensor ciphertext;
* the encrypted setpoint;
* the error.

With E = 2 + n'(w+3) and M = w+5, the cycle cost of one exponentiation and
of one product including issue:

* control output: `1 + NU(NX E + (NX-1) M)` cycles after the sample arrives;
* rest of the step: a further `NY(E + M) + NX((NX+NY)E + (NX+NY-1)M)` cycles.

At the defaults these are about 4.6k and 36k cycles.

## Top level and network (`encrypted_control_top`, `network_link`)

The top wires the loop:

    plant interface (encrypt) -> network link -> controller -> network link -> plant interface (decrypt)

The `network_link` is a stand-in for an unspecified network: a
fixed-latency register pipeline (`NET_LAT` = 4 cycles) carrying whole
ciphertext vectors. Only ciphertexts cross it.

These enter as ports:

* random numbers (`rnd_valid/rnd/rnd_ready`; a hardware RNG is not part of
  this RTL);
* encrypted setpoints `sct`;
* the key constants;
* the coefficient matrices.

The sampling period must cover:

* encryption;
* two network latencies;
* the controller's whole step;
* decryption.

A sample reaching a busy controller is flagged by an assertion. At the
defaults, the sample-to-actuation latency is 14,092 cycles. The controller
step, about 40k cycles, and the plant interface's r^N precomputation,
about 27k cycles, running in parallel set the minimum sampling period. At
100 MHz that would be well under 1 ms.

## How far it follows the source design, and where it departs

Taken from the published design:

* the CIOS multiplier;
* the two-multiplier exponentiator;
* the operation sequences for encryption, r^N, decryption, control output
  and state update;
* the three moduli;
* the reset to E(0);
* the sizes of the pendulum experiment.

Chosen here:

* one word per clock cycle in the multiplier, and every cycle count;
* the start/done handshakes;
* the priority order in the plant interface;
* the running-product summation (a parallel tree is possible but not
  built);
* moduli and key constants as inputs rather than hard-wired constants;
* E(0) as the state after reset;
* the network latency.

The published state-update description uses the new state as the base of
the A-term exponentiations. This RTL uses the old state, as the control law
requires.

Only the sequential configuration is built: one exponentiator per engine.
The parallel variant, with n_u or n_x exponentiators and a product tree, is
not. Setpoints are taken already encrypted; the source experiment instead
encrypted them inside the controller with r = 1.

## Simulating

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` is an independent
reference. It implements textbook Paillier with plain wide-integer `%` and
`/`, and derives every key constant from two primes. For example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
        rtl/paillier_pkg.sv tb/tb_ref_pkg.sv tb/tb_encrypted_control_top.sv \
        --top-module tb_encrypted_control_top
    ./obj_dir/Vtb_encrypted_control_top

The testbenches:

* `tb_mont_mult`, `tb_mont_exp`, `tb_plant_interface` and
  `tb_secure_controller` use a 64-bit key for speed.
* `tb_encrypted_control_top` runs the default 256-bit, pendulum-sized
  design end to end in a few seconds. It closes the loop with a toy plant
  model.

The top testbench checks every decrypted control input exactly against a
plaintext model in Z_N. It also checks that the latency is the same for
every sample. It confirms that r^N overlapped the controller, that reset
steps and scaled B[k] occurred, and that the no-reset mode ran.

To change the key length, set `KEY_BITS`. Everything else scales: with
KEY_BITS = 512, w = 64 and operands are 1040 bits. A smaller key also runs
on the 256-bit build, because R stays above 4M, but it takes the full
256-iteration exponentiation time.
