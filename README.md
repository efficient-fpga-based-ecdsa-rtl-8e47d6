# ECDSA P-256 verification engine with per-key precomputation

In a permissioned blockchain such as Hyperledger Fabric, every transaction carries ECDSA
signatures. Checking them is the most expensive part of validating a block. The network is
closed, though: only a few tens of identities (public keys) ever sign, and each key is known long
before most of its signatures arrive. This design uses that fact. When a key first appears, a
precompute block builds a table of the multiples `2^(4i) * K` for `i = 0..64` and stores it on
chip. The generator `G` gets the same table once after reset. A verification then needs
`u1*G + u2*K`, and with both tables this costs only point additions: every point doubling has
moved into the one-off precompute step.

The RTL verifies standard NIST P-256 signatures end to end. In simulation a verification takes
67,000 to 71,000 clock cycles and a key registration about 120,000 cycles. Registration runs
alongside verifications that use other keys. A second, generic engine verifies signatures under
keys that have no table yet, using simultaneous point multiplication, in about 175,000 cycles.

## Verification flow

For a signature `(r, s)` on a 256-bit hash `z` and a registered key `K`, `ecdsa_engine` runs:

1. Range check: `r` and `s` must lie in `[1, n-1]`. Otherwise it answers `range_err` after
   2 cycles.
2. `w = s^-1 mod n` (`mod_inv` with modulus `n`).
3. `k2 = r*w mod n` (integer multiplier + Barrett reduction).
4. `k1 = z*w mod n`. The NAF of `k2` is computed at the same time.
5. `k2*K` by fixed-base NAF windowing over K's table. The NAF of `k1` is computed at the same
   time.
6. `k1*G` by the same method over G's table.
7. One point addition.
8. Affine x: `x = X * (Z^2)^-1 mod p`. This is one inversion modulo `p` and one
   multiplication.
9. Accept if `x mod n == r`.

All steps share a single field ALU, point unit and inverter, so the engine stays small. Several
engines can then sit side by side in a larger validation pipeline. The two NAF converters are the
only units that run alongside the shared ones.

## Fixed-base NAF windowing

This is the part that replaces the usual double-and-add loop, and it is the least obvious.

The scalar `k` is recoded into non-adjacent form (NAF) by `naf_conv`: digits in {-1, 0, 1}, no
two adjacent digits non-zero, at most 257 digits. The digits are grouped four at a time into
window values:

    k_i = d(4i) + 2 d(4i+1) + 4 d(4i+2) + 8 d(4i+3),   k = sum_i k_i 2^(4i)

In a NAF, a 4-digit window lies in [-10, 10]. With the stored points `P_i = 2^(4i) P`:

    A = O, B = O
    for j = 10 down to 1:
        for each i with k_i ==  j:  B = B + P_i
        for each i with k_i == -j:  B = B - P_i
        A = A + B
    return A                         (= k * P)

Each `P_i` is therefore counted `|k_i|` times. Subtracting a table point only negates its `Y`,
which the point unit does when its `neg2` input is set.

For a random 256-bit scalar this takes about 50 additions into `B` and up to 10 into `A`. The
scan reads one window per cycle. A match reads `P_i` from the storage (one-cycle latency) and
starts the addition. The point at infinity is carried as a flag beside each point, so the
first addition into an empty `B` or `A` is a plain copy.

## Point arithmetic (`point_unit`)

Points are kept in Chudnovsky projective coordinates `(X, Y, Z, Z^2, Z^3)`. The affine point is
`(X/Z^2, Y/Z^3)`. Carrying `Z^2` and `Z^3` saves multiplications in mixed additions.

- **Addition** costs 14 modular multiplications and 7 additions/subtractions.
- **Doubling** uses `a = -3`, so `M = 3X^2 - 3Z^4`. It costs 10 multiplications and
  15 additions/subtractions.

The unit is a small micro-programmed machine. It has a 32-entry register file and issues one
field operation at a time to the shared field ALU. Each micro-instruction names an operation,
a destination and two sources.

The unit handles the special cases itself:

- If either input is infinity, it returns the other point.
- After `H = U2 - U1` and `R = S2 - S1` it checks for the two special inputs:
  - `H = 0` and `R != 0` means `P + (-P)`, and the result is infinity.
  - `H = 0` and `R = 0` means the two points are equal. The unit jumps to the doubling
    micro-program and pulses `eq_dbl`.

Measured latencies are 476 cycles per addition and 460 per doubling.

## Modular arithmetic (`field_alu`)

`field_alu` puts one copy of each unit behind a single `start/op/done` port:

| op | result | units used | cycles |
|---|---|---|---|
| `ALU_MULP` | `a*b mod p` | `int_mult` + `p256_red` | about 25-35 |
| `ALU_MULN` | `a*b mod n` | `int_mult` + `barrett_red` | about 90 |
| `ALU_SUB` | `a-b mod p` | `mod_sub` | 10 |
| `ALU_ADD` | `a+b mod p` | `mod_sub` in add mode | 10 |

### `int_mult`

Schoolbook multiplication over eight 32-bit words. Each 32x32 word product is one
Karatsuba-Ofman step on 16-bit halves, which maps each product onto DSP-sized multipliers. The
inner loop is unrolled: one row of eight products is registered per cycle and added into a
512-bit accumulator the next cycle. A result takes 11 cycles.

### `p256_red`

Reduction modulo `p = 2^256 - 2^224 + 2^192 + 2^96 - 1` uses the generalized-Mersenne identity

    c mod p = s1 + 2 s2 + 2 s3 + s4 + s5 - s6 - s7 - s8 - s9

where the `s_j` are 256-bit words rearranged from the 32-bit words of `c`. The unit applies one
term per cycle. Between terms it corrects the partial result by adding or subtracting `p` until
it lies in `[0, p)`. A single correction per term is not always enough, so the loop repeats
until the value is in range. That takes 12 to 22 cycles, about 15 on average.

### `p256_cmp`

The "`>= p`" test uses no 256-bit comparator. `p` splits into four fields with trivial values
(all ones, zero, one, all ones), so the test is a few AND/OR reductions and one 32-bit compare.

### `barrett_red`

Reduction modulo the group order `n` uses Barrett's method with base 4 and `k = 128`:

    q1 = z >> 254
    q3 = (q1 * mu) >> 258
    r  = (z - q3*n) mod 2^258
    r  = r - n  (at most twice, while r >= n)

Here `mu = floor(4^256 / n)`. Both 258-bit products are formed word by word, as 6 x 6 words of
43 bits, on one `mult43`. `mult43` is a 43x43 multiplier split as 11 + 32 bits. Its 32x32 part is
one Karatsuba step, so every product fits a 27x18 DSP slice. A reduction takes about 80 cycles.

### `mod_sub`

Subtraction is word-serial: one 32-bit word and its borrow per cycle, then one correction.
A final borrow adds `p` back. Addition reuses the same chain with the second operand
complemented, and subtracts `p` if the 257-bit sum is `>= p`. Both take 10 cycles.

### `mod_inv`

Inversion is a binary extended Euclid algorithm that takes the odd modulus as an input. One unit
therefore serves both `s^-1 mod n` and the final `(Z^2)^-1 mod p`. It uses only shifts,
additions and subtractions. Halving modulo `m` is `(x >> 1) + (m >> 1) + 1` for odd `x`, which
stays within 256 bits. It takes about 530 cycles on average and at most about 600.

## Precompute block and point storage

`precompute` has its own field ALU, without a Barrett unit, and its own point unit.

- **Building a key's table.** It starts from the affine key as `(x, y, 1, 1, 1)`. It writes
  `P_0`, then doubles four times to reach each next `P_i` from the previous one. 64 steps of
  four doublings fill the 65 entries. A key takes about 119,900 cycles.
- **Building G's table.** After reset the block first builds G's table into slot 0 and raises
  `g_ready`. No initialisation data is needed.

`points_mem` holds complete points (1280 bits each), in 65 points per slot:

| Slots | Size |
|---|---|
| G + 1 key | 20.8 KB |
| G + 16 keys (the default, `KEY_SLOTS = 16`) | 176.8 KB |

It has one synchronous write port for the precompute block and one synchronous read port for
the engine.

## Generic engine (`spm_engine`)

A key seen for the first time has no table yet. The generic engine verifies such a signature
directly from the affine key `Q`, at about 2.5 times the cost. It uses the same front end as
the table-based engine: range check, `w`, `k1`, `k2`. Then:

1. It builds the odd multiples `1P, 3P, 5P, 7P` of `G` and of `Q` in registers. Each base point
   takes one doubling and three additions (`3P = P + 2P`, `5P = 3P + 2P`, `7P = 5P + 2P`).
2. It recodes `k1` and `k2` into width-4 NAF. Digits lie in {0, +-1, +-3, +-5, +-7}, and any
   four consecutive digits hold at most one non-zero digit.
3. It walks the digits from the most significant one with Shamir's trick:

       A = 2A
       if d1 != 0: A = A +- |d1| G
       if d2 != 0: A = A +- |d2| Q

   One chain of 256 doublings thus serves both scalars. About 100 additions are needed.

Doublings of a still-empty accumulator are skipped. A verification takes 172,000 to 177,000
cycles.

## Top level (`ecdsa_fabric_top`)

The top connects the precompute block, the storage and the table-based engine. The generic
engine sits beside them with a port of its own. The top has three ports.

**Key port** (`key_start`, `key_slot`, `key_x`, `key_y`):
- A key is accepted while `key_ready` is high.
- `key_done` pulses when its table is stored.
- `key_busy` is high while the G table or a key table is being built.

**Verify port** (`ver_start`, `ver_slot`, `ver_r`, `ver_s`, `ver_z`):
- A request is accepted while `ver_busy` is low and `g_ready` is high.
- `ver_done` pulses with `ver_valid`.
- `ver_range_err` marks a signature rejected by the range check.
- `ver_eq_dbl` pulses whenever an addition met two equal points.

**Generic port** (`gen_start`, `gen_qx`, `gen_qy`, `gen_r`, `gen_s`, `gen_z`):
- A request is accepted while `gen_busy` is low, even before G's table exists.
- `gen_done` pulses with `gen_valid`; `gen_range_err` and `gen_eq_dbl` work as on the verify
  port.

All pulses last one cycle. Reset is asynchronous and active low. A slot must not be re-registered
while a verification uses it.

The network, packet parsing, hashing and block-level pipeline around the engine are not part of
this RTL. The hash `z` is an input.

## Where the design departs from the published one

- **G table built on chip.** The original design loads the G table precomputed offline. Here the
  precompute block builds it after reset, so the first verification waits about 120,000 cycles.
- **256 doublings per table.** The count quoted for the original is 252; 64 steps of 4 doublings
  are 256.
- **Modular inverse.** The original uses a published shift-and-add inversion algorithm whose
  steps are not given. This design uses a binary extended Euclid with the same properties:
  modulus as an input, shifts and additions only, similar latency.
- **Barrett reduction.** The standard form of the algorithm is used. The printed first step
  does not give `floor(z / b^(k-1))`.
- **P-256 reduction** repeats its correction step where one correction is not enough.
- **Latencies.** Integer multiply is 11 cycles (published: 39). Barrett reduction is about 80
  cycles (published: 1,552), since its schedule is not described. Point addition is 476 cycles
  (published: 622). Point doubling is 460 (published: 435). Verification is 67k-71k cycles
  (published: about 92k).
- **Fewer DSP slices.** This design does not model pipelined DSP slices, so it uses fewer,
  wider combinational multipliers than a real FPGA mapping would.
- **Both engines in one top.** The two engines were evaluated as alternatives. Here they share
  one top, and the generic one serves keys without a table. Its latency is 172k-177k cycles
  (published: about 190k).
- **Not included.** The surrounding blockchain accelerator is not included: network interface,
  packet parsing, hashing and the block validation pipeline.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. Reference values were computed with an independent software
model of P-256. For example, with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/p256_pkg.sv \
        tb/tb_ecdsa_fabric_top.sv --top-module tb_ecdsa_fabric_top -o sim && ./obj_dir/sim

`tb_ecdsa_fabric_top` runs the top at its default parameters, in about a minute of wall time
(about 1.1 million cycles). It:

- builds G's table;
- registers two random keys and `G` itself;
- verifies two signatures with the generic engine while G's table is still being built;
- accepts four valid signatures with the table-based engine;
- rejects a signature checked against the wrong key and one with a changed hash;
- rejects `r = n` by the range check;
- verifies a signature whose final addition adds two equal points (`z = r` with key `G`), which
  exercises the doubling fallback.

It also checks that each of these mechanisms happened, that a verification can overlap a key
registration, and that latencies lie in the expected range.

The block testbenches compare against randomised reference models:

- `tb_p256_cmp`, `tb_mult43`, `tb_int_mult`, `tb_p256_red`, `tb_barrett_red`, `tb_mod_sub`,
  `tb_mod_inv` and `tb_field_alu` check each arithmetic unit, and its latency where one is
  quoted.
- `tb_point_unit` uses known multiples of `G`.
- `tb_precompute` uses a small table (`NPTS = 3`).
- `tb_ecdsa_engine` runs the engine with `G` as the key.
- `tb_spm_engine` runs the generic engine on valid, forged, out-of-range and equal-point cases.
