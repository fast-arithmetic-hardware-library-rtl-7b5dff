# RNS arithmetic for the FV homomorphic encryption scheme

FV ("Fan–Vercauteren") is a lattice-based homomorphic encryption scheme. A ciphertext is a pair of
polynomials of degree below N = 1024, and each coefficient is an integer modulo a 1200-bit
number Q. Adding two ciphertexts, multiplying them, decrypting, and relinearising a product all
come down to five kinds of arithmetic:

- big-integer modular additions;
- polynomial products in Z_Q[x]/(x^N + 1);
- bit decompositions;
- scaled roundings;
- a few constant multiplications.

Working on 1200-bit numbers directly would need huge multipliers. This design sidesteps that with
a residue number system (RNS). Q is chosen as the product of K = 40 primes q_i of 30 bits each.
Every coefficient is cut into its 40 residues x mod q_i, and the polynomial arithmetic then runs
in 40 identical, independent 30-bit lanes. Only at the edges is there 1200-bit logic:

- the RNS split at the input;
- the Chinese-remainder recombination (CRT) at the output;
- the message encoding t·m, and the decoding that rounds u/t to a bit;
- the divide-and-round step of the second relinearisation method.

The SystemVerilog in `rtl/` builds this library of units and one top, `he_accel`, that chains
them: RNS split → 40 lanes → CRT → decode/round. `tb/` has a self-checking testbench for every
unit and two for the whole accelerator.

## Numbers everything depends on

| symbol | value | where set |
|---|---|---|
| N | 1024 (ring degree) | `he_pkg::N`, parameter `N` |
| K | 40 moduli | `he_pkg::K` |
| QW | 30 bits per residue | `he_pkg::QW` |
| BW | 1200 bits per full coefficient | `K*QW` |
| t | floor(Q/2) (plaintext scale, binary messages) | `he_accel` |
| L | 30 key powers for relinearisation v1 (base T = 2) | `he_lane` |
| p | 2^90 for Div&Round (`DR_SHIFT`) | `he_accel` |

The moduli are the 40 largest primes below 2^30 with q ≡ 1 (mod 2048). That congruence makes
every lane NTT-friendly for N = 1024: it guarantees a primitive 2N-th root of unity psi. The
product of these primes is exactly 1200 bits wide. `he_pkg` lists the primes and one psi per
prime. Every other constant is derived from those two tables at elaboration time by constant
functions:

- Barrett factors;
- N^-1, psi^-1 and omega = psi²;
- fold constants 2^(30j) mod q_i;
- the CRT constants c_i = (Q/q_i)·((Q/q_i)^-1 mod q_i).

No table files are read. The primes and roots were found off-line by searching upward from
2^30 - 2047 in steps of 2048 and testing for primality. psi is g^((q-1)/2048) for the first g
that gives psi^1024 ≡ -1.

## Entering and leaving the residue domain

**RNS split** (`rns_parallel`, `rns_serial`). A reduction x mod q_i of a 1200-bit x is done by
folding, not by a wide divider:

1. Split x into forty 30-bit chunks x_j.
2. Form the sum of x_j·(2^(30j) mod q_i). This is below 40·2^60.
3. Reduce that sum with one Barrett reduction.

Every multiplier is therefore 30×30 bits with one constant input.

- `rns_parallel` has one such unit per modulus. It accepts a coefficient every clock, with a
  latency of 2.
- `rns_serial` shares one unit, takes one modulus per clock, and delivers all 40 residues K+1
  clocks after acceptance.

**CRT** (`crt_lut`, `crt_regular`, both around the shared datapath `crt_combine`). The result is
x = Σ a_i·c_i mod Q.

1. The datapath captures the 40 residues.
2. It multiplies one residue by its 1200-bit constant each clock and adds the product into an
   accumulator (40 clocks).
3. The sum is below 40·2^30·Q, so the quotient by Q has at most 37 bits. It is removed by
   restoring subtraction of Q·2^b, one bit per clock (37 clocks).

One coefficient takes K + 37 + 1 = 78 clocks. The two versions differ in where the constants come from:

- In `crt_lut` the constants are a ROM computed at elaboration.
- In `crt_regular` a generator runs after reset. For each i it multiplies up Q/q_i and
  (Q/q_i) mod q_i, obtains the inverse from a modular-inverse unit, and writes c_i into a
  register file. It then raises `ready`. The inverse unit is `mod_inv_eea` by default or
  `mod_inv_fermat` with `FERMAT=1`.

**Modular inverse.**

- `mod_inv_fermat` computes a^(q-2) by left-to-right square-and-multiply on one shared
  multiply-plus-Barrett unit. That is at most about 2·30 clocks.
- `mod_inv_eea` runs the extended Euclidean algorithm, one quotient step per clock. It returns
  the Bézout coefficient of a, brought into [0, q).

## Inside a lane

`he_lane` holds, for one modulus:

- operand stores for a, d and the result;
- the relinearisation key store rlk[L][N];
- a polynomial multiplier (`poly_mul`);
- a polynomial adder (`poly_add`);
- a key generator (`powers_of2`);
- a key applier (`inner_product`).

The lane is the same design for all 40 moduli. Its constants (q, Barrett factor, psi, omega, their
inverses, N^-1, and the modified-Barrett pair k, r) are static inputs, tied off by the top from
`he_pkg::lane_consts`.

### The negacyclic product

Products in Z_q[x]/(x^N+1) use the "negative wrapped convolution":

1. Weight a_j and b_j by psi^j.
2. Transform both with an NTT of length N (root omega = psi²).
3. Multiply point-wise.
4. Transform back with omega^-1.
5. Weight coefficient j by psi^-j·N^-1.

The wrap-around sign of x^N = -1 is then automatic.

`poly_mul` instantiates three `ntt` blocks: two forward transforms in parallel and one inverse.
It computes the weights as running products, so no weight table exists. Its timing is:

| phase | clocks |
|---|---|
| load (weights applied on the fly) | N |
| forward NTTs | N·log2 N, plus N/2 the first time a modulus is used, to fill the twiddle table |
| point-wise product | N |
| inverse NTT | N·log2 N |
| output | N |

For N = 1024 that is 23,552 clocks, plus 512 once.

`ntt` is the in-place iterative transform:

- Coefficients written in natural order land at their bit-reversed address.
- Stage s walks i = 0..N-1, one per clock.
- The butterfly partner is i ^ (1<<s).
- The twiddle index is ((i << (log2N - s)) mod N) >> 1.
- When bit s of i is 0, the butterfly A[i], A[i^(1<<s)] = A[i] ± A[i^(1<<s)]·omega^k is applied.
- Both modular corrections are a compare and select.

The store is a register array with two reads and two writes per clock, so one butterfly per clock
needs no memory banking. The twiddle table omega^k (k < N/2) is filled by repeated multiplication
and kept while omega and q stay the same. A transform is N·log2 N = 10,240 clocks.

### Reductions

`mod_mul` multiplies two residues and applies `barrett_reduce`. That is the classic Barrett
reduction with mu = floor(2^60/q):

1. Estimate the quotient as (a·mu) >> 60.
2. Subtract the estimate times q.
3. Correct twice by a conditional subtraction. Two are needed because a floor-based mu on a
   60-bit input can leave the estimate two short.

`mod_barrett_reduce` is the single-fold variant, with k = floor(log2 q / 2) = 14 and
r = ceil(2^(3k)/q):

1. Estimate the quotient as ((a >> 2k)·r) >> k.
2. Apply one signed correction.

It is valid for a < 2^(3k). It is used where the operand is a short sum of residues, namely the
accumulator of `inner_product`.

### Relinearisation, version 1

Relinearisation works with base T = 2 and L = 30 key powers.

**Key generation** is one OP_KEYGEN followed by one OP_KEYMASK per power:

1. OP_KEYGEN stores s² per coefficient.
2. `powers_of2` produces 2^i·s² mod q by shifting and one Barrett reduction.
3. Each OP_KEYMASK adds a mask polynomial d to rlk[i], for example -(a_i·s + e_i) computed by
   earlier MAC operations.

**OP_RELIN** applies the keys:

1. `inner_product` walks the 30 bits of the c2 residue.
2. For each bit that is 1, it adds rlk[i] without reduction.
3. It reduces the sum once.
4. The result is added to d.

Here the bit decomposition is just bit selection. It is taken per residue and coefficient by
coefficient.

## The 1200-bit edge stages

Each of these is a one-clock registered stream unit:

- `scalar_mul` encodes a message bit as t·m, by selecting t or 0.
- `scalar_div` decodes a coefficient u to the bit m = (|u - t| < t/2), with no division.
- `div_round` computes round(x / 2^s) = (x + 2^(s-1)) >> s.
- `poly_add` is the modular adder used inside the lanes.

## Using the top

`he_accel` is driven by commands. A command is `cmd_op`, plus `cmd_pass` for OP_KEYMASK and the
flags `cmd_enc`, `cmd_dec` and `cmd_divr`. It is accepted when `cmd_valid` and `cmd_ready` are both
high. The N input triples (a_j, b_j, d_j), and a message bit m_j for encoding, follow on
`in_valid`/`in_ready`. Results stream out on `out_valid`, with no back-pressure, and `done`
closes the operation.

| op | lane result per residue |
|---|---|
| OP_ADD | a + d |
| OP_MAC | a·b + d in Z_Q[x]/(x^N+1) |
| OP_RELIN | d + Σ_i bit_i(a)·rlk[i] |
| OP_KEYGEN | rlk[i] = 2^i·a (a = s²), no output |
| OP_KEYMASK | rlk[pass] += d, no output |

The flags work as follows:

- `cmd_enc` replaces d by t·m_j before the split.
- `cmd_dec` adds the decoded bit on `out_m`.
- `cmd_divr` outputs round(c/2^DR_SHIFT) instead of c.

Homomorphic addition is one OP_ADD per ciphertext component. A product is OP_MACs. Decryption is
one OP_MAC of (c1, s, c0) with `cmd_dec`. Encryption is OP_MACs with the public key and noise
polynomials, plus `cmd_enc`.

An operation passes through three phases one after another. Measured at the defaults for a
decryption:

| phase | clocks |
|---|---|
| input (three RNS conversions per coefficient) | about 9.6 per coefficient |
| lane multiply | 24,064 |
| output (CRT 78, plus 2) | about 80 per coefficient |

The total is 115,722 clocks for N = 1024.

Parameters `RNS_SERIAL`, `CRT_REGULAR` and `INV_FERMAT` select the alternative library units.
The defaults are the parallel RNS and the ROM-based CRT.

## Where this departs from the published library, and how far to trust it

- **Moduli, psi and p.** The published description fixes only the sizes (40 × 30 bits, N = 1024).
  The primes, roots and p = 2^90 are this design's.
- **RNS reduction.** The split folds 30-bit chunks with constants, then uses one Barrett
  reduction. It does not run Barrett on the 1200-bit value.
- **Barrett corrections.** Classic Barrett keeps a second correction. Modified Barrett has an
  explicit input range (a < 2^(3k)) and a two-sided correction.
- **Euclid's inverse** returns the coefficient of a. A literal reading of the usual listing
  returns the coefficient of q.
- **CRT timing.** The CRT's final mod-Q reduction is sequential, so its latency is 78 clocks per
  coefficient.
- **NTT timing.** The NTT is one butterfly per clock with a 2-read/2-write register store. That
  gives 10,240 clocks per transform and 23,552 per product, close to the published figures.
- **Relinearisation v1** is applied lane by lane, coefficient by coefficient. It follows the
  selection-and-add circuit, not a ring product of key and digit polynomials.
- **Relinearisation v2** is incomplete. Its products over the larger ring modulo p·Q are not
  built; only the Div&Round stage exists (`cmd_divr`).
- **Outside the design.** The Gaussian noise sampler, the TRNG and the client/cloud link are
  not part of it. Random polynomials enter as ordinary operands.
- **Scheduling.** There is no overlap between operations and no controller for longer circuits.
  Depth-56 evaluations or a logistic-regression prediction have to be sequenced from outside,
  with ciphertexts stored outside between operations.

What the tests establish:

- Every unit is compared against an exact reference computed in the testbench (big-integer or
  64-bit modular arithmetic) on random and corner-case inputs. Each published cycle count that
  the design matches is checked.
- Each unit's testbench was also run against a deliberately broken copy of the unit and reported
  failures.
- `tb_he_accel` (N = 16, all 40 lanes, full 1200-bit Q) runs the whole flow:
  - addition with a wrap past Q;
  - a negacyclic MAC;
  - encoding;
  - a real decryption of a ciphertext built from a secret, a message and noise;
  - Div&Round;
  - key generation with 30 mask passes;
  - relinearisation.

  It counts each of these and fails if one never ran.
- `tb_he_accel_full` runs a decryption at the default sizes (N = 1024). It checks all 1024
  coefficients and message bits.

## Simulating

Everything is plain IEEE 1800-2017. The package must be read first; all other files are found by
name:

```
verilator --binary -y rtl rtl/he_pkg.sv tb/tb_ntt.sv --top-module tb_ntt
./obj_dir/Vtb_ntt
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself, with a watchdog
against hangs.

- Unit tests use small N (16) where N matters.
- `tb_he_accel_full` needs no parameters and runs in a few seconds.
- `tb_he_accel` takes several minutes for the C++ compiler, because of its wide big-integer
  reference code.
