# Dual homomorphic ElGamal: isolating data from an untrusted IP block

A chip often has to hand data to an IP block it cannot inspect: a
third-party core whose netlist may hide a hardware Trojan that leaks or
corrupts what passes through it. This design never lets such a block see the
data. Every operand is encrypted before it leaves the trusted logic and the
result is decrypted when it comes back:

```
  A --> [ encryption ] --alpha--> [ untrusted IP ] --beta--> [ decryption ] --> B
```

This only works if the IP can compute on ciphertext, i.e. if the cipher is
*homomorphic* for the IP's operation. ElGamal is multiplicative: multiplying
two ciphertexts word by word gives a ciphertext of the product of the
messages. Its CRT-based variant (called CEG below) is additive: multiplying
ciphertexts gives a ciphertext of the sum. An IP that does one kind of
arithmetic needs only the matching partially homomorphic scheme, not fully
homomorphic encryption.

The RTL here implements the *dual* circuit. A single `select` input switches
one set of arithmetic units between the two schemes, so an IP that either
adds or multiplies (for example a small ALU) can be isolated without two
complete crypto cores. The design is built from Montgomery multipliers and
exponentiators, a plus-minus modular divider, a residue reducer, a modular
adder and a small memory of CRT weights, each run by an FSM.

The word size is K = 8 bits, the size at which this architecture was
originally evaluated. Eight-bit keys give no security at all. K is a
parameter, and the arithmetic is written for any K (see "Changing the
size").

## The two schemes, as computed here

Public parameters are an odd prime n < 2^K and a generator g. The secret key
is an exponent k, and the public key is h = g^k mod n. The random exponents
l and l_i must be fresh for every encryption.

**Multiplicative mode (`select = MODE_MUL`, ElGamal).** One ciphertext pair:

```
  C1 = g^l mod n          C2 = h^l * m mod n
  m  = C2 / C1^k mod n
```

Multiply the pairs of m1 and m2 word by word and the result decrypts to
m1*m2 mod n. The message must be below n.

**Additive mode (`select = MODE_ADD`, CEG).** The message is split into
residues m_i = m mod d_i over T pairwise coprime moduli. Each residue goes in
the exponent of its own pair:

```
  C1_i = g^l_i mod n      C2_i = h^l_i * g^m_i mod n          i = 0..T-1
  v_i  = C2_i / C1_i^k mod n = g^e_i,   e_i = log_g v_i
  m    = sum_i e_i * w_i mod d,   w_i = (d/d_i) * ((d/d_i)^-1 mod d_i) mod d
```

Here d is the product of the d_i. Multiply two ciphertexts word by word and
the exponents add, so e_i = m1_i + m2_i. The CRT step then returns
(m1 + m2) mod d. Recovering e_i means solving a discrete logarithm. That is
feasible only because each e_i is small, bounded by the d_i and the number of
additions.

The default moduli are {7, 9, 11}, so T = 3 and d = 693. Any 8-bit message
fits, and so does the sum of two 8-bit messages (at most 510). With n = 251
and g = 6 (a primitive root) every e_i up to 250 has a unique logarithm.
Both limits must hold for a result to be exact:

* the true sum must be below d;
* every e_i must be below the order of g.

## Block structure

```
dual_elgamal_top
├── key_gen            h = g^k mod n; 2^K mod n and 2^2K mod n
│   └── mont_exp ── 2 x mont_mult
├── dual_encrypt       FSM + shared units
│   ├── mod_reducer    m -> m mod d_i (all T at once)
│   ├── 3 x mont_exp   g^l_i, h^l_i, g^m_i concurrently (third idle in MUL mode)
│   └── mont_mult      the single multiplier that forms C2
└── dual_decrypt       FSM + shared units
    ├── mont_exp       C1_i^k
    ├── mod_div        C2_i / C1_i^k (plus-minus algorithm, no inverse needed)
    ├── mont_mult      g*R once, then the discrete-log walk
    ├── crt_rom        the T CRT weights w_i
    └── mod_adder      running CRT sum mod d
```

`elgamal_pkg` holds K_BITS, T, D_LIST, the derived widths DW (a value
mod d), RW (a residue) and MW (a decrypted message), the function that
computes the CRT weights, and the `mode_e` type of `select`.

Two parts are outside the design and appear only as ports of the top. The
random source supplies k (`k`) and the encryption exponents (`l[T]`). The
untrusted IP receives `alpha_c1/alpha_c2` and returns `beta_c1/beta_c2`.
The testbench supplies a behavioural IP, `tb/third_party_ip_model.sv`, that
multiplies two ciphertexts word by word mod n.

## Montgomery arithmetic: the core that everything runs on

Every modular product in the design is a Montgomery product
MM(x, y) = x*y*R^-1 mod n with R = 2^K. `mont_mult` computes it bit-serially.
In each of K clock cycles the partial sum p gains x_i*y, then gains n if it
is odd, and is halved. The halving is exact, because adding n made p even.
The sum stays below 2n, so one subtraction at the end gives a result in
[0, n). There is no trial division. The requirements are:

* n odd;
* y < n;
* x any K-bit value. The encryptor relies on this to feed in a message
  that is not reduced.

The factor R^-1 must be cancelled. The design does it with two constants per
modulus, which `key_gen` computes once by 2K modular doublings of 1:

* `one_n` = R mod n, the Montgomery form of 1;
* `r2_n` = R^2 mod n. MM(a, R^2) = a*R mod n takes a into the Montgomery
  domain, and MM(a, 1) takes it back out.

Each datapath uses these identities:

| where | computation | why it is right |
|---|---|---|
| `mont_exp` | yM = MM(y, r2); e = one; per bit: e = MM(e, yM) if bit set, yM = MM(yM, yM); z = MM(e, 1) | both e and yM stay in the Montgomery domain |
| `dual_encrypt` | t = MM(h^l, r2) = h^l*R; C2 = MM(x, t) = x*h^l | one multiplier, two products; x = m or g^m_i |
| `dual_decrypt` | gR = MM(g, r2); a = MM(a, gR) = a*g | steps g^0, g^1, ... in the normal domain |

`mont_exp` scans the exponent from its least significant bit. Its two
multipliers run in the same cycles: one squares the base power and the other,
when the bit is 1, accumulates. It always makes K iterations, so its latency
does not depend on the operands.

## Plus-minus division

Decryption needs C2 / C1^k. `mod_div` computes the quotient directly by a
binary extended GCD, so no inverse is formed first. It keeps a signed pair
(A, B), starting at (y, n), and a pair (U, V), starting at (x, 0), with

    U*y = A*x   and   V*y = B*x   (mod n).

Each clock does one step:

* **A even:** halve A, halve U mod n. Halving mod n means u/2 for even u and
  (u+n)/2 for odd u.
* **A odd:** first, if A's size bound (`alpha`, in bits) is smaller than B's
  (`beta`), swap the pairs. Then replace A by (A+B)/2 or (A-B)/2, whichever is
  even, chosen from the two low bits of A+B. Replace U by (U+V)/2 or (U-V)/2
  to match.

Tracking the bounds instead of comparing magnitudes is what distinguishes
plus-minus from the plain binary algorithm. When A reaches 0, B is +1 or -1
and the quotient is V or -V. For K = 8 and every prime modulus tried, this
takes at most 25 cycles, including start and finish. A zero divisor ends at once with a meaningless
result.

## Additive decryption: discrete logarithm and CRT

How the logarithm and the weighted CRT sum are formed is this design's own
choice. Both reuse the units the decryptor already has.

1. **Logarithm.** Starting from a = 1, the multiplier computes a = a*g mod n
   until a equals v_i. The number of steps is e_i. Each step costs one
   Montgomery product, K+3 cycles. The walk stops after 2^K - 1 steps, so a
   value that is not a power of g cannot hang the FSM; it then decrypts to a
   wrong message.
2. **CRT.** The weight w_i is read from `crt_rom`, and `mod_adder` adds it to
   the running sum e_i times, one addition per cycle, modulo d.

e_i is used as it is, not reduced mod d_i. Because e_i = m_i (mod d_i), the
sum is still correct, and a ciphertext built from several additions decrypts
to the true sum mod d. The cost is that latency grows with the residues.

## Interfaces and timing

All modules use a rising-edge `clock` and a synchronous, active-high
`reset`. Each operation has a one-cycle `start` pulse that samples every
input, and a one-cycle `done` pulse. Outputs hold until the next `start`.
`select` is sampled at `start`. The top runs three independent operations:

1. **Key generation** (`key_start`/`key_done`). It must finish once before
   the first encryption or decryption, because it also produces the
   Montgomery constants and registers the secret k for the decryptor.
2. **Encryption** (`enc_start`/`enc_done`). In multiplicative mode only
   word 0 of `alpha_c1/alpha_c2` is written; the other words read 0.
3. **Decryption** (`dec_start`/`dec_done`). In multiplicative mode only
   word 0 of `beta_c1/beta_c2` is used. `m_out` is as wide as the larger of K and
   the width of d (10 bits by default), enough for a value mod n or mod d.

Latency at K = 8 is counted in cycles from the clock edge that samples start
to done. The testbenches check each figure:

| operation | cycles | formula |
|---|---|---|
| Montgomery product | 10 | K+2 |
| exponentiation | 111 | (K+2)(K+3)+1 |
| division | 3 to 25 | one per plus-minus step |
| key generation | 131 | 2K+1 + exponentiation + 3 |
| encryption, MUL | 135 | 1 + (exp+1) + 2(K+3) |
| encryption, ADD | 413 | 1 + (K+2) + T((exp+1) + 2(K+3)) |
| decryption, MUL | 126 to 138 | 1 + (exp+1) + division |
| decryption, ADD | 486 to 841 in the tests | 1 + (K+3) + sum over i of ((exp+1) + division + e_i(K+3) + e_i + 3) |

For reference, the original FPGA implementation reports its own counts at
k = 8. They come from a different micro-architecture, so only the order of
magnitude compares:

* separate ElGamal circuit: 171 encryption, 153 decryption cycles;
* separate CEG circuit: 480 encryption, 512 decryption cycles;
* dual circuit, one multiplicative then one additive operation: 662
  encryption and 665 decryption cycles. The same sequence takes
  135 + 413 = 548 encryption cycles here, and about 130 + 600 decryption
  cycles.

## What follows the original architecture and what is this design's own

The original architecture fixes:

* the two schemes and their equations;
* the dual circuit: the CEG architecture with a select input;
* the unit inventory of each module:
  * encryption: a modular reducer, several Montgomery exponentiators, one
    Montgomery multiplier, an FSM;
  * decryption: one exponentiator, one multiplier, one divider, one modular
    adder, one memory for the inverse CRT, an FSM;
  * key generation: an exponentiator plus a random source;
* binary Montgomery multiplication;
* LSB-first exponentiation with two concurrent products per iteration;
* the plus-minus division algorithm;
* the ports clock, reset, start, h, m, C1, C2 and done;
* k = 8.

This design chooses:

* three exponentiators in the encryptor. The original shows a stack of them
  without a count.
* C2 formed by two products on one multiplier;
* the Montgomery constants computed in `key_gen`;
* a start/done pulse handshake;
* a synchronous reset;
* T = 3 and d = {7, 9, 11}. No values were given for them.
* the CRT moduli fixed when the design is built. In the scheme they are part
  of the public key.
* the bit-serial structure of every unit;
* the discrete-log walk and repeated-addition CRT, and the contents of the
  memory (the weights w_i);
* one select input for the whole top.

Not built:

* the separate single-scheme circuits and the two-circuit baseline that the
  dual design is compared against;
* the random number generator;
* the IP itself.

## Changing the size

* **K.** Every module takes `K` as a parameter, defaulting to
  `elgamal_pkg::K_BITS`. Override it on `dual_elgamal_top`, or change
  `K_BITS`. n must be an odd prime below 2^K, g a generator, and messages
  below n in multiplicative mode.
* **T and D_LIST.** These live in the package. The CRT weights and all
  derived widths follow automatically. The moduli must be pairwise coprime;
  their product bounds the additive results. Keep the logarithms short: each
  step of the walk costs K+3 cycles.

## Simulating

Each module has a self-checking testbench in `tb/`. Expected values come
from `tb/tb_ref_pkg.sv`, which uses plain `%` and `*` arithmetic and no
Montgomery code. Every testbench:

* checks results and cycle counts;
* has a cycle watchdog;
* ends with the line `TB_RESULT checks=N failures=F`.

`tb_dual_elgamal_top` runs the whole flow at the default size. It does three
key generations, then alternating multiplicative and additive operations:
encrypt two messages, let the IP model combine them, decrypt. It checks:

* the ciphertext words against the reference;
* each decrypted product or sum;
* that key generation, both modes, a mode switch and an IP operation each
  occurred.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/elgamal_pkg.sv tb/tb_ref_pkg.sv tb/tb_dual_elgamal_top.sv \
    --top-module tb_dual_elgamal_top
./obj_dir/Vtb_dual_elgamal_top
```

Replace the testbench name to run another one (`tb_mont_mult`, `tb_mont_exp`,
`tb_mod_div`, `tb_mod_reducer`, `tb_mod_adder`, `tb_crt_rom`, `tb_key_gen`,
`tb_dual_encrypt`, `tb_dual_decrypt`). Each finishes in well under a second.

## Trust and limits

* All ten testbenches pass. Each of them fails when its module is replaced by
  a copy with one deliberate arithmetic or control error.
* The arithmetic has been checked against independent reference arithmetic
  for many random operands over several primes below 256. The multiplier,
  exponentiator and divider tests also pass at K = 16 (moduli up to 65521),
  and the end-to-end test at K = 12 (n = 4093). The design has not been
  checked formally.
* The design makes no attempt at constant-time or side-channel resistance.
  At K = 8 it is a functional model of the architecture, not a secure
  cipher.
* Decryption in additive mode is data-dependent in time. A ciphertext whose
  exponent is out of range decrypts to a wrong value without any error flag.
