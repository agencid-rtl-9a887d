# AgEncID key-decryption core for cloud FPGA boards

A cloud provider runs one IP vendor's bitstream on many FPGA boards. Encrypting
the bitstream separately for each board costs one AES key and one encryption
per board. AgEncID ("aggregate encryption, individual decryption") avoids this.
The boards are grouped into clusters. A cluster S shares one AES key K_S. K_S
travels inside a small public-key ciphertext that every board in S can open
with its own private key d_i, and that no board outside S can open. The
encryption is done once per cluster with one *aggregate* key.

This repository holds synthesizable SystemVerilog for the part of the scheme
that runs on the board. It takes a ciphertext and recovers the AES key in
programmable logic, then hands the key to the FPGA's own AES bitstream
decryptor. Setup, key generation, aggregate-key extraction and encryption run
off-chip in software. They are not part of this RTL.

## The scheme in one page

The scheme uses a symmetric bilinear pairing `e : G x G -> G_T`. G is a group
of elliptic-curve points of prime order r. Points are added and multiplied by
integers. G_T is a multiplicative group. The pairing is bilinear:
`e(aP, bQ) = e(P, Q)^(ab)`.

For a system of n boards the vendor picks a generator g and secrets alpha and
gamma, and publishes

    g_k = alpha^k * g      for k = 1..n and n+2..2n    (g_(n+1) is withheld)
    v   = gamma * g

Board i gets `d_i = gamma * g_i`. This is its only secret, written into
the board once. The aggregate key of a cluster S is `K_S = sum over j in S of
g_(n+1-j)`. To send a message m in G_T (the AES key) to S, pick a random t and
form

    c1 = t*g,   c2 = t*(v + K_S),   c3 = m * e(g_n, t*g_1)

Board i in S recovers m with

    b_{i,S} = sum over j in S, j != i, of g_(n+1-j+i)
    m       = c3 * e(d_i + b_{i,S}, c1) / e(g_i, c2)

The two pairings cancel everything except `e(g_(n+1), t*g)^-1`, which equals
`e(g_n, t*g_1)^-1` and so removes the mask in c3. A board that is not in S
cannot do this: the terms of its own index do not cancel, and it would need
the withheld g_(n+1). The core therefore answers *null* for `i` not in S and
does no work in that case.

So each board needs:
- point additions, to form `d_i + b_{i,S}` (|S| - 1 additions);
- two pairings;
- one division and one product in G_T.

## Curve and field

The scheme runs on a supersingular "Type A" curve:

    E : y^2 = x^3 + x   over Fq,  q a 512-bit prime, q = 3 (mod 4)
    r = 2^159 + 2^17 + 1        (160-bit Solinas prime, the order of G)
    q + 1 = h * r               (h is 353 bits)
    G_T inside Fq2 = Fq[i]/(i^2 + 1), embedding degree 2

The curve, the 160-bit Solinas order, the 512-bit field and embedding degree 2
are the published parameters of the scheme. The two primes are this design's
own pick; any Type A pair works. They live in `rtl/agencid_pkg.sv` as
`Q_PRIME`, `R_ORDER` and `H_COFACTOR`. To use other primes, change those three
constants and the widths `QW`, `RW` and `HW`. In G, an element is an affine
point (x, y) of two 512-bit words plus an infinity flag (type `ec_point_t`).
In G_T, an element is `re + im*i` (type `fq2_t`, 1024 bits).

## Block structure

    agencid_pl_top
    |-- privkey_store      write-once slot for (i, d_i)
    |-- pk_param_mem       g_k at address k, k = 1..2n, loaded by the host
    `-- agencid_decrypt    Decrypt(S, i, d_i, C)
        |-- ecc_core       forms d_i + b_{i,S}
        |-- pairing_core   e(.,.), used twice
        |   |-- ecc_core   doublings/additions of the Miller loop
        |   |-- fq_modmul  line values
        |   `-- fq2_unit   G_T arithmetic
        `-- fq2_unit       1/e2, c3*e1*(1/e2)
    fq2_unit / ecc_core each contain one fq_modmul and one fq_inv

All arithmetic sits on two primitives:

- **`fq_modmul`**: `a*b mod q`, bit-serial and MSB first. At each step the
  accumulator is doubled and then b's bit times a is added. After the doubling
  and after the addition there is one conditional subtraction of q. Takes
  exactly QW + 1 = 513 cycles.
- **`fq_inv`**: `a^-1 mod q` by the binary extended Euclidean algorithm. It
  halves or subtracts once per cycle. The time depends on the data, up to
  4*QW + 2 cycles; about 1,100 cycles was the longest seen. An input of zero is
  flagged and returns 0.

`fq2_unit` multiplies in Fq2 with three Fq products (Karatsuba). This takes
3*(QW+3)+1 = 1,546 cycles. It inverts through the norm:
`1/(a+bi) = (a - bi)/(a^2+b^2)`.

`ecc_core` adds and doubles points in affine coordinates, with one field
inversion per operation. It handles every special case exactly: an operand at
infinity, `P = Q` (which becomes a doubling), and `P = -Q` or `y = 0` (which
give infinity). It also multiplies a point by a scalar (double-and-add, MSB
first). With each result it returns the slope `lam` of the chord or tangent it
used, which the pairing needs.

## The pairing (the hardest part)

`pairing_core` computes the reduced Tate pairing of P with the *distorted*
point `phi(Q) = (-xQ, i*yQ)`. That point lies on the same curve but over Fq2.
The distortion map makes the pairing symmetric (`e(P,Q) = e(Q,P)`) and
non-trivial on G. This symmetry is what the scheme's algebra relies on.

**Miller loop.** The loop runs over the bits of r from the second-highest bit
down. T starts at P and f starts at 1. Each bit does this:

    f <- f^2 * l_T(phi(Q)),   T <- 2T          (tangent at T)
    if the bit is 1:
    f <- f * l_{T,P}(phi(Q)), T <- T + P       (chord through T and P)

A line through T with slope lambda, evaluated at phi(Q), is
`(lambda*(xQ + xT) - yT) + yQ*i`. This costs one Fq product, because the
slope comes back from `ecc_core`. Vertical lines are skipped. These include the
last addition, where T = -P and T + P is infinity, and the denominators of the
usual Miller formula. A vertical line evaluated at phi(Q) gives an element of
Fq, which the final exponentiation maps to 1.

**Final exponentiation** raises f to `(q^2 - 1)/r = (q - 1) * h`:

    f <- conj(f) / f        (= f^(q-1), since f^q is the conjugate in Fq2)
    f <- f^h                (left-to-right square and multiply over h's 353 bits)

One pairing takes 1,926,590 cycles at the default sizes. About 1.05 M cycles go
to the Miller loop (159 doublings, 2 additions) and about 0.85 M to the powering
by h. The result was checked bit for bit against an independent software
model. That model is the textbook Miller loop with vertical lines kept and the
plain exponent (q^2 - 1)/r. The checks also confirm symmetry, `e^r = 1` and
bilinearity in each argument.

## The Decrypt engine

`agencid_decrypt` works through these steps in order:

1. If i = 0, i > n, or bit i-1 of the set mask is clear: set `null_out` and
   `done` 2 cycles after start. Nothing else runs.
2. Set `acc = d_i`. For j = 1..n with j in S and j != i, read
   `g_(n+1-j+i)` from the parameter memory (1 cycle of latency) and add it to
   acc.
3. `e1 = e(acc, c1)`. Then read `g_i` and compute `e2 = e(g_i, c2)`.
4. `m = (c3 * e1) * (1/e2)`.

The AES key is the low 256 bits of `m.re`. The scheme calls the AES key "the
message" but does not say how a 256-bit key becomes an element of G_T. In this
design the encryptor picks a random m in G_T and derives the key from it in
this fixed way. A different key-to-message mapping changes only the `key`
assignment.

## Using the top

`agencid_pl_top`, parameters `N` (boards in the system, default 20), `IDXW`,
`AW` (derived):

| step | ports | notes |
|---|---|---|
| power-on | `por_n` low | empties the key slot (blank device) |
| provisioning | `key_prog_en`, `key_prog_index`, `key_prog_d` | first write is kept; later writes pulse `key_prog_err`; `key_valid` shows the slot is filled |
| public parameters | `prm_wr_en`, `prm_wr_addr = k`, `prm_wr_data = g_k` | only the g_k a board will use must be written |
| decryption | pulse `dec_start` with `dec_set` (bit j-1 = board j), `dec_c1`, `dec_c2`, `dec_c3` | `dec_done` pulses with `dec_null`, `aes_key`, `aes_key_valid`, `gt_msg` |

The functional reset `rst_n` does not clear the key slot, because the slot
stands for non-volatile storage. A decryption before any key is provisioned
answers null. `aes_key_valid` is raised only after a successful decryption.

Latency at the default sizes: about 3.86 M cycles for a 3-board cluster and
3.91 M cycles for a 20-board cluster. Each point addition costs about 3.5 k
cycles.

## How far it follows the source

Taken from the published scheme:
- the Decrypt formula;
- the null rule;
- the public parameter layout (g_1..g_2n without g_(n+1));
- the curve family, field size, group order size and embedding degree;
- a per-board private key in write-once, tamper-proof storage;
- the split into key storage, a decryption unit, and a vendor AES unit fed with
  the key;
- the default of 20 boards, the largest cluster evaluated.

Choices of this design:
- the concrete primes;
- affine coordinates and the Tate pairing computed by Miller's algorithm;
- the bit-serial multiplier and Euclidean inverter;
- the ports and start/done handshakes;
- the set-mask encoding;
- the key-from-message mapping;
- the local parameter memory;
- the write-once lock and its clearing only by power-on reset.

Known departures:
- **Speed.** The published hardware core takes 57,456 cycles per pairing and
  2,415 for its ECC unit. Here all arithmetic goes through single bit-serial
  multipliers, so a pairing takes about 1.93 M cycles. A faster multiplier
  (word-serial Montgomery, or DSP-based) would slot in behind the same
  start/done interface of `fq_modmul`.
- **Pairing algorithm.** The published core is described as inspired by the
  Duursma-Lee algorithm, which belongs to characteristic-3 curves. It is also
  said to provide 256-bit security. The scheme's own parameters, however, are
  the Type A curve above. This design follows the Type A curve, because keys
  and ciphertexts must live on it. (The software side is also said in one place
  to use BN curves; the same reasoning applies.)
- **Pairing properties.** The scheme's description also lists `e(g, g) = 1`
  and an alternating rule `e(a, b) = e(b, a)^-1`. On a cyclic G, a bilinear
  map with `e(g, g) = 1` is 1 everywhere, so c3 would carry m in the clear.
  The pairing here is symmetric and non-degenerate, which is what the
  correctness argument above actually uses.
- **Storage.** The private key slot and the parameter memory are registers.
  A product would place d_i in eFUSE or battery-backed RAM.
- **Area.** `agencid_decrypt` holds a second `ecc_core` for b_{i,S}, beside
  the one inside `pairing_core`. This is simple but not minimal. A generic
  yosys synthesis counts about 37 k flip-flops in `pairing_core`. The
  published pairing core reports 13,401 registers. The whole top has about
  72 k flip-flops, plus 42 kbit of parameter memory for 20 boards. Most of
  the flip-flops are 512-bit operand and temporary registers.

Not included: the AES bitstream decryptor, the battery-backed key RAM, the
configuration logic and the processor system of the SoC. These are all vendor
parts. Also not included are the off-chip Setup/KeyGen/Extract/Encrypt
software.

## Simulation

Every testbench checks itself and ends with
`TB_RESULT checks=<n> failures=<n>`. Each one has a watchdog. With plain
verilator, from the repository root:

    verilator --binary --timing --assert --top-module tb_agencid_pl_top \
        -y rtl -y tb +libext+.sv rtl/agencid_pkg.sv tb/tb_agencid_pl_top.sv
    ./obj_dir/Vtb_agencid_pl_top

`--assert` turns on the handshake assertions in `ecc_core`, `fq2_unit` and
`pairing_core`. They check that no sub-unit is started while busy, and that
the point unit never asks for the inverse of zero.

| testbench | what it checks | sim time |
|---|---|---|
| `tb_fq_modmul` | edge and random products against wide arithmetic; exact latency | < 1 s |
| `tb_fq_inv` | `a*z = 1`, zero flag, latency bound | < 1 s |
| `tb_fq2_unit` | products against the schoolbook formula, inverses, exact latency | < 1 s |
| `tb_ecc_core` | P+Q, 2P, K*P known answers, special cases, points on the curve, `r*P = inf` | 1 s |
| `tb_pairing_core` | e(P,Q) known answer, symmetry, `e^r = 1`, infinity input, bilinearity `e(K*P,Q) = e(Q,K*P) = e(P,Q)^K` | 8 s |
| `tb_agencid_decrypt` | cluster {1,3,4} on board 3, 20-board cluster on board 7, null for a board outside S, wrong key, addition counts | 12 s |
| `tb_privkey_store` | blank after power-on, write-once lock, error pulse | < 1 s |
| `tb_pk_param_mem` | all 2n words, dropped writes to 0 and above 2n | < 1 s |
| `tb_agencid_pl_top` | end to end at default sizes: null without key, refused re-provisioning, two clusters decrypted, null outside S; counts every mechanism | 8 s |
| `tb_workload_exp2` | 10 boards in three families: each family's key recovered on one of its boards; the next family's ciphertext refused | 15 s |

The `.hex` files in `tb/` hold one test case each, as one hexadecimal number
per line:

- n, i, the set mask;
- d_i (x, y), c1, c2, c3, and the expected m;
- the count of public points that follow, then (k, x, y) for each g_k that the
  board reads.

They were produced by a separate software implementation of the scheme (Setup
with random alpha and gamma, Extract, Encrypt with a random t and a random m in
G_T). That implementation's own Decrypt was also checked to return m.
`tb/tb_vectors_pkg.sv` holds the known answers for the point and pairing tests:
random subgroup points, made by multiplying a random curve point by h, and a
random scalar.

To run at another system size, set `N` on `agencid_pl_top` or
`agencid_decrypt`. Vectors must be made for the same n, because the indices
n+1-j+i depend on it.
