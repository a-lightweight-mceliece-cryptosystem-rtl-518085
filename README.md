# OLSC McEliece co-processor

A McEliece public-key cryptosystem hides a message inside a codeword of an
error-correcting code. The codeword is then spoiled with a few deliberate errors.
Only the holder of the private key can remove those errors. Classic McEliece uses
binary Goppa codes, which are expensive to decode: polynomial arithmetic over
finite fields and a latency that grows with the code length.

This design replaces the Goppa code with a **non-binary Orthogonal Latin Square
Code (OLSC)**. An OLSC is decoded by one round of majority voting, which needs
only XORs and comparisons. Decryption therefore fits into a single clock cycle.
Because the code is non-binary, every position of a codeword is a b-bit symbol,
while the key matrices stay binary. A k x n key therefore protects k·b
plaintext bits instead of k. That makes the key b times smaller than a binary
key for the same message length.

The RTL covers all three parts of the co-processor: key generation, encryption
and decryption. It is written in synthesizable SystemVerilog (IEEE 1800-2017).

## The scheme

Notation: k data symbols, n code symbols, t correctable symbol errors, b bits
per symbol. All matrix arithmetic is over GF(2). A binary matrix acts on a vector
of symbols bit plane by bit plane, so a "sum" is a symbol-wise XOR.

| step | formula | where |
|---|---|---|
| key generation | G' = S G P (public), keep S, G, P (private) | `mce_keygen` |
| encryption | c = m G' + e, e has t nonzero symbols | `mce_encrypt` |
| decryption | c' = c P^-1; m' = Decode(c'); m = m' S^-1 | `mce_decrypt` |

G is the k x n generating matrix of the OLSC. S is a random non-singular k x k
matrix. P is a random n x n permutation. Decryption works for two reasons.
First, c P^-1 = (m S) G + e P^-1, which is a codeword with t errors. Second,
decoding a systematic codeword returns its data part, m S.

## The code

The k = q² data symbols are arranged as a q x q grid, with data symbol i at row
r = i / q and column c = i mod q. q = 2^QW, so GF(q) arithmetic is plain
polynomial arithmetic modulo `POLY`. There are 2t check groups, each with q
check symbols:

* group 0: check v covers the grid row r = v;
* group 1: check v covers the grid column c = v;
* group g ≥ 2: check v covers the cells with α_{g-2}·r ⊕ c = v. This is one
  Latin square of order q for each multiplier α.

Together these are the 2t-2 mutually orthogonal Latin squares of the OLSC plus
the row and column groups. So n = q² + 2tq, and H = [M | I] has an identity part
of order 2tq. The generating matrix is G = [I | Mᵀ]. Row i has a one in
column i and one in each group, at column k + g·q + v.

The multipliers α are the **code parameters**. They are supplied at run time,
on `alpha` of the top level. They must be 2t-2 distinct nonzero elements of
GF(q). Two data symbols then share at most one check, which is the
orthogonality property that the decoder relies on. With the defaults (q = 8,
t = 4) six of the seven nonzero elements are used. `olsc_gen_matrix` asserts
that they are distinct and nonzero.

Default size: q = 8, t = 4, b = 8, which gives k = 64 symbols (512 plaintext
bits), n = 128 symbols (1024 cipher bits) and a 64 x 128-bit public key. These
numbers are this design's own choice.

## One-step decoding (`olsc_decode`)

This is the core of the design and the reason it is fast.

1. **Syndromes.** For each of the 2tq checks, XOR the received check symbol with
   the received data symbols it covers. For group g ≥ 2 and grid row r, that data
   symbol is in column v ⊕ α·r. Each syndrome is a b-bit symbol.
2. **Votes.** Each data symbol d_i lies in exactly one check per group, so it
   gets 2t syndrome symbols: its votes.
3. **Majority.** Suppose d_i carries error E. At most t-1 other errors exist,
   and by orthogonality each of them spoils at most one of d_i's checks. So at
   least t+1 votes equal E. Now suppose d_i is clean. Each error spoils at most
   one of its checks, so no nonzero value occurs more than t times. The decoder
   therefore looks for a value that occurs in more than t of the 2t votes, and
   XORs it onto d_i. If there is no such value, d_i is left alone.

The same argument covers errors in check symbols, since each of those spoils a
single vote. For b = 1 the rule reduces to the textbook OLSC rule: flip the bit
when more than half of its checks fail.

All k votes are computed in parallel by comparing every pair of votes, which
costs 2t·2t b-bit comparators per data symbol. There is no finite-field
arithmetic on data. Only the check indices use GF(q) products of α with the row
number. `corrected[i]` reports which data symbols were changed.

The threshold is "more than t", which is a majority of the 2t votes. The
original formulation writes "more than q/2". The two agree at the default,
where q = 2t, but differ for other sizes.

## Datapath and timing

```
 processor ── alpha ──► mce_keygen ─┬─ olsc_gen_matrix (G) ─┐
                                   ├─ perm_gen (P)         ├─► keygen_matmul ──► pk_out (G' rows)
                                   └─ nonsing_gen (S)      ┘
                                         │ S, P (priv_valid)
                                         ▼
 cipher_in ──► mce_decrypt: perm_vec_mul (c·P^-1) → olsc_decode → vec_mat_mul (·S^-1) ──► dec_msg
                            perm_inverse (P^-1), gf2_mat_inv (S^-1) hold the private key

 pk_in (G' rows) ──► mce_encrypt: key store, plaintext reg, vec_mat_mul (m·G') ⊕ rand_error (e) ──► cipher_out
```

| operation | latency (clock edges after the one that takes the request) | notes |
|---|---|---|
| key generation, `kg_start` → `kg_done` | max(k, n) + k + 2 = 194 | G, S, P are made in parallel (k, k and n cycles). Then G' is streamed out at one row per cycle. |
| private-key set-up | k + 1 = 65 after S and P are ready | Gauss-Jordan inversion of S. P^-1 takes 1 cycle. |
| encryption, `msg_valid` → `cipher_out_valid` | t + 1 + collisions | One error position is placed per cycle. A draw that hits an occupied position or a zero value is retried. |
| decryption, `cipher_in_valid` → `dec_valid` | 1 | Accepts one cipher per cycle. |

Handshakes are simple strobes. A request is a one-cycle `*_start` or `*_valid`
pulse, and completion is a one-cycle `*_done` or `*_valid` pulse. Streams have
no back-pressure. The public key goes out as k rows (`pk_out_valid/idx/row`),
and the encryption unit accepts rows in any order on `pk_in_*`. The two key
ports are separate so that a chip can publish its own key and encrypt for a
peer's key. Connecting them back to back gives a self-test. The processor and
the external I/O block are not part of the RTL; their links are the top-level
ports. Reset is asynchronous and active low.

## Key generation details

* **G** (`olsc_gen_matrix`) is computed row by row from α, so a change of code
  parameters needs no stored table.
* **P** (`perm_gen`) is a Fisher-Yates shuffle with one swap per cycle. A
  permutation matrix is held everywhere as n column indices (row i has its one
  in column `perm[i]`) rather than as n² bits. Multiplying by it is then a
  scatter of symbols (`perm_vec_mul`), and inverting it is a scatter of indices
  (`perm_inverse`).
* **S** (`nonsing_gen`) is formed as L·U from a random unit lower-triangular L
  and a random unit upper-triangular U. It is non-singular by construction, so
  there is no retry loop. This reaches only the non-singular matrices that
  factor without pivoting, which is a subset of all of them.
* **S^-1** (`gf2_mat_inv`) uses Gauss-Jordan elimination with one-hot row and
  column selection and no row swaps. Each row remembers which column it
  pivoted, and a final cycle puts the rows in order. A singular input is
  flagged.
* The random bits come from xorshift32 generators (`prng`). They are
  deterministic after reset and are **not** a cryptographic random source.
  A real device needs a true random number generator in their place.

## Where this RTL goes beyond the published description

The published description gives the algorithm, the block structure and the
claim of single-cycle decoding. It gives no sizes, widths, interfaces or
generator algorithms. The following are therefore this design's own choices:

* q = 8, t = 4, b = 8 and the GF(8) polynomial x³+x+1;
* the Latin-square construction α·r ⊕ c and using α as the run-time code
  parameters;
* the LU construction of S, the Fisher-Yates shuffle of P, the xorshift
  randomness, the error sampler, and "weight t" read as t nonzero symbols;
* the index form of permutation matrices, and the row-serial schedules of
  key generation;
* doing c·P^-1, decoding and ·S^-1 together in the one decryption cycle;
* the decode threshold "more than t" instead of "more than q/2" (see above);
* all handshakes, latencies and reset behaviour.

The security of OLSC-based McEliece is not established. The scheme has much
more structure than a Goppa code. Treat this RTL as an architecture study, not
as a vetted cipher.

## Files

`rtl/olsc_pkg.sv` holds the default sizes, the GF(2^m) multiplier and the
check-index function. Each other file is one module, and its opening comment
describes its interface and timing. `mce_coproc` is the top level. `prng` is
the shared random-bit helper.

`tb/` has one self-checking testbench per module (`tb_<module>.sv`). Each
prints `TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` holds the reference
models they check against: a log-table GF(8) multiplier, the code construction,
matrix products, rank and random key material. These models are written
independently of the RTL. `tb_mce_coproc` runs the whole co-processor at
default size, with two key generations, 80 on-chip encryptions that are
decrypted again, 40 further ciphers with 0..t errors, and 32 ciphers sent
back to back, one per cycle. It counts each mechanism (key loop-back, error
collisions, corrections, clean decodes) and fails if one never happens.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
  rtl/olsc_pkg.sv tb/tb_ref_pkg.sv tb/tb_mce_coproc.sv --top-module tb_mce_coproc
./obj_dir/Vtb_mce_coproc
```

Replace `tb_mce_coproc` with any other testbench name. Every testbench runs in
seconds. The testbenches and their reference package are written for the
default size. To try another size, change `QW`, `T`, `B` and `POLY` on
`mce_coproc`, and update the constants at the top of `tb_ref_pkg` to match. Its
GF multiplier table is built for GF(8).
