# MQQ public key block cipher — RTL

MQQ is a multivariate quadratic public key scheme (Gligoroski, Markovski and
Knapskog, "A Public Key Block Cipher Based on Multivariate Quadratic
Quasigroups"). Its public key is a set of n quadratic Boolean polynomials in n
variables. Encrypting, or checking a signature, means evaluating those
polynomials. Decrypting, or signing, uses a trapdoor: a short chain of table
lookups in small quasigroups. That chain makes the private-key direction about
as cheap as a symmetric block cipher. There is no message expansion: an n-bit
block maps to an n-bit block.

This RTL implements both directions for n = 160, the size the authors built in
hardware. The size is set by one parameter, `N`.

## 1. The scheme in hardware terms

The private key has three parts:

* two invertible n×n bit matrices, S and T;
* eight quasigroups of order 32, given as their left-parastrophe tables;
* the Dobbertin bijection Dob(X) = X^129 + X^3 + X over GF(2^13). This part is
  fixed and is not secret.

The public map is P = T ∘ P' ∘ S. The middle map P' works on the block as a
string of k = n/5 five-bit elements X_1..X_k:

* Y_1 = X_1, and Y_{j+1} = X_j *_{i_j} X_{j+1}. This is a quasigroup string
  transformation that uses quasigroup number i_j at step j.
* Thirteen coordinates pass through Dob: the five bits of Y_1, and the first
  bit of each of Y_2..Y_9.

The quasigroups are *multivariate quadratic*: each output bit of a*b is a
polynomial of degree at most 2 in the bits of a and b. The quasigroups that
produce Y_2..Y_9 have a **linear** first coordinate. The thirteen coordinates
that go into Dob are therefore linear, and Dob, which is quadratic over GF(2),
keeps the whole map quadratic.

Decryption undoes these steps in reverse order:

| step | operation | block |
|---|---|---|
| 1 | y' = T⁻¹ y | `gf2_matvec` (key T⁻¹) |
| 2 | W = (y'_1..y'_5, y'_6, y'_11, …, y'_41), 13 bits | wiring in `mqq_decrypt` |
| 3 | Z = Dob⁻¹(W) | `dob_inv_rom` |
| 4 | write Z back into the same 13 coordinates of y' | wiring in `mqq_decrypt` |
| 5–6 | X_1 = Y_1, X_i = X_{i-1} \\_{q(i)} Y_i for i = 2..k | `qg_chain` + `qg_parastrophe_ram` |
| 7 | x = S⁻¹ x' | `gf2_matvec` (key S⁻¹) |

Here `\_q` is the left parastrophe of quasigroup q: a \\ b is the unique c with
a * c = b. By construction, X_i = X_{i-1} \\ Y_i exactly undoes
Y_i = X_{i-1} * X_i.

## 2. Block and bit layout

All modules use one layout:

* Coordinate x_i (numbered from 1, as in the scheme) is vector bit `[N-i]`. So
  x_1 is the MSB.
* Element X_j is `v[N-5j +: 5]`. Its first coordinate is its MSB, so the 5-bit
  value is the binary number x_{5j-4}..x_{5j}. This is also the row and column
  index used in the quasigroup tables.
* The Dobbertin word W_1..W_13 has W_1 as its MSB. The 13-bit integer is read
  as a polynomial over GF(2), with the MSB as the coefficient of x^12, reduced
  modulo x^13 + x^4 + x^3 + x + 1.

The field polynomial and this bit mapping are choices of this implementation.
The bijection property does not depend on them. The key generator must use the
same choices, or the public key will not match the private key.

## 3. The decryption core (`mqq_decrypt`)

### Dobbertin inverse table

Dob is easy to compute but has no cheap inverse, so decryption uses a full
8192 × 13-bit table (106,496 bits). `dob_inv_rom` builds this table itself
after reset:

* a 13-bit counter steps X through 0..8191;
* a combinational GF(2^13) unit computes Dob(X) (seven squarings and two
  multiplications, as functions in `mqq_pkg`);
* X is written at address Dob(X).

This takes 8192 cycles. `ready` then rises, and the decryption core holds
`busy` high until it does. The table is read synchronously, as a block RAM
would be.

### Parastrophe chain

Each X_i needs X_{i-1}, so the chain cannot be parallelised. `qg_chain` does
one lookup per cycle in `qg_parastrophe_ram`, which holds 8 × 32 × 32 × 5
bits and is read asynchronously. X_{i-1} is kept in a register, and the read
address is {q(i)−1, X_{i-1}, Y_i}.

The index sequence q(2..k) is a small register file:

* After reset it holds the sequence given with the decryption algorithm: \\1
  for X_2, \\2 for X_3, then \\_{3+((i+2) mod 6)}.
* The key-generation procedure is more general. It lets the sequence be any
  sequence that uses the two linear-first-coordinate quasigroups eight times
  in total.
* For the scheme to stay quadratic, those eight uses must produce Y_2..Y_9,
  because those are the elements whose first coordinates go into Dob.
* The reset sequence uses quasigroups 3..8 for Y_4..Y_9, so it does not meet
  this rule.

The two descriptions disagree, so the sequence can be loaded over the key
port. A key set whose public key is really quadratic loads its own sequence.
The end-to-end testbench does this, with q(2..9) alternating between
quasigroups 1 and 2.

### Schedule

| cycle (relative to `start`) | action |
|---|---|
| 0 | T⁻¹ product registered |
| 1 | Dob⁻¹ read |
| 2 | chain loads y' with Z substituted |
| 3 .. k+1 | one parastrophe lookup per cycle (X_2..X_k) |
| k+2 | S⁻¹ product registered |
| k+3 | `done` |

`done` is seen k+4 cycles after the cycle in which `start` was high. That is
36 cycles at N = 160. One block is processed at a time.

The published FPGA figure, 399 Mbit/s at 249.4 MHz, works out to one 160-bit
block every 100 cycles. Its internal structure was not published. The
schedule above is this implementation's own.

## 4. The encryption core (`mqq_encrypt`)

Each public polynomial has 1 + n(n+1)/2 coefficients: a constant, plus one
coefficient for each x_i·x_j with i ≤ j. The squares x_i·x_i = x_i carry the
linear terms.

* `pk_monomials` forms all these monomials of the input block. The order is 1,
  x1x1, x1x2, …, x1xn, x2x2, …, xnxn, padded with zeros to a multiple of 32
  bits (12,896 bits at N = 160).
* Each output bit is then `^(coef_row & monomials)`.

The whole key (160 × 12,896 bits) is held in registers, so every polynomial is
evaluated at once.

The pipeline has two stages: the monomials are registered, then the parities.
A block enters every cycle, and its result appears two cycles later. This
matches the authors' description of a fully pipelined encryption unit running
at 160 bits per clock (44.27 Gbit/s at 276.7 MHz). The depth of their pipeline
is not known.

The public key does not have to come from a real MQQ key. The core evaluates
whatever quadratic system is loaded.

## 5. Key port (`mqq_pkg::key_wr_t`)

The key port has four fields: `we`, `sel`, a 32-bit `addr` and 32-bit `data`.
It is shared by all key memories. Key memories are not reset; load them before
use.

| `sel` | target | address | data |
|---|---|---|---|
| `KSEL_TINV` | T⁻¹ | (r−1)·5 + w | row r, bits [32w+31:32w]; column c at row bit N−c |
| `KSEL_SINV` | S⁻¹ | same | same |
| `KSEL_QG` | parastrophes | {q−1[2:0], a[4:0], b[4:0]} | [4:0] = a \\_q b |
| `KSEL_IDX` | index sequence | i−1, for i = 2..k | [2:0] = q(i)−1 |
| `KSEL_PK` | public key | (r−1)·403 + w | coefficient bits [32w+31:32w] of polynomial r; bit 0 = constant |

The multipliers 5 and 403 are the numbers of 32-bit words per row at N = 160:
⌈N/32⌉ and (monomial width)/32. Output coordinate y_r of the encryptor is
`y[N-r]`.

## 6. Top level (`mqq_top`)

`mqq_top` puts the two cores side by side behind the one key port:

* encryption: `enc_in_valid`/`enc_x` → `enc_out_valid`/`enc_y`;
* decryption: `dec_start`/`dec_y` → `dec_busy`, `dec_done`/`dec_x`.

Both run at the same time. The authors built the two directions as separate
FPGA designs; combining them is a choice of this RTL.

Not included:

* **Key generation.** This is an offline software task: the search for
  quadratic quasigroups and the symbolic expansion of the public key.
* **Multi-chip partitioning.** The authors' 160-bit design spanned two
  Virtex-5 devices. One passage says four devices for the encryption figure.

## 7. Sizes

All sizes are at the default N = 160.

| item | bits |
|---|---|
| public-key coefficient registers | 2,063,360 (160 × 12,896, including padding; the scheme needs 2,060,960) |
| T⁻¹ and S⁻¹ | 2 × 25,600 |
| parastrophes | 40,960 |
| Dobbertin table | 106,496 |

The other sizes evaluated for the scheme (n = 140, 180, 200) need `N` changed
to match: the block size is fixed at elaboration. All three have been run end
to end this way. `N` must be a multiple of 5.
It must also be at least 45, so that coordinate y'_41 exists. The 20-bit toy
example that accompanies the scheme uses a 7-bit Dobbertin map and only three
quasigroups, so it is a different configuration and is not supported.

## 8. Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=… failures=…` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_gf2_matvec` | random 160×160 matrix, 200 back-to-back products against a bitwise reference, one-cycle latency, writes to other key targets ignored |
| `tb_dob_inv_rom` | fill time of 8192 cycles; all 8192 entries satisfy Dob(Z) = W, with Dob recomputed by independent arithmetic (`tb_ref_pkg`); three fixed points |
| `tb_qg_parastrophe_ram` | all 8192 entries written and read back |
| `tb_qg_chain` | reset index sequence and a reprogrammed sequence against a reference chain; latency of k cycles |
| `tb_pk_monomials` | every monomial position against a closed-form index (N = 20) |
| `tb_mqq_encrypt` | random quadratic systems against term-by-term evaluation; latency 2; full throughput (N = 20) |
| `tb_mqq_decrypt` | whole decryption algorithm against a step-by-step model; `start` ignored during the table fill; latency k+4; reprogrammed index sequence (N = 45) |
| `tb_mqq_top` | full-size end-to-end run (see below) |
| `tb_mqq_workloads` | the same end-to-end run at n = 140, 180 and 200, three instances of `mqq_e2e_bench` in parallel |

`tb_mqq_top` runs at the default size. It first generates a complete key:

* invertible S and T, made from random elementary row operations that are
  tracked to give S⁻¹ and T⁻¹;
* eight quadratic quasigroups in triangular form, with the first coordinate of
  quasigroups 1 and 2 linear;
* their parastrophes;
* an index sequence that uses quasigroups 1 and 2 for Y_2..Y_9.

It then derives the public key from the private map F by interpolation:

* constant: F(0);
* linear coefficients: F(e_i) + F(0);
* quadratic coefficients: F(e_i + e_j) + F(e_i) + F(e_j) + F(0).

It loads all of this through the key port (about 74,000 writes) and checks:

* encryption equals F(x), which only holds if the interpolated key really is
  quadratic;
* decryption returns the original block;
* signatures (decrypt a random y) verify on the encryptor;
* encryption keeps streaming while a decryption runs;
* a decryption request during the table fill is ignored.

It counts each of these events and fails if any never happens. It runs in
under a minute.

The quasigroups in this test are quadratic quasigroups, but they are not drawn
from the authors' randomised MQQ search. The test shows that the datapath is
correct. It says nothing about the security of such keys.

### Running with Verilator

```sh
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mqq_pkg.sv tb/tb_ref_pkg.sv tb/tb_mqq_top.sv --top-module tb_mqq_top
./obj_dir/Vtb_mqq_top
```

Replace `tb_mqq_top` with any other testbench name. Verilator finds the
modules in `rtl/` through `-Irtl`. Testbenches that do not use `tb_ref_pkg`
can leave it out.

## 9. Trust and departures

Taken directly from the scheme's definition:

* the decryption steps, including the 13 Dobbertin coordinates;
* m = 6 and GF(2^13);
* eight quasigroups of order 32;
* full parastrophe tables;
* the public key as 1 + n(n+1)/2 coefficients per polynomial;
* n = 160;
* a fully pipelined encryptor that takes one block per clock.

Choices made by this implementation:

* the field polynomial and all bit orders;
* the monomial order;
* the key port and its address map;
* the handshakes and the two-stage encryption pipeline;
* the serial decryption schedule (36 cycles per block, against the 100 implied
  by the published throughput);
* the self-filling Dobbertin table;
* the loadable index sequence, which works around the inconsistency described
  in §3.

Keys are not reset.

No timing closure or FPGA fitting has been done. Holding the full public key
in registers is the simplest way to get one block per clock, but it is a large
design: about 2 Mbit of flip-flops.
