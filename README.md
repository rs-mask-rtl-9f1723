# RS-Mask AES-128: masking that resists both power analysis and statistical fault attacks

## The idea

A threshold-implementation (TI) masked AES splits every secret byte into random
Boolean shares. This keeps the power consumption independent of the data. It does
**not** stop *statistical ineffective fault analysis* (SIFA). A fault injected
inside a non-linear gate is sometimes absorbed ("ineffective"), and whether it
is absorbed depends on the unmasked value. Take a GF(2^2) multiplier `q = s·t`:
a fault on `t` vanishes whenever `s = 0`. An attacker who keeps only the
ciphertexts that came out correct therefore sees a biased distribution of the
S-box input, and the bias reveals the key.

*Random space masking* (RS-Mask) removes that bias. Every S-box input
`X = d0 ^ d1 ^ R` carries an extra Boolean share `R`, the *RS share*, which is
uniformly random. The inverter input is not `X` itself but a mapping of `X` into a
"random space", built so that the inverter returns

    Z' = X^-1 ^ R

directly. Every non-linear gate between input and output now works on values
that are uniformly distributed, whatever the key. Any fault, effective or not,
is therefore as likely for one `X` as for another, and the ciphertexts that
survive a fault say nothing about `X`. The RS share `R` itself passes only
through linear operations: ShiftRows, MixColumns and the linear part of the
affine map. As a result, `Z'` together with the transformed `R` still
recombines to the correct AES state.

This repository holds synthesizable SystemVerilog for the RS-Mask S-box, for a
byte-serial AES-128 encryption core built around that S-box, and for the
optional *infective* extension. It also has self-checking testbenches,
including two fault-injection experiments that show the effect described above.

## Arithmetic: the tower field

The inverse is computed in Canright's tower field GF(((2^2)^2)^2), which uses a
normal basis at every level (`rtl/rs_gf_pkg.sv`):

| level | over | basis | defining constant |
|---|---|---|---|
| GF(2^2) | GF(2) | (W^2, W) | unity = `2'b11` |
| GF(2^4) | GF(2^2) | (Z^4, Z) | Z^2+Z+N = 0, N = W = `2'b01` |
| GF(2^8) | GF(2^4) | (Y^16, Y) | Y^2+Y+ν = 0, ν = `4'b0010` |

The GF(2^2) product is the truth table used throughout: 3 is the unity, and row
and column 0 are all zero.

A GF(2^4) product takes three GF(2^2) products:

    (a,b)(c,d) = (ac ^ e, bd ^ e),   e = N(a^b)(c^d)

In a normal basis, squaring is a bit or nibble swap.

To invert a GF(2^8) element `(x1, x0)`:

    y     = (ν(x1^x0)^2 ^ x1·x0)^-1        (a GF(2^4) inverse)
    X^-1  = (x0·y, x1·y)

To invert a GF(2^4) element `(a, b)`:

    d     = N(a^b)^2 ^ ab
    inv   = (d^-1·b, d^-1·a)               (d^-1 = d^2 in GF(2^2))

The input basis change `NB_MAT` is an 8×8 bit matrix. It maps the AES
polynomial basis to the tower basis; its column i is β^i, where β = `0x24` is a
root of the AES polynomial. The output matrix `OUT_MAT` combines two steps:
the change back to the polynomial basis, and the linear part of the AES affine
map. Both matrices are linear, so they are applied to each share separately.
The constant `0x63` is added to one share only.

## The RS mapping

Write the inverter input as nibbles `(x1, x0)` and the RS share as
`R = (r1, r0)`. The S-box feeds the output multipliers with modified operands:

    high:  x0 ^ f·( r1·ν(x1^x0)^2 ^ (x0·r1)·x1 )
    low:   x1 ^ f·( r0·ν(x1^x0)^2 ^ (x1·r0)·x0 )

Here `f` is the GF(2^4) unity (`4'hF`) when `X ≠ 0` and 0 otherwise. For
`X ≠ 0`, multiplying by `y` gives `x0·y ^ r1` and `x1·y ^ r0`, which together
make `X^-1 ^ R`.

For `X = 0` the correction terms would vanish and the output would be 0 rather
than `R`. In that case `fbar·R^-1` is added to the inverter input instead, so the
inverter computes `(R^-1)^-1 = R`, which equals `0^-1 ^ R`. This needs two more
pieces of hardware:

* a masked **zero detector** for `X` (`ti_zero_detect`), which produces `f` and
  `fbar` in three shares;
* an unmasked GF(2^8) **inverter for R** (`rs_gf256_inv`).

The zero detector is an 8-input AND tree over the complemented shares, made of
three-share TI AND gates.

The correction operand `y^-1 = ν(x1^x0)^2 ^ x1·x0` is computed on its own
datapath, not taken from inside the inverter. A fault on the inverter therefore
cannot cancel the mask.

## The S-box pipeline (`rs_sbox`)

The data `d0 ^ d1` is split into three TI shares using one fresh random byte. `R`
is added to one of those shares, so the inverter input is `X = d0^d1^R`. Every
non-linear operation is a three-share TI. Its output shares are remasked with
fresh randomness and then registered, which is what makes the design secure
even with glitches. This gives nine register levels:

| level | work |
|---|---|
| 1–3 | zero detector on X → `f`, `fbar` |
| 1–4 | single-share GF(2^8) inverse of R |
| 5 | multipliers 1, 2: `fbar·R^-1`, added to the delayed X |
| 6 | `x1·x0`, square-scaler, multipliers 3, 4 (`x1·r0`, `x0·r1`) |
| 7 | GF(2^4) inverter, first level; multipliers 5–8 (`s·r0`, `s·r1`, `(x1r0)x0`, `(x0r1)x1`) |
| 8 | GF(2^4) inverter, second level → `y`; multipliers 9, 10 (`f`× the sums) |
| 9 | output multipliers → `Z'` in three shares |

At the output, the three shares of `Z'` are compressed to two. Each share goes
through `OUT_MAT`, and `R` goes through the same linear map. As a result:

    o0 ^ o1 ^ o_r = S(d0 ^ d1 ^ r)

The S-box is fully pipelined: it accepts one byte per cycle, with a latency of
9 cycles. Each cycle it uses 138 fresh random bits (`SBOX_RND_W`); the package
comment breaks these down by level.

With `r = 0` the RS mapping is idle and the block is an ordinary three-share TI
S-box. The key schedule uses it this way, and the experiments below use it as
the baseline.

Building blocks:

| module | function | latency |
|---|---|---|
| `ti_gf_mul #(W)` | three-share TI multiplier in GF(2), GF(2^2) or GF(2^4); `q_i = x_{i+1}y_{i+1} ^ x_{i+1}y_{i+2} ^ x_{i+2}y_{i+1}`, remasked | 1 |
| `ti_gf16_mul_rs` | masked GF(2^4) value × single-share nibble of R | 1 |
| `ti_gf16_inv` | three-share GF(2^4) inverter | 2 |
| `ti_zero_detect` | three-share `X == 0` flag, as `f` and `fbar` nibbles | 3 |
| `rs_gf256_inv` | single-share GF(2^8) inverter for R | 4 |

## The AES core (`rs_aes`)

The state is held as three 128-bit shares: `s0 ^ s1 ^ R`. The key is held as two
shares, and its RS share is zero. A single S-box instance does all 200
S-box evaluations of a block, for both the state and the key schedule. The core
is byte-serial, and level 10 of the pipeline is the state register itself. When
the fourth byte of a column leaves the S-box, the core:

1. applies MixColumns to each share (skipped in round 10);
2. adds the two round-key shares to the two data shares (the RS share gets no
   key);
3. writes the column.

Each block follows this schedule:

* **load:** state = plaintext shares ^ key shares, and `R = pt_rs`;
* **pre-round:** the 4 key-schedule bytes for K1;
* **each round:** the 16 state bytes in ShiftRows order, then the 4 key bytes for
  the next round key, then a wait until the last column has been written.

A round takes 25 cycles, so a block takes **255 cycles** from `start` to `done`.
The published implementation needs 239 cycles. Its schedule is not described,
and this design does not reproduce it.

Interface:

* Pulse `start` while the core is idle.
* Give the plaintext as `pt_sh0 ^ pt_sh1 ^ pt_rs`. `pt_rs` must be uniformly
  random, because it becomes the RS share.
* Give the key as `key_sh0 ^ key_sh1`.
* Drive `rnd` with `RND_W` fresh random bits every cycle.
* `done` pulses once the ciphertext shares `ct_sh0 ^ ct_sh1 ^ ct_rs` are valid.
  They stay valid until the next start.
* Byte 0 of each 128-bit word is bits `[127:120]`.
* Reset is synchronous and active low. It covers the controller and the tag
  pipeline only.

There is no random number generator inside the core. All randomness comes in
through `rnd` and `pt_rs`.

## Infective extension (`INFECTIVE = 1`)

RS-Mask hides the *value* of `X` from fault attacks, but not the *difference* a
fault produces. The optional extension closes that gap by infecting the output:

1. Two extra masked GF(2^4) multipliers recompute the plain inverse
   `Z = (x0·y, x1·y)`, reusing `y` and `x1, x0` from the S-box.
2. The error is `E = Z ^ R ^ Z'`, which is zero when no fault occurred.
3. `E` is multiplied by a fresh random byte `R1`, and `E·R1` is added to the
   output at an extra register level 10.

An effective fault therefore turns the S-box output into uniformly random
garbage. This adds 40 random bits per cycle and one cycle of latency. With the
extension the AES core needs 265 cycles per block.

### Column-wide infection (`INF_COLUMN = 1`)

Per-byte infection still leaves classical DFA a foothold. A random error `e`
in one byte before MixColumns turns into the fixed pattern `(2e, e, e, 3e)`
across the column, and DFA solves that pattern for the key. The column-wide
option prevents this:

* Each S-box output produces four infections, `E·R_0 … E·R_3`, each with its
  own random byte. They pass through the same output linear map and are
  compressed to two shares.
* The S-box output itself is left uninfected.
* The core sums the infections of the four bytes of a column and adds sum `i`
  to row `i` of the column after MixColumns.
* Key-schedule bytes take infection 0 directly.

The option costs 112 random bits per cycle instead of 40, and has the same
latency as the per-byte option.

## Fault experiments

`tb_rs_sbox_sifa` places a stuck-at-0 fault on bit 0 of share 0 of the first
GF(2^2) multiplier inside the masked GF(2^4) inverter. It runs 8000 random
inputs, a quarter of them with `X = 0`. The table shows the fraction of faults
that were ineffective:

| S-box | X = 0 | X ≠ 0 |
|---|---|---|
| TI (R = 0) | 1.000 | ≈0.49 |
| RS-Mask | ≈0.50 | ≈0.51 |

With the infective extension, the effective faults produced 255 different
output errors.

`tb_rs_aes_sifa` repeats the experiment on two complete AES cores running in
lock step: a TI core with `pt_rs = 0`, and an RS-Mask core. In each of 400
encryptions it injects one transient fault on state byte 0 at the start of
round 9. Half of the plaintexts are searched so that this byte is 0. A
typical run gives:

| core | X = 0 | X ≠ 0 |
|---|---|---|
| TI | 1.000 | 0.48 |
| RS-Mask | 0.51 | 0.505 |

In the TI core, every correct ciphertext with `X = 0` survives the fault,
which is the bias a SIFA key search exploits. The RS-Mask core shows no such
bias. The key ranking itself (square Euclidean imbalance over key guesses) is
not computed.

`tb_rs_aes_dfa` compares the two infective options. It flips a bit at the
same place in round 9, peels round 10 off each faulty ciphertext with the known
key, and tests column 0 for the `(2e, e, e, 3e)` pattern. Of 60 effective
faults, all 60 show the pattern under per-byte infection and none under
column-wide infection. Fault-free blocks in the same run come out correct in
265 cycles.

Two parts of the published evaluation cannot be reproduced here: power-trace
leakage tests need measured traces, and area, frequency and power numbers
depend on the FPGA.

## Where this RTL departs from, or fills in, the published description

* **Pairing of r0/r1.** The mapping equation for each output nibble pairs `r1`
  with the high nibble. A later combined equation swaps `r0` and `r1`, which
  would leave the result masked with a nibble-swapped `R`. The first form is
  used.
* **X = 0 handling.** The `X = 0` case adds `fbar·R^-1`, with `R^-1` computed by
  a single-share inverter.
* **Sharing and remasking.** The number of random bits, the remasking pattern,
  the 2→3 share split at the S-box input and the 3→2 compression at its output
  are this design's own choices.
* **Schedule.** The byte order, the key-schedule interleave, the 255-cycle
  block (the published core takes 239), the interface and the reset are this
  design's own choices.
* **Infection arithmetic.** The product `E·R` is a full GF(2^8) product,
  taken share by share. This is larger than the cost the published estimate
  gives.
* **Column-wide infection.** How the column-wide infections are combined in a
  byte-serial core is this design's own choice. The infective options were
  proposed but not evaluated in the published work, and both are off by
  default.

## Files and simulation

| file | content |
|---|---|
| `rtl/rs_gf_pkg.sv` | tower-field functions, basis matrices, randomness widths |
| `rtl/ti_gf_mul.sv`, `ti_gf16_mul_rs.sv`, `ti_gf16_inv.sv`, `ti_zero_detect.sv`, `rs_gf256_inv.sv` | building blocks |
| `rtl/rs_sbox.sv` | RS-Mask S-box (`INFECTIVE`, `INF_COLUMN` parameters) |
| `rtl/rs_infective.sv` | error recomputation and infection |
| `rtl/rs_aes.sv` | AES-128 core, top level |
| `tb/aes_ref_pkg.sv` | plain FIPS-197 reference model in the polynomial basis |
| `tb/tb_*.sv` | one self-checking testbench per block, the AES tests, the fault experiments (`*_sifa`, `tb_rs_aes_dfa`) |

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb_rs_aes` runs the core at its default parameters. It covers the FIPS-197
vector, a block whose first-round S-box inputs are all zero, a block with a
zero RS share and random blocks. It also counts each mechanism: zero-input
S-box calls, key bytes, last-round columns and drain cycles.

Example run:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/*.sv tb/aes_ref_pkg.sv tb/tb_rs_aes.sv --top-module tb_rs_aes -o tb
    ./obj_dir/tb

For another test, replace the testbench file and the `--top-module` name. All
testbenches draw their stimulus and randomness from `$urandom`.
