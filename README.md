# Syndrome computation for a long Reed-Solomon code by a folded 63 x 65 partial Fourier transform

Every syndrome-based Reed-Solomon decoder starts by evaluating the received
polynomial at the roots of the generator polynomial. For the (2720, 2550)
shortened code over GF(2^12) used in 40G-class optical links, that means 170
evaluations of a 2720-term polynomial:

    S_j = sum_{i=0}^{2719} r_i * alpha^(i*j),      j = 0 .. 169

Done with Horner's rule this costs about 460,000 multiplications per vector.
The 170 syndromes are also the first 170 outputs of the 4095-point discrete
Fourier transform (DFT) over GF(2^12) of the received vector padded with
zeros (4095 = 2^12 - 1 is the order of alpha). This design computes that DFT
by splitting it into short DFTs with the prime-factor (Good-Thomas) algorithm,
4095 = 63 x 65. It evaluates only the parts of the transform that touch
non-zero inputs and useful outputs: a *partial composite* transform. Then it
folds the two resulting tiers of small DFTs in time, so that a few sub-DFT
circuits are reused over a small number of clock cycles.

The RTL is SystemVerilog-2017, written for synthesis, and simulates with
plain Verilator. Two configurations are supported by parameters:

| (T1, T2) | 63-point modules | 65-point modules | cycles per vector |
|----------|------------------|------------------|-------------------|
| (13, 9)  default | 5        | 7                | 22                |
| (5, 7)   | 13               | 9                | 12                |

Vectors can follow each other without gaps, so throughput is one vector
every T1 + T2 cycles.

## 1. The decomposition

Because gcd(63, 65) = 1, the 4095-point DFT becomes a two-dimensional
63 x 65 DFT with no twiddle factors once the indices are re-mapped:

    time index       n = (65*n1 + 63*n2) mod 4095       n1 < 63, n2 < 65
    frequency index  k  with  k mod 63 = k1,  k mod 65 = k2   (Chinese remainder)

    tier 1:  G[k1][n2] = sum_{n1} (alpha^65)^(n1*k1) * r[n(n1, n2)]    65 DFTs of 63 points
    tier 2:  F[k]      = sum_{n2} (alpha^63)^(n2*k2) * G[k1][n2]       63 DFTs of 65 points

alpha^65 has order 63 and alpha^63 has order 65, so each tier is an ordinary
DFT of its own length. The same construction on 15 = 3 x 5 gives the small
picture below. Each 3-point block takes a group of inputs that are 5 apart,
and each 5-point block produces outputs with the same residue mod 3:

    3-point blocks (tier 1), inputs:  (f0 f5 f10) (f3 f8 f13) (f6 f11 f1) (f9 f14 f4) (f12 f2 f7)
    5-point blocks (tier 2), outputs: (F0 F6 F12 F3 F9) (F10 F1 F7 F13 F4) (F5 F11 F2 F8 F14)

Each tier-1 block sends one output to each tier-2 block. The 63 x 65 design
has exactly this wiring: 65 columns of 63 and 63 rows of 65.

**What "partial" removes.** Only the frequencies k = 0..169 are needed. Each
residue k1 = k mod 63 occurs for two or three of them (k1, k1 + 63,
k1 + 126 when < 170). So every tier-2 row is needed, but only 2 or 3 of its
65 outputs. In the time domain, indices n >= 2720 are always zero. Every
column still has some non-zero inputs, so every tier-1 DFT is needed.

## 2. Folding and schedule

Computing all 65 + 63 sub-DFTs in one cycle would take a very large circuit.
Instead one vector takes two steps:

* **Step 1, T1 cycles.** NUM1 = ceil(65/T1) tier-1 modules. In cycle c,
  module i transforms column n2 = c*NUM1 + i. Its 63 results are written into
  column n2 of a 63 x 65 buffer.
* **Step 2, T2 cycles.** NUM2 = ceil(63/T2) tier-2 modules. In cycle c,
  module j reads row k1 = c*NUM2 + j of the buffer. Its useful outputs are
  written straight into the syndrome register.

With (13, 9), 5 x 13 = 65 and 7 x 9 = 63. With (5, 7), 13 x 5 = 65 and
9 x 7 = 63. No module is idle in any cycle.

    cycle   0 .. T1-1          T1 .. T1+T2-1
            step 1             step 2
            columns -> buffer  buffer rows -> syndromes      done
            (next vector's step 1 may start right after the last step-2 cycle)

Both steps use fixed wiring, so every multiplexer in the design is small:

* Column n2 is always computed by module n2 mod NUM1 in cycle n2 / NUM1. The
  buffer's write side therefore needs only write enables.
* Syndrome S_k is always produced by output k mod 65 of module
  (k mod 63) mod NUM2 in step-2 cycle (k mod 63) / NUM2. Each syndrome
  register has one fixed input wire and a decoded write enable.
* The only real multiplexers are at the inputs of the modules. Each tier-1
  input has a T1:1 mux over the received symbols it may need. Each tier-2
  module has a T2:1 row mux on the buffer.

## 3. The blocks

| file | role |
|------|------|
| `rtl/ccft_pkg.sv` | field and code constants, `sym_t`, the constant antilog table, GF(2^12) product, index maps `pfa_in_index` and `crt_index` |
| `rtl/ccft_ctrl.sv` | IDLE / STEP1 / STEP2 state machine, cycle counter, `start` / `ready` / `done` |
| `rtl/tier1_input_sel.sv` | prime-factor input permutation and step-1 multiplexers; indices >= 2720 are hard-wired zeros |
| `rtl/sub_dft63.sv` | one tier-1 module: 63-point DFT with kernel alpha^65 |
| `rtl/transpose_buffer.sv` | 63 x 65 x 12-bit register array: written by columns, read by rows |
| `rtl/sub_dft65.sv` | one tier-2 module: 65-point DFT with kernel alpha^63, only the useful outputs built |
| `rtl/syndrome_reg.sv` | 170 syndrome registers filled through the CRT output map |
| `rtl/rs_syndrome_ccft.sv` | top level |

**Sub-DFT modules.** Each output is a sum of products with constant
coefficients alpha^e. The coefficients are taken from an antilog table that
is computed while elaborating. Synthesis turns each `gf_mul(x, constant)`
into a fixed XOR network. The modules are purely combinational. Pruning
happens at elaboration:

* A tier-2 module keeps output k2 only if CRT(k1, k2) < 170 for one of the
  rows k1 it serves. That leaves 24 or 25 of 65 outputs per module at (13, 9)
  and 18 or 19 at (5, 7). The others are constant zero.
* A tier-1 module drops input n1 only if it is zero in *every* column the
  module serves. With the column-to-module assignment used here, this
  removes nothing in either configuration. Each module serves 5 or 13
  columns, and every input position is non-zero in at least one of them. The
  gain from shortening therefore shows up only in the input multiplexers,
  whose legs for n >= 2720 are constant zero.

Symbols use a polynomial basis. Symbol bit b is the coefficient of alpha^b,
and alpha is a root of x^12 + x^6 + x^4 + x + 1 (`POLY` in the package).

## 4. Interface and timing (`rs_syndrome_ccft`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous reset, active low |
| `start` | in | 1 | start a computation; accepted while `ready` is high |
| `ready` | out | 1 | high in IDLE and in the last step-2 cycle |
| `rx` | in | 2720 x 12 | received symbols; `rx[i]` is the coefficient of x^i |
| `syn` | out | 170 x 12 | `syn[j]` = S_j |
| `done` | out | 1 | one-cycle pulse; `syn` is complete |

* `rx` must stay stable for the T1 cycles after the accepting edge. After
  that it may change.
* `done` rises at the (T1+T2)-th rising edge after the edge that accepted
  `start`.
* `syn` holds its values until step 2 of the next computation overwrites
  them. Individual syndromes change from step-2 cycle 0 onwards.
* A `start` given in the last step-2 cycle begins the next vector at once.
* A `start` while busy is ignored.
* Parameters: `T1` (default 13) and `T2` (default 9). The module counts
  follow as ceil(65/T1) and ceil(63/T2). Only (13, 9) and (5, 7) have been
  simulated.

## 5. How far it follows the source method, and where it does not

These parts follow the published method:

* The code: (2720, 2550) over GF(2^12), 2t = 170, syndromes S_0..S_169.
* The 63 x 65 prime-factor split with 63-point DFTs first.
* Folding into T1 + T2 cycles with ceil(65/T1) and ceil(63/T2) modules.
* Both (T1, T2) configurations.
* Removing unused outputs and zero inputs.
* Throughput of one vector per T1 + T2 cycles.

These parts are this design's own:

* **Sub-DFT insides.** The source builds the 63- and 65-point DFTs as
  cyclotomic FFTs: a bilinear form with pre-additions, a short vector of
  multiplications and a binary post-addition matrix, with the additions
  optimised by common subexpression elimination. It gives those matrices
  only for a 3- and 5-point example over GF(2^4). Here the sums are evaluated
  directly. The outputs are bit-identical, but there are many more constant
  multipliers: about 19,800 in tier 1 and 11,000 in tier 2 at (13, 9). Gate
  count and clock rate are therefore not comparable with published numbers
  for this method.
* **No pipeline registers** inside the sub-DFTs. Inserting them between the
  pre-additions, multipliers and post-additions is mentioned as an option,
  not as part of the reported designs.
* **Field polynomial**, symbol basis, the start/ready/done handshake, reset
  behaviour, the parallel input port and the column/row-to-module assignment
  are not specified by the source and were chosen here.
* **Not included:** the key-equation solver (Berlekamp-Massey or Euclid) and
  the Chien search / Forney evaluation by partial transforms. The method
  applies to those steps too, but only operation counts are available for
  them, no architecture. This block delivers syndromes to such a back end.

## 6. Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. The reference values come from separate
code in `tb/tb_gf_pkg.sv`: log/antilog tables, a Horner-rule syndrome and a
systematic RS encoder.

| testbench | what it checks |
|-----------|----------------|
| `tb_rs_syndrome_ccft` | Full design at default parameters. It runs an encoded codeword, which must give all-zero syndromes, then the codeword with 40 random symbol errors, single errors at r_0 and r_2719, and two random vectors back to back. All 170 syndromes are compared with the Horner reference. The latency must be exactly T1 + T2. It checks that a start while busy is ignored, that step 1 lasts T1 and step 2 lasts T2 cycles per vector, and that every one of these mechanisms actually occurred. |
| `tb_rs_syndrome_ccft_5x7` | the same test at (T1, T2) = (5, 7) |
| `tb_ccft_ctrl` | the state sequence cycle by cycle, the `ready` and `done` timing, an ignored start and a back-to-back start |
| `tb_tier1_input_sel` | every module input in every step-1 cycle against the index map |
| `tb_sub_dft63`, `tb_sub_dft65` | two instances each against a direct DFT from log tables, including the pruned inputs and outputs |
| `tb_transpose_buffer` | column writes, row reads and hold with the write enable low |
| `tb_syndrome_reg` | the CRT routing of all 170 syndromes, reset and hold |

Running one of them with Verilator (from the directory that holds `rtl/`
and `tb/`):

    verilator --binary --timing --assert -j 4 --top-module tb_rs_syndrome_ccft \
        rtl/ccft_pkg.sv tb/tb_gf_pkg.sv rtl/*.sv tb/tb_rs_syndrome_ccft.sv
    ./obj_dir/Vtb_rs_syndrome_ccft

Ignore the duplicate-package warning that appears if `ccft_pkg.sv` is listed
twice, or drop it from the glob. The full-size test builds in under a minute
and runs in about a second. Elaboration needs about 3.5 GB of memory,
because the constant coefficient tables are evaluated for every sub-DFT
instance. The (5, 7) configuration has 22 instances and needs more.

The sub-DFTs are written as nested procedural loops, about 4,000 products per
module. Synthesis front ends with a loop-unrolling budget may need that
budget raised (for the slang front end of yosys, `--unroll-limit`).

## 7. Changing it

* **Other folding factors:** change `T1` / `T2` on the top. Everything else
  is derived.
* **Another field polynomial:** change `POLY` in `ccft_pkg`. Keep the test
  package's `POLY` in step, because the reference uses its own copy.
* **Another shortened length or number of syndromes** over GF(2^12): change
  `N_SHORT` / `N_SYN`. The pruning and all routing follow automatically.
  The unit testbenches hard-code the default sizes in their reference loops
  and must be updated to match.
* **Another split or field:** this needs new values of `N1` and `N2`. They
  must be co-prime factors of 2^M - 1, and the tier-1 kernel exponent is N2
  and the tier-2 exponent is N1.
