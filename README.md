# HEAX-style CKKS accelerator in SystemVerilog

This is RTL for a hardware accelerator for the CKKS homomorphic encryption scheme.
A CKKS ciphertext is a pair of polynomials of degree below n = 8192. Their coefficients are
held in residue number system (RNS) form, one residue per 54-bit prime q_i. Nearly all the
work of homomorphic multiplication is done by two blocks:

* a dyadic (coefficient-wise) modular multiplier for the ciphertext product;
* a *key switch*, which brings the third polynomial of a product back to two polynomials.
  It is built from forward and inverse negacyclic number-theoretic transforms (NTT/INTT).

Both are parameterised by the number of parallel cores, so one description scales from small
to large FPGAs. The defaults are the n = 2^13, k = 4 configuration ("Set-B"):

* MULT module with 16 dyadic cores.
* KeySwitch made of:
  * 1 INTT module with 16 cores;
  * 4 NTT modules with 16 cores each;
  * 5 dyadic multiply-accumulate units, 8 lanes each;
  * 2 INTT modules with 4 cores each;
  * 2 NTT modules with 16 cores each;
  * 2 modulus-switch units, 4 lanes each.

## Arithmetic

Every datapath word is 54 bits (`heax_pkg::W`). All primes are below 2^52.

* **Shoup multiplication (`mulred`).** This computes x·y mod p when y is a constant known in
  advance, for example a twiddle factor.
  * With y' = floor(y·2^54/p), the estimate x·y − floor(x·y'/2^54)·p lies in [0, 2p).
  * One conditional subtraction then gives the result.
  * The pipeline is three clocks.
* **Barrett reduction (`barrett_reduce`).** This reduces a 108-bit product by a variable prime.
  * It uses u = floor(2^108/p), stored as two 54-bit words r1 (low) and r2 (high).
  * The quotient estimate is the part of x·u above bit 108.
  * One compare-and-subtract corrects it.
  * The pipeline is three clocks.
* **Dyadic core (`dyadic_core`).** A full product followed by a Barrett reduction, padded to a
  latency of 23 clocks.
* **NTT core (`ntt_core`).** Cooley–Tukey butterfly: (a + w·b, a − w·b). Latency 50.
* **INTT core (`intt_core`).** Gentleman–Sande butterfly with a built-in halving:
  ((a+b)/2, (a−b)·w/2). Latency 49.
  * (a+b)/2 is formed by adding p when the sum is odd, then shifting right.
  * The factor 1/2 of the lower output is folded into the stored inverse twiddle.
  * log n stages of these butterflies therefore produce the inverse transform with its 1/n
    factor included.

The core latencies are padded with shift registers (`pipe_delay`) to the figures of the
original design, so that the schedule matches it. The logic itself needs only 4–5 stages.

## Transform module (`ntt_module`)

One module computes either the forward transform (`INVERSE = 0`) or the inverse
(`INVERSE = 1`) of one polynomial of `N` coefficients, using `NC` butterfly cores.

**Output order.** The forward transform follows the iterative in-place algorithm. Its output
is in bit-reversed order: X[k] = Σ_i a_i ψ^{(2·bitrev(k)+1)·i}, where ψ is a primitive 2n-th
root of unity mod p. The inverse takes that order back to natural order.

**Memory layout.** The polynomial is held in rows of 2·NC coefficients, called memory elements
(ME). A stage with butterfly distance t is handled in one of two ways:

* **Type 1, t ≥ 2·NC.** The two partners of a butterfly lie in different MEs. The controller
  reads two MEs. The lower halves go to the cores on one clock and the upper halves on the
  next. The results are written back to the same two rows.
* **Type 2, t < 2·NC.** Both partners lie in one ME. The ME is fetched once and its 2·NC words
  are paired by a multiplexer whose pattern depends on the stage. The results are put back
  into the original positions before the write-back.

**Twiddle factors.** Twiddles and their Shoup constants are loaded by the host, one row of NC
per clock, into `NPRIME` tables. `sel` chooses the table.

**Ports and timing.** Inputs are written through `in_we/in_idx/in_data`, PW coefficients at a
time. A result is read through `out_idx/out_data` one clock after its index is presented. The
last stage writes into a separate output array, so a result can be read while the next input
is loaded.

**Difference from the original design.** The original overlaps the stages. This module drains
the core pipeline after every stage, so one transform takes about
log N · (N/(2·NC) + LAT + 6) clocks. At N = 256 and NC = 4 that is 697 clocks for the NTT and
689 for the INTT, against 256 for a fully overlapped schedule. The arithmetic is exact; only
the throughput is lower.

## MULT module (`mult_module`)

This module multiplies, for one prime, a ciphertext of α components by a ciphertext (or
plaintext) of β components:

* c_k = Σ_{i+j=k} a_i·b_j mod p;
* α, β ≤ 2; α = β = 2 gives three output components.

For every pair (i, j) it streams all N/NC rows through NC dyadic cores, so a pair takes N/NC
clocks. A partial sum is formed by a read-modify-write of the result row as each product
leaves the core. The original forms a0·b1 + a1·b0 before a single reduction. The results are
the same; this design spends one modular addition more per coefficient.

## KeySwitch module (`keyswitch`)

The input is a polynomial c in NTT form with k residues, plus the key-switching key: for each
residue i and each prime j ≤ k, two key polynomials. The output is two polynomials (f0, f1)
with k residues each. These are the Σ_i c_i·ksk_i terms of relinearisation, divided by the
special prime P = q_k.

The controller runs these phases:

1. **Per residue i (k times):**
   * **LOAD0**: copy residue i into the INTT0 module.
   * **INTT0**: inverse transform.
   * **XFER0**: Barrett-reduce the result to each of the other k primes (the k − 1 other
     ciphertext primes plus the special prime) and write each reduced copy into its own NTT0
     module.
   * **NTT0**: forward transforms, all in parallel.
   * **DYAD**: five multiply-accumulate units multiply each residue by both key halves and add
     the products into 2·(k+1) accumulator banks. Four units take the NTT0 outputs; the fifth
     takes the untouched residue i, since prime i needs no transform.
   * Which unit writes which bank rotates with i. Unit m serves prime m when m < i and prime
     m+1 otherwise.
2. **LOAD1/INTT1**: move the two special-prime accumulators into the two INTT1 modules.
3. **Per prime j (k times):**
   * **XFER1**: reduce the special-prime residue to prime j.
   * **NTT1**: forward transform.
   * **MS**: the modulus-switch units compute (acc_j − r)·[P⁻¹]_{q_j}.

The host then adds f0 and f1 to the first two components of the product.

Each phase waits for the one before it. Successive key switches do not overlap, and the
modules are not pipelined into a continuous stream. The key is held in on-chip arrays, not
streamed from DRAM. The number of NTT0 modules equals k, which fits Set-B; it does not support
the k = 8 configuration with four NTT0 modules.

**Port widths.** `tw_w/tw_wp` are 16 words wide; each module takes the lanes it needs. `tw_mod`
selects the table being loaded:

| `tw_mod` | module |
|---|---|
| 0 | INTT0 (one table per prime) |
| 1..k | NTT0 module m: table 0 is prime m, table 1 is prime m+1 |
| k+1, k+2 | the two INTT1 modules (special prime) |
| k+3, k+4 | the two NTT1 modules (one table per prime) |

## Top (`heax_top`)

One MULT module and one KeySwitch module. All their ports are brought out under the prefixes
`mu_` and `ks_`. The PCIe link, the DRAM controllers and the host software sit outside the
top. Their role is played by the load and read ports.

## Verification

Each block has a self-checking testbench in `tb/`. Reference values come from software models
in `tb/heax_tb_pkg.sv`:

* 128-bit modular arithmetic;
* prime search with Miller–Rabin;
* root-of-unity search;
* direct O(n²) NTT/INTT formulas and the iterative transform.

These models share no code with the RTL. The inputs are random (`$urandom`).

| testbench | size | what is checked |
|---|---|---|
| tb_mulred, tb_dyadic_core | 54-bit | 2000 random products each, including p−1 operands |
| tb_ntt_core, tb_intt_core | 54-bit | 2000 butterflies each |
| tb_ntt_module, tb_intt_module | N = 256, NC = 4 | all coefficients against the direct formula; a cycle bound |
| tb_mult_module | N = 256, NC = 8 | (α,β) = (2,2), (2,1), (1,2); cycle count against αβ·N/NC |
| tb_keyswitch | N = 64, k = 4, cores 4/4/4/2/4/2 | both outputs, every prime; phase counts |
| tb_heax_top | N = 64, k = 4 | ciphertext product of every residue, relinearisation key switch, one ciphertext-plaintext product; each mechanism counted |

No testbench runs the top at its default size. The largest sizes simulated are:

* the transforms at N = 256;
* the key switch and the top at N = 64.

To simulate, for example:

    verilator --binary --timing -Irtl -Itb rtl/*.sv tb/heax_tb_pkg.sv tb/tb_keyswitch.sv --top-module tb_keyswitch
    ./obj_dir/Vtb_keyswitch

## Known departures and open points

* The transforms do not overlap their stages, which costs about 2.7× in transform time.
* The key-switch phases are sequential. There is no inter-operation pipelining and no f1/f2
  buffering.
* The key-switching key is held on chip. At the default size that is about 17.7 Mbit, plus
  about 16 transform memories.
* The input double buffering and quadruple buffering for the host link are not built.
* The original gives two forms of the NTT, and they disagree. The text gives
  Σ a_i ψ^{(2i+1)j}, while the iterative algorithm produces a bit-reversed output. The RTL
  follows the iterative algorithm.
* The printed Type 2 multiplexer index formula cannot be used as written. The pairing used is
  (l ≫ s) ≪ (s+1) + (l mod 2^s).
