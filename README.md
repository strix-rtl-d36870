# Strix: a streaming TFHE bootstrapping accelerator in SystemVerilog

TFHE ciphertexts are refreshed, and a lookup table is applied to them, by
*programmable bootstrapping* (PBS). PBS has four steps: modulus switching,
blind rotation, sample extraction and key switching. Blind rotation is by far
the most expensive. It runs n iterations, and each one rotates a GLWE "test
vector" (two polynomials of N = 16384 coefficients, 32-bit torus integers) by
a secret-dependent amount. The rotated difference is decomposed into small
digits, and the digits are multiplied by a bootstrapping-key (bsk) polynomial
in the FFT domain. The Strix architecture streams these polynomials through a
fixed pipeline of units, eight coefficients per cycle. It batches ciphertexts
at two levels so that every key word fetched from memory is used many times:

* **Core-level batching.** Each core holds several ciphertexts and applies
  iteration i to all of them before moving on to iteration i+1. The key of
  one iteration is therefore read once per batch, not once per ciphertext.
* **Device-level batching.** Eight cores run the same schedule on different
  ciphertexts. Each key word is read once and multicast to all cores.

This RTL implements that architecture. Several parts are built as they were
published: the rotator, the multiplier-free decomposer, the folded 4-lane
pipelined FFT/IFFT, the vector multiply-accumulate (VMA), the accumulator,
batching at both levels, the double-buffered key store, multicast, and the
key-switch datapath. Some parts were not published in detail or are outside
the logic, such as HBM, the PHY, the host link and runtime selection of N.
Those parts are either replaced by simple ports or left out; see
"Departures" below.

## Data layout: eight lanes and the folded FFT

A polynomial of N coefficients is stored in eight banks of N/8 rows. Row `t`,
lane `q` holds coefficient `t + q*N/8`. Every unit consumes and produces one
row per cycle, so a polynomial is a *frame* of N/8 cycles. A frame is marked
by a start-of-frame flag on its first row, and frames may follow each other
back to back or with gaps.

The FFT works on the *folded* polynomial: N real coefficients become M = N/2
complex values `z_j = (a_j + i*a_{j+N/2}) * psi^j`, with `psi = exp(i*pi*j/N)`.
An M-point cyclic FFT of `z` then gives a negacyclic transform. In this
layout lanes 0-3 give the real parts and lanes 4-7 give the imaginary parts
of four complex lanes, so complex lane `p` at row `t` holds `z_{t + p*M/4}`.
No data movement is needed to fold. The FFT output uses the same
row/lane-to-index map, in natural order. The inverse FFT removes the twist
with `psi^-j`, divides by M, and unfolds the same way.

## The pipeline of one core (`hsc`)

```
 local scratchpad ──► rotator ──► decomposer ──► FFT ──┐     (×2: A and B polynomial)
       ▲                                               ▼
       │                            key word ──► VMA (col 0, col 1)
       └──── accumulator ◄──── IFFT ◄──────────────────┘     (×2: output columns)
```

* **`rotator_unit`.** Computes `X^a * tv - tv` for one polynomial. It reads two
  rows per cycle: the unrotated row `t` and row `(t - a) mod N/8`. Each lane
  then takes the word `a / (N/8)` lanes further on, plus one more lane when the
  row subtraction borrowed. A lane is negated when its source index has
  wrapped past N. The bit `a >= N` flips the sign of every lane. Latency is 3
  cycles.
* **`decomposer_unit`.** Signed gadget decomposition with base `2^beta` and
  `l` levels, using masks, shifts and adds only:
  1. Round each coefficient to its top `l*beta` bits by adding the first
     dropped bit shifted up one place.
  2. For each level, from least significant to most significant, move the
     level's field to the top of the word, add the carry from the previous
     level, and arithmetic-shift it down. The result is the digit in
     `[-B/2, B/2)`.

  A row buffer keeps the rounded word and its carry between the `l` passes. A
  polynomial therefore occupies the unit for `l * N/8` cycles, and the unit
  reports `in_ready` when it can take the next one. Both base and level count
  are runtime inputs. `l*beta <= 31` is required.
* **`fft_unit`.** A radix-2 multi-path delay feedback-free pipeline with four
  complex lanes and log2(M) butterfly stages:
  * Stage 1 pairs lanes (0,2) and (1,3). A fixed crossing then feeds stage 2.
  * Each later stage s first passes its lanes through shuffle units
    (`fft_shu`, delay `M / 2^s`). A shuffle unit is a pair of delay lines with
    swapping multiplexers.
  * Twiddles come from a ROM per stage, computed at elaboration with `$cos`
    and `$sin` and rounded to Q1.14 (16-bit).
  * Each sample carries its index tag through the butterflies. A ping-pong
    reorder buffer writes the sample at the bit-reversed tag and reads in
    natural order, so the output order is natural without a separate pass.
  * The datapath is 64-bit fixed point.
  * The same module, built with `INVERSE=1`, is the IFFT. It uses conjugate
    twiddles, the inverse twist, and a final rounded `>>> log2(M)`.
  * Latency from the first input row is `log2(M) + 2*(M/4) + 1` cycles, and a
    new frame can start every M/4 cycles.
* **`vma_unit`.** For each of the four lanes it forms `F_A*G_A + F_B*G_B` in
  full precision. `F` comes from the two FFTs and `G` are the 16-bit complex
  key entries for one output column. It then rounds and shifts by
  `FFT_FRAC + BSK_FRAC`. There are two of them, one per output polynomial
  (column). Latency is 2 cycles.
* **`accumulator_unit`.** Adds the `l` IFFT output frames of one ciphertext,
  row by row, modulo 2^32, in an N/8-row buffer per lane. It emits the sum
  during the last frame, and the sum is written back to the scratchpad.
* **`local_scratchpad`.** Two bank groups, one per GLWE polynomial. Each has 8
  banks of `BATCH * N/8` 32-bit words, two read ports (rotated and direct)
  and one write port.

### Controller

The controller walks the batch in the order "for each iteration, for each
ciphertext". It issues a ciphertext when all of the following hold:

* both rotators are idle;
* both decomposers are ready;
* the ciphertext's previous iteration has been written back (a per-slot ready
  flag guards this read-after-write hazard);
* the key half of the iteration is present (`bsk_avail[i mod 2]`).

When only the last condition fails, the core is in a *key stall*, which is
visible as `key_stall`. Issued ciphertexts enter a small in-order queue. The
FFT-output side of the queue forms the key-read address `{half, level frame,
row}`. The FFT outputs are delayed by the key latency (`BSK_LAT = 2`) to meet
the key word. After the last frame of the last ciphertext of an iteration,
the core pulses `bsk_release[half]`. The accumulator side of the queue gives
the slot to write back into.

With the decomposer as the bottleneck, one ciphertext-iteration costs
`l * N/8` cycles plus a 3-4 cycle bubble: the next rotation starts only when
the decomposer is free. A full blind rotation of a batch of `b` ciphertexts
therefore takes about `n * b * l * N/8` cycles. For N = 16384, l = 2, n = 991
and b = 4 that is 16.2 M cycles.

### Key-word layout

One 512-bit key word serves one row. It holds 16 complex entries of 16+16
bits:

* element `e = (column*2 + input_poly)*4 + lane` sits at bits `[32e +: 32]`;
* the real part is in the upper half.

The words of one iteration are ordered by level frame, least significant
level first (the order in which the decomposer emits levels), then by row.
The key store (`global_scratchpad`) holds two such halves. The HBM side fills
a half and pulses `fill_done`. The cores release it when they are finished
with it.

## Top level (`strix_top`)

`strix_top` has these parts:

* `NCORE` (8) cores;
* the global key store;
* `noc_multicast`, one register stage to all cores;
* one `keyswitch_cluster`.

The cores run in lockstep, so core 0's key-read address drives the single
read port. The host has these ports, all used while the cores are idle:

* load masks (`lwe_*`), which are modulus-switched on write:
  `a' = round(a * 2N / 2^32)`;
* load test vectors (`tv_*`);
* read results back, with one cycle of latency.

Setting `ks_ld` during read-back also loads the rows into the key-switch
cluster.

The `keyswitch_cluster` performs sample extraction during that load.
Coefficient `j` goes to index `(N-j) mod N`, negated for `j > 0`. Each lane
writes its own bank. The cluster then computes
`out = (0,...,0,b) - sum_i sum_j digit_j(a_i) * KSK_ij`. It works in tiles of
8 output columns:

1. Stream the extracted mask through an 8-lane decomposer (up to 8 levels).
2. Multiply each digit row by a 2048-bit key word (8 lanes x 8 columns x
   32 bits).
3. Reduce with an adder tree into 8 column accumulators.

The key-switching key (about 0.5 GB at set IV) cannot live on chip. It is
read through the `ksk_rd_*` port with a latency of `KSK_LAT` cycles.

## Numerics

FFT inputs carry `FFT_FRAC = 20` fraction bits. Key entries carry `BSK_FRAC`
fraction bits (0 by default), and the VMA removes both. The twiddles are
16-bit, which limits the precision of the transform: the relative error is
about 2^-13 per stage. With real 32-bit torus keys the products therefore
contain noise well above one unit. That is acceptable for TFHE only when the
noise budget allows it. The design does not model or bound that noise. The
testbenches keep keys and digits small, with 10 key fraction bits, so every
product rounds to the exact integer convolution and results can be compared
exactly.

## Departures from the published design, and gaps

* **Runtime N.** N is a build parameter (default 16384). Smaller polynomial
  sizes need a rebuild, and the FFT is fixed at N/2 points.
* **Accumulation.** The accumulator starts each ciphertext from zero, so the
  new test vector is `sum digit * bsk`, as the published algorithm listing is
  written. The usual CMux form, `ACC + ...`, would add the old test vector to
  it. The change is one line in `accumulator_unit` (the `first` multiplexer).
* **Initial rotation.** The initial rotation by the body, `X^-b * tv`, is
  expected from the host: the loaded test vector must be pre-rotated.
* **Scratchpad ports.** The scratchpad banks have two read ports and a
  separate write port. The published banks are true dual-port.
* **Key-switch key word.** The key word is 2048 bits per cycle. The published
  key-switch broadcast bus is 256 bits wide, so at that width the key-switch
  cluster would run 8x slower than modelled.
* **Global scratchpad.** It holds only the bootstrap-key double buffer.
  Ciphertext sections and the point-to-point links are replaced by host
  ports.
* **Not modelled.** HBM, its controller and PHY are not modelled; the
  `bsk_wr_*` and `ksk_rd_*` ports stand where they would connect.
* **Lockstep.** Cores run in lockstep with one key reader. This is a choice
  made here; the published design does not say how the cores are
  synchronised.
* **Batch size.** The batch size of 4 at N = 16384 follows from the 0.625 MB
  local scratchpad: 4 ciphertexts x 2 polynomials x 64 KB = 512 KB.

## Files

* `rtl/strix_pkg.sv`: sizes, types, twiddle and complex-multiply helpers.
* `rtl/delay_line.sv`, `rtl/fft_shu.sv`, `rtl/fft_unit.sv`: the FFT.
* `rtl/rotator_unit.sv`, `rtl/decomposer_unit.sv`, `rtl/vma_unit.sv`,
  `rtl/accumulator_unit.sv`, `rtl/local_scratchpad.sv`: the core's units.
* `rtl/hsc.sv`: one core with its controller.
* `rtl/global_scratchpad.sv`, `rtl/noc_multicast.sv`,
  `rtl/keyswitch_cluster.sv`, `rtl/strix_top.sv`: shared parts and the top.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=<n> failures=<n>`.

## Simulating

Each testbench is a top module with no ports. With verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/strix_pkg.sv \
          tb/tb_strix_top.sv --top-module tb_strix_top && ./obj_dir/Vtb_strix_top
```

The end-to-end testbench `tb_strix_top` uses 2 cores, N = 32, batch 2 and LWE
dimension 9. It runs three complete bootstrap + key-switch operations and
checks every coefficient against an integer model. It also counts these
mechanisms and fails if any never occurs:

* key stalls;
* key-half releases and refills;
* issues;
* multicast reads;
* key-switch tiles.

`tb_hsc` checks a single core the same way. Each unit testbench checks its
unit against a direct reference. For example, the FFT is compared with a
real-arithmetic DFT at 64 points and round-tripped through the IFFT.

There is no testbench at the full default size (8 cores, N = 16384). One
iteration at that size is about 10^4 cycles of a design with eight
cores of 16384-point memories, plus a reference negacyclic convolution of
16384 x 16384 terms per polynomial. That does not fit a ten-minute
simulation. The largest sizes simulated are:

* N = 64 for the FFT, rotator, decomposer and accumulator;
* N = 32 for a whole core and for the top.
