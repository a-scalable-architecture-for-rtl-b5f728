# Taurus-style bootstrapping accelerator for multi-bit TFHE: SystemVerilog RTL

TFHE lets a server compute on encrypted integers by evaluating look-up tables
through *programmable bootstrapping* (PBS). With messages of 6 to 9 bits the
polynomials in a PBS reach degree N = 2^15 to 2^16, and the bootstrapping key
(BSK) grows to gigabytes. Its rows cannot stay on chip, so they have to be
streamed from HBM. The accelerator described here keeps that stream affordable
by reusing each key row for many ciphertexts. Twelve ciphertexts take turns in
one deep blind-rotation pipeline in each of four clusters, so one key row read
serves a batch of 48. Around this reuse idea the design has:

* an FFT cluster built from two fully parallel FFT units, a 256-point one
  ("FFT-A") and a 128-point one ("FFT-B"), joined by a *shutter* transpose
  buffer, that turns a degree-65536 negacyclic polynomial into 32768 complex
  bins at 512 coefficients per cycle;
* a decomposer that cuts rounded torus values into signed digits;
* LWE processing units (LPUs) that do key switching, modulus switching and
  the cheap linear operations;
* a memory system in which the key row, twiddle and key-switching-key buffers
  are shared by all clusters, while each cluster keeps its own ciphertext
  state.

The bootstrapping order is key switching first: KS, then modulus switch, then
blind rotation, then sample extraction.

Everything below is synthesizable SystemVerilog (IEEE 1800-2017), one module
per file in `rtl/`, with self-checking test benches in `tb/`.

## 1. Block map

```
                    kin_* (HBM key stream)
                          |
                 +--------v---------+   +-------------+   +-------------+
                 | key queue (FIFO) |   | twiddle buf |   | KSK buffer  |
                 +--------+---------+   +------+------+   +------+------+
                          |                    |                 |
   control  <---->  GGSW row buffer            |                 |
   (full sync)            |                    |                 |
                 +--------v--------------------v-----------------v------+
                 |                        NoC                            |
                 +---+-------------+--------------+--------------+------+
                     |             |              |              |
               cluster 0      cluster 1      cluster 2      cluster 3
               BRU + LPU      BRU + LPU      BRU + LPU      BRU + LPU
               GLWE/LWE/ACC   GLWE/LWE/ACC   GLWE/LWE/ACC   GLWE/LWE/ACC
                     \            /               \            /
                   shared I-FFT (group 0)      shared I-FFT (group 1)
```

| File | Block |
|---|---|
| `taurus_pkg.sv` | types (`torus_t`, `cplx_t`), complex arithmetic, reference twiddle and digit functions |
| `taurus_top.sv` | four clusters, two I-FFT clusters, shared buffers, key queue, NoC, control |
| `cluster.sv` | BRU, LPU, GLWE buffer, LWE buffer, sample extraction, gathering of rotation amounts |
| `bru.sv` | blind-rotation unit: rotator, round, decomposer, FFT cluster, complex MAC, ACC buffer |
| `rotator.sv`, `round_unit.sv`, `decomposer.sv` | front of the BRU pipeline |
| `fft_cluster.sv`, `ifft_cluster.sv` | forward and inverse negacyclic 65536-coefficient FFT |
| `fft_a.sv`, `fft_b.sv`, `fft_r4_stage.sv`, `fft_r2_stage.sv` | the parallel FFT units and their stages |
| `shutter_transpose.sv` | single-buffer streaming transpose |
| `complex_mac.sv` | 512 complex multiply-accumulates per cycle |
| `lpu.sv`, `sample_extract.sv` | LWE-side operations |
| `buffer_ram.sv`, `sync_fifo.sv` | memories and the key queue |
| `noc.sv`, `control.sv` | broadcast and routing, global sequencing |

## 2. The blind-rotation pipeline

One blind-rotation iteration multiplies each accumulator ACC = (A, B), a pair
of degree-N polynomials, by one GGSW ciphertext of the key (a CMux):

    ACC := ACC + ExtProd( X^a * ACC - ACC , GGSW_i )

Here `a` is the mod-switched mask value of the current ciphertext. The GGSW has
2d rows (GLWE dimension k = 1, d decomposition levels), and each row holds two
polynomials in the Fourier domain. The BRU (`bru.sv`) streams words of 512
coefficients through

    GLWE buffer -> rotator -> round -> decomposer -> FFT cluster -> complex MAC <-> ACC buffer

and the loops are nested as follows:

    for row r = 0 .. 2d-1                  (input polynomial p = r / d, level l = r mod d)
      for ciphertext c = 0 .. RR-1         (round robin: the key row is reused RR times)
        for word w = 0 .. 127              (512 coefficients each)
          rotate word w of ACC(c,p), subtract ACC(c,p), round, decompose,
          keep digit level l, FFT, multiply by key row r, accumulate

At the end of an iteration the accumulated Fourier products (two polynomials
per ciphertext) pass, one polynomial at a time, through the inverse FFT. This
inverse FFT is shared with the other BRU of the cluster group. The results are
added to the torus accumulators in the GLWE buffer.

* **Word layout.** Word `w` of a polynomial holds coefficients
  `P[128*m + w]` for m = 0..511.
  * Multiplying by X^a with a = 128q + r then needs only one word read
    (word w - r) and a 512-lane barrel rotation by q or q+1.
  * A lane that wraps past X^N changes sign, which makes the rotation
    negacyclic.
  * The initial rotation of the test polynomial uses the same unit, with the
    subtraction turned off.
* **Round and decompose.** Each coefficient is first rounded to its top B*d
  bits.
  * The decomposer then emits one signed digit in [-2^(B-1), 2^(B-1)] per
    cycle and lane, least significant first.
  * The carry rule is carry = bit B-1 of ((r-1) | q) & r. Here r is the low
    digit and q the remaining quotient. This is the balanced rounding used by
    common TFHE libraries.
  * For d > 1 the decomposer holds its input for d-1 cycles per word. The
    BRU keeps only the digit of the current level, so with d levels each word
    costs d cycles.
* **Key-row streaming.**
  * Only one GGSW row (2 x 32768 complex values) is on chip, in the GGSW
    buffer shared by all clusters.
  * Once the last ciphertext has used word j of row r, the BRU of cluster 0
    raises `bsk_next_valid`. The control then moves word j of row r+1 from
    the key queue into the buffer.
  * That word is not needed again for at least 128 cycles, so refills hide
    behind compute.
  * The `key_underflows` output counts refills that found the queue empty.
    An underflow would corrupt the result, so the host must keep the stream
    ahead.
* **Synchronisation.** All four clusters start every iteration together
  (`control.sv`). An iteration can only start when every cluster has
  finished the previous one. `sync_waits` counts the cycles in which some,
  but not all, clusters were done.

## 3. The FFT cluster: 65536 real coefficients in 128 cycles

This is the least obvious part of the design (`fft_cluster.sv`,
`ifft_cluster.sv`).

**Negacyclic double-real folding.** Take a real polynomial a of degree
N = 65536. Fold it into 32768 complex values

    z[n] = (a[n] + j*a[n + N/2]) * zeta^n,   zeta = exp(j*pi/N),   n < N/2

With this fold, the product modulo X^N + 1 becomes a pointwise product of the
32768-point DFTs of z. The inverse undoes the DFT and the twist. The real and
imaginary parts then give back the two halves of the coefficients.

**Four-step split 32768 = 256 x 128.** Write n = 128*n1 + n2 and
k = k1 + 256*k2. Then:

1. Input word n2 holds a[128m + n2]. Lanes m and m + 256 form z[128*n1 + n2]
   with n1 = m. 256 complex multipliers apply the twist zeta^(128 n1 + n2).
2. FFT-A (256 points, four radix-4 stages) transforms over n1, one full
   vector per cycle.
3. Each bin k1 is multiplied by W_32768^(n2 k1).
4. The shutter transpose collects the 128 rows n2. It returns them as 128
   column pairs (k1 = 2j, 2j+1).
5. Two FFT-B units (128 points: one radix-2 stage, then three radix-4
   stages) transform over n2.

Output word j holds the bins k1 = 2j (lanes 0..127) and k1 = 2j+1
(lanes 128..255), with lane index k2. The key rows in the GGSW buffer and the
accumulators use this same order, so no reordering is ever needed. The inverse
cluster runs the chain backwards with conjugate twiddles. Every butterfly
stage divides by its radix, which gives the 1/32768 of the inverse.

**Shutter transpose.** A 128 x 128 array of cells, each holding two complex
values.
* A polynomial is written row-wise. The following one is written
  column-wise into the same cells while the first is read column-wise.
* The orientation flips with every polynomial, so a single buffer keeps a
  continuous stream.
* Writing line t of the next polynomial waits until line t of the previous
  one has been read.
* FFT-B can also bypass its radix-2 stage and compute two 64-point
  transforms (`bypass_r2`). That mode is what degree 2^15 would use. The FFT
  cluster itself is built only for N = 65536, so the mode is only reached
  from the FFT-B port.

**Twiddle buffer.** 256 words of 256 complex values:

| Word | Content |
|---|---|
| n2 (0..127) | zeta^(128*i + n2) for lane i |
| 128 + n2 | exp(-2*pi*j*n2*i/32768) for lane i |

Both are stored with 46 fractional bits. The loading side computes them
(the test benches use `$cos`/`$sin`). Every FFT and I-FFT cluster reads two
words per cycle through the NoC, which makes twelve read ports in total.

**Number formats and scaling.**
* Complex values are 48-bit fixed point per component (`cplx_t`). Torus
  values are 64-bit (`torus_t`).
* Forward path: a digit enters as an integer shifted left by
  `IN_SHIFT` = 8, and the forward FFT is unscaled.
* The MAC scales each product by 2^-`MAC_SHIFT` (2^-24).
* The inverse output is shifted left by `OUT_SHIFT` = 16 into the torus.
* A key value of 2^(64 - B(l+1)) in every bin therefore multiplies a digit
  polynomial of level l by exactly its gadget weight. The key must be stored
  pre-scaled in this sense.

## 4. LWE side

The LPU (`lpu.sv`) has four lanes of 64 64-bit elements and takes one
instruction per cycle:
* add and subtract;
* multiply by a plaintext scalar;
* modulus switch to 2N, rounding to nearest, with the result written straight
  into the cluster's LWE buffer;
* a key-switching step, in which each lane decomposes one long-LWE scalar
  (its own level), multiplies the digit by 64 key-switching-key elements and
  subtracts the product from a 64-element accumulator chunk.

Seventeen chunks cover a short dimension of up to 1087. The key-switching-key
word comes from the shared KSK buffer through a NoC pipeline register. It
therefore arrives two cycles after the host drives `ksk_raddr`.

Sample extraction (`sample_extract.sv`) sits on a read port of the GLWE
buffer. It returns word w of the long LWE mask, a'[128m + w], where
a'[0] = A[0] and a'[i] = -A[N-i]. To do so it reads word -w and reverses and
negates the lanes. The same path applied to the body polynomial gives b' in
lane 0 of word 0.

Before each iteration a cluster gathers its rotation amounts. It reads the
RR LWE-buffer words that hold value `iter` of every ciphertext (RR + 1
cycles) and then starts its BRU. The initial rotation uses value `n_short`,
where the host stores 2N - b.

## 5. Memories (default sizes)

| Buffer | Organisation | Size |
|---|---|---|
| ACC buffer (per cluster) | RR*128 words x 2 x 256 complex | 9216 KB |
| GLWE buffer (per cluster) | (2RR+2)*128 words x 512 x 64 bit | 13.6 MB |
| LWE buffer (per cluster) | RR*5 words x 256 x 17 bit | 32.6 KB |
| GGSW row buffer (shared) | 128 words x 2 x 256 complex | 768 KB |
| Twiddle buffer (shared) | 256 words x 256 complex | 768 KB |
| KSK buffer (shared) | 256 words x 4 x 64 x 64 bit | 512 KB |
| Key queue | 2 words of 49152 bits | 12 KB |

All memories are `buffer_ram`: one write port and any number of synchronous
read ports that return the old data on a same-cycle write. A real chip would
use compiled SRAM macros in their place.

## 6. Where this RTL departs from the published architecture

* **GLWE buffer size.** It is sized to hold two full 64-bit accumulator
  polynomials for each of the 12 ciphertexts, plus the test polynomial
  (13.6 MB). The published figure is 1.5 MB. How that smaller buffer holds
  the state is not described.
* **LWE buffer size.** 32.6 KB here, against 24 KB published.
* **Key queue size.** 12 KB here, against 16 KB published.
* **Iterations do not overlap.** The write-back of iteration i must finish
  before iteration i+1 starts reading. The published design keeps two
  accumulators per ciphertext, possibly to overlap the two.
* **Decomposer rate with d > 1.** Each word is decomposed once per level
  pass, so throughput is 1/d. The published design keeps the FFT fed at full
  rate.
* **One degree only.** The FFT cluster is built for N = 65536. Smaller
  degrees would need the FFT-B bypass together with a smaller transpose.
* **FFT stage bypass.** Only the radix-2 stage of FFT-B can be bypassed. The
  published units can bypass every stage.
* **Unit counts.** Each BRU has one FFT-A and two FFT-B, to sustain 256
  bins per cycle. The published area table lists the units differently.
* **Sequencing.** The NoC topology, the command protocols and the scheduling
  of KS, SE and BS on the LPU are this design's. Key-switching sequencing is
  left to whoever drives the LPU ports.
* **Left out.** HBM and its controllers are outside the top. So is the
  compiler that orders the work.

## 7. Simulating

Each test bench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops, and it has a watchdog.

A unit test bench, for example:

    verilator --binary --timing -Wno-fatal --top-module tb_fft_a -Irtl -y rtl rtl/taurus_pkg.sv tb/tb_fft_a.sv
    obj_dir/Vtb_fft_a

The end-to-end benches also need `-y tb` (they share `tb_top_core.sv`):

    verilator --binary --timing -Wno-fatal -j 4 --top-module tb_taurus_top -Irtl -y rtl -y tb rtl/taurus_pkg.sv tb/tb_taurus_top.sv

| Test bench | What it checks |
|---|---|
| `tb_fft_a`, `tb_fft_b` | against direct DFTs in real arithmetic; forward and scaled inverse; bypass; latency |
| `tb_shutter_transpose` | transposition of streamed polynomials; overlap of read and write |
| `tb_fft_cluster` | all 32768 bins of a sparse polynomial against the negacyclic transform; round trip through `ifft_cluster` with both requesters competing |
| `tb_rotator`, `tb_round_unit`, `tb_decomposer`, `tb_complex_mac`, `tb_sample_extract`, `tb_lpu` | arithmetic against independent models; the decomposer test checks recomposition, digit range and stalls |
| `tb_buffer_ram`, `tb_sync_fifo`, `tb_noc`, `tb_control` | memories, the queue, routing, synchronisation, key refill and underflow counting |
| `tb_taurus_top` | end to end, 2 ciphertexts per cluster |
| `tb_taurus_top_full` | the top at its default parameters (48 ciphertexts): initial rotation, one iteration with (B, d) = (23, 1), extraction of all results |

The two end-to-end benches do the following:
1. Load twiddles and a sparse test polynomial.
2. Modulus-switch chosen values into the LWE buffers through the LPUs.
3. Run one key-switching step.
4. Stream a trivial key whose GGSWs encrypt 1, so that blind rotation must
   reduce to an exact rotation by X^(sum a - b).
5. Read all results back through sample extraction.

The reduced bench runs the blind rotation twice, with (B, d) = (23, 1) and
(12, 2); the full-size bench runs only the first. They also count each
mechanism and fail if one never occurs: key refill, key-queue back-pressure,
I-FFT arbitration wait, cross-cluster synchronisation wait, decomposer stall,
sample extraction, modulus switch and key switching.
