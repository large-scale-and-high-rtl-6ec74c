# MMH-MH privacy amplification engine with an NTT multiplier

Privacy amplification is the last step of quantum key distribution (QKD). It
compresses a reconciled key of n bits, which an eavesdropper may know in part,
into a shorter key of beta bits that is almost independent of what the
eavesdropper knows. It does this by hashing with a function picked at random
from a universal family. For this to pay off, n must be large: 10^7 to 10^9
bits. At that size the usual Toeplitz hash needs either O(n^2) work or a
floating-point FFT.

This RTL uses a two-step family instead. The key is split into k sub-blocks
x_1..x_k of GAMMA = 756839 bits. Because p = 2^GAMMA - 1 is a Mersenne prime,
each sub-block is an element of Z_p. The engine computes

    y = a_1 x_1 + ... + a_k x_k  mod p                       (multilinear modular hash, MMH)
    z = ((b y + c) mod 2^GAMMA) / 2^(GAMMA - beta)           (modular arithmetic hash, MH)

with random a_i < p, a random odd b and a random c. Both steps reduce to
multiplying two numbers of about 756839 bits. A single exact-integer
multiplier built on a number-theoretic transform (NTT) does all k + 1 of
these multiplications. The modular reductions around it need only adders and
counters. For the hash to be secure, the key must be clearly shorter than
GAMMA: beta < GAMMA - s, where s is the security parameter. k is chosen below
1 / (compression ratio), so n = k * GAMMA.

The design follows the published large-scale, high-speed privacy
amplification architecture for FPGAs, which builds MMH-MH on an NTT
multiplier. Where the publication gives only a block's function, this RTL
fills in the insides. Those choices are marked as such below and in the file
headers.

## Data flow

```
             +-----+      +--------------------+      +--------+     +------------------+
 key  ------>| mux |----->|                    |      |        |---->| MMH accumulation |--+ y
             +-----+  X   |  large-number      |----->|  data  |     | (mod 2^GAMMA-1)  |  |
               ^          |  multiplier (NTT)  | prod | switch |     +------------------+  |
               +----------|                    |      |        |---->| MH output stage  |---> z
    y (MH flow)           +--------------------+      +--------+     +------------------+
                                 ^ M                                     ^ c
 random --> switch --------------+---------------------------------------+
            (a_i in MMH, b then c in MH)
```

There is one multiplier, used k + 1 times per run. `pa_control` steps
through four states:

* **Idle.** Waits for `start` and for the multiplier to be ready.
* **MMH.** Loads x_i from the key port and a_i from the random port into the
  multiplier. The product words flow into the accumulation unit. When the
  last product word is out, the controller moves to MMH cnt.
* **MMH cnt.** Increments the sub-block counter. It goes back to MMH while
  cnt < k and on to MH when cnt = k.
* **MH.** The accumulation unit flushes its last carry and streams y back into
  the multiplier's X operand, while b arrives on the random port. The product
  b*y goes to the MH stage, which adds c (also from the random port) and
  keeps only the key bits. The state returns to Idle after the last key
  frame.

A sub-block equal to 2^GAMMA - 1 is not a valid element of Z_p and is
rejected. The switch detects it while loading it. Its product is kept out of
the accumulator, it is not counted, and `key_reject` asks the source to send
that sub-block, together with its a_i, again.

## The large-number multiplier (`large_mul`)

Operands are sequences of 24-bit words: X = sum x_i 2^(24 i). With N =
16^STAGES = 65536 points, the lower N/2 = 32768 points carry the operand and
the upper half is zero. This gives 786432-bit operands and a 65536-word
product (a cyclic convolution of that length is a linear one). A product
coefficient is a sum of at most 32768 products of two 24-bit words, so it
stays below 2^63, less than the NTT prime p = 2^64 - 2^32 + 1. The transform
is therefore exact.

**Arithmetic mod p** (`pa_pkg`, `modmul64`). Since 2^64 = 2^32 - 1 and 2^96
= -1 mod p, a 128-bit product 2^96 a + 2^64 b + 2^32 c + d reduces to 2^32
(b + c) - a - b + d. This needs a few adds and a final conditional subtraction.
The 65536-th root of unity is W = 0xED3365469864F124. It satisfies W^4096 =
2^12, so the 16-point kernel uses only powers of two.

**Radix-16 unit** (`radix16_unit`). X_k = sum_n x_n 2^(12 n k mod 192). Each
output has its own row of 16 shifters and a modular adder tree. A shift of 96
bits or more is a negation. The inverse kernel uses the shift -12 n k.

**Processors A and B** (`ntt_processor`). Each processor has 16 banks of
N/16 words of 64 bits. Every cycle it reads one group of 16 points, passes
them through the radix-16 unit and then through 16 modular multipliers, and
writes the results back to the same places. Three things make this work:

* **Conflict-free banks.** Point q lives in bank (sum of the base-16 digits
  of q) mod 16, at address q/16. The 16 points of a butterfly group differ in
  exactly one digit, so they hit all 16 banks once. The interchange between
  banks and lanes is therefore a rotation by the digit sum of the group base.
  The publication only cites a mapping table, so this mapping is this
  design's own choice.
* **Multipliers only after the butterfly.** The forward transform is
  decimation-in-frequency: it works on the most significant digit first and
  leaves the result in digit-reversed order. Its twiddles W_L^(j k) come after
  the butterfly. The inverse transform is decimation-in-time: it takes
  digit-reversed input and produces natural order. Its twiddles come before
  the butterfly of the *next* stage, and they depend only on the point index,
  so the previous stage's post-multipliers apply them. The second multiplier
  operand per stage is:

  | stage | forward | inverse |
  |---|---|---|
  | 0 .. STAGES-2 | twiddle W^(j k), from the factor ROM | twiddle W^-(j m) of the next stage |
  | last | A: B's butterfly output; B: 1 | N^-1 = 2^(192 - 4 STAGES) |

* **Pointwise product without a pass of its own.** A and B run the forward
  transform in lockstep. In the last forward stage, A multiplies its
  butterfly outputs by B's butterfly outputs for the same points, so A ends
  up holding NTT(X) * NTT(M). A then runs the inverse transform in place.

**Factor ROM** (`twiddle_rom`). The ROM is shared by both processors (they
request the same exponents). It serves W^e for 16 lanes per cycle as HI[e/256]
* LO[e mod 256]: two 256-entry tables computed at elaboration, and one
multiplier per lane. A flat 65536-entry ROM would remove those multipliers;
this is a choice of this design.

**Carry unit** (`carry_op`). Reads A in natural order, one coefficient per
cycle. It emits (coefficient + carry) mod 2^24 and carries the rest on.

**Timing.** A transform takes STAGES (N/16 + 3) + 1 cycles: one group per
cycle, plus a 3-cycle drain between stages. A multiplication takes
N/2 (load) + 2 transforms + 2 + out_words + 2 cycles. At the default size that
is 32768 + 32794 + 2 + out_words + 2. The MMH products are cut to the 2Q + 2 =
63070 words the accumulator needs, and the MH product to Q + 1 = 31535 words.

## Reduction mod 2^GAMMA - 1 (`mod_accum`)

2^GAMMA = 1 mod p, so a product below 2^(2 GAMMA) is reduced by adding its
low GAMMA bits and its high GAMMA bits. A RAM of Q + 1 = 31535 words of 24
bits holds the running sum y. GAMMA = 24 Q + R with R = 23, and the top word
holds R bits.

* **Two sweeps per product.** Each incoming product word is added to the
  word under a pointer, and the pointer wraps from Q back to 0. A product of
  2Q + 2 words therefore makes exactly two sweeps of the RAM.
* **Realignment.** Bit GAMMA is not word aligned. Word w of the high half is
  {in[R-1:0], prev[23:R]}, built from the current and the previous input
  word.
* **End-around carry.** The carry out of the top word (bit R) is not lost: it
  goes into word 0 of the next sweep. This is the whole modular reduction.
* **Clearing.** The first sweep of a run adds 0 instead of the RAM contents
  (the zero input of the mux), which clears the result without a pass of its
  own.
* **Read-out.** Before the result goes out, a flush walks the carry around
  the RAM until it dies out (usually a few words).

The RAM is read one word ahead, so reads are synchronous. The value 2^GAMMA -
1, which also means 0, is not normalised; its chance is 2^-GAMMA.

## Key extraction (`mh_mod_add`)

The MH stage adds b*y and c word by word with a carry. Reduction mod 2^GAMMA
just drops the bits above GAMMA. Division by 2^(GAMMA - beta) just skips the
low bits. A counter of the bit position 24 w decides what comes out of each
word:

* nothing below word (GAMMA - beta) / 24;
* from that word, its bits from (GAMMA - beta) mod 24 upward;
* then 24 bits per word, with R bits from the top word (`z_last`).

Each frame carries its valid-bit count `z_nbits`, right-aligned. The key is
the concatenation of the frames, first frame least significant. The
publication states that the first frame carries (GAMMA - beta) mod 24 bits.
With the least-significant-first word order used here it carries 24 - ((GAMMA
- beta) mod 24) bits. The RTL follows the arithmetic definition of z.

## Interfaces of `lshs_pa_top`

All streams are 24-bit words, lowest word first, with valid/ready handshakes.

| port | meaning |
|---|---|
| `start`, `k`, `beta` | Start a run of k sub-blocks (0 counts as 1) with a beta-bit key. |
| `key_*` | k sub-blocks of Q + 1 words each. The top word carries R bits; higher bits are ignored. |
| `rnd_*` | a_1..a_k, each taken together with its key sub-block. Then b, taken while y is reloaded (bit 0 forced to 1). Then c, one word per product word of b*y. |
| `z_*` | Key frames: `z_word`, `z_nbits`, `z_last`. |
| `key_reject` | The sub-block just loaded was all ones; resend it with its a_i. |
| `c_underrun` | A c word was not valid when it was needed (the key is then wrong). |
| `busy`, `state` | Controller state (Idle, MMH, MMH cnt, MH). |

The c words are not buffered: the random source must have them ready when
the MH product streams out.

## Throughput

A run of k sub-blocks takes about 128640 k + 97110 cycles at the default
size: one MMH multiplication per sub-block, plus the MH multiplication, flush
and read-out. That is 756839 k input bits in that many cycles, tending to 5.9
bits per clock for large k. It is 3.4 bits per clock for k = 1, and 5.5 for
k = 10.

The publication reports 1.3 to 1.95 Gbit/s over 1.5 to 100 Mbit blocks, but
it gives no clock frequency. At 5.9 bits per clock, a clock of about 330 MHz
would match the upper figure. The rise of throughput with block size comes
from the fixed MH overhead, as in the measured curve.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `lshs_pa_top`, `large_mul`, `ntt_processor` | `STAGES` | 4 | N = 16^STAGES points, operands of 12 N bits |
| `lshs_pa_top`, `mod_accum`, `mh_mod_add`, `pa_datapath_switch`, `pa_control` | `GAMMA` | 756839 | sub-block length, a Mersenne exponent |
| `lshs_pa_top`, `pa_control` | `KW` | 16 | width of k |

Constraints on the parameters:

* GAMMA mod 24 must not be 0, and GAMMA must be at least 48.
* Q + 1 must be at most N/2.
* 2Q + 2 must be at most N.

Smaller consistent pairs are STAGES = 2 with GAMMA = 2281 or 2203, and
STAGES = 1 with GAMMA = 127. The root W for smaller N is W^(65536/N), and
the twiddle exponents are already scaled for it.

## Files

`rtl/pa_pkg.sv` holds the shared constants, the mod-p functions and the
controller state type. The rest of `rtl/` has one module per file:
`modmul64`, `radix16_unit`, `twiddle_rom`, `ntt_processor`, `carry_op`,
`large_mul`, `mod_accum`, `mh_mod_add`, `pa_datapath_switch`, `pa_control`
and `lshs_pa_top`.

## Verification

Each module has a self-checking testbench in `tb/`. It compares against
values computed independently: wide integer `%` arithmetic, direct DFT sums,
or schoolbook big-number arithmetic (`tb/pa_ref_pkg.sv`). Each prints
`TB_RESULT checks=N failures=M`.

* `tb_lshs_pa_top` runs seven complete hashes at STAGES = 2, GAMMA = 2281.
  GAMMA mod 24 = 1 there, the hardest alignment. The runs use random key
  lengths, source stalls, rejected all-ones sub-blocks and end-around-carry
  flushes, and the testbench checks every key bit. It also counts each
  mechanism and fails if one never happened.
* `tb_lshs_pa_full` runs one complete hash at the default sizes: two
  sub-blocks, one rejected block and a 100000-bit key. a_i and b are sparse so
  that the reference is cheap. It takes about 483000 cycles, under a minute
  of simulation.
* `tb_lshs_pa_workload` runs the compression-ratio-0.3 operating point at
  the default sizes: k = 3 (n = 2270517 bits) and a 681155-bit key. It also
  checks that the run takes 3 x 128640 + 97110 cycles, within a small margin.
  The measured 483024 cycles are 4.7 input bits per clock.
* `tb_large_mul` checks 256-point multiplications word by word, and the
  cycle count.

To simulate a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pa_pkg.sv tb/pa_ref_pkg.sv \
    tb/tb_lshs_pa_full.sv --top-module tb_lshs_pa_full
./obj_dir/Vtb_lshs_pa_full
```

Modules are found by file name through `-I`. Unit testbenches need only
`rtl/pa_pkg.sv` plus the testbench.

## Where this RTL departs from the publication

The published design gives the architecture, the state diagram, the NTT
prime and root, the radix-16 unit and the three reduction units at block
level. These points are filled in or changed here:

* **Bank mapping.** The digit-sum mapping above replaces the cited address
  mapping table, which is not given.
* **Twiddle storage.** The publication stores all rotation factors. Here two
  256-entry tables and one multiplier per lane stand in for a 65536-entry ROM.
* **First key frame.** The publication's count of bits in the first frame does
  not match least-significant-first output. The RTL follows the arithmetic
  (see Key extraction).
* **Rejected sub-blocks.** The publication says only that an all-ones
  sub-block is discarded and loaded again. Here it is detected during load,
  its product is dropped, and `key_reject` asks the source to resend it.
* **One multiplication at a time.** The two transforms of one product run
  together, but the next product does not start loading until the previous
  one has been read out.
* **Radix.** Only radix 16, the configuration the publication evaluates, is
  built. Its radix-2 and radix-4 variants are not.
* **k at run time.** k is a 16-bit input rather than a build-time constant,
  so one build serves every compression ratio.

## What is not here

* **Platform.** The FPGA board, its clocking and I/O, and the QKD system
  that supplies keys and shared randomness are outside this RTL. They appear
  as the stream ports.
* **Timing closure.** No timing-closure pipelining was done. The radix-16
  sum trees and the 64-bit multipliers are each a single register stage.
* **Overlap of multiplications.** Processor B could load the next a_i while
  A runs its inverse transform. The controller runs the multiplications one
  after another, as its four-state diagram implies.
* **Resource figures.** The published resource figures (LUTs, BRAM, DSP) are
  not reproduced. Memory here: 2 x 4 Mbit of NTT banks, a 739 kbit
  accumulation RAM and 2 x 256 words of twiddle tables.
