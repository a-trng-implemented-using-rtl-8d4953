# SiRF TRNG: a true random number generator built from a strong PUF's timing engine

This design turns the delay-measurement machinery of a strong physical
unclonable function (the shift-register, reconvergent-fanout or SiRF PUF) into
a true random number generator. It draws on two sources of randomness:

* **Static entropy.** The delays of thousands of different paths through a
  challenge-configured netlist differ from chip to chip and from path to path
  because of process variation.
* **Dynamic entropy.** Measuring the same path twice gives slightly different
  results. The lowest bit of each measurement carries this jitter.

The delays are not turned into bits directly. They are treated as *soft data*,
signed fixed-point numbers. A loop of four arithmetic steps runs over them
2,048 times. The state it carries from one pass to the next (the *spread
factors*) plays the part of a sponge function's state. Each pass "absorbs"
the delay differences and "squeezes" out 2,048 bits. The jitter bits do not go
into the data at all. They are distilled into *nonce* bits, and the nonces
randomise the challenge generator's seed and two constants of the loop.

The RTL is a complete TRNG-mode datapath and controller. Two parts are
behavioural models, because their function is physical timing: the
reconfigurable SiRF netlist and the time-to-digital converter (TDC).

## Data flow of one round

```
start ──► Boot-strap: LFSR seed = 1, time 4,096 paths, keep only the nonces
                 │ nonce bits 0..63
                 ▼
          DV run: LFSR seed = nonces, time 4,096 paths, store DV_A[0..2047], DV_B[0..2047]
                 │ (the jitter of this run yields the nonces of the next round)
                 ▼
   for i = 0 .. 2047 (Sponge loop):
          DVDiff   DVD[k]    = DV_A[a_k] - DV_B[b_k]          a, b from two 11-bit generators seeded i, 2047-i
          GPEV     DVD_c[k]  = (DVD[k] - mean) / range * RC   RC in 128..191 from a nonce byte
          SF       DVD_cs[k] = fold(DVD_c[k] - SF[k]) by TCC  TCC in 8..22 from a nonce byte, SF[k] updated
          BitGen   bit       = sign(DVD_cs[k])                0/1, alternating on zero
```

`sirf_trng_top` wires this together. The blocks are:

| Module | Role |
|---|---|
| `trng_ctrl` | Sequencer. Derives the LFSR seed, RC and TCC from the nonces. |
| `chlng_gen` | 64-bit LFSR. Produces 198-bit challenges. |
| `sirf_netlist_model` | Behavioural model. Maps a challenge and a path number to a delay in ps. |
| `tdc_model` | Behavioural model. Digitises the delay into an 18 ps step count, with jitter. |
| `path_timing` | Phase 1 loop: 128 challenges × 32 paths. Writes the DV to RAM. |
| `nonce_distiller` | XORs the low bits of 12 measurements into each nonce bit (341 bits per run). |
| `trng_bram` | 6 × 2,048 × 16-bit dual-port RAM holding DV_A, DV_B, DVD, DVD_c, DVD_cs and SF. |
| `dvdiff`, `gpev`, `sf_chain`, `bitgen` | The four steps of the Sponge loop. |
| `trng_pkg` | Shared types: the RAM request struct, the phase enum, the LFSR step functions. |

Every module file opens with a comment giving its algorithm, its interface and
its cycle count.

## Phase 1: measuring paths and distilling nonces

**Challenges.** `chlng_gen` is a Fibonacci LFSR with the primitive polynomial
x^64 + x^63 + x^61 + x^60 + 1. A challenge is 198 consecutive output bits:
6 SiRF modules, each taking 16 shift-register bits, 1 launch bit and two 8-bit
multiplexer selects. Shifting one out takes 198 cycles. The generator runs on
across challenges and is reseeded only at the start of a run.

**One measurement.** For each challenge, `path_timing` times paths 0 to 31 in
order:

1. It starts the TDC.
2. When the TDC answers, it passes the delay value (DV) to the nonce distiller.
3. In a DV run, it also writes the DV to RAM word 32·c + p, for challenge c
   and path p.

Words 0 to 2047 are therefore DV_A and words 2048 to 4095 are DV_B. The
boot-strap run performs the same measurements but writes nothing.

**TDC and netlist models.**

* `sirf_netlist_model` hashes (device identifier, challenge, path) into a
  fixed delay, uniform between 5.4 ns and 18 ns. That is about 300 to 1,000 TDC
  steps, the DV range of the real device.
* `tdc_model` returns round(delay / 18 ps) plus −1, 0 or +1 steps of noise,
  after 610 cycles.

The 610-cycle latency is what makes a run of 4,096 measurements take about
50 ms at 50 MHz, the figure given for the real instrument. Measured in
simulation, a run takes 2,536,581 cycles (50.7 ms at 50 MHz). Replace these
two models with the physical netlist and TDC on an FPGA or in silicon. Their
start/done handshake is the interface to keep.

**Nonces.** `nonce_distiller` XORs the low-order bits of 12 consecutive
measurements into one nonce bit. Bit k is stored at index k. 4,096
measurements give 341 bits, and the 4 left over are ignored. The nonces are
used as follows:

* Bits 0 to 63 seed the LFSR for the next DV run. The boot-strap run itself is
  seeded with 1.
* For Sponge iteration i, with j = i mod 20:
  * byte 2j, bits [5:0], gives RC = 128 + value (range 128 to 191);
  * byte 2j+1, bits [2:0], gives TCC = 8 + 2·value (range 8 to 22).

  So 40 of the 42 nonce bytes are used, and each pair is reused about 102
  times per round.

**Rounds.** `start` runs the boot-strap, one DV run, and 2,048 Sponge
iterations. While `continuous` is high, another round follows at once:

* A new DV run replaces DV_A and DV_B.
* The new run is seeded from the nonces of the previous DV run.
* Those nonces also randomise the new round.

The nonces are committed at the end of a round. A round therefore never reads
nonces that its own DV run produced.

## Phase 2: the Sponge loop

Each step streams its 2,048 inputs from one RAM region and writes 2,048
results to another, one element at a time. The RAM has a one-cycle read
latency.

### DVDiff: pairing the delays

Two 11-bit generators produce the read addresses into DV_A and DV_B. Each is
the LFSR x^11 + x^9 + 1 with the all-zero state inserted (a de Bruijn
counter). Without that state an LFSR could not be seeded with 0, and
iteration 0 uses seed 0. With it, both generators visit all 2,048 addresses,
each exactly once per iteration. In iteration i the first generator starts at
address i and the second at 2047 − i. The output is DVD = DV_A − DV_B as a
16-bit signed word.

Cost: 2 cycles per element, 2N + 1 cycles per iteration.

### GPEV: removing chip-wide offsets and setting the range

GPEV standardises the DVD so that a uniform shift or stretch of all delays
(temperature, supply voltage, global process corner) cancels out. Then it
rescales them to a range set by RC. It makes two passes over the data.

1. **Pass 1** accumulates the sum, maximum and minimum.
2. **Arithmetic between the passes.** All values are Q.4 fixed point (4
   fraction bits).
   * mean μ = sum / 2048, a shift.
   * max′ = max − 0.05·max and min′ = min + 0.05·min. The factor 0.05 is
     implemented as 205/4096, so both bounds move 5 % toward zero.
   * range = max′ − min′.
   * scale = RC · 2^20 / range, computed by a 32-cycle restoring divider.
3. **Pass 2** writes DVD_c = ((16·DVD − μ) · scale) >>> 16, saturated to
   16 bits. The result is Q.4. Its spread is about ±RC/2 for most elements,
   and the 5 % trim lets the extreme elements reach a little beyond that.

Folding RC / range into one reciprocal means one division per iteration and
one multiplication per element. A real implementation needs one DSP
multiplier here, plus the divider.

Cost: 2N + 36 cycles.

### SF chaining: the part that makes the bits good

DVDiff pairs the same 2,048 DV_A with the same 2,048 DV_B over and over, so
many iterations would produce DVD sequences that are shifted copies of each
other. The spread factors remove that correlation. There is one SF value per
element position, kept in RAM across iterations. Each SF is 0 in the first
iteration of a round.

For each element, with TCC = T:

1. x = DVD_c − SF.
2. While x > T/2, subtract T. While x < −T/2, add T. Count the steps.
3. If the count is even, DVD_cs = x and SF is unchanged.
4. If the count is odd, the value is mirrored: DVD_cs = −x and SF ← SF + 2x.
   DVD_c − SF_new then differs from the mirrored value by a multiple of T,
   so it folds to that value.

Step 4 turns a uniform spread of DVD_c into a sawtooth-folded, sign-mixed
value that depends on the whole history of that element position.

**Example** (T = 20, SF = 0). A DVD_c of 52 needs three subtractions
(52 → 32 → 12 → −8). Three is odd, so the output is mirrored to +8 and SF
becomes 0 + 2·(−8) = −16. In the next iteration, 52 − (−16) = 68 folds to the
same +8. A DVD_c of 5 needs no step: it passes unchanged and its SF stays 0.
`tb_sf_chain` checks both cases.

**Storage.** SF is stored as an 11-bit two's-complement Q6.4 number, so it is
bounded to ±64 by dropping its high-order bits (it wraps around). A value
exactly on ±T/2 is not folded.

Cost: 4 cycles per element plus one cycle per fold step. The number of fold
steps depends on the data. DVD_c − SF can reach about ±160 (DVD_c near ±96
plus SF up to ±64), so at T = 8 an element can need about 20 steps.

### BitGen: squeezing

BitGen outputs 0 for a negative DVD_cs and 1 for a positive one. For a zero
it outputs 0 and 1 in turn. The alternation state survives across iterations.

Bits leave on a valid/ready stream (`bit_valid`, `bit_out`, `bit_ready`). When
the consumer holds `bit_ready` low, BitGen and so the whole loop wait. Bits are
never dropped.

Cost: 2 cycles per bit without stalls.

## Throughput and size

| Quantity | Cycles | At 50 MHz |
|---|---|---|
| Path timing run | 2.54 M | 50.7 ms |
| Sponge iteration (DVDiff + GPEV + SF + BitGen + handshakes, no stalls), mean over a round | 26,814 | 536 µs |
| Longest iteration of that round (TCC = 8, many fold steps) | 32,132 | 643 µs |
| Round, including its DV run | about 57.5 M | about 1.15 s |

At 50 MHz this gives about 3.6 Mbit/s, somewhat above the 2.67 Mbit/s
reported for the FPGA prototype. The rate scales with the clock.

The RAM is 196,608 bits, 24 KiB: the four 2,048-word regions of the PUF
datapath plus one for DVD_cs and one for the spread factors. Coarse synthesis
of the whole top (with the two behavioural models, which a real device
replaces) gives about 1,600 flip-flop bits; the 341-bit nonce register, its
341-bit working copy in the distiller and the 198-bit challenge register are
most of them. The GPEV scaling multiplier is the only
wide multiplication. The 32-cycle divider is a shift-and-subtract loop.

## Where this design departs from, or fills in, the reference algorithm

**Not built.** The unified PUF/TRNG architecture also has a PUF mode, with
its own challenge schedule and key-generation post-processing. It is not
described in enough detail and is not built. This RTL is the TRNG mode only.

**Behavioural models.** The netlist and the TDC, see above.

**Own choices:**

* **SF update sign.** The prose says the mirroring offset is added to SF. The
  worked example shows SF changing by −16 when −8 is mirrored to +8, which is
  SF + 2x with x = −8. The RTL follows the example, because only that sign
  makes DVD_c − SF fold to the mirrored output.
* **Range.** The range in the normalisation uses the trimmed bounds max′ and
  min′. The printed equation for the range names the untrimmed maximum and
  minimum.
* **Generators and encodings.** The 11-bit generators are de Bruijn counters
  (see DVDiff). The LFSR polynomials are listed above. The challenge is 198
  bits wide.
* **Arithmetic.** Fixed point is Q.4. SF is 11 bits wide.
* **Nonce bit order.** The mapping from nonce bytes to RC and TCC (pair
  i mod 20) is a choice, as is the commit point of the nonces at the end of a
  round.
* **Later rounds.** Only the first round after `start` runs the boot-strap.
  In continuous operation, each new DV run, and the RC and TCC of its round,
  use the nonces that the previous DV run produced. The original flow says
  only that nonces also seed the LFSR in later Phase 1 runs.
* **Sequencing.** The four Phase 2 steps run one after another, and the RAM
  ports are multiplexed by phase. No two steps are overlapped.

## Simulating

All testbenches are self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`. A typical build of one block:

```
verilator --binary --timing -y rtl -y tb +libext+.sv \
          rtl/trng_pkg.sv tb/tb_ref_pkg.sv tb/tb_dvdiff.sv --top-module tb_dvdiff
./obj_dir/Vtb_dvdiff
```

`tb/tb_ref_pkg.sv` holds integer reference models of DVDiff, GPEV, SF and
BitGen, written independently of the RTL. The block testbenches compare
against them, and so does `tb_trng_scoreboard`.

The scoreboard observes only the TDC results. From them it recomputes:

* the nonces and the expected LFSR seeds;
* DV_A and DV_B;
* every bit of every iteration.

It also counts each mechanism and reports a failure for any that never
occurred:

* boot-strap and DV runs;
* consumer stalls;
* SF mirrors;
* SF wrap-arounds at ±64;
* BitGen zero alternation;
* nonce pair reuse.

Two end-to-end testbenches use it:

* `tb_sirf_trng_top` runs a reduced design for two continuous rounds, in about
  5 s. The reduced design has N = 64, 24 iterations, 4 challenges and one DV
  per nonce bit.
* `tb_sirf_trng_full` runs one complete round at the default parameters:
  59.4 M cycles, 4,194,304 bits checked, about one minute. The DV run must
  take 4,096 × (611..620) cycles and the first iteration 10 to 14 × 2,048
  cycles.

A third testbench, `tb_sirf_trng_stats`, runs one default-size round with a consumer that never
stalls and cuts the bits into four 1,000,000-bit sequences. It applies the
frequency, block-frequency (M = 128) and runs tests of NIST SP 800-22 at the
0.01 level, and all four sequences pass. It also times every iteration: the
mean must be 10 to 14 × 2,048 cycles and the longest at most 32 × 2,048.
These bits come from the two behavioural models, so the test shows that the
post-processing produces balanced, run-free output. It says nothing about
the entropy of a physical chip.

To change sizes, override the top's parameters:

* `N` must be a power of two (the mean is a shift and the address generators
  are log2(N) bits wide).
* `N_CHLNG · PATHS_PER_CHLNG` must equal 2·N.
* `NONCE_BITS` must be at least 64 and at least 16·`NONCE_REUSE`.

An initial check in the top reports a violation of these rules.
