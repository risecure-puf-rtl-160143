# RISecure-PUF: a PUF functional unit for RISC-V

A Physical Unclonable Function (PUF) turns manufacturing variation into a
device-unique response to a challenge. Used raw, a PUF has two problems. Its
response is noisy: a few bits flip from one read to the next. And a strong
PUF can be learned: an attacker who collects enough challenge/response pairs
can fit a model of it. This unit puts an SRAM PUF behind two RISC-V custom
instructions and gives software three views of the same PUF:

* **R1**, the raw response. The PUF is used as a strong PUF.
* **R2**, a stable response rebuilt by a fuzzy extractor (error-correcting
  code plus helper data). The PUF is used as a weak PUF, for key generation.
* **R3 = SHA3-256(R2 || C)**, a hash of the stable response and the
  caller's challenge. The hash hides the PUF's structure, so collected pairs
  give an attacker nothing to model. The message has a fixed length, so
  length-extension tricks do not apply either.

Error correction is the slow step. A **lookaside buffer** therefore caches
corrected responses. When software samples the same inner PUF many times in
a row (batch sampling), only the first sample pays for the PUF read and the
ECC decode. Every later sample costs only the hash.

The RTL is SystemVerilog (IEEE 1800-2017). It is synthesizable except for the
SRAM PUF, which is analog by nature and appears here as a behavioural model.

## Output selector E and the data path

```
                 C ──────────────────────────────────────────┐
                 │                                           v
  C ─┬─> MUX ──> SRAM PUFs ──R1──┬──────────────────> rd  (E=00)
  C0─┘   ^ E     ^ sel (idx)     │                           │
                                 v                           │
                          aux ─> ECC ──R2──> lookaside ──R2──┼──> rd (E=01)
                                             buffer          v
                                                        SHA3-256 ──R3──> rd (E=10)
```

| E[1:0] | PUF challenge        | Error correction | Result in rd |
|--------|----------------------|------------------|--------------|
| 00     | outer challenge C    | none             | R1, 60 bits, zero-extended |
| 01     | fixed, 0             | yes (+ buffer)   | R2, 28 bits, zero-extended |
| 10     | inner challenge C0   | yes (+ buffer)   | R3, first 8 bytes of SHA3-256(R2 ‖ C) |
| 11     | reserved             | —                | error |

For E = 10 the PUF does not see the caller's challenge C. It sees C0, which
was fixed when the PUF was enrolled. C enters only the hash. So the caller
can ask any number of different questions, and every answer is a hash of the
same secret R2.

## The two instructions

Both are R-type words under the custom-1 major opcode `0101011`:

| funct7  | rs2   | rs1 | funct3 | rd | opcode    | instruction |
|---------|-------|-----|--------|----|-----------|-------------|
| 0000000 | 00000 | rs1 | 001    | rd | 0101011   | `inner_puf_init rd, rs1` |
| 0000000 | rs2   | rs1 | 010    | rd | 0101011   | `outer_puf_chal rd, rs1, rs2` |

Operand layout in rs1 (64-bit registers):

| bits    | field |
|---------|-------|
| [31:0]  | challenge: C0 for `inner_puf_init`, C for `outer_puf_chal` |
| [39:32] | PUF index; it must be below `NUM_PUF` (4) |
| [61:40] | ignored |
| [63:62] | E (only for `outer_puf_chal`) |

**`inner_puf_init`** enrolls a PUF. It stores C0 as PUF idx's inner
challenge, reads R1 = PUF(C0), takes a random number r from the unit's `rnd`
input, and returns the helper data `aux = R1 xor Encode(r)` in rd. Software
keeps aux; it is not secret by itself.

**`outer_puf_chal`** samples a PUF. rs1 gives E, idx and C; rs2 gives aux.
A typical sequence is:

```
inner_puf_init a0, t0          # t0 = {idx, C0};  a0 <- aux   (once)
outer_puf_chal a1, t1, a0      # t1 = {E=10, idx, C1};  a1 <- R3(C1)
outer_puf_chal a1, t2, a0      # t2 = {E=10, idx, C2};  a1 <- R3(C2), buffer hit
```

For a device key, enroll with C0 = 0 and then call with E = 01. The weak-PUF
path reads the PUF at challenge 0. The result is the enrolled r, recovered
from the PUF on every call and never stored on chip except in the buffer.

Errors: a PUF-opcode word with another funct3, a non-zero funct7, or rs2 ≠ x0
on `inner_puf_init` is illegal. So is an index ≥ 4, or E = 11. Any of these
answers with `rsp_err = 1` and `rd = 0`. So does a word with a different
opcode. So does a failed decode (see below).

## Fuzzy extractor (`puf_ecc`)

The ECC uses the *code-offset* construction over four codewords of the
binary BCH(15,7) code. That code corrects two errors per codeword. Its
generator is g(x) = x⁸+x⁷+x⁶+x⁴+1 and it is used in systematic form
`{m[6:0], m(x)·x⁸ mod g(x)}`.

* Enrollment: `aux = R1 xor {Enc(r₃), Enc(r₂), Enc(r₁), Enc(r₀)}`. Here
  r = {r₃,…,r₀} has 28 bits and R1 has 60.
* Reconstruction: `y = R1' xor aux` equals the codewords of r plus the bit
  difference between the two PUF reads. Each 15-bit block is decoded back to
  its 7 message bits, which gives R2 = r.

The decoder is deliberately simple. For each block it spends one clock on
the syndrome s = y(x) mod g(x). If s ≠ 0, it then tries one error pattern
per clock. The patterns come in the order (i, j), i ≤ j ≤ 14, with i = j
meaning a single error. It stops at the first pattern whose syndrome equals
s. Because the code's minimum distance is 5, that pattern is the only one of
weight ≤ 2. The pattern count for errors at positions p ≤ q is
`Σ_{i<p}(15−i) + (q−p) + 1`. A block therefore costs 1 to 121 clocks, and a
whole response 4 to 484. If no pattern matches, more than two bits flipped:
`dec_fail` rises, and the unit returns an error instead of a wrong key.
With three or more flips, the decoder can also land on a different codeword
without noticing. No bounded-distance decoder can prevent that.

## Reed-Solomon alternative (`puf_ecc_rs`, `ECC_RS = 1`)

Top parameter `ECC_RS` selects a second error-correcting code with the same
ports: one codeword of RS(15,7) over GF(16). The field polynomial is
x⁴+x+1 and the primitive element is α = 2. Each of the 15 symbols is 4 bits,
so the codeword fills the 60-bit response. The 7 message symbols give the
same 28-bit R2, so nothing else in the unit changes.

* Encoding is systematic. The generator is g(x) = (x−α)(x−α²)…(x−α⁸).
  Symbol i sits in bits [4i+3:4i], and r sits in bits [59:32].
* The code corrects any 4 wrong symbols. A symbol counts once however many
  of its 4 bits flipped, so clustered flips cost less than with BCH.
* The decoder is a textbook pipeline with one step per clock:
  * 1 clock computes the syndromes S₁…S₈;
  * 8 clocks run the Berlekamp-Massey iterations, giving the error locator
    Λ(x);
  * 1 clock computes the evaluator Ω(x) = S(x)Λ(x) mod x⁸;
  * 15 clocks run the Chien search, one position each, and Forney's rule
    e = Ω(α⁻ⁱ)/Λ′(α⁻ⁱ) corrects each root found;
  * 1 clock produces the result.

  The decode therefore always takes 26 clocks, whatever the error count.
* If the number of roots found differs from the degree of Λ, there were
  more than 4 symbol errors, and `dec_fail` rises.

With `ECC_RS = 1`, the PUF model groups its noise over the whole 60-bit
response. Each read flips at most `PUF_NOISE` bits, so two reads differ in
at most 2 symbols.

## Lookaside buffer (`lookaside_buffer`)

* **Key:** {PUF index, inner challenge, aux} (94 bits). These are exactly
  the inputs that determine R2.
* **Value:** R2 (28 bits).
* **Depth:** 8 entries.
* **Lookup:** fully associative and combinational.
* **Fill:** on each successful decode. Enrollment does not fill it.
* **Replacement:** first in, first out. The write pointer walks the slots in
  order and overwrites the oldest entry.

Because the key includes aux and the inner challenge, re-enrolling a PUF
(new r, hence new aux) cannot return a stale value. A wrong aux cannot
return a cached R2 either. Note that the buffer holds corrected responses in
flip-flops; it widens the attack surface against probing, which the design
does not defend.

## Hash (`sha3_256_core`)

SHA3-256 (FIPS 202) over an 8-byte message:

* bytes 0–3: R2, zero-extended and little-endian;
* bytes 4–7: C, little-endian.

The message always fits one 136-byte block, so the core absorbs once and
runs Keccak-f[1600] at one round per clock. `done` rises 24 clocks after
`start`. rd receives digest bytes 0–7, with byte 0 in rd[7:0].

## Timing (default parameters)

Clocks from the accepting edge of the request to `rsp_valid`:

| operation                         | clocks |
|-----------------------------------|--------|
| `outer_puf_chal`, E=00            | 6 (PUF read 4 + 2) |
| `outer_puf_chal`, E=01, buffer hit | 1 |
| `outer_puf_chal`, E=10, buffer hit | 27 (24 hash rounds + 3) |
| miss (E=01/10)                    | hit time + 8 + decode (BCH 4…484, RS 26) |
| `inner_puf_init`                  | 8 |

The unit serves one instruction at a time. `req_ready` is high only when it
is idle. The result stays on `rsp_*` until the core takes it with
`rsp_ready`; an assertion checks this.

Batch sampling (from `tb_batch_sampling`): n samples of E = 10 on one
enrolled PUF, with and without the buffer, for both codes. The BCH decode
time depends on the random bit flips, so its numbers vary with the seed.
The RS numbers are exact: 61 + 27(n−1) clocks with the buffer, 61n without.

| samples | BCH, with buffer | BCH, without | speed-up | RS, with buffer | RS, without | speed-up |
|---------|------|-------|-----|-----|------|-----|
| 1       | 145  | 145   | 1.0 | 61  | 61   | 1.0 |
| 4       | 212  | 774   | 3.7 | 142 | 244  | 1.7 |
| 16      | 668  | 3408  | 5.1 | 466 | 976  | 2.1 |
| 32      | 1126 | 10509 | 9.3 | 898 | 1952 | 2.2 |

The same testbench also measures the single-CRP rate without the buffer.
It compares the stable response alone (E = 01) with the full hashed
response (E = 10). The hash adds a fixed 26 clocks to every sample. With RS
that means 35 against 61 clocks, a 43 % lower rate. With BCH the decode time
dominates and varies; one run gave 6.2 against 3.9 samples per 1000 clocks.
The two BCH figures come from different PUF reads, so their ratio only shows
the trend. The published FPGA measurement shows a much smaller loss
(1–11 %). The likely reason is that its software and ECC take far longer
per sample than this RTL does.

## SRAM PUF model (`sram_puf_array`)

This is a behavioural stand-in with four instances. Instance idx answers
challenge c with `fingerprint(SEED, idx, c) xor noise`:

* The fingerprint is a splitmix64-based mixing function, so each
  (idx, challenge) gives a fixed, random-looking 60-bit pattern.
* The noise flips 0…`NOISE_PER_BLK` bits in each `BLKW`-bit group on
  every read. The default is 1. The group is 15 bits with BCH, so
  enrollment and reconstruction reads differ in at most 2 bits per
  codeword, the most that code can correct. With RS the group is the whole
  response.
* A read takes 4 clocks.

Change `SEED` to model another chip. To replace the model with a real PUF
macro, keep its handshake: `req_valid`/`req_ready`, then a one-cycle
`rsp_valid` carrying `rsp_r1`.

## Where this departs from the source design

* **Enrollment formula.** The original description writes enrollment as
  Encode(R1 ⊕ r) and reconstruction as Decode(R1' ⊕ aux). These two do not
  fit together. The code-offset form aux = R1 ⊕ Encode(r) is used, which
  makes the reconstruction formula hold.
* **Buffer key.** The original description looks the buffer up by R1 and
  aux. R1 is noisy and known only after a PUF read, so that key would need
  the very read the buffer should skip, and it would miss after any bit
  flip. The key here is the PUF index and inner challenge, which select
  which R1 is read, plus aux. The value is the corrected R2.
* **R2 always comes from the ECC.** One statement says the weak-PUF mode
  needs no ECC. The block diagram shows R2 as the ECC output, and that is
  what is built.
* **Choices the source leaves open.** These are all this design's choices:
  both codes and their sizes (only the names BCH and Reed-Solomon are
  given), the choice of SHA3-256, register width 64,
  4 PUFs, 32-bit challenges, a buffer of 8 entries, the rs1 layout, how E is
  passed, the per-PUF C0 register, truncating R3 to 64 bits, and the
  handshake.
* **Not built.** The hash core is private to the unit; sharing it
  with a cryptographic engine is not modelled. The host core and the random
  number source are outside the unit, and r arrives on the `rnd` port.
* **Speed-up.** The published speed-ups were measured in microseconds on an
  FPGA with software in the loop. The clock counts above are for this RTL
  alone and are not comparable. The ranking of the two codes differs too.
  In the published numbers Reed-Solomon is the slow code, and the buffer
  gains 2.7× with it against 1.6× with BCH at 16 samples. Here the
  fixed 26-clock RS decoder is faster than the search-based BCH decoder, so
  the buffer gains more with BCH (5.1× against 2.1×).

## Files

| file | contents |
|------|----------|
| `rtl/puf_pkg.sv` | widths, encodings, enums |
| `rtl/risecure_puf_unit.sv` | top: control FSM, per-PUF C0 register, wiring |
| `rtl/puf_ise_decoder.sv` | instruction and operand decoding |
| `rtl/puf_challenge_mux.sv` | challenge selection by E |
| `rtl/sram_puf_array.sv` | behavioural SRAM PUF bank |
| `rtl/puf_ecc.sv` | BCH(15,7) code-offset fuzzy extractor |
| `rtl/puf_ecc_rs.sv` | RS(15,7) code-offset fuzzy extractor (`ECC_RS = 1`) |
| `rtl/lookaside_buffer.sv` | FIFO-replaced cache of R2 |
| `rtl/sha3_256_core.sv` | single-block SHA3-256 |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_batch_sampling` |
| `tb/tb_ref_pkg.sv` | reference BCH encoder and SHA3-256 written independently of the RTL (the RS testbench builds its own GF(16) tables) |

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/puf_pkg.sv tb/tb_ref_pkg.sv tb/tb_risecure_puf_unit.sv \
    --top-module tb_risecure_puf_unit -o sim
./obj_dir/sim
```

`tb_risecure_puf_unit` runs the unit at its default parameters. It
exercises enrollment, all three modes, buffer hits, misses and eviction, ECC
correction, decode failure, illegal words and a stalled response, and it
fails if any of these never happens. `tb_batch_sampling` runs the batch
workload for 1 to 32 samples on four units (BCH and RS, with and without
the buffer) and prints the table above.
