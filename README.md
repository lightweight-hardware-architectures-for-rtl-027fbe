# Error-detecting ECHO-256 and Fugue-256 hash engines

ECHO and Fugue are two AES-derived hash functions from the SHA-3
competition. This RTL implements both with concurrent error detection.
Alongside each transformation it computes a cheap *signature*, such as a
parity or the XOR of a group of bytes or words. The signature of the
transformation's output can be predicted from its input with far less
logic than the transformation itself. The hardware compares the
signature it predicts with the one it observes and raises a flag on any
mismatch. This catches natural faults (bit flips, stuck-at cells). It
also catches deliberate fault injection, which an attacker uses to pull
secrets out of a cryptographic circuit.

The signature formulas follow M. Mozaffari Kermani, R. Azarderakhsh and
S. Bayat-Sarmadi, *Lightweight Hardware Architectures for Efficient Secure
Hash Functions ECHO and Fugue*. That paper gives the error-detection
equations and ASIC figures but no microarchitecture. The engines around
the checkers are therefore this design's own: the schedules, the
interfaces, the reset behaviour and the way flags are reported. The
places where this design departs from the paper, or had to choose, are
listed in the section "Departures, choices and open points" below.

## The invariants behind the checks

Every check rests on one algebraic fact about a linear map. "+" means XOR
throughout, and products are in GF(2^8) modulo x^8+x^4+x^3+x+1.

**AES MixColumns plus AddRoundKey** (`aes_round_ed`). Each column of the
MixColumns matrix (2 3 1 1 / 1 2 3 1 / 1 1 2 3 / 3 1 1 2) sums to
2+3+1+1 = 1. So the XOR of the four bytes of a column is the same before
and after MixColumns. Adding the round key then changes it by the XOR of
the key bytes. For every column c,

    E_c = sum over rows r of ( in[r][c] + key[r][c] + out[r][c] ) = 0

where `in` is the MixColumns input and `out` the round output. The four
8-bit `E_c` form a 32-bit flag. The `FLAG_W` parameter ORs it down to as
few as 1 bit. SubBytes is not covered, and ShiftRows is only wiring.

**BIG.MixColumns** (`echo_big_mix_ed`). ECHO applies the same AES
MixColumns to the 2048-bit state, seen as a 4-row by 64-column byte
matrix. The same column-sum argument gives 64 independent 8-bit checks,
`E_c = sum_r (in[r][c] + out[r][c])`. The RTL reports one bit per
column (`err_o[16*j + b]` for byte `b` of word-column `j`). A single
flipped bit lights exactly one flag.

**BIG.Final** (`echo_big_final_ed`). The new chaining word is the XOR of
eight 128-bit words: row j of the state that entered the compression and
row j of the state after the eighth BIG round. Parity is linear, so the
parity of the result is the XOR of eight parities, each computed
directly on its own word. A mismatch with the parity of the computed
result flags the word. With `PAR_W = 1` (one parity bit per word), every
odd-weight error is caught and every even-weight error is missed.
`PAR_W > 1` splits each word into interleaved parity groups.

**Fugue linear steps** (`fugue_trc_ed`). Let the word signature be
sigma(S) = S_0 + S_1 + ... + S_29. TIX (S10+=S0, S0=m, S8+=m, S1+=S24)
changes sigma by exactly S_24: the S_0 and m terms each appear twice and
cancel. ROR3 only reorders words. CMIX adds S4, S5 and S6 into two
places each, so those terms cancel too. So after TIX, ROR3 and CMIX:

    sigma_hat = sigma(S_in) + S_24(in)

The same argument shows that the other linear steps leave sigma
unchanged: the second sub-round and the final-stage steps (S4+=S0 with
S15+=S0 or S16+=S0, ROR15, ROR14). The unit checks all of them with one
32-bit comparator.

**Fugue Super-Mix** (`fugue_smix_ed`). Super-Mix multiplies the 16 S-box
outputs I_0..I_15 by a fixed 16x16 matrix N. Every column of N sums to
zero except columns 0, 5, 10 and 15, which sum to {03}. The XOR of the
sixteen output bytes is therefore

    P_hat = {03} * (I_0 + I_5 + I_10 + I_15)

which costs four byte XORs and one xtime. The testbench recomputes the
column sums of N to confirm this. The S-box layer in front of Super-Mix
is not covered.

## ECHO-256 engine (`echo_compress_ed`)

**State.** The state is sixteen 128-bit words, indexed `4*col + row`.
Column 0 holds the chaining value v^0..v^3. Columns 1 to 3 hold the
twelve message words m^0..m^11, so one call absorbs 1536 message bits.
Within a word, byte 0 is in bits [127:120], and the 16 bytes form an AES
state in column-major order.

**BIG round, repeated 8 times.**
1. BIG.SubWords: every word gets two AES rounds. The first is keyed by a
   128-bit counter `k`, used as a little-endian integer. The second is
   keyed by the salt. `k` starts at `counter_i` (the number of message
   bits hashed up to and including this block) and grows by one per
   word. That is 16 per BIG round and 128 per block.
2. BIG.ShiftRows: word-row r rotates left by r word-columns.
3. BIG.MixColumns, as described in the section on invariants.

**BIG.Final.** `v_i^j = v_{i-1}^j + m^j + m^{j+4} + m^{j+8} + w_j +
w_{j+4} + w_{j+8} + w_{j+12}`. The 256-bit hash (the truncation T) is
`v^0 || v^1` of the last block. The shorter ECHO variants
(`HSIZE` from 128 to 256) use the same Compress512. They differ only in
the IV and in keeping the first `HSIZE` bits; the low bits of `hash_o`
then read zero.

**Schedule.** `LANES` AES-round units (default 4) work on `LANES` words
at a time, so the 16 words form groups of `LANES`. Each group takes two
cycles: the counter-keyed round, then the salt-keyed round.

| step | cycles |
|---|---|
| load state, latch counter and salt | 1 (the start cycle) |
| BIG.SubWords | 2*16/LANES = 8 per BIG round |
| BIG.ShiftRows + BIG.MixColumns | 1 per BIG round |
| BIG.Final | 1 |

`done_o` rises 2 + 8*(32/LANES + 1) = 74 cycles after the start cycle.
`start_i` may be raised again in the `done_o` cycle, so back-to-back
blocks take 74 cycles each. The engine keeps the chaining value. Assert
`first_i` with the first block of a message so that it starts from the
IV (each v^j = `HSIZE`, 256 by default, as a little-endian 128-bit
number).

**Interface.** The inputs are `start_i`, `first_i`, `salt_i`,
`counter_i` and `msg_i[12]`. They are sampled in the cycle where
`start_i` is high and `busy_o` is low. The outputs are `busy_o`,
`done_o` (a one-cycle pulse), `chain_o[4]`, `hash_o` and the flags.
Padding and the choice of counter values belong to the caller. In the
last block, `counter_i` is the total message length in bits.

## Fugue-256 engine (`fugue_core_ed`)

**State.** The state is thirty 32-bit words S_0..S_29. Each cycle, one
step of the linear unit is applied, then SMIX on S_0..S_3. SMIX is the
AES S-box on each of the 16 bytes, then Super-Mix.

| step | linear part | cycles |
|---|---|---|
| message word, sub-round 1 | TIX(m), ROR3, CMIX | 1 |
| message word, sub-round 2 | ROR3, CMIX | 1 |
| final stage G1 | ROR3, CMIX | 5 |
| final stage G2 | 13 x (S4+=S0, S15+=S0, ROR15 ; S4+=S0, S16+=S0, ROR14) | 26 |
| last step | S4+=S0, S15+=S0 (no SMIX) | 1 |

The output is S1 S2 S3 S4 S15 S16 S17 S18, with S1 in the top bits. The
engine takes one 32-bit word every two cycles. That is the rate implied
by the throughput in the original paper: 32 bits x 547 MHz / 8.77 Gbps
= 2.0 cycles per word.

**Interface.** `init_i` loads the IV and clears the flags. The IV is
S_0..S_21 = 0, and S_22..S_29 are the eight Fugue-256 constants in
`hash_ed_pkg`. Words arrive on a valid/ready handshake: a word accepted
in cycle t runs TIX in that same cycle, and `m_ready_o` is high again in
cycle t+2. `final_i`, given while `m_ready_o` is high and no word is
valid, starts the final stage, whose first step runs in that same cycle.
`done_o` pulses 32 cycles later with `hash_o` valid. The caller pads the
message: zeros up to a word boundary, then the 64-bit bit length as two
big-endian words.

## Error reporting and fault injection

Each engine keeps one sticky flag per kind of check. They are cleared by
the next `start_i` or `init_i`:

- ECHO: `err_aes_o` (AES rounds), `err_bmc_o` (BIG.MixColumns) and
  `err_fin_o` (BIG.Final parity).
- Fugue: `err_trc_o` (word signature) and `err_sm_o` (Super-Mix parity).

`hash_ed_top.alarm_o` is the OR of all five. A flag is set at the clock
edge that writes the faulty result, so a flag raised during a block is
visible by its `done_o`.

Every checked unit has a `fault_i` input, XORed onto the output it
checks. The engines and the top drive these inputs through a test hook
of `fi_site_i`, `fi_word_i` and `fi_mask_i`. The hook can reach lane 0's
MixColumns output, any BIG.MixColumns output word, any BIG.Final word,
any output word of the Fugue linear unit, or the Super-Mix output. A
flip on a bit whose value differs models a stuck-at fault. In normal use,
tie `fi_site_i` to `FI_NONE` and the mask to zero; synthesis then removes
the XORs.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a
watchdog and compares against the reference models in
`tb/hash_ref_pkg.sv`. Those models are written independently of the RTL:
the S-box comes from log/antilog tables, and the states are held in
packed vectors.

| testbench | what it shows |
|---|---|
| `tb_aes_sbox` | all 256 inputs; published S-box values |
| `tb_aes_round_ed` | the FIPS-197 Appendix B round 1 example; random rounds; every single-bit fault flagged; multi-bit faults flagged unless they cancel column-wise; 1-bit compressed flag |
| `tb_echo_big_mix_ed` | random states; a single-bit fault lights exactly its column's flag |
| `tb_echo_big_final_ed` | random states; single-bit and odd-weight faults flagged on the right word; `PAR_W` = 1 and 8 |
| `tb_echo_compress_ed` | two chained blocks against the reference Compress512; 74-cycle latency; each checker fires for its own injected fault and only then; an `HSIZE = 224` instance on the same blocks |
| `tb_fugue_trc_ed` | all five operations; every single-bit fault flagged |
| `tb_fugue_smix_ed` | column sums of N; random SMIX; every single-bit fault flagged |
| `tb_fugue_core_ed` | messages of 0, 1 and 5 words with input gaps; 2 cycles per word and 32 for the final stage; each flag fires for its own fault |
| `tb_hash_ed_top` | the whole design at its default parameters (see below) |

`tb_hash_ed_top` has two phases.

**Phase 1.** Both engines run at the same time. ECHO runs three chained
blocks, the last one started back-to-back. Fugue hashes a 6-word message
with stalls on its input.

**Phase 2.** A 200-run fault campaign. A 32-bit external-feedback LFSR
(x^32+x^22+x^2+x+1) chooses each run's engine, checked point, word, flip
mask and the cycle in which the fault is present. Faults are transient.
In one run (seed fixed in the testbench) the results were:

| fault class | runs with a wrong result | detected |
|---|---|---|
| single-bit, all points | 100 | 100 |
| multi-bit, AES rounds | 24 | 24 |
| multi-bit, BIG.MixColumns | 11 | 11 |
| multi-bit, BIG.Final (one parity per word) | 12 | 7 |
| multi-bit, Fugue linear unit | 15 | 15 |
| multi-bit, Super-Mix | 25 | 25 |

In 8 more runs a flag was raised although the hash came out right. This
happens, for example, when a fault hits a state word that is not part of
the output in the last Fugue step.

`tb_fault_campaign` runs the same kind of experiment directly on the
five checking units, with stuck-at faults. A random bit forced to a
random value changes the output only if that value differs from the
fault-free one. There are 20,000 single and 20,000 multiple faults per
unit; a multiple fault is 2 to 17 bits of one word. Set `N_FAULTS =
80000` to run the size of the original experiments, which takes about
four minutes of simulation. With the fixed seed:

| unit | single faults detected | multiple faults detected |
|---|---|---|
| AES round (32-bit column flag) | 100 % | 99.67 % |
| BIG.MixColumns (64 column flags) | 100 % | 100 % |
| BIG.Final, `PAR_W = 1` | 100 % | 51.66 % |
| BIG.Final, `PAR_W = 8` | 100 % | 97.75 % |
| Fugue linear steps (32-bit signature) | 100 % | 100 % |
| Fugue Super-Mix (8-bit parity) | 100 % | 97.48 % |

No unit raised a flag without an error. The checks are linear, so a
multiple fault escapes only when its flips cancel in the signature. In
a byte-wide XOR that happens when two flips sit at the same bit position
of different bytes, which is why the 8-bit signatures stay near 97.5 %.

The end-to-end testbench counts each mechanism and fails if one never
occurs: first
block, chained block, back-to-back start, input stall, final stage,
concurrent operation, and each of the five detectors.

There is one important limit. None of the hash results was checked
against official ECHO-256 or Fugue-256 test vectors; none were available
when this was written. The engines agree with reference models built
from the same reading of the two algorithm definitions. An error in that
reading, such as a byte order, the counter encoding or an IV constant,
would not be caught. The AES round and the S-box do match the FIPS-197
values.

## Departures, choices and open points

- **ECHO cycle count.** The published throughput (6.48 Gbps at 389 MHz
  for 1536-bit blocks) works out to about 92 cycles per block. This
  engine takes 74 cycles at `LANES = 4`. No value of `LANES` gives 92. The
  original microarchitecture is not described, so the cycle count of
  this engine is not comparable with the published one.
- **BIG.Final parity formula.** The published lemma and its proof
  disagree on the indices of the message and state words in the
  parity sum. The design uses what both express, the parity of each
  of the eight words that make up the new chaining word. With a single parity
  bit, even-weight multi-bit errors at BIG.Final are missed, as the
  tables above show. The original paper reports better than 99 %
  coverage in all cases. Under the random multiple-fault model here,
  that holds for the AES-round, BIG.MixColumns and Fugue-signature
  checks. The byte-wide checks reach about 97.5 %, and BIG.Final with
  one parity bit about 52 %. The paper's exact fault model (which gates,
  how many bits) is not known, so the figures are not directly
  comparable.
- **Signature check beyond TIX, ROR3 and CMIX.** The original paper derives the
  word signature for TIX, ROR3 and CMIX. This design also checks the
  second sub-round and the final-stage steps, which keep sigma.
- **S-box.** The S-box is computed as X^254 in GF(2^8) followed by the
  affine map. The original paper mentions LUT and composite-field
  S-boxes (redundant basis in its experiments). The S-boxes have no
  error detection, in the paper as here.
- **Outside the engines.** Comparators hardened at cell level, padding,
  and generation of the counter are not part of this RTL.
- **Flags.** Flags are sticky per block or message and compressed by OR.
  The original paper leaves flag reporting open.
- **Not taken from the paper.** The Fugue-256 IV, the Fugue final-stage
  sequence and the ECHO key schedule (counter and salt) come from the
  algorithm definitions, which the original paper cites but does not
  restate.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `echo_compress_ed`, `hash_ed_top` (`ECHO_LANES`) | `LANES` | 4 | AES-round units; must divide 16; latency 2 + 8*(32/LANES+1) |
| `aes_round_ed`, `echo_compress_ed` | `FLAG_W` | 32 | width of each AES-round flag (1..32) |
| `echo_big_final_ed`, `echo_compress_ed` | `PAR_W` | 1 | parity bits per chaining word at BIG.Final |
| `echo_compress_ed`, `hash_ed_top` (`ECHO_HSIZE`) | `HSIZE` | 256 | ECHO output size, 128..256 (all use Compress512): sets the IV and the truncation |

At the defaults the top synthesises (generic yosys, before
technology mapping) to about 39,000 word-level cells and 6,104
flip-flops. Of these, 4,877 are in the ECHO engine (two 2048-bit state
copies, counter, salt and chaining value) and 1,227 in the Fugue engine.

## Simulating

Every file is plain SystemVerilog. The packages `rtl/hash_ed_pkg.sv`
(and, for the testbenches, `tb/hash_ref_pkg.sv`) must be read first. For
example:

    verilator --binary --timing -Wno-fatal --top-module tb_hash_ed_top \
        -y rtl -y tb +libext+.sv rtl/hash_ed_pkg.sv tb/hash_ref_pkg.sv \
        tb/tb_hash_ed_top.sv
    ./obj_dir/Vtb_hash_ed_top

Replace the top module to run a unit testbench. The full-design test
runs in about a minute.

## Files

- `rtl/hash_ed_pkg.sv`: types, IV constants, operation and fault-site
  enums, GF(2^8) helpers.
- `rtl/aes_sbox.sv`, `rtl/aes_round_ed.sv`: the S-box and the checked
  AES round.
- `rtl/echo_big_mix_ed.sv`, `rtl/echo_big_final_ed.sv`,
  `rtl/echo_compress_ed.sv`: ECHO-256.
- `rtl/fugue_trc_ed.sv`, `rtl/fugue_smix_ed.sv`, `rtl/fugue_core_ed.sv`:
  Fugue-256.
- `rtl/hash_ed_top.sv`: both engines.
- `tb/`: one testbench per module, the stuck-at campaign
  `tb_fault_campaign.sv`, and the reference models `hash_ref_pkg.sv`.
