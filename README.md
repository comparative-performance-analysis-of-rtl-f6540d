# A Dilithium co-processor for a Zynq-class SoC: NTT engine and Keccak sampler

CRYSTALS-Dilithium signatures spend most of their time in two places: multiplying
polynomials of degree 256 over Z_q (q = 8380417), and running Keccak (SHAKE128/256) to
expand seeds into matrices, secrets and hashes. A small microcontroller cannot do this
quickly, and the reference software also needs more RAM than such a chip has. This
accelerator moves those two primitives into programmable logic. The rest of the scheme
stays in software on the SoC's application processor: control flow, packing, norm checks,
polynomial additions and the rejection loop of signing.

The RTL here is the programmable-logic half of that hardware/software co-design. It
follows a published design in which a Dilithium core is attached to the ARM processing
system of a Xilinx Zynq-7000 (ZedBoard). That design's architecture is partitioned as
follows:

* the processor runs the protocol and the top-level state machine;
* the logic holds a butterfly unit for NTT/INTT-based polynomial multiplication, and a
  Keccak/SHAKE core that feeds a coefficient sampler;
* control goes over AXI4-Lite, and bulk data (keys, messages, signature buffers) goes
  over AXI4-Stream, moved by a DMA engine.

The published description gives this partition and names the units, but not their
internals. Everything below the block level is an implementation of those units from the
Dilithium and FIPS 202 specifications, and is documented as such.

## Block diagram

```
             AXI4-Lite (control)                 AXI4-Stream in / out (data, via DMA)
                    |                                   |                 ^
             +------v------+                            |                 |
             |  axil_regs  |  CMD, LEN, CTRL.start,     |                 |
             |             |  STATUS, CYCLES            |                 |
             +------+------+                            |                 |
                    | start, cfg / busy, done           |                 |
             +------v-----------------------------------v-----------------+------+
             |                  pqc_accel_top : command sequencer               |
             |   LOAD/STORE/SAMPLE <-> coefficient port   HASH/SAMPLE -> sponge  |
             +------+--------------------------------------------+--------------+
                    |                                            |
        +-----------v------------+                  +------------v-----------+
        |        ntt_core        |                  |     keccak_sponge      |
        |  4 x 256 x 23-bit slots|                  |  1600-bit state,        |
        |  pass sequencer,       |                  |  keccak_round (1/cycle) |
        |  zeta table            |                  +------------+-----------+
        |     +-----------+      |                               | 64-bit words
        |     | butterfly |      |     coefficients  +-----------v-----------+
        |     +-----------+      | <-----------------|      rej_sampler      |
        +------------------------+                   +-----------------------+
```

The processor, the DMA engine and DDR memory are outside this RTL. The top's AXI ports are
where they connect.

## Commands

The processor writes the command word and then sets `CTRL.start`. It then polls
`STATUS.done`, or it streams data while the command runs. Only one command runs at a
time. A start while busy is ignored.

| Address | Register | Access | Contents |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0: start |
| 0x04 | CMD | RW | [3:0] command, [5:4] hash mode, [7:6] sampler mode, [9:8] slot_a, [13:12] slot_b, [17:16] slot_dst |
| 0x08 | LEN | RW | [15:0] output words of HASH (reset value 1) |
| 0x0C | STATUS | R | [0] busy, [1] done (set at the end of a command, cleared by the next start) |
| 0x10 | CYCLES | R | clock cycles the last command took |

Hash modes: 0 SHAKE128, 1 SHAKE256, 2 SHA3-256, 3 SHA3-512.
Sampler modes: 0 uniform mod q, 1 eta = 2, 2 eta = 4.

| Code | Command | Stream in | Stream out | Effect |
|---|---|---|---|---|
| 1 | LOAD | 256 beats, coefficient in [22:0] | – | slot_dst ← data. A value ≥ q is reduced once. |
| 2 | STORE | – | 256 beats, tlast on the last | slot_a is read out |
| 3 | NTT | – | – | slot_a ← NTT(slot_a) |
| 4 | INTT | – | – | slot_a ← NTT⁻¹(slot_a), scaling included |
| 5 | PWM | – | – | slot_dst ← slot_a ∘ slot_b (coefficient-wise product mod q) |
| 6 | HASH | message as 64-bit little-endian words; tkeep of the tlast beat marks its valid bytes | LEN words, tlast on the last | hash in the selected mode |
| 7 | SAMPLE | seed words, as for HASH | – | slot_dst ← 256 sampled coefficients |

Byte *i* of a message is bits [8i+7:8i] of its word. An empty message is a single beat
with tlast set and tkeep = 0.

SAMPLE with the uniform sampler absorbs the seed into SHAKE128. With seed ρ‖j‖i it
produces matrix entry Â[i][j] of Dilithium's ExpandA, already in the NTT domain. With an
eta sampler mode, SAMPLE uses SHAKE256 and seed ρ′‖nonce. That gives one secret
polynomial of ExpandS.

A matrix–vector product Â·NTT(s) runs as follows. For each entry:

1. SAMPLE Â[i][j] into slot 0.
2. LOAD s_j into slot 1 (or sample it), then NTT it.
3. PWM into slot 2.
4. STORE the result.

Software adds up the l products of a row. It can also keep the transformed vector and
reuse it. INTT of an accumulated row, loaded back, returns to the normal domain.

## Polynomial arithmetic (ntt_core, butterfly)

This is the part that needs the most care.

**Domain.** Coefficients are always fully reduced in [0, q). The transform is computed in
the plain domain, with no Montgomery factor. Therefore INTT(NTT(a)) = a, and
INTT(NTT(a) ∘ NTT(b)) = a·b mod (X²⁵⁶ + 1). The Dilithium reference software uses
Montgomery arithmetic, so its intermediate values differ from these by a constant factor.
The NTT output order is the reference one (bit-reversed), so matrix entries sampled by
SAMPLE can be multiplied directly with NTT outputs.

**Twiddles.** zetas[k] = 1753^brv8(k) mod q, where brv8 reverses 8 bits. The table is
computed at elaboration time by a constant function, `gen_zetas` in `dil_pkg`. No
number file is needed.

**Schedule.** One butterfly per clock, in passes of 128 butterflies:

* Forward NTT, pass s = 0..7: len = 128 >> s. Butterfly i is in group g = i >> log2(len)
  and pairs coefficients j = 2·len·g + (i mod len) and j + len. Its twiddle is
  zetas[2^s + g]. The Cooley–Tukey butterfly computes a' = a + w·b and b' = a − w·b.
* Inverse NTT, pass s = 0..7: len = 1 << s, with the same pairing. The twiddle is
  −zetas[(256 >> s) − 1 − g]. The Gentleman–Sande butterfly computes a' = a + b and
  b' = (a − b)·w. A ninth pass then multiplies every coefficient by 256⁻¹ = 8347681.
* PWM is one pass of 256 single products.

The order of passes and twiddles matches the loops of the Dilithium reference code.

**Butterfly.** There is one 23×23 multiplier, and its operand is chosen by the mode (b or
a − b). Stage 1 registers the 46-bit product. Stage 2 reduces it and forms the sum and
difference. The reduction uses 2²³ ≡ 2¹³ − 1 (mod q): the high part times 8191 is added
to the low part three times, followed by one conditional subtraction. This needs only
shifts and adds around the main multiplier. The unit has a latency of 2 cycles and a
throughput of one operation per cycle. A tag (the write-back addresses) travels with each
operation.

**Hazards.** Within a pass, no two butterflies share a coefficient. Across passes they
do. The sequencer therefore waits until the pipeline has written back before it issues
the next pass, which costs 3 cycles per pass.

**Memory.** The bank has SLOTS × 256 words of 23 bits, with two read and two write ports
for the butterfly. An external port lets the top load, store and fill polynomials while
the core is idle. The bank is written as an array, so a synthesis tool is free to map it
to flip-flops or distributed RAM. Mapping it to dual-port block RAM would need the reads
registered.

## Hashing and sampling (keccak_sponge, keccak_round, rej_sampler)

`keccak_round` is one combinational Keccak-f[1600] round. The sponge registers the
1600-bit state and applies one round per clock, so a permutation takes 24 cycles. Lane
(x, y) is held at bits 64·(x+5y). The supported modes and their rates are:

| Mode | Rate (bytes) | Domain byte |
|---|---|---|
| SHAKE128 | 168 | 0x1F |
| SHAKE256 | 136 | 0x1F |
| SHA3-256 | 136 | 0x06 |
| SHA3-512 | 72 | 0x06 |

Padding is XORed in one extra cycle after the last word. If the message fills the rate
exactly, a permutation runs first and the padding goes into a fresh block. Squeezing
continues block after block until the sponge is stopped, so SHAKE output of any length is
available.

`rej_sampler` keeps up to 21 nibbles of the SHAKE output, so candidates run on without a
gap across words and Keccak blocks. It works in three modes:

* Uniform mode takes 3 bytes, masks them to 23 bits and keeps the value if it is below q.
* Eta = 2 takes one nibble t (low nibble first), keeps it if t < 15 and returns
  2 − (t mod 5).
* Eta = 4 keeps t < 9 and returns 4 − t.

Negative values are returned as q − |c|. The sampler examines one candidate per cycle.

## Timing

Latencies (cycles, with the output stream never stalled):

| Operation | Cycles |
|---|---|
| NTT | 1049 in the core; 1051 as a command |
| INTT | 1308; 1310 |
| PWM | 260; 262 |
| LOAD, STORE | 256 beats + 2 |
| Keccak permutation | 24 |
| absorb or squeeze | 1 per 64-bit word |
| SAMPLE, uniform (34-byte seed) | typically ~470 |

All figures are measured in simulation. No clock frequency is assumed. The design has
one clock and a synchronous active-low reset (`rst_n`, aresetn style). The coefficient
memory is not reset.

## Where this RTL departs from, or adds to, the published design

* **Internals.** The published design names the butterfly unit, the Keccak core and the
  PRNG/sampler, but gives no internals. The pipelines, bank size, command set, register
  map and stream formats here are this implementation's own.
* **One butterfly.** A single butterfly and a 4-slot bank are used. The degree of
  parallelism of the original core is not known from its description. An NTT therefore
  takes about 1,050 cycles.
* **Samplers.** Only uniform sampling and eta sampling are in hardware. ExpandMask (the
  γ1 mask) and SampleInBall (the challenge) are left to software, which can get their
  SHAKE256 streams from HASH.
* **Software work.** Polynomial addition and subtraction, Power2Round/Decompose, hints,
  norm checks and packing are software tasks. No adder command exists.
* **Stream format.** Each coefficient takes a whole 64-bit beat, which is simple but
  uses only a third of the stream bandwidth.
* **One command at a time.** The original core is described as running its primitives
  as parallel modules. Here the NTT engine and the Keccak engine are separate, but the
  sequencer runs one command at a time. Overlapping a HASH with an NTT would need a
  second command channel and a status bit for each engine.
* **No interrupt.** Completion is polled through STATUS.

## Files

| File | Contents |
|---|---|
| `rtl/dil_pkg.sv` | constants, enums, command struct, register addresses, modular helpers, twiddle generator |
| `rtl/butterfly.sv` | modular butterfly |
| `rtl/ntt_core.sv` | NTT/INTT/PWM engine and polynomial bank |
| `rtl/keccak_round.sv` | Keccak-f[1600] round |
| `rtl/keccak_sponge.sv` | SHA-3/SHAKE sponge |
| `rtl/rej_sampler.sv` | coefficient sampler |
| `rtl/axil_regs.sv` | AXI4-Lite registers |
| `rtl/pqc_accel_top.sv` | top level and command sequencer |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_dilithium.sv` | key generation, signing and verification run through the accelerator |
| `tb/keccak_ref_pkg.sv`, `tb/dil_ref_pkg.sv` | independent behavioural references used by the testbenches |

## The whole scheme on the accelerator

`tb_dilithium` plays the processor and the DMA engine, and runs Dilithium (deterministic
signing, version 3.1 of the specification, d = 13) at all three NIST levels:

| Level | k, l | η | τ | γ1 | γ2 | ω |
|---|---|---|---|---|---|---|
| 2 | 4, 4 | 2 | 39 | 2¹⁷ | (q − 1)/88 | 80 |
| 3 | 6, 5 | 4 | 49 | 2¹⁹ | (q − 1)/32 | 55 |
| 5 | 8, 7 | 2 | 60 | 2¹⁹ | (q − 1)/32 | 75 |

Every hash and expansion goes through HASH and SAMPLE, and every transform and product
through NTT, INTT and PWM. The testbench itself only
adds, rounds, packs, checks norms and computes hints. That is the work split described
above. The matrix A is never stored: each entry is sampled again into slot 0 when it is
needed, multiplied, and the products of a row are summed in software before one INTT.

Key generation is checked against the behavioural references. The signature then has to
pass all norm bounds and the hint limit. Verification must accept it, and must reject it
after one message bit is flipped. Accelerator busy cycles from one run with a random key
and a 59-byte message (the stream sink stalls at random):

| Level | Key generation | Signing (loop iterations) | Verification |
|---|---|---|---|
| 2 | 47,064 (0.47 ms) | 275,351 (2.75 ms; 3) | 70,039 (0.70 ms) |
| 3 | 80,459 (0.80 ms) | 177,905 (1.78 ms; 1) | 111,871 (1.12 ms) |
| 5 | 131,564 (1.32 ms) | 798,040 (7.98 ms; 4) | 175,469 (1.75 ms) |

Times in brackets assume a 100 MHz clock. The published SoC figures for the complete operations, software
included, are 1.109 ms, 5.94 ms and 1.17 ms, for a level that is not stated. The testbench
holds level 2 to those figures. The clock of the original design is not known, so 100 MHz
is only a point of reference. Signing time scales with the number of rejection-loop iterations,
which depends on the key and the message. Over the whole run, about 30 % of the busy
cycles are LOAD and STORE beats (one coefficient per beat) and about 25 % are NTT and
INTT. The rest is sampling, hashing and products.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself through a
watchdog.

The expected values come from behavioural models written separately from the RTL:

* 64-bit `%` arithmetic;
* a Keccak model whose round constants come from the FIPS 202 LFSR and whose rotation
  offsets come from the (t+1)(t+2)/2 walk;
* a byte-wise sponge;
* the reference NTT loop;
* schoolbook negacyclic multiplication.

Published digests of "" and "abc" anchor the Keccak model.

`tb_pqc_accel_top` runs the whole accelerator at its default size. It uses AXI4-Lite
master tasks, a stream source with random gaps and a sink with random back-pressure. It
runs the following sequence:

1. several ExpandA samples;
2. ExpandS samples for eta = 2 and eta = 4;
3. a LOAD that includes an unreduced value;
4. NTT, PWM and INTT, each compared and with its cycle count checked;
5. three hashes: multi-block absorb, exact-rate padding, multi-block squeeze and the empty
   message.

It also counts each mechanism and fails if one never occurs: every command, stream
stalls and gaps, sampler rejections, and input reduction.

To simulate with Verilator 5 (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dil_pkg.sv tb/keccak_ref_pkg.sv tb/dil_ref_pkg.sv \
    --top-module tb_pqc_accel_top tb/tb_pqc_accel_top.sv -o sim
./obj_dir/sim
```

Replace the top module and file to run another testbench. Packages must come first on
the command line.

## Changing it

* **`SLOTS`** (on `pqc_accel_top` and `ntt_core`) sets the number of polynomials held in
  logic. The CMD register has 2-bit slot fields, so values above 4 also need wider
  fields in `cmd_cfg_t` and `axil_regs`.
* **Another modulus** needs new `Q`, `ZETA` and `NINV` values in `dil_pkg`, and a new
  `mod_reduce46`, whose shift-and-add steps rely on q = 2²³ − 2¹³ + 1.
* **More butterflies** would need a banked memory and a new pass schedule in `ntt_core`.
  The butterfly itself is independent of the schedule.
