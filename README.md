# An LWE-based strong PUF in SystemVerilog

A strong physical unclonable function (PUF) answers each challenge with a response bit that an
attacker cannot predict, even after seeing very many other challenge/response pairs (CRPs). This
design gets that property from the learning-with-errors (LWE) problem instead of from a
delay-race or arbiter circuit. The chip holds a secret vector **s** over Z_q, where n = 160 and
q = 256. A challenge is an LWE ciphertext (**a**, b). The response is one bit of LWE decryption:

    r = Q( b - <a, s>  mod q ),   Q(x) = 1 if q/4 < x <= 3q/4, else 0

The server made the CRPs from **s** and small Gaussian errors. It is the only party that can
produce ciphertexts whose decryption it knows in advance. Learning **s** from observed CRPs is
then an LWE instance, so modelling attacks have to solve a lattice problem.

Two things keep this cheap in hardware:

* **Compressed challenges.** Sending a 160-byte vector **a** per bit would be far too much.
  Instead the chip grows **a** from a short seed with a 256-bit LFSR. Half of the seed comes
  from the challenger. The other half is a counter on chip that advances with every challenge,
  so a challenger can never replay the same **a** with a different b.
* **The secret comes from SRAM power-up values.** The 1280 bits of **s** are not stored. At
  start-up they are rebuilt from the noisy power-up state of 6,360 SRAM cells (a "physically
  obfuscated key", POK) by a fuzzy extractor: a 3-fold repetition code inside a shortened BCH
  code.

The arithmetic core is one 8-bit multiply-accumulate (MAC) unit and a bit-serial LFSR. Two
parameters widen it: **P2**, the LFSR bits produced per clock, and **P1**, the number of
complete datapaths that run side by side.

## Block map

```
                 seed_a[k] (128 b)     b_in[k] (8 b, one beat per response bit)
                        |                   |
  challenge_counter --t-+--> seed || (t+k) -+-> lfsr_lwedec_datapath[k]  (k = 0..P1-1)
        ^                                       |  lfsr (P2 bits/clk) -> bytes a_i
        | incr                                  |  lwedec: max(1,P2/8) x mod_mac, quantizer
  lpuf_controller --load/init/step/run_idx------+--> r_out[k], r_valid
                                                 ^
                                                 | key s (1280 b, shared)
  pok_raw (6360) --+--> rep_decoder (XOR helper, majority of 3) --2120 b--> bch_decoder -> key
                   |                                                        (10 x [212,128], t=11)
                   +--> pok_readout (one-time serial readout, blow_fuse, lock)
```

| File | Contents |
|---|---|
| `rtl/lpuf_pkg.sv` | constants (n, q, widths, LFSR taps, code sizes), `quantize()`, GF(2^8) multiply and powers |
| `rtl/lfsr.sv` | 256-bit Fibonacci LFSR, unrolled to P2 bits per clock |
| `rtl/mod_mac.sv` | one MAC unit over Z_256: acc <- acc - a*s |
| `rtl/quantizer.sv` | Q(x) as a comparator on the two top bits |
| `rtl/lwedec.sv` | NMAC MAC units, partial sums added, quantized |
| `rtl/challenge_counter.sv` | 128-bit public counter t, stepping by P1 |
| `rtl/lfsr_lwedec_datapath.sv` | LFSR + byte assembly + key-byte select + LWEDec |
| `rtl/lpuf_controller.sv` | sequencer: seed load, b' handshake, MAC run, response strobe |
| `rtl/rep_decoder.sv` | code-offset XOR and 2-of-3 majority, combinational |
| `rtl/bch_decoder.sv` | syndromes, Berlekamp-Massey, Chien search; 10 blocks to one key |
| `rtl/pok_readout.sv` | enrollment readout interface that locks itself |
| `rtl/lattice_puf.sv` | top level |

## The arithmetic: b' - <a', s> in one MAC

Everything is mod 256, so the arithmetic is just 8-bit wrap-around. Each MAC unit holds an 8-bit
accumulator. A response bit starts by loading b' into unit 0 and clearing the others. Then each
element adds `(-a_i) * s_i` (the low 8 bits of the product). After all 160 elements the units'
accumulators are added without a carry-out, giving y = b' - <a', s> mod 256. The quantizer
returns 1 when y is in 65..192, which is the upper half of the "distance from 0" circle. With 8-bit
values, that comparison is a small function of the top bits and a check for the boundary value 64.

Key bytes: s_i is `key[8i+7 : 8i]`. The MAC unit that handles element e reads that slice through a
multiplexer driven by the controller's `run_idx`. The key is never shifted, so it can stay a plain
register (or the fuzzy extractor's output register) and be shared by every datapath.

## Expanding the seed: the unrolled LFSR

The LFSR is 256 bits wide, with feedback X255 ^ X253 ^ X250 ^ X245. The bit-serial form shifts one
bit per clock and emits X255. The unrolled form with P2 outputs per clock applies that step P2
times in one clock. Output k (k = 0..P2-1) is bit X[256-P2+k], and the new low bits are
`fb_k = X[255-d] ^ X[253-d] ^ X[250-d] ^ X[245-d]` with d = P2-1-k. Because the lowest tap is 10
places below the top, these feedbacks depend only on bits of the current state when P2 <= 246.
This design allows P2 up to 128 and requires it to be a power of two (1, 2, 4, ..., 128), so that
a whole number of bytes or a whole fraction of a byte appears per clock.

The bit stream becomes bytes in stream order: the earliest bit of each group of 8 is the most
significant bit of a_i. Two cases follow:

* **P2 < 8.** A small shift register gathers bits until a byte is complete. The single MAC fires
  every 8/P2 clocks. One response bit takes 1280/P2 clocks of MAC work.
* **P2 >= 8.** Every clock delivers P2/8 whole bytes, one per MAC unit. One response bit takes
  160/(P2/8) = 1280/P2 clocks.

The seed word is `seed_a' (128 bits) || t (128 bits)`, with seed_a' in the upper half. It is
shifted in P2 bits per clock, most significant chunk first, in 256/P2 clocks. The LFSR keeps its
state from one response bit to the next. So the vectors a'_1, a'_2, ... of a multi-bit challenge
are consecutive 1280-bit windows of one LFSR sequence.

An all-zero seed word would lock an XOR LFSR at zero. Because t is a live counter, that happens
only if the challenger sends seed_a' = 0 exactly when t = 0. The response is still well-defined
(every a_i = 0, r = Q(b')), so the design does not special-case it.

## The counter and the seed split

Datapath k is seeded with `seed_a'[k] || (t + k)`. The counter then advances by P1 on each
challenge, so no two datapaths, and no two challenges, ever share a seed-word half t. `t_out`
reports the value used, so that the verifier can rebuild the same **a'** vectors. The counter
resets to zero. A product would want it non-volatile or initialised from a TRNG; that is left to
the integrator.

The 128/128 split is a choice made here. The LWE security argument needs only that the
challenger cannot pick the whole seed. The counter needs only to be wide enough never to wrap.

## The controller and its timing

`lpuf_controller` is a five-state machine:

| State | Length | What happens |
|---|---|---|
| IDLE | until `start` | `start_ready`; on start the seeds and t are captured and the counter advances |
| LOAD | 256/P2 clocks | seed word shifted into every LFSR |
| WAIT_B | until a b' beat | `b_ready`; the accepted beat loads b'[k] into each datapath and records `b_last` |
| RUN | 1280/P2 clocks | LFSR steps and MAC operations |
| RESP | 1 clock | `r_valid` with `r_out[k]`; then WAIT_B, or IDLE after the `b_last` beat |

With b' always waiting, a response bit costs 1280/P2 + 2 clocks, and a challenge adds 256/P2
clocks of seed loading. The table gives the clocks for 128 response bits, counting the edge
that takes `start` as the first: 256/P2 + (128/P1)(1280/P2 + 2). Each row was measured in
simulation.

| P1, P2 | Clocks | us at 33.3 MHz | Published FPGA latency, us |
|---|---|---|---|
| 1, 1 (default) | 164,353 | 4,936 | 5,632 |
| 1, 4 | 41,280 | 1,240 | 1,843 |
| 1, 8 | 20,768 | 624 | 1,229 |
| 1, 32 | 5,384 | 162 | 307 |
| 1, 128 | 1,538 | 46 | 77 |
| 2, 1 | 82,304 | 2,472 | 2,765 |
| 4, 16 | 2,640 | 79 | 154 |
| 8, 4 | 5,216 | 157 | 230 |
| 2, 128 | 770 | 23 | 38 |
| 8, 32 | 680 | 20 | 38 |

For the bit-serial design the figures are close to the published FPGA measurements. Loading
the seed takes 257 clocks, 7.7 us at 33.3 MHz, against 8 us published. One response bit takes
1282 clocks, 38.5 us, against 44 us published; the published per-bit figure probably includes
some handshake overhead.

For P2 >= 8 the measured latencies are 50 to 60% of the published ones. The
reason is not known. It may be a two-cycle MAC or LFSR pipeline in that implementation. This RTL
does one byte per MAC unit per clock, with no pipeline register between the LFSR and the
multiplier. If timing closure needs one, a register there adds one clock per response bit.

Handshake rules: `b_valid` must stay high until `b_ready` takes it. An assertion checks this. So
does one-hot use of the controller's load/run outputs. `start` is ignored, and `start_ready` is
low, until the fuzzy extractor has reported `key_valid`.

## Rebuilding the key: repetition + BCH fuzzy extractor

The key is stored in code-offset form. At enrollment the server reads the raw power-up bits **w**
once (see below), picks a random 1280-bit key, encodes it, and publishes the helper data
`h = w XOR C(key)`. C is the concatenated code: ten BCH codewords of 212 bits, each bit repeated
three times, for 6,360 bits in all. In the field the chip reads w' (w with some bits flipped) and
decodes `w' XOR h`, which is `C(key)` with the same bit flips.

**Inner code (`rep_decoder`).** XOR and 2-of-3 majority over each group of three bits,
combinational: 6,360 bits in, 2,120 out. At a raw bit error rate of 5%, each output bit is wrong
with probability about 0.7%.

**Outer code (`bch_decoder`).** Each 212-bit block is the BCH(255,171) code shortened by 43 bits:
128 message bits and 84 parity bits, correcting up to 11 errors. The field is GF(2^8) with
x^8 + x^4 + x^3 + x^2 + 1. Bit i of a block is the coefficient of x^i, and the message occupies
bits 211..84. Block b gives key bits 128b+127..128b. Each block goes through three phases in
turn:

1. **Syndromes (212 clocks).** S_1..S_22 are computed in parallel by Horner's rule, highest bit
   first: `S_j <- S_j * alpha^j + r_i`. The 22 constant multipliers are fixed XOR networks.
2. **Error locator (22 clocks).** Inversion-free Berlekamp-Massey, one iteration per clock, over
   registers for Lambda(x) and the auxiliary polynomial B(x). The syndrome window is held in a
   register. No GF inverse is needed, so there is no inversion table.
3. **Chien search (212 clocks).** For each position i the sum of `Lambda_j * alpha^(-ij)` is
   evaluated. A zero flips bit i. The terms are kept in registers multiplied by alpha^(-j) each
   clock, so only constant multipliers are used.

The decoder counts the roots it finds among the 212 valid positions. If that count differs from
the degree of Lambda, the block had more than 11 errors. `fe_fail` is then raised, sticky until
the next `fe_start`. A whole key takes 10 x (2 x 212 + 22 + 2) + 1 = 4,481 clocks. The generator
polynomial is the product of the minimal polynomials of alpha^1..alpha^21 (odd powers suffice) and
has degree 84. The decoder does not need it. The testbenches compute it to encode test data.

The code sizes match a 5% raw bit error rate and a key failure rate below about 1e-6. Other
operating points need other (N, T, REP) values, which both modules take as parameters. The
package defaults are the 5% point.

| Raw BER | Outer code | Inner code | Cells |
|---|---|---|---|
| 1% | [236,128], t = 14 | none (REP = 1) | 2,360 |
| 5% | [212,128], t = 11 | [3,1] | 6,360 |
| 10% | [220,128], t = 12 | [5,1] | 11,000 |
| 15% | [244,128], t = 15 | [7,1] | 17,080 |

Each is a shortened narrow-sense BCH code. Its parity length N - K is 8 bits per odd power of
alpha up to alpha^(2t-1), except alpha^17, which contributes only 4 because its minimal
polynomial has degree 4.

## The one-time enrollment readout

`pok_readout` lets the raw SRAM bits leave the chip exactly once. A pulse on `enroll_req` streams
the 6,360 bits out on `pok_out_bit`, bit 0 first, one per clock with `pok_out_valid`. On the last
bit `blow_fuse` pulses for one clock. The interface then locks. It stays locked for good once the
external fuse reads back as blown (`fuse_blown`), and in any case until reset. Outside a readout
the output is held at 0. The fuse, and the SRAM cells themselves, are process parts outside this
RTL: the cells' power-up values enter on `pok_raw` and the helper data on `helper`.

## Top-level interface (`lattice_puf #(P1 = 1, P2 = 1)`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock, active-low asynchronous reset |
| start / start_ready | in / out | 1 | begin a challenge (takes `seed_a`) |
| seed_a | in | P1 x 128 | challenger's seed half, per datapath |
| b_valid / b_ready / b_last | in / out / in | 1 | one b' beat per response bit; last beat ends the challenge |
| b_in | in | P1 x 8 | b'[k] |
| r_valid, r_out | out | 1, P1 | response bits, one clock |
| t_out | out | 128 | counter value used for the current challenge |
| busy | out | 1 | challenge in progress |
| pok_raw, helper | in | 6360 each | SRAM power-up bits and public helper data |
| fe_start / fe_busy / key_valid / fe_fail | in / out | 1 | key reconstruction |
| enroll_req, fuse_blown | in | 1 | one-time readout request; fuse read-back |
| pok_out_valid, pok_out_bit, blow_fuse, pok_locked | out | 1 | readout stream, fuse burn pulse, lock status |

Power-up sequence: reset, then `fe_start`. Wait for `key_valid` (about 4,500 clocks) and check
`fe_fail`. After that, challenges may be issued.

## Where this RTL departs from, or adds to, the published design

* **Seed split.** The published text speaks of a 256-bit LFSR seed but counts a CRP space of
  about 2^136. This design uses 128 challenger bits plus a 128-bit counter. So a 100-bit
  authentication string costs 128 + 100 x 8 = 928 challenge bits here.
* **Cycle counts.** For P2 >= 8 they are 50 to 60% of the published latencies (see the controller
  section).
* **Maximum unrolling.** P2 is limited to powers of two up to 128. The LFSR formula itself would
  allow up to 246.
* **LFSR storage.** The LFSR is a flip-flop register. An FPGA build may map it to shift-register
  primitives.
* **Counter.** The counter is volatile and resets to zero.
* **Fuzzy extractor.** The code-offset construction, the field polynomial, the bit placement, the
  decoder architecture and the failure flag are choices made here. Only the code sizes are
  given.
* **Gating.** Challenges are refused until the key is valid.
* **Not built.** The SRAM cells, the OTP fuse, and everything on the server side (helper-data
  generation, Gaussian error sampling, CRP generation and the response-matching check) are not
  built. The testbenches model the server where they need it.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with a model written
separately (`tb/tb_ref_pkg.sv` for the LFSR and LWE arithmetic, `tb/tb_bch_pkg.sv` for BCH
encoding). Each ends by printing `TB_RESULT checks=<n> failures=<m>`, and each has a cycle
watchdog. Highlights:

* `tb_lfsr`: the unrolled LFSR is checked bit for bit against the serial model for P2 = 1, 8
  and 128.
* `tb_lfsr_lwedec_datapath`: random seeds, keys and b' for P2 = 1, 4, 8, 16 and 128, with the
  response and y checked.
* `tb_lpuf_controller`: exact state lengths for P2 = 1 and 16, and back-pressure on b'.
* `tb_bch_decoder`: 0 to 11 random errors per block, and more than 11 for the failure flag. The
  decoded key and the clock count are checked.
* `tb_design_space`: the complete design at nine (P1, P2) points of the latency table, through
  the helper `tb_dse_point`. At each point it rebuilds the key, produces 128 response bits
  checked against the model, and checks the clock count against the formula.
* `tb_fe_configs`: the repetition and BCH decoders at all four operating points of the table
  above, built through the helper `tb_fe_point`. Each point gets random keys, cell errors up to
  the code's limit, and one block beyond it.
* `tb_lattice_puf`: the latency-optimized configuration, P1 = 2 and P2 = 128, end to end. It
  covers the readout and lock, key reconstruction, multi-bit challenges, b' stalls, counter
  stepping and the refusal of challenges before the key is ready. It counts each of these
  events and fails if any never happened.
* `tb_lattice_puf_full`: the default configuration. The testbench plays the server. It enrolls
  the chip through the one-time readout and builds helper data for a random key. It then flips
  each SRAM bit with 5% probability, rebuilds the key on chip, and authenticates with a 128-bit
  challenge against the reference model.

To run a testbench with verilator (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -y rtl rtl/lpuf_pkg.sv tb/tb_ref_pkg.sv tb/tb_bch_pkg.sv \
    tb/tb_lattice_puf_full.sv --top-module tb_lattice_puf_full
./obj_dir/Vtb_lattice_puf_full
```

Unit testbenches need only `rtl/lpuf_pkg.sv`, the packages they import and their own file.
`tb_design_space` and `tb_fe_configs` also need `-y tb` to find their helper modules. The
nine-point design-space build takes a few minutes to compile and about a second to run.
Parameters such as P1 and P2 are set at the top of `tb_lattice_puf.sv`.

Lint notes: verilator reports unused parameters in a few generic modules. It also reports the
datapaths' unused `y` output in the top, which is kept for testing. The assertions' asynchronous
reset in `disable iff` triggers another report. None of these is a circuit problem.
