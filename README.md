# Lattice PUF in SystemVerilog

A *strong* physical unclonable function (PUF) answers an exponentially large
set of challenges with device-specific response bits. Most strong PUFs (arbiter
PUFs and their XOR variants) can be modelled by machine learning from enough
observed challenge-response pairs (CRPs). The lattice PUF avoids that
weakness by construction: its response is one bit of **decryption** in the
learning-with-errors (LWE) public-key cryptosystem, with a device-unique
secret key. Learning a decryption function from ciphertext/plaintext pairs is
as hard as breaking the cryptosystem, and LWE is believed to resist classical
and quantum attacks. So a challenge is an LWE ciphertext `(a, b)` and the
response is

    r = Q( b - <a, s>  mod q )

where `s` is the device's secret and `Q` decides whether the value is nearer 0
or nearer q/2.

This repository holds a synthesizable RTL implementation of that PUF as the
lattice PUF design describes it. The parameters are n = 160, q = 256, a
256-bit LFSR, a 128-bit counter, and a 1280-bit key recovered from SRAM
power-up values by a fuzzy extractor. The RTL is written from the published
description, not by its authors. Section "What follows the published design
and what does not" lists every place where this RTL had to choose something.

## Data flow

```
 seed_a' (128) ──►┐
                  ├─ seed_a' || t ─► LFSR (256) ─ a'_1..a'_n ─►┐
 counter t (128) ─┘   (loaded serially)   (8 bits per a'_i)     │
                                                                ▼
 SRAM cells ─► fuzzy extractor ─────────── s (1280 bits) ───► LWEDec ─► r
 helper data ─┘ (rep-3 + BCH)                                    ▲
                                                                 b' (8)
```

| Module | File | Role |
|---|---|---|
| `lattice_puf_top` | `rtl/lattice_puf_top.sv` | wires everything below together |
| `puf_controller` | `rtl/puf_controller.sv` | FSM: seed load, LFSR stepping, MAC stages, handshakes |
| `puf_lfsr` | `rtl/puf_lfsr.sv` | 256-bit bit-serial Fibonacci LFSR |
| `puf_counter` | `rtl/puf_counter.sv` | 128-bit self-incrementing counter `t` |
| `lwe_dec` | `rtl/lwe_dec.sv` | 8-bit serial multiply-accumulate, `y = b' - <a',s>` |
| `lwe_quantizer` | `rtl/lwe_quantizer.sv` | `Q(y)` |
| `fuzzy_extractor` | `rtl/fuzzy_extractor.sv` | rebuilds the 1280-bit key from SRAM bits + helper data |
| `rep_decoder` | `rtl/rep_decoder.sv` | inner repetition-3 majority decoder |
| `bch_decoder` | `rtl/bch_decoder.sv` | outer shortened BCH decoder, 11 errors per 218-bit word |
| `lattice_puf_pkg` | `rtl/lattice_puf_pkg.sv` | sizes, GF(2^8) arithmetic, controller state type |

The SRAM cells and the helper-data memory are not in the RTL. Their read port
is brought out of the top (`sym_addr`, `raw_bits`, `helper_bits`). The
testbenches use a behavioural SRAM model (`tb/sram_pok_model.sv`).

## The decryption datapath

With q = 256 = 2^8, arithmetic mod q is plain 8-bit arithmetic with the
carries dropped. Both the challenge vector and the key are bit strings that
are cut into 8-bit elements, least significant bit first:

    a'_i = sum_j c_(8i + j) 2^j        s_i = sum_j W_(8i + j) 2^j      (i = 0..159, j = 0..7)

`c` is the LFSR output stream in the order it is produced. `W` is the key
register of the fuzzy extractor, so `s_i = key[8i +: 8]`.

`lwe_dec` holds one 8-bit accumulator. `init` loads it with `b'`. Each of the
160 `mac_en` cycles then subtracts `a'_i * s_i`, keeping the low 8 bits. The
quantizer gives

    r = 1  if 64 < y <= 192,   r = 0  otherwise.

A verifier who knows `s` builds a CRP by picking a bit `r` and a small error
`e`, then sending `b' = <a',s> + e + 128 r`. The PUF returns `r` as long as
`|e| < 64`. The error term is what makes the pairs hard to learn. The
end-to-end testbench builds CRPs exactly this way.

## Challenge compression: seed, counter and the LFSR stream

A raw LWE challenge is 161 bytes for one response bit. The design sends only a
128-bit seed instead. On chip, the LFSR expands that seed into the `a'`
vectors. This leans on the result that LFSR-generated vectors are an
acceptable replacement for uniform `a` in LWE. Those security arguments are
the design's own and are not checked here.

The behaviour that matters for anyone driving this RTL:

* **Sessions.** Accepting a seed starts a session. The controller captures
  `{seed, t}` (seed in the upper 128 bits). It increments the counter at once
  and shifts the 256-bit word into the LFSR, MSB first, one bit per clock.
* **Responses within a session.** Each `b'` consumes the next 160 x 8 = 1280
  bits of the LFSR stream. The LFSR is never reloaded between responses. So
  the k-th response of a session uses the k-th `a'` of the stream. A 100-bit
  response needs one seed and 100 bytes of `b'`.
* **Why the counter.** If an attacker could replay one `a'` with all 256
  values of `b'`, the point where `r` flips would reveal `<a',s>` exactly, and
  160 such equations give away `s`. The counter value enters the LFSR seed and
  can only move forward, so the same seed never produces the same `a'` twice.
  `t` is public and is exported on the top, because the verifier needs it to
  recompute `a'`.
* **LFSR taps.** Feedback is `s[255] ^ s[253] ^ s[250] ^ s[245]`
  (x^256 + x^254 + x^251 + x^246 + 1). I checked that this polynomial is
  primitive, so any non-zero seed gives a period of 2^256 - 1. Like the
  RAM-based shift registers of the prototype, the LFSR state has no reset; it
  is always loaded with a seed before it is stepped. The bit
  shifted in on a step is also that step's output bit. A verifier must use
  the same polynomial and bit order. `tb/lattice_puf_top_tb.sv` contains a
  software model (`ref_step`, `next_dot`) that is the reference for both.

## The key: SRAM cells, concatenated code and helper data

The 1280-bit secret is never stored. At power-up it is rebuilt from 6,540
uninitialised SRAM cells, each of which flips with a few percent probability
(5 % is the design point). Each decoding failure changes the whole PUF, so the
code aims at a key-failure rate of about 10^-6. It is a concatenation of two
codes:

* **Inner code:** repetition of length 3. Each outer-code bit is stored in 3
  cells.
* **Outer code:** a binary BCH code over GF(2^8), shortened to 218 bits, that
  corrects 11 errors. Ten outer words of 128 key bits each make the 1280-bit
  key.

The helper data follows the code-offset construction:
`helper = enrolled cells XOR Rep3(BCH(key block))`. At power-up,
`cells XOR helper` is a noisy copy of the concatenated codeword.
`fuzzy_extractor` processes one block at a time:

1. **Collect:** 218 clocks, one 3-cell symbol per clock, majority-decoded by
   `rep_decoder`.
2. **Decode:** `bch_decoder`, in three serial phases:
   * syndromes `S_1..S_22` by Horner's rule: 218 clocks, all 22 in parallel;
   * inversion-less Berlekamp-Massey: 22 clocks, one iteration per clock;
   * Chien search over the 218 positions: 218 clocks. The word rotates
     through a shift register, so the bit under test is always at index 0.

   Its latency is 2N + 2T + 2 = 482 clocks.
3. **Store:** the 128 highest-degree bits of the corrected word are the
   message part of the systematic codeword. They go to
   `key[128*block +: 128]`.

The whole key takes 6,791 clocks. `key_fail` is raised when the Chien search
finds a different number of roots than the degree of the error locator, which
means more than 11 errors in a block.

**About "[218,128,11]".** A t = 11 BCH code of length 255 has 84 parity bits,
so a 218-bit shortened word carries 134 message bits, not 128. The 1 %, 10 %
and 15 % configurations ([236,128,14], [220,128,12], [244,128,15]) all have
exactly 128 message bits. This RTL keeps 218 bits so that it needs the
published 6,540 cells, and fixes the 6 spare message bits to zero at
enrollment. The result is a [218,128] subcode, which still corrects 11
errors.

Enrollment (choosing the key and writing helper data) is not part of the RTL.
`tb/bch_ref_pkg.sv` shows how to do it. It builds the generator polynomial as
the product of `(x + alpha^e)` over the cyclotomic cosets of 1..22, with
field polynomial x^8 + x^4 + x^3 + x^2 + 1 (0x11D). It then encodes
systematically as `msg * x^84 + (msg * x^84 mod g)`, with
`msg = {key block, 6'b0}`.

## Interface and timing

All ports are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `key_start` | in | 1 | start key reconstruction (pulse) |
| `sym_addr` | out | 13 | symbol index 0..2179; cells `3*sym_addr .. +2` |
| `raw_bits`, `helper_bits` | in | 3 | cells and helper bits of that symbol, same clock |
| `key_valid`, `key_fail` | out | 1 | key ready / key uncorrectable |
| `seed_valid`, `seed_ready`, `seed` | in/out/in | 1/1/128 | challenge seed, taken when valid & ready |
| `b_valid`, `b_ready`, `b` | in/out/in | 1/1/8 | `b'` of one response |
| `r_valid`, `r` | out | 1 | response; `r_valid` pulses one clock, `r` holds until the next `b'` |
| `t` | out | 128 | public counter value |

* No challenge is accepted until `key_valid`.
* While the controller waits for `b'`, it also accepts a new seed. If both are
  offered, the seed wins and `b_ready` stays low.
* Seed load: ready again 257 clocks after the seed is taken (7.7 us at
  33.3 MHz).
* Response: `r_valid` comes 1441 clocks after `b'` is taken: 160 x (8 LFSR
  steps + 1 MAC) + 1, which is 43.3 us at 33.3 MHz.
* 100 responses from one seed take 4.34 ms.

`seed_ready` requires `key_valid`, but the controller checks it only when it
accepts a seed. Do not pulse `key_start` while a session is running:
reconstruction rewrites the key register, and later responses in that session
would then use a partly rebuilt key.

The published prototype reports 8 us and 44 us for these steps. The
bit-serial LFSR sets the pace. An implementation that needs more throughput
could step the LFSR 8 bits per clock; that is a change to `puf_lfsr` and to
the controller's `C_GEN` state.

## What follows the published design and what does not

Taken from the design: the block structure (POK with fuzzy extractor,
counter, seed concatenation, LFSR, LWE decryption with a serial 8-bit MAC and
a quantizer, controller). Also taken from it: every size (n = 160, q = 256,
256-bit LFSR, 128-bit counter, 1280-bit key, repetition-3 plus BCH
[218,128,11], 6,540 cells), the element bit mappings, the quantizer intervals
and the `seed || t` concatenation.

Chosen here, because the design does not give it:

* **LFSR:** the tap polynomial, the bit-serial form and the output bit.
* **Controller:** all of it (states, valid/ready handshakes, seed priority,
  key gating).
* **Counter:** increments once per seed. The design says "on each response
  generation" but also loads the seed only once for a 100-bit response.
  `t` resets to 0; a real device must keep it in non-volatile storage.
* **Seed split:** 128-bit seed + 128-bit counter. One passage speaks of a
  256-bit challenge seed; the 256-bit LFSR, the 128-bit counter and the 2^136
  CRP count only fit 128 + 128.
* **Sign of the accumulation:** the block diagram shows an adder; the
  equations define `b - <a,s>`, which is what is built.
* **Fuzzy extractor:** code-offset helper data, the field polynomial, the
  decoder architecture, the read port and the schedule, and the treatment of
  the 6 spare BCH message bits.
* **Not built:** enrollment, the SRAM array, helper-data storage and
  non-volatile counter storage.

The 1 %, 10 % and 15 % raw-BER code configurations are reachable by
overriding `fuzzy_extractor`'s `R`, `N`, `T` parameters (`BLOCKS * K` must
stay 1280). The defaults are the 5 % configuration.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Each compares against models written
independently of the RTL:

| Testbench | What it checks |
|---|---|
| `lwe_quantizer_tb` | all 256 (and, at q = 16, all 16) inputs against the interval definition |
| `lwe_dec_tb` | 40 full 160-stage decryptions against integer arithmetic, half of them real ciphertexts |
| `puf_lfsr_tb` | serial load equals the seed; 2,400 output bits against a software LFSR |
| `puf_counter_tb` | count and wrap-around against a software count |
| `puf_controller_tb` | seed bits shifted, counter pulses, `a'_i` assembly order, `elem_idx`, 257/1441-clock timing |
| `rep_decoder_tb` | exhaustive, REP = 3 and 5 |
| `bch_decoder_tb` | 0..11 random errors corrected with 482-clock latency; 12..14 errors flagged; also a small t = 2 code |
| `fuzzy_extractor_tb` | enrolled key returned at 0 % and 5 % BER; 11 bad symbols in a block corrected; 12 and a 30 % BER flagged |
| `lattice_puf_top_tb` | full-size end-to-end run (below) |
| `puf_100bit_response_tb` | full size: a 100-bit response string from one seed, all 100 ciphertexts decrypted correctly, total time (144,456 clocks, 4.33 ms at 33.3 MHz), and 100 random `b'` against the reference with the share of ones |
| `fe_configs_tb` | key reconstruction with all four code configurations (1 %, 5 %, 10 %, 15 % raw BER, each at its own error rate), through parameter overrides of `fuzzy_extractor` |

`lattice_puf_top_tb` runs the whole chip at its default sizes. It enrolls a
key, powers up with 5 % cell errors and waits for the key. It then runs three
sessions: six responses on one seed, a second seed that replaces the first,
and the first seed again with a new counter value. It closes with a 30 % BER
power-up. Responses are checked against the testbench's own LFSR and
decryption model, for real ciphertexts and for random `b'`. It counts each
mechanism (challenge refused before the key exists, errors corrected, seed
load, counter step, multi-response session, seed replacement, new `a'` for a
repeated seed, key failure) and fails if any of them never happened. It
finishes in well under a second of host time.

Synthesis gives a rough size of the logic: the whole top comes to about
6,400 word-level cells and 3,150 flip-flops. About 1,300 of those flip-flops
are the key register, and most of the cells are the parallel GF(2^8)
multipliers of the BCH decoder.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/lattice_puf_pkg.sv tb/bch_ref_pkg.sv tb/lattice_puf_top_tb.sv \
    --top-module lattice_puf_top_tb -o sim
./obj_dir/sim
```

Replace the testbench file and top module name to run any other testbench.
Shared sizes live in `lattice_puf_pkg`. The modules take them as parameter
defaults, so a reduced instance (for example `puf_controller #(.N(16))`)
needs only parameter overrides.
