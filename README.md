# Distributed, random-access generation of uniform RLWE polynomials

In RLWE-based FHE (CKKS, BGV, BFV) half of every key-switching key, and of
some ciphertexts, is a polynomial `a` with uniformly random coefficients. It
need not be sent: the client can derive `a` from a short seed, and the
accelerator can regenerate it from the same seed. This repository holds RTL
for the accelerator side of that regeneration, in a form built for a large
chip:

* **Distributed.** An RNS limb of `N` coefficients is cut into `n_seg`
  segments of `len = N / n_seg` words. Each segment is the output of a small
  local engine that sits next to the multipliers consuming it. Only a short
  command (seed, modulus, hash function) is broadcast. The wide coefficient
  data never leaves the neighbourhood of the engine that made it, so no
  global high-bandwidth wiring is needed.
* **Random access.** A segment depends only on `seed`, the limb modulus `q`
  and the segment index. Any limb of any polynomial can be generated at any
  time, in any order, without producing the limbs before it and without
  storing anything.
* **Fixed latency.** Each engine hashes once, to a fixed number of bits, and
  keeps the first `len` words that pass rejection sampling. The client tries
  seeds until every segment of every limb has enough accepted words, so the
  accelerator never runs short. It needs no retry, stall or back-pressure,
  and a generation always takes the same number of clocks.

The cost of this moves to the client: a seed fails when some segment has too
few accepted words, and the client must then draw another seed. The choice
of `len` and of the allowed moduli keeps that rare (see *Choosing len*).

## The generation function, bit by bit

Everything the engines compute is fixed by this function. A client that
validates seeds must compute exactly the same thing, so this section is
exact.

For a seed `seed` (288 bits), a modulus `q` (32 bits, at least 2) and a
segment index `id` (16 bits):

1. **Input string.** `m = {seed, q, id}`, 336 bits, read as 42 bytes with the
   most significant byte first. Byte 0 is `seed[287:280]` and byte 41 is
   `id[7:0]`.
2. **Hash.** One of two Keccak-family functions, chosen per command:
   * SHAKE128(`m`), 24 rounds of Keccak-f[1600];
   * KangarooTwelve(`m`, customisation = empty). For an input this short
     this is TurboSHAKE128(`m || 0x00`, domain byte `0x07`), which uses
     12 rounds.

   In both cases exactly `r = 1344` output bits are taken. That is one
   168-byte rate block, so there is one absorb, one permutation and no
   further squeeze.
3. **Words.** The output is cut into `t = 42` words of `w = 32` bits. Word
   `i` is output bytes `4i .. 4i+3` read little-endian. In the RTL it is
   `digest[32*i +: 32]`.
4. **Threshold.** `thresh = floor(2^32 / q) * q`, the largest multiple of
   `q` not above `2^32`.
5. **Rejection and compaction.** Word `i` is accepted if `word < thresh`.
   The segment is the first `len` accepted words, in word order. Accepted
   words are **not** reduced mod `q`. They are uniform over
   `[0, thresh)`, so their residues mod `q` are uniform, and the modular
   multiplier downstream is expected to take unreduced 32-bit inputs.

Segment `id` supplies coefficients `id*len .. id*len + len-1` of the limb
in the device's native order. If the device's physical layout wants a
different coefficient order, the client applies that permutation when it
builds `b`. The hardware applies none.

A rejected word costs nothing but the bits. The chance that a word is
rejected is `p_r = (2^32 mod q) / 2^32`. This is below 1/2 for every 32-bit
`q`, and tiny for moduli of 27 bits or fewer. The chance that a segment is
complete is the binomial tail `P[at least len of 42 accepted]`.

### Choosing len

For a fixed generation throughput, the hash hardware scales with `1/len`:
the longer the segment, the fewer hashes per coefficient. But a long segment
fails more often, so the client must restrict itself to moduli with small
`p_r`. Bounding the client's seed-retry rate at 3 % for a whole key gives
roughly these limits on `p_r` per word:

| len | largest allowed p_r | usable moduli (NTT-friendly, NAF weight at most 5, N = 2^16) |
|-----|---------------------|-------------------------------------------|
| 32  | 0.037               | 277                                       |
| 16  | 0.253               | 526                                       |
| 8   | 0.424               | 562                                       |
| 4   | 0.5 (any q)         | 625                                       |

This RTL defaults to `len = 32`, with `n_seg = 2048` segments per
`N = 2^16` limb. That matches the 16-bit segment index field, whose values
run from 0 to 2047. `LEN` is a parameter, and the other lengths are a
rebuild away.

## Hardware structure

```
                    broadcast: start, cmd = {seed, q, mode}, seg_base
          +---------------+---------------+------ ... ------+
          v               v               v                 v
   +-------------+ +-------------+ +-------------+   +-------------+
   | prng_engine | | prng_engine | | prng_engine |   | prng_engine |
   | id = base+0 | | id = base+1 | | id = base+2 |   | id=base+2047|
   +------+------+ +------+------+ +------+------+   +------+------+
          | 32 x 32 b     |               |                 |
          v local         v               v                 v
     compute res.    compute res.    compute res.      compute res.
```

`prng_array` (top) replicates `N_ENG` engines. Engine `i` works on segment
`seg_base + i`. By default `N_ENG = 2048`, so a single command with
`seg_base = 0` produces a whole limb, 65,536 words, at once. A smaller array
(for instance `N_ENG = 256`) produces a limb in `2048 / N_ENG` commands,
stepping `seg_base` by `N_ENG`. The engines share their inputs and have the
same latency, so they run in lockstep; an assertion checks this.

Inside one engine (`prng_engine`):

```
 start --+--> hash_core (SHAKE128 / K12) --digest[1343:0]--+
 cmd,id  |      '-- keccak_perm, 1 round/clock             +--> rej_sampler --> seg[LEN], seg_ok
         +--> thresh_unit (2^32 mod q by doubling) -thresh-+      (42 compares,
                                                                    prefix-count compaction)
```

* **`keccak_perm`**: iterative Keccak-p[1600]. It loads the state on
  `start`, then applies one round per clock: rounds 0-23, or rounds 12-23
  for the 12-round variant. The round function lives in `prng_pkg` as
  `keccak_round`, and the round constants and rotation offsets are tables
  there.
* **`hash_core`**: builds the padded first state from the 336-bit input (the
  message bytes, then `0x1F` for SHAKE128 or `0x00 0x07` for
  KangarooTwelve, then `0x80` in byte 167, with the capacity at zero), runs
  the permutation and presents the low 1344 bits of the state.
* **`thresh_unit`**: computes `thresh = 2^32 - (2^32 mod q)` without a
  divider. Starting from 1, it doubles mod `q` 32 times, with one
  conditional subtraction per doubling, at 4 doublings per clock, so it
  takes 8 clocks. It runs beside the hash and always finishes first.
* **`rej_sampler`**: all 42 comparisons in parallel. For each word it forms
  a running count of the accepted words before it. Segment slot `j` takes
  the accepted word whose count equals `j`. The result is registered with
  `ok = (accepted >= LEN)` and the accepted count.

### Timing

All control is synchronous to `clk`, with an asynchronous active-low
`rst_n`. With `start` sampled at clock edge 0:

| event | SHAKE128 | KangarooTwelve |
|-------|----------|----------------|
| last Keccak round applied, `hash_core.done` | edge 24 | edge 12 |
| threshold ready | edge 8 | edge 8 |
| segment registered, `seg_valid` high in the next cycle | edge 25 | edge 13 |

`seg_valid` is a one-cycle strobe. `seg` and `seg_ok` hold until the next
segment is written. The command inputs are needed only in the `start`
cycle. A new `start` may come in the cycle `seg_valid` is high, so one
engine delivers 32 words every 25 clocks (SHAKE128) or every 13 clocks
(KangarooTwelve). A `start` while a segment is in flight is a protocol
error and is caught by an assertion. There is no ready signal anywhere,
which is the point of the scheme: consumers can be scheduled statically.

At 1 GHz the default array delivers 2048 x 32 x 32 bits per 25 ns, which is
84 Tbit/s with SHAKE128 or 161 Tbit/s with KangarooTwelve. For comparison,
feeding 1/8 of 16,384 32-bit multipliers at 1 GHz needs 65.5 Tbit/s. No
timing closure was attempted, so whether 1 GHz is reachable is not known.

### `seg_ok` and short segments

A seed that the client has validated always gives `seg_ok = 1` on every
engine, and then `all_ok = 1`. The flag exists so that a bad seed is
visible rather than silent. When fewer than `len` words pass, `seg_ok = 0`
and the unfilled slots are zero. The hardware does not retry: retrying
would break the fixed latency.

## Files

| file | contents |
|------|----------|
| `rtl/prng_pkg.sv` | sizes, `hash_mode_e`, `limb_cmd_t`, Keccak tables and the round function |
| `rtl/keccak_perm.sv` | iterative Keccak-p[1600] |
| `rtl/hash_core.sv` | SHAKE128 / KangarooTwelve single-block hash of the 336-bit input |
| `rtl/thresh_unit.sv` | acceptance threshold from `q` |
| `rtl/rej_sampler.sv` | rejection sampling and compaction |
| `rtl/prng_engine.sv` | one local engine |
| `rtl/prng_array.sv` | top: the array of engines |
| `tb/tb_ref_pkg.sv` | independent reference model (Keccak, SHAKE128, KangarooTwelve, GenSeg) |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_prng_array_large.sv` | one quarter limb (512 engines) per hash mode, every word checked |
| `tb/tb_prng_len_sweep.sv` | engines built with len = 4, 8, 16 |

Parameters with their defaults: `LEN = 32` (on `rej_sampler`,
`prng_engine`, `prng_array`), `N_ENG = 2048` (on `prng_array`), and
`STEPS = 4` (doublings per clock, on `thresh_unit`). The scheme's sizes
(`W = 32`, `R_BITS = 1344`, `T_WORDS = 42`, and the 288/32/16-bit input
fields) are package constants.

## Verification

Every testbench compares the RTL with `tb_ref_pkg`. That is a separate,
loop-based model: it uses a 5x5 state array, derives the rho offsets from
the (x,y) walk and the round constants from the LFSR, and implements the
sponges over byte queues. The model first checks itself against published
vectors: Keccak-f[1600] of the zero state (lane 0 is `F1258F7940E1DDE7`),
SHAKE128("") and KangarooTwelve("", ""). The testbenches also check the
clock counts in the timing table. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_prng_array` runs the whole design at `N_ENG = 4` with an 8-segment
  limb. It covers:
  * limbs of four moduli generated out of order and in alternating hash
    modes;
  * a limb regenerated later that must come out bit-identical;
  * a limb built from two commands;
  * a modulus just above 2^31, which rejects about half of all words,
    driven until a short segment appears.

  It counts each of these and fails if one never happens.
* `tb_prng_array_large` runs a 512-engine array. It checks all 16,384
  words of one SHAKE128 command and of one KangarooTwelve command.

To simulate with plain Verilator (5.x), for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/prng_pkg.sv tb/tb_ref_pkg.sv rtl/keccak_perm.sv rtl/hash_core.sv \
  rtl/thresh_unit.sv rtl/rej_sampler.sv rtl/prng_engine.sv rtl/prng_array.sv \
  tb/tb_prng_array.sv --top-module tb_prng_array -o sim
./obj_dir/sim
```

Verilator emits a separate code copy for every engine instance, so the
compile time grows with the engine count. The 512-engine test builds in
about 1.5 minutes on four cores. The 2048-engine default takes about
17 minutes to build and 1 second to run. It has been simulated that way and
passes: every word of one SHAKE128 limb and one KangarooTwelve limb, all
65,536 words each, matches the model. To repeat that, remove the parameter
override in `tb_prng_array_large` and set its `N_ENG` to 2048.

## What is specified by the scheme and what is this design's choice

These follow the scheme directly:

* the segment split and the hash input `seed || q || id`;
* the two hash functions and the 1344-bit output;
* the 32-bit words and the `floor(2^w/q)*q` acceptance test;
* keeping the first `len` accepted words, without reduction;
* the field widths and the default `len`;
* no back-pressure.

These are choices made here, where the scheme is silent:

* **Byte and word order** of the input and output strings (MSB-first input
  bytes, little-endian output words). A client must use the same
  convention.
* **Threshold.** The scheme's own description states the accept range once
  as `[0, floor(2^w/q)*q)` and once with an extra factor 1/2. This design
  uses the first. It is the one that matches the stated rejection
  probability `(2^w mod q)/2^w`.
* **Microarchitecture:**
  * one Keccak round per clock;
  * the doubling-based threshold unit;
  * the single-cycle compaction network;
  * the latencies of 25 and 13 clocks.
* **Array organisation:**
  * one engine per segment (2048 by default);
  * the `seg_base` offset for smaller arrays;
  * all segments brought out as one flat port for the compute resources.
* **Short-segment behaviour:** `seg_ok = 0`, with zero-filled slots.
* **Empty KangarooTwelve customisation string.**

Not included:

* the modular multipliers and adders that consume the words;
* the client-side seed search and layout permutation;
* the alternative rejection method that tests leading bits first, which is
  discussed as an option but not used.
