# CHOCO-TACO: an encryption/decryption engine for BFV on small clients

In client-aided homomorphic computing, a small device (a sensor or a phone)
sends encrypted data to a server. The server computes on the ciphertexts and
sends the results back. The client decrypts them, does the cheap non-linear
steps, and encrypts again. Encryption and decryption then run on the client's
critical path many times per job. In software on a small CPU they dominate
both time and energy. This RTL implements a dedicated engine for the two
operations of the BFV scheme, in its main configuration:

* ring dimension N = 8192;
* three RNS residues (58, 58 and 59-bit primes), where the last one is the
  "special" key prime;
* a 23-bit plaintext modulus t.

A fresh ciphertext leaves the engine with two residues per polynomial, because
modulus switching drops the key prime.

## The two operations

Encryption of N message slots `m` under public key `(P0, P1)`. Both key
polynomials are supplied in NTT form.

```
u  <- ternary samples            (RNG, 1 byte per sample)
e1, e2 <- rounded Gaussian noise (RNG, 8 bytes per sample)
c1 = ModSwitch( INTT( NTT(u) * P1 ) + e2 )
c0 = ModSwitch( INTT( NTT(u) * P0 ) + e1 ) + Scale( Encode(m) )
```

Decryption of `(c0, c1)` with the secret key `s`, also in NTT form:

```
x = c0 + INTT( NTT(c1) * s )          (2 residues)
m = Decode( ErrorCorrect( FastBaseConvert(x -> {t, gamma}) ) )
```

Every polynomial step runs on all residues side by side: one layer of
hardware per residue. Only three blocks mix residues:

* modulus switching;
* message scaling;
* base conversion.

## Block map

| Block | File | What it does |
|---|---|---|
| Blake3 compression | `blake3_core.sv` | One round per cycle. It runs as a keyed XOF, so each block counter yields 64 random bytes every 8 cycles. |
| Distribution | `rng_distribution.sv` | Turns a 64-byte buffer into samples. Ternary samples use 1 byte (mod 3, byte 255 rejected). Normal samples use 8 bytes looked up in a CDT (σ = 3.2, clipped at 19). |
| RNS conversion | `rns_convert.sv` | Maps a signed sample to its residues. |
| RNG module | `rng_module.sv` | Chains the three blocks above. The hash output and the distribution buffer form a double buffer. |
| Modular multiplier | `modmul.sv` | 3-stage pipelined `a*b mod Q`. |
| NTT unit | `ntt_unit.sv` | In-place negacyclic NTT/INTT with PE butterflies per cycle, an N-word working buffer and self-filled twiddle tables. |
| Dyadic product / poly add | `dyadic_product.sv`, `poly_add.sv` | Coefficient-wise multiply / add, one coefficient per residue per cycle. |
| Modulus switch | `mod_switch.sv` | Divides by the last prime with rounding, 3 → 2 residues. |
| Message scaling | `msg_scale.sv` | `Δ·m` in RNS, with SEAL-style rounding for large `m`. |
| Encode/decode | `encode_unit.sv` | Reduces slots mod t and places each slot at its NTT position (powers of 3 modulo 2N). Includes an NTT unit mod t. |
| Fast base conversion | `fast_base_conv.sv` | `t·γ·x/q` in residues mod t and mod γ (γ a 61-bit prime). |
| Error correction | `error_correct.sv` | Centres the γ residue and removes it, giving `m` mod t. |
| Stream buffers | `stream_fifo.sv` | Host input and output buffers. |
| Top | `choco_taco.sv` | Phase controller and wiring. |

`choco_pkg.sv` holds all the constants:

* the primes, roots of unity, t and γ;
* the CRT and rounding constants, computed at elaboration by constant functions;
* the CDT table;
* the pipeline latencies.

## How the top sequences an operation

The controller moves through phases. Within a streaming phase, one
coefficient index (all residues) is issued per cycle. A phase ends when N
results have come out of the pipeline.

| Phase | Encrypt | Decrypt |
|---|---|---|
| 1 | Load N message slots into the encoder while the RNG writes `u` into the NTT buffers | c1 from host → NTT buffers |
| 2 | NTT(u) ‖ encode INTT mod t | NTT(c1) |
| 3 | `NTT(u)·P1` → INTT buffers | `·s` → INTT buffers |
| 4 | INTT | INTT |
| 5 | `+e2`, modulus switch → output (c1) | `+c0` → base conversion → error correction → encoder buffer |
| 6 | `NTT(u)·P0`, INTT | NTT mod t (decode) |
| 7 | `+e1`, modulus switch, `+ Scale(m)` → output (c0) | slots → output |

`NTT(u)` stays in the NTT buffers for both ciphertext halves.

The message path is delayed by 2 cycles, so the scaled message meets the
modulus-switched `c0` in the message adder.

A streaming phase issues only when all of the following hold:

* the input buffer has a beat, if the phase needs host data;
* the RNG has a sample, if the phase needs noise;
* the output buffer has room for everything already in flight. This is a
  credit count, so the pipelines never need to stall internally.

Three outputs flag each of these waits: `stall_input`, `stall_rng` and
`stall_output`.

### Host streams

All words are 64 bits. One beat carries one coefficient index.

* **Encrypt input:**
  1. N message slots in lane 0;
  2. P1 in NTT order, 3 residues;
  3. P0 in NTT order.
* **Encrypt output:** c1 then c0, N beats each, 2 residues each.
* **Decrypt input:**
  1. c1, 2 residues (lane 2 is ignored);
  2. s in NTT form, 3 lanes;
  3. c0.
* **Decrypt output:** N slots in lane 0.

### Timing (N = 8192, PE = 4)

* A forward transform takes `log2N·(N/2PE + 4) + 1` = 13,365 cycles. An
  inverse one takes one more pass (the N⁻¹ scaling) and needs 14,393 cycles.
* Streaming phases take N cycles plus the pipeline depth:
  * `LAT_DYADIC` = 3 for products;
  * `LAT_ADD + LAT_FBC + LAT_ECORR` = 19 for the decryption back end.
* With no stalls, an encryption takes about 5·8192 + 3·14,400 ≈ 85k cycles.
  A decryption takes about the same. At 100 MHz this is about 0.85 ms per
  operation.
* The twiddle tables fill for 3N cycles after reset. `cmd_ready` stays low
  until the fill is done.

## NTT details (the hardest part to follow)

The NTT uses the SEAL ordering:

* **Forward:** Cooley-Tukey with natural-order input and bit-reversed output.
  The twiddle is `psi^bitrev(2^s + i)` for group `i` of stage `s`.
* **Inverse:** Gentleman-Sande with bit-reversed input. The twiddle is
  `psi^-bitrev(N/2^(s+1) + i)`, followed by a scaling pass by N⁻¹.

Output word `j` of a forward transform equals `a(psi^(2·bitrev(j)+1))`.

Batch encoding relies on this: slot `i` sits at address
`bitrev((g_i − 1)/2)`, where:

* `g_i = 3^i mod 2N` in the first row;
* `g_i = −3^i mod 2N` in the second row.

Slot products are therefore coefficient-wise, and the map `x → x³` rotates the
rows.

In each cycle, PE butterflies issue on consecutive butterfly indices. A stage
waits 4 cycles for the previous stage to drain before it starts. This avoids
read-after-write hazards in the in-place buffer.

The working buffer is written as a multi-ported array, with 2·PE reads and
2·PE writes per cycle. A silicon version would bank it.

## What follows the source design and what is this design's own

**Follows the source design:**

* the block partition:
  * RNG (Blake3 + distribution + RNS conversion);
  * polynomial multiplication (NTT / dyadic / INTT with working buffers and
    twiddle factors);
  * two polynomial adders (cipher and message);
  * modulus switching;
  * message scaling;
  * encode/decode;
  * fast base conversion;
  * error correction;
  * input and output buffers;
* N = 8192 and k = 3;
* the 3-stage multipliers;
* the 64 KiB NTT buffers;
* the 100 MHz target;
* the order of the encryption steps, including keeping `NTT(u)` resident;
* using Blake3 for the randomness.

**This design's own choices:**

* the prime values;
* t and γ;
* the sampling methods (CDT, rejection);
* the keyed-XOF use of Blake3;
* PE = 4 (the parallelism was a design-space parameter, 1–16);
* the phase-serial controller. The original pipelines across modules; here
  only loading overlaps with sampling, and the encode INTT overlaps with
  NTT(u);
* a single NTT unit inside the encoder, instead of a separate NTT and INTT
  pair;
* the stream formats;
* the FIFO depths;
* self-filled twiddle tables. They would be ROMs in silicon;
* the decryption arithmetic, which follows the SEAL library's BEHZ-style
  decryption.

**Not modelled:** the context memory holding keys and constants. Keys
arrive on the input stream instead, and constants are elaboration-time
parameters.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
an independent model written in the testbench (direct polynomial evaluation,
schoolbook negacyclic products, wide-integer CRT) and checks the block's
latency.

The end-to-end tests share `tb/tb_choco_common.svh`. That file contains:

* a software NTT;
* key generation;
* host stream drivers with random gaps and back-pressure.

The tests then:

* encrypt random slots and decrypt them again, with stalls;
* repeat the round trip without stalls, checking the cycle count of every
  phase against the formulas above;
* decrypt a ciphertext built independently in the testbench, checking the
  decoded slots by direct evaluation;
* count every mechanism (encryption, decryption, input stall, RNG stall,
  output back-pressure, modulus switch, base conversion) and fail if any of
  them never happened.

There are two end-to-end testbenches:

* `tb_choco_taco` runs at N = 64. It finishes in well under a second.
* `tb_choco_taco_full` runs at the default parameters: N = 8192, three
  residues. It makes about 57,000 checks in about 5 seconds of simulation
  after a ~20 s build.

To run one with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/choco_pkg.sv \
  tb/tb_choco_taco.sv --top-module tb_choco_taco
./obj_dir/Vtb_choco_taco
```

Each testbench ends with a `TB_RESULT checks=… failures=…` line.

The secret key, public key and noise in the testbenches come from the
testbench's own random numbers. The engine's ciphertexts are checked only by
decrypting them, and its noise is not compared against an external
implementation.
