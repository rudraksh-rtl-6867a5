# Rudraksh KEM-poly64: a compact lattice PKE core in SystemVerilog

Rudraksh is a lattice-based post-quantum key-encapsulation mechanism built
for small devices. It uses polynomials of only 64 coefficients, a module
of rank 9 and the prime q = 7681. ASCON-XOF replaces Keccak as the hash
and pseudo-random source. The small ring means that one complete NTT fits
in 32 × 6 butterflies and that the two 32-word memory banks of the
transform are tiny. The matrix A-hat and the secret polynomials can then
be regenerated from their seeds whenever they are needed, instead of
being stored.

This repository holds a synthesizable RTL model of that design at the
KEM-poly64 parameters: the public-key encryption core (KeyGen, Enc, Dec)
and the Fujisaki–Okamoto layer that turns it into the KEM (KeyGen, Encaps,
Decaps). It has one ASCON permutation, one reconfigurable butterfly
with a single multiplier, two small NTT banks and one memory for the
public key and ciphertext. The true random number generator is not part
of it: the seeds, the message m and z are plain inputs.

## KEM layer

`kem_fo` chains controller operations. Op codes on `op`: 0 PKE KeyGen,
1 PKE Enc, 2 PKE Dec, 3 KEM KeyGen, 4 Encaps, 5 Decaps. The engine hashes
with the same ASCON-XOF:

* H(pk) = XOF(seed_a, then the b-hat coefficients at 13 bits each, LSB first).
* G(pkh, m) = XOF(pkh, m), 256 output bits: K is the low half, r the high half.
* H(c, z) = XOF(u at 10 bits, v at 5 bits, z).

Encaps computes pkh, then (K, r), then encrypts m with r and returns K.
Decaps decrypts, computes K'' = H(c, z), pkh and (K', r'), then
re-encrypts. During re-encryption the compressed u and v are compared
with the stored ciphertext instead of being written, and any difference
sets a sticky flag. The key is K' if there was no difference and K''
otherwise, and `reject` shows which. pkh is recomputed each time instead
of being kept with the secret key. M2 has 576 extra words for the
re-encryption accumulators, 1920 words in all.

## Parameters

| symbol | value | meaning |
|---|---|---|
| l | 9 | rank of the module (A-hat is 9 × 9 polynomials) |
| n | 64 | coefficients per polynomial |
| q | 7681 = 2^13 − 2^9 + 1 | coefficient modulus, 13-bit coefficients |
| log p | 10 | u is compressed to 10 bits per coefficient |
| log t + B | 3 + 2 | v is compressed to 5 bits; the message has B = 2 bits per coefficient |
| eta | 2 | centred binomial distribution for secrets and errors |
| zeta | 202 | primitive 128th root of unity mod q (the smallest one) |

All of these live in `rtl/rudraksh_pkg.sv`, together with the command
format of the polynomial engine and the M2 memory map.

## The scheme as the hardware runs it

Everything is computed in the NTT domain where possible. For seeds
`seed_a` (matrix), `seed_se` (secret and error) and `r` (encryption
randomness):

* **KeyGen**: s_j = CBD(seed_se, j) and e_i = CBD(seed_se, 9+i). Then
  b-hat_i = Σ_j A-hat[i][j] · NTT(s_j) + NTT(e_i).
* **Enc(m)**: s'_j = CBD(r, j), e'_i = CBD(r, 9+i), e'' = CBD(r, 18).
  * u_i = Compress_10(INTT(Σ_j A-hat[j][i] · NTT(s'_j)) + e'_i).
  * v = Compress_5(INTT(Σ_j b-hat_j · NTT(s'_j)) + e'' + Encode(m)).
* **Dec**: m' = Decode(Decompress_5(v) − INTT(Σ_i NTT(Decompress_10(u_i)) · NTT(s_i))).
  The s_i are regenerated from seed_se.

Each A-hat polynomial is drawn by rejection sampling. The XOF absorbs
seed_a followed by two index bytes (row in the low byte, column in the
high byte). Its output stream is cut into 13-bit candidates, and a
candidate is kept if it is below q. Each CBD polynomial comes from
seed_se or r followed by one nonce byte. Four squeezed words give 256
bits, 4 bits per coefficient, and each coefficient is
HW(b0,b1) − HW(b2,b3) mod q.

## Block structure

```
                 +-------------------- rudraksh_top ---------------------+
 op/start -----> | rudraksh_ctrl --(eng_cmd_t, start/done)--> poly_engine |
 seeds, msg ---> |                                             |  ^      |
 host M2 port -> | pk_mem (M2, 1920 x 13, 2R/1W) <-------------+--+      |
                 +-------------------------------------------------------+

 poly_engine:  ascon_xof (ascon_perm) -> xof_buffer (76 bit) -> rej_sampler
                                                             -> cbd_sampler (2 lanes)
               twiddle_rom, ntt_mem (M0/M1) <-> butterfly (modred inside)
```

| module | role |
|---|---|
| `ascon_perm` | ASCON p^12, one round per cycle |
| `ascon_xof` | sponge with a 64-bit rate; starts from the precomputed state after initialisation; pads the last block |
| `xof_buffer` | 76-bit shift register; 64 bits in, 13 or 8 bits out, LSB first |
| `rej_sampler` | keeps 13-bit candidates < q and numbers them 0..63 |
| `cbd_sampler` | two CBD(eta = 2) lanes per byte |
| `modred` | three-stage shift-and-add reduction of a 26-bit value mod 7681 |
| `butterfly` | six-stage unit: CT NTT, GS INTT with halving, a·b+c, add, sub, compress/decode, decompress/encode |
| `twiddle_rom` | zeta^brv6(k), computed at elaboration |
| `ntt_mem` | M0/M1: two 32 × 13-bit banks |
| `pk_mem` | M2: public key, ciphertext, scratch |
| `poly_engine` | runs one 64-coefficient pass (see below) |
| `rudraksh_ctrl` | sequences KeyGen, Enc, Dec as engine passes |
| `rudraksh_top` | wires the above together |

## The polynomial engine: one pass, one polynomial

The hardest part to follow is how a single butterfly and a single XOF do
all the work. The controller never drives the datapath directly. It sends
the engine one command at a time (`eng_cmd_t`), and each command is one
pass over a polynomial:

* **P_NTT / P_INTT** transform the polynomial held in M0/M1 in place. Each
  pass is 6 levels of 32 butterflies, one per cycle. The engine waits for
  the 6-cycle pipeline to empty before starting the next level.
* **P_STREAM** applies one butterfly mode to coefficient k = 0..63. The
  three operands come from M0/M1, from either M2 read port, from the
  message input, from zero, or from the sampler stream. The result goes
  to M0/M1, to M2 or to the message output register. The coefficients
  arrive in one of three ways:
  * `EV_MEM`: one per cycle, from memory;
  * `EV_CBD`: from the XOF through the CBD sampler (3 absorbs and
    4 squeezes, so 84 cycles of XOF);
  * `EV_REJ`: from the XOF through the rejection sampler, in whatever
    order candidates are accepted. Each accepted index k arrives with its
    value.

Because every source produces a pair (k, value), the same read → operate →
write path serves all of them. Reads of memory are issued in the cycle
the coefficient appears. Operands enter the butterfly one cycle later.
The result is written 6 cycles after that, to an address carried in the
butterfly's tag.

Three examples show how the passes combine:

* Sampling a secret is an `EV_CBD` pass with `ADD(0, sample)` into M0/M1.
  Adding an error to a polynomial is the same pass with `ADD(M, sample)`.
* Multiplying a whole column of A-hat with NTT(s_j) takes nine `EV_REJ`
  passes with `MAC(sample, M[k], M2[acc+k])` into M2. The A-hat
  coefficients are used the moment they are accepted, and no storage for
  A-hat exists.
* Compression is an `EV_MEM` pass with mode `COMP` from M0/M1 to M2.

The pass count per operation is:

| operation | CBD passes | A-hat passes | NTT | INTT | other passes | commands |
|---|---|---|---|---|---|---|
| KeyGen | 18 | 81 | 18 | 0 | 9 | 126 |
| Enc | 19 | 81 | 9 | 10 | 31 | 150 |
| Dec | 9 | 0 | 18 | 1 | 31 | 59 |

### NTT memory mapping

Coefficient i lives in bank `parity(i)` (the XOR of its six index bits) at
address `i >> 1`. The two inputs of any radix-2 butterfly differ in
exactly one index bit, so they always sit in different banks. One
butterfly can therefore read both inputs and write both outputs every
cycle, at every level of both transforms, with no swapping.

Forward NTT, level l = 0..5:
* len = 32 >> l;
* pair (i0, i0 + len), with i0 = (j / len) · 2 · len + j mod len;
* twiddle zeta^brv6(2^l + j / len).

Inverse NTT, level l = 0..5:
* len = 2^l;
* twiddle zeta^brv6(64/2^l − 1 − j / len);
* outputs (a+b)/2 and w·(b−a)/2.

The six halvings make up the 1/64 factor. Multiplying point-wise in this
domain gives the product modulo x^64 + 1.

### Butterfly modes

| mode | out0 | out1 |
|---|---|---|
| NTT | a + w·b | a − w·b |
| INTT | (a + b)/2 | w·(b − a)/2 |
| MAC | a·b + c | – |
| ADD / SUB | a ± b | – |
| COMP | u: (a·1024 + q/2)·(2^32/q + 1) >> 32, mod 1024; v: same with 32 and 2^27; Decode: same with 4 and 2^30 | – |
| DECOMP | u: (q·a + 512) >> 10; v: (q·a + 16) >> 5; Encode: (q·a + 2) >> 2 | – |

All products pass through `modred`, which splits the 26-bit value into
c0 = [12:0], c1 = [16:13], c2 = [20:17], c3 = [24:21] and c4 = [25]. It
folds the high parts with shifts and adds, using 2^13 ≡ 2^9 − 1 (mod q).
It then corrects the result, which lies in (−q, 4q), by one
compare-and-select.

The 10-bit compression with the reciprocal constant differs from exact
rounding for exactly one input (x = 5772).

## Memory map of M2

| base | size | content |
|---|---|---|
| 0 | 576 | b-hat_0..8 (public key, NTT domain) |
| 576 | 576 | Enc: accumulators of A-hat^T·s', then u_0..8 (10-bit) |
| 1152 | 64 | v (5-bit) |
| 1216 | 64 | scratch (encoded message, decompressed v, NTT(u_i)) |
| 1280 | 64 | accumulator of b-hat^T·s' or u^T·s |

When the core is idle, the host reads and writes M2 word by word through
`h_re`/`h_we`/`h_addr`/`h_wdata`/`h_rdata`. Read data arrives one cycle
after the request. This is how the public key and the ciphertext are
taken out, or another party's are put in.

## Interface and timing of the top

`rudraksh_top` has no parameters. To run an operation, pulse `start` with
`op` (0 KeyGen, 1 Enc, 2 Dec) while `busy` is low; `done` pulses at the
end. The inputs are:
* KeyGen: `seed_a` and `seed_se`;
* Enc: `seed_a`, `seed_r`, `msg`, and b-hat in M2;
* Dec: `seed_se`, and u and v in M2.

Dec puts its result on `msg_out`. Message coefficient k is in bits
2k+1:2k. `rej_drop` pulses for every rejected A-hat candidate.

Measured cycle counts for random seeds:

| operation | cycles |
|---|---|
| KeyGen | about 24,300 (it depends on the number of rejections) |
| Enc | about 26,300 |
| Dec | 7,910 |

For the KEM the measured cycle counts are about 25,800 for KeyGen, 27,900
for Encaps and 37,300 for Decaps. The paper reports 23,310 / 28,114 /
35,110.

## Where this RTL departs from the paper

* **A-hat multiply.** A-hat coefficients are multiplied and accumulated
  as they are accepted. The paper collects an A-hat polynomial and runs
  the point-wise product afterwards. It also overlaps the NTT of the next
  secret with A-hat generation, whereas here the NTT is a separate pass.
  The totals end up close, but the schedule differs.
* **NTT drain.** The NTT drains its pipeline between levels, which costs
  about 48 extra cycles per transform.
* **NTT bank mapping.** M0/M1 use the parity mapping above. The paper
  splits the polynomial into halves and swaps the write bank at every
  level.
* **Encode formula.** Encode uses (q·m + 2) >> 2, the hardware formula.
  The scheme definition round(q/4)·m differs by one for m = 2 or 3. Both
  sides of this design use the same formula, so decryption is unaffected.
* **5-bit decompression rounding.** It uses +16, as the text states. The
  butterfly figure prints 32.
* **XOF bit order.** Message bits go into the ASCON state LSB first
  without byte swapping. The outputs are therefore not byte-compatible
  with a software ASCON-XOF, although the permutation is the standard one.
* **Index byte order.** The order of the two index bytes of A-hat and the
  value of zeta are not given in the paper and were chosen here.
* **Memory size.** M2 has 1920 words so that re-encryption can keep its
  accumulators next to the ciphertext. That is more than the single 18K
  BRAM the paper uses.
* **Hash serialisation.** How pk and c are packed into H and G is not
  given in the paper and was chosen here.
* **Missing parts.** Not implemented: the TRNG and clock gating of the
  unused sampler.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
references are written independently of the RTL (`tb/rudraksh_ref_pkg.sv`):
* a behavioural ASCON permutation and sponge;
* schoolbook negacyclic multiplication;
* models of the CBD and rejection samplers.

| testbench | what it checks |
|---|---|
| `tb_ascon_perm` | known-answer state and random states against the model; 12-cycle latency |
| `tb_ascon_xof` | random messages against the sponge model; the 84-cycle CBD sampling time |
| `tb_modred`, `tb_butterfly` | every mode against integer arithmetic, including the compression rounding |
| `tb_poly_engine` | copy; INTT(NTT(a)) = a; a·b and a·b + c·d against the schoolbook product; a CBD pass and an A-hat pass against the sampler models; compression; encode/decode |
| `tb_rudraksh_ctrl` | command count, nonce sequence and (row, column) order, against an engine stub |
| `tb_rudraksh_top` | full size: three KeyGen → Enc → Dec rounds recover the message; range checks of pk and ciphertext; pass counts; rejections occur; decryption with a wrong key fails |

To simulate, for example the whole core:

```
verilator --binary --timing --assert -y rtl rtl/rudraksh_pkg.sv tb/rudraksh_ref_pkg.sv \
    tb/tb_rudraksh_top.sv --top-module tb_rudraksh_top
./obj_dir/Vtb_rudraksh_top
```

(`-y rtl` lets verilator find the other modules by file name.) The full-size run takes well under a second of simulation time after the build; the other testbenches are run the same way with their own top module.
