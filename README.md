# A QC-LDPC joint source–channel codec for binary semantic features

A semantic encoder often produces a small binary map: an edge sketch, a
segmentation mask. Here it is a 160 × 40 black-and-white image, 6400 bits.
Such a map is sparse: only about 4 % of its bits are 1. A conventional link
would first compress the map with some entropy coder and then protect the
result with a separate channel code. This design does both steps with one
pair of LDPC codes and decodes them together:

* **Source compression by syndrome.** The 6400-bit source `s` is multiplied by
  a sparse parity-check matrix `H_s` (3200 × 6400). The 3200-bit syndrome
  `b = H_s s` is the compressed source (rate 2). A sparse `s` can be recovered
  from `b` by belief propagation on `H_s`: decoding uses the prior P(1) = 0.04
  where a channel decoder would use the channel values.
* **Channel protection.** `b` is encoded by a systematic channel LDPC code
  `H_c` (4800 × 8000) into the codeword `c = [p b]`, 8000 bits (rate 0.4). The
  overall rate is 6400 / 8000 = 0.8.
* **Joint decoding.** The receiver does not decode `b` first and then
  decompress. Both Tanner graphs run at the same time and pass beliefs about
  `b` to each other every iteration. The sparseness of the source then helps
  the channel decoder, and the channel helps the source decoder.

Both matrices are quasi-cyclic. They are built from a small base matrix in
which every 1 becomes a 160 × 160 cyclically shifted identity (a
*circulant*). The decoder can then process 160 check nodes at once with
plain rotations, and all encoder arithmetic is XOR of rotated 160-bit words.

The RTL covers the whole coding chain of the link: UEP interleaver, joint
encoder, BPSK mapper, soft demapper, joint decoder and de-interleaver. It
follows a published FPGA prototype of this scheme. Its 6-bit message width,
160-wide circulants, 50 × 90 base-matrix shape, decoder equations and
one-group-per-layer parallelism all come from that prototype. The contents of
the base matrix, the fixed-point details and the cycle-level control are this
design's own. The section "Where this design departs" lists every such point.

## The joint parity-check matrix

The joint base matrix has 50 rows and 90 columns:

```
            source cols 0..39      channel cols 0..29 (p)   channel cols 30..49 (b)
rows  0..19 [      H_s      |            0             |          I (diag)        ]   source checks
rows 20..49 [       0       |           H_1            |           H_2            ]   channel checks
```

Source check row `r` is tied to channel column `30 + r` by an identity
circulant. The equation of a source check is therefore
`(H_s s)_r + b_r = 0`, which is exactly `b = H_s s`.

`rtl/jscc_code_pkg.sv` holds the matrix as three tables. `H_DEG[row]` gives
the row degree. `H_COL[row][e]` gives the column of the row's e-th circulant,
numbered locally per side (source 0..39, channel 0..49). `H_SHIFT[row][e]`
gives its shift. A circulant with shift `s` connects check `i` of its row
block to variable `(i + s) mod Z` of its column block. The published base
matrices are not printed, so this design uses its own, with these
properties:

| part | structure |
|---|---|
| `H_s` 20 × 40 | columns 0–19 degree 3, columns 20–39 degree 4; every row degree 7 |
| `H_1` 30 × 30 | column `c` has ones in rows `c`, `c+1`, `c+11` (those below 30). Lower triangular with shift 0 on the diagonal |
| `H_2` 30 × 20 | every column degree 3; channel rows end up with degree 4 or 5 |
| shifts | random in [0,160), each accepted only if it closes no 4-cycle |

`H_1` is lower triangular with identity diagonal blocks, so `H_1 p = H_2 b`
is solved by back-substitution. No dense inverse of `H_1` is needed.

The higher-degree half of `H_s` (columns 20–39) gives better-protected source
bits. This is the unequal error protection (UEP) that the interleaver
exploits.

To use other codes, replace the three tables and the constants at the top of
the package. The decoder and encoder assume only these things:

* a row degree of at most `H_DMAX = 7` on the source side and 5 on the
  channel side (`SRC_DMAX`, `CH_DMAX`);
* no column repeated within a row;
* for the encoder, the lower-triangular `H_1` with zero diagonal shifts.

## Transmit chain

**UEP interleaver (`uep_interleaver`).** The semantic encoder is assumed to
put important bits at the even positions, counting from 1. The interleaver
gathers those bits into the second half of the frame, which maps onto the
degree-4 source columns:

```
itrl_s[i] = s[2i],   itrl_s[3200 + i] = s[2i + 1]      (0-based, i < 3200)
```

The result is registered and `valid` is a one-cycle pulse. `uep_deinterleaver`
is the exact inverse.

**Encoder (`jscc_encoder`).** The encoder handles one circulant per clock and
keeps a 160-bit XOR accumulator:

1. For source rows 0..19, it XORs the rotated source blocks of the row and
   stores the result as `b_r` in codeword column `30 + r`. This takes 140
   cycles.
2. For channel rows 0..29, it XORs the rotated codeword blocks of every
   circulant except the diagonal one. The result is `p_r`, stored in codeword
   column `r`. The parity columns the row uses are all smaller than `r`, so
   they are already known. This takes 138 cycles.

`done` pulses 278 cycles after `start`, and `c` holds until the next start.

**BPSK modulator (`bpsk_modulator`).** It maps bit 0 to +16 and bit 1 to
−16: ±1.0 in 8-bit samples with 4 fractional bits. It sends one column block
of 160 symbols per beat, 50 beats per frame, under a valid/ready handshake.
An assertion checks that a stalled beat is held.

## Receive chain

**Demodulator (`bpsk_demodulator`).** The channel LLR of a BPSK sample is
`2y/σ²`. Software supplies the gain `2/σ²` as `scale`, an unsigned Q4.4
number. The block computes

```
llr = sat6((y * scale + 32) >>> 6)
```

This is round-to-nearest into 6-bit LLRs with 2 fractional bits. Latency is
one cycle, and the column index travels along.

**Joint decoder (`jscc_decoder`, `layer_decoder`).** This is the core of the
design and is described in the next section.

**De-interleaver.** It restores the source order of the decoded bits.

## The joint decoder

### Message formats

| quantity | width | range | note |
|---|---|---|---|
| channel LLR, V2C (β), C2V (α), exchange messages | 6 bit | −31…+31 (LSB = 0.25) | symmetric, so negation never overflows |
| a-posteriori sum (APP) per variable | 8 bit | −127…+127 | running sum `L + Σα` |
| layered difference `APP − α_old` | 9 bit | exact | kept between read and write phase |

The magnitude 31 has a special meaning: it stands for "certain". It is used
for padding and for the channel checks, which have no side input.

### One side: layered decoding (`layer_decoder`)

Each side is a layered sum-product decoder. A layer is one base
row, that is, 160 check nodes, and all 160 are processed in parallel. The
layers are handled in order, 20 on the source side and 30 on the channel
side. For a layer with `deg` circulants, the decoder runs three phases:

```
read  (deg cycles)  for circulant e: read APP word of its column and C2V word of the circulant,
                    rotate APP by the shift -> check order; per lane
                      diff_e  = APP - α_old_e
                      β_e     = sat6(diff_e + side_e)      side_e = I^{sc→cc} on linked channel columns, else 0
check (1 cycle)     per lane: α_new_e = side_row ⊞ (⊞_{j≠e} β_j)
                    side_row = I^{cc→sc} on source checks, "certain" on channel checks
                    source side also: I^{sc→cc} = ⊞_j β_j   (SC2CC processor)
write (deg cycles)  APP = sat8(diff_e + α_new_e), rotated back; store α_new_e
```

Here `⊞` is the two-input tanh rule, `2·atanh(tanh(a/2)·tanh(b/2))`.

`vn_processor` does the per-lane arithmetic of the read and write phases.
The decoder uses the layered form: it keeps the running sum `L + Σα` and
subtracts the one old message. The published VN processor is drawn as "add
all C2V messages and the channel value, then subtract each". That is the
same arithmetic, written for a flooding schedule.

`cn_processor` forms the extrinsic products for all `deg` outputs. It uses a
forward chain of `⊞` that starts at the side input, a backward chain, and one
combining `⊞` per output: 21 LUTs for degree 7. `sc2cc_processor` is a
separate serial chain over all β of a source check. It does not include the
side input, so the message it sends to the channel is extrinsic.

A layer takes `2·deg + 1` cycles. An iteration takes `1 + Σ(2·deg + 1)`
cycles: 301 on the source side and 307 on the channel side.

### The two-input tanh LUT (`boxplus_lut`)

The prototype evaluates `⊞` with a two-input fixed-point look-up table. Here
the table entry is computed from the exact identity

```
a ⊞ b = sign(a)·sign(b)·[ min(|a|,|b|) + f(|a|+|b|) − f(||a|−|b||) ],   f(x) = ln(1+e^−x)
```

where `f`, in LSB units, is 3, 2, 2, 2, 1, 1, 1, 1, 1 for x = 0…8 and 0
above. An input of magnitude 31 is "certain": the result is the other input,
sign applied. Over all 63 × 63 input pairs, the result stays within one LSB
of the real-valued rule (checked exhaustively by `tb_boxplus_lut`).

### Coupling the two sides (`jscc_decoder`)

The decoder runs the source and channel sides at the same time, and both
start each iteration together. The two graphs share the 3200 source checks
and their linked channel variables `b`. Two 20-word exchange buffers connect
them:

* **I^{cc→sc}**, from channel to source. This is the channel's belief about
  `b`: `L + Σα^{cc}` of the linked variable. It is exactly the word in the
  channel APP memory, because the memory never includes the source message.
  It enters the source check nodes as an extra input.
* **I^{sc→cc}**, from source to channel. This is the source checks' belief
  about `b`. The channel side adds it to the V2C messages of the linked
  variables.

Each side uses the other side's message from the previous iteration. The
source side writes I^{sc→cc} into a "next" buffer layer by layer. After both
sides finish, the controller does two things in 20 cycles:

* copies the "next" buffer into the current buffer;
* reads the 20 linked channel APP words to refresh I^{cc→sc}.

Controller sequence and cycle counts:

| phase | cycles | what happens |
|---|---|---|
| load | 50 writes | channel LLR words (`llr_col`, 160 lanes) into the channel APP memory; allowed while idle |
| init | 40 | source APP := prior `ln(0.96/0.04)` = 13 LSB; C2V valid bits cleared; I^{cc→sc} := channel LLRs of columns 30–49; I^{sc→cc} := 0 |
| iterate | `max_iter` × 328 | both sides (the longer channel side, 306 + 2), then the 20-cycle exchange |
| decide | 50 | `ĉ = 1` where the LLR is negative; for linked columns the LLR is APP + I^{sc→cc}. `ŝ = 1` where the source APP is negative |

`done` pulses 40 + 328·`max_iter` + 50 + 1 cycles after `start`. That is
3371 cycles, or 34 µs at 100 MHz, for 10 iterations. Decoding always runs
`max_iter` iterations; there is no early stop on a zero syndrome.

### Memories

`word_ram` has one write port and one asynchronous read port, and each word
is a whole circulant. The APP memory has one 1280-bit word per column: 40
source words and 50 channel words. The C2V memory has one 960-bit word per
circulant slot: 20 × 7 slots on the source side and 30 × 5 on the channel
side. A C2V slot carries a valid bit. The first iteration therefore reads
zeros without a clearing pass.

## Top level (`jscc_top`)

The top has two independent chains.

* **Transmit:** `tx_start` + `tx_s` (6400 bits) goes through the interleaver,
  the encoder and the modulator, and comes out on `tx_sym_valid/ready`,
  `tx_sym_idx`, `tx_sym[160]` and `tx_sym_last`.
* **Receive:** samples enter on `rx_valid`, `rx_idx` and `rx_y[160]`, with
  `rx_scale` as the LLR gain. They go through the demodulator into the
  decoder. `rx_start` and `max_iter` run the decoder. Then `rx_done` pulses
  with `rx_s`, the de-interleaved source, and `rx_c`, the decoded codeword.
  `rx_iter_count` reports the iterations run.

The physical channel and the semantic encoder/decoder neural networks are
outside the top. The prototype's host system is also outside: a RISC-V
processor, interconnect, DMA, DDR and flash controllers, Ethernet, and a
neural-network accelerator. The paper names those parts but does not
describe them.

## How far it has been verified

Every block has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=… failures=…` line.

| testbench | what it establishes |
|---|---|
| `tb_boxplus_lut` | all 63² input pairs bit-exact against an independently computed rule; within 1 LSB of the real tanh rule |
| `tb_vn_processor`, `tb_cn_processor`, `tb_sc2cc_processor` | random and corner inputs against reference arithmetic; signs checked separately |
| `tb_word_ram` | random read/write against a shadow array |
| `tb_layer_decoder` | both sides (Z = 16): three iterations with random APP and exchange inputs, every APP word and SC2CC message bit-exact against a reference model of the layered schedule; iteration time |
| `tb_jscc_decoder` | Z = 40: zero-iteration hard decisions, noise-free and noisy (1 dB) frames decoded exactly, latency formula |
| `tb_jscc_encoder` | full size: b = H_s s and every channel parity check satisfied; latency 278 cycles |
| `tb_uep_interleaver`, `tb_uep_deinterleaver` | bit mapping and timing |
| `tb_bpsk_modulator`, `tb_bpsk_demodulator` | symbols under random back-pressure; LLR rounding against real arithmetic |
| `tb_jscc_top` | full size (all defaults), described below |

`tb_jscc_top` runs the whole link with a Gaussian channel model in the
testbench. It sends five frames: noise-free, then 4, 0, −1 and −2 dB Eb/N0
at rate 0.8. It checks each transmitted codeword against the parity checks
and checks both latencies. Every frame decoded without error: at −2 dB the
raw hard decisions have about 1260 wrong code bits out of 8000, and after 10
iterations the source is exact. The testbench also checks that these events
occurred: back-pressure stalls, the use of both exchange messages, error
correction, and stopping at the iteration limit.

This is a handful of frames, not a BER curve. The code tables are this
design's own, so decoding performance says nothing about the published
codes.

To run a testbench from the repository root with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/jscc_pkg.sv rtl/jscc_code_pkg.sv tb/tb_ref_pkg.sv tb/tb_jscc_top.sv \
    --top-module tb_jscc_top -j 8 -o sim
./obj_dir/sim
```

Swap in another `tb_*.sv` and top module name for the other testbenches.
The packages come first; the search path `-Irtl` finds the rest.

The full-size end-to-end test builds in about a minute and runs in seconds.
`Z` is a parameter of every block; the testbenches that set it smaller use
the same tables with shifts taken mod `Z`.

## Where this design departs from, or goes beyond, the published prototype

* **The code itself.** The prototype's optimized protographs and
  Golomb-ruler shifts are not printed. The base matrix here keeps the block
  structure, sizes and rates, but the ones and shifts are new. The
  lower-triangular `H_1` is this design's choice, made to keep the encoder
  cheap.
* **Puncturing.** The prototype's Tanner-graph drawing marks channel
  variables 3201–4800 as punctured. Its text gives an 8000-bit codeword and
  rate 0.8. This design follows the text and transmits all 8000 bits. Loading
  zero LLRs for those positions emulates puncturing.
* **A typo in the prototype's matrix equation.** It gives `H_L` as 20 × 40 in
  one place and 20 × 50 in another. 20 × 50 is the consistent reading.
* **Fixed point.** The 6-bit width is the prototype's. The 2 fractional bits,
  the 8-bit APP and the "certain" value 31 are choices of this design. So is
  the LUT content (the exact rule, rounded).
* **Schedule and latency.** The prototype reports 31 ms per iteration at
  100 MHz and does not explain what that time covers. This RTL needs 328
  cycles (3.3 µs) per iteration. Sequencing circulants one per clock in read
  and write phases, the valid bits of the C2V memory, and the double-buffered
  exchange are this design's own.
* **Exchange-message timing.** The prototype says both decoders run in
  parallel and feed "last iteration" messages across. The one-iteration
  delay here is the direct reading of that.
* **Resources.** No FPGA utilisation is claimed. The prototype's figures
  (214 k FF, 643 k LUT, 286 BRAM18 on a Virtex UltraScale+) are for its own
  implementation.
* **Interleaver reading.** The drawing of the UEP interleaver does not say
  which end of the frame is position 1. Which half receives the "even"
  positions follows the stated intent: important bits go to the stronger
  half.
* **Transmitter.** The prototype ran the transmitter in software on a PC.
  Here it is RTL, so the link can be simulated end to end.
