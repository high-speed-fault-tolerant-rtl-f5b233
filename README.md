# GBT-style fault-tolerant, encrypted optical link (SystemVerilog)

Detector front-ends in a high-radiation area send data over optical fibre to
a PC. Along the way, single-event upsets can flip one bit or a short run of
bits. This design is the digital part of such a link, modelled on the
CERN GBT frame. It is split into a sender FPGA and a receiver FPGA:

* the sender packs 52 bits of detector data (or 116 bits without error
  protection) into a 120-bit frame, one frame per 40 MHz clock;
* it scrambles the data for DC balance;
* it protects the frame with eight parallel BCH(15,7) codes, each of which
  corrects two bits;
* it spreads each codeword's bits over the frame so that a burst hits no
  codeword too hard;
* it encrypts the frame with AES-128;
* it sends the frame as three 40-bit words at 120 MHz, which is 4.8 Gb/s
  on the line.

The receiver finds the frame boundary in the raw word stream, undoes each
step in reverse order, and puts the result in a FIFO. A PCIe DMA engine
reads that FIFO.

```
 sender, 40 MHz                                                 120 MHz
 sc[4],data[48] ─► scrambler ─► BCH encoders ─► interleaver ─► AES-CTR ─► MUX ─► tx_word[40]
 (wide[64] for frames w/o FEC)   (header 1010/0101)               (11 clk)   (dual-port RAM)

 receiver   120 MHz                           40 MHz                                125 MHz
 rx_word[40] ─► frame aligner ─► DEMUX ─► AES-CTR ─► de-interleaver ─► BCH decoders ─► descrambler ─► async FIFO ─► DMA
                (bit slip, lock)                                     (≤2 bits/codeword)
```

The serializer, deserializer and fibre are not part of the RTL. They are
the FPGA's multi-gigabit transceiver. The PCIe core and DMA engine are not
part of it either. Their signals are ports of the top module,
`gbt_link_top`, which holds both FPGAs' logic side by side. Each side has
its own clocks and resets.

## The 120-bit frame

Bit 119 is sent first. Two frame types exist, and a sender can choose the
type for each frame (`tx_fec_mode`):

| bits      | standard frame (header `1010`)              | frame without FEC (header `0101`) |
|-----------|---------------------------------------------|-----------------------------------|
| 119:116   | header                                      | header                            |
| 115:112   | slow control (scrambled)                    | data (scrambled)                  |
| 111:64    | 48 data bits (scrambled)                    | data (scrambled)                  |
| 63:0      | 8 × 8 BCH parity bits, encoder 0 in 63:56   | 64 more data bits (scrambled)     |

A standard frame carries 52 useful bits, which is 2.08 Gb/s. A frame
without FEC carries 116 bits, which is 4.64 Gb/s. The diagram and table
show the standard frame before interleaving. Interleaving then moves every
bit except the header.

The header is never scrambled, interleaved or encrypted. It is the only
thing the receiver can search for to find frame boundaries.

## Scrambler and descrambler (`gbt_scrambler`, `gbt_descrambler`)

The 52 bits are cut into four 13-bit lanes. Each lane is scrambled by a
self-synchronising (multiplicative) scrambler:

    s[n] = d[n] ^ s[n-1] ^ s[n-3] ^ s[n-4] ^ s[n-13]

The bits of a lane are taken MSB first, and one lane word goes through per
clock. The 13 most recent scrambled bits carry over to the next frame.

The descrambler computes `d[n] = s[n] ^ s[n-1] ^ s[n-3] ^ s[n-4] ^ s[n-13]`
from the received bits alone. After one frame it is in step with the
scrambler, whatever state either side started in. A line error therefore
touches at most five output bits and is not carried further. In frames
without FEC, the extra 64 bits use a second instance with four 16-bit
lanes. Each direction has one clock of latency.

The polynomial x^13+x^4+x^3+x+1 is primitive. It was chosen for this
design because the source only says "a 13-bit polynomial".

## BCH(15,7) encoders and decoders (`bch_encoder_bank`, `bch_decoder_bank`, `bch15_7_decoder`)

**Encoding.** The 56-bit message is {header, 52 scrambled bits}. It is cut
into eight 7-bit pieces, with piece 0 at the top. Each piece gets 8 parity
bits from the systematic code with generator

    g(x) = x^8 + x^7 + x^6 + x^4 + 1 = m1(x)·m3(x)   over GF(16), p(x) = x^4 + x + 1

The parity is the remainder of m(x)·x^8 divided by g(x). The message bits
stay together at the top of the frame and the parities are collected in
the low 64 bits. The encoder has one clock of latency.

**Decoding.** Each codeword is decoded with logic only, in a single clock
cycle. There are three steps.

1. **Syndromes.** S1 = r(α) and S3 = r(α³), summed over the set bits of
   the received word.
2. **Error locator.** The locator is x² + S1·x + σ2, with
   σ2 = (S3 + S1³)/S1. All 15 positions are tested at once: position j is
   wrong if α^2j + S1·α^j + σ2 = 0. This is a Chien search, unrolled.
3. **Correction.** The wrong bits are flipped.

The rules for each case are:

* S1 = S3 = 0 means no error.
* σ2 = 0 means one error, at the root S1.
* Any other result must give exactly two roots.

A syndrome pattern that does not fit is flagged `uncorrectable`. In that
case the received message bits are passed on unchanged.

The bank also reports:

* the header after correction;
* the number of bits corrected in the frame (at most 16);
* the uncorrectable flag.

The header is protected by codeword 0 like any other message bit. The
receiver uses the header after correction to decide whether the frame was
standard. Frames without FEC pass through unchanged.

## Interleaver (`gbt_interleaver`, `gbt_deinterleaver`)

Without interleaving, a burst of adjacent wrong bits on the fibre would
land in one or two codewords and exceed their 2-bit limit. The frame is
therefore cut into two 60-bit halves (line positions p = 0..59 and
60..119, where p = 0 is bit 119). Each half goes through a 4-row block
interleaver: it is written row by row and read column by column. The
header (p = 0..3) is kept out, so half 0 interleaves 56 bits as 4 × 14
and half 1 interleaves 60 bits as 4 × 15. The bit that ends up at line
position p comes from position

    ilv_src(p) = base + (q mod 4)·cols + q div 4,     q = p − base

where base is 4 or 60 and cols is 14 or 15. This function is in `gbt_pkg`.
The de-interleaver applies its inverse.

Both directions are pure wiring and add no latency. The choice of
direction is made from the frame's header: only `1010` frames are
interleaved. With 4 rows, any 8 adjacent line bits within one half reach a
given codeword at most twice, so such a burst is always corrected. The
testbench checks this for every burst position inside a half; a burst
that straddles the two halves is not covered by that check.

## Encryption (`aes_ctr_crypt`, `aes_enc_pipe`, `aes_key_expand`, `aes_pkg`)

AES works on 128-bit blocks, but a frame has 120 bits. The receiver also
needs the header in clear to find the frame at all. The frame is therefore
encrypted in **counter mode**:

1. Each frame uses a new counter block {nonce[63:0], counter[63:0]}.
2. AES encrypts that block into 128 key-stream bits. The key is 128 bits
   by default; `AES_KEY_BITS` (top) or `KEY_BITS` selects 192 or 256.
3. The top 116 key-stream bits are XORed onto the 116 bits after the
   header.

Decryption is the same operation. Counter mode has two useful properties
here:

* A line error stays a single-bit error after decryption, so the BCH
  decoder behind the cipher still corrects it.
* The inverse cipher is never needed.

The cipher, `aes_enc_pipe`, unrolls the Nr rounds (10, 12 or 14 for
128-, 192- or 256-bit keys) into an Nr+1 stage pipeline. Each stage does
SubBytes, ShiftRows, MixColumns (skipped in the last round) and
AddRoundKey. The pipeline accepts one block per 40 MHz clock and produces
each result Nr+1 clocks later: 11 with the default AES-128. A sideband word (the frame
and its valid bit) travels alongside it.

The key schedule, `aes_key_expand`, runs once on `key_load`. It builds
four key words per clock with the standard word recurrence and holds all
round keys in registers. `key_ready` rises 11, 13 or 14 clocks after
`key_load` for 128-, 192- or 256-bit keys.

The S-box is the standard table, built from the GF(2^8) inverse followed
by the affine map. The formula is in the header of `aes_pkg.sv`.

**Counter agreement.** Key, nonce and counter must match at both ends. The
sender's counter starts at 0 and counts frames. The receiver's counter is
set once with `rx_ctr_load` / `rx_ctr_value` for the frame that is arriving
at that moment, and from then on it counts frames itself. The link carries
no counter. How the value reaches the receiver (slow control, a host
register, a fixed start) is left to the system. The end-to-end testbench
takes it from the sender's `tx_ctr` record. `crypt_en` low sends frames in
clear.

## MUX and DEMUX across clock domains (`tx_mux_cdc`, `rx_demux_cdc`)

**Sender (`tx_mux_cdc`).** A dual-port RAM holds `FRAMES` = 4 frames. Port
A writes a whole frame per 40 MHz clock. Port B reads 40-bit words at
120 MHz, word 0 first; word 0 is bits 119:80 and holds the header.

The write pointer crosses to the read side as a Gray code through two
flip-flops. The reader starts once `START_FILL` = 2 frames are stored, then
reads three words per frame period. If a frame is missing, the reader
counts an underflow (`tx_underflows`). It then sends zero words, which
have no header, until the RAM has refilled.

**Receiver (`rx_demux_cdc`).** The receiver mirrors this. Each aligned word
is written at the word index given by the frame aligner. A frame whose
words do not arrive in the order 0, 1, 2 is dropped. Complete frames cross
back to 40 MHz by the same Gray-pointer method.

## Frame aligner (`frame_aligner`)

The deserializer's 40-bit words can start at any bit of the frame. The
aligner has two parts.

* **Right shifter.** It keeps the previous word and cuts a 40-bit window
  out of {previous, current}. The window starts at `offset` (0..39).
* **Pattern search.** This state machine counts words 0, 1, 2. On each
  word 0 it checks the window's top four bits against `1010` and `0101`.

| state  | header wrong                                  | header right |
|--------|-----------------------------------------------|--------------|
| SEARCH | bit slip, try again one frame later           | go to VERIFY |
| VERIFY | bit slip, back to SEARCH                      | after `LOCK_HEADERS` = 32 more in a row: LOCKED |
| LOCKED | after `UNLOCK_MISSES` = 4 in a row: SEARCH    | stay         |

A bit slip adds one to `offset`. When `offset` wraps from 39 to 0, the word
counter takes one extra step, so every slip moves the assumed frame start
by exactly one bit. At most 120 slips therefore reach the true boundary.

Only when the aligner is locked does it pass words on (`al_valid`), each
with its word index. The index is the DEMUX write address. The aligner
outputs `locked`, and also counts bit slips and locks.

Data bits can imitate a header, especially in frames without FEC. The 33
good headers in a row needed for lock make a false lock unlikely.

## Receive FIFO (`async_fifo`)

The FIFO is 118 bits wide: {standard-frame flag, uncorrectable flag,
116 payload bits}. In a standard frame the 52 data bits sit at the top of
the payload. It holds 512 words.

Pointers cross between clocks as Gray codes. The write side is the
receiver's 40 MHz frame clock and the read side is the 125 MHz PCIe clock.
A write while the FIFO is full is dropped and counted in
`fifo_overflows`. `rd_data` is registered and valid the clock after
`rd_en`; it is not a first-word-fall-through FIFO.

## Top module and its timing (`gbt_link_top`)

Parameters and their defaults:

| parameter       | default |
|-----------------|---------|
| `MUX_FRAMES`    | 4       |
| `FIFO_DEPTH`    | 512     |
| `LOCK_HEADERS`  | 32      |
| `UNLOCK_MISSES` | 4       |

Clocks:

* sender: `tx_clk40` and `tx_clk120`;
* receiver: `rx_clk120` and `rx_clk40`;
* DMA: `pcie_clk`.

The two 40/120 MHz pairs must be phase related, with 120 MHz being
3 × 40 MHz, as from one PLL.

Sender latency from `tx_data_valid` to word 0 on `tx_word`:

* 1 clock (scrambler);
* 1 clock (encoder);
* 11 clocks (cipher, AES-128);
* then the MUX fill.

Receiver latency from the word on `rx_word` to the FIFO:

* 2 clocks at 120 MHz (aligner);
* about 3 clocks at 40 MHz (DEMUX);
* 11 clocks (cipher);
* 1 clock (decoder);
* 1 clock (descrambler);
* 1 clock (FIFO write).

Status outputs:

* `rx_header`, `rx_locked`, `rx_bitslips`, `rx_lock_count`;
* `rx_frames`, `rx_corrected_bits`, `rx_uncorrectable`;
* `tx_underflows` and `fifo_overflows`.

## Where this departs from the source description

* **AES key size.** The text says AES-128, but the cipher figures are
  drawn for a 256-bit key with 14 rounds. AES-128 is the default. 192 and
  256 bits are parameter choices, checked against the standard's test
  vectors; the end-to-end test runs only AES-128.
* **Cipher mode.** No mode is given for fitting 120-bit frames into a
  128-bit cipher. Counter mode with the header in clear is this design's
  choice. The inverse cipher (InvSubBytes, InvShiftRows, InvMixColumns)
  drawn in the source is not built, because counter mode does not use it.
* **Cipher position.** The overview figure places encryption next to the
  transceiver, after the MUX. The data-flow text and the detailed frame
  figure place it right after the interleaver. The text is followed.
* **RSA.** The source tried RSA in the same slot as AES. RSA is not built:
  no key size is given, and its cipher text, as wide as the modulus, does
  not fit a 120-bit frame.
* **Header check.** The flow chart of the pattern search tests for `0110`
  or `1010`. The text defines the headers as `1010` and `0101`, and the
  aligner accepts those two.
* **FIFO write clock.** The FIFO write side is described at 120 MHz. Here
  it is the receiver's 40 MHz frame clock, since decoded frames appear
  once per 40 MHz clock.
* **Choices where the source is silent.** These are:
  * the scrambler polynomial and bit order;
  * the BCH generator and GF(16) polynomial;
  * the interleaver's 4-row shape;
  * the RAM and FIFO depths;
  * the loss-of-lock rule;
  * the Gray-pointer crossings;
  * handling of uncorrectable words (pass on and flag);
  * scrambling of the 64 extra bits of frames without FEC.
* **Resource use.** The source's BCH decoder used block RAM. Here it is
  all logic.
* **Not reproduced.** Resource, power and timing numbers from the FPGA
  build, and the BER-versus-noise curve.
* **Not included.** The transceiver, PCIe core, DMA engine, clock
  generator and optical modules. Their signals are ports.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

| testbench | what it checks against |
|-----------|------------------------|
| `tb_gbt_scrambler`, `tb_gbt_descrambler` | a bit-serial model of the polynomial; recovery within two words after a line error |
| `tb_bch_encoder_bank` | polynomial division done in the testbench; every codeword is divisible by g(x); frame layout and header |
| `tb_bch_decoder_bank` | random 0-, 1- and 2-bit errors in every codeword (up to 16 per frame) with the corrected-bit count; 3-bit errors must not be reported as a clean frame |
| `tb_gbt_interleaver`, `tb_gbt_deinterleaver` | hand-worked positions; the permutation is a bijection; the header stays fixed; the inverse; the 8-bit burst property |
| `tb_tx_mux_cdc`, `tb_rx_demux_cdc` | word order; the 4.8 Gb/s rate; underflow and refill; dropping a broken frame |
| `tb_aes_key_expand`, `tb_aes_enc_pipe` | the FIPS-197 test vectors for 128-, 192- and 256-bit keys; latency of 11, 13 and 15 clocks; one block per clock |
| `tb_aes_ctr_crypt` | encrypt then decrypt restores every frame; the header stays clear; the counter |
| `tb_frame_aligner` | lock at several bit offsets; 32-header rule; unlock after 4 misses |
| `tb_async_fifo` | order across unrelated clocks; full/empty; overflow count |
| `tb_gbt_link_top` | the whole link at default parameters (below) |

`tb_gbt_link_top` runs the full link. It uses a channel model that delays
the bit stream by 23 bits and adds errors, and a DMA model that reads the
FIFO. Each of the following must happen at least once, and the testbench
counts each one:

* bit slips and lock;
* single-bit errors corrected;
* 8-bit bursts corrected;
* a switch to frames without FEC and back;
* a FIFO overflow while the DMA pauses.

Every word read from the FIFO is compared with the data sent.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal \
    -y rtl +libext+.sv -Irtl rtl/gbt_pkg.sv rtl/aes_pkg.sv \
    tb/tb_gbt_link_top.sv --top-module tb_gbt_link_top --Mdir obj -o sim
./obj/sim
```

Replace `tb_gbt_link_top` with any other testbench name. All files are
plain synthesizable SystemVerilog (IEEE 1800-2017), apart from the
testbenches.
