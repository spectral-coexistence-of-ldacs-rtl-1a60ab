# An OFDM baseband transceiver with LDACS symbol layouts

This is the baseband of a small OFDM link of the kind used to study how an
L-band aviation data link (LDACS) coexists with DME, the older navigation
system on the same band. A short message of 864 bits is cut into 24-bit
pieces. Each piece is scrambled, convolutionally encoded and interleaved to
48 bits, and BPSK-modulated onto one OFDM symbol of 64 subcarriers. The
symbols are sent after a 320-sample preamble. Which subcarriers carry pilots
depends on where the symbol sits in the 54-symbol LDACS frame. The receiver
finds the preamble with a matched filter and aligns to it. It strips the
cyclic prefixes, takes the FFT, reads the data subcarriers back, and decodes
the bits with a Viterbi decoder and a descrambler.

The chain follows the IEEE 802.11a baseband for coding and framing and
LDACS for the subcarrier layout. It is the programmable-logic half of a
hardware/software co-design. In the original system, an ARM processor on the
same chip supplies the message and collects the decoded bits over AXI, and an
RF transceiver carries the samples. Those parts are not described here.
Instead, the top level brings out their signals as plain ports.

Everything is synthesizable SystemVerilog, one module per file, in `rtl/`.
Self-checking testbenches are in `tb/`.

## Sizes

| quantity | value | from |
|---|---|---|
| message | 864 bits | reference model |
| data bits per OFDM frame | 24 | reference model |
| OFDM frames per burst | 36 (864 / 24) | reference model |
| coded bits per frame | 48 (rate 1/2) | follows |
| subcarriers / FFT size | 64 | reference model |
| samples per OFDM frame | 80 (64 + 16 cyclic prefix) | reference model (80); 16 = 80 - 64 |
| preamble | 4 frames = 320 samples | reference model |
| symbols per LDACS frame | 54 (index 0..53) | reference model |
| enables of the symbol index controller | 9 (EN1..EN9) | reference model |
| sample format | complex, 16-bit signed, 14 fraction bits (+1.0 = 16384) | reference model |
| preamble detection threshold | 2.0 on the squared correlator output | reference model |
| delay of the data behind the preamble | 89 clocks | reference model |

All of these are set in `rtl/ofdm_pkg.sv` or as module parameter defaults.

## Transmitter

`ofdm_tx` chains the following blocks:

    stimulus_sel -> scrambler -> conv_encoder -> interleaver -> bpsk_mod
      -> frame_gen -> dft64 (inverse) -> cp_adder -> preamble_adder

A `start` pulse is the frame reset. It clears every counter in the chain,
starts the preamble, and queues `NFRAMES` (36) OFDM frames.

**Pacing.** The IFFT is a serial engine (see below), so it sets the pace. The
controller lets one 24-bit frame into the chain only when the IFFT is idle
and the previous frame has reached it. Only one frame is ever in flight.

**Timing.** The first preamble sample leaves two clocks after `start`. After
that, each OFDM frame takes about 4130 clocks, and its 80 samples leave back
to back.

**Stimulus.** `stimulus_sel` holds the message. For each frame it sends the
24-bit slice `msg[24*f +: 24]` one bit per clock, lowest bit first. The frame
counter `f` wraps after 35.

**Scrambler.** `scrambler` XORs bit `n` of the stream with element `n mod 127`
of a fixed 127-bit sequence. The index register runs on from frame to frame.
It also builds a "frame valid" signal, as the reference model's
programmable-logic version does: 23 delays of the input valid are ORed
together.

The sequence is the 802.11a one: the output of the LFSR x^7 + x^4 + 1 started
from all ones, bit = s[6] xor s[3]. The package computes it at elaboration.
The 802.11a choice is an assumption; the reference only calls it a
predefined constant sequence.

**Convolutional encoder.** `conv_encoder` is the rate 1/2, constraint
length 7 code with generators 133 and 171 (octal). It emits the pair (a, b)
for each input bit, with a first. Its state is cleared at the start of every
frame. Each 24-bit frame is therefore encoded on its own, without tail bits,
and the decoder can treat each frame on its own too.

**Interleaver.** `interleaver` collects the 48 coded bits. It writes coded
bit `k` to position `3*(k mod 16) + floor(k/16)`. This is the first
802.11a permutation for 48 coded bits per symbol, an assumption.

**BPSK mapper.** `bpsk_mod` maps bit `b` to `2b - 1`, so 0 gives -1.0 and
1 gives +1.0, with a zero imaginary part.

## Symbol indices and pilot layouts

This is the part that departs most from a textbook 802.11a chain.

An LDACS frame has 54 OFDM symbols. Symbols 0, 51, 52 and 53 each have a
layout of their own. The other symbols cycle through five pilot patterns,
with period 5. `symbol_index_ctrl` counts the symbols (0..53; each mapped
symbol moves it on) and raises one of nine enables:

| enable | symbols | layout used here |
|---|---|---|
| EN1 | 0 | stand-in (two pilots) |
| EN2 | 53 | stand-in (two pilots) |
| EN3 | 52 | stand-in (two pilots) |
| EN4 | 51 | stand-in (two pilots) |
| EN5 | 1, 6, ..., 46 | **two pilots** (given) |
| EN6 | 2, 7, ..., 47 | stand-in (two pilots) |
| EN7 | 3, 8, ..., 48 | **four pilots** (given) |
| EN8 | 4, 9, ..., 49 | stand-in (two pilots) |
| EN9 | 5, 10, ..., 50 | stand-in (two pilots) |

The reference model states two assignments directly: EN5 serves symbols 1,
6, ..., 46, and the four-pilot layout serves symbols 3, 8, ..., 48. The other
assignments follow the order of the mapping blocks in its diagram.

`frame_gen` holds nine `subcarrier_map` instances, one per enable. A
multiport switch then picks the output of the instance that was enabled.

**The two layouts that are known.** Positions below are 0-based, in centred
order with DC at entry 32. Subcarrier numbers in brackets are 1-based. Every
layout has 7 null subcarriers on the left, 6 on the right, and DC in the
middle.

- Two pilots, 48 data. Data sits at entries 7..30 and 34..57. The pilots are
  at entry 31 (subcarrier 32) with sign +1 and at entry 33 (subcarrier 34)
  with sign -1.
- Four pilots, 46 data. Data sits at entries 8..22, 24..31, 33..40 and
  42..56. The pilots are at entries 7, 23, 41 and 57 (subcarriers 8, 24, 42
  and 58) with signs +1, -1, +1, +1. Data inputs 46 and 47 are not sent.

**Pilot polarity.** Each pilot's sign is multiplied by a polarity that steps
once per symbol sent through that instance. Each instance has its own
counter. The polarity is +1 for a 0 and -1 for a 1 of the same 127-bit
sequence, the 802.11a pilot polarity. That sequence is an assumption.

**The missing layouts.** The other five LDACS layouts are not specified:
symbol 0 carries 36 data and 14 pilots, and symbols 51 to 53 carry
synchronisation symbols and zeros. Their instances therefore use the
two-pilot layout. The controller, the nine instances and the switch are
complete. Adding a real layout means adding a case to the package functions
`data_pos`, `pilot_pos`, `pilot_neg`, `npilot` and `ndata`, and changing one
entry of the `LAY` table in `frame_gen` and in `subcarrier_demap`.

**Erased bits.** A four-pilot symbol cannot carry two of its 48 coded bits,
because they had no data subcarrier. The receiver does not guess them. It
marks them unknown, and the Viterbi decoder gives them no weight (see below).
The BPSK demapper, deinterleaver and decoder all carry this erasure mask
along with the bits.

## DFT engine and cyclic prefix

`dft64` is a direct 64-point DFT. It uses one complex multiply-accumulate
per clock, with twiddles `cos/sin(2*pi*m/64)` in Q1.14. The package derives
them from a 17-entry quarter-wave table, `round(16384*cos(2*pi*m/64))` for
m = 0..16.

- A transform takes 64 x 64 = 4096 clocks. Output `k` appears once its 64
  products are summed, so outputs come every 64 clocks. `ready` is low while
  a transform runs.
- With `INVERSE = 1` the exponent sign is positive and `OSHIFT = 6` divides
  by 64. The transmitter uses this setting, so a full-scale BPSK symbol stays
  well inside range. The receiver uses `INVERSE = 0, OSHIFT = 0`, which
  brings the data subcarriers back to +-1.0.
- Results are rounded and saturated to 16 bits.

The transmitter reorders the centred subcarrier vector into natural bin
order before the IFFT (bin k = entry (k + 32) mod 64, an fftshift). The
receiver's demapper undoes this.

A serial engine was chosen over a pipelined FFT because the link runs at a
low sample rate. LDACS uses 64 subcarriers at 9.765625 kHz spacing, which is
625 kS/s. At a 100 MHz clock the serial transmitter delivers 80 samples per
4130 clocks, about 1.9 MS/s.

`cp_adder` is double-buffered. It collects the 64 IFFT outputs, then sends
samples 48..63 (the prefix) followed by samples 0..63. The next symbol can
arrive while one is being sent. The first output sample appears two clocks
after the last input, and `err` flags an overrun.

## Preamble insertion

`preamble_adder` follows the reference model's structure:

- A sample counter, cleared by the frame reset, addresses a preamble table
  at `min(count, 319)`.
- While the frame number `count / 80` is 0..3, the table output is sent and
  valid is forced high.
- From frame 4 on, the output is the data stream delayed by 89 clocks, with
  its delayed valid.

The counter stops at 320, so the preamble goes out once per burst. After
reset nothing is sent until the first frame reset.

The preamble values (short and long training sequences) are not given, so
the table is a 320 x 32-bit RAM. It is loaded through `lut_we / lut_addr /
lut_data`. If a data sample reached the output while the preamble was still
running, it would be dropped and `lost` would pulse. The transmitter's
pacing keeps that from happening.

## Finding the burst

`preamble_detect` filters the received samples with a complex FIR (`NTAPS`
= 16 taps, coefficients on the `coef` port, `coef[0]` on the newest sample).
It squares the magnitude of the output and tracks the largest value and its
index within each window of 80 samples.

At the end of a window, the preamble counts as found if that maximum is at
least 2.0 and nothing has been found yet. The sticky flag `fpf` then rises,
and `ips` latches `(index + 1) mod 80`, the first sample after the
correlation peak. `start_abs` is the same point as an absolute sample count
since the frame reset.

The taps are meant to be the matched filter of the last stretch of the
preamble: that stretch conjugated and time-reversed. The peak then falls on
the last preamble sample, so the first OFDM symbol starts at `start_abs`.
The reference model does not give the filter length or its coefficients.

`rx_sync` writes every received sample into a 256-entry circular buffer at
its absolute index. The buffer covers the up to 80 samples the detector
needs before it decides. When `found` arrives, reading starts at
`start_abs`. Each 80-sample frame is read, its first 16 samples are dropped,
and the other 64 form a vector for the FFT, handed over when the FFT is
ready. `overflow` flags samples overwritten before they were read.

The receiver does no frequency, timing or channel correction. It relies on
the preamble alignment alone.

## Decoding

**Demapping and hard decision.** `subcarrier_demap` places the FFT bins back
in centred order. It has its own copy of the symbol index controller, so it
picks the data entries of the layout the transmitter used, with the same
stand-ins. `bpsk_demod` decides bit = 1 when the real part is above zero. It
passes the known/erased mask through.

**Deinterleaver.** `deinterleaver` applies the inverse permutation,
`out[k] = in[3*(k mod 16) + floor(k/16)]`, to both the bits and the mask.

**Viterbi decoder.** `viterbi_dec` is a 64-state hard-decision decoder. It
works frame by frame:

1. Load 48 coded bits and their mask.
2. Run 24 add-compare-select steps, one per clock, using Hamming branch
   metrics over the known bits only. Path metrics start at 0 for state 0 and
   64 elsewhere, because the encoder starts each frame in state 0.
3. Pick the best final state.
4. Run 24 traceback steps through a 24 x 64 survivor memory.

The result appears 50 clocks after the frame was taken. The last bits of a
frame are the least protected, because the trellis is not terminated. This
holds for any frame-wise decoder of this code without tail bits.

**Descrambler.** `descrambler` XORs the 24 decoded bits of a frame with
sequence elements `offset .. offset+23 (mod 127)`. The offset starts at 0 on
the frame reset and advances by 24 modulo 127 per frame, which matches the
transmitter's running index.

## Top level

`ofdm_trx_top` holds one `ofdm_tx` and one `ofdm_rx`. Parameters:

- `NFRAMES` = 36, the OFDM frames per burst.
- `NTAPS` = 16, the matched filter length.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous active-high reset |
| `tx_start` | in | frame reset of the transmitter; sends one burst |
| `msg[863:0]` | in | the message |
| `lut_we`, `lut_addr[8:0]`, `lut_data` | in | loads the 320-sample preamble table |
| `tx_sample`, `tx_valid` | out | transmit samples (to the RF front end) |
| `tx_busy`, `tx_sym_en[8:0]`, `tx_err` | out | burst in progress; enables of the last symbol; overrun |
| `rx_sample`, `rx_valid` | in | received samples (from the RF front end) |
| `rx_frs` | in | frame reset of the receiver |
| `coef[16]` | in | matched filter taps |
| `rx_bits[23:0]`, `rx_bits_valid` | out | decoded data, one 24-bit frame per pulse |
| `rx_locked`, `rx_ips[7:0]` | out | preamble found; alignment index |
| `rx_sym_idx[5:0]`, `rx_known_all` | out | symbol index; whether that symbol carried all 48 coded bits |
| `rx_err` | out | buffer overflow or decoder overrun |

Complex ports are of type `ofdm_pkg::cplx_t`, a packed `{re, im}` pair of
16-bit signed values.

Coarse synthesis with yosys gives about 4.6k word-level cells, 16k flip-flop
bits and 33k memory bits for the whole top. Most of the flip-flops are the
nine 64-entry subcarrier vectors of the frame generator and the vector
buffers around the two DFT engines.

## Where this departs from the reference model

- **Pilot layouts.** Five of the seven LDACS pilot layouts are stand-ins, as
  described above.
- **Assumed sequences.** The scrambling sequence, the pilot polarity
  sequence and the interleaving index are the 802.11a ones; the reference
  model only calls them predefined.
- **Per-frame encoding.** The encoder restarts from the zero state for every
  24-bit frame.
- **Frame size at the receiver.** The reference text speaks of a 64-bit frame
  at the receiver's deinterleaver. With 24 data bits at rate 1/2 the coded
  frame is 48 bits, and that is what is built.
- **Descrambler first frame.** The reference model's descrambler passes
  the first decoded frame through unchanged. That suits its library decoder,
  which delays the output by one frame. This decoder has no such delay, so
  every frame is descrambled.
- **Preamble and filter values.** The preamble samples and the detector's
  filter are inputs here, because their values are not given.
- **Fixed latency.** The reference model has no fixed latency. The serial
  DFT and the one-frame-in-flight control are choices of this design, and so
  are all latencies quoted above.
- **Not included.** The windowing and filtering of the WOLA-OFDM and F-OFDM
  variants, the RF transceiver, the AXI interface and the processor side.

## Testbenches

Each module has a self-checking testbench `tb/tb_<module>.sv`. Every
testbench:

- computes its expected values independently, in plain behavioural code;
- checks cycle counts where the design fixes them;
- has a watchdog;
- prints `TB_RESULT checks=N failures=M` at the end.

| testbench | what it checks |
|---|---|
| `tb_stimulus_sel` | bit order, frame wrap after 36, timing |
| `tb_scrambler` | XOR with an LFSR computed in the testbench; frame-valid OR |
| `tb_conv_encoder` | against a shift-register encoder with the octal masks |
| `tb_interleaver`, `tb_deinterleaver` | the permutation, both directions, bits and mask |
| `tb_bpsk_mod`, `tb_bpsk_demod` | mapping, decisions at and near zero |
| `tb_symbol_index_ctrl` | enable groups and wrap over several frames |
| `tb_subcarrier_map`, `tb_frame_gen` | positions, pilot signs and polarity, the switch |
| `tb_subcarrier_demap` | the inverse mapping over 60 symbols |
| `tb_dft64` | forward and inverse against a floating-point DFT (+-3 LSB), output timing |
| `tb_cp_adder` | prefix content, timing, overrun flag |
| `tb_preamble_adder` | table, 89-clock delay, counter stop, lost samples |
| `tb_preamble_detect` | weak copy ignored, peak index, sticky flag, frame reset, timing |
| `tb_rx_sync` | alignment and prefix removal with random gaps and back-pressure, overflow |
| `tb_viterbi_dec` | clean, erased and single-error frames; 50-clock latency |
| `tb_descrambler` | offset walk and frame reset |
| `tb_ofdm_tx` | whole transmitter against a floating-point transmitter model (within 8 LSB) |
| `tb_ofdm_rx` | whole receiver fed by that model with noise, two bursts |
| `tb_ofdm_trx_top` | loop-back over a full 54-symbol frame; counts that every enable, both layouts, the erasures and the lock happened |
| `tb_ofdm_trx_full` | the same loop-back at the default parameters: the 864-bit message in 36 frames |

To run one with Verilator (5.x):

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/ofdm_pkg.sv tb/tb_ofdm_trx_full.sv --top-module tb_ofdm_trx_full
    ./obj_dir/Vtb_ofdm_trx_full

The full-size loop-back runs in about a second.
