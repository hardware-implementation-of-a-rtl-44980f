# A soft-decision polar-code receiver for VLC beacons

Indoor-positioning beacons send short ID frames through the light of LED lamps. The light must
not flicker, so the transmitted bit stream has to hold roughly as many ones as zeros and keep
runs short. The usual fix is a run-length-limited (RLL) line code such as Manchester or 4B6B. That
costs code rate, and it makes soft-decision decoding awkward. This design uses no RLL code. The
transmitter XORs the 158-bit beacon frame (the JEITA beacon length) with a short pseudo-random
sequence. It then encodes the result with a (256,158) polar code, rate 0.617. The scrambling makes
the codeword's ones and zeros come out nearly balanced, even for 256-bit codewords and for
very lopsided data.

This repository holds the receiver, in synthesizable SystemVerilog. Its chain is:

```
 ADC samples ─► soft-decision filter ─► SC polar decoder ─► P2S ─► descrambler ─► frame bits
 (12 bit, one      7 thresholds,           (256,158), two        158 bits   x^15+x^14+1
  per OOK bit)     LLR table, 256 x 5 bit  bits per clock        serial
```

It follows the architecture in "Hardware Implementation of A Non-RLL Soft-decoding Beacon-based
Visible Light Communication Receiver" (Nguyen, Le, Tran, Huynh, Nakashima). The paper gives the
block structure, the bus widths, the LLR values, the scrambler polynomial, the code size, and
the latency and resource figures. Many internal details are not published: the information set,
the threshold values and the exact decoder schedule, among others. Those are filled in here and
marked as this design's choices. The section "What is the paper's and what is not" lists them all.

The transmitter (firmware on a microcontroller), the LEDs, the photodiode, the analog front end
and the ADC are not part of the RTL. Neither is the final frame decapsulation, which would pull
the ID out of the beacon frame; the paper does not give the frame's field layout. The testbench
package models the transmitter and the channel.

## Soft-decision filter (`soft_decision_filter`)

With on-off keying (OOK), a received sample is some voltage between the "off" and "on" levels.
A hard decision would throw away how far the sample sits from the middle. The polar decoder
works better with a log-likelihood ratio (LLR), `LLR = ln P(bit=0)/P(bit=1)`. The paper argues
that the Gaussian means and variances needed to compute the LLR exactly cannot be estimated on
a real optical link. So the filter quantizes instead: it places the sample in one of eight voltage
ranges and looks up a trained LLR for that range. This is 3-bit soft decision.

* **threshold_adjust** makes the seven thresholds V_t-3 … V_t+3 from a 4-bit SNR setting. They
  are `2048 + (k-3)·(320 − 16·snr)`, k = 0..6. The spacing narrows as the SNR setting rises.
  The rule and its constants are this design's; the paper gives no values.
* **comparator_bank** has eight range comparators, so exactly one is high: a one-hot code
  `sel[7:0]`. A sample equal to a threshold goes to the upper range.
* **mapping_lut** is read at `{snr[3:0], level[2:0]}`, which gives 16 banks × 8 entries × 9 bits
  = 1152 bits. That equals the memory-bit count the paper reports. On reset every bank holds
  the paper's table, in signed Q2.7 (value × 128):

  | range | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
  |---|---|---|---|---|---|---|---|---|
  | LLR (paper) | −1.1943 | −0.3547 | −0.2116 | −0.0702 | 0.0656 | 0.2185 | 0.3630 | 1.2017 |
  | 9-bit Q2.7 | −153 | −45 | −27 | −9 | 8 | 28 | 46 | 154 |
  | 5-bit to decoder | −15 | −6 | −3 | −1 | 1 | 4 | 6 | 15 |

  A write port (`lut_wr_*`) loads other values, for example a different set per SNR bank.
  Range 0 is the lowest voltage. It has a negative LLR, so under the definition above a low
  sample means bit 1. The transmitter must therefore send bit 0 as the high ("on") level.
* **llr_transformer** scales each 9-bit LLR to 5 bits: `sat±15((llr9 + 4) >>> 3)`. It writes
  the result into position `cnt` of a 256-entry register. After the 256th sample it pulses
  `frame_valid` for one cycle with the whole codeword on `llr_out`. The next codeword already
  fills during that cycle, and position 0 changes only at the cycle's end, so the decoder loads
  a clean frame.

The filter takes one sample per clock (`in_valid`). `in_sof` marks the first sample of a codeword.
Symbol timing recovery and frame synchronisation are assumed to happen before the ADC samples
arrive. The paper does not describe them.

## SC polar decoder (`sc_polar_decoder`)

This block is the hardest part to follow and holds most of the logic (about 7,500 of the 8,000
synthesized cells).

**The code.** `x = u · F^⊗8`, with F = [1 0; 1 1] in natural bit order (`polar_encoder`).
There are 158 information positions of `u`; the other 98 are frozen to 0. The
paper does not publish its information set. Here it is built by *polarization weight*: index i
has weight Σ 2^(b/4) over the set bits b of i. The 158 indices with the largest weight carry
data. `vlc_pkg::compute_info_mask()` computes this at elaboration, in integer fixed point, so no
table is stored. The set is closed under bit domination. The two-pass systematic encoder in the
testbench relies on that property, and `tb_bit_indicator` checks it.

**Successive cancellation, two bits per clock.** Let the 256 channel LLRs be the root of a
binary tree. A node of size S with LLRs λ has a left child with LLRs `f(λ_i, λ_{i+S/2})` and a
right child with LLRs `g(λ_i, λ_{i+S/2}, β_i)`. Here β is the left child's decided bits,
re-encoded (the partial sums). The processing element `polar_pe` uses:

```
f(a,b)   = sign(a)·sign(b)·min(|a|,|b|)                 (min-sum)
g(a,b,u) = b + a  (u = 0)    b − a  (u = 1)            saturated to ±63, 7 bits
```

The decoder has no registers inside the tree. An input register holds the 256 LLRs. Seven
combinational layers of 128, 64, 32, 16, 8, 4 and 2 PEs follow. Each layer narrows the path
toward the current leaf pair j (0..127). For pair j, layer k uses f where bit `j[7-k]` is 0 and g
where it is 1. The g case applies when the node on the path is a right child. The last two LLRs
(a, b) then decide both bits in the same cycle:

```
u_2j   = info(2j)   ? (f(a,b) < 0)      : 0
u_2j+1 = info(2j+1) ? (g(a,b,u_2j) < 0) : 0
```

**Encoder selector.** A g-layer needs the partial sums of its left sibling. The layer-k node
has size S = 256 >> k. Its left sibling holds the decided bits `u_hat[start +: S]`, with
`start = ((j >> (7-k)) & ~1) · S`. One combinational polar encoder per size (128, 64, 32, 16, 8,
4, 2) re-encodes those bits every cycle. This is `encoder_selector`. The **bit indicator**
(`bit_indicator`) supplies the two frozen flags of pair j and the full mask.

**Schedule and timing.**

| cycle (from `in_valid`) | action |
|---|---|
| 0 | load the LLR register, sample the `systematic` mode, j = 0 |
| 1 … 128 | decide pair j into `u_hat`, j++ |
| 129 | extract the 158 message bits |
| 130 | `out_valid` for one cycle, `msg_out` holds the message |

The critical path runs from the LLR register through seven PE layers, an encoder of up to 128
bits and the leaf pair. The paper blames this path for its 25 MHz clock (29 MHz maximum). No
timing analysis was done on this RTL.

**Systematic mode.** The paper evaluates both a non-systematic and a systematic (256,158) code.
It does not call either one the main code, so both are supported. With `systematic = 0` the
message is `u_hat` at the information positions. With `systematic = 1` the decoder re-encodes
the decided word, `x_hat = u_hat · F^⊗8`, and reads `x_hat` at the information positions. In the
receiver top the mode is registered with the codeword's first sample, so back-to-back codewords
of different types decode correctly.

## P2S and descrambler

`p2s` shifts the 158 message bits out, bit 0 first, one per clock. It flags the first and last
bit. `descrambler` runs a 15-stage LFSR, `p = r[14] ^ r[13]`, `r <= {r[13:0], p}`, which is the
paper's polynomial x^15 + x^14 + 1. It XORs p into each bit. The sequence restarts from the seed
(all ones) on the first bit of every frame. The scrambler on the transmit side is the same
circuit, so applying it twice returns the data. The seed and the per-frame restart are this
design's choices.

## Receiver top (`vlc_receiver`)

| port | width | meaning |
|---|---|---|
| `adc_valid`, `adc_sof`, `adc_data` | 1, 1, 12 | one sample per OOK bit; sof on the first of 256 |
| `snr` | 4 | threshold spacing and lookup bank |
| `systematic` | 1 | code type of the codeword, sampled with `adc_sof` |
| `lut_wr_en`, `lut_wr_addr`, `lut_wr_data` | 1, 7, 9 | reload a table entry `{snr, level}` |
| `frame_decoded` | 1 | decoder finished a codeword |
| `out_valid`, `out_bit`, `out_first`, `out_last` | 1 each | descrambled 158-bit frame, serial |

**Latency and throughput.** Suppose the first sample of a codeword is presented in cycle 0, with
no gaps. The filter has all 256 LLRs in cycle 256, and the decoder reports in cycle 386. That is
the paper's receiver latency, 386 clocks: 256 / (386 × 40 ns) = 16.58 Mb/s at 25 MHz. The first
descrambled bit leaves 2 cycles later. Decoding (130 cycles) is shorter than collecting a codeword
(256 cycles), so codewords can arrive back to back. The next one is collected while the previous
one is decoded. Assertions check that the decoder is never busy when a frame arrives and that
P2S is never reloaded mid-burst.

**Size.** A generic synthesis (yosys, coarse cells) gives about 8,000 word-level cells and
4,333 flip-flops. Of those, 1,152 hold the lookup table, which is reset-loaded and so cannot be
a ROM or RAM macro. The remaining 3,181 compare with the 3,109 registers the paper reports
(Cyclone IV). The paper counts its 1,152 table bits as memory bits instead. Like the paper's
design, this one keeps a second 256 × 5-bit LLR register inside the decoder.

## What is the paper's and what is not

Taken from the paper:
* the chain filter → SC decoder → P2S → descrambler
* N = 256, K = 158
* 12-bit samples, 4-bit SNR, eight comparators and seven thresholds
* 9-bit table output and 5-bit decoder LLRs
* the eight LLR values
* the layered, non-registered decoder with an encoder selector (sizes 128…2) and a bit indicator
* the scrambler polynomial
* the 386-cycle latency.

This design's own choices:
* the information set (polarization weight)
* threshold values and how the SNR moves them
* the SNR banks of the table, their reset contents and the write port
* the Q2.7 format and the 9→5-bit scaling
* min-sum f, 7-bit saturating PEs
* the two-bits-per-clock schedule, inferred from the 386-cycle latency and the 2-PE last layer
* systematic decoding by re-encoding
* the LLR sign convention. The paper's LLR definition and its table make a low sample a 1.
* the descrambler seed and per-frame restart
* frame start by `adc_sof`.

Known departures and limits:
* The paper states "2^(N−1) decision thresholds" for N-bit soft decision, which would give four
  for 3 bits. It also says seven, and its table and figure show seven. Seven are built.
* Only one LLR table is published. All 16 SNR banks start with it, so after reset the SNR
  setting changes only the thresholds.
* The paper's error-rate curves (BER/FER over Eb/N0) were not reproduced point for point.
  `tb_ber_fer` measures a few points on this design's own channel model (uniform-sum noise on
  the ADC samples, not a calibrated Eb/N0). It shows the expected behaviour: coding gain, and a
  lower BER for the systematic code.
* No timing or power figures. The 25 MHz, 3.5 mW and area of the paper come from the
  authors' own implementation.

## Simulating

Each module is in `rtl/<name>.sv` and each testbench in `tb/<name>.sv`. The shared package
`rtl/vlc_pkg.sv` must be read first, and `tb/vlc_tb_pkg.sv` before the testbenches:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv rtl/vlc_pkg.sv tb/vlc_tb_pkg.sv tb/tb_vlc_receiver.sv \
  --top-module tb_vlc_receiver -o sim && ./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`, and each has a watchdog.
`vlc_tb_pkg` holds the reference models:
* the transmitter: the scrambler, and non-systematic and systematic encoders. The systematic one
  encodes, clears the frozen positions, and encodes again.
* the OOK channel with noise
* the filter's reference mapping
* a recursive successive-cancellation decoder with the same arithmetic as the RTL.

| testbench | what it checks |
|---|---|
| `tb_vlc_receiver` | End to end at full size: 24 beacon frames, both code types, four SNR settings, a table reload, back-to-back codewords and gaps. The output must match the reference chain bit for bit, and noise-free frames must return the sent frame. Latency must be 386, with the first output bit 2 cycles later. It counts each mechanism and fails if one never occurs. |
| `tb_ber_fer` | Error-rate run of the whole receiver: 200 frames per point, three noise levels, both code types. It prints raw BER, decoded BER and FER. Each frame must match the reference chain. It checks coding gain at the lowest noise, that BER and FER fall as the noise falls, and that the systematic code's BER is not above the non-systematic code's, as the paper reports. |
| `tb_sc_polar_decoder` | Clean, noisy and random LLR frames in both modes against the reference decoder; 130-cycle latency; `ready` |
| `tb_soft_decision_filter` | The mapping for samples at the ADC extremes and on thresholds, at several SNR settings; a table reload; frame timing |
| `tb_polar_pe` | Exhaustive f/g over all 7-bit inputs |
| `tb_encoder_selector` | Partial sums of every layer for every pair index |
| `tb_bit_indicator` | The information set recomputed with real arithmetic; domination closure; pair flags |
| others | Thresholds, comparators, table, transformer, P2S and descrambler, each against a direct model |

The full end-to-end run takes well under a second.

## Changing the design

* **Another information set:** change `compute_info_mask()` in `vlc_pkg`. The decoder,
  testbenches and reference models all follow it, but the set must stay closed under bit
  domination if the systematic mode is used.
* **Thresholds:** change the parameters of `threshold_adjust`. `ref_thr()` in `vlc_tb_pkg` must
  match them.
* **PE width:** change `PE_W` in `vlc_pkg`, and `sat7()` in the reference model to match.
* **Code length:** N = 256 is built into the pair counter (7 bits) and the seven layers. Another
  power of two needs `N`, `LOG2N`, `K` and the encoder sizes changed together.
