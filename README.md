# chFPGA F-engine signal path for CHORD — SystemVerilog model

Each CRS board of the CHORD F-engine digitizes eight radio signals at 3.2 GSPS. It cuts each
stream into frames of 16384 samples and turns every frame into 8192 complex frequency bins
with a 4-tap polyphase filter bank (PFB) followed by an FFT. It then reduces every bin to 4+4
bits with a per-bin gain, so that the data for the X-engine (the stage that correlates the
inputs) fits into one 100 GbE link. The main difficulty is throughput. The ADCs deliver 8
samples on every 400 MHz clock, so every stage after them must consume a full frame of
16384 samples every 2048 clocks, with no gaps and no back-pressure. This RTL builds that path
as one parallel pipeline per input. Every stage works on 8 samples, or 4 bins, per clock,
and all inputs share one frame strobe. Two back ends follow, as in the two firmware builds:

* **UPACK** packs 16-frame sets into 100 GbE packets.
* **UCORR** is an eight-input correlator that integrates all 36 products of every bin on chip.

The code is SystemVerilog-2017. `rtl/chfpga_pkg.sv` holds the shared constants, enums and
configuration structs. There is one module per file.

## Data flow

```
ADC x8 -> adcdaq -> channelizer: funcgen -> pfb_fir -> fft_wideband -> scaler --+--> upack -> 100 GbE stream
                                    |                   (bypass)           |     +--> ucorr -> 1 GbE stream
                                    +------------- prober <----------------+
                                                      |
                                                      +--> ucap (burst capture) -> 1 GbE stream
sync_seq: frame strobe and 64-bit frame number for every stage
```

The corner turn inside the board gathers the eight inputs' bytes of the same bins. Because all
eight channels run in lock-step, it is pure wiring in `chfpga_top`. The top selects the back end
with the parameter `USE_UCORR`: 0 builds UPACK (the CHORD build), 1 builds UCORR.

## Frames, words and bin order

The clock-level format is the thing to learn first. Everything else follows from it.

* **ADC side.** A frame is `FRAME_WORDS` = 2048 words. A word holds 8 samples: lane *i* of word
  *t* is sample *n = 8t + i*. `sof` is high on word 0.
* **Bin side.** A frame is again 2048 words. A word holds 4 bins, in bin slots k2 = 0..3.
* **Bin numbering.** Word *u*, slot *k2* carries bin `bitrev11(u) + 2048*k2`.
  * Within each slot the words come in the bit-reversed order of a decimation-in-frequency
    (DIF) FFT.
  * The four slots of a word are four bins spaced 2048 apart.
  * All later blocks keep this order. The UPACK readout table and the UCORR output name bins
    by this rule.

## The wideband FFT (`fft_wideband`, `fft_sdf_stage`)

The 16384-point real FFT takes 8 samples per clock. It is split as N = 2048 x 8. Write the
sample index as *n = p + 8t*, where *p* is the lane, and the bin index as *k = k1 + 2048 k2*.
Then

    X[k] = sum_p  W8^(p k2) * W16384^(p k1) * F_p(k1),     F_p = 2048-point DFT of lane p.

The FFT computes this in three steps:

1. **Per-lane DFT.** Each lane runs its own 2048-point DFT as a chain of 11 radix-2
   single-delay-feedback (SDF) DIF stages (`fft_sdf_stage`).
   * The delays are 1024, 512 .. 1.
   * Each stage adds one bit of word growth.
   * The stage twiddles are 18-bit, with rounding after each multiply.
   * Output word *u* of lane *p* is `F_p(bitrev(u))`.
2. **Inter-lane twiddle.** Each lane is multiplied by `W16384^(p * bitrev(u))`, with rounding
   and saturation.
3. **Direct DFT across lanes.** A direct 8-point DFT across the lanes, three radix-2 levels'
   worth, forms the four bins `k2 = 0..3` of the clock word.

Only the non-negative half of the spectrum is kept, which is 8192 bins. Bins 8192 and up are
the conjugate mirror for a real input. Word growth takes the 18-bit PFB output to a 32-bit
result. Latency is `FRAME_WORDS + log2(FRAME_WORDS) + 1` clocks: 2060 at full size.

The twiddle tables are computed with `$cos`/`$sin` in `initial` blocks (`round(2^17-1 * cos)`),
not read from files. The lanes are fed as complex streams with a zero imaginary part. The
original CASPER core packs real data more efficiently. The result is the same, but the resource
count is not representative.

## PFB front end (`pfb_fir`)

A critically sampled 4-tap polyphase FIR. The coefficients are

    h[m] = (0.54 - 0.46 cos(2 pi m / (L-1))) * sinc(4 m / (L-1) - 2),   L = 4 * 16384

The window is Hamming and the coefficients are 18-bit. Sample *n* of frame *f* sees the same
branch position in frames *f-3 .. f*. Three frames of history are kept. The output is the sum
shifted right by 13, rounded, and saturated to 18 bits. Latency is 2 clocks.

## Function generator (`funcgen`)

The first block of each channel. In pass-through mode it passes the ADC data on and counts
full-scale samples per frame. Its other modes:

* **Scale/clip.** Gain in unsigned 4.12 format, then a symmetric clip.
* **Waveform playback.** Plays one programmed frame: 2048 words of eight 14-bit samples, written
  through the table port.
* **Noise.** Pseudo-random noise from a seeded 32-bit xorshift per lane.
* **Forced overflow.** Forces chosen lanes to full scale.
* **Counters.** Fills the frame with the sample number or the frame number.

The mode can change at any time. The waveform memory also serves as the source of user spectra
when the FFT is bypassed. Latency is 2 clocks.

## Scaler (`scaler`, `scaler_stats`)

Every bin has its own 16-bit unsigned gain. Two banks of 2048 x 4 gains exist. The bank input is
sampled at each frame strobe, so a switch never splits a frame. The scaler multiplies the
(32+32i) bin by its gain to get a (48+48i) product. It keeps the 4-bit window whose LSB is bit
`QUANT_LSB` (default 32), rounds half away from zero and clips to -7..+7. The code -8 never
appears, so the output has no negative bias. The output byte is `{re[3:0], im[3:0]}`.

A clip of either part raises `ovf` for the bin. `scaler_stats` counts these flags over a
programmable number of frames, for all bins or one selected bin. The published count appears at
the strobe that ends the period.

In bypass mode (`cfg.fft_bypass`) samples 2b and 2b+1 of a function generator word become the
real and imaginary parts of bin slot b. This lets a programmed spectrum go through the scaler and
everything after it.

## Taps and burst capture (`prober`, `ucap`)

The prober can tap one of three points of a channel:

* **ADC timestream.** 8 x 16-bit samples.
* **FFT output.** 128 bits carry only two of the four 64-bit bins, so even frames carry slots
  0 and 2, and odd frames carry slots 1 and 3. Two consecutive captured frames hold a whole
  spectrum.
* **Scaler bytes.**

UCAP captures a burst of 16 frames once per programmable period. The burst can be one input for
16 frames, 2 inputs for 8, 4 for 4 or 8 inputs for 2 frames each (`n_log2`). The inputs of a
burst are captured at the same time. UCAP then streams the burst out as 32-bit words with
valid/ready while capture waits. A period that ends during readout is skipped and counted.

## Frame synchronization (`sync_seq`)

After `arm`, the sequencer waits for a rising edge of the PPS (or sync) pulse. It then starts on
the next rising edge of the sampled 10 MHz reference, so every board starts on the same reference
edge. From then on it issues a frame strobe every 2048 clocks and counts 64-bit frame numbers
from a programmed initial value. Each channel carries the frame number alongside its pipeline, so
the number that reaches a back end is the number of the input frame that produced it.

## Packet assembly (`upack`)

The writer stores 16 consecutive frames of all eight inputs into one of two buffers:
2 x 2048 words of 16 x 8 x 4 bytes, 1 MiB each. When the set is complete the buffer goes to the
reader and the writer fills the other one. If the reader is still busy with the previous set,
the new set is dropped and `overruns` counts it.

The reader sends `pkt_count` packets (128 for CHORD). Each packet has one 512-bit header beat and
then `BPP` bins (48 for CHORD). A 16-bit readout table names the bins, which allows any subset
and any order. 128 x 48 gives the 6144 bins of the 300–1500 MHz band.

* **Bin payload.** Each bin is 128 bytes: byte `frame*8 + input`, frames 0–7 in the first beat,
  byte 0 in bits 7:0.
* **Header.** The header beat comes from a per-packet 64-byte template RAM. Bytes 42..54 are
  filled by the hardware: board id (42), first bin (43–44), the set's first frame number
  (45–52), packet index (53–54). Multi-byte fields are big-endian.

The output is a 512-bit valid/ready stream with `tlast`, meant for a 100 GbE MAC. One set needs
128 x 97 = 12416 beats in 32768 clocks, so the link side can stall heavily without overruns.

## Correlator (`ucorr`)

For every bin UCORR forms the 36 products `x_i * conj(x_j)`, i <= j, of the eight inputs. It
adds them over `int_frames` frames (1..65536) into saturating (18+18i) accumulators. The first
frame of an integration overwrites instead of adding, so no clearing pass is needed.

The accumulators are double-buffered, 2 x 8192 x 36 complex words. While one bank integrates,
the other is streamed out one product per beat, in bin order and then product order, tagged with
the first frame number of the integration. An integration that ends during readout is dropped and
counted.

## Configuration

All tables share one write port, `cfg_wr` (`cfg_wr_t` in the package). It has a target (waveform,
gain, readout table, header template), a channel (0..7, or 15 for all channels), an address and
data.

* **Gain address.** `{bank, word}`.
* **Waveform and gain data.** The low bits of `data`, with lane or slot 0 at the LSB.

Per-channel modes sit in `cfg[c]` (`chan_cfg_t`). Status counters are plain outputs.

## Where this departs from the source design

* **Register access.** The ARM processor, its register bus, the 1 GbE UDP packetizer, the 100 GbE
  MAC and the RF-ADC tiles are not modelled. Their data streams are ports of `chfpga_top`.
* **Header storage.** UPACK keeps headers in a separate template RAM. The original reuses buffer
  locations freed by the bins that are not sent.
* **Undocumented details chosen here.** The scaler's window position (`QUANT_LSB`), its rounding
  mode and its gain width are this design's choices. The original only says that the upper bits
  of the 48-bit product are kept. The same holds for the PFB output scaling, the FFT's rounding
  points, and every stream format, header offset and overrun policy.
* **Missing capture mode.** The scaler's (48+48i) product is an output of `scaler`, but no probe
  source captures it yet.
* **Multi-board correlators.** The N = 32/64 correlators and the backplane corner turn they need
  are not built. IRIG-B time decoding is not built either.
* **Correlator kernel.** UCORR uses plain multiplies instead of the original's packed two-DSP
  kernel.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fft_wideband` | FFT against a direct DFT, 64-word frames, tolerance 64 LSB + 1e-4 relative |
| `tb_pfb_fir` | PFB against the same coefficient formula |
| `tb_scaler` | Every rounding and clipping case and the bank switch |
| `tb_upack` | Every payload and header byte under random back-pressure, plus a forced overrun |
| `tb_ucorr` | Every product of every dump against a saturating model, with stalls and drops |
| `tb_channelizer` | A bin-centred tone through the PFB/FFT (tone bin clips, far bins zero), bypass mode byte by byte, both gain banks, clip statistics, frame numbers and latency |
| `tb_chfpga_top` | Both builds side by side at 16-word frames |
| `tb_chfpga_full` | One full CHORD operation at the default size |

`tb_chfpga_top` checks UPACK packets, UCAP captures and a UCORR dump against a byte model. It
also requires every mechanism to happen at least once: sync start, FFT bypass, gain bank
switch, function generator mode switch, ADC overflow, scaler clipping, UPACK set, stall and
overrun, UCAP burst, skip and stall, UCORR dump and drop.

`tb_chfpga_full` runs the top with no parameter overrides: 16384-sample frames and 128 packets
of 48 bins. It runs a tone at bin 100 through all eight inputs and checks all 128 packets of
the first set, with about 25,000 checks. It simulates in about 2–3 minutes.

To run one testbench with plain verilator:

```
verilator --binary --timing --assert -Irtl --top-module tb_chfpga_top \
  rtl/chfpga_pkg.sv rtl/*.sv tb/tb_chfpga_top.sv -o sim && ./obj_dir/sim
```
