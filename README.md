# Ultrasound video link: FPGA platform logic

An ultrasound link through tissue can carry ultra-high-definition video if it
is treated like a wideband radio channel. A single miniature transducer sends
an OFDM waveform on a 3.75 MHz carrier with 1.875 MHz of occupied bandwidth.
A 16-element array receives it, and the 16 channels are combined after
demodulation. All of the signal processing in that link is done offline:
video coding, LDPC, interleaving, QAM, OFDM, synchronisation, channel
estimation and maximum-ratio combining. The hardware only has to do two
things at exact rates:

* **Transmitter.** Play a stored complex baseband waveform (2.5 MS/s) out of
  a 14-bit DAC at 100 MHz, moved up to the 3.75 MHz carrier.
* **Receiver.** Take the 16 complex baseband streams from an ultrasound
  analog front end (AFE) and lower them to 2.5 MS/s. Then stream them to
  memory for up to 25 s, which is 62.5 M samples per channel, or 4.0 GB in all.

This repository holds synthesizable SystemVerilog for that programmable-logic
part, plus the testbenches that check it, including one that carries a real
OFDM waveform end to end.

```
 tx_clk (100 MHz)
 DMA stream ─► tx_duc ────────────────────────────────────────────► DAC word
 2.5 MS/s      FIR x2 ─► CIC x20 ─► NCO mixer (3.75 MHz)           14 bit / clock

 rx_clk (120 MHz)
 AFE bus ─► rx_decimator x16 ─► rx_capture ─► DMA stream (128 bit AXI4-Stream)
 7.5 MS/s   CIC /3, 2.5 MS/s    16-ch frame, length, overflow, tlast
```

| File | Contents |
|---|---|
| `rtl/uslink_pkg.sv` | `cplx16_t` (I in [31:16], Q in [15:0]) and the system constants: rates, channel count, carrier tuning word, 25 s record limit |
| `rtl/tx_duc.sv` | transmit digital up converter |
| `rtl/rx_decimator.sv` | one channel's decimator by 3 |
| `rtl/rx_capture.sv` | 16-channel frame packer and recording controller |
| `rtl/uslink_platform.sv` | top: the transmit path and the receive path, with two separate clock and reset domains |

## Rates and where they come from

| Quantity | Value | Used as |
|---|---|---|
| Baseband rate | 2.5 MS/s | DUC input and recorder output |
| DAC rate | 100 MHz | `tx_clk`; DUC interpolation 40 |
| Carrier | 3.75 MHz | NCO tuning word round(2^32 · 3.75/100) = 161061274 |
| DAC width | 14 bit | `dac_data` |
| ADC rate | 120 MHz | the AFE's sample clock |
| AFE output | 7.5 MS/s complex (120 MHz / 16) | **assumed**; hence decimation 3 in the FPGA |
| Channels | 16 | decimators, frame width 16 × 32 bit |
| Record length | 25 s = 62.5 M frames | `MAX_REC`; `rec_len` is 26 bits |

The original work names two figures for each converter. The text gives
125 MHz for both the DAC and the ADC, and the parameter table gives 100 MHz
and 120 MHz. The design uses the table values, since those are the rates the
link was run at. It never states the AFE's own decimation factor. Any split
whose product is 120 MHz / 2.5 MHz = 48 works; changing it means setting
`DECIM` on the top (the `RX_DECIM` package constant) and feeding the
matching AFE rate.

## Transmit up converter (`tx_duc`)

The hard part of the transmitter is the filtering, not the mixing. The OFDM
band fills 75 % of the 2.5 MHz baseband. So the interpolator must be flat to
±0.94 MHz and must remove the first image, which starts at 1.56 MHz. A plain
CIC interpolator by 40 does neither well. Its passband droops by several dB
at the band edge, and its first images, near 2.5 MHz, are only weakly
attenuated. A CIC-only version reached only about −20 dB EVM on the OFDM
waveform in simulation. The interpolation is therefore split in two:

1. **FIR ×2** (2.5 → 5 MS/s). This is a 64-tap Blackman-windowed sinc with a
   cut-off of 1.25 MHz. The coefficients are round(2^16 · h[n]), with
   h[n] = 2 · sin(πt/2)/(πt) · w[n] and t = n − 31.5. They are computed at
   elaboration. The filter runs as two 32-tap polyphase branches, one for
   each output phase. A branch uses one multiplier per I/Q rail and works
   through one tap per clock, so all four sums finish 33 clocks into each
   40-clock input period. The sums are rounded to 16 bits and saturated.
2. **CIC ×20** of 3 stages (5 MS/s → 100 MHz). The comb section runs at the
   two 5 MS/s slots of each period, at clocks 0 and 20. The integrators run
   every clock on the zero-stuffed comb output. The CIC gain of 20² = 400 is
   removed by a constant multiply, round(2^25/400), and a shift.
3. **NCO.** A 32-bit phase accumulator advances by the tuning word for each
   output sample. Its top 10 bits address 1024-entry cosine and sine tables
   of round(32767 · cos/sin), built at elaboration.
4. **Mixer.** The output is I·cos − Q·sin, rounded to 14 bits and
   saturated. A baseband magnitude of 32767 maps to the DAC's full scale of
   ±8191, so the stream's samples should keep some headroom.

**Interface and timing.**
* Input is an AXI4-Stream slave (`s_tdata` is a `cplx16_t`).
* While `en` is high, an input slot opens every 40 clocks. The first slot
  is in the clock that first sees `en` high. `s_tready` is high for that one
  clock.
* If the DMA has no sample ready (`s_tvalid` low in a slot), a zero sample
  is used and `underrun` pulses.
* `dac_valid` rises 46 clocks after `en` rises: 40 for the FIR period, and
  6 for the CIC and mixer pipeline. Output sample m uses carrier phase
  m · FTW.
* While `en` is low, every filter register, the NCO phase and the output are
  held at zero. So each playback starts from a clean state, and stopping
  cuts the filter tail.

## Receive decimator (`rx_decimator`)

Each channel holds a 3-stage CIC that decimates by 3. The integrators run on
every input sample, and the combs run on the last sample of each group of
three. The result is multiplied by round(2^19/27), giving unity DC gain, and
is then saturated to 16 bits. The impulse response is 1 3 6 7 6 3 1 over 27.
`out_valid` pulses one clock after the input that completes a group.
`sync`, which the top also applies on every recording start, restarts the
group phase so that all 16 channels decimate in step.

A short CIC is the simplest decimator that works, and it has two properties
a user must know:

* **Droop.** The gain at the band edge (0.94 MHz) is about −5.6 dB. An OFDM
  receiver removes this with its per-subcarrier channel estimate. A
  single-carrier user would need to equalise it.
* **Aliasing.** Content at 2.5 ± 0.94 MHz at the AFE output folds into the
  band with only the CIC's attenuation. The design relies on the AFE's
  decimation filter to have removed it already. A longer FIR here would
  relax that requirement.

## Recorder (`rx_capture`)

The 16 decimated samples of one sample period form a 512-bit frame. Channel
0 is in bits [31:0] and goes out first, as four 128-bit beats of an
AXI4-Stream master towards the memory DMA.

* **Start.** A `start` pulse while idle clears `done`, `overflow` and
  `frames`, and loads `rec_len`, clamped to 62.5 M. Recording begins with
  the next decimator output.
* **End.** `m_tlast` marks the last beat of the last frame. After it is
  accepted, `busy` falls and `done` stays high. `rec_len = 0` ends at once.
* **Backpressure.** The stream needs only 10 M beats/s against a 120 MHz
  clock, so backpressure is absorbed as long as the DMA stalls for less than
  one sample period (48 clocks). If a new frame arrives while the previous
  one is still waiting, the new frame is dropped, and the sticky `overflow`
  flag is set. `frames` counts the frames actually delivered.
* **Stream rule.** An assertion checks that `tdata` and `tlast` hold while
  `tvalid` is high and `tready` low.

## Top (`uslink_platform`)

The top wires the DUC to the transmit ports, 16 decimators to the AFE bus,
and the recorder to the receive DMA port. The two halves share no signal.
In the original system they sit on different boards, so each half has its
own clock and reset. Everything that is not programmable logic appears only
as ports:

* the processors and memories;
* the AXI DMA engines;
* the DAC;
* the AFE: amplifiers, ADCs and demodulators;
* the JESD204B receiver.

The AFE bus is modelled as one `afe_valid` strobe with one `cplx16_t` per
channel.

## Departures from the original system and open points

* **Converter rates.** The converters run at the parameter-table rates
  (100 MHz and 120 MHz), not the 125 MHz quoted in the text.
* **Decimation split.** The split of the receive decimation (16 in the AFE,
  3 in the FPGA) is assumed.
* **This design's own choices.** The original work does not describe these;
  they are choices of this design:
  * the filter structures and lengths;
  * the NCO table size;
  * the stream handshakes;
  * the 128-bit stream width;
  * the frame layout;
  * the length register;
  * the overflow policy;
  * the clear-on-disable behaviour.
* **Not included.** The video codec and the whole OFDM modem and receiver
  chain are software in the original system and are not included. The
  OFDM testbench below contains a small model of the modem, for checking
  only.

## Verification

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb/tb_tx_duc.sv` | The bench computes its own reference: the FIR (its own coefficient formula), the zero-stuffed CIC response and the table-phase mixer. Every DAC word of a random 64-sample stream must match within ±2 LSB. Also checked: one input per 40 clocks, the 46-clock latency, the underrun pulse and zero fill, and the idle output after `en` falls. |
| `tb/tb_rx_decimator.sv` | Output within ±1 LSB of the 1 3 6 7 6 3 1 / 27 reference; output timing; sync restart; full-scale DC gain; output count. |
| `tb/tb_rx_capture.sv` | A clean recording; random `tready` drops; a long stall that overflows; `rec_len = 0`; clamping to `MAX_REC`. |
| `tb/tb_uslink_platform.sv` | The whole platform at default sizes, through `tb/afe_model.sv` (see below). The bench plays six constant segments of 120 samples. It calibrates each channel's complex gain on the first segment, then requires later settled frames to be within 0.3 % of full scale (measured worst case: 1 LSB). It also checks the per-channel gains. It counts each mechanism: DUC slots, one underrun, DMA backpressure, two `tlast`s, and a second recording whose stall overflows. |
| `tb/tb_ofdm_link.sv` | The link waveform: 4096-point OFDM, 512-sample cyclic prefix, 3072 occupied subcarriers at 2.5 MS/s. It sends a BPSK block-pilot symbol, a 64-QAM symbol and a 256-QAM symbol through the full platform. The bench demodulates each recorded channel (FFT, least-squares channel estimate) and combines the 16 channels by maximum-ratio combining. It requires EVM below −30 dB and zero decision errors for each channel and combined, and checks the 400 ns sample period on both sides. Measured: about −64 dB (64-QAM) and −59 dB (256-QAM). |

`tb/afe_model.sv` is a behavioural stand-in for the AFE and is not
synthesizable. It does the following:
* rebuilds the DAC waveform by linear interpolation;
* mixes it with the 3.75 MHz carrier using simulation time;
* low-pass filters it with a 1201-tap windowed sinc (cut-off 1.3 MHz at
  120 MHz);
* decimates by 16;
* scales channel c by 1 − c/32.

The two end-to-end benches use `timeprecision 1fs`. With picosecond
precision, the 120 MHz half period (25/6 ns) would be rounded, and the
resulting 80 ppm clock error would show up as a sampling-frequency offset.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_ofdm_link \
  rtl/uslink_pkg.sv rtl/tx_duc.sv rtl/rx_decimator.sv rtl/rx_capture.sv \
  rtl/uslink_platform.sv tb/afe_model.sv tb/tb_ofdm_link.sv
./obj_dir/Vtb_ofdm_link
```

The unit benches need only the package and their module. Every bench runs
at the design's default parameters. The OFDM bench simulates 6 ms of link
time, which takes a few seconds.
