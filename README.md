# A 16-antenna F/B-engine for a radio-burst array

This is the first stage of the digital back end of a large dipole-antenna array
used to hunt fast radio bursts. The array is split into rows of 16 antennas.
Each row has one RFSoC board, which digitises its 16 antennas at 1.6 GS/s and
turns them into a spectrum. The board then forms 16 beams by weighting and
summing the antennas channel by channel. It sends the beams over a single 100 Gb
Ethernet link to servers, which finish the beamforming and search for pulses.

The board's main idea is to throw away as much data as it can, as early as it
can:

* Only the upper half of the sampled band (400–800 MHz) is kept.
* The 16 antennas are collapsed into 16 beams, using one combined complex weight
  per beam, antenna and channel. That weight also does the bandpass flattening,
  so no separate equaliser is needed.
* Each beam sample is cut to 4+4 bits.

The result is 16 beams × 1024 channels × 1 byte every 2.56 µs, which is
51.2 Gb/s. That fits on one 100G cable. The data is reordered so that each of
the 8 server nodes gets one 128-channel subband, in UDP payloads of 8256 bytes.

The RTL here covers everything between the ADC sample bus and the 100G
Ethernet core's stream input:

```
16 x ADC (4 x 14-bit samples / clock)
  -> pfb_fir      4-tap polyphase FIR              per antenna, 4 samples/clk
  -> fft_real4    4096-point real FFT, keeps channels 1024..2047
                                                    per antenna, 1 channel/clk
  -> beamformer   16x16 complex matrix per channel, 8-bit weights -> 16 beams
  -> requant      truncate each beam to 4-bit re + 4-bit im
  -> corner_turn  collect 4 spectra, reorder into 8 subbands
  -> packetizer   64-byte header + 8192-byte payload, 512-bit stream, tdest = subband
sync_ctrl: RESET command + 1PPS -> ARMED -> TRIGGERED, frame counter, reset time
```

Everything runs on one 400 MHz clock, and nothing in the data path stalls. The
ADCs, the clock PLL, the 100G MAC and the control computer are outside the
design. Their signals are ports of `fengine_top`.

## Clock, rates and frames

At 1.6 GS/s and 400 MHz, each antenna delivers 4 samples per clock, on
`adc_data[ant][lane]`, where lane r carries x[4m+r].

* A 4096-point real transform spans 1024 clocks. Its bins 1024..2047 are
  400–800 MHz in 390.625 kHz steps.
* The FFT emits those 1024 channels at one per clock, so a spectral frame
  leaves every 1024 clocks. From there on, the whole chain handles one channel
  per clock.
* Four frames (4096 clocks) become 8 packets × 129 beats of 64 bytes: one
  header beat and 128 data beats. That is 1032 of the 4096 available beats on
  the 512-bit output bus.
* The corner turn can therefore tolerate a fairly slow consumer. If a whole
  group of four frames is complete while the previous group is still being
  read, the new group is dropped rather than corrupted, and `ct_overflow`
  pulses.

## The polyphase filter bank (`pfb_fir`)

The FIR is the usual PFB front end: TAPS (4) taps, each one whole 4096-sample
frame apart. The prototype is a Hamming-windowed sinc, 16384 points long,
computed at elaboration in Q1.17.

Because 4096 is a multiple of the 4 lanes, each lane is an independent 4-tap
FIR. The delay line of each lane is a 1024-deep memory per tap, addressed by
the position in the frame.

* The sum is shifted so that a full-scale 14-bit input fills the top of the
  18-bit word. The result then saturates.
* After a restart, taps whose history has not yet been written count as zero.
  This means no memory needs clearing.
* Latency is one clock.

## The four-lane real FFT (`fft_real4`, `fft_r2sdf`, `fft_sdf_stage`)

This is the hardest part to follow.

A streaming FFT usually takes one sample per clock. Here there are four
samples per clock, and only a quarter of the 4096 bins is wanted, at one bin
per clock. The design splits the input by lane, writing x_r[m] = x[4m+r], and
uses the decimation-in-time identity:

```
X[k] = sum_{r=0..3} W4096^(r k) * Y_r[k mod 1024],      Y_r = FFT1024(x_r)
```

For the kept bins k = 1024 + c (c = 0..1023), this becomes

```
X[1024 + c] = sum_r W4096^(r (1024 + c)) * Y_r[c]
```

* Each lane runs its own 1024-point radix-2 single-path delay-feedback (SDF)
  FFT. The lanes are complex FFTs with a zero imaginary part.
* All four lanes run in lock step, so their outputs appear together, in
  bit-reversed order.
* A combine stage then needs one complex multiply per lane per clock. Its
  twiddle table has 4096 entries, computed at elaboration.
* The output is channel c = bitrev10(t) at time t of the frame, tagged on
  `out_ch`.
* Nothing downstream needs natural order. The beamformer looks weights up by
  `out_ch`, and the corner turn writes by channel number, so the
  bit-reversal is undone there for free.

Each SDF stage of N points holds a delay of N/2^(s+1) words. In its first half
period it parks the incoming samples. In the second half it outputs the
butterfly sum and parks the difference. The parked difference then leaves,
multiplied by its twiddle, during the next first half.

Scaling follows the CASPER style:

* Each of the 10 lane stages can halve its output (`fft_shift[9:0]`).
* `fft_shift[10]` divides the four-term combine by 4.
* Every stage saturates to 18 bits, and `fft_ovf` reports it.
* Twiddles are Q2.16, rounded to nearest. Products are truncated toward minus
  infinity.

With the default shift everywhere, the output is X[k]/4096. That is safe for
any input.

This structure is specific to this design. The source only says that an 18-bit
CASPER real FFT with 2048 channels is used, of which 1024 are output. The
combine picks the second quarter of the bins, so it gives the upper half band
only for four lanes. Tuning the band (for example 300–700 MHz) is not
supported.

## Beamforming (`beamformer`)

For each channel, the 16 antenna spectra form a vector a. Each beam is
b_j = Σ_i w[j][i][ch] · a_i, with signed 8-bit real and 8-bit imaginary
weights.

* The weights sit in 256 memories of 1024 words, one per (beam, antenna)
  pair, addressed by channel. That is 16 bits × 1024 × 256 = 4 Mbit.
* They are loaded through a plain synchronous write port (`w_we`, `w_beam`,
  `w_ant`, `w_ch`, `w_re`, `w_im`).
* The weights are meant to fold together several things: the steering phase,
  the instrument delay, the bandpass equalisation, and optionally a
  spatial-filter RFI projection. There is no separate RFI or equaliser
  hardware.
* The output keeps full precision: 18 + 8 + 1 + 4 = 31 bits per part.
* There are two pipeline registers: a weight read, then the multiply-add.

## Requantisation (`requant`)

Each beam value is shifted right arithmetically by `rq_shift`, which is a
truncation toward minus infinity. It is then clipped to −7..+7, so the 4-bit
range stays symmetric.

* The output byte is `{re[3:0], im[3:0]}`.
* `rq_clip` pulses when either part clipped.
* Because truncation is this coarse, the weights must also equalise the
  bandpass. Otherwise strong channels would clip and weak ones would vanish.

## Corner turn and packet format

The corner turn has a double buffer that holds 4 frames × 1024 channels ×
16 bytes per half. On the read side, a group of four frames leaves in this
order:

```
for subband sb in 0..7:            -> one packet, tdest = sb
  for frame f in 0..3:
    for channel c in 128*sb .. 128*sb+127, four per 64-byte beat:
      for beam b in 0..15: byte {re,im}
```

Within a beat, byte 16·l + b is channel (first + l), beam b.

The packetizer puts one 64-byte header beat in front of every 128-beat block.
All fields are little-endian:

| bytes  | field |
|--------|-------|
| 0–7    | frame counter of the first frame in the packet (frames since the last RESET) |
| 8–15   | RESET time, as supplied with the RESET command |
| 16–17  | first channel of the subband (0..1023, 0 = 400 MHz) |
| 18–19  | channels in the packet (128) |
| 20     | frames in the packet (4) |
| 21     | board id |
| 22     | beams (16) |
| 23     | subband |
| 24–63  | zero |

Only the sizes are fixed by the original design: 8256-byte payloads, a 64-byte
header holding timestamps and frequency information, and 8192 bytes of data.
The field layout and the data order are choices made here. The Ethernet, IP
and UDP headers are left to the 100G core. `sop` marks the header beat and
`tlast` the final beat.

## Synchronisation (`sync_ctrl`)

All boards must start their frame counters on the same 1PPS edge, so that the
servers can line up their packets. The controller does this in three steps:

* From power-up, it stays idle until a RESET command arrives.
* On `reset_cmd`, it latches `reset_time_in`. At
  the next PPS rising edge it halts processing and goes to ARMED. PPS is
  synchronised with two flip-flops before its edge is detected.
* At the following edge it goes to TRIGGERED, and the data path runs with the
  frame counter starting from zero.

Whenever the board is not running, the whole data path is held cleared and ADC
samples are ignored. A RESET issued while the board is already running keeps
it running until the next PPS, as the source describes: the halt happens "when
the next 1PPS arrives".

The frame counter advances every 1024 clocks while the board runs. Each packet
header carries the number of its first frame.

## Where this departs from, or goes beyond, the original

These parts are taken as given:

* 16 inputs, 14 bits, 4 samples per clock at 400 MHz.
* 2048 channels with the upper 1024 kept, and an 18-bit FFT.
* 8-bit complex weights in 256 memories of 1K.
* 4+4-bit truncation.
* 8 subbands of 128 channels, with 4 frames per packet.
* 64 + 8192-byte payloads.
* A frame every 1024 clocks.
* The RESET / ARMED / TRIGGERED sequence.
* 51.2 Gb/s.

These parts are this design's own choices:

* PFB taps (4), window (Hamming sinc), and every scaling and rounding rule.
* The lane-split SDF FFT structure and its bit-reversed output order.
* Symmetric ±7 clipping.
* The corner-turn order, the header layout and the 512-bit bus.
* The drop-a-group overflow policy.
* The weight write port.
* The power-up state and the PPS edge detection.

The source places the corner turn both "after the FFT" (in the text) and after
the requantisers (in its block diagram). Here it follows the block diagram.
Reordering 1-byte beam samples is also the cheapest option.

There is no model of the ADCs, the 10 MHz PLL, the 100G core, the control
register interface or the monitor. The corner-turn buffer is read
combinationally. A synthesised build would want an output register there.

## Simulating

Compile the package first, then the rest of `rtl/`, then one testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/fengine_pkg.sv rtl/fft_sdf_stage.sv rtl/fft_r2sdf.sv rtl/fft_real4.sv \
  rtl/pfb_fir.sv rtl/beamformer.sv rtl/requant.sv rtl/corner_turn.sv \
  rtl/packetizer.sv rtl/sync_ctrl.sv rtl/fengine_top.sv \
  tb/fengine_top_tb.sv --top-module fengine_top_tb -Mdir obj -o sim
./obj/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops on a watchdog
if something hangs. The block testbenches compute their expected values independently, with a
direct DFT in `real` arithmetic or bit-exact integer reference models. The two
whole-board testbenches use a known scene instead: a tone on one antenna and a
simple weight matrix, so that the expected beams are known in advance.

| testbench | what it checks |
|-----------|----------------|
| `pfb_fir_tb` | every output against a direct 4-tap convolution with the same coefficient formula; saturation; start-up masking |
| `fft_real4_tb` | full 4096-point frames against a direct DFT (within 12 LSB); one channel per clock; frame period 1024 clocks; saturation flag |
| `beamformer_tb` | 16×16 complex products for random weights and data, bit-exact; latency |
| `requant_tb` | shift, truncation and ±7 clipping, bit-exact; clip flag |
| `corner_turn_tb` | every byte position of several groups; consumer stalls; a dropped group and its overflow pulse |
| `packetizer_tb` | header fields, beat count, `tlast`/`sop`/`tdest`, back-pressure |
| `sync_ctrl_tb` | IDLE → RESET → ARMED → TRIGGERED on the right PPS edges; frame counter; reset time |
| `fengine_top_tb` | whole chain at 256 points, everything else full size: a tone on antenna 3, beam 3 = antenna 3 and beam 5 = its negative, all other beams exactly zero; every header field, packet length and subband order; group period; two RESET/ARM/TRIGGER cycles, a restart while running, FFT saturation, requantiser clipping, back-pressure and a corner-turn overflow, each counted |
| `fengine_full_tb` | the same scene with every parameter at its default (4096 points, 16 antennas, 16 beams): two groups of 8 packets checked end to end (about 15 s of run time) |
