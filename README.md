# LEDA F-engine: the FPGA channelizer of a 512-input FX correlator

The LEDA correlator at the Owens Valley LWA station cross-correlates 512 antenna
signals (256 dual-polarization dipoles) over 57.552 MHz of bandwidth. It is an FX
correlator: first every signal is turned into a spectrum on its own (the F stage,
work linear in the number of inputs, done in FPGAs), then for every frequency channel
every pair of inputs is multiplied and averaged (the X stage, work quadratic in the
number of inputs, done in GPUs). Between the two, the data must be transposed from
"all channels of a few inputs" to "a few channels of all inputs". The design avoids
any dedicated hardware for that transpose: each F-engine cuts its output into packets
of 109 channels and addresses packet *p* to X-engine *p*, so an ordinary Ethernet
switch performs the transpose.

This repository holds synthesizable SystemVerilog for one F-engine, the firmware of
one ROACH2 FPGA board. Sixteen of them serve the 512 inputs. One F-engine takes 32
ADC streams of 8 bits at 196.608 MS/s, and puts out two 10GbE payload streams of about
7.4 Gbit/s each.

```
 adc_data[32] ──► adc_delay ──► pfb_fir ──► fft_sdf ──► requant ──┐   (one chain per input,
 (8 bit, 1 per clk)  per-chip     4 taps     8192 pt    gain, 4+4  │    32 chains in lock step)
                     alignment    x 8192     18+18 bit  bit        ▼
 pps, arm, stop ──► sync_ctrl (frame timing)             chan_buffer: channels 1250..3647,
                                                          2 banks x 2 spectra
                                                                   │
                                                          packetizer ─► pkt_lane 0 ─► tx[0] (even packets)
                                                                    └─► pkt_lane 1 ─► tx[1] (odd packets)
```

## Numbers at a glance

| Quantity | Value | Where it comes from |
|---|---|---|
| Inputs per F-engine | 32 (two 16-input ADC boards) | paper |
| Sample rate, fabric clock | 196.608 MHz, one sample per input per clock | paper |
| PFB | 4 taps, 8192 points, Hamming-windowed sinc, 18-bit coefficients | paper |
| Channels | 4096 of 24.0 kHz (98.304 MHz / 4096) | paper |
| FFT data / twiddles | 18+18 bit, divide by 2 at each of 13 stages | paper |
| Requantization | 18+18 → 4+4 bit after one band-wide gain | paper |
| Selected channels | 2398 from a run-time start, 1250 in normal use (30.0–87.5 MHz) | paper |
| Packet | 16-byte header + 6976 data bytes = 109 channels | paper |
| Spectra per packet | 2 (109 ch x 32 inputs x 2 spectra x 1 byte = 6976 B) | this design's reading |
| Packets per group | 22, packet *p* to X-engine *p* | paper (22 X-engines) |
| Lanes | 2, packets sent alternately | paper |
| Lane rate | 7.38 Gbit/s (paper: 7.37) | derived below |

## Timing and start-up

All ADCs share one clock, so sampling and processing are synchronous across every
board. What aligns the boards in time is a GPS-locked 1 PPS pulse. `sync_ctrl` waits
for a software `arm` pulse. The next rising PPS edge, after a two-flop synchronizer,
starts the engine, three clocks after the edge. From then on `running` is high, every
clock carries one sample per input, and `frame_sop` marks sample 0 of each 8192-sample
frame. All time tags downstream count spectra from this start. So the asynchronous
network and GPU layers still agree on time. An `arm` while running re-aligns the
frames at the next PPS, and `stop` halts the engine.

The ADC chips on a board can be one sample apart after power-up, and boards can be
offset from each other, so the delays have to be calibrated. `adc_delay` gives every
ADC chip (4 inputs, as the chips are quad-channel parts) its own delay of 0–7 clocks,
set by the register `adc_dly`.

## The polyphase filterbank

This is the part that matters most for the science, and it is the hardest part to
follow. A plain FFT of 8192 samples has sidelobes only 13 dB down, so a strong FM or
HF transmitter would leak into many channels. A polyphase filterbank puts a 4-frame
FIR in front of the FFT. It shapes each channel's response much closer to a rectangle:
isolation of adjacent channels exceeds 70 dB.

**FIR (`pfb_fir`).** The prototype low-pass filter has 4 x 8192 coefficients:

    h[n] = sinc((n - 16384) / 8192) * (0.54 - 0.46 cos(2 pi n / 32767)),  n = 0..32767

It is quantized to 18 bits with 1.0 mapped to 2^17 - 1. The coefficients are computed
when the ROM is initialized, so no table file is needed. For frame *m* and point *k*:

    y_m[k] = sum_{t=0..3} h[t*8192 + k] * x[(m-3+t)*8192 + k]

The oldest of the four frames meets tap 0. Three delay lines of 8192 samples (block
RAM on an FPGA), addressed by *k*, hold the earlier frames. The sum is rounded and
shifted right by 8, so an 8-bit input leaves with 9 fraction bits in 18 bits. No output
appears until four frames have entered. Latency is two clocks.

**FFT (`fft_sdf`, `fft_stage`).** A streaming radix-2 decimation-in-frequency
pipeline with a single delay-feedback path. It has 13 stages with delay lines of 4096,
2048, ..., 1. Each stage first fills its delay line with half a block. It then emits
the sum a+b, and writes back the twiddled difference (a-b)·W, which leaves during the
next half-block. Twiddles are 18-bit and also computed at initialization. Bit *s* of
the run-time register `fft_shift` halves the outputs of stage *s*. With all 13 bits
set, the normal setting, the transform is the DFT divided by 8192 and cannot overflow.
If a bit is cleared, the butterflies saturate and `ovf` reports it.

The pipeline delivers bins in bit-reversed order. Rather than reorder them,
`fft_sdf` puts out the natural bin number `out_bin` with each sample, and the channel
buffer writes by that number. Latency is 8192 - 1 + 13 clocks.

The FIR output is real. This design feeds it to a complex 8192-point FFT with a zero
imaginary part and keeps bins 0–4095. That is simple, but it spends twice the FFT
hardware a real-input FFT would need. See *Departures* below.

## Gain and 4-bit requantization

Four bits per component cut the data rate by 4.5x, and for a noise-like sky signal
they add little quantization noise. `requant` multiplies both components by one
16-bit gain, the same for every channel (`gain`/2^16). It then rounds to nearest, with
ties away from zero, and clips to -7..+7. The byte is `{re[3:0], im[3:0]}`. One gain
for the whole band is enough because the analog response only rolls off at the band
edges. The `clip_cnt` counter tells software when the gain is set too high.

## Channel window and buffering (`chan_buffer`)

Only 2398 of the 4096 channels are sent. Everything below 30 MHz and above 88 MHz is
corrupted by broadcast interference, and the cut halves the network and X-stage load.
The window starts at the run-time register `chan_start` (1250 for 30–88 MHz), so any
57.552 MHz of the band can be chosen without rebuilding.

All 32 chains run in lock step, so each clock delivers one bin for all 32 inputs. If
the bin lies in the window, its 32 bytes go to one 256-bit row of a two-bank buffer.
The row address is:

    row = (bank*2 + t)*2398 + (bin - chan_start)        t = spectrum 0 or 1 of the group

When two spectra are complete, the bank is marked full and tagged with the number of
its first spectrum. The writer then moves to the other bank. The packetizer returns a
bank when it has sent it. If the writer must start a group on a bank that is still
full, that whole group of two spectra is dropped. `drop_cnt` counts the drop, and the
receivers see a gap in the time tags. This happens only if the network holds the lanes
off for more than about one group time (16384 clocks).

## Packets and lanes (`packetizer`, `pkt_lane`)

A bank is cut into 22 packets of 109 channels. Each packet is a stream of 64-bit
words:

| Word | Contents |
|---|---|
| 0 | spectrum number of the packet's first spectrum, counted from the PPS start |
| 1 | `[63:48]` F-engine id, `[47:32]` packet index *p* (= X-engine), `[31:16]` first channel number, `[15:0]` channels in the packet (109) |
| 2 … 873 | for each of the 109 channels, for each of the 2 spectra, 4 words of 8 inputs; input 8w+j in byte j of word w, `{re,im}` nibbles |

That is 16 header bytes and 872 x 8 = 6976 payload bytes. The 10GbE core outside this
RTL adds the UDP/IP/Ethernet framing.

Why two lanes? A group of two spectra lasts 2 x 8192 = 16384 clocks and makes 22 x 874
= 19228 words, more than one word per clock. Lane 0 therefore sends the even packets
and lane 1 the odd ones, in parallel. Each lane is busy 9614 of the 16384 clocks (59%):
9614 x 64 bit x 196.608 MHz / 16384 = 7.38 Gbit/s per lane, comfortably under 10GbE.
Each lane is a valid/ready stream with `sop`/`eop`. When the MAC drops `tx_ready`, the
lane holds its word. An assertion in `pkt_lane` checks this.

## Interface of the top (`leda_fengine`)

| Port | Dir | Meaning |
|---|---|---|
| `adc_data[32][8]` | in | one sample per input per clock |
| `adc_dly[8][3]` | in | delay per ADC chip (inputs 4c..4c+3) |
| `pps`, `arm`, `stop` | in | start on PPS after arm; stop |
| `feng_id[16]`, `chan_start[13]`, `fft_shift[13]`, `gain[16]` | in | run-time registers |
| `tx_valid/tx_data/tx_sop/tx_eop[2]`, `tx_ready[2]` | out/in | two 64-bit streams to the 10GbE MACs |
| `armed`, `running`, `frame_cnt`, `pps_cnt`, `pkt_busy` | out | status |
| `drop_cnt`, `clip_cnt`, `fft_ovf_cnt` | out | dropped groups, clipped samples, FFT saturations |

From an ADC sample to its spectrum in the buffer, latency is 1 + `adc_dly` clocks, then
three frames of FIR fill, then 2 + 8204 + 1 clocks. The first header word leaves about
two clocks after a bank becomes full.

The shared package `leda_pkg` holds the sizes, the 4-bit sample type `q4_t`, the second
header word `hdr1_t`, bit reversal and the prototype-filter formula.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Each builds with plain Verilator,
for example:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/leda_pkg.sv rtl/*.sv \
          tb/tb_leda_fengine.sv --top-module tb_leda_fengine -Mdir obj -o sim
./obj/sim
```

| Testbench | Size | What it checks |
|---|---|---|
| `tb_sync_ctrl` | 16-point frames | PPS ignored until armed, 3-clock start latency, frame period and count, re-arm, stop |
| `tb_adc_delay` | 8 inputs | every output equals its input from 1 + delay clocks earlier, for changing delays |
| `tb_pfb_fir` | 16 points, 4 taps | every output exactly against an independently coded FIR; fill time; 2-clock latency |
| `tb_fft_sdf` | 64 points | every bin against a floating-point DFT/N (max error 2 LSB), bin numbering, latency N-1+log2 N, saturation flag |
| `tb_requant` | full | 3000 random samples and gains, rounding ties, clip flag, latency |
| `tb_chan_buffer` | 8 inputs, 32 points, 6 channels | window contents, bank full and time tags, dropped group, moved window |
| `tb_packetizer` | 16 inputs, 4 packets | every header and payload word, lane parity, one word per clock, random stalls |
| `tb_leda_fengine` | **full size, default parameters** | end to end, below |

The end-to-end test runs the full-size F-engine (32 inputs, 8192 points, 2398
channels) for about 305,000 clocks. That takes about 20 s with Verilator. Each input
carries a tone centred on its own channel, with its own amplitude and phase. Each ADC
chip gets a different alignment delay. The testbench computes, independently of the
RTL, what the filterbank, gain and requantizer must produce at each tone channel and
two channels either side; every other channel must be 0. It then compares every
payload byte of 264 packets, within one LSB, together with every header. It drives
and counts each mechanism:

- a PPS before arming
- the PPS start
- the FIR fill
- requantizer clipping (one strong tone)
- the channel window (one tone below channel 1250 never appears)
- both lanes
- random stalls
- a long stall that overflows the buffer; the dropped groups must match the gaps in the time tags
- FFT saturation with the shifts turned off
- stop

It also checks the rate: one group every 16384 clocks and 9614 words per lane per
group.

## Departures from the paper and choices it leaves open

The paper describes the F-engine at the level of the list of stages and their sizes.
Everything below is this design's own choice:

- **Real FFT.** The FFT is a complex 8192-point FFT fed with zero imaginary part. An
  FPGA implementation would use a real-input FFT of half the size and cost. The
  results are the same up to rounding.
- **Coefficient ROMs.** Every input has its own copy of the FIR coefficient ROM and of
  the twiddle ROMs. This fits the paper's remark that coefficient storage takes most
  of the FPGA's block RAM. All inputs run in lock step, though, so a single shared
  ROM would work and would save most of that memory.
- **Filter details.** The exact window and sinc width, the tap order, the FIR output
  scaling (shift 8) and all rounding modes.
- **Spectra per packet.** The paper gives 6976 data bytes for 109 channels. With 32
  one-byte inputs that means 2 spectra per packet, which this design adopts. The
  paper's own wording ("eight, 8-bit samples for 109 channels") does not settle how
  the 64 bytes per channel are split.
- **Headers and payload.** The header layout and the payload order are not given
  beyond "a 128-bit header specifying the order sequence".
- **Buffering.** The two-bank buffer, dropping whole groups on overflow, and the
  valid/ready lane interface are this design's own. The buffer's read ports are
  combinational, which suits distributed RAM. A block-RAM version needs one more
  pipeline register in `pkt_lane`.
- **Gain format.** The gain is 16 bits, divided by 2^16, with a symmetric clip level
  of ±7.
- **Alignment delay.** `adc_delay` is placed in the FPGA as a per-chip delay line with
  a range of 0–7. The paper only says that a manual delay calibration among chips and
  boards is needed.

The following are not part of this RTL:

- the ADC boards, the clock synthesizer and the PPS distribution
- the 10GbE MAC/PHY, the switch, the servers and the GPU cross-correlation software
- the CPU software for capture and 4→8 bit unpacking
- the 1-second total-power mode of the GPU layer

Interfaces stop at the sample input, the PPS input and the two payload streams.

## Lint notes

Verilator reports unused bits for the valid/sop/bin copies of inputs 1–31, which
exist only because every chain is complete. It also reports `rst_n` being used both by
the asynchronous resets and by the `disable iff` of the assertions. Neither is a
circuit problem.
