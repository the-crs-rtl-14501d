# CRS / rfmux KID readout signal path — SystemVerilog implementation

This is the digital signal path of a readout system for Microwave Kinetic
Inductance Detectors (KIDs). Each KID is a superconducting resonator. The
system probes each one with its own sinusoidal tone and measures the
complex (I,Q) response of every tone. One board carries four independent RF
chains, called I/O modules. Each module synthesizes and demodulates 1,024
tones over 625 MHz of complex bandwidth, so the board handles 4,096 channels.
The measured data leave in two ways:

- decimated to kHz rates, as packets written to memory (for 1 GbE / UDP);
- at full native or raw rate, through a 100G streaming output.

Top module: `crs_top` (in `rtl/crs_top.sv`). Shared types, constants and the
register map are in `rtl/crs_pkg.sv`.

## Block structure

```
                  per I/O module (io_module), x4
 RF-ADC 8x14b ─> adc_ddc ─> pfb_analysis ─> corner_turn_b2c ─┬─> lane 0..3:
 (5 GSPS)        NCO,/8     256-bin PFB      bins→channels    │   dds_demod ─> feedback_ctrl ─┬─> cic(/64) ─> cic(/16,/32,/64) ─> packetizer ─┐
                 625 MSPS   2.44 MSPS/bin    4 lanes x 256    │                              │                                            combiner ─> slow stream
                 complex                                      │                              ├─> channel_mux ─> fast_streamer ─> fast stream
                    └─────────── raw 625 MSPS ───────────────────────────────────────────────────────────────┘
 RF-DAC 8x14b <─ dac_duc <─ pfb_synthesis <─ corner_turn_c2b <──── dds_synth <─ (feedback output)
                 NCO,x8     256-bin IFFT+FIR  channels→bins

 crs_top: 4 x io_module; each slow/fast stream routed by its destination bit
          to dma_master (ring buffers in DDR) or packetizer_100g (100G MAC).
```

Helper modules with no block of their own: `fft_sdf` (radix-2 single-path
delay-feedback FFT/IFFT), `sincos_lut` (10-bit cos/sin table) and
`stream_fifo` (first-word-fall-through FIFO).

## Timing model

- `clk` stands for the 625 MHz fabric clock. Each module takes 8 ADC samples
  per clock (5 GSPS) and gives 8 DAC samples per clock.
- After the DDC there is one complex baseband sample per clock (625 MSPS).
- The analysis PFB has M = 256 bins, so one PFB frame takes 256 clocks
  (2.44 MHz frame rate, the native channel rate).
- Channels are processed in 4 lanes of 256 channel slots. A lane carries one
  channel sample per clock as a `lane_t` struct: valid, last, channel index,
  PFB bin, and I/Q. Channel number = {lane[1:0], slot[7:0]}.
- Any number of channels may sit in the same PFB bin. Each channel names its
  bin, and the corner turn copies that bin's value into the channel slot.
- Processing is gated by valid: the pipelines advance only on valid input.
  In operation the ADC valid is held high.
- Approximate latencies:
  - PFB: 265 clocks.
  - Corner turn: one frame.
  - Synthesis PFB: 265 clocks.
  - ADC to DAC: a few frames.

## Channel tuning

Each channel has a 40-bit frequency word F, in units of 625 MHz / 2^40
(about 0.57 mHz; the sub-mHz resolution is the published figure).

- The PFB bin is `(F + 2^31) >> 32`, the nearest bin.
- `F[31:0]` is the residual phase increment per frame. A per-channel 32-bit
  DDS uses it to take the tone to DC (`dds_demod`). The synthesis side
  (`dds_synth`) uses the same increment to place the output tone.
- Amplitude (16 bit) and phase (16 bit) set the synthesized tone.

## Feedback

`feedback_ctrl` is an integrating controller, one per channel slot:

- `acc += (gain · x) >>> 15`, with a complex gain and a saturating 32-bit
  accumulator.
- `out = clamp(acc, ±sat_lim) + offset`, with a complex offset.
- Modes:
  - `FB_OFF`: the accumulator holds and the tone is untouched.
  - `FB_IQ`: the complex output is added to the tone's complex amplitude.
    This covers amplitude and phase modulation.
  - `FB_FREQ`: the I output, shifted left by 8, is added to the tone's
    phase increment (frequency modulation).
- Bit 2 of the mode register clears the accumulator.

## Decimation and packets

Slow path, per lane:

- CIC1: order 3, /64, 24-bit output.
- CIC2: order 3, /16, /32 or /64, 32-bit output. It gives 2.384 kSPS,
  1.192 kSPS or 596 SPS per channel.
- The packetizer then sends one packet per CIC2 output frame:
  - a header word `{C125h, module, lane, 0, seq[31:0], timestamp[63:0]}`;
  - then 128 data words `{Q1, I1, Q0, I0}` of 32 bits each, two channels
    per word.
- A frame that arrives while the previous packet is still waiting is
  dropped and counted.

The four lanes' packets are merged by a round-robin `combiner`. The
combiner holds its grant from the first offered word until the last word is
accepted.

Fast path:

- `channel_mux` selects any set of channels (one bit per channel) at the
  native 2.44 MSPS. It merges them into one stream through per-lane FIFOs.
  Up to 256 selected channels per module fit on average. A full FIFO sets a
  sticky overflow flag.
- `fast_streamer` captures either the raw 625 MSPS DDC output (4 samples per
  128-bit word) or the selected channels (2 samples per word,
  `{0, chan10, Q24, I24}`).
  - Packets: a header `{FA57h, mode, module, 0, seq, 0}` and 64 data words.
  - A capture is a set number of packets, or continuous.
  - Each capture goes to the DMA master (discrete captures) or to 100G.
  - A packet is only started if its whole length fits in the FIFO.
    Otherwise it is skipped whole, and an overflow flag is set.

System level:

- `dma_master` writes each source's words into its own ring buffer. The
  ring size is 2^20 words of 16 bytes. The byte address is
  `((source << 20) + pointer) << 4`. Write pointers and packet counts are
  outputs for the processor.
- `packetizer_100g` puts a tag word `{100Ch, source, 0, frame_count, 0}`
  before each packet.

## Register map

The control bus is a 64-bit write bus:

- `cfg_addr[17:16]` selects the module.
- `cfg_addr[15:12]` is the region.
- `cfg_addr[11:0]` is `{lane, slot}` or a register number.

| region | name | fields |
|---|---|---|
| 0 | CH_FREQ | [39:0] frequency word |
| 1 | CH_AMPPH | [15:0] amplitude, [31:16] phase |
| 2 | FB_GAIN | [15:0] gain I, [31:16] gain Q (Q15) |
| 3 | FB_OFS | [23:0] offset I, [55:32] offset Q |
| 4 | FB_MODE | [1:0] mode, [2] clear accumulator |
| 5 | MUX_SEL | [0] channel goes to fast streamer |
| 8 | GLOBAL | 0 DDC NCO step, 1 DUC NCO step, 2 CIC2 log2 rate (4..6), 3 feedback saturation limit, 4 fast-streamer control ([1:0] mode, [2] to 100G, [3] continuous, [63:32] packets), 5 arm capture, 6 slow stream to 100G |

## What follows the published design, and what is this design's own

Taken from the published design:

- 4 modules × 1,024 channels over 625 MHz each.
- 2.44 MSPS native channel rate (256 bins at 625 MSPS).
- 14-bit converters at 5 GSPS.
- DDC and DUC with complex NCOs.
- Coupled analysis and synthesis PFBs.
- Per-channel frequency, amplitude and phase.
- CIC1 /64 and CIC2 /16, /32, /64. These give 2.384 / 1.192 / 0.596 kSPS.
- The block chain of the signal-path diagram: packetizer, combiner, mux,
  fast streamer, DMA master, 100G packetizer.
- The feedback structure: gain, accumulator, saturation, offset.
- Streaming of up to 512 native channels, or 4 raw NCO streams, over 100G.
- Discrete captures over 1 GbE.

This design's own choices (the published description does not give them):

- The PFB prototype: a Hann-windowed sinc, 4 taps per branch, Q17.
- The FFT architecture and its scaling.
- The DDC/DUC filters: a boxcar of 8 with rounding. The DDC output is half
  the input amplitude scale, to leave headroom.
- The lane organization and the 40-bit frequency word.
- All bit widths not listed above.
- The register map.
- All packet formats.
- The arbitration policies and the overflow policies.
- The ring-buffer addressing.

## Known differences and omissions

- **Wideband configuration.** One module with 4,096 channels over 2.5 GHz is
  not implemented. The published design lists it only as an alternative
  configuration.
- **Parts outside this RTL.** The RF converters, processor, DDR4 controller
  and memory, 1 GbE and 100 GbE MACs/PHYs, IRIG-B timestamp decoding, clock
  selection and the backplane are not implemented. They are vendor hard
  blocks, software, or not described; their signals are top-level ports.
  UDP/Ethernet framing of the slow packets is left to the processor side.
- **Feedback modes.** Feedback is limited to the two modes above. The
  published description allows general linear combinations of I and Q for
  amplitude, phase and frequency; such schemes would need new modes.
- **Filters.** The DDC and DUC filters are simple boxcars. The stop-band
  performance of the real decimation and interpolation stages is not
  reproduced.
- **Throughput.** One complex sample per clock is assumed throughout. A real
  RFSoC fabric clock would need several samples per clock for 625 MSPS.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench compares
the block's outputs with independently computed values, such as
floating-point models and queue-based scoreboards. Each has a watchdog and
ends with a `TB_RESULT checks=N failures=M` line.

`tb_crs_top` runs the full four-module top at its default size. It counts
each system mechanism and fails any that never occurred:

- DMA writes of slow packets, and DMA backpressure stalls.
- A fast capture to DMA, and a fast capture to 100G.
- Slow packets routed to 100G, and 100G stalls.
- Fast-streamer overflow and channel-mux overflow.
- A CIC2 rate switch.
- Feedback activity.

`tb_io_module` feeds a tone and checks three things:

- The tuned channel comes out at DC with a constant amplitude.
- A channel detuned by a quarter bin rotates by a quarter turn per frame.
- An unrelated channel stays quiet, on both the fast and the slow path.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/crs_pkg.sv tb/tb_crs_top.sv --top tb_crs_top
obj_dir/Vtb_crs_top +verilator+rand+reset+2
```
