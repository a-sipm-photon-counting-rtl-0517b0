# SiPM photon-counting readout: FPGA capture logic

This is synthesizable SystemVerilog for the digital part of a 16-channel
silicon-photomultiplier (SiPM) readout built for "ultra-fast astronomy",
i.e. looking for optical transients on time scales from milliseconds down to
tens of nanoseconds. The analog side is the original system's own: each SiPM pulse
is amplified (up to 50 dB), integrated by a "leaky" op-amp shaper (~600 ns
decay, so no reset and no dead time), and digitised without pause by a
16-channel 14-bit ADC at 62.5 Msps. Every sample is kept, rather than only
triggered peaks. Photon counts and arrival times (±16 ns) are recovered
offline from the pulse heights in the stored waveform.

The logic here sits in the programmable fabric of an ARM + FPGA system-on-chip
between the ADC and processor memory. It has three jobs:

1. **Receive** the ADC's serial LVDS lanes. Each channel has its own lane
   carrying one 16-bit word per sample: 16 bits × 62.5 MHz = 1 Gbit/s. A
   frame lane marks the words. The receiver turns the lanes back into
   parallel words on the correct word boundary.
2. **Pack** the words of the chosen channels into 64-bit stream beats and
   buffer them in a FIFO.
3. **Write** the stream into processor memory with AXI4 bursts, one
   single-pass transfer of at most 512 kB per start.

The processor also configures the ADC over SPI. Software drives this by
toggling GPIO lines; in the fabric it is only a pin assignment.

```
 adc_din[15:0] ─┐   ┌──────────────┐ words  ┌──────────────┐ 64-bit  ┌──────────────┐ AXI4 write
 adc_fclk ──────┴──▶│ adc_lvds_rx  │───────▶│ dma_gearbox  │ stream ▶│ axi_dma_s2mm │──────────▶ memory
                    │ deser+align  │16×16b  │ pack + FIFO  │         │ ≤512 kB/pass │
                    └──────────────┘        └──────────────┘         └──────────────┘
 gpio_o[3:0] ──────────────────────────────▶ adc_spi_sclk / sdata / sen / reset
 gpio_i[0]   ◀────────────────────────────── adc_spi_sdout
```

## Clock and timing model

The whole design runs on a single clock, `clk`, at the LVDS **bit** rate. One
clock is one serial bit (1 ns at 1 Gbit/s), and one sample period is 16
clocks (16 ns). This is a simplification. A real implementation samples the
lanes with the FPGA's SERDES primitives on a DDR bit clock, then moves the
words into a slower AXI clock domain through an asynchronous FIFO. Neither
of those is modelled here. Functionally, each block has the behaviour it
would have in that structure. Keep this in mind if you target hardware: the
receiver's shift registers would become SERDES primitives, and `sync_fifo`
would become a dual-clock FIFO.

Rates the design must sustain, at 8 bytes per beat:

| capture | data rate | beats per clock needed | time to fill 512 kB |
|---|---|---|---|
| 1 channel | 125 MB/s | 1/64 | 262144 samples × 16 ns = 4.194 ms |
| 16 channels | 2 GB/s | 1/4 | 16384 sample periods × 16 ns = 0.262 ms |

The DMA engine moves a 16-beat burst in about 20 clocks (burst sizing,
address, 16 data beats, response), roughly 0.8 beats per clock, so it keeps up with all 16 channels
with room to spare. The FIFO exists only to absorb memory-side stalls.

## Word alignment (`adc_lvds_rx`)

This is the least obvious part of the design. After power-up nothing tells the receiver where a 16-bit
word starts in a lane's bit stream. The ADC sends a frame lane, clocked like
the data lanes, whose word is a fixed pattern. Here the pattern is `16'hFF00`:
high for the first half of each word and low for the second, sent MSB first.

Every lane shifts its bits into a 16-bit register. A 5-bit counter marks a
word boundary every 16 clocks, and at each boundary the receiver does two
things:

* It latches all lanes' registers as the new `words`.
* It compares the frame lane's register with the pattern.
  - **Mismatch, not yet aligned:** it *bit-slips*. The counter is loaded with
    all ones instead of zero, so it wraps one clock later and the next word
    is 17 bits long. Every lane's boundary moves by one bit. At most 15 slips
    bring the boundary into place.
  - **Match:** it counts. After `LOCK_WORDS` (4) matches in a row, `aligned`
    rises, and from then on `word_valid` pulses once per sample period.
  - **Mismatch while aligned:** for example, a glitch on the link. It drops
    `aligned`, increments `lock_losses`, and starts slipping again. No words
    are issued until it locks again.

All lanes share one boundary, so the design assumes the board routes them
with matched delays. Per-lane deskew is not provided.

## Capture (`dma_gearbox` and `axi_dma_s2mm`)

A capture starts with a one-clock pulse on `cap_start`, with `cap_addr`,
`cap_len_bytes` and `cap_ch_mask` set:

* The DMA engine cuts the length to 512 kB, rounds it down to whole 8-byte
  beats, and shows the beat count on `xfer_beats`. It then starts issuing
  bursts.
* The gearbox receives the same pulse and beat count. It empties its FIFO
  and waits for the first sample period in which the receiver is aligned.

**Packing.** On each `word_valid` the gearbox copies all 16 words into a
holding register. Over the next 16 clocks it walks the channels, one per
clock, and takes the words of the channels enabled in the mask. Taken words
fill a 64-bit beat from the low end: four 16-bit words per beat, the lowest
channel first, sample after sample. A beat may contain words from two
consecutive samples. The memory image is therefore a plain little-endian
array of 16-bit words, ordered

    s0:ch_a, s0:ch_b, …, s1:ch_a, s1:ch_b, …

where `ch_a < ch_b < …` are the enabled channels. With one channel enabled,
the array is that channel's waveform: 262144 samples, or 4.194 ms, per
512 kB. The walk of one channel per clock must finish within a sample
period, so `N_CH ≤ WORD_W`.

**Overflow.** If the FIFO is full when a beat is complete, that beat is
dropped, `cap_dropped_beats` counts it, and `cap_overflow` stays set until
the next start. The gearbox still counts only beats that were stored, so the
DMA transfer still completes. The buffer then holds a gap, which the flag
reports. When the capture ends, `tlast` is set on the final beat (the DMA
does not need it).

**Writing.** The DMA engine issues INCR bursts of up to 16 beats, one at a
time, and never lets a burst cross a 4 kB boundary. During the data phase,
`wvalid` follows the stream's `tvalid` and the stream's `tready` follows
`wready`. Any response other than OKAY sets `cap_error`. `cap_done` rises
after the last response and stays set until the next start.

## Stored word format

The receiver passes each 16-bit word through unchanged. A 14-bit ADC
serialised as 16 bits carries two padding bits. The testbenches' ADC model
puts the code in bits 15:2 with zeros in bits 1:0. Check the real ADC's
serialisation settings before interpreting the stored words.

## Files

| file | contents |
|---|---|
| `rtl/ufa_pkg.sv` | shared constants: channel count, word width, 512 kB limit, bus widths, frame pattern |
| `rtl/adc_lvds_rx.sv` | deserialiser and bit-slip word aligner |
| `rtl/sync_fifo.sv` | single-clock FIFO with first-word fall-through (used by the gearbox) |
| `rtl/dma_gearbox.sv` | channel-mask packer, 16-bit words into 64-bit beats, FIFO, overflow accounting |
| `rtl/axi_dma_s2mm.sv` | stream-to-memory AXI4 write engine with the 512 kB single-pass limit |
| `rtl/ufa_readout_top.sv` | top level: the three blocks plus the GPIO-to-SPI pin assignment |
| `tb/afe5818_lvds_model.sv` | behavioural ADC output model (serial lanes, frame lane, phase offset, bit-slip injection) |
| `tb/axi_mem_model.sv` | AXI4 write memory with random or forced stalls, error responses and protocol checks |
| `tb/tb_*.sv` | self-checking testbenches (below) |

### Parameters (top level)

| parameter | default | meaning |
|---|---|---|
| `N_CH` | 16 | channels (16 in the original system) |
| `WORD_W` | 16 | serial word length = clocks per sample (16 in the original system) |
| `DATA_W` | 64 | stream and AXI data width (this design's choice) |
| `ADDR_W` | 32 | AXI address width (this design's choice) |
| `DMA_MAX` | 524288 | bytes per single-pass transfer (512 kB, as in the original system) |
| `DEPTH` | 512 | FIFO depth in beats (this design's choice) |

## Verification

Each testbench generates its own stimulus and checks its own results, then
prints `TB_RESULT checks=N failures=M`. The ADC model encodes the channel
number in bits 15:12 of every word and the sample index (mod 1024) in
bits 11:2. A checker can therefore validate any stored buffer without a
reference copy: the words must follow the channel order of the mask, the
sample index must rise by one per pass, and there must be no gaps.

| testbench | what it shows |
|---|---|
| `tb_adc_lvds_rx` | locks from several bit phases within 15 slips; words every 16 clocks; lane/channel and sample consistency; a one-bit link disturbance drops and regains the lock |
| `tb_dma_gearbox` | 16-channel, 1-channel and 3-channel masks against an independently built word sequence; start before alignment; `tlast`; forced overflow with an 8-beat FIFO |
| `tb_axi_dma_s2mm` | 4 kB burst split; 512 kB cap with `xfer_beats`; ≤1.25 clocks per beat unstalled; error response; zero length; AXI protocol checks in the memory model |
| `tb_ufa_readout_top` | end to end, with a 4 kB DMA limit and a 16-beat FIFO so that everything happens in a short run. Each mechanism is counted and must occur: bit-slip alignment, lock loss mid-capture, memory back-pressure, overflow, length cut, 4 kB split, single-channel capture at 16 clocks per sample, error response, GPIO→SPI mapping |
| `tb_ufa_readout_full` | default parameters: one channel for a full 512 kB buffer (4194307 clocks = 4.194 ms), then all 16 channels for a full buffer with random memory stalls, with no overflow |
| `tb_dark_count_capture` | default parameters, the measurement the system was built for: a synthetic dark-count waveform (600 kcounts/s, 30 mV per photoelectron, 5 % doubles, 600 ns decay, ±2 mV noise) captured for 512 kB; every stored sample must match the one sent, and a 15 mV threshold count and a pulse-height split into 1- and 2-photoelectron peaks are run on the buffer |

To run one with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
    --top-module tb_ufa_readout_full rtl/ufa_pkg.sv tb/tb_ufa_readout_full.sv
./obj_dir/Vtb_ufa_readout_full
```

The full-size runs take about a second each. The dark-count test
typically finds about 1600 pulses above 15 mV (about 390 kcounts/s, from
600 kcounts/s generated). The shortfall comes from pulses that land on the
long tail of an earlier pulse. About one pulse in nine falls in the
2-photoelectron peak, which is more than the 5 % generated for the same
reason. These figures describe the synthetic signal, not the hardware. The
hardware-side result is that every stored sample matches the sample sent.

## Departures from the original system and open points

* **One clock domain** at the bit rate, with no SERDES primitives and no
  clock-domain crossing (see the timing model above).
* **The DMA engine is a minimal stand-in.** The original used a standard
  AXI DMA core driven by a Linux DMA proxy driver, and only its 512 kB
  single-pass limit is carried over. The control interface is plain ports,
  not memory-mapped registers. A wrapper with a register interface would be
  needed to attach it to a processor.
* **Channel mask.** It is this design's addition. The original
  single-channel capture (512 kB = 4.194 ms of one channel) and the 16-channel
  capability are both covered by it.
* **Frame pattern, bit order, lock count, burst length, FIFO depth, stream
  width and GPIO bit assignment** are all this design's choices; the
  published description does not give them.
* **Not in hardware:** the analog chain, the ADC itself, the processor and
  its software, storage and Ethernet. The same goes for pulse processing:
  the original applies its noise filter (a Symlets-4 wavelet) and pulse-height
  analysis offline.
* **Continuous capture** past 512 kB would need a memory-backed FIFO or
  double buffering. The original lists this as future work, and it is not
  built.
