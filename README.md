# SPA readout firmware: tuning, biasing and readout of TES bolometer arrays

This is synthesizable SystemVerilog for the signal-processing FPGA of one warm readout unit
for a frequency-multiplexed TES bolometer camera. Each unit reads out 16 SQUIDs. Each SQUID
carries up to 128 bolometers, and each bolometer sits on its own LC resonance between about
1 and 6 MHz, so one unit serves 2,048 bolometers.

For every SQUID the firmware does four things:

- It synthesises a **carrier comb**: one sinusoid per bolometer, at that bolometer's
  resonance, with a programmable amplitude and phase. The comb biases the detectors.
- It synthesises a **nuller comb**: the same tones, fed into the SQUID input in antiphase.
  This cancels the carriers at the SQUID so that the SQUID stays in its linear range.
- It **demodulates** the SQUID output back to one complex baseband sample per bolometer.
  It runs a per-channel feedback controller (proportional or integrating) on that sample.
  This is how digital active nulling is closed.
- It **decimates** a selected stream to 152.6 samples/s and sends it, with timestamps, to
  the spacecraft data processing unit (DPU) over a serial link.

Everything runs on one 200 MHz clock. All 128 channels of a SQUID share the same arithmetic,
one channel per clock cycle.

```
              +--------------------------- spa_top ------------------------------+
 sync_in ---->| timekeeping --- timestamp, samp_stb (20 MSPS), frame_stb (625 ksps),|
              |                 datapath reset                                    |
 adc_in[16]-->| signal_path x16 --- dac_carrier[16], dac_nuller[16]                |
              |      ^  | science enclosures                                       |
              |      |  v                                                         |
              |   register bus <-- control_interface <--> link_serdes <==> link ==|==> DPU
              |      |                                                            |
              |   spi_master (DA), spi_master (SCA) ------------------------------|--> SPI pins
              +-------------------------------------------------------------------+
```

## Clocks, rates and the time budget

| Quantity | Value | Derivation |
|---|---|---|
| System clock | 200 MHz | single clock domain |
| ADC/DAC sample rate | 20 MSPS | `samp_stb` every 10 clocks |
| Subband / baseband rate | 625 ksps | `frame_stb` every 320 clocks (32 samples) |
| Master tick | 10 MHz | every 20 clocks; advances the 48-bit timestamp |
| After CIC1 | 9.77 ksps | ÷64 |
| After CIC2 (science output) | 152.6 sps | ÷64 again |

Each 625 ksps sample period therefore has 320 clocks. The time-multiplexed units use them as
follows:

- **Channelizer:** fold 64, FFT 192, bin copy 32. That is 288 clocks.
- **Fine converters, controllers, CICs:** one channel per clock, so 128 clocks plus
  pipeline.

All strobes are generated by `timekeeping` and stop while the datapaths are held in reset.

## One signal path (`signal_path`): the hard part

```
 adc_in --> pfb_channelizer --> fine_downconverter --> feedback_controller (carrier) --+--> fine_upconverter --> pfb_dechannelizer --> dac_carrier
            (64 subbands,       (128 channels,          |                              |
             bin buffer)         24-bit I/Q)            |   nuller mux: demod|carrier  |
                                    |                   +--> feedback_controller (nuller) --> fine_upconverter --> pfb_dechannelizer --> dac_nuller
                                    |                                 |
                     readout mux: demod | carrier | nuller <----------+
                                    |
                                    +--> CIC1 (3 stages, ÷64) --> CIC2 (6 stages, ÷64) --> packetizer --> science enclosures
        capture_buffer taps ADC, both DACs, and the demod/carrier/nuller stream of one channel
```

### Coarse downconversion: polyphase filter bank (`pfb_channelizer`, `fft64`)

The 20 MSPS real ADC stream is split into 64 complex subbands, each 312.5 kHz wide and
centred on a multiple of 312.5 kHz.

- **Oversampling.** The bank is oversampled by two: a new output block is produced every
  32 input samples, not every 64. Subband outputs therefore run at 625 ksps.
- **Fold.** A 256-tap window is applied to the most recent 256 samples and folded into 64
  points. Four multiply-accumulates happen per clock.
- **Transform.** The 64 points go through a 64-point FFT. The FFT is iterative radix-2, with
  one butterfly per clock and 192 clocks per transform.
- **Sign correction.** A hop of half the FFT length rotates the odd subbands by π on every
  other block. The firmware negates odd subbands in odd blocks, so a tone exactly at a
  subband centre comes out as a constant.
- **Sample ring.** Input samples go into a 512-entry ring, so new samples can arrive while
  the previous block is still being folded.
- **Bin buffer.** Results land in a double-buffered bin buffer, and the buffers swap on
  `frame_stb`. Downstream logic can read any bin at any time during the following frame.
  This buffer decouples the filter-bank timing from the per-channel timing.

The window coefficients are **registers** (Q1.17), loaded over the link at start-up. The
intended window is a Dolph–Chebyshev design, but the coefficients themselves were never
published, and this firmware has no built-in table.

### Fine downconversion (`fine_downconverter`, `dds_lut`)

Each channel has four registers: `bin` (which subband), `freq` (the residual frequency
between the subband centre and the bolometer), `phase`, and `amp`. `amp` is a
droop-compensation gain, because a channel away from a subband centre sees the
filter-bank passband roll-off.

Once per frame, each channel does the following:

1. It reads its subband sample.
2. It advances a 32-bit phase accumulator by `freq`.
3. It looks up cos/sin in a 1024-entry table.
4. It adds `phase`, multiplies, and scales by `amp`.

All channels share one table lookup and one complex multiplier pair. Channel *c* comes out
*c*+1 clocks after the frame strobe. From here on, every sample is 24-bit signed I/Q.

### Feedback controllers (`feedback_controller`)

There are two controllers per path: one drives the carrier, one drives the nuller. For each
channel:

```
p   = (x * gain) >>> 12           complex, gain 18-bit Q6.12
a   = integrate ? acc + p : p
a   = clamp(a, ±limit)            per component
acc = integrate ? a : 0
y   = sat24(a + offset)           offset 24-bit complex
```

The controller covers three uses:

- **Static bias.** With gain 0 the output is just the offset, a fixed carrier amplitude and
  phase per bolometer.
- **Digital active nulling.** With integration on, the nuller accumulates the demodulated
  error until the carrier is cancelled at the SQUID.
- **Wind-up protection.** The clamp sits on the stored accumulator, so a channel that
  cannot be nulled does not wind up.

### The two multiplexers

The multiplexers follow the block diagram of the source design:

| Multiplexer | Register | Inputs |
|---|---|---|
| Nuller controller input | `PATH` reg 0 | 0 = demodulated stream, 1 = carrier-controller output |
| Readout | `PATH` reg 1 | 0 = demodulated, 1 = carrier, 2 = nuller |

The carrier controller always takes the demodulated stream. (The prose of the source says
the mux feeds "the carrier feedback controller". The figure places it in front of the other
controller, and the figure was followed.)

### Coarse upconversion: synthesis filter bank (`fine_upconverter`, `pfb_dechannelizer`)

This is the mirror image of the analysis side.

1. The fine upconverter rotates each channel's controller output up by its residual
   frequency. It then adds the result into the channel's subband of a bin accumulator,
   with saturating adds, so several channels can share a subband.
2. On `frame_stb` the accumulator halves swap. The frozen half gets the same odd-subband
   sign fix and goes through an inverse FFT.
3. The real part of each block is stored in a 9-block history.
4. Each DAC sample is an overlap-add of 8 windowed blocks, using the same 256-tap window
   structure with a hop of 32. The result is shifted right by 17+10 and saturated to
   16 bits.
5. The output changes on `samp_stb`.

Latency from controller output to DAC is two frames.

### Decimation and packetising (`cic_tdm` as CIC1 and CIC2, `packetizer`)

`cic_tdm` is a Hogenauer CIC with per-channel integrator and comb state arrays. A sample's
stages are all evaluated in the clock it arrives.

| | Stages | Decimation | Width | DC gain |
|---|---|---|---|---|
| CIC1 | 3 | ÷64 | 24 → 42 → 32 bits | 256 (8 fractional bits kept) |
| CIC2 | 6 | ÷64 (fixed) | 32 → 68 → 32 bits | 1 |

The decimation phase resets with the datapath, so all paths (and all units synchronised to
the same sync) decimate on the same frame. The droop-compensating FIR is not in the FPGA;
the DPU applies it.

The packetizer collects the 128 CIC2 outputs of one decimated frame and sends them as one
science enclosure, together with the timestamp at which channel 0 arrived. It has one frame
buffer. If the link has not yet taken the previous enclosure when a new frame is complete,
the new frame is **dropped and counted** (`PATH` reg 2). There is no flow control on science
data, by design.

### Capture buffer (`capture_buffer`)

This is a diagnostic memory with 1024 entries of 48 bits. One of six sources is captured
once after arming:

| Sources | Rate |
|---|---|
| ADC, carrier DAC, nuller DAC | 20 MSPS |
| Demodulated, carrier or nuller stream of one selected channel | 625 ksps |

The buffer is read back through registers.

## The DPU link (`link_serdes`, `enc8b10b`, `dec8b10b`, `control_interface`)

**Physical layer.** The link is full duplex and 8b/10b encoded at 50 Mbps. A 25 MHz
source-synchronous clock travels with each direction, and data changes on both clock edges.
At 200 MHz that is 4 system clocks per bit.

- The receiver synchronises the incoming clock and data with two flops each, and samples
  the data at each edge of the incoming clock.
- It finds symbol alignment by searching for the K28.5 comma.
- The transmitter sends K28.5 whenever it has nothing else to send.

**Enclosures.** Every message is framed as K27.7, then 32-bit words (most significant byte
first), then K29.7.

| Enclosure | Words |
|---|---|
| Write request (type 1) | `{type, src, seq[15:0]}`, `2`, `{8'h0, addr[23:0]}`, `data` |
| Read request (type 2) | same, data ignored |
| Response (type \| 0x80) | `{type\|0x80, 0, seq}`, `2`, `addr`, `data` (read result or the written value) |
| Science (0x10) | `{0x10, 0, path[3:0], seq[15:0]}`, `2+2N`, `{0, ts[47:32]}`, `ts[31:0]`, then I and Q of each of N channels |

**Requests.** Requests are executed in arrival order, one register access each. Every
request is answered, and the sequence number lets the DPU match answers to requests. There
is no need to wait for an answer before sending the next request: responses queue in a
16-entry FIFO.

**Errors.** Malformed enclosures are counted (register 0x08) and otherwise ignored. A
malformed enclosure is one with the wrong length, an unknown type, or a symbol error.
Responses lost to a full FIFO are counted in register 0x09.

**Arbitration.** The transmitter serves the response queue and the 16 packetizers round
robin, one whole enclosure per turn. A full-size science enclosure is 1042 bytes. Sixteen of
them every 6.55 ms use about half of the link.

## Register map

The register bus carries 24-bit addresses and 32-bit data. Read data arrives one clock
after the read strobe.

**Global registers** (`addr[23] = 0`):

| Address | Register |
|---|---|
| 0x00 / 0x01 | timestamp preset, low 32 / high 16 bits |
| 0x02 / 0x03 | current timestamp (read) |
| 0x04 | sync control: bit 0 = arm preset load, bit 1 = datapaths held (read); write bit 1 to hold again |
| 0x08 / 0x09 / 0x0A | bad enclosures, dropped responses, requests served |
| 0x10–0x13 | DA SPI master: 0 control {cs[25:24], bits-1[20:16], divider[15:0]}, 1 transmit (starts a transfer), 2 receive, 3 busy |
| 0x14–0x17 | SCA SPI master, same layout |
| 0xFF | identification, `0x53504101` |

**Signal-path registers** (`addr[23] = 1`). The address fields are `path = addr[22:19]`,
`block = addr[18:15]`, `channel = addr[10:4]` and `register = addr[3:0]`. For the window
taps and the capture memory, the low bits index the entry instead.

| Block | Contents |
|---|---|
| 0 | channelizer window taps |
| 1 | fine downconverter: bin, freq, phase, amp |
| 2 / 3 | carrier / nuller fine upconverter: same layout |
| 4 / 5 | carrier / nuller controller: gain re/im, mode, limit, offset re/im |
| 6 / 7 | carrier / nuller synthesis window taps |
| 8 | path: nuller source, readout source, dropped frames |
| 9 | capture: control {chan, source, arm}, status {count, busy, done}, entries |

All channel parameters reset to "off". Gains, offsets and amplitudes are zero, so the DACs
are silent until the DPU programs them.

## Timekeeping and synchronisation (`timekeeping`)

- The timestamp is a 48-bit count of 10 MHz master ticks.
- Out of reset, the signal paths are held in reset, and so are the sample and frame
  strobes.
- The DPU writes a preset, sets the arm bit and raises `sync_in`. The rising edge passes
  through a two-flop synchroniser, and the resulting action waits for the next master tick.
  At that tick:
  - If armed, the timestamp loads the preset.
  - The datapath reset is released.
  - The strobe counters restart.
- Several units driven by the same sync and master clock therefore start their filter
  banks, decimators and timestamps on the same tick.
- A write of bit 1 puts the datapaths back into reset until the next sync.

## What is not in this RTL

| Not built | Notes |
|---|---|
| ADC/DAC physical interfaces | `adc_in`, `dac_carrier` and `dac_nuller` are parallel 16-bit ports valid on `samp_stb`. |
| Clock synthesis | The PLL that makes 200 MHz from the 10 MHz master clock, and the clock-synthesiser synchronisation. The 200 MHz clock is an input. |
| Configuration memory scrubbing and bitstream storage | FPGA-vendor infrastructure and an external flash. |
| Redundant DPU link | Only one link is instantiated. Only one may be active at a time. |
| Housekeeping telemetry enclosures | Their content was not specified. |
| Cryogenic and analogue electronics | Outside the FPGA. |
| Filter-bank window coefficients | They must be loaded over the link. |

Resource use on the target space-grade FPGA (XQRKU060) was not measured.

## Choices made where the source design is silent

| Area | Choice |
|---|---|
| Fixed-point formats | Q6.12 gain, Q1.17 window/DDS/amplitude, 32-bit FFT data without internal scaling, CIC output truncation |
| Architecture | Single-butterfly FFT; one capture memory per path; 4 chip selects per SPI master |
| Register map | Address decode, global register addresses, identification word |
| Link framing | Word order and enclosure header layout, K27.7/K29.7 as delimiters, round-robin link arbitration |
| Overflow handling | A science frame that cannot be sent is dropped, not queued |

## Verification

Every module has a self-checking testbench in `tb/`. Each prints a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fft64` | Forward and inverse transforms against a direct DFT |
| `tb_pfb_channelizer`, `tb_pfb_dechannelizer` | Tones and noise, against a reference fold and direct DFT computed in the testbench, plus the frame budget |
| `tb_fine_downconverter`, `tb_fine_upconverter`, `tb_dds_lut` | Rotation, scaling and phase accumulation per channel |
| `tb_feedback_controller` | Proportional, integrating, saturation and offset behaviour per channel |
| `tb_cic1`, `tb_cic2` | Against a per-channel reference CIC |
| `tb_enc8b10b`, `tb_link_serdes` | Standard code words, random data and control symbols, disparity, invalid symbols, and a loopback through the serial link |
| `tb_control_interface` | Back-to-back requests, responses, malformed enclosures, science arbitration |
| `tb_packetizer`, `tb_capture_buffer`, `tb_spi_master`, `tb_timekeeping` | Formats, overflow counting, SPI waveforms, preset and sync |
| `tb_signal_path` | One reduced path. Each mux setting and the controller modes are checked through the science output. |
| `tb_spa_top` | Two paths of 16 channels with short CICs, driven through the serial link only. It counts each mechanism: sync, writes, reads, science enclosures, proportional and integrating control, saturation, both muxes, overflow drops, capture, SPI, and bad enclosures. |
| `tb_spa_top_full` | The default configuration: 16 × 128 channels, 256 taps, ÷64 ÷64 CICs. It configures a path, presets and syncs the timestamp, and checks the first science enclosures. They must be full length, arrive 4096 frames after the sync, and carry the preset timestamp + 65536. |

Each testbench was also run against a copy of its module with a deliberate error, such as a
missing sign flip, a stuck round-robin pointer or a wrong bit order. In every case the
testbench reported failures.

## Simulating

All files are plain SystemVerilog. The packages `spa_pkg.sv` and `spa_8b10b_pkg.sv` must be
compiled first. For example, to build and run the end-to-end test with Verilator 5:

```
verilator --binary --timing -Wno-fatal rtl/spa_pkg.sv rtl/spa_8b10b_pkg.sv \
          $(ls rtl/*.sv | grep -v _pkg) tb/tb_spa_top.sv --top-module tb_spa_top -o sim
./obj_dir/sim
```

Any other testbench is built the same way by swapping in its own file and top name.

How long the tests take:

- **Reduced top-level test:** two paths of 16 channels, about 2 million clocks, a few seconds.
- **Full-size test:** about 2 million clocks at full width, under a minute.

Every test uses two-state simulation and initialises or resets everything it reads.
