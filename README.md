# Multi-frequency eddy-current instrument: FPGA fabric logic

An eddy-current probe has two coils. A transmitting coil carries an AC
excitation, and a receiving coil picks up the field, which changes when the
probe passes over a crack in a metal sheet. What carries the information is
the receiving coil's **complex response at the excitation frequency**: its
amplitude and phase against the drive. This logic creates the drive and
measures that response. It synthesises up to four sine tones, sums them into
one excitation for a 14-bit DAC, samples the pick-up signal with a 14-bit ADC,
and works like a lock-in amplifier. Each sample is multiplied by each tone's
own sine and cosine and integrated over a fixed window, which gives an
in-phase (I) and a quadrature (Q) value per tone. These I/Q pairs leave in
small frames over an AXI4-Stream port towards the processor's DMA, 2,500
times per second. Software controls the design through AXI4-Lite registers.

The design reproduces the programmable-logic part of a portable instrument
built on a Zynq-7020 system-on-chip and used to record a dataset of
surface-crack scans for a defect-depth classifier. That description names the
fabric blocks and gives a few figures:

- 14-bit ADC and DAC;
- multi-frequency excitation, with every frequency demodulated at the same time;
- 20 kHz excitation;
- 2,500 samples per second of I/Q output;
- a parallel digital link to the converter board.

It gives no internal detail of any block. Everything else here is this
design's own choice: the clock and sample rates, the number of tones, the
filter, the word widths, the frame format and the register map. Each choice
is noted below and in the opening comment of each file. The classifier itself
runs in software and is not part of this design.

## Signal chain

```
            +-------------- axi_lite_regs (AXI4-Lite: run, freq[k], amp[k], gain, threshold, status)
            |
 sample  -> dds ----sin/cos[k]----+------------------------------+
 strobe     |                     |                              |
            v                     v                              |
     excitation_mixer  --> offset_binary_converter --> dac_data  |   (to the coil driver)
                                                                 |
  adc_data --> offset_binary_converter --> rx --+--> iq_demodulator --> data_encoder --> dma_unit --> m_axis
                                                 |                         ^
                                                 +--> gain_controller -----+ (gain code, over-range)
                                                          |
                                                          +--> gain_code    (to the front-end gain stage)
```

| File | Role |
|---|---|
| `rtl/ect_pkg.sv` | constants, register addresses, configuration and status structs |
| `rtl/dds.sv` | one 32-bit phase accumulator and sine table per tone |
| `rtl/excitation_mixer.sv` | weighted sum of the tones, clipped to the DAC range |
| `rtl/offset_binary_converter.sv` | offset-binary to and from two's complement, registered on the sample strobe |
| `rtl/iq_demodulator.sv` | per-tone multiply and integrate-and-dump over `DECIM` samples |
| `rtl/gain_controller.sv` | applies the gain code on a sample boundary; sticky over-range flag and counter |
| `rtl/data_encoder.sv` | builds a header plus I/Q frame; drops a whole frame when the output stalls |
| `rtl/dma_unit.sv` | 512-word FIFO and AXI4-Stream master, one packet per frame |
| `rtl/axi_lite_regs.sv` | control and status registers |
| `rtl/ect_top.sv` | sample-strobe divider and the wiring above |

## Timing of a sample

Everything runs on one clock, 100 MHz by default. A divider raises
`adc_clk_en` for one clock every `CLK_DIV` = 100 clocks, which gives 1 MSa/s.
On that clock edge:

1. `adc_data` is captured and converted to a signed sample `rx`. The
   converter board must hold a stable code at the edge.
2. The DDS outputs the sine and cosine of phase `n·freq[k]` for sample `n`,
   and then advances its phase.
3. One clock later, the demodulator and the over-range monitor see `rx`
   together with the references of the same sample index, qualified by
   `ref_valid`.
4. The mixer forms the excitation from those references. The converter
   registers it into `dac_data` at the next strobe.

So the DAC code of sample `n` appears one sample period after the reference
of sample `n`. Even an ideal wire from DAC to ADC reads a phase lag of one
sample plus the converter latencies. At 20 kHz and 1 MSa/s, one sample is
7.2°. The lag is constant, and software removes it with a reference
measurement, as every lock-in instrument does.

When `run` is low, all phases are held at zero and the integrators are
emptied. After `run` rises, the first sample strobe is sample 0 of every tone
and of the first integration window. Tones therefore start phase-aligned, and
the window boundaries are the same from run to run.

## The demodulator: what the numbers mean

For every tone `k`, over the `DECIM` = 400 samples of one window:

```
I_k = ( Σ rx[n] · S·sin(θ_k[n]) ) >>> 8
Q_k = ( Σ rx[n] · S·cos(θ_k[n]) ) >>> 8        S = 32767, θ_k[n] = 2π·n·freq[k]/2^32
```

The sums use 40-bit integrators. A window of 400 full-scale 14-bit samples
times 16-bit references needs 39 bits. Shifting right by 8 fits the result
into a 32-bit word. For a received tone `rx = A·sin(θ_k + φ)`, with `A` in ADC
LSB:

```
I_k ≈ (DECIM·S/512)·A·cos φ = 25,599·A·cos φ
Q_k ≈ 25,599·A·sin φ
```

The amplitude is `sqrt(I²+Q²)/25,599` LSB, and the phase is `atan2(Q, I)`.

Things to know when choosing frequencies:

- **The filter is a boxcar.** The integrate-and-dump has nulls at multiples of
  `FS/DECIM` = 2.5 kHz. A tone on a multiple of 2.5 kHz, such as 20 kHz, has
  its own 2f mixing product and the other tones' products exactly in those
  nulls. The tones then do not leak into each other's I/Q. Tones off that
  grid leak with the boxcar's sinc side lobes, at −13 dB for the first lobe.
- **The frequency word cannot hit 20 kHz exactly.** `freq = round(f·2^32/FS)`;
  20 kHz is 85,899,346, which is 19,999.99995 Hz. The error is far below
  anything the window resolves.
- **The phase is truncated to 10 bits** before the table lookup. The
  references carry a phase error of up to 2π/1024. Over a window it averages
  to an amplitude error below 1 %, which is the tolerance the testbenches
  allow.
- **A tone with frequency word 0** has sine 0 and cosine S. Its I is exactly
  0, and its Q is the DC level of the input times S/256. This can serve as an
  offset monitor.

## Excitation

Each tone's sine is scaled by `amp[k]`, an unsigned fraction of full scale
(0x10000 would be 1.0). The scaled tones are summed and shifted to the DAC's
14 bits:
`exc = (Σ sin_k·amp_k) >>> 18`. Software should keep `Σ amp[k]` below 1.0.
Beyond that, the sum is clipped to ±full scale and the sticky STATUS bit
`exc_sat` is set. After reset, tone 0 is at 20 kHz with amplitude 1/2 and the
other tones are off. Setting `run` is then enough to get the single-frequency
acquisition setting.

## Gain control and over-range

The front-end board has a programmable gain stage. Its control code
(`gain_code`, 8 bits) comes from the GAIN register and changes only on a
sample strobe. Every received sample whose magnitude reaches `OVR_THRESH`
sets the sticky over-range flag and increments a saturating 16-bit counter.
The flag is also copied into every frame header. Software can therefore
discard frames recorded while the ADC clipped, and lower the gain. There is
no automatic gain loop: the published description does not say what the
controller decides, so the decision is left to software.

## Frames and the DMA stream

Every window produces one frame of `1 + 2·NUM_TONES` = 9 words, sent as one
AXI4-Stream packet (`tlast` on the last word):

| word | content |
|---|---|
| 0 | `{8'hEC, gain_code[7:0], ovr_flag, seq[14:0]}` |
| 1 + 2k | I of tone k (signed 32-bit) |
| 2 + 2k | Q of tone k (signed 32-bit) |

`seq` counts windows, not frames sent. The encoder holds one frame. If a new
window ends while the previous frame has not left completely, the new window
is dropped whole and DROP_COUNT is incremented. That happens only when the
512-word FIFO in `dma_unit` is full, that is, after the DMA has stalled for
about 56 frames (22 ms). The receiver sees the gap as a jump in `seq`. With
`tready` held high, a frame leaves every `CLK_DIV·DECIM` = 40,000 clocks
(0.4 ms). The full data rate is 90 kB/s.

## Registers (AXI4-Lite, 32-bit, byte addresses)

| addr | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | RW | bit0 `run`; bit1 `clear`, a one-cycle pulse that zeroes the flags and counters |
| 0x04 | STATUS | RO | bit0 over-range, bit1 excitation saturated, bits 31:16 FIFO level in words |
| 0x08 | GAIN | RW | front-end gain code [7:0] |
| 0x0C | OVR_THRESH | RW | over-range magnitude threshold [12:0]; reset 8191 |
| 0x10 | FRAME_COUNT | RO | packets delivered on the stream |
| 0x14 | DROP_COUNT | RO | windows dropped |
| 0x18 | OVR_COUNT | RO | samples at or above the threshold |
| 0x20 + 8k | FREQ[k] | RW | phase increment of tone k per sample |
| 0x24 + 8k | AMP[k] | RW | amplitude of tone k [15:0] |

A write completes when the address and the data are both valid, and the
response follows one clock later. A read returns one clock after `arvalid`.
Byte strobes are ignored. Unmapped addresses read 0.

## Outside the fabric

These parts of the instrument are not logic, or not designed here:

- the coils;
- the analog amplifiers and gain stage;
- the ADC and DAC chips;
- the dual Cortex-A9 running FreeRTOS, with its Ethernet stack and DMA
  controller;
- the LabVIEW host.

`ect_top` brings their connections out as plain ports:

- `adc_data`, `dac_data` and `adc_clk_en` for the parallel converter link;
- `gain_code` for the front-end gain stage;
- the `s_axi_*` AXI4-Lite slave;
- the `m_axis_*` AXI4-Stream master.

The source gives no pin-level timing for the converter link. An FMC board
with its own converter clocking would need a clock-domain crossing in front
of these ports.

## Parameters

The defaults are in `ect_pkg` and set the instrument's operating point:

| parameter | default | origin |
|---|---|---|
| ADC / DAC width | 14 | published instrument |
| output rate | 2,500 Sa/s | published instrument |
| tone 0 after reset | 20 kHz | published instrument |
| clock | 100 MHz | own choice |
| sample rate | 1 MSa/s (`CLK_DIV` = 100) | own choice |
| `DECIM` | 400 | follows from sample rate and output rate |
| `NUM_TONES` | 4 | own choice |
| phase / table / reference | 32 / 10 / 16 bits | own choice |
| integrator / output | 40 / 32 bits | own choice |
| gain code | 8 bits | own choice |
| FIFO depth | 512 | own choice |

`ect_top` exposes `CLK_DIV`, `DECIM` and `FIFO_DEPTH`. For another output
rate, set `DECIM = FS/rate`. Keep the tones on multiples of `FS/DECIM` to
keep the boxcar's nulls on them. `NUM_TONES` changes the frame length and
the register map together. Change it in the package.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
expected values come from the testbench's own arithmetic, never from the
design:

- **Synthesiser:** a double-precision sine and cosine of the testbench's own
  phase accumulators, within 1 LSB.
- **Demodulator:** exact integer window sums, plus the analytic
  `25,599·A·cos φ` within 1 %.
- **Mixer:** exact 64-bit integer arithmetic.
- **Registers:** reads and writes under random handshake delays.
- **FIFO and encoder:** queue models.

Two system-level testbenches run `ect_top` at its default parameters, with a
probe model that feeds the DAC output back into the ADC:

- **`tb_ect_top`** (about 3 M clocks, 2 s of simulator time). Three tones are
  demodulated at once. The gain is raised until the ADC clips and the
  over-range flag is checked. The DMA is stalled until the FIFO fills and
  frames are dropped; the `seq` gaps must equal DROP_COUNT. The excitation is
  over-driven into saturation, and a clear is checked. Every frame's I/Q is
  compared with a double-precision integration of the ADC samples the design
  actually took, and the frame period must be exactly 40,000 clocks. Each of
  these mechanisms is counted and must occur.
- **`tb_scan_segment`** (50 M clocks, about 25 s). One 0.5 s scan at the
  dataset's setting: 20 kHz, 2,500 Sa/s, 1,250 I/Q points. The probe model
  passes a simulated slot, a Gaussian change of response amplitude and
  phase. Every point is checked, and so is the segment's exact duration.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/ect_pkg.sv tb/tb_ect_top.sv --top-module tb_ect_top -o sim
./obj_dir/sim
```

Replace `tb_ect_top` with any other testbench name. The block testbenches
reduce `NUM_TONES`, `DECIM` or the FIFO depth to stay short. The two
system-level testbenches use the defaults.

## How far to trust it

- The design follows the published instrument in:
  - its block structure;
  - the converter width;
  - the multi-frequency, simultaneous demodulation;
  - the 20 kHz and 2,500 Sa/s operating point.
- The published description gives no insides for any block. Each block here
  is the simplest standard structure that performs the named function:
  - a phase accumulator with a table;
  - a boxcar lock-in;
  - MSB inversion for offset binary.

  The original instrument may differ in all of these. It may, for instance,
  use a CIC or FIR decimator, a different number of tones, or another frame
  format.
- It is verified in simulation only. It has not been synthesised for or run
  on a Zynq device. The probe models in the testbenches are linear stand-ins,
  not electromagnetic models.
- The sample strobe assumes the converters run from the fabric clock.
