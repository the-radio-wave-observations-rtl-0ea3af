# ROLSES digital unit — SystemVerilog model

ROLSES is a radio receiver that landed on the Moon (IM-1 mission, 2024). It
listens to four monopole antennas between about 2 kHz and 30 MHz. Each
antenna signal is digitised to 14 bits at 120 MS/s. The instrument's
digital unit turns the four sample streams into power spectra in two bands:
a high band up to 30 MHz with 58.6 kHz bins, and a low band up to 1.875 MHz
with 3.66 kHz bins. It also keeps signal statistics and can capture raw
waveforms. It runs all of this on a fixed, reprogrammable 8-second schedule,
and sends the results to the lander as packets.

This repository is an RTL model of that digital unit: the four DSP
cores, the scheduler, the time base, the command and telemetry logic, and
the antenna deployment sequencer. It follows the published description of
the instrument. Where the description gives only a block's name or its
function, the RTL fills in a simple, documented choice; each such choice is
listed in the last sections. The analog parts are not modelled; their
signals are ports of the top level. These are the antennas, pre-amplifiers,
analog conditioning and ADCs, the housekeeping ADC and the power converter.

## Top level

```
               adc_data[A..D], adc_or                        pps
                      |                                        |
     +----------------+----------------+                  +----------+
     |                |                |                  | met_clock|--- sec_tick, met_own,
 dsp_chan x4     sig_stats x4    raw_capture x4            +----------+    met_lander
 (spectra)       (statistics)    (waveforms)                    |
     |                |                |                  +-----------+
     +--------+-------+-------+--------+     matrix  ---> |frame_sched|--- 11 action pulses
              |                                           +-----------+    (GO, DUMP, CAPTURE,
         +---------+                                                        TLM, HK ADC)
         |tlm_ctrl |--> uart_tx --> sci_txd  (science bus, packets)
         +---------+
 eng_rxd --> uart_rx --> cmd_decoder --> registers (DSP control, matrix,
                               |                   telemetry word, MET sync,
                               +--> uart_tx --> eng_txd   deploy, stats reset)
                         deploy_ctrl --> deploy_fire[A..D] / deploy_switch_n[A..D]
```

`rolses_top` has a single clock, the 120 MHz sample clock. The same clock
also serves as the crystal time base for the instrument's own mission
elapsed time (MET). Parameters, all at the instrument's values by default:

| parameter | default | meaning |
|---|---|---|
| `CLK_HZ` | 120 000 000 | clocks per second (time base) |
| `BAUD_DIV` | 1042 | clocks per bit on both buses (115.2 kbit/s) |
| `FINE_STEP` | 4096 | clocks between the fine-timing slots of a microframe |
| `RAW_DEPTH` | 1024 | samples per raw capture |
| `NHK` | 8 | housekeeping-ADC words in a housekeeping packet |

## The DSP core (`dsp_chan`)

Each antenna has its own identical core:

```
 ADC 14 b @120 MS/s ──┐
 NCO (TEST mode) ─────┴─> CIC ↓2 ─> FIR ─────────────── high band, 60 MS/s ──┐
                            │                                                │ GO HIGH / GO LOW
                            └─> CIC ↓16 ─> FIR ───────── low band, 3.75 MS/s ─┤ select
                                                                             v
                 PFB (4 x 1024, half-bin shift) ─> FFT 1024 ─> accumulator (2 x 512 x 2 x 32 b)
                                                                 │ DUMP HIGH / DUMP LOW
                                                                 v
                                          CORDIC magnitude ─> histogram buffer (512 x 32 b)
```

* **Down-sampling.** The first decimator is a 3-stage CIC by 2; it turns the
  120 MS/s stream into the 60 MS/s high band. A second CIC by 16, fed from the
  first, gives the 3.75 MS/s low band. Each band then passes a 15-tap
  anti-alias FIR: a Hann-windowed sinc with its cut-off at 0.4 of the band's
  sample rate. The 14-bit ADC word enters as a 16-bit word, shifted left by
  2 bits.
* **Filter bank and FFT.** A 1024-point transform gives 512 useful bins:
  60 MHz / 1024 = 58.594 kHz in the high band and 3.662 kHz in the low band.
  * The polyphase filter bank (`pfb`) has 4 taps per branch. Its output
    sample p is multiplied by exp(−jπp/1024). This moves every bin by half a
    bin, so bin k is centred at (k + ½)·58.594 kHz: 29.3 kHz for bin 0,
    matching the published bin frequencies.
  * The FFT (`fft_sdf`) is a pipeline of ten radix-2 single-path
    delay-feedback stages. Each stage halves its butterfly output, so the
    result is the DFT divided by 1024 in 16-bit words.
  * The FFT emits bins in bit-reversed order, and labels each sample with
    its natural bin number.
* **One transform engine per core, two bands.** The filter bank and FFT are
  shared in time between the bands. A GO HIGH or GO LOW action selects
  which band feeds them, and starts an integration of that band. The
  integration ignores the first 6 frames after a GO. These frames still
  hold samples of the band used before, or filter-bank history from it.
* **Accumulator** (`spec_accum`). It sums `num_fft` consecutive FFT frames,
  bin by bin, into that band's memory: 512 complex words of 2 × 32 bits.
  * Each band has its own memory, so a finished high-band sum waits there
    while the low band integrates.
  * A DUMP action reads one band's sums, runs them through a 16-iteration
    CORDIC magnitude pipeline, and writes the 512 magnitudes into the
    histogram buffer. Telemetry reads the spectrum from that buffer.
  * A DUMP of the band that is still integrating is ignored.
* **Modes.** Each core has four registers: test (NCO tuning word), high-band
  FFT count, mode, and low-band FFT count. Their defaults are $0044, 58592,
  RUN ($0002) and 3662. The mode values are:
  * 0 = OFF: the core is held in reset.
  * 2 = RUN.
  * 3 = TEST: a numerically controlled oscillator replaces the ADC.
  * 1 is unused and acts as OFF.

  The NCO has a 14-bit phase accumulator, so a tuning word w gives a tone of
  w × 120 MHz / 16384; the default $0044 gives 498 kHz.

### The accumulator sums complex values: what it means for the spectra

This is the least obvious property of the design. In the published chain
the accumulator comes **before** the magnitude (CORDIC) block. This RTL
follows that order. So an integration adds complex FFT outputs, and takes a
single magnitude at the end. It is a coherent sum, not an average of power
spectra:

* A stationary tone keeps its full magnitude only if its phase is the same
  in every frame. That means a whole number of cycles per 1024-sample frame
  at the band's rate, or a frequency of m × 58.594 kHz in the high band.
  Any other tone turns by some angle per frame, and its sum partly or fully
  cancels. Because of the half-bin shift, a tone of m × 58.594 kHz lands
  between bins m−1 and m.
* Noise and signals that are not coherent grow as √N instead of N.

The testbenches therefore use tones with a whole number of cycles per frame
(for example period 16 samples at 120 MS/s, which lands in high-band bins
127/128). Anyone who wants an average of power spectra must swap the
accumulator and CORDIC, and accumulate magnitudes or squared magnitudes.

The flown unit had two documented faults. This RTL reproduces neither:

* After each addition it kept only the low 16 bits of the running sum, so
  only the last frames counted. This design keeps the full 32-bit sum.
* A logic error made it process one FFT per spectrum. Here the FFT count
  register is obeyed.

A 32-bit accumulator cannot overflow at the default counts:
58592 × 32768 < 2³¹.

### Core timing

* One ADC sample enters per clock.
* A high-band frame takes 2048 clocks (17 µs); a low-band frame takes
  32768 clocks (273 µs).
* Integration times:
  * The default 58592 high-band frames take 0.99997 s.
  * The default 3662 low-band frames take 0.99997 s.
  * The 6 skipped frames add 0.1 ms (high band) or 1.6 ms (low band).
* A dump takes 512 + 19 clocks.
* Latencies:
  * FFT: one frame plus 10 clocks.
  * PFB: 2 clocks.
  * CORDIC: 19 clocks.

## The 8-second schedule (`frame_sched`)

The major frame lasts 8 s and is split into eight 1 s microframes. The
command matrix has 11 rows, one per action, and 8 bits per row, one per
microframe. When the bit of the current microframe is set, the row's action
is pulsed once. The default matrix:

| row | action | microframes |
|---|---|---|
| 0 | HK ADC | all |
| 1 | GO LOW DSP | 2, 6 |
| 2 | GO HIGH DSP | 0, 4 |
| 3 | DUMP LOW DSP | 2, 6 |
| 4 | DUMP HIGH DSP | 0, 4 |
| 5 | spare | all |
| 6 | GO TLM URGENT (priority packet) | 0, 4 |
| 7 | GO TLM HK | 7 |
| 8 | GO TLM DSP DATA (spectra) | 1, 3, 5, 7 |
| 9 | GO CAPTURE RAW DATA | 1 |
| 10 | GO TLM RAW DATA | none |

Each action fires in one of three slots of its microframe. The slots make
a dump read an integration before a GO in the same microframe restarts it,
and make telemetry send what the dump produced.

| slot | time after the tick | actions |
|---|---|---|
| 0 | at the tick | HK, DUMP, spare |
| 1 | `FINE_STEP` clocks | GO, CAPTURE |
| 2 | 2·`FINE_STEP` clocks | telemetry |

With the default matrix, each band of each core gives a spectrum every 4 s.
After reset the first tick starts microframe 0. The matrix row 5 (spare)
drives nothing.

## Commands (`cmd_decoder`, engineering bus)

The engineering bus is a serial line at 115.2 kbit/s, 8N1. A command frame
has this layout:

```
EB 90  ADDR  COUNT  {DATA_HI DATA_LO} x COUNT  CHK        CHK = XOR of ADDR, COUNT, data
```

COUNT words (1 to 16) are written to consecutive addresses, but only if the
checksum matches. A whole table can therefore be loaded with one command.
Each frame is answered with 06 (accepted) or 15 (rejected).

| address | register |
|---|---|
| 00–0F | DSP control, four per core A..D: test, FFTs high, mode, FFTs low |
| 10–1A | command matrix rows 0–10 |
| 20, 21 | telemetry control word, bits 15:0 and 23:16 |
| 30, 31 | lander MET, high and low word; writing 31 delivers the sync |
| 40 | fire antenna deployment, data[1:0] = antenna A..D |
| 41 | reset the running statistics |
| 42 | scheduler enable (bit 0) |

## Telemetry (`tlm_ctrl`, science bus)

There are four kinds of packet:

* Priority and housekeeping packets carry the same contents.
* Histogram packets carry one spectrum.
* Raw packets carry one waveform capture.

A GO TLM action marks its kind pending. Pending kinds are served in the
order priority, housekeeping, histograms, raw.

The 24-bit telemetry control word (default `0x012056`) is laid out as
follows:

| bits | field |
|---|---|
| 23:20 | histogram channel select |
| 19:16 | priority channel select |
| 15:12 | housekeeping channel select |
| 11:8 | raw channel select |
| 7:6 | housekeeping route |
| 5:4 | histogram route |
| 3:2 | raw route |
| 1:0 | priority route |

* **Channel select.** 0 means rotate: the request sends channels A, B, C
  and D in turn. A value of 1..4 dwells on channel A..D.
* **Route.** Bit 1 sends the packet to the real-time stream; bit 0 stores it
  in the lander's mass store. With both bits clear the packet is inhibited.
* **Default routing.** Only priority packets (dwell A) go to the real-time
  stream: 100 bit/s against the 1 kbit/s allocation. Everything else goes to
  the store. Housekeeping dwells on B; histograms and raw data rotate.
* **Skipped packets.** A histogram or raw packet whose buffer holds no result
  is skipped, for example from a core that is OFF. So are inhibited packets.
  Both are counted.

Packet layout, all multi-byte fields big-endian:

```
FA F3 | type (1 HK, 2 priority, 3 histogram, 4 raw) | band<<4 | channel | route |
lander MET (4) | own MET (4) | payload length (2) | payload | XOR of all bytes from type on
```

| packet | payload | total bytes |
|---|---|---|
| housekeeping / priority | 17 words of 16 bits | 50 |
| histogram | 512 magnitudes × 32 bits, bin 0 first | 2064 |
| raw | `RAW_DEPTH` samples × 16 bits, sign-extended | 2064 at the default depth |

The 17 housekeeping words are, in order:

1. min, max and range of the last second
2. running min and max
3. 8 s total (2 words)
4. average
5. out-of-range count
6. the `NHK` housekeeping ADC words

With the default schedule the science bus carries about 41 kbit/s, on a
line of 115.2 kbit/s.

## Time, statistics, deployment

* **`met_clock`.** A cycle counter divides the clock by `CLK_HZ`. This gives
  the 1 s tick and the instrument's own MET.
  * The lander's MET arrives in a sync command. It is taken over at the next
    rising edge of the lander's PPS, then advanced by each later PPS edge.
  * The sub-second count of the local clock is latched at each PPS edge.
  * Both METs are in every packet header.
* **`sig_stats`** (one per ADC). After every tick it takes the next 1024
  samples.
  * Every second: their min, max and range.
  * Running min/max, cleared by command 41.
  * Every 8 s: the total of the 8 × 1024 samples, the average (total / 8192)
    and the count of samples the ADC flagged as out of range.
* **`raw_capture`** (one per ADC). On GO CAPTURE RAW DATA it stores the next
  `RAW_DEPTH` consecutive samples.
* **`deploy_ctrl`.** A deploy command switches on one antenna's frangibolt
  heater. The heater stays on until that antenna's micro switch closes, or
  90 s pass. The firing time is recorded in seconds. A command that arrives
  while an antenna is firing is refused, so antennas deploy one at a time.

## Departures from the published instrument, and choices made here

Taken from the description (text and operator screens):

* the chain order; the band rates and bin sizes; the 512 bins; the 32-bit
  accumulator word
* the default FFT counts 58592 and 3662; the register defaults
  $0044 / $E4E0 / $0002 / $0E4E; the three DSP modes
* the 8 × 1 s frame and the default matrix; the bit positions and default of
  the telemetry word; the two routing bits, rotate, dwell and inhibit
* both METs and PPS; the statistics: 1024 samples per second, 8 s totals,
  reset
* one-at-a-time deployment with a micro switch; 115.2 kbit/s buses
* the bin centres (k + ½) × 58.594 kHz

Choices of this design, where the description is silent:

* CIC decimators (3 stages); a 15-tap FIR with cut-off 0.4·fs; a 4-tap
  polyphase filter bank with a Hann-windowed sinc; the half-bin shift that
  produces the published bin centres
* a radix-2 SDF FFT with 1/2 scaling per stage; a CORDIC with 16 iterations
  and 4 guard bits
* sharing one filter bank and FFT per core between the bands; the 6 frames
  skipped after GO
* the 14-bit NCO phase word, inferred from the screen pairing 500 kHz with
  $0044; 0 = OFF and 3 = TEST
* the slot timing inside a microframe; the command frame format and
  register addresses; the packet format and its order of service
* the channel-select encoding (0 rotate, 1..4 dwell), and which route bit is
  stream and which store
* the 90 s deployment timeout; raw memories of 1024 samples; 8
  housekeeping words
* the out-of-range flag as an ADC input

Known differences from the flown unit:

* The accumulator keeps all 32 bits of the sum (the flight unit lost the
  upper half after every addition).
* The FFT count is obeyed (the flight unit processed one FFT per spectrum).
* Bins are sent as 32-bit words, so the default schedule produces about
  33 kbit/s of packet data, against 17 kbit/s quoted for the instrument.
* The published screen lists 11 matrix rows although its caption speaks of
  10 actions. All 11 are kept.

Not modelled: the antennas, the pre-amplifiers, the analog units and ADCs
(only their sample and out-of-range outputs are ports), the housekeeping ADC
(start pulse out, words in), the power converter, the heaters, and the
lander. The later instrument version with phase and Stokes outputs is not
part of this design.

## Files and simulation

`rtl/` holds one module or package per file. `rolses_pkg.sv` has the
shared types, the register defaults, and the integer sine/cosine functions
that build every coefficient table at elaboration. No data files are
needed. Each file begins with a description of its block.

`tb/` holds a self-checking testbench per block. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_cic_decim`, `tb_fir_aaf`, `tb_nco` | against reference filters and a reference oscillator |
| `tb_pfb`, `tb_fft_sdf` | every output sample against floating-point references |
| `tb_spec_accum`, `tb_cordic_mag` | full 32-bit sums, integration length, refused dump, magnitude error and latency |
| `tb_dsp_chan` | spectral peaks of ADC and NCO tones in both bands, OFF mode, integration times |
| `tb_sig_stats`, `tb_raw_capture`, `tb_frame_sched`, `tb_met_clock` | statistics, waveform capture, schedule and timing |
| `tb_uart`, `tb_cmd_decoder`, `tb_tlm_ctrl`, `tb_deploy_ctrl` | the buses, commands, packets and deployment |
| `tb_rolses_top` | end to end (described below) |
| `tb_rolses_full` | the top at full size (described below) |

**`tb_rolses_top`** runs the whole unit with a "second" of 400 000 clocks.
The DSP still sees one sample per clock, so every band, bin and frame is
the real one. The run lasts 10.4 s of instrument time. The testbench
programs the unit over the engineering bus and decodes every packet on the
science bus. It counts each mechanism:

* GO and DUMP in both bands; NCO mode; a core switched OFF
* raw capture and raw packets
* rotate, dwell and inhibit
* MET sync with PPS
* statistics reset; deployment
* a refused command

A mechanism that never happened counts as a failure. It runs in about 10 s.

**`tb_rolses_full`** runs the top with no parameter changed for the first
simulated second: 120 M clocks, about 4 minutes. In that second a command
is accepted, the first tick comes at the exact clock, the integrations
start, and a priority packet leaves at 115.2 kbit/s. A complete spectrum at
full size needs 5 simulated seconds, about 25 minutes. That is the largest
operation not simulated at full size; the reduced-clock testbench covers it.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rolses_pkg.sv tb/tb_dsp_chan.sv \
          --top-module tb_dsp_chan -Mdir obj_dsp
obj_dsp/Vtb_dsp_chan
```
