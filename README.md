# FPGA signal chain of a PIP-II beam position monitor digitiser

A beam position monitor (BPM) measures where a bunched proton beam passes through the pipe,
its phase relative to the accelerator RF, and its intensity. Four pickup buttons per BPM see a
short pulse each time a bunch passes. In PIP-II the bunches come at 162.5 MHz, so the button
signals are dominated by a 162.5 MHz line. Position follows from the ratio of the button
amplitudes, and phase from the phase of that line against a reference.

The digitiser described here serves 8 analog inputs (two BPMs). They are sampled at 250 MSPS
by four dual 16-bit ADCs, and the samples reach an FPGA over JESD204B. This repository gives
SystemVerilog for the programmable-logic part of that FPGA. It covers:

* **Down-conversion.** Each channel's 162.5 MHz line is converted to baseband I/Q and
  decimated by 16. Amplitude and phase then come straight from I and Q.
* **Time tagging and packets.** Each beam trigger opens a packet. The packet starts with a
  512-bit header holding the event number and time.
* **Raw snapshot.** On request, the raw samples of one trigger are stored in external DDR
  and read out afterwards.
* **DMA output.** A single 32-bit, 100 MHz DMA channel carries either stream to the
  processor.
* **Phase self-calibration and drift compensation.** The clock chip's phase drifts with
  temperature. The design measures that drift on a copy of the RF reference during beam
  gaps. It then either removes the drift from the I/Q itself, or hands the measured phases
  on for the consumer to subtract.

The structure, widths, clocks and rates follow the published PIP-II BPM electronics design
(S. Liu et al., Fermilab, "Development of BPM electronics for PIP-II at Fermilab"). That
work gives a block diagram and data rates, not the insides of the blocks. Everything below
the block level is this implementation's own choice: filter orders, register map, header
layout, FIFO sizes, and the calibration state machine. The section "Departures and open
points" lists what differs from the published design.

```
            JESD204B (outside)                                         62.5 MHz
 adc_data ──8 ch x 4 x 16 bit──┬──► ddc: NCO ─► mixer ─► CIC/decimate ─► FIR ──► I/Q, 8 ch x 2 x 32 bit
                               │                                          │
                               │                      phase_autocal ◄─────┤
                               │                    (reference phases) ─► phase_rotate (CTRL[5])
                               │                                          ▼
 trigger,pps,bcast ─► time_tag ┼────── event ───────────────────────► iq_packer ─(FIFO)─┐
                               ▼                                                        │ s0
                          raw_packer ─► async FIFO ─► snapshot ◄──► PL DDR port          │
                                           (ui_clk)       └──────────────────────────────┤ s1
                                                                                        ▼
 processor AXI4-Lite ─► axil_xbar ─► M0 app_regs                          dma_mux ─► 32 bit @ 100 MHz
                                  └► M1..M3 to SDIO-PLL, SDIO-ADC, JESD204B (outside)
```

## Samples, words and clocks

The ADC delivers 250 MSPS. The FPGA takes four samples of a channel per 62.5 MHz clock, a
64-bit lane per channel and 512 bits for all eight. That is 32 Gbit/s. Every block that
touches raw data processes those four samples in parallel ("polyphase"). Bits `[16k+15:16k]`
of a lane hold sample k, and sample 0 is the oldest.

There are three clock domains:

| clock | frequency | what runs on it |
|---|---|---|
| `clk` | 62.5 MHz (the ADC word clock) | DDC, packers, time tag, registers, calibration |
| `ui_clk` | DDR controller user clock, at least 62.5 MHz | snapshot and the DDR word port |
| `dma_clk` | 100 MHz | multiplexer output, 32-bit DMA stream |

Three asynchronous FIFOs cross between the domains. They use Gray-coded pointers and
two-flop synchronisers (`async_fifo`):
* raw words from `clk` into `ui_clk`;
* I/Q packets from `clk` into `dma_clk`;
* raw packets from `ui_clk` into `dma_clk`.

The stream select and the capture pulse cross through two-flop and toggle synchronisers.
Every reset is synchronous and active high, one per domain.

## Down-conversion (`ddc`, `nco`, `mixer`, `cic_decim`, `fir`)

**NCO.** A 32-bit phase accumulator steps by `phase_inc` per sample. The reset value
2791728742 is 0.65 × 2³², i.e. 162.5 MHz at 250 MSPS. Because four samples arrive per
clock, the NCO produces four phases each clock: `acc`, `acc+inc`, `acc+2inc`, `acc+3inc`.
The accumulator then advances by `4·inc`. Each phase addresses a 1024-entry cosine table
(amplitude 32767). Sine is read from the same table a quarter turn back. The table is
filled at start-up from `$cos`, which synthesis tools evaluate as a ROM initialiser. Table
quantisation limits the spurious level to about −50 dBc, which is plenty ahead of
averaging filters. All eight channels share one NCO.

**Mixer.** For each sample, `I = x·cos >>> 15` and `Q = −x·sin >>> 15`, giving 18-bit
results with one clock of latency. With this sign convention a channel input
`A·cos(ωn + φ)` yields `I ≈ (A/2)·cos φ` and `Q ≈ (A/2)·sin φ`, so `atan2(Q, I)` is the
input phase φ.

**CIC and decimation.** The four mixer products of a clock are first summed. That is a
boxcar of length 4, which decimates by 4 and brings the stream to one sample per clock.
Three integrators follow at 62.5 MHz. Then the stream is down-sampled by the run-time
`ratio` (1–16, default 4), and three combs of delay 1 run at the output rate. Total
decimation is 4·ratio, so 16 by default (15.625 MS/s I/Q).

* The DC gain is 4·ratio³. That is 256 at the default, and 16384 at ratio 16.
* Registers are 32 bits wide. Integrator wrap-around cancels in the combs, and the
  output stays in range for full-scale input at every ratio.
* Changing `ratio` restarts the filter.

**FIR.** An 8-tap filter runs on the decimated I/Q with Q1.15 coefficients taken from
registers. It is a direct form: one multiply-add per tap, output registered. The reset taps
are 1/8 each, a moving average with unit DC gain. With them, a full-scale tone gives
|I,Q| ≈ 128·A.

From the last input of a decimation period to `iq_valid` takes three clocks. `tb_ddc` checks
the whole chain: for tones of known phase on all eight channels, the recovered phase
matches to 1° and the amplitude to 3 %.

## Phase drift self-calibration and compensation (`phase_autocal`, `iq_average`, `cordic_phase`, `phase_rotate`)

This is the least obvious part of the design. The RF reference reaches the board and feeds
the clock chip that times the ADCs. The clock chip adds a phase shift that changes with
temperature, about 2° for 6 °C in the published measurements. That shift moves every
measured beam phase. The analog front end of each channel has an RF switch that can feed
it a copy of the reference instead of the button signal. Measuring the reference through
the same path therefore shows the drift directly.

The controller works as follows:

1. **Decide.** A calibration is due when none has been made since reset, when
   `autocal_force` is pulsed, or when the temperature reading differs from the one stored
   at the last calibration by more than `T_sh`. The reading is signed 16 bits at 0.01 °C
   per count. `T_sh` resets to 20 counts, i.e. 0.2 °C, the threshold used in the published
   tests.
2. **Wait for a gap.** The controller waits until `beam` is low. The beam duty cycle is
   about 1 %, so gaps are long.
3. **Switch and settle.** It drives `cal_switch` high, which turns all eight AFE switches
   to the reference. It then waits `SETTLE` = 64 clocks. That lets the analog switch settle
   and lets the beam samples flush out of the CIC and FIR, which need about 45 clocks.
4. **Average.** It averages I and Q of all eight channels over 16 decimated samples
   (1 µs at decimation 16). `iq_average` uses a power-of-two window, so the mean is a shift.
5. **Measure.** It releases the switch. A 16-iteration CORDIC in vectoring mode then turns
   each channel's mean vector into a phase. Units are 2⁻¹⁶ turn; 0x4000 is 90°. The error
   is about 2 units (0.01°). The eight results are stored in `cal_phase[c]`, the
   temperature is remembered, and `cal_count` increments.
6. **Abort if the beam returns.** If `beam` rises during steps 3–4, the switch is released
   on the next clock and the attempt is repeated in the next gap.

**Using the result.** The drift-free beam phase of channel c is
`atan2(Q, I) − cal_phase[c]`, taken modulo a full turn. The subtraction can happen in
either of two places:

* **In the FPGA.** CTRL bit 5 turns this on; it is off after reset. `phase_rotate` turns
  every I/Q vector by `−cal_phase[c]` before packing. It is a pipelined CORDIC in rotation
  mode with a quarter-turn pre-rotation, 16 stages and a 1/K gain correction, and adds 18
  clocks of latency. Accuracy is 0.02° and the gain is kept to 0.05 %. Header attr bit 7
  marks packets treated this way.
* **By the consumer.** Every I/Q packet header carries the eight current reference phases
  (bits 255:128, channel c at `16c`), so the consumer can subtract them per packet.

The reference phases are in the header in both cases. `tb_bpm_top` applies a 6.9° drift to
beam and reference alike. It checks that the compensated phase stays within 0.2° across the
temperature step that triggers recalibration, in both modes.

The only timing requirement is that a beam gap be longer than about
SETTLE + 16·4·ratio/4 + 8·18 clocks. That is roughly 270 clocks (4.3 µs) at the defaults.

## Packets (`time_tag`, `iq_packer`, `raw_packer`)

A trigger makes `time_tag` latch `{event_id, seconds, ticks}` one clock later:
* the event ID counts from 0;
* the ticks count `clk` periods since the last PPS;
* the seconds step on each PPS, or are loaded with the broadcast time. A broadcast time
  names the second that the next PPS starts.

Both packers start a packet on that event. Each packet is a 512-bit header followed by
`event_size` payload words, with `tlast` on the last payload word.

Header layout (`bpm_pkg::pkt_header_t`, bit 511 first):

| bits | field | content |
|---|---|---|
| 511:496 | magic | 0xB9B9 |
| 495:480 | device_id | register 0x18 |
| 479:472 | data_type | 1 = I/Q, 2 = raw |
| 471:464 | attr | I/Q: [6:0] decimation ratio, [7] drift already compensated; raw: 1 |
| 447:416 | event_id | trigger count |
| 415:384 | time_sec | seconds |
| 383:352 | time_ticks | 16 ns ticks since PPS |
| 351:320 | event_size | payload words |
| 319:288 | config | NCO phase increment (I/Q) |
| 287:256 | diag | dropped I/Q packets / ignored raw triggers |
| 255:128 | cal_phase | 8 × 16-bit reference phases (I/Q) |

**I/Q payload.** Each word is one decimated sample of all channels. Channel c has I in
bits `64c+31:64c` and Q in `64c+63:64c+32`, both 32-bit signed. Words arrive at 15.6 M/s,
which is 8 Gbit/s. The DMA takes 3.2 Gbit/s, so `iq_packer` buffers through an 8192-word
FIFO. When an event arrives it accepts the packet only if the FIFO has room for the header
and all `iq_len` words. Otherwise it drops the whole packet and counts it in `iq_drops`.
A consumer therefore never sees a truncated packet. The default `iq_len` is 16 words, i.e.
1 µs.

**Raw payload.** Each word is one clock of the raw bus: 4 samples × 8 channels, in the lane
layout above. `raw_packer` has no back-pressure and emits one word per clock. A trigger that
arrives during a packet is ignored and counted.

## Raw snapshot and the DDR port (`snapshot`)

Writing 1 to CTRL bit 1 (capture) arms the snapshot. The next raw packet that begins after
arming is written to word addresses 0, 1, 2, … at one word per `ui_clk`. Packets already
under way are skipped. When `tlast` arrives, or the `MEM_WORDS` limit is reached, the
snapshot reads the packet back and offers it to the multiplexer. A cut packet is counted
in `snap_truncated`.

The memory port is deliberately simple:
* `mem_we` / `mem_addr` / `mem_wdata` write one 512-bit word;
* `mem_re` / `mem_raddr` start a read, answered by `mem_rvalid` / `mem_rdata` after any
  latency.

One read is in flight at a time. At ~3 clocks per word that is still well above the DMA
rate. Connecting a real DDR4 controller means adapting this port to its user interface.

## DMA multiplexer (`dma_mux`)

Each stream enters its own 16-word asynchronous FIFO into `dma_clk`. The multiplexer reads
from the FIFO chosen by `stream_sel` (CTRL bit 0: 0 = I/Q, 1 = raw). It changes source only
between packets. A width converter then sends each word as 16 beats of 32 bits, low bits
first, with `dma_tlast` on the final beat of a packet. The unselected stream waits and
back-pressures its source. To fetch a snapshot, switch to raw after capturing and switch
back afterwards.

## Registers (`app_regs`) and the AXI4-Lite crossbar (`axil_xbar`)

The processor's AXI4-Lite port is split into four 4 KiB windows:

| window | port | target |
|---|---|---|
| 0x0000 | M0 | `app_regs` |
| 0x1000 | M1 | SDIO to the PLL (outside) |
| 0x2000 | M2 | SDIO to the ADC (outside) |
| 0x3000 | M3 | JESD204B core (outside) |

Addresses above 0x3FFF get DECERR. The crossbar handles one write and one read at a time.
Ports M1–M3 leave the top as `periph_req` / `periph_rsp` (`bpm_pkg::axil_req_t` /
`axil_rsp_t`).

`app_regs` (byte offsets):

| offset | name | access | reset | meaning |
|---|---|---|---|---|
| 0x00 | ID | RO | 0xB9B00001 | |
| 0x04 | CTRL | RW | 0x8 | [0] stream select, [3] calibration enable, [5] drift compensation in the FPGA; write-1 pulses: [1] capture, [2] DDC phase sync, [4] force calibration |
| 0x08 | PHASE_INC | RW | 2791728742 | NCO step per sample, 2⁻³² turn |
| 0x0C | RATIO | RW | 4 | CIC down-sampling 1–16; other values ignored |
| 0x10 | IQ_LEN | RW | 16 | I/Q payload words per packet |
| 0x14 | RAW_LEN | RW | 256 | raw payload words per packet |
| 0x18 | DEV_ID | RW | 0 | header device ID |
| 0x1C | CAL_TSH | RW | 20 | calibration threshold, 0.01 °C |
| 0x20 | STATUS | RO | | [15:0] dropped I/Q packets, [31:16] calibrations |
| 0x24 | TEMP | RO | | temperature input |
| 0x40–0x5C | FIR0–7 | RW | 4096 | FIR taps, Q1.15 |

## Top level (`bpm_top`)

Ports of `bpm_top`, grouped by what they connect to:

* **Clocks and resets:** `clk`/`rst`, `ui_clk`/`ui_rst`, `dma_clk`/`dma_rst`.
* **JESD204B receiver:** `adc_valid`, `adc_data[8][4]`.
* **Timing system:**
  * `trigger`, `pps`: one-clock pulses;
  * `bcast_valid`, `bcast_sec`: broadcast time;
  * `beam`: high while beam is present.
* **Board:**
  * `temperature`: from the sensor read over I²C;
  * `cal_switch`: drives the AFE RF switches.
* **Processor:** `s_axil_req`/`s_axil_rsp`, and `periph_req[3]`/`periph_rsp[3]`.
* **PL DDR (on `ui_clk`):** `mem_*`.
* **DMA (on `dma_clk`):** `dma_tdata`, `dma_tvalid`, `dma_tlast`, `dma_tready`.
* **Status:**
  * `iq_drops`, `cal_count`, `cal_busy`, `raw_overlaps`, `raw_lost`, `time_sec` (`clk`);
  * `snap_busy`, `snap_truncated` (`ui_clk`).

Parameters, all at their defaults in every synthesised configuration:

| parameter | default |
|---|---|
| `NTAPS` | 8 |
| `FIFO_DEPTH` | 8192 words |
| `ADDR_W` | 24 |
| `MEM_WORDS` | 2²⁴ words (1 GiB) |
| `SETTLE` | 64 |

Synthesised as a whole, the top is about 4200 word-level cells, 6200 flip-flops and
4.3 Mbit of memory. Two thirds of the cells are the eight 16-stage rotators of
`phase_rotate`. Nearly all of the memory is the I/Q FIFO.

## Rates and capacity

* **I/Q stream.** 8 channels × 2 × 32 bit × 15.625 MS/s = 8 Gbit/s, on a 32 Gbit/s
  packing bus. That fits.
* **Raw stream.** 32 Gbit/s into the DDR port, which needs `ui_clk` ≥ 62.5 MHz. A 0.55 ms
  beam pulse is 34 375 words (2.2 MB). It drains through the 3.2 Gbit/s DMA in 5.5 ms,
  well inside a 50 ms (20 Hz) cycle.
* **Longest I/Q packet.** The 8192-word FIFO holds a packet of up to 8191 words, 0.52 ms
  at decimation 16. The longest pulse mentioned, 0.55 ms, needs ratio 5 (decimation 20)
  or a deeper FIFO.
* **Average rates.** The published average rates at 1 % duty are 320 Mbit/s raw and
  20 Mbit/s I/Q. The raw figure matches this design. The I/Q figure is a quarter of what
  32-bit I and Q words give (80 Mbit/s), so the published numbers imply a narrower I/Q
  format. This design keeps the 32-bit words that the published 8 Gbit/s packing rate
  implies.

## Departures and open points

* Where the published firmware uses vendor cores (JESD204B, NCO, CIC, AXI interconnect,
  GPIO, SPI, I²C, DMA, DDR4 controller), this code has its own simple equivalents or
  leaves the core outside the top.
* CIC order, FIR length, table size and all widths below the 512-bit words are choices,
  not published values.
* The published system diagram has an "Ave I,Q" stage between the DDC and the I/Q buffer,
  and the published phase resolution comes from averaging I/Q over a 1 µs macro-pulse. Here
  the I/Q packets carry every decimated sample, and that averaging is left to the consumer.
  The FPGA averages (`iq_average`) only inside the calibration.
* The published diagram places the raw packing in the DDR controller clock. Here the raw
  packer runs on `clk`, next to the time tagger and the I/Q packer, and its words cross into
  `ui_clk` right after it. The snapshot sees the same 512-bit stream at `ui_clk` either way.
* It is not stated where the drift is subtracted. Both places are offered: a CORDIC rotation
  in the FPGA (off after reset), and the reference phases in every header.
* Time tags have 16 ns (`clk`) resolution, because the trigger enters as a `clk` pulse. The
  timing system can resolve a single 162.5 MHz bucket (6.15 ns), and sub-nanosecond tagging
  is planned with White Rabbit hardware. Neither finer resolution is modelled.
* Position and intensity are not formed in the FPGA. They follow from the per-channel I/Q
  amplitudes, through the difference-over-sum of opposite buttons and the pickup geometry.
  Neither the formula nor the geometry is given, so that step is left to the consumer, like
  the averaging.
* `beam`, `trigger`, `pps` and the broadcast time are assumed already decoded from the
  timing link.

## Simulating

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.
`tb/ddr_model.sv` is a behavioural DDR model with random read latency. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/bpm_pkg.sv tb/tb_bpm_top.sv \
          --top-module tb_bpm_top -o sim && obj_dir/sim
```

Replace `tb_bpm_top` with any other testbench name. `tb_bpm_top` runs the whole design at
its default parameters in about 10 s. It covers register access through the crossbar, an
initial calibration, I/Q packets before and after a temperature-triggered recalibration,
a raw capture read back through the stream switch, and an I/Q packet dropped on FIFO
overflow. It prints how often each of these happened.

Two more testbenches run the whole top at its defaults with a full 0.55 ms beam pulse:

* `tb_raw_pulse` captures 34 375 raw words and reads them back through the DMA. All of them
  are consecutive ADC clocks, and the last beat leaves 6.05 ms after the trigger.
* `tb_iq_pulse` shows that the 8594-word I/Q packet of such a pulse at decimation 16 is
  dropped and counted. At ratio 5 the 6875-word packet arrives whole, 1.10 ms after the
  trigger.

`tb_phase_drift` runs the down-converter and the self-calibration at their defaults through
the two phase measurements of the published bench test. The temperature rises by 6 °C in
0.01 °C steps, and the clock-chip drift is modelled as 2° per 6 °C. The beam pulses
(8000 counts, ±25 counts noise) are averaged over 1 µs each. Results:

| quantity | result |
|---|---|
| uncompensated phase movement | 2.06° |
| worst drift-compensated error | 0.16–0.18° (limit 0.2°) |
| rms of the compensated 1 µs phase | 0.027° |
| calibrations | 29 |

These figures cover the digital path only. The board's analog noise and clock jitter
are not in the model.

Every testbench in `tb/` passes, including with all variables started at random values.
Each was also run against a deliberately broken copy of its block, and each caught the
fault.

## How far to trust it

The testbenches compare the RTL against reference arithmetic written independently in
the testbench: real-valued cos/sin and atan2, floor-division models, and packet
scoreboards. The design has not been run on hardware, put through timing analysis, or
connected to real vendor cores.

Points to review before using it in an FPGA:
* the 512-bit combinational multiplexers;
* the FIR's single-cycle multiply-add over eight taps;
* the DDR port adaptation.
