# An FPGA as discriminator, TDC and ADC

Front-end electronics for particle and radio detectors usually need fast
comparators, one-shots, time digitizers and ADCs as separate analog chips.
This design moves all of them into a general-purpose FPGA. The key trick is
the FPGA's LVDS input receiver. Its two inputs can be driven separately: the
signal goes to one input and a reference voltage to the other. The receiver
then acts as a fast comparator with very high gain-bandwidth, and everything
after the comparator is ordinary synchronous logic.

Three instruments are built this way. Each was first used on a board of its
own:

| function | inputs | what the logic does |
|---|---|---|
| **Trigger discriminator** (radio neutrino balloon payload) | 32 band-filtered antenna signals against DAC thresholds | runt-free 12 ns one-shots, "stuck-on" detection, rate scalers, 3-of-8 antenna coincidence (L1) |
| **TDC / QDC** (deep-ocean photomultiplier array) | 16 PMT signals against a DAC reference | arrival time from the leading edge, charge from time over threshold, 2 ns bins, on-chip FIFO |
| **Wilkinson ADC** (digitizing held samples of a deep-sampling ASIC) | held samples against a shared external ramp | 12-bit Gray-code count latched when the ramp crosses each sample |

The RTL places all three side by side in `fpga_frontend_top`. They share only
the 250 MHz clock and the reset. The 250 MHz clock comes from the FPGA's clock
manager, which multiplies a 33 MHz PCI reference; that primitive is not part of
this RTL. One 4 ns clock period is the time quantum everywhere. The TDC also
uses the falling edge, which gives 2 ns.

```
 analog, outside the FPGA          |  inside the FPGA (this RTL)
                                   |
 antenna band signal ---(+)        |
 threshold DAC --------(-) LVDS ---+--> trig_cmp[31:0] --> anita_surf_trigger --> l1[3:0], scalers
 PMT pulse ------------(+)         |
 reference DAC --------(-) LVDS ---+--> pmt_cmp[15:0]  --> hanohano_tdc -------> FIFO read port
 ramp generator -------(+)         |
 held sample ----------(-) LVDS ---+--> adc_vcmp[7:0]  --> wilkinson_adc ------> adc_code[8]
             <-----------------------  adc_ramp_reset
```

## 1. The discriminator one-shot (`disc_oneshot`)

A discriminator turns "signal above threshold" into a pulse of fixed width,
so that coincidences between channels are well defined. The difficulty is
noise at the threshold. A crossing can last far less than one clock period.
A naive sampled design misses such a crossing or turns it into a "runt" pulse.
If the threshold is so low that the signal stays above it, the channel goes
silent. A silent channel looks the same as one whose threshold is far too
high.

The circuit is a small chain of flip-flops:

```
 cmp ──►clk  cap (D=1) ──► os ──► width counter ──► done_q
              ▲  R          ▲ R                      │
              └─────────────┴────────── clear ◄──────┘
```

1. **Capture.** The comparator output `cmp` clocks the flip-flop `cap`, whose D
   input is tied to 1. Any rising edge, however short, sets it. Nothing is
   sampled, so nothing is missed.
2. **Shape.** On the next `clk` edge the output flip-flop `os` is set. From
   then on everything is synchronous.
3. **Width.** A counter counts the cycles that `os` has been high. When it
   reaches `width`, the terminal flip-flop `done_q` is set. `done_q`
   asynchronously clears both `cap` and `os`. The output is therefore always
   exactly `width` clocks long. The default is 3 clocks (12 ns), and `width`
   can be changed at run time in 4 ns steps.
4. **Dead time.** Edges that arrive while `os` is high, or during the clearing
   clock, are lost. The one-shot cannot be retriggered. Seen from the input
   edge, the dead time is about 18 ns on average: half a clock until the next
   edge, 12 ns of output and one clearing clock.
5. **Stuck-on detection.** The comparator level is also synchronized through
   two flip-flops. If the level stays high for 16 clocks, the one-shot is fired
   again, and again every 16 clocks after that. A channel whose threshold sits
   inside the noise therefore never reads low. It reads a fixed floor of
   250 MHz / 16 = 15.6 MHz and sets its `stuck` flag. Any rate below that
   floor is unambiguous.

Timing: `os` rises on the first `clk` edge after the `cmp` edge. `fire` marks
the first cycle of every output pulse.

The published schematic uses four D flip-flops. The first is clocked by the
receiver with D tied high; the first three share one reset line, which also
meets the fourth. This design reads them as capture, output, a middle stage,
and a terminal stage that drives the shared reset. It gives the width as
12 ns, adjustable in 4 ns steps. Here the fixed middle stage is replaced by a
counter so that the width can be set at run time. The stuck-on circuit is
published only by its effect, a 16 MHz floor. The 16-clock counter is this
design's way of producing that floor.

## 2. Coincidence and scalers (`l1_coincidence`, `disc_scaler`, `anita_surf_trigger`)

Each antenna gives 8 trigger signals: 4 frequency bands times 2
polarizations. Four antennas give 32 channels. An antenna-level trigger (L1)
needs any 3 of its 8 channels at once. Because every channel output is a
fixed 12 ns pulse, "at once" simply means overlapping. `l1_coincidence` counts
the high outputs on each clock and registers `count >= 3` as `l1`, one clock
later. `l1_pulse` marks the first cycle of each L1. Channels `8a` to `8a+7`
belong to antenna `a`.

The original logic was characterized by a 19 ns effective window, which
corresponds to about 5 ns of required overlap. Here the outputs are sampled
once per 4 ns clock, so two clock-aligned 3-clock pulses coincide when they
share at least one clock. The required overlap is therefore quantized to the
clock and is not exactly 5 ns.

`disc_scaler` counts the firings of each channel over a gate of 250,000
clocks (1 ms). A count therefore reads directly in kHz. All 32 counts are
latched together at the end of each gate and announced by `scaler_valid`.
Counting restarts in the same cycle, so no firing is lost. The counters are 24
bits wide and saturate. Threshold scans (rate against threshold) and the
stuck-on ambiguity are measured this way.

## 3. The Gray-code TDC on both clock edges (`gray_timebase`, `tdc_channel`, `hanohano_tdc`)

The comparator output of a photomultiplier channel is high for as long as the
pulse is above threshold (10-50 ns). Its leading edge gives the hit time T.
Its trailing edge minus its leading edge, the time over threshold, grows with
the pulse charge and serves as Q. Q also allows an off-line time-walk
correction of T.

**Why Gray code.** Each edge latches a free-running counter directly: the
comparator output is the register's clock. That edge has no fixed relation to
the counter clock, so it can land while counter bits are changing. With a
binary counter, a carry can flip many bits, and a latch on that transition can
be wrong by half the counter range. A Gray code changes exactly one bit per
step, so such a latch is wrong by at most one step.

**Both edges.** The counter advances every half period, so the step is 2 ns
and the ideal resolution is 2 ns / √12 ≈ 0.6 ns. A single 500 MHz counter is
not needed. In a reflected Gray code of a count T, bit 0 changes only on the
even-to-odd steps, and bits [15:1] are the Gray code of T/2. The rising clock
edges are made the even-to-odd steps:

* bit 0 is a toggle flip-flop on the rising edge;
* bits 15:1 are a 15-bit Gray counter on the falling edge.

Every bit comes straight from a flip-flop, and exactly one bit changes per
2 ns. The count starts at 1 on the first rising edge after reset and wraps
after 65,536 steps (131 µs).

**One channel.** The rising edge of the PMT comparator output `hit` latches
the Gray time into `lead_g`. The falling edge latches it into `trail_g` and
toggles `done_tgl`. `done_tgl` crosses into the clock domain through two
flip-flops. By the time the change is seen, both latched values have been
stable for two clocks. They are then converted to binary and held as one
record, `t_lead` and `tot` (both in 2 ns units), until the collector
acknowledges it. If another hit completes while a record is still waiting,
the new hit is dropped and `dropped` pulses. A new leading edge must come at
least 3 clocks after a trailing edge.

**Collection.** `hanohano_tdc` serves waiting channels round-robin, one record
per clock. Each record goes into a 512 × 36 FIFO, which fits one block RAM.
Record format (`daq_pkg::tdc_hit_t`):

| bits | field | meaning |
|---|---|---|
| 35:32 | `channel` | PMT input 0-15 |
| 31:16 | `t_lead` | leading-edge time, 2 ns units, modulo 65,536 |
| 15:0 | `tot` | time over threshold, 2 ns units |

When the FIFO is full, collection stalls. Each channel can still hold one
record; after that, further hits on that channel are dropped and counted in
`drop_count`. The readout, an optical link in the original system, is outside
this RTL. It drains the FIFO with `rd_en`; data appears one clock later with
`rd_valid`. The FIFO asserts as protocol rules that it is never written when
full and never read when empty.

## 4. The Wilkinson ADC (`wilkinson_adc`)

A Wilkinson ADC converts a voltage into a time and counts that time. Up to 8
held samples go to the `−` inputs of LVDS receivers. One common ramp goes to
all the `+` inputs. The ramp is built outside the FPGA from a current source, a
capacitor and a reset transistor. The FPGA drives that transistor through
`ramp_reset`. A conversion runs as follows:

1. `start` while idle: `ramp_reset` stays high for 16 clocks, and the counter
   and the channel registers are cleared. The clear rises at `start`, so the
   comparator-clocked registers always see a fresh clear edge.
2. The ramp is released and the 12-bit Gray counter advances once per clock.
   Count k is held from clock k to clock k+1 after the release. When the ramp
   passes a sample, that channel's comparator output `vcmp[i]` rises. The
   rising edge clocks the channel register, which takes the counter value.
3. The run ends when every channel has fired, or when the counter reaches
   4095.
4. The codes are converted to binary, `done` pulses, and the ramp is reset
   again. A channel that never fired reads 4095 if its comparator is low (the
   sample is above the ramp's end) and 0 if its comparator is high (the sample
   is below the ramp's start).

Each code is proportional to the time until the crossing. The ADC has no
missing codes, and its linearity is that of the ramp. A conversion takes
16 clocks, plus the largest code, plus about 5 clocks. At 250 MHz a
full-scale conversion takes 16.5 µs. Fewer bits or a faster clock trade
resolution for speed. The simulated chain of the original system, a
deep-sampling ASIC followed by this ADC, gives code = 2.1926 × V(mV) − 292.16
for 160-240 mV inputs (codes 58-234). The ADC testbench reproduces that
curve with a ramp model of the same slope and offset.

## 5. Top-level interface (`fpga_frontend_top`)

| group | ports |
|---|---|
| clock, reset | `clk` (250 MHz), `rst_n` (asynchronous, active low) |
| trigger | `trig_cmp[31:0]` in, `trig_width[3:0]` in, `trig_os`, `trig_stuck`, `l1[3:0]`, `l1_pulse[3:0]`, `scaler[32]` (24 bit), `scaler_valid` |
| TDC | `pmt_cmp[15:0]` in, `tdc_rd_en` in, `tdc_rd_data` (`tdc_hit_t`), `tdc_rd_valid`, `tdc_empty`, `tdc_full`, `tdc_level`, `tdc_hit_count`, `tdc_drop_count` |
| ADC | `adc_start` in, `adc_vcmp[7:0]` in, `adc_ramp_reset`, `adc_busy`, `adc_done`, `adc_code[8]` (12 bit) |

Parameters: `SCALER_GATE` (250,000 clocks), `FIFO_DEPTH` (512) and `ADC_CH`
(8). The shared constants are in `rtl/daq_pkg.sv`.

## 6. What follows the published design and what is this design's own

Taken from the published description:

* the LVDS receiver used as a comparator;
* the 250 MHz clock and its 4 ns steps;
* 32 trigger channels in 4 antennas of 8;
* the capture, shape and clear flip-flop chain of the one-shot;
* the 12 ns width, adjustable in 4 ns steps;
* the 16 MHz stuck-on floor;
* the 3-of-8 L1 coincidence;
* 16 PMT channels;
* leading and trailing edges latched from a Gray-code counter, using both clock edges;
* the 16-bit counter width;
* an on-chip FIFO;
* the Wilkinson scheme: comparator polarity, a 12-bit Gray counter, and registers clocked by the comparator output.

Choices of this design, where the published description is silent:

* **One-shot width.** The width comes from a run-time counter rather than a
  fixed flip-flop chain. The published four-flop drawing, taken literally,
  gives less than the 12 ns its text states; the 12 ns is followed here.
* **Stuck-on detector.** It is built as a 16-clock counter on the synchronized
  level. A genuine pulse longer than about 18 clocks also re-fires.
* **Coincidence.** Overlap is tested on clock samples. The required overlap is
  4 ns-quantized, not exactly 5 ns.
* **Channel numbering.** Antenna `a` uses inputs `8a` to `8a+7`.
* **Scalers.** The gate is 1 ms and the counts are 24 bits; the existence of
  on-chip scalers is itself inferred from the published rate measurements.
* **TDC bits.** The 16 TDC bits include the half-period bit. The published
  counter might instead be 16 bits of 4 ns count.
* **TDC flow.** The edge-to-clock hand-over, the one-record buffer per channel,
  the drop rule, round-robin collection, the record layout and the FIFO size
  (512 × 36) are all this design's.
* **ADC.** The design has 8 ADC channels and resets the ramp for 16 clocks. It
  stops early when all channels have fired, uses 0 and 4095 as the
  out-of-range codes, and uses a start/done handshake.
* **Combined top.** All three functions are in one top. Originally each had its
  own board.

Not in this RTL:

* the analog parts: the LVDS receivers' analog side, the threshold DACs, the
  ramp generator and the input transformers;
* the clock manager / PLL;
* the optical readout link;
* the waveform-sampling ASICs whose held samples the ADC converts.

## 7. How far to trust it

* **Metastability is not modelled.** The simulator has no metastability: an
  asynchronous latch always takes a clean value. The output flop of the
  one-shot samples the capture flop directly, as in the published schematic.
  In the TDC and ADC the Gray code limits an asynchronous latch to one step of
  error, but nothing resolves a metastable bit.
* **FPGA implementation constraints are not included.** Edge-clocked capture
  flip-flops, asynchronous clears produced by logic, and a counter working on
  both clock edges at 250 MHz need placement and timing constraints in a real
  FPGA.
* **Power-up state.** An FPGA starts every flip-flop at a known value after
  configuration. A simulator that starts registers at random values must run
  the clock for a few cycles before asserting reset, so that every
  asynchronous clear sees an edge. All testbenches do this.
* **Measured agreement.** With random threshold crossings, the measured
  singles rates follow r / (1 + r·18 ns) within statistics from 0.1 to
  16 MHz. For comparison, the published curve shows about a 10 % loss at
  8.3 MHz; this design loses 13 %, because of its slightly longer effective
  dead time. The accidental L1 rate at 2 MHz singles is about 100 kHz. A
  cumulative-binomial estimate with a 19 ns window gives 140 kHz.

## 8. Testbenches and simulation

Every testbench checks its results against values it works out on its own,
and ends with a line `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it shows |
|---|---|
| `tb_daq_pkg` | Gray-code conversions over all 16-bit values, one bit per step |
| `tb_disc_oneshot` | 0.3 ns runt gives a full 3-clock pulse; widths 1-6 clocks; dead time; stuck-on re-fire every 16 clocks |
| `tb_disc_scaler` | gate period, counts, saturation |
| `tb_l1_coincidence` | all 256 input patterns plus random ones |
| `tb_anita_surf_trigger` | 3-of-8 L1 on simultaneous and overlapping pulses, no L1 for 2-of-8 or disjoint pulses, scaler values for a pulser and a stuck channel |
| `tb_rate_scan` | Poisson crossings at 0.1-16 MHz against the dead-time formula; the 15,625 kHz stuck-on floor; the accidental L1 rate |
| `tb_gray_timebase` | one bit per 2 ns step, correct count, wrap-around |
| `tb_tdc_channel` | T and Q for 10-50 ns pulses, including over the wrap-around; drop while the collector is busy |
| `tb_sync_fifo` | random traffic against a queue model |
| `tb_hanohano_tdc` | 16 simultaneous completions serialized, FIFO full, stall and drops, every record checked |
| `tb_wilkinson_adc` | exact codes, the 160-240 mV transfer curve, out-of-range codes, conversion time |
| `tb_fpga_frontend_top` | the whole design at default parameters: all of the above together, with a count of every mechanism (runt, dead time, stuck-on, L1, scaler gate, FIFO full, drop, ADC early stop and out-of-range) |

Run any of them with Verilator 5, from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing -Wno-fatal --top-module tb_fpga_frontend_top \
    -y rtl -y tb +libext+.sv rtl/daq_pkg.sv tb/tb_fpga_frontend_top.sv
./obj_dir/Vtb_fpga_frontend_top
```

The full-design test simulates about 3 ms of operation, including three 1 ms
scaler gates, in a few seconds. To change a size, override the parameter on the
instance (for example `FIFO_DEPTH`, `SCALER_GATE` or `ADC_CH` on the top) or
edit `daq_pkg`. The testbenches that use smaller sizes for speed set them this
way.
