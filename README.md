# UCTM2 firmware in SystemVerilog

The UCTM2 is a NIM module for small nuclear-physics set-ups and teaching labs. It replaces a rack of
discriminators, delays, coincidence units, scalers, a TDC, an MCA and an oscilloscope. The user never
writes HDL. Trigger equations are typed as text. Host software turns them into truth tables and loads
those tables into block RAMs, so the FPGA firmware never changes. This repository holds RTL for that
firmware:

* a 200 MHz trigger path: eight window-discriminated inputs, a programmable fan-out, ten
  delay/width shapers and a 10-input, 8-output look-up table, with scalers;
* a 200 Msps dual-ADC receiver;
* two oscilloscopes, two multi-channel analysers (MCA) and eight time-to-digital converters (TDC).

The oscilloscopes, MCAs and TDCs are all triggered, gated, started or stopped by any of the eight
trigger outputs.

The design follows the published description of the module (Bourrion et al., "UCTM2: an updated user
friendly configurable trigger, scaler and delay module"). Where that description is silent, the
choices made here are stated below and in each file's opening comment.

## The trigger path, stage by stage

```
high[7:0], low[7:0]  (window comparators, asynchronous)
   │  input_block x8: 2-FF synchronisers, polarity XOR, window detector, mode mux, register
   ▼  in_sig[7:0]  ──► input scalers (8 x 32 bit)
duplication_block: RAM 256 x 10, address = in_sig
   ▼  10 duplicated signals
delay_shaper x10: delay 0..65535 clocks, then width 1..65535 clocks; dead/live time counters
   ▼  10 shaped signals
logic_block: RAM 1024 x 8, address = shaped signals
   ▼  output register
trig_out[7:0] ──► NIM outputs, output scalers (8 x 32 bit), oscilloscopes, MCAs, TDCs
```

**Why look-up tables.** Both RAM stages act like FPGA LUTs. The duplication table maps each input
pattern to a 10-bit word. With it, one input can drive several shapers; for example, the same PMT
signal can be used once as a short gate, once as a long gate and once delayed. The equation table
gives each of the 8 outputs as any Boolean function of the 10 shaped signals. AND, OR, XOR, NAND, NOR,
XNOR, NOT and the multiplicity operator SUP(list, n) all become table contents. The latency is the same
for every equation. Both RAMs have a second port (`b_*`) through which the host writes and reads the
tables. The RAMs are not cleared at power-up. Load the tables, and let any pulses made from the
power-up content die out (`shaper_busy == 0`), before starting a run.

**Window mode.** Each input has two comparator outputs: low threshold and high threshold. In direct
mode the low output, XORed with `polar`, is the trigger. In window mode a pulse is accepted only if the
high threshold is not crossed within `peak_time` clocks (1..63, up to 315 ns) after the low threshold
is crossed. The detector then emits a one-clock pulse at the end of that window. Window mode therefore
adds exactly `peak_time` clocks of latency. `polar` inverts both comparator outputs, so negative pulses
(PMTs) are handled the same way.

**Shapers.** Each shaper uses the rising edge of its input as the time reference. It waits `delay`
clocks, then outputs a pulse of `width` clocks. The output can therefore be shorter or longer than the
input pulse. An edge that arrives while the shaper is delaying or emitting is ignored. That is the
channel's dead time. Each shaper counts its busy clocks (dead time) and idle clocks (live time) during a
run, so the host can show the dead-time percentage.

**Latency.** A comparator level sampled at clock edge *n* appears on `trig_out` after edge *n*+6. The
path has seven clocked stages: two synchronisers, the input register, two RAM reads, the shaper state
and the output register. Counted from the input edge, that is 30–35 ns, depending on where the edge
falls within the 5 ns clock period. The published minimum latency is 35 ns.

**Scalers and run timer.** `run_start` loads `run_duration` (in clocks; 0 means unlimited until
`run_stop`). While `running` is high, all scalers and dead/live time counters count. Scalers count
rising edges. `cnt_clr` clears them.

## Digitizer side (100 MHz)

`adc_interface` receives each ADC channel on six LVDS lanes, double data rate, at 200 MHz. It outputs
one 24-bit word per channel per 100 MHz clock, holding two consecutive samples: the earlier sample in
bits [11:0], the later in [23:12]. `clk100` must rise together with every second `clk200` rising edge,
as it does when both come from one PLL.

Trigger outputs reach the 100 MHz modules through `trig_stretch`. This block takes the last two 200 MHz
samples of the selected trigger at every 100 MHz edge. Each ADC sample then has its own trigger bit, and
no pulse is lost, however short. There is a fixed offset of one or two samples between the trigger
path and the ADC path, and it is not compensated; the recorded trigger bits let software locate it.

### Oscilloscope

The buffer is written as 8192 words × 26 bits: two samples plus their two trigger bits per word. It is
read as 16384 × 13 bits, `{trigger bit, sample}`, for 81.92 µs of record. The recording state machine
has four states:

| state | leaves when | to |
|---|---|---|
| IDLE | `arm` | WAIT_FILL (writing starts, circular) |
| WAIT_FILL | `pre_trig` samples written | WAIT_TRIG |
| WAIT_TRIG | selected trigger seen | WAIT_POST (trigger word address kept) |
| WAIT_POST | `post_trig` more samples written | IDLE, `done` set, writes stop |

A trigger during WAIT_FILL is ignored. The record runs from `start_addr`: `pre_trig` samples, the two
samples of the trigger word, then `post_trig` samples. `pre_trig + 2 + post_trig` must not exceed 16384.
Both counts are in samples, rounded down to even numbers. Read with `rd_addr`; `rd_data` follows one
`clk100` later. "Normal" (auto re-arm) versus "single shot" operation is left to the host, which
re-arms after reading.

### MCA

The gate is one trigger output, applied per sample. The measurement runs over the gated samples, which
are two's-complement. When the gate closes, one 13-bit magnitude goes into a 1024 × 16 FIFO:

| `mca_mode` | result |
|---|---|
| `MCA_MAX` | \|largest sample\| (positive amplitude) |
| `MCA_MIN` | \|smallest sample\| (negative amplitude) |
| `MCA_AMPL` | largest − smallest (total amplitude, needs the 13th bit) |
| `MCA_INTEG` | \|sum\| >> `mca_bit_div`, from a 21-bit integrator, clipped to 8191 |

The integrator wraps after about 2^9 full-scale samples. Gates must be shorter than that, or the
signal smaller. A full FIFO drops results and sets `overflow`.

### TDC

Each of the eight channels selects a start line and a stop line. A start edge clears a 24-bit counter
that counts at 200 MHz. The value written is the number of clocks from the start edge to the stop edge:
1 count = 5 ns, and the maximum is 2^24−1 = 83.9 ms. A measurement that reaches the maximum ends
without a result.

* Single stop: the first stop is written and later stops are ignored until the next start.
* Multi stop: every stop is written, until a new start restarts the counter.

Results go into a 1024 × 32 FIFO, `{8'h00, time}`. It is read as 16-bit halves, low half first: each
`rd_en` moves on by one half.

## Example: muon lifetime

`tb/tb_uctm2_top.sv` builds the classic water-Cherenkov muon-lifetime measurement inside one module:

* A PMT pulse on input 0 makes i0, a 4-clock gate.
* i0 is duplicated into i1, a 4000-clock (20 µs) gate starting 10 clocks later.
* i0 is also duplicated and delayed by 4010 clocks (20.05 µs).
* START = i0 & i1: a decay electron inside the muon's gate.
* STOP = the delayed muon pulse.

TDC 0 then reads 4010 − (t_electron − t_muon) clocks, so the decay time is encoded in reverse. A second
i0 arriving while the delay shaper is busy is ignored, which is why only the muon is delayed. All delays
fit the 16-bit shapers; the 20 µs window is far inside the TDC range.

## Files

| file | contents |
|---|---|
| `rtl/uctm2_pkg.sv` | sizes, enums for MCA/TDC modes, configuration structs |
| `rtl/uctm2_top.sv` | firmware top |
| `rtl/trigger_core.sv` | 200 MHz trigger and counter core |
| `rtl/input_block.sv`, `duplication_block.sv`, `delay_shaper.sv`, `logic_block.sv`, `event_counter.sv`, `run_timer.sv` | trigger path stages |
| `rtl/adc_interface.sv`, `trig_stretch.sv` | ADC receiver, 200→100 MHz trigger transfer |
| `rtl/oscilloscope.sv`, `mca.sv`, `tdc.sv`, `fifo_sync.sv` | measurement modules |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Simulate a testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/uctm2_pkg.sv tb/tb_uctm2_top.sv \
          --top-module tb_uctm2_top -o sim && obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. The top-level test runs every parameter at its
default value and finishes in a few seconds. The TDC test includes two full 2^24-clock intervals and
takes about 20 s.

## Outside this RTL

Not included:

* the clock PLL: `clk200` and `clk100` are inputs;
* the USB micro-controller's register interface: its register map is not published, so every
  configuration, table and readout signal is a port of `uctm2_top`, in the clock domain of the block
  it reaches;
* the LED controllers: `in_sig`, `shaper_busy` and `running` are outputs for them.

The analog front end is also not included: window comparators, threshold and gain DACs, the analog
multiplexers and VGAs that choose which two of the eight inputs are digitized, the ADC, and the
TTL-to-NIM converters. `rst` is synchronous and active high. Hold it for a few `clk100` cycles.

## Where this RTL goes beyond, or departs from, the published description

* **Own choices (the published description is silent):**
  * the window detector's one-clock output pulse;
  * counting preTrig/postTrig in whole two-sample words;
  * the TDC's overflow, tie and word-format rules;
  * the MCA's per-sample gating, clipping and integrator wrap-around;
  * dropping results when a FIFO is full;
  * the run timer's protocol;
  * the ADC lane bit order (odd bit on the rising edge);
  * running all table and configuration ports in the clock domain of their block.
* **MCA mode width:** `mca_mode` is 2 bits. The description speaks of an "mca_mode bit" but lists
  four measurement types.
* **MCA FIFO width:** 16 bits wide, results in the low 13 bits. The description gives both
  "1024 × 16" and "1024 × 13".
* **Latency:** 30–35 ns with the path above; the description gives a 35 ns minimum.
* **Oscilloscope "Mode: simple/windowed":** no separate mode was built. This entry in the published
  specification table seems to be carried over from the discriminator line.
