# WaveDAQ crate logic: trigger and readout for DRS4 waveform digitizers

WaveDAQ is a combined trigger and data-acquisition system for experiments
that record the full waveform of every detector channel at gigasample rates,
on thousands of channels (up to about 16 000). The waveforms are held in
DRS4 switched-capacitor arrays. A DRS4 is an analog ring memory that
samples at 0.5–5 GS/s and is digitized slowly afterwards. Its depth is short
(1024 cells, about 200 ns at 5 GS/s). The trigger therefore has to decide
within a few hundred nanoseconds whether to stop the memory, before the
signal of interest is overwritten. WaveDAQ meets this by building the
trigger into the digitizer system itself. Each channel's 80 MS/s ADC does
two jobs:

* while the DRS4 records, the ADC samples the live input, and those samples
  feed the trigger;
* after a trigger, the same ADC digitizes the cells stored in the DRS4.

This repository gives synthesizable SystemVerilog for the digital side of
one WaveDAQ crate and of a multi-crate trigger tree:

* the per-board trigger pre-processing;
* a shift-register TDC;
* the DRS4 readout controller;
* the crate trigger concentrator;
* the crate data concentrator.

It does not contain the analog parts (DRS4, ADC, amplifiers, comparators,
SiPM bias), the serial-link transceivers, Ethernet, clock distribution or
slow control.

## The crate

```
            16 x WaveDREAM board (wdb)                      central slots
 comparators ─► TDC (tdc_deser + tdc_encoder) ─┐
 ADC samples ─► pedestal_sub ─► weighted_sum ──┴► trig_word ──► TCB: tcb_trigger ──┐
                                                  (every clock)   sum, discriminate, │
                                                                  veto, busy          │
           DRS4 ◄── drs4_readout ◄──────────────── trigger bus ◄─────────────────────┘
            │           │ event packet (valid/ready)
            └─ADC──────►┘ ───────────────────────► DCB: dcb_merger ──► one output stream
```

A crate has 16 WaveDREAM boards (`wdb`) of 16 channels each, so 256
channels. In the two central slots sit the Trigger Concentrator Board
(TCB) and the Data Concentrator Board (DCB). The backplane is a dual star:

* each board has one serial link to the TCB for its trigger word;
* each board has one serial link to the DCB for its event data;
* a shared trigger bus carries the TCB's decision back to all boards.

In this RTL each link is a registered parallel word, so a link adds no
latency. The top module is `wavedaq_crate`.

## One event, clock by clock

All logic runs on the 80 MHz ADC sample clock `clk`. The TDC shift
registers alone run on `clk_fast`, which is 28 × `clk` and has its rising
edges aligned with those of `clk`. Take a detector pulse that reaches the
board inputs in clock *t*:

| clock | what happens |
|---|---|
| t | pulse at the analog input; the comparators fire and are sampled into the TDC shift register |
| t+2 | `tdc_hit` with the fine time (bin 0–27 within clock t) |
| t+16 | ADC output carries the pulse (the ADC pipeline is `ADC_LATENCY` = 16 clocks) |
| t+17 | pedestal subtracted and polarity fixed (`pedestal_sub`) |
| t+19 | weighted board sum (`weighted_sum`: products, then sum) |
| t+20 | `trig_word` = {busy, hit count, sum}. The hit count was delayed by `ADC_LATENCY+1` so that it describes the same instant as the sum |
| t+21 | the TCB adds all board sums and hit counts |
| t+22 | trigger pulse and event number on the trigger bus |
| t+22+stop_delay+1 | every board stops its DRS4 (`drs_stop`) |

The modelled latency from the signal to the trigger is 22 clocks (275 ns).
A master concentrator adds one more clock. The prototype system measured
about 700 ns. The difference comes from the serial links and cables, which
are not modelled here. It also comes from the real ADC pipeline length,
which is assumed here. The next board revision was expected to save about
200 ns through a shorter ADC pipeline; `ADC_LATENCY` = 16 clocks is that
200 ns.

`stop_delay` is the tuning knob of the analog memory. The DRS4 keeps the
last `CELLS` samples. Delaying the stop moves the triggering pulse within
that window.

### Busy, and why the trigger must be blind during readout

When a board accepts a trigger it raises `busy` at once. The stop delay
is still running at that point. Busy stays high through the readout. While
the DRS4 is read, the ADC digitizes stored cells, not the live input. The
trigger path would then see replayed or empty samples and could fire on
them.

Busy therefore drops only `ADC_LATENCY+5` clocks after the DRS4 restarts.
By then the ADC pipeline and the 4-clock trigger pipeline carry live
samples again. The TCB refuses to trigger while any board is busy, and
also for `dead_time` clocks after each trigger. Each condition it rejects
is counted:

* `n_vetoed` counts conditions rejected by the external veto;
* `n_inhibited` counts conditions rejected by busy or dead time.

Note that after busy drops, the DRS4 needs `CELLS` clocks before its whole
window holds fresh samples. The logic does not wait for this; a trigger
earlier than that reads some cells that still hold the previous event.

## Board logic (`wdb`)

### Trigger word (`wdb_trigger`)

Each channel's sample is processed as `y = invert ? pedestal − adc : adc −
pedestal`, a signed 13-bit value. The board sum is Σ `weight[c]·y[c]`, with
8-bit unsigned weights for gain equalisation. It is 26 bits wide and cannot
overflow. The hit count is the number of channels whose TDC found a
leading edge. Pedestals and weights are registers; they are not estimated
on line.

### Shift-register TDC (`tdc_deser`, `tdc_encoder`)

The comparator output is shifted into a 28-bit register on every
`clk_fast` edge. Once per `clk` the register is copied into a word, bit 0
the oldest sample. The copy happens at phase `SAMPLES/2−1`, half a system
period before the `clk` edge that reads it, so the word crosses clock
domains without a synchroniser.

The encoder looks for the first 0→1 transition in the word. It compares
bit 0 with the newest bit of the previous word, so an edge on a word
boundary is found exactly once. It outputs:

* `hit`;
* `fine`, the bin of the edge: one bin is 12.5 ns / 28 = 446 ps, matching
  the system's 450 ps TDC resolution;
* `coarse`, a count of `clk` cycles.

In an FPGA the fast shift register would be an I/O deserializer.

### DRS4 readout (`drs4_readout`)

The controller works through these states: `IDLE` → `DELAY` (stop_delay)
→ `HEADER` → `READ` → `DRAIN` → `REARM` → `IDLE`.

The interface to the DRS4 and ADC works as follows:

* `drs_stop` freezes the memory;
* `drs_rd`/`drs_cell` request one cell, counted from the oldest sample;
* the sample asked for in clock *t* is on `adc` in clock
  *t+ADC_LATENCY*;
* all 16 channels are read in parallel, one cell per clock.

The event packet is a header beat followed by `CELLS` data beats. A beat is
192 bits wide (16 × 12), with channel 0 in the low bits. `out_last` marks
the final data beat. The header (`evt_header_t`, in the low bits) holds:

| bits | field |
|---|---|
| [55:40] | magic `A5D4` |
| [39:32] | board id |
| [31:16] | event number from the trigger bus |
| [15:0] | number of cells |

Read requests go through a credit check. A request is issued only when the
64-word output FIFO has room for it and for every request still inside the
ADC pipeline. Back-pressure from the data concentrator therefore slows the
readout and loses nothing.

## Trigger concentrator (`tcb_trigger`)

The concentrator decides as follows:

```
condition = enable && total_sum > threshold && total_hits >= min_hits
trigger   = condition && !veto && !any_busy && dead_time expired
```

The event number counts issued triggers. The module also outputs its
summed values, registered: `sum_out`, `nhit_out` and `busy_out`. The same
module, with `N_IN` = number of crates, therefore serves as the master of a
multi-crate system.

For that case `wavedaq_crate` has a mode input `ext_trig_sel`. When it is
set, the boards follow `ext_trig_bus` (the master's trigger, fanned out to
all crates) instead of their own crate's TCB. `tb_two_crates` builds this
arrangement: two crates and a master. In it, a pulse shared between the
crates stays below threshold in each crate alone but triggers the master.

## Data concentrator (`dcb_merger`)

This block merges the boards' packet streams into one, a whole packet at a
time. It grants inputs in round-robin order, starting after the last input
served, and costs one clock per packet. `out_src` tells which board the
current beat comes from. An assertion checks the stream rule: a beat that
is not accepted stays unchanged. The DCB's Gigabit Ethernet framing is not
part of this RTL.

## Parameters

| name | default | where | meaning |
|---|---|---|---|
| `N_BOARDS` / `NB` | 16 | pkg / top | boards per crate |
| `N_CH` | 16 | pkg | channels per board |
| `ADC_W` | 12 | pkg | ADC bits (assumed) |
| `WGT_W` | 8 | pkg | weight bits (assumed) |
| `TDC_SAMPLES` | 28 | pkg | TDC bins per clock (446 ps) |
| `DRS_CELLS` / `CELLS` | 1024 | pkg / top | DRS4 cells read per event |
| `ADC_LATENCY` / `ADC_LAT` | 16 | pkg / top | ADC pipeline in clocks (assumed from the 200 ns figure) |
| `FIFO_DEPTH` | 64 | drs4_readout | readout buffer, must exceed `ADC_LATENCY`+1 |
| `N_IN` | 16 | tcb_trigger | inputs of a concentrator (64 for the largest system) |

At full size one crate synthesizes to about 23 k flip-flops and 210 kbit of
buffer memory (coarse, technology-independent count).

## How it relates to the published system

These parts follow the system description:

* the crate organization (16 × 16 channels, TCB and DCB, trigger bus);
* the dual use of the ADC for trigger and readout;
* the trigger chain: pedestal subtraction, weighted sum, and discrimination
  with veto;
* the comparator TDC built on fast shift registers, at about 450 ps;
* busy handling;
* the trigger tree of crate and master concentrators.

The description names these functions but does not give their internals.
Every width, pipeline depth, word format and handshake here is this
design's own choice. The main departures are:

* The "time-based" trigger algorithms are not specified. They are
  represented only by the comparator hit-multiplicity requirement
  (`min_hits`). The veto is an external input; where it comes from is not
  described.
* The serial links are parallel words with no latency. The trigger-latency
  figure is therefore lower than the measured system's.
* The DRS4 is read one cell of all 16 channels per clock, from the oldest
  cell. The real chip multiplexes its channels and has its own
  region-of-interest readout.
* Pedestals are registers, not an on-line baseline estimate.
* The master of a multi-crate system is a single `tcb_trigger`. The real
  trigger crate spreads this work over several boards.
* Not present: Ethernet, the Zynq processor, slow control (SPI/MSCB), clock
  distribution, the analog front end and the SiPM bias supply.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it exercises |
|---|---|
| `tb_pedestal_sub`, `tb_weighted_sum` | arithmetic against integer references, extreme values, latency |
| `tb_tdc_deser`, `tb_tdc_encoder` | sample order and period, first-edge search across word boundaries |
| `tb_wdb_trigger` | trigger word content and alignment |
| `tb_sync_fifo`, `tb_dcb_merger` | buffering, packet integrity, no interleaving, back-pressure, rotation |
| `tb_drs4_readout` | stop delay, header, every sample, back-pressure, re-arm time, trigger ignored while busy |
| `tb_tcb_trigger` | decision against a reference, veto/busy/dead-time counters, event numbers |
| `tb_wdb` | one board: trigger word from a pulse, TDC fine time, event packet |
| `tb_wavedaq_crate` | crate with 4 boards and 128 cells: trigger, latency, veto, hit requirement, threshold, busy inhibit, back-pressure, arbitration, TDC, external-trigger mode |
| `tb_wavedaq_crate_full` | the same scenarios with the crate at full size (16 boards, 1024 cells) |
| `tb_two_crates` | two crates under a master concentrator |

`tb/drs4_adc_model.sv` is a behavioural DRS4 and ADC model used by the
board and crate benches. `tb/crate_bench.svh` holds the body shared by the
two crate benches.

To run one bench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb -Itb \
    rtl/wavedaq_pkg.sv tb/tb_wavedaq_crate.sv --top-module tb_wavedaq_crate -o sim
./obj_dir/sim
```

The full-size crate bench takes about two minutes to build and run.
