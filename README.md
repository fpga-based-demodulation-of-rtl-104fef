# Photon-counting up/down demodulator for laser induced fluorescence

Laser induced fluorescence (LIF) is buried in background light. The standard
remedy is to switch the laser on and off and keep only the part of the signal
that follows the switching. This design does that digitally, photon by photon.
A photomultiplier and discriminator turn each detected photon into a short
logic pulse. Every channel has a counter that counts **up** while the laser is
on and **down** while it is off. At the end of each modulation period the
count is the number of laser-induced photons in that period, with the
background subtracted. The counters are then read and restarted. The result
is a stream of background-free LIF samples, one per modulation period: 1
million samples per second at 1 MHz modulation. A lock-in amplifier cannot
give such a stream. The stream can be used directly for time-domain work such
as cross-correlating two detectors.

The RTL describes the logic inside the FPGA of a VME board:

* 32 input channels (two 16-element PMTs);
* the modulation generator, which also drives the laser's modulator;
* the per-channel up/down counters;
* the channel sums;
* a 32k-word sample FIFO;
* an acquisition controller and a register interface for the host.

It is written in synthesizable SystemVerilog (IEEE 1800-2017), runs from one
50 MHz clock and has no vendor primitives.

```
 pmt_pulses[31:0]                                   lb_* (host bus)
   |                                                    ^
   v                                                    |
 updown_counter_array --counts--> word_packer --word--> sample_fifo <--> local_bus_if
   ^  32 x updown_channel          (2 sums,          ^                    |
   |                                2 x short int)   | we, flush          | cmd, freq_sel, phase
   | up, sample (clear)                            acq_fsm <--------------+
 updown_state_gen ---> laser_ttl (phase-shifted)
```

## 1. Catching a 5 ns pulse with a 20 ns clock: the flancter

The discriminator pulses are about 5 ns wide. They arrive at any time and can
be as dense as 200 MHz. Sampling them with the 50 MHz clock would miss most of
them. Each pulse is therefore caught by a **Flancter** (`flancter.sv`), a
cross-coupled pair of flip-flops:

* the *set* flop is clocked by the pulse itself and loads `~rst_q`;
* the *reset* flop is clocked by `clk` and loads `set_q` when the clock side
  acknowledges;
* `flag = set_q ^ rst_q` rises at the pulse edge and falls at the acknowledge.

The pulse only needs to be long enough to clock one flip-flop. A small state
machine in the clock domain handles the rest, in four clock edges after the
pulse:

| clock edge after the pulse | what happens |
|---|---|
| 1 | `set_q` enters a two-flop synchroniser |
| 2 | synchroniser output valid |
| 3 | FSM sees `sync != rst_q`, goes IDLE -> DETECT |
| 4 | counter steps +1 (`up`=1) or -1 (`up`=0); `rst_q <= sync` clears the flag; back to IDLE |

`busy` is high from the pulse edge to the fourth clock edge. A second pulse
that reaches the same flancter in that time is lost: the set flop already
holds `~rst_q`. The counter direction is the value of `up` on edge 4, not at
the pulse. The four-cycle offset is a constant, so the laser phase offset
(section 3) absorbs it together with the optical and cable delays.

Each flancter keeps its own signed count. `clear` (the per-period sample
strobe) restarts it from the step taken on the same edge, so a photon counted
exactly on a period boundary goes to the new period and is not lost.

## 2. Many flancters per channel: addresser and demux

A single flancter accepts at most one pulse every four clock cycles (80 ns).
`updown_channel.sv` therefore puts `N_FLANCTERS` of them (default 8) behind a
pulse router:

```
pulse_in -> flancter_addresser -> pulse_demux -> flancter[0..N-1] -> signed_sum -> count
                 ^---------------------- busy[0..N-1] ------'
```

* `flancter_addresser` holds the address of the flancter that takes the next
  pulse. It chooses a new address on the **falling** edge of every pulse. The
  address is therefore steady while a pulse is high, and the demux outputs
  cannot glitch. The search is round-robin from the flancter just used, and
  the first one whose `busy` is low wins. If all are busy, it takes the next
  one in turn. That one was used longest ago, so it is the first to become
  free. `all_busy` records that this happened; it stays set until the next
  pulse.
* `pulse_demux` is an address decoder AND-ed with the pulse.
* `signed_sum` adds the N flancter counts. It is combinational.

With 8 flancters and 80 ns of busy time, a channel absorbs one pulse every
10 ns on average without loss. Pulses may be closer than that for short
stretches. A longer run of denser pulses loses some; the end-to-end test
provokes this on purpose. `N_FLANCTERS` is a compile-time parameter: raise it
for higher rates.

The addresser reads `busy` asynchronously, and part of `busy` comes from the
clock domain. If a flancter is freed exactly as a pulse ends, the choice can
be wrong, which costs at most that one pulse. The pulse-clocked flops
(`set_q`, the address register) make this a multi-clock design by nature.
Give them timing constraints as such.

## 3. Modulation timing: state, sample strobe and laser phase

`updown_state_gen.sv` counts the clock from 0 to P-1:

* P = 50 at 1 MHz (`freq_sel`=0);
* P = 500 at 100 kHz (`freq_sel`=1).

Its outputs are all registered:

* `up`, high for the first P/2 cycles of each period;
* `sample`, a one-cycle strobe in the first cycle of each period, i.e. at
  every rising edge of `up`;
* `laser_ttl`, the same square wave delayed by `phase` clock cycles, modulo
  P. This goes to the laser's modulator.

Changing `freq_sel` restarts the period.

Seen from the counters, period k covers the clock edges that see cycle
indices 0..P-1. On the edge that sees `sample`=1 (cycle 0), the counters
restart and the finished period's word is written to the FIFO.

A pulse arriving in cycle j is counted on the edge that sees cycle j+3. It is
counted up if j+3 < P/2 and belongs to the current period if j+3 < P.

The phase offset lines up the laser-on half with the counting-up half. The
offset has to cover the laser and modulator response, the fluorescence
lifetime, the detector and cable delays and the 3–4 cycle flancter latency.
It is set in steps of one clock cycle: 50 steps per period at 1 MHz (2π/50
rad each), 500 at 100 kHz. To find it, scan `phase` over one period while
the laser is tuned to the line and record the mean sample. The response is a
triangle whose maximum marks the right setting.

## 4. From 32 channels to one 32-bit word

`word_packer.sv` adds channels 1–16 (first PMT, `pmt_pulses[15:0]`) and 17–32
(second PMT, `pmt_pulses[31:16]`) separately. It clips each sum to a signed
16-bit short int and packs them as:

| bits | content |
|---|---|
| 31:16 | sum of channels 17–32, signed 16 bit |
| 15:0  | sum of channels 1–16, signed 16 bit |

The two halves are the two detectors' LIF streams, ready for cross
correlation. At the default sizes a half cannot overflow:

* a flancter counts at most once every 4 cycles, so at most 125 times in a
  500-cycle (100 kHz) period;
* a channel therefore reaches at most ±1000 and a half at most ±16000.

The clipping only matters with more flancters or longer periods.

## 5. Acquisition and host access

`acq_fsm.sv` has three states. The host selects the state by writing the mode
field of the control register.

| state | behaviour |
|---|---|
| IDLE | counters run, nothing is stored |
| ACQUIRE | on entry the FIFO is flushed and the overrun flag cleared. The first sample strobe only starts a clean period; each later strobe writes one word. When the FIFO is full the FSM returns to IDLE by itself. |
| READOUT | the host pops FIFO words through the data register |

One acquisition is therefore exactly 32768 consecutive modulation periods:
32.8 ms at 1 MHz or 328 ms at 100 kHz. The host reads them out, processes
them, and starts the next one.

`local_bus_if.sv` is a synchronous register slave. The master raises `lb_wr`
or `lb_rd` for one cycle with `lb_addr` (and `lb_wdata`). `lb_ack` follows one
cycle later, with `lb_rdata` valid for reads. It is meant to sit behind the
board's bridge to the VME backplane.

| addr | name | access | content |
|---|---|---|---|
| 0 | CTRL | R/W | [1:0] mode (0 idle, 1 acquire, 2 readout), [2] freq_sel (0 = 1 MHz, 1 = 100 kHz), [24:16] phase in clock cycles. Each write also issues the mode as a command. |
| 1 | STATUS | R | [1:0] state, [2] FIFO full, [3] FIFO empty, [4] overrun (a pulse found all flancters of its channel busy; sticky, cleared by the next start), [31:16] FIFO level (saturates at 65535) |
| 2 | FIFO | R | oldest sample; the read pops it. Only in READOUT with a non-empty FIFO, otherwise 0. |
| 3 | ID | R | 0x11F00032 |

A typical host sequence:

1. Write CTRL = idle with the wanted frequency and phase.
2. Write CTRL = acquire.
3. Poll STATUS until the state is idle and the FIFO is full.
4. Write CTRL = readout.
5. Read FIFO 32768 times.

## 6. Parameters and capacity

| parameter | default | where | meaning |
|---|---|---|---|
| `CHANNELS` | 32 | top, array, packer | input channels, two groups of 16 |
| `N_FLANCTERS` | 8 | top, channel | flancters per channel (own choice) |
| `FIFO_DEPTH` | 32768 | top, FIFO | samples per acquisition |
| `CNT_W`, `SUM_W` | 16 | channel | flancter and channel count widths (own choice) |
| `FAST_CYCLES`, `SLOW_CYCLES` | 50, 500 | state generator | period in clocks for 1 MHz / 100 kHz at 50 MHz |

The use cases the design was built for fit at the defaults:

* **One cross-correlation record.** The FIFO holds 32768 words = 32.8 ms at
  1 MHz; the host repeats such records and averages them.
* **A long average at one laser wavelength.** 6.4 s is about 196 FIFO loads,
  repeated acquisitions averaged on the host.
* **A phase scan.** 50 phase settings at 1 MHz.

The design runs at the two modulation rates with any phase, and 8 flancters
per channel take 100 M pulses/s on average per channel. Resources after
generic synthesis are about 6400 word-level cells, 5600 flip-flops and
1 Mbit of FIFO memory.

## 7. What is this design's own

The overall structure comes from a published description of such a system:

* up/down counting governed by a clock-derived internal state;
* 1 MHz / 100 kHz modulation from a 50 MHz clock;
* a phase-shifted laser output;
* sampling and restart at each rising edge of the state;
* Flancter catchers with a four-cycle FSM, several per channel, routed by
  busy lines through an addresser and demux and summed;
* two 16-channel sums packed as two short ints into a 32-bit word;
* a 32k-word FIFO read through a local bus interface;
* an idle/acquire/readout FSM set by register writes.

Chosen here, because that description leaves them open:

* **Flancter timing.** How the four cycles are spent, the synchroniser, and
  sampling the count direction on the counting edge.
* **Addresser.** The falling-edge, round-robin rule.
* **Flancters per channel.** The number (8) and the counter widths.
* **Modulation generator.** Where the phase is applied. The block diagram
  this follows places the phase block between the state and the counters; the
  text puts it on the laser output. The latter is used here, and the two
  differ only in sign.
* **Packing.** Channels 17–32 in the upper half, and clipping.
* **FIFO.** A single-clock FIFO on an array memory with registered read, in
  place of a vendor FIFO.
* **Control.** The FSM transitions, the flush on start, the overrun flag, and
  the whole bus protocol and register map. The board's real local bus (a
  multiplexed address/data bus) is not modelled.

Not included:

* the photomultipliers and discriminators, which drive `pmt_pulses`;
* the VME crate, bridge and USB interface, which sit on `lb_*`;
* the PLL that makes `clk`;
* the host software.

## 8. Verification and simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_flancter` | busy at once, no step on edges 1–3, ±1 on edge 4, pulse during busy lost, clear keeps its own step |
| `tb_flancter_addresser` | address against a round-robin model on random busy patterns, steady while the pulse is high, `all_busy` |
| `tb_pulse_demux` | every address, pulse low and high |
| `tb_signed_sum` | random and extreme vectors |
| `tb_updown_channel` | latency of 4 edges; 30 random bursts 10–30 ns apart counted exactly both ways; pulses 3–150 ns wide each counted once; overload loses pulses and raises `all_busy` |
| `tb_updown_counter_array` | 32 channels driven at once, per-channel up minus down |
| `tb_updown_state_gen` | period 50/500, duty, strobe at the rising edge, laser delay equal to the phase (modulo P) |
| `tb_word_packer` | sums and clipping of both halves |
| `tb_sample_fifo` | 32k FIFO against a queue model: fill, full, drain, empty, flush |
| `tb_acq_fsm` | state changes, first-strobe rule, one write per strobe, stop on full, sticky overrun |
| `tb_local_bus_if` | register map, command strobe, FIFO pops only in READOUT |
| `tb_lif_demod_top` | whole design at default size; see below |

`tb_lif_demod_top` generates photons on all 32 channels: more while the laser
is on than off, plus pairs 10 ns apart. It follows the period from
`laser_ttl` and knows the expected word of every period. It runs two
acquisitions:

* **Run A:** 100 kHz, phase 137. It includes a deliberate overload burst and
  is stopped by command.
* **Run B:** 1 MHz, phase 0. It runs until the FIFO is full and stops by
  itself.

Every word of both runs is read back over the bus and compared, 32800 words
in all. The test also counts each mechanism (paired pulses, overrun,
frequency switch, phase offset, stop on full, readout) and fails if any of
them never happens. It simulates about 1.8 million clock cycles in well
under a minute.

Two further testbenches run the design the way it is used in the lab:

* **`tb_phase_scan`** sets up the phase. It steps the laser phase through all
  50 settings at 1 MHz. In the photon model, fluorescence follows the laser
  output after a fixed 7-cycle delay, and there is background on the other
  channels. The test checks that every word equals the exact triangle value
  for its phase. The maximum, +100, must fall at the phase that cancels the
  delay plus the counting latency (phase 40). The background half must
  average to zero.
* **`tb_spectrum_scan`** runs the absorption-spectrum measurement. It steps
  through 11 points of a two-peak line shape, adding a background three times
  stronger than the strongest fluorescence. For each point it averages 400
  periods. Both halves must match 16 × 25 × (fluorescence probability) within
  five standard errors, and the dark points must average to zero.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl rtl/lif_pkg.sv tb/tb_lif_demod_top.sv \
  --top-module tb_lif_demod_top -o sim && obj_dir/sim
```

Replace the testbench name to run any other. The simulator must support
`--timing`, because the testbenches place pulses at nanosecond offsets inside
a clock cycle. That exercises the asynchronous capture path as it would run
in hardware, but only with zero-delay logic: metastability and real
propagation delays are not modelled.
