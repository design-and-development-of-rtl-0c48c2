# A four-tile neuromorphic suite: sensing, stochastic neurons, STDP learning and crossbar programming

This design is four small digital blocks that together cover what an edge
neuromorphic system needs next to its synaptic memory:

* a **ring-oscillator sensor** that measures on-die timing (a proxy for process,
  voltage and temperature), produces random bits from oscillator jitter and
  watches for frequency drift;
* a **stochastic leaky integrate-and-fire (LIF) neuron**, whose randomness comes
  from a programmable pseudo-random source and an activation table;
* a **spike-timing-dependent plasticity (STDP) controller**, which turns the
  timing of a pre- and a post-synaptic spike into a signed weight change and
  can gate that change with a reward signal;
* a **crossbar programming controller**, which sequences read, set, reset and
  forming pulses, voltage sweeps and current-compliance aborts for an external
  8x8 resistive array.

Each block is sized to fit one small standard-cell tile at a 50 MHz system clock.
Every block is configured through the same serial register interface, so one
host with one driver controls all four. The top module `neuro_suite` places the
four tiles on one shared SPI bus with a chip select each. It also wires the
spike path directly: the neuron's output spike is the STDP controller's
post-synaptic input, and an external pre-synaptic spike drives both the neuron
and the STDP controller.

All RTL is synthesizable SystemVerilog except `ring_osc`. That file is a
behavioural timing model of an inverter ring, because a real ring is a
combinational loop.

---

## 1. The shared serial interface (`spi_slave`, `reg_bus_if`)

Every register access is one 16-bit SPI frame in mode 0. The clock idles low and
both sides sample on the rising edge. Chip select is active low. Bits go most
significant first:

```
 bit 15   14 ........ 8   7 ........ 0
 RW       ADDR[6:0]        DATA[7:0]
 1=read                    write data, or read data returned on MISO
```

* **Write.** The register is written when the 16th bit has been sampled. A
  frame cut short by raising `cs_n` writes nothing.
* **Read.** After the 8th bit the slave fetches the register over the internal
  bus (`re` strobe, combinational `rdata`). It then shifts the byte out on the
  falling SCLK edges of bits 9 to 16, so the host samples it on the rising
  edges. MISO is driven low during the command byte.
* **Addressing.** The tiles decode only ADDR[3:0]: each tile has 16 registers
  and aliases every 16 addresses.

SCLK, CS_n and MOSI are asynchronous to the system clock, and the interface
handles this in two ways:

* It synchronises all three through two flip-flops and finds SCLK edges by
  comparing successive samples. SCLK must therefore stay below about clk/8:
  6.25 MHz at a 50 MHz clock. The testbenches use a 160 ns SCLK period.
* The MISO **output enable** is the raw `~cs_n`, with no synchroniser. A tile
  therefore releases the shared pin the moment it is deselected.

At the top, `miso` is the OR of the outputs whose enable is on, and `miso_oe` is
the OR of the enables. An assertion checks that at most one chip select is low
at a time.

Inside a tile the slave talks to the register file through `reg_bus_if`. The
interface has one-cycle `we` and `re` strobes, a 7-bit `addr`, `wdata` and a
combinational `rdata`. Registers with a read side effect, such as the sensor's
TRNG byte, act on `re`.

## 2. Ring-oscillator sensor (`ro_sensor`, `ring_osc`, `ro_trng`, `ro_health_mon`)

### 2.1 The rings

Five rings of 7, 11, 15, 21 and 31 inverting stages each have an enable bit in
RO_EN. Disabling a ring stops it, so the current of a single ring can be
isolated.

`ring_osc` models a ring behaviourally:

* The output toggles every `STAGES x STAGE_DELAY_PS` plus up to `JITTER_PS` of
  random jitter.
* Disabled, it rests high.
* The 300 ps stage delay and 20 ps jitter are assumed values, not measured ones.
  At 300 ps the 7-stage ring runs near 238 MHz and the 31-stage ring near
  54 MHz. Both are faster than the system clock, which is why the prescaler
  matters.

### 2.2 Turning a frequency into a number

The sensor counts the selected signal's rising edges in a 16-bit saturating
counter during a gate window. The signal passes through three stages first:

1. **Differential mode (optional, TRNG_CTL[2]).** A flip-flop clocked by ring B
   samples ring A. Its output toggles at the beat frequency |fA - fB|.
   DIFF_SEL[2:0] selects ring A and DIFF_SEL[5:3] selects ring B. This rejects
   what both rings share, such as a supply or temperature shift.
2. **Prescaler.** A ripple divider runs in the oscillator's own clock domain.
   PRESCALE[2:0] selects: 0 = undivided, 1 = /8, 2 = /16, 3 = /32, 4 = /64.
   Because the division happens before synchronisation, rings faster than the
   system clock can still be counted correctly.
3. **Three-stage synchroniser**, then rising-edge detection in the system clock
   domain.

The ring or pair is selected in one of two control modes, chosen by the
`mode_serial` pin (ui_in[6]):

| | Parallel control (`mode_serial` = 0) | Serial control (`mode_serial` = 1) |
|---|---|---|
| Ring select | Pins `par_sel` | Register RO_SEL |
| Gate window | Edges are counted while `cnt_en` (ui_in[3]) is high | Writing CTRL[0] starts a hardware gate of GATE_H:GATE_L system-clock cycles (0 is treated as 1) |
| End of measurement | A **rising edge** of `clr` (ui_in[4]) latches the count and restarts the counter; holding `clr` high does nothing more | At the end of the gate the count is latched and `meas_done` / STATUS[0] rises |

The latched value is read over SPI as FREQ_L/FREQ_H, or a byte at a time on
`dout`, with `byte_sel` (ui_in[5]) choosing the high byte.

If the counter reaches 0xFFFF it stops there and sets `overflow`. A choice
between ring, prescaler and window length exists to avoid this.

The expected count is

```
count = GATE x f_ring / (prescale x f_clk)
f_ring = 1 / (2 x STAGES x STAGE_DELAY)
```

For example, the 31-stage ring at /8 over 1000 cycles counts about 134.

### 2.3 Random numbers

`ro_trng` samples the two DIFF_SEL rings through two-flip-flop synchronisers
once per clock. The random bit is a XOR b XOR (previous bit). Eight bits form a
byte in TRNG_DAT, and STATUS[4] goes high. Reading TRNG_DAT clears STATUS[4].

The model's randomness comes only from the jitter term in `ring_osc`. The
quality of real silicon entropy cannot be judged from simulation.

The intended use is for the host to read a byte and write it into the neuron's
seed registers. The end-to-end testbench does exactly that.

### 2.4 Health monitor

With TRNG_CTL[1] set, every latched result is checked. Three flags are set:

* `below`: count[15:8] < HEALTH_LO;
* `above`: count[15:8] > HEALTH_HI;
* `stalled`: the count is zero, meaning the oscillator did not run.

Their OR is `health_alert`. The flags hold until the next result or a clear
(CTRL[1]), and HEALTH_ST reports them. Only the upper count byte is compared,
because the bound registers are 8 bits wide.

## 3. Stochastic LIF neuron (`stoch_neuron`, `lfsr16`)

This is the least obvious block. Its behaviour depends on how three sources
combine, each programmable: a random source, a probability table and a leaky
integrator.

### 3.1 Where the randomness comes from

`lfsr16` is a 16-bit Fibonacci LFSR. Every enabled cycle it shifts left, and
the new LSB is the parity of `state & POLY`. POLY is a register, so the
sequence length is the host's choice. The default 0xB400 is maximal, with a
period of 65535.

If the state ever becomes zero, a guard loads 0x0001. Writing SEED_L or SEED_H
reloads the LFSR with the seed on the next clock.

### 3.2 From random numbers to input current

Each cycle, one LFSR state s is used in two independent ways:

```
level = LUT[ s[15:13] ]           // one of 8 activation levels
event = ( s[7:0] < level )        // true with probability level / 256
```

Over a long sequence each table entry is chosen 1/8 of the time. Entry k then
fires with probability LUT[k]/256. The mean input therefore depends on both the
table's shape and its values, even though it is a single table. Bits s[12:8]
are not used.

A cycle integrates when it has an event **or** the synchronised `ext_spike`
input is high. The current I it adds depends only on the mode:

| Mode | Current I |
|---|---|
| Free-running (CTRL[2] = 1) | the selected activation `level` |
| Host-driven (CTRL[2] = 0) | the 4-bit `weight` pins, zero-extended |

In host-driven mode the table therefore sets how often the weight is added,
and `ext_spike` forces an addition.

### 3.3 Membrane update, in priority order

Each cycle the membrane takes the first branch that applies:

1. **CTRL[1] accumulator reset.** This is level-sensitive. It holds the
   membrane, the refractory counter and the sticky status flags at zero.
2. **Disabled** (CTRL[0] = 0). Nothing changes.
3. **Refractory.** The counter counts down and the membrane holds its value.
   The counter is loaded with CTRL[7:5], i.e. 0 to 7 cycles.
4. **Threshold.** If V[15:8] >= THRESH, the neuron emits a one-cycle `spike`,
   clears the membrane to 0 and loads the refractory counter.
5. **Integration.** Otherwise it integrates:
   * with input: V = min(V + I, 0xFFFF), setting the sticky overflow flag on
     saturation;
   * without input: V = max(V - DECAY, 0).

Two consequences are worth knowing:

* **Threshold resolution.** Only the upper byte is compared, so the threshold
  resolution is 256 membrane units.
* **Overflow flag.** The threshold normally fires long before 0xFFFF, so the
  overflow flag (STATUS[1]) is practically reachable only with THRESH near 0xFF
  and large input.

### 3.4 Reset defaults and the rates they give

Four reset values are this design's own. They were chosen so that the block
reproduces the published rate characteristics at 50 MHz:

| Setting | Reset value |
|---|---|
| POLY | 0xB400 |
| SEED | 0xACE1 |
| DECAY | 4 |
| Activation table | 16, 32, 64, 128, 192, 224, 240, 248 (a sigmoid) |

THRESH resets to 0x80.

| Configuration | Simulated rate |
|---|---|
| Default | 4 spikes in 1200 cycles |
| Free-running, THRESH 0x20 | 0.64 Msp/s |
| Free-running, THRESH 0x40 | 0.325 Msp/s |
| Host-driven, weight 15, THRESH 0x06 | 0.21 Msp/s |

The rate falls monotonically with threshold and rises with weight. Any program
that writes its own table, leak and threshold, which the host normally does,
makes these defaults irrelevant.

## 4. STDP learning controller (`stdp_ctrl`)

### 4.1 Timestamps

An external timestamp clock `ts_clk` advances an 8-bit wrapping counter. It is
synchronised and its rising edges are counted. Rising edges of `pre_spike` and
`post_spike` capture the counter into PRE_TS and POST_TS and set a valid flag
for each. While the machine is idle, a later edge on the same input overwrites
the earlier capture.

The time scale of learning is therefore set by the host's `ts_clk`, not by the
system clock.

### 4.2 The four-state computation

Once both valid flags are set and CTRL[0] is on, a four-state machine runs:

| State | What happens |
|---|---|
| COMPUTE | dt = POST_TS - PRE_TS in 8-bit two's complement. dt >= 0 is potentiation, dt < 0 depression. The table entry `LUT[{dt<0, abs(dt)[1:0]}]` is registered, along with whether abs(dt) <= TIME_WIN. |
| UPDATE | `dw = LUT >> (3 - LEARN_RT[1:0])`, i.e. x1/8, 1/4, 1/2 or 1, negated for depression. The anti-Hebbian bit (CTRL[3]) inverts the sign. A pair outside the window commits nothing. |
| DONE | Continuous mode: clear both flags and return to IDLE. Single-shot mode (CTRL[2]): wait here until CTRL[1]. |

A committed update appears in WT_UPD, on `dw` and as a one-cycle `dw_valid`
**three clocks** after the second flag is set.

Subtleties:

* **Magnitude bins.** Only abs(dt)[1:0] indexes the table, so the curve has
  four magnitude bins. With a window larger than 3, larger differences alias
  onto the same entries. Keep TIME_WIN <= 3 (the reset value is 3).
* **The unused entry.** dt = 0 counts as potentiation, so the depression entry
  for magnitude 0 (LUT4) is never read. The reset table is 127, 63, 31, 15 for
  dt = 0..3 and 0, 50, 25, 12 for dt = 0, -1, -2, -3: a strong peak for
  near-coincident pre-before-post and a weaker depression lobe.
* **Clipping.** An entry of 127 or more is clipped to 127 so that dw stays a
  valid signed byte, and it raises the weight-overflow flag (STATUS[3]).

### 4.3 Three-factor modes

The reward gate (CTRL[4]) and the eligibility trace (CTRL[5]) combine as
follows:

| CTRL[4] reward gate | CTRL[5] trace | Behaviour |
|---|---|---|
| 0 | 0 or 1 | Plain STDP: every in-window pair commits |
| 1 | 0 | Commits only if the synchronised `reward` is high in the UPDATE cycle; otherwise the update is lost |
| 1 | 1 | The update is held pending and the trace loads 255. The trace decays every clock by max(1, trace >> LEARN_RT[6:4]). The first `reward` while the trace is non-zero commits the held update. If the trace reaches zero first, the update is dropped. |

The trace only decides *whether* the update commits. Its size does not scale
the update. STATUS[4] mirrors the reward input and STATUS[5] shows a non-zero
trace.

## 5. Crossbar programming controller (`xbar_ctrl`)

The controller does not contain the array, DAC or ADC. It drives:

* row and column addresses (3 bits each) and their enables;
* a programming pulse;
* the operation code;
* an 8-bit voltage code, whose two LSBs also go to dedicated pins;
* an 8-bit half-select bias code for the unselected lines.

It reads back a 4-bit ADC value with a ready handshake.

### 5.1 State sequence

```
IDLE --start--> SETUP --read--------------------------> SENSE --> REPORT --> IDLE
                  |                                       ^
                  +--set/reset/form--> PULSE <--> GAP ----+
IDLE --start with CTRL[2]--> SWEEP --> SETUP ... REPORT --> SWEEP ... --> IDLE
```

| State | Behaviour |
|---|---|
| SETUP | One cycle. Row/column addresses and enables come on and stay on until REPORT ends. |
| PULSE | `pulse_out` is high for PULSE_H[0]:PULSE_L cycles (1 to 511; 0 is treated as 1). |
| GAP | REPEAT[7:4] low cycles between pulses, for a train of REPEAT[3:0] pulses (each 0 is treated as 1). PULSE_C counts the pulses started. |
| SENSE | Waits for the synchronised `adc_ready` and stores the reading nibble-replicated ({d, d}) in the ADC register. With no ready after 256 cycles, it sets the error flag and moves on. |
| REPORT | One-cycle `op_done`; the done flag sets. |

Set, reset and form also end with a sense, so every operation returns a reading.

### 5.2 Sweep, compliance and abort

* **Sweep.** The voltage code starts at SWP_START and rises by SWP_STEP after
  each full operation. It stops once the next code would pass SWP_END or 255.
  A step of zero ends the sweep before any pulse, so a mistaken setup cannot
  loop forever.
* **Compliance.** With CTRL[3] set, during a SET or FORM pulse: if `adc_ready`
  is high and {adc_data, adc_data} >= COMPL, the pulse and the rest of the
  train end at once, and STATUS[7] is set.
* **Abort.** CTRL[1] returns to IDLE from any state and drops every output.

Writing CTRL replaces all its stored bits. To start a compliance-limited
sweep, write start, sweep and compliance together, e.g. 0x0D.

## 6. Register maps

Addresses 0x0 to 0xF are per tile. "sc" means self-clearing.

| Addr | Sensor | Neuron | STDP | Crossbar |
|---|---|---|---|---|
| 0 | CTRL [0] start gate (sc), [1] clear (sc) | CTRL [0] en, [1] acc reset, [2] free-run, [7:5] refractory | CTRL [0] en, [1] reset, [2] single-shot, [3] anti-Hebb, [4] reward gate, [5] trace | CTRL [0] start (sc), [1] abort (sc), [2] sweep, [3] compliance |
| 1 | RO_SEL | POLY_L | LEARN_RT [1:0] rate, [6:4] trace decay | MODE 00 read, 01 set, 10 reset, 11 form |
| 2 | RO_EN [4:0] | POLY_H | TIME_WIN | ROW |
| 3 | GATE_L | SEED_L | PRE_TS (ro) | COL |
| 4 | GATE_H | SEED_H | POST_TS (ro) | PULSE_L |
| 5 | PRESCALE | THRESH | DELTA_T (ro) | PULSE_H [0] |
| 6 | STATUS [0] done, [1] ovf, [2] busy, [3] alert, [4] TRNG valid, [5] serial | DECAY | WT_UPD (ro) | DAC |
| 7 | FREQ_L | STATUS [0] spike, [1] ovf, [2] latched, [3] V MSB, [6] refractory | STATUS [0] ready, [1] LTP, [2] LTD, [3] ovf, [4] reward, [5] trace | STATUS [0] busy, [1] done, [2] error, [3] ADC ready, [7] compliance |
| 8 | FREQ_H | LUT0 | LUT0 | ADC (ro) |
| 9 | TRNG_CTL [0] TRNG, [1] health, [2] diff | LUT1 | LUT1 | SWP_START |
| A | DIFF_SEL [2:0] A, [5:3] B | LUT2 | LUT2 | SWP_END |
| B | HEALTH_LO | LUT3 | LUT3 | SWP_STEP |
| C | HEALTH_HI | LUT4 | LUT4 | REPEAT [3:0] count, [7:4] gap |
| D | TRNG_DAT (read clears valid) | LUT5 | LUT5 | COMPL |
| E | HEALTH_ST [0] alert, [1] below, [2] above, [3] stalled | LUT6 | LUT6 | PULSE_C (ro) |
| F | reserved | LUT7 | LUT7 | V/2 bias |

A host should write the operating parameters and tables first and CTRL last.
The block then starts from a defined state.

## 7. Where this RTL follows the source design and where it fills gaps

### 7.1 Taken from the source description

The following come from the published description of the suite:

* the SPI frame and mode, and the chip-select-gated MISO enable;
* the ring lengths, three-stage synchroniser, 16-bit counter and both control
  modes, with their pin assignments;
* the prescale ratios;
* the LFSR equation and zero guard;
* the table address/compare structure, saturating leaky membrane,
  upper-byte threshold and 0-7 cycle refractory period;
* the STDP timestamp/FSM/table/shift structure, window, modes and 3-cycle
  latency;
* the crossbar's seven states, four operations, 9-bit pulse width, 8-bit code
  with two pinned LSBs, nibble-replicated 4-bit ADC, 256-cycle timeout,
  zero-step guard, compliance and half-select code;
* every register name, address and named bit;
* the neuron threshold reset value of 0x80.

### 7.2 This design's own choices

Where the description is silent, this design chose the following. These are
the places to check first when comparing against a real chip:

* **SPI:** RW = 1 for read; two synchroniser stages.
* **Sensor:** the beat-detector circuit; the prescaler encoding and the
  undivided setting; the layout of STATUS, HEALTH_ST and DIFF_SEL; the
  parallel-mode ring-select pins; comparing health bounds against the count's
  upper byte; the TRNG extractor (running-parity XOR, 8-bit collection).
* **Neuron:** the LFSR bits used for table address and comparison; the neuron
  reset table and leak, which are fitted to published rate curves rather than
  given, and give 4 spikes per 1200 cycles where the published trace shows
  about 3.
* **STDP:** which end of the 2-bit rate field is /8; the trace decay law and its
  rate field; clipping at 127.
* **Crossbar:** the REPEAT packing; comparing compliance against the live ADC
  code during the pulse; sensing after every programming pulse train.
* **Timing:** all register reset values not listed above; the exact cycle on
  which flags and strobes appear.

### 7.3 The top-level wiring

The top-level wiring is also this design's. The source presents the four
blocks as separate tiles connected through the host. Here they share one SPI
bus with four chip selects, and the spike path (external pre-spike, neuron
spike, STDP post input) is wired on chip.

The Δw-to-crossbar step stays with the host. The end-to-end testbench shows
that loop: it takes each `dw`, and programs a SET pulse of |dw| cycles for a
positive value or a RESET pulse for a negative one.

## 8. Simulating and changing it

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/neuro_pkg.sv tb/tb_stoch_neuron.sv \
    --top-module tb_stoch_neuron -o sim
./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_spi_slave` | Reads and writes at every address, MISO timing and release, aborted frames |
| `tb_ring_osc` | Edge counts against the period formula, jitter bounds, enable |
| `tb_ro_trng` | Bit stream against an independent model of the extractor |
| `tb_ro_health_mon` | Every bound relation, including equality; stall; clear |
| `tb_lfsr16` | The equation, the 65535 period of 0xB400, seed load, zero guard |
| `tb_stoch_neuron` | A cycle-exact reference model of the membrane, refractory timing, the rate figures above, and an exact per-state fire count over one full LFSR period (32 x LUT[k] fires in 8192 visits) |
| `tb_stdp_ctrl` | Every dt at every rate, 3-cycle latency, window, anti-Hebbian, single-shot, reward gate, trace |
| `tb_xbar_ctrl` | Widths 1/37/511, READ, 256-cycle timeout, trains, compliance, sweep, zero step, abort, half-select code, a SET to each of the 64 cells |
| `tb_ro_sensor` | Both control modes, all five rings, every prescaler, beat frequency, overflow, health, TRNG, the longest (65535-cycle) gate |
| `tb_neuro_suite` | Runs the whole suite at default parameters; described below |

`tb_neuro_suite` walks the full pipeline:

1. measure the sensor;
2. seed the neuron from the TRNG;
3. let the neuron and external spikes drive STDP;
4. write the learned updates to the crossbar;
5. run a read, a sweep, a compliance abort and a timeout.

It counts each of these mechanisms and fails any that never happened. It also
checks that only the selected tile ever enables MISO.

Two parameters help when changing or speeding things up:

* `RO_STAGE_DELAY_PS` on `neuro_suite` and `ro_sensor` slows the ring models.
  Fewer simulator events make long measurements faster.
* Reset values of the tile registers are module parameters (e.g.
  `THRESH_RESET`, `LEARN_RT_RESET`, `WIDTH_RESET`).

Some lint warnings are expected:

* **Unused package constants.** The shared address package is read by every
  module, so each module sees constants it does not use.
* **Assertion resets.** The `disable iff` of an assertion uses the reset.
* **Ring delay.** The ring model's delay can be zero if a zero stage delay is
  configured.
* **Unused LFSR bits.** The unused LFSR bits s[12:8] are reported as unused.

Synthesis reports the behavioural ring as a loop; on silicon that place is
taken by a real ring-oscillator cell.
