# NORM in SystemVerilog: emulating non-volatile logic on a volatile FPGA

A batteryless sensor lives on a capacitor that an energy harvester charges and
its own circuit drains. When the capacitor voltage falls too low, the logic
loses power and every volatile flip-flop forgets its value. Designs meant for
such intermittent power keep part of their state in non-volatile memory (for
example FeRAM) and back up the rest before the lights go out. An FPGA cannot
prototype such a design as it stands: all of its storage is of one kind, and
the HDL has no way to say "this register survives a power failure, and it is
slow to write".

NORM (Non-volatile memORy eMulation) closes that gap with three auxiliary
blocks that are placed around the design under test:

* an **intermittency emulator** replays a recorded capacitor-voltage trace and
  produces `POWER_RESET`, the emulated power failure, which is wired to the
  reset of every block that is meant to be volatile;
* a **non-volatile register** is a block RAM that ignores `POWER_RESET` (so
  its data survives), wipes itself only on the real FPGA reset, and enforces
  the access time of the emulated memory technology with a `BUSY` signal;
* an **energy approximator** counts, for every entity of interest, the cycles
  in which it is active, and an **instant energy calculator** turns such a
  count into energy by multiplying with a per-cycle energy figure.

This repository holds RTL for all of them, plus the evaluation system they
were demonstrated with: three volatile counters that are backed up into the
non-volatile register by a backup-policy FSM (dynamic, constant-time or
task-based), all driven by an RFID-harvester voltage trace.

## Block map

```
                 SELECT_THRESHOLD, THRESHOLD_VAL
                              |
   +--------------------------v---------+  POWER_RESET  (volatile reset of everything
   | ie: trace ROM -> comparators -> mux |------+-----------------+   except the NVR contents)
   +-------------------------------------+      |                 |
                  THRESHOLD_COMP                 v                 v
                        |            +-----------------+   +-------------------+
                        +----------->| backup_logic    |   | volatile_counters |
                      PARAM -------->| DBP / CBP / TBP |-->| 3 counters in FFs |
                                     +-----------------+   | + transfer FSM    |
                                       | STATE        ^    +---------+---------+
                                       v        OP_DONE, counter 1   | EN WE ADDR DIN / DOUT BUSY
                              +-----------------+                    v
                              | state_converter |             +-------------+
                              +--------+--------+             | nvr         |
                                       | enables              |  nvr_bram   |
                                       v                      |  nvre       |
                                 +-----------+  counts        |  reset_block|
                                 | ea        |-------+        +-------------+
                                 +-----------+       v
                                      ^        +-----------+  ENERGY, ENERGY_INDEX,
                                      +--clear-| iec       |  EVALUATION_READY
                                               +-----------+<- START_CALC, INDEX,
                                                               SAMPLE_PERIOD
```

| File | Role |
|---|---|
| `rtl/norm_pkg.sv` | shared types: backup-logic states, policy codes, entity indices |
| `rtl/ie.sv`, `rtl/clk_divider.sv`, `rtl/ie_voltage_trace.hex` | intermittency emulator, its prescaler and its trace |
| `rtl/nvr.sv`, `rtl/nvr_bram.sv`, `rtl/nvre.sv`, `rtl/reset_block.sv` | non-volatile register and its three parts |
| `rtl/ea.sv` | energy approximator (cycle counters) |
| `rtl/iec.sv` | instant energy calculator |
| `rtl/state_converter.sv` | maps the backup-logic state to EA enables |
| `rtl/volatile_counters.sv`, `rtl/vc_counter.sv` | the volatile workload: three counters and their NVR transfer FSM |
| `rtl/backup_logic.sv` | backup-policy FSM |
| `rtl/norm_top.sv` | the evaluation system with every block wired together |

## The non-volatile register (NVR)

The NVR is the heart of the emulation and the part with the most rules.

**Persistence.** The storage is an ordinary single-port RAM (`nvr_bram`,
write-first, no reset of its own). Two resets reach the NVR and they do
opposite things. `POWER_RESET`, the emulated power failure, never touches the
contents. `RESET`, the real FPGA reset, starts the reset block, which walks
every address writing zero, so that the emulated memory starts from a known
state; hold `RESET` for at least `DEPTH` cycles.

**Input and output multiplexers.** Both are selected by
`{POWER_RESET, RESET}`:

| `{POWER_RESET,RESET}` | RAM inputs come from | `DOUT` |
|---|---|---|
| `00` normal | the user (`EN` OR `BUSY`, `WE`, `ADDR`, `DIN`) | RAM output |
| `01` FPGA reset | reset block (write zeros) | 0 |
| `11` both | reset block | 0 |
| `10` power failure | all zeros: no access | 0 |

**Access time.** `nvre` turns the memory's access time into cycles,
`DELAY_CYC = ceil(DELAY_NS / CLK_PERIOD_NS)` (80 ns at 10 ns: 8 cycles). An
access is accepted on a rising edge with `EN` high and `BUSY` low. From the
next cycle `BUSY` is high for exactly `DELAY_CYC` cycles. `BUSY_SIG` is the
same pulse but falls one cycle earlier, so a client can prepare its next
request and issue it on the very first free edge. While `BUSY` is high:

* `WE`, `ADDR` and `DIN` must stay unchanged (an immediate assertion in
  `nvr` checks this in simulation);
* a new `EN` is ignored (there is no queue);
* the read data on `DOUT` is valid once `BUSY` is low again.

`EN` may be a one-cycle pulse, because `BUSY` is OR-ed into the RAM enable.

**Write atomicity.** A real FeRAM either writes a word or does not. The RTL
guarantees the same thing: the RAM stores the word on the accepting edge. A
power failure that arrives during `BUSY` therefore cannot lose or tear an
accepted write. What it does is stop the client from issuing the remaining
words of a multi-word backup. `nvre` is reset by the FPGA reset only, so the
`BUSY` timing of an accepted access also runs to its end.

## Intermittency emulator (IE)

`ie` holds the voltage trace in a ROM of `TRACE_LEN` 16-bit samples in
millivolts. A prescaler gives a clock enable every `PRESCALE` cycles, and each
enable moves a wrapping address counter to the next sample. The defaults are
1250 samples and a prescaler of 8, so at 100 MHz one pass of the trace lasts
100 µs. `TRACE_FULL` pulses when the address wraps.

`N_TH` comparators compare the current sample with the run-time thresholds
`THRESHOLD_VAL`. Bit *i* of `THRESHOLD_COMP` is 1 while the voltage is
*below* threshold *i*. `SELECT_THRESHOLD` chooses the bit that drives
`POWER_RESET`. In `norm_top`, threshold 0 is the power-failure level (2800 mV
in the evaluation), and threshold 1 (`BACKUP_TH`) is the backup threshold of
the dynamic policy.

After the FPGA reset the voltage reads 0 (an empty capacitor), so the system
starts in power failure. Sample *k* appears `PRESCALE*(k+1)` cycles after the
reset ends. A selector beyond `N_TH-1` forces a permanent power failure.

**About the trace.** `rtl/ie_voltage_trace.hex` (1250 lines of four hex
digits) is not the original recording. The original comes from an RFID
reader charging a capacitor, averaged in groups of 25 samples. What is here is
a piecewise-linear reading of a plot of it: it swings between 0 and about
5.25 V, and 75.1% of the samples lie under 2.8 V (the plot's caption gives
75%). The results below depend on these values. Replace the file with a real
trace of the same format to reproduce measured behaviour.

## Energy approximation: EA and IEC

`ea` has one `CNT_W`-bit cycle counter per entity. A counter adds one in
every cycle its enable bit is high. It saturates at all ones and then raises
its `EA_FULL_ARRAY` bit. A reset bit re-initialises the counter to its own
enable bit (0 or 1), so a counter cleared in a cycle in which the entity is
active does not lose that cycle. In `norm_top` there are two entities:

* entity 0, the volatile counters, active while the state is `RUN`;
* entity 1, the NVR, active during `BACKUP` and `RECOVER`.

`state_converter` produces these enables from the backup-logic state.

`iec` turns a count into energy:
`ENERGY = count[INDEX] × E3C[INDEX]`. `E3C` is a parameter table of the
energy per active cycle, in pJ. The defaults are:

* 264 pJ for the NVR: 8 mA × 3.3 V × 10 ns, from FeRAM datasheet values;
* 1 for the counters, a placeholder because no figure exists for them.

The datapath has three parts: a multiplexer over the counters, the E3C table
(the ROM) and a multiplier. A three-state FSM (`IDLE`, `FETCH`, `MUL`)
sequences them:

* `START_CALC` with `INDEX` in `IDLE` starts a calculation;
* `FETCH` latches the count and the E3C value and drops `EVALUATION_READY`;
* `MUL` registers the product and raises `EVALUATION_READY`.

`EVALUATION_READY` is high three rising edges after `START_CALC` was sampled.
`ENERGY` then holds its value until the next calculation. The output is
`CNT_W + E3C_W` bits wide, so the product never overflows.

**Periodic mode.** Long runs overflow any fixed counter. The remedy is to
sample the counters regularly and restart them. A non-zero `SAMPLE_PERIOD`
input starts an internal timer. Every `SAMPLE_PERIOD` cycles the FSM sweeps
all entities in turn:

* it outputs each entity's interval energy, tagged with `ENERGY_INDEX`, and
  raises `EVALUATION_READY` for one cycle per entity;
* in the same fetch cycle it pulses `EA_CLEAR` for that entity, and the top
  ORs `EA_CLEAR` into the EA reset.

The sum of the interval energies plus what the counter holds at the end is
therefore the total, and no cycle is lost or counted twice. `START_CALC` has
priority over a sample that is due. Set `SAMPLE_PERIOD` to 0 for the plain
on-request behaviour.

## The evaluation system

### Volatile counters

`volatile_counters` keeps three 16-bit counters in flip-flop arrays that are
cleared by `POWER_RESET`. In `RUN` they are incremented one after another, by
1, 2 and 3 respectively. Each step takes `STEP_CYCLES` = 8 cycles, so
counter 1 advances once every 24 cycles: 4.17 MHz at 100 MHz, the rate the
design is meant to have. If the state leaves `RUN`, the step freezes, and it
resumes where it stopped.

In `BACKUP` the transfer FSM writes counter *i* to NVR address *i*; in
`RECOVER` it reads them back. The FSM issues one request per free NVR slot
and holds `WE`, `ADDR` and `DIN` steady through `BUSY`. When all three words
are moved it raises `OP_DONE`, and keeps it up until the state changes. A
three-word backup or recovery takes 34 cycles.

### Backup logic

`backup_logic` is itself volatile: `POWER_RESET` holds it in `OFF`. When
power returns it always passes through `RECOVER` (the counters reload from
the NVR) before `RUN`. From `RUN` a backup is started by the policy chosen
with the `POLICY` parameter:

| Policy | Backup starts when | `PARAM` |
|---|---|---|
| DBP, dynamic | the voltage is under the backup threshold (`THRESHOLD_COMP[BACKUP_TH]`); after the backup the FSM waits in `HAZARD`, computing nothing, until the voltage is above it again | unused (the threshold is the tuning knob) |
| CBP, constant time | a timer that counts `RUN` cycles from `PARAM` down runs out; it then reloads | period in clock cycles (100 per µs) |
| TBP, task based | counter 1 is a non-zero multiple of `PARAM` and is not the value last saved or restored | task count |

`PARAM = 0` disables the CBP and TBP backups. A backup is cut short if the
power fails in the middle of it. The NVR then holds a mix of the new words
already written and older ones. This is a real effect of a per-word atomic
memory with a naive three-word backup, and the design does not hide it.

### Top level

`norm_top` wires everything as in the block map. The volatile reset is
`POWER_RESET | FPGA_RESET`. The NVR sees `POWER_RESET` only as a mode input,
and its contents are wiped by `FPGA_RESET` alone. Its ports are plain
signals:

* user inputs: `select_threshold`, `threshold_val`, `param`, `start_calc`,
  `index`, `sample_period`;
* results: `energy`, `energy_index`, `evaluation_ready`, `ea_full_array`;
* observation outputs: the EA counts, `power_reset`, `threshold_comp`,
  `voltage`, `trace_full`, `state`, `counter1_val`, NVR `BUSY` and
  `BUSY_SIG`.

The parameter defaults are the evaluated configuration:

* 100 MHz clock and an 80 ns NVR access (8 cycles);
* three counters;
* a 1250-point trace stepped every 8 cycles;
* DBP.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. With Verilator 5,
from the repository root (the trace file is opened by the relative path
`rtl/ie_voltage_trace.hex`):

```
verilator --binary --timing --assert -Irtl rtl/norm_pkg.sv \
    $(ls rtl/*.sv | grep -v norm_pkg) \
    tb/tb_norm_top.sv --top-module tb_norm_top -Mdir obj_top
./obj_top/Vtb_norm_top +verilator+rand+reset+2
```

The package must come first on the command line, and only once. Substitute any testbench
name. `+verilator+rand+reset+2` starts un-reset state at random values. The
testbenches are written to pass that way.

| Testbench | What it proves |
|---|---|
| `tb_nvre` | `BUSY` lasts exactly 8 cycles, `BUSY_SIG` one less, back-to-back access spacing, requests ignored while busy |
| `tb_reset_block`, `tb_nvr_bram` | address sweep and zero writes; RAM read/write against a model |
| `tb_nvr` | all four multiplexer modes, persistence across `POWER_RESET`, wipe on `RESET`, write completing through a power failure, 8-cycle timing |
| `tb_ie` | sample timing against the prescaler, comparators and selector over the whole trace, 75% of time in failure at 2800 mV |
| `tb_ea`, `tb_iec` | counting, saturation and clear; 3-edge latency, products against a model, periodic sweeps whose sums match |
| `tb_state_converter`, `tb_volatile_counters`, `tb_backup_logic` | state decoding; the 24-cycle counter rate, backup and recovery through a real NVR; each policy's trigger |
| `tb_norm_top` | the whole system at full default size for two trace passes (20 000 cycles) against a reference model; it counts power failures, recoveries, backups (and cut-short ones), hazard waits, NVR accesses, `BUSY_SIG` pulses, trace wraps, periodic samples and energy calculations, and fails if any never happened |
| `tb_norm_policies` | the three parameter sweeps below, one 100 µs trace per run |

## Results of the parameter sweeps

`tb_norm_policies` runs three full `norm_top` instances over the sweeps of
the original evaluation:

* DBP backup threshold from 3000 to 5010 mV in 10 mV steps;
* CBP period from 2 to 398 µs in 2 µs steps;
* TBP task count from 1 to 55.

Each run covers one pass of the trace from the FPGA reset. It checks that
counter 1 never gains more than the time in `RUN` allows. It also checks that DBP
makes more progress at the lowest threshold than at the highest. With the trace in this
repository the best settings are:

| Policy | Best parameter | Counter 1 | EA counters (cycles) | NVR energy (pJ) |
|---|---|---|---|---|
| DBP | 3000 mV | 82 | 1831 | 170 808 |
| CBP | 2 µs | 47 | 1943 | 141 768 |
| TBP | 5 | 61 | 1676 | 212 256 |

These reproduce the qualitative finding: the dynamic policy makes the most
progress, and its progress drops steadily with a higher threshold, while the
other two behave irregularly. The figures are not those originally reported:

* Counter values of 223, 191 and 184 were reported, with the DBP optimum at
  3040 mV. One 100 µs pass with 25% on-time allows at most
  2500 / 24 ≈ 104 increments, so those figures must come from a longer run.
* The trace here is only an approximation.
* The DBP optimum here is the lowest threshold, 3000 mV.
* Lowest NVR energy for DBP was reported. Here, with one pass, CBP at 2 µs
  uses less NVR energy, because its backups are short and often cut off.

## Where this RTL departs from the original, and its own choices

Taken from the original description:

* the block set and names;
* the NVR multiplexer modes and `EN OR BUSY`;
* `BUSY`/`BUSY_SIG`, persistence and the completion guarantee;
* the reset block;
* the IE's ROM, counter, prescaler, comparators and selector;
* the EA counters;
* the IEC's multiplexer, ROM, multiplier and FSM;
* the evaluation system with three counters, three policies and their
  parameter ranges;
* 100 MHz, 80 ns, 1250 points over 100 µs, 2.8 V, the 4.16 MHz counter rate.

This design's own decisions:

* **Widths and depths.** 16-bit voltages, counters and `PARAM`; 32-bit EA
  counters; 16-bit E3C; NVR depth 4.
* **Exact cycle placement.** The placement of `BUSY`, the 3-edge IEC latency
  and the 34-cycle transfer.
* **Saturating EA counters.** The meaning of `EA_FULL_ARRAY` as "saturated"
  was inferred from its name.
* **Periodic IEC mode.** Its ports, and the EA reset loading the enable bit.
* **Counter steps.** Increments of 1, 2 and 3, and the 8-cycle step that
  gives the 24-cycle period.
* **Backup-logic handshake.** The `OP_DONE` and `COUNTER1_VAL` signals
  between the backup logic and the counters.
* **`HAZARD` exit.** DBP leaves `HAZARD` when the voltage is back above the
  threshold.
* **CBP timer.** It counts `RUN` cycles only.
* **TBP.** It skips the value last saved or restored, so that it does not
  back up the same value again.
* **E3C values.** As described above.
* **The trace data.**
* **FPGA reset.** It also restarts the trace and clears the volatile logic.

Not built:

* the vendor block-RAM IP, which is replaced by a plain RAM array
  (`nvr_bram`);
* a random-trigger mode of the intermittency emulator: it is mentioned as
  possible but never specified (no rate, distribution or duration), so only
  trace replay is provided;
* the accumulation of successive `ENERGY` results in a shared memory, which
  is left to the user of the outputs;
* the FPGA board, the simulator flow and the plotting.

A note for synthesis users: the trace ROM is initialised with `$readmemh`. Some
open-source front ends do not carry that initial content into the netlist and
report the ROM as empty; FPGA vendor tools do honour it.
