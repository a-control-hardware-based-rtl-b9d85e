# A synchronous pattern generator for atomic-physics control

An atomic-physics experiment is a long, precisely timed sequence of actions:
lasers are shuttered, magnetic fields ramped, RF frequencies changed, cameras
triggered. Each action must happen on a known clock edge, reproducibly, for
seconds at a time. This design meets that need with a very plain structure.

* One master module holds a list of **instructions**. Each instruction is a
  bus write plus a wait time.
* The master module plays the instructions out on a shared, write-only
  **parallel bus**: 7 address bits, 16 data bits and a strobe.
* Every output module on the bus (digital lines, DAC channels, RF
  synthesizers) is little more than an address decoder and a register.
  Its output changes only at a strobe.

Since every bus transfer sits on the 10 MHz **master clock (MC)**, all outputs
of the system move in lock-step on a 100 ns grid. There is no cross-module
skew to calibrate, and no jitter from a PC operating system. The PC is used
only to load the program and to start it.

The RTL here holds three parts:

* The complete FPGA logic of the master module, called the digital pattern
  generator or DPG.
* The bus-side logic of three kinds of output module.
* A top level that puts them on one bus.

## System picture

```
 host byte stream ─┐                                   ┌─ SDRAM controller
 (USB bridge side) │        dpg_core (FPGA logic)      │  (16-bit, bursts of 4)
                   ▼                                   ▼
                 mfsm ──write one instr──►  mem_if ◄──────► mem_* port
                   │  ▲ status                 │ prefetch
              GO/ARM/STOP                      ▼
                   │                      instr_fifo (64 x 512)
                   ▼                           │
    Trg ─► trig_in ──►  sfsm  ◄────────────────┘
    Clk ─► mc_gen  ──►   │  (MC rise/fall ticks)
                         ▼
          system bus: addr[6:0], data[15:0], strobe
             │              │                │
        do_module       ao_module        rfo_bus_if
        16 TTL lines    8 x 16-bit codes   LUT index + enables
                        (to a DAC)         (to the RF module's MCU)
```

Everything in `dpg_core` runs on one clock, `clk`: the FPGA's internal
f_i = 200 MHz. The MC is not a clock in this design. It is a level, sampled
at f_i and turned into one-cycle `mc_rise` and `mc_fall` ticks, and the
sequencer acts only on those ticks. The MC comes from one of two sources:

* The internal source divides f_i by `DIV` = 20, which gives 10 MHz.
  `DIV` may be odd, e.g. 5 for a 40 MHz MC. The MC is then high one f_i
  cycle longer than it is low.
* The external `Clk` input passes a two-flop synchronizer first. Its period
  must be longer than about 4 f_i cycles.

`ext_clk_sel` picks the source. It is meant to be a static strap.

The output modules are clocked by the bus strobe itself. Each one latches
the data bus at the strobe's rising edge when the address matches its own.
This is the same rule a hardware module built from discrete logic follows.

## The instruction word

An instruction is 64 bits, stored as four 16-bit SDRAM words:

| bits    | field    | meaning |
|---------|----------|---------|
| 63:59   | ctrl     | bit 59 strobe enable, bit 60 break point, bit 61 last instruction, 62–63 unused (zero) |
| 58:23   | interval | MC cycles from the previous instruction to this one (36 bits) |
| 22:16   | addr     | bus address |
| 15:0    | data     | bus data |

`dpg_pkg::make_instr()` packs the fields.

Storing intervals rather than absolute times keeps the field short. 36 bits
at 10 MHz span about 6872 s between two writes. Even longer gaps are made
from **dummy** instructions: an instruction whose strobe-enable bit is clear
takes time but writes nothing.

The field widths are from the original description of the hardware. The bit
positions and the meaning of each control bit are this design's choice.

## Timing of execution (`sfsm`)

This is the part that has to be exactly right, so here it is in full.

* **Interval counting.** Each instruction has an interval N. N = 0 is
  treated as 1. The instruction executes N MC rising edges after the
  previous instruction executed. For the first instruction, and for the
  first after a break point, N is counted from the MC edge at which the
  run started or resumed.
* **Bus write.** At the executing MC rising edge, address and data go onto
  the bus.
* **Strobe.** The strobe rises at the next MC falling edge and falls at the
  following rising edge. It is therefore half an MC period (50 ns) wide,
  and its rising edge falls in the middle of a 100 ns window in which
  address and data are stable. The bus holds its last address and data
  between writes.
* **Fetch.** The next instruction is taken from the FIFO at the same edge
  at which the current one executes. Instructions with interval 1 therefore
  run back to back: one bus write per MC cycle, indefinitely.
* **Break point.** When an instruction with the break-point bit executes,
  the sequencer halts with the bus held. It resumes on a software GO, or,
  when the trigger source is external, on a rising edge of `Trg`.
  * `Trg` is sampled at f_i, so short pulses are not missed. It takes
    effect at the next MC rising edge.
  * With interval 1 on the next instruction, the worst case from the `Trg`
    edge to the new bus value is 2 MC periods, i.e. 200 ns, plus up to
    3 f_i cycles (15 ns) for the input synchronizer.
* **Starting a run.** There are two ways:
  * GO starts at once, or as soon as the FIFO is primed.
  * ARM waits for a `Trg` edge.
* **Stopping a run.** A run ends in one of three ways:
  * after the instruction carrying the `last` bit;
  * by "stop after next", which ends the run after the next instruction
    executes;
  * by "stop now", which ends it immediately.
* **Underrun.** If the FIFO is ever empty when an instruction is due, the
  sequencer waits for it and sets a sticky underrun flag. The flag is
  reported in the status byte and cleared at the next start. At the
  default sizes this does not happen, even with SDRAM refresh. It can only
  be forced by stalling the memory.

## Feeding the sequencer (`mem_if`, `instr_fifo`)

Programs are loaded one instruction at a time, at any address and in any
order. To edit a program, only the instructions that changed need to be
rewritten.

A "program loaded" command starts the prefetch. The prefetch also restarts
by itself whenever a run ends, so the same program can be run again at
once. A prefetch proceeds like this:

1. Wait for any read bursts still in flight, and drop their data.
2. Flush the FIFO.
3. Read from instruction 0 upward. Each instruction is one 4-word burst,
   word 0 (bits 15:0) first.
4. Stop after the instruction with the `last` bit, or at the end of memory.

Up to `MAX_OUTST` = 4 read bursts may be outstanding. A new one is issued
only if the FIFO has room for every instruction already requested, so the
FIFO cannot overflow. A pending write goes before reads.

A run may start once the FIFO is **primed**: it holds `PRIME_LEVEL` = 256
instructions, or the whole program if that is shorter. From then on the
memory delivers an instruction in far fewer f_i cycles than the 20 the
sequencer needs at full rate. The 512-deep FIFO therefore rides through
SDRAM refresh and other stalls.

The memory port (`mem_*`) is this design's own simple protocol towards a
vendor SDRAM controller:

* **Command channel:** `mem_cmd_valid`/`mem_cmd_ready`, with `mem_cmd_we`
  and a word address that is a multiple of 4.
* **Write beats:** `mem_wvalid`/`mem_wready`, four per write command.
* **Read beats:** `mem_rvalid`, four per read command, returned in order
  and without back-pressure.

A different controller needs a thin adapter.

## Host protocol (`mfsm`)

The host link is an 8-bit byte stream in each direction, with valid/ready
handshakes. This is what the FPGA sees from a USB 2.0 bridge
microcontroller. Every command is two ASCII characters:

| command | parameters | action |
|---------|------------|--------|
| `TI`    | –          | software (internal) trigger mode |
| `TE`    | –          | external trigger mode (`Trg` resumes break points) |
| `AR`    | –          | arm: start the run on the next `Trg` edge |
| `GO`    | –          | start, or resume from a break point |
| `SN`    | –          | stop after the next instruction |
| `SI`    | –          | stop immediately |
| `WI`    | 3 address bytes, 8 instruction bytes, MSB first | write one instruction |
| `PL`    | –          | program loaded: start the prefetch |
| `RS`    | –          | read status |

**Status reply.** `RS` returns one byte:

| bits | content |
|------|---------|
| 1:0  | run state: 0 idle, 1 waiting for trigger, 2 running, 3 at a break point |
| 2    | underrun seen |
| 3    | external trigger mode |
| 7:4  | zero |

When the state is running or break point, three more bytes follow. They
give the number of instructions executed in this run, MSB first.

Unknown commands are ignored. The four command groups are those of the
original hardware: trigger control, execution control, memory access and
status. The letters and byte formats are this design's own.

## Output modules

* **`do_module`** is a 16-line digital output: an address comparator and a
  16-bit register. It is clocked by the strobe and has an asynchronous
  reset.
* **`ao_module`** is the bus side of an 8-channel, 16-bit DAC board. It
  answers 8 consecutive addresses, one per channel, starting at a base
  address that is a multiple of 8. It holds one code per channel for a
  parallel-input DAC. The DAC and the analog side are not part of the RTL.
* **`rfo_bus_if`** is the bus interface (a CPLD on the real board) of an RF
  output module.
  * It captures the bus word at its address and decodes it:
    * bits 9:0: an index into the module's 1024-entry frequency/amplitude
      table;
    * bit 10: reprogram the synthesizer with that entry;
    * bit 11: issue the synthesizer's update pulse.
  * The word crosses to the module microcontroller's clock by a toggle
    handshake: `cmd_valid` until `cmd_ack`.
  * If a second word arrives before the first is acknowledged, the newest
    word is kept and `overrun` is flagged.
  * The microcontroller firmware and the synthesizer chips are outside the
    RTL. The bit positions of the two enables are this design's choice.

`sch_top` puts one of each on the bus:

| module      | address |
|-------------|---------|
| DO          | 0       |
| AO channels | 8–15    |
| RFO         | 16      |

The bus itself is also a top-level output, so further modules can be added
outside.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `DIV` | 20 | `mc_gen`, tops | f_i / MC for the internal MC (200 MHz / 10 MHz) |
| `IADDR_W` | 23 | `mem_if`, `mfsm`, tops | instruction address bits: 2^23 = 8 M instructions = 64 MB |
| `FIFO_DEPTH` | 512 | `instr_fifo`, `mem_if`, tops | instruction FIFO depth |
| `MAX_OUTST` | 4 | `mem_if`, tops | read bursts in flight (own choice) |
| `PRIME_LEVEL` | 256 | `mem_if`, tops | FIFO level needed before a run starts (own choice) |
| `CNT_W` | 24 | `sfsm`, `mfsm` | width of the executed-instruction counter |
| `NCH` | 8 | `ao_module` | AO channels |
| `DO_ADDR`, `AO_BASE`, `RFO_ADDR` | 0, 8, 16 | `sch_top` | bus address map (own choice) |

Bus and instruction field widths are fixed in `dpg_pkg`.

## Where this departs from the original hardware

* **The internal MC.** It is divided down from f_i. The original board
  synthesizes it from a quartz oscillator; the frequency is the same.
* **The FIFO.** It is written as a plain single-clock array. The original
  uses a vendor-generated dual-port FIFO.
* **Interfaces the original does not specify.** These are all this
  design's own:
  * the instruction bit layout;
  * the host command letters and the status byte;
  * the memory port protocol;
  * the priming level and outstanding-read limit;
  * the RFO enable bit positions;
  * the address map;
  * the reset behaviour (active-low asynchronous everywhere).
* **Choices where the original gives the behaviour but not the rule:**
  * where the strobe sits within the MC cycle;
  * that a break point can be resumed by `Trg` only in external trigger
    mode;
  * that GO also starts or resumes a run in external trigger mode (the
    original describes GO for internal mode and ARM for external mode);
    this allows a software start with `Trg`-released break points;
  * waiting (rather than aborting) on an underrun;
  * the automatic prefetch restart after every run.
* **Not part of the RTL:**
  * the USB bridge and its firmware;
  * the SDRAM chip and its controller (a behavioural model of both is in
    `tb/sdram_model.sv`);
  * the PC software;
  * the RF module microcontroller;
  * the DAC and synthesizer chips;
  * any analog circuitry.
* **The larger board variant.** The larger FPGA board, with 64 M
  instructions, is reached by setting `IADDR_W` = 26. It is not the
  default.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog. The memory is the
behavioural model `tb/sdram_model.sv`. It has a fixed read latency and
periodic refresh stalls, a `hold` input to stall it completely, and
backdoor `poke_instr`/`peek_instr` access. Host traffic is generated by the
tasks in `tb/dpg_host_tasks.svh`.

* **`sch_top_tb`** runs the whole system at default parameters, with a
  16 K-instruction memory model. It covers:
  * loading by host commands, and a re-run of the same program;
  * a sequence of the same shape as a published break-point
    demonstration: 6, 30, 4 and 4 toggles, three break points resumed by
    `Trg`, with the Trg-to-output latency checked against 2 MC periods;
  * a break point released by GO;
  * start by ARM plus `Trg`;
  * both stops;
  * a forced underrun;
  * external MC;
  * writes to all three output modules;
  * an RF preload (program only), then an update-only write centred in a
    DO pulse two MC periods wide.

  It counts each of these mechanisms and fails if any never happened.
* **`sch_full_tb`** is the full-size run, with `sch_top` at its default
  parameters.
  * It toggles a DO line once per MC cycle for 2^23 instructions, filling
    the whole 8 M-instruction memory.
  * It checks that all 8,388,608 transitions land exactly 100 ns apart,
    over 0.839 s of simulated time, with no underrun despite about 10^5
    refresh stalls.
  * It takes about 1.5 minutes of wall time.
* **`sch_bp_tb`** runs the break-point sequence at its real sizes, with
  default parameters.
  * A DO line commutes every 2 ms. The sequence halts after 6, 30 and 4
    commutations, then makes 4 more.
  * It is started by GO, and each halt is released by a 20 Hz square wave
    on `Trg`.
  * A `Trg` edge that falls while the sequence is running must not release
    the following break point.
  * Each resume appears on the bus 205 ns after its `Trg` edge.
  * It takes about 20 s.
* **`sch_rate_tb`** is the same kind of burst with the MC raised to
  40 MHz (`DIV` = 5), over 2^17 instructions.
  * Every write lands exactly 25 ns after the previous one, with no
    underrun.
  * This shows the memory path has headroom well beyond 10 MHz.
  * With `DIV` = 4 (50 MHz), the one-word-per-cycle memory model can no
    longer keep up, and the run underruns.

To simulate with plain Verilator 5 from the directory holding `rtl/` and
`tb/` (the package first):

```
verilator --binary --timing -Irtl -Itb -Wno-fatal \
    rtl/dpg_pkg.sv $(ls rtl/*.sv | grep -v dpg_pkg) \
    tb/sdram_model.sv tb/sch_top_tb.sv --top-module sch_top_tb -o sim
./obj_dir/sim
```

For a block test, use its testbench and top module name instead. The tests
assume two-state simulation with random initial values, and reset
everything they read.
