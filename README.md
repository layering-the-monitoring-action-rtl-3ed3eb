# A layered hardware monitoring system

Monitoring a heterogeneous embedded platform (processors, a bus, memory,
hardware accelerators) usually means bolting on several unrelated monitors,
each tied to one component and one purpose, with an overhead that is hard
to predict. The design here follows the layered approach of Valente, Fanni,
Sau and Di Battista ("Layering the monitoring action for improved
flexibility and overhead control", work in progress): the monitoring
action is split into the classic phases *event trigger → data capture and
filtering → decision → reaction*, and each phase is a separate hardware
layer. Only the first two layers know anything about the platform being
watched; the decision and reaction layers are generic. Event instances
produced at one trigger place can feed several monitors, so requirements
that look at the same place share hardware.

```
 platform        event trigger   capture & filtering        transport     decision      reaction
 trigger lines ─► adapter ──────► nucleus (EVMON, TMON) ─┐
                                  nucleus (TMON)        ─┼─► GMI ─────────► GM ─────────► interrupt ─► irq
                                  nucleus (EVMON, EVMON)─┘   (stream)       (rules)       controller
```

This RTL implements that chain in the configuration that the original
evaluation calls **Y1**. There, a multiply-and-accumulate accelerator is
monitored for three requirements:

| requirement | what is watched | monitor (width) | where | metric id |
|---|---|---|---|---|
| data-transfer fault detection | data beats into the accelerator, per task | EVMON, 32 bit, programmable | interconnect | 0 |
| execution time of the task | start → done | TMON, 64 bit | data manager | 1 |
| computation fault detection | MAC operations and result writes, per task | 2 × EVMON, 10 bit | accelerator core | 2, 3 |

The monitor counts and widths in this table come from the original
evaluation ("1E32 (P)", "1T64", "2E10"). The paper says what each layer
does but not how it is built. Everything inside the layers is therefore
this design's own choice: the line assignment, the latch-on-done counting,
the GMI's change-driven round-robin stream, the rule format of the global
monitor, and the register map. Each choice is flagged below.

## Files

| file | block |
|---|---|
| `rtl/mon_pkg.sv` | shared types: `metric_t`, `reg_req_t`, `rule_mode_e`, address regions |
| `rtl/adapter.sv` | event trigger layer |
| `rtl/evmon.sv`, `rtl/tmon.sv` | event monitor, time monitor |
| `rtl/nucleus.sv` | a group of EVMONs/TMONs at one trigger place, with registers |
| `rtl/gmi.sv` | global monitor interface |
| `rtl/gm.sv` | global monitor (decision) |
| `rtl/intc.sv` | interrupt controller (reaction) |
| `rtl/hw_mon_layer.sv` | top level, configuration Y1 (Y2/Y3 by parameter) |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_hw_mon_layer` end to end, `tb_configs` for Y2/Y3 |

## Event instances: the adapter

The platform connects to the layer through `ev_raw`. The trigger lines have
fixed meanings in the top:

| line | meaning | kind |
|---|---|---|
| 0 | one data beat on the interconnect into the accelerator (e.g. `valid & ready`) | level |
| 1 | accelerator start | edge |
| 2 | accelerator done | edge |
| 3 | one multiply-accumulate operation in the core | level |
| 4 | one result write by the core | level |

The adapter registers the lines and converts them into *event instances*,
which are one-cycle pulses on `ev_inst`. A level line gives one instance for
each cycle it is high. An edge line (selected by `EDGE_MASK`) gives one
instance when it rises, so a start or done signal can stay high for any
number of cycles. Instances appear one clock after the line is sampled.
All monitors see every line. Which lines a monitor uses is set by
parameters and, for a programmable EVMON, by a register.

The design assumes that the platform and the monitor share one clock. It
has no clock-domain crossing.

## Turning instances into metrics: EVMON and TMON

A *metric* (`mon_pkg::metric_t`) is a 64-bit value, a `final_v` flag and
an update bit `upd` that toggles every time the monitor produces a new
final value. Narrower monitors are zero-extended.

**EVMON** counts the instances of one line with a `W`-bit counter that
saturates, so a fault check never sees a small wrapped count. Its count can
be exported in one of two ways:

* *running* (`LATCH_SEL = -1`): the value is the live count and is never
  final;
* *latched* (`LATCH_SEL = line`): an instance on the latch line copies the
  count into the exported value and marks it final. The copy includes an
  instance that arrives in that same cycle. The live count then restarts
  from zero. The top latches on *done*, so every task yields one final
  "events per task" value, which the global monitor can compare with the
  number expected.

With `PROG = 1` (the programmability marked "P" in the original
evaluation), software can enable the monitor, clear it and choose which
line it counts. In the top, the interconnect EVMON is programmable and the
core EVMONs are fixed.

**TMON** measures cycles from a start instance to a done instance. If start
is seen in cycle *t0* and done in cycle *t1*, the final value is *t1 − t0*
and appears in cycle *t1 + 1*. Start and done pass through the same adapter
delay, so this is also the distance between the rising edges of the
platform's own start and done signals. While the measurement runs, the
exported value is the time elapsed so far and is not final. This is what
lets a watchdog act before done ever arrives. A new start restarts the
measurement.

A **nucleus** instantiates `N_EVMON` EVMONs and `N_TMON` TMONs on the same
instances. It exports their metrics in that order and gives software a
small register window. The top has three nuclei, one for each trigger place
of Y1.

## Transport: the global monitor interface

The GMI gathers all metrics (four in Y1) and sends them to the global
monitor as a stream of `(id, metric)` records under a valid/ready
handshake. It sends a record only when there is news:

* For each metric, the GMI keeps the last record it sent. A metric whose
  current record differs from that copy is *dirty*.
* When the output register is free (empty, or being accepted in this
  cycle), the GMI loads the next dirty metric after the one it sent last,
  in round-robin order. It records that value as sent in the same cycle.
* The output stays stable while `out_valid` is high and `out_ready` is
  low. An assertion in `gmi.sv` enforces this.

What this means in practice:

* A latched count or a finished time is forwarded once, one cycle after it
  changes, unless other metrics are ahead of it in the round-robin.
* A running TMON changes every cycle, so it is dirty all the time. It is
  resent as often as the round-robin allows, at least once every N_MET
  transfers. The global monitor therefore sees a running time at most
  about N_MET cycles stale.
* When two tasks in a row end with the same count or time, the record
  still changes, because the update bit toggles. The second result is
  therefore forwarded and checked again. This matters after software has
  cleared an interrupt: a fault that repeats exactly still raises a new
  one.

In the top, the global monitor is always ready. The back-pressure path is
exercised only by the GMI's own testbench.

## Decision: the global monitor

For every metric id, the GM keeps:

* the last record received;
* a count of the records received;
* one rule: a comparison (`>`, `<`, `!=`, `==`) with a 64-bit threshold,
  optionally applied only to final records;
* a sticky violation flag.

A record that breaks an enabled rule sets the flag and sends a one-cycle
pulse on `viol[id]`, one cycle after the record is accepted. The
requirements of the evaluation map onto rules as follows:

| requirement | rule |
|---|---|
| transfer fault | metric 0, final only, `!=` expected beats |
| watchdog | metric 1, not final only, `>` limit (fires while the task still runs) |
| computation fault | metrics 2/3, final only, `!=` expected MACs / writes |
| execution time, throughput | no rule: software reads the time and the counts (throughput = beats ÷ time) |

The single-comparison rule format is this design's own choice. The paper
only says that the GM makes the decision and triggers a reaction. No
hardware divider or ratio rule is built for throughput.

## Reaction: the interrupt controller

Each `viol` pulse sets a sticky pending bit. `irq` is high while some
pending bit is also enabled. `irq_id` gives the lowest such source, which
is also the metric id. Software clears pending bits by writing ones. If a
request and a clear hit the same bit in the same cycle, the bit stays set,
so no event is lost.

## Latency of the watchdog

Say the watchdog limit is L cycles. The interrupt follows the TMON value
crossing L after a pipeline of registers:

* the adapter (1 cycle);
* the counter (1 cycle);
* the wait for the GMI round-robin to come back to the TMON (0 to N_MET − 1
  cycles);
* the GMI output register (1 cycle);
* the GM's violation register (1 cycle);
* the pending bit (1 cycle).

In the Y1 end-to-end test with L = 200, `irq` rises 206 cycles after the
platform's start edge. The test accepts any value from L + 1 to L + 10.

## Register map

There is one word-addressed port, `req` (`wr`, `rd`, `addr[11:0]`,
`wdata[31:0]`). Read data is combinational and is zero when `rd` is low.
The port is deliberately simple. On a real platform it would sit behind a
bus slave, such as AXI-Lite, which is not part of this RTL.

| address | block |
|---|---|
| `0x000–0x0FF` | interconnect nucleus |
| `0x100–0x1FF` | data-manager nucleus |
| `0x200–0x2FF` | core nucleus |
| `0x400–0x4FF` | global monitor |
| `0x800–0x80F` | interrupt controller |

Nucleus window (monitor *k* at `4k`; EVMONs first, then TMONs):

| offset | EVMON | TMON |
|---|---|---|
| +0 | bit0 enable (write 1 = enable; bit1 written 1 = clear), bit31 final | bit0 running, bit31 final |
| +1 | event line select | 0 |
| +2 / +3 | value[31:0] / value[63:32] | elapsed[31:0] / elapsed[63:32] |

Writes to a nucleus have an effect only for a programmable one (`PROG = 1`).

Global monitor window (metric *m* at `8m`): +0 rule control (bit0 enable,
bit1 final only, bits 3:2 mode: 0 `>`, 1 `<`, 2 `!=`, 3 `==`), +1/+2
threshold low/high, +3/+4 last value low/high, +5 status (bit0 violated,
write 1 to clear; bit1 last record final), +6 records received.

Interrupt controller: 0 pending (write 1 to clear), 1 enable, 2
`{irq, 23'b0, irq_id}`.

## Parameters and configurations

Top `hw_mon_layer`: `N_EV = 5`, `INT_W = 32`, `DM_W = 64`, `CORE_W = 10`.
The widths are those of the evaluation. `HAS_INT`, `HAS_DM` and `HAS_CORE`
choose which nuclei are built:

* Y1 = all three (default);
* Y2 = `HAS_INT = 0` (execution time, computation fault, watchdog);
* Y3 = `HAS_CORE = 0` (transfer fault, watchdog, throughput).

A missing nucleus exports a constant zero metric. Its registers read as
zero and its GM rule never fires. The interrupt controller and the GM keep
four slots in every configuration.

The top also brings out the GMI stream (`gmi_valid`, `gmi_id`) and its
dirty vector (`gmi_dirty`) for observation.

With 10-bit core counters, a task may perform at most 1023 MAC operations
or result writes before the count saturates. The original evaluation does
not give its task size.

## Departures from the original work and what is not built

* **Register port.** The original evaluation builds on a Zynq platform with
  an AXI bus. Here the register port is generic. The processor, the DMA,
  the DRAM and the MDC-generated accelerator are not part of the RTL. The
  testbenches play their part by driving the trigger lines.
* **Other trigger places.** The reference platform also has debug and
  performance trigger places in the processor (program counter, ALU,
  branch predictor, trace, cache) and in memory. Nuclei for these could be
  built from the same EVMON/TMON parts, but the evaluation does not use
  them, so no adapter line is assigned to them.
* **Throughput.** Throughput is computed by software from two metrics. No
  hardware rule checks it.
* **Design choices.** Everything called a design choice above (saturation,
  latching, the stream format, the rule format, the register layout, the
  reset values) could differ from the authors' own implementation. The
  area, power and software-overhead figures of the evaluation cannot be
  compared with this RTL.

## Verification

Each block has a self-checking testbench that compares it against a
reference computed in the testbench:

| testbench | what it checks |
|---|---|
| `tb_adapter` | each cycle's instances for random level and edge lines |
| `tb_evmon` | per-task latching, running counts, saturation at 8 and 10 bits, enable, clear, select |
| `tb_tmon` | exact times t1 − t0, running values, restart, a done with no start |
| `tb_nucleus` | metric order, every register, reprogramming |
| `tb_gmi` | change detection, round-robin order, the hold rule under random back-pressure, delivery of final values |
| `tb_gm` | every rule mode, final-only rules, pulse timing, sticky flags, random records against a reference |
| `tb_intc` | pending, enable, `irq` and `irq_id` each cycle under random traffic |
| `tb_hw_mon_layer` | Y1 at default parameters end to end (see below) |
| `tb_configs` | Y2 and Y3 side by side: each catches only the faults it monitors, both watchdogs fire |

`tb_hw_mon_layer` runs the top through:

* clean tasks, with execution time and counts checked against the cycles
  driven;
* a lost beat (transfer fault);
* a missing MAC (computation fault);
* a hung task, with the watchdog interrupt checked while the task still
  runs and checked for latency;
* a reprogrammed interconnect monitor;
* interrupt clears.

It fails if any of these mechanisms, or GMI contention, never happens.
Every testbench prints one line `TB_RESULT checks=N failures=M` and has a
cycle watchdog.

To run one with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hw_mon_layer \
    -y rtl -y tb +libext+.sv -Irtl rtl/mon_pkg.sv tb/tb_hw_mon_layer.sv
./obj_dir/Vtb_hw_mon_layer
```

Replace the top-module name to run any other testbench. To lint the design:
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/mon_pkg.sv rtl/hw_mon_layer.sv`.
The remaining lint warnings are unused bits and parameters, loops that run
zero times in a nucleus without EVMONs or without TMONs, and the
asynchronous reset that the GMI assertion also uses as its disable
condition.
