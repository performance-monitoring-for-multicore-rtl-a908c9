# ABACUS: a hardware performance monitor for multicore FPGA systems

A multicore soft-processor system on an FPGA is hard to tune. Profiling in
software perturbs the thing being measured, and sampling tools see only a
fraction of events. ABACUS is a separate hardware block that sits beside the
processors. It watches probe signals taken straight from each CPU and counts,
times or records the events of interest, all in parallel and without slowing
the processors down. Software on any CPU talks to it like any other bus
peripheral:

1. configure it;
2. arm it;
3. let a trigger open and close a monitoring window;
4. read the results back, either through registers or from a trace buffer
   that ABACUS fills in main memory by DMA.

The design has three layers:

```
        system bus (AXI4-Lite slave)         memory (DMA writes)      interrupt line
                  |                                 ^                      ^
  +---------------+---------------------------------+----------------------+-------+
  | external      | abacus_bus_if                   | abacus_dma           | abacus_irq
  | interfaces    |                                 |                      |
  |               |              CPU probes --> abacus_cpu_snoop (1 register stage)
  +---------------+-------------------------------------------------------------------+
  | core control  abacus_ctrl: registers, time stamp, abacus_trigger (window FSM),    |
  |               read multiplexer for the unit results                               |
  +-----------------------------------------------------------------------------------+
  | monitoring    one abacus_event_filter per unit, then                              |
  | units         0 trace  1 latency  2 stall  3 memory-access histogram  4 code profile |
  +-----------------------------------------------------------------------------------+
```

`abacus_top` wires all of these together. Its defaults are:
- 4 CPUs;
- a 512-record trace FIFO;
- a 32-bin latency histogram;
- a 64-bin address histogram;
- a 64-bin code profile.

Each unit can be left out at build time (`UNIT_PRESENT`). ABACUS can also come
out of reset already armed with some units enabled (`BOOT_ARM`,
`BOOT_UNIT_EN`), so it measures from power-up without any software.

## What the CPUs must provide: the probe bundle

Each CPU drives one `abacus_pkg::cpu_dbg_t` on `cpu_dbg_i[c]`:

| field | meaning |
|---|---|
| `mem_req` | the CPU issues a data memory access in this cycle |
| `mem_we` | that access is a write |
| `mem_addr[31:0]` | its physical address |
| `mem_done` | the CPU's outstanding data access completes in this cycle |
| `stall` | the pipeline is stalled in this cycle |
| `pid[7:0]` | ID of the process or thread running on the CPU |
| `ins_valid` | an instruction completes in this cycle |
| `ins_addr[31:0]` | its address (program counter) |

`abacus_cpu_snoop` samples all the bundles into one register stage. The only
load on the processor's own nets is therefore a flip-flop input. All
monitoring happens one cycle after the event, on the registered copy.

A CPU whose bit in `CPU_EN` is 0 has its event flags cleared at this stage.
None of the units sees it. The latency unit assumes an in-order core with at
most one data access outstanding per CPU, as in simple soft processors.

## The monitoring window (the part that needs care)

Every unit counts only while the trigger says `running`. `abacus_trigger` is
a four-state machine:

```
   IDLE --arm--> WAIT --start condition--> RUN --stop condition--> DONE
     ^             ^                                                 |
     +---- arm=0 (from any state)   CTRL.clear (any armed state) ----+
                                DONE --INSTR start condition--> RUN
```

Start and stop conditions are chosen separately (`START_MODE`/`START_VAL`,
`STOP_MODE`/`STOP_VAL`):

| mode | start (in WAIT) | stop (in RUN) |
|---|---|---|
| 0 IMMEDIATE | next cycle | never by itself |
| 1 CYCLES | after `max(VAL,1)` cycles in WAIT | after `max(VAL,1)` cycles in RUN |
| 2 ADDR | an enabled CPU accesses address `VAL` | an access to `VAL` (that access is still counted) |
| 3 MANUAL | only the `CTRL.start` command | only `CTRL.stop` |
| 4 INSTR | an enabled CPU completes the instruction at `VAL`; also reopens the window from DONE | the instruction at `VAL` completes |

In every mode the `start` and `stop` command bits also act.

INSTR mode measures a function every time it runs. Set `START_VAL` to its
entry address and `STOP_VAL` to its return instruction. Each call then opens
the window and each return closes it. The units keep accumulating over all
calls, because only CTRL.clear resets them.

Cycle accounting, which the testbenches check:
- With CYCLES stop, the window lasts exactly `STOP_VAL` cycles.
- With an ADDR start, the window opens on the cycle after the start access
  appears on the registered probes. That is two cycles after the access on
  the CPU's own pins, because of the snoop register.

The 64-bit time stamp (`TS_HI:TS_LO`) counts cycles since ABACUS was armed. It
is held at 0 while ABACUS is disarmed, and `CTRL.clear` restarts it. Trace
records carry this stamp, so times are relative to arming, not to the window.

`CTRL.clear` is a soft reset of the units:
- it empties the trace FIFO;
- it zeroes every counter and histogram;
- it restarts the DMA ring at its base;
- it sends the trigger back to WAIT.

Configuration registers are kept. The usual sequence is:
1. configure everything;
2. write `CTRL = 0x3` (arm + clear);
3. wait for the STOP interrupt or poll `STATUS`;
4. read the results;
5. write `CTRL = 0` to disarm.

## Choosing what each unit sees: event filters

Each unit has its own configuration block and its own `abacus_event_filter`.
Units can therefore watch different things at the same time. For example, one
unit can trace CPU 0 in a buffer region while another counts stalls of process
7 on CPUs 1 to 3. A CPU's event passes to a unit when all of these hold:
- the window is open;
- the unit is enabled;
- the CPU's bit is set in the unit's `cpu_mask`;
- if `pid_en` is set, the CPU's current `pid` equals the unit's `pid`.

For memory events the address must also satisfy
`addr_lo <= addr <= addr_hi` (inclusive). For instruction events (code
profile), `ins_addr` must satisfy the same condition.

The filter is combinational and needs no extra cycle.

## The monitoring units

Counters are flip-flops, not block RAM. All CPUs can then update the same
counter in the same cycle: a bin adds the number of CPUs that hit it. Results
are read over the bus, one 32-bit word at a time. Unit `u` has its result
window at `0x1000*(u+1)`, where word `i` is at offset `4*i`.

**Trace (unit 0, `abacus_trace_unit`).** Every selected access becomes a
128-bit record. The DMA writes a record to memory as four words:

| word | contents |
|---|---|
| 0 | address |
| 1 | `{we, 7'b0, cpu[7:0], 8'b0, pid[7:0]}` |
| 2 | time stamp [31:0] |
| 3 | time stamp [63:32] |

One record enters the FIFO per cycle. If several selected CPUs access memory
in the same cycle, the lowest-numbered one is recorded and the others are lost.
An access is also lost when the FIFO is full. Every lost access:
- is counted;
- raises the DROP interrupt source.

Narrow the CPU mask or address window if losses matter.

Result words:

| word | contents |
|---|---|
| 0 | records written |
| 1 | accesses lost |
| 2 | FIFO fill level |

**Latency (unit 1, `abacus_latency_unit`).** Each access is timed from the
cycle its `mem_req` is seen to the cycle its `mem_done` is seen. The latency is
0 if both fall in the same cycle, and the timer saturates at 65535. The filter
decides at request time whether the access is counted. The latency goes into
bin `min(latency >> shift, BINS-1)`, so the last bin also collects everything
beyond the range.

Result words:

| word | contents |
|---|---|
| 0..31 | bins |
| 32 | largest latency seen |
| 33 | number of accesses timed |
| 34 | sum of their latencies (for the mean) |

**Stall (unit 2, `abacus_stall_unit`).** Counts the cycles of the open window,
and for each CPU the cycles in which it was stalled and selected by the
filter. The address window does not apply to this unit. All counters are
64-bit.

Result words:

| word | contents |
|---|---|
| 0/1 | window cycles, low/high |
| 2+2c / 3+2c | stall cycles of CPU c, low/high |

**Memory-access histogram (unit 3, `abacus_mem_hist_unit`).** Counts selected
accesses by region, using bin `(addr - addr_lo) >> shift`. With the 64 bins
and `shift = 6`, for example, this is a 4 KiB window cut into 64-byte lines.
Accesses inside `[addr_lo, addr_hi]` that fall beyond the last bin go to the
overflow counter.

Result words:

| word | contents |
|---|---|
| 0..63 | bins |
| 64 | overflow |
| 65 | total |

**Code profile (unit 4, a second `abacus_mem_hist_unit`).** This is the same
histogram as unit 3, but fed with the addresses of completed instructions. It
shows where the selected CPUs spend their instructions, region by region of
code. Its result words follow the same layout as unit 3.

## Getting the trace out: the DMA ring buffer

`abacus_dma` pops records from the trace FIFO and writes them as 32-bit words
to a ring buffer in main memory:
- Word `k` goes to `DMA_BASE + wptr`.
- `wptr` advances by 4 and returns to 0 when it reaches `DMA_SIZE`.
- `DMA_SIZE` is in bytes and must be a multiple of 16. Its reset value is
  4096.

`DMA_WPTR` shows the next byte offset, so software knows where the newest
data ends. Each wrap pulses the WRAP interrupt source. Software that must see
every record should drain half the buffer on each wrap, or make the buffer
large enough for the whole run.

The write port is a simple valid/ready word port (`m_wr_valid`, `m_wr_addr`,
`m_wr_data`, `m_wr_ready`), to be adapted to the memory controller or
interconnect. Once `m_wr_valid` is raised, it and the address and data stay
stable until `m_wr_ready`; an assertion checks this. At best the DMA moves one
record every five cycles: four data words plus one cycle to fetch the next
record. Sustained trace traffic above that rate fills the FIFO and loses
records.

## Interrupts

`IRQ_STATUS` bits are set by events and cleared by writing 1 (W1C). The `irq`
output is the OR of `IRQ_STATUS & IRQ_MASK`, registered.

| bit | event |
|---|---|
| 0 START | window opened |
| 1 STOP | window closed |
| 2 WRAP | DMA ring wrapped |
| 3 DROP | a trace record was lost |
| 4 WATCH | an enabled CPU accessed `WATCH_ADDR` |

The WATCH source lets a program signal a situation of interest just by
touching an address.

## Register map (byte offsets in the ABACUS window)

| offset | name | access | contents |
|---|---|---|---|
| 0x000 | CTRL | rw | [0] arm; [1] clear, [2] start, [3] stop: commands, read as 0 |
| 0x004 | STATUS | r | [0] running, [1] armed, [3:2] trigger state (0 IDLE, 1 WAIT, 2 RUN, 3 DONE) |
| 0x008/0x00C | TS_LO/TS_HI | r | time stamp |
| 0x010/0x014 | START_MODE/START_VAL | rw | start condition |
| 0x018/0x01C | STOP_MODE/STOP_VAL | rw | stop condition |
| 0x020 | IRQ_STATUS | r/W1C | interrupt sources |
| 0x024 | IRQ_MASK | rw | |
| 0x028 | WATCH_ADDR | rw | |
| 0x02C | CPU_EN | rw | one bit per CPU, reset all 1 |
| 0x030 | DMA_CTRL | rw | [0] enable |
| 0x034/0x038 | DMA_BASE/DMA_SIZE | rw | ring buffer |
| 0x03C | DMA_WPTR | r | next write offset |
| 0x040 | ID | r | `{16'hABAC, UNIT_PRESENT[4:0], N_UNITS[2:0], N_CPUS[7:0]}` |
| 0x100+0x20u | unit u cfg (u = 0..4) | rw | [0] en, [1] pid_en, [15:8] cpu_mask, [20:16] shift |
| +0x4 / +0x8 / +0xC | | rw | pid / addr_lo / addr_hi |
| 0x1000*(u+1) | unit u results | r | see the units above |

Unit configuration resets to:
- disabled (unless set by `BOOT_UNIT_EN`);
- all CPUs selected;
- the full address range;
- `shift = 0`.

Unknown offsets read 0, and so do the results of units not built.

The bus interface is an AXI4-Lite slave with one transaction at a time:
- Write address and data may come in either order.
- `WSTRB` is ignored: registers are written whole.
- Read data appears one cycle after the address handshake.
- Responses are always OKAY.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_CPUS` | 4 | CPUs monitored (1..8) |
| `TRACE_DEPTH` | 512 | trace FIFO records |
| `LAT_BINS` | 32 | latency histogram bins |
| `HIST_BINS` | 64 | address histogram bins |
| `PROF_BINS` | 64 | code profile bins |
| `UNIT_PRESENT` | 5'b11111 | which units are built (bit = unit number) |
| `BOOT_ARM` | 0 | come out of reset armed |
| `BOOT_UNIT_EN` | 5'b00000 | units enabled at reset |

Field widths shared by all modules (address 32, PID 8, time stamp 64, CPU
mask 8) are in `rtl/abacus_pkg.sv`. At defaults, yosys maps the top to about
1.5k flip-flop bits plus the 512x128-bit trace FIFO and the counter arrays.

Reset is synchronous and active-low (`rst_n`). ABACUS runs on the processors'
clock.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and finishes. The system-level ones are:
- `tb_abacus_top`: the full design at default parameters. Four CPU models run
  a random program of accesses, stalls, instructions and process switches. The testbench
  configures ABACUS over AXI4-Lite, with:
  - an address start trigger;
  - a cycle-count stop;
  - a DMA ring that wraps.

  It then checks every unit's results, every trace record in memory and the
  interrupts against its own model.
- `tb_abacus_trigger`: every start and stop mode, including a function
  measured over three calls in INSTR mode.
- `tb_abacus_top_boot`: a subset build that measures from reset without
  software.

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/abacus_pkg.sv tb/tb_abacus_top.sv --top-module tb_abacus_top
./obj_dir/Vtb_abacus_top
```

Replace the testbench name to run any other one. The RTL compiles without
width warnings. The testbenches pass 16-bit register offsets and 8-bit fields
to 32-bit arguments, which Verilator reports as width warnings; `-Wno-fatal`
keeps those from stopping the build.

## How this relates to the published ABACUS

The following follow the published description:
- the three-layer structure;
- the four external interfaces: bus, DMA, interrupts, CPU debug signals;
- runtime configuration over the bus;
- start/stop on a cycle count, a memory address or an instruction;
- per-CPU and per-process selection;
- build-time choice of units;
- boot-time configuration;
- the kinds of measurement: trace, latency, stalls, memory-access histogram,
  code profiling.

The following are this design's own:
- every encoding, width and register offset;
- the probe bundle;
- the window reopening on each call in INSTR mode;
- the bin formulas;
- the trace loss policy;
- the DMA ring format.

Differences to be aware of:
- **Code profile is an interpretation.** The original names a code-profiling
  unit but does not describe it. Here it is an instruction-address histogram.
  The trace covers data accesses only; instructions are not traced.
- **Applications.** The original can also trigger on an application. Here,
  an application is selected by each unit's PID filter, not by a trigger.
- **Units not provided.** The memory-reuse and instruction-mix units appear
  only as examples in the original and are not built here.
- **Host side not included.** The operating-system driver and the user-level
  file-system interface are not included.
- **DMA carries trace only.** Histograms and counters are read through
  registers. Only the trace goes out by DMA.
- **Trace loss.** Only one access per cycle is traced, as described above.
