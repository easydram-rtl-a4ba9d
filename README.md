# EasyDRAM tile: a software memory controller that looks like hardware

A new DRAM technique (in-DRAM copy, lower timing parameters, a new scheduling
policy) is best judged on real DRAM chips, with a whole system running real
programs on top. Building a hardware memory controller for every idea is
slow, so the EasyDRAM approach puts the memory controller in **software**: a
small programmable core next to the DRAM runs it, and a command sequencer
replays the DRAM commands it chooses with exact timing. A software controller
takes thousands of cycles to decide what a hardware one decides in a few. If
nothing were done, the emulated processor would see very long memory
latencies and every result would be wrong.

**Time scaling** solves this. The emulated processors are clock-gated and
only allowed to run as far as the memory controller has *accounted* for. The
controller measures how long its DRAM commands really took and converts that
into emulated processor cycles. It then tells the hardware "the processors may
now run this much further", and it stamps each response with the processor
cycle from which it may be seen. To the processors the software controller
looks like a fast hardware one, however slowly it actually runs.

This repository holds the synthesizable hardware side of that scheme in
SystemVerilog: the tile that carries requests, commands and data between the
emulated system, the software controller and DRAM, and the time scaling
counters that gate the processors. Testbenches and stand-in models of the
parts that are not hardware designed here (the core that runs the
controller, the DRAM, the processors) are in `tb/`.

```
   emulated processors + caches              host (loads programs)
   (clock enable: proc_clk_en)
            |  memory bus a_*/d_*
   +--------v-----------------------------------------------------------+
   | easydram_top                                                       |
   |  +-------------------------- easytile ---------------------------+ |
   |  | mem_bus_interface -> tile_control -> Incoming Req FIFO  ----+ | |
   |  |        ^                 |     ^                             | | |
   |  |        +-----------------+     +--- Outgoing Req FIFO <--+   | | |
   |  |                                                           |   | | |
   |  |  programmable core <---imem--- scratchpad               (core | | |
   |  |  (outside, dmem_*) --> tile_interconnect --> registers    of  | | |
   |  |                                              of every     all | | |
   |  |  command_buffer --> dram_bender --> DDRx port (ddr_*)    blocks| |
   |  |                         |                                     | |
   |  |                         +--> readback_buffer                  | |
   |  +---------------------------------------------------------------+ |
   |  time_scaling: processor / memory controller / global counters     |
   +--------------------------------------------------------------------+
```

## Time scaling, step by step

This is the part that takes the most thought. It involves three counters,
all 64 bits wide and all zero after reset (`time_scaling.sv`):

| counter | counts |
|---|---|
| `global_cnt` | every clock cycle; a reference clock |
| `proc_cnt` | cycles in which the emulated processors were clocked (`proc_clk_en` high) |
| `mc_cnt` | emulated time the software controller has accounted for |

The processors are **held** whenever time scaling is on and any of these is
true: a request is arriving this cycle, a request is waiting in the Incoming
Req FIFO, or software has set critical mode. While held, they are clocked
only in cycles where `proc_cnt < mc_cnt`. While not held, they run every
cycle, and `mc_cnt` is pulled up to `proc_cnt`. Software moves `mc_cnt`
forward by writing an amount to the MC_ADVANCE register. All processors
share the one enable and the one counter.

The following example uses the numbers of the time scaling walk-through that
the design follows. It is also what `tb_time_scaling` replays.

1. Counters are at 100/100/100 (processor / MC / global). A processor sends a
   read. It enters the Incoming Req FIFO tagged with `proc_cnt` = 100, and
   from the same cycle the processors are stopped, because 100 is not below
   100.
2. The controller notices the request some time later, say at global cycle
   150, and sets critical mode. Nothing changes for the processors; they stay
   stopped.
3. The controller sends an ACT and learns from DRAM Bender how long it took.
   It converts that time into 5 emulated processor cycles and writes
   MC_ADVANCE = 5, so `mc_cnt` becomes 105. The processors now run for exactly
   five cycles and stop again at 105, whatever the global counter says.
   Requests they send in those cycles (tagged 102 and 104, say) join the
   FIFO.
4. The controller serves the read. It stamps the response with
   `tag = mc_cnt + emulated latency` (for example 135) and pushes it into the
   Outgoing Req FIFO. The tile control logic will not hand it to the bus
   before `proc_cnt >= tag`. The controller then advances `mc_cnt` by the
   same amount, and the processors run until they reach the tag and receive
   the data.
5. When the controller has no request left, it clears critical mode. The
   processors run freely again and the counters move together.

The result is that the latency a processor observes is the **emulated**
latency chosen by the controller. It does not depend on how many real cycles
the software spent. In the end-to-end test, the processor-visible read
latency is always exactly the emulated latency plus one cycle (the tile
registers the assembled line once), while the real time per request is
many times longer and varies from request to request.

Some less obvious points:

* **Clock gating is a clock enable.** Everything runs on one clock, and
  `proc_clk_en` tells the processor domain in which cycles it "exists". The
  memory bus belongs to that domain, so `mem_bus_interface` moves a beat only
  in a cycle where the enable is high (`bus_en`). A stopped processor neither
  sends a beat nor sees one. `proc_clk_en` is combinational and applies to the
  cycle it is computed in, so it always matches the counter step.
* **A request stops the processors in the cycle it arrives**, not one cycle
  later. `req_arrive` is part of the hold for this reason: `proc_cnt` cannot
  move past the arrival tag before the FIFO shows the request as pending.
* **Why a request waits for the processor to catch up before the next one
  is read.** After advancing `mc_cnt`, the controller waits until `proc_cnt`
  has reached it before it takes the next request. This gives the processors
  the chance to issue every request that the emulated system would have
  issued by then, so a slow controller never schedules from an incomplete
  view.
* **Without time scaling** (TS_ENABLE = 0) nothing is ever held, tags are
  ignored, and the processors see the real latency. This is the "no time
  scaling" comparison configuration.
* **Converting real cycles to emulated cycles is software's job.** The
  hardware reports real DRAM Bender cycles (DB_CYCLES) and accepts any
  advance. The ratio (for example, a processor emulated at 100 MHz standing
  for a 1 GHz one) and any fixed scheduling cost live in the controller
  program.

## Lifetime of one read

| step | who | what |
|---|---|---|
| 1 | processor | one request beat on `a_*` (a write sends eight beats of data) |
| 2 | `mem_bus_interface` | assembles a `mem_req_t` |
| 3 | `tile_control` | stamps `tag = proc_cnt` and pushes it into the Incoming Req FIFO; processors held |
| 4 | software | polls RB_IN_STATUS, writes TCL_CRITICAL = 1 |
| 5 | software | reads RB_IN_ADDR / RB_IN_INFO / RB_IN_TAG (and RB_IN_DATA for a write), writes RB_IN_POP |
| 6 | software | writes commands (PRE, ACT, RD with their delays) to CB_CMD, and for a write the line to CB_WDATA + CB_WDATA_PUSH (or, offloaded, one write to CB_WDATA_REQ, which copies the incoming request's line) |
| 7 | software | writes DB_START, polls DB_STATUS until not busy, reads DB_CYCLES |
| 8 | `dram_bender` | plays the batch on `ddr_*`; read data goes into the readback buffer |
| 9 | software | reads RD_DATA (eight words), writes RD_POP |
| 10 | software | writes RB_OUT_INFO, RB_OUT_TAG, RB_OUT_DATA, then RB_OUT_PUSH (or, offloaded, RB_OUT_PUSH_RD, which takes the data straight from the readback buffer head and pops it) |
| 11 | software | writes TCL_MC_ADVANCE, waits for `proc_cnt >= mc_cnt`, clears critical mode when idle |
| 12 | `tile_control` | releases the response once `proc_cnt >= tag`; the interface sends eight beats (one acknowledge beat for a write) |

## Register map seen by the programmable core

The core's data port (`dmem_req`/`dmem_rsp`) makes one 64-bit access per
cycle. It is always accepted, and read data returns in the next cycle.
Address bits [31:28] select the target and bits [11:0] the byte offset.

| region [31:28] | target | registers (offset) |
|---|---|---|
| 0 | scratchpad | 64 KiB, word addressed by bits [15:3] |
| 1 | tile control | CRITICAL 0x000, TS_ENABLE 0x008, MC_ADVANCE 0x010 (write adds), PROC_CNT 0x018, MC_CNT 0x020, GLOBAL_CNT 0x028, REQ_COUNT 0x030, RESP_COUNT 0x038 |
| 2 | request/response FIFOs | IN_STATUS 0x000 (bit 0 non-empty, count from bit 8), IN_ADDR 0x008, IN_INFO 0x010 (bit 0 write, [11:8] source), IN_TAG 0x018, IN_POP 0x020, IN_DATA 0x040–0x078; OUT_STATUS 0x100 (bit 0 full), OUT_INFO 0x108, OUT_TAG 0x110, OUT_PUSH 0x118, OUT_PUSH_RD 0x120 (push with the readback head line as data), OUT_DATA 0x140–0x178 |
| 3 | command buffer | CMD 0x000 (push one command), STATUS 0x008 ([15:0] commands, [31:16] lines), WDATA_PUSH 0x010, WDATA_REQ 0x018 (push the incoming head's line), WDATA 0x040–0x078 |
| 4 | readback buffer | STATUS 0x000 ([15:0] lines, [31:16] dropped), POP 0x008, DATA 0x040–0x078 |
| 5 | DRAM Bender | START 0x000, STATUS 0x008 (bit 0 busy, [31:16] errors), CYCLES 0x010, ISSUED 0x018 |
| 6–15 | none | reads return all ones |

The names and offsets are in `rtl/easydram_pkg.sv`. The controller API calls
map onto them: "set the scheduling state" is TCL_CRITICAL, "get a request" is
the IN_* registers, "activate / precharge / read" are CB_CMD writes, and
"flush the commands" is DB_START.

## Command batches and DRAM Bender

A command-buffer entry (`bender_cmd_t`, 48 bits) is
`{delay[15:0], col[9:0], row[14:0], bank[3:0], cmd[2:0]}`, where `cmd` is
one of NOP, ACT, PRE, RD, WR, REF or PREA. `delay` is the number of cycles
from this command to the next one. Zero counts as one. A batch collects in
the buffer (256 entries) until START. `dram_bender` then issues one command
per slot and waits exactly the requested delay. It attaches the next write
line to each WR, pushes each returned read line into the readback buffer, and
ends once the buffer is empty, the last delay has passed and every read has
returned. DB_CYCLES is the batch length counted from the first issue slot:
the sum of max(delay, 1) over the batch, plus any wait for late read data.

This single primitive, commands with arbitrary delays between them, is all
the case studies need:

* **RowClone (in-DRAM copy).** ACT the source row, PRE after one cycle, and
  ACT the destination row in the same subarray after one more. The timing
  violation makes the chip copy the whole row. The batch is
  `ACT(src, delay 1), PRE(delay 1), ACT(dst, delay tRAS), PRE(delay tRP)`.
* **Reduced tRCD.** The ACT's delay is simply shorter. The controller checks
  a Bloom filter of known-weak rows, kept in the scratchpad, and uses the
  nominal delay (9 cycles at 667 MHz for 13.5 ns) for rows the filter hits and
  a reduced one (6 cycles for 9.0 ns) for the rest. A false positive only
  costs speed, never correctness.
* **Profiling.** A row can be characterised with a batch of write, precharge,
  ACT with the delay under test, then read; the data is compared in software.

The real platform behind this block (DRAM Bender) is a programmable tester
with its own instruction set of loops, branches and registers. Only its role
is reproduced here, as a straight-line sequencer. That is the main reason the
block is only partly the original.

## Files

| file | block |
|---|---|
| `rtl/easydram_pkg.sv` | sizes, command/request/response structs, register map |
| `rtl/easydram_top.sv` | top: tile plus time scaling; ports for processors, core and DDRx interface |
| `rtl/easytile.sv` | the tile: all components below and their wiring |
| `rtl/time_scaling.sv` | the three counters and `proc_clk_en` |
| `rtl/tile_control.sv` | request stamping, tag-based response release, critical mode / TS enable / MC advance registers |
| `rtl/req_resp_buffers.sv` | Incoming and Outgoing Req FIFOs (16 each) with their register view |
| `rtl/command_buffer.sv` | command FIFO (256) and write-data line FIFO (16) |
| `rtl/dram_bender.sv` | batch sequencer on the DDRx command port |
| `rtl/readback_buffer.sv` | FIFO of lines read from DRAM (16) |
| `rtl/mem_bus_interface.sv` | valid/ready memory bus port, 64-bit beats |
| `rtl/tile_interconnect.sv` | address decoder from the core data port to the scratchpad and registers |
| `rtl/scratchpad.sv` | 64 KiB two-port memory: instruction fetch and data |
| `rtl/sync_fifo.sv` | generic first-word-fall-through FIFO used by the buffers |

## Top-level interface

All ports are plain signals or packed structs on one clock `clk` and one
active-low asynchronous reset `rst_n`.

* **Memory bus** (`a_*` in, `d_*` out). A read is one request beat: `a_addr`
  (line address), `a_source` (4-bit id), `a_write = 0`. A write is eight
  beats with the line in `a_data`, low word first. A read response is eight
  `d_data` beats carrying its `d_source`. A write acknowledge is one beat with
  `d_write = 1`. Both channels use valid/ready and move only in cycles with
  `proc_clk_en` high. `a_ready` falls while an assembled request cannot enter
  a full Incoming Req FIFO, which is how the emulated system is
  back-pressured.
* **`proc_clk_en`**: the clock enable of all emulated processors.
* **Programmable core**: `imem_valid/imem_addr -> imem_rvalid/imem_rdata`
  (instruction fetch from the scratchpad, one cycle) and
  `dmem_req -> dmem_rsp` (the register map above).
* **DDRx interface**: `ddr_cmd_valid, ddr_cmd, ddr_bank, ddr_row, ddr_col,
  ddr_wdata` out, with one command per cycle at most. `ddr_rdata_valid,
  ddr_rdata` come back as one 64-byte line per RD, in order.
* **Observation**: `proc_cnt`, `mc_cnt`, `global_cnt`, `critical`,
  `bender_busy`.

Module parameters and their defaults: scratchpad 8192 words, FIFOs 16
entries, command buffer 256 entries, write-data and readback buffers 16
lines. None of these sizes is given by the paper. The DRAM geometry (16 banks
as 4 bank groups of 4, 32K rows) is the evaluated DDR4 module's.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert --top-module tb_easydram_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/easydram_pkg.sv tb/tb_easydram_top.sv
obj_dir/Vtb_easydram_top +verilator+rand+reset+2
```

Replace `tb_easydram_top` with any testbench name in `tb/`. The end-to-end
test runs the top at its default sizes and takes well under a second.

| testbench | what it establishes |
|---|---|
| `tb_time_scaling` | the counter example above, cycle by cycle, against a reference model; release after critical mode; no-scaling mode |
| `tb_tile_control` | arrival tags, tag-gated release, register access, request/response totals |
| `tb_req_resp_buffers`, `tb_command_buffer`, `tb_readback_buffer` | FIFO order, full/empty, the register views (small depths), and the two hardware line paths (readback head into a response, request line into write data) |
| `tb_dram_bender` | command spacing equal to the delays, write data on WR, read data into the readback buffer, DB_CYCLES and DB_ISSUED, error count |
| `tb_mem_bus_interface` | beat assembly, back-pressure, response beats under random stalls |
| `tb_tile_interconnect`, `tb_scratchpad` | decoding, unmapped reads, both memory ports |
| `tb_easytile` | tile with behavioural counters: data, latency = emulated + 1, pending flag, critical mode, sum of advances, RowClone |
| `tb_easydram_top` | whole design at default sizes (see below) |
| `tb_workloads` | small versions of the evaluated workloads on the whole design: a dependent-load latency sweep (8 KiB, 64 KiB, 1 MiB) with and without time scaling, one read stream with nominal and with reduced tRCD, and an 8 KiB / 16 KiB copy by loads and stores against RowClone |

`tb_easydram_top` surrounds the top with three stand-ins:

* `tb/smc_model.sv` is the software controller. It uses only the register
  map, serves requests FCFS with an open-page policy, and keeps its open-row
  table and weak-row Bloom filter in the scratchpad. Its cost model is
  10 cycles + 1.5 × DRAM cycles. For the first 20 requests it copies every
  line word by word; after that it uses the two offload registers.
* `tb/ddr4_model.sv` is a DRAM. It models banks and rows, data, RowClone on
  a fast ACT–PRE–ACT in one subarray, and corruption when a weak row is read
  before its tRCD.
* A processor issues reads and writes and counts its own clock-enabled cycles.

The test makes every mechanism happen and fails if one never does: clock
gating, critical mode, MC advances, responses held back by their tag,
requests arriving in critical mode, several requests pending, a full
Incoming Req FIFO back-pressuring the bus, no gating at all with time scaling
off, row hits and misses, write acknowledges, a RowClone verified by reading
the destination row, reduced-tRCD ACTs with no corrupted data, and requests
served both with and without the offload registers. It also
checks `proc_cnt` against the processor's own count and `global_cnt` against
elapsed cycles.

## How far to trust it, and where it departs

* **Not built.** The programmable core (a small in-order RISC-V core), the
  emulated processors and their caches, the DDR4 PHY and the DRAM are taken
  from elsewhere in the original system. Here they are ports, and in `tb/`
  behavioural stand-ins. The software controller and its API are software.
* **DRAM Bender** is a minimal sequencer, not the original programmable
  tester (see above).
* **Memory bus** format, beat width and source ids are this design's own.
  The original uses the SoC generator's standard system bus.
* **One clock.** The original runs the processors, the tile and the DRAM
  interface at different frequencies. Here the DDRx command port runs at the
  tile clock, and the processor clock gating is a clock enable.
* **Register map, buffer depths, widths** (64-bit counters, 16-bit delays,
  64-byte lines) are choices, since the paper gives none of them.
* **Time scaling rules** (what holds the processors, when they may run, how
  responses are released, how the counters re-synchronise) follow the
  described mechanism and its numbered example. The exact priority of the
  conditions in a cycle is this design's reading.
* **Assertions** in the RTL state the rules that must never break: the
  processors never run past `mc_cnt` while held, no response leaves before
  its tag, DRAM Bender issues at most one command per slot, no FIFO
  overflows or underflows, and bus beats are held until taken. Lint reports
  `rst_n` as used both synchronously and asynchronously. This comes from the
  `disable iff (!rst_n)` of these assertions, not from the logic, which
  resets asynchronously throughout.
