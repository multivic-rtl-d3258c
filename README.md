# MultiVic memory system and interconnect in SystemVerilog

MultiVic is a multi-core RISC-V vector processor for neural-network
inference in hard real-time systems. Its central idea is that **no two
agents ever compete for a memory or a bus**. Each worker core runs only from
its own instruction and data scratchpads (SPMs). It cannot see any other
memory. A separate management core moves all data between the scratchpads
and the external DRAM, using a DMA engine. It does this according to a
schedule fixed at compile time. Each scratchpad is a dual-port SRAM: the
worker uses one port, the DMA the other, and both ports answer in one
cycle. As a result, a worker's execution time depends only on its own code.
When its data arrives depends only on the static schedule. The only
variable-latency part is the DRAM, and the schedule budgets for its worst
case.

This repository holds synthesizable RTL for everything in that system
except the processor cores and the DRAM:

* the scratchpads;
* the main crossbar, whose only host is the DMA;
* the peripheral crossbar, whose only host is the management core;
* the DMA engine;
* the timer;
* the UART;
* a top level, `multivic_top`, that wires them together with the cores'
  ports brought out.

The worker cores (Ibex with the Vicuna vector co-processor), the management
core (Ibex) and the DDR4 memory with its vendor controller are existing IP.
They are not reproduced here. The testbenches replace them with behavioural
models.

The architecture follows the MultiVic paper (Kirschner, Dudzik, Krusekamp,
Becker). That paper gives the topology, the configurations and the sizes.
Bus details, register maps, the address map and the internals of the DMA,
timer and UART are not in the paper; they are this design's own, and they
are marked as such below.

## Structure

```
      worker 0            worker 1      ...      worker N-1
   (core + vector)     (core + vector)
     |        |          |        |
   I-SPM    D-SPM      I-SPM    D-SPM               (port A: core, 1 cycle)
     |D       |D         |D       |D                (port B: TL-UL device)
  ===+========+==========+========+=========+=====+====  main crossbar
                                            |D    |D
                 DRAM ---- DMA (H)       mgmt    mgmt
                            |D           D-SPM   I-SPM ---- management core
                            |              |                   (fetch)
  ==========================+==+=====+=====+==========  peripheral crossbar
                               |D    |D    |H = management core data port
                             UART  timer
```

`H` marks the single host of a crossbar and `D` its devices. The management
I-SPM and D-SPM also sit on the main crossbar, so the DMA can load the
management core's own program and can copy between the management D-SPM
and any worker.

With the default Octa configuration, the main crossbar has 2·8 + 2 = 18
devices. With 16 workers it has 34. The paper names exactly that count of
34 scratchpads routed to the DMA as the routing bottleneck that limits
scaling on its FPGA.

## Why the timing is predictable

Three properties of the RTL carry the timing argument.

1. **One host per crossbar.** `tlul_xbar_1n` has no arbiter, because there
   is nothing to arbitrate. A request waits only for the device it
   addresses, or for earlier responses of the same host to drain (see the
   ordering rule below). Both waits are caused by the host itself.
2. **Dual-port scratchpads with fixed latency.** `spm` grants every port-A
   request in the cycle it is made and returns data in the next cycle. Port
   B does the same. Nothing on one port can delay the other. The system
   testbench counts the cycles in which a worker and the DMA access the same
   D-SPM together, and checks that the worker still got its response one
   cycle later. It also checks that every worker's kernel takes the same
   number of cycles in every row, although the DMA works on that worker's
   D-SPM meanwhile.
3. **A DMA with a fixed per-word sequence.** `dma` reads a word, then
   writes it, then moves on, with one access in flight. Against scratchpads,
   a transfer of `n` words takes exactly 4·`n` cycles from GO to DONE (read
   request, read response, write request, write response). Against DRAM,
   the DRAM's response time is added per word. A static schedule therefore
   bounds a transfer by 4·`n` cycles plus `n` (or 2·`n`, for DRAM to DRAM)
   times the worst-case DRAM latency.

## Buses

### TL-UL subset (`mv_pkg::tl_h2d_t`, `tl_d2h_t`)

Both crossbars use TileLink Uncached-Lightweight, reduced to what the
system uses:

* 32-bit addresses and data;
* an 8-bit `a_source`;
* the opcodes `Get`, `PutFullData` and `PutPartialData`;
* the responses `AccessAck` and `AccessAckData`;
* the `d_error` flag.

Each channel uses a valid/ready handshake. The param, sink and user fields
are left out.

`tlul_adapter_reg` is the device end used by every scratchpad port B and
every register block:

* An accepted request becomes a one-cycle read or write strobe.
* The response follows in the next cycle.
* A new request is accepted in the same cycle in which the previous
  response is taken, so a device sustains one access per cycle.

### Core port (`core_req_t`, `core_rsp_t`)

This is the Ibex style of memory port:

* request phase: `req`, `we`, `be`, `addr`, `wdata`, with `gnt` in the same
  cycle;
* response phase: `rvalid`, `rdata`, `err` one cycle later.

Workers use it for fetch and for load/store. The management core uses it
for fetch.

### DRAM port (`dram_req_t`, `dram_rsp_t`)

The DRAM port has the same req/gnt then rvalid shape, with a 64-bit
address, because the memory is larger than 4 GiB. Every request gets
exactly one `rvalid`, in order, also for writes. A bridge to the memory
controller's own interface (AXI on the original FPGA board) is not part of
this design.

### Crossbar ordering rule

TL-UL needs responses to return in request order to a host that reuses
source IDs. The crossbar counts outstanding requests, up to `MAX_OUT`
(default 4). While any are outstanding, it lets a new request through only
if it goes to the same device. A request to a different device waits
(`a_ready` low, `stall_o` high) until the earlier responses have come back.

Requests to unmapped addresses go to an internal error responder. It
answers one cycle later with `d_error`.

Channels A and D pass through the crossbar combinationally, so the
crossbar adds no cycles.

## Address map (own choice, `mv_pkg`)

| Agent | Region | Address |
|---|---|---|
| DMA (main crossbar) | management I-SPM | `0x0000_0000` (64 KiB window) |
| | management D-SPM | `0x0010_0000` (64 KiB window) |
| | worker *i* I-SPM | `0x1000_0000 + i·0x10_0000` (512 KiB window) |
| | worker *i* D-SPM | `0x1008_0000 + i·0x10_0000` (512 KiB window) |
| | DRAM | separate 64-bit space, selected per side in `CTRL` |
| management core (peripheral crossbar) | management D-SPM | `0x0010_0000` |
| | DMA registers | `0x0200_0000` |
| | timer | `0x0200_1000` |
| | UART | `0x0200_2000` |
| every worker core | its I-SPM | `0x0000_0000` |
| | its D-SPM | `0x0008_0000` |

A worker's local addresses are the same on every worker and differ from
the global ones. Software therefore links each worker program for the
local view, while the management core addresses the worker's memories
through the global map.

The 512 KiB windows are large enough for the biggest worker D-SPM of any
configuration (Dual, 512 KiB). An access that falls inside a window but
beyond the memory's real size is answered with an error.

## Blocks

### `spm`: dual-port scratchpad

The scratchpad is a single array of 32-bit words with byte enables,
written so that FPGA tools infer true dual-port block RAM.

* `SIZE_BYTES` sets the memory size.
* `WIN_BYTES` sets the size of the decoded window. The offset inside the
  window is the memory address.
* If both ports write the same word in one cycle, port B's bytes win.
* Contents are not reset.

The 32-bit width comes from the paper's roofline figure. There, every
configuration's memory bound works out to 4 bytes per cycle per core.

### `xbar_main`, `xbar_periph`, `tlul_xbar_1n`

`tlul_xbar_1n` is the generic one-host crossbar. Each device has a window:
a device is hit when `(addr & ~MASK) == BASE`. `xbar_main` and
`xbar_periph` build the two instances of the system from the address map.
The device order is described in their headers.

### `dma`: copy engine

| Offset | Register | Meaning |
|---|---|---|
| 0x00/0x04 | SRC_LO/HI | source byte address |
| 0x08/0x0C | DST_LO/HI | destination byte address |
| 0x10 | SIZE | bytes, multiple of 4 |
| 0x14 | CTRL | bit0 GO, bit1 SRC_DRAM, bit2 DST_DRAM, bit3 IRQ_EN |
| 0x18 | STATUS | bit0 BUSY, bit1 DONE (W1C), bit2 ERROR (W1C) |

Any combination of scratchpad space and DRAM works as source and
destination.

* Writes to the configuration registers are ignored while BUSY.
* A misaligned address or size sets ERROR and DONE without moving data.
* So does a bus or DRAM error, except that the copy stops at the failing
  word.
* `irq_o` = DONE & IRQ_EN.

The original system uses a modified OpenTitan DMA and does not describe its
changes. This engine is the simplest design that does the same job, and it
makes no attempt to match that DMA's registers or throughput.

### `timer`

The timer is a 64-bit `MTIME` that counts one per clock cycle while
enabled, with a 64-bit compare value and a sticky interrupt flag.

| Offset | Register | Meaning |
|---|---|---|
| 0x00 | CTRL | enable |
| 0x04/0x08 | MTIME | lower / upper word |
| 0x0C/0x10 | MTIMECMP | lower / upper word |
| 0x14 | INTR_EN | interrupt enable |
| 0x18 | INTR_STATE | write 1 to clear |

Reading the lower word of `MTIME` latches the upper word, so a lower-then-
upper read pair is coherent. The management core uses the timer to measure
execution time in cycles and, through the compare interrupt, to start the
steps of a time-triggered schedule.

### `uart`

The UART sends and receives 8N1 frames, with a programmable number of
clock cycles per bit. The default is 868, which gives 115200 baud at
100 MHz.

| Offset | Register | Meaning |
|---|---|---|
| 0x0 | CTRL | DIV, bit16 RX_IRQ_EN |
| 0x4 | STATUS | TX_BUSY, RX_VALID, RX_OVERRUN, FRAME_ERR |
| 0x8 | WDATA | byte to send |
| 0xC | RDATA | received byte; reading clears RX_VALID |

The paper only names the UART. Everything about it is a plain standard
design.

### `multivic_top`

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_WORKERS` | 8 | worker count |
| `WORKER_ISPM_SIZE` | 16 KiB | worker I-SPM |
| `WORKER_DSPM_SIZE` | 128 KiB | worker D-SPM |
| `MGMT_ISPM_SIZE` | 64 KiB | management I-SPM |
| `MGMT_DSPM_SIZE` | 64 KiB | management D-SPM |
| `UART_DIV` | 868 | UART reset divisor |

The evaluated configurations are set with these parameters:

| Configuration | `NUM_WORKERS` | `WORKER_DSPM_SIZE` | Vicuna VREG / multiplier width (outside this RTL) |
|---|---|---|---|
| Dual | 2 | 512 KiB | 1024 / 512 bits |
| Quad | 4 | 256 KiB | 512 / 256 bits |
| Octa (default) | 8 | 128 KiB | 256 / 128 bits |
| Hexadeca | 16 | 64 KiB | 128 / 64 bits |

Octa is the default because it gave the shortest matmul run time in
seconds: 728.5 M cycles at 168 MHz. Hexadeca needs fewer cycles, but closes
timing only at a much lower clock.

## Software protocol the hardware is built for

This part is software convention, not hardware. It is shown because the
hardware only makes sense with it. The system testbench carries it out.

**Boot and program distribution.** One binary holds the programs of all
cores in separate segments. The DMA copies it from DRAM into the management
D-SPM. From there it copies the management code into the management I-SPM
and each worker's code into that worker's I-SPM.

**Status area.** The first two words of every worker D-SPM are reserved:

* a command word, which holds a function pointer, or 0;
* a status word: bit 0 BUSY, bits 31:16 the count of finished executions.

The worker runtime works like this:

1. It polls the command word.
2. When the word is non-zero, it sets BUSY and clears the command word.
3. It calls the function.
4. It clears BUSY and increments the count.

The management core issues a command by having the DMA copy a word into the
command word. It observes progress by having the DMA copy the status word
into its own D-SPM. Because of the one-host rule, it has no direct path to
worker memories.

Nothing in the hardware holds a worker in reset until its program is
loaded; how cores are released is left to the surrounding system. The
testbench releases its worker models after the program and a cleared status
area are in place.

**Matrix multiplication (C = A·B).** B is cut into column blocks of width
`B = N / workers` (or narrower, see below). Each block is loaded into one
worker's D-SPM and stays there. For each row of A, the schedule runs these
steps:

1. Copy the row to every worker.
2. Start the kernel on every worker.
3. Wait for all status counters.
4. Copy every worker's C fragment back to DRAM.

On the real worker, the kernel splits the row and the columns into
vector-register-length pieces and accumulates with the vector unit.

**Sizing the paper's benchmark (N = 1024, 4-byte elements assumed).** B is
4 MiB, and the eight 128 KiB D-SPMs of the Octa default hold 1 MiB between
them, so B cannot be resident all at once. One worker holds a block of
1024·`B`·4 bytes, plus a 4 KiB row of A and the C fragment, within
128 KiB. That allows `B` ≤ 31, for example `B` = 16. The run then needs 8
passes of 128 columns each.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops, and each has a cycle
watchdog. All files are plain SystemVerilog for Verilator 5. For example:

```
verilator --binary --timing --assert --top-module multivic_top_tb \
    -y rtl -y tb +libext+.sv rtl/mv_pkg.sv tb/multivic_top_tb.sv
./obj_dir/Vmultivic_top_tb
```

For another testbench, replace `multivic_top_tb` with its name.

| Testbench | What it checks |
|---|---|
| `spm_tb` | both ports against a reference array, byte enables, one-cycle response, same-cycle accesses on both ports, the write-collision rule, out-of-range errors |
| `xbar_main_tb`, `xbar_periph_tb` | thousands of pipelined random requests with random device latency and back-pressure; each response checked for order, for the answering device (the address map is restated independently in the testbench) and for errors; the ordering stall must occur |
| `dma_tb` | all four copy directions, with fast and with randomly stalling memories and a random-latency DRAM; the 4 cycles/word rate; zero size, misalignment, read and write errors; register locking while busy; the interrupt |
| `timer_tb` | count rate against elapsed cycles, carry and coherent 64-bit reads, the compare interrupt at the programmed cycle, mask and clear |
| `uart_tb` | transmitted frames decoded by a serial model, bit time, reception, overrun, frame error |
| `multivic_top_tb` | the whole system at its default (Octa) parameters, running a 64×64 matmul under a static schedule, with results compared against a reference product |
| `multivic_configs_tb` | the same benchmark (through `matmul_config_run`) on the Dual, Quad and Hexadeca configurations side by side, with small matrices; it also checks that the last word of every D-SPM is reachable and that the word beyond it is an error |

`multivic_top_tb` also counts every mechanism and fails if one never
occurs:

* each DMA direction;
* status polls;
* worker and DMA accessing one D-SPM in the same cycle;
* the timer interrupt;
* UART loopback;
* a crossbar error;
* a DMA error.

It takes about 0.6 M cycles and a few seconds.

Behavioural models used by the testbenches, in `tb/`:

| Model | Role |
|---|---|
| `tl_host_bfm` | TL-UL host with `put32`/`get32` |
| `tl_dev_model`, `tl_mem_model` | TL-UL devices |
| `dram_model` | DRAM with random 4–12 cycle latency, standing for DDR4 access-time variation |
| `worker_model` | worker runtime and matmul kernel on the core ports; records the shortest and longest kernel time |

## Departures and limits

* **No processor cores.** The worker cores with their vector units and the
  management core are external IP and stay outside `multivic_top`, so the
  RTL alone does not execute programs. Vector-unit parameters (register and
  multiplier widths) therefore do not appear.
* **DMA.** The DMA is a minimal word-by-word engine, not the modified
  OpenTitan DMA of the original, so its throughput is lower than a burst
  engine's. Its timing is simple to bound, which is what the schedule
  needs.
* **Own choices.** The address map, the register maps of DMA, timer and
  UART, the crossbar ordering rule and the error responses are this
  design's own.
* **Management D-SPM access path.** The management core reaches its D-SPM
  through the peripheral crossbar. This reading of the architecture figure
  is an interpretation.
* **Management access to worker memories.** The management core reaches
  worker memories only through the DMA, as the single-host rule of the main
  crossbar implies.
* **DRAM port.** The DRAM side is a simple request/response port. A bridge
  to a real memory controller is not included.
* **Crossbar idle outputs.** The crossbars forward the host's request
  fields unchanged to all devices and steer only the valid and ready
  signals. Most crossbar output bits are therefore direct copies of inputs,
  by design.
