# A PicoRV32 tile for a heterogeneous-ISA OpenPiton manycore

JuxtaPiton (Lim, Balkind and Wentzlaff) builds a heterogeneous-ISA manycore
by putting a small RISC-V core next to SPARC cores in one chip. The cores
share cache-coherent memory. The base is the OpenPiton tiled manycore. Every
tile there has a modified OpenSPARC T1 core (64-bit, big-endian, with its own
L1 caches), a private L1.5 cache, a slice of the shared distributed L2 and
three P-Mesh NoC routers. JuxtaPiton swaps the SPARC core of some tiles for a
PicoRV32 core. That core is a 32-bit, little-endian, multicycle RV32I core
with no caches, no MMU and no privileged mode. The tile drops its FPU. The
core is attached *behind* the L1.5, so it takes part in the coherence
protocol, the NoC and the chipset (DRAM, UART, SD card) unchanged. Interrupts
travel through the caches, so the SPARC side can also start the small core.

The only new hardware in that arrangement is the **transducer** between the
PicoRV32 memory port and the L1.5 cache's core-side port. This repository
gives synthesizable SystemVerilog for it. It also gives behavioural models of
the core and of the L1.5 with memory, and a system testbench that boots and
runs small RV32I programs the way the host SPARC core would. The SPARC core,
the L1.5, the L2, the NoC routers and the chipset come from existing designs.
They are not reproduced here.

```
  PicoRV32 tile                                     rest of the chip (not in this RTL)
 +-----------------------------------------------+
 |  PicoRV32   mem_*   +-------------------+  l15_req_*   +--------+     +----------+
 |  core     <-------> | pico_l15_         | <----------> |  L1.5  | <-> | L2 slice | <-> P-Mesh NoC
 |  (RV32I)  resetn    |   transducer      |  l15_resp_*  | (8 KB) |     +----------+     routers (3)
 |           <-------- |  enc | dec | reset|              +--------+                          |
 |                     +-------------------+                                          chipset: DRAM,
 +-----------------------------------------------+                                    UART, SD card
```

## What the transducer does

For every access the core makes, the transducer issues exactly one L1.5
operation and waits for its answer. It has four parts:

| module | job |
|---|---|
| `pico_req_encoder` | core request -> L1.5 request: operation type, access size, first-byte address, cacheability, byte-flipped store data |
| `pico_resp_decoder` | L1.5 response -> load data / store acknowledge / interrupt; picks and byte-flips the requested word |
| `pico_reset_ctrl` | holds the core in reset until the start interrupt arrives |
| `pico_l15_transducer` | the handshake controller that joins them (the top) |

Types, encodings and the byte-swap function shared by these modules are in
`jxp_pkg`.

Three design decisions from the original system shape it.

* **Both instructions and data are cached in the L1.5.** A SPARC core fetches
  instructions through its own L1 I-cache. Its fills bypass the L1.5. A
  PicoRV32 core has no L1, so the L1.5 is its first-level cache. Its fetches
  are therefore sent as ordinary cacheable loads (`CACHE_INSTR = 1`). With
  `CACHE_INSTR = 0` they are sent as instruction fills instead.
* **Every read and every write goes to the L1.5.** A SPARC core's reads mostly
  hit in its L1 and never reach the L1.5. A PicoRV32 core's reads all do. A
  store completes only when the L1.5 acknowledges it.
* **The core starts on an interrupt.** After system reset the core's reset
  stays asserted. The host core loads the program, then sends a start
  interrupt through the cache system. The transducer releases the core on the
  clock edge after that interrupt arrives.

## Byte order: the subtle part

The memory system was built for a big-endian 64-bit core. The byte at address
offset 0 of an aligned doubleword travels in bits 63:56 of the L1.5 data
bus. RISC-V is little-endian: the byte at the lowest address is the least
significant. The original system resolves this by *flipping the byte order of
the core's data buses*. Data the RISC-V core writes is then stored
little-endian in memory. Software on the SPARC side uses endian-swapping
macros when it reads or writes the RISC-V core's data (program image,
syscall mailbox).

Concretely, with `bswap32` reversing the four bytes of a word:

* **Store:** `l15_req.data = {bswap32(wdata), bswap32(wdata)}`. PicoRV32
  already copies a byte or halfword into every matching lane of `wdata`.
  After the swap, core lane *k* lands in big-endian lane *k*, which is
  address offset *k*. Doubling the word into both halves puts it where
  address bit 2 wants it. The size and the first-byte offset come from the
  byte strobes:

  | `mem_wstrb` | size | offset | `mem_wstrb` | size | offset |
  |---|---|---|---|---|---|
  | 0000 (read) | 4 B | 0 | 0001 | 1 B | 0 |
  | 1111 | 4 B | 0 | 0010 | 1 B | 1 |
  | 0011 | 2 B | 0 | 0100 | 1 B | 2 |
  | 1100 | 2 B | 2 | 1000 | 1 B | 3 |

  Any other pattern raises `req_illegal` and trips an assertion.
* **Load:** the L1.5 returns the aligned doubleword. Address bit 2 of the
  outstanding request picks bits 63:32 (bit 2 = 0) or 31:0 (bit 2 = 1). That
  half is byte-swapped and returned. Loads are always whole words; the core
  extracts bytes and halfwords itself.

Worked example: the core stores `sw 0x11223344` to `0x3100`. Memory then
holds bytes `44 33 22 11` at `0x3100..0x3103`. A following `sh 0xAABB` to
`0x3104` goes out as a 2-byte store at offset 4, with bus bytes 4 and 5 =
`BB AA`. `lbu` from `0x3101` returns `0x33`. The system test checks exactly
this.

## Interfaces

**Core side** (the PicoRV32 native memory interface). The core raises
`mem_valid` with `mem_instr`, `mem_addr` (word-aligned), `mem_wdata` and
`mem_wstrb` (0 for a read). It holds them until a cycle in which `mem_ready`
is high; `mem_rdata` is valid in that cycle. `pico_resetn` drives the core's
active-low reset.

**L1.5 side** (encodings are this design's choice, in `jxp_pkg`):

| signal | meaning |
|---|---|
| `l15_req_val`, `l15_req_ack` | request handshake; the request stays stable while `val && !ack` |
| `l15_req.rqtype` | `RQ_LOAD` 00000, `RQ_STORE` 00001, `RQ_IFILL` 10000 |
| `l15_req.nc` | non-cacheable (I/O) |
| `l15_req.size` | `SZ_1B` 001, `SZ_2B` 010, `SZ_4B` 011 (`SZ_8B` 100 unused) |
| `l15_req.addr[39:0]` | physical address of the first byte accessed |
| `l15_req.data[63:0]` | big-endian store data |
| `l15_resp_val`, `l15_resp_ack` | response; always taken in the cycle it is valid |
| `l15_resp.rettype` | `RET_LOAD` 0000, `RET_IFILL` 0001, `RET_ST_ACK` 0100, `RET_INT` 0111 |
| `l15_resp.data[63:0]` | aligned doubleword (loads) or interrupt type in bits 1:0 |

Interrupt types: `INT_HW` 00 (ordinary interprocessor interrupt), `INT_START`
01 (release the core), `INT_IDLE` 10, `INT_RESUME` 11. Every interrupt is
also passed out on `irq_val`/`irq_type` for whatever the core does with
interrupts. `start_count` counts start interrupts.

**Address map** (this design's choice). Core address bit 31 = 0 is memory:
physical address `MEM_BASE + addr`, cacheable. `MEM_BASE` is where the host
placed the core's region. Bit 31 = 1 is I/O: physical address bits 39:31 are
all ones (`IO_PREFIX`), followed by address bits 30:0, non-cacheable. The
UART and SD card are reached this way.

## Request life cycle and timing

The controller has three states:

```
 IDLE --(mem_valid && core running && l15_req_ack)--> WAIT
 WAIT --(store ? RET_ST_ACK : RET_LOAD/RET_IFILL)--> DONE   (mem_ready, mem_rdata registered)
 DONE --> IDLE
```

`l15_req_val` is combinational: it is `mem_valid` gated by IDLE and by the
core being out of reset. Say the L1.5 takes the request in the first cycle
and answers *L* cycles later. Then `mem_ready` is high in cycle *L* + 2, so
an access holds `mem_valid` for *L* + 2 cycles. The transducer adds the
registered return cycle. The DONE cycle absorbs the core dropping
`mem_valid`. Only one request is ever outstanding, because the core issues
one at a time.

The original system reports, from `rdcycle; lw/sw; rdcycle` on the real
hardware: 17 cycles when cached and 113 ± 1 when the access goes to DRAM.
The authors read this as a 4-cycle L1.5 hit and about 100 cycles to memory.
The 17 is three L1.5 accesses (two fetches and the data) plus the 5 cycles a
load or store takes in the core. In the testbench the L1.5 model answers in
2 cycles on a hit and 98 on a miss. The core therefore sees 4 and 100, and
the core model measures **17 and 113**, the published numbers. Those model
latencies were chosen to reproduce them. The transducer's own contribution
is fixed: 2 cycles per access.

## Booting and hosting the RISC-V core

The RISC-V core has no privileged mode, so a SPARC core running Linux hosts
it:

1. A user-space proxy program asks a new system call to reserve a physical
   region for the core.
2. It loads the RISC-V binary there.
3. A second new system call starts the core. It calls a new hypervisor call,
   which sends the start interrupt to the core's tile.
4. The proxy keeps running and polls a mailbox in shared memory. The RISC-V
   program's C library stubs write the syscall number and arguments there.
   The proxy performs the call under Linux and writes the result back.

The hardware this needs is the start-by-interrupt reset control and coherent
shared memory. The system testbench acts as that host. It writes the image
and inputs into memory and sends `INT_START`. It then serves the mailbox at
`0xF000`: word 0 is the call number (0 = none), words 1..3 the arguments,
word 4 the result and word 5 the done flag. It implements `write` (64) to a
console and `exit` (93).

## Parameters

| parameter | default | meaning |
|---|---|---|
| `CACHE_INSTR` | 1 | fetches as cacheable loads (1) or instruction fills (0) |
| `MEM_BASE` | 0 | physical base of the core's memory window |
| `IO_PREFIX` | 9'h1FF | physical address bits 39:31 of the I/O window |
| `jxp_pkg::L15_DW` | 64 | L1.5 data width (the SPARC word) |
| `jxp_pkg::PA_W` | 40 | physical address width (this design's choice) |

## Verification

| testbench | what it checks |
|---|---|
| `tb_pico_req_encoder` | 2,000 random requests of every strobe pattern, memory and I/O; the expected bus lanes are computed byte by byte; the `MEM_BASE` offset; `CACHE_INSTR = 0`; every illegal strobe |
| `tb_pico_resp_decoder` | random responses of all types; classification, start detection, word selection and byte order |
| `tb_pico_reset_ctrl` | held in reset until the start interrupt, release one edge later, re-assertion on system reset |
| `tb_pico_l15_transducer` | bus-functional core on the L1.5 model: nothing issued in reset, start, 4/100-cycle hit/miss latency, fetches cached, 3,000 random sub-word stores and loads with random request stalls against a little-endian reference, UART store, ordinary interrupt |
| `tb_pico_l15_transducer_ifill` | `CACHE_INSTR = 0`: fetches go out as instruction fills and never allocate (100 cycles every time), data still cached; a fetch from I/O space (code run straight from the SD card) goes out non-cacheable |
| `tb_juxtapiton_system` | RV32I core model + transducer + L1.5 model, host boot and syscall proxy, four programs (below); counts every mechanism and fails if one never happened |

Programs run by `tb_juxtapiton_system` (RV32I, linked at address 0, stack at
`0x8000`, inputs at `0x10000`, results at `0xE000`). Each `tb/prog_*.hex` is
the flat image with one little-endian 32-bit word per line:

* `memlat`: the latency measurement above, on a warm line and on fresh lines
  (expects 17, 17, 113, 113), then `sw`/`sh`/`sb`/`lbu`/`lh`/`lb` byte-order
  checks.
* `hanoi`: recursive Towers of Hanoi of height 7. It must make 127 moves and
  leave all 7 disks on the last peg. It prints over the UART and through the
  proxy.
* `quicksort`: sorts 100 random integers that the host placed in memory. The
  host checks order and content. It runs with 20 % of requests stalled.
* `binsearch`: the host builds a sorted array of 10,000 integers `3i+1`
  (40,000 bytes, five times the 8 KB L1.5) and 10 random keys. The program
  must return each key's index or -1.

The sizes of these three programs are the ones the original evaluation used.

Run any testbench from the repository root, because the programs are read by
relative path:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/jxp_pkg.sv tb/tb_juxtapiton_system.sv --top-module tb_juxtapiton_system -o sim
./obj_dir/sim
```

Each testbench ends with `TB_RESULT checks=N failures=M` and has a watchdog.
The system test takes well under a second.

Behavioural models in `tb/`:

* `rv32i_core_model`: the full RV32I base set plus the cycle and instret
  counters, on the PicoRV32 memory interface. Loads and stores take 5 cycles
  plus memory time, as in the real core. The other instruction timings follow
  that core's documentation, but this is not the real core.
* `l15_model`: an 8 KB direct-mapped tag array of 16-byte lines, used only to
  decide hit or miss. It keeps a sparse big-endian byte memory, captures the
  UART, injects interrupts and can withhold acknowledges at random. Host-side
  writes invalidate the line, as coherence would.

## Departures and limits

* Only the transducer is RTL. The core, L1.5, L2, NoC, SPARC tile and chipset
  are existing designs. The testbench models stand in for the core and for
  the L1.5 with memory. They do not model coherence traffic, the L2 homing
  policy or the clock-domain crossing that gives the real memory path its
  ±1-cycle jitter.
* The L1.5 port here is a simplified valid/ack interface. Its type codes,
  field layout, 64-bit return of one doubleword and interrupt-type position
  are this design's choices. A real L1.5 interface would need a thin
  adapter.
* The address map (bit 31 for I/O, `MEM_BASE` for the core's region) is this
  design's choice. The original system only says the host reserves a
  physical region and that the core can reach the UART and SD card.
* A tile that can be built with either core, and a separate faster clock for
  the RISC-V core (suggested as an option in the original work), are not
  part of this RTL: it has one clock.
* The original evaluation reports slowdowns against the SPARC core of about
  8x for hanoi and quicksort and 3.8x for binsearch. With no SPARC core here
  those ratios are not reproduced; the programs are run for function.
* Interrupts other than the start interrupt are only passed out. Only a system
  reset stops the core again.
* The 4-cycle hit and 100-cycle memory figures are reproduced by the choice of
  model latencies. They are not a property of the transducer alone.
