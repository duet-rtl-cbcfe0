# Duet Adapter RTL

A small embedded FPGA (eFPGA) sitting next to the cores of a manycore chip is attractive
for fine-grained acceleration, but it runs at a fraction of the processor clock (tens to a
few hundred MHz against about 1 GHz). If a processor has to wait on the eFPGA for every
register access, or if the chip's coherence protocol has to wait on an eFPGA-built cache,
the slow clock leaks into the whole system. The Duet Adapter is the hard logic that
sits between the eFPGA and the chip's network-on-chip (NoC) and keeps that from
happening. It has two jobs:

* **Control.** Processors program the eFPGA, set its clock and talk to the soft
  accelerator's registers through memory-mapped I/O (MMIO). The adapter answers as many of
  those accesses as it can in the fast clock domain (shadow registers). When the
  accelerator misbehaves, it contains the failure.
* **Memory.** The accelerator gets coherent, optionally virtual, access to shared memory
  through a hard *Proxy Cache*. The Proxy Cache takes part in the coherence protocol on
  the accelerator's behalf and never waits on the eFPGA.

This repository holds synthesizable SystemVerilog for the adapter of the paper's main
example system, *Dolly-P2M2* (two processors, one eFPGA, two Memory Hubs). The design
follows "Duet: Creating Harmony between Processors and Embedded FPGAs". Where that paper
gives no detail, the choices made here are marked as such below and in each file's
opening comment.

```
                 processor clock domain                       |  eFPGA clock domain
                                                              |
 MMIO ──► duet_adapter ─┬─► control_hub ─┬─ fpga_manager ─────┼─► cfg_* (config memory)
                        │                │  (switches, CRC    |   fpga_clk, fpga_rst
                        │                │   programming,     |
                        │                │   clock divider,   |
                        │                │   exception hdlr)  |
                        │                └─ soft_reg_intf ──[async FIFOs]─► sr_down / sr_up
                        │                   + shadow_regs     |
                        ├─► memory_hub 0 ─┬ mem_hub_switches  |
 NoC port 0 ◄──────────►│                 ├ tlb               |
                        │                 ├ proxy_cache ──[async FIFOs]─► mreq[0] / mresp[0]
                        │                 └ exception_handler |
                        └─► memory_hub 1 (same)      ◄────────┼─► mreq[1] / mresp[1]
 NoC port 1 ◄──────────►                                      |
```

Everything except the eFPGA-facing ports runs on the processor clock `clk`. The adapter
generates the eFPGA clock `fpga_clk` itself (integer division of `clk`). Every signal
crossing between the two domains goes through an `async_fifo`.

## Files

| file | role |
|---|---|
| `rtl/duet_pkg.sv` | widths, message structs, enums, parity convention |
| `rtl/duet_adapter.sv` | top: one Control Hub, `NUM_MEM_HUBS` (2) Memory Hubs, MMIO decode, adapter-wide deactivation |
| `rtl/control_hub.sv` | FPGA Manager + Soft Register Interface + the two soft-register async FIFOs |
| `rtl/fpga_manager.sv` | Control Hub switches/CSRs, wraps the programming engine, clock divider and exception handler |
| `rtl/programming_engine.sv` | bitstream loader with CRC-32 integrity check |
| `rtl/clock_divider.sv` | programmable eFPGA clock |
| `rtl/soft_reg_intf.sv` | in-order MMIO engine for soft registers |
| `rtl/shadow_regs.sv` | the four shadow register types |
| `rtl/memory_hub.sv` | feature switches + TLB + Proxy Cache + exception handler + async FIFOs |
| `rtl/mem_hub_switches.sv` | Memory Hub CSRs |
| `rtl/tlb.sv` | fully associative TLB with page-fault interrupt |
| `rtl/proxy_cache.sv` | the hard coherent cache serving the eFPGA |
| `rtl/exception_handler.sv` | timeout and parity monitor |
| `rtl/async_fifo.sv` | dual-clock FIFO, Gray pointers, 2-flop synchronizers |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/efpga_sr_model.sv`, `tb/llc_model.sv` | behavioural models of the soft accelerator's register controller and of the LLC/directory |
| `tb/tb_workload_synthetic.sv`, `tb/tb_workload_sort.sv`, `tb/tb_workload_tangent.sv`, `tb/tb_workload_bfs.sv` | workloads run on the whole adapter (see Simulating) |

## The Proxy Cache and the soft-cache protocol

This is the part of the design that needs the most care.

The eFPGA sees a very small protocol. Requests are `Load` and `Store`: a store is at most
8 bytes with a byte enable, because the prototype's L2 takes no wider stores. Responses
are `LoadAck` (a whole 16-byte line), `StoreAck` and `Inv`. The accelerator may put its
own cache (a "soft cache") in the eFPGA. The Proxy Cache keeps that soft cache coherent
under three rules:

1. **No acknowledgements from the eFPGA.** A forwarded invalidation or downgrade from the
   directory (`noc_fwd`) is answered (`noc_fwd_ack`, with dirty data if the line is in M)
   in the cycle it is presented. When invalidation forwarding is switched on, an `Inv`
   for the line is queued to the eFPGA in the same cycle, and nothing comes back. The
   eFPGA clock therefore never appears in the coherence protocol's critical path.
2. **The soft cache is write-through.** Every store reaches the Proxy Cache, so the hard
   copy is always current, and dropping the soft copy on an `Inv` loses nothing.
3. **One ordered channel.** Line fills, store acks and invalidations share one FIFO to
   the eFPGA, in the order the Proxy Cache produced them. A soft cache that applies them
   in arrival order never keeps a line the hub has already invalidated.

The soft cache is indexed by virtual address, while the Proxy Cache is physically
indexed and tagged. Each Proxy Cache line therefore also stores the virtual page number
(VPN) it was last requested under, and an `Inv` is sent with that virtual address. Two
consequences follow:

* **Synonyms.** If a request hits a line under a different VPN (two virtual pages mapped
  to the same physical page), the Proxy Cache first sends an `Inv` for the old virtual
  address, records the new VPN, and only then serves the request. The soft cache never
  holds two aliases of one line.
* **Inclusion.** When a line is evicted while forwarding is on, an `Inv` for it is sent
  too, so the soft cache stays a subset of the Proxy Cache. Without this, a later
  directory invalidation of that line would find nothing to forward.

With the *write-allocate* switch on, a `StoreAck` carries the updated line so that a
write-allocate soft cache can fill from it. Otherwise it carries no data.

Organisation and timing of this implementation:

* 8 KB, 16-byte lines, direct-mapped (512 sets), write-back towards the LLC.
* A hit is answered in the cycle it is presented. A miss issues `GETS` (load) or `GETM`
  (store, or store to a line held only in S), waits for the single response, fills, and
  is then served as a hit. A dirty victim is first written back with `PUTM`, which is
  also answered by one response.
* One miss is outstanding at a time. Directory requests are served while idle and while
  a miss or write-back is waiting on the NoC. They wait only during the one or two cycles
  that send a synonym or victim `Inv`, and in the cycle in which a fill returns.

The NoC protocol is this design's own simple MSI-style set: `GETS`, `GETM` and `PUTM`,
each answered once, plus forwarded `INV` and `DOWNGRADE`. In the paper the Proxy Cache is
the prototype's unmodified OpenPiton P-Mesh L2 (MESI, set-associative), whose NoC
messages the paper does not give. Atomic operations, which the paper lists as an option,
are not built.

## Shadow registers and MMIO ordering

A *normal* soft-register access goes all the way to the soft accelerator: a `WR` or `RD`
message crosses the processor-to-eFPGA async FIFO, the accelerator answers with `ACK` or
`RDATA`, and that answer crosses back. At slow eFPGA clocks this costs tens of processor
cycles (`tb_control_hub` measures it).

A *shadowed* register is answered in the fast domain, one cycle after the MMIO is
accepted:

| type | processor write | processor read | eFPGA side |
|---|---|---|---|
| plain | stored, acked at once, forwarded as `SYNC` | returns the last value from either side | `SYNC` in; `PUSH` updates it |
| FPGA-bound FIFO | acked at once, forwarded as `SYNC` (every write, in order) | returns 0 | consumes the `SYNC`s |
| CPU-bound FIFO | (as plain) | pops the oldest pushed value; **blocks** while empty, until a push arrives or the Control Hub times out | `PUSH` appends (depth 4) |
| token FIFO | (as plain) | **non-blocking**: returns 1 and consumes a token, or 0 ("empty") | `PUSH` adds a token (8-bit counter) |

The type of each of the 16 soft registers is set by software in the FPGA Manager
(`STYPE` CSRs). Type 0 means normal.

I/O ordering is kept by serialising: the Soft Register Interface handles one access at a
time, and the adapter lets only one MMIO be outstanding. A shadowed write queued behind a
normal read is therefore answered after it, and a `SYNC` never overtakes an earlier `WR`
on the way into the eFPGA. Messages from the eFPGA carry an even-parity bit. A message with
bad parity is dropped and logged as an error.

## Containment: feature switches and exception handlers

Each hub has an exception handler with two checks:

* **Parity.** Every message from the eFPGA is parity-checked.
* **Timeout.** A counter runs while the hub is waiting on the eFPGA. It fires when the
  count reaches the programmed limit exactly (reset value 1024 cycles; 0 disables it).
  * In the Control Hub, "waiting" means a normal access or a blocking read is outstanding.
  * In a Memory Hub, it means a request or an answer is pending while the eFPGA leaves
    the hub-to-eFPGA FIFO full.

The first error is latched (`ERROR` CSR) until software clears it. While an error is
logged, or while software has switched the hub off:

* **Control Hub.** Every soft-register access is answered at once with
  `64'hDEAD_DEAD_DEAD_DEAD` (writes with 0), so a hung accelerator cannot stall a
  processor. A blocking read that is waiting is released with that value.
* **Memory Hubs.** An error in any Memory Hub deactivates *all* Memory Hubs of the
  adapter (`deact_in`). A deactivated hub drains and drops the eFPGA's requests, and drops
  what it would send to the eFPGA. Its Proxy Cache keeps answering directory requests,
  so coherence traffic that is already in flight completes.

Memory Hubs also come out of reset deactivated. This is the state software should put them
in while the eFPGA is being reprogrammed.

## Virtual memory

Each Memory Hub has an 8-entry, fully associative TLB with 4 KB pages: a 39-bit virtual
address (27-bit VPN) maps to a 40-bit physical address (28-bit PPN). It is switched on
per hub. When it is off, addresses pass through as physical.

On a miss, the request waits in front of the Proxy Cache and `fault_irq[i]` rises. The
`FAULT` CSR holds the faulting address. The kernel writes the entry through `TLBFILL`;
that clears the interrupt and the request proceeds. Replacement is round-robin, and a
fill for a VPN already present overwrites it. The paper says translation happens "while
being speculatively processed by the Proxy Cache"; this design translates first,
combinationally, which is simpler and costs no cycle.

## Programming and the eFPGA clock

Bitstream loading works as follows:

1. Software writes `PSTART`.
2. Software writes each 64-bit word to `PDATA`. The engine writes it to the next
   configuration-memory address and folds it into a CRC-32: IEEE polynomial, reflected,
   bytes least-significant first, init and final XOR `0xFFFFFFFF`.
3. A `PDATA` write stalls while the configuration memory deasserts `cfg_ready`.
4. Writing the expected CRC to `PCHECK` sets the ok or bad status bit.

`PCRC` reads back the word count and the running CRC.

The eFPGA clock is `clk / CLKDIV`, with an integer ratio from 2 to 255 (reset 2). It is
high for floor(ratio/2) cycles, and a new ratio takes effect at the next period boundary,
so no glitch is produced. The paper's generator may also use a PLL for non-integer
ratios; that option is not built.

## Register map

MMIO offsets, 64-bit registers, offset = 8 × index. `offset[15:13]` selects the window:

* **0: Control Hub.** `offset[12]` = 0 selects the FPGA Manager CSRs; 1 selects soft
  register `offset[6:3]`.
* **1 + i: Memory Hub i.**
* Other windows read as 0 and ignore writes.

FPGA Manager:

| idx | name | meaning |
|---|---|---|
| 0 | CTRL | [0] hub active, [1] accelerator reset. Reset: inactive, in reset |
| 1 | TIMEOUT | timeout limit in cycles, 0 = off (1024) |
| 2 | ERROR | read: error code (0 none, 1 timeout, 2 parity); write: clear |
| 3 | CLKDIV | eFPGA clock ratio (2) |
| 4 | PSTART | start a bitstream |
| 5 | PDATA | one bitstream word |
| 6 | PCHECK | write: expected CRC; read: [1] bad, [0] ok |
| 7 | PCRC | {word count[63:32], CRC[31:0]} |
| 8..23 | STYPE | shadow type of soft register idx−8 (0 normal, 1 plain, 2 FPGA-bound FIFO, 3 CPU-bound FIFO, 4 token) |

Memory Hub:

| idx | name | meaning |
|---|---|---|
| 0 | CTRL | [0] active, [1] forward invalidations, [2] TLB on, [3] write-allocate. Reset: all 0 |
| 1 | TIMEOUT | as above (1024) |
| 2 | ERROR | as above |
| 3 | FAULT | {[63] interrupt pending, [38:0] faulting virtual address} |
| 4 | TLBFILL | write {PPN[54:27], VPN[26:0]} |
| 5 | TLBFLUSH | write: drop all entries |

Every CSR access is answered one cycle after it is accepted.

## Interfaces and timing

All handshakes are valid/ready. A transfer happens on a rising edge where both are high,
and a valid, once raised, holds until it is taken.

* **MMIO** (`mmio_*`). One request in flight; `mmio_ready` stays low until the response
  is given.
* **NoC, per Memory Hub** (`noc_req`, `noc_resp`, `noc_fwd`, `noc_fwd_ack`). `noc_resp`
  has no ready: the hub always takes it.
* **Soft-register path** (`sr_down`, `sr_up`, on `fpga_clk`).
* **Memory path, per Memory Hub** (`mreq`, `mresp`, on `fpga_clk`). `mreq` carries
  {type, 39-bit address, 64-bit data, byte enable, parity}.
* **Configuration memory** (`cfg_we`, `cfg_addr`, `cfg_wdata`, `cfg_ready`), on `clk`.

The async FIFOs are 4 deep, first-word-fall-through, with Gray-coded pointers and
two-flop synchronizers. They are reset by one asynchronous active-low `rst_n` shared by
both domains. The eFPGA clock does not run during reset, so the reset has to be
asynchronous; the tools' `SYNCASYNCNET` notes on `rst_n` come from that choice.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_MEM_HUBS` | 2 | Dolly-P2M2 |
| `CACHE_BYTES` | 8192 | the prototype's 8 KB private L2 per tile |
| line size (`duet_pkg::LINE_BYTES`) | 16 | prototype |
| `TLB_ENTRIES` | 8 | this design |
| `CDC_DEPTH` | 4 | this design (the paper quotes two to four stages for async FIFOs) |
| `NUM_SREGS` | 16 | this design |
| `CFG_ADDR_W` | 16 | this design |

## Simulating

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops
itself with a watchdog if something hangs. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/duet_pkg.sv tb/tb_duet_adapter.sv --top-module tb_duet_adapter -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_duet_adapter` by any `tb_<module>`. The testbenches use only two-state values
and `$urandom`.

`tb_duet_adapter` runs the whole adapter at its default parameters. It counts 23
mechanisms and fails if any never happened:

* programming with CRC check;
* clock-ratio change;
* normal and shadowed accesses;
* each shadow FIFO type, including a blocking read;
* load miss and hit, store upgrade;
* directory invalidation forwarded with dirty data returned;
* eviction with write-back;
* synonym;
* page fault and TLB fill;
* parity error deactivating both hubs, while a deactivated Proxy Cache still answers
  the directory;
* Control Hub timeout and bogus data;
* unmapped window.

Four more testbenches run workloads of the kind the adapter was built for, again with
every parameter at its default:

* `tb_workload_synthetic` is the single-processor bandwidth study. It sends 512
  quad-words to the accelerator through an FPGA-bound FIFO register and takes them back
  through a CPU-bound one. Then the accelerator loads a 4 KB buffer through a Memory Hub and
  stores into another, and the processor reads the result back through the directory.
  A shadowed write is answered one cycle after it is accepted; a normal one takes 18 cycles
  at an eFPGA clock ratio of 4. Once the buffer is cached, 256 loads come back in 259 eFPGA
  cycles, i.e. one line per eFPGA cycle.
* `tb_workload_sort` sorts 32, 64 and 128 random 32-bit integers. It reads them through
  hub 0 and writes the sorted array through hub 1. The sort itself is behavioural: the
  eFPGA's sorting network is not part of the adapter. It checks one line fill per four
  inputs and one ownership request per output line, then checks the sorted array in the
  second port's memory after the directory has recalled the lines.
* `tb_workload_tangent` passes 32 arguments to a tangent accelerator through an
  FPGA-bound FIFO register. It reads each result from a CPU-bound FIFO register, and
  that read blocks until the result is there. The accelerator is modelled with `$tan`.
  The argument write takes 1 cycle; the blocking read takes at least 35.
* `tb_workload_bfs` runs a parallel breadth-first search. Four processor threads share
  the MMIO port and use a work queue kept in the eFPGA. A thread enqueues through an
  FPGA-bound FIFO register. It asks for work through a token FIFO register, which
  answers 1 or "empty" at once, and after a token it pops the vertex from a
  CPU-bound FIFO register. The queue drops vertices it has already seen. The graph
  is random, with 64 vertices. Each reachable vertex must be handed out exactly once,
  and every token read must be answered one cycle after it is accepted.

Its core is a Popcount kernel on a 512-bit vector, one of the paper's workloads:

1. The processor passes the vector address through a plain shadow register.
2. It then blocks on a CPU-bound FIFO register.
3. The modelled accelerator loads the four lines through Memory Hub 0, counts the bits
   and pushes the result.

Among the unit testbenches, `tb_proxy_cache` adds 600 random loads, stores,
invalidations and downgrades, checked against a reference memory.

## Departures from the paper, and limits

* **Proxy Cache.** Direct-mapped, with its own MSI-style NoC protocol, one outstanding
  miss, and no atomics, instead of the reused OpenPiton L2.
* **Not built: parts the paper takes from elsewhere.** The processors, the L2/L3 and NoC
  routers of the tiles, and the eFPGA fabric with its configuration memory. Their
  connections are brought out as ports.
* **Not built: the optional PLL** of the clock generator.
* **One MMIO port for the whole adapter.** In the prototype, the Control Hub and each
  Memory Hub sit in their own tiles with their own NoC sockets; here one MMIO port is
  windowed.
* **This design's choices.** The register maps, message formats, bogus-data value,
  parity scheme, CRC-32 integrity check, FIFO depths and the counts of TLB entries and
  soft registers are all this design's own.
* **Untested at the paper's eFPGA clocks.** The paper's evaluated eFPGA clocks (85–282 MHz
  against 1 GHz) need ratios 4–12. The testbenches use ratios 2–5 and an unrelated free
  clock to keep runs short; nothing in the RTL depends on the ratio.
