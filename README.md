# AraOS virtual-memory path: a vector unit that borrows its host's MMU

Ara2 is a RISC-V vector (RVV 1.0) unit driven by the CVA6 scalar core. As a
bare-metal accelerator it issues physical addresses. To run it under Linux,
every vector load and store must be translated from virtual to physical, and a
page fault that happens halfway through a vector instruction must be precise
and restartable. AraOS does not give the vector unit an MMU of its own.
Instead it lends it CVA6's MMU, time-shared between the two. Around that
sharing it adds four things:

* an address generator that asks for as few translations as possible;
* a controller that cleans up the vector pipeline after a page fault;
* a filter that keeps CVA6's L1 data cache coherent with vector stores;
* a width converter from the vector unit's memory port to the 64-bit system
  bus.

This repository holds synthesizable SystemVerilog for that virtual-memory
path, with testbenches. It does not hold the processor around it: the CVA6
core and its MMU/TLB, the Ara2 lanes, sequencer and load/store data paths,
the caches and the SoC. Those connect through the top module's ports. The
testbenches model them.

Main configuration (all defaults): 2 lanes, VLEN = 2048 bits, a 64-bit vector
memory port (32 bits per lane), a 64-bit SoC crossbar, 4-KiB pages, 56-bit
physical addresses. CVA6's L1 D$ has an 11-bit physical index.

## Block map

```
             vector memory op (base, stride, vl, vstart, eew, ld/st, mode)
                     |            indices (indexed mode)
                     v
              +--------------+   req/vaddr/is_st   +---------------+  to CVA6's MMU
              | araos_addrgen|-------------------->| araos_mmu_    |--------------->
              |              |<--------------------| arbiter       |<---------------
              +--------------+  valid/paddr/exc    +---------------+
               |  AR     |  AW   exception             ^  CVA6 LSU port (port 0)
               |         v         \
               |   +--------------+ \   +-----------------+
               |   | araos_inval_ |  -->| araos_flush_fsm |--> vstart, exception to CVA6,
               |   | filter       |     +-----------------+    frontend stall, backend flush
               |   +--------------+ --> L1 D$ line invalidations
               v         v
            +-----------------------+
            | araos_axi_downsizer   |  32*L bits -> 64 bits  --> SoC AXI crossbar
            +-----------------------+
```

`araos_vm` (file `rtl/araos_vm.sv`) is the top level and wires exactly this.
Shared types and constants are in `araos_pkg`.

## Address generation: one translation per burst

`araos_addrgen` takes one vector memory instruction at a time. It turns the
instruction into AXI read (AR) or write (AW) requests, in element order.

* **Unit stride.** Consecutive elements are grouped into an INCR burst of
  full-width beats. A burst ends at whichever comes first: the next 4-KiB page
  boundary (AXI forbids crossing 4 KiB), the 256-beat AXI length limit, or
  the last element. Since a burst never leaves its page, one translation
  covers all of it. A 2-KiB vector register group therefore costs a single MMU
  request.
* **Strided and indexed.** Each element becomes its own single-beat request,
  at the element's size, and each gets its own translation. Indexed offsets
  arrive on a separate stream (`idx_*`), one per element from `vstart` on.
  This is why gather/scatter-heavy code pays a translation latency per
  element.

With `en_virt_mem_i` low (satp in bare mode), the virtual address is used as
is and the MMU is not asked.

The FSM is Idle -> Calc -> Trans -> Issue, repeated per request:

* **Calc** (1 cycle) sizes the chunk:
  `min(bytes left, bytes to the page end, 256 beats minus the start offset)`.
* **Trans** holds `req` with `vaddr` and `is_st` until the MMU answers
  `valid`.
* **Issue** offers AR/AW until ready.

`done_o` pulses in the cycle after the last request is accepted. Then the
next instruction can enter. For a memory instruction, this pulse
(`op_done_o` on the top) is the "no exception" answer CVA6 waits for before
it commits: every element has been translated without a fault.

Two conditions stop an instruction: a misaligned element, or an exception
returned by the MMU. After either, no further translation is requested. The
unit pulses `exc_valid_o` with the RISC-V cause (4/6 misaligned, 13/15 page
fault), the faulting address as `tval`, and the index of the faulting
element. It then parks in a Fault state until the flush returns it to Idle.
Requests already issued for earlier elements stay valid; those elements
complete normally.

## Sharing CVA6's MMU

`araos_mmu_arbiter` connects CVA6's own load/store unit (port 0) and the
address generator (port 1) to the single MMU interface. Both use the same
signals: a `req` level with `vaddr` and `is_st`, answered by a one-cycle
`valid` carrying `paddr` and `exception`.

* A requester that finds the MMU free is connected in the same cycle. It
  stays connected until the MMU answers. The other requester waits, even if
  it asked one cycle later.
* On a same-cycle tie, the port that was not served last wins. This round
  robin means a long vector instruction cannot starve the core, or the core
  the vector unit.
* Only the owner sees `valid`.

## Precise page faults in the middle of a vector instruction

This is the subtle part. CVA6 hands vector instructions to Ara2
non-speculatively. It waits for Ara2's answer before committing, and takes
any exception at commit. A page fault inside a vector load or store
therefore has two requirements:

1. Architectural state for the elements before the faulting one must
   commit.
2. Everything the faulting instruction already set in motion must be thrown
   away. That includes operands fetched from the register file, queue
   entries and unit FSM states.

The OS then maps the page and re-executes the instruction from `vstart`.

`araos_flush_fsm` sequences this:

| state      | what happens                                                        | leaves when                 |
|------------|---------------------------------------------------------------------|-----------------------------|
| Idle       | waits for a fault from the address generator                        | `exc_valid_i`               |
| WaitCommit | `vstart` written with the faulting element index; exception offered to CVA6 (`resp_*`, held until taken); frontend stalled | backend reports `preceding_done_i` |
| Flush      | one-cycle `flush_o` pulse injected into the backend                 | next cycle                  |
| WaitAck    | stall held while the flush travels through the backend              | `flush_ack_i`               |

Timing, as checked by its testbench:

* `stall_o` rises in the cycle after the fault.
* `flush_o` comes in the cycle after `preceding_done_i`.
* `stall_o` falls in the cycle after `flush_ack_i`.

In the top, `flush_o` also clears the address generator's Fault state. The
flush through the real backend takes about 10 cycles. That delay belongs to
the backend, which is outside this design. The testbenches acknowledge 10
cycles after the flush.

Restart needs nothing special. The re-executed instruction carries
`vstart = k`, so the address generator starts at element k. Bursts start
mid-page where element k lies.

## Coherence with CVA6's L1 data cache

CVA6's L1 D$ is write-through, so vector loads always find current data
below it. Vector stores, however, bypass it. `araos_inval_filter` therefore
watches the physical addresses on the AW channel.

* The AW request passes unchanged.
* Each accepted burst is recorded as (first line, number of lines) in a
  4-entry FIFO.
* A sequencer sends CVA6 one line-aligned invalidation address per cycle.

The bytes a burst touches run from its start to
`aligned(addr, 2^size) + (len+1)*2^size - 1`.

A burst that covers more than one cache way (2 KiB = 128 lines of 16 B) is
capped at 128 invalidations, because by then every set has been visited.
The L1 D$ is virtually indexed, yet the physical address on AW still works.
The cache index is 11 bits, which lies inside the 12-bit page offset, so the
index bits are the same in the virtual and the physical address.

AW is held back only when the FIFO is full. A unit-stride store burst of
256 beats produces 128 invalidations, so a filter running at one line per
cycle keeps up with the data.

## Width adaptation

The vector unit's memory port is 32 bits per lane. The SoC crossbar is 64
bits. `araos_axi_downsizer` converts between them.

* **Two-lane configuration.** Both sides are 64 bits, and the module
  elaborates to wires. This is the design's main configuration, so at
  default parameters the downsizer has no logic.
* **Four lanes and more** (ratio 2, 4, ...). Conversion logic is generated:
  * Each wide burst is reissued with the narrow beat size. If it exceeds 256
    narrow beats it is cut into several bursts. They never cross a page,
    because the wide burst does not.
  * Read beats are packed into their byte lanes. A wide beat is returned
    with its last piece.
  * Write beats are split with their strobes.
  * The B responses of the pieces are merged, keeping the worst.
  * One read and one write transaction are converted at a time.

## Top level (`araos_vm`)

The top has no parameters; everything comes from `araos_pkg`. Its ports fall
into these groups:

* vector operations and indices from Ara2's sequencer;
* `op_done_o`;
* CVA6's translation port and the shared MMU port;
* the wide R/W/B data of Ara2's load and store units;
* the whole 64-bit AXI master towards the crossbar;
* the L1 invalidation port;
* the flush handshake with the backend (`preceding_done_i`, `flush_ack_i`,
  `stall_o`, `flush_o`);
* `vstart` and the exception response to CVA6;
* three status outputs.

Everything is on one clock, with an asynchronous active-low reset.

## Parameters (`araos_pkg`)

| name          | default | meaning                                      |
|---------------|---------|----------------------------------------------|
| NrLanes       | 2       | vector lanes                                 |
| VLEN          | 2048    | bits per vector register                     |
| AxiDataWidth  | 32*NrLanes | vector memory port width                  |
| SocDataWidth  | 64      | crossbar data width                          |
| PageOffset    | 12      | 4-KiB pages                                  |
| DCacheIdxBits | 11      | L1 D$ index bits (set index + line offset)   |
| DCacheLineB   | 16      | L1 D$ line size in bytes                     |
| PAddrWidth    | 56      | physical address width (Sv39)                |
| AxiIdWidth    | 5       | AXI ID width                                 |

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_araos_addrgen`: directed instructions in all three modes, plus 40
  random unit-stride and strided ones at all element widths. Every AR/AW is
  checked against an element-by-element reference walk, and so is the number
  of translations. Faults and misalignment are checked too, including that
  no translation follows a fault.
* `tb_araos_mmu_arbiter`: two random requesters. It checks hold-until-valid,
  response routing, round robin on ties, and no lost requests.
* `tb_araos_flush_fsm`: 30 fault rounds with random backend delays. It checks
  `vstart`, the exception, and the cycle timing of stall and flush.
* `tb_araos_inval_filter`: random bursts against a reference list of lines.
  It includes the 128-line cap and back-pressure.
* `tb_araos_axi_downsizer`: the converter at 128 and 256 bits against a
  64-bit memory, plus the 64-bit pass-through.
* `tb_araos_vm`: the whole path at default parameters. The models around it
  are:
  * CVA6 issuing its own translations;
  * an MMU with a 16-entry TLB and an 8-cycle walk;
  * a random-latency memory;
  * the load/store units;
  * the backend flush.

  It runs loads and stores with VM off and on, a page-crossing burst, a
  256-beat burst, strided, indexed and misaligned accesses, and six page
  faults that are resumed from `vstart`. Each of these mechanisms must occur
  at least once, or the test fails.
* `tb_araos_ctxsw`: the vector part of a context switch. It saves and
  restores the 8-KiB register file with four `vse64`/`vle64` of 2 KiB each,
  over full-speed memory. It checks the restored bytes, 8 translations, 512
  invalidations, and the cycle count against the 2048-cycle data bound.
  Result: **2067 cycles**. The paper reports about 2k cycles for this step.
* `tb_araos_matmul`: the memory and translation traffic of a blocked
  matrix multiply (64-bit elements, 32x32, 64x64 and 128x128). Per step, the
  vector unit loads one row of B while CVA6 translates the eight scalars of A
  that multiply it. Every eight rows, the rows of C are stored. It runs with
  MMU models of 2, 16, 32 and 128 buffer entries, plus once with physical
  addressing. The arithmetic is not modelled.

  It checks four things:
  * the datasets touch exactly 6, 24 and 96 pages;
  * the vector unit makes one translation per instruction;
  * the scalar translations are right;
  * a buffer that holds the dataset takes only compulsory misses.

  The buffer size at which only compulsory misses remain is 16, 32 and 128
  entries for the three sizes. These are the thresholds at which the
  original measurements stop improving. The printed overhead against
  physical addressing, at 128 entries, is:

  | size    | overhead |
  |---------|----------|
  | 32x32   | 18.6 %   |
  | 64x64   | 0.7 %    |
  | 128x128 | 0.16 %   |

  With no arithmetic to overlap, the 32x32 loop is bound by the scalar
  translations, so these numbers are upper bounds.

Running with plain Verilator (5.x), for example the end-to-end test:

```
verilator --binary --timing --top-module tb_araos_vm \
  rtl/araos_pkg.sv rtl/araos_addrgen.sv rtl/araos_mmu_arbiter.sv \
  rtl/araos_flush_fsm.sv rtl/araos_inval_filter.sv rtl/araos_axi_downsizer.sv \
  rtl/araos_vm.sv tb/araos_tb_pkg.sv tb/araos_tb_mmu.sv tb/tb_araos_vm.sv
./obj_dir/Vtb_araos_vm
```

The end-to-end, context-switch and matmul testbenches assume the default
two-lane configuration. Their store-unit model and their reference
requests follow the SoC-side AXI channels, and those equal the vector
port's only when both are 64 bits wide. To use more lanes, change
`NrLanes` in `araos_pkg`. The converter itself is tested at 128 and 256
bits by `tb_araos_axi_downsizer`.

The downsizer test also needs `tb/araos_tb_dsz_run.sv`. The block tests need
only the package, their block and `tb/araos_tb_pkg.sv` / `tb/araos_tb_mmu.sv`
where they use them. The test models translate by a fixed offset
(`ppn = vpn + 0x80000`), so every physical address can be checked.

## What follows the source design and what is this design's own

Taken from the AraOS description:

* one translation per AXI burst, with bursts bounded by 4-KiB pages;
* a translation per element for indexed accesses;
* the MMU interface signals (`req`, `vaddr`, `is_st` / `valid`, `paddr`,
  `exception`);
* an MMU shared until it responds;
* no translations after a fault;
* the faulting index saved to `vstart`;
* the stall / commit / flush / acknowledge sequence;
* the AW-watching invalidation filter with its 11-bit physical index;
* the 32*L-to-64-bit downsizer;
* the two-lane, VLEN = 2048, 64-bit main configuration.

This design's own choices:

* the FSM structures and the operation bundle;
* the misalignment check;
* single-beat requests with a translation each for strided accesses too
  (the source mentions this only for indexed ones);
* cutting unit-stride bursts at 256 beats;
* the round-robin tie break;
* the one-cycle flush pulse and the response handshake;
* the 16-byte L1 line (the source gives only the 11-bit index; 2 KiB per way
  with 16-B lines is assumed), the 4-entry filter FIFO and the 128-line cap;
* the downsizer's conversion scheme;
* every port name beyond those listed above.

Known limits:

* Only one vector memory instruction is in the address generator at a time.
  Load/store ordering between CVA6 and Ara2 is left to the surrounding
  processor.
* The flush chain through the backend is represented only by its
  handshake.
* Vector CSR save/restore, the TLB and the page-table walker lie outside
  this path.
* The paper's system-level results (matrix-multiply overhead against TLB
  size, benchmark speedups) need the full processor and an OS. With these
  blocks alone, only their translation and memory traffic can be simulated
  (`tb_araos_matmul`), not their run times.
