# Muntjac-style multicore RV64 SoC in SystemVerilog

This is a small multicore RISC-V system built from simple parts. It has four 64-bit in-order
cores. Each core has its own instruction and data caches. All caches share one TileLink bus. A
coherence *broadcaster* in front of main memory keeps the data caches coherent. The aim is a
design where every part is loosely coupled:

- Pipeline stages and components talk through valid/ready handshakes, not a global stall.
- The caches replay their own misses.
- The interconnect speaks TileLink, so any of its pieces can be swapped.

The cores run RV64IMAC in machine mode. The design follows the published Muntjac SoC in its
structure and main numbers. Its default configuration is:

- four cores;
- 16 KiB, 4-way L1 instruction and data caches;
- a two-stage execute pipeline;
- a bi-modal branch predictor, a BTB and a return-address stack;
- 16-cycle line locking after a refill.

Several things the original has are **not** here:

- supervisor mode, the MMU and the TLBs, so it does not boot Linux;
- the floating-point unit;
- the L2 cache;
- the TileLink-to-AXI bridge.

The data cache is also simplified: it is write-through rather than write-back, as described below.

## System

```
 core0 ─┬─ I$ (source 0) ─┐
        └─ D$ (source 1) ─┤
 core1 ─┬─ I$ (2)        ─┤                     ┌─ ROM port      0x0001_0000, 64 KiB
        └─ D$ (3)        ─┤   TileLink bus       │
 ...                      ├── (one transaction ──┼─ broadcaster ─ memory port   ≥ 0x8000_0000
 core3 ─┬─ I$ (6)        ─┤    at a time,        │     │ probes (B) / acks (C, E) to every D$
        └─ D$ (7)        ─┤    round robin)      └─ I/O bus ─┬─ CLINT 0x0200_0000
 DMA port (source 8)     ─┘                                  ├─ PLIC  0x0C00_0000
                                                             └─ device port (everything else)
```

`muntjac_soc` is the top. It has no parameters that need setting. Its ports are:

- a TileLink A/D pair for the boot ROM;
- a TileLink A/D pair for main memory;
- a TileLink A/D pair for an I/O device;
- a TileLink A/D master port for an external DMA engine;
- 31 interrupt lines into the PLIC;
- one retire strobe per core.

All cores start at 0x10000. Each core knows its hart number through `mhartid`.

TileLink messages are the packed structs `tl_a_t` … `tl_e_t` of `muntjac_pkg`:

- Physical addresses are 56 bits and data beats are 64 bits.
- A cache line is 64 bytes, which is 8 beats.
- A request's source id is its master index. Core *h*'s instruction cache is 2*h*, its data cache
  is 2*h*+1, and the DMA port is 2·`NUM_CORES`.
- Responses are routed back by that source id.
- Channel A has one extra user bit, `lock`.

## The core

### Frontend: fetching without looking at the bytes

The frontend predicts the next fetch address from the current one alone, without decoding what
was fetched. This is what allows a separate PCGEN stage. Each cycle, PCGEN looks up the PC of
the 32-bit fetch word in three structures:

- **The BTB.** It has 64 entries and is direct-mapped. An entry holds a tag, the target, the
  kind of transfer (branch, jump, call or return), and one bit saying whether the transfer ends
  in the upper half of the word. If fetch enters a word at its upper half, an entry for a
  lower-half instruction is ignored.
- **The bi-modal predictor.** It has 512 two-bit saturating counters, indexed by the fetch word
  that holds the last parcel of the branch.
- **The RAS.** It has 8 entries. It is pushed for calls and popped for returns at prediction
  time.

From these, PCGEN picks the next word: the predicted target or PC+4. Up to four fetches may be in
flight. On a redirect each in-flight fetch carries a kill bit, so the frontend does not wait for
the cache to drain.

The instruction cache only ever delivers aligned 32-bit words. The **aligner** turns them into
instructions:

- It holds the upper half-word of a word so that a 32-bit instruction starting at PC≡2 (mod 4)
  can be completed from the next word.
- It expands compressed instructions with `muntjac_decompress`.
- It attaches to every instruction its *predicted next PC*.

The difficult case is a 32-bit instruction that straddles into a word whose prediction was made
as if the instruction ended inside it. Then the aligner asks PCGEN to refetch from that
instruction without prediction. Misaligned-fetch exceptions cannot happen, because the C
extension is always on.

### Backend: DE → EX1 → EX2 → WB

| stage | work |
|---|---|
| DE | decode (RV64IMA, Zicsr, Zifencei, M-mode system instructions), register read, hazard check, issue |
| EX1 | ALU and branch unit finish; branch/jump resolved against the predicted next PC; D$ request sent; mul/div started |
| EX2 | D$ load data arrives (two-cycle hit); mul/div result awaited |
| WB | register write |

Every instruction goes from EX1 to EX2 before it writes back, so results retire in order.

ALU, branch and CSR results are bypassed from EX1, and every result from EX2. The issue logic
stalls an instruction while one of its sources is a load or mul/div result that is not ready
yet. Each stage has its own valid/ready pair, so a stall moves backwards one stage at a time.

A two-entry buffer holds data-cache responses that arrive while EX2 is stalled.

A mismatch between the computed and the predicted next PC in EX1 redirects the frontend. It also
trains the BTB and the predictor, and kills the younger instructions in DE and in the frontend.

**System instructions** run on their own:

- They cover CSR access, ECALL/EBREAK, MRET, WFI, FENCE and FENCE.I.
- DE holds one of them until EX1 and EX2 are empty. It then executes in the CSR unit, and the
  frontend is redirected to the next instruction, the trap vector or `mepc`.
- An enabled pending interrupt is taken by replacing the instruction in DE with an "interrupt"
  pseudo-instruction, which goes through the same path.
- WFI waits in that path until an enabled interrupt is pending.
- The CSR unit implements only the machine-mode CSRs, plus `cycle` and `instret`. `mtvec`
  supports vectored mode.

Multiplication takes 2 cycles. Division is a radix-2 restoring divider: 64 cycles, or 32 for the
W forms. Division by zero finishes in 1 cycle with the RISC-V defined result.

### Data cache and atomics

The data cache is set-associative with 64-byte lines. Data is kept in one array per way, read in
the cycle after the request. Tags are kept in flip-flops, so that probes from the broadcaster can
be looked up while the main state machine is busy.

The write policy is this design's own:

- Stores are **write-through and no-write-allocate**. A store updates a line that is present and
  always sends a `PutPartialData` to memory. The store completes when the `AccessAck` returns.
- Lines are only ever held with read permission ("Branch"). So there is never dirty data, a
  probe only needs to invalidate, and no Release message exists.
- A miss sends `AcquireBlock`. The 8 `GrantData` beats fill the victim way, and a `GrantAck` on
  channel E closes the transaction.
- After each refill the line is **locked for 16 cycles**. A probe to it waits, so the core can
  use the line at least once before another core takes it away. This guarantees forward
  progress.

Atomic memory operations use the cache's own AMO ALU:

1. The cache sends a `Get` with `lock` set.
2. The bus keeps itself granted to this cache while `lock` is set.
3. The AMO ALU computes the new value.
4. A `PutPartialData` writes it back and releases the bus.

Because the `Get` is locked, the broadcaster first invalidates every other cached copy. LR sets
a reservation on its line. The reservation is cleared by a probe of that line or by any SC. An
SC with a valid reservation is done like an AMO.

Addresses below 0x8000_0000 are uncached and use single-beat `Get`/`Put`.

The instruction cache is the same idea cut down. It is read-only, returns 32-bit words, and
refills with a plain line `Get`. FENCE.I clears all its valid bits at once.

## Coherence: the broadcaster

The broadcaster sits between the bus and memory and handles one transaction at a time:

- **AcquireBlock from a data cache.** It reads the line from memory with a `Get` and returns it
  as `GrantData`. It then waits for the `GrantAck`. Caches that share the line stay valid, since
  they are all read-only.
- **A Put, or a locked Get.** These may come from a data cache
  or the DMA port. The broadcaster first sends a `ProbeBlock toN` to every other data cache. It
  collects their `ProbeAck`s and only then forwards the request to memory.
- **A plain Get.** It is passed straight through.

Because every write goes through the broadcaster, a DMA write invalidates the copies in every
core.

## Interrupts and timers

- **CLINT.** It has a free-running `mtime` that counts one per clock. It has a `mtimecmp` and
  an `msip` for each hart. The register map is the usual one: `msip` at 0x0, `mtimecmp` at
  0x4000, `mtime` at 0xBFF8.
- **PLIC.** It has 31 level-triggered sources and one machine-mode context per hart. Each
  source has a 3-bit priority. Each context has enables, a threshold and a claim/complete
  register, laid out as usual:
  - priorities at 4·*i*;
  - pending bits at 0x1000;
  - enables at 0x2000 + 0x80·*c*;
  - threshold and claim at 0x200000 + 0x1000·*c*.

## Parameters

| parameter | default | where |
|---|---|---|
| `NUM_CORES` | 4 | `muntjac_soc` |
| `NUM_IRQ` | 31 | `muntjac_soc`, `muntjac_plic` (`NS`) |
| `ICACHE_SIZE_B`, `DCACHE_SIZE_B` | 16384 | caches (`SIZE_B`) |
| `CACHE_WAYS` | 4 | caches (`WAYS`) |
| `LOCK_CYC` | 16 | `muntjac_dcache` |
| BTB entries / predictor counters / RAS depth | 64 / 512 / 8 | `muntjac_btb`, `muntjac_bp_bimodal`, `muntjac_ras` |
| `MUL_LAT` | 2 | `muntjac_muldiv` |

The line size, bus widths and memory map are constants in `muntjac_pkg`.

The published design gives the core count, the cache sizes and ways, and the 16-cycle lock. The
other numbers are this design's choices.

## Departures from the original design

- Machine mode only. There is no S/U mode, no Sv39 MMU and no 32-entry TLBs, so Linux cannot
  run.
- There is no FPU, and F/D instructions trap as illegal.
- The data cache is write-through and read-only-permission. The original is a full TL-C cache
  with write-back.
- There is no L2 cache and no AXI bridge. The broadcaster talks TileLink directly to the memory
  port.
- The bus carries one transaction at a time. This is simple, but it serialises all four cores.
- Performance is not calibrated against the original's Dhrystone and CoreMark figures.

## Simulation

Everything runs in plain Verilator 5 (`--binary --timing`). The testbenches live in `tb/`, one per
block. Each one prints `TB_RESULT checks=N failures=M`.

The system test, `muntjac_soc_tb`, instantiates the top at its defaults with four cores. The
program it runs is assembled at time zero by `muntjac_tb_prog_pkg`. The test then checks that
all harts finish and that their results match. Each hart:

- runs a summation loop;
- runs mul/div/rem, including division by zero;
- runs a run of compressed code containing a straddling 32-bit instruction;
- makes nested calls;
- increments a shared AMO counter;
- takes a shared LR/SC lock;
- waits at a barrier;
- takes a timer interrupt while in WFI.

The test also does a DMA read and a DMA write. It checks that the write removed a cached copy.

It counts 19 mechanisms and fails if any never happened:

- hazard stall;
- each bypass;
- misprediction;
- BTB and RAS predictions;
- refills;
- hits;
- probe invalidations;
- a probe held by a line lock;
- a locked atomic;
- SC failure;
- WFI;
- interrupt;
- a compressed instruction;
- a straddling instruction;
- a mul/div wait;
- an uncached access.

A run takes about 2,000 cycles.

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/muntjac_pkg.sv \
    tb/muntjac_tb_prog_pkg.sv tb/muntjac_soc_tb.sv --top-module muntjac_soc_tb -o sim
./obj_dir/sim
```

Other testbenches:

- **Unit testbenches.** Each small unit has one that compares against a reference model: ALU,
  branch unit, AMO ALU, mul/div, register file, decompressor, decoder, CSR unit, BTB, predictor,
  RAS, CLINT and PLIC.
- **Instruction cache.** `muntjac_icache_tb` streams random requests against a behavioural
  memory.
- **Data cache, bus and broadcaster.** `muntjac_dcache_tb` puts the data cache behind the real
  bus and broadcaster. It mixes random loads, stores, AMOs, LR/SC, I/O accesses and DMA writes,
  checks against a byte model of memory, and compares the whole memory at the end.
- **Tested only inside the system test.** The frontend, aligner, backend, core and I/O bus have
  no unit testbench of their own.

`muntjac_tb_tl_mem` is a behavioural TileLink memory used by these tests.
