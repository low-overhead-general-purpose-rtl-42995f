# M2NDP: near-data processing inside a CXL memory expander

A CXL memory expander sits on the host's CXL link and answers ordinary load and store traffic (CXL.mem). This design adds general-purpose processing next to the expander's DRAM. It does so without a new command protocol and without a host-side driver on the fast path.

Two ideas make that work.

1. **Function calls through memory accesses (M2func).** The host process owns a small address region in the expander. A write to a fixed offset in that region is a call whose arguments travel as the write data. A later read of the same offset returns the call's result.
   - A *packet filter* at the CXL input recognises those addresses.
   - It hands the calls to an *NDP controller* and passes every other access to memory untouched.
   - Registering a kernel, launching it, polling it and tearing it down each cost one or two ordinary memory accesses.
2. **Lightweight threads over memory (uthreads).** A kernel is launched over a *pool*, an address range. The device spawns one uthread for every 32-byte granule of the pool.
   - A uthread starts with the address of its granule in `x1` and its offset in `x2`.
   - It runs a short RISC-V (with vector) program and ends.
   - Because a uthread is so short, it needs only a few registers and no stack. Many of them fit in a small register file.
   - Their memory accesses keep all DRAM channels busy.

## Block overview

```
 CXL.mem in ──► packet_filter ──┬──► host_port ───────────────┐
                                └──► ndp_controller           │ request crossbar
                                        │ launch / arguments   ▼ (33 inputs → 32 channels)
                                        ▼                   ┌─────────────┐
                   ┌── ndp_unit × 32 ──────────────────┐    │ l2_slice    │── mem_ctrl ── DRAM
                   │ uthread_generator                 │◄──►│   × 32      │     × 32
                   │ ndp_subcore × 4 (16 slots each)   │    └─────────────┘
                   │ icache (2 KB)  scratchpad (128 KB)│   response crossbar
                   │ tlb (256 entries) dram_tlb_walker │   (32 channels → 33 ports)
                   └───────────────────────────────────┘
```

`m2ndp_top` wires these blocks together. Its default configuration is:
- 32 NDP units with 4 sub-cores each and 16 uthread slots per sub-core;
- 32 memory channels, each with a 128 KB, 16-way L2 slice;
- LPDDR5 timing tRCD = 15, tCL = 20, tRP = 15 controller cycles.

## M2func calls

Each packet-filter entry holds a base, a bound, an ASID and a privileged flag. A matching access becomes a call; its offset from the base selects the function: `function = offset >> 5`.

| offset | function | write data (64-bit words) | read returns |
|---|---|---|---|
| 0x00 | register kernel | 0 code address, 1 scratchpad bytes, 2 integer regs, 3 FP regs, 4 vector regs, 5 flags (bit 0 initializer, bit 1 finalizer), 6 body offset, 7 finalizer offset | kernel id or ERR |
| 0x20 | unregister kernel | 0 kernel id | 0 or ERR |
| 0x40 | launch | 0 synchronous, 1 kernel id, 2 pool base, 3 pool bound (inclusive), 4 argument bytes (≤ 24), 5–7 arguments | instance id or ERR |
| 0x60 | poll | 0 instance id | 0 finished, 1 running, 2 pending, ERR |
| 0x80 | TLB shootdown (privileged entries only) | 0 ASID, 1 virtual page number | 0 or ERR |

ERR is all ones.

**Writes and reads.** A write is acknowledged at once. The read that follows returns the result the controller stored for that process and function.
- For a *synchronous* launch, the controller holds the read's response until the instance has finished. The host's ordinary load therefore doubles as "wait for the kernel".
- A poll that reports *finished* frees the instance.

**Launch.** The controller checks four things: the kernel exists, it belongs to the caller's ASID, the arguments fit and a buffer entry is free. If all hold, the instance enters a first-come, first-served buffer of up to 48 instances. The controller then runs instances one after another. For each instance it:
1. writes the arguments into 64-bit words 0–2 of every unit's scratchpad (address 0x1000_0000 as seen by the kernel);
2. starts all uthread generators;
3. waits for a done pulse from every unit.

**Other calls.** Unregister also flushes the instruction caches. Shootdown removes one entry from every unit's TLB.

## uthreads and how they are spawned

Each unit has a `uthread_generator`. It runs three phases in order, and a phase starts only after every uthread of the previous phase has ended:

1. **Initializer.** One uthread per usable slot. `x2` holds a unique id: unit × 64 + sub-core × 16 + slot.
2. **Body.** Unit *u* takes granules *u*, *u*+32, *u*+64, … of the pool, so the pool is interleaved across the units. For granule *g*, `x1` = pool base + 32·*g*. The generator spawns one uthread per cycle, round-robin over the sub-cores that have a free slot.
3. **Finalizer.** Like the initializer.

**Register budget.** The number of usable slots per sub-core is the smallest of:
- 16;
- 256 ÷ (integer registers the kernel declared);
- 320 ÷ (vector registers the kernel declared).

**Renaming.** When a uthread takes a slot, the slot gets base register ids. Logical register *r* then maps to physical register base + *r*. This is the whole renaming mechanism: no free lists and no map tables.

## The sub-core pipeline

An `ndp_subcore` keeps, per slot:
- a PC;
- the decoded current instruction;
- the base register ids.

Every slot is in one of four states: free, fetch, ready or waiting for memory. Each cycle the sub-core does three things:

1. **Fetch.** It sends one slot's PC to the unit's shared instruction cache. The response is decoded straight away into physical register ids.
2. **Issue.** It picks one *ready* slot round-robin and executes it. ALU, branch and vector register operations finish in that cycle. Loads, stores and atomics go to the unit's load/store path, and the slot waits until the response comes back.
3. **Switch.** A slot that issued fetches its next instruction. Latency is hidden by switching between uthreads, not by pipelining within one uthread.

**Instruction set.**
- RV64I integer, `MUL`, `LD/LW/LWU/SD/SW`, `AMOADD.D`.
- RVV with 64-bit elements and a fixed vector length of 4 (256 bits): `VLE64`, `VSE64`, `VADD.VV/VX`, `VMUL.VV`, `VMV.V.I/X`, `VREDSUM.VS`, `VMV.X.S`, `VSETVL`.
- `EBREAK` ends a uthread.
- Any other encoding also ends the uthread and raises a sticky `illegal` flag.

**Memory path.**
- An address inside 0x1000_0000 … +128 KB goes to the unit's scratchpad. It answers in one cycle and supports 64-bit atomic add.
- Any other address is translated and sent to the memory-side L2 of its channel. Global atomics are done there.

## Address translation

Data addresses are translated in two steps. First comes the unit's on-chip TLB: 256 entries, 8-way, 4 KB pages, tagged by ASID. On a miss, the `dram_tlb_walker` reads a 16-byte DRAM-TLB entry at

    entry = dtlb_base + 16 · ((vpn ^ vpn >> 20 ^ asid << 4) mod 2^20)

The entry holds {valid, VPN} and {ASID, PPN}. All units of the device share this table.
- If the entry matches, the TLB is filled from it.
- If not, the walker asks the host's address-translation service (ATS) for the page, writes the entry back to DRAM, and fills the TLB.

## Memory side

**Channel choice.** A unit's physical address picks its channel by an XOR hash of 256-byte granules:

    chan = (a >> 8) ^ (a >> 13) ^ (a >> 18), taken mod 32

**L2 slices.** Each `l2_slice` is a blocking, write-back, write-allocate cache with 128-byte lines.
- It keeps valid and dirty bits per 32-byte sector and uses true LRU.
- A hit answers 7 cycles after it is accepted.
- A full-sector write does not fetch the line.

**Memory controllers.** Each `mem_ctrl` uses an open-page policy and has 16 banks. The delay before a column access is:
- tCL for a row hit;
- tRCD + tCL for a closed bank;
- tRP + tRCD + tCL for a row conflict.

**Host path.** Host CXL.mem requests of 64 bytes that are not calls pass through `host_port`. It splits each request into two sector accesses on the same crossbars, one request at a time.

## Interfaces and conventions

- Clock `clk`; reset `rst_n` is active low and asynchronous. All state is reset, including the tables.
- Every stream is valid/ready: a transfer happens on a clock edge where both are high. Assertions check that responses stay stable while stalled.
- Shared types are in `m2ndp_pkg`. The main ones:
  - `mem_req_t`: op, address, 32-byte data, byte mask, 16-bit id;
  - `cxl_req_t`: 64-byte host request;
  - `func_req_t`: a call as decoded by the filter;
  - `kernel_desc_t`, `launch_cmd_t`.
- Memory request ids are {source port[15:10], source kind[9:8], tag}. The source kind is LSU, instruction fetch or walker. The response crossbar routes by the port field.
- Outside the top module: the CXL link, the DRAM devices and the host's ATS. The top brings out a per-channel DRAM port (`d_*`) and a per-unit ATS request/response pair.

## Where this RTL departs from the paper

- **One kernel instance at a time.** The paper runs up to 48 kernels concurrently. Here 48 instances can be buffered, but they run one after another on all units.
- **Single-issue sub-cores.** The paper's sub-cores have two ALUs, an SFU, a load/store unit and vector units. Here one instruction issues per cycle per sub-core.
- **No floating point** and no special-function unit. Vectors hold 64-bit integers only, with the vector length fixed at 4.
- **Scratchpad latency.** The scratchpad answers in one cycle; the paper gives its SRAM 4 cycles.
- **Only one kernel body per launch.** The paper allows several, run in sequence.
- **Missing caches and TLB.** There are no L0 instruction caches and no instruction TLB; code addresses are physical. The 128 KB SRAM is always a scratchpad; its L1D-cache mode is not built.
- **Two crossbars instead of four.** There is one request crossbar and one response crossbar, each carrying whole requests, where the paper has four 32×32 crossbars of 32-byte flits.
- **Return values on chip.** They are held in on-chip tables rather than in memory.
- **Blocking host path.** Host accesses are handled one at a time.
- **Own choices for things the paper leaves open:**
  - encodings: the registration layout, status codes and the DRAM-TLB hash;
  - the register split per sub-core: 256 × 64-bit integer + 320 × 256-bit vector = 12 KB, so 48 KB per unit;
  - the bank and row mapping;
  - all replacement policies other than the L2's LRU.

## Simulating

Every block has a self-checking testbench in `tb/<block>_tb.sv`. Each prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog. A typical run with Verilator:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv rtl/m2ndp_pkg.sv \
        tb/rv_asm_pkg.sv tb/m2ndp_top_tb.sv --top-module m2ndp_top_tb -o sim
    ./obj_dir/sim

Two testbench helpers:
- `tb/rv_asm_pkg.sv` encodes instructions, so kernels are written in the testbench as arrays of calls such as `vle64(2, 1)`.
- `tb/dram_model.sv` is a sparse behavioural DRAM.

**End-to-end test.** `m2ndp_top_tb` runs the device with 4 units, 4 channels, 16 KB L2 slices and a 2-entry launch buffer. It:
- checks host reads and writes;
- registers two kernels: the scratchpad reduction with initializer, body and finalizer, and a vector add;
- launches them asynchronously and synchronously and polls them;
- compares the results with values computed in the testbench;
- exercises every error return and a privileged shootdown.

It also counts that each mechanism happened at least once:
- slot reuse;
- DRAM-TLB hits and ATS requests;
- TLB and instruction-cache misses;
- L2 hits, misses and atomics;
- DRAM row hits and misses;
- pending, running and finished instances.

**Limits.** No testbench here runs the top module at its full default size (32 units, 32 channels). The same flow has been simulated once at full size: 2048 reduction and 512 vector-add uthreads, both results correct. Building the full-size Verilator model takes over ten minutes, so that run is not part of the test set. The shipped end-to-end test uses the 4-unit, 4-channel configuration above. A single unit with every other parameter at its default is simulated in `ndp_unit_tb`. Synthesis of the full-size top is large: 32 units with 48 KB of register file and 128 KB of scratchpad each.
