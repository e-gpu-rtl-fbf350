# e-GPU: a small SIMT RISC-V GPU for microcontroller-class systems

The e-GPU is a GPU shrunk to fit next to a microcontroller. It gives a
low-power host CPU an accelerator for TinyAI and bio-signal kernels: integer
code written once and run by many threads. It keeps the programming model of a
desktop GPU:

- threads grouped into warps that run in lockstep;
- several warps per compute unit, interleaved to hide memory latency;
- several compute units sharing one data cache.

It drops what a microcontroller cannot afford. There is no floating point, no
private graphics memory and no DMA engine. The GPU reads kernels and data
directly from the host's main memory over the host bus, and it powers each
compute unit down as soon as that unit has finished.

This repository holds synthesizable SystemVerilog for the whole accelerator. That
covers the compute units, the instruction and data caches, the cache and
memory interfaces and the controller with its power sequencing. It also holds
self-checking testbenches. The host system (CPU, SRAM, bus, interrupt
controller) is not included: the accelerator connects to it through two OBI
ports and one interrupt line.

## Structure

```
                 OBI slave (config)                        irq_o
                        |                                    ^
                  +-----v-------------------------------------+-----+
                  |  egpu_controller  (registers, egpu_power_ctrl)  |
                  +--+--------------+-------------------------+-----+
              start, halt,     clock/power enables      end-of-execution
              boot address     per unit                 events per unit
                     |              |                         ^
   +-----------------v--------------v-------------------------+--------+
   |  egpu_cu 0  ... egpu_cu N-1        (warps x threads, RV32IM+SIMT)  |
   +----+-------------------+-----------------------+-----------+------+
        | fetch             | data (all threads)    | data      | fetch
   +----v-------+      +----v-----------------------v----+ +----v-------+
   | egpu_icache|      |        egpu_cache_if            | | egpu_icache|
   +----+-------+      +--+---------+-------------+------+ +----+-------+
        |                 |bank 0   |bank 1  ...  |bank B-1     |
        |           +-----v--+ +----v---+   +-----v--+          |
        |           |dcache  | |dcache  |...|dcache  |          |
        |           |bank    | |bank    |   |bank    |          |
        |           +----+---+ +----+---+   +----+---+          |
   +----v----------------v----------v------------v--------------v------+
   |  egpu_mem_if  (round-robin arbiter, line -> 32-bit OBI words)      |
   +------------------------------------+-------------------------------+
                                        v
                               OBI master (host memory)
```

The top level is `egpu_top`. Its default parameters give the largest of the
three reference configurations:

| parameter | default | meaning |
|---|---|---|
| `NUM_CU` | 2 | compute units |
| `NUM_THREADS` | 8 | threads per warp (lanes per unit) |
| `NUM_WARPS` | 4 | warps per unit |
| `IC_SIZE` / `IC_LINE` / `IC_BANKS` | 2048 / 16 / 1 | instruction cache per unit (bytes, bytes, banks) |
| `DC_SIZE` | 16384 | shared data cache, bytes |
| `DC_BANKS` | 8 | data cache banks |
| `DC_LINE` | `NUM_THREADS*4` = 32 | data cache line, bytes: one word per thread |
| `DC_LATENCY` | 4 | data cache hit latency, cycles |
| `BOOT_ADDR` | 0 | reset value of the kernel base address register |

The two smaller reference configurations are `NUM_THREADS=2, DC_BANKS=2` (8-byte
lines) and `NUM_THREADS=4, DC_BANKS=4` (16-byte lines). Both have been simulated
end to end with the same test kernel.

Shared types live in `egpu_pkg`:

- the OBI request and response structs;
- `line_req_t`, the line-sized request that every cache and the memory
  interface exchange (address, direction, word count, per-word byte enables
  and data);
- the opcodes, the CSR numbers and the register offsets.

## Compute unit (`egpu_cu`)

### Execution model

A compute unit holds `NUM_WARPS` warps. Each warp has:

- a program counter;
- a thread mask;
- a reconvergence stack;
- `NUM_THREADS` private copies of the 32 integer registers.

An instruction of a warp is executed by all threads whose mask bit is set. Each
thread uses its own registers. The unit interleaves warps instruction by
instruction. After every instruction a round-robin scheduler picks the next warp
that is active and not waiting at a barrier.

The unit is deliberately simple: one instruction in flight at a time.

1. Fetch from the instruction cache.
2. Execute.
3. For a load or store, one multi-thread request to the data cache interface,
   then wait for its single response.

The reference design uses a much deeper out-of-order pipeline with outstanding
memory requests. This implementation gives the same architectural behaviour,
but not the same throughput.

### Instruction set

The unit implements all of RV32IM except floating point:

- `FENCE`, `ECALL` and `EBREAK` retire as no-ops;
- CSR reads return the identity registers below;
- division follows the RISC-V rules for division by zero and overflow.

The SIMT control instructions use the custom-0 opcode (`0001011`). funct3
selects the instruction:

| funct3 | instruction | operands | effect |
|---|---|---|---|
| 0 | `TMC` | rs1 | thread mask of the warp := rs1 (of the lowest active thread); a zero mask retires the warp |
| 1 | `WSPAWN` | rs1, rs2 | activate the inactive warps among 1 .. rs1-1 at PC rs2, each with thread 0 only |
| 2 | `SPLIT` | rs1 | threads with rs1 != 0 continue, the others are parked on the stack |
| 3 | `JOIN` | – | pop the stack: run the parked threads from after the SPLIT, or restore the full mask |
| 4 | `BAR` | rs1, rs2 | barrier rs1 for rs2 warps: wait until rs2 warps have arrived |
| 7 | `SLEEP_REQ` | – | this warp has finished its kernel |

Identity CSRs:

| CSR | value |
|---|---|
| 0xCC0 | thread index in the warp |
| 0xCC1 | warp index in the unit |
| 0xCC2 | compute unit index |
| 0xCC3 | mask of active warps |
| 0xCC4 | current thread mask |
| 0xFC0 | threads per warp |
| 0xFC1 | warps per unit |
| 0xFC2 | number of units |
| 0xF14 | global thread number, (unit x warps + warp) x threads + thread |

### Divergence

A conditional branch that the threads of a warp disagree on goes the way of the
lowest active thread. Code where threads may diverge must therefore be wrapped
in `SPLIT`/`JOIN`:

```
    andi  t0, tid, 1
    split t0            # odd threads continue; even ones are parked
    beq   t0, x0, else  # now uniform within the running threads
    ...then...
    j     endif
else:
    ...else...
endif:
    join                # first time: the parked threads resume after the split
                        # (their beq takes them to 'else'); second time: the
                        # full mask is restored and execution falls through
```

`SPLIT` pushes two entries: a "restore the original mask" entry and an "else"
entry holding the parked threads and the address after the `SPLIT`. If the
condition is uniform, it pushes a single no-op entry instead. That way every
`SPLIT` is matched by the same number of `JOIN`s whatever the data. The stack
holds `STACK_DEPTH` (8) entries per warp.

### Start and end of a kernel

`start_i` starts warp 0 at the kernel base address with thread 0 only. The
kernel's own start-up code does the rest: it enables the other threads with
`TMC` and the other warps with `WSPAWN`.

Each warp ends with `SLEEP_REQ`. Once every warp has retired and nothing is in
flight, the unit raises `sleep_o`. That is the end-of-execution event for the
power controller. Because the unit has at most one instruction in flight,
"every instruction fetched before `SLEEP_REQ` has completed" holds by
construction.

`halt_i` stops issue after the current instruction. `en_i` freezes the whole
unit, and stands in for the clock gate.

## Memory hierarchy

All memory is the host's: kernels, arguments, inputs and outputs are at host
addresses, and the GPU has no memory of its own except its caches. Every miss
and every store ends up as 32-bit OBI transactions on the single master port.

### Instruction cache (`egpu_icache`)

Each unit has a private instruction cache:

- direct-mapped, one bank;
- 2 KiB in 16-byte lines;
- tags in flip-flops, data in an `egpu_sram`.

A hit answers in the cycle after the fetch is accepted. A miss requests the
whole line from the memory interface, then answers. The cache is blocking.

### Data cache (`egpu_dcache_bank`)

The shared data cache is `DC_BANKS` independent banks, each direct-mapped.
Lines are interleaved across banks: the line address modulo `DC_BANKS` selects
the bank, and the next address bits select the line within it.

A read hit answers exactly `DC_LATENCY` = 4 cycles after acceptance. A read miss
fetches the line, fills it and answers.

Stores are write-through without allocation:

- on a hit, the enabled bytes of the line are updated;
- in every case, the enabled words are sent to memory.

This keeps host memory always up to date, so the host can read results after
the interrupt without a cache flush.

The caches are not cleared between kernels. Data loaded by one kernel is
therefore still cached for the next one, which saves refetching it. If the host
changes that data in memory between kernels, it must invalidate the caches
first (CTRL bit 3).

### Cache interface (`egpu_cache_if`)

This block takes a unit's memory instruction and turns it into bank requests.
A load or store arrives as one request carrying every thread's address, byte
enables and data, plus the thread mask. It leaves as one response carrying a
word per thread, with masked-off threads reading zero.

In between, the interface proceeds line by line:

1. Take the lowest thread still pending.
2. Collect every pending thread whose address lies in the same cache line.
3. Merge their byte enables and data into one line request. If two threads write
   the same byte, the higher thread wins.
4. Send the request to the bank that owns the line.
5. When the bank answers, hand each thread of the group its word.

So threads reading consecutive words cost one bank access, and scattered
threads cost one access per distinct line.

The units' ports run in parallel. Two units only wait for each other when they
need the same bank at the same time (a bank conflict, counted on
`dc_conflict_o`). Each bank has a round-robin arbiter.

### Memory interface (`egpu_mem_if`)

The memory interface serves requests from every instruction cache and every
data cache bank (`NUM_CU + DC_BANKS` requesters). A round-robin arbiter picks
one line request at a time. The interface then issues one 32-bit OBI
transaction per word, one after the other:

- a read line fetches `nwords` words;
- a write fetches only the words with at least one byte enabled.

It holds `req`, `addr`, `we`, `be` and `wdata` stable until `gnt`, waits for
`rvalid`, and then moves on to the next word. When the last word is done, the
requester gets one response pulse.

## Controller and power sequencing

### Registers (`egpu_controller`)

The registers are 32 bits wide, on the OBI slave port. `gnt` is given in the
request cycle; `rvalid` comes one cycle later. Offsets are relative to the
base the host assigns.

| offset | name | bits |
|---|---|---|
| 0x00 | CTRL | [0] start (write 1, ignored while busy or in reset); [1] reset (level, holds units and caches in reset); [2] halt (level); [3] invalidate both caches (write 1) |
| 0x04 | STATUS | [0] busy; [1] interrupt pending; [8+i] unit i finished (read-only) |
| 0x08 | BOOT | kernel base address: every unit starts here |
| 0x0C | IRQ | [0] pending; write 1 to clear |
| 0x10 | POWER | [i] clock enable, [16+i] power enable of unit i (read-only) |
| 0x14 | HWCFG | [7:0] units, [15:8] warps, [23:16] threads (read-only) |

### Launching a kernel (`egpu_power_ctrl`)

A launch goes through four steps:

1. Writing start powers every unit up.
2. One cycle later, the units are started.
3. From then on, each unit that raises its end-of-execution event has its clock
   enable and power enable dropped immediately.
4. When the last unit has reported, the pending bit is set and `irq_o` rises. It
   stays high until the host clears it.

The power-switch enables leave the top as `cu_pwr_en_o`. The switches and
clock-gating cells themselves are physical cells and are not part of the RTL.

A typical host sequence:

```
write BOOT  = kernel address
(write CTRL = 8          invalidate caches if memory changed since the last kernel)
write CTRL  = 1          start
... wait for irq_o ...
write IRQ   = 1          acknowledge
```

The kernel finds its arguments wherever the host put them. The test kernel
loads their address with a `lui`.

## Where this implementation departs from the reference design

- **Compute unit pipeline.** The reference unit is a Vortex-derived out-of-order
  core. Here it is a sequential one, with one instruction and one memory request
  in flight. Warps still interleave at instruction granularity. However, the
  latency hiding that comes from overlapping the cache accesses of different
  warps is absent.
- **Data cache throughput.** The reference cache is pipelined, with up to four
  outstanding requests (one per warp) and one access per cycle at a 4-cycle
  latency. Here each bank is blocking. It has the 4-cycle hit latency, but
  serves one request at a time.
- **Bank count.** The reference text mentions both "two banks, one per compute
  unit" and 2/4/8 banks for the three configurations. This RTL follows the
  latter: `DC_BANKS` defaults to 8 in the 16-thread configuration.
- **Write policy, encodings, register map.** The write-through policy, the SIMT
  and `SLEEP_REQ` encodings, the CSR numbers, the register map and the
  arbitration policies are this design's own choices. The reference does not
  fix them.
- **Power gating.** Power gating and clock gating are represented only by their
  enable signals.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_egpu_sram` | random reads and writes with byte enables against a model |
| `tb_egpu_icache` | fetched words, line requests, one-cycle hit, direct-mapped eviction, invalidate |
| `tb_egpu_dcache_bank` | random line reads and masked writes against a reference memory, 4-cycle hit latency, write-through word count, no write-allocate, invalidate |
| `tb_egpu_cache_if` | two ports with random masked loads and stores, line coalescing (1 vs 4 bank accesses), bank ownership, conflicts |
| `tb_egpu_mem_if` | three concurrent requesters, OBI word count per line, memory contents, fairness |
| `tb_egpu_cu` | every result of a test program: ALU, M extension corner cases, byte and halfword loads, JAL/JALR links, SPLIT/JOIN, BAR, WSPAWN, TMC, CSRs, a halt window, SLEEP |
| `tb_egpu_power_ctrl` | power-down order for random finishing orders, single completion pulse, abort |
| `tb_egpu_controller` | register reads and writes, start and invalidate pulses, interrupt set and clear |
| `tb_egpu_top` | the whole GPU at its default size (see below) |

The end-to-end test `tb_egpu_top` plays the host:

- it puts a kernel (`egpu_asm_pkg::vecop_kernel`) and its arguments in a
  behavioural host memory (`egpu_tb_mem`), which grants at random;
- it programs the registers and launches the kernel twice, the second time with
  new data and invalidated caches;
- it holds the GPU halted for a while in the middle of the first run.

In the kernel:

- every thread computes elements with a divergent branch (SPLIT/JOIN);
- each thread stores bytes;
- the warps meet at a barrier;
- each thread then reads a value written by another warp.

The testbench checks every output word. It also counts how often each
mechanism happened: warp spawn, warp switch, divergent split, barrier wait,
cache hit, miss and bank conflict, unit power-down, halt and interrupt. A
mechanism that never happened counts as a failure. At the default size, a run
takes about 2,500 cycles.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/egpu_pkg.sv tb/egpu_asm_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/egpu_tb_mem.sv tb/tb_egpu_top.sv \
  --top-module tb_egpu_top
./obj_dir/Vtb_egpu_top +verilator+rand+reset+2
```

Replace `tb_egpu_top` by any other testbench. The whole suite takes a few
seconds per testbench once built.

### Writing kernels

`tb/egpu_asm_pkg.sv` has encoder functions for the instructions the tests use,
including the SIMT ones. A kernel is an array of words produced by these
functions.
