# NoX: a compact RV32I core for bus-attached tiles

NoX is a small 32-bit RISC-V processor meant to be dropped into a tile of a
multi-processor system-on-chip. It has no caches and no tightly coupled
memories. It fetches instructions and moves data over two ordinary AMBA AXI
masters (or, as a build option, two AHB-Lite masters), so it can run from anything that sits on a bus: a ROM, an SRAM
with wait states, or the buffer of a network interface. It has to tolerate
a bus that answers late, and it has to keep its pipeline simple enough to
stay small. Its answer is a short in-order pipeline with full bypassing. In
that pipeline the only stalls come from back-pressure: either fetch has
nothing ready, or the load/store unit is still busy.

It implements:

- RV32I (the 40 base operations, FENCE as a no-op, ECALL, EBREAK).
- The six Zicsr instructions.
- Machine mode with MRET and WFI.
- Interrupts and exceptions, with the machine-mode CSRs a small real-time
  kernel such as FreeRTOS needs.
- The cycle and retired-instruction counters, for profiling.

There is no M or C extension.

## Pipeline at a glance

```
             fetch_req / fetch_addr (branch, jump, trap, mret)
   +-------------------------------------------------------------+
   v                                                             |
 FETCH ---fetch_valid/ready--> DECODE ---id_valid/ready--> EXECUTE ---lsu_op--> LSU ---> AXI (data)
 AXI (instr)   fifo_l0         register file   rs1/rs2     ALU, CSR   <--lsu_bp---  |
                                   ^                          |                   lsu_rd_data,
                                   |                      ex_mem_wb               lsu_op_wb
                                   +-------- wb_dec ------ MEMORY & WRITEBACK <-----+
                                                           lock_wb, wb_fwd_load -> EXECUTE
```

There are four stages: fetch, decode, execute, and a last stage split
into two halves that work side by side. One half is the LSU. The other is
Memory & Writeback, which owns the single register-file write port.
An ALU instruction therefore never waits behind a store. A store is finished
entirely in the LSU. Only a load's data goes through writeback. The signal
names above, and in the RTL, are those of the core's published block
diagram.

Every inter-stage link is a valid/ready pair, or a back-pressure flag. The
core tolerates arbitrary wait states on both buses. The instruction-side
handshake is what removes the need for a tightly coupled memory.

| File | Contents |
| --- | --- |
| `rtl/nox_pkg.sv` | Bus structs, the id_ex / lsu_op / wb records, opcodes, CSR addresses, trap causes |
| `rtl/nox_defines.svh` | Reset-style macros |
| `rtl/nox.sv` | Top level |
| `rtl/fetch.sv`, `rtl/fifo_l0.sv` | Fetch stage and its level-0 pre-fetch FIFO |
| `rtl/decode.sv`, `rtl/register_file.sv` | Decode stage and the 31 x 32 register file |
| `rtl/execute.sv`, `rtl/csr.sv` | Execute stage and the CSR block |
| `rtl/lsu.sv` | Load/store unit |
| `rtl/wb.sv` | Memory & Writeback |
| `rtl/ahb_bridge.sv` | AXI-subset to AHB-Lite bridge for the AHB bus option |

## Bus interface

Each master is a `cb_mosi_t` / `cb_miso_t` pair holding the five AXI4
channels. The core uses single-beat transfers only. The address channels
carry the address and AxSIZE. Write data carries strobes, and the
responses carry RRESP/BRESP. Burst, ID, cache and protection fields are
left out: every transfer is one beat with ID 0. Slaves may hold any ready
low for as long as they like. `ar_valid`, `aw_valid` and `w_valid` stay
asserted, with stable payloads, until they are accepted. Assertions in
`fetch` and `lsu` check this. An `OKAY` response is `2'b00`. Any other
response value is a bus error and becomes a trap.

### AHB-Lite option

With `BUS_AHB = 1` both masters leave the core through an `ahb_bridge`
on the AHB-Lite ports `instr_ahb_*` and `lsu_ahb_*`. The AXI ports are
then driven to zero. The fetch and LSU logic is the same in both builds.
The bridge carries one transfer at a time:

1. **Idle.** It accepts a read, or a write whose address and data are
   both offered. Reads win when both kinds are offered.
2. **Address phase.** HTRANS is NONSEQ, with HADDR, HSIZE and HWRITE set
   and HBURST SINGLE. This phase is held until HREADY.
3. **Data phase.** HWDATA is driven for a write. The phase ends on the
   first cycle with HREADY high, and HRDATA and HRESP are captured.
4. **Response.** The result goes back on R or B and is held until the
   master takes it. An AHB ERROR becomes SLVERR, so it traps like an AXI
   error.

Store bytes already sit on their AHB lanes, so write data passes through
unchanged. With a zero-wait slave, a transfer takes three cycles from
acceptance to response. The next address phase does not overlap the
current data phase. This is simple but slow: the kernel workload runs
at CPI 6.4 over AHB against 1.7 over AXI.

## Fetch and the level-0 FIFO

Fetch starts once `start_fetch_i` is high after reset. It reads one word
at a time from `start_addr_i` upward and pushes `{pc, instr}` into a
`FIFO_DEPTH`-entry FIFO (2 by default). Decode pops that FIFO.

**Credit rule.** The subtle point is how many reads may be in flight. A
read is issued only if this holds:

    FIFO occupancy + reads in flight (incl. this one) - (pop this cycle) <= FIFO_DEPTH

In other words, every read asked for has a FIFO slot, except that one
response may have to wait on the bus. `r_ready` goes low only when a
response that is to be kept arrives while the FIFO is full and nothing is
popped in that cycle. The response then waits on the R channel, which AXI
allows.

- With a memory that answers in one cycle and the default 2-entry FIFO,
  this sustains one instruction per cycle. A run of 64 independent ALU
  instructions takes 65 cycles.
- A stricter rule that never lowered `r_ready` would need a third FIFO
  entry to reach the same rate.
- With a slower memory, the FIFO depth bounds how many reads overlap.

**Redirects.** A taken branch, a jump, a trap or MRET raises
`fetch_req`/`fetch_addr` for one cycle, with these effects:

- The FIFO is emptied in that cycle.
- The instruction held in decode is dropped.
- The new address is presented on AR in the next cycle.

Reads already issued cannot be recalled on AXI. Their number is loaded
into a drop counter, and their responses are discarded as they arrive.
There is no branch prediction. With a one-cycle bus, a taken branch costs
three bubbles.

**Fetch errors.** A read answered with an error stops fetching. When the
FIFO has drained, `fetch_trap` presents an instruction access fault, with
the faulting address. Execute takes it once no older instruction is left
in decode, and its redirect restarts fetching.

## Decode and the bypass network

Decode does the following:

- Turns the FIFO head into an `id_ex_t` record. This holds the operation,
  the operand selection, the immediate, the LSU fields, the CSR command, and
  a `sys` field for ECALL, EBREAK, MRET, WFI and illegal encodings.
- Reads the two source registers from the register file.
- Registers the record and the operands for execute.

The register file has two combinational read ports and one write port.
x0 is not stored.

Full bypassing comes from three small pieces, not a forwarding network
spanning several stages:

1. **Write-through.** The write port is driven by writeback (`wb_dec`). A
   register written in the same cycle that decode reads it is passed
   straight to the operand.
2. **Refresh.** While execute holds an instruction because it is stalled,
   decode keeps updating the held operands from every `wb_dec` write that
   hits their source registers.
3. **Execute forwarding.** Execute itself also takes a source from
   `wb_dec` when writeback is writing it in that same cycle.

An ALU result is registered in `ex_mem_wb` and written one cycle later.
This set of paths covers every distance between producer and consumer, so
dependent ALU instructions run back to back.

The only data hazard left is a load. Its data arrives after an unknown
number of bus cycles.

## Execute: stalls, traps and interrupts

Execute handles the following:

- Computes the ALU result for the register, immediate, LUI, AUIPC and link
  operations.
- Resolves branches and JAL/JALR.
- Sends loads and stores to the LSU with address `rs1 + imm`.
- Runs the Zicsr instructions through `csr`.
- Makes every control-flow decision in the core.

### Stall conditions

An instruction held in execute waits when any of these holds:

| Condition | Waits until |
| --- | --- |
| A load is outstanding (`lock_wb`) | The cycle its data is on `wb_dec` (`wb_fwd_load`). The data is forwarded from there in that cycle. |
| It is a load or store and the LSU is busy (`lsu_bp`) | The LSU is free |
| It is a WFI | An enabled interrupt is pending (`mie & mip`, regardless of `mstatus.MIE`, as WFI requires) |
| It would trap while the LSU is busy | The LSU is idle, so a late bus error from an older access cannot be overwritten |

Holding every instruction behind an outstanding load is deliberately
simple. It keeps the single write port free for the load data, and it
keeps exceptions precise. An independent ALU instruction waits too. This is
the main cost in cycles per instruction on a slow data bus.

### Trap ordering

When several events meet in the same cycle, they are taken in this order:

1. **LSU trap** (misaligned access or bus error). It belongs to an older
   instruction. `mepc` is that instruction's pc (`lsu_pc`), and `mtval` is
   the address.
2. **Interrupt.** Taken when `mstatus.MIE` and an enabled interrupt are
   both set, decode holds an instruction and the LSU is idle.
   - The interrupt replaces the held instruction, and `mepc` is its pc.
   - After a WFI, `mepc` is the instruction after it.
   - Among the interrupts, external has priority over software, and
     software over timer.
3. **Fetch access fault.** Taken only when decode is empty, so every older
   instruction has finished.
4. **The held instruction's own trap.** These are illegal instruction
   (including an unknown CSR, or a write to a read-only one), ECALL,
   EBREAK, and a misaligned target of a taken branch or jump.

Taking a trap does three things:

- Writes `mepc`, `mcause` and `mtval`.
- Moves MIE into MPIE and clears MIE.
- Redirects fetch to `mtvec`. In vectored mode, an interrupt goes to
  `base + 4*cause`.

MRET restores MIE and jumps to `mepc`.

### CSRs

| CSR | Contents |
| --- | --- |
| `mstatus` | MIE, MPIE. MPP reads as machine mode. |
| `misa` | RV32I |
| `mie`, `mip` | `mip` mirrors the `irq_i` levels |
| `mtvec` | Direct or vectored mode |
| `mscratch`, `mepc`, `mcause`, `mtval` | Trap state |
| `mvendorid`, `marchid`, `mimpid`, `mhartid` | Identity registers |
| 64-bit `mcycle`, `minstret` | Profiling counters. `cycle`, `instret` and their high halves are read-only aliases. |

Accessing any other address is an illegal-instruction trap.

### The interrupt interface

`irq_i` is a struct of the three machine interrupt levels: external,
timer and software. The machine timer (`mtime`/`mtimecmp`) and any
interrupt controller sit outside the core, as in most small RISC-V
systems. A timer tick for an RTOS therefore arrives on `irq_i.tmr`.

## LSU and Memory & Writeback

The LSU accepts one access at a time, when `lsu_bp` is low. It performs
that access as a single AXI transfer:

- **Load:** AR, then R.
- **Store:** AW and W together, in either order, then B.

A store retires from execute as soon as the LSU has taken it.

**Sub-word accesses.**

- Byte and half-word accesses keep their byte address and AxSIZE.
- Store data is shifted onto the addressed byte lanes and enabled with
  WSTRB.
- A load's word comes back unshifted (`lsu_rd_data`). Writeback shifts it
  down and sign- or zero-extends it, using the offset and size it keeps in
  `lsu_op_wb`.

**Traps.**

- With `TRAP_MISALIGNED = 1` (the default), an access not aligned to its
  size is not sent on the bus. It raises a misaligned load or store trap
  one cycle later.
- With `TRAP_MISALIGNED = 0`, the access is sent as it is. Only the lanes
  from its byte offset to the end of the addressed word are written.
  Splitting an access that crosses a word is left to software.
- An error response raises a load or store access fault. A failed load
  writes no register.
- With `TRAP_BUS_ERROR = 0`, error responses are ignored.

**Memory & Writeback** is purely combinational. Each cycle it writes one
of two things to the register file:

- the result execute registered in `ex_mem_wb`, or
- in the one cycle a load's data is valid (`lsu_bp_data` low), the
  aligned load data.

It tells execute when a load is outstanding (`lock_wb`) and when its data
is on the write port (`wb_fwd_load`). Because of the load stall, both
sources never want the port in the same cycle.

## Configuration

| Parameter (on `nox`) | Default | Meaning |
| --- | --- | --- |
| `FIFO_DEPTH` | 2 | Entries in the fetch FIFO. The evaluated configuration uses 2. |
| `HART_ID` | 0 | Value of `mhartid` |
| `MTVEC_RESET` | 0 | `mtvec` after reset |
| `TRAP_MISALIGNED` | 1 | Trap misaligned loads and stores, or issue them unchanged |
| `TRAP_BUS_ERROR` | 1 | Trap error responses on the data bus, or ignore them. A failed load then writes the returned data. |
| `BUS_AHB` | 0 | 0: AXI masters. 1: AHB-Lite masters through `ahb_bridge`. |

**Reset style.** The reset style is chosen with macros from
`nox_defines.svh`, passed on the command line:

- The default is a synchronous active-high `rst`.
- `+define+NOX_RESET_ASYNC` makes every flop asynchronously reset.
- `+define+NOX_RESET_ACTIVE_LOW` inverts the polarity.

The two macros combine. In the asynchronous variants, the lint tool
remarks that `rst` is used both as an asynchronous reset and synchronously.
The synchronous use is only the `disable iff` of the protocol assertions,
and it is harmless.

All register state is reset:

- The register file clears to zero.
- The FIFO memory is the only array without a reset. It is never read
  before it is written.

## Size

A generic yosys synthesis of `nox` at the defaults gives about 610 cells
and 886 flip-flop bits, plus 1152 bits of memory. Those memory bits are
the 31x32 register file and the 2x64 FIFO.

Per stage, counting flip-flops and memory bits, compared with the
published FPGA register counts:

| Stage | Here | Published |
| --- | --- | --- |
| Decode | about 211 + 1024 (register file) | 1240 |
| Fetch | 141 + 128 (FIFO) | 143 |
| Execute, including CSRs | 328 | 359 |
| LSU | 206 | 105 |
| Writeback | 0 (combinational) | 33 |

The overall total is close. The split differs:

- This LSU registers the whole transfer: address, data and strobes.
- This writeback has no registers.

These numbers are for the AXI build. The AHB build adds one bridge per
master, each about 50 cells and 105 flip-flop bits.

No timing analysis was done. The published design targets 100 MHz on a
Kintex-7 and 250 MHz in a 45 nm ASIC flow.

## Where this RTL departs from the published core

**Buses.**

- The AHB option is a bridge behind each AXI master, not native AHB
  masters. The bridge does not pipeline transfers.
- The AXI subset is single-beat with no IDs.

**Where things are done.**

- The WFI wait and the decision to trap on an illegal instruction are in
  execute. Decode only marks the instruction illegal. In the published
  description, decode manages these traps and the WFI stall.
- The stall logic is split between decode (held-operand refresh) and
  execute (the stall conditions).

**Design choices.** The following are this design's own:

- the stall rules and trap priorities above;
- the fetch credit rule and drop counter;
- the one-access-at-a-time LSU;
- the AHB bridge and its one-transfer policy;
- the record layouts;
- the CSR set beyond the registers the description names (mstatus, mepc,
  mie and the profiling counters).

**Not measured.** CoreMark itself was not run. No compiled program image
is part of this RTL. See the next section for what was measured instead.

## Performance

The published figure is 2.5 CoreMark/MHz. It assumes memory that answers
in one cycle. `tb_nox_kernels` runs small versions of CoreMark's kinds of
work from such memories:

- a bitwise CRC-16 over 64 bytes;
- a 4 x 4 integer matrix product, using a shift-and-add multiply
  subroutine, since there is no M extension;
- a sum-and-reverse walk over a 16-node linked list scattered in memory.

It retires 12,727 instructions in 21,071 cycles, a CPI of 1.66. The
cycles beyond one per instruction come from three places:

- **Taken branches and jumps.** Each one refills fetch (three bubbles on
  a one-cycle bus). The bit loops of the CRC and the multiply are
  dominated by short loops.
- **Loads.** The instruction after a load waits until its data is on the
  write port, a full round trip on the data bus.
- **LSU occupancy.** Each access occupies the LSU until its response.

A straight run of independent ALU instructions flows at one per cycle.
With the random-wait memories of the other tests, CPI is about 3. The
end-to-end test retires 402 instructions in 1370 cycles, and the
two-task test 2641 in 7745. Those numbers measure the test buses, not the
core.

## Verification

Each unit has a self-checking testbench in `tb/`. It compares the unit
with a reference model written independently in the testbench. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
| --- | --- |
| `tb_fifo_l0` | Random push, pop and flush against a queue model |
| `tb_register_file` | Random reads and writes, x0 |
| `tb_wb` | Every load size, offset and sign against a reference. The ALU path, `lock_wb` and `wb_fwd_load`. |
| `tb_lsu` | Random loads and stores against a random-wait AXI memory: strobes, data, misaligned and bus-error traps, back-pressure. It runs with the traps enabled and disabled (helper `lsu_check`). |
| `tb_fetch` | Instruction stream, redirects with reads in flight, FIFO-full back-pressure, fetch errors |
| `tb_decode` | Decoding of every instruction class, write-through, operand refresh, flush |
| `tb_csr` | CSR read/write/set/clear, illegal accesses, trap entry and MRET, interrupt enable and priority, vectored mtvec |
| `tb_execute` | ALU and branch results against a model, CSR instructions, stalls and traps |
| `tb_nox` | End-to-end. See below. |
| `tb_nox_rtos` | Two tasks preempted by a timer interrupt, with a full context switch (31 registers, mepc, mscratch) and ECALL yields. This is how an RTOS port such as FreeRTOS uses the core. Every register of both tasks is checked at the end. |
| `tb_ahb_bridge` | Random reads and writes through the bridge to an AHB-Lite memory with random wait states and ERROR responses: data, byte lanes, responses, protocol assertions, three-cycle latency |
| `tb_nox_ahb` | The `tb_nox_kernels` program on a core built with `BUS_AHB = 1` and AHB memories, plus a check that the AXI ports stay idle |
| `tb_nox_kernels` | The kernels of the Performance section against reference results, mcycle/minstret against the cycles and retirements observed, and the one-instruction-per-cycle fetch rate |

`tb_nox` runs the whole core at its default parameters. The program is
assembled inside the testbench (`rv_asm_pkg`). It runs from an AXI memory
model with random wait states and random ready (`axi_mem_model`). The
program covers:

- every RV32I operation;
- back-to-back dependences and load-use;
- sub-word loads and stores;
- the Zicsr instructions;
- every synchronous trap;
- the three interrupts, one of them waking a WFI;
- an instruction-fetch bus error.

It counts each pipeline mechanism and fails if one never occurs:

- forwarding and write-through;
- load stall;
- LSU and fetch back-pressure;
- FIFO full;
- flush;
- dropped fetch responses;
- traps;
- interrupts;
- WFI.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal +incdir+rtl -y rtl -y tb \
    rtl/nox_pkg.sv tb/rv_asm_pkg.sv tb/tb_nox.sv --top-module tb_nox -o sim
./obj_dir/sim
```

Unit testbenches that do not use the assembler can omit
`tb/rv_asm_pkg.sv`. The testbenches drive an active-high reset. With
`+define+NOX_RESET_ASYNC` added, `tb_nox` also passes with the
asynchronous reset. The active-low variants have been linted but not
simulated.
