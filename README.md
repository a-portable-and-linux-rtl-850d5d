# RVSoC in SystemVerilog: a small RISC-V computer that can boot Linux

RVSoC is a complete computer built for a low-cost FPGA board with DDR2 memory.
It has two parts:

- **RVCoreM** is the main processor. It is a multi-cycle RV32IMAC core with
  machine, supervisor and user modes and Sv32 virtual memory, which is enough
  to run a Linux kernel.
- **RVuc** is a small RV32I micro-controller that does the I/O work in
  software.

Linux sees two standard VirtIO-MMIO devices, a console and a block disk. It
writes their registers and rings a doorbell (QueueNotify). That wakes RVuc. RVuc
walks the VirtIO queues in main memory, moves the data, raises the device's
interrupt status and stops. While RVuc runs, RVCoreM is frozen. The idea is to
keep the hardware small and portable: no peripheral needs its own DMA engine
or state machine. The device logic is a program in RVuc's 8 KiB local memory.

This repository gives synthesizable RTL for every digital block of that
system, and a self-checking testbench for each. A behavioural model of the
FPGA vendor's DRAM-controller user interface is included for simulation. The
design follows the published description of RVSoC ("A portable and Linux
capable RISC-V computer system in Verilog HDL"). Wherever that description is
silent, the choices made here are listed in the section "Where this RTL
departs from, or adds to, the description".

## Block map and clocks

```
 host serial line (8 Mbaud)
        |
   +----v----+  memory writes (boot image, disk image)
   | loader  |---------------------------+
   +----+----+  RVuc program, start       |
        | console characters            |
   +----v-----+   +-------+             |           core_clk 104 MHz
   | console  |   | disk  |             |
   | registers|   | regs  |             |
   +----^-----+   +---^---+             |
        |  MMIO       |                 |
 +------+-------------+-----------------v------------+
 |                        mmu                        |
 |  TLB_i  TLB_r  TLB_w   page_walk   arbiter/decode  |
 +---^----------------^------------------+-----------+
     | virtual        | physical         | physical (DRAM byte address)
 +---+------+    +----+-----+       +----v-------+
 | rvcorem  |    |  rvuc    |       | dram_cache | 128 KiB, direct mapped,
 | (RV32IMAC|    | (RV32I,  |       +----+--^----+ write-through
 |  Sv32)   |    |  8 KiB)  |            |  |
 +----------+    +----------+     async_fifo async_fifo     (clock crossing)
      ^ stall = RVuc busy                |  |
                                    +----v--+----+           mem_clk 81.25 MHz
                                    | dram_ctrl  |
                                    +-----+------+
                                          | app_* (DRAM controller IP user port)
```

Two clocks are used:

- `core_clk` (104 MHz) drives RVCoreM, RVuc, the MMU, the cache, the loader and
  the I/O registers.
- `mem_clk` (81.25 MHz) drives the DRAM controller's user side.

The cache sits on the core-clock side. Its line requests cross into the memory
clock through one asynchronous FIFO (Gray-coded pointers, four entries), and
line data comes back through another. The clock generators and the DRAM
controller IP are FPGA-vendor parts. They are outside this RTL: the top takes
both clocks and both resets as ports and exposes the `app_*` user interface.

### Physical address map

| Address range               | What                                   |
|-----------------------------|----------------------------------------|
| `0x8000_0000 - 0x83FF_FFFF` | main memory, DRAM bytes 0 - 64 MiB     |
| `0x9000_0000 - 0x93FF_FFFF` | disk image, DRAM bytes 64 - 128 MiB    |
| `0x4000_0000 - 0x4000_0FFF` | console registers (VirtIO console)     |
| `0x4000_1000 - 0x4000_1FFF` | disk registers (VirtIO block device)   |
| anything else               | reads zero, writes ignored             |

RVCoreM starts at `0x8000_0000`. The split of the 128 MiB DRAM into 64 MiB of
main memory and 64 MiB of disk follows the original system. The base addresses
are this design's choice.

## Conventions used on every internal port

Every internal memory-like port works the same way:

- The requester raises `valid` together with the address, write enable, byte
  enables and write data.
- It holds all of them until the responder answers with `ready` for exactly one
  cycle. Read data, and for the core a page-fault flag, come with that `ready`.
- The requester drops `valid` in the next cycle.

The request and response bundles are typedef'd structs in `rv_pkg`:

| Struct       | Used by        | Notes                                            |
|--------------|----------------|--------------------------------------------------|
| `mem_req_t`  | physical ports | paired with `mem_rsp_t`                          |
| `core_req_t` | the core       | adds the access kind (fetch, load or store)      |
| `core_rsp_t` | the core       | adds the page-fault flag                         |
| `dram_req_t` | the FIFOs      | a 16-byte line request with a byte mask          |

Two things about read data:

- A data read returns the whole 32-bit word; the core picks and extends the
  bytes it needs.
- An instruction fetch may start on any halfword. The cache returns the 32
  bits that begin at that halfword, within the 16-byte line. At line offset 14
  only the low 16 bits are real. This is the reason for the 16-bit buffer
  described below.

## RVCoreM: twelve steps per instruction

RVCoreM (`rvcorem.sv`) is deliberately not pipelined. Each instruction moves
through a fixed sequence of steps, one state per step. Each step has a single
job, and its results go into named registers.

| Step | Work |
|------|------|
| INI  | start an instruction; a pending, enabled interrupt is taken here |
| IF   | fetch 4 bytes through `TLB_i` |
| CVT  | expand a 16-bit compressed instruction to 32 bits (`rvc_conv`) |
| ID   | decode; the immediate comes from `imm_gen` |
| OF   | read `rs1`/`rs2` and the CSR |
| EX1  | the integer ALU and single-cycle multiply (`alu_i`), branch condition (`alu_b`), jump target, memory address, CSR update value (`alu_c`); divides wait here for the 34-cycle `divider` |
| LD   | load through `TLB_r` (loads, LR, and the read half of an AMO) |
| EX2  | compute the AMO store value (`alu_a`) |
| SD   | store through `TLB_w` (stores, successful SC, the write half of an AMO) |
| WB   | write the register file |
| COM  | commit: update the CSRs and choose the next PC (sequential, jump, trap vector, MRET/SRET) |
| FIN  | count the retired instruction |

Steps an instruction does not need are skipped. These are the paths you see
in the `ev_skip_*` strobes:

| Instruction         | Path                        |
|---------------------|-----------------------------|
| not a memory access | EX1 → WB                    |
| load or LR          | LD → WB                     |
| store or SC         | LD → SD (no access in LD)   |
| AMO                 | LD → EX2 → SD → WB          |

A page fault in IF, LD or SD goes straight to COM, and so do ECALL, EBREAK,
illegal instructions and misaligned accesses. COM then enters the trap. Traps
honour `medeleg`/`mideleg`, so a trap can be delegated to supervisor mode.

The `stall` input freezes the step machine while RVuc runs. Some results
arrive as one-cycle pulses: fetch done, memory ready and divider done. If such
a pulse lands in a stall cycle, it is latched and used when the stall ends.
While such a latched result is pending, the core withdraws its memory request,
so the MMU cannot issue the same access twice.

A simple ALU instruction takes well over the 8 cycles the original authors
quote as the minimum. The nine steps on the short path are already more than
8, and the fetch passes several registered stages (fetch unit, MMU, cache)
before IF completes. In the end-to-end test the shortest instruction took 15 cycles, from one INI to the next, with the fetch hitting in the cache.

### The 16-bit buffer and fetches across a cache line

With compressed instructions, a 32-bit instruction can start at byte 14 of a
16-byte line. Its upper half is then in the next line. `ifetch_buf` handles
this case:

- Every fetch that reads a full 32 bits keeps the upper halfword in a buffer,
  tagged with its address.
- When the PC sits at line offset 14 and the buffer already holds that
  halfword, one access to the next line completes the instruction
  (`ev_buf_hit`). This is the usual case when straight-line code flows over the
  line boundary.
- Otherwise, for example after a jump to offset 14, two accesses are made
  (`ev_two_access`). If the first one shows a compressed instruction, the
  second is not needed.
- The buffer is flushed on anything that might make the halfword stale: a
  store, AMO, SC, CSR write, trap, xRET, FENCE.I or SFENCE.VMA.

### CSRs, privilege, interrupts

`csr_file` holds the M- and S-mode CSRs a Linux kernel and its boot firmware
need:

- `mstatus`/`sstatus` (MIE, SIE, MPIE, SPIE, MPP, SPP, SUM, MXR)
- `misa`, `mhartid`
- `medeleg`, `mideleg`
- `mie`/`mip` and `sie`/`sip`
- `mtvec`/`stvec` (direct mode only)
- `mscratch`/`sscratch`, `mepc`/`sepc`, `mcause`/`scause`, `mtval`/`stval`
- `satp`
- the `cycle`/`instret` counters

Interrupt sources:

- The timer interrupt is an input pin, `irq_timer`. **No `mtime`/`mtimecmp`
  timer is built.** A Linux boot needs one, so it would have to be added.
- The console and disk interrupt-status bits, plus "keyboard data waiting",
  are ORed into the machine and supervisor external interrupts.

## Memory management: three TLBs and a six-state page walker

`mmu.sv` translates the core's virtual addresses. It has three direct-mapped
32-entry TLBs, one per access kind: `TLB_i` for fetches, `TLB_r` for loads and
`TLB_w` for stores. A walk fills only the TLB of the kind that caused it, and
only if the page grants that kind of access in the current mode. A hit
therefore needs no further permission check. The cost is that the first store
to a page misses even when a load to it has already hit.

Translation is off in M-mode or when `satp.MODE` is 0. The TLBs are flushed
on any event that can change a translation or a permission:

- a trap or xRET
- SFENCE.VMA or FENCE.I
- a write to `satp`, `mstatus` or `sstatus`

On a miss, `page_walk` does the Sv32 walk in six states:

| State | Work |
|-------|------|
| PW1   | form and read the level-1 PTE address |
| PW2   | save that PTE |
| PW3   | form and read the level-0 PTE address |
| PW4   | save that PTE |
| PW5   | judge: valid, well formed, superpage alignment, R/W/X, the U bit with SUM and MXR |
| PW6   | fill the TLB; if A, or D for a store, was clear, write the PTE back with the bit set |

A failed walk returns a fault, which the core turns into an instruction, load
or store page fault.

The physical side is shared by four requesters. One is served at a time, in
fixed priority: the loader, RVuc, the page walker, then the core. The winning
request is decoded by address to the cache or to one of the two register
blocks.

## The cache and the path to DRAM

`dram_cache` has these properties:

- **Organisation:** direct mapped, 128 KiB, 16-byte lines (8192 lines).
- **Reads:** the tag and line are read in the cycle after the request arrives,
  and a read hit answers in that same cycle.
- **Read misses:** the line is requested over the FIFO from `dram_ctrl`,
  written into the cache, and the word returned.
- **Stores:** write-through with no allocation. A store that hits invalidates
  the line. The store goes to DRAM as a 16-byte write with a byte mask.
- **Counters:** it counts accesses and hits, the statistics reported for the
  original system.

Because stores do not update the cache, a read after a store to the same line
always goes to DRAM. That is simple and always coherent. The core, RVuc, the
walker and the loader all share this one cache.

`dram_ctrl` runs at 81.25 MHz. It pops one request at a time from the request
FIFO and drives the DRAM controller IP's user port:

- **Writes:** it presents the data with `app_wdf_wren`/`app_wdf_end`. The IP's
  mask is 1 for "keep", the inverse of the internal mask. It then issues the
  write command.
- **Reads:** it issues the read command, waits for `app_rd_data_valid`, and
  pushes the line onto the response FIFO.

The line address is `{1'b0, byte_addr[26:4], 3'b000}`, which suits a 16-bit
DDR2 part with a burst of 8.

## I/O: VirtIO registers and the RVuc micro-controller

`console.sv` and `disk.sv` each hold a VirtIO-MMIO (legacy, version 1)
register set (`virtio_regs.sv`): magic value, version, device ID, features,
queue select / size / PFN, QueueNotify, interrupt status / acknowledge, and
status.

- **Console** (device 3, two queues) adds:
  - `0x080`: transmit a byte on write; reads the transmitter busy flag.
  - `0x084`: receive. Pops the 16-entry keyboard FIFO; bit 8 means a character
    was there.
  - `0x088`: the number of characters waiting.

  Characters that arrive while the FIFO is full are dropped.
- **Disk** (device 2, one queue) reports a capacity of 131072 sectors (64 MiB)
  at `0x100`.

A write to QueueNotify in either block starts RVuc. RVuc reports completion by
writing the interrupt-status register at offset `0x060`, which is this design's
convention. The kernel acknowledges at `0x064`.

`rvuc.sv` is a four-step RV32I processor: IF, OF, EX, MEM. The register write
of one instruction happens during the IF of the next. It works as follows:

- **Memory:** it executes from an 8 KiB local memory at addresses
  `0 - 0x1FFF`. Any other address goes out to the MMU as a physical access, to
  DRAM or the register blocks.
- **Run:** it starts at address 0 on QueueNotify and runs until EBREAK or ECALL.
- **Stall:** its `busy` output is the core's stall.
- **Not supported:** no CSRs and no interrupts; FENCE is a no-op.

The VirtIO firmware for RVuc is software and is not part of this RTL. The
end-to-end testbench uses a tiny stand-in program.

## Loading the system over the serial line

`loader.sv` receives the start-up image over the UART (8N1, 13 clocks per bit,
8 Mbaud at 104 MHz). The image is a sequence of packets. Each packet is:

- a command byte,
- a 4-byte address (little endian),
- a 4-byte length (little endian),
- then, for the write commands, the data.

| Command | Meaning |
|---------|---------|
| `0x01`  | write the data to physical memory, for the boot loader, kernel and disk image |
| `0x02`  | write the data to RVuc's local memory |
| `0x03`  | start: release RVCoreM from reset (address and length are sent but ignored) |

Data is packed into 32-bit little-endian words. A final partial word is
zero-filled. Until the start packet, RVCoreM is held in reset. After it, every
received byte goes to the console's keyboard FIFO, and console output goes back
out on `uart_txd`. The packet format is this design's own; the original system
only says that this block loads the image and carries the terminal.

## Top level (`rvsoc.sv`)

The top ports are:

- the two clocks and two resets
- `uart_rxd` / `uart_txd`
- `irq_timer`
- the DRAM controller user port (`app_*`)
- status outputs: `instret` (for a board display), `core_step`,
  `core_running`, `uc_busy`, and the cache access/hit counters
- `events[15:0]`, one-cycle strobes for the testbench and for statistics

The `events` bits:

| bit | event | bit | event |
|-----|-------|-----|-------|
| 0 | divide finished | 8 | LD → SD skip |
| 1 | AMO executed | 9 | TLB hit |
| 2 | trap taken | 10 | TLB miss (page walk started) |
| 3 | compressed instruction | 11 | page fault from a walk |
| 4 | 16-bit buffer supplied a half | 12 | RVuc started |
| 5 | line-crossing fetch needed two reads | 13 | core stalled by RVuc |
| 6 | EX1 → WB skip | 14 | console received a character |
| 7 | LD → WB skip | 15 | console sent a character |

Default parameters are the original system's: 32-entry TLBs, a 128 KiB cache
with 16-byte lines, 8 KiB of RVuc memory, a 104 MHz core clock and 8 Mbaud.
`RESET_PC` is `0x8000_0000`.

## Where this RTL departs from, or adds to, the description

- **Instruction timing.** The minimum is not 8 cycles per instruction; see
  above. The average CPI reported for Linux (about 18) has not been
  reproduced.
- **Interrupts.**
  - Interrupts are taken at INI.
  - No machine timer is built.
  - Console and disk interrupts go straight to MEIP/SEIP; there is no
    interrupt controller.
- **Misaligned accesses** trap. They are not split into two accesses.
- **Address map, VirtIO details, loader protocol and arbitration priority**
  are this design's own choices. So are:
  - RVuc's start on QueueNotify and stop on EBREAK/ECALL;
  - the use of offset `0x060` for RVuc to raise the interrupt;
  - the console's transmit/receive registers.
- **Cache timing.** The one-cycle hit, the FIFO depth and the DRAM command
  sequence are this design's.
- **Not built:**
  - the clock generators (FPGA primitives)
  - the DRAM controller IP and the DDR2 device
  - the simulation-only trace/debug module
  - the 7-segment display driver (`instret` is a port instead)
  - RVuc's VirtIO firmware

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.
Testbenches with behavioural helpers:

- `tb/mig_model.sv` models the DRAM controller IP's user port: a 1 MiB array
  with random ready stalls and read latency.
- `tb/rv_asm.sv` is a package of RV32 instruction encoders, used to build test
  programs inside the testbenches.
- `tb/tb_check.svh` holds the check macros.

With Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/rv_pkg.sv tb/tb_rvsoc.sv --top-module tb_rvsoc
./obj_dir/Vtb_rvsoc +verilator+rand+reset+2
```

Replace `tb_rvsoc` with any other testbench. `+verilator+rand+reset+2` starts
every uninitialised variable at a random value, which checks that reset covers
what it must.

`tb_rvsoc` is the end-to-end test and runs the top at its default parameters.
It takes about a second. The steps:

1. It places a program, a trap handler and an Sv32 page table in the DRAM
   model.
2. It sends RVuc's program, a memory packet and the start packet over the
   serial line.
3. The core boots in M-mode, enables translation, and drops to S-mode.
4. In S-mode it runs multiply, divide, an AMO, and compressed code with both
   kinds of line-crossing fetch.
5. It takes two page faults, which the M-mode handler skips.
6. It prints a character and rings the console's QueueNotify.
7. RVuc, with the core stalled, reads a message from DRAM, writes a word back,
   prints `OK\n` and raises the console interrupt.
8. The core waits for a keyboard character and checks RVuc's results.
9. It posts a disk job in a mailbox word and rings the disk's QueueNotify.
   RVuc copies data from the disk area of DRAM into main memory and raises
   the disk interrupt status.
10. The core reads the copied data and the disk capacity, then ends with
    ECALL.

The bench checks the serial output and the results in DRAM. It also counts
every `events` line and fails if any mechanism never occurred.

`tb_rvcorem` runs a larger machine-mode program on the core alone, against a
memory model with random latency, random stalls and injected page faults. It
covers the M and A extensions, LR/SC success and failure, compressed code,
every trap cause used, and a timer interrupt. The other testbenches exercise
each block directly against reference values computed in the testbench.
