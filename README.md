# UET-RVMCU in SystemVerilog: a small RISC-V microcontroller

UET-RVMCU is a 32-bit microcontroller cut down from an application-class
RISC-V system. It keeps the instruction set rich (RV32IMA plus the Zba, Zbb,
Zbc and Zbs bit-manipulation subsets) but makes everything else small. The
pipeline has three stages instead of a longer one. It runs in machine mode
only, with no MMU and flat physical addresses. Memory is four block memories
with separate ports, and there is a plain set of microcontroller peripherals:
CLINT, PLIC, UART, SPI, three 8-bit GPIO ports, and a "GP-Special" block that
drives 16 LEDs and reads 16 switches.

This RTL rebuilds that chip from its published description. That description
gives the block diagram, the stage names, the instruction set, the number of
memory banks, the GPIO port count and width, the level-sensitive interrupts,
and the LED/switch counts. It does not give register maps, bus protocols,
memory sizes or the inside of any block. Every such detail here is a choice
made for this RTL. The sections below say which parts follow the source and
which parts are choices.

```
                    +------------------------------+
                    |  pipeline_top (core)         |
                    |  Fetch | Decode/Execute | WB |
                    +------+---------------+-------+
             instruction   |               | data bus (dbus_req_t / dbus_rsp_t)
             port          |               v
                    +------v-----+   +-----------+
                    |  mem_top   |<--| dbus2peri |--> clint  --(MTI, MSI)--> core
                    |  4 banks   |   |           |--> plic   --(MEI)-------> core
                    +------------+   |           |--> uart   --irq 1--> plic
                                     |           |--> spi    --irq 2--> plic
                                     |           |--> gpio   --irq 3--> plic
                                     +-----------+      (+ gp_special inside gpio)
```

## The core

### Stages

The three stages are the ones named in the source: Fetch, Decode/Execute and
Writeback. What each stage does is this design's choice:

* **Fetch** holds `pc_f` and drives it onto the instruction port. Memory reads
  are synchronous, so the instruction comes back one cycle later. The memory's
  output register acts as the Fetch-to-Decode pipeline register. Driving
  `imem_en` low freezes it, which is how a stall holds the instruction.
* **Decode/Execute** does nearly all the work in one cycle. It decodes, reads
  registers, computes in the ALU, checks branch conditions and computes targets.
  It reads and writes CSRs, detects exceptions, decides whether to take an
  interrupt, and issues the data-bus request for loads, stores and atomics.
* **Writeback** latches the result and writes it to the register file. For a
  load, the data arrives from the bus in this cycle. It is aligned and extended
  here (`lsu.wb_ldata`) and written at the end of the cycle.

### Hazards

* **Data hazards.** The register file writes through: a read of the register
  being written in the same cycle returns the new value. Only one instruction
  can be ahead of Decode/Execute, so this is the only bypass needed, and it
  covers load results too. A load followed directly by a user of its result
  does not stall. The price is a long combinational path: bus read data goes
  through the load aligner and the register-file bypass into the ALU.
* **Control hazards.** Branches and jumps are resolved in Decode/Execute. When
  one is taken, the instruction already fetched is discarded, costing one
  bubble. The same happens for traps, `MRET` and `FENCE.I`. There is no branch
  prediction.
* **Stalls.** Only two things stall the pipeline: division (33 cycles in
  Decode/Execute) and an AMO (2 cycles). While stalled, Fetch and
  Decode/Execute hold, and Writeback receives bubbles.

### Cycle by cycle

A taken branch `beq` at address A to target T:

| cycle | Fetch (`pc_f`) | Decode/Execute | Writeback |
|---|---|---|---|
| n | A+4 | `beq` (taken: `pc_f <= T`) | older instruction |
| n+1 | T | bubble (the word from A+4 is dropped) | `beq` (writes nothing) |
| n+2 | T+4 | instruction at T | bubble |

A load followed by a user of its result (`lw x5` at A, `add x6, x5, x7` at A+4):

| cycle | Decode/Execute | data bus | Writeback |
|---|---|---|---|
| n | `lw`: request sent | request | |
| n+1 | `add` reads x5 through the write-through port | response | `lw`: data aligned, written to x5 |
| n+2 | next | | `add` |

A divide enters Decode/Execute in cycle n and starts the divider. The divider
finishes at n+33, so the divide leaves in that cycle after 33 stall cycles.
Multiplies take one cycle. An AMO sends its read in cycle n and its write in
cycle n+1, then leaves; that is one stall cycle.

### Atomics

`LR.W` is a load that also records a one-word reservation. `SC.W` writes only
if the reservation covers its address. It returns 0 on success and 1 on
failure, and it always clears the reservation. Traps also clear it, and so does
any store to the reserved word.

An AMO runs in two cycles:

1. The LSU issues a read and stalls.
2. The old value is on the bus. The LSU combines it with rs2, writes the new
   value, and passes the old value to Writeback as the result.

The core is the only bus master, so nothing else can slip in between the read
and the write.

### Traps and interrupts

Exceptions detected:

* illegal instruction (this includes unknown CSRs and writes to read-only CSRs)
* `ECALL`
* `EBREAK`
* misaligned load or store (loads, stores, LR/SC and AMOs)
* misaligned jump or branch target

All exceptions are precise. The faulting instruction has no side effect.
`mepc` gets its PC, and `mtval` gets the instruction word, the PC or the bad
address, following the privileged specification.

An interrupt is taken on the instruction waiting in Decode/Execute. That
instruction does not execute, and its PC goes to `mepc`. Two things must hold:

* `mstatus.MIE` is set, and an interrupt is both enabled in `mie` and pending
  in `mip`.
* The instruction has not started a multi-cycle operation, i.e. a division
  already running or an AMO in its write cycle.

Priority is external, then software, then timer. `mtvec` has direct mode only.

### CSRs

`mstatus` (MIE, MPIE; MPP reads 3), `misa` (0x4000_1103: RV32 A B I M),
`mie`, `mip`, `mtvec`, `mscratch`, `mepc`, `mcause`, `mtval`, 64-bit `mcycle`
and `minstret` with their read-only `cycle`/`instret` aliases, and `mvendorid`,
`marchid`, `mimpid`, `mhartid` (all zero). `WFI` and `FENCE` execute as
no-ops.

## Data bus

All slaves share one simple bus made of two packed structs from
`rvmcu_pkg`:

* `dbus_req_t {valid, we, strb[3:0], addr[31:0], wdata[31:0]}`
* `dbus_rsp_t {valid, rdata[31:0]}`

A request lasts exactly one cycle. The addressed slave answers in the next
cycle, always, with no wait states. This fixed latency is what lets the core
avoid a handshake. A new slave must keep to it, or the core needs a wait
input, which it does not have today.

`dbus2peri` decodes the address and passes the request to one slave. It
registers which slave that was and returns that slave's read data one cycle
later. An unmapped address reads 0 and its writes are dropped. No access fault
is raised.

| region | base | size |
|---|---|---|
| memory | `0x8000_0000` | 4 KiB (aliases across `0x8xxx_xxxx`) |
| CLINT | `0x0200_0000` | 64 KiB |
| PLIC | `0x0C00_0000` | 4 MiB |
| UART | `0x9000_0000` | 4 KiB |
| SPI | `0x9000_1000` | 4 KiB |
| GPIO (+ GP-Special) | `0x9000_2000` | 4 KiB |

The core starts at `0x8000_0000` after reset.

## Memory

The source specifies four block memories, each byte-addressable and each with
its own read and write ports. It also says the chip has no SRAM macro. Here:

* **Banks.** Each bank (`mem_bank`) is a `BANK_WORDS` x 32 register array
  with byte strobes (default 256 words, so 4 KiB in total).
* **Address split.** Bits `[11:10]` pick the bank. The banks are contiguous
  1 KiB regions, so software can put code and data in different banks.
* **Ports.** Each bank has an instruction read port and a data read/write
  port. A fetch and a data access never conflict, even within one bank.
* **Timing.** Both reads are synchronous. A read of a word being written in
  the same cycle returns the old data.

The memory size is a choice made here; the source gives none. To change it,
set `BANK_WORDS`. The bank count is the `BANKS` parameter, which must be a
power of two.

## Peripherals

Each peripheral reads back one cycle after the request, and writes honour byte
strobes where a register has more than one byte. Offsets are from each block's
base address.

### CLINT
The usual RISC-V layout:

* `msip` at 0x0000
* `mtimecmp` at 0x4000 (low) and 0x4004 (high)
* `mtime` at 0xBFF8 (low) and 0xBFFC (high)

`mtime` counts every clock. `mtimecmp` resets to all ones. The timer interrupt
is a level, high while `mtime >= mtimecmp`. Software clears it by moving
`mtimecmp` forward.

### PLIC
There are three sources: 1 = UART, 2 = SPI, 3 = GPIO. Registers:

* priority of source *id* at `4*id` (3 bits)
* pending at 0x1000
* enable at 0x2000 (bit *id*)
* threshold at 0x20_0000
* claim/complete at 0x20_0004

Each source has a level-sensitive gateway. While the source line is high and
the source is not being serviced, its pending bit is set. A claim read returns
the enabled pending source with the highest priority (lowest id on a tie),
clears its pending bit and marks it in service. Writing the id back completes
it. If the line is still high at that point, the source becomes pending again.
The core's external interrupt is high when some enabled pending source has a
priority above the threshold.

### UART
8N1, with one holding register each way. Registers:

| offset | register | contents |
|---|---|---|
| 0x0 | DATA | write: send a byte; read: received byte (clears `rx_full` and `rx_overrun`) |
| 0x4 | STATUS | {`rx_overrun`, `rx_full`, `tx_busy`, `tx_full`} |
| 0x8 | DIV | clocks per bit; reset 868 (115 200 baud at 100 MHz) |
| 0xC | IE | bit 0: rx full, bit 1: tx holding register empty |

The receiver synchronises `rx` and re-checks the start bit half a bit after the
falling edge. It then samples each bit in its middle. If a byte arrives while
`rx_full` is still set, the new byte replaces the old one and `rx_overrun` is
set.

### SPI
An SPI master in mode 0, MSB first, 8 bits per transfer. Registers:

| offset | register | contents |
|---|---|---|
| 0x0 | DATA | write while idle: start a transfer; read: received byte (clears `done`) |
| 0x4 | STATUS | {`done`, `busy`} |
| 0x8 | DIV | half period of `sclk` in clocks |
| 0xC | CTRL | bit 0: assert `cs_n`; bit 1: interrupt on `done` |

Software drives chip select, so a multi-byte transaction stays selected
between bytes.

### GPIO and GP-Special
There are three 8-pin ports: A (`gpio_*[7:0]`), B (`[15:8]`) and C
(`[23:16]`). Registers:

| offset | register | contents |
|---|---|---|
| 0x10*p + 0x0 | DIR | 1 = output |
| 0x10*p + 0x4 | OUT | output values |
| 0x10*p + 0x8 | IN | synchronised pad inputs (read only) |
| 0x10*p + 0xC | IE | per-pin interrupt enable |
| 0x30 + 4*p | POL | active level per pin; resets to 1 = active high |
| 0x40 | IRQ_STATUS | requesting pins, 24 bits |
| 0x100 | LEDS | 16 LED outputs |
| 0x104 | SWITCHES | 16 synchronised switch inputs (read only) |

The interrupts are level-sensitive and configurable, as the source describes.
A pin requests while it is enabled and its level equals its `POL` bit. Nothing
is latched: when the level goes away, so does the request. The GPIO block ORs
all requests onto PLIC source 3.

The source lists GP-Special as a separate module but does not show it on the
bus diagram. Here `gp_special` sits inside the GPIO block's address window.

## Where this RTL departs from, or goes beyond, the source

* **Debug and trace.** The architecture overview claims debug and trace
  support (breakpoints, single step, tracing). The results section says the
  built chip has none yet and lists it as future work. This RTL follows the
  results and has no debug module.
* **Floating point.** There is none, as in the source.
* **Choices made here**, since the source gives no such detail:
  * the inside of every block
  * the memory map and all register maps
  * the fixed-latency data bus
  * the memory size (4 KiB)
  * the interrupt wiring
  * the UART and SPI formats
  * the reset PC
* **Instruction port.** The source's block diagram draws every block, memory
  included, hanging off the one data-bus interconnect. Here the core also has
  a private instruction port into the memory, so fetch never competes with
  loads and stores. This uses the banks' separate ports, which the source
  does describe.
* **Reset style.** Every register with a reset uses an asynchronous,
  active-high `rst` in its own `if` branch. That is the form the source
  recommends for its synthesis flow. The register file and memory arrays have
  no reset.
* **Physical design is not modelled.** The source's main subject is turning
  the design into a layout: floorplan, macro placement, routing congestion,
  and the 700 x 700 um core and 1200 x 1200 um memory macros. None of that is
  RTL.

## Files

| file | what it is |
|---|---|
| `rtl/rvmcu_pkg.sv` | bus structs, memory map, opcodes, ALU/MD/AMO enums, CSR numbers, decoded-instruction struct |
| `rtl/rvmcu_top.sv` | the chip: all blocks wired together |
| `rtl/pipeline_top.sv` | 3-stage core |
| `rtl/decoder.sv` | instruction decoder (helper of the core) |
| `rtl/regfile.sv` | 32 x 32 register file |
| `rtl/alu.sv` | RV32I + Zba/Zbb/Zbc/Zbs ALU |
| `rtl/muldiv.sv` | M extension: 1-cycle multiply, 33-cycle divide |
| `rtl/lsu.sv` | loads, stores, LR/SC, AMOs |
| `rtl/csr_machine.sv` | machine-mode CSRs, traps, interrupt selection |
| `rtl/mem_top.sv`, `rtl/mem_bank.sv` | four-bank memory |
| `rtl/dbus2peri.sv` | data-bus address decoder and response mux |
| `rtl/clint.sv`, `rtl/plic.sv` | timer/software interrupts, external interrupt controller |
| `rtl/uart.sv`, `rtl/spi.sv`, `rtl/gpio.sv`, `rtl/gp_special.sv` | peripherals |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/isa_prog.hex`, `tb/isa_sig.hex` | instruction-set test program and its reference signature |
| `tb/soc_prog.hex` | whole-chip test program |

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_alu`: all 38 operations with corner and random operands, against a
  model written from the instruction definitions.
* `tb_muldiv`: all eight operations against 64-bit arithmetic. It also checks
  the 33-cycle divide latency.
* `tb_regfile`, `tb_csr_machine`, `tb_lsu`, `tb_mem_top`, `tb_dbus2peri`,
  `tb_clint`, `tb_plic`, `tb_uart`, `tb_spi`, `tb_gpio`, `tb_gp_special`:
  directed and random tests of each block's interface as described above. The
  UART and SPI testbenches check the pin waveforms with their own models.
* `tb_pipeline_top`: the core alone runs `isa_prog.hex`. This program covers
  every supported instruction, all seven trap causes the core raises, LR/SC
  and all AMOs.
  It writes 192 signature words, and the testbench compares them with
  `isa_sig.hex`. `isa_sig.hex` is the signature the same program produces on
  an independent reference instruction-set simulator. The testbench also
  checks that exactly 10 x 33 + 9 cycles were stall cycles: ten divides and
  nine AMOs.
* `tb_rvmcu_top`: the whole chip at its default parameters runs
  `soc_prog.hex`. The testbench loops UART TX to RX and SPI MOSI to MISO,
  drives port B and the switches, and raises a port C pin on request. The
  program takes a UART receive interrupt and a GPIO level interrupt through
  the PLIC, then a CLINT timer interrupt and a software interrupt. It also runs
  a divide, a load-use pair, an AMO and an ECALL. The testbench checks the
  results, the pins, and that each mechanism happened the expected number of
  times.

The hex files hold one 32-bit little-endian word per line, starting at
`0x8000_0000`. They were assembled for `rv32ima_zicsr_zifencei_zba_zbb_zbc_zbs`.
The ISA program ends by storing 1 to `0x8000_0F00`, and the testbenches watch
for that store.

To run a testbench with plain Verilator from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl \
          rtl/rvmcu_pkg.sv tb/tb_rvmcu_top.sv --top-module tb_rvmcu_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_rvmcu_top` with any other testbench name. The testbenches carry
a `timescale` and the RTL does not; `--timescale` gives the RTL the same one.
The hex files are read by paths relative to the directory you run from. Every run finishes in
well under a second of simulated time. To lint the RTL:
`verilator --lint-only -Wall -Irtl rtl/rvmcu_pkg.sv rtl/rvmcu_top.sv`.

## Known limits

* There is no bus wait state and no bus error. An access to an unmapped
  address silently reads 0.
* `FENCE.I` refetches the next instruction. Because the instruction port reads
  the same banks the data port writes, self-modifying code works once the
  fence has executed.
* `mtvec` has direct mode only, and there is no vectored interrupt mode.
* The memory is small and has no boot loader. Something outside the RTL must
  fill the banks. In simulation the testbench writes them hierarchically.
