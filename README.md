# Croc SoC: RTL of the infrastructure domain

Croc is a small RISC-V microcontroller SoC meant as a template. Students
and designers add their own accelerator, peripheral or core extension to it
and take the result to silicon. The platform splits the chip into two parts:

* the **Croc domain**: the fixed infrastructure. It holds the core, an
  on-chip bus with a crossbar, two SRAM banks, a boot ROM, the usual
  microcontroller peripherals and a JTAG debug unit;
* the **user domain**: an empty slot. It sees the main crossbar through one
  manager port and one subordinate port, and it can raise interrupts.

The main idea is that the interconnect is *single-cycle* and the memory is
split into *two banks*. An in-order core with separate instruction and data
ports can then fetch from one bank and load or store to the other in the
same cycle. It never waits for the bus and reaches one instruction per cycle.

This repository gives synthesizable SystemVerilog for the Croc domain and a
self-checking testbench for every block. The RISC-V core (CVE2, a separate
open-source core) and the user domain are not part of this RTL. Their
connections are ports of the top module `croc_soc`, so either can be
attached without editing the SoC.

## Block map

```
             jtag ──► dbg_jtag ──(manager)──┐
                                            ▼
 core instr ──►┐                     ┌─► sram_bank 0   0x1000_0000  4 KiB
 core data  ──►┤   obi_xbar          ├─► sram_bank 1   0x1000_1000  4 KiB
 dbg_jtag   ──►┤   4 managers x      ├─► obi_demux     0x0000_0000 .. 0x0FFF_FFFF
 user mgr   ──►┘   4 subordinates    └─► user sbr      0x2000_0000 .. 0x2FFF_FFFF

 obi_demux ─► dbg_jtag  (mailbox)   0x0000_0000   4 KiB
           ─► bootrom               0x0200_0000   4 KiB
           ─► clint                 0x0204_0000  64 KiB
           ─► soc_ctrl              0x0300_0000   4 KiB
           ─► uart                  0x0300_2000   4 KiB
           ─► gpio                  0x0300_5000   4 KiB
           ─► obi_timer             0x0300_A000   4 KiB
```

The set of blocks and the way they connect follow the published
architecture of the SoC. The addresses are this design's own. They sit in
`croc_pkg` (`XbarAddrMap`, `PeriphAddrMap`) and can be changed there.

## The bus: OBI with a fixed one-cycle response

Every link uses OBI (Open Bus Interface) and carries two structs from
`croc_pkg`:

| struct      | fields |
|-------------|--------|
| `obi_req_t` | `req`, and the address phase `a` = {`addr[31:0]`, `we`, `be[3:0]`, `wdata[31:0]`, `aid[0:0]`} |
| `obi_rsp_t` | `gnt`, `rvalid`, and the response phase `r` = {`rdata[31:0]`, `err`, `rid[0:0]`} |

The protocol has two phases. A manager raises `req` with the address phase
and holds it until `gnt` is high in the same cycle. The response phase
(`rvalid` with data or a write acknowledge) comes later. **In this design
"later" is always exactly one cycle after the grant.** Every subordinate
meets this rule: the SRAM banks, all seven peripherals, the decode-error
responders, and the user domain's subordinate port, which must meet it
too. The rule is what makes the interconnect simple and fast:

* A manager may issue a new request in the cycle its previous response
  arrives, or even every cycle. It gets one response per cycle, in order.
* The crossbar and the demux need no response FIFOs. Each one registers
  *who was granted* and uses that one cycle later to steer the response
  back.

The crossbar and the demux assert the rule, and a simulation with
assertions enabled stops on a subordinate that breaks it. A slower user
subordinate (for example one that has to wait for an accelerator) must
buffer its answer internally and hold back `gnt` until it can answer on
time.

An address that matches no window is still granted. It is answered one
cycle later with `err = 1` and `rdata = 0`, by the crossbar (outside every
crossbar window) or by the demux (a hole in the peripheral space).
Peripherals answer with `err = 1` for register offsets they do not have,
and for writes to read-only locations.

## Crossbar and the one-instruction-per-cycle property

`obi_xbar` decodes each manager's address against its map. Each subordinate
port has its own round-robin arbiter (`rr_arbiter`). Managers that target
different subordinates are therefore served in the same cycle:

* core instruction port → bank 0 and core data port → bank 1: both granted
  every cycle. The end-to-end test streams 64 fetches next to 64 stores and
  checks 64 grants on both ports in 64 cycles;
* both ports → the same bank: one is granted and the other waits one
  cycle. The priority rotates, so no manager waits more than three grants
  under full contention.

So one instruction per cycle depends on where the software is placed:
code in bank 0 and data and stack in bank 1. The banks sit back to back,
which makes them one contiguous 8 KiB memory (`SramWords` = 1024 words per
bank). A program larger than 4 KiB still runs, but accesses that cross into
the other bank can collide.

The arbiter moves its priority only when the subordinate actually grants.
A waiting winner keeps its turn, and the request cannot be overtaken while
it is held.

## Bringing the chip up: boot ROM, SoC registers and JTAG

After reset the SoC registers give the core the boot address `0x0200_0000`,
the boot ROM, and fetch enable is off. Fetch enable is `FETCHEN[0]` OR the
`fetch_en_i` pin. The ROM holds two instructions,
`lui t0, %hi(BootTarget)` and `jalr x0, %lo(BootTarget)(t0)`. They jump to
the start of SRAM. The two words are computed from the `BootTarget`
parameter, so no data file is needed.

A host loads a program through JTAG with `dbg_jtag`. The unit uses the
transport and the system-bus part of the RISC-V debug specification 0.13:

* TAP instructions (5-bit IR): IDCODE `0x01` (`0x1c0c0001`, the reset
  choice), DTMCS `0x10`, DMI `0x11`; every other code selects BYPASS.
* DTMCS reads as version 1, `abits = 7`, idle hint 1. `dmistat` is
  always 0, because a DMI access can neither fail nor stall here; writes
  of dmireset are accepted and have nothing to clear.
* DMI is 41 bits: `{address[6:0], data[31:0], op[1:0]}`, LSB first.
  `op = 1` reads and `op = 2` writes a debug-module register at Update-DR.
  The access finishes within one clock cycle, so the next Capture-DR always
  returns `{address, read data, status 0}`.
* Debug-module registers:
  * `dmcontrol` (0x10): `dmactive`; `haltreq` drives the core's halt
    request `core_debug_req_o`; `resumereq` withdraws it.
  * `dmstatus` (0x11): version 2, authenticated.
  * `abstractcs` (0x16): no data registers and no program buffer. A write
    to `command` (0x17) sets `cmderr = 2`, "not supported".
  * `sbcs` (0x38), `sbaddress0` (0x39) and `sbdata0` (0x3C): 32-bit
    system-bus accesses with read-on-address, read-on-data and
    auto-increment. `sberror` is 2 for a bus error and 4 for an unsupported
    size. `sbbusyerror` flags an access started while one is still running.

The bus accesses go through the debug unit's manager port on the crossbar,
so every address of the SoC can be reached. A typical bring-up:

1. Write `dmcontrol = 1`.
2. Write `sbcs` with `sbaccess = 2` and `sbautoincrement = 1`.
3. Write `sbaddress0`, then stream the program words into `sbdata0`.
4. Write `SOC_CTRL.BOOTADDR` (or leave it on the ROM), then set
   `SOC_CTRL.FETCHEN = 1` the same way.

The debug unit also has a small subordinate with two mailbox words, DATA0
and DATA1, and a read-only STATUS word (bit 0 is the halt request). Both
the core and the host (through system-bus access) can reach them.

The JTAG pins are oversampled by the system clock. They pass through
two-flip-flop synchronisers, and the TCK edges are detected in the clk_i
domain. There is no second clock domain, but **TCK must stay below about
clk/4**. The testbenches use clk/8.

The debug unit covers loading, inspecting and halting. It is not a full
RISC-V debug module:

* It has no abstract commands, no program buffer and no debug ROM. A
  debugger cannot read the registers of a halted core.
* `dmstatus` does not report the hart's halted or running state, because
  the core does not export it here.
* TRST resets only the TAP. The halt request stays until `resumereq`,
  `dmactive = 0` or a SoC reset. The system-bus settings stay until they
  are rewritten or the SoC is reset.

## Peripherals

All registers are 32 bits wide and honour byte enables where the bits can
be written. The opening comment of each file has the full map.

| block | registers (offset) | interrupt |
|-------|--------------------|-----------|
| `soc_ctrl` | BOOTADDR 0x0, FETCHEN 0x4, CORESTATUS 0x8 (software writes bit 31 when a program ends, with its result in bits 30:0), SCRATCH 0xC | – |
| `clint` | MSIP 0x0, MTIMECMP 0x4000/0x4004, MTIME 0xBFF8/0xBFFC. mtime counts clock cycles | `core_timer_irq_o` while mtime ≥ mtimecmp; `core_sw_irq_o` = MSIP[0] |
| `obi_timer` | CTRL 0x0 (enable, auto-restart, 8-bit prescaler), COUNT 0x4, CMP 0x8, STATUS 0xC (write 1 to clear) | fast irq 2 |
| `uart` | DATA 0x0, STATUS 0x4, DIV 0x8 (cycles per bit), IRQEN 0xC. 8N1 frames, one-byte buffers, overrun/framing/drop flags | fast irq 0 |
| `gpio` | DIR 0x0, OUT 0x4, IN 0x8 (2-FF synchronised), IRQEN 0xC, IRQSTAT 0x10 (change flags, write 1 to clear) | fast irq 1 |

`core_fast_irq_o` is `{user_irq_i[3:0], timer, gpio, uart}`. The core can
map it onto its platform-specific ("fast") interrupt inputs.

## Top-level ports of `croc_soc`

| group | ports |
|-------|-------|
| clock, reset | `clk_i`, `rst_ni` (active low, asynchronous assert), `fetch_en_i` |
| pins | `jtag_tck_i`, `jtag_tms_i`, `jtag_tdi_i`, `jtag_trst_ni`, `jtag_tdo_o`; `uart_rx_i`, `uart_tx_o`; `gpio_i`, `gpio_o`, `gpio_oe_o` (32 each) |
| core | `core_instr_req_i`/`core_instr_rsp_o`, `core_data_req_i`/`core_data_rsp_o` (OBI manager ports of the core), `core_boot_addr_o`, `core_fetch_en_o`, `core_debug_req_o`, `core_timer_irq_o`, `core_sw_irq_o`, `core_fast_irq_o`, `core_status_o` |
| user domain | `user_mgr_req_i`/`user_mgr_rsp_o` (its manager), `user_sbr_req_o`/`user_sbr_rsp_i` (its subordinate, window 0x2000_0000–0x2FFF_FFFF), `user_irq_i[3:0]` |

Parameters: `SramWords` (words per bank, default 1024, i.e. 8 KiB in
total), `NumGpio` (32) and `NumUserIrq` (4).

## How far this follows the published design

Taken from the published description:

* the split into an infrastructure domain and a user domain;
* the block set: core, OBI crossbar, two SRAM banks, an OBI demux to
  debug, boot ROM, CLINT, SoC registers, UART, GPIO and timer;
* which blocks are managers and which are subordinates: the core's two
  ports, the debug unit and the user domain drive the crossbar; the banks,
  the demux and the user domain hang off it;
* the user domain's interface: a manager port, a subordinate port and
  interrupts;
* a single-cycle interconnect, and 8 kB of on-chip memory in the baseline
  chip.

Chosen here, because the description stops at block level:

* the address map, all register maps and reset values;
* round-robin arbitration;
* the fixed one-cycle response rule;
* the UART frame format and buffer depth, the GPIO interrupt style, and the
  timer's prescaler and auto-restart;
* the boot ROM content;
* the debug unit: RISC-V debug transport and system-bus access only, with
  a mailbox as its subordinate (see above);
* four user interrupts, and the order of the fast interrupts.

Not included:

* **the CVE2 core.** It is an external design. Attach it to the `core_*`
  ports.
* **the user domain.** It is the designer's own.
* **the optional DMA engine.** The architecture drawing marks it optional.
* **SRAM macros and I/O pads.** The banks are plain arrays here. A silicon
  flow replaces `sram_bank`'s array with the process' SRAM macro, which has
  the same one-cycle read.

Published variants of the chip enlarge the memory to 32 kB. Set
`SramWords = 4096` for that.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_sram_bank` | random data against a reference array; byte enables; one read per cycle, answered one cycle later |
| `tb_obi_xbar` | 4 managers to 4 subordinates granted in one cycle; 4-way contention served one per cycle, each manager once in 4 cycles; decode error; random concurrent traffic with random subordinate stalls, data checked per manager |
| `tb_obi_demux` | every window reaches only its subordinate; back-to-back accesses to alternating peripherals; stall on a withheld grant; holes answer with errors |
| `tb_bootrom` | ROM words against hand-encoded RV32I instructions, also for a target with nonzero low bits |
| `tb_soc_ctrl`, `tb_clint`, `tb_obi_timer`, `tb_gpio`, `tb_uart` | register behaviour, interrupt timing (timer match exactly 10 cycles after enable, CLINT at mtimecmp), UART frames sampled bit by bit, overrun/framing errors |
| `tb_dbg_jtag` | TAP walk, IDCODE, IR capture, BYPASS, DTMCS, DMI access to the debug-module registers, system-bus writes and reads (auto-increment, read on address and on data) against a stalling memory model, bus and size errors, busy error, halt request, TRST, mailbox |
| `tb_croc_soc` | the whole SoC at its default parameters. It brings the SoC up over JTAG, fetches from the boot ROM, then streams 64 fetches and 64 stores in 64 cycles, forces a bank conflict, runs a UART loopback, and exercises GPIO, timer, CLINT, the user domain ports and interrupts, decode errors and the halt request. It counts each of these events and fails if any never happened |

`tb_croc_workload` runs a program instead of single bus accesses. A
behavioural RV32IM core, `tb/rv32_core_model.sv`, sits on the core ports.
It is an idealised two-stage model for testing, not CVE2: it has no CSRs
and takes no interrupts. The test loads a 32-element integer dot product
and its data over JTAG. It sets fetch enable and lets the core boot
through the ROM into SRAM. The program stores the result, sends its low
byte over the UART and reports it through CORESTATUS. The test runs the
program twice:

* code in bank 0 and data in bank 1: 276 instructions in 276 cycles;
* code and data both in bank 0: 341 cycles. Each of the 65 loads and
  stores collides once with an instruction fetch.

This is the two-bank argument in numbers.

Simulate any of them with Verilator 5, for example:

```
verilator --binary --timing --assert --top-module tb_croc_soc \
    -y rtl -y tb +libext+.sv rtl/croc_pkg.sv tb/tb_croc_soc.sv
./obj_dir/Vtb_croc_soc
```

The same command with another testbench name runs a block test. Every
testbench finishes in well under a second. The RTL lints cleanly with
`verilator --lint-only -Wall`, apart from unused package constants, the
unused upper half of a UART write word, and `SYNCASYNCNET` notes. Those
notes arise because the reset is used asynchronously in the flip-flops and
as the `disable iff` condition of the protocol assertions.

Things the tests do not cover: the real CVE2 core (its timing differs
from the ideal model, for example in multi-cycle loads and multiplies),
interrupt handling by a core, and a user domain that takes longer than one
cycle to answer, which the bus rule forbids.
