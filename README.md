# Croc domain: a single-cycle OBI microcontroller fabric

Croc is a deliberately small RISC-V microcontroller meant to be taken all the
way to silicon by students. It stays small by doing only what a 32-bit core
needs to run at full speed: it has one bus fabric with no pipeline registers,
two separate SRAM banks (one for instructions, one for data) and a handful of
peripherals. Around it sits a *user domain*, an empty area where students add
their own accelerator, peripheral or core. The user domain connects through
ordinary bus ports and interrupt lines.

This repository holds synthesizable SystemVerilog for the Croc domain without
its processor core and its debug module. Those two are existing open cores
that the platform uses unchanged, so here they are only bus ports on the top
module. It also holds a self-checking testbench for every module and an
end-to-end testbench of the whole domain.

```
                    User domain  (not in this RTL: ports of croc_soc)
                 user_irq_i        user_mgr_* (manager)   user_sub_* (subordinate)
                     |                   |                      ^
   +-----------------|-------------------|----------------------|-----------+
   | Croc domain     v                   v                      |           |
   |  +---------+  instr  +-------------------------------+                 |
   |  |  core   |-------->|                               |----> I-Mem      |
   |  | (ports) |  data   |          obi_xbar             |      sram_bank  |
   |  |         |-------->|   4 managers x 5 subordinates |----> D-Mem      |
   |  +---------+         |   round robin per subordinate |      sram_bank  |
   |  +---------+  sba    |   + built-in error answer     |                 |
   |  |  debug  |-------->|                               |                 |
   |  | (ports) |<--------|                               |                 |
   |  +---------+  mem    +-------------------------------+                 |
   |                                  | periph                              |
   |                            +-----------+                               |
   |                            | obi_demux |                               |
   |                            +-----------+                               |
   |                  soc_regs    uart    gpio    timer                     |
   +------------------------------------------------------------------------+
```

## The bus rule that everything rests on

All connections use OBI, the Open Bus Interface. A manager raises `req` with
`addr`, `we`, `be` (byte enables), `wdata` and an ID `aid`. The subordinate
accepts the request by raising `gnt` in that same cycle. Later it returns
exactly one response: `rvalid` with `rdata`, `rid` and `err`. OBI allows the
response to come any number of cycles after the grant. This design
tightens that to one rule:

> **Every subordinate answers exactly one cycle after it grants.**

Two things follow from it.

1. **Full speed for the core.** A manager can issue a new request in every
   cycle. Instructions sit in one bank and data in the other, so the core's
   fetch and its load or store never compete. The core can fetch one
   instruction and make one data access in every cycle, which is the rate it
   needs to retire one instruction per cycle.
2. **A crossbar with almost no state.** Responses always come back in the
   order the requests were granted, one cycle later. So `obi_xbar` does not
   track IDs or keep queues. For each manager it remembers only one thing:
   which subordinate granted that manager in the last cycle. In the next
   cycle it passes that subordinate's response back. A subordinate serves at
   most one manager per cycle, so no two managers can claim the same
   response.

A subordinate may still hold `gnt` low to make a manager wait. The manager
must then keep its request up, unchanged. What a subordinate may not do is
grant a request and answer it late. This matters for anything you attach to
the user-domain or debug subordinate ports. A slow block must stall with
`gnt` low, or answer at once and finish the work in the background. The
crossbar's assertions catch a late answer, and they also catch a manager that
drops or changes a request that has not been granted.

### Crossbar details (`obi_xbar`)

* Managers, in index order: core instruction port, core data port, debug
  system-bus port, user-domain manager.
* Subordinates: debug memory, I-Mem, D-Mem, peripheral demux, user domain.
* The address of each request is decoded with `croc_pkg::xbar_decode`. Each
  subordinate has a round-robin arbiter. Its search starts at the manager
  after the one it last granted, so a manager waiting for a subordinate that
  keeps granting waits at most `NumMgr-1` cycles.
* The crossbar has no register stage. `sub_req_o` is driven combinationally
  from the winning manager, and the manager's `gnt` is the subordinate's
  `gnt`. This is why the core sees single-cycle memory. The longest
  combinational path runs from a manager's address, through decode and
  arbitration, to the subordinate's `gnt` and back.
* An address that matches no subordinate is granted at once. It is answered
  one cycle later with `err = 1` and `rdata = 0`.

`obi_demux` splits the crossbar's peripheral port among Regs, UART, GPIO and
Timer by the same method, with one manager and no arbitration.

## Address map

The map is this design's own choice. It is modelled on the layout of the open
Croc code base, but it is not guaranteed to match it.

| region          | base          | size     | target                     |
|-----------------|---------------|----------|----------------------------|
| debug module    | `0x0000_0000` | 4 KiB    | `dbg_sub_*` port           |
| SoC registers   | `0x0300_0000` | 4 KiB    | `soc_regs`                 |
| UART            | `0x0300_2000` | 4 KiB    | `uart`                     |
| GPIO            | `0x0300_5000` | 4 KiB    | `gpio`                     |
| Timer           | `0x0300_A000` | 4 KiB    | `timer`                    |
| I-Mem           | `0x1000_0000` | 2 KiB    | `sram_bank` (instructions) |
| D-Mem           | `0x1000_0800` | 2 KiB    | `sram_bank` (data)         |
| user domain     | `0x2000_0000` | 256 MiB  | `user_sub_*` port          |

Accesses to the peripheral window (`0x0300_0000`–`0x0300_FFFF`) that hit no
peripheral get an error from the demux. Accesses anywhere else that hit nothing
get an error from the crossbar. Each memory bank is 512 words of 32 bits. The
banks are contiguous, so code and data can be placed across the boundary.
Only the split between the banks decides whether the fetch and the data
access can run in parallel.

## Peripherals

All peripherals are single-cycle OBI subordinates. They grant at once and
answer in the next cycle. A write takes effect at the clock edge of the grant.
An unknown register offset answers with `err`.

**`soc_regs` (Regs).** These registers hold what the core needs from outside
itself.

| off | name        | reset         | meaning                                  |
|-----|-------------|---------------|------------------------------------------|
| 0x0 | boot_addr   | `0x1000_0000` | address the core starts fetching from    |
| 0x4 | fetch_en    | 0             | bit 0: the core may start fetching       |
| 0x8 | core_status | 0             | free word; software writes its result    |
| 0xC | boot_mode   | 0             | bits 1:0, passed out to the core         |

The intended flow matches the end-to-end test. A debugger first loads the
program through its system-bus port and sets `boot_addr`. It then sets
`fetch_en`. The program finally reports a result in `core_status`.

**`uart`.** 8 data bits, no parity and 1 stop bit. A bit lasts `div` clock
cycles. The reset value of `div` is 694, which gives 115200 baud at 80 MHz.
There is one transmit register: a write while a byte is still going out is
dropped, so poll `tx_busy` first. There is one receive buffer: if it is
overwritten before it is read, the sticky `overrun` flag is set. The receiver
synchronises its input with two flops, checks the start bit at half a bit
time, and samples every later bit in its middle.

| off | W                      | R                                       |
|-----|------------------------|-----------------------------------------|
| 0x0 | byte to send           | received byte; clears rx_valid          |
| 0x4 | bit 2 = 1 clears overrun | {overrun, rx_valid, tx_busy}          |
| 0x8 | div (min. 2)           | div                                     |
| 0xC | irq enable (bit 0)     | irq enable; `irq_o = enable & rx_valid` |

**`gpio`.** 26 pins by default. The registers are `in` (0x00, read through a
two-flop synchroniser, so a pin change shows two cycles later), `out` (0x04),
`oe` (0x08), `irq_en` (0x0C) and `irq_pend` (0x10, write 1 to clear). A change
on an input whose enable bit is set sets its pending bit, and `irq_o` is the
OR of all pending bits.

**`timer`.** A 64-bit `mtime` counts clock cycles while `ctrl[0]` is set.
`irq_o` is high while the timer is enabled and `mtime >= mtimecmp`. The
registers are `mtime` lo/hi (0x0/0x4), `mtimecmp` lo/hi (0x8/0xC, reset all
ones) and `ctrl` (0x10). Software clears the interrupt by moving `mtimecmp`
ahead.

**Interrupts of `croc_soc`.** `irq_timer_o` is the timer interrupt. The
bits of `irq_fast_o` are: bit 0 UART receive, bit 1 GPIO change, bits 2–5 the
four user-domain interrupts `user_irq_i`, and zero for the rest. These lines
are meant for the core's timer and fast interrupt inputs.

## Connecting the parts that are not here

`croc_soc` is the top module. It has no parameters. Its sizes come from
`croc_pkg`. The parts it leaves out connect to these ports:

* **Processor core** (a 32-bit RISC-V core of the Ibex family). Connect
  `core_instr_req_i/rsp_o` to the core's instruction OBI port and
  `core_data_req_i/rsp_o` to its data port. Drive the core's boot address and
  fetch enable from `boot_addr_o` and `fetch_en_o`, and its interrupts from
  `irq_timer_o` and `irq_fast_o`. The core must keep its requests stable
  until they are granted.
* **Debug module.** Connect `dbg_mgr_*` to its system-bus manager, which is
  used to load programs and inspect memory. Connect `dbg_sub_*` to the memory
  it exposes to the core (debug ROM and program buffer). Its JTAG pins and its
  halt request to the core do not pass through this module.
* **User domain.** `user_mgr_*` lets a student block reach all memory and
  peripherals, for example for DMA. `user_sub_*` carries every access to the
  user window. `user_irq_i` goes to the core. Anything on `user_sub_*` must
  follow the one-cycle answer rule above.
* **Memories.** Each `sram_bank` is written as an array. For an ASIC, replace
  its body with the foundry's single-port SRAM macro. A macro with a one-cycle
  read latency drops in directly.

## What follows the platform and what is this design's own

These parts follow the platform's own description: the set of blocks and how
they connect (core, debug and user-domain ports on one OBI crossbar; I-Mem and
D-Mem as two SRAM banks; an OBI demux with Regs, GPIO, UART and Timer behind
it; interrupts from the user domain to the core); the single-cycle
interconnect, and two banks so the core can run at one instruction per cycle;
26 GPIO pins, the number on the first chip built from the platform.

These parts are choices made here, because the platform description does not
give them:

* the address map and the 2 KiB bank size;
* the fixed one-cycle response and the round-robin arbitration;
* the error answers for unmapped addresses;
* every register map and the UART frame format;
* the GPIO change interrupt;
* the interrupt numbering;
* asynchronous active-low reset everywhere.

The platform's own peripherals may differ in features. For example, the
platform's UART may be a 16550-compatible device with FIFOs. The versions here
are the simplest blocks that do each job.

This design has no internal clock gating, no test mode and no pad ring. The
first chip built from the platform has 48 pads. Twelve of them serve the Croc
domain, and at most nine of those are needed by the pins this domain has
(clock, reset, UART and the debug module's JTAG).

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench       | what it establishes |
|-----------------|---------------------|
| `tb_sram_bank`  | fills and reads the bank against a reference array; random byte-enable writes; a back-to-back stream with a grant and a response in every cycle |
| `tb_obi_xbar`   | 4 random managers against 5 memory models (two of which stall at random) and unmapped addresses, for 5000 cycles; checks data, IDs, errors, routing, one-cycle responses and the round-robin wait bound; requires parallel grants, contention, stalls and errors to have occurred |
| `tb_obi_demux`  | routing by address, data integrity, stalls passed back, errors |
| `tb_soc_regs`   | reset values, read-back, byte enables, the outputs, field masking |
| `tb_gpio`       | pins against the registers, the synchroniser delay, the change interrupt and its enable and clear |
| `tb_uart`       | a serial model decodes the TX pin and times the bits; a serial driver feeds RX; rx_valid, the interrupt, overrun and a TX-to-RX loopback |
| `tb_timer`      | exactly one count per cycle, the carry into the upper word, and the interrupt rising in the exact cycle `mtime` reaches `mtimecmp` |
| `tb_croc_soc`   | the whole domain at its default size, described below |

`tb_croc_soc` plays the core, the debug module and the user domain on their
ports. It runs these steps:

1. The debugger loads 128 words into I-Mem and 128 into D-Mem, sets the boot
   address and raises fetch enable.
2. The core's instruction port fetches 112 words from the boot address while
   its data port loads 128 words. They must take 113 and 129 cycles: one of
   each per cycle, in parallel.
3. The core stores the sum of the loaded words. The data port then reads from
   I-Mem during a fetch stream, and the user domain writes D-Mem, so
   arbitration stalls occur.
4. The core sends "Croc" over the UART and receives a byte. It uses the GPIO
   and waits for the timer interrupt.
5. The core reaches both external subordinate ports and hits unmapped
   addresses.
6. The core finally reports the sum in `core_status`.

Every one of these mechanisms is counted, and the test fails if any of them
never happened.

`tb_croc_program` runs real RISC-V code. `tb/rv32_core_model.sv` is a
behavioural stand-in for the core, for simulation only. It executes an RV32I
subset (no byte or halfword accesses, no CSRs, EBREAK halts it) as an ideal
core: in each cycle it issues the fetch of the next instruction together with
the current instruction's load or store. On single-cycle memory it therefore
retires one instruction per cycle, and each refused grant costs one cycle.

Two copies of the domain run the same program. It sums a 16-word array,
stores the sum, writes it to `core_status` and prints "OK" on the UART,
polling the busy flag. With the array in D-Mem the program retires 263
instructions in 263 cycles, with no stall. With the array moved into I-Mem,
every load competes with a fetch, and the same 263 instructions take 280
cycles. That difference is the reason for the two banks.

To run a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/croc_pkg.sv tb/tb_croc_soc.sv --top-module tb_croc_soc -o sim
./obj_dir/sim
```

Replace the name to run any other testbench. For `tb_croc_program`, also add
`-y tb` so that Verilator finds the core model. `-y rtl` lets Verilator find
the modules it uses. Variables that nothing resets start at random values in
Verilator, and the design resets every flop that it reads.

## Changing it

* **Memory size.** Set `SramNumWords` in `croc_pkg`. D-Mem follows I-Mem
  directly, so its base moves with the size.
* **More managers or subordinates.** Extend the enums, `NumMgr`/`NumSub` and
  `xbar_decode` in `croc_pkg`, then wire the new port in `croc_soc`. The
  crossbar is parameterised on both counts.
* **A new peripheral.** Add a slot to `periph_idx_e`, `NumPeriph` and
  `periph_decode`, and copy the response logic of `timer`. That logic is a
  registered `rvalid`/`rdata`/`rid`/`err`, with `gnt = req`.
* **GPIO width.** Set `NumGpio` in `croc_pkg`. Up to 32 pins fit in one
  register word.
