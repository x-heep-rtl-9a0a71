# HEEPocrates host platform in SystemVerilog

Wearable health monitors spend most of their lives recording. For seconds or
minutes at a time they store slow biosignals (ECG, EEG) in memory and do
almost nothing else. Then, for a short burst, they run a heavy algorithm over
the stored window. A microcontroller built for this has two jobs:

- spend as little power as possible while it records;
- finish the processing burst quickly, so it can go back to sleep.

The platform here meets both jobs with two ideas:

- **Fine-grained power domains.** Every memory bank, the CPU, the peripherals
  and each accelerator can be clock-gated, put in retention or switched off
  on its own, under software control.
- **An accelerator interface.** Accelerators plug into it without any change
  to the platform's RTL. It offers bus masters and slaves, a peripheral port,
  interrupt lines, and power-control bundles.

This repository holds the RTL of the host platform in one configuration. That
configuration is a RISC-V microcontroller for healthcare with:

- 8 × 32 KiB of SRAM, mapped contiguously;
- a fully connected bus;
- accelerator ports sized for a coarse-grained reconfigurable array (CGRA)
  and an in-memory-computing (IMC) macro.

The processor core, the debug unit, the boot ROM, the general-purpose
peripherals (UART, SPI, I2C, GPIO, timers), the accelerators themselves and
the clock generator (FLL) are separate designs. They are not included. The
top module `heepocrates` exposes their connections as ports.

## Block structure

```
               cpu instr  cpu data  debug  DMA rd  DMA wr  ext master 0..3
                   |         |        |      |       |        |
              +----------------------------------------------------------+
              |                 system_bus (OBI)                         |
              +----------------------------------------------------------+
                |  ...  |       |            |                |        |
             bank0 ... bank7  debug   always-on periph     periph   ext slave 0..2
             (memory_ss)      slave   (periph_demux)   (periph_demux)
                                        | power_manager    | plic
                                        | fast_intr_ctrl   | other peripherals (port)
                                        | dma
                                        | ext peripheral port (FLL)
                                        | other always-on peripherals (port)
```

| File | Role |
|---|---|
| `rtl/xheep_pkg.sv` | OBI request/response structs, power bundle structs, address map, slot numbers |
| `rtl/heepocrates.sv` | top: wiring, isolation, interrupt routing |
| `rtl/system_bus.sv` | OBI interconnect with two topologies, contiguous or interleaved bank map |
| `rtl/memory_ss.sv` | the SRAM banks and their address slicing |
| `rtl/sram_bank.sv` | one bank: byte-enabled array, clock enable, retention and power state |
| `rtl/periph_demux.sv` | peripheral bus of one domain: 64 KiB windows |
| `rtl/power_manager.sv` | per-domain control and status registers; drives the domain bundles |
| `rtl/power_seq.sv` | switch-off/switch-on sequencer of one power-gated domain |
| `rtl/fast_intr_ctrl.sv` | latched fast interrupt lines straight to the CPU |
| `rtl/plic.sv` | priority interrupt controller with claim/complete |
| `rtl/dma.sv` | memory-to-memory and peripheral-paced copy engine |

## The bus

Every port speaks a reduced OBI protocol, carried as two structs:

- `obi_req_t`: `req`, `we`, `be[3:0]`, `addr[31:0]`, `wdata[31:0]`;
- `obi_resp_t`: `gnt`, `rvalid`, `rdata[31:0]`.

A master holds its request until `gnt`. One rule holds throughout this design:
**every slave returns `rvalid` exactly one cycle after it grants.** That
includes external slaves. The bus relies on this rule to route responses
without any queue. It remembers, for each master, which slave granted it in
the previous cycle. Assertions in `system_bus` check both the hold rule and
the one-cycle rule.

Nine masters, in this order:

- CPU instruction port;
- CPU data port;
- debug unit;
- DMA read port;
- DMA write port;
- four accelerator masters.

Fourteen slaves, in this order:

- 8 banks;
- debug unit;
- always-on peripherals;
- peripherals;
- 3 accelerator slaves.

**Fully connected** (`FULLY_CONNECTED=1`, the default):

- Each master has its own address decoder.
- Each slave has its own round-robin arbiter.
- Masters that target different slaves all proceed in the same cycle.
- With four accelerator masters on four different banks, the bus moves
  4 × 32 bit per cycle. The end-to-end test checks this: zero wait cycles
  while the CPU also writes to a fifth bank.
- Two masters on the same bank take turns.

**One-at-a-time** (`FULLY_CONNECTED=0`):

- A single round-robin arbiter picks one master per cycle, across all slaves.
- It is smaller, and limited to 32 bit per cycle.

**Bank mapping** (`INTERLEAVED`):

- **Contiguous** (the default): bank *k* holds bytes
  `[k·32 KiB, (k+1)·32 KiB)`. An application that uses the bottom of memory
  can switch off or retain the banks it does not use. This is why a recorder
  wants contiguous mapping.
- **Interleaved**: consecutive words go to consecutive banks. Streaming
  masters then spread across banks, but every bank is in use all the time.

The bank count and bank size must be powers of two. Decoding is done with
shifts and masks.

An address that matches no slave is granted by an internal error slave. It
returns zero, so a wrong pointer never hangs the bus.

## Memory banks and their power states

Each `sram_bank` is a byte-enabled 32-bit array. It has three power-related
inputs from its domain bundle:

- `clk_en`: the clock-gating state, modelled as an enable;
- `retention`;
- `pwr_on`.

The bank answers only while it is clocked, powered and not in retention.
Otherwise it withholds `gnt`, and the master simply stalls until software
restores the bank.

| State | Effect on a master | Data |
|---|---|---|
| Clock-gated | stalls | kept |
| Retention | stalls | kept (in silicon at much lower leakage) |
| Powered off | stalls | lost: the RTL keeps the array, so do not rely on its contents after power-up |

Banks 0 and 1 are in the always-on domain. They cannot be switched off,
because they hold the code and stack that must survive everything else being
off. Banks 2–7 can be switched off.

## Power domains and the power manager

This is the part of the design that is easiest to misuse.

There are 13 domains. Each one gets a `pwr_dom_t` bundle on `dom_pwr_o` and a
switch acknowledge on `pwr_sw_ack_i`.

| Index | Domain | Clock gate | Retention | Power off |
|---|---|---|---|---|
| 0 | CPU | yes | – | yes (only while the CPU sleeps) |
| 1 | peripheral domain (PLIC, other peripherals) | yes | – | yes |
| 2, 3 | banks 0, 1 (always on) | yes | yes | – |
| 4–9 | banks 2–7 | yes | yes | yes |
| 10 | accelerator: CGRA logic | yes | – | yes |
| 11 | accelerator: CGRA context memory | yes | yes | yes |
| 12 | accelerator: IMC | yes | – | yes |

That gives 11 domains that can be switched off: the CPU, the peripheral
domain, six banks and three accelerator domains.

`pwr_dom_t` has five fields:

- `pwr_on`: drives the power switch;
- `iso`: isolation is active;
- `rst_n`: the domain's reset;
- `clk_en`;
- `retention`.

For domains 10–12 the bundle is the accelerator's power-control port.

**Registers.** The power manager sits in the always-on window at
`0x2000_0000`.

- `CTRL[d]` at `0x00 + 4d`:
  - bit 0 `power_off`;
  - bit 1 `clk_gate`;
  - bit 2 `retention`.
  - Bits a domain does not support read back as 0.
- `STATUS[d]` at `0x80 + 4d` (read only):
  - bit 0 = fully on;
  - bit 1 = fully off.

**Switching sequence.** `power_seq` runs one sequence per switchable domain.

- To switch off, it steps through:
  1. isolate;
  2. assert reset;
  3. open the switch;
  4. wait until `pwr_sw_ack_i[d]` falls;
  5. off.
- To switch on, it steps through:
  1. close the switch;
  2. wait for the acknowledge;
  3. release reset;
  4. release isolation.
- Each step takes at least one cycle.
- Software should poll `STATUS` to learn when a domain is usable.

**What isolation means here.** While a domain is isolated, the top does three
things:

- holds back the domain's bus requests: the CPU ports, the accelerator
  masters, and the peripheral bus;
- clamps its responses to zero;
- clamps its interrupts to zero.

Isolation cells would do this in silicon. A master that addresses an isolated
or powered-off slave stalls until the domain is back. Plan software so it
never waits on a domain it has itself switched off. The debug port is the way
out in a test.

**The CPU cannot switch itself off mid-instruction.** Software sets
`CTRL[0].power_off` and executes a wait-for-interrupt. The domain goes down
only while `cpu_sleep_i` is high. Any wake-up clears the bit and powers the
CPU back up through reset. A wake-up is the PLIC's external interrupt or any
enabled fast interrupt. The CPU therefore restarts from its boot address; the
boot ROM, not built here, decides what to do next. Interrupts of an isolated
peripheral domain cannot wake the CPU.

**The peripheral domain.** Switching it off resets the PLIC and the other
peripherals. After power-up, their registers hold their reset values, and the
end-to-end test checks this.

## Interrupts

There are two paths to the CPU:

- **PLIC**, in the switchable peripheral domain (`0x3000_0000`):
  - 32 sources with 3-bit priorities:
    - source 0 is unused;
    - source 1 is the accelerator interrupt (CGRA end of computation);
    - sources 2–31 come from the other peripherals.
  - Registers:
    - `PRIORITY[i]` at `4i`;
    - `PENDING` at `0x080`;
    - `ENABLE` at `0x100`;
    - `THRESHOLD` at `0x180`;
    - `CLAIM/COMPLETE` at `0x184`.
  - A high line becomes pending unless it is already pending or in service.
  - A read of CLAIM returns the best enabled pending source: highest
    priority, lowest id on a tie. Writing the id back completes it.
  - `cpu_irq_external_o` is high while some enabled pending source has a
    priority above the threshold.
- **Fast interrupt controller**, always on (`0x2001_0000`):
  - 16 lines go straight to `cpu_irq_fast_o` with no arbitration:
    - line 0 is the DMA's end of transfer;
    - lines 1–15 come from the always-on peripherals.
  - A one-cycle pulse sets a sticky pending bit, so no pulse is lost.
  - Registers: `PENDING` 0x0, `CLEAR` 0x4 (write 1 to clear), `ENABLE` 0x8.

## DMA

The DMA sits in the always-on window at `0x2002_0000`. It owns two bus
masters, one for reads and one for writes. A 4-entry FIFO sits between them,
so reads and writes overlap.

Registers:

| Offset | Register | Meaning |
|---|---|---|
| 0x00 | `SRC_PTR` | source pointer |
| 0x04 | `DST_PTR` | destination pointer |
| 0x08 | `SIZE` | bytes; writing it starts the transfer |
| 0x0C | `STATUS` | bit 0 = ready |
| 0x10 | `SRC_INC` | source increment in bytes, reset value 4 |
| 0x14 | `DST_INC` | destination increment in bytes, reset value 4 |
| 0x18 | `SLOT` | peripheral pacing, see below |

`SLOT` sets the peripheral pacing:

- bit 0: each read waits for `dma_rx_valid_i`;
- bit 1: each write waits for `dma_tx_ready_i`.

These two signals are the FIFO interface of the accelerator peripheral port.
With an increment of 0 the DMA can drain a peripheral's data register into
memory while the CPU sleeps. When the last word is written, the DMA pulses
its done signal on fast interrupt line 0.

## The accelerator interface

The top's ports form the interface. Every sub-port is sized by a parameter:

| Sub-port | Parameter | Default and use |
|---|---|---|
| Masters | `NUM_EXT_MASTERS` = 4 | one per CGRA processing element, each with its own path into memory |
| Slaves | `NUM_EXT_SLAVES` = 3 | CGRA configuration registers, CGRA context memory, IMC array |
| Slave windows | – | each slave gets a 16 MiB window from `0x4000_0000` |
| Peripheral port | – | `ext_periph_*` is the 64 KiB window at `0x2003_0000`, used for the FLL's registers; it carries the DMA pacing pair with it |
| Interrupts | `NUM_EXT_IRQ` = 1 | lines into the PLIC, starting at source 1 |
| Power | `NUM_EXT_DOMAINS` = 3 | each domain gets a `pwr_dom_t` bundle; `EXT_RET_MASK` says which domains support retention (here only the CGRA context memory) |

`EXT_MST_DOM` and `EXT_SLV_DOM` assign each accelerator port to one of the
external domains. Isolation then cuts the right ports when an accelerator is
off. By default:

- the four masters are in the CGRA logic domain;
- the three slaves are in domains 10, 11 and 12.

## Address map

| Range | Target |
|---|---|
| `0x0000_0000`–`0x0003_FFFF` | 8 SRAM banks |
| `0x1000_0000` + 1 MiB | debug unit slave port |
| `0x2000_0000` | power manager |
| `0x2001_0000` | fast interrupt controller |
| `0x2002_0000` | DMA |
| `0x2003_0000` | accelerator peripheral port (FLL) |
| `0x2004_0000` | other always-on peripherals (port) |
| `0x3000_0000` | PLIC |
| `0x3001_0000` | other peripherals (port) |
| `0x4000_0000`, `0x4100_0000`, `0x4200_0000` | accelerator slaves 0, 1, 2 |
| anything else | error slave, reads zero |

## Where this RTL departs from, or adds to, the platform description

These follow the description:

- the block set;
- the configuration: 8 × 32 KiB contiguous banks and a fully connected bus;
- the two bus topologies and two bank mappings;
- the three power strategies and which domains get which;
- the accelerator port counts;
- the interrupt routing of the accelerator into the PLIC.

These are this design's own choices:

- All register maps and the address map.
- The one-cycle response rule.
- Round-robin arbitration.
- The error slave.
- The isolation behaviour.
- The switching sequence and its acknowledge.
- The rule that the CPU goes off only while it sleeps.
- Which banks are always on. Banks 0–1 are drawn in the always-on colour in
  the platform's block diagram, and that reading gives the 11 switchable
  domains that the configuration states.
- Interleaved mapping is offered in both topologies. The description ties it
  to the fully connected bus.
- In interleaved mode nothing prevents software from gating a bank. The
  description says interleaving keeps all banks active; that becomes a
  software rule here.
- Powered-off banks keep their array contents in simulation.
- Clock gating is an enable, not a gated clock.
- The PLIC, the fast interrupt controller and the DMA are the simplest
  versions that do what the description says.
- Not modelled: the leakage and energy figures, the 65 nm implementation,
  pads, power switches, and the clock generator.

## Workload sizing

The applications the configuration targets fit comfortably in the 256 KiB of
SRAM:

| Workload | Size | Fits in |
|---|---|---|
| Heartbeat classifier input (3 leads × 256 Hz × 16 bit × 15 s) | 22.5 KiB | one bank |
| Seizure-detection CNN input (23 leads × 256 Hz × 16 bit × 4 s) | 46 KiB | two banks |
| 16×16 convolution with a 3×3 filter, 32-bit data | about 1.8 KiB | – |
| 16×16 matrix product, 32-bit data | 3 KiB | – |

Everything else can be switched off or retained while a window is recorded.

## Verification

Each block has a self-checking testbench in `tb/`:

- Each one compares against a model written in the test.
- Each one prints `TB_RESULT checks=N failures=M` and stops itself with a
  watchdog.
- `tb/tb_obi.svh` provides a blocking OBI master task that checks the
  one-cycle response rule.

| Testbench | What it exercises |
|---|---|
| `tb_sram_bank` | byte enables; stalls under gating, retention and power-off |
| `tb_memory_ss` | contiguous and interleaved placement |
| `tb_system_bus` | random traffic against a reference memory in both topologies and both mappings; parallel-grant bandwidth; one-at-a-time serialisation |
| `tb_periph_demux` | window decode, error responses |
| `tb_power_manager` | register access, every switching step with a delayed acknowledge, the CPU sleep/wake rule |
| `tb_fast_intr_ctrl` | pending, clear, enable |
| `tb_plic` | priorities, threshold, ties, claim/complete against a reference model |
| `tb_dma` | copies, strides, peripheral pacing, FIFO back-pressure, the done pulse |
| `tb_heepocrates` | the whole platform, end to end |

`tb_heepocrates` runs the whole platform at its default parameters. It uses
models of the CPU data port, debug unit, accelerators, FLL registers and
power switches. It makes each mechanism happen and counts it:

- memory traffic;
- parallel grants;
- a bank conflict;
- a clock-gate stall;
- retention;
- a bank power cycle;
- a DMA copy ending in a fast interrupt;
- an accelerator interrupt through the PLIC waking a switched-off CPU;
- a peripheral-domain power cycle;
- accelerator isolation;
- an unmapped access;
- the accelerator peripheral port.

A mechanism that never happened counts as a failure.

To simulate with Verilator 5, run from the repository root, for example:

```
verilator --binary --timing --assert -Irtl -I. -y rtl -y tb \
    rtl/xheep_pkg.sv tb/tb_heepocrates.sv --top-module tb_heepocrates -o sim
./obj_dir/sim
```

Replace `tb_heepocrates` with any other testbench name. The end-to-end test
finishes in well under a second of run time. To try the other topology or
mapping, change the parameters on the `heepocrates` instance, or use
`tb_system_bus`, which already covers them.
