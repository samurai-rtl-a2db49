# SamurAI node — event-driven wake-up, shared two-port memory and an 8-PE neural block in SystemVerilog

An IoT sensor node spends almost all of its life waiting. The SamurAI architecture splits the node
into two halves so that waiting costs almost nothing and computing is still available when needed:

* an **always-responsive (AR)** half: a small clock-less Wake-up Controller (WuC) with its GPIOs,
  interrupt controller, configuration registers, a wake-up radio with its digital baseband (DBB),
  and an 8 kB **two-port SRAM (TP-SRAM)**. It reacts to events within a few hundred nanoseconds
  and sleeps again with no switching activity at all;
* an **on-demand (OD)** half, powered only when a task needs it: a RISC-V core, tightly coupled
  memories, a FeRAM-backed NVM controller with an instruction cache, peripherals on APB, and the
  PNeuro neural-network accelerator. The WuC decides when to power it, when to release its reset
  and where the RISC-V starts.

The two halves talk through the TP-SRAM: the WuC owns its read port, and its write/read port is
shared between the WuC and the OD AHB bus. This repository gives synthesizable RTL for the AR
control logic, the TP-SRAM and its sharing logic, the OD reset handshake and APB bridge, the NVM
controller, and one compute block of the accelerator, plus a self-checking testbench for every
module and an end-to-end testbench of the whole node.

The clock-less parts of the original are written here as synchronous logic on one clock, `clk`,
which stands for their self-timed sequencing. The OD half runs on `clk_od`. Every crossing between
the two uses a four-phase handshake behind two-flop synchronisers, so the two clocks may have any
ratio.

## Block diagram

```
            AR domain (clk)                                   OD domain (clk_od)
 ┌──────────────────────────────────────────────┐   ┌─────────────────────────────────────┐
 │ wuc_gpio ─┐                                  │   │                                     │
 │ dbb ──────┼─► wuc_irq_ctrl ─► wuc_scheduler ──┼───┼─► exec_* (execution core, external) │
 │ od_irq ───┘        ▲              │ fetch     │   │                                     │
 │                    │              ▼           │   │                                     │
 │ core_* ────────► wuc_sysbus ◄─────┘           │   │                                     │
 │   regs: wuc_cfg_regs, wuc_gpio, wuc_irq_ctrl  │   │                                     │
 │   RP  ───────────────────────► tpsram (RP)    │   │                                     │
 │   WRP ─ four-phase ─► wrp_arbiter ─► tpsram   │◄──┼── ahb_* (RISC-V side)               │
 │   APB ─ four-phase ─► hs4_sync_conv ─► apb_master ─► psel/penable/... (peripherals)    │
 │ wuc_cfg_regs ─► od_reset_hs ──────────────────┼───┼─► od_rst_n, policy switch           │
 └──────────────────────────────────────────────┘   │ nvm_icache ─► feram_ctrl ─► SPI     │
                                                     │ pnu_ncb (8 × pnu_pe, 8 × 4 kB)      │
                                                     └─────────────────────────────────────┘
```

`samurai_top` wires all of this. Parts that are not built (the WuC instruction decoder and
datapath, the RISC-V, its memories, the APB peripherals, the radio front end, the FLL, the
PNeuro cluster controller) are reached through the top's ports.

## The four-phase memory protocol

The TP-SRAM has three independent handshakes, one per concern:

| Handshake | Signals | Meaning |
|---|---|---|
| power | `sleep_req` in, `sleep_ack` out | `sleep_req` low wakes the periphery; `sleep_ack` high when accesses are allowed. Raising `sleep_req` puts it back to sleep; `sleep_ack` falls. |
| write/read port (WRP) | `wrp_ck`, `wrp_we`, `wrp_addr`, `wrp_wdata` in; `wrp_rdy`, `wrp_q`, `wrp_q_v` out | read or write |
| read port (RP) | `rp_ck`, `rp_addr` in; `rp_rdy`, `rp_q`, `rp_q_v` out | read only |

One access on a port is four phases:

1. The requester sets address (and data, `we`), then raises `ck`.
2. The memory drops `q_v`, registers the request and drops `rdy`.
3. The requester sees `rdy` low and drops `ck`.
4. The memory finishes: for a read it drives `q` and raises `q_v`; it then raises `rdy` to accept
   the next access.

`hs4_master` is the requester side of this protocol, with a plain "hold `req` until `done`"
interface toward synchronous logic. `hs4_sync_conv` is the opposite: it looks like a memory port to
a four-phase requester and turns each access into a synchronous request in the receiving clock
domain. Both sample the incoming handshake signals through two flip-flops, so a transfer costs a few
cycles of each clock and is safe across any clock ratio. `rdy` stays low while the memory sleeps, so
a request made then simply waits.

`tpsram` models the macro: a 2048 × 32-bit array, a sleep/wake state machine (`WAKE_CYCLES`) and
one small state machine per port (`ACCESS_CYCLES`). Both ports may work at the same time; a read and
a write of the same word in the same cycle return the old word. The circuit-level tricks of the
real macro (the 8-transistor bit cell, the switched virtual ground of the read port) have no logic
function and are replaced by the array.

## Sharing the write port: direct mode and round robin

WuC reads always go to the RP. WuC writes, and every RISC-V access from the AHB side, go to the WRP
through `wrp_arbiter`, which has two modes selected by `sync_mode`:

* **direct** (`sync_mode = 0`, OD part off): the WuC's four-phase signals pass straight to the
  WRP. No `clk_od` is needed.
* **synchronous** (`sync_mode = 1`, OD part on): the WuC channel goes through an `hs4_sync_conv`
  into the `clk_od` domain. There a round-robin arbiter chooses between it and the AHB request, and
  an `hs4_master` on `clk_od` performs the access. When both ask at the same arbitration, the side
  that was not served last wins.

`sync_mode` is the OD reset acknowledge (`od_reset_ack`). The arbiter therefore becomes synchronous
exactly when the OD clock domain is known to be out of reset. `od_reset_hs` provides that signal:
the WuC's reset request asserts `od_rst_n` asynchronously. Its release is synchronised to `clk_od`,
and the acknowledge comes back through two `clk` flip-flops. The WuC (and the arbiter) never
interact with an OD domain that is still in reset, whatever `clk_od` is.

`ahb_*` on the top is the AHB side of the WRP: `ahb_req` with `ahb_we`, `ahb_addr` (word address)
and `ahb_wdata` is held until `ahb_done` pulses with `ahb_rdata`.

## Event handling: from interrupt to first instruction

The WuC runs to completion: it sleeps until an interrupt is pending, runs the routine of that
interrupt to its end, runs any routine whose interrupt arrived meanwhile, and only then sleeps again.
`wuc_scheduler` is this front end:

| State | Action |
|---|---|
| IDLE | `sleep_req` high, nothing toggles; wait for a pending interrupt |
| DECODE | pick the lowest-numbered pending interrupt, clear it in the IT controller, drop `sleep_req` |
| WAKE | wait for the TP-SRAM's `sleep_ack` |
| FETCH | read the routine's first word at word address `16 × id` through the system bus (RP) |
| RUN | `exec_start` pulses with `exec_id` and `exec_instr`; the execution core runs until `exec_done` |
| SLEEP | no interrupt left: raise `sleep_req`, wait for `sleep_ack` low, back to IDLE |

If an interrupt is pending when a routine ends, the scheduler goes straight to DECODE and does not
put the memory to sleep. `wake_cycles` reports, for the last wake-up from IDLE, the number of `clk`
cycles from the event to the first instruction word. In the silicon this path takes about 200 ns.
Here it is a count of the model's sequencing cycles: 24 cycles in the end-to-end test at the
defaults, including synchroniser delays and the TP-SRAM wake-up.

Interrupt numbers (`wuc_irq_ctrl`):

| Number | Source |
|---|---|
| 0–7 | GPIO 0–7 |
| 8 | DBB: wake-up radio message received |
| 9–11 | OD sub-system interrupts `od_irq[2:0]` (synchronised into `clk`) |
| 12–15 | software interrupts, raised by writing the SWSET register |

Each source has an enable bit and a 2-bit trigger mode: rising edge, falling edge, high level or
low level.

## WuC system bus and registers

`wuc_sysbus` connects the scheduler and the execution core (`core_*` on the top) to five targets.
Addresses are 16-bit word addresses:

| Word address | Target | Transfer |
|---|---|---|
| `0x0000–0x07FF` | TP-SRAM (8 kB) | reads on RP, writes on WRP, four-phase |
| `0x2000+` | configuration registers | one cycle |
| `0x4000+` | GPIO: 0 OUT, 1 OE, 2 IN | one cycle |
| `0x6000+` | IT controller: 0 ENABLE, 1 MODE, 2 PENDING (write 1 to clear), 3 SWSET | one cycle |
| `0x8000–0xFFFF` | OD APB peripherals (APB byte address = 4 × word offset) | four-phase to the APB bridge |

Configuration registers (`wuc_cfg_regs`, offsets from `0x2000`):

| Offset | Register | Content |
|---|---|---|
| 0 | PMODE | power mode |
| 1 | ODCTRL | bit 0 OD clock enable, bit 1 OD reset request, bit 2 RISC-V fetch enable, bit 3 WuR on in OD modes |
| 2 | BOOT | RISC-V boot address |
| 3 | FLL | FLL setting (passed to `fll_cfg`) |
| 4 | DBB_SYM | symbol width, in `clk` cycles |
| 5 | DBB_DLY | sampling delay within a symbol, in `clk` cycles (≥ 1) |
| 6 | DBB_ID | 8-bit wake-up identifier |
| 7 | WUR | radio setting (passed to `wur_cfg`) |
| 8 | STATUS | bit 0 OD reset acknowledge (read only) |
| 9 | DBB_PAY | last received payload (read only) |

Power modes drive the `pwr` outputs (supply switches and clock gates outside this RTL):

| Mode | WuR | OD supply | peripheral clock | CPU clock | TP-SRAM linked to OD |
|---|---|---|---|---|---|
| IDLE / WuC only | off | off | off | off | no |
| WuC + WuR | on | off | off | off | no |
| WuC + Periph | ODCTRL[3] | on | ODCTRL[0] | off | no |
| CPU running | ODCTRL[3] | on | ODCTRL[0] | ODCTRL[0] | yes |

The OD reset request is forced while the OD supply is off. The RISC-V fetch enable is given only
once the OD reset has been acknowledged.

## Wake-up radio baseband

`dbb` decodes the on-off-keyed bit stream of the wake-up receiver (`wur_rx`), which is enabled
whenever the WuR is on. A frame is any preamble, then the 8-bit identifier, then a 32-bit payload,
both sent MSB first. The first rising edge of `rx` starts a free-running symbol counter. `rx` is
sampled once per symbol, `DBB_DLY` cycles into it. The samples slide through an 8-bit window until
it equals `DBB_ID`. The next 32 samples form the payload, and interrupt 8 is raised. Because the
symbol width and the sampling point are registers, the same logic decodes any OOK rate. The
decoder gives up after `MAX_HUNT` symbols without a match.

## NVM controller

The RISC-V executes code in place from a 512 kB external FeRAM:

* `nvm_icache`: direct-mapped, 4 lines of 8 × 32-bit words. Fetch word addresses are 17 bits:
  bits [2:0] select the word, [4:3] the line and [16:5] form the tag. A hit answers in the cycle
  of the request. A miss fetches the whole line and then answers. `nvm_flush` invalidates all
  lines.
* `feram_ctrl`: one SPI frame per access on a single data line, SPI mode 0, SCK = `clk_od`/2.
  A frame is a 24-bit control word `{cmd[4:0], byte_address[18:0]}` (read `00011`, write
  `00010`) followed by the payload: 256 bits for a cache line, 32 bits for a data word. A line
  therefore uses 256 of 280 bits on the link, 91%. Line refills and data accesses alternate when
  both wait. A refill takes 564 `clk_od` cycles from request to data at the defaults.

The command encoding is this design's choice. A real FeRAM part may need its own command format,
which changes only the control word in `feram_ctrl`.

## PNeuro compute block

The accelerator is built from clusters of compute blocks (NCBs). Each NCB has 8 processing elements
(PEs) working in SIMD on one shared, banked 32 kB SRAM. The full chip has 2 clusters × 4 NCBs × 8 PEs
= 64 MACs per cycle. This RTL gives one NCB (`pnu_ncb`) with its PEs (`pnu_pe`).

**PE.** The multiplier is 9 × 9 bits, so an unsigned 8-bit pixel and a signed 8-bit weight are
both exact. The PE also has a 32-bit accumulator, a 4-entry register file for products (for
multiply-only flows), an 8-bit ALU (saturating add, max), an activation unit, and 8-bit and 32-bit
links to the neighbouring PE. The activation is an arithmetic right shift, then ReLU, then a clamp
to 0–255. Every operation takes one cycle.

**NCB, fully-connected layer.** A command (`ncb_start` with the layer fields) computes 8 outputs:

    out[p] = clamp((Σ_i x[i] · W_p[i]) >>> shift, 0, 255),   p = 0..7

The layer is laid out in the 8 banks of 1024 × 32 bits as follows:

* the input vector sits in bank `in_bank` from word `in_base`, four 8-bit elements per word, the
  first element in the low byte;
* the weights of output `p` sit in bank `p` from word `w_base`, in the same order;
* the 8 results are written as two words at `out_base` of `out_bank`.

All nine words of a group of four inputs are read in one cycle. The routing registers then
broadcast one input byte per cycle to all PEs while the next group is prefetched. After a 3-cycle
prologue the PEs therefore do one MAC every cycle. A command with `n_groups` groups (4·n_groups
inputs) takes 4·n_groups + 7 cycles. The `ncb_h_*` host port reads and writes any bank word while
the block is idle, with read data one cycle later. The chip uses this path for the RISC-V's AHB
access.

The command port stands in for the cluster controller. That controller's instruction set is not
published, so it is not built. Neither are convolution addressing and padding injection.

## Clocks, resets and timing summary

* `clk`: AR sequencing. `rst_n` resets everything asynchronously.
* `clk_od`: OD clock. The OD logic (WRP arbitration in synchronous mode, APB bridge, NVM
  controller, NCB) is reset by `od_rst_n` from `od_reset_hs`.
* Crossings: TP-SRAM handshakes, the WuC-to-WRP converter, the APB bridge and the OD interrupts
  use two-flop synchronisers. All multi-bit data is held stable by its handshake while it is
  sampled.

| Path | Cost at the defaults |
|---|---|
| interrupt → first instruction word (from IDLE) | 24 `clk` cycles, reported in `wake_cycles` |
| FC layer of 4n inputs × 8 outputs | 4n + 7 `clk_od` cycles |
| cache-line refill | 564 `clk_od` cycles |

## Sizes (parameter defaults)

| Item | Default |
|---|---|
| TP-SRAM | 2048 × 32 bit (8 kB) |
| WuC interrupts | 16 (8 GPIO, 1 DBB, 3 OD, 4 software) |
| WuC GPIO | 8 |
| DBB frame | 8-bit identifier + 32-bit payload |
| instruction cache | 4 lines × 8 words × 32 bit, direct mapped |
| NVM | 512 kB, SPI, 24-bit control + 256-bit line payload |
| NCB | 8 PEs, 8 banks × 1024 × 32 bit (32 kB) |

## Where this RTL departs from the silicon

* The WuC and TP-SRAM are self-timed in silicon. Here they are synchronous, so latencies are
  counted in `clk` cycles, not nanoseconds.
* The WuC instruction set and datapath are not included. The top exposes the hand-off
  (`exec_start`, `exec_id`, `exec_instr`, `exec_done`) and a bus port (`core_*`) that an
  execution core would drive.
* Only one NCB is instantiated, with fully-connected addressing only. Published descriptions of the
  PNeuro memory disagree: one gives 32 kB of SRAM per NCB, another 48 × 4 kB data memories per
  cluster. This RTL uses 32 kB per NCB, 8 banks of 4 kB.
* The register map, address map, interrupt numbering, trigger encoding, interrupt priority (lowest
  number first), routine entry stride (16 words), DBB bit order and frame start rule, and the
  FeRAM command format are this design's choices.
* The RISC-V, its 128 kB TCDM and 64 kB TCPM, the crypto engines, adaptive voltage scaling, the
  FLL, the radio front end and the APB peripherals are outside this RTL.

## Simulating

Every module has a testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/samurai_pkg.sv tb/tb_samurai_top.sv --top-module tb_samurai_top
./obj_dir/Vtb_samurai_top
```

`tb_samurai_top` runs the whole node at its default sizes. It plays the missing parts: the
execution core, the RISC-V on the AHB, fetch and data ports, an APB peripheral, a PIR sensor on
GPIO 0, the radio bit stream, and an SPI FeRAM (`tb/feram_model.sv`). Its scenario is:

1. boot through a software interrupt;
2. a PIR wake-up from IDLE with the TP-SRAM asleep;
3. a radio message;
4. a switch to the CPU-running mode, with the reset handshake and the arbiter policy change;
5. concurrent WuC and RISC-V traffic on the TP-SRAM, and an APB access;
6. an FC layer on the NCB;
7. in-place execution through the cache, and FeRAM data accesses;
8. an OD interrupt, two chained routines, and the return to IDLE.

It counts each of these mechanisms and fails if one never happens. The unit testbenches compare
against reference models with random stimulus (`$urandom`). Where a latency is defined (NCB
layer, cache refill, SPI frame length, wake-up count) they check the cycle count too.
