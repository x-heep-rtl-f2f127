# X-HEEP host platform: synthesizable SystemVerilog

X-HEEP is a small RISC-V microcontroller built to be the *host* of domain-specific
accelerators in ultra-low-power edge systems. Instead of fixing one chip, it is a platform whose
parts are chosen by parameters: the CPU core, the number, size and addressing of the memory
banks, the bus topology, and how many accelerators hang off a standard accelerator interface.
Power is the other main concern: the CPU, the peripheral domain, each memory bank and each
accelerator can be clock-gated, switched off, or (for memories) kept in retention, under the
control of a power manager that lives in an always-on domain.

This repository holds RTL for the platform's own logic: the OBI interconnect in both of its
topologies, the banked main memory with its power states, the always-on subsystem with the power
manager, the fast interrupt controller and the multi-channel 1D/2D DMA, and the accelerator
interface at the top level. The CPU core, the debug module, the standard peripherals and the
accelerators are existing IPs. They are not reproduced here. Their connections are ports of the
top module `xheep_top`.

## 1. Structure

```
                +-----------+   instr, data            +-------------------+
   CPU core --> | isolation | -----------------------> |                   | --> bank 0 (sram_bank)
   (external)   +-----------+                          |                   | --> bank 1
   debug unit (external) <------ master / slave -----> |     obi_xbar      | --> debug slave (port)
   accelerator i (XAIF)  <------ master / slave -----> |  crossbar or one- | --> ao_periph
                                 DMA read, DMA write ->|  at-a-time bus    | --> peripheral domain (port)
                                                       +-------------------+
   ao_periph (always on): power_manager, fast_intr_ctrl, dma, port to SoC ctrl / boot ROM / timer
```

Bus masters, in interconnect order: 0 CPU instruction port, 1 CPU data port, 2 debug unit,
3 DMA read, 4 DMA write, 5+i accelerator i. Bus slaves: 0..NBANKS-1 memory banks, then the debug
unit, the always-on subsystem, the peripheral domain, and accelerator i.

| Region | Base | Size |
|---|---|---|
| Main memory | `0x0000_0000` | NBANKS x BANK_WORDS x 4 (64 KiB by default) |
| Debug unit | `0x1000_0000` | 1 MiB |
| Always-on peripherals | `0x2000_0000` | 1 MiB |
| Peripheral domain | `0x3000_0000` | 1 MiB |
| Accelerator i | `0xF000_0000 + i * 0x0100_0000` | 16 MiB each |

Inside the always-on region, offsets `0x00000-0x2FFFF` go to the external port (SoC controller,
boot ROM, always-on timer), `0x30000` to the power manager, `0x40000` to the fast interrupt
controller and `0x50000` to the DMA registers. Any other address is answered with read data 0.
The map follows the layout of the public X-HEEP code base. The offsets inside the always-on
region are this design's own.

## 2. The bus

All on-chip traffic uses OBI (Open Bus Interface) in its basic form, bundled in
`xheep_pkg::obi_req_t` / `obi_rsp_t`:

* request phase: `req`, `we`, `be[3:0]`, `addr[31:0]`, `wdata[31:0]`, accepted in the cycle where
  `req` and `gnt` are both high. The master holds the request until then.
* response phase: `rvalid` for one cycle with `rdata`, in some later cycle. A slave answers in
  request order.

`obi_xbar` decodes each master's address against per-slave rules
(`start <= addr < stop` and `(addr & mask) == match`). The mask/match pair is what lets
interleaved banks share one address range. The `TOPOLOGY` parameter selects between two
structures:

* `BUS_FULLY_CONNECTED` (default): one round-robin arbiter per slave. Masters that go to
  different slaves are served in the same cycle.
* `BUS_ONE_AT_A_TIME`: a single round-robin arbiter for the whole bus, so at most one request is
  forwarded per cycle. This is smaller, at lower throughput.

Grants are combinational, so a request can be accepted in the cycle it is raised. The subtle part
is getting responses back to the right master when slaves have different latencies. Each slave has
a small FIFO (depth `MAX_OUT`, 2 by default) holding the indices of the masters it has accepted.
The FIFO is pushed on each accepted request and popped on each `rvalid`, which routes that
response. A master with requests still outstanding may only issue more to the *same* slave, so its
own responses can never overtake each other. A request to an unmapped address goes to an internal
error slave, which grants at once and answers with 0 one cycle later, so it cannot hang the bus.

## 3. Main memory and its power states

The main memory is `NBANKS` banks (`sram_bank`), each `BANK_WORDS` 32-bit words (2 x 32 KiB by
default). With `MEM_SCHEME = MEM_CONTIGUOUS`, bank b covers its own slice of the address range.
With `MEM_INTERLEAVED`, consecutive words rotate over the banks: word w lives in bank
`w mod NBANKS` at index `w / NBANKS`. NBANKS must then be a power of two.

A bank grants a request in its own cycle and returns the data one cycle later. It is accessible
only while its power-control bundle says powered, clocked, not isolated and not retentive. In any
other state it simply withholds the grant. A load from a sleeping bank therefore stalls until the
power manager wakes the bank; it does not fail. The array is clocked through `clock_gate`, a
latch-based integrated clock gate that the ASIC flow replaces with the library cell. The clock
only runs while the bank is accessible. The switch acknowledge is modelled as a one-cycle delay of
the switch control. The array keeps its contents in every state. A real macro switched off without
retention loses them, and software must assume that.

## 4. Power domains and the power manager

Domains, in power-manager order: 0 CPU, 1 peripheral domain, 2..1+NBANKS memory banks, then the
accelerators. Each domain has a `pwr_ctrl_t` bundle: `clk_en`, `pwr_on` (power switch),
`iso` (output isolation), `rst_n` and `retention`. In `xheep_top`, signals that leave the CPU,
peripheral and accelerator domains pass isolation clamps. While a domain is isolated, its bus
requests, its bus responses and its interrupts read as 0.

`pm_domain_ctrl` sequences one domain, one step per clock:

| State | clk_en | iso | rst_n | pwr_on | retention | next |
|---|---|---|---|---|---|---|
| ON | ~CG | 0 | 1 | 1 | 0 | GATE_CLK on sleep request |
| GATE_CLK | 0 | 0 | 1 | 1 | 0 | ISOLATE |
| ISOLATE | 0 | 1 | 1 | 1 | 0 | RET if retention requested, else SW_OFF |
| SW_OFF | 0 | 1 | 0 | 0 | 0 | OFF when the switch acknowledge falls |
| OFF | 0 | 1 | 0 | 0 | 0 | SW_ON on wake request |
| RET | 0 | 1 | 1 | 1 | 1 | RELEASE on wake request |
| SW_ON | 0 | 1 | 0 | 1 | 0 | RELEASE when the acknowledge rises |
| RELEASE | 0 | 0 | 1 | 1 | 0 | ON |

So the clock stops before isolation rises, and isolation is in place before the switch opens. On
the way back, power is stable before isolation and reset are released, and the clock comes last.

`power_manager` holds one control word per domain at offset `4*d`:

| Bit | Name | Meaning |
|---|---|---|
| 0 | OFF | request the domain off (CPU: off at its next sleep) |
| 1 | RET | use retention instead of off (memory banks only; ignored elsewhere) |
| 2 | CG | stop the clock while the domain stays on |

It also has a read-only status word at `0x100 + 4*d` holding the domain's state
(`xheep_pkg::pd_state_e`). Every domain except the CPU follows its OFF bit directly. The CPU cannot
clear its own bit while it is off, so its domain goes down only when OFF is set *and* the core
reports sleep (`cpu_core_sleep_i`, i.e. wait-for-interrupt). It comes back when any enabled fast
interrupt is pending, or when another master clears the bit. After wake-up the CPU domain leaves
reset, as after a cold boot. Restoring context is software's job.

## 5. DMA

`dma` has `NCH` channels (2 by default). They share one read master and one write master through
round-robin arbiters. A channel copies 32-bit elements. Element (i1, i2), for
`i1 < SIZE_D1` and `i2 < SIZE_D2`, is read from `SRC + i1*SRC_STRIDE_D1 + i2*SRC_STRIDE_D2` and
written to `DST + i1*DST_STRIDE_D1 + i2*DST_STRIDE_D2`, with strides in bytes. In 1D mode
`SIZE_D2` is taken as 1. With these two loops a channel can copy, gather, scatter or transpose a
block, or lay out an im2col matrix.

Registers of channel c, at `0x50000 + 0x40*c` in the always-on region:

| Offset | Register |
|---|---|
| 0x00 / 0x04 | SRC / DST byte address |
| 0x08 / 0x0C | SIZE_D1 / SIZE_D2 (elements) |
| 0x10 / 0x14 | SRC_STRIDE_D1 / SRC_STRIDE_D2 |
| 0x18 / 0x1C | DST_STRIDE_D1 / DST_STRIDE_D2 |
| 0x20 CTRL | bit 0 START (write 1), 1 2D, 2 RX_TRIG, 3 TX_TRIG, 4 IRQ_EN |
| 0x24 STATUS | bit 0 BUSY, bit 1 DONE (any write clears DONE) |

With RX_TRIG set, a channel reads an element only while `xaif_dma_trig_rx_i[c]` is high. With
TX_TRIG set, it writes only while `xaif_dma_trig_tx_i[c]` is high. This lets an accelerator pace a
stream into or out of a FIFO window at a fixed address (stride 0) without having a bus master of
its own. Each element is one read followed by one write. A channel has at most one access in
flight, and so does each port. A zero-size transfer completes at once. The done interrupt is
`DONE & IRQ_EN`.

## 6. Fast interrupts

`fast_intr_ctrl` turns rising edges on its 16 sources into pending bits. Writing 1 to PENDING
(offset 0x0) clears a bit, unless a new edge arrives in the same cycle. `irq_fast_o =
PENDING & ENABLE` (ENABLE at offset 0x4) goes straight to the CPU's fast interrupt lines, one cycle
after the edge. Its OR is the CPU wake-up of the power manager. Source order: DMA channels first,
then the accelerators' `xaif_irq_i`, then `fast_irq_i` (timers and peripherals outside this RTL).

## 7. The accelerator interface (XAIF)

For each of `NEXT` accelerators, `xheep_top` provides the following ports:

* an OBI master port (`xaif_mst_*`) with the same rights on the bus as the CPU;
* an OBI slave port (`xaif_slv_*`) with its own 16 MiB address window;
* an interrupt (`xaif_irq_i`);
* a power-control bundle and its switch acknowledge (`xaif_pwr_o`, `xaif_pwr_ack_i`). These are
  driven by the power manager, which the accelerator itself can program over its master port.

Per DMA channel there is also a pair of pacing triggers (`xaif_dma_trig_*`). A near-memory
accelerator such as a vector unit inside an SRAM bank uses the slave port for data and commands.
A streaming accelerator can use the DMA triggers.

## 8. Parameters of `xheep_top`

| Parameter | Default | Notes |
|---|---|---|
| TOPOLOGY | BUS_FULLY_CONNECTED | or BUS_ONE_AT_A_TIME |
| NBANKS | 2 | the evaluated host has two banks |
| BANK_WORDS | 8192 | 32 KiB per bank; the size is not stated for the evaluated chip |
| MEM_SCHEME | MEM_CONTIGUOUS | or MEM_INTERLEAVED (NBANKS a power of two) |
| NEXT | 2 | accelerators on the XAIF |
| NCH | 2 | DMA channels |
| NFAST | 16 | CPU fast interrupt lines; NFAST - NCH - NEXT inputs remain for other sources |

## 9. Where this RTL departs from the platform, and why

* **External IPs.** The CPU (CV32E40P in the evaluated chip, or CV32E20/E40X/E40PX), the debug
  module, GPIO, SPI, I2C, I2S, UART, PLIC, timers, SoC controller and boot ROM come from other
  open-source projects. They are represented by ports only. The CORE-V-XIF coprocessor interface,
  which only the CV32E40X/PX cores have, is not included.
* **DMA placement.** The platform's block diagram draws the DMA among the switchable peripherals,
  while its description places the DMA in the always-on domain. This RTL keeps it always-on, so
  a DMA transfer can run while the peripheral domain is off.
* **Sizes.** Bank size, channel count, accelerator count, fast-interrupt count, the OBI subset (no
  error signal), all register maps and the power sequencing order are this design's choices.
  The platform does not specify them.
* **Silicon results not reproduced.** Area (0.15 mm², 65 nm), leakage (29 µW, 3 µW with domains
  off) and the speed-ups of early-exit networks on the NM-Carus accelerator are properties of the
  fabricated or synthesized system. They cannot be checked from this RTL. The model sizes of those
  workloads are not given either, so whether they fit in the 64 KiB default memory is unknown.
* **Memory contents at switch-off** are kept in simulation (see section 3).

## 10. Simulation

Every module in `rtl/` has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | What it proves |
|---|---|
| `tb_sram_bank` | random word/byte writes and reads; grant in the request cycle, data one cycle later; no grant in retention, clock-gated or isolated states, with data kept |
| `tb_obi_xbar` | three random masters, three random-latency slaves and an unmapped region, on both topologies; all data checked; crossbar grants in parallel, shared bus never does |
| `tb_dma` | 1D copy, 2D transposed gather, two channels at once, trigger-paced stride-0 stream, empty transfer, done interrupt |
| `tb_power_manager` | safety rules checked every cycle on every domain; off/on, retention, clock gating, CPU sleep and wake-up |
| `tb_fast_intr_ctrl` | random sources against a reference model; edge capture, clear, enable, one-cycle latency |
| `tb_ao_periph` | demultiplexing with pipelined, target-switching bursts; DMA interrupt waking the sleeping CPU domain; random target-hopping bursts checked against a shadow of every register and the external memory |
| `tb_xheep_top` | the whole platform at its default parameters: every master and slave, crossbar parallelism and contention, DMA 1D/2D/triggered with interrupt, bank retention stall, peripheral and accelerator domains off, CPU sleep and wake-up; each mechanism is counted |
| `tb_xheep_config` | the one-at-a-time bus with four interleaved 4 KiB banks: bank mapping, three masters sharing the bus, DMA across banks, one bank retentive while the others serve |
| `tb_im2col_dma` | im2col of an 8 x 8 image for a 3 x 3 kernel on the default platform: one 2D DMA transfer per kernel tap, both channels running at once, completion by fast interrupt, the 36 x 9 result checked element by element |

The testbenches use two models of their own: `obi_mem_model`, a slave with random grant and
latency, and `obi_rand_master`, a master issuing random traffic. Run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/xheep_pkg.sv tb/tb_xheep_top.sv --top-module tb_xheep_top
./obj_dir/Vtb_xheep_top
```

All testbenches finish in a few seconds. The whole-platform test runs at the default sizes.
