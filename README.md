# Basilisk SoC fabric in SystemVerilog

Basilisk is a small RISC-V SoC made to boot Linux without help from a host. It uses a 64-bit
application core, one HyperRAM DRAM interface and a set of ordinary peripherals. The design
works within tight limits. The memory is one narrow DRAM bus of 154 MB/s, and a 130 nm process
leaves little room for on-chip SRAM. Two decisions follow from those limits:

* **One cache that can also be a scratchpad.** A 4-way, 64 KiB last-level cache (LLC) sits in
  front of the DRAM. Software can switch any way, at run time, into a plain on-chip SRAM window.
  A boot loader can run from that SRAM before DRAM is set up. Later the same SRAM becomes cache.
* **A two-level interconnect.** Parts that move bulk data sit on a fully connected 64-bit AXI4
  crossbar: the core, the DMA engine, the LLC and the chip-to-chip link. Slow peripherals
  sit behind a bridge on a simple 32-bit register bus, called Regbus here. Regbus has no bursts
  and holds one access at a time.

This RTL implements the fabric around the core:

* the crossbar
* the LLC/scratchpad
* the HyperBus DRAM controller
* the register bus
* a 2D DMA engine
* a serial chip-to-chip link that carries AXI4 between two chips
* the peripherals

The core itself is not included. Its AXI4 port and interrupt lines are ports of the top module `basilisk_soc`, so a
core model or testbench drives the SoC from the outside.

## What is built and what is not

| Part | Module | State |
|---|---|---|
| AXI4 crossbar, 64-bit | `axi_xbar` (+ `axi_err_slv`) | built |
| LLC with per-way scratchpad | `llc_spm` (+ `sram_sp`) | built |
| HyperBus controller, 2 chips | `hyperbus_ctrl` (+ `mem_cdc`) | built |
| AXI4 to Regbus bridge | `axi_to_reg` | built |
| Regbus demultiplexer | `reg_demux` | built |
| Chip control registers | `soc_regs` | built |
| 2D DMA engine | `dma2d` | built |
| UART | `uart` | built |
| GPIO with USB pin sharing | `gpio_usb_mux` | built |
| Timer / software interrupts (CLINT) | `clint` | built |
| PLIC (RISC-V platform interrupt controller) | `plic` | built |
| Quad SPI host | `spi_host` | built |
| I2C host | `i2c_host` | built |
| VGA controller | `vga` | built |
| Chip-to-chip (C2C) link | `c2c_link` | built |
| CVA6 core, USB 1.1 OHCI host, JTAG debug, boot ROM, pads | — | not built; outside interfaces are ports |

Shared types and constants are in `basilisk_pkg`:

* the AXI4 request/response structs
* the Regbus and memory-port structs
* the address map

## Address map

| Range | Target |
|---|---|
| `0x0300_0000` + 4 KiB·i | Regbus target i: 0 chip control, 1 UART, 2 GPIO, 3 CLINT, 4 DMA, 5 PLIC, 6 SPI, 7 I2C, 8 VGA, 9 C2C |
| `0x2000_0000` – `0x2FFF_FFFF` | the other chip, through the C2C link |
| `0x1000_0000` – `0x1000_FFFF` | scratchpad, way w at `+w·0x4000` |
| `0x8000_0000` – `0x80FF_FFFF` | DRAM: chip 0 in the lower 8 MiB, chip 1 in the upper 8 MiB |
| anything else | DECERR from the crossbar's error target |

The address map and all register layouts are this design's own choices. The SoC description
does not give them.

## The interconnect

`axi_xbar` connects N initiators to M targets, and every initiator can reach every target.

**Routing.** The write-address (AW) and read-address (AR) addresses are decoded against a rule
table of start/end/index entries. An unmatched address goes to an internal error target, which
takes the whole burst and returns DECERR.

**Arbitration.** Each target has a separate write arbiter and read arbiter. Each one
round-robins among the initiators that request it.

**Locking.** Once a target grants an initiator, that initiator stays connected to it until the
transaction ends:

* A write path stays locked until the write response (B) handshake.
* A read path stays locked until the last read-data (R) beat.

**Outstanding transactions.** Each initiator can have one write and one read outstanding, so
responses need no ID-based reordering. IDs pass through unchanged.

The top uses four initiators and three targets:

* Initiators: the core, the DMA engine, the VGA framebuffer fetch, and the C2C link replaying
  the other chip's requests.
* Targets: the LLC, the Regbus bridge, and the C2C link.

**Arbitration cost.** One cycle from AW/AR valid to the target seeing it. Other traffic adds no
latency.

**Assertions.** Concurrent assertions check that AW and AR valid are not withdrawn before their
handshake. They also check that the address is held stable until then.

Behind the crossbar, `axi_to_reg` turns each 64-bit AXI beat into one 32-bit Regbus access:

* Address bit 2 picks which half of the beat is used.
* A Regbus error becomes SLVERR.

`reg_demux` picks the target from address bits [15:12]. An access to an empty index gets an
error in the same cycle.

## LLC and scratchpad

`llc_spm` has one AXI4 target port and serves two address windows.

* **DRAM window (cache).** Accesses look up the ways that are in cache mode.
* **Scratchpad window.** Way w is mapped at `SpmBase + w·16 KiB` while it is in scratchpad mode.
  An access to a way that is in cache mode returns SLVERR.

**The way mask.** A 4-bit mask comes from the chip control register at offset 0x0. Bit w = 1
makes way w a scratchpad.

**What happens when the mask changes.** The LLC runs a flush: it walks all 2048 sets and clears
the valid bits before it accepts new requests. The same flush runs after reset. Because the
cache is write-through, the flush loses nothing. A way that becomes cache again starts empty.
The scratchpad contents stay in the SRAM but are no longer addressed.

**All four ways as scratchpad.** DRAM accesses then bypass the LLC and go straight to memory.
Each bypass raises the `bypass` event pulse.

**Cache organisation** (own choices):

| Property | Choice |
|---|---|
| Line size | one 64-bit word |
| Sets | 2048 per way |
| Tags | stored as {valid, tag} in a separate single-port SRAM per way |
| Write policy | write-through, no write allocation |
| Replacement | round robin |
| Hit latency | 3 cycles from address to data (address, SRAM read, compare) |
| Concurrency | one transaction at a time; bursts handled beat by beat |

**Why write-through.** A way can become a scratchpad at any moment without a write-back pass.
This keeps the mode switch simple, at the price of DRAM write traffic.

**Event outputs.** `hit_o`, `miss_o`, `spm_access_o` and `bypass_o` are one-cycle pulses,
brought out as `llc_event_o`.

**Memories.** Each way holds its data and tags in `sram_sp` instances: single-port SRAMs with a
registered read and byte enables. On silicon these would be SRAM macros.

## HyperBus controller

HyperRAM uses an 8-bit double-data-rate bus:

| Signal | Role |
|---|---|
| DQ[7:0] | data, one byte per CK edge |
| CK / CK# | differential clock |
| RWDS | read strobe from the device; write byte mask from the controller |
| CS# | one per chip |

**Peak rate.** At the SoC's 77 MHz clock, 154 MB/s is one byte per CK edge. The controller
reaches that rate without a DDR I/O cell, because it runs on its own clock `hyper_clk_i` at
twice the CK rate. CK toggles on every controller cycle while a transaction is active, so each
controller cycle moves one byte. Both chips share the bus, and address bit 23 picks the chip
select.

**One transaction.** Each transaction moves one 64-bit word:

1. **Command-address.** Six bytes go out, built per the HyperBus spec: read/write, memory
   space, linear burst, and the half-word address.
2. **Latency.** The controller waits a fixed doubled initial latency: 2·`Latency` CK cycles,
   which is 4·`Latency` controller cycles.
3. **Data.** Eight data bytes follow. Within each 16-bit half-word the upper byte goes first.
   * **Writes:** the controller drives RWDS high for a byte that is masked out.
   * **Reads:** the device drives RWDS, and the controller takes each byte on an RWDS
     transition.

**Time per word.** A read or write takes about 6 + 4·6 + 8 = 38 controller cycles of bus time,
plus CS# set-up and hold.

**Clock crossing.** `mem_cdc` carries requests between the SoC clock and the HyperBus clock
with a toggle handshake. One request is in flight at a time. Each crossing adds about three
cycles of the receiving clock.

**Reset.** The HyperBus domain's reset is asserted at once and released synchronously to
`hyper_clk_i`.

## DMA engine

`dma2d` copies a 2D block: `REPS` rows of `LEN` bytes. After each row the source address moves
by `SSTRIDE` and the destination by `DSTRIDE`. With `REPS = 1` it is a plain 1D copy.

**How it copies.** Each row is cut into bursts:

* at most `MaxBurst` (16) beats of 8 bytes each
* never crossing a 4 KiB page

Each burst is read into a buffer and then written out.

**Alignment.** Addresses and lengths are 8-byte aligned.

**Completion.** The engine pulses `irq_o` and increments a done counter when a transfer ends. An
error response stops the transfer and sets `err`.

| Offset | Register |
|---|---|
| 0x00 | SRC |
| 0x04 | DST |
| 0x08 | LEN (bytes per row) |
| 0x0C | SSTRIDE |
| 0x10 | DSTRIDE |
| 0x14 | REPS |
| 0x18 | CTRL: write 1 to start |
| 0x1C | STATUS: {done count[31:16], err[1], busy[0]} |

The paper calls its engine asynchronous: reads and writes are decoupled. This version does not
overlap the read and write of a burst. It does the same job more slowly.

## Peripherals

Every peripheral has a 4 KiB Regbus window and answers in the cycle of the request.

**Chip control (`soc_regs`).**

| Offset | Register |
|---|---|
| 0x0 | LLC scratchpad way mask |
| 0x4 | boot-mode pins (read only) |
| 0x8 | scratch |

**UART.** 8N1 framing, with one holding register in each direction.

| Offset | Register |
|---|---|
| 0x0 | TX |
| 0x4 | RX |
| 0x8 | STATUS {overrun, rx_valid, tx_busy} |
| 0xC | DIV: clock cycles per bit, reset value 16 |

The interrupt is high while a received byte waits to be read.

**GPIO / USB pin sharing (`gpio_usb_mux`).** Eight pads, which are also the D+/D− pairs of the
four USB ports. Port p uses pads 2p (D+) and 2p+1 (D−).

| Offset | Register |
|---|---|
| 0x0 | OUT |
| 0x4 | OE |
| 0x8 | IN |
| 0xC | USB_SEL, one bit per port |

When a port's bit is set, the USB controller drives and reads that pad pair. Otherwise the pads
are GPIO, and the port sees an idle line (D+ = 1, D− = 0).

**CLINT.** Standard RISC-V machine timer and software interrupt.

| Offset | Register |
|---|---|
| 0x00 | MSIP |
| 0x08 / 0x0C | MTIMECMP low/high |
| 0x10 / 0x14 | MTIME low/high |

MTIME counts ticks of `rtc_i`. MTIMECMP resets to all ones, so the timer interrupt starts low.

## Chip-to-chip link

`c2c_link` lets two chips reach each other's memory maps. It carries AXI4 over one serial data
lane per direction, and each lane comes with a clock forwarded from the transmitting chip.

**Bit timing.**

* The transmitter puts out one bit per system clock cycle.
* It toggles the forwarded clock on the falling edge of its system clock. The clock edges
  therefore sit in the middle of each bit.
* Both edges of the forwarded clock carry data (DDR), so the lane clock runs at half the bit
  rate.
* At 77 MHz this gives 77 Mbit/s in each direction, at the same time (duplex).

**Receiver.** The receiver runs entirely on the incoming clock:

1. It takes bit pairs on both edges.
2. It recognises a frame by its start bit. Frames always start on an even bit, which keeps the
   pairs aligned.
3. It passes each complete frame into the local clock domain through a toggle synchroniser.
   Frames arrive 40 receive-clock cycles apart, which is plenty for the synchroniser.

**Frames.** A frame is 80 bits:

* a start bit
* a 3-bit type: AR, AW, W, R or B
* the payload of one AXI address or data beat

**Flow control.** Flow control works per transaction:

* **Writes.** The sending side collects a whole write burst, up to 16 beats, before it sends
  anything. The receiving side collects the whole burst, replays it on its own crossbar, and
  sends back the B response.
* **Reads.** These are answered only once all the R beats are in.
* **Concurrency.** Each direction allows one write and one read outstanding.
* **Buffer space.** Because every frame has reserved buffer space, no credits are needed.
* **Long bursts.** A burst longer than 16 beats gets SLVERR locally and never crosses the link.

**Priority.** Responses are sent before new requests.

**Address translation.** An address in the 256 MiB window becomes `{PAGE, addr[27:0]}` on the
other chip. PAGE is a Regbus register that resets to 8, so by default the window shows the
other chip's DRAM.

**Loopback.** Looping a chip's lanes back onto itself works as well: the top-level test uses
this to reach its own DRAM through the link.

**Reset in simulation.** The receiver is reset asynchronously, because its clock comes from the
other chip and stands still during reset. A simulation must therefore produce a falling edge
on `rst_ni`.

## Interrupts and slow peripherals

**PLIC.** The PLIC follows the RISC-V specification for a single context:

* 8 sources, where source 0 does not exist
* 3-bit priorities, a threshold, and a claim/complete register

Sources 1 to 3 are the UART receive, DMA done, and the external USB controller.

| Offset | Register |
|---|---|
| 0x000 + 4·i | PRIORITY of source i |
| 0x080 | PENDING |
| 0x100 | ENABLE |
| 0x200 | THRESHOLD |
| 0x204 | CLAIM / COMPLETE |

The gateways are level-sensitive. A claimed source cannot become pending again until software
writes its ID back to CLAIM/COMPLETE.

**SPI host.** The SPI host works one byte per command, in SPI mode 0.

* **Standard mode.** 8 SCK cycles per byte: MOSI is on dq[0], MISO on dq[1].
* **Quad mode.** 2 SCK cycles per byte, one nibble per cycle. The command says whether the host
  drives the four lines or reads them.
* **Chip selects.** Software sets them, so a multi-byte flash command keeps CS low between
  bytes.
* **SCK.** The half period is DIV+1 clock cycles.

| Offset | Register |
|---|---|
| 0x0 | CS |
| 0x4 | DIV |
| 0x8 | TXCMD {quad_read, quad, data} |
| 0xC | RXDATA |
| 0x10 | STATUS |

**I2C host.** The I2C host also works one byte per command.

* **Command options.** A command may begin with a START (or repeated START) and may end with a
  STOP.
* **Acknowledge.** After a write it records the device's ACK; after a read it sends ACK or NACK.
* **Bit timing.** A bit takes four quarter periods of DIV+1 cycles.
* **Clock stretching.** A device that holds SCL low stalls the host.
* **Bus ownership.** Between commands without a STOP, the host keeps SCL low.
* **Pins.** They are open-drain: an `*_oe` output pulls its line low.

| Offset | Register |
|---|---|
| 0x0 | DIV |
| 0x4 | CMD {nack, stop, start, read, data} |
| 0x8 | STATUS {nack_seen, busy} |
| 0xC | RXDATA |

**VGA.** The VGA controller shows an RGB332 framebuffer: one byte per pixel, stored row by row.

* **Timing.** The timing is programmable: visible area, front porch, sync and back porch, both
  horizontally and vertically. A pixel lasts DIV+1 clock cycles. The reset values give
  640×480 at 60 Hz.
* **Fetch.** While one line is on screen, the controller fetches the next line over AXI4 into
  the other half of a two-line buffer. It uses bursts of up to 16 beats that never cross a
  4 KiB page.
* **Underruns.** A pixel that has not arrived in time is shown black and counted as an underrun.
  A buffer half is cleared when its next line starts, so stale lines are never shown.

| Offset | Register |
|---|---|
| 0x00 | CTRL (enable) |
| 0x04 | FB_BASE |
| 0x08 | DIV |
| 0x0C–0x18 | horizontal timing |
| 0x1C–0x28 | vertical timing |
| 0x2C | STATUS {underruns, frames} |

## Top-level ports

`basilisk_soc` has three parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `NumLlcWays` | 4 | LLC ways |
| `LlcBytes` | 64 KiB | LLC size |
| `HyperLatency` | 6 | HyperRAM initial latency, in CK cycles |

Its ports stand for the core, the USB controller and the pads:

| Ports | Meaning |
|---|---|
| `clk_i`, `rst_ni` | SoC clock and active-low reset |
| `hyper_clk_i` | HyperBus clock, twice the HyperBus CK rate |
| `rtc_i` | real-time tick for the timer |
| `boot_mode_i` | boot-mode pins, readable in chip control |
| `core_req_i`, `core_rsp_o` | the core's AXI4 initiator port |
| `mtip_o`, `msip_o` | timer and software interrupts, from the CLINT |
| `meip_o` | external interrupt, from the PLIC |
| `ext_irq_o` | raw interrupt lines: DMA done, UART receive |
| `usb_irq_i` | the USB controller's interrupt, into the PLIC |
| `usb_*` | the USB controller's side of the pin sharing |
| `llc_event_o` | one-cycle LLC pulses: bypass, scratchpad, miss, hit |
| `hyper_*` | HyperBus pins, with separate in, out and output-enable |
| `uart_*`, `gpio_*`, `spi_*` | pins of those peripherals |
| `i2c_*` | open-drain pins: `*_oe_o` pulls the line low |
| `vga_*` | sync pins (active low) and RGB332 colour pins |
| `c2c_*` | one data lane and its forwarded clock in each direction |

The crossbar and the Regbus bridge run at `clk_i`. The HyperBus controller's bus side runs at
`hyper_clk_i`. The C2C receiver runs at the clock that comes in with its data.

## Simulating

Every testbench is a single self-checking module in `tb/`. At the end it prints
`TB_RESULT checks=N failures=M`.

**Helper models.** Testbenches share these models:

| Model | Role |
|---|---|
| `axi_sim_mst` | AXI initiator with burst tasks |
| `axi_sim_mem` | AXI memory with random stalls |
| `hyperram_model` | HyperRAM device |
| `mem_port_model` | simple memory port |
| `reg_drv` | Regbus driver |
| `reg_sim_tgt` | Regbus target |

**Running one with Verilator 5**, for example the top:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_basilisk_soc rtl/basilisk_pkg.sv tb/tb_basilisk_soc.sv
./obj_dir/Vtb_basilisk_soc
```

**What the top-level test covers.** `tb_basilisk_soc` runs the SoC at its default parameters,
with two HyperRAM models on the bus. It covers:

* boot-mode and control registers
* cached DRAM reads on both chips: misses, then hits
* write-through
* a 2D DMA copy into a way switched to scratchpad, while the core keeps issuing requests
* bypass with every way as scratchpad
* UART loopback, with its interrupt claimed through the PLIC
* an SPI byte looped back
* an I2C address byte on an empty bus, answered with NACK
* a small VGA frame fetched from the scratchpad
* a write and a read through the C2C link looped back onto the chip
* GPIO and USB pin sharing
* timer and software interrupts
* decode and slave errors

It counts each of these events and fails if any never happened. Block testbenches
(`tb_axi_xbar`, `tb_llc_spm`, `tb_hyperbus_ctrl`, ...) check their block against models
written separately from it. `tb_hyperbus_ctrl` also checks the HyperBus timing: the number of
CK edges and the one-byte-per-cycle rate.

## Where this departs from the silicon

* The core, the USB host, debug and the boot ROM are not in this RTL.
* The C2C link's frame format and flow control are assumptions. The same applies to its
  reading of "77 Mbit/s DDR" as one lane per direction at one bit per clock cycle.
* All register layouts, the address map, the HyperRAM chip size (8 MiB each) and the HyperBus
  latency are assumptions.
* The LLC handles one transaction at a time, and its lines are one word long.
* The DMA does not overlap reads and writes.
* The PLIC serves one context (the core's machine mode).
* The SPI host moves one byte per command. It has no memory-mapped flash mode, so booting from
  flash needs software that copies the image.
* The crossbar allows one outstanding transaction per direction per initiator. The silicon's
  interconnect is very likely more concurrent.
