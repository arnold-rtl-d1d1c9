# Arnold SoC: a RISC-V microcontroller with an embedded FPGA on its buses

A small microcontroller can run most IoT firmware, but it struggles in three
places:

- sensors with odd, tightly timed interfaces;
- pre-processing of data as it streams in;
- bursts of heavy arithmetic.

This design attaches an embedded FPGA (eFPGA) to the microcontroller at four
points, not as a loose co-processor on one bus. Logic mapped into the fabric
can use each of them:

1. **the pads**: 41 pads, each with input, output and direction;
2. **the shared memory**: four crossbar master ports, like the CPU's own;
3. **the I/O DMA**: a receive stream, a transmit stream and a configuration
   word, which the DMA moves to and from memory with its own address
   generator;
4. **a register bus**: an APB slave port, so software can program the
   fabric's logic.

The fabric can also raise 16 interrupt events, and it has two hard
vector-MAC units beside it. The microcontroller, the peripherals and the eFPGA
each run in their own clock domain. Every path into or out of the fabric
therefore passes a clock-domain crossing.

This repository holds the RTL of everything around the fabric and the core:

- the memory system and crossbar;
- the protection unit;
- the peripheral bus and its peripherals;
- the I/O DMA with a UART;
- all four eFPGA interfaces with their crossings;
- the event synchronisers;
- the eFPGA clock generator;
- the two MAC units;
- a top level, `arnold_soc`, that wires them together.

The parts that are hard macros or third-party IP are ports of `arnold_soc`:

- the RISC-V core;
- the eFPGA fabric and its configuration block;
- the three FLLs;
- the JTAG debug module;
- the HyperRAM, QSPI, I2C and camera peripherals;
- the pad cells.

A testbench drives these ports in their place.

## Clock domains

| Domain | Clock | What runs in it |
|---|---|---|
| MCU | `clk_mcu` | core ports, PMP, crossbar, SRAM, ROM, APB and its peripherals, I/O DMA core |
| Peripheral | `clk_peri` | UART |
| eFPGA | `clk_efpga` (generated) | fabric side of every eFPGA interface, MAC units |

The three clocks come from FLLs in the real chip. Here they are inputs:
`clk_mcu`, `clk_peri` and `clk_efpga_fll`.

`efpga_clk_gen` makes `clk_efpga` from one of six sources, chosen by
`FPGA_CLKSEL`:

- four pad clocks, from pads 37–40 (`FPGA_CLKSEL` = 0–3);
- the eFPGA FLL (4);
- the eFPGA FLL divided by `FPGA_CLKDIV` (5).

The source switch is a plain multiplexer. Change the selection only while the
eFPGA is in reset.

Nothing crosses between domains except through these:

- **`dc_fifo`**: a dual-clock FIFO.
  - Its read and write pointers are Gray-coded, and each crosses through two
    flip-flops.
  - It is first-word-fall-through, with default depth 4.
  - The write side sees space return two to three read-clock cycles after a
    pop.
- **`event_sync`**: a toggle synchroniser for single-cycle pulses.
  - A pulse in the eFPGA domain flips a flip-flop.
  - The flip-flop's level passes through two synchroniser flops in the MCU
    domain.
  - An XOR of the last two stages rebuilds one MCU-cycle pulse.
  - Two pulses on the same line must be far enough apart for the MCU side
    to see each flip: about three MCU cycles. Closer pulses can merge or
    cancel.
- **Slow control levels**: the configuration word of the DMA channel passes
  through a plain two-flop synchroniser. It is meant to be written while the
  channel is idle.

The eFPGA has one reset, `fpga_rst_n`, the AND of the chip reset and bit 0 of
`FPGA_CTRL`. It resets both sides of every eFPGA crossing, so a fabric
reconfiguration never leaves a FIFO half-full on the MCU side. After boot the
eFPGA is held in reset. Firmware first selects the clock, then releases the
reset.

## The memory crossbar

All masters share one memory system through `tcdm_xbar`. Masters and slaves
speak a simple request/grant protocol:

```
cycle        0            1            2
req     ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|_______________
gnt     ____________|‾‾‾‾‾‾‾‾‾|_______________     grant in the cycle the slave takes it
rvalid  _______________________|‾‾‾‾‾‾‾‾‾|_____    response exactly one cycle after gnt
```

- A master raises `req` with `addr`, `we`, `be[3:0]` and `wdata`. It must hold
  all of them until it sees `gnt` in the same cycle.
- The response (`rdata`, `err`) comes exactly one cycle after the grant,
  marked by `rvalid`. This holds for writes too.
- With no contention a load therefore takes two cycles, and a master can
  issue one access per cycle.

Masters, in crossbar index order:

| # | Master |
|---|---|
| 0 | core instruction fetch (through the PMP) |
| 1 | core data (through the PMP) |
| 2 | I/O DMA RX (writes) |
| 3 | I/O DMA TX (reads) |
| 4 | JTAG |
| 5–8 | eFPGA memory ports 0–3 |

Slaves: the four interleaved banks, the two private banks, the boot ROM and
the APB bridge.

Each slave has its own round-robin arbiter over the masters that address it.
The pointer moves past a master only when that master is granted. A slave
that withholds `gnt` (only the APB bridge does) keeps the master it chose, so
the request it sees cannot change under it. An address that hits no slave is
granted at once and answered with `err = 1`.

### Memory map

The chip's sizes are kept; the addresses are this design's choice.

| Region | Base | Size | Slave |
|---|---|---|---|
| Boot ROM | `0x1A00_0000` | 8 kB | `boot_rom` |
| Peripherals (APB) | `0x1A10_0000` | 64 kB, 4 kB per peripheral | `apb_bridge` |
| Private bank 0 | `0x1C00_0000` | 32 kB | `mem_bank` |
| Private bank 1 | `0x1C00_8000` | 32 kB | `mem_bank` |
| Interleaved banks | `0x1C01_0000` | 448 kB (4 × 112 kB) | 4 × `mem_bank` |

The SRAM totals 512 kB and is contiguous from `0x1C00_0000` to
`0x1C08_0000`.

Every bank is built from single-port cuts of 4096 × 32 bit (16 kB):

- An interleaved bank has seven cuts. Address bits [3:2] choose the bank, so
  consecutive words go to different banks. Up to four masters streaming
  through consecutive addresses then rarely collide.
- A private bank has two cuts and a plain linear layout. It is meant for
  code, stack and other data of one master, which then never waits.

A bank always grants, and its read data is registered (one-cycle latency).

The boot ROM holds two instructions, `lui t0, 0x1C008` and
`jalr x0, 0x80(t0)`. They jump to `0x1C00_8080` in private bank 1, where a
loader (not part of this RTL) would have placed the application. The rest of
the ROM holds `nop`. Writes to the ROM are answered with `err = 1`.

## Protection: the PMP in front of the core

`pmp_unit` implements RISC-V physical memory protection for both core ports:

- 16 entries;
- matching modes OFF, TOR, NA4 and NAPOT;
- R/W/X permissions and the lock bit;
- the lowest-numbered matching entry decides.

The privilege rules are those of the RISC-V specification:

- Machine mode is checked only against locked entries, and passes when none
  matches.
- User mode needs a matching entry that grants the access: X for fetch, R for
  load, W for store.

The CSR port uses the standard addresses: `0x3A0`–`0x3A3` for `pmpcfg`,
`0x3B0`–`0x3BF` for `pmpaddr`. Writes to a locked entry are dropped.

A denied access never reaches the crossbar. The PMP grants it at once and
answers one cycle later with `err = 1`, so the core sees an ordinary bus
error. Only the byte address of an access is checked. Accesses are aligned
and at most one word wide, so this is exact for this bus.

## Peripheral bus

`apb_bridge` turns a crossbar access into an APB transfer:

- a setup cycle;
- an access phase that lasts until `pready`.

The crossbar grant comes in the last access cycle, so the bridge is the one
slave that stalls its masters. Address bits [15:12] pick the peripheral:

| Slot | Peripheral | Registers (offsets) |
|---|---|---|
| 0 | SoC control (`soc_ctrl`) | `0x00–0x08` PADFUN0–2, `0x10` FPGA_CLKSEL, `0x14` FPGA_CLKDIV, `0x18` FPGA_CTRL (bit 0: eFPGA out of reset) |
| 1 | GPIO (`apb_gpio`) | `0x00/0x04` DIR, `0x08/0x0C` OUT, `0x10/0x14` IN (two-flop synchronised) |
| 2 | Timer (`apb_timer`) | `0x00` CTRL (bit 0 enable, bits 15:8 prescaler P), `0x04` COUNT, `0x08` CMP |
| 3 | Event unit (`event_unit`) | `0x00` MASK, `0x04` PENDING (write 1 to clear), `0x08` SET |
| 4 | I/O DMA (`udma_core`) | see below |
| 5 | eFPGA user registers | forwarded to the fabric, 7-bit address |
| 6 | eFPGA configuration block | forwarded to the `fcb_apb_*` ports |

A slot above 6 answers with `err = 1`.

**Timer.** The timer raises a one-cycle interrupt every (CMP+1)·(P+1) cycles
and then restarts from zero.

**Interrupts.** The event unit collects 32 event lines into PENDING. The core
interrupt line k is `PENDING[k] & MASK[k]`. The lines are:

| Lines | Source |
|---|---|
| 0–15 | eFPGA events |
| 16 | timer |
| 17 | DMA channel 0 RX done |
| 18 | DMA channel 0 TX done |
| 19 | DMA channel 1 RX done |
| 20 | DMA channel 1 TX done |

### Pad multiplexing

Each of the 41 pads has a 2-bit function code in PADFUN:

| Code | Function |
|---|---|
| 0 | software GPIO (the reset value) |
| 1 | peripheral |
| 2 | eFPGA |
| 3 | off |

Only the selected user drives the pad's output and output-enable. Every pad
input is fanned out to all three users. The eFPGA therefore always sees the
pads, even while the GPIO block owns them.

The UART uses pad 0 (TX) and pad 1 (RX) in the peripheral function. The
other peripheral functions come out on the `ext_periph_*` ports.

## The I/O DMA

`udma_core` moves data between peripheral streams and memory without the
core. It has exactly two crossbar ports, shared in time by all channels:

- **RX** writes into memory. It takes an item from a channel stream and
  writes it with the right byte enables. It can issue one write per cycle.
- **TX** reads from memory. It keeps one read in flight, so it delivers an
  item every three cycles. It only starts a read for a channel whose stream
  can accept the item.

A round-robin arbiter per port picks among the busy channels.

Each channel direction has three registers:

- a start address;
- a length in bytes;
- a config word: bit 0 starts the transfer and reads 1 while busy; bits 2:1
  set the item size (0: 8, 1: 16, 2: 32 bit).

Addresses advance linearly by the item size. The last item raises a one-cycle
"done" event for that channel and direction.

Register layout, with c the channel number:

| Offset | Register |
|---|---|
| `0x000` | CG, one enable bit per channel |
| `(c+1)·0x40 + 0x00 / 0x04 / 0x08` | RX_SADDR, RX_SIZE, RX_CFG |
| `(c+1)·0x40 + 0x10 / 0x14 / 0x18` | TX_SADDR, TX_SIZE, TX_CFG |
| `(c+1)·0x40 + 0x20` | PERIPH_CFG, a 32-bit word given to the peripheral |

SADDR and SIZE read back the current address and the bytes left.

Two channels are built:

- **Channel 0: the UART** (`udma_uart`, 8N1). It runs in the peripheral
  domain behind two dual-clock FIFOs. PERIPH_CFG[15:0] is the bit period in
  peripheral clocks. The receiver samples in the middle of each bit.
- **Channel 1: the eFPGA's DMA interface** (`efpga_udma_if`). It has two
  4-word dual-clock FIFOs for the streams. PERIPH_CFG goes to the fabric as
  its configuration word.

## The eFPGA interfaces

All four interfaces, plus the events and the MAC units, sit at the fabric's
edge. Their fabric-side pins are ports of `arnold_soc` named `fpga_*` and
`mac_*`.

**Memory ports** (`efpga_tcdm_bridge`, four of them):

- The fabric side uses the crossbar protocol, with two differences:
  - `gnt` means the request FIFO took the request.
  - `rvalid` comes whenever a response pops out of the response FIFO, a few
    cycles later.
- Responses return in order. A port keeps one access in flight on the
  crossbar side.
- Only the SRAM may be reached from the fabric. Any other address is answered
  with `err = 1` and never reaches the crossbar, so the fabric cannot touch
  peripherals or the ROM.
- The four ports can move 128 bits per eFPGA cycle between them.

**DMA interface** (`efpga_udma_if`): see channel 1 above. The streams use
valid/ready on both sides.

**Register interface** (`efpga_apb_cdc`):

- An APB transfer in slot 5 is packed into one FIFO entry: write flag, 7-bit
  address and write data.
- In the eFPGA domain it is replayed as a complete APB transfer, setup then
  access until the fabric's `pready`.
- The read data comes back through a response FIFO, and only then is the
  MCU-side transfer completed.
- The fabric sees 75 pins: `psel`, `penable`, `pwrite`, `paddr[6:0]`,
  `pwdata`, `prdata` and `pready`.

**Events** (`event_sync`): 16 pulse inputs from the fabric, each through a
toggle synchroniser into the event unit (lines 0–15).

**Pads**: `fpga_gpio_out/oe/in`, 41 bits each, reach the pads whose function
is 2.

### Vector MAC units

The two `vec_mac` units run on the eFPGA clock and give the fabric the
multipliers it lacks. Per cycle each unit does one of:

- four signed 8×8 multiply-accumulates;
- two signed 16×16 multiply-accumulates;
- one signed 32×32 multiply-accumulate.

Results go into four 32-bit wrapping accumulators. `mode` selects the width:
0 for 8 bit, 1 for 16 bit, 2 for 32 bit. Lane k takes byte or half-word k of
both operands.

Each operand comes either from fabric pins or from one of two local buffers
of 512 words. The fabric fills the buffers through a write port and
addresses them for reading.

Timing: operands are presented in cycle t and the sum is visible on `acc`
after cycle t+1. That is a two-cycle latency, at one operation per cycle.
Asserting `clr` together with `en` starts a new sum with the current
product.

## Where this RTL departs from the chip

- **FIFO widths.** The chip's crossings are described as 32-bit, 4-word
  FIFOs. Here every FIFO is 4 words deep, but as wide as what it carries:
  - the memory-port request FIFO is 69 bits (address, write flag, byte
    enables and data), and its response FIFO 33 bits;
  - the register-interface request FIFO is 40 bits.
- **DMA bandwidth.** Two 32-bit ports at 600 MHz give 38.4 Gbit/s of raw
  port bandwidth. The "38.4 Mbps" in the chip's description is taken as a
  unit slip. The TX engine here reaches a third of its port's rate.
- **MAC pin count.** The MAC units are described as having 310 pins each,
  without a breakdown. The pins here add up to 259:
  - control: 6;
  - operands: 64;
  - buffer port: 52;
  - accumulators: 128.
- **DMA channels.** Only two channels exist, the UART and the eFPGA. HyperRAM,
  QSPI, I2C and the camera interface are left out. Their pad signals are
  ports.
- **Addresses and register layouts** are this design's own throughout. So
  are these fixed choices:
  - the pad assignment of the UART and of the GPIO clocks;
  - the interrupt line numbers.
- **Where the DMA core runs.** In the chip the DMA and its peripherals form
  a peripheral-clock subsystem. The eFPGA's DMA crossing sits between that
  subsystem and the fabric. Here the DMA core runs on the MCU clock, next to
  its two crossbar ports:
  - the UART crosses to the peripheral clock behind its own FIFOs;
  - the eFPGA channel crosses directly between the MCU and eFPGA clocks.

  Seen from software, the behaviour is the same.
- **No glitch-free clock switching** for the eFPGA clock: see Clock domains.
- **Body biasing, power domains, FLLs and the fabric itself** are outside
  this RTL.

## Using the RTL

`arnold_pkg.sv` holds the bus types, the memory map and the crossbar indices.
Compile it first; every other module imports it.

With Verilator 5, the end-to-end test runs in about ten seconds:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module tb_arnold_soc -y rtl -y tb rtl/arnold_pkg.sv tb/tb_arnold_soc.sv
obj_dir/Vtb_arnold_soc +verilator+seed+1
```

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs. The testbenches use `$urandom` for stimulus; vary the seed to get a
different run.

`tb_arnold_soc` runs the whole SoC at its default sizes. It plays the core,
JTAG, the fabric's user logic and the board, and does this:

1. boots from the ROM;
2. uses the SRAM;
3. sets the PMP and shows user-mode accesses being denied;
4. sets up the pads;
5. brings the eFPGA out of reset on the divided FLL clock;
6. talks to the fabric's registers and the configuration port;
7. fires an eFPGA event and a timer interrupt;
8. loops UART bytes through the pads with the DMA;
9. streams words through a CRC-32 engine in the fabric over DMA channel 1;
10. hammers the crossbar from all four eFPGA ports and JTAG at once;
11. measures the crossbar's rates with three single-cycle masters:
    - on three interleaved banks, each master is granted every cycle;
    - a private bank delivers one word per cycle, which is 19.2 Gbit/s at
      600 MHz;
    - on one shared bank, round robin gives exactly equal shares;
12. checks both MAC units.

It counts each of these mechanisms and fails if any never happened.

Five more testbenches run workloads of the kind the fabric is meant for.
In each, the fabric's user logic is written as testbench code:

- **`tb_wl_crc`**: a CRC-32 engine fed by DMA channel 1.
  - It processes 1024 bytes with the core at 600 MHz and the eFPGA at
    193 MHz.
  - It checks the CRC and that the whole job finishes within 3.7 µs. It
    takes about 1.35 µs.
  - The limit is the TX engine's three core cycles per word.
- **`tb_wl_ff2soc`**: an eight-way 32-bit accumulator.
  - It reads 512 words through all four memory ports and writes the sums
    back.
  - It raises an event when done.
  - The four ports together sustain one word per eFPGA cycle at a 6:1 clock
    ratio, because each port has one access in flight.
- **`tb_wl_hdwt`**: an SPI front end on four eFPGA-owned pads.
  - It reads an ADC model and stores Haar approximation/detail coefficients
    and 4-bit local-binary-pattern words through one memory port.
  - It is programmed through the register interface and finishes with one
    event.
- **`tb_wl_bnn`**: a binary neural network layer.
  - Eight 3×3 filters on an 8×8 map, each word holding 32 one-bit channels.
  - It computes XOR-popcount sums against a threshold.
  - It fetches filters and input patches through all four ports and stores
    one byte of filter outputs per position.
- **`tb_wl_custom_io`**: the fabric drives an off-chip accelerator over
  36 pads.
  - A 32-bit bidirectional bus, an 80 MHz clock, valid, direction and
    ready.
  - It streams coefficients from SRAM, turns the bus around, and stores the
    accelerator's answer.

Simulation is two-state. Every register that is read is reset, except SRAM
contents and the MAC buffers, which start random as real memories do.
