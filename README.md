# Basilisk-style RISC-V SoC: uncore RTL

This is synthesizable SystemVerilog for the *uncore* of Basilisk, a
Linux-capable 64-bit RISC-V system-on-chip. It covers everything around the
application core: the on-chip interconnect, a last-level cache whose ways can
be used as scratchpad memory, a HyperRAM DRAM controller, a 2D DMA engine, a
display controller, a serial chip-to-chip link, and the low-speed peripherals.
The core (a CVA6 with its L1 caches), the JTAG debug module, the USB 1.1 host
controller and the platform interrupt controller are not included. Their bus
ports and wires are top-level ports of `basilisk_soc`, so a testbench or a
wrapper takes their place.

The original chip runs at about 62 MHz. The throughput figures below are
given at that clock.

## Block diagram

```
  core port ─┐                                   ┌─ Regbus bridge ─ Regbus demux ─┬─ UART
 debug port ─┤                                   │   (64 → 32 bit)                ├─ QSPI host
        DMA ─┤   main-bus crossbar               │                                ├─ GPIO / USB pad mux
  VGA fetch ─┼── 5 masters × 3 slaves ───────────┼─ LLC / SPM ── HyperRAM ctrl ── ├─ VGA registers
 C2C inbound ┘   round robin per slave           │   (4 ways,       (2 chips)     ├─ DMA registers
                                                 │    64 KiB)                     ├─ LLC configuration
                                                 └─ C2C outbound ── serial link   ├─ I2C host
                                                                                  └─ CLINT
```

The interconnect has two levels. Every block that moves bulk data sits on the
64-bit main bus. Blocks that only have control registers sit behind a bridge
on a 32-bit register bus (Regbus). The DMA and VGA blocks have both: their
registers are on Regbus and their data movers are main-bus masters.

## Address map

| Range                         | Target                                             |
|-------------------------------|----------------------------------------------------|
| `0x0200_0000` – `0x0200_FFFF` | CLINT (msip `+0x0`, mtimecmp `+0x4000`, mtime `+0xBFF8`) |
| `0x0300_0000` + 4 KiB × n     | Regbus peripherals: n = 0 UART, 1 QSPI, 2 GPIO, 3 VGA, 4 DMA, 5 LLC config, 6 I2C |
| `0x1000_0000` – `0x1000_FFFF` | LLC scratchpad window; way w at `+w × 16 KiB`      |
| `0x4000_0000` – `0x7FFF_FFFF` | Chip-to-chip window, maps to the other chip's `0x8000_0000` and up |
| `0x8000_0000` and up          | DRAM (two 8 MiB HyperRAM chips), cached by the LLC |

Any other address gets an error response. This includes an unmapped 4 KiB
Regbus window, and a scratchpad-window access to a way that is still
caching. The map is this design's own choice.

## Buses

**Main bus** (`bus_req_t`, `bus_rsp_t` in `basilisk_pkg`). Each access is a
single beat with a 48-bit address, 64-bit data and byte strobes. The request
is held with `valid` until the slave's `ready`. The response comes back later
on its own valid/ready channel and carries `err` and `rdata`. The original
chip uses a full AXI4 crossbar, with bursts, IDs and multiple outstanding
transactions. This bus keeps the topology and the data width and drops the
rest. That is the main simplification here, and it caps what each master can
move (see *Throughput*).

**Crossbar** (`axi_xbar`). Each slave has a round-robin arbiter. Once a
master wins a slave, the slave stays locked to that master until the
response has been handed over. A master may have one access outstanding. The
request path is combinational, and the assertion `a_req_stable` checks that
masters hold their requests.

**Regbus** (`reg_req_t`, `reg_rsp_t`). This is a 32-bit bus where the
peripheral answers in the same cycle. `regbus_bridge` takes the 32-bit half
of a 64-bit main-bus access that `addr[2]` selects. It returns read data
copied into both halves, so it takes 2 cycles from request to response.
`regbus_demux` decodes base and mask windows combinationally.

## Last-level cache and scratchpad

`llc` is the most involved block. It is a 4-way, 64 KiB cache with 64-byte
lines (256 sets). It is write-back and write-allocate, and it replaces lines
in round-robin order. Tags and status bits are flip-flops. Line data is one
synchronous memory of 64-bit words with byte enables. One state machine
serves one request at a time.

- **Hit** (DRAM window, tag match in a caching way): one data-memory access.
  The response is valid 4 cycles after the request cycle.
- **Miss**: the LLC picks a victim among the caching ways. If the victim is
  dirty, its 8 words are read and sent as one line write. Then the new line
  is fetched, written into the data memory, and the access is served.
- **Scratchpad (SPM)**: register `SPM_EN` (config offset `0x0`) has one bit
  per way. Setting a bit first *flushes* that way: every dirty line is written
  back and every line is invalidated. `STATUS[0]` (offset `0x4`) reads 1
  while a flush is pending or running, and `SPM_EN` reads back only the ways
  that have finished switching. From then on the way is plain RAM at
  `0x1000_0000 + way × 16 KiB`, with hit timing, and never touches DRAM.
  Clearing the bit is immediate, because the way's lines are already invalid.
- **Bypass**: with all four ways in SPM mode, the LLC has no cache left.
  DRAM accesses then read the line from DRAM, return the word and, for a
  write, write the merged line back.

An access to a way's SPM range while that way is caching is an error, so a
program cannot read stale cache contents through the scratchpad window.

## HyperRAM controller

`hyperbus_ctrl` turns each line request into one HyperBus burst on the chip
selected by address bit 23. A burst has these phases:

1. 3 clocks of command/address, 16 bits per clock.
2. A fixed latency of 2 × `LATENCY` clocks (default 6).
3. 32 clocks of data.
4. One clock with the chip select released.

The logic runs only on the system clock. A 16-bit word on `hb_dq_o`/`hb_dq_i`
carries the two bytes of one HyperBus clock: the rising-edge byte in `[15:8]`
and the falling-edge byte in `[7:0]`. The DDR pad registers, the shifted
clock and the RWDS capture are left to a PHY. On reads, the PHY marks each
captured word with `hb_dq_valid_i`, so it may insert gaps. The data phase
moves 2 bytes per clock, which is 124 MB/s at 62 MHz.

The testbench model `tb/hyperram_model.sv` follows this same framing. It is
a behavioural model of the chip seen through the PHY, not of the raw DDR pins.

## Chip-to-chip link

`c2c_link` lets each chip access the other chip's memory. An access that
reaches its slave port (the C2C window) is serialised, `LANES` bits per
clock, least significant bit first, with `tx_valid_o` framing the packet:

| Packet   | Bits | Contents                                                |
|----------|------|---------------------------------------------------------|
| request  | 122  | type=0, write flag, address, strobes, write data        |
| response | 66   | type=1, error flag, read data                           |

On the other chip the request becomes a main-bus access from the link's
master port, and the result is sent back as a response packet. The remote
address is `addr − 0x4000_0000 + 0x8000_0000`, so the window reaches the
other chip's DRAM. One lane at 62 MHz gives the link's 62 Mbit/s in each
direction. A remote word read costs at least 122 + 66 bit times plus the
remote access. Each direction allows one access in flight, and the assertion
`a_one_inbound` checks this. The receiver assumes its inputs are already
synchronous to its clock; the capture PHY is not part of this block.

## DMA engine and display controller

`dma` copies `REPS` rows of `LEN` bytes. After each row it advances the
source by `SRC_STRIDE` and the destination by `DST_STRIDE`, so one job can
gather or scatter a 2D tile. Reads and writes are decoupled by a 4-word FIFO
and share one bus port, with writes taking priority. The registers are:

| Offset        | Register                       |
|---------------|--------------------------------|
| `0x00`/`0x04` | SRC (low/high)                 |
| `0x08`/`0x0C` | DST (low/high)                 |
| `0x10`        | LEN                            |
| `0x14`        | SRC_STRIDE                     |
| `0x18`        | DST_STRIDE                     |
| `0x1C`        | REPS                           |
| `0x20`        | START                          |
| `0x24`        | STATUS: busy, done, error      |

Addresses, lengths and strides are multiples of 8. `irq_o[1]` of the top is
the done flag.

`vga` generates VESA XGA timing: 1344 × 806 clocks per frame and
active-low syncs. It streams an RGB565 frame buffer from `FB_BASE` (offsets
`0x4`/`0x8`), four pixels per 64-bit word. An 8-word FIFO sits in front of
the pixel stage, and the fetcher is rewound at the start of each vertical
blanking interval. When a pixel is due and no data is there, the pixel is
shown black and counted in `UNDERFLOW` (offset `0xC`). The design makes one
pixel per system clock, so at 62 MHz the frame rate is 57 Hz rather than 60.

## Low-speed peripherals

- **`uart`**: 8N1 framing. The divisor is in clocks per bit; the reset value
  538 gives 115200 baud at 62 MHz. It has a one-byte receive buffer and
  raises an interrupt (`irq_o[0]`) on receive.
- **`spi_host`**: SPI mode 0, MSB first, one byte per command. Standard mode
  uses MOSI on `sd[0]` and MISO on `sd[1]`; quad write and quad read use all
  four lines. Chip selects are controlled by software.
- **`i2c_host`**: byte commands, each an optional START, 8 data bits with
  ACK/NACK, and an optional STOP. Outputs are open drain, the host honours
  clock stretching, and the SCL period is 4 × (DIV+1) clocks.
- **`gpio_usb_mux`**: eight pads shared with the four USB ports. Pads 2k and
  2k+1 carry D+ and D− of port k. `SEL[k]` gives the pair to the GPIO
  registers. The USB host owns the pads after reset.
- **`clint`**: mtime, mtimecmp and msip in the usual RISC-V layout. mtime
  counts rising edges of `rtc_i`.

## A matrix multiply as a memory workload

The original chip was measured on a 48×48 double-precision matrix multiply.
The core is not part of this RTL, so `tb/tb_gemm_workload.sv` plays the
core's role on its bus port and does the arithmetic itself. Every byte still
moves through the SoC's own hardware, in the way a tuned kernel would use
it:

1. A and B are written to DRAM with a 512-byte row pitch.
2. All four LLC ways become 64 KiB of scratchpad.
3. Two 2D DMA jobs pack the matrices into it, as 384-byte rows.
4. The product is computed out of the scratchpad: 48 row loads of A and
   48×48 element loads of B per row of C, 115,200 accesses in all.
5. C goes back to DRAM through a third DMA job.

C is then compared bit for bit with a reference product. The matrix
elements are multiples of 1/4, so every sum is exact.

At the default parameters the multiply phase takes 576,000 cycles, 5 cycles
per scratchpad access. The DMA phases are slow: with every way in
scratchpad mode, DRAM reads bypass the cache, and each 8-byte word costs a
full line read from HyperRAM. Moving the two 18 KiB inputs in takes about
305,000 cycles.

## Throughput against the original chip

| Path     | Original              | This RTL                                                    |
|----------|-----------------------|-------------------------------------------------------------|
| HyperRAM | 124 MB/s              | 124 MB/s in the data phase; 64 B per 50 clocks per line with command and latency overhead (about 79 MB/s) |
| LLC      | 473 MB/s              | one 8-byte access per ~5 clocks per master (~99 MB/s), no bursts |
| DMA      | 473 MB/s              | about one word per 12 clocks between scratchpad or cached locations; far less to or from uncached DRAM |
| VGA      | XGA at 60 Hz          | XGA timing at 57 Hz; fetch bandwidth too low for a full frame, so late pixels are black |
| C2C      | 62 Mbit/s duplex      | 62 Mbit/s per direction on one lane                         |

The main bus has no bursts and allows one transaction per master, so the
bandwidth-heavy blocks (LLC, DMA, display) fall well short of the original
chip. Adding bursts and multiple outstanding transactions to the bus is the
natural next step if bandwidth matters.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. For example:

```
verilator --binary --timing --assert rtl/basilisk_pkg.sv rtl/llc.sv tb/tb_llc.sv --top-module tb_llc
./obj_dir/Vtb_llc
```

The end-to-end test `tb/tb_basilisk_soc.sv` runs the top at its full-size
defaults: XGA display, 64 KiB LLC and two HyperRAM chips. It needs all of
`rtl/` plus `tb/hyperram_model.sv`. The testbench plays the core and the
debug module, wires the UART and the C2C link back on themselves, and models
the SPI and I2C devices. It runs about 2.1 million cycles, which takes under
20 seconds in Verilator. It exercises and counts each mechanism:

- error responses
- LLC hits, misses and eviction write-backs
- flush write-backs on switching a way to SPM
- SPM accesses and bypass accesses
- a 2D DMA job into and out of the scratchpad
- C2C remote reads and writes
- UART, SPI and I2C bytes
- both pad-sharing modes of the GPIO/USB mux
- timer and software interrupts
- two displayed frames with their pixels compared to the frame buffer while
  the core keeps using memory

All memory reads are checked against a scoreboard.

## Not included

- The CVA6 core, its L1 caches and its floating-point unit. The matrix
  multiply therefore runs only as the memory-side simulation described
  above. Its three matrices (55,296 B) fit in the 64 KiB scratchpad.
- The JTAG TAP and debug module, the USB 1.1 host controller, the platform
  interrupt controller and the boot ROM.
- Pads, clock generation and the DDR/serial PHYs.
