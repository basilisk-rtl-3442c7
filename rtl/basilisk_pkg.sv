// basilisk_pkg: types and constants shared by the SoC blocks.
//
// Two bus flavours are used, as in the SoC's two-stage interconnect:
//  * the main bus, 64 bits wide, carrying single-beat accesses between the
//    high-throughput masters (core, debug, DMA, display, chip-to-chip link)
//    and slaves (last-level cache, peripheral bridge, chip-to-chip link).
//    A request is valid/ready handshaked; the response returns on a separate
//    valid/ready channel. This is a simplification of the AXI4 crossbar of
//    the original SoC (no bursts, no IDs, one transaction per slave port).
//  * Regbus, 32 bits wide, for the low-throughput peripherals. A request is
//    held valid until the peripheral raises ready; rdata/error are valid in
//    that same cycle.
// The address map below is a choice of this design.
package basilisk_pkg;

  localparam int unsigned AW = 48;   // main-bus address width
  localparam int unsigned DW = 64;   // main-bus data width (the 64-bit crossbar)
  localparam int unsigned SW = DW / 8;

  typedef logic [AW-1:0] addr_t;
  typedef logic [DW-1:0] data_t;
  typedef logic [SW-1:0] strb_t;

  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;
    data_t wdata;
    strb_t strb;
  } bus_req_t;

  typedef struct packed {
    logic  valid;
    logic  err;
    data_t rdata;
  } bus_rsp_t;

  // Regbus (register interface), 32-bit.
  typedef struct packed {
    logic        valid;
    logic        write;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
  } reg_req_t;

  typedef struct packed {
    logic        ready;
    logic        error;
    logic [31:0] rdata;
  } reg_rsp_t;

  // Cache-line transfer between the LLC and the HyperRAM controller.
  localparam int unsigned LINE_WORDS = 8;               // 64-bit words per line
  localparam int unsigned LINE_BITS  = LINE_WORDS * DW; // 512-bit (64-byte) line
  typedef logic [LINE_BITS-1:0] line_t;

  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;    // byte address of the line (line-aligned)
    line_t wdata;
  } line_req_t;

  typedef struct packed {
    logic  valid;
    line_t rdata;
  } line_rsp_t;

  // Address map.
  localparam addr_t CLINT_BASE = 48'h0000_0200_0000;
  localparam addr_t REGS_BASE  = 48'h0000_0300_0000;   // Regbus peripherals
  localparam addr_t REGS_MASK  = 48'hFFFF_FF00_0000;   // 0x0200_0000..0x03FF_FFFF -> regbus
  localparam addr_t SPM_BASE   = 48'h0000_1000_0000;   // LLC scratchpad window (64 KiB)
  localparam addr_t C2C_BASE   = 48'h0000_4000_0000;   // remote chip window (1 GiB)
  localparam addr_t DRAM_BASE  = 48'h0000_8000_0000;   // HyperRAM through the LLC

  // Regbus peripheral windows (4 KiB each) inside 0x0300_0000, index = addr[15:12].
  localparam int unsigned REG_UART = 0;
  localparam int unsigned REG_SPI  = 1;
  localparam int unsigned REG_GPIO = 2;
  localparam int unsigned REG_VGA  = 3;
  localparam int unsigned REG_DMA  = 4;
  localparam int unsigned REG_LLC  = 5;
  localparam int unsigned REG_I2C  = 6;
  localparam int unsigned REG_CLINT = 7;  // CLINT is reached through 0x0200_0000

endpackage
