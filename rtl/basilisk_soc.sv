// basilisk_soc: top level of the SoC around its 64-bit application core.
//
// Structure (two-stage interconnect):
//   main-bus crossbar, 5 masters x 3 slaves
//     masters: 0 core (port), 1 debug module (port), 2 DMA, 3 VGA fetch,
//              4 chip-to-chip link (accesses arriving from the other chip)
//     slaves:  0 Regbus bridge   0x0200_0000 - 0x03FF_FFFF
//              1 LLC             0x1000_0000 (scratchpad, 64 KiB)
//                                0x8000_0000 and up (DRAM, cached)
//              2 chip-to-chip    0x4000_0000 - 0x7FFF_FFFF (other chip's
//                                DRAM from 0x8000_0000 on)
//   Regbus demultiplexer behind the bridge, 4 KiB per peripheral:
//     0x0300_0000 UART      0x0300_1000 SPI       0x0300_2000 GPIO/USB mux
//     0x0300_3000 VGA       0x0300_4000 DMA       0x0300_5000 LLC config
//     0x0300_6000 I2C       0x0200_0000 CLINT (64 KiB)
//   LLC line port -> HyperRAM controller -> HyperBus pins (two chips).
//
// The core (with its L1 caches), the debug module and the USB host
// controller are not part of this RTL: the core's and the debug module's
// bus master ports, the core's interrupt lines and the USB ports' D+/D-
// signals are top-level ports. Peripheral interrupts (UART, DMA) are brought
// out as well, for a platform interrupt controller outside this RTL. All
// ports are the core side of the IO pads.
//
// Timing: single clock domain (clk_i), asynchronous active-low reset.
// Which blocks exist and how they connect follows the SoC's block diagram
// and description; the address map, the bus protocol and the widths of the
// simplified buses are this design's.
module basilisk_soc
  import basilisk_pkg::*;
#(
  parameter int unsigned LLC_WAYS       = 4,
  parameter int unsigned LLC_SIZE_BYTES = 65536,
  parameter int unsigned HB_LATENCY     = 6,
  parameter int unsigned VGA_H_ACTIVE   = 1024,
  parameter int unsigned VGA_H_FP       = 24,
  parameter int unsigned VGA_H_SYNC     = 136,
  parameter int unsigned VGA_H_BP       = 160,
  parameter int unsigned VGA_V_ACTIVE   = 768,
  parameter int unsigned VGA_V_FP       = 3,
  parameter int unsigned VGA_V_SYNC     = 6,
  parameter int unsigned VGA_V_BP       = 29,
  parameter int unsigned C2C_LANES      = 1,
  // The C2C window 0x4000_0000.. reaches the other chip's DRAM.
  parameter addr_t       C2C_REMOTE_OFFSET = DRAM_BASE
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 rtc_i,
  // core (CVA6) master port and interrupts
  input  bus_req_t             core_req_i,
  output logic                 core_req_ready_o,
  output bus_rsp_t             core_rsp_o,
  input  logic                 core_rsp_ready_i,
  output logic                 core_mtip_o,
  output logic                 core_msip_o,
  // debug module system-bus master port
  input  bus_req_t             dbg_req_i,
  output logic                 dbg_req_ready_o,
  output bus_rsp_t             dbg_rsp_o,
  input  logic                 dbg_rsp_ready_i,
  // peripheral interrupts: [0] UART receive, [1] DMA done
  output logic [1:0]           irq_o,
  // UART
  output logic                 uart_tx_o,
  input  logic                 uart_rx_i,
  // QSPI
  output logic                 spi_sck_o,
  output logic [1:0]           spi_csb_o,
  output logic [3:0]           spi_sd_o,
  output logic [3:0]           spi_sd_oe_o,
  input  logic [3:0]           spi_sd_i,
  // I2C (open drain: *_oe_o pulls low)
  output logic                 i2c_scl_oe_o,
  input  logic                 i2c_scl_i,
  output logic                 i2c_sda_oe_o,
  input  logic                 i2c_sda_i,
  // USB host controller ports (four), shared with the GPIO pads
  input  logic [3:0]           usb_dp_i,
  input  logic [3:0]           usb_dm_i,
  input  logic [3:0]           usb_oe_i,
  output logic [3:0]           usb_dp_o,
  output logic [3:0]           usb_dm_o,
  output logic [7:0]           gpio_o,
  output logic [7:0]           gpio_oe_o,
  input  logic [7:0]           gpio_i,
  // VGA
  output logic                 vga_hsync_o,
  output logic                 vga_vsync_o,
  output logic [4:0]           vga_red_o,
  output logic [5:0]           vga_green_o,
  output logic [4:0]           vga_blue_o,
  // HyperBus (two HyperRAM chips)
  output logic [1:0]           hb_cs_no,
  output logic                 hb_ck_en_o,
  output logic [15:0]          hb_dq_o,
  output logic                 hb_dq_oe_o,
  output logic [1:0]           hb_rwds_o,
  output logic                 hb_rwds_oe_o,
  input  logic [15:0]          hb_dq_i,
  input  logic                 hb_dq_valid_i,
  output logic                 hb_rst_no,
  // chip-to-chip link
  output logic                 c2c_tx_valid_o,
  output logic [C2C_LANES-1:0] c2c_tx_data_o,
  input  logic                 c2c_rx_valid_i,
  input  logic [C2C_LANES-1:0] c2c_rx_data_i
);
  localparam int unsigned NM = 5, NS = 3, NP = 8;
  localparam int unsigned M_CORE = 0, M_DBG = 1, M_DMA = 2, M_VGA = 3, M_C2C = 4;
  localparam int unsigned S_REGS = 0, S_LLC = 1, S_C2C = 2;

  bus_req_t m_req [NM];  logic m_req_ready [NM];
  bus_rsp_t m_rsp [NM];  logic m_rsp_ready [NM];
  bus_req_t s_req [NS];  logic s_req_ready [NS];
  bus_rsp_t s_rsp [NS];  logic s_rsp_ready [NS];

  // ---------------- external masters ----------------
  assign m_req[M_CORE]       = core_req_i;
  assign core_req_ready_o    = m_req_ready[M_CORE];
  assign core_rsp_o          = m_rsp[M_CORE];
  assign m_rsp_ready[M_CORE] = core_rsp_ready_i;
  assign m_req[M_DBG]        = dbg_req_i;
  assign dbg_req_ready_o     = m_req_ready[M_DBG];
  assign dbg_rsp_o           = m_rsp[M_DBG];
  assign m_rsp_ready[M_DBG]  = dbg_rsp_ready_i;

  axi_xbar #(.NM(NM), .NS(NS)) i_xbar (
    .clk_i, .rst_ni,
    .m_req_i(m_req), .m_req_ready_o(m_req_ready), .m_rsp_o(m_rsp), .m_rsp_ready_i(m_rsp_ready),
    .s_req_o(s_req), .s_req_ready_i(s_req_ready), .s_rsp_i(s_rsp), .s_rsp_ready_o(s_rsp_ready)
  );

  // ---------------- Regbus peripherals ----------------
  reg_req_t reg_req;
  reg_rsp_t reg_rsp;
  reg_req_t p_req [NP];
  reg_rsp_t p_rsp [NP];

  regbus_bridge i_bridge (
    .clk_i, .rst_ni,
    .bus_req_i(s_req[S_REGS]), .bus_req_ready_o(s_req_ready[S_REGS]),
    .bus_rsp_o(s_rsp[S_REGS]), .bus_rsp_ready_i(s_rsp_ready[S_REGS]),
    .reg_req_o(reg_req), .reg_rsp_i(reg_rsp)
  );

  regbus_demux #(.NP(NP)) i_demux (.req_i(reg_req), .rsp_o(reg_rsp), .req_o(p_req), .rsp_i(p_rsp));

  logic uart_irq, dma_irq;
  assign irq_o = {dma_irq, uart_irq};

  uart i_uart (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_UART]), .reg_rsp_o(p_rsp[REG_UART]),
    .tx_o(uart_tx_o), .rx_i(uart_rx_i), .irq_o(uart_irq)
  );

  spi_host i_spi (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_SPI]), .reg_rsp_o(p_rsp[REG_SPI]),
    .sck_o(spi_sck_o), .csb_o(spi_csb_o), .sd_o(spi_sd_o), .sd_oe_o(spi_sd_oe_o), .sd_i(spi_sd_i)
  );

  gpio_usb_mux #(.NUM_USB_PORTS(4)) i_gpio (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_GPIO]), .reg_rsp_o(p_rsp[REG_GPIO]),
    .usb_dp_i, .usb_dm_i, .usb_oe_i, .usb_dp_o, .usb_dm_o,
    .pad_o(gpio_o), .pad_oe_o(gpio_oe_o), .pad_i(gpio_i)
  );

  i2c_host i_i2c (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_I2C]), .reg_rsp_o(p_rsp[REG_I2C]),
    .scl_oe_o(i2c_scl_oe_o), .scl_i(i2c_scl_i), .sda_oe_o(i2c_sda_oe_o), .sda_i(i2c_sda_i)
  );

  clint i_clint (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_CLINT]), .reg_rsp_o(p_rsp[REG_CLINT]),
    .rtc_i, .mtip_o(core_mtip_o), .msip_o(core_msip_o)
  );

  vga #(
    .H_ACTIVE(VGA_H_ACTIVE), .H_FP(VGA_H_FP), .H_SYNC(VGA_H_SYNC), .H_BP(VGA_H_BP),
    .V_ACTIVE(VGA_V_ACTIVE), .V_FP(VGA_V_FP), .V_SYNC(VGA_V_SYNC), .V_BP(VGA_V_BP)
  ) i_vga (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_VGA]), .reg_rsp_o(p_rsp[REG_VGA]),
    .bus_req_o(m_req[M_VGA]), .bus_req_ready_i(m_req_ready[M_VGA]),
    .bus_rsp_i(m_rsp[M_VGA]), .bus_rsp_ready_o(m_rsp_ready[M_VGA]),
    .hsync_o(vga_hsync_o), .vsync_o(vga_vsync_o), .de_o(),
    .red_o(vga_red_o), .green_o(vga_green_o), .blue_o(vga_blue_o)
  );

  dma i_dma (
    .clk_i, .rst_ni, .reg_req_i(p_req[REG_DMA]), .reg_rsp_o(p_rsp[REG_DMA]),
    .bus_req_o(m_req[M_DMA]), .bus_req_ready_i(m_req_ready[M_DMA]),
    .bus_rsp_i(m_rsp[M_DMA]), .bus_rsp_ready_o(m_rsp_ready[M_DMA]), .irq_o(dma_irq)
  );

  // ---------------- memory path ----------------
  line_req_t line_req;
  logic      line_req_ready;
  line_rsp_t line_rsp;

  llc #(.WAYS(LLC_WAYS), .SIZE_BYTES(LLC_SIZE_BYTES)) i_llc (
    .clk_i, .rst_ni,
    .bus_req_i(s_req[S_LLC]), .bus_req_ready_o(s_req_ready[S_LLC]),
    .bus_rsp_o(s_rsp[S_LLC]), .bus_rsp_ready_i(s_rsp_ready[S_LLC]),
    .cfg_req_i(p_req[REG_LLC]), .cfg_rsp_o(p_rsp[REG_LLC]),
    .mem_req_o(line_req), .mem_req_ready_i(line_req_ready), .mem_rsp_i(line_rsp)
  );

  hyperbus_ctrl #(.NUM_CHIPS(2), .LATENCY(HB_LATENCY)) i_hyperbus (
    .clk_i, .rst_ni,
    .line_req_i(line_req), .line_req_ready_o(line_req_ready), .line_rsp_o(line_rsp),
    .hb_cs_no, .hb_ck_en_o, .hb_dq_o, .hb_dq_oe_o, .hb_rwds_o, .hb_rwds_oe_o,
    .hb_dq_i, .hb_dq_valid_i, .hb_rst_no
  );

  // ---------------- chip-to-chip link ----------------
  c2c_link #(.LANES(C2C_LANES), .REMOTE_OFFSET(C2C_REMOTE_OFFSET)) i_c2c (
    .clk_i, .rst_ni,
    .slv_req_i(s_req[S_C2C]), .slv_req_ready_o(s_req_ready[S_C2C]),
    .slv_rsp_o(s_rsp[S_C2C]), .slv_rsp_ready_i(s_rsp_ready[S_C2C]),
    .mst_req_o(m_req[M_C2C]), .mst_req_ready_i(m_req_ready[M_C2C]),
    .mst_rsp_i(m_rsp[M_C2C]), .mst_rsp_ready_o(m_rsp_ready[M_C2C]),
    .tx_valid_o(c2c_tx_valid_o), .tx_data_o(c2c_tx_data_o),
    .rx_valid_i(c2c_rx_valid_i), .rx_data_i(c2c_rx_data_i)
  );

endmodule
