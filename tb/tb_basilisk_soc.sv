// tb_basilisk_soc: end-to-end test of the SoC at its full-size defaults.
//
// The testbench plays the parts that are outside the RTL: it drives the
// core's and the debug module's bus ports with software-like access
// sequences, and provides two HyperRAM chip models, a loopback wire on the
// UART and on the chip-to-chip link (the chip talks to itself: accesses
// to the C2C window come back as remote accesses to its own DRAM), an SPI
// device, an I2C device, USB host signals and GPIO pad levels.
//
// Mechanisms exercised and counted (printed at the end):
//   error responses (unmapped main-bus address, unmapped Regbus window,
//   SPM access to a caching way), LLC hits, misses, dirty write-backs on
//   eviction, flush write-backs on switching a way to SPM, SPM accesses,
//   bypass accesses with all ways in SPM, a 2D DMA copy into and out of the
//   SPM, C2C remote reads/writes, UART bytes over the loopback, SPI and I2C
//   bytes, GPIO/USB pad sharing in both modes, CLINT timer and software
//   interrupts, and VGA frames with pixels checked against the frame buffer
//   while other traffic runs. Core and debug port run concurrently during
//   the DRAM test. All read data are checked against a scoreboard.
module tb_basilisk_soc;
  import basilisk_pkg::*;

  logic clk = 0, rst_n = 0, rtc = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  always begin repeat (8) @(posedge clk); rtc = ~rtc; end

  // ---------------- DUT ----------------
  bus_req_t core_req, dbg_req;
  bus_rsp_t core_rsp, dbg_rsp;
  logic core_req_ready, dbg_req_ready, mtip, msip;
  logic [1:0] irq;
  logic uart_tx;
  logic spi_sck; logic [1:0] spi_csb; logic [3:0] spi_sdo, spi_sdoe, spi_sdi;
  logic scl_oe, sda_oe; logic dev_pull = 0;
  wire scl = !scl_oe;
  wire sda = !(sda_oe || dev_pull);
  logic [3:0] usb_dp, usb_dm, usb_oe, usb_dp_o, usb_dm_o;
  logic [7:0] gpio_o, gpio_oe, gpio_i;
  logic hsync, vsync; logic [4:0] red, blue; logic [5:0] green;
  logic [1:0] hb_cs_n; logic hb_ck_en, hb_dq_oe, hb_rwds_oe, hb_rst_n;
  logic [15:0] hb_dq_o, hb_dq_i, dq0, dq1; logic [1:0] hb_rwds; logic v0, v1;
  logic c2c_valid; logic [0:0] c2c_data;

  basilisk_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .rtc_i(rtc),
    .core_req_i(core_req), .core_req_ready_o(core_req_ready), .core_rsp_o(core_rsp), .core_rsp_ready_i(1'b1),
    .core_mtip_o(mtip), .core_msip_o(msip),
    .dbg_req_i(dbg_req), .dbg_req_ready_o(dbg_req_ready), .dbg_rsp_o(dbg_rsp), .dbg_rsp_ready_i(1'b1),
    .irq_o(irq),
    .uart_tx_o(uart_tx), .uart_rx_i(uart_tx),
    .spi_sck_o(spi_sck), .spi_csb_o(spi_csb), .spi_sd_o(spi_sdo), .spi_sd_oe_o(spi_sdoe), .spi_sd_i(spi_sdi),
    .i2c_scl_oe_o(scl_oe), .i2c_scl_i(scl), .i2c_sda_oe_o(sda_oe), .i2c_sda_i(sda),
    .usb_dp_i(usb_dp), .usb_dm_i(usb_dm), .usb_oe_i(usb_oe), .usb_dp_o(usb_dp_o), .usb_dm_o(usb_dm_o),
    .gpio_o(gpio_o), .gpio_oe_o(gpio_oe), .gpio_i(gpio_i),
    .vga_hsync_o(hsync), .vga_vsync_o(vsync), .vga_red_o(red), .vga_green_o(green), .vga_blue_o(blue),
    .hb_cs_no(hb_cs_n), .hb_ck_en_o(hb_ck_en), .hb_dq_o(hb_dq_o), .hb_dq_oe_o(hb_dq_oe),
    .hb_rwds_o(hb_rwds), .hb_rwds_oe_o(hb_rwds_oe), .hb_dq_i(hb_dq_i), .hb_dq_valid_i(v0 || v1),
    .hb_rst_no(hb_rst_n),
    .c2c_tx_valid_o(c2c_valid), .c2c_tx_data_o(c2c_data), .c2c_rx_valid_i(c2c_valid), .c2c_rx_data_i(c2c_data)
  );

  hyperram_model #(.LATENCY(6), .CHIP(0), .GAPS(1'b0)) i_ram0 (.clk_i(clk), .cs_ni(hb_cs_n[0]), .ck_en_i(hb_ck_en),
    .dq_i(hb_dq_o), .rwds_i(hb_rwds), .dq_o(dq0), .dq_valid_o(v0));
  hyperram_model #(.LATENCY(6), .CHIP(1), .GAPS(1'b1)) i_ram1 (.clk_i(clk), .cs_ni(hb_cs_n[1]), .ck_en_i(hb_ck_en),
    .dq_i(hb_dq_o), .rwds_i(hb_rwds), .dq_o(dq1), .dq_valid_o(v1));
  assign hb_dq_i = v0 ? dq0 : dq1;

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endfunction

  // ---------------- mechanism counters ----------------
  int n_err = 0, n_hit = 0, n_miss = 0, n_evict_wb = 0, n_flush_wb = 0, n_spm = 0, n_bypass = 0;
  int n_dma = 0, n_c2c = 0, n_c2c_pkts = 0, n_uart = 0, n_spi = 0, n_i2c = 0, n_gpio = 0, n_usb = 0;
  int n_mtip = 0, n_msip = 0, n_frames = 0, n_pixels = 0, n_dbg = 0, n_line_rd = 0, n_line_wr = 0;
  bit in_flush = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.line_req.valid && dut.line_req_ready) begin
      if (dut.line_req.we) begin
        if (in_flush) n_flush_wb++; else n_line_wr++;
      end else n_line_rd++;
    end
  end
  logic c2c_valid_d = 0;
  always @(posedge clk) begin c2c_valid_d <= c2c_valid; if (c2c_valid && !c2c_valid_d) n_c2c_pkts++; end

  // ---------------- bus master tasks ----------------
  // One access on the core (port 0) or debug (port 1) master port. The
  // request is set up after a falling edge and held until accepted; the
  // response is taken in the cycle it is valid. lat: request to response.
  task automatic access(input int port, input bit we, input addr_t a, input data_t d, input strb_t s,
                        output data_t r, output bit err, output int lat);
    int t0;
    @(negedge clk);
    if (port == 0) core_req = '{valid: 1'b1, we: we, addr: a, wdata: d, strb: s};
    else           dbg_req  = '{valid: 1'b1, we: we, addr: a, wdata: d, strb: s};
    t0 = cyc;
    #1;
    while (!(port == 0 ? core_req_ready : dbg_req_ready)) begin @(negedge clk); #1; end
    @(negedge clk);
    if (port == 0) core_req = '0; else dbg_req = '0;
    #1;
    while (!(port == 0 ? core_rsp.valid : dbg_rsp.valid)) begin @(negedge clk); #1; end
    if (port == 0) begin r = core_rsp.rdata; err = core_rsp.err; end
    else           begin r = dbg_rsp.rdata;  err = dbg_rsp.err;  end
    lat = cyc - t0;
  endtask

  task automatic wr64(input addr_t a, input data_t d);
    data_t r; bit e; int l;
    access(0, 1, a, d, '1, r, e, l);
    check(!e, $sformatf("write error at %h", a));
  endtask
  task automatic rd64(input addr_t a, output data_t r);
    bit e; int l;
    access(0, 0, a, 0, '1, r, e, l);
    check(!e, $sformatf("read error at %h", a));
  endtask
  task automatic reg_wr(input logic [31:0] a, input logic [31:0] d);
    data_t r; bit e; int l;
    access(0, 1, AW'(a), {d, d}, a[2] ? 8'hF0 : 8'h0F, r, e, l);
    check(!e, $sformatf("register write error at %h", a));
  endtask
  task automatic reg_rd(input logic [31:0] a, output logic [31:0] d);
    data_t r; bit e; int l;
    access(0, 0, AW'(a), 0, '1, r, e, l);
    check(!e, $sformatf("register read error at %h", a));
    check(r[31:0] == r[63:32], "register read data not in both halves");
    d = r[31:0];
  endtask

  localparam logic [31:0] UART = 32'h0300_0000, SPI = 32'h0300_1000, GPIO = 32'h0300_2000,
                          VGA = 32'h0300_3000, DMA = 32'h0300_4000, LLCC = 32'h0300_5000,
                          I2C = 32'h0300_6000, CLINT = 32'h0200_0000;
  localparam int unsigned WAY_BYTES = 65536 / 4;

  // ---------------- DRAM scoreboard ----------------
  data_t sb [addr_t];
  function automatic data_t merge(input data_t old, input data_t d, input strb_t s);
    for (int b = 0; b < 8; b++) if (s[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction
  // Addresses that fall into 4 sets with 8 tags each (twice the ways),
  // on both HyperRAM chips, so that lines are evicted.
  function automatic addr_t dram_addr(input int region);
    int tags [8] = '{0, 1, 2, 3, 600, 601, 602, 603};
    return DRAM_BASE + addr_t'(tags[$urandom_range(0, 7)]) * WAY_BYTES
         + addr_t'(region * 4 + $urandom_range(0, 3)) * 64 + addr_t'($urandom_range(0, 7)) * 8;
  endfunction

  // Random DRAM traffic on one port; each port uses its own sets (region).
  task automatic dram_traffic(input int port, input int n);
    for (int i = 0; i < n; i++) begin
      addr_t a; data_t d, r; strb_t s; bit e; int l;
      a = dram_addr(port);
      if (!sb.exists(a) || $urandom_range(0, 1) == 0) begin
        d = {$urandom, $urandom};
        s = ($urandom_range(0, 3) == 0 && sb.exists(a)) ? 8'($urandom) : 8'hFF;
        access(port, 1, a, d, s, r, e, l);
        sb[a] = merge(sb.exists(a) ? sb[a] : 64'h0, d, s);
      end else begin
        access(port, 0, a, 0, '1, r, e, l);
        check(r == sb[a], $sformatf("port %0d read %h: %h exp %h", port, a, r, sb[a]));
      end
      check(!e, "DRAM access error");
      if (l <= 6) n_hit++; else n_miss++;
      if (port == 1) n_dbg++;
    end
  endtask

  task automatic check_all_dram();
    foreach (sb[a]) begin
      data_t r;
      rd64(a, r);
      check(r == sb[a], $sformatf("DRAM %h: %h exp %h", a, r, sb[a]));
    end
  endtask

  task automatic set_spm(input logic [3:0] ways);
    logic [31:0] st;
    in_flush = 1;
    reg_wr(LLCC + 0, 32'(ways));
    do reg_rd(LLCC + 4, st); while (st[0]);
    in_flush = 0;
    reg_rd(LLCC + 0, st);
    check(st[3:0] == ways, $sformatf("SPM_EN reads %h", st));
  endtask

  // ---------------- SPI device ----------------
  logic [7:0] spi_dev_tx, spi_dev_rx; int spi_bit = 0;
  assign spi_sdi = {2'b00, spi_dev_tx[7 - spi_bit], 1'b0};
  always @(posedge spi_sck) spi_dev_rx = {spi_dev_rx[6:0], spi_sdo[0]};
  always @(negedge spi_sck) spi_bit = (spi_bit + 1) % 8;

  // ---------------- I2C device at address 0x50 ----------------
  logic [7:0] dmem [8]; int widx = 0, ridx = 0;
  int bitn = 0, byten = 0;
  bit i2c_rw = 0, i2c_sel = 0, master_nack; logic [7:0] sh, rdb;
  always @(negedge sda) if (scl && rst_n) begin bitn = 0; byten = 0; dev_pull = 0; end
  always @(posedge sda) if (scl && rst_n) begin i2c_sel = 0; dev_pull = 0; end
  always @(posedge scl) begin
    bitn++;
    if (bitn <= 8) sh = {sh[6:0], sda}; else master_nack = sda;
  end
  always @(negedge scl) begin
    if (bitn == 8) begin
      if (byten == 0) begin i2c_rw = sh[0]; i2c_sel = (sh[7:1] == 7'h50); end
      dev_pull = i2c_sel && (byten == 0 || !i2c_rw);
      if (i2c_sel && byten > 0 && !i2c_rw) begin dmem[widx % 8] = sh; widx++; end
    end else if (bitn == 9) begin
      byten++; bitn = 0; dev_pull = 0;
      if (i2c_sel && i2c_rw && !(byten > 1 && master_nack)) begin rdb = dmem[ridx % 8]; ridx++; dev_pull = !rdb[7]; end
    end else if (i2c_sel && i2c_rw && byten > 0 && bitn >= 1 && bitn <= 7) dev_pull = !rdb[7 - bitn];
  end
  task automatic i2c_cmd(input logic [7:0] b, input bit start, input bit stop, input bit rd_, input bit nack,
                         output logic [31:0] st);
    reg_wr(I2C + 4, {20'h0, nack, rd_, stop, start, b});
    do reg_rd(I2C + 8, st); while (st[0]);
  endtask

  // ---------------- VGA monitor ----------------
  // Each displayed pixel that is not an underflow (black, counted by the
  // controller) must be the next pixel of the frame buffer. The first 64
  // frame-buffer words are known to the testbench.
  localparam addr_t FB = DRAM_BASE + 48'h40_0000;
  data_t fb [64];
  int pix_k = 0; logic [31:0] last_uf = 0; int hs_count = 0; bit vga_on = 0, seen_vs = 0;
  logic vsync_d = 1, hsync_d = 1;
  always @(negedge clk) if (rst_n) begin
    if (dut.i_vga.v_q == 10'(768)) pix_k = 0;
    if (dut.i_vga.de_o) begin
      if (dut.i_vga.underflow_q != last_uf) begin
        check({red, green, blue} == 16'h0, "underflow pixel not black");
      end else begin
        if (pix_k < 256) begin
          check({red, green, blue} == fb[pix_k / 4][16 * (pix_k % 4) +: 16],
                $sformatf("VGA pixel %0d: %h exp %h", pix_k, {red, green, blue}, fb[pix_k / 4][16 * (pix_k % 4) +: 16]));
          n_pixels++;
        end
        pix_k++;
      end
    end
    last_uf = dut.i_vga.underflow_q;
    if (!hsync && hsync_d) hs_count++;
    if (!vsync && vsync_d) begin
      if (vga_on) begin
        n_frames++;
        if (seen_vs) check(hs_count == 806, $sformatf("%0d lines in frame", hs_count));
      end
      hs_count = 0; seen_vs = 1;
    end
    hsync_d = hsync; vsync_d = vsync;
  end

  // ---------------- test sequence ----------------
  // (an automatic task, so that block-local variables are initialised
  // every time their block is entered)
  task automatic run_test();
    data_t r; bit e; int l; logic [31:0] st, t0, t1;
    core_req = '0; dbg_req = '0; usb_dp = 0; usb_dm = 0; usb_oe = 0; gpio_i = 0; spi_dev_tx = 0;
    repeat (5) @(posedge clk); rst_n = 1;
    check(hb_rst_n && hb_cs_n == 2'b11, "HyperBus idle after reset");

    // --- error responses ---
    access(0, 0, 48'h2000_0000, 0, '1, r, e, l); check(e, "unmapped main-bus address"); if (e) n_err++;
    access(0, 0, 48'h0300_7000, 0, '1, r, e, l); check(e, "unmapped Regbus window");    if (e) n_err++;
    access(0, 0, SPM_BASE, 0, '1, r, e, l);      check(e, "SPM access to caching way"); if (e) n_err++;

    // --- DRAM through the LLC, core and debug port at the same time ---
    fork
      dram_traffic(0, 400);
      dram_traffic(1, 200);
    join
    check_all_dram();
    n_evict_wb = n_line_wr;

    // --- SPM: switch way 3 to scratchpad (flushes its dirty lines) ---
    set_spm(4'b1000);
    check_all_dram();
    begin
      data_t spm [64];
      for (int i = 0; i < 64; i++) begin
        spm[i] = {$urandom, $urandom};
        wr64(SPM_BASE + 3 * WAY_BYTES + addr_t'(i) * 8, spm[i]); n_spm++;
      end
      for (int i = 0; i < 64; i++) begin
        access(0, 0, SPM_BASE + 3 * WAY_BYTES + addr_t'(i) * 8, 0, '1, r, e, l); n_spm++;
        check(!e && r == spm[i], $sformatf("SPM word %0d: %h exp %h", i, r, spm[i]));
        check(l <= 6, $sformatf("SPM latency %0d", l));
      end
    end
    access(0, 0, SPM_BASE + 2 * WAY_BYTES, 0, '1, r, e, l); check(e, "SPM access to way still caching"); if (e) n_err++;

    // --- 2D DMA: 4 rows x 32 bytes, DRAM (row stride 256) -> SPM (row stride 64) -> DRAM ---
    begin
      addr_t src = DRAM_BASE + 48'h20_0000, mid = SPM_BASE + 3 * WAY_BYTES + 48'h1000, dst = DRAM_BASE + 48'h30_0000;
      data_t blk [4][4];
      for (int row = 0; row < 4; row++) for (int w = 0; w < 4; w++) begin
        blk[row][w] = {$urandom, $urandom};
        wr64(src + addr_t'(row) * 256 + addr_t'(w) * 8, blk[row][w]);
      end
      for (int pass = 0; pass < 2; pass++) begin
        addr_t s_ = pass == 0 ? src : mid, d_ = pass == 0 ? mid : dst;
        reg_wr(DMA + 8'h00, s_[31:0]); reg_wr(DMA + 8'h04, 32'(s_[AW-1:32]));
        reg_wr(DMA + 8'h08, d_[31:0]); reg_wr(DMA + 8'h0C, 32'(d_[AW-1:32]));
        reg_wr(DMA + 8'h10, 32); reg_wr(DMA + 8'h14, pass == 0 ? 256 : 64);
        reg_wr(DMA + 8'h18, pass == 0 ? 64 : 128); reg_wr(DMA + 8'h1C, 4);
        reg_wr(DMA + 8'h20, 1);
        do reg_rd(DMA + 8'h24, st); while (st[0]);
        check(st[1] && !st[2] && irq[1], $sformatf("DMA status %h irq %b", st, irq));
        n_dma++;
      end
      for (int row = 0; row < 4; row++) for (int w = 0; w < 4; w++) begin
        rd64(mid + addr_t'(row) * 64 + addr_t'(w) * 8, r);
        check(r == blk[row][w], $sformatf("DMA SPM row %0d word %0d", row, w));
        rd64(dst + addr_t'(row) * 128 + addr_t'(w) * 8, r);
        check(r == blk[row][w], $sformatf("DMA DRAM row %0d word %0d", row, w));
        sb[dst + addr_t'(row) * 128 + addr_t'(w) * 8] = blk[row][w];
        sb[src + addr_t'(row) * 256 + addr_t'(w) * 8] = blk[row][w];
      end
    end

    // --- chip-to-chip link in loopback: the C2C window reaches this chip's DRAM ---
    for (int i = 0; i < 6; i++) begin
      addr_t a = DRAM_BASE + 48'h10_0000 + addr_t'(i) * 8; data_t d = {$urandom, $urandom};
      access(0, 1, a - DRAM_BASE + C2C_BASE, d, '1, r, e, l);   // remote write
      check(!e, "C2C write error"); n_c2c++;
      rd64(a, r); check(r == d, "C2C write did not reach memory");
      access(0, 0, a - DRAM_BASE + C2C_BASE, 0, '1, r, e, l);   // remote read
      check(!e && r == d, $sformatf("C2C read %h exp %h", r, d)); n_c2c++;
      check(l >= 122 + 66, $sformatf("C2C round trip only %0d cycles", l));
      sb[a] = d;
    end

    // --- bypass: all ways in SPM, DRAM accesses go straight to HyperRAM ---
    set_spm(4'b1111);
    begin
      int k = 0;
      foreach (sb[a]) begin
        if (k < 24) begin
          data_t d = {$urandom, $urandom};
          rd64(a, r); check(r == sb[a], $sformatf("bypass read %h", a));
          wr64(a, d); sb[a] = d; n_bypass += 2;
        end
        k++;
      end
    end
    set_spm(4'b0000);
    check_all_dram();

    // --- UART loopback ---
    reg_wr(UART + 8, 16);
    for (int i = 0; i < 4; i++) begin
      logic [7:0] b = 8'($urandom);
      reg_wr(UART + 0, 32'(b));
      do reg_rd(UART + 4, st); while (!st[1]);
      check(irq[0], "UART interrupt");
      reg_rd(UART + 0, st);
      check(st[7:0] == b, $sformatf("UART got %h exp %h", st[7:0], b)); n_uart++;
      check(!irq[0], "UART interrupt not cleared");
    end

    // --- SPI ---
    reg_wr(SPI + 0, {16'h0, 8'd2, 8'h01});
    check(spi_csb == 2'b10, "SPI chip select");
    for (int i = 0; i < 4; i++) begin
      logic [7:0] b = 8'($urandom);
      spi_dev_tx = 8'($urandom); spi_bit = 0;
      reg_wr(SPI + 4, 32'(b));
      do reg_rd(SPI + 8, st); while (st[0]);
      reg_rd(SPI + 4, st);
      check(spi_dev_rx == b && st[7:0] == spi_dev_tx, $sformatf("SPI %h/%h exp %h/%h", spi_dev_rx, st[7:0], b, spi_dev_tx));
      n_spi++;
    end
    reg_wr(SPI + 0, 0);

    // --- I2C: write two bytes to device 0x50, read them back ---
    reg_wr(I2C + 0, 3);
    begin
      logic [7:0] wb [2];
      wb[0] = 8'($urandom); wb[1] = 8'($urandom);
      i2c_cmd(8'hA0, 1, 0, 0, 0, st); check(!st[1], "I2C address NACK");
      for (int k = 0; k < 2; k++) begin i2c_cmd(wb[k], 0, k == 1, 0, 0, st); check(!st[1], "I2C data NACK"); n_i2c++; end
      i2c_cmd(8'hA1, 1, 0, 0, 0, st);
      for (int k = 0; k < 2; k++) begin
        i2c_cmd(8'h00, 0, k == 1, 1, k == 1, st);
        reg_rd(I2C + 12, st); check(st[7:0] == wb[k], $sformatf("I2C read %h exp %h", st[7:0], wb[k])); n_i2c++;
      end
    end

    // --- GPIO / USB pad sharing ---
    for (int i = 0; i < 8; i++) begin
      usb_dp = 4'($urandom); usb_dm = 4'($urandom); usb_oe = 4'($urandom); gpio_i = 8'($urandom);
      #1;
      for (int k = 0; k < 4; k++) begin
        check(gpio_o[2*k] == usb_dp[k] && gpio_o[2*k+1] == usb_dm[k] && gpio_oe[2*k] == usb_oe[k], "USB pads");
        check(usb_dp_o[k] == gpio_i[2*k] && usb_dm_o[k] == gpio_i[2*k+1], "USB receive");
      end
      n_usb++;
    end
    reg_wr(GPIO + 12, 4'b1111);
    for (int i = 0; i < 8; i++) begin
      logic [7:0] o = 8'($urandom), oe = 8'($urandom);
      reg_wr(GPIO + 0, 32'(o)); reg_wr(GPIO + 4, 32'(oe)); gpio_i = 8'($urandom);
      repeat (3) @(posedge clk);
      reg_rd(GPIO + 8, st);
      check(gpio_o == o && gpio_oe == oe && st[7:0] == gpio_i, "GPIO mode");
      n_gpio++;
    end
    reg_wr(GPIO + 12, 0);

    // --- CLINT ---
    reg_rd(CLINT + 32'hBFF8, t0);
    repeat (100) @(posedge clk);
    reg_rd(CLINT + 32'hBFF8, t1);
    check(t1 - t0 >= 5 && t1 - t0 <= 8, $sformatf("mtime advanced by %0d", t1 - t0));
    check(!mtip, "timer interrupt before compare");
    reg_wr(CLINT + 32'h4004, 0); reg_wr(CLINT + 32'h4000, t1 + 10);
    check(!mtip, "timer interrupt too early");
    begin
      int t = cyc;
      while (!mtip && cyc - t < 1000) @(posedge clk);
    end
    check(mtip, "timer interrupt"); if (mtip) n_mtip++;
    reg_wr(CLINT + 32'h4004, 32'hFFFF_FFFF);
    check(!mtip, "timer interrupt not cleared");
    reg_wr(CLINT + 0, 1); check(msip, "software interrupt"); if (msip) n_msip++;
    reg_wr(CLINT + 0, 0); check(!msip, "software interrupt not cleared");

    // --- VGA: XGA frames from DRAM while the core keeps using memory ---
    for (int i = 0; i < 64; i++) begin fb[i] = {$urandom, $urandom}; wr64(FB + addr_t'(i) * 8, fb[i]); end
    reg_wr(VGA + 4, FB[31:0]); reg_wr(VGA + 8, 32'(FB[AW-1:32]));
    reg_wr(VGA + 0, 1);
    vga_on = 1;
    fork
      begin
        while (n_frames < 2) begin
          dram_traffic(0, 1);
          repeat (500) @(posedge clk);
        end
      end
    join
    reg_wr(VGA + 0, 0);
    vga_on = 0;
    check(n_pixels >= 256, $sformatf("only %0d frame-buffer pixels checked", n_pixels));
    check_all_dram();

    n_evict_wb = n_line_wr;
    $display("mechanisms: err=%0d hits=%0d misses=%0d line_reads=%0d line_writes=%0d flush_wb=%0d spm=%0d bypass=%0d",
             n_err, n_hit, n_miss, n_line_rd, n_line_wr, n_flush_wb, n_spm, n_bypass);
    $display("mechanisms: dbg=%0d dma=%0d c2c=%0d c2c_pkts=%0d uart=%0d spi=%0d i2c=%0d usb=%0d gpio=%0d mtip=%0d msip=%0d frames=%0d pixels=%0d cycles=%0d",
             n_dbg, n_dma, n_c2c, n_c2c_pkts, n_uart, n_spi, n_i2c, n_usb, n_gpio, n_mtip, n_msip, n_frames, n_pixels, cyc);
    check(n_hit > 0 && n_miss > 0 && n_line_wr > 0 && n_flush_wb > 0 && n_spm > 0 && n_bypass > 0, "LLC mechanisms seen");
    check(n_dma == 2 && n_c2c == 12 && n_c2c_pkts >= 24 && n_uart == 4 && n_spi == 4 && n_i2c == 4, "peripheral mechanisms seen");
    check(n_mtip == 1 && n_msip == 1 && n_frames >= 2 && n_err == 4 && n_dbg == 200, "other mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run_test();

  initial begin
    repeat (6000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
