// tb_gemm_workload: the memory side of a 48x48 double-precision matrix
// multiply (C = A x B) on the SoC at its default parameters.
//
// The application core is not part of the RTL, so the testbench stands in
// for it on the core's bus port and does the floating-point arithmetic
// itself; everything else is the SoC's own hardware:
//   1. the "core" writes A and B to DRAM with a 512-byte row pitch;
//   2. all four LLC ways are switched to scratchpad (64 KiB);
//   3. two 2D DMA jobs pack A and B into the scratchpad (384-byte rows);
//   4. the "core" computes C, loading A's rows and B's elements from the
//      scratchpad (48 x 48 x 48 multiply-adds) and storing C there;
//   5. a 2D DMA job copies C back to DRAM with a 512-byte row pitch;
//   6. the ways are returned to cache mode and C is read back from DRAM
//      and compared with a reference product computed directly from A and B.
// Matrix elements are small multiples of 1/4, so every sum is exact and
// the comparison is bit-exact. The cycle count of each phase is printed.
module tb_gemm_workload;
  import basilisk_pkg::*;

  localparam int N = 48;
  localparam addr_t A_DRAM = DRAM_BASE + 48'h10_0000, B_DRAM = DRAM_BASE + 48'h12_0000,
                    C_DRAM = DRAM_BASE + 48'h14_0000;
  localparam addr_t A_SPM = SPM_BASE, B_SPM = SPM_BASE + N * N * 8, C_SPM = SPM_BASE + 2 * N * N * 8;
  localparam logic [31:0] DMA = 32'h0300_4000, LLCC = 32'h0300_5000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  bus_req_t core_req; bus_rsp_t core_rsp; logic core_req_ready;
  bus_rsp_t dbg_rsp; logic dbg_req_ready;
  logic [1:0] hb_cs_n; logic hb_ck_en; logic [15:0] hb_dq_o, dq0, dq1; logic [1:0] hb_rwds; logic v0, v1;
  logic c2c_valid; logic [0:0] c2c_data;

  basilisk_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .rtc_i(1'b0),
    .core_req_i(core_req), .core_req_ready_o(core_req_ready), .core_rsp_o(core_rsp), .core_rsp_ready_i(1'b1),
    .core_mtip_o(), .core_msip_o(),
    .dbg_req_i('0), .dbg_req_ready_o(dbg_req_ready), .dbg_rsp_o(dbg_rsp), .dbg_rsp_ready_i(1'b1),
    .irq_o(),
    .uart_tx_o(), .uart_rx_i(1'b1),
    .spi_sck_o(), .spi_csb_o(), .spi_sd_o(), .spi_sd_oe_o(), .spi_sd_i(4'h0),
    .i2c_scl_oe_o(), .i2c_scl_i(1'b1), .i2c_sda_oe_o(), .i2c_sda_i(1'b1),
    .usb_dp_i(4'h0), .usb_dm_i(4'h0), .usb_oe_i(4'h0), .usb_dp_o(), .usb_dm_o(),
    .gpio_o(), .gpio_oe_o(), .gpio_i(8'h0),
    .vga_hsync_o(), .vga_vsync_o(), .vga_red_o(), .vga_green_o(), .vga_blue_o(),
    .hb_cs_no(hb_cs_n), .hb_ck_en_o(hb_ck_en), .hb_dq_o(hb_dq_o), .hb_dq_oe_o(),
    .hb_rwds_o(hb_rwds), .hb_rwds_oe_o(), .hb_dq_i(v0 ? dq0 : dq1), .hb_dq_valid_i(v0 || v1),
    .hb_rst_no(),
    .c2c_tx_valid_o(c2c_valid), .c2c_tx_data_o(c2c_data), .c2c_rx_valid_i(1'b0), .c2c_rx_data_i(1'b0)
  );

  hyperram_model #(.LATENCY(6), .CHIP(0)) i_ram0 (.clk_i(clk), .cs_ni(hb_cs_n[0]), .ck_en_i(hb_ck_en),
    .dq_i(hb_dq_o), .rwds_i(hb_rwds), .dq_o(dq0), .dq_valid_o(v0));
  hyperram_model #(.LATENCY(6), .CHIP(1)) i_ram1 (.clk_i(clk), .cs_ni(hb_cs_n[1]), .ck_en_i(hb_ck_en),
    .dq_i(hb_dq_o), .rwds_i(hb_rwds), .dq_o(dq1), .dq_valid_o(v1));

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endfunction

  // One access on the core's port (same protocol as the core's adapter).
  task automatic access(input bit we, input addr_t a, input data_t d, output data_t r, output bit err);
    @(negedge clk);
    core_req = '{valid: 1'b1, we: we, addr: a, wdata: d, strb: '1};
    #1;
    while (!core_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    core_req = '0;
    #1;
    while (!core_rsp.valid) begin @(negedge clk); #1; end
    r = core_rsp.rdata; err = core_rsp.err;
  endtask
  task automatic st(input addr_t a, input data_t d);
    data_t r; bit e;
    access(1, a, d, r, e); check(!e, $sformatf("store error at %h", a));
  endtask
  task automatic ld(input addr_t a, output data_t r);
    bit e;
    access(0, a, 0, r, e); check(!e, $sformatf("load error at %h", a));
  endtask
  task automatic reg_wr(input logic [31:0] a, input logic [31:0] d);
    data_t r; bit e;
    access(1, AW'(a), {d, d}, r, e); check(!e, "register write");
  endtask
  task automatic reg_rd(input logic [31:0] a, output logic [31:0] d);
    data_t r; bit e;
    access(0, AW'(a), 0, r, e); d = r[31:0]; check(!e, "register read");
  endtask
  task automatic dma_2d(input addr_t s, input addr_t d, input int len, input int ss, input int ds, input int reps);
    logic [31:0] stat;
    reg_wr(DMA + 8'h00, s[31:0]); reg_wr(DMA + 8'h04, 32'(s[AW-1:32]));
    reg_wr(DMA + 8'h08, d[31:0]); reg_wr(DMA + 8'h0C, 32'(d[AW-1:32]));
    reg_wr(DMA + 8'h10, len); reg_wr(DMA + 8'h14, ss); reg_wr(DMA + 8'h18, ds); reg_wr(DMA + 8'h1C, reps);
    reg_wr(DMA + 8'h20, 1);
    do reg_rd(DMA + 8'h24, stat); while (stat[0]);
    check(stat[1] && !stat[2], $sformatf("DMA status %h", stat));
  endtask
  task automatic set_spm(input logic [3:0] ways);
    logic [31:0] stat;
    reg_wr(LLCC, 32'(ways));
    do reg_rd(LLCC + 4, stat); while (stat[0]);
  endtask

  real a [N][N], b [N][N], c_ref [N][N];

  task automatic run();
    data_t r; int t0, t_fill, t_in, t_mul, t_out;
    real arow [N], acc;
    core_req = '0;
    repeat (5) @(posedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      a[i][j] = real'($signed($urandom_range(0, 16)) - 8) / 4.0;
      b[i][j] = real'($signed($urandom_range(0, 16)) - 8) / 4.0;
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      c_ref[i][j] = 0.0;
      for (int k = 0; k < N; k++) c_ref[i][j] += a[i][k] * b[k][j];
    end

    // 1. matrices into DRAM, 512-byte row pitch
    t0 = cyc;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      st(A_DRAM + addr_t'(i * 512 + j * 8), $realtobits(a[i][j]));
      st(B_DRAM + addr_t'(i * 512 + j * 8), $realtobits(b[i][j]));
    end
    t_fill = cyc - t0;

    // 2./3. whole LLC as scratchpad, pack A and B into it
    t0 = cyc;
    set_spm(4'b1111);
    dma_2d(A_DRAM, A_SPM, N * 8, 512, N * 8, N);
    dma_2d(B_DRAM, B_SPM, N * 8, 512, N * 8, N);
    t_in = cyc - t0;

    // 4. C = A x B out of the scratchpad
    t0 = cyc;
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < N; k++) begin ld(A_SPM + addr_t'((i * N + k) * 8), r); arow[k] = $bitstoreal(r); end
      for (int j = 0; j < N; j++) begin
        acc = 0.0;
        for (int k = 0; k < N; k++) begin ld(B_SPM + addr_t'((k * N + j) * 8), r); acc += arow[k] * $bitstoreal(r); end
        st(C_SPM + addr_t'((i * N + j) * 8), $realtobits(acc));
      end
    end
    t_mul = cyc - t0;

    // 5./6. C back to DRAM, caches on, check
    t0 = cyc;
    dma_2d(C_SPM, C_DRAM, N * 8, N * 8, 512, N);
    set_spm(4'b0000);
    t_out = cyc - t0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      ld(C_DRAM + addr_t'(i * 512 + j * 8), r);
      check($bitstoreal(r) == c_ref[i][j], $sformatf("C[%0d][%0d] = %f exp %f", i, j, $bitstoreal(r), c_ref[i][j]));
    end
    $display("GEMM %0dx%0d FP64: fill %0d cycles, DMA in %0d, multiply %0d (%0d loads/stores), DMA out %0d",
             N, N, t_fill, t_in, t_mul, N * N + N * N * N + N * N, t_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run();

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
