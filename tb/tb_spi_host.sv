// tb_spi_host: self-checking test of the SPI host against a device model.
// The device records what it sees on the data lines at each rising clock
// edge and presents its own random byte, changing after falling edges.
// Standard, quad-write and quad-read bytes are transferred with random
// dividers. Checks: the bytes received on each side, chip select levels,
// data-line enables, the number of clock pulses per byte, the clock period
// (2*DIV system clocks) and the busy flag.
module tb_spi_host;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp; logic sck; logic [1:0] csb; logic [3:0] sdo, sdoe, sdi;
  spi_host dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .sck_o(sck), .csb_o(csb),
    .sd_o(sdo), .sd_oe_o(sdoe), .sd_i(sdi));
  int checks = 0, failures = 0;
  // device model
  logic [7:0] dev_tx, dev_rx; int dev_bit, pulses; bit dev_quad;
  always_comb sdi = dev_quad ? dev_tx[7 - 4 * dev_bit -: 4] : {2'b00, dev_tx[7 - dev_bit], 1'b0};
  always @(posedge sck) begin
    dev_rx = dev_quad ? {dev_rx[3:0], sdo} : {dev_rx[6:0], sdo[0]};
    pulses++;
  end
  always @(negedge sck) dev_bit++;
  int period, last_rise, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge sck) begin if (last_rise != 0) period = cyc - last_rise; last_rise = cyc; end
  task automatic rw(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); req = '{valid: 1, write: we, addr: a, wdata: wd, wstrb: 4'hF};
    #1; rd = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  initial begin
    logic [31:0] rd;
    req = '0; dev_tx = 0; dev_bit = 0; dev_quad = 0; pulses = 0; last_rise = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (csb != 2'b11 || sck) begin failures++; $display("idle levels"); end
    for (int i = 0; i < 60; i++) begin
      int mode, div; logic [7:0] b;
      mode = $urandom_range(0, 2); div = $urandom_range(1, 5); b = 8'($urandom);
      rw(1, 'h0, {16'h0, 8'(div), 4'h0, mode == 2, mode != 0, 2'b01}, rd);
      checks++; if (csb != 2'b10) begin failures++; $display("cs %b", csb); end
      dev_tx = 8'($urandom); dev_bit = 0; dev_quad = (mode != 0); pulses = 0; last_rise = 0;
      rw(1, 'h4, b, rd);
      rw(0, 'h8, 0, rd); checks++; if (!rd[0]) begin failures++; $display("not busy"); end
      checks++;
      if (sdoe != (mode == 0 ? 4'b0001 : mode == 1 ? 4'b1111 : 4'b0000)) begin failures++; $display("oe %b mode %0d", sdoe, mode); end
      do rw(0, 'h8, 0, rd); while (rd[0]);
      checks++; if (pulses != (mode == 0 ? 8 : 2)) begin failures++; $display("%0d clock pulses", pulses); end
      if (mode == 0) begin checks++; if (period != 2 * div) begin failures++; $display("period %0d div %0d", period, div); end end
      if (mode != 2) begin checks++; if (dev_rx != b) begin failures++; $display("device got %h exp %h", dev_rx, b); end end
      rw(0, 'h4, 0, rd);
      if (mode != 1) begin checks++; if (rd[7:0] != dev_tx) begin failures++; $display("host got %h exp %h (mode %0d)", rd[7:0], dev_tx, mode); end end
    end
    rw(1, 'h0, 0, rd); checks++; if (csb != 2'b11) begin failures++; $display("cs not released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
