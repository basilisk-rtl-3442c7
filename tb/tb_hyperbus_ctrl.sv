// tb_hyperbus_ctrl: self-checking test of the HyperRAM controller with two
// chip models. Random line writes and reads to both chips are checked
// against a reference; unwritten lines must read as the model's initial
// pattern. Timing checks: the data phase of a write lasts exactly 32 clocks
// (2 bytes per clock, i.e. 124 MB/s at 62 MHz) and a whole write burst takes
// 3 + 2*LATENCY + 32 + 3 clocks from request to response, with chip select
// low for 3 + 2*LATENCY + 32 clocks.
// Both chips must have been used. Reads run with random capture gaps.
module tb_hyperbus_ctrl;
  import basilisk_pkg::*;
  localparam int LAT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  line_req_t req; logic req_ready; line_rsp_t rsp;
  logic [1:0] cs_n; logic ck_en, dq_oe, rwds_oe, dq_valid, rst_hb; logic [15:0] dq_o, dq_i; logic [1:0] rwds;
  logic [15:0] dq_m [2]; logic v_m [2];
  hyperbus_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .line_req_i(req), .line_req_ready_o(req_ready),
    .line_rsp_o(rsp), .hb_cs_no(cs_n), .hb_ck_en_o(ck_en), .hb_dq_o(dq_o), .hb_dq_oe_o(dq_oe),
    .hb_rwds_o(rwds), .hb_rwds_oe_o(rwds_oe), .hb_dq_i(dq_i), .hb_dq_valid_i(dq_valid), .hb_rst_no(rst_hb));
  for (genvar c = 0; c < 2; c++) begin : g_chip
    hyperram_model #(.LATENCY(LAT), .CHIP(c), .GAPS(1)) chip (.clk_i(clk), .cs_ni(cs_n[c]), .ck_en_i(ck_en),
      .dq_i(dq_o), .rwds_i(rwds), .dq_o(dq_m[c]), .dq_valid_o(v_m[c]));
  end
  assign dq_i     = !cs_n[1] ? dq_m[1] : dq_m[0];
  assign dq_valid = !cs_n[1] ? v_m[1]  : v_m[0];

  int checks = 0, failures = 0;
  line_t refl [addr_t];
  function automatic line_t init_line(addr_t a);
    line_t l; int unsigned chip, w0;
    chip = a[23]; w0 = a[22:1];
    for (int k = 0; k < 32; k++) begin
      logic [15:0] w; w = 16'((w0 + k) * 16'h9E37 + chip * 16'h1111);
      l[16*k +: 16] = {w[7:0], w[15:8]};
    end
    return l;
  endfunction
  int oe_run = 0, oe_max = 0, cs_low = 0, cs_max = 0;
  always @(posedge clk) begin
    if (rwds_oe) oe_run++; else begin if (oe_run > oe_max) oe_max = oe_run; oe_run = 0; end
    if (cs_n != 2'b11) cs_low++; else begin if (cs_low > cs_max) cs_max = cs_low; cs_low = 0; end
  end
  task automatic xfer(input bit we, input addr_t a, input line_t wd, output line_t rd, output int cyc);
    @(negedge clk);
    req = '{valid: 1, we: we, addr: a, wdata: wd};
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req = '0; cyc = 1;
    #1; while (!rsp.valid) begin @(negedge clk); #1; cyc++; end
    rd = rsp.rdata;
  endtask
  initial begin
    line_t rd, wd; int cyc;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // One timed write.
    wd = {16{$urandom}};
    xfer(1, 48'h40, wd, rd, cyc); refl[48'h40] = wd;
    checks++; if (oe_max != 32) begin failures++; $display("write data phase %0d clocks, not 32", oe_max); end
    checks++; if (cs_max != 3 + 2 * LAT + 32) begin failures++; $display("cs low %0d", cs_max); end
    checks++; if (cyc != 3 + 2 * LAT + 32 + 3) begin failures++; $display("write took %0d", cyc); end
    for (int i = 0; i < 300; i++) begin
      addr_t a; bit we; line_t exp;
      a = (48'($urandom_range(0, 1)) << 23) | (48'($urandom_range(0, 63)) << 6);
      we = $urandom_range(0, 1);
      for (int k = 0; k < 16; k++) wd[32*k +: 32] = $urandom;
      xfer(we, a, wd, rd, cyc);
      if (we) refl[a] = wd;
      else begin
        exp = refl.exists(a) ? refl[a] : init_line(a);
        checks++;
        if (rd !== exp) begin failures++; $display("line %h mismatch", a); end
      end
    end
    checks++; if (g_chip[0].chip.bursts == 0 || g_chip[1].chip.bursts == 0) begin failures++; $display("a chip unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
