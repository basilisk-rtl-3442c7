// tb_vga: self-checking test of the display controller at a small timing
// (16x6 active, short porches) so several frames run quickly. A main-bus
// memory model serves frame-buffer words as a function of their address.
// Checks: hsync pulse width and line period, vsync pulse width, number of
// displayed pixels per frame, every displayed pixel against the frame
// buffer (pixel n of a frame is 16-bit lane n%4 of word n/4), and no
// underflow with a fast memory. A second run with a slow memory must
// report underflows.
module tb_vga;
  import basilisk_pkg::*;
  localparam int HA = 16, HF = 2, HS = 3, HB = 3, VA = 6, VF = 1, VS = 2, VB = 1;
  localparam int HT = HA + HF + HS + HB, VT = VA + VF + VS + VB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp; bus_req_t breq; logic breq_ready; bus_rsp_t brsp; logic brsp_ready;
  logic hs, vs, de; logic [4:0] r, b; logic [5:0] g;
  vga #(.H_ACTIVE(HA), .H_FP(HF), .H_SYNC(HS), .H_BP(HB), .V_ACTIVE(VA), .V_FP(VF), .V_SYNC(VS), .V_BP(VB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .bus_req_o(breq), .bus_req_ready_i(breq_ready),
    .bus_rsp_i(brsp), .bus_rsp_ready_o(brsp_ready), .hsync_o(hs), .vsync_o(vs), .de_o(de), .red_o(r), .green_o(g), .blue_o(b));
  int checks = 0, failures = 0;
  int slow = 0;
  localparam addr_t BASE = 48'h8000_4000;
  function automatic data_t fb(addr_t a); return {a[15:0] ^ 16'h1234, ~a[15:0], a[15:0] * 16'd3, a[15:0]}; endfunction
  initial begin
    breq_ready = 0; brsp = '0;
    forever begin
      @(negedge clk);
      brsp = '0; breq_ready = 1;
      #1;
      if (breq.valid) begin
        bus_req_t q; q = breq;
        @(negedge clk); breq_ready = 0;
        repeat (slow) @(negedge clk);
        brsp.valid = 1; brsp.rdata = fb(q.addr);
      end
    end
  end
  task automatic rw(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); req = '{valid: 1, write: we, addr: a, wdata: wd, wstrb: 4'hF};
    #1; rd = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  // monitor
  int n = 0, frames = 0, hs_len = 0, vs_len = 0, last_hs_fall = 0, cyc = 0, bad_pix = 0;
  bit prev_hs = 1, prev_vs = 1, checking = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (!hs) hs_len++;
    if (prev_hs && !hs) begin
      if (checking && last_hs_fall != 0) begin checks++; if (cyc - last_hs_fall != HT) begin failures++; $display("line period %0d", cyc - last_hs_fall); end end
      last_hs_fall = cyc;
    end
    if (!prev_hs && hs) begin
      if (checking) begin checks++; if (hs_len != HS) begin failures++; $display("hsync width %0d", hs_len); end end
      hs_len = 0;
    end
    if (!vs) vs_len++;
    if (!prev_vs && vs) begin
      if (checking) begin checks++; if (vs_len != VS * HT) begin failures++; $display("vsync width %0d", vs_len); end end
      vs_len = 0;
    end
    if (prev_vs && !vs) begin
      if (checking) begin checks++; if (n != HA * VA) begin failures++; $display("%0d pixels in frame", n); end end
      n = 0; frames++;
    end
    if (de) begin
      data_t w; w = fb(BASE + 8 * (n / 4));
      if (checking && slow == 0) begin
        checks++;
        if ({r, g, b} != w[16 * (n % 4) +: 16]) begin failures++; bad_pix++; if (bad_pix < 5) $display("pixel %0d: %h exp %h", n, {r, g, b}, w[16*(n%4) +: 16]); end
      end
      n++;
    end
    prev_hs = hs; prev_vs = vs;
  end
  initial begin
    logic [31:0] rd;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    rw(1, 'h4, BASE[31:0], rd); rw(1, 'h8, 0, rd); rw(1, 'h0, 1, rd);
    wait (frames == 2);
    rw(1, 'hC, 0, rd);
    checking = 1;
    wait (frames == 6);
    rw(0, 'hC, 0, rd); checks++; if (rd != 0) begin failures++; $display("underflow %0d with fast memory", rd); end
    slow = 12;
    wait (frames == 8);
    rw(0, 'hC, 0, rd); checks++; if (rd == 0) begin failures++; $display("no underflow with slow memory"); end
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
