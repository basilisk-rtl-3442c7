// tb_clint: self-checking test of the CLINT. mtime must advance by one per
// rtc rising edge; mtimecmp and mtime are written and read back in halves;
// mtip must be low before mtime reaches mtimecmp and high from then on;
// msip follows its register bit; unmapped offsets give an error.
module tb_clint;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0, rtc = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp; logic mtip, msip;
  clint dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .rtc_i(rtc), .mtip_o(mtip), .msip_o(msip));
  int checks = 0, failures = 0;
  task automatic rw(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd, output bit err);
    @(negedge clk); req = '{valid: 1, write: we, addr: 32'h0200_0000 + a, wdata: wd, wstrb: 4'hF};
    #1; rd = rsp.rdata; err = rsp.error;
    @(negedge clk); req = '0;
  endtask
  task automatic ticks(input int n);
    repeat (n) begin repeat (3) @(negedge clk); rtc = 1; repeat (3) @(negedge clk); rtc = 0; end
    repeat (4) @(negedge clk);
  endtask
  initial begin
    logic [31:0] rd; bit err;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (mtip || msip) begin failures++; $display("irq after reset"); end
    ticks(10);
    rw(0, 'hBFF8, 0, rd, err); checks++; if (rd != 10) begin failures++; $display("mtime %0d", rd); end
    rw(1, 'hBFF8, 32'hFFFF_FFF0, rd, err); rw(1, 'hBFFC, 32'h1, rd, err);
    rw(1, 'h4004, 32'h2, rd, err); rw(1, 'h4000, 32'h0000_0004, rd, err);
    rw(0, 'h4004, 0, rd, err); checks++; if (rd != 2) begin failures++; $display("mtimecmp hi %h", rd); end
    for (int i = 0; i < 24; i++) begin
      logic [63:0] t;
      t = {32'h1, 32'hFFFF_FFF0} + i;
      checks++;
      if (mtip != (t >= 64'h2_0000_0004)) begin failures++; $display("mtip %b at %h", mtip, t); end
      ticks(1);
    end
    rw(0, 'hBFFC, 0, rd, err); checks++; if (rd != 2) begin failures++; $display("carry into mtime hi: %h", rd); end
    rw(1, 'h0, 1, rd, err); checks++; if (!msip) begin failures++; $display("msip"); end
    rw(1, 'h0, 0, rd, err); checks++; if (msip) begin failures++; $display("msip clear"); end
    rw(0, 'h10, 0, rd, err); checks++; if (!err) begin failures++; $display("no error"); end
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
