// tb_uart: self-checking test of the UART. The transmitter is looped back
// into the receiver. Random bytes are sent with a divisor of 8 and must be
// received intact; the start bit must last exactly DIV clocks and a frame
// 10*DIV clocks; irq must rise with a received byte; a second byte arriving
// unread must set the overrun flag.
module tb_uart;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp; logic tx, irq;
  uart dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .tx_o(tx), .rx_i(tx), .irq_o(irq));
  int checks = 0, failures = 0;
  task automatic rw(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); req = '{valid: 1, write: we, addr: a, wdata: wd, wstrb: 4'hF};
    #1; rd = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  int low_len, frame_len, run_low, run_busy;
  bit prev_busy = 0;
  // Measure the start bit (tx low from the start of a frame) and the frame length.
  always @(posedge clk) begin
    if (dut.tx_busy && !prev_busy) begin run_low = 0; run_busy = 0; end
    if (dut.tx_busy) begin
      run_busy++;
      if (!tx && run_low == run_busy - 1) run_low++;
    end else if (prev_busy) begin
      low_len = run_low; frame_len = run_busy;
    end
    prev_busy = dut.tx_busy;
  end
  initial begin
    logic [31:0] rd;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    rw(0, 8, 0, rd); checks++; if (rd != 538) begin failures++; $display("reset DIV %0d", rd); end
    rw(1, 8, 8, rd);
    for (int i = 0; i < 50; i++) begin
      logic [7:0] b; b = 8'($urandom);
      rw(1, 0, b, rd);
      wait (!dut.tx_busy); @(posedge clk); #1;
      if (b[0]) begin
        checks++; if (low_len != 8) begin failures++; $display("start bit %0d clocks", low_len); end
      end
      checks++; if (frame_len != 80) begin failures++; $display("frame %0d clocks", frame_len); end
      repeat (20) @(posedge clk);
      checks++; if (!irq) begin failures++; $display("no irq"); end
      rw(0, 4, 0, rd); checks++; if (rd[1] != 1'b1 || rd[2]) begin failures++; $display("status %h", rd); end
      rw(0, 0, 0, rd); checks++; if (rd[7:0] != b) begin failures++; $display("got %h exp %h", rd[7:0], b); end
      rw(0, 4, 0, rd); checks++; if (rd[1]) begin failures++; $display("received not cleared"); end
    end
    // overrun
    rw(1, 0, 8'h55, rd); wait (!dut.tx_busy); repeat (20) @(posedge clk);
    rw(1, 0, 8'hAA, rd); wait (!dut.tx_busy); repeat (20) @(posedge clk);
    rw(0, 4, 0, rd); checks++; if (!rd[2]) begin failures++; $display("no overrun"); end
    rw(0, 0, 0, rd); checks++; if (rd[7:0] != 8'hAA) begin failures++; $display("last byte %h", rd[7:0]); end
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
