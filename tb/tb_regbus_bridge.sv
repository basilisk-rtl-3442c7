// tb_regbus_bridge: self-checking test of the main-bus to Regbus bridge.
// A Regbus register-file model (random ready delay, error above 0x100)
// sits behind the bridge. Random 64-bit writes to either 32-bit half and
// reads are checked against a reference array; out-of-range accesses must
// return an error; an access to a peripheral that answers at once must take
// 2 cycles from the request cycle to the response cycle.
module tb_regbus_bridge;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t bus_req; logic bus_req_ready; bus_rsp_t bus_rsp; logic bus_rsp_ready;
  reg_req_t reg_req; reg_rsp_t reg_rsp;
  regbus_bridge dut (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(bus_req), .bus_req_ready_o(bus_req_ready),
    .bus_rsp_o(bus_rsp), .bus_rsp_ready_i(bus_rsp_ready), .reg_req_o(reg_req), .reg_rsp_i(reg_rsp));
  int checks = 0, failures = 0;
  logic [31:0] regs [64];
  logic [31:0] refr [64];
  int delay = 0, wait_cnt = 0;
  // Regbus peripheral model.
  always_comb begin
    reg_rsp = '0;
    if (reg_req.valid && wait_cnt >= delay) begin
      reg_rsp.ready = 1;
      reg_rsp.error = reg_req.addr[11:0] >= 12'h100;
      reg_rsp.rdata = regs[reg_req.addr[7:2]];
    end
  end
  always @(posedge clk) begin
    if (reg_req.valid && !reg_rsp.ready) wait_cnt <= wait_cnt + 1;
    else wait_cnt <= 0;
    if (reg_req.valid && reg_rsp.ready && reg_req.write && !reg_rsp.error)
      for (int b = 0; b < 4; b++) if (reg_req.wstrb[b]) regs[reg_req.addr[7:2]][8*b+:8] = reg_req.wdata[8*b+:8];
  end
  task automatic access(input bit we, input logic [31:0] a, input data_t wd, input strb_t st,
                        output data_t rd, output bit err, output int cyc);
    @(negedge clk);
    bus_req = '{valid: 1, we: we, addr: {16'h0, a}, wdata: wd, strb: st};
    #1; while (!bus_req_ready) begin @(negedge clk); #1; end
    @(negedge clk); bus_req = '0; cyc = 1;
    #1; while (!bus_rsp.valid) begin @(negedge clk); #1; cyc++; end
    rd = bus_rsp.rdata; err = bus_rsp.err;
  endtask
  initial begin
    data_t rd; bit err; int cyc;
    bus_req = '0; bus_rsp_ready = 1;
    for (int i = 0; i < 64; i++) begin regs[i] = 0; refr[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // Latency with an immediately ready peripheral.
    delay = 0;
    access(0, 32'h0300_0010, 0, '1, rd, err, cyc);
    checks++; if (cyc != 2) begin failures++; $display("latency %0d != 2", cyc); end
    for (int i = 0; i < 400; i++) begin
      logic [31:0] a; bit we; data_t wd; strb_t st; int w;
      w = $urandom_range(0, 63); a = 32'h0300_0000 + 4 * w;
      if ($urandom_range(0, 9) == 0) a = 32'h0300_0100 + 4 * w;
      we = $urandom_range(0, 1); wd = {$urandom, $urandom}; st = 8'($urandom);
      delay = $urandom_range(0, 3);
      access(we, a, wd, st, rd, err, cyc);
      checks++;
      if (a[11:0] >= 12'h100) begin
        if (!err) begin failures++; $display("no error at %h", a); end
      end else if (err) begin failures++; $display("error at %h", a); end
      else if (we) begin
        for (int b = 0; b < 4; b++)
          if (a[2] ? st[4+b] : st[b]) refr[w][8*b+:8] = a[2] ? wd[32+8*b+:8] : wd[8*b+:8];
      end else if (rd !== {refr[w], refr[w]}) begin
        failures++; $display("read %h got %h exp %h", a, rd, refr[w]);
      end
    end
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
