// tb_i2c_host: self-checking test of the I2C controller against a device
// model at address 0x50 on open-drain lines. The device acknowledges its
// address and written bytes, stores written bytes, and returns stored bytes
// on reads. Checks: bytes written arrive at the device, bytes read arrive at
// the host, ACK/NACK status (a wrong address gets NACK), START and STOP
// conditions seen by the device, and the SCL period of 4*(DIV+1) clocks.
module tb_i2c_host;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp; logic scl_oe, sda_oe; logic dev_pull = 0;
  wire scl = !scl_oe;
  wire sda = !(sda_oe || dev_pull);
  i2c_host dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .scl_oe_o(scl_oe), .scl_i(scl), .sda_oe_o(sda_oe), .sda_i(sda));
  int checks = 0, failures = 0;
  // ---------------- device model ----------------
  logic [7:0] dmem [8]; int widx = 0, ridx = 0;
  int bitn = 0, byten = 0, starts = 0, stops = 0;
  bit rw = 0, sel = 0; logic [7:0] sh, rd; bit master_nack;
  always @(negedge sda) if (scl && rst_n) begin starts++; bitn = 0; byten = 0; dev_pull = 0; end
  always @(posedge sda) if (scl && rst_n) begin stops++; sel = 0; dev_pull = 0; end
  always @(posedge scl) begin
    bitn++;
    if (bitn <= 8) sh = {sh[6:0], sda};
    else master_nack = sda;
  end
  always @(negedge scl) begin
    if (bitn == 8) begin
      if (byten == 0) begin rw = sh[0]; sel = (sh[7:1] == 7'h50); end
      dev_pull = sel && (byten == 0 || !rw);
      if (sel && byten > 0 && !rw) begin dmem[widx % 8] = sh; widx++; end
    end else if (bitn == 9) begin
      byten++; bitn = 0; dev_pull = 0;
      if (sel && rw && !(byten > 1 && master_nack)) begin rd = dmem[ridx % 8]; ridx++; dev_pull = !rd[7]; end
    end else if (sel && rw && byten > 0 && bitn >= 1 && bitn <= 7) dev_pull = !rd[7 - bitn];
  end
  // SCL period
  int cyc = 0, last_rise = 0, period = 0;
  always @(posedge clk) cyc++;
  always @(posedge scl) begin period = cyc - last_rise; last_rise = cyc; end

  task automatic rw_reg(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] r);
    @(negedge clk); req = '{valid: 1, write: we, addr: a, wdata: wd, wstrb: 4'hF};
    #1; r = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  task automatic cmd(input logic [7:0] b, input bit start, input bit stop, input bit rd_, input bit nack, output logic [31:0] st);
    logic [31:0] r;
    rw_reg(1, 'h4, {20'h0, nack, rd_, stop, start, b}, r);
    do rw_reg(0, 'h8, 0, st); while (st[0]);
  endtask
  initial begin
    logic [31:0] st, r; logic [7:0] wb [3];
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    rw_reg(1, 'h0, 2, r);
    for (int k = 0; k < 3; k++) wb[k] = 8'($urandom);
    cmd(8'hA0, 1, 0, 0, 0, st); checks++; if (st[1]) begin failures++; $display("address NACKed"); end
    checks++; if (period != 12) begin failures++; $display("SCL period %0d", period); end
    for (int k = 0; k < 3; k++) begin
      cmd(wb[k], 0, k == 2, 0, 0, st); checks++; if (st[1]) begin failures++; $display("data NACKed"); end
    end
    for (int k = 0; k < 3; k++) begin checks++; if (dmem[k] != wb[k]) begin failures++; $display("device got %h exp %h", dmem[k], wb[k]); end end
    checks++; if (starts != 1 || stops != 1) begin failures++; $display("starts %0d stops %0d", starts, stops); end
    // read back
    cmd(8'hA1, 1, 0, 0, 0, st); checks++; if (st[1]) begin failures++; $display("read address NACKed"); end
    for (int k = 0; k < 3; k++) begin
      cmd(8'h00, 0, k == 2, 1, k == 2, st);
      rw_reg(0, 'hC, 0, r);
      checks++; if (r[7:0] != wb[k]) begin failures++; $display("host read %h exp %h", r[7:0], wb[k]); end
    end
    // wrong address
    cmd(8'h84, 1, 1, 0, 0, st); checks++; if (!st[1]) begin failures++; $display("no NACK for absent device"); end
    checks++; if (starts != 3 || stops != 3) begin failures++; $display("starts %0d stops %0d", starts, stops); end
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
