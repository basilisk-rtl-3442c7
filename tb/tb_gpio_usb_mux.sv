// tb_gpio_usb_mux: self-checking test of the GPIO/USB pad multiplexer.
// After reset all pads follow the USB host signals. Random SEL, OUT, OE
// values and random USB and pad values are applied; every pad output and
// enable, the USB inputs and the synchronised IN register (two clocks of
// delay) are compared with an independent model.
module tb_gpio_usb_mux;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp;
  logic [3:0] udp, udm, uoe, udp_o, udm_o; logic [7:0] po, poe, pi;
  gpio_usb_mux dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .usb_dp_i(udp), .usb_dm_i(udm), .usb_oe_i(uoe), .usb_dp_o(udp_o), .usb_dm_o(udm_o),
    .pad_o(po), .pad_oe_o(poe), .pad_i(pi));
  int checks = 0, failures = 0;
  task automatic rw(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); req = '{valid: 1, write: we, addr: a, wdata: wd, wstrb: 4'hF};
    #1; rd = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  initial begin
    logic [31:0] rd; logic [3:0] sel; logic [7:0] out, oe;
    req = '0; udp = 0; udm = 0; uoe = 0; pi = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    sel = 0; out = 0; oe = 0;
    for (int i = 0; i < 300; i++) begin
      if (i > 0) begin
        sel = 4'($urandom); out = 8'($urandom); oe = 8'($urandom);
        rw(1, 'hC, sel, rd); rw(1, 'h0, out, rd); rw(1, 'h4, oe, rd);
      end
      udp = 4'($urandom); udm = 4'($urandom); uoe = 4'($urandom); pi = 8'($urandom);
      #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (po[2*k] != (sel[k] ? out[2*k] : udp[k]) || po[2*k+1] != (sel[k] ? out[2*k+1] : udm[k]) ||
            poe[2*k] != (sel[k] ? oe[2*k] : uoe[k]) || poe[2*k+1] != (sel[k] ? oe[2*k+1] : uoe[k]) ||
            udp_o[k] != pi[2*k] || udm_o[k] != pi[2*k+1]) begin
          failures++; $display("port %0d wrong (sel %b)", k, sel);
        end
      end
      repeat (2) @(posedge clk);
      rw(0, 'h8, 0, rd); checks++;
      if (rd[7:0] != pi) begin failures++; $display("IN %h exp %h", rd[7:0], pi); end
      rw(0, 'hC, 0, rd); checks++;
      if (rd[3:0] != sel) begin failures++; $display("SEL readback"); end
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
