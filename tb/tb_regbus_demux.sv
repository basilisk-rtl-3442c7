// tb_regbus_demux: self-checking test of the Regbus demultiplexer.
// Eight peripheral models answer with their port number and the address.
// Random addresses inside and outside the map check that exactly the right
// port sees valid, that its response comes back in the same cycle, and that
// unmapped addresses get an error.
module tb_regbus_demux;
  import basilisk_pkg::*;
  localparam int NP = 8;
  reg_req_t req; reg_rsp_t rsp; reg_req_t preq [NP]; reg_rsp_t prsp [NP];
  regbus_demux #(.NP(NP)) dut (.req_i(req), .rsp_o(rsp), .req_o(preq), .rsp_i(prsp));
  int checks = 0, failures = 0;
  always_comb
    for (int p = 0; p < NP; p++)
      prsp[p] = '{ready: preq[p].valid, error: 1'b0, rdata: {8'(p), preq[p].addr[23:0]}};
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int exp; logic [31:0] a;
      case ($urandom_range(0, 3))
        0: a = 32'h0200_0000 + $urandom_range(0, 16'hFFFF);
        1: a = 32'h0400_0000 + $urandom_range(0, 16'hFFFF);
        default: a = 32'h0300_0000 + $urandom_range(0, 16'hFFFF);
      endcase
      if (a[31:16] == 16'h0200) exp = 7;
      else if (a[31:16] == 16'h0300 && a[15:12] < 7) exp = a[15:12];
      else exp = -1;
      req = '{valid: 1, write: 1'($urandom), addr: a, wdata: $urandom, wstrb: 4'hF};
      #1;
      checks++;
      for (int p = 0; p < NP; p++)
        if (preq[p].valid != (p == exp)) begin failures++; $display("addr %h port %0d valid wrong", a, p); end
      if (exp < 0) begin
        if (!(rsp.ready && rsp.error)) begin failures++; $display("addr %h: no error", a); end
      end else if (!rsp.ready || rsp.error || rsp.rdata != {8'(exp), a[23:0]}) begin
        failures++; $display("addr %h: bad response %h", a, rsp.rdata);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
