// tb_c2c_link: self-checking test of the chip-to-chip link. Two link
// instances, chip A and chip B, are wired TX to RX both ways. On each chip a
// test master issues random reads and writes into the C2C window while the
// master port of the same chip serves the peer's accesses from a local
// memory model, so both directions carry requests and responses at once.
// Checks: read data against a per-chip reference of the remote memory,
// error propagation, the remote address (window offset removed), packet
// lengths on the wire (122 clocks per request, 66 per response, one bit per
// clock), and that both packet types were seen in both directions.
module tb_c2c_link;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t sreq [2]; logic sreq_ready [2]; bus_rsp_t srsp [2]; logic srsp_ready [2];
  bus_req_t mreq [2]; logic mreq_ready [2]; bus_rsp_t mrsp [2]; logic mrsp_ready [2];
  logic txv [2]; logic [0:0] txd [2];
  for (genvar c = 0; c < 2; c++) begin : g_chip
    c2c_link dut (.clk_i(clk), .rst_ni(rst_n),
      .slv_req_i(sreq[c]), .slv_req_ready_o(sreq_ready[c]), .slv_rsp_o(srsp[c]), .slv_rsp_ready_i(srsp_ready[c]),
      .mst_req_o(mreq[c]), .mst_req_ready_i(mreq_ready[c]), .mst_rsp_i(mrsp[c]), .mst_rsp_ready_o(mrsp_ready[c]),
      .tx_valid_o(txv[c]), .tx_data_o(txd[c]), .rx_valid_i(txv[1-c]), .rx_data_i(txd[1-c]));
  end
  int checks = 0, failures = 0;
  int n_req_pkt [2], n_rsp_pkt [2];
  // packet length monitor
  for (genvar c = 0; c < 2; c++) begin : g_mon
    int len = 0; bit first = 0;
    always @(posedge clk) if (rst_n) begin
      if (txv[c]) begin
        if (len == 0) first = txd[c][0];
        len++;
      end else if (len != 0) begin
        checks++;
        if (len != (first ? 66 : 122)) begin failures++; $display("chip %0d packet of %0d bits", c, len); end
        if (first) n_rsp_pkt[c]++; else n_req_pkt[c]++;
        len = 0;
      end
    end
  end
  // local memory models (serve the peer's accesses)
  for (genvar c = 0; c < 2; c++) begin : g_mem
    data_t mem [addr_t];
    initial begin
      mreq_ready[c] = 0; mrsp[c] = '0;
      forever begin
        @(negedge clk); mrsp[c] = '0; mreq_ready[c] = $urandom_range(0, 1);
        #1;
        if (mreq[c].valid && mreq_ready[c]) begin
          bus_req_t q; q = mreq[c];
          @(negedge clk); mreq_ready[c] = 0;
          repeat ($urandom_range(0, 5)) @(negedge clk);
          mrsp[c].valid = 1; mrsp[c].err = q.addr >= 48'h3000_0000;
          mrsp[c].rdata = mem.exists(q.addr) ? mem[q.addr] : {16'(c), q.addr};
          if (q.we) mem[q.addr] = q.wdata;
        end
      end
    end
  end
  // test masters
  int done = 0;
  for (genvar c = 0; c < 2; c++) begin : g_mst
    data_t refm [addr_t];
    initial begin
      sreq[c] = '0; srsp_ready[c] = 1;
      @(posedge rst_n);
      for (int i = 0; i < 60; i++) begin
        addr_t ra; bit we; data_t wd, exp; bit errx;
        ra = (i % 20 == 19) ? 48'h3000_0000 : 48'h0100_0000 + 8 * $urandom_range(0, 15);
        we = $urandom_range(0, 1); wd = {$urandom, $urandom};
        @(negedge clk);
        sreq[c] = '{valid: 1, we: we, addr: C2C_BASE + ra, wdata: wd, strb: '1};
        #1; while (!sreq_ready[c]) begin @(negedge clk); #1; end
        @(negedge clk); sreq[c] = '0;
        #1; while (!srsp[c].valid) begin @(negedge clk); #1; end
        errx = ra >= 48'h3000_0000;
        exp = refm.exists(ra) ? refm[ra] : {16'(1 - c), ra};
        checks++;
        if (srsp[c].err != errx) begin failures++; $display("chip %0d: err %b for %h", c, srsp[c].err, ra); end
        else if (!errx && !we && srsp[c].rdata !== exp) begin failures++; $display("chip %0d read %h got %h exp %h", c, ra, srsp[c].rdata, exp); end
        if (we && !errx) refm[ra] = wd;
        @(negedge clk);
      end
      done++;
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done == 2);
    repeat (5) @(posedge clk);
    for (int c = 0; c < 2; c++) begin
      checks++;
      if (n_req_pkt[c] != 60 || n_rsp_pkt[c] != 60) begin failures++; $display("chip %0d sent %0d req %0d rsp", c, n_req_pkt[c], n_rsp_pkt[c]); end
    end
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
