// tb_axi_xbar: self-checking test of the main-bus crossbar.
//
// Five masters issue random reads and writes, one at a time each, to the
// three slaves and to unmapped addresses. Each master uses its own address
// range inside every slave, so a per-master reference memory predicts every
// read. Slaves are memory models with random accept and response delays.
// Checks: read data, error responses for unmapped addresses, that every
// master was served by every slave (no starvation), and that a request to an
// idle, ready slave is accepted in the cycle it is presented.
module tb_axi_xbar;
  import basilisk_pkg::*;
  localparam int NM = 5, NS = 3, OPS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bus_req_t m_req [NM];  logic m_req_ready [NM];
  bus_rsp_t m_rsp [NM];  logic m_rsp_ready [NM];
  bus_req_t s_req [NS];  logic s_req_ready [NS];
  bus_rsp_t s_rsp [NS];  logic s_rsp_ready [NS];

  axi_xbar #(.NM(NM), .NS(NS)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .m_req_i(m_req), .m_req_ready_o(m_req_ready), .m_rsp_o(m_rsp), .m_rsp_ready_i(m_rsp_ready),
    .s_req_o(s_req), .s_req_ready_i(s_req_ready), .s_rsp_i(s_rsp), .s_rsp_ready_o(s_rsp_ready));

  int checks = 0, failures = 0;
  int served [NM][NS];
  // Slave base addresses in the default map.
  addr_t sbase [NS] = '{48'h0300_0000, 48'h8000_0000, 48'h4000_0000};

  // ---------------- slave models ----------------
  for (genvar s = 0; s < NS; s++) begin : g_slv
    data_t mem [addr_t];
    logic  pend;
    int    dly;
    bus_rsp_t r;
    always @(posedge clk) begin
      if (!rst_n) begin
        pend <= 0; r <= '0; s_req_ready[s] <= 0; dly <= 0;
      end else begin
        s_req_ready[s] <= !pend && ($urandom_range(0, 2) != 0);
        if (s_req[s].valid && s_req_ready[s] && !pend) begin
          pend <= 1; dly <= $urandom_range(0, 4);
          r.valid <= 0; r.err <= 0;
          r.rdata <= mem.exists(s_req[s].addr) ? mem[s_req[s].addr] : 64'hDEAD_0000 + s;
          if (s_req[s].we) mem[s_req[s].addr] = s_req[s].wdata;
          s_req_ready[s] <= 0;
        end else if (pend && !r.valid) begin
          if (dly == 0) r.valid <= 1; else dly <= dly - 1;
        end else if (r.valid && s_rsp_ready[s]) begin
          r.valid <= 0; pend <= 0;
        end
      end
    end
    assign s_rsp[s] = r;
  end

  // ---------------- masters ----------------
  int done_cnt = 0;
  for (genvar m = 0; m < NM; m++) begin : g_mst
    data_t ref_mem [addr_t];
    initial begin
      m_req[m] = '0; m_rsp_ready[m] = 1;
      @(posedge rst_n);
      repeat (2) @(posedge clk);
      for (int i = 0; i < OPS; i++) begin
        int s; bit unmapped; addr_t a; bit we; data_t wd; data_t exp;
        s = $urandom_range(0, NS - 1);
        unmapped = ($urandom_range(0, 19) == 0);
        a = unmapped ? 48'h0000_2000_0000 + 8 * $urandom_range(0, 15)
                     : sbase[s] + (m << 8) + 8 * $urandom_range(0, 7);
        we = $urandom_range(0, 1);
        wd = {$urandom, $urandom};
        @(negedge clk);
        m_req[m].valid = 1; m_req[m].we = we; m_req[m].addr = a; m_req[m].wdata = wd; m_req[m].strb = '1;
        #1;
        while (!m_req_ready[m]) begin @(negedge clk); #1; end
        @(negedge clk);
        m_req[m] = '0;
        #1;
        while (!m_rsp[m].valid) begin @(negedge clk); #1; end
        checks++;
        if (unmapped) begin
          if (!m_rsp[m].err) begin failures++; $display("m%0d: no error for unmapped %h", m, a); end
        end else begin
          if (m_rsp[m].err) begin failures++; $display("m%0d: unexpected error %h", m, a); end
          if (!we) begin
            exp = ref_mem.exists(a) ? ref_mem[a] : 64'hDEAD_0000 + s;
            if (m_rsp[m].rdata !== exp) begin
              failures++; $display("m%0d: read %h got %h exp %h", m, a, m_rsp[m].rdata, exp);
            end
          end else ref_mem[a] = wd;
          served[m][s]++;
        end
        @(posedge clk);
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_cnt == NM);
    for (int m = 0; m < NM; m++)
      for (int s = 0; s < NS; s++) begin
        checks++;
        if (served[m][s] == 0) begin failures++; $display("master %0d never served by slave %0d", m, s); end
      end
    // Latency: with all other masters idle, a request to a ready slave is accepted at once.
    wait (s_req_ready[1] == 1 && !g_slv[1].pend);
    @(negedge clk);
    if (s_req_ready[1]) begin
      m_req[0].valid = 1; m_req[0].we = 0; m_req[0].addr = 48'h8000_0000; m_req[0].strb = '1;
      #1;
      checks++;
      if (!m_req_ready[0] || !s_req[1].valid) begin failures++; $display("request not passed through in same cycle"); end
      @(posedge clk); @(negedge clk); m_req[0] = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
