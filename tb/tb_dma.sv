// tb_dma: self-checking test of the 2D DMA engine. A main-bus memory model
// (random accept and response delays, errors above 0x9000_0000) serves the
// engine. Random 2D jobs (row length, strides, row count; sometimes
// overlapping-free 1D copies) are programmed over Regbus; afterwards every
// destination word must equal the source word it came from, and guard words
// just outside every destination row must be untouched. Also checked: busy,
// done and irq flags, the error flag for a source in the error region, and
// the throughput with a memory that answers at once (at most 6 cycles per
// word, i.e. one read and one write each of at most 3 cycles).
module tb_dma;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  reg_req_t req; reg_rsp_t rsp; bus_req_t breq; logic breq_ready; bus_rsp_t brsp; logic brsp_ready, irq;
  dma dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .bus_req_o(breq),
    .bus_req_ready_i(breq_ready), .bus_rsp_i(brsp), .bus_rsp_ready_o(brsp_ready), .irq_o(irq));
  int checks = 0, failures = 0;
  bit fast = 0;
  data_t mem [addr_t];
  function automatic data_t init_word(addr_t a); return {a[31:0], ~a[31:0]}; endfunction
  function automatic data_t rdm(addr_t a); return mem.exists(a) ? mem[a] : init_word(a); endfunction
  // memory model
  initial begin
    breq_ready = 0; brsp = '0;
    forever begin
      @(negedge clk);
      brsp = '0;
      breq_ready = fast || ($urandom_range(0, 1) == 1);
      #1;
      if (breq.valid && breq_ready) begin
        bus_req_t r; r = breq;
        @(negedge clk); breq_ready = 0;
        if (!fast) repeat ($urandom_range(0, 3)) @(negedge clk);
        brsp.valid = 1; brsp.err = r.addr >= 48'h9000_0000;
        brsp.rdata = rdm(r.addr);
        if (r.we) mem[r.addr] = r.wdata;
        #1; while (!brsp_ready) begin @(negedge clk); #1; end
      end
    end
  end
  task automatic rw(input bit we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); req = '{valid: 1, write: we, addr: a, wdata: wd, wstrb: 4'hF};
    #1; rd = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  task automatic run(input addr_t s, input addr_t d, input int len, input int ss, input int ds, input int reps, output int cyc);
    logic [31:0] rd;
    rw(1, 'h00, s[31:0], rd); rw(1, 'h04, 32'(s[47:32]), rd);
    rw(1, 'h08, d[31:0], rd); rw(1, 'h0C, 32'(d[47:32]), rd);
    rw(1, 'h10, len, rd); rw(1, 'h14, ss, rd); rw(1, 'h18, ds, rd); rw(1, 'h1C, reps, rd);
    rw(1, 'h20, 1, rd);
    cyc = 0;
    rw(0, 'h24, 0, rd); checks++; if (!rd[0] || rd[1]) begin failures++; $display("not busy after start: %h", rd); end
    while (!irq) begin @(negedge clk); cyc++; end
    rw(0, 'h24, 0, rd); checks++; if (rd[0] || !rd[1]) begin failures++; $display("status at end %h", rd); end
  endtask
  initial begin
    int cyc; logic [31:0] rd;
    req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 40; j++) begin
      addr_t s, d; int len, ss, ds, reps; data_t snap [addr_t];
      len = 8 * $urandom_range(1, 12); reps = $urandom_range(1, 6);
      ss = len + 8 * $urandom_range(0, 4); ds = len + 8 * $urandom_range(1, 4);
      s = 48'h1000_0000 + 48'(j) * 48'h10000; d = 48'h2000_0000 + 48'(j) * 48'h10000;
      run(s, d, len, ss, ds, reps, cyc);
      for (int r = 0; r < reps; r++) begin
        for (int o = 0; o < len; o += 8) begin
          checks++;
          if (rdm(d + r * ds + o) !== rdm(s + r * ss + o)) begin
            failures++; $display("job %0d row %0d off %0d: %h vs %h", j, r, o, rdm(d + r * ds + o), rdm(s + r * ss + o));
          end
        end
        checks++;
        if (mem.exists(d + r * ds + len)) begin failures++; $display("guard word written, job %0d", j); end
      end
    end
    // error flag
    run(48'h9000_0000, 48'h3000_0000, 16, 16, 16, 1, cyc);
    rw(0, 'h24, 0, rd); checks++; if (!rd[2]) begin failures++; $display("no error flag"); end
    // throughput with an immediate memory
    fast = 1;
    run(48'h1000_0000, 48'h3100_0000, 256, 256, 256, 1, cyc);
    $display("32 words in %0d cycles", cyc);
    checks++; if (cyc > 32 * 6 + 8) begin failures++; $display("too slow: %0d cycles", cyc); end
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
