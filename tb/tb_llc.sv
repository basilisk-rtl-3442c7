// tb_llc: self-checking test of the last-level cache / scratchpad.
//
// A line-memory model with random latency stands in for the DRAM controller;
// unwritten DRAM words read as a function of their address. Phases:
//  1. random reads/writes over a DRAM range four times the cache size
//     (hits, misses, dirty evictions) checked against a reference memory;
//  2. ways 2 and 3 switched to SPM (flush with write-backs), SPM accesses to
//     them, an SPM access to a caching way (error), DRAM traffic on the two
//     remaining ways;
//  3. all ways SPM: after the flush the DRAM model must hold every word ever
//     written; DRAM accesses now bypass the cache;
//  4. all ways back to cache mode, more traffic, everything read back.
// The hit latency is checked, and each mechanism must have occurred.
module tb_llc;
  import basilisk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bus_req_t req; logic req_ready; bus_rsp_t rsp; logic rsp_ready;
  reg_req_t cfg; reg_rsp_t cfg_rsp;
  line_req_t mreq; logic mreq_ready; line_rsp_t mrsp;

  llc dut (.clk_i(clk), .rst_ni(rst_n), .bus_req_i(req), .bus_req_ready_o(req_ready),
    .bus_rsp_o(rsp), .bus_rsp_ready_i(rsp_ready), .cfg_req_i(cfg), .cfg_rsp_o(cfg_rsp),
    .mem_req_o(mreq), .mem_req_ready_i(mreq_ready), .mem_rsp_i(mrsp));

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_flush_wb = 0, n_byp = 0, n_spm = 0, n_err = 0;

  // ---------------- DRAM line model ----------------
  line_t dram [addr_t];
  function automatic data_t init_word(addr_t a);
    return {a[31:0] ^ 32'hA5A5_0000, ~a[31:0]};
  endfunction
  function automatic line_t dram_line(addr_t la);
    line_t l;
    if (dram.exists(la)) return dram[la];
    for (int w = 0; w < LINE_WORDS; w++) l[64*w +: 64] = init_word(la + 8 * w);
    return l;
  endfunction
  initial begin
    mreq_ready = 0; mrsp = '0;
    forever begin
      @(negedge clk);
      mrsp.valid = 0;
      mreq_ready = 1;
      #1;
      if (mreq.valid) begin
        line_req_t r;
        r = mreq;
        @(negedge clk); mreq_ready = 0;
        repeat ($urandom_range(0, 6)) @(negedge clk);
        if (r.we) dram[r.addr] = r.wdata;
        mrsp.rdata = dram_line(r.addr);
        mrsp.valid = 1;
      end
    end
  end

  // Mechanism counters from the state machine's transitions.
  always @(posedge clk) if (rst_n) begin
    if (dut.state_q == dut.LOOKUP && dut.in_dram && !dut.in_spm && dut.hit) n_hit++;
    if (dut.state_q == dut.LOOKUP && dut.in_dram && !dut.in_spm && !dut.hit && dut.victim_vld) n_miss++;
    if (dut.state_q == dut.WB_SEND && mreq_ready && !dut.flushing_q) n_wb++;
    if (dut.state_q == dut.WB_SEND && mreq_ready && dut.flushing_q) n_flush_wb++;
    if (dut.state_q == dut.BYP_SEND && mreq_ready && !mreq.we) n_byp++;
  end

  // ---------------- bus driver and reference ----------------
  data_t refm [addr_t];
  task automatic access(input bit we, input addr_t a, input data_t wd, input strb_t st,
                        output data_t rd, output bit err, output int cyc);
    @(negedge clk);
    req = '{valid: 1, we: we, addr: a, wdata: wd, strb: st};
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req = '0; cyc = 1;
    #1; while (!rsp.valid) begin @(negedge clk); #1; cyc++; end
    rd = rsp.rdata; err = rsp.err;
  endtask
  task automatic dram_op(input addr_t a, input bit we);
    data_t rd, wd, exp; bit err; int cyc; strb_t st;
    wd = {$urandom, $urandom}; st = we ? 8'($urandom) : '1;
    access(we, a, wd, st, rd, err, cyc);
    exp = refm.exists(a) ? refm[a] : init_word(a);
    checks++;
    if (err) begin failures++; $display("error on DRAM %h", a); end
    else if (we) begin
      for (int b = 0; b < 8; b++) if (st[b]) exp[8*b +: 8] = wd[8*b +: 8];
      refm[a] = exp;
    end else if (rd !== exp) begin
      failures++; $display("DRAM read %h got %h exp %h", a, rd, exp);
    end
  endtask
  task automatic cfg_write(input logic [WAYS_T-1:0] ways);
    @(negedge clk);
    cfg = '{valid: 1, write: 1, addr: 32'h0, wdata: 32'(ways), wstrb: 4'hF};
    @(negedge clk); cfg = '0;
    // wait for the flush to end
    do begin
      @(negedge clk);
      cfg = '{valid: 1, write: 0, addr: 32'h4, wdata: 0, wstrb: 0};
      #1;
    end while (cfg_rsp.rdata[0]);
    cfg = '{valid: 1, write: 0, addr: 32'h0, wdata: 0, wstrb: 0};
    #1; checks++;
    if (cfg_rsp.rdata[WAYS_T-1:0] != ways) begin failures++; $display("SPM_EN reads %h", cfg_rsp.rdata); end
    @(negedge clk); cfg = '0;
  endtask
  localparam int WAYS_T = 4;
  localparam addr_t RANGE = 4 * 65536;  // DRAM test range: 4x the cache

  function automatic addr_t rnd_dram();
    return DRAM_BASE + 8 * $urandom_range(0, RANGE / 8 - 1);
  endfunction

  initial begin
    data_t rd; bit err; int cyc;
    req = '0; rsp_ready = 1; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // Phase 1: concentrated on 16 sets so that lines are evicted often.
    for (int i = 0; i < 3000; i++) begin
      addr_t a;
      a = DRAM_BASE + (($urandom_range(0, 15)) << 14) + ($urandom_range(0, 15) << 6) + 8 * $urandom_range(0, 7);
      dram_op(a, $urandom_range(0, 1));
    end
    // Hit latency: access the same word twice; the second is a hit.
    dram_op(DRAM_BASE + 48'h100, 0);
    access(0, DRAM_BASE + 48'h100, 0, '1, rd, err, cyc);
    checks++; if (cyc != 4) begin failures++; $display("hit latency %0d != 4", cyc); end

    // Phase 2: ways 2 and 3 become scratchpad.
    cfg_write(4'b1100);
    for (int i = 0; i < 200; i++) begin
      addr_t a; data_t wd;
      a = SPM_BASE + 2 * 16384 + 8 * $urandom_range(0, 2 * 16384 / 8 - 1);
      wd = {$urandom, $urandom};
      access(1, a, wd, '1, rd, err, cyc);
      access(0, a, 0, '1, rd, err, cyc);
      checks++; n_spm++;
      if (err || rd !== wd) begin failures++; $display("SPM %h got %h exp %h", a, rd, wd); end
    end
    access(0, SPM_BASE + 8, 0, '1, rd, err, cyc);
    checks++; if (!err) begin failures++; $display("no error for SPM access to a cache way"); end else n_err++;
    for (int i = 0; i < 1000; i++) dram_op(DRAM_BASE + (($urandom_range(0, 7)) << 14) + 8 * $urandom_range(0, 63), $urandom_range(0, 1));

    // Phase 3: all ways scratchpad; DRAM must now hold everything.
    cfg_write(4'b1111);
    foreach (refm[a]) begin
      line_t l; addr_t la;
      la = {a[AW-1:6], 6'b0};
      l = dram_line(la);
      checks++;
      if (l[64 * a[5:3] +: 64] !== refm[a]) begin failures++; $display("DRAM %h holds %h exp %h", a, l[64*a[5:3] +: 64], refm[a]); end
    end
    for (int i = 0; i < 100; i++) dram_op(rnd_dram(), $urandom_range(0, 1));

    // Phase 4: all ways back to cache mode.
    cfg_write(4'b0000);
    for (int i = 0; i < 1000; i++) dram_op(rnd_dram(), $urandom_range(0, 1));
    foreach (refm[a]) dram_op(a, 0);

    checks++; if (n_hit == 0)      begin failures++; $display("no hit"); end
    checks++; if (n_miss == 0)     begin failures++; $display("no miss"); end
    checks++; if (n_wb == 0)       begin failures++; $display("no dirty eviction"); end
    checks++; if (n_flush_wb == 0) begin failures++; $display("no flush write-back"); end
    checks++; if (n_byp == 0)      begin failures++; $display("no bypass"); end
    $display("hits=%0d misses=%0d evict_wb=%0d flush_wb=%0d bypass=%0d spm=%0d err=%0d",
             n_hit, n_miss, n_wb, n_flush_wb, n_byp, n_spm, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
