// llc: last-level cache with per-way scratchpad mode.
//
// A WAYS-way set-associative, write-back, write-allocate cache of SIZE_BYTES
// sits between the main bus and the HyperRAM controller. Any of its ways can
// be switched at run time into scratchpad memory (SPM): such a way no longer
// caches DRAM and is instead addressed directly through the SPM window
// (SPM_BASE + way * WAY_BYTES + set * LINE_BYTES + word * 8).
//
// How it works. Tags, valid and dirty bits are flip-flops; line data is one
// synchronous memory of 64-bit words with byte enables. A request is handled
// by a single state machine, one at a time:
//   * SPM window, way in SPM mode: one data-memory access, then respond.
//   * DRAM window: compare the tags of the cache ways. A hit is one
//     data-memory access. A miss picks a victim among the cache ways in
//     round-robin order, writes it back if dirty (read 8 words, send the line),
//     refills the line from DRAM (8 word writes) and then serves the access.
//   * No cache way left (all ways SPM): the line is read from DRAM, the word
//     returned, and for a write the merged line is written back (bypass).
//   * Anything else (SPM window on a way that caches): error response.
// Switching a way into SPM mode first flushes it: every dirty line of that
// way is written back and all its lines invalidated; only then does the way
// answer in the SPM window. Switching a way back to cache mode is immediate
// (its lines are already invalid).
//
// Config registers (Regbus, answer in the same cycle):
//   0x0 SPM_EN [WAYS-1:0]  write: requested SPM ways; read: ways in SPM mode now
//   0x4 STATUS [0]         flush in progress
//
// Timing: a request is accepted in the idle state; an SPM access or a hit
// has its response valid 4 cycles after the request cycle (lookup, data
// access, read-data register, response register).
// The way count, the size and the per-way SPM switch are the SoC's; line size,
// replacement order, flush-on-switch, bypass and the blocking single-request
// structure are choices of this design.
module llc
  import basilisk_pkg::*;
#(
  parameter int unsigned WAYS       = 4,
  parameter int unsigned SIZE_BYTES = 65536
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // main-bus slave
  input  bus_req_t  bus_req_i,
  output logic      bus_req_ready_o,
  output bus_rsp_t  bus_rsp_o,
  input  logic      bus_rsp_ready_i,
  // configuration
  input  reg_req_t  cfg_req_i,
  output reg_rsp_t  cfg_rsp_o,
  // line port to the DRAM controller
  output line_req_t mem_req_o,
  input  logic      mem_req_ready_i,
  input  line_rsp_t mem_rsp_i
);
  localparam int unsigned LINE_BYTES = LINE_WORDS * 8;
  localparam int unsigned SETS       = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned WAY_BYTES  = SIZE_BYTES / WAYS;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned WRD_W      = $clog2(LINE_WORDS);
  localparam int unsigned SET_W      = $clog2(SETS);
  localparam int unsigned WAY_W      = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W      = AW - SET_W - OFF_W;
  localparam int unsigned IDX_W      = WAY_W + SET_W + WRD_W;

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [SET_W-1:0] set_t;
  typedef logic [WAY_W-1:0] way_t;
  typedef logic [WRD_W-1:0] wrd_t;

  typedef enum logic [3:0] {
    IDLE, LOOKUP, ACCESS, RESP, WB_READ, WB_SEND, WB_WAIT, RF_SEND, RF_WAIT, RF_WRITE,
    BYP_SEND, BYP_WAIT, FLUSH
  } state_e;

  state_e   state_q;
  bus_req_t req_q;
  bus_rsp_t rsp_q;

  tag_t            tag_q   [WAYS][SETS];
  logic [SETS-1:0] valid_q [WAYS];
  logic [SETS-1:0] dirty_q [WAYS];

  logic [WAYS-1:0] spm_q, spm_req_q, flush_ways_q;
  way_t            rr_q, way_q;
  set_t            set_q;
  logic [WRD_W:0]  cnt_q;
  line_t           line_q;
  logic            flushing_q, wb_then_refill_q;

  // ---------------- data memory ----------------
  data_t data_mem [WAYS * SETS * LINE_WORDS];
  logic  [IDX_W-1:0] mem_idx;
  logic              mem_we;
  strb_t             mem_be;
  data_t             mem_wdata, mem_rdata_q;

  always_ff @(posedge clk_i) begin
    if (mem_we)
      for (int b = 0; b < 8; b++)
        if (mem_be[b]) data_mem[mem_idx][8*b+:8] <= mem_wdata[8*b+:8];
    mem_rdata_q <= data_mem[mem_idx];
  end

  // ---------------- request decode ----------------
  wire  addr_t spm_off  = req_q.addr - SPM_BASE;
  wire  logic  in_spm   = (req_q.addr >= SPM_BASE) && (spm_off < addr_t'(SIZE_BYTES));
  wire  logic  in_dram  = (req_q.addr >= DRAM_BASE);
  wire  way_t  spm_way  = way_t'(spm_off / addr_t'(WAY_BYTES));
  wire  set_t  req_set  = req_q.addr[OFF_W +: SET_W];
  wire  wrd_t  req_wrd  = req_q.addr[3 +: WRD_W];
  wire  tag_t  req_tag  = req_q.addr[AW-1 -: TAG_W];

  logic [WAYS-1:0] cache_ways;
  assign cache_ways = ~spm_q & ~flush_ways_q;

  logic hit;
  way_t hit_way;
  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (cache_ways[w] && valid_q[w][req_set] && tag_q[w][req_set] == req_tag) begin
        hit = 1'b1;
        hit_way = way_t'(w);
      end
  end

  // Round-robin victim: first cache way at or after rr_q.
  logic victim_vld;
  way_t victim;
  always_comb begin
    victim_vld = 1'b0;
    victim = '0;
    for (int k = WAYS - 1; k >= 0; k--) begin
      int unsigned w;
      w = (int'(rr_q) + k) % WAYS;
      if (cache_ways[w]) begin
        victim_vld = 1'b1;
        victim = way_t'(w);
      end
    end
  end

  // Next way to flush in the current set.
  logic fl_vld;
  way_t fl_way;
  always_comb begin
    fl_vld = 1'b0;
    fl_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (flush_ways_q[w] && valid_q[w][set_q]) begin
        fl_vld = 1'b1;
        fl_way = way_t'(w);
      end
  end

  // ---------------- outputs ----------------
  assign bus_req_ready_o = (state_q == IDLE) && (flush_ways_q == '0);
  assign bus_rsp_o       = rsp_q;

  always_comb begin
    mem_req_o       = '0;
    mem_req_o.wdata = line_q;
    unique case (state_q)
      WB_SEND: begin
        mem_req_o.valid = 1'b1;
        mem_req_o.we    = 1'b1;
        mem_req_o.addr  = {tag_q[way_q][set_q], set_q, OFF_W'(0)};
      end
      RF_SEND: begin
        mem_req_o.valid = 1'b1;
        mem_req_o.addr  = {req_q.addr[AW-1:OFF_W], OFF_W'(0)};
      end
      BYP_SEND: begin
        mem_req_o.valid = 1'b1;
        mem_req_o.we    = (cnt_q != '0);
        mem_req_o.addr  = {req_q.addr[AW-1:OFF_W], OFF_W'(0)};
      end
      default: ;
    endcase
  end

  // data-memory port
  always_comb begin
    mem_idx   = {way_q, set_q, wrd_t'(cnt_q)};
    mem_we    = 1'b0;
    mem_be    = '1;
    mem_wdata = line_q[DW*cnt_q[WRD_W-1:0] +: DW];
    unique case (state_q)
      ACCESS: begin
        mem_idx   = {way_q, set_q, req_wrd};
        mem_we    = req_q.we;
        mem_be    = req_q.strb;
        mem_wdata = req_q.wdata;
      end
      RF_WRITE: mem_we = 1'b1;
      default: ;
    endcase
  end

  // config registers
  always_comb begin
    cfg_rsp_o       = '0;
    cfg_rsp_o.ready = cfg_req_i.valid;
    unique case (cfg_req_i.addr[3:2])
      2'd0:    cfg_rsp_o.rdata = 32'(spm_q);
      2'd1:    cfg_rsp_o.rdata = 32'(flushing_q || flush_ways_q != '0);
      default: cfg_rsp_o.error = cfg_req_i.valid;
    endcase
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q          <= IDLE;
      req_q            <= '0;
      rsp_q            <= '0;
      spm_q            <= '0;
      spm_req_q        <= '0;
      flush_ways_q     <= '0;
      rr_q             <= '0;
      way_q            <= '0;
      set_q            <= '0;
      cnt_q            <= '0;
      line_q           <= '0;
      flushing_q       <= 1'b0;
      wb_then_refill_q <= 1'b0;
      for (int w = 0; w < WAYS; w++) begin
        valid_q[w] <= '0;
        dirty_q[w] <= '0;
        for (int s = 0; s < SETS; s++) tag_q[w][s] <= '0;
      end
    end else begin
      // Config write: ways leaving SPM mode return at once, ways entering it
      // are flushed first (see FLUSH).
      if (cfg_req_i.valid && cfg_req_i.write && cfg_req_i.addr[3:2] == 2'd0 && cfg_req_i.wstrb[0]) begin
        spm_req_q    <= cfg_req_i.wdata[WAYS-1:0];
        spm_q        <= spm_q & cfg_req_i.wdata[WAYS-1:0];
        flush_ways_q <= flush_ways_q | (cfg_req_i.wdata[WAYS-1:0] & ~spm_q);
      end

      unique case (state_q)
        IDLE: begin
          if (flush_ways_q != '0) begin
            flushing_q <= 1'b1;
            set_q      <= '0;
            state_q    <= FLUSH;
          end else if (bus_req_i.valid) begin
            req_q   <= bus_req_i;
            state_q <= LOOKUP;
          end
        end

        LOOKUP: begin
          set_q <= req_set;
          cnt_q <= '0;
          if (in_spm) begin
            set_q <= spm_off[OFF_W +: SET_W];
            way_q <= spm_way;
            if (spm_q[spm_way]) state_q <= ACCESS;
            else begin
              rsp_q   <= '{valid: 1'b1, err: 1'b1, rdata: '0};
              state_q <= RESP;
            end
          end else if (in_dram) begin
            if (hit) begin
              way_q   <= hit_way;
              state_q <= ACCESS;
            end else if (!victim_vld) begin
              state_q <= BYP_SEND;
            end else begin
              way_q <= victim;
              rr_q  <= way_t'((int'(victim) + 1) % WAYS);
              if (valid_q[victim][req_set] && dirty_q[victim][req_set]) begin
                wb_then_refill_q <= 1'b1;
                state_q          <= WB_READ;
              end else state_q <= RF_SEND;
            end
          end else begin
            rsp_q   <= '{valid: 1'b1, err: 1'b1, rdata: '0};
            state_q <= RESP;
          end
        end

        ACCESS: begin
          if (req_q.we && !in_spm) dirty_q[way_q][set_q] <= 1'b1;
          rsp_q.err <= 1'b0;
          state_q   <= RESP;
          rsp_q.valid <= 1'b0;
        end

        RESP: begin
          if (!rsp_q.valid) begin
            // first RESP cycle after ACCESS: read data now available
            rsp_q.valid <= 1'b1;
            rsp_q.rdata <= mem_rdata_q;
          end else if (bus_rsp_ready_i) begin
            rsp_q.valid <= 1'b0;
            state_q     <= IDLE;
          end
        end

        // Write-back: read LINE_WORDS words (one cycle of read latency).
        WB_READ: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q != '0) line_q[DW*(int'(cnt_q)-1) +: DW] <= mem_rdata_q;
          if (cnt_q == (WRD_W+1)'(LINE_WORDS)) state_q <= WB_SEND;
        end
        WB_SEND: if (mem_req_ready_i) state_q <= WB_WAIT;
        WB_WAIT: if (mem_rsp_i.valid) begin
          dirty_q[way_q][set_q] <= 1'b0;
          if (wb_then_refill_q) begin
            wb_then_refill_q <= 1'b0;
            state_q          <= RF_SEND;
          end else begin
            valid_q[way_q][set_q] <= 1'b0;
            state_q               <= FLUSH;
          end
        end

        // Refill: fetch the line, then write its words into the data memory.
        RF_SEND: if (mem_req_ready_i) state_q <= RF_WAIT;
        RF_WAIT: if (mem_rsp_i.valid) begin
          line_q  <= mem_rsp_i.rdata;
          cnt_q   <= '0;
          state_q <= RF_WRITE;
        end
        RF_WRITE: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == (WRD_W+1)'(LINE_WORDS - 1)) begin
            tag_q[way_q][set_q]   <= req_tag;
            valid_q[way_q][set_q] <= 1'b1;
            dirty_q[way_q][set_q] <= 1'b0;
            state_q               <= ACCESS;
          end
        end

        // Bypass (no cache way): read line, answer, write merged line back.
        BYP_SEND: if (mem_req_ready_i) state_q <= BYP_WAIT;
        BYP_WAIT: if (mem_rsp_i.valid) begin
          if (cnt_q == '0) begin
            line_q      <= mem_rsp_i.rdata;
            rsp_q.rdata <= mem_rsp_i.rdata[DW*req_wrd +: DW];
            rsp_q.err   <= 1'b0;
            if (req_q.we) begin
              for (int b = 0; b < 8; b++)
                if (req_q.strb[b]) line_q[DW*req_wrd + 8*b +: 8] <= req_q.wdata[8*b +: 8];
              cnt_q   <= 1;
              state_q <= BYP_SEND;
            end else begin
              rsp_q.valid <= 1'b1;
              state_q     <= RESP;
            end
          end else begin
            rsp_q.valid <= 1'b1;
            state_q     <= RESP;
          end
        end

        // Flush the ways entering SPM mode, set by set.
        FLUSH: begin
          if (fl_vld) begin
            way_q <= fl_way;
            if (dirty_q[fl_way][set_q]) begin
              cnt_q   <= '0;
              state_q <= WB_READ;
            end else valid_q[fl_way][set_q] <= 1'b0;
          end else if (set_q == set_t'(SETS - 1)) begin
            spm_q        <= spm_q | (flush_ways_q & spm_req_q);
            flush_ways_q <= '0;
            flushing_q   <= 1'b0;
            state_q      <= IDLE;
          end else begin
            set_q <= set_q + 1'b1;
          end
        end

        default: state_q <= IDLE;
      endcase
    end
  end

  // A response, once valid, stays until taken.
  a_rsp_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    bus_rsp_o.valid && !bus_rsp_ready_i |=> bus_rsp_o.valid);

endmodule
