// dma: two-dimensional DMA engine.
//
// Copies REPS rows of LEN bytes from SRC to DST. After each row the source
// and destination row addresses advance by SRC_STRIDE and DST_STRIDE, so the
// engine can gather or scatter a 2D block (a 1D copy is REPS = 1). Transfers
// are in 64-bit words; addresses, LEN and strides must be multiples of 8.
//
// How it works. A read front end and a write back end are decoupled by a
// FIFO of FIFO_DEPTH words. Reads are issued while the FIFO (counting reads
// still in flight) has room; writes are issued while the FIFO holds data.
// Both share one main-bus master port with one transaction in flight;
// writes take priority. A read returning an error still delivers its word
// and sets the error flag. The job ends when the last write is answered.
//
// Registers (32-bit, same-cycle answer):
//   0x00/0x04 SRC lo/hi   0x08/0x0C DST lo/hi   0x10 LEN
//   0x14 SRC_STRIDE       0x18 DST_STRIDE       0x1C REPS
//   0x20 CTRL  write bit 0 = start (ignored while busy)
//   0x24 STATUS [0] busy, [1] done, [2] error
// irq_o is the done flag; it clears on the next start.
// The 2D capability and decoupled ("asynchronous") read/write structure are
// the SoC's; the register map, FIFO depth and word granularity are this
// design's, and with one transaction in flight this engine does not reach
// the original's bandwidth.
module dma
  import basilisk_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output bus_req_t bus_req_o,
  input  logic     bus_req_ready_i,
  input  bus_rsp_t bus_rsp_i,
  output logic     bus_rsp_ready_o,
  output logic     irq_o
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [63:0] src_q, dst_q;
  logic [31:0] len_q, sstride_q, dstride_q, reps_q;
  logic        busy_q, done_q, err_q;

  // read front end
  logic [63:0] rd_row_q;
  logic [31:0] rd_off_q, rd_rows_q;
  // write back end
  logic [63:0] wr_row_q;
  logic [31:0] wr_off_q, wr_rows_q;

  data_t         fifo_q [FIFO_DEPTH];
  logic [PW-1:0] wptr_q, rptr_q;
  logic [PW:0]   cnt_q;

  bus_req_t req_q;
  logic     inflight_q, inflight_we_q;

  wire rd_left = busy_q && (rd_rows_q != 0);
  wire wr_left = busy_q && (wr_rows_q != 0);
  wire idle_port = !req_q.valid && !inflight_q;
  wire do_write = idle_port && wr_left && (cnt_q != 0);
  wire do_read  = idle_port && !do_write && rd_left && (cnt_q < (PW+1)'(FIFO_DEPTH));

  assign bus_req_o       = req_q;
  assign bus_rsp_ready_o = 1'b1;
  assign irq_o           = done_q;

  wire [5:0] roff = reg_req_i.addr[7:2];
  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (roff)
      6'd0: reg_rsp_o.rdata = src_q[31:0];
      6'd1: reg_rsp_o.rdata = src_q[63:32];
      6'd2: reg_rsp_o.rdata = dst_q[31:0];
      6'd3: reg_rsp_o.rdata = dst_q[63:32];
      6'd4: reg_rsp_o.rdata = len_q;
      6'd5: reg_rsp_o.rdata = sstride_q;
      6'd6: reg_rsp_o.rdata = dstride_q;
      6'd7: reg_rsp_o.rdata = reps_q;
      6'd8: reg_rsp_o.rdata = '0;
      6'd9: reg_rsp_o.rdata = {29'h0, err_q, done_q, busy_q};
      default: reg_rsp_o.error = reg_req_i.valid;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; dst_q <= '0; len_q <= '0; sstride_q <= '0; dstride_q <= '0; reps_q <= '0;
      busy_q <= 1'b0; done_q <= 1'b0; err_q <= 1'b0;
      rd_row_q <= '0; rd_off_q <= '0; rd_rows_q <= '0;
      wr_row_q <= '0; wr_off_q <= '0; wr_rows_q <= '0;
      wptr_q <= '0; rptr_q <= '0; cnt_q <= '0;
      req_q <= '0; inflight_q <= 1'b0; inflight_we_q <= 1'b0;
      for (int i = 0; i < FIFO_DEPTH; i++) fifo_q[i] <= '0;
    end else begin
      // register writes
      if (reg_req_i.valid && reg_req_i.write && !busy_q) begin
        unique case (roff)
          6'd0: src_q[31:0]  <= reg_req_i.wdata;
          6'd1: src_q[63:32] <= reg_req_i.wdata;
          6'd2: dst_q[31:0]  <= reg_req_i.wdata;
          6'd3: dst_q[63:32] <= reg_req_i.wdata;
          6'd4: len_q        <= reg_req_i.wdata;
          6'd5: sstride_q    <= reg_req_i.wdata;
          6'd6: dstride_q    <= reg_req_i.wdata;
          6'd7: reps_q       <= reg_req_i.wdata;
          6'd8: if (reg_req_i.wdata[0] && len_q != 0 && reps_q != 0) begin
            busy_q    <= 1'b1;
            done_q    <= 1'b0;
            err_q     <= 1'b0;
            rd_row_q  <= src_q;  rd_off_q <= '0; rd_rows_q <= reps_q;
            wr_row_q  <= dst_q;  wr_off_q <= '0; wr_rows_q <= reps_q;
          end
          default: ;
        endcase
      end

      // issue
      if (do_write) begin
        req_q <= '{valid: 1'b1, we: 1'b1, addr: AW'(wr_row_q + 64'(wr_off_q)),
                   wdata: fifo_q[rptr_q], strb: '1};
        rptr_q <= rptr_q + 1'b1;
        if (wr_off_q + 8 >= len_q) begin
          wr_off_q  <= '0;
          wr_row_q  <= wr_row_q + 64'(dstride_q);
          wr_rows_q <= wr_rows_q - 1'b1;
        end else wr_off_q <= wr_off_q + 8;
      end else if (do_read) begin
        req_q <= '{valid: 1'b1, we: 1'b0, addr: AW'(rd_row_q + 64'(rd_off_q)), wdata: '0, strb: '1};
        if (rd_off_q + 8 >= len_q) begin
          rd_off_q  <= '0;
          rd_row_q  <= rd_row_q + 64'(sstride_q);
          rd_rows_q <= rd_rows_q - 1'b1;
        end else rd_off_q <= rd_off_q + 8;
      end

      if (req_q.valid && bus_req_ready_i) begin
        req_q.valid   <= 1'b0;
        inflight_q    <= 1'b1;
        inflight_we_q <= req_q.we;
      end

      // responses
      if (inflight_q && bus_rsp_i.valid) begin
        inflight_q <= 1'b0;
        if (bus_rsp_i.err) err_q <= 1'b1;
        if (!inflight_we_q) begin
          fifo_q[wptr_q] <= bus_rsp_i.rdata;
          wptr_q <= wptr_q + 1'b1;
        end else if (wr_rows_q == 0) begin
          busy_q <= 1'b0;   // last write answered
          done_q <= 1'b1;
        end
      end

      // FIFO occupancy: reserved at read issue, released at write issue
      cnt_q <= cnt_q + (PW+1)'(do_read) - (PW+1)'(do_write);
    end
  end

  a_fifo_bound: assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= (PW+1)'(FIFO_DEPTH));
endmodule
