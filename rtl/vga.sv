// vga: display controller with frame-buffer fetch.
//
// Generates VGA timing and streams a frame buffer from memory. The default
// timing is XGA (1024x768) with the VESA 60 Hz blanking: 1344 clocks per
// line (24 front porch, 136 sync, 160 back porch) and 806 lines per frame
// (3, 6, 29); both syncs are active low. One pixel is emitted per clock.
//
// How it works. Horizontal and vertical counters walk the whole frame. A
// fetch engine reads the frame buffer word by word over the main bus (one
// read in flight) into a FIFO of FIFO_DEPTH 64-bit words, as far ahead as
// the FIFO allows. Each word holds four RGB565 pixels, lowest pixel first.
// During the active area the pixel stage takes one pixel per clock and pops
// a word every fourth pixel. At the first blanking line of each frame the
// fetcher is rewound to FB_BASE and the FIFO emptied, so every frame starts
// aligned. If the FIFO is empty when a pixel is due, black is shown and the
// underflow counter counts it.
//
// Registers (32-bit, same-cycle answer):
//   0x0 CTRL [0] enable     0x4/0x8 FB_BASE lo/hi
//   0xC UNDERFLOW  pixels shown black for lack of data (write clears)
// Outputs (hsync, vsync, rgb, de) are registered: they trail the counters by
// one clock. XGA at 60 Hz follows the SoC; at one pixel per 62 MHz system
// clock the frame rate is 57 Hz, since XGA60 needs a 65 MHz pixel clock.
// Pixel format, FIFO and register map are this design's.
module vga
  import basilisk_pkg::*;
#(
  parameter int unsigned H_ACTIVE   = 1024,
  parameter int unsigned H_FP       = 24,
  parameter int unsigned H_SYNC     = 136,
  parameter int unsigned H_BP       = 160,
  parameter int unsigned V_ACTIVE   = 768,
  parameter int unsigned V_FP       = 3,
  parameter int unsigned V_SYNC     = 6,
  parameter int unsigned V_BP       = 29,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  reg_req_t   reg_req_i,
  output reg_rsp_t   reg_rsp_o,
  output bus_req_t   bus_req_o,
  input  logic       bus_req_ready_i,
  input  bus_rsp_t   bus_rsp_i,
  output logic       bus_rsp_ready_o,
  output logic       hsync_o,
  output logic       vsync_o,
  output logic       de_o,
  output logic [4:0] red_o,
  output logic [5:0] green_o,
  output logic [4:0] blue_o
);
  localparam int unsigned H_TOTAL = H_ACTIVE + H_FP + H_SYNC + H_BP;
  localparam int unsigned V_TOTAL = V_ACTIVE + V_FP + V_SYNC + V_BP;
  localparam int unsigned FRAME_WORDS = H_ACTIVE * V_ACTIVE / 4;
  localparam int unsigned HW = $clog2(H_TOTAL);
  localparam int unsigned VW = $clog2(V_TOTAL);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic          en_q;
  logic [63:0]   base_q;
  logic [31:0]   underflow_q;
  logic [HW-1:0] h_q;
  logic [VW-1:0] v_q;

  // fetch engine
  data_t         fifo_q [FIFO_DEPTH];
  logic [PW-1:0] wptr_q, rptr_q;
  logic [PW:0]   cnt_q;          // words stored plus read in flight
  logic [31:0]   words_left_q;
  logic [AW-1:0] addr_q;
  bus_req_t      req_q;
  logic          inflight_q;
  logic [1:0]    pix_q;          // pixel index inside the current word

  wire active  = (h_q < HW'(H_ACTIVE)) && (v_q < VW'(V_ACTIVE));
  wire frame_end = (h_q == '0) && (v_q == VW'(V_ACTIVE));
  logic rewind_q;
  logic [PW:0] avail;  // words actually in the FIFO
  assign avail = cnt_q - (PW+1)'(inflight_q || req_q.valid);
  wire pop = en_q && active && (avail != 0) && (pix_q == 2'd3);

  assign bus_req_o       = req_q;
  assign bus_rsp_ready_o = 1'b1;

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[3:2])
      2'd0: reg_rsp_o.rdata = {31'h0, en_q};
      2'd1: reg_rsp_o.rdata = base_q[31:0];
      2'd2: reg_rsp_o.rdata = base_q[63:32];
      2'd3: reg_rsp_o.rdata = underflow_q;
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; base_q <= '0; underflow_q <= '0;
      h_q <= '0; v_q <= '0;
      wptr_q <= '0; rptr_q <= '0; cnt_q <= '0; words_left_q <= '0; addr_q <= '0;
      req_q <= '0; inflight_q <= 1'b0; pix_q <= '0; rewind_q <= 1'b0;
      hsync_o <= 1'b1; vsync_o <= 1'b1; de_o <= 1'b0;
      red_o <= '0; green_o <= '0; blue_o <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) fifo_q[i] <= '0;
    end else begin
      if (reg_req_i.valid && reg_req_i.write) begin
        unique case (reg_req_i.addr[3:2])
          2'd0: en_q <= reg_req_i.wdata[0];
          2'd1: base_q[31:0]  <= reg_req_i.wdata;
          2'd2: base_q[63:32] <= reg_req_i.wdata;
          2'd3: underflow_q   <= '0;
          default: ;
        endcase
      end

      // timing counters
      if (h_q == HW'(H_TOTAL - 1)) begin
        h_q <= '0;
        v_q <= (v_q == VW'(V_TOTAL - 1)) ? '0 : v_q + 1'b1;
      end else h_q <= h_q + 1'b1;

      // pixel stage
      hsync_o <= !((h_q >= HW'(H_ACTIVE + H_FP)) && (h_q < HW'(H_ACTIVE + H_FP + H_SYNC)));
      vsync_o <= !((v_q >= VW'(V_ACTIVE + V_FP)) && (v_q < VW'(V_ACTIVE + V_FP + V_SYNC)));
      de_o    <= en_q && active;
      {red_o, green_o, blue_o} <= '0;
      if (en_q && active) begin
        if (avail != 0) begin
          {red_o, green_o, blue_o} <= fifo_q[rptr_q][16*pix_q +: 16];
          pix_q <= pix_q + 1'b1;
        end else underflow_q <= underflow_q + 1'b1;
      end

      // fetch engine
      if (req_q.valid && bus_req_ready_i) begin
        req_q.valid <= 1'b0;
        inflight_q  <= 1'b1;
      end
      if (inflight_q && bus_rsp_i.valid) begin
        inflight_q     <= 1'b0;
        fifo_q[wptr_q] <= bus_rsp_i.rdata;
        wptr_q         <= wptr_q + 1'b1;
      end
      if (frame_end) rewind_q <= 1'b1;
      if (rewind_q) begin
        // Start of vertical blanking: rewind once no read is outstanding.
        if (!req_q.valid && !inflight_q) begin
          rewind_q     <= 1'b0;
          wptr_q       <= '0;
          rptr_q       <= '0;
          cnt_q        <= '0;
          pix_q        <= '0;
          addr_q       <= base_q[AW-1:0];
          words_left_q <= en_q ? 32'(FRAME_WORDS) : '0;
        end
      end else begin
        if (en_q && !req_q.valid && !inflight_q && words_left_q != 0 &&
            cnt_q < (PW+1)'(FIFO_DEPTH)) begin
          req_q        <= '{valid: 1'b1, we: 1'b0, addr: addr_q, wdata: '0, strb: '1};
          addr_q       <= addr_q + AW'(8);
          words_left_q <= words_left_q - 1'b1;
          cnt_q        <= cnt_q + 1'b1 - (PW+1)'(pop);
        end else cnt_q <= cnt_q - (PW+1)'(pop);
        if (pop) rptr_q <= rptr_q + 1'b1;
      end
    end
  end
endmodule
