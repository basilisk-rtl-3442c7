// hyperbus_ctrl: HyperRAM (HyperBus) controller for two DRAM chips.
//
// The last-level cache hands over whole 64-byte lines to read or write. Each
// line becomes one HyperBus burst on the chip selected by the address:
//   CA    3 clocks   48-bit command/address, 16 bits per clock
//   LAT   2*LATENCY  fixed initial latency (the "2x" fixed-latency mode)
//   DATA  32 clocks  one 16-bit word per clock = two DDR bytes per clock
//   END   1 clock    chip select released
// then the line response is returned. HyperBus transfers one byte on each
// clock edge, so at the SoC clock the data phase moves 2 bytes per cycle
// (124 MB/s at 62 MHz, the SoC's figure). This module works on the SoC clock
// only: hb_dq_o carries the rising-edge byte in [15:8] and the falling-edge
// byte in [7:0]; DDR output registers, the 90-degree clock and the RWDS
// capture delay line are in the PHY/pads, outside this module. On reads the
// PHY returns each captured word on hb_dq_i with hb_dq_valid_i (one per RWDS
// cycle); the controller counts 32 of them.
//
// Command/address word (HyperBus): CA[47] read, CA[46] memory space (0),
// CA[45] linear burst (1), CA[44:16] word address [31:3], CA[2:0] word
// address [2:0]. The chip is selected by address bit CHIP_ADDR_W.
// Line byte 2k goes out on the rising edge of word k, byte 2k+1 on the
// falling edge. During writes RWDS is driven low (no byte masked).
//
// Two chips and the 124 MB/s rate are the SoC's; the burst-per-line
// structure, latency setting, chip size and byte order are this design's.
module hyperbus_ctrl
  import basilisk_pkg::*;
#(
  parameter int unsigned NUM_CHIPS   = 2,
  parameter int unsigned LATENCY     = 6,   // HyperRAM initial latency in clocks
  parameter int unsigned CHIP_ADDR_W = 23   // 8 MiB per chip
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  line_req_t            line_req_i,
  output logic                 line_req_ready_o,
  output line_rsp_t            line_rsp_o,
  // HyperBus PHY side
  output logic [NUM_CHIPS-1:0] hb_cs_no,
  output logic                 hb_ck_en_o,
  output logic [15:0]          hb_dq_o,
  output logic                 hb_dq_oe_o,
  output logic [1:0]           hb_rwds_o,
  output logic                 hb_rwds_oe_o,
  input  logic [15:0]          hb_dq_i,
  input  logic                 hb_dq_valid_i,
  output logic                 hb_rst_no
);
  localparam int unsigned WORDS = LINE_BITS / 16;   // 32 HyperBus words per line
  localparam int unsigned CW    = (NUM_CHIPS > 1) ? $clog2(NUM_CHIPS) : 1;

  typedef enum logic [2:0] {IDLE, CA, LAT, DATA, FINISH, RESP} state_e;
  state_e      state_q;
  line_req_t   req_q;
  line_t       buf_q;
  logic [7:0]  cnt_q;
  logic [CW-1:0] chip_q;

  logic [47:0] ca;
  logic [31:0] waddr;  // 16-bit word address inside the chip
  always_comb begin
    waddr      = 32'(req_q.addr[CHIP_ADDR_W-1:1]);
    ca         = '0;
    ca[47]     = !req_q.we;
    ca[46]     = 1'b0;
    ca[45]     = 1'b1;
    ca[44:16]  = waddr[31:3];
    ca[2:0]    = waddr[2:0];
  end

  assign line_req_ready_o = (state_q == IDLE);
  assign hb_rst_no        = rst_ni;

  always_comb begin
    hb_cs_no     = '1;
    hb_ck_en_o   = 1'b0;
    hb_dq_o      = '0;
    hb_dq_oe_o   = 1'b0;
    hb_rwds_o    = 2'b00;
    hb_rwds_oe_o = 1'b0;
    if (state_q inside {CA, LAT, DATA}) begin
      hb_cs_no[chip_q] = 1'b0;
      hb_ck_en_o       = 1'b1;
    end
    if (state_q == CA) begin
      hb_dq_oe_o = 1'b1;
      hb_dq_o    = ca[47 - 16*int'(cnt_q[1:0]) -: 16];
    end
    if (state_q == DATA && req_q.we) begin
      hb_dq_oe_o   = 1'b1;
      hb_rwds_oe_o = 1'b1;
      hb_dq_o      = {buf_q[16*cnt_q[4:0] +: 8], buf_q[16*cnt_q[4:0] + 8 +: 8]};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= IDLE;
      req_q      <= '0;
      buf_q      <= '0;
      cnt_q      <= '0;
      chip_q     <= '0;
      line_rsp_o <= '0;
    end else begin
      line_rsp_o.valid <= 1'b0;
      unique case (state_q)
        IDLE: if (line_req_i.valid) begin
          req_q   <= line_req_i;
          buf_q   <= line_req_i.wdata;
          chip_q  <= CW'(line_req_i.addr >> CHIP_ADDR_W);
          cnt_q   <= '0;
          state_q <= CA;
        end
        CA: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 8'd2) begin
            cnt_q   <= '0;
            state_q <= LAT;
          end
        end
        LAT: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 8'(2 * LATENCY - 1)) begin
            cnt_q   <= '0;
            state_q <= DATA;
          end
        end
        DATA: begin
          if (req_q.we) begin
            cnt_q <= cnt_q + 1'b1;
            if (cnt_q == 8'(WORDS - 1)) state_q <= FINISH;
          end else if (hb_dq_valid_i) begin
            buf_q[16*cnt_q[4:0] +: 16] <= {hb_dq_i[7:0], hb_dq_i[15:8]};
            cnt_q <= cnt_q + 1'b1;
            if (cnt_q == 8'(WORDS - 1)) state_q <= FINISH;
          end
        end
        FINISH: state_q <= RESP;
        RESP: begin
          line_rsp_o.valid <= 1'b1;
          line_rsp_o.rdata <= buf_q;
          state_q          <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
