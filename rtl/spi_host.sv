// spi_host: SPI / quad-SPI host for serial flash and similar devices.
//
// Transfers one byte per command in SPI mode 0 (clock idles low, data
// changes after the falling edge, sampled on the rising edge), most
// significant bit first. In standard mode a byte takes 8 clocks: sd_o[0]
// is MOSI and sd_i[1] is MISO. In quad mode a byte takes 2 clocks on four
// data lines, either driven (quad write) or sampled (quad read, lines
// released). Each half of the SPI clock lasts DIV system clocks. Chip
// selects are active low and software controlled, so multi-byte commands
// keep the device selected between bytes.
//
// Registers (32-bit, same-cycle answer):
//   0x0 CTRL  [1:0] chip select enables, [2] quad, [3] quad read, [15:8] DIV
//   0x4 DATA  write: send byte (ignored while busy); read: last received byte
//   0x8 STATUS [0] busy
// The SoC has a QSPI interface; this host, its registers and timing are
// this design's.
module spi_host
  import basilisk_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  reg_req_t   reg_req_i,
  output reg_rsp_t   reg_rsp_o,
  output logic       sck_o,
  output logic [1:0] csb_o,
  output logic [3:0] sd_o,
  output logic [3:0] sd_oe_o,
  input  logic [3:0] sd_i
);
  logic [1:0] cs_q;
  logic       quad_q, qread_q;
  logic [7:0] div_q;
  logic [7:0] tx_q, rx_q;
  logic       busy_q, sck_q;
  logic [7:0] cnt_q;
  logic [3:0] left_q;

  wire [7:0] half = (div_q == 0) ? 8'd1 : div_q;
  wire       wr   = reg_req_i.valid && reg_req_i.write;

  assign sck_o   = sck_q;
  assign csb_o   = ~cs_q;
  assign sd_o    = quad_q ? tx_q[7:4] : {3'b000, tx_q[7]};
  assign sd_oe_o = !busy_q ? 4'b0000 : quad_q ? (qread_q ? 4'b0000 : 4'b1111) : 4'b0001;

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[3:2])
      2'd0: reg_rsp_o.rdata = {16'h0, div_q, 4'h0, qread_q, quad_q, cs_q};
      2'd1: reg_rsp_o.rdata = {24'h0, rx_q};
      2'd2: reg_rsp_o.rdata = {31'h0, busy_q};
      default: reg_rsp_o.error = reg_req_i.valid;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cs_q <= '0; quad_q <= 1'b0; qread_q <= 1'b0; div_q <= 8'd4;
      tx_q <= '0; rx_q <= '0; busy_q <= 1'b0; sck_q <= 1'b0; cnt_q <= '0; left_q <= '0;
    end else begin
      if (wr && !busy_q) begin
        unique case (reg_req_i.addr[3:2])
          2'd0: {div_q, qread_q, quad_q, cs_q} <= {reg_req_i.wdata[15:8], reg_req_i.wdata[3:0]};
          2'd1: begin
            tx_q   <= reg_req_i.wdata[7:0];
            busy_q <= 1'b1;
            sck_q  <= 1'b0;
            cnt_q  <= half - 1'b1;
            left_q <= quad_q ? 4'd2 : 4'd8;
          end
          default: ;
        endcase
      end else if (busy_q) begin
        if (cnt_q == 0) begin
          cnt_q <= half - 1'b1;
          if (!sck_q) begin
            sck_q <= 1'b1;           // rising edge: sample
            rx_q  <= quad_q ? {rx_q[3:0], sd_i} : {rx_q[6:0], sd_i[1]};
          end else begin
            sck_q  <= 1'b0;          // falling edge: next bits out
            tx_q   <= quad_q ? {tx_q[3:0], 4'h0} : {tx_q[6:0], 1'b0};
            left_q <= left_q - 1'b1;
            if (left_q == 4'd1) busy_q <= 1'b0;
          end
        end else cnt_q <= cnt_q - 1'b1;
      end
    end
  end
endmodule
