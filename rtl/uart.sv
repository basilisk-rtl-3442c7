// uart: serial port with a Regbus register interface.
//
// Frames are 8N1 (start bit, 8 data bits LSB first, stop bit). Both
// directions run off one divisor, DIV clocks per bit. The receiver
// synchronises rx_i, waits for a falling edge, samples the middle of the
// start bit and then the middle of each following bit; a finished byte is
// held in a one-byte buffer until read, and raises irq_o.
//
// Registers (32-bit, answer in the same cycle):
//   0x0 DATA   write: start sending the byte (ignored while busy)
//              read:  received byte, clears "received"
//   0x4 STATUS [0] transmitter busy, [1] byte received, [2] overrun
//   0x8 DIV    clocks per bit (reset DEFAULT_DIV)
// The SoC has a UART; frame format, registers and divisor are this design's.
module uart
  import basilisk_pkg::*;
#(
  parameter int unsigned DEFAULT_DIV = 538   // 62 MHz / 115200 baud
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     tx_o,
  input  logic     rx_i,
  output logic     irq_o
);
  logic [15:0] div_q;
  // transmitter
  logic [9:0]  tx_shift_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;
  // receiver
  logic [2:0]  rx_sync_q;
  logic        rx_busy_q;
  logic [3:0]  rx_bits_q;
  logic [15:0] rx_cnt_q;
  logic [7:0]  rx_shift_q, rx_data_q;
  logic        rx_valid_q, rx_over_q;

  wire tx_busy = (tx_bits_q != 0);
  wire rx_in   = rx_sync_q[1];
  wire wr = reg_req_i.valid && reg_req_i.write;
  wire rd = reg_req_i.valid && !reg_req_i.write;

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[3:2])
      2'd0:    reg_rsp_o.rdata = {24'h0, rx_data_q};
      2'd1:    reg_rsp_o.rdata = {29'h0, rx_over_q, rx_valid_q, tx_busy};
      2'd2:    reg_rsp_o.rdata = {16'h0, div_q};
      default: reg_rsp_o.error = reg_req_i.valid;
    endcase
  end

  assign tx_o  = tx_busy ? tx_shift_q[0] : 1'b1;
  assign irq_o = rx_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q      <= 16'(DEFAULT_DIV);
      tx_shift_q <= '1;
      tx_bits_q  <= '0;
      tx_cnt_q   <= '0;
      rx_sync_q  <= '1;
      rx_busy_q  <= 1'b0;
      rx_bits_q  <= '0;
      rx_cnt_q   <= '0;
      rx_shift_q <= '0;
      rx_data_q  <= '0;
      rx_valid_q <= 1'b0;
      rx_over_q  <= 1'b0;
    end else begin
      if (wr && reg_req_i.addr[3:2] == 2'd2) div_q <= reg_req_i.wdata[15:0];

      // transmit
      if (wr && reg_req_i.addr[3:2] == 2'd0 && !tx_busy) begin
        tx_shift_q <= {1'b1, reg_req_i.wdata[7:0], 1'b0};
        tx_bits_q  <= 4'd10;
        tx_cnt_q   <= div_q - 1'b1;
      end else if (tx_busy) begin
        if (tx_cnt_q == 0) begin
          tx_shift_q <= {1'b1, tx_shift_q[9:1]};
          tx_bits_q  <= tx_bits_q - 1'b1;
          tx_cnt_q   <= div_q - 1'b1;
        end else tx_cnt_q <= tx_cnt_q - 1'b1;
      end

      // receive
      rx_sync_q <= {rx_sync_q[1:0], rx_i};
      if (rd && reg_req_i.addr[3:2] == 2'd0) begin
        rx_valid_q <= 1'b0;
        rx_over_q  <= 1'b0;
      end
      if (!rx_busy_q) begin
        if (rx_sync_q[2] && !rx_in) begin      // falling edge: start bit
          rx_busy_q <= 1'b1;
          rx_bits_q <= 4'd0;
          rx_cnt_q  <= {1'b0, div_q[15:1]};    // to the middle of the bit
        end
      end else if (rx_cnt_q == 0) begin
        rx_cnt_q <= div_q - 1'b1;
        if (rx_bits_q == 4'd0) begin
          if (rx_in) rx_busy_q <= 1'b0;         // glitch, not a start bit
          else rx_bits_q <= 4'd1;
        end else if (rx_bits_q <= 4'd8) begin
          rx_shift_q <= {rx_in, rx_shift_q[7:1]};
          rx_bits_q  <= rx_bits_q + 1'b1;
        end else begin                          // stop bit
          rx_busy_q <= 1'b0;
          if (rx_in) begin
            rx_data_q  <= rx_shift_q;
            rx_valid_q <= 1'b1;
            rx_over_q  <= rx_valid_q && !(rd && reg_req_i.addr[3:2] == 2'd0);
          end
        end
      end else rx_cnt_q <= rx_cnt_q - 1'b1;
    end
  end
endmodule
