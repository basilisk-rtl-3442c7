// i2c_host: byte-level I2C controller (bus master).
//
// Software issues one command per byte: optionally a START (or repeated
// START) before it, then the byte itself with its acknowledge bit, then
// optionally a STOP. A write command sends the 8 data bits MSB first and
// samples the device's ACK; a read command releases SDA, samples 8 bits and
// then sends ACK or NACK as asked. Both lines are open drain: the *_oe_o
// outputs pull the line low, the *_i inputs read the wired level. Every bus
// phase is cut into quarter periods of DIV+1 system clocks; the host waits
// while a device stretches SCL low.
//
// Registers (32-bit, same-cycle answer):
//   0x0 DIV     [15:0] quarter SCL period minus one, in system clocks
//   0x4 CMD     write: [7:0] byte, [8] START first, [9] STOP after,
//               [10] read, [11] NACK (for reads); ignored while busy
//   0x8 STATUS  [0] busy, [1] last ACK sampled was a NACK
//   0xC RXDATA  [7:0] last byte read
// The SoC has an I2C interface; this controller, its registers and timing
// are this design's.
module i2c_host
  import basilisk_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     scl_oe_o,
  input  logic     scl_i,
  output logic     sda_oe_o,
  input  logic     sda_i
);
  typedef enum logic [1:0] {IDLE, START, BITS, STOP} state_e;
  state_e      state_q;
  logic [15:0] div_q, cnt_q;
  logic [1:0]  q_q;          // quarter inside the current phase
  logic [3:0]  bit_q;        // 0..8, 8 = acknowledge bit
  logic [7:0]  tx_q, rx_q;
  logic        stop_q, read_q, nack_q, nack_seen_q;
  logic        scl_q, sda_q; // levels the host lets the lines have

  assign scl_oe_o = !scl_q;
  assign sda_oe_o = !sda_q;

  wire wr = reg_req_i.valid && reg_req_i.write;
  wire tick = (cnt_q == 0);
  // the host's own data bit for the current bit slot
  wire out_bit = (bit_q == 4'd8) ? (read_q ? nack_q : 1'b1)
                                 : (read_q ? 1'b1 : tx_q[3'd7 - bit_q[2:0]]);

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[3:2])
      2'd0: reg_rsp_o.rdata = {16'h0, div_q};
      2'd1: reg_rsp_o.rdata = '0;
      2'd2: reg_rsp_o.rdata = {30'h0, nack_seen_q, state_q != IDLE};
      2'd3: reg_rsp_o.rdata = {24'h0, rx_q};
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; div_q <= 16'd155; cnt_q <= '0; q_q <= '0; bit_q <= '0;
      tx_q <= '0; rx_q <= '0; stop_q <= 1'b0; read_q <= 1'b0; nack_q <= 1'b0; nack_seen_q <= 1'b0;
      scl_q <= 1'b1; sda_q <= 1'b1;
    end else begin
      if (wr && reg_req_i.addr[3:2] == 2'd0 && state_q == IDLE) div_q <= reg_req_i.wdata[15:0];
      if (wr && reg_req_i.addr[3:2] == 2'd1 && state_q == IDLE) begin
        tx_q    <= reg_req_i.wdata[7:0];
        stop_q  <= reg_req_i.wdata[9];
        read_q  <= reg_req_i.wdata[10];
        nack_q  <= reg_req_i.wdata[11];
        bit_q   <= '0;
        q_q     <= '0;
        cnt_q   <= div_q;
        state_q <= reg_req_i.wdata[8] ? START : BITS;
      end else if (state_q != IDLE) begin
        if (!tick) cnt_q <= cnt_q - 1'b1;
        else begin
          cnt_q <= div_q;
          q_q   <= q_q + 1'b1;
          unique case (state_q)
            START: unique case (q_q)
              2'd0: sda_q <= 1'b1;
              2'd1: scl_q <= 1'b1;
              2'd2: sda_q <= 1'b0;
              default: begin scl_q <= 1'b0; state_q <= BITS; end
            endcase
            BITS: unique case (q_q)
              2'd0: begin scl_q <= 1'b0; sda_q <= out_bit; end
              2'd1: scl_q <= 1'b1;
              2'd2: if (!scl_i) begin
                      q_q <= q_q;              // clock stretched: wait
                    end else if (bit_q == 4'd8) begin
                      if (!read_q) nack_seen_q <= sda_i;
                    end else if (read_q) rx_q <= {rx_q[6:0], sda_i};
              default: begin
                scl_q <= 1'b0;
                if (bit_q == 4'd8) state_q <= stop_q ? STOP : IDLE;
                bit_q <= bit_q + 1'b1;
              end
            endcase
            STOP: unique case (q_q)
              2'd0: begin scl_q <= 1'b0; sda_q <= 1'b0; end
              2'd1: scl_q <= 1'b1;
              2'd2: sda_q <= 1'b1;
              default: state_q <= IDLE;
            endcase
            default: state_q <= IDLE;
          endcase
        end
      end
    end
  end
endmodule
