// c2c_link: duplex serial chip-to-chip link carrying memory accesses.
//
// Two chips connect TX to RX in both directions. A main-bus access that
// reaches this block's slave port (the C2C window) is packed into a request
// packet and sent to the other chip; there the packet becomes a main-bus
// access through the master port, and its response travels back as a
// response packet, which completes the original access. So each chip can
// read and write the other's address space (remote address = local address
// - C2C_BASE + REMOTE_OFFSET).
//
// Wire format: a packet is sent LANES bits per clock, least significant bit
// first, with tx_valid_o high for every clock of the packet. Bit 0 tells the
// type: 0 request, 1 response.
//   request  (122 bits): type, we, addr[47:0], strb[7:0], wdata[63:0]
//   response ( 66 bits): type, err, rdata[63:0]
// The transmitter sends one packet at a time; a waiting response goes before
// a waiting request. With one lane, a word read costs 122 + 66 bit-times on
// the wires plus the remote access. The receiver assumes the RX wires are
// already in this clock domain (the clock-forwarding and capture PHY is not
// part of this block).
//
// The duplex, fully digital link for direct memory access and its 62 Mbit/s
// (one bit per clock at 62 MHz, one lane) follow the SoC; the packet format,
// lane count and window mapping are this design's.
module c2c_link
  import basilisk_pkg::*;
#(
  parameter int unsigned LANES         = 1,
  parameter addr_t       REMOTE_OFFSET = '0
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // slave port: local accesses to the remote chip
  input  bus_req_t         slv_req_i,
  output logic             slv_req_ready_o,
  output bus_rsp_t         slv_rsp_o,
  input  logic             slv_rsp_ready_i,
  // master port: remote accesses to the local chip
  output bus_req_t         mst_req_o,
  input  logic             mst_req_ready_i,
  input  bus_rsp_t         mst_rsp_i,
  output logic             mst_rsp_ready_o,
  // serial link
  output logic             tx_valid_o,
  output logic [LANES-1:0] tx_data_o,
  input  logic             rx_valid_i,
  input  logic [LANES-1:0] rx_data_i
);
  localparam int unsigned REQ_BITS = 1 + 1 + AW + SW + DW;   // 122
  localparam int unsigned RSP_BITS = 1 + 1 + DW;             // 66
  localparam int unsigned REQ_BEATS = (REQ_BITS + LANES - 1) / LANES;
  localparam int unsigned RSP_BEATS = (RSP_BITS + LANES - 1) / LANES;
  localparam int unsigned PKT_W = REQ_BEATS * LANES;
  localparam int unsigned CW = $clog2(REQ_BEATS + 1);

  // ---------------- outbound request (slave port) ----------------
  logic     out_busy_q;      // a local access is waiting for its response
  logic     out_send_q;      // its request packet still has to be sent
  bus_req_t out_req_q;
  bus_rsp_t slv_rsp_q;

  assign slv_req_ready_o = !out_busy_q;
  assign slv_rsp_o       = slv_rsp_q;

  // ---------------- inbound request (master port) ----------------
  bus_req_t mst_req_q;
  logic     in_busy_q;       // a remote access is being served here
  logic     rsp_send_q;      // its response packet still has to be sent
  bus_rsp_t in_rsp_q;

  assign mst_req_o       = mst_req_q;
  assign mst_rsp_ready_o = 1'b1;

  // ---------------- transmitter ----------------
  logic [PKT_W-1:0] tx_shift_q;
  logic [CW-1:0]    tx_cnt_q;
  wire tx_idle = (tx_cnt_q == '0);
  wire send_rsp = tx_idle && rsp_send_q;
  wire send_req = tx_idle && !rsp_send_q && out_send_q;

  assign tx_valid_o = !tx_idle;
  assign tx_data_o  = tx_shift_q[LANES-1:0];

  // ---------------- receiver ----------------
  logic [PKT_W-1:0] rx_shift_q;
  logic [CW-1:0]    rx_cnt_q;
  logic             rx_type_q;
  // The first beat's bit 0 gives the packet type and thus its length.
  wire rx_first_type = rx_data_i[0];
  wire [CW-1:0] rx_len = (rx_cnt_q == '0) ? (rx_first_type ? CW'(RSP_BEATS) : CW'(REQ_BEATS))
                                          : (rx_type_q ? CW'(RSP_BEATS) : CW'(REQ_BEATS));
  wire rx_last = rx_valid_i && (rx_cnt_q == rx_len - 1'b1);
  // packet with its last beat shifted in, aligned to bit 0
  logic [PKT_W-1:0] rx_full, rx_pkt;
  assign rx_full = {rx_data_i, rx_shift_q[PKT_W-1:LANES]};
  assign rx_pkt  = rx_type_q ? (rx_full >> (PKT_W - RSP_BEATS * LANES)) : rx_full;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_busy_q <= 1'b0; out_send_q <= 1'b0; out_req_q <= '0; slv_rsp_q <= '0;
      mst_req_q <= '0; in_busy_q <= 1'b0; rsp_send_q <= 1'b0; in_rsp_q <= '0;
      tx_shift_q <= '0; tx_cnt_q <= '0;
      rx_shift_q <= '0; rx_cnt_q <= '0; rx_type_q <= 1'b0;
    end else begin
      // accept a local access
      if (slv_req_i.valid && slv_req_ready_o) begin
        out_busy_q     <= 1'b1;
        out_send_q     <= 1'b1;
        out_req_q      <= slv_req_i;
        out_req_q.addr <= slv_req_i.addr - C2C_BASE + REMOTE_OFFSET;
      end
      if (slv_rsp_q.valid && slv_rsp_ready_i) begin
        slv_rsp_q.valid <= 1'b0;
        out_busy_q      <= 1'b0;
      end

      // transmit
      if (send_rsp) begin
        tx_shift_q <= PKT_W'({in_rsp_q.rdata, in_rsp_q.err, 1'b1});
        tx_cnt_q   <= CW'(RSP_BEATS);
        rsp_send_q <= 1'b0;
        in_busy_q  <= 1'b0;
      end else if (send_req) begin
        tx_shift_q <= PKT_W'({out_req_q.wdata, out_req_q.strb, out_req_q.addr, out_req_q.we, 1'b0});
        tx_cnt_q   <= CW'(REQ_BEATS);
        out_send_q <= 1'b0;
      end else if (!tx_idle) begin
        tx_shift_q <= tx_shift_q >> LANES;
        tx_cnt_q   <= tx_cnt_q - 1'b1;
      end

      // receive
      if (rx_valid_i) begin
        rx_shift_q <= rx_full;
        if (rx_cnt_q == '0) rx_type_q <= rx_first_type;
        rx_cnt_q <= rx_last ? '0 : rx_cnt_q + 1'b1;
      end
      if (rx_last) begin
        if ((rx_cnt_q == '0) ? rx_first_type : rx_type_q) begin
          // response to our outstanding access
          slv_rsp_q.valid <= 1'b1;
          slv_rsp_q.err   <= rx_pkt[1];
          slv_rsp_q.rdata <= rx_pkt[2 +: DW];
        end else begin
          // remote access to perform locally
          mst_req_q.valid <= 1'b1;
          mst_req_q.we    <= rx_pkt[1];
          mst_req_q.addr  <= rx_pkt[2 +: AW];
          mst_req_q.strb  <= rx_pkt[2 + AW +: SW];
          mst_req_q.wdata <= rx_pkt[2 + AW + SW +: DW];
          in_busy_q       <= 1'b1;
        end
      end

      // perform the remote access
      if (mst_req_q.valid && mst_req_ready_i) mst_req_q.valid <= 1'b0;
      if (in_busy_q && !mst_req_q.valid && !rsp_send_q && mst_rsp_i.valid) begin
        in_rsp_q   <= mst_rsp_i;
        rsp_send_q <= 1'b1;
      end
    end
  end

  // The peer sends at most one request at a time: never a new one while
  // the previous is being served here.
  a_one_inbound: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rx_last && !((rx_cnt_q == '0) ? rx_first_type : rx_type_q) |-> !in_busy_q);
endmodule
