// regbus_bridge: main-bus slave that forwards each access to the 32-bit
// Regbus of the low-throughput peripherals.
//
// The 64-bit request is latched, then presented on Regbus as a 32-bit access
// to the word selected by addr[2]: its half of the write data and strobes is
// passed on, and the read data is returned in both halves of the 64-bit
// response. The Regbus request is held until the peripheral raises ready;
// the peripheral's error flag becomes the bus error.
//
// Timing: a request is accepted in the cycle it is presented while the
// bridge is idle; the Regbus access runs in the next cycle; the response is
// valid from the cycle after the peripheral's ready. With a peripheral that
// answers at once, the response appears 2 cycles after the request cycle.
// The two-stage interconnect (crossbar, then Regbus) follows the SoC; the
// 32-bit Regbus width and the word split are choices of this design.
module regbus_bridge
  import basilisk_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t bus_req_i,
  output logic     bus_req_ready_o,
  output bus_rsp_t bus_rsp_o,
  input  logic     bus_rsp_ready_i,
  output reg_req_t reg_req_o,
  input  reg_rsp_t reg_rsp_i
);
  typedef enum logic [1:0] {IDLE, ACCESS, RESP} state_e;
  state_e   state_q;
  bus_req_t req_q;
  bus_rsp_t rsp_q;

  assign bus_req_ready_o = (state_q == IDLE);
  assign bus_rsp_o       = rsp_q;

  always_comb begin
    reg_req_o       = '0;
    reg_req_o.valid = (state_q == ACCESS);
    reg_req_o.write = req_q.we;
    reg_req_o.addr  = req_q.addr[31:0];
    reg_req_o.wdata = req_q.addr[2] ? req_q.wdata[63:32] : req_q.wdata[31:0];
    reg_req_o.wstrb = req_q.addr[2] ? req_q.strb[7:4]    : req_q.strb[3:0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      req_q   <= '0;
      rsp_q   <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (bus_req_i.valid) begin
          req_q   <= bus_req_i;
          state_q <= ACCESS;
        end
        ACCESS: if (reg_rsp_i.ready) begin
          rsp_q.valid <= 1'b1;
          rsp_q.err   <= reg_rsp_i.error;
          rsp_q.rdata <= {reg_rsp_i.rdata, reg_rsp_i.rdata};
          state_q     <= RESP;
        end
        RESP: if (bus_rsp_ready_i) begin
          rsp_q.valid <= 1'b0;
          state_q     <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
