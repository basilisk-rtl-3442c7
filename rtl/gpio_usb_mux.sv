// gpio_usb_mux: eight GPIOs sharing their pads with the four USB ports.
//
// Pads 2k and 2k+1 carry D+ and D- of USB port k. Per port, SEL[k] chooses
// who owns the two pads: 0 the USB host controller (reset state), 1 the
// GPIO registers. With all four ports switched to GPIO the pads form a
// software-controlled 8-bit IO bus. Pad inputs are always visible both to
// the USB host and, through a two-flop synchroniser, in the IN register.
//
// Registers (32-bit, answer in the same cycle):
//   0x0 OUT [7:0]  output values      0x4 OE [7:0] output enables
//   0x8 IN  [7:0]  synchronised pads  0xC SEL [3:0] per-port GPIO select
// Sharing USB ports with GPIOs for an up-to-8-bit bus follows the SoC;
// the pad assignment, register map and reset state are this design's.
module gpio_usb_mux
  import basilisk_pkg::*;
#(
  parameter int unsigned NUM_USB_PORTS = 4,
  localparam int unsigned NUM_GPIO     = 2 * NUM_USB_PORTS
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  reg_req_t                 reg_req_i,
  output reg_rsp_t                 reg_rsp_o,
  // USB host side
  input  logic [NUM_USB_PORTS-1:0] usb_dp_i,
  input  logic [NUM_USB_PORTS-1:0] usb_dm_i,
  input  logic [NUM_USB_PORTS-1:0] usb_oe_i,
  output logic [NUM_USB_PORTS-1:0] usb_dp_o,
  output logic [NUM_USB_PORTS-1:0] usb_dm_o,
  // pads
  output logic [NUM_GPIO-1:0]      pad_o,
  output logic [NUM_GPIO-1:0]      pad_oe_o,
  input  logic [NUM_GPIO-1:0]      pad_i
);
  logic [NUM_GPIO-1:0]      out_q, oe_q, in_q, sync_q;
  logic [NUM_USB_PORTS-1:0] sel_q;

  always_comb begin
    for (int k = 0; k < NUM_USB_PORTS; k++) begin
      pad_o[2*k]      = sel_q[k] ? out_q[2*k]   : usb_dp_i[k];
      pad_o[2*k+1]    = sel_q[k] ? out_q[2*k+1] : usb_dm_i[k];
      pad_oe_o[2*k]   = sel_q[k] ? oe_q[2*k]    : usb_oe_i[k];
      pad_oe_o[2*k+1] = sel_q[k] ? oe_q[2*k+1]  : usb_oe_i[k];
      usb_dp_o[k]     = pad_i[2*k];
      usb_dm_o[k]     = pad_i[2*k+1];
    end
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[3:2])
      2'd0: reg_rsp_o.rdata = 32'(out_q);
      2'd1: reg_rsp_o.rdata = 32'(oe_q);
      2'd2: reg_rsp_o.rdata = 32'(in_q);
      2'd3: reg_rsp_o.rdata = 32'(sel_q);
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q  <= '0;
      oe_q   <= '0;
      sel_q  <= '0;
      sync_q <= '0;
      in_q   <= '0;
    end else begin
      sync_q <= pad_i;
      in_q   <= sync_q;
      if (reg_req_i.valid && reg_req_i.write) begin
        unique case (reg_req_i.addr[3:2])
          2'd0: out_q <= reg_req_i.wdata[NUM_GPIO-1:0];
          2'd1: oe_q  <= reg_req_i.wdata[NUM_GPIO-1:0];
          2'd3: sel_q <= reg_req_i.wdata[NUM_USB_PORTS-1:0];
          default: ;
        endcase
      end
    end
  end
endmodule
