// clint: core-local interruptor for one hart.
//
// Holds the 64-bit real-time counter mtime, the compare value mtimecmp and
// the software-interrupt bit msip. mtime counts rising edges of rtc_i
// (synchronised); the timer interrupt mtip_o is high while
// mtime >= mtimecmp; msip_o is the msip bit.
//
// Registers (32-bit halves, answer in the same cycle), in the usual RISC-V
// CLINT layout: 0x0000 msip, 0x4000/0x4004 mtimecmp lo/hi,
// 0xBFF8/0xBFFC mtime lo/hi. mtimecmp resets to all ones (no interrupt).
// The SoC has RISC-V interrupt controllers; layout and reset values here
// come from the RISC-V convention, not from the SoC description.
module clint
  import basilisk_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  input  logic     rtc_i,
  output logic     mtip_o,
  output logic     msip_o
);
  logic [63:0] mtime_q, mtimecmp_q;
  logic        msip_q;
  logic [2:0]  rtc_q;
  wire  [15:0] off = reg_req_i.addr[15:0];
  wire         wr  = reg_req_i.valid && reg_req_i.write;

  assign mtip_o = (mtime_q >= mtimecmp_q);
  assign msip_o = msip_q;

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (off)
      16'h0000: reg_rsp_o.rdata = {31'h0, msip_q};
      16'h4000: reg_rsp_o.rdata = mtimecmp_q[31:0];
      16'h4004: reg_rsp_o.rdata = mtimecmp_q[63:32];
      16'hBFF8: reg_rsp_o.rdata = mtime_q[31:0];
      16'hBFFC: reg_rsp_o.rdata = mtime_q[63:32];
      default:  reg_rsp_o.error = reg_req_i.valid;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q    <= '0;
      mtimecmp_q <= '1;
      msip_q     <= 1'b0;
      rtc_q      <= '0;
    end else begin
      rtc_q <= {rtc_q[1:0], rtc_i};
      if (rtc_q[1] && !rtc_q[2]) mtime_q <= mtime_q + 1'b1;
      if (wr) begin
        unique case (off)
          16'h0000: msip_q <= reg_req_i.wdata[0];
          16'h4000: mtimecmp_q[31:0]  <= reg_req_i.wdata;
          16'h4004: mtimecmp_q[63:32] <= reg_req_i.wdata;
          16'hBFF8: mtime_q[31:0]     <= reg_req_i.wdata;
          16'hBFFC: mtime_q[63:32]    <= reg_req_i.wdata;
          default: ;
        endcase
      end
    end
  end
endmodule
