// regbus_demux: routes one Regbus request to one of NP peripherals.
//
// Port p is selected when (addr & MASK[p]) == BASE[p]; the lowest matching
// port wins. Only the selected port sees valid; its ready, error and rdata
// are returned upstream. An address that matches no port is answered at once
// with error set. Purely combinational: the peripheral's response passes
// straight through, so the demux adds no cycle.
// The Regbus demultiplexer is the SoC's second interconnect stage; the
// address rules are this design's choice (see basilisk_pkg).
module regbus_demux
  import basilisk_pkg::*;
#(
  parameter int unsigned NP = 8,
  parameter logic [31:0] BASE [NP] = '{32'h0300_0000, 32'h0300_1000, 32'h0300_2000, 32'h0300_3000,
                                       32'h0300_4000, 32'h0300_5000, 32'h0300_6000, 32'h0200_0000},
  parameter logic [31:0] MASK [NP] = '{32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000,
                                       32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_0000}
) (
  input  reg_req_t req_i,
  output reg_rsp_t rsp_o,
  output reg_req_t req_o [NP],
  input  reg_rsp_t rsp_i [NP]
);
  localparam int unsigned PW = (NP > 1) ? $clog2(NP) : 1;
  logic          hit;
  logic [PW-1:0] sel;

  always_comb begin
    hit = 1'b0;
    sel = '0;
    for (int p = NP - 1; p >= 0; p--) begin
      if ((req_i.addr & MASK[p]) == BASE[p]) begin
        hit = 1'b1;
        sel = PW'(p);
      end
    end
    for (int p = 0; p < NP; p++) begin
      req_o[p]       = req_i;
      req_o[p].valid = req_i.valid && hit && (sel == PW'(p));
    end
  end

  // The response side is a separate process so that, seen as a netlist,
  // responses never feed back into the request decode.
  always_comb begin
    if (hit) rsp_o = rsp_i[sel];
    else     rsp_o = '{ready: req_i.valid, error: 1'b1, rdata: 32'h0};
  end
endmodule
