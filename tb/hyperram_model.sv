// hyperram_model: behavioural model of one HyperRAM chip as seen through
// the HyperBus PHY (testbench only, not synthesizable).
//
// Follows the same cycle framing as the controller: while its chip select
// is low and the clock runs, it takes three 16-bit command/address words,
// waits 2*LATENCY clocks, then stores one 16-bit word per clock (writes,
// RWDS bits mask the two bytes) or returns one word per clock on dq/valid
// (reads). With GAPS set, reads pause at random, as a slow capture path
// would. Words never written read as a function of their address.
module hyperram_model #(
  parameter int unsigned LATENCY = 6,
  parameter int unsigned CHIP    = 0,
  parameter bit          GAPS    = 1'b0
) (
  input  logic        clk_i,
  input  logic        cs_ni,
  input  logic        ck_en_i,
  input  logic [15:0] dq_i,
  input  logic [1:0]  rwds_i,
  output logic [15:0] dq_o,
  output logic        dq_valid_o
);
  logic [15:0] mem [int unsigned];
  int unsigned phase = 0, cnt = 0, waddr = 0;
  logic [47:0] ca;
  logic gap = 0;
  int unsigned bursts = 0;

  function automatic logic [15:0] init_word(int unsigned a);
    return 16'(a * 16'h9E37 + CHIP * 16'h1111);
  endfunction
  function automatic logic [15:0] rd(int unsigned a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction

  // The model's state lives in blocking variables; what the controller
  // samples is copied out with nonblocking assignments at the end of each
  // clock, so the controller never sees a half-updated state.
  logic [15:0] dq_q = '0;
  logic        rd_q = 1'b0;
  assign dq_o       = dq_q;
  assign dq_valid_o = !cs_ni && ck_en_i && rd_q;

  always @(posedge clk_i) begin
    if (cs_ni) begin
      phase = 0; cnt = 0; gap = 0;
    end else if (ck_en_i) begin
      case (phase)
        0: begin
          ca[47 - 16 * cnt -: 16] = dq_i;
          cnt++;
          if (cnt == 3) begin
            phase = 1; cnt = 0;
            waddr = {ca[44:16], ca[2:0]};
            bursts++;
          end
        end
        1: begin
          cnt++;
          if (cnt == 2 * LATENCY) begin phase = 2; cnt = 0; end
        end
        default: begin
          if (!ca[47]) begin
            logic [15:0] w;
            w = rd(waddr + cnt);
            if (!rwds_i[1]) w[15:8] = dq_i[15:8];
            if (!rwds_i[0]) w[7:0]  = dq_i[7:0];
            mem[waddr + cnt] = w;
            cnt++;
          end else begin
            if (!gap) cnt++;
            gap = GAPS && ($urandom_range(0, 3) == 0);
          end
        end
      endcase
    end
    dq_q <= rd(waddr + cnt);
    rd_q <= !cs_ni && ck_en_i && phase == 2 && ca[47] && !gap;
  end
endmodule
