// axi_xbar: fully connected main-bus crossbar.
//
// Every master can reach every slave. A master request is decoded against
// the slaves' address rules ((addr & MASK) == BASE); a request that matches
// no rule is accepted at once and answered with an error response. Each
// slave port has a round-robin arbiter over the masters that address it.
// Once a request is handed to a slave, that slave port is locked to the
// master until its response has been delivered, and the master itself may
// not issue another request until it has taken its response, so at most one
// transaction is in flight per master and per slave.
//
// The SoC's crossbar is a fully connected 64-bit AXI4 crossbar; this one
// carries the simplified single-beat bus of basilisk_pkg (no bursts, no IDs).
// Decode, arbitration policy and the one-outstanding rule are choices of this
// design.
//
// Timing: a request passes through combinationally (master valid -> slave
// valid, slave ready -> master ready). Responses also pass combinationally.
module axi_xbar
  import basilisk_pkg::*;
#(
  parameter int unsigned NM = 5,
  parameter int unsigned NS = 3,
  parameter addr_t S_BASE [NS] = '{REGS_BASE & 48'hFFFF_FE00_0000, SPM_BASE, C2C_BASE},
  parameter addr_t S_MASK [NS] = '{48'hFFFF_FE00_0000, 48'hFFFF_F000_0000, 48'hFFFF_C000_0000},
  // A second rule per slave (set mask to 0 and base to 1 to disable).
  parameter addr_t S_BASE2 [NS] = '{48'h1, DRAM_BASE, 48'h1},
  parameter addr_t S_MASK2 [NS] = '{48'h0, 48'hFFFF_8000_0000, 48'h0}
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t m_req_i       [NM],
  output logic     m_req_ready_o [NM],
  output bus_rsp_t m_rsp_o       [NM],
  input  logic     m_rsp_ready_i [NM],
  output bus_req_t s_req_o       [NS],
  input  logic     s_req_ready_i [NS],
  input  bus_rsp_t s_rsp_i       [NS],
  output logic     s_rsp_ready_o [NS]
);
  localparam int unsigned MIW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SIW = (NS > 1) ? $clog2(NS) : 1;

  // Per-master state.
  logic [NM-1:0]  m_busy_q, m_err_q;
  logic [SIW-1:0] m_slave_q [NM];
  // Per-slave state.
  logic [NS-1:0]  s_busy_q;
  logic [MIW-1:0] s_owner_q [NS];
  logic [MIW-1:0] rr_q      [NS];

  // Address decode.
  logic [NM-1:0]  m_hit;
  logic [SIW-1:0] m_tgt [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_hit[m] = 1'b0;
      m_tgt[m] = '0;
      for (int s = NS - 1; s >= 0; s--) begin
        if (((m_req_i[m].addr & S_MASK[s])  == S_BASE[s]) ||
            ((m_req_i[m].addr & S_MASK2[s]) == S_BASE2[s])) begin
          m_hit[m] = 1'b1;
          m_tgt[m] = SIW'(s);
        end
      end
    end
  end

  // Arbitration: for each free slave, the first requesting master at or after rr_q.
  logic [NS-1:0]  s_gnt_vld;
  logic [MIW-1:0] s_gnt [NS];
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      s_gnt_vld[s] = 1'b0;
      s_gnt[s]     = '0;
      for (int k = NM - 1; k >= 0; k--) begin
        int unsigned m;
        m = (int'(rr_q[s]) + k) % NM;
        if (!s_busy_q[s] && m_req_i[m].valid && !m_busy_q[m] && m_hit[m] &&
            m_tgt[m] == SIW'(s)) begin
          s_gnt_vld[s] = 1'b1;
          s_gnt[s]     = MIW'(m);
        end
      end
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      s_req_o[s]       = m_req_i[s_gnt[s]];
      s_req_o[s].valid = s_gnt_vld[s];
      s_rsp_ready_o[s] = s_busy_q[s] && m_rsp_ready_i[s_owner_q[s]];
    end
    for (int m = 0; m < NM; m++) begin
      m_req_ready_o[m] = 1'b0;
      if (m_req_i[m].valid && !m_busy_q[m]) begin
        if (!m_hit[m]) m_req_ready_o[m] = 1'b1;
        else m_req_ready_o[m] = s_gnt_vld[m_tgt[m]] && s_gnt[m_tgt[m]] == MIW'(m) &&
                                s_req_ready_i[m_tgt[m]];
      end
      m_rsp_o[m] = '0;
      if (m_busy_q[m]) begin
        if (m_err_q[m]) begin
          m_rsp_o[m].valid = 1'b1;
          m_rsp_o[m].err   = 1'b1;
        end else if (s_owner_q[m_slave_q[m]] == MIW'(m)) begin
          m_rsp_o[m] = s_rsp_i[m_slave_q[m]];
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      m_busy_q <= '0;
      m_err_q  <= '0;
      s_busy_q <= '0;
      for (int m = 0; m < NM; m++) m_slave_q[m] <= '0;
      for (int s = 0; s < NS; s++) begin
        s_owner_q[s] <= '0;
        rr_q[s]      <= '0;
      end
    end else begin
      for (int m = 0; m < NM; m++) begin
        if (m_req_i[m].valid && m_req_ready_o[m]) begin
          m_busy_q[m]  <= 1'b1;
          m_err_q[m]   <= !m_hit[m];
          m_slave_q[m] <= m_tgt[m];
        end else if (m_busy_q[m] && m_rsp_o[m].valid && m_rsp_ready_i[m]) begin
          m_busy_q[m] <= 1'b0;
          m_err_q[m]  <= 1'b0;
        end
      end
      for (int s = 0; s < NS; s++) begin
        if (s_gnt_vld[s] && s_req_ready_i[s]) begin
          s_busy_q[s]  <= 1'b1;
          s_owner_q[s] <= s_gnt[s];
          rr_q[s]      <= MIW'((int'(s_gnt[s]) + 1) % NM);
        end else if (s_busy_q[s] && s_rsp_i[s].valid && s_rsp_ready_o[s]) begin
          s_busy_q[s] <= 1'b0;
        end
      end
    end
  end

  // Handshake rule: a master keeps its request stable until it is accepted.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      m_req_i[m].valid && !m_req_ready_o[m] |=> m_req_i[m].valid && $stable(m_req_i[m].addr));
  end

endmodule
