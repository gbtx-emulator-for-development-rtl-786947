// wb_arbiter: shares one Wishbone bus among N_M masters.
//
// A master requests the bus by raising cyc. When the bus is free the arbiter
// grants it, round-robin starting after the master served last, and keeps the
// grant for as long as that master holds cyc (so a master's burst of single
// transfers under one cyc is never interleaved). Granting takes one clock:
// the first stb of a new master reaches the bus one cycle after its cyc rose.
// The other masters see no ack and no err until they are granted.
// The number of masters (three on the emulator: CPU, IPbus, GBT-SC/IC) follows
// the emulator's description; round-robin and the one-cycle grant are this
// design's choice.
`timescale 1ns/1fs
module wb_arbiter
  import gbtxemu_pkg::*;
#(
  parameter int unsigned N_M = 3
) (
  input  logic    clk,
  input  logic    rst,
  input  wb_m2s_t m_i [N_M],
  output wb_s2m_t m_o [N_M],
  output wb_m2s_t s_o,
  input  wb_s2m_t s_i,
  output logic [$clog2(N_M)-1:0] gnt_o,
  output logic    busy_o
);
  localparam int unsigned GW = $clog2(N_M);

  logic [GW-1:0] gnt, nxt;
  logic          busy, any_req;

  // Round-robin choice: first requester after the current grant.
  always_comb begin
    nxt     = gnt;
    any_req = 1'b0;
    for (int unsigned k = 1; k <= N_M; k++) begin
      int unsigned idx;
      idx = (int'(gnt) + k) % N_M;
      if (!any_req && m_i[idx].cyc) begin
        nxt     = GW'(idx);
        any_req = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gnt  <= GW'(N_M - 1);
      busy <= 1'b0;
    end else if (!busy) begin
      if (any_req) begin
        gnt  <= nxt;
        busy <= 1'b1;
      end
    end else if (!m_i[gnt].cyc) begin
      busy <= 1'b0;
    end
  end

  always_comb begin
    s_o = WB_M2S_IDLE;
    if (busy) begin
      s_o     = m_i[gnt];
      s_o.cyc = m_i[gnt].cyc;
      s_o.stb = m_i[gnt].cyc & m_i[gnt].stb;
    end
    for (int unsigned i = 0; i < N_M; i++) begin
      m_o[i]     = WB_S2M_IDLE;
      m_o[i].dat = s_i.dat;
      if (busy && gnt == GW'(i)) begin
        m_o[i].ack = s_i.ack;
        m_o[i].err = s_i.err;
      end
    end
  end

  assign gnt_o  = gnt;
  assign busy_o = busy;

  // A master only ever sees a response while it holds the bus.
  for (genvar i = 0; i < N_M; i++) begin : g_chk
    a_resp_owned: assert property (@(posedge clk) disable iff (rst)
      (m_o[i].ack || m_o[i].err) |-> (busy && gnt == GW'(i) && m_i[i].cyc));
  end
endmodule
