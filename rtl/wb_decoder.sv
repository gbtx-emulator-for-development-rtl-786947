// wb_decoder: routes one Wishbone master to N_S slaves by address.
//
// Slave s owns the word addresses whose bits [SEL_LSB +: SEL_W] equal s; the
// remaining upper bits are ignored. The cycle is passed to exactly one slave
// (cyc and stb are gated), and that slave's ack, err and read data are passed
// back. An address that selects no slave is answered with err one clock after
// stb, so a master never hangs. The address split is this design's choice
// (in the emulator the map is produced by a register-map generator).
`timescale 1ns/1fs
module wb_decoder
  import gbtxemu_pkg::*;
#(
  parameter int unsigned N_S     = 4,
  parameter int unsigned SEL_LSB = 12,
  parameter int unsigned SEL_W   = 4
) (
  input  logic    clk,
  input  logic    rst,
  input  wb_m2s_t m_i,
  output wb_s2m_t m_o,
  output wb_m2s_t s_o [N_S],
  input  wb_s2m_t s_i [N_S]
);
  logic [SEL_W-1:0] sel;
  logic             hit;
  logic             err_q;

  assign sel = m_i.adr[SEL_LSB +: SEL_W];
  assign hit = (int'(sel) < N_S);

  always_ff @(posedge clk) begin
    if (rst) err_q <= 1'b0;
    else     err_q <= m_i.cyc && m_i.stb && !hit && !err_q;
  end

  always_comb begin
    m_o = WB_S2M_IDLE;
    for (int unsigned s = 0; s < N_S; s++) begin
      s_o[s]     = m_i;
      s_o[s].cyc = m_i.cyc && hit && (sel == SEL_W'(s));
      s_o[s].stb = m_i.stb && hit && (sel == SEL_W'(s));
      if (hit && sel == SEL_W'(s)) m_o = s_i[s];
    end
    if (!hit) begin
      m_o     = WB_S2M_IDLE;
      m_o.err = err_q;
    end
  end
endmodule
