// wb_interconnect: the emulator's internal Wishbone bus.
//
// Three masters (index 0: the Forth CPU used for start-up and debugging,
// 1: the IPbus Ethernet endpoint, 2: the GBT-SC based controller that receives
// commands over the GBT link) share one shared-bus Wishbone through a
// round-robin arbiter (wb_arbiter); the granted master's address is decoded
// onto N_S slaves (wb_decoder), 4096 words each, selected by address bits
// [15:12]: 0 GBT-FPGA registers, 1 I2C master, 2 E-links, 3 clock tuning.
// Latency: one clock to win a free bus, then whatever the slave takes; unmapped
// addresses end with err after one clock. The three masters and the set of
// slaves follow the emulator's block diagram; the topology (one shared bus),
// the arbitration and the address map are this design's choice.
`timescale 1ns/1fs
module wb_interconnect
  import gbtxemu_pkg::*;
#(
  parameter int unsigned N_M     = WB_N_MASTERS,
  parameter int unsigned N_S     = WB_N_SLAVES,
  parameter int unsigned SEL_LSB = WB_SEL_LSB,
  parameter int unsigned SEL_W   = 4
) (
  input  logic    clk,
  input  logic    rst,
  input  wb_m2s_t m_i [N_M],
  output wb_s2m_t m_o [N_M],
  output wb_m2s_t s_o [N_S],
  input  wb_s2m_t s_i [N_S],
  output logic [$clog2(N_M)-1:0] gnt_o,
  output logic    busy_o
);
  wb_m2s_t bus_m2s;
  wb_s2m_t bus_s2m;

  wb_arbiter #(.N_M(N_M)) u_arb (
    .clk, .rst, .m_i, .m_o, .s_o(bus_m2s), .s_i(bus_s2m), .gnt_o, .busy_o
  );

  wb_decoder #(.N_S(N_S), .SEL_LSB(SEL_LSB), .SEL_W(SEL_W)) u_dec (
    .clk, .rst, .m_i(bus_m2s), .m_o(bus_s2m), .s_o, .s_i
  );

  // Wishbone rule: a slave only answers a cycle that is in progress.
  a_ack_in_cycle: assert property (@(posedge clk) disable iff (rst)
    (bus_s2m.ack || bus_s2m.err) |-> (bus_m2s.cyc && bus_m2s.stb));
  a_not_both: assert property (@(posedge clk) disable iff (rst)
    !(bus_s2m.ack && bus_s2m.err));
endmodule
