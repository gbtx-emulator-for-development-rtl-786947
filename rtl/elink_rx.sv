// elink_rx: double-data-rate deserializer of one uplink E-Link.
//
// The (already delayed) line din is sampled on both edges of the E-Link clock,
// giving two bits per clock and 2*RATIO bits per 25 ns GBT frame. edge_sel
// chooses which edge starts a bit pair: 0 pairs a rising-edge sample with the
// falling-edge sample that follows it, 1 pairs a falling-edge sample with the
// rising-edge sample after it, which moves the capture window by half an
// E-Link clock period. Pairs are shifted in, oldest bit ending in the most
// significant position, and on the clock where frame_stb is high the last
// RATIO pairs are written to word_o. Timing: the pair formed from the rising
// edge k (and, with edge_sel=0, the falling edge after it; with edge_sel=1,
// the falling edge before it) is shifted in on rising edge k+1, and is in
// word_o after that edge when frame_stb is high there. Double data rate
// and the selectable edge follow the emulator's description; the pairing and
// bit order are this design's choice.
`timescale 1ns/1fs
module elink_rx #(
  parameter int unsigned RATIO = 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               din,
  input  logic               edge_sel,
  input  logic               frame_stb,
  output logic [2*RATIO-1:0] word_o
);
  logic q_r, q_f, q_f_d;
  logic [1:0]         pair;
  logic [2*RATIO-1:0] sh, sh_next;

  // Input samples on both clock edges.
  always_ff @(posedge clk) q_r <= din;
  always_ff @(negedge clk) q_f <= din;
  always_ff @(posedge clk) q_f_d <= q_f;

  always_comb begin
    pair    = edge_sel ? {q_f_d, q_r} : {q_r, q_f};
    sh_next = (2*RATIO)'({sh, pair});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sh     <= '0;
      word_o <= '0;
    end else begin
      sh <= sh_next;
      if (frame_stb) word_o <= sh_next;
    end
  end
endmodule
