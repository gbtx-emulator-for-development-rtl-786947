// elink_tx: serializer of one downlink E-Link.
//
// Each GBT frame (25 ns) carries RATIO bits for this E-Link, where
// RATIO = f_EL_CLK / 40 MHz. On the clock where frame_stb is high the RATIO
// bits are loaded into a shift register; they leave on dout one per E-Link
// clock, most significant bit first, single data rate. dout comes straight
// from a flip-flop: bit RATIO-1 appears one clock after the loading edge,
// the next bits on the following clocks, so the latency from frame to line
// is fixed. The single-rate downlink and the bit order are this design's
// choice (only the uplink is stated to run at double data rate).
`timescale 1ns/1fs
module elink_tx #(
  parameter int unsigned RATIO = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             frame_stb,
  input  logic [RATIO-1:0] bits_i,
  output logic             dout
);
  logic [RATIO-1:0] sr;

  always_ff @(posedge clk) begin
    if (rst)            sr <= '0;
    else if (frame_stb) sr <= bits_i;
    else                sr <= sr << 1;
  end

  assign dout = sr[RATIO-1];
endmodule
