// elinks: the E-Link block of the GBTX emulator.
//
// It moves data between the GBT frames and N_ELINKS serial E-Links to the
// front-end ASICs. Everything runs on the E-Link clock clk (f_EL_CLK =
// EL_RATIO x 40 MHz); a counter marks every EL_RATIO-th clock with frame_stb,
// the start of a 25 ns GBT frame period.
//   Downlink: on frame_stb the 80-bit frame dl_frame_i is taken; E-Link i
//   gets bits dl_frame_i[i*EL_RATIO +: EL_RATIO] and sends them serially at
//   single data rate (elink_tx), MSB first, starting one clock later.
//   Uplink: every E-Link is sampled at double data rate (elink_rx), giving
//   2*EL_RATIO bits per frame; E-Link i fills ul_frame_o[i*2*EL_RATIO +:
//   2*EL_RATIO] of the 112-bit Widebus frame. ul_frame_o changes on the clock
//   after a frame_stb and is marked by ul_valid_o for one clock.
// The number of E-Links is limited by the uplink frame: N_ELINKS*2*EL_RATIO
// <= 112, i.e. 56 E-Links at 40 MHz and 28 at 80 MHz, as in the emulator.
// Uplink frame bits not used by any E-Link are zero. edge_sel_i (one per
// E-Link, from the control-bus clock domain) is passed through a two-flop
// synchronizer. The frame widths, the DDR uplink and the link count follow the
// emulator's description; the bit mapping, the single-rate downlink and the
// frame strobe counter are this design's choice.
`timescale 1ns/1fs
module elinks
  import gbtxemu_pkg::*;
#(
  parameter int unsigned EL_RATIO = 1,
  parameter int unsigned N_ELINKS = max_elinks(EL_RATIO),
  parameter int unsigned DL_BITS  = GBT_DL_BITS,
  parameter int unsigned UL_BITS  = GBT_UL_BITS
) (
  input  logic                clk,
  input  logic                rst,
  // GBT-FPGA side
  input  logic [DL_BITS-1:0]  dl_frame_i,
  output logic [UL_BITS-1:0]  ul_frame_o,
  output logic                ul_valid_o,
  output logic                frame_stb_o,
  // control (asynchronous to clk)
  input  logic [N_ELINKS-1:0] edge_sel_i,
  // E-Link lines
  output logic [N_ELINKS-1:0] elink_dout_o,
  input  logic [N_ELINKS-1:0] elink_din_i
);
  localparam int unsigned UW = 2 * EL_RATIO;   // uplink bits per link per frame
  localparam int unsigned CW = (EL_RATIO > 1) ? $clog2(EL_RATIO) : 1;

  if (N_ELINKS * UW > UL_BITS) begin : g_ul_too_small
    $error("elinks: %0d E-Links need more than the %0d uplink frame bits", N_ELINKS, UL_BITS);
  end
  if (N_ELINKS * EL_RATIO > DL_BITS) begin : g_dl_too_small
    $error("elinks: %0d E-Links need more than the %0d downlink frame bits", N_ELINKS, DL_BITS);
  end

  // Frame strobe: one clock in EL_RATIO.
  logic [CW-1:0] cnt;
  logic          frame_stb;
  always_ff @(posedge clk) begin
    if (rst)                             cnt <= '0;
    else if (int'(cnt) == EL_RATIO - 1)  cnt <= '0;
    else                                 cnt <= cnt + 1'b1;
  end
  assign frame_stb   = (int'(cnt) == EL_RATIO - 1);
  assign frame_stb_o = frame_stb;

  // Synchronizer for the per-link sampling edge selection.
  logic [N_ELINKS-1:0] edge_s1, edge_s2;
  always_ff @(posedge clk) begin
    edge_s1 <= edge_sel_i;
    edge_s2 <= edge_s1;
  end

  logic [UW-1:0] ul_word [N_ELINKS];

  for (genvar i = 0; i < N_ELINKS; i++) begin : g_link
    elink_tx #(.RATIO(EL_RATIO)) u_tx (
      .clk, .rst, .frame_stb,
      .bits_i (dl_frame_i[i*EL_RATIO +: EL_RATIO]),
      .dout   (elink_dout_o[i])
    );
    elink_rx #(.RATIO(EL_RATIO)) u_rx (
      .clk, .rst,
      .din       (elink_din_i[i]),
      .edge_sel  (edge_s2[i]),
      .frame_stb,
      .word_o    (ul_word[i])
    );
  end

  always_comb begin
    ul_frame_o = '0;
    for (int unsigned i = 0; i < N_ELINKS; i++) ul_frame_o[i*UW +: UW] = ul_word[i];
  end

  always_ff @(posedge clk) begin
    if (rst) ul_valid_o <= 1'b0;
    else     ul_valid_o <= frame_stb;
  end
endmodule
