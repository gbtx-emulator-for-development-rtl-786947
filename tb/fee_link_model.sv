// fee_link_model: one front-end ASIC E-Link port at the far end of a cable,
// for system testbenches.
//
// The emulator's E-Link clock, its downlink data line and the uplink data
// line each travel through their own cable pair, modelled as a pure
// transport delay (CLK_NS, DL_NS, UL_NS: cable delay plus the pair's skew).
// The model stands for a 40 MHz E-Link device:
//   * it samples the downlink line on the rising edge of the clock it
//     receives. A data change less than SETUP_NS before or HOLD_NS after
//     that edge is a timing violation: it is counted and the sampled bit is
//     replaced by a random one. The received bit stream is checked against
//     the PRBS-7 rule b[n] = b[n-7] ^ b[n-6];
//   * it sends a PRBS-7 stream on the uplink line at double data rate,
//     TCO_NS after each edge of the clock it receives.
// A rising edge on clr clears the counters and restarts the PRBS check.
// Outputs: viol (downlink timing violations), err (PRBS mismatches) and bits
// (downlink bits checked). Delays, set-up/hold window and clock-to-output
// time are typical figures, not values of a particular ASIC.
`timescale 1ns/1fs
module fee_link_model #(
  parameter real          CLK_NS   = 52.0,
  parameter real          DL_NS    = 52.0,
  parameter real          UL_NS    = 52.0,
  parameter real          TCO_NS   = 2.0,
  parameter real          SETUP_NS = 1.0,
  parameter real          HOLD_NS  = 1.0,
  parameter logic [6:0]   SEED     = 7'h5A
) (
  input  logic clk_in,
  input  logic dl_in,
  output logic ul_out,
  input  logic clr,
  output int   viol,
  output int   err,
  output int   bits
);
  logic    fclk = 1'b0, fdl = 1'b0, ful = 1'b0;
  realtime t_dl = 0.0;
  logic [6:0] hist = '0;
  int         hcnt = 0;
  logic [6:0] gen = SEED;
  // The delays are read from variables: a constant delay inside fork makes
  // the simulator's time-zero settling loop forever.
  realtime clk_dly = CLK_NS, dl_dly = DL_NS, ul_dly = UL_NS;

  initial begin
    ul_out = 1'b0;
    viol = 0; err = 0; bits = 0;
  end

  // Cable pairs: transport delays.
  always @(clk_in) begin
    automatic logic    v = clk_in;
    automatic realtime d = clk_dly;
    fork
      begin
        #(d);
        fclk = v;
      end
    join_none
  end
  always @(dl_in) begin
    automatic logic    v = dl_in;
    automatic realtime d = dl_dly;
    fork
      begin
        #(d);
        fdl = v;
      end
    join_none
  end
  always @(ful) begin
    automatic logic    v = ful;
    automatic realtime d = ul_dly;
    fork
      begin
        #(d);
        ul_out = v;
      end
    join_none
  end

  always @(posedge fdl or negedge fdl) t_dl = $realtime;

  // Downlink receiver with a set-up/hold window and a PRBS-7 check.
  always @(posedge fclk) begin
    automatic logic    b  = fdl;
    automatic realtime te = $realtime;
    #(HOLD_NS);
    if (t_dl > te - SETUP_NS) begin
      viol++;
      b = 1'($urandom);
    end
    if (hcnt >= 7) begin
      bits++;
      if (b != (hist[6] ^ hist[5])) err++;
    end else begin
      hcnt++;
    end
    hist = {hist[5:0], b};
  end

  // Uplink sender: one PRBS-7 bit after each clock edge.
  always @(fclk) begin
    #(TCO_NS);
    ful = gen[6] ^ gen[5];
    gen = {gen[5:0], gen[6] ^ gen[5]};
  end

  always @(posedge clr) begin
    viol = 0; err = 0; bits = 0; hcnt = 0;
  end
endmodule
