// idelaye2_model: behavioural model of the FPGA input delay line (IDELAYE2)
// placed in every uplink E-Link data input (simulation only, not
// synthesizable; on the FPGA the vendor primitive is used in its place).
//
// DATAOUT is IDATAIN delayed by CNTVALUEOUT taps of TAP_PS each: 32 taps of
// 78 ps, so the delay spans 2.496 ns in 78 ps steps (0 to 2.418 ns). The tap
// counter is clocked by C and works as in the primitive's VAR_LOAD mode:
// REGRST returns it to IDELAY_VALUE, LD loads CNTVALUEIN, and CE moves it one
// tap up (INC = 1) or down (INC = 0), wrapping around. Only these ports of the
// primitive are modelled; the fixed insertion delay of the real part is left
// out. The tap count and size are the emulator's figures; the rest follows
// the usual behaviour of the primitive.
`timescale 1ns/1fs
module idelaye2_model #(
  parameter real        TAP_PS       = 78.0,
  parameter logic [4:0] IDELAY_VALUE = 5'd0
) (
  input  logic       C,
  input  logic       REGRST,
  input  logic       LD,
  input  logic       CE,
  input  logic       INC,
  input  logic [4:0] CNTVALUEIN,
  output logic [4:0] CNTVALUEOUT,
  input  logic       IDATAIN,
  output logic       DATAOUT
);
  logic [4:0] tap;
  realtime    dly;

  initial begin
    tap     = IDELAY_VALUE;
    DATAOUT = 1'b0;
  end

  always @(posedge C) begin
    if (REGRST)  tap <= IDELAY_VALUE;
    else if (LD) tap <= CNTVALUEIN;
    else if (CE) tap <= INC ? tap + 5'd1 : tap - 5'd1;
  end

  assign CNTVALUEOUT = tap;
  always_comb dly = real'(tap) * TAP_PS / 1000.0;

  // Transport delay: every input change schedules its own output change.
  // A zero delay is applied at once rather than through a zero-delay wait.
  always @(IDATAIN) begin
    automatic logic    v = IDATAIN;
    automatic realtime d = dly;
    if (d == 0.0) begin
      DATAOUT = v;
    end else begin
      fork
        begin
          #(d);
          DATAOUT = v;
        end
      join_none
    end
  end
endmodule
