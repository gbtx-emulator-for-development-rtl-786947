// tb_cable_10m: the emulator driving front-end ASICs over a 10 m copper
// cable in both E-Link clock settings: 40 MHz with 56 E-Links (the top's
// defaults) and 80 MHz with 28 E-Links. Each setting runs in its own
// cable_harness, with its own clocks, emulator and front-end models, and
// sweeps the E-Link clock phase over one clock period: 8 settings 3.125 ns
// apart at 40 MHz, 8 settings 1.5625 ns apart at 80 MHz. Each must find
// failing settings and clean ones, and then run 2000 frames without error at
// the chosen phase.
`timescale 1ns/1fs
module tb_cable_10m;
  int   c40, f40, c80, f80;
  logic d40, d80;

  cable_harness #(.EL_RATIO(1), .NPH(8), .PSTEP(40)) h40 (.checks(c40), .failures(f40), .done(d40));
  cable_harness #(.EL_RATIO(2), .NPH(8), .PSTEP(20)) h80 (.checks(c80), .failures(f80), .done(d80));

  initial begin
    wait (d40 && d80);
    #1;
    $display("40 MHz: %0d checks, %0d failures; 80 MHz: %0d checks, %0d failures", c40, f40, c80, f80);
    $display("TB_RESULT checks=%0d failures=%0d", c40 + c80, f40 + f80);
    $finish;
  end

  initial begin
    #5ms;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c40 + c80, f40 + f80 + 1);
    $finish;
  end
endmodule
