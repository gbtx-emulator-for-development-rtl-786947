// tb_elinks: self-checking test of the E-Link block in both clock settings
// of the emulator: E-Link clock 40 MHz with 56 E-Links and 80 MHz with 28,
// each filling the 112-bit uplink frame. Each setting runs in its own
// harness (elinks_harness) with its own clock and reference model.
`timescale 1ns/1fs
module tb_elinks;
  int   c40, f40, c80, f80;
  logic d40, d80;

  elinks_harness #(.RATIO(1), .N(56)) h40 (.checks(c40), .failures(f40), .done(d40));
  elinks_harness #(.RATIO(2), .N(28)) h80 (.checks(c80), .failures(f80), .done(d80));

  initial begin
    wait (d40 && d80);
    #1;
    $display("40 MHz: %0d checks, %0d failures; 80 MHz: %0d checks, %0d failures", c40, f40, c80, f80);
    $display("TB_RESULT checks=%0d failures=%0d", c40 + c80, f40 + f80);
    $finish;
  end

  initial begin
    #100us;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c40 + c80, f40 + f80 + 1);
    $finish;
  end
endmodule
