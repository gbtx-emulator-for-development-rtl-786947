// tb_mmcm_ps_model: checks the MMCM model used for the E-Link clock.
// A 40 MHz input clock is applied; checked: LOCKED rises 16 input cycles
// after reset, PSDONE pulses 12 PSCLK cycles after each PSEN, and the output
// clock's rising edge trails the input's by (phase x 78.125 ps) modulo 25 ns,
// measured after moves up, down and below zero (wrap-around).
`timescale 1ns/1fs
module tb_mmcm_ps_model;
  logic clkin = 1'b0, rst = 1'b1, psclk = 1'b0, psen = 1'b0, psincdec = 1'b0;
  logic clkout, locked, psdone;
  always #12.5 clkin = ~clkin;
  always #10 psclk = ~psclk;

  mmcm_ps_model #(.CLKIN1_PERIOD(25.0)) dut (
    .CLKIN1(clkin), .RST(rst), .CLKOUT0(clkout), .LOCKED(locked),
    .PSCLK(psclk), .PSEN(psen), .PSINCDEC(psincdec), .PSDONE(psdone));

  int checks = 0, failures = 0, phase = 0;
  realtime t_in, t_out;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("t=%0t %s", $realtime, what); end
  endtask

  always @(posedge clkin) t_in = $realtime;
  always @(posedge clkout) t_out = $realtime;

  task automatic step(logic up);
    int lat;
    @(posedge psclk); #1;
    psen = 1'b1; psincdec = up;
    @(posedge psclk); #1;
    psen = 1'b0;
    lat = 1;
    while (!psdone && lat < 100) begin @(posedge psclk); #1; lat++; end
    check(lat == 12, $sformatf("PSDONE after %0d PSCLK cycles", lat));
    phase = up ? (phase + 1) % 320 : (phase + 319) % 320;
  endtask

  task automatic measure();
    realtime d, e;
    repeat (3) @(posedge clkin);
    @(posedge clkout);
    d = t_out - t_in;
    if (d < 0) d = d + 25.0;
    e = phase * 0.078125;
    check(d > e - 0.000002 && d < e + 0.000002, $sformatf("phase %0d: delay %f ns, expected %f", phase, d, e));
  endtask

  initial begin
    int cyc;
    repeat (2) @(posedge clkin);
    #1 rst = 1'b0;
    cyc = 0;
    while (!locked && cyc < 100) begin @(posedge clkin); #0.1; cyc++; end
    check(cyc == 17, $sformatf("LOCKED after %0d input cycles", cyc));
    measure();
    repeat (3) step(1'b1);
    measure();
    repeat (40) step(1'b1);
    measure();
    repeat (10) step(1'b0);
    measure();
    repeat (40) step(1'b0);           // 33 - 40 = -7 -> 313
    measure();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
