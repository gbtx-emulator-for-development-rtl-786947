// tb_elink_phase_ctrl: the phase controller against a simple stand-in for the
// MMCM phase-shift port that answers each PSEN with PSDONE after a random
// 2..15 clocks and counts the steps in each direction. Checked: the phase
// reached equals every requested target (positive, negative, back to zero);
// the number and direction of PSEN pulses equal the distance moved; no PSEN
// is issued while a step is pending or while the MMCM is not locked; busy
// is high exactly until the target is reached.
`timescale 1ns/1fs
module tb_elink_phase_ctrl;
  logic clk = 1'b0, rst = 1'b1;
  always #25 clk = ~clk;

  logic signed [15:0] target, cur;
  logic locked, psen, psincdec, psdone, busy;

  elink_phase_ctrl dut (.clk, .rst, .target_i(target), .mmcm_locked_i(locked),
                        .psen_o(psen), .psincdec_o(psincdec), .psdone_i(psdone),
                        .cur_o(cur), .busy_o(busy));

  int checks = 0, failures = 0;
  int model_phase = 0, pending = 0, n_steps = 0, psen_bad = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("t=%0t %s", $time, what); end
  endtask

  // MMCM phase-shift port stand-in.
  always @(posedge clk) begin
    psdone <= 1'b0;
    if (rst) begin
      pending <= 0;
    end else if (pending > 1) begin
      pending <= pending - 1;
    end else if (pending == 1) begin
      pending <= 0;
      psdone  <= 1'b1;
    end
    if (!rst && psen) begin
      if (pending != 0 || !locked) psen_bad++;
      pending     <= $urandom_range(15, 2);
      model_phase <= psincdec ? model_phase + 1 : model_phase - 1;
      n_steps     <= n_steps + 1;
    end
  end

  task automatic go(int t);
    int start_steps, start_phase, guard;
    start_steps = n_steps;
    start_phase = model_phase;
    target = 16'(t);
    guard = 0;
    @(posedge clk); #1;
    if (t != int'(cur)) check(busy, "busy after a new target");
    while (busy && guard < 5000) begin @(posedge clk); #1; guard++; end
    check(int'(cur) == t, $sformatf("reached %0d, target %0d", cur, t));
    check(model_phase == t, $sformatf("MMCM moved to %0d, target %0d", model_phase, t));
    check(n_steps - start_steps == (t > start_phase ? t - start_phase : start_phase - t),
          $sformatf("%0d PSEN pulses for a move of %0d", n_steps - start_steps, t - start_phase));
    repeat (20) @(posedge clk);
    #1 check(!busy && int'(cur) == t, "stays at target");
  endtask

  initial begin
    target = 16'sd0; locked = 1'b0; psdone = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // Not locked: nothing may move.
    target = 16'sd5;
    repeat (50) @(posedge clk);
    #1 check(n_steps == 0 && cur == 0 && busy, "stepped while MMCM unlocked");
    locked = 1'b1;
    go(5);
    go(37);
    go(-12);
    go(0);
    go(319);
    check(psen_bad == 0, $sformatf("%0d PSEN pulses while pending or unlocked", psen_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
