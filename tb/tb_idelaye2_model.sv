// tb_idelaye2_model: checks the input delay line model. Pulses are sent
// through it and the time from each input edge to the output edge is
// measured. Checked: the delay equals taps x 78 ps for loaded tap values
// 0, 1, 17 and 31 (2.418 ns); CE with INC moves one tap up or down and wraps
// from 31 to 0; REGRST returns to the initial tap value; CNTVALUEOUT reports
// the tap in use.
`timescale 1ns/1fs
module tb_idelaye2_model;
  logic c = 1'b0, regrst = 1'b1, ld = 1'b0, ce = 1'b0, inc = 1'b0, din = 1'b0, dout;
  logic [4:0] cin = '0, cout;
  always #10 c = ~c;

  idelaye2_model dut (.C(c), .REGRST(regrst), .LD(ld), .CE(ce), .INC(inc),
                      .CNTVALUEIN(cin), .CNTVALUEOUT(cout), .IDATAIN(din), .DATAOUT(dout));

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("t=%0t %s", $realtime, what); end
  endtask

  task automatic ctl(logic l, logic e, logic i, logic [4:0] v);
    @(negedge c);
    ld = l; ce = e; inc = i; cin = v;
    @(negedge c);
    ld = 1'b0; ce = 1'b0;
  endtask

  task automatic measure(int taps);
    realtime t0, d;
    #7;
    din = ~din;
    t0 = $realtime;
    @(dout);
    d = $realtime - t0;
    check(cout == 5'(taps), $sformatf("CNTVALUEOUT %0d, expected %0d", cout, taps));
    check(d > taps * 0.078 - 0.000002 && d < taps * 0.078 + 0.000002,
          $sformatf("taps %0d: delay %f ns", taps, d));
  endtask

  initial begin
    repeat (2) @(posedge c);
    @(negedge c) regrst = 1'b0;
    measure(0);
    ctl(1, 0, 0, 5'd1);  measure(1);
    ctl(1, 0, 0, 5'd17); measure(17);
    ctl(1, 0, 0, 5'd31); measure(31);
    measure(31);
    ctl(0, 1, 1, 5'd0);  measure(0);           // 31 + 1 wraps to 0
    ctl(0, 1, 1, 5'd0);  measure(1);
    ctl(0, 1, 1, 5'd0);  measure(2);
    ctl(0, 1, 0, 5'd0);  measure(1);
    ctl(1, 0, 0, 5'd9);  measure(9);
    @(negedge c) regrst = 1'b1;
    @(negedge c) regrst = 1'b0;
    measure(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
