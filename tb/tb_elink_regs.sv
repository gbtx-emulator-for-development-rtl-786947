// tb_elink_regs: bus accesses to the E-Link register block with the default
// 56 E-Links. Checked: the ID word, PHASE write and read-back, PSTAT showing
// the phase controller's and MMCM's status, every LINK register (delay taps,
// sampling edge, the delay line's reported taps), the one-clock load pulse
// on exactly the written E-Link, zero from unused offsets, and that every
// access is acknowledged on the clock after stb.
`timescale 1ns/1fs
module tb_elink_regs;
  import gbtxemu_pkg::*;
  localparam int N = 56;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  wb_m2s_t wb_m2s;
  wb_s2m_t wb_s2m;
  logic signed [15:0] ph_tgt, ph_cur;
  logic ph_busy, locked;
  logic [N-1:0] ld, esel;
  logic [4:0] dval [N];
  logic [4:0] dcur [N];

  elink_regs #(.N_ELINKS(N), .EL_RATIO(1)) dut (
    .clk, .rst, .wb_i(wb_m2s), .wb_o(wb_s2m),
    .phase_target_o(ph_tgt), .phase_cur_i(ph_cur), .phase_busy_i(ph_busy), .mmcm_locked_i(locked),
    .dly_ld_o(ld), .dly_val_o(dval), .dly_cur_i(dcur), .edge_sel_o(esel)
  );
  wb_tb_master u_m (.clk, .wb_o(wb_m2s), .wb_i(wb_s2m));

  int checks = 0, failures = 0;
  int ld_count [N];
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("t=%0t %s", $time, what); end
  endtask

  always @(posedge clk) if (!rst) for (int i = 0; i < N; i++) if (ld[i]) ld_count[i]++;

  localparam logic [31:0] BASE = 32'h2000;

  task automatic rd(logic [31:0] ofs, output logic [31:0] d);
    logic e; int c;
    u_m.transfer(1'b0, BASE + ofs, 32'd0, d, e, c);
    check(c == 2 && !e, $sformatf("read %h: %0d clocks, err %b", ofs, c, e));
  endtask
  task automatic wr(logic [31:0] ofs, logic [31:0] v);
    logic [31:0] d; logic e; int c;
    u_m.transfer(1'b1, BASE + ofs, v, d, e, c);
    check(c == 2 && !e, $sformatf("write %h: %0d clocks, err %b", ofs, c, e));
  endtask

  logic [4:0] exp_d [N];
  logic [N-1:0] exp_e;

  initial begin
    logic [31:0] d;
    for (int i = 0; i < N; i++) begin ld_count[i] = 0; dcur[i] = 5'($urandom); end
    ph_cur = 16'sd0; ph_busy = 1'b0; locked = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;

    rd(0, d);  check(d == 32'hE138_0101, $sformatf("ID %h", d));
    wr(1, 32'h0000_FF9C);                              // -100 steps
    check(ph_tgt == -16'sd100, "phase target output");
    rd(1, d);  check(d == 32'h0000_FF9C, $sformatf("PHASE read %h", d));
    for (int k = 0; k < 4; k++) begin
      ph_cur = 16'($urandom); ph_busy = 1'($urandom); locked = 1'($urandom);
      rd(2, d);
      check(d == {14'd0, locked, ph_busy, ph_cur}, $sformatf("PSTAT %h", d));
    end
    for (int i = 0; i < N; i++) begin
      exp_d[i] = 5'($urandom);
      exp_e[i] = 1'($urandom);
      wr(32'h40 + i, {23'd0, exp_e[i], 3'd0, exp_d[i]});
    end
    for (int i = 0; i < N; i++) begin
      check(dval[i] == exp_d[i] && esel[i] == exp_e[i], $sformatf("link %0d outputs", i));
      check(ld_count[i] == 1, $sformatf("link %0d: %0d load pulses", i, ld_count[i]));
      rd(32'h40 + i, d);
      check(d == {11'd0, dcur[i], 7'd0, exp_e[i], 3'd0, exp_d[i]}, $sformatf("link %0d read %h", i, d));
    end
    rd(32'h40 + N, d); check(d == 0, "offset past the last link");
    rd(32'h10, d);     check(d == 0, "unused offset");
    wr(32'h40 + N, 32'h1FF);
    for (int i = 0; i < N; i++) check(ld_count[i] == 1, "write past last link disturbed a link");
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
