// tb_wb_interconnect: three masters run random reads and writes at the same
// time through the interconnect to four memory slaves and to unmapped
// addresses. Each master uses its own part of every slave, so a shadow copy
// per master predicts every read. Checked: read data, err only (and always)
// for unmapped addresses, that each access reached the addressed slave
// (slave access counts), and that round-robin arbitration keeps every
// master's wait bounded while all three compete.
`timescale 1ns/1fs
module tb_wb_interconnect;
  import gbtxemu_pkg::*;

  localparam int NM = 3, NS = 4, NOPS = 150;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  wb_m2s_t m_i [NM];
  wb_s2m_t m_o [NM];
  wb_m2s_t s_o [NS];
  wb_s2m_t s_i [NS];
  int      served [NS];
  logic [1:0] gnt;
  logic       busy;

  wb_interconnect dut (.clk, .rst, .m_i, .m_o, .s_o, .s_i, .gnt_o(gnt), .busy_o(busy));

  for (genvar s = 0; s < NS; s++) begin : g_s
    wb_mem_slave #(.MAX_WAIT(3)) u_s (.clk, .rst, .wb_i(s_o[s]), .wb_o(s_i[s]), .served(served[s]));
  end
  for (genvar m = 0; m < NM; m++) begin : g_m
    wb_tb_master u_m (.clk, .wb_o(m_i[m]), .wb_i(m_o[m]));
  end

  int checks = 0, failures = 0;
  int expected_served [NS];
  int max_wait [NM];
  logic [31:0] shadow [NM][NS][16];

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("t=%0t %s", $time, what);
    end
  endtask

  task automatic run_master(int m);
    for (int k = 0; k < NOPS; k++) begin
      int s, a, c;
      logic we, e;
      logic [31:0] adr, dat, rd;
      s   = $urandom_range(7, 0);            // 4..7 are unmapped
      a   = $urandom_range(15, 0);
      we  = 1'($urandom);
      dat = $urandom;
      adr = 32'((s << 12) | (m << 4) | a);
      unique case (m)
        0: g_m[0].u_m.transfer(we, adr, dat, rd, e, c);
        1: g_m[1].u_m.transfer(we, adr, dat, rd, e, c);
        default: g_m[2].u_m.transfer(we, adr, dat, rd, e, c);
      endcase
      if (c > max_wait[m]) max_wait[m] = c;
      if (s < NS) begin
        expected_served[s]++;
        check(!e, $sformatf("master %0d: err on mapped slave %0d", m, s));
        if (we) shadow[m][s][a] = dat;
        else check(rd == shadow[m][s][a],
                   $sformatf("master %0d slave %0d word %0d: read %h expected %h", m, s, a, rd, shadow[m][s][a]));
      end else begin
        check(e, $sformatf("master %0d: no err for unmapped address %h", m, adr));
      end
    end
  endtask

  initial begin
    for (int m = 0; m < NM; m++) begin
      max_wait[m] = 0;
      for (int s = 0; s < NS; s++) for (int a = 0; a < 16; a++) shadow[m][s][a] = '0;
    end
    for (int s = 0; s < NS; s++) expected_served[s] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    fork
      run_master(0);
      run_master(1);
      run_master(2);
    join
    repeat (3) @(posedge clk);
    for (int s = 0; s < NS; s++)
      check(served[s] == expected_served[s],
            $sformatf("slave %0d served %0d accesses, expected %0d", s, served[s], expected_served[s]));
    // With round-robin, a master waits for at most the two others' transfers
    // (each at most 1 grant + 4 slave + 2 release clocks) plus its own.
    for (int m = 0; m < NM; m++)
      check(max_wait[m] <= 24, $sformatf("master %0d waited %0d clocks", m, max_wait[m]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
