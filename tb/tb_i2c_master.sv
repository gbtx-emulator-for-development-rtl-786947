// tb_i2c_master: drives the I2C master over Wishbone against behavioural
// slaves. Register writes to the slave (pointer
// then two data bytes), a read-back with repeated START (two bytes, ACK then
// NACK), an access to an absent address (NACK expected) are performed with
// separate START / byte / STOP commands as software would issue them; a
// second slave on the same bus stretches SCL after every data bit.
// Checked: bytes stored in and read from the slave, the ACK/NACK status, the
// START and STOP counts, and the SCL period: 4 x (PRESC+1) clocks per bit
// when the slave does not stretch.
`timescale 1ns/1fs
module tb_i2c_master;
  import gbtxemu_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #25 clk = ~clk;                        // 20 MHz start-up clock

  wb_m2s_t wb_m2s;
  wb_s2m_t wb_s2m;
  logic scl_oe_m, sda_oe_m, sda_oe_s, scl_oe_s, sda_oe_t, scl_oe_t, scl, sda;
  int n_start, n_stop, n_ack, t_start, t_stop, t_ack;

  assign scl = !(scl_oe_m || scl_oe_s || scl_oe_t);
  assign sda = !(sda_oe_m || sda_oe_s || sda_oe_t);

  i2c_master #(.DEFAULT_PRESC(16'd4)) dut (
    .clk, .rst, .wb_i(wb_m2s), .wb_o(wb_s2m),
    .scl_i(scl), .sda_i(sda), .scl_oe_o(scl_oe_m), .sda_oe_o(sda_oe_m));
  wb_tb_master u_m (.clk, .wb_o(wb_m2s), .wb_i(wb_s2m));
  i2c_slave_model #(.ADDR(7'h68), .STRETCH(0.0)) u_s (
    .scl, .sda, .sda_oe(sda_oe_s), .scl_oe(scl_oe_s),
    .n_start, .n_stop, .n_ack);
  // a second, slow device that stretches SCL by 2.5 us after each data bit
  i2c_slave_model #(.ADDR(7'h69), .STRETCH(2500.0)) u_t (
    .scl, .sda, .sda_oe(sda_oe_t), .scl_oe(scl_oe_t),
    .n_start(t_start), .n_stop(t_stop), .n_ack(t_ack));

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("t=%0t %s", $time, what); end
  endtask

  localparam logic [31:0] BASE = 32'h1000;
  localparam int START = 1 << 8, STOP = 1 << 9, WR = 1 << 10, RD = 1 << 11, NACK = 1 << 12;

  task automatic cmd(int c, output logic [31:0] st);
    logic [31:0] d;
    u_m.write(BASE + 1, 32'(c));
    do u_m.read(BASE + 2, d); while (d[8]);
    st = d;
  endtask

  // SCL period measurement
  realtime t_rise, period;
  int      n_rise;
  always @(posedge scl) begin
    if (t_rise > 0) period = $realtime - t_rise;
    t_rise = $realtime;
    n_rise++;
  end

  initial begin
    logic [31:0] st, d;
    int base_start, base_stop;
    t_rise = 0; period = 0; n_rise = 0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // line changes while the reset settles are not part of the test
    @(posedge clk);
    base_start = n_start;
    base_stop  = n_stop;
    u_m.read(BASE + 0, d);
    check(d == 32'd4, $sformatf("PRESC reset value %0d", d));
    // write 0xA5, 0x3C to registers 0x20, 0x21
    cmd(START | WR | (32'h68 << 1), st); check(!st[9], "address NACKed");
    check(period == 4 * 5 * 50.0, $sformatf("SCL period %f ns", period));
    cmd(WR | 32'h20, st);               check(!st[9], "pointer NACKed");
    cmd(WR | 32'hA5, st);               check(!st[9], "data 0 NACKed");
    cmd(WR | STOP | 32'h3C, st);        check(!st[9], "data 1 NACKed");
    check(u_s.mem[8'h20] == 8'hA5 && u_s.mem[8'h21] == 8'h3C,
          $sformatf("slave holds %h %h", u_s.mem[8'h20], u_s.mem[8'h21]));
    check(n_start - base_start == 1 && n_stop - base_stop == 1, $sformatf("after write: %0d START %0d STOP", n_start, n_stop));
    // slower bus for the read-back
    u_m.write(BASE + 0, 32'd9);
    cmd(START | WR | (32'h68 << 1), st); check(!st[9], "address NACKed (2)");
    check(period == 4 * 10 * 50.0, $sformatf("SCL period after PRESC change %f ns", period));
    cmd(WR | 32'h20, st);
    cmd(START | WR | (32'h68 << 1) | 1, st); check(!st[9], "read address NACKed");
    cmd(RD, st);                        check(st[7:0] == 8'hA5, $sformatf("read %h", st[7:0]));
    cmd(RD | NACK | STOP, st);          check(st[7:0] == 8'h3C, $sformatf("read %h", st[7:0]));
    // register 0x05 keeps its preset value 5*7+3
    cmd(START | WR | (32'h68 << 1), st);
    cmd(WR | 32'h05, st);
    cmd(START | WR | (32'h68 << 1) | 1, st);
    cmd(RD | NACK | STOP, st);          check(st[7:0] == 8'd38, $sformatf("read %h", st[7:0]));
    // clock stretching by the slow device
    cmd(START | WR | (32'h69 << 1), st); check(!st[9], "slow device NACKed");
    cmd(WR | 32'h10, st);
    check(period > 4 * 10 * 50.0 + 400.0, $sformatf("stretched SCL period %f ns", period));
    cmd(WR | STOP | 32'h77, st);
    check(u_t.mem[8'h10] == 8'h77 && u_s.mem[8'h10] == 8'(16 * 7 + 3), "write to the slow device");
    // absent device
    cmd(START | WR | (32'h21 << 1), st); check(st[9], "absent device acknowledged");
    cmd(STOP, st);
    check(n_start - base_start == 7 && n_stop - base_stop == 5, $sformatf("%0d START %0d STOP", n_start, n_stop));
    check(scl && sda, "bus not released at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
