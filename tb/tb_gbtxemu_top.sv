// tb_gbtxemu_top: end-to-end test of the emulator firmware at its default
// size (56 E-Links, E-Link clock 40 MHz, 20 MHz start-up clock).
//
// Around the top: three bus masters (Forth CPU, IPbus, GBT-SC/IC stand-ins),
// memory slaves for the GBT-FPGA and clock-tuning registers, an I2C device
// for the jitter cleaner, and a GBT-side model that sends downlink frames
// and drives every uplink E-Link at double data rate.
// Sequence and checks:
//   1. all three masters configure at once (delay and sampling edge of every
//      E-Link, outside registers, an unmapped address) - bus contention,
//      err, read-back;
//   2. the CPU requests an E-Link clock phase of 100 steps; the phase reached
//      is read back and the delay of the E-Link clock is measured (7.8125 ns);
//   3. the CPU writes a register of the jitter-cleaner chip over I2C;
//   4. 300 frame periods of random downlink frames and uplink data; every
//      E-Link output bit and every uplink frame is predicted and compared;
//   5. a data edge 1 ns before the clock edge on E-Link 0 is sampled with
//      0 and with 31 delay taps: the delay must move it to the next sample.
// Each mechanism is counted and a failure is counted for any that never
// happened.
`timescale 1ns/1fs
module tb_gbtxemu_top;
  import gbtxemu_pkg::*;

  localparam int      N  = 56;
  localparam realtime T  = 25.0;     // E-Link clock period
  localparam int      H  = 16;

  logic clk_el = 1'b0, clk_wb = 1'b0, rst_el = 1'b1, rst_wb = 1'b1;
  always #(T / 2) clk_el = ~clk_el;
  always #25 clk_wb = ~clk_wb;

  logic [GBT_DL_BITS-1:0] dl, dl_prev;
  logic [GBT_UL_BITS-1:0] ul;
  logic ulv, stb;
  wb_m2s_t wbm_i [3];
  wb_s2m_t wbm_o [3];
  wb_m2s_t gbt_m2s, clk_m2s;
  wb_s2m_t gbt_s2m, clk_s2m;
  logic [N-1:0] elink_clk, dout, din;
  logic scl_oe, sda_oe, scl, sda, sda_oe_s, scl_oe_s, locked;
  int   gbt_served, clk_served, i2c_start, i2c_stop, i2c_ack;

  gbtxemu_top dut (
    .clk_el, .rst_el, .clk_wb, .rst_wb,
    .dl_frame_i(dl), .ul_frame_o(ul), .ul_valid_o(ulv), .frame_stb_o(stb),
    .wbm_i, .wbm_o,
    .wbs_gbt_o(gbt_m2s), .wbs_gbt_i(gbt_s2m), .wbs_clk_o(clk_m2s), .wbs_clk_i(clk_s2m),
    .elink_clk_o(elink_clk), .elink_dout_o(dout), .elink_din_i(din),
    .scl_i(scl), .sda_i(sda), .scl_oe_o(scl_oe), .sda_oe_o(sda_oe), .mmcm_locked_o(locked)
  );

  wb_tb_master m_j1b   (.clk(clk_wb), .wb_o(wbm_i[0]), .wb_i(wbm_o[0]));
  wb_tb_master m_ipbus (.clk(clk_wb), .wb_o(wbm_i[1]), .wb_i(wbm_o[1]));
  wb_tb_master m_ic    (.clk(clk_wb), .wb_o(wbm_i[2]), .wb_i(wbm_o[2]));
  wb_mem_slave s_gbt (.clk(clk_wb), .rst(rst_wb), .wb_i(gbt_m2s), .wb_o(gbt_s2m), .served(gbt_served));
  wb_mem_slave s_clk (.clk(clk_wb), .rst(rst_wb), .wb_i(clk_m2s), .wb_o(clk_s2m), .served(clk_served));

  assign scl = !(scl_oe || scl_oe_s);
  assign sda = !(sda_oe || sda_oe_s);
  i2c_slave_model #(.ADDR(7'h68)) jc (.scl, .sda, .sda_oe(sda_oe_s), .scl_oe(scl_oe_s),
                                      .n_start(i2c_start), .n_stop(i2c_stop), .n_ack(i2c_ack));

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("t=%0t %s", $realtime, what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_contention = 0, n_err = 0, n_ops [3], n_phase_steps = 0, n_i2c_bytes = 0;
  int n_dl_bits = 0, n_ul_frames = 0, n_edge1 = 0, n_delay_moved = 0;
  always @(posedge clk_wb) begin
    if (int'(wbm_i[0].cyc) + int'(wbm_i[1].cyc) + int'(wbm_i[2].cyc) > 1) n_contention++;
    if (!rst_wb && dut.psen) n_phase_steps++;
  end

  // ---------------- configuration values ----------------
  logic [4:0]   cfg_dly [N];
  logic [N-1:0] cfg_edge;

  task automatic xfer(int m, logic we, logic [31:0] adr, logic [31:0] dat,
                      output logic [31:0] rd, output logic err);
    int c;
    unique case (m)
      0: m_j1b.transfer(we, adr, dat, rd, err, c);
      1: m_ipbus.transfer(we, adr, dat, rd, err, c);
      default: m_ic.transfer(we, adr, dat, rd, err, c);
    endcase
    n_ops[m]++;
    if (err) n_err++;
  endtask

  task automatic configure(int m, int first, int last, logic [31:0] ext_base);
    logic [31:0] rd; logic e;
    for (int i = first; i <= last; i++) begin
      xfer(m, 1'b1, 32'h2040 + i, {23'd0, cfg_edge[i], 3'd0, cfg_dly[i]}, rd, e);
      check(!e, "err on E-Link register write");
    end
    for (int i = first; i <= last; i++) begin
      xfer(m, 1'b0, 32'h2040 + i, 0, rd, e);
      check(rd[8:0] == {cfg_edge[i], 3'd0, cfg_dly[i]} && rd[20:16] == cfg_dly[i],
            $sformatf("E-Link %0d register read %h", i, rd));
    end
    xfer(m, 1'b1, ext_base + m, 32'hC0DE_0000 + m, rd, e);
    xfer(m, 1'b0, ext_base + m, 0, rd, e);
    check(!e && rd == 32'hC0DE_0000 + m, $sformatf("outside slave read %h", rd));
    xfer(m, 1'b0, 32'h5000, 0, rd, e);
    check(e, "no err for an unmapped address");
  endtask

  task automatic i2c_cmd(int c);
    logic [31:0] rd; logic e;
    xfer(0, 1'b1, 32'h1001, 32'(c), rd, e);
    do xfer(0, 1'b0, 32'h1002, 0, rd, e); while (rd[8]);
    check(!rd[9], "I2C byte not acknowledged");
    n_i2c_bytes++;
  endtask

  // ---------------- frame traffic ----------------
  logic [N-1:0] rs [H];
  logic [N-1:0] fs [H];
  logic         msr [N];
  int           cyc;
  logic         stb_prev;

  function automatic logic [N-1:0] rnd_n();
    logic [N-1:0] v;
    for (int i = 0; i < N; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  task automatic traffic(int cycles);
    for (int h = 0; h < H; h++) begin rs[h] = rnd_n(); fs[h] = rnd_n(); end
    cyc = 0;
    @(posedge clk_el);
    #(T / 8);
    for (int i = 0; i < N; i++) msr[i] = dout[i];
    stb_prev = stb;
    dl = GBT_DL_BITS'({$urandom, $urandom, $urandom});
    dl_prev = dl;
    #(T / 8) din = fs[0];
    #(T / 2) din = rs[1];
    while (cyc < cycles) begin
      @(posedge clk_el);
      cyc++;
      rs[(cyc + 2) % H] = rnd_n();
      fs[(cyc + 2) % H] = rnd_n();
      #(T / 8);
      for (int i = 0; i < N; i++) begin
        msr[i] = stb_prev ? dl_prev[i] : 1'b0;
        check(dout[i] == msr[i], $sformatf("downlink E-Link %0d at cycle %0d", i, cyc));
        n_dl_bits++;
      end
      check(ulv == stb_prev, "uplink valid");
      if (stb_prev && cyc > 3) begin
        for (int i = 0; i < N; i++) begin
          logic [N-1:0] r1, f1, f2;
          logic [1:0]   exp_w;
          r1 = rs[(cyc - 1) % H]; f1 = fs[(cyc - 1) % H]; f2 = fs[(cyc - 2) % H];
          exp_w = cfg_edge[i] ? {f2[i], r1[i]} : {r1[i], f1[i]};
          check(ul[2*i +: 2] == exp_w, $sformatf("uplink E-Link %0d at cycle %0d", i, cyc));
          if (cfg_edge[i]) n_edge1++;
        end
        n_ul_frames++;
      end
      stb_prev = stb;
      dl = GBT_DL_BITS'({$urandom, $urandom, $urandom});
      dl_prev = dl;
      #(T / 8);
      din = fs[cyc % H];
      #(T / 2);
      din = rs[(cyc + 1) % H];
    end
  endtask

  // Data on E-Link 0 rises 1 ns before a clock edge; returns the uplink pair.
  task automatic late_edge(output logic [1:0] w);
    din[0] = 1'b0;
    repeat (3) @(posedge clk_el);
    #(T - 1.0);
    din[0] = 1'b1;                    // 1 ns before edge k
    @(posedge clk_el);                // edge k samples (rising)
    @(posedge clk_el);                // edge k+1 forms the pair
    #(T / 8);
    w = ul[1:0];
    din[0] = 1'b0;
  endtask

  initial begin
    logic [31:0] rd; logic e;
    logic [1:0]  w0, w31;
    realtime t_in, t_out, d;
    int i2c_start0, i2c_stop0;
    for (int m = 0; m < 3; m++) n_ops[m] = 0;
    for (int i = 0; i < N; i++) begin cfg_dly[i] = 5'($urandom); cfg_edge[i] = 1'($urandom); end
    cfg_edge[1] = 1'b1; cfg_edge[2] = 1'b0;
    dl = '0; din = '0;
    repeat (4) @(posedge clk_wb);
    #1 rst_wb = 1'b0; rst_el = 1'b0;

    // 1. three masters at once
    xfer(0, 1'b0, 32'h2000, 0, rd, e);
    check(rd == 32'hE138_0101, $sformatf("E-Link block ID %h", rd));
    fork
      configure(0, 0, 17, 32'h0000);
      configure(1, 18, 36, 32'h3000);
      configure(2, 37, N - 1, 32'h0000);
    join
    check(gbt_served == 4 && clk_served == 2,
          $sformatf("outside slaves served %0d / %0d accesses", gbt_served, clk_served));

    // 2. E-Link clock phase
    wait (locked);
    xfer(0, 1'b1, 32'h2001, 32'd100, rd, e);
    do xfer(0, 1'b0, 32'h2002, 0, rd, e); while (rd[16]);
    check(rd[15:0] == 16'd100 && rd[17], $sformatf("phase status %h", rd));
    @(posedge clk_el) t_in = $realtime;
    @(posedge elink_clk[N-1]) t_out = $realtime;
    d = t_out - t_in;
    check(d > 7.8125 - 0.00001 && d < 7.8125 + 0.00001, $sformatf("E-Link clock delay %f ns", d));

    // 3. jitter-cleaner register over I2C: register 0x0B <- 0x5A
    i2c_start0 = i2c_start;
    i2c_stop0  = i2c_stop;
    i2c_cmd(32'h100 | 32'h400 | (32'h68 << 1));
    i2c_cmd(32'h400 | 32'h0B);
    i2c_cmd(32'h200 | 32'h400 | 32'h5A);
    check(jc.mem[8'h0B] == 8'h5A, $sformatf("jitter cleaner register %h", jc.mem[8'h0B]));

    // 4. frames
    traffic(300);

    // 5. input delay moves the sampling point
    xfer(0, 1'b1, 32'h2040, 32'd0, rd, e);            // E-Link 0: 0 taps, rising edge first
    repeat (8) @(posedge clk_el);
    late_edge(w0);
    xfer(0, 1'b1, 32'h2040, 32'd31, rd, e);           // 31 taps = 2.418 ns
    repeat (8) @(posedge clk_el);
    late_edge(w31);
    check(w0 == 2'b11, $sformatf("0 taps: pair %b", w0));
    check(w31 == 2'b01, $sformatf("31 taps: pair %b", w31));
    if (w0 != w31) n_delay_moved++;

    // mechanisms seen
    $display("contention %0d, err %0d, ops %0d/%0d/%0d, phase steps %0d, I2C bytes %0d",
             n_contention, n_err, n_ops[0], n_ops[1], n_ops[2], n_phase_steps, n_i2c_bytes);
    $display("downlink bits %0d, uplink frames %0d, falling-edge-first words %0d, delay moved %0d",
             n_dl_bits, n_ul_frames, n_edge1, n_delay_moved);
    check(n_contention > 0, "never any bus contention");
    check(n_err > 0, "never an err");
    check(n_ops[0] > 0 && n_ops[1] > 0 && n_ops[2] > 0, "a master never used the bus");
    check(n_phase_steps == 100, "phase steps");
    check(n_i2c_bytes == 3 && i2c_start - i2c_start0 == 1 && i2c_stop - i2c_stop0 == 1, "I2C transfer");
    check(n_dl_bits > 0 && n_ul_frames > 0, "no frames");
    check(n_edge1 > 0, "falling-edge-first sampling never used");
    check(n_delay_moved > 0, "input delay never moved a sample");
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
