// cable_harness: the whole emulator driving front-end ASICs over a 10 m
// copper cable, at one E-Link clock setting (EL_RATIO x 40 MHz, with as many
// E-Links as the uplink frame holds). Used by tb_cable_10m.
//
// Every E-Link gets a fee_link_model at the end of three cable pairs (clock,
// downlink data, uplink data). A 10 m cable is taken as 52 ns one way
// (5.2 ns/m, typical for twisted pair), and each pair adds its own skew
// between -0.5 and +0.5 ns, so the uplink data come back more than four
// 40 MHz clock periods after the clock left. The downlink carries one PRBS-7
// stream per E-Link (R bits per frame, first bit in the MSB); the front ends
// send PRBS-7 streams back at double data rate. The front ends check what
// they receive, and so does the harness for the uplink frames. The harness
// also counts every uplink data change closer than 0.5 ns to an E-Link clock
// edge at the emulator's sampling flip-flops (after the input delay line).
// The RTL flip-flops cannot go metastable, so these counts, not data errors,
// show a bad setting on the uplink.
// Sequence: the E-Link clock phase is swept over one E-Link clock period in
// NPH settings PSTEP x 78.125 ps apart. At each setting, violations and PRBS
// errors on all links are measured over 200 frames. The middle of the
// longest run of clean settings is then chosen. 2000 frames are run there and
// must be free of errors. The sweep must show both clean settings and failing
// ones. Results: checks, failures, and done when finished.
`timescale 1ns/1fs
module cable_harness
  import gbtxemu_pkg::*;
#(
  parameter int unsigned EL_RATIO = 1,
  parameter int unsigned NPH      = 8,
  parameter int unsigned PSTEP    = 40
) (
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int      R        = int'(EL_RATIO);
  localparam int      N        = int'(max_elinks(EL_RATIO));
  localparam realtime T        = 25.0 / real'(EL_RATIO);
  localparam real     CABLE_NS = 52.0;
  localparam realtime SETUP_E  = 0.5;
  localparam realtime HOLD_E   = 0.5;

  logic clk_el = 1'b0, clk_wb = 1'b0, rst_el = 1'b1, rst_wb = 1'b1;
  always #(T / 2) clk_el = ~clk_el;
  always #25 clk_wb = ~clk_wb;

  logic [GBT_DL_BITS-1:0] dl = '0;
  logic [GBT_UL_BITS-1:0] ul;
  logic ulv, stb, locked;
  wb_m2s_t wbm_i [3];
  wb_s2m_t wbm_o [3];
  wb_m2s_t gbt_m2s, clk_m2s;
  wb_s2m_t gbt_s2m, clk_s2m;
  logic [N-1:0] elink_clk, dout, din;
  logic scl_oe, sda_oe;
  int   gbt_served, clk_served;

  gbtxemu_top #(.EL_RATIO(EL_RATIO)) dut (
    .clk_el, .rst_el, .clk_wb, .rst_wb,
    .dl_frame_i(dl), .ul_frame_o(ul), .ul_valid_o(ulv), .frame_stb_o(stb),
    .wbm_i, .wbm_o,
    .wbs_gbt_o(gbt_m2s), .wbs_gbt_i(gbt_s2m), .wbs_clk_o(clk_m2s), .wbs_clk_i(clk_s2m),
    .elink_clk_o(elink_clk), .elink_dout_o(dout), .elink_din_i(din),
    .scl_i(!scl_oe), .sda_i(!sda_oe), .scl_oe_o(scl_oe), .sda_oe_o(sda_oe),
    .mmcm_locked_o(locked)
  );

  wb_tb_master m_j1b (.clk(clk_wb), .wb_o(wbm_i[0]), .wb_i(wbm_o[0]));
  assign wbm_i[1] = WB_M2S_IDLE;
  assign wbm_i[2] = WB_M2S_IDLE;
  wb_mem_slave s_gbt (.clk(clk_wb), .rst(rst_wb), .wb_i(gbt_m2s), .wb_o(gbt_s2m), .served(gbt_served));
  wb_mem_slave s_clk (.clk(clk_wb), .rst(rst_wb), .wb_i(clk_m2s), .wb_o(clk_s2m), .served(clk_served));

  initial begin checks = 0; failures = 0; done = 1'b0; end
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("%0d MHz, t=%0t: %s", 40 * R, $realtime, what);
    end
  endtask

  // ---------------- cable and front ends ----------------
  logic clr = 1'b0;
  int   f_viol [N], f_err [N], f_bits [N];

  for (genvar i = 0; i < N; i++) begin : g_fee
    fee_link_model #(
      .CLK_NS(CABLE_NS + 0.1 * real'((i * 7) % 11 - 5)),
      .DL_NS (CABLE_NS + 0.1 * real'((i * 5 + 3) % 11 - 5)),
      .UL_NS (CABLE_NS + 0.1 * real'((i * 3 + 1) % 11 - 5)),
      .SEED  (7'(i + 1))
    ) u_fee (
      .clk_in(elink_clk[i]), .dl_in(dout[i]), .ul_out(din[i]), .clr,
      .viol(f_viol[i]), .err(f_err[i]), .bits(f_bits[i])
    );
  end

  // ---------------- downlink PRBS-7 per E-Link ----------------
  // A new frame is presented after each edge that precedes a frame strobe
  // edge, and held until that edge takes it.
  logic [6:0] dgen [N];
  initial for (int i = 0; i < N; i++) dgen[i] = 7'(i + 1);
  always @(posedge clk_el) begin
    #1;
    if (stb) begin
      for (int i = 0; i < N; i++) begin
        for (int b = R - 1; b >= 0; b--) begin
          dl[i * R + b] = dgen[i][6] ^ dgen[i][5];
          dgen[i]       = {dgen[i][5:0], dgen[i][6] ^ dgen[i][5]};
        end
      end
    end
  end

  // ---------------- uplink PRBS-7 check per E-Link ----------------
  logic [6:0] uhist [N];
  int         ucnt [N], u_err [N], u_bits [N];
  int         n_stb = 0;
  always @(posedge clk_el) begin
    #1;
    if (stb) n_stb++;
    if (ulv) begin
      for (int i = 0; i < N; i++) begin
        for (int k = 2 * R - 1; k >= 0; k--) begin
          automatic logic b = ul[2 * R * i + k];
          if (ucnt[i] >= 7) begin
            u_bits[i]++;
            if (b != (uhist[i][6] ^ uhist[i][5])) u_err[i]++;
          end else begin
            ucnt[i]++;
          end
          uhist[i] = {uhist[i][5:0], b};
        end
      end
    end
  end

  // ---------------- set-up/hold at the emulator's input flip-flops ----------------
  int e_viol [N];
  for (genvar i = 0; i < N; i++) begin : g_mon
    realtime t_d = -100.0, t_e = -100.0;
    always @(posedge dut.din_dly[i] or negedge dut.din_dly[i]) begin
      t_d = $realtime;
      if (t_d - t_e < HOLD_E) e_viol[i]++;
    end
    always @(posedge clk_el or negedge clk_el) begin
      t_e = $realtime;
      if (t_e - t_d < SETUP_E) e_viol[i]++;
    end
  end

  task automatic clear_all();
    for (int i = 0; i < N; i++) begin
      ucnt[i] = 0; u_err[i] = 0; u_bits[i] = 0; e_viol[i] = 0;
    end
    clr = 1'b1;
    #1 clr = 1'b0;
  endtask

  typedef struct {
    int fv, fe, fb, ev, ue, ub;
    int min_fb, min_ub;
  } meas_t;

  task automatic measure(int frames, output meas_t m);
    repeat (20 * R) @(posedge clk_el);
    clear_all();
    repeat (frames * R) @(posedge clk_el);
    m = '{default: 0};
    m.min_fb = frames * R; m.min_ub = 2 * frames * R;
    for (int i = 0; i < N; i++) begin
      m.fv += f_viol[i]; m.fe += f_err[i]; m.fb += f_bits[i];
      m.ev += e_viol[i]; m.ue += u_err[i]; m.ub += u_bits[i];
      if (f_bits[i] < m.min_fb) m.min_fb = f_bits[i];
      if (u_bits[i] < m.min_ub) m.min_ub = u_bits[i];
    end
  endtask

  // ---------------- bus access ----------------
  int n_steps = 0;
  always @(posedge clk_wb) if (!rst_wb && dut.psen) n_steps++;

  task automatic set_phase(int p);
    logic [31:0] rd;
    m_j1b.write(32'h2001, 32'(p));
    do m_j1b.read(32'h2002, rd); while (rd[16]);
    check(rd[15:0] == 16'(p) && rd[17], $sformatf("phase status %h for %0d", rd, p));
  endtask

  // ---------------- sequence ----------------
  meas_t m [NPH];
  meas_t mf;
  logic  good [NPH];
  int    n_good, n_bad, best, run, best_run, exp_steps;

  initial begin
    for (int i = 0; i < N; i++) begin
      e_viol[i] = 0; u_err[i] = 0; u_bits[i] = 0; ucnt[i] = 0; uhist[i] = '0;
    end
    #200;
    @(posedge clk_wb);
    #1 rst_wb = 1'b0; rst_el = 1'b0;
    wait (locked);

    n_good = 0; n_bad = 0;
    for (int k = 0; k < int'(NPH); k++) begin
      set_phase(k * int'(PSTEP));
      measure(200, m[k]);
      good[k] = m[k].fv == 0 && m[k].fe == 0 && m[k].ev == 0 && m[k].ue == 0;
      if (good[k]) n_good++; else n_bad++;
      check(m[k].min_fb > 150 * R && m[k].min_ub > 300 * R, "a link carried too few bits");
      $display("%3d MHz, %2d E-Links: phase %3d steps = %6.3f ns: FEE viol %5d err %5d, emulator viol %5d err %5d  %s",
               40 * R, N, k * PSTEP, real'(k * PSTEP) * 0.078125,
               m[k].fv, m[k].fe, m[k].ev, m[k].ue, good[k] ? "clean" : "fails");
    end

    // middle of the longest circular run of clean settings
    best = -1; best_run = 0;
    for (int s = 0; s < int'(NPH); s++) begin
      if (good[s] && !good[(s + NPH - 1) % NPH]) begin
        run = 0;
        while (run < int'(NPH) && good[(s + run) % NPH]) run++;
        if (run > best_run) begin best_run = run; best = (s + run / 2) % NPH; end
      end
    end
    if (n_good == int'(NPH)) best = 0;
    check(n_good > 0, "no clean phase setting");
    check(n_bad > 0, "every phase setting clean: the sweep shows nothing");

    if (best >= 0) begin
      set_phase(best * int'(PSTEP));
      measure(2000, mf);
      $display("%3d MHz: chosen phase %0d steps, %0d downlink and %0d uplink bits checked",
               40 * R, best * PSTEP, mf.fb, mf.ub);
      check(mf.fv == 0 && mf.fe == 0, $sformatf("downlink at chosen phase: %0d violations, %0d errors", mf.fv, mf.fe));
      check(mf.ev == 0 && mf.ue == 0, $sformatf("uplink at chosen phase: %0d violations, %0d errors", mf.ev, mf.ue));
      check(mf.min_fb > 1900 * R && mf.min_ub > 3900 * R, "a link carried too few bits at the chosen phase");
    end

    exp_steps = (int'(NPH) - 1) * int'(PSTEP)
              + (int'(NPH) - 1 - (best < 0 ? int'(NPH) - 1 : best)) * int'(PSTEP);
    check(n_steps == exp_steps, $sformatf("phase steps %0d, expected %0d", n_steps, exp_steps));
    check(n_stb > 0, "no frame strobes");
    $display("%3d MHz: clean settings %0d, failing settings %0d, phase steps %0d",
             40 * R, n_good, n_bad, n_steps);
    done = 1'b1;
  end
endmodule
