// gbtxemu_top: FPGA firmware of the GBTX emulator, the parts that are logic.
//
// The emulator stands in for a GBTX ASIC: a GBT link master sends 80-bit
// downlink frames every 25 ns and receives 112-bit uplink frames; the
// emulator spreads the downlink bits over serial E-Links to front-end ASICs
// and collects their DDR uplink data into the uplink frames. This top holds
//   * elinks           - frame <-> E-Link serializers/deserializers (clk_el)
//   * idelaye2_model   - one input delay line per uplink E-Link (model)
//   * mmcm_ps_model    - MMCM producing the phase-shifted E-Link clock (model)
//   * elink_phase_ctrl - steps the MMCM to the requested phase
//   * elink_regs       - E-Link delay / edge / phase registers
//   * i2c_master       - I2C master for the jitter-cleaner chip
//   * wb_interconnect  - the internal Wishbone bus, three masters, four slaves
// Parts that come from elsewhere are outside and meet this top at ports:
// the GBT-FPGA core with its transceiver (dl_frame_i / ul_frame_o, presented
// in the clk_el domain, plus its register slave wbs_gbt_*), the three bus
// masters (wbm_i/wbm_o index 0 Forth CPU, 1 IPbus, 2 GBT-SC/IC controller),
// and the clock-tuning slave for the clock generator (wbs_clk_*).
// Clocks: clk_el is the jitter-cleaned clock recovered from the GBT link at
// f_EL_CLK = EL_RATIO x 40 MHz (the E-Links and the frames run on it); clk_wb
// is the start-up clock on which the bus, the registers, the delay-line
// control and the MMCM phase-shift port run, so the bus works before the link
// clock exists. Only the per-link edge selection crosses to clk_el (through a
// synchronizer). The E-Link clock to the ASICs, elink_clk_o, is clk_el passed
// through the MMCM; the same clock is sent on every E-Link.
// Because two vendor primitives are represented by behavioural models, this
// top is for simulation; on the FPGA the primitives replace the models.
// Structure and numbers follow the emulator's block diagram and text; the
// clocking split, the register map and one shared clock phase are this
// design's choice.
`timescale 1ns/1fs
module gbtxemu_top
  import gbtxemu_pkg::*;
#(
  parameter int unsigned EL_RATIO = 1,
  parameter int unsigned N_ELINKS = max_elinks(EL_RATIO)
) (
  input  logic                   clk_el,
  input  logic                   rst_el,
  input  logic                   clk_wb,
  input  logic                   rst_wb,
  // GBT-FPGA core (frames in the clk_el domain)
  input  logic [GBT_DL_BITS-1:0] dl_frame_i,
  output logic [GBT_UL_BITS-1:0] ul_frame_o,
  output logic                   ul_valid_o,
  output logic                   frame_stb_o,
  // bus masters from outside: 0 CPU, 1 IPbus, 2 GBT-SC/IC
  input  wb_m2s_t                wbm_i [WB_N_MASTERS],
  output wb_s2m_t                wbm_o [WB_N_MASTERS],
  // bus slaves outside: GBT-FPGA registers, clock tuning
  output wb_m2s_t                wbs_gbt_o,
  input  wb_s2m_t                wbs_gbt_i,
  output wb_m2s_t                wbs_clk_o,
  input  wb_s2m_t                wbs_clk_i,
  // E-Links
  output logic [N_ELINKS-1:0]    elink_clk_o,
  output logic [N_ELINKS-1:0]    elink_dout_o,
  input  logic [N_ELINKS-1:0]    elink_din_i,
  // I2C to the jitter cleaner (open drain)
  input  logic                   scl_i,
  input  logic                   sda_i,
  output logic                   scl_oe_o,
  output logic                   sda_oe_o,
  output logic                   mmcm_locked_o
);
  // ---------------- internal bus ----------------
  wb_m2s_t s_m2s [WB_N_SLAVES];
  wb_s2m_t s_s2m [WB_N_SLAVES];

  wb_interconnect u_bus (
    .clk(clk_wb), .rst(rst_wb),
    .m_i(wbm_i), .m_o(wbm_o), .s_o(s_m2s), .s_i(s_s2m),
    .gnt_o(), .busy_o()
  );

  assign wbs_gbt_o             = s_m2s[int'(SLV_GBT_FPGA)];
  assign s_s2m[int'(SLV_GBT_FPGA)]   = wbs_gbt_i;
  assign wbs_clk_o             = s_m2s[int'(SLV_CLK_TUNE)];
  assign s_s2m[int'(SLV_CLK_TUNE)]   = wbs_clk_i;

  // ---------------- I2C master ----------------
  i2c_master u_i2c (
    .clk(clk_wb), .rst(rst_wb),
    .wb_i(s_m2s[int'(SLV_I2C)]), .wb_o(s_s2m[int'(SLV_I2C)]),
    .scl_i, .sda_i, .scl_oe_o, .sda_oe_o
  );

  // ---------------- E-Link control ----------------
  logic signed [15:0]         phase_target, phase_cur;
  logic                       phase_busy, psen, psincdec, psdone, locked;
  logic [N_ELINKS-1:0]        dly_ld, edge_sel, din_dly;
  logic [IDELAY_TAP_BITS-1:0] dly_val [N_ELINKS];
  logic [IDELAY_TAP_BITS-1:0] dly_cur [N_ELINKS];

  elink_regs #(.N_ELINKS(N_ELINKS), .EL_RATIO(EL_RATIO)) u_regs (
    .clk(clk_wb), .rst(rst_wb),
    .wb_i(s_m2s[int'(SLV_ELINKS)]), .wb_o(s_s2m[int'(SLV_ELINKS)]),
    .phase_target_o(phase_target), .phase_cur_i(phase_cur),
    .phase_busy_i(phase_busy), .mmcm_locked_i(locked),
    .dly_ld_o(dly_ld), .dly_val_o(dly_val), .dly_cur_i(dly_cur),
    .edge_sel_o(edge_sel)
  );

  elink_phase_ctrl u_phase (
    .clk(clk_wb), .rst(rst_wb),
    .target_i(phase_target), .mmcm_locked_i(locked),
    .psen_o(psen), .psincdec_o(psincdec), .psdone_i(psdone),
    .cur_o(phase_cur), .busy_o(phase_busy)
  );

  logic elink_clk;
  mmcm_ps_model #(.CLKIN1_PERIOD(25.0 / real'(EL_RATIO))) u_mmcm (
    .CLKIN1(clk_el), .RST(rst_wb), .CLKOUT0(elink_clk), .LOCKED(locked),
    .PSCLK(clk_wb), .PSEN(psen), .PSINCDEC(psincdec), .PSDONE(psdone)
  );
  assign elink_clk_o   = {N_ELINKS{elink_clk}};
  assign mmcm_locked_o = locked;

  for (genvar i = 0; i < N_ELINKS; i++) begin : g_dly
    idelaye2_model u_idelay (
      .C(clk_wb), .REGRST(rst_wb), .LD(dly_ld[i]), .CE(1'b0), .INC(1'b0),
      .CNTVALUEIN(dly_val[i]), .CNTVALUEOUT(dly_cur[i]),
      .IDATAIN(elink_din_i[i]), .DATAOUT(din_dly[i])
    );
  end

  // ---------------- E-Links ----------------
  elinks #(.EL_RATIO(EL_RATIO), .N_ELINKS(N_ELINKS)) u_elinks (
    .clk(clk_el), .rst(rst_el),
    .dl_frame_i, .ul_frame_o, .ul_valid_o, .frame_stb_o,
    .edge_sel_i(edge_sel),
    .elink_dout_o, .elink_din_i(din_dly)
  );
endmodule
