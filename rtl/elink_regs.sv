// elink_regs: control and status registers of the E-Link block (Wishbone slave).
//
// The emulator's registers are reached by name from the CPU, IPbus and GBT-SC
// masters through a generated address map; this block is that register file
// for the E-Links. Word offsets inside the block (address bits [11:0]):
//   0x000 ID      RO  {8'hE1, N_ELINKS[7:0], EL_RATIO[7:0], 8'h01}
//   0x001 PHASE   RW  [15:0] requested E-Link clock phase, signed, in steps of
//                     78.125 ps relative to the phase at reset
//   0x002 PSTAT   RO  [15:0] phase reached, [16] phase stepping busy,
//                     [17] E-Link clock MMCM locked
//   0x040+i LINK  RW  [4:0] input delay taps of E-Link i (78 ps each),
//                     [8] sampling edge of E-Link i (0 rising first,
//                     1 falling first); reads [20:16] the tap value the delay
//                     line reports
// Writing a LINK register also pulses dly_ld_o[i] for one clock so that the
// delay line loads the new tap value. Other offsets read as zero and ignore
// writes. Every access is acknowledged one clock after stb (one ack per
// access, stb must then drop or start a new access). The controls themselves
// (delay, edge, clock phase) are the emulator's; the layout is this design's.
`timescale 1ns/1fs
module elink_regs
  import gbtxemu_pkg::*;
#(
  parameter int unsigned N_ELINKS = 56,
  parameter int unsigned EL_RATIO = 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  wb_m2s_t                    wb_i,
  output wb_s2m_t                    wb_o,
  // E-Link clock phase
  output logic signed [15:0]         phase_target_o,
  input  logic signed [15:0]         phase_cur_i,
  input  logic                       phase_busy_i,
  input  logic                       mmcm_locked_i,
  // per-link input delay and sampling edge
  output logic [N_ELINKS-1:0]        dly_ld_o,
  output logic [IDELAY_TAP_BITS-1:0] dly_val_o [N_ELINKS],
  input  logic [IDELAY_TAP_BITS-1:0] dly_cur_i [N_ELINKS],
  output logic [N_ELINKS-1:0]        edge_sel_o
);
  localparam logic [11:0] OFS_ID    = 12'h000;
  localparam logic [11:0] OFS_PHASE = 12'h001;
  localparam logic [11:0] OFS_PSTAT = 12'h002;
  localparam logic [11:0] OFS_LINK  = 12'h040;

  logic [11:0] ofs;
  logic        acc, link_hit;
  int unsigned link;

  assign ofs      = wb_i.adr[11:0];
  assign acc      = wb_i.cyc && wb_i.stb && !wb_o.ack;
  assign link     = int'(ofs) - int'(OFS_LINK);
  assign link_hit = (ofs >= OFS_LINK) && (link < N_ELINKS);

  always_ff @(posedge clk) begin
    if (rst) begin
      wb_o           <= WB_S2M_IDLE;
      phase_target_o <= '0;
      dly_ld_o       <= '0;
      edge_sel_o     <= '0;
      for (int unsigned i = 0; i < N_ELINKS; i++) dly_val_o[i] <= '0;
    end else begin
      wb_o.ack <= acc;
      wb_o.err <= 1'b0;
      dly_ld_o <= '0;
      if (acc) begin
        wb_o.dat <= '0;
        if (wb_i.we) begin
          if (ofs == OFS_PHASE) phase_target_o <= wb_i.dat[15:0];
          if (link_hit) begin
            dly_val_o[link]  <= wb_i.dat[IDELAY_TAP_BITS-1:0];
            edge_sel_o[link] <= wb_i.dat[8];
            dly_ld_o[link]   <= 1'b1;
          end
        end else begin
          if (ofs == OFS_ID)
            wb_o.dat <= {8'hE1, 8'(N_ELINKS), 8'(EL_RATIO), 8'h01};
          if (ofs == OFS_PHASE)
            wb_o.dat <= 32'(phase_target_o) & 32'h0000_FFFF;
          if (ofs == OFS_PSTAT)
            wb_o.dat <= {14'd0, mmcm_locked_i, phase_busy_i, phase_cur_i};
          if (link_hit)
            wb_o.dat <= {11'd0, dly_cur_i[link], 7'd0, edge_sel_o[link], 3'd0, dly_val_o[link]};
        end
      end
    end
  end
endmodule
