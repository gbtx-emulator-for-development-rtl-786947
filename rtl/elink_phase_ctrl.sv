// elink_phase_ctrl: brings the E-Link clock to the requested phase.
//
// The E-Link clock sent to the front-end ASICs is produced by an MMCM whose
// output phase can be moved in steps of 78.125 ps through its dynamic
// phase-shift port (PSEN, PSINCDEC, PSDONE, clocked by PSCLK = clk). This
// controller compares the requested phase target_i with the phase reached,
// cur_o (both signed step counts relative to reset); while they differ and the
// MMCM is locked it issues one PSEN pulse (PSINCDEC = 1 to move later), waits
// for PSDONE and counts the step. One step therefore takes 2 clocks plus the
// MMCM's PSDONE latency; busy_o is high while steps remain. mmcm_locked_i may
// be asynchronous and is synchronized here. The 78.125 ps resolution follows
// the emulator's description; the stepping controller is this design's.
`timescale 1ns/1fs
module elink_phase_ctrl (
  input  logic               clk,
  input  logic               rst,
  input  logic signed [15:0] target_i,
  input  logic               mmcm_locked_i,
  output logic               psen_o,
  output logic               psincdec_o,
  input  logic               psdone_i,
  output logic signed [15:0] cur_o,
  output logic               busy_o
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT} state_e;
  state_e state;
  logic   lock_s1, lock_s2;

  always_ff @(posedge clk) begin
    lock_s1 <= mmcm_locked_i;
    lock_s2 <= lock_s1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      psen_o     <= 1'b0;
      psincdec_o <= 1'b0;
      cur_o      <= '0;
    end else begin
      psen_o <= 1'b0;
      unique case (state)
        S_IDLE: if (lock_s2 && cur_o != target_i) begin
          psen_o     <= 1'b1;
          psincdec_o <= (target_i > cur_o);
          state      <= S_WAIT;
        end
        S_WAIT: if (psdone_i) begin
          cur_o <= psincdec_o ? cur_o + 16'sd1 : cur_o - 16'sd1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state != S_IDLE) || (cur_o != target_i);

  a_one_step: assert property (@(posedge clk) disable iff (rst)
    psen_o |=> !psen_o);
endmodule
