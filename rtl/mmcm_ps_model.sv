// mmcm_ps_model: behavioural model of the MMCM that produces the E-Link clock
// (simulation only, not synthesizable; on the FPGA this is the vendor's
// mixed-signal clock manager, instantiated in its place).
//
// CLKOUT0 is CLKIN1 delayed by the current phase, a whole number of
// PS_STEP_PS (78.125 ps) steps, taken modulo one CLKIN1 period. The phase is
// moved by the dynamic phase-shift port: a one-PSCLK pulse on PSEN moves it by
// one step, later when PSINCDEC is 1 and earlier when 0, and PSDONE pulses for
// one PSCLK cycle PSDONE_LAT cycles after the PSEN edge; PSEN is ignored until
// then. LOCKED rises LOCK_CYCLES CLKIN1 cycles after RST falls, and RST
// returns the phase to zero. Only the ports used by the emulator are
// modelled (one clock input, one output, the phase-shift port, RST, LOCKED).
// The 78.125 ps step is the emulator's; the PSDONE latency and lock time are
// typical values chosen for this model.
`timescale 1ns/1fs
module mmcm_ps_model #(
  parameter real         CLKIN1_PERIOD = 25.0,    // ns
  parameter real         PS_STEP_PS    = 78.125,  // ps
  parameter int unsigned PSDONE_LAT    = 12,
  parameter int unsigned LOCK_CYCLES   = 16
) (
  input  logic CLKIN1,
  input  logic RST,
  output logic CLKOUT0,
  output logic LOCKED,
  input  logic PSCLK,
  input  logic PSEN,
  input  logic PSINCDEC,
  output logic PSDONE
);
  localparam int STEPS = int'(CLKIN1_PERIOD * 1000.0 / PS_STEP_PS);

  int          phase;     // 0 .. STEPS-1
  int unsigned ps_cnt;
  logic        ps_pend, ps_dir;
  int unsigned lock_cnt;
  realtime     dly;

  initial begin
    phase    = 0;
    ps_cnt   = 0;
    ps_pend  = 1'b0;
    ps_dir   = 1'b0;
    PSDONE   = 1'b0;
    LOCKED   = 1'b0;
    lock_cnt = 0;
    CLKOUT0  = 1'b0;
  end

  always_comb dly = real'(phase) * PS_STEP_PS / 1000.0;

  // Transport delay of the input clock by the current phase: every input
  // edge schedules its own output edge, so delays beyond half a period work.
  // A zero delay is applied at once rather than through a zero-delay wait.
  always @(CLKIN1) begin
    automatic logic    v = CLKIN1;
    automatic realtime d = dly;
    if (d == 0.0) begin
      CLKOUT0 = v;
    end else begin
      fork
        begin
          #(d);
          CLKOUT0 = v;
        end
      join_none
    end
  end

  always @(posedge PSCLK or posedge RST) begin
    if (RST) begin
      phase   <= 0;
      ps_pend <= 1'b0;
      PSDONE  <= 1'b0;
    end else if (ps_pend) begin
      PSDONE <= 1'b0;
      if (ps_cnt == PSDONE_LAT - 1) begin
        ps_pend <= 1'b0;
        PSDONE  <= 1'b1;
        phase   <= ps_dir ? (phase + 1) % STEPS : (phase + STEPS - 1) % STEPS;
      end
      ps_cnt <= ps_cnt + 1;
    end else begin
      PSDONE <= 1'b0;
      if (PSEN) begin
        ps_pend <= 1'b1;
        ps_dir  <= PSINCDEC;
        ps_cnt  <= 1;
      end
    end
  end

  always @(posedge CLKIN1 or posedge RST) begin
    if (RST) begin
      lock_cnt <= 0;
      LOCKED   <= 1'b0;
    end else if (lock_cnt < LOCK_CYCLES) begin
      lock_cnt <= lock_cnt + 1;
    end else begin
      LOCKED <= 1'b1;
    end
  end
endmodule
