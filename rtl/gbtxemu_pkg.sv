// gbtxemu_pkg: constants and bus types shared by the GBTX emulator firmware.
//
// The GBT link delivers one 80-bit downlink frame (FEC mode) and accepts one
// 112-bit uplink frame (Widebus mode) every 25 ns, i.e. at the 40 MHz LHC
// bunch-crossing rate; these two widths come from the GBT-FPGA configuration
// the emulator uses. The internal control bus is Wishbone (classic, single
// transfers, 32-bit data, word addresses); the bus width and the struct layout
// are this design's choice.
`timescale 1ns/1fs
package gbtxemu_pkg;

  // GBT frame widths (downlink with FEC, uplink in Widebus mode).
  localparam int unsigned GBT_DL_BITS = 80;
  localparam int unsigned GBT_UL_BITS = 112;

  // Number of E-Links the uplink frame can carry for a given ratio
  // f_EL_CLK / 40 MHz, with two bits per E-Link clock period (DDR).
  function automatic int unsigned max_elinks(int unsigned ratio);
    return GBT_UL_BITS / (2 * ratio);
  endfunction

  // IDELAYE2: 32 taps of 78 ps (2.496 ns in total).
  localparam int unsigned IDELAY_TAP_BITS = 5;

  // Wishbone bus.
  localparam int unsigned WB_AW = 32;
  localparam int unsigned WB_DW = 32;

  typedef struct packed {
    logic              cyc;
    logic              stb;
    logic              we;
    logic [WB_AW-1:0]  adr;   // word address
    logic [WB_DW-1:0]  dat;
    logic [WB_DW/8-1:0] sel;
  } wb_m2s_t;

  typedef struct packed {
    logic              ack;
    logic              err;
    logic [WB_DW-1:0]  dat;
  } wb_s2m_t;

  localparam wb_m2s_t WB_M2S_IDLE = '{default: '0};
  localparam wb_s2m_t WB_S2M_IDLE = '{default: '0};

  // Slaves on the internal bus, in address order (address bits [15:12]).
  typedef enum logic [3:0] {
    SLV_GBT_FPGA = 4'd0,
    SLV_I2C      = 4'd1,
    SLV_ELINKS   = 4'd2,
    SLV_CLK_TUNE = 4'd3
  } wb_slave_e;
  localparam int unsigned WB_N_SLAVES = 4;
  localparam int unsigned WB_SEL_LSB  = 12;

  // Masters, in arbitration order.
  typedef enum logic [1:0] {
    MST_J1B   = 2'd0,
    MST_IPBUS = 2'd1,
    MST_IC    = 2'd2
  } wb_master_e;
  localparam int unsigned WB_N_MASTERS = 3;

endpackage
