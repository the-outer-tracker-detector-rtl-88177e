`timescale 1ns/1ps
// tdc_pkg: constants and types shared by the TDC chip and the TDC board.
//
// The sizes follow the chip's published organisation: 8 time channels plus one
// calibration channel, 8-bit times, a 128-cell pipeline addressed by the 7-bit
// BX number, a 16-event derandomizer and 64 TTL hit inputs for the hit-register
// mode. The 10-bit raw width used during calibration and the fixed-point format
// of the calibration constants are this design's own choices.
package tdc_pkg;
  localparam int N_CH       = 8;    // time channels per chip
  localparam int N_CALCH    = 9;    // 8 time channels + 1 calibration channel
  localparam int CAL_CH     = 8;    // index of the calibration channel
  localparam int T_W        = 8;    // width of a time word / pipeline cell per channel
  localparam int RAW_W      = 10;   // raw delay-line count width (calibration resolution)
  localparam int PIPE_DEPTH = 128;  // pipeline cells (events)
  localparam int PTR_W      = 7;    // BX NUMBER / FLT NUMBER width
  localparam int FIFO_DEPTH = 16;   // derandomizer depth (events)
  localparam int N_TTL      = 64;   // TTL hit inputs in hit-register mode
  localparam int CHIP_AW    = 4;    // chip address width (16 chips per board)
  localparam int CHAN_AW    = 3;    // channel address width (8 channels)

  // Fixed point of the calibration constants: gain and correction carry
  // CAL_F fraction bits.
  localparam int CAL_F      = 10;
  localparam int GAIN_W     = 14;   // gain = 256 * 2^CAL_F / slope, exact for slope >= 17 counts
  localparam int CORR_W     = 12;   // correction factor, 1.0 = 2^CAL_F
  localparam int OFS_W      = RAW_W + 1; // signed offset

  // Time code meaning "no hit in this bunch crossing"; measured times saturate
  // one count below it.
  localparam logic [T_W-1:0] NO_HIT   = 8'hFF;
  localparam logic [T_W-1:0] T_MAX    = 8'hFE;

  // Two MODE pins of the test unit.
  typedef enum logic [1:0] {
    MODE_CH   = 2'b00,  // normal operation: channels see their GTL inputs
    MODE_ALL  = 2'b01,  // START fires all 8 channels
    MODE_EVEN = 2'b10,  // START fires channels 2,4,6,8
    MODE_ODD  = 2'b11   // START fires channels 1,3,5,7
  } test_mode_e;

  typedef logic [T_W-1:0] time_t;
endpackage
