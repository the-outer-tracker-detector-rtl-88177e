`timescale 1ns/1ps
// cal_ram: the memory of the calibration unit.
//
// Holds, for each of the nine channels, the offset and gain of the straight
// line found at start-up, plus the single correction factor from the periodic
// re-calibration. Written by the calibration unit in the gauge clock domain;
// read continuously by the high-speed multiplier. The constants change only
// during calibration, so the multiplier reads them without synchronisation;
// events taken while a write is in progress may use a mix of old and new
// constants (this design's choice, the paper does not discuss it).
// After reset: offset 0, gain 1.0 and correction 1.0, so raw counts pass
// unchanged until the first calibration has finished.
module cal_ram
  import tdc_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     ch_we,
  input  logic [3:0]               ch_addr,
  input  logic signed [OFS_W-1:0]  ch_offset,
  input  logic        [GAIN_W-1:0] ch_gain,
  input  logic                     corr_we,
  input  logic        [CORR_W-1:0] corr_in,
  output logic signed [OFS_W-1:0]  offset [N_CALCH],
  output logic        [GAIN_W-1:0] gain   [N_CALCH],
  output logic        [CORR_W-1:0] corr
);
  localparam logic [GAIN_W-1:0] GAIN_ONE = GAIN_W'(1) << CAL_F;
  localparam logic [CORR_W-1:0] CORR_ONE = CORR_W'(1) << CAL_F;

  always_ff @(posedge clk)
    if (rst) begin
      for (int i = 0; i < N_CALCH; i++) begin
        offset[i] <= '0;
        gain[i]   <= GAIN_ONE;
      end
      corr <= CORR_ONE;
    end else begin
      if (ch_we && ch_addr < 4'(N_CALCH)) begin
        offset[ch_addr] <= ch_offset;
        gain[ch_addr]   <= ch_gain;
      end
      if (corr_we) corr <= corr_in;
    end
endmodule
