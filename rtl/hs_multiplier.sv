`timescale 1ns/1ps
// hs_multiplier: the high-speed multiplier that turns raw delay-line counts into
// calibrated times while an event moves from the pipeline to the derandomizer.
//
// For every channel i of an accepted event:
//   t = min(254, ((max(raw - offset[i], 0) * gain[i]) >> F) * corr >> F)
// where offset[i] and gain[i] come from the start-up calibration (gain maps a
// 100 ns interval onto 256 counts) and corr is the temperature/voltage
// correction factor re-measured on the calibration channel; F = CAL_F fraction
// bits. The code NO_HIT (255) passes unchanged, and in hit-register mode
// (FUNC) all words pass unchanged because they are hit patterns, not times.
// The paper gives the mapping, the correction by multiplication and where it
// happens; the fixed-point format, the clamping and the eight parallel lanes
// (the paper names one multiplier unit) are this design's choices.
// Two register stages: results appear two clocks after `in_valid`.
module hs_multiplier
  import tdc_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     func,
  input  logic                     in_valid,
  input  time_t                    din    [N_CH],
  input  logic signed [OFS_W-1:0]  offset [N_CH],
  input  logic        [GAIN_W-1:0] gain   [N_CH],
  input  logic        [CORR_W-1:0] corr,
  output logic                     out_valid,
  output time_t                    dout   [N_CH]
);
  localparam int D_W  = OFS_W;                 // non-negative difference
  localparam int P1_W = D_W + GAIN_W - CAL_F;  // after first scaling
  localparam int P2_W = P1_W + CORR_W - CAL_F; // after correction

  logic              v1, f1;
  logic [N_CH-1:0]   nohit1;
  time_t             pass1 [N_CH];
  logic [P1_W-1:0]   s1    [N_CH];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_CH; i++) begin
      logic signed [OFS_W:0] d;
      logic [D_W+GAIN_W-1:0] p;
      d = $signed({1'b0, {(OFS_W-T_W){1'b0}}, din[i]}) - OFS_W'(offset[i]);
      if (d < 0) d = '0;
      p = D_W'(d) * gain[i];
      s1[i]     <= P1_W'(p >> CAL_F);
      nohit1[i] <= (din[i] == NO_HIT);
      pass1[i]  <= din[i];
    end
    f1 <= func;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_CH; i++) begin
      logic [P1_W+CORR_W-1:0] p2;
      logic [P2_W-1:0]        s2;
      p2 = s1[i] * corr;
      s2 = P2_W'(p2 >> CAL_F);
      if (f1 || nohit1[i])             dout[i] <= pass1[i];
      else if (s2 > P2_W'(T_MAX))      dout[i] <= T_MAX;
      else                             dout[i] <= T_W'(s2);
    end
  end

  always_ff @(posedge clk)
    if (rst) {out_valid, v1} <= '0;
    else     {out_valid, v1} <= {v1, in_valid};
endmodule
