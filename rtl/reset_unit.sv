`timescale 1ns/1ps
// reset_unit: distributes the chip's RESET pin to its three clock domains.
//
// RESET (active high) clears every domain at once, asynchronously; each domain
// leaves reset two of its own clock edges after RESET falls, so release is
// synchronous everywhere. Leaving the BX domain's reset also starts nothing by
// itself: the calibration unit begins its start-up calibration when the gauge
// domain leaves reset. The paper names the unit and says all channels can be
// initialised in parallel by a general reset; the synchroniser is this design's.
module reset_unit (
  input  logic rst_in,
  input  logic bx_clk,
  input  logic gauge_clk,
  input  logic rd_clk,
  output logic bx_rst,
  output logic gauge_rst,
  output logic rd_rst
);
  logic [1:0] bx_s, ga_s, rd_s;

  always_ff @(posedge bx_clk or posedge rst_in)
    if (rst_in) bx_s <= 2'b11; else bx_s <= {bx_s[0], 1'b0};
  always_ff @(posedge gauge_clk or posedge rst_in)
    if (rst_in) ga_s <= 2'b11; else ga_s <= {ga_s[0], 1'b0};
  always_ff @(posedge rd_clk or posedge rst_in)
    if (rst_in) rd_s <= 2'b11; else rd_s <= {rd_s[0], 1'b0};

  assign bx_rst    = bx_s[1];
  assign gauge_rst = ga_s[1];
  assign rd_rst    = rd_s[1];
endmodule
