`timescale 1ns/1ps
// async_fifo: dual-clock FIFO with Gray-coded pointers, first-word fall-through.
//
// Helper of the derandomizer: written in the BX clock domain, read in the board
// (readout) clock domain. Pointers carry one extra wrap bit; each side compares
// its own pointer with a two-flop synchronised copy of the other's Gray pointer,
// so `full` and `empty` are conservative and never wrong in the unsafe
// direction. `dout` always shows the oldest entry; `pop` advances it. Pushing
// into a full FIFO or popping an empty one is ignored (and flagged by
// assertions). DEPTH must be a power of two.
module async_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic         wclk,
  input  logic         wrst,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wbin, rbin, wgray, rgray;
  logic [AW:0]   rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write side.
  always_ff @(posedge wclk)
    if (wrst) begin
      wbin <= '0; wgray <= '0;
    end else if (push && !full) begin
      mem[wbin[AW-1:0]] <= din;
      wbin  <= wbin + 1'b1;
      wgray <= bin2gray(wbin + 1'b1);
    end

  always_ff @(posedge wclk)
    if (wrst) {rgray_w2, rgray_w1} <= '0;
    else      {rgray_w2, rgray_w1} <= {rgray_w1, rgray};

  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // Read side.
  always_ff @(posedge rclk)
    if (rrst) begin
      rbin <= '0; rgray <= '0;
    end else if (pop && !empty) begin
      rbin  <= rbin + 1'b1;
      rgray <= bin2gray(rbin + 1'b1);
    end

  always_ff @(posedge rclk)
    if (rrst) {wgray_r2, wgray_r1} <= '0;
    else      {wgray_r2, wgray_r1} <= {wgray_r1, wgray};

  assign empty = (rgray == wgray_r2);
  assign dout  = mem[rbin[AW-1:0]];

  a_no_push_full: assert property (@(posedge wclk) disable iff (wrst) push |-> !full);
  a_no_pop_empty: assert property (@(posedge rclk) disable iff (rrst) pop  |-> !empty);
endmodule
