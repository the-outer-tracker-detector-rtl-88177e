`timescale 1ns/1ps
// hit_output_register: trigger hit outputs of the TDC chip.
//
// The input latch marks every channel that received a hit during a bunch
// crossing; this register takes those marks on the next BX clock edge, so the
// First Level Trigger sees the hit pattern one BX cycle after the crossing. When
// the OR pin is high, each even-numbered output (channels 2,4,6,8) carries the
// OR of itself and the channel below it, which merges the back-to-back drift
// cells that the trigger chambers route to neighbouring channels. The paper gives
// the latching with the BX clock, the one-cycle latency and the optional OR of
// neighbouring channels; the figure places the four merging gates on the
// even-numbered outputs. Leaving the odd outputs unmerged is read from that
// figure. Synchronous active-high reset clears the outputs.
module hit_output_register
  import tdc_pkg::*;
(
  input  logic            bx_clk,
  input  logic            rst,
  input  logic            or_en,
  input  logic [N_CH-1:0] hit_in,
  output logic [N_CH-1:0] hit_out
);
  logic [N_CH-1:0] merged;

  always_comb begin
    merged = hit_in;
    for (int k = 0; k < N_CH/2; k++)
      if (or_en) merged[2*k+1] = hit_in[2*k] | hit_in[2*k+1];
  end

  always_ff @(posedge bx_clk)
    if (rst) hit_out <= '0;
    else     hit_out <= merged;
endmodule
