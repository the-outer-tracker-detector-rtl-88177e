`timescale 1ns/1ps
// ttl_hit_latch: 64 TTL hit inputs for the hit-register mode.
//
// When the chip works as a 64-channel hit register (FUNC high) the single-ended
// hit lines are latched with the BX clock; the latch output, grouped by 8, then
// replaces the eight 8-bit times at the pipeline input. The paper gives the 64
// inputs, the latching and the grouping; that the latch samples the level at
// the BX edge (rather than catching pulses between edges) and holds zero when
// the mode is off are this design's choices. One BX cycle latency.
module ttl_hit_latch
  import tdc_pkg::*;
(
  input  logic             bx_clk,
  input  logic             rst,
  input  logic             func,      // hit-register mode enable
  input  logic [N_TTL-1:0] ttl_hit,
  output logic [N_TTL-1:0] hits
);
  always_ff @(posedge bx_clk)
    if (rst || !func) hits <= '0;
    else              hits <= ttl_hit;
endmodule
