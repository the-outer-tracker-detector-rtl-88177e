`timescale 1ns/1ps
// gtl_ttl_switch: the 8 x 8 switch in front of the pipeline.
//
// FUNC low: the pipeline stores, per channel, the 8-bit time of the TDC (the
// GTL path) and the time digitisers are enabled. FUNC high: the TDC channels
// are switched off and the 64 latched TTL hits are stored instead, hit input
// 8*i+b going to bit b of channel word i, so the same 8 x 8-bit format and the
// same buffer management serve both uses. The paper gives the switch, the FUNC
// pin, the shut-off of the TDC and the grouping by 8; the bit order inside a
// group is this design's choice. Combinational.
module gtl_ttl_switch
  import tdc_pkg::*;
(
  input  logic             func,
  input  time_t            tdc_time [N_CH],
  input  logic [N_TTL-1:0] ttl_hits,
  output time_t            pipe_in  [N_CH],
  output logic             tdc_on
);
  always_comb begin
    for (int i = 0; i < N_CH; i++)
      pipe_in[i] = func ? ttl_hits[i*T_W +: T_W] : tdc_time[i];
    tdc_on = !func;
  end
endmodule
