`timescale 1ns/1ps
// test_unit: the chip's internal pattern generator.
//
// In normal operation (MODE = CH) each TDC channel sees its own GTL input. In
// the three test modes the START pin, which the fast control system pulses at
// a chosen time inside the bunch crossing, is routed to all channels, to the
// even-numbered channels (2,4,6,8) or to the odd-numbered ones (1,3,5,7), and
// the GTL inputs are ignored. The paper gives the three pins (two MODE bits and
// START) and the three test patterns; the encoding of MODE and the choice to
// replace rather than OR the GTL inputs are this design's own.
//
// The same patterns drive the 64 TTL hit inputs of the hit-register mode
// (FUNC), so that "all input signals" can be tested: TTL input 8g+b belongs to
// channel b+1 of group g, and EVEN/ODD select channels within every group of 8.
// The block diagram of the chip connects the test unit to the TTL hit latch but
// the text does not say how; applying the channel patterns per group of 8 is
// this design's reading. The TTL latch samples levels at the BX edge, so in
// hit-register test mode START must be high across a BX edge to be recorded.
//
// Purely combinational, so the START edge reaches the time digitisers with only
// gate delay; channel numbers 1..8 of the paper are indices 0..7 here.
module test_unit
  import tdc_pkg::*;
(
  input  test_mode_e        mode,
  input  logic              start,
  input  logic [N_CH-1:0]   gtl_hit,
  input  logic [N_TTL-1:0]  ttl_hit,
  output logic [N_CH-1:0]   hit,
  output logic [N_TTL-1:0]  ttl_out
);
  localparam logic [N_CH-1:0] EVEN_MASK = 8'b1010_1010; // channels 2,4,6,8
  localparam logic [N_CH-1:0] ODD_MASK  = 8'b0101_0101; // channels 1,3,5,7

  always_comb begin
    unique case (mode)
      MODE_CH:   hit = gtl_hit;
      MODE_ALL:  hit = {N_CH{start}};
      MODE_EVEN: hit = {N_CH{start}} & EVEN_MASK;
      MODE_ODD:  hit = {N_CH{start}} & ODD_MASK;
      default:   hit = gtl_hit;
    endcase
  end

  // Same pattern, repeated for each group of 8 TTL inputs.
  always_comb begin
    unique case (mode)
      MODE_CH:   ttl_out = ttl_hit;
      MODE_ALL:  ttl_out = {N_TTL{start}};
      MODE_EVEN: ttl_out = {N_TTL{start}} & {(N_TTL / N_CH){EVEN_MASK}};
      MODE_ODD:  ttl_out = {N_TTL{start}} & {(N_TTL / N_CH){ODD_MASK}};
      default:   ttl_out = ttl_hit;
    endcase
  end
endmodule
