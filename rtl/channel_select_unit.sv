`timescale 1ns/1ps
// channel_select_unit: addresses one channel's derandomizer buffer and drives
// it onto the 8-bit data bus through the readout buffer.
//
// While the chip is selected, the oldest word of the channel named by CHANNEL
// ADDRESS appears on `data` with `data_oe` high (the readout buffer's output
// enable; the board combines the buses of its chips). A one-clock `rd` strobe
// in the readout clock domain removes that word. `chan_empty` tells whether the
// addressed channel holds data. The paper gives the unit, the per-channel
// addressing and the 8-bit bus; the read strobe, the empty flag and the
// output-enable in place of a tri-state pin are this design's choices.
// Combinational apart from the FIFO it drives.
module channel_select_unit
  import tdc_pkg::*;
(
  input  logic               selected,
  input  logic [CHAN_AW-1:0] chan_addr,
  input  logic               rd,
  input  time_t              fifo_dout  [N_CH],
  input  logic [N_CH-1:0]    fifo_empty,
  output logic [N_CH-1:0]    fifo_pop,
  output time_t              data,
  output logic               data_oe,
  output logic               chan_empty
);
  always_comb begin
    fifo_pop   = '0;
    fifo_pop[chan_addr] = selected && rd && !fifo_empty[chan_addr];
    data_oe    = selected;
    data       = selected ? fifo_dout[chan_addr] : '0;
    chan_empty = fifo_empty[chan_addr];
  end
endmodule
