`timescale 1ns/1ps
// derandomizer_fifo: per-channel 16-event buffers between trigger and readout.
//
// Every accepted event delivers one 8-bit word per channel (`push`, BX clock
// domain). Each channel has its own FIFO of FIFO_DEPTH words, read in the
// readout clock domain when the channel select unit addresses that channel.
// All channels are written together, so they stay in step: if any of them is
// full the whole event is dropped and `lost` pulses. `overflow` is high while
// the buffers are full, i.e. while the next event would be lost; the board uses
// it to hold the data acquisition. Size (8 x 8 x 16 bits), the per-channel
// organisation and the overflow flag follow the paper; dropping the event
// whole and the two-clock design are this design's choices.
module derandomizer_fifo #(
  parameter int N_CH  = 8,
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic         wclk,
  input  logic         wrst,
  input  logic         push,
  input  logic [W-1:0] din   [N_CH],
  output logic         overflow,
  output logic         lost,
  input  logic         rclk,
  input  logic         rrst,
  input  logic [N_CH-1:0] pop,
  output logic [W-1:0] dout  [N_CH],
  output logic [N_CH-1:0] empty
);
  logic [N_CH-1:0] full;
  logic            accept;

  assign overflow = |full;
  assign accept   = push && !overflow;

  always_ff @(posedge wclk)
    if (wrst) lost <= 1'b0;
    else      lost <= push && overflow;

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    async_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .wclk (wclk), .wrst (wrst), .push (accept), .din (din[i]), .full (full[i]),
      .rclk (rclk), .rrst (rrst), .pop (pop[i] && !empty[i]),
      .dout (dout[i]), .empty (empty[i])
    );
  end
endmodule
