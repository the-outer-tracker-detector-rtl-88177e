`timescale 1ns/1ps
// pipeline: the 128-event ring buffer that holds every bunch crossing until the
// First Level Trigger has decided.
//
// Each cell holds one 8-bit word per channel. Every BX clock the current words
// are written at the address given by the external BX NUMBER; on FLT ACCEPT the
// cell addressed by the FLT NUMBER (the read pointer generated by the fast
// control system) is read and handed on, one cycle later, with `rd_valid`. With
// 96 ns per crossing the 128 cells give about 12 us for the trigger decision.
// Size, the two externally supplied 7-bit pointers and the accept-driven read
// follow the paper; the registered read port is this design's choice. An
// assertion checks that a read never targets the cell being overwritten.
module pipeline #(
  parameter int N_CH  = 8,
  parameter int W     = 8,
  parameter int DEPTH = 128,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data [N_CH],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data [N_CH],
  output logic          rd_valid
);
  logic [N_CH*W-1:0] mem [DEPTH];
  logic [N_CH*W-1:0] wr_word, rd_word;

  always_comb
    for (int i = 0; i < N_CH; i++) wr_word[i*W +: W] = wr_data[i];

  always_ff @(posedge clk) begin
    mem[wr_addr] <= wr_word;
    if (rd_en) rd_word <= mem[rd_addr];
  end

  always_ff @(posedge clk)
    if (rst) rd_valid <= 1'b0;
    else     rd_valid <= rd_en;

  always_comb
    for (int i = 0; i < N_CH; i++) rd_data[i] = rd_word[i*W +: W];

  // The trigger must never ask for the crossing that is being written now.
  a_no_overwrite: assert property (@(posedge clk) disable iff (rst)
                                   rd_en |-> rd_addr != wr_addr);
endmodule
