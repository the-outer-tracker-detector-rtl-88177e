`timescale 1ns/1ps
// tdc_board: the 9U VME TDC board for drift-time measurement.
//
// Sixteen TDC chips (128 channels) share the fast control signals of the
// experiment (BX clock, BX NUMBER, FLT ACCEPT, FLT NUMBER, test START and MODE,
// FUNC, OR), each receives eight hit inputs and drives eight trigger hit
// outputs. A Protocol Control Unit, clocked by the board's system clock (27 MHz
// in the Outer Tracker, 10-30 MHz possible), reads every event from all chips
// over a common 8-bit bus and ships it as a 144-byte Event Format Block through
// the SHARC link transmitter. Four status outputs drive LEDs: reset, overflow
// (OR of all chips' FIFO overflow flags), trigger accept and fault.
// From the paper: 16 chips, the PCU, the link, the system and gauge clocks as
// inputs, the four LEDs and the OR of the overflow flags. This design's own:
// chip k's address is strapped to k; the data bus is an AND-OR of the chips'
// outputs gated by their output enables instead of a tri-state bus; the accept
// LED is stretched for ACCEPT_STRETCH BX clocks; the fault LED latches until
// reset once any chip has dropped an event.
// The PCU's event counter and the link's word counter have no board pin and are
// left unconnected here (lint reports them as unused); they serve debugging.
module tdc_board
  import tdc_pkg::*;
#(
  parameter int          N_CHIPS        = 16,
  parameter int unsigned RECAL_CYCLES   = 8_000_000,
  parameter real         BIN_NS         = 0.48,
  parameter int unsigned ACCEPT_STRETCH = 65535
) (
  input  logic                         sys_clk,
  input  logic                         bx_clk,
  input  logic                         gauge_clk,
  input  logic                         reset,
  input  logic [7:0]                   board_addr,     // address switches
  // fast control system
  input  logic [PTR_W-1:0]             bx_number,
  input  logic                         flt_accept,
  input  logic [PTR_W-1:0]             flt_number,
  input  logic                         start,
  input  test_mode_e                   mode,
  input  logic                         func,
  input  logic                         or_en,
  // detector side
  input  logic [N_CHIPS-1:0][N_CH-1:0] gtl_hit,
  input  logic [N_CHIPS-1:0][N_TTL-1:0] ttl_hit,
  output logic [N_CHIPS-1:0][N_CH-1:0] hit_out,
  // SHARC link
  input  logic                         lack,
  output logic                         lclk,
  output logic [3:0]                   ldata,
  // status
  output logic                         led_reset,
  output logic                         led_overflow,
  output logic                         led_accept,
  output logic                         led_fault,
  output logic                         cal_ready
);
  logic               sys_rst, rst_s1;
  logic [N_CHIPS-1:0] c_oe, c_empty, c_ovf, c_lost, c_cal;
  time_t              c_data [N_CHIPS];
  time_t              bus;
  logic               preselect, rd;
  logic [CHIP_AW-1:0] chip_addr;
  logic [CHAN_AW-1:0] chan_addr;

  // Board-level reset for PCU and link, released synchronously.
  always_ff @(posedge sys_clk or posedge reset)
    if (reset) {sys_rst, rst_s1} <= 2'b11;
    else       {sys_rst, rst_s1} <= {rst_s1, 1'b0};

  for (genvar k = 0; k < N_CHIPS; k++) begin : g_chip
    tdc_chip #(.RECAL_CYCLES (RECAL_CYCLES), .BIN_NS (BIN_NS)) u_chip (
      .bx_clk (bx_clk), .gauge_clk (gauge_clk), .rd_clk (sys_clk), .reset (reset),
      .gtl_hit (gtl_hit[k]), .ttl_hit (ttl_hit[k]), .start (start), .mode (mode),
      .func (func), .or_en (or_en), .hit_out (hit_out[k]),
      .bx_number (bx_number), .flt_accept (flt_accept), .flt_number (flt_number),
      .chip_id (CHIP_AW'(k)), .chip_preselect (preselect), .chip_addr (chip_addr),
      .chan_addr (chan_addr), .rd (rd), .data (c_data[k]), .data_oe (c_oe[k]),
      .chan_empty (c_empty[k]), .fifo_overflow (c_ovf[k]), .event_lost (c_lost[k]),
      .cal_ready (c_cal[k])
    );
  end

  always_comb begin
    bus = '0;
    for (int k = 0; k < N_CHIPS; k++) bus |= c_data[k] & {T_W{c_oe[k]}};
  end

  logic [7:0]  byte_d;
  logic        byte_v, byte_r;
  logic [15:0] ev_count, words_sent;

  pcu #(.N_CHIPS (N_CHIPS)) u_pcu (
    .clk (sys_clk), .rst (sys_rst), .board_addr (board_addr),
    .events_ready (~|c_empty), .overflow (c_ovf), .bus_data (bus),
    .chip_preselect (preselect), .chip_addr (chip_addr), .chan_addr (chan_addr), .rd (rd),
    .byte_out (byte_d), .byte_valid (byte_v), .byte_ready (byte_r), .event_count (ev_count)
  );

  sharc_link_tx u_link (
    .clk (sys_clk), .rst (sys_rst), .byte_in (byte_d), .byte_valid (byte_v),
    .byte_ready (byte_r), .lack (lack), .lclk (lclk), .ldata (ldata), .words_sent (words_sent)
  );

  // Status LEDs.
  logic [15:0] acc_cnt;
  always_ff @(posedge bx_clk or posedge reset)
    if (reset) begin
      acc_cnt <= '0; led_fault <= 1'b0;
    end else begin
      if (flt_accept)       acc_cnt <= 16'(ACCEPT_STRETCH);
      else if (acc_cnt != 0) acc_cnt <= acc_cnt - 1'b1;
      if (|c_lost) led_fault <= 1'b1;
    end

  assign led_reset    = sys_rst;
  assign led_overflow = |c_ovf;
  assign led_accept   = (acc_cnt != 0);
  assign cal_ready    = &c_cal;
endmodule
