`timescale 1ns/1ps
// tdc_chip: the HERA-B drift-time TDC ASIC.
//
// Eight channels digitise, in every bunch crossing (BX), the time from a hit on
// the channel's input to the next edge of the external BX clock (common stop),
// in gate-delay bins of about 0.48 ns. Each BX:
//   1. the test unit passes the GTL hit inputs, or the START pin in test modes
//      (also in place of the 64 TTL inputs in hit-register mode);
//   2. the delay lines (one behavioural model per channel) latch the hit and its
//      raw count at the BX edge; hits also go to the trigger hit outputs one BX
//      later, optionally ORed in neighbouring pairs;
//   3. raw counts are saturated to 8 bits (255 = no hit) and, through the
//      GTL/TTL switch, written into the 128-cell pipeline at the BX NUMBER
//      address. With FUNC high the 64 latched TTL hits are written instead;
//   4. on FLT ACCEPT the cell at FLT NUMBER is read, converted by the
//      high-speed multiplier to 256 counts per 100 ns using the calibration
//      memory, and pushed into the 16-event derandomizer (two BX later);
//   5. the readout, in its own clock domain, addresses chip and channel and
//      takes one byte per read strobe from the 8-bit data bus.
// A ninth delay line serves only calibration. The calibration unit, on the
// 10 MHz gauge clock, calibrates all nine lines after reset and re-measures the
// ninth every RECAL_CYCLES gauge periods (0.8 s).
//
// Latencies, in BX clocks: hit output 1 after the crossing; pipeline write 1
// after the crossing (the crossing that ends at BX edge n is stored under the
// BX NUMBER presented at edge n+1); derandomizer 3 after FLT ACCEPT.
// Following the paper: pin groups, sizes, the data path order and the
// calibration scheme. This design's own: the read strobe `rd`, the strapped
// `chip_id`, the status outputs `chan_empty`, `event_lost` and `cal_ready`,
// and a separate readout clock `rd_clk`.
// The calibration unit's `recal_done` pulse has no chip pin and stays
// unconnected (lint reports it as unused); testbenches observe it.
module tdc_chip
  import tdc_pkg::*;
#(
  parameter int unsigned RECAL_CYCLES = 8_000_000,
  parameter real         BIN_NS       = 0.48
) (
  input  logic               bx_clk,
  input  logic               gauge_clk,
  input  logic               rd_clk,
  input  logic               reset,
  // hit inputs and test/function control
  input  logic [N_CH-1:0]    gtl_hit,
  input  logic [N_TTL-1:0]   ttl_hit,
  input  logic               start,
  input  test_mode_e         mode,
  input  logic               func,
  input  logic               or_en,
  output logic [N_CH-1:0]    hit_out,
  // fast control
  input  logic [PTR_W-1:0]   bx_number,
  input  logic               flt_accept,
  input  logic [PTR_W-1:0]   flt_number,
  // readout
  input  logic [CHIP_AW-1:0] chip_id,
  input  logic               chip_preselect,
  input  logic [CHIP_AW-1:0] chip_addr,
  input  logic [CHAN_AW-1:0] chan_addr,
  input  logic               rd,
  output time_t              data,
  output logic               data_oe,
  output logic               chan_empty,
  // status
  output logic               fifo_overflow,
  output logic               event_lost,
  output logic               cal_ready
);
  logic bx_rst, gauge_rst, rd_rst;

  reset_unit u_reset (
    .rst_in (reset), .bx_clk (bx_clk), .gauge_clk (gauge_clk), .rd_clk (rd_clk),
    .bx_rst (bx_rst), .gauge_rst (gauge_rst), .rd_rst (rd_rst)
  );

  // ---------------------------------------------------------------- front end
  logic [N_CH-1:0]    test_hit, ch_hit;
  logic               tdc_on;
  logic [N_CALCH-1:0] dl_start, dl_hit, cal_start, cal_stop;
  logic [RAW_W-1:0]   dl_raw [N_CALCH];
  logic [RAW_W-1:0]   cal_raw [N_CALCH];

  logic [N_TTL-1:0] ttl_in;
  test_unit u_test (.mode (mode), .start (start), .gtl_hit (gtl_hit), .ttl_hit (ttl_hit),
                    .hit (test_hit), .ttl_out (ttl_in));

  assign ch_hit   = test_hit & {N_CH{tdc_on}};
  assign dl_start = {1'b0, ch_hit};         // the calibration line has no hit input

  for (genvar i = 0; i < N_CALCH; i++) begin : g_dl
    tdc_delay_line #(.BIN_NS (BIN_NS), .RAW_W (RAW_W)) u_dl (
      .rst (bx_rst), .start (dl_start[i]), .bx_clk (bx_clk),
      .cal_start (cal_start[i]), .cal_stop (cal_stop[i]),
      .hit (dl_hit[i]), .raw (dl_raw[i]), .cal_raw (cal_raw[i])
    );
  end

  hit_output_register u_hitreg (
    .bx_clk (bx_clk), .rst (bx_rst), .or_en (or_en),
    .hit_in (dl_hit[N_CH-1:0]), .hit_out (hit_out)
  );

  time_t tdc_time [N_CH];
  always_comb
    for (int i = 0; i < N_CH; i++)
      if (!dl_hit[i])                       tdc_time[i] = NO_HIT;
      else if (dl_raw[i] > RAW_W'(T_MAX))   tdc_time[i] = T_MAX;
      else                                  tdc_time[i] = T_W'(dl_raw[i]);

  logic [N_TTL-1:0] ttl_hits;
  ttl_hit_latch u_ttl (.bx_clk (bx_clk), .rst (bx_rst), .func (func),
                       .ttl_hit (ttl_in), .hits (ttl_hits));

  time_t pipe_in [N_CH];
  gtl_ttl_switch u_switch (.func (func), .tdc_time (tdc_time), .ttl_hits (ttl_hits),
                           .pipe_in (pipe_in), .tdc_on (tdc_on));

  // ----------------------------------------------------------------- pipeline
  time_t pipe_out [N_CH];
  logic  pipe_valid;

  pipeline #(.N_CH (N_CH), .W (T_W), .DEPTH (PIPE_DEPTH)) u_pipe (
    .clk (bx_clk), .rst (bx_rst), .wr_addr (bx_number), .wr_data (pipe_in),
    .rd_en (flt_accept), .rd_addr (flt_number), .rd_data (pipe_out), .rd_valid (pipe_valid)
  );

  // -------------------------------------------------------------- calibration
  logic                     ch_we, corr_we;
  logic [3:0]               ch_waddr;
  logic signed [OFS_W-1:0]  ch_wofs;
  logic        [GAIN_W-1:0] ch_wgain;
  logic        [CORR_W-1:0] corr_w, corr;
  logic signed [OFS_W-1:0]  offset [N_CALCH];
  logic        [GAIN_W-1:0] gain   [N_CALCH];
  logic                     recal_done;

  cal_unit #(.RECAL_CYCLES (RECAL_CYCLES)) u_cal (
    .clk (gauge_clk), .rst (gauge_rst), .cal_raw (cal_raw),
    .cal_start (cal_start), .cal_stop (cal_stop),
    .ch_we (ch_we), .ch_addr (ch_waddr), .ch_offset (ch_wofs), .ch_gain (ch_wgain),
    .corr_we (corr_we), .corr_out (corr_w), .ready (cal_ready), .recal_done (recal_done)
  );

  cal_ram u_calram (
    .clk (gauge_clk), .rst (gauge_rst),
    .ch_we (ch_we), .ch_addr (ch_waddr), .ch_offset (ch_wofs), .ch_gain (ch_wgain),
    .corr_we (corr_we), .corr_in (corr_w),
    .offset (offset), .gain (gain), .corr (corr)
  );

  logic signed [OFS_W-1:0]  ofs8  [N_CH];
  logic        [GAIN_W-1:0] gain8 [N_CH];
  always_comb
    for (int i = 0; i < N_CH; i++) begin
      ofs8[i]  = offset[i];
      gain8[i] = gain[i];
    end

  time_t mul_out [N_CH];
  logic  mul_valid;

  hs_multiplier u_mul (
    .clk (bx_clk), .rst (bx_rst), .func (func), .in_valid (pipe_valid), .din (pipe_out),
    .offset (ofs8), .gain (gain8), .corr (corr), .out_valid (mul_valid), .dout (mul_out)
  );

  // ------------------------------------------------------ derandomizer/readout
  logic [N_CH-1:0] fifo_pop, fifo_empty;
  time_t           fifo_dout [N_CH];
  logic            selected;

  derandomizer_fifo #(.N_CH (N_CH), .W (T_W), .DEPTH (FIFO_DEPTH)) u_derand (
    .wclk (bx_clk), .wrst (bx_rst), .push (mul_valid), .din (mul_out),
    .overflow (fifo_overflow), .lost (event_lost),
    .rclk (rd_clk), .rrst (rd_rst), .pop (fifo_pop), .dout (fifo_dout), .empty (fifo_empty)
  );

  chip_select_unit u_chipsel (
    .chip_preselect (chip_preselect), .chip_addr (chip_addr), .chip_id (chip_id),
    .selected (selected)
  );

  channel_select_unit u_chansel (
    .selected (selected), .chan_addr (chan_addr), .rd (rd),
    .fifo_dout (fifo_dout), .fifo_empty (fifo_empty), .fifo_pop (fifo_pop),
    .data (data), .data_oe (data_oe), .chan_empty (chan_empty)
  );
endmodule
