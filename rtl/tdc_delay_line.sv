`timescale 1ns/1ps
// tdc_delay_line: behavioural model of one channel of the gate-delay-line time
// digitiser, including the input latch that records whether a hit arrived.
//
// This is a behavioural model, not synthesizable logic: the real circuit is a
// chain of logic gates whose delay (about 0.48 ns per stage) sets the time bin,
// which depends on the process and cannot be written as RTL.
//
// Data taking works in common-stop mode. The first rising edge of `start` (the
// hit) after a BX edge is time-stamped; the next rising BX clock edge is the
// STOP. At that edge `hit` goes high for one BX period and `raw` holds the number
// of whole bins between START and STOP, saturated at 2^RAW_W-1. A hit arriving
// within DEAD_NS after a BX edge is lost, modelling the 3-5 ns dead time measured
// between sequential BX cycles. Later hits in the same period are ignored (this
// design's choice: the paper does not say which of several hits is kept).
//
// For calibration the same line measures the interval between rising edges of
// `cal_start` and `cal_stop`; the result appears on `cal_raw` at the `cal_stop`
// edge. The bin width is held in the variable `bin_ns` (initially BIN_NS) so
// that a drift of the gate delay, which the periodic re-calibration corrects,
// can be simulated. Both outputs change with non-blocking assignment at the stop edge, so
// logic clocked by the same edge reads the previous value.
// The time stamps and sequence counters are bookkeeping variables updated with
// blocking assignments inside edge-triggered processes; lint flags these, and
// they are intended in this model.
module tdc_delay_line #(
  parameter real BIN_NS  = 0.48,
  parameter real DEAD_NS = 4.0,
  parameter int  RAW_W   = 10
) (
  input  logic             rst,
  input  logic             start,
  input  logic             bx_clk,
  input  logic             cal_start,
  input  logic             cal_stop,
  output logic             hit,
  output logic [RAW_W-1:0] raw,
  output logic [RAW_W-1:0] cal_raw
);
  localparam int RAW_MAX = (1 << RAW_W) - 1;

  // Present bin width. It starts at BIN_NS; a testbench may assign it to model
  // the slow drift of the gate delay with temperature and supply voltage.
  real bin_ns = BIN_NS;

  realtime t_start, t_cal_start, t_last_stop;
  int unsigned start_seq, stop_seq;

  function automatic logic [RAW_W-1:0] to_bins(input realtime dt);
    int n;
    n = $rtoi(dt / bin_ns);
    if (n > RAW_MAX) n = RAW_MAX;
    if (n < 0)       n = 0;
    return RAW_W'(n);
  endfunction

  initial begin
    t_start = 0.0; t_cal_start = 0.0; t_last_stop = 0.0;
    start_seq = 0; stop_seq = 0;
    hit = 1'b0; raw = '0; cal_raw = '0;
  end

  // START: keep the first hit after the last STOP (outside the dead time).
  always @(posedge start)
    if (!rst && start_seq == stop_seq && ($realtime - t_last_stop) >= DEAD_NS) begin
      t_start   = $realtime;
      start_seq = start_seq + 1;
    end

  // STOP from the BX clock.
  always @(posedge bx_clk) begin
    if (rst) begin
      hit <= 1'b0;
      raw <= '0;
      stop_seq = start_seq;
    end else if (start_seq != stop_seq) begin
      hit <= 1'b1;
      raw <= to_bins($realtime - t_start);
      stop_seq = start_seq;
    end else begin
      hit <= 1'b0;
      raw <= '0;
    end
    t_last_stop = $realtime;
  end

  // Calibration interval.
  always @(posedge cal_start) t_cal_start = $realtime;
  always @(posedge cal_stop)  cal_raw <= to_bins($realtime - t_cal_start);
endmodule
