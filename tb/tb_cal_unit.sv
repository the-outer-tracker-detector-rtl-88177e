`timescale 1ns/1ps
// Testbench of cal_unit. A delay-line stand-in with a run-time bin width per
// channel (440 + 10*i ps) answers the calibration pulses. Checks: the measured
// intervals are 100 and 200 ns, the nine offset/gain writes equal
// offset = 2*r100 - r200 and gain = floor(2^18 / (r200 - r100)), `ready` rises
// within 400 gauge periods, re-calibration touches only channel 8, comes every
// RECAL_CYCLES periods, and writes corr = floor(slope_ref * 1024 / slope_now)
// after the channel-8 bin has been changed (a temperature drift).
module tb_cal_unit;
  import tdc_pkg::*;
  localparam int RECAL = 500;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [RAW_W-1:0] cal_raw [N_CALCH];
  logic [N_CALCH-1:0] cal_start, cal_stop;
  logic ch_we, corr_we, ready, recal_done;
  logic [3:0] ch_addr;
  logic signed [OFS_W-1:0] ch_offset;
  logic [GAIN_W-1:0] ch_gain;
  logic [CORR_W-1:0] corr_out;

  int bin_ps [N_CALCH];
  realtime t0 [N_CALCH];
  int nwrites = 0, nstarts_after_ready = 0, recals = 0;
  int cyc = 0, ready_cyc = -1, last_recal_cyc = -1;
  int exp_corr = 1024;

  cal_unit #(.RECAL_CYCLES (RECAL)) dut (
    .clk (clk), .rst (rst), .cal_raw (cal_raw), .cal_start (cal_start), .cal_stop (cal_stop),
    .ch_we (ch_we), .ch_addr (ch_addr), .ch_offset (ch_offset), .ch_gain (ch_gain),
    .corr_we (corr_we), .corr_out (corr_out), .ready (ready), .recal_done (recal_done));
  always #50 clk = ~clk;

  for (genvar i = 0; i < N_CALCH; i++) begin : g_model
    always @(posedge cal_start[i]) t0[i] = $realtime;
    always @(posedge cal_stop[i]) begin
      int dt_ps;
      dt_ps = int'(($realtime - t0[i]) * 1000.0);
      checks++;
      if (dt_ps != 100000 && dt_ps != 200000) begin
        failures++; $display("FAIL channel %0d interval %0d ps", i, dt_ps);
      end
      cal_raw[i] <= RAW_W'(dt_ps / bin_ps[i]);
      if (ready && i != CAL_CH) nstarts_after_ready++;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ready && ready_cyc < 0) ready_cyc <= cyc;
    if (ch_we) begin
      int r100, r200, s, g;
      r100 = 100000 / bin_ps[ch_addr];
      r200 = 200000 / bin_ps[ch_addr];
      s = r200 - r100;
      g = (1 << 18) / s;
      if (g > 16383) g = 16383;
      nwrites <= nwrites + 1;
      check(int'(ch_offset) == r100 - s, $sformatf("ch %0d offset %0d exp %0d", ch_addr, ch_offset, r100 - s));
      check(int'(ch_gain) == g, $sformatf("ch %0d gain %0d exp %0d", ch_addr, ch_gain, g));
    end
    if (corr_we) begin
      check(int'(corr_out) == exp_corr, $sformatf("corr %0d exp %0d", corr_out, exp_corr));
    end
    if (recal_done) begin
      recals <= recals + 1;
      if (last_recal_cyc >= 0)
        check(cyc - last_recal_cyc >= RECAL && cyc - last_recal_cyc <= RECAL + 40,
              $sformatf("re-calibration period %0d cycles", cyc - last_recal_cyc));
      last_recal_cyc <= cyc;
    end
  end

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int s_ref, s_now;
    for (int i = 0; i < N_CALCH; i++) begin bin_ps[i] = 440 + 10 * i; cal_raw[i] = '0; end
    repeat (2) @(posedge clk);
    #1 rst = 0;
    wait (ready);
    @(posedge clk); #1;
    check(nwrites == 9, $sformatf("nine channel writes, saw %0d", nwrites));
    check(ready_cyc > 0 && ready_cyc < 400, $sformatf("start-up calibration took %0d gauge periods", ready_cyc));
    // first re-calibration: unchanged bin, corr stays 1.0
    exp_corr = 1024;
    wait (recals == 1);
    // drift: channel 8 bin 520 ps -> 500 ps
    s_ref = 200000 / 520 - 100000 / 520;
    bin_ps[CAL_CH] = 500;
    s_now = 200000 / 500 - 100000 / 500;
    exp_corr = (s_ref * 1024) / s_now;
    wait (recals == 3);
    check(nstarts_after_ready == 0, "re-calibration only uses the calibration channel");
    check(nwrites == 9, "no channel writes during re-calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
