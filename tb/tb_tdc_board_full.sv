`timescale 1ns/1ps
// Full-size testbench of tdc_board with every parameter at its default
// (16 chips, 128-cell pipelines, 16-event derandomizers, 0.8 s re-calibration
// period, 27 MHz system clock). One complete operation: reset, start-up
// calibration of all 144 delay lines, one crossing with a hit on each of the
// 128 channels at a distinct time, the FLT accept 100 crossings later, and the
// 144-byte event block on the link, checked byte by byte.
// Hit k lies 6100 + 660*k ps before the BX edge; none of these is an exact
// multiple of the 480 ps bin, so the model's real-valued division and the
// integer expectation floor(dt/480) agree.
module tb_tdc_board_full;
  import tdc_pkg::*;
  localparam int GAIN = (1 << 18) / 208;
  int checks = 0, failures = 0;

  logic sys = 0, bx = 0, ga = 0, reset = 1;
  logic [6:0] bxn = 0, fltn = 0;
  logic acc = 0, lack = 1, lclk, lclk_q = 0;
  logic [15:0][7:0] gtl = '0, hit_out;
  logic [3:0] ldata;
  logic led_r, led_o, led_a, led_f, calr;
  byte unsigned got [$];
  logic [7:0] acc_b;
  int nib = 0, edge_n = 0;

  tdc_board dut (
    .sys_clk (sys), .bx_clk (bx), .gauge_clk (ga), .reset (reset), .board_addr (8'h07),
    .bx_number (bxn), .flt_accept (acc), .flt_number (fltn), .start (1'b0), .mode (MODE_CH),
    .func (1'b0), .or_en (1'b0), .gtl_hit (gtl), .ttl_hit ('0), .hit_out (hit_out),
    .lack (lack), .lclk (lclk), .ldata (ldata), .led_reset (led_r), .led_overflow (led_o),
    .led_accept (led_a), .led_fault (led_f), .cal_ready (calr));

  always #48 bx = ~bx;
  always #50 ga = ~ga;
  always #18.5 sys = ~sys;
  always @(posedge bx) begin
    edge_n++;
    #1 bxn = 7'(edge_n);
  end
  always @(posedge sys) begin
    lclk_q <= lclk;
    if (!reset && lclk != lclk_q) begin
      if (nib % 2 == 0) acc_b[7:4] = ldata;
      else begin acc_b[3:0] = ldata; got.push_back(acc_b); end
      nib <= nib + 1;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int dt_of(input int k);   // distinct time per channel
    return 6100 + k * 660;      // never a whole number of 480 ps bins
  endfunction

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int a;
    byte unsigned x;
    repeat (3) @(posedge bx);
    #3 reset = 0;
    wait (calr);
    @(posedge bx); #1;
    a = (edge_n + 1) % 128;
    for (int k = 0; k < 128; k++) begin
      automatic int kk = k;
      fork begin
        #((95000 - dt_of(kk)) * 1ps) gtl[kk / 8][kk % 8] = 1;
        #2ns gtl[kk / 8][kk % 8] = 0;
      end join_none
    end
    @(posedge bx); @(posedge bx); #1;
    check(hit_out == '1, "all 128 trigger hit outputs");
    repeat (100) @(posedge bx); #2;
    acc = 1; fltn = 7'(a);
    @(posedge bx); #2 acc = 0;
    for (int w = 0; w < 5000 && got.size() < 144; w++) @(posedge sys);
    check(got.size() == 144, $sformatf("one 144-byte block, got %0d bytes", got.size()));
    if (got.size() == 144) begin
      check(got[0] == 8'hB5 && got[1] == 8'h07 && got[4] == 8'd128, "header");
      x = 0;
      for (int k = 0; k < 128; k++) begin
        int e;
        e = ((dt_of(k) / 480) * GAIN) / 1024;
        check(int'(got[8 + k]) == e, $sformatf("channel %0d: %0d exp %0d", k, got[8 + k], e));
        x ^= got[8 + k];
      end
      check(got[136] == x && got[143] == 8'hE5, "trailer");
    end
    check(!led_o && !led_f, "no overflow, no fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
