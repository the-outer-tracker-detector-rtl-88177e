`timescale 1ns/1ps
// Testbench of the delay-line model: hits placed a known time before the BX edge
// must give floor(dt / 0.48 ns) bins; no hit, a hit inside the dead time after
// the edge, a second hit in the same crossing, the 100/200 ns calibration
// intervals and saturation are checked. Expected counts use integer picoseconds.
module tb_tdc_delay_line;
  int checks = 0, failures = 0;
  logic rst = 1, start = 0, bx_clk = 0, cal_start = 0, cal_stop = 0;
  logic hit;
  logic [9:0] raw, cal_raw;

  tdc_delay_line #(.BIN_NS (0.48), .DEAD_NS (4.0), .RAW_W (10)) dut (
    .rst (rst), .start (start), .bx_clk (bx_clk), .cal_start (cal_start),
    .cal_stop (cal_stop), .hit (hit), .raw (raw), .cal_raw (cal_raw));

  always #48 bx_clk = ~bx_clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (hit %0b raw %0d cal_raw %0d)", what, hit, raw, cal_raw); end
  endtask

  // Fire a hit dt_ps before the next BX edge and check the result after it.
  task automatic hit_before_edge(input int dt_ps);
    @(posedge bx_clk);
    #((96000 - dt_ps) * 1ps) start = 1;
    #(2ns) start = 0;
    @(posedge bx_clk); #1;
    check(hit == 1'b1, $sformatf("hit flag for dt=%0d ps", dt_ps));
    check(raw == 10'(dt_ps / 480), $sformatf("raw for dt=%0d ps expected %0d", dt_ps, dt_ps / 480));
  endtask

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge bx_clk);
    rst = 0;
    hit_before_edge(5000);
    hit_before_edge(20300);
    hit_before_edge(50000);
    hit_before_edge(91000);
    // no hit
    @(posedge bx_clk); #1;
    check(hit == 1'b0, "no hit gives hit=0");
    // hit inside the dead time right after the edge is lost
    @(posedge bx_clk); #2 start = 1; #2 start = 0;
    @(posedge bx_clk); #1;
    check(hit == 1'b0, "hit in dead time is lost");
    // two hits: the first one counts
    @(posedge bx_clk); #30 start = 1; #2 start = 0; #20 start = 1; #2 start = 0;
    @(posedge bx_clk); #1;
    check(hit == 1'b1 && raw == 10'(66000 / 480), "first of two hits kept");
    // calibration intervals
    #10 cal_start = 1; #100 cal_stop = 1; #1;
    check(cal_raw == 10'(100000 / 480), "100 ns calibration interval");
    cal_start = 0; cal_stop = 0; #10;
    cal_start = 1; #200 cal_stop = 1; #1;
    check(cal_raw == 10'(200000 / 480), "200 ns calibration interval");
    cal_start = 0; cal_stop = 0; #10;
    cal_start = 1; #600 cal_stop = 1; #1;
    check(cal_raw == 10'd1023, "saturation at 1023");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
