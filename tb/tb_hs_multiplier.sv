`timescale 1ns/1ps
// Testbench of hs_multiplier: random raw times, offsets, gains and correction
// factors; the expected time is computed with plain integer arithmetic
// (floor((raw-offset)*gain/1024) then *corr/1024, clamped to 0..254, 255 = no
// hit kept, FUNC words passed). Also checks the two-clock latency.
module tb_hs_multiplier;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, func = 0, iv = 0, ov;
  time_t din [N_CH];
  time_t dout [N_CH];
  logic signed [OFS_W-1:0] ofs [N_CH];
  logic [GAIN_W-1:0] gain [N_CH];
  logic [CORR_W-1:0] corr;

  hs_multiplier dut (.clk (clk), .rst (rst), .func (func), .in_valid (iv), .din (din),
    .offset (ofs), .gain (gain), .corr (corr), .out_valid (ov), .dout (dout));
  always #5 clk = ~clk;

  function automatic int expect_t(input int raw, input int o, input int g, input int c, input bit f);
    longint d, s1, s2;
    if (f || raw == 255) return raw;
    d = raw - o;
    if (d < 0) d = 0;
    s1 = (d * g) / 1024;
    s2 = (s1 * c) / 1024;
    if (s2 > 254) s2 = 254;
    return int'(s2);
  endfunction

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e [N_CH];
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 400; n++) begin
      func = (n % 10 == 9);
      corr = CORR_W'(900 + $urandom_range(0, 250));
      for (int i = 0; i < N_CH; i++) begin
        din[i]  = (($urandom % 8) == 0) ? 8'hFF : 8'($urandom_range(0, 254));
        ofs[i]  = OFS_W'($signed($urandom_range(0, 12)) - 4);
        gain[i] = GAIN_W'($urandom_range(1000, 1500));
        e[i]    = expect_t(din[i], ofs[i], gain[i], corr, func);
      end
      iv = 1;
      @(posedge clk); #1 iv = 0;
      checks++;
      if (ov) begin failures++; $display("FAIL valid after one clock"); end
      @(posedge clk); #1;
      checks++;
      if (!ov) begin failures++; $display("FAIL valid not after two clocks"); end
      for (int i = 0; i < N_CH; i++) begin
        checks++;
        if (int'(dout[i]) != e[i]) begin
          failures++;
          $display("FAIL raw %0d ofs %0d gain %0d corr %0d func %0b: %0d exp %0d",
                   din[i], ofs[i], gain[i], corr, func, dout[i], e[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
