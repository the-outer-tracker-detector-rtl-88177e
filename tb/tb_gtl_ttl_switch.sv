`timescale 1ns/1ps
// Testbench of gtl_ttl_switch: random TDC times and TTL hits; channel word i is
// the time (FUNC low) or TTL bits 8i..8i+7 (FUNC high); tdc_on = !FUNC.
module tb_gtl_ttl_switch;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic func;
  time_t t [N_CH];
  time_t p [N_CH];
  logic [63:0] ttl;
  logic on;

  gtl_ttl_switch dut (.func (func), .tdc_time (t), .ttl_hits (ttl), .pipe_in (p), .tdc_on (on));

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 100; n++) begin
      func = n[0];
      ttl  = {$urandom, $urandom};
      for (int i = 0; i < N_CH; i++) t[i] = 8'($urandom);
      #1;
      for (int i = 0; i < N_CH; i++) begin
        logic [7:0] e;
        e = func ? 8'(ttl >> (8 * i)) : t[i];
        checks++;
        if (p[i] !== e) begin failures++; $display("FAIL ch %0d func %0b: %h exp %h", i, func, p[i], e); end
      end
      checks++;
      if (on !== !func) begin failures++; $display("FAIL tdc_on"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
