`timescale 1ns/1ps
// Testbench of hit_output_register: random hit patterns with OR off and on;
// each output must equal the reference pattern of the previous BX clock.
module tb_hit_output_register;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, or_en = 0;
  logic [7:0] hin, hout, expq;

  hit_output_register dut (.bx_clk (clk), .rst (rst), .or_en (or_en), .hit_in (hin), .hit_out (hout));
  always #48 clk = ~clk;

  function automatic logic [7:0] ref_pattern(input logic [7:0] h, input logic o);
    logic [7:0] r;
    r = h;
    if (o) begin
      r[1] = h[0] | h[1]; r[3] = h[2] | h[3]; r[5] = h[4] | h[5]; r[7] = h[6] | h[7];
    end
    return r;
  endfunction

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    hin = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    checks++; if (hout !== 8'h00) begin failures++; $display("FAIL reset value"); end
    for (int n = 0; n < 300; n++) begin
      hin   = 8'($urandom);
      or_en = (n >= 150);
      expq  = ref_pattern(hin, or_en);
      @(posedge clk); #1;
      checks++;
      if (hout !== expq) begin failures++; $display("FAIL in %h or %0b: out %h exp %h", hin, or_en, hout, expq); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
