`timescale 1ns/1ps
// Testbench of ttl_hit_latch: in hit-register mode the 64 inputs appear one BX
// clock later; with FUNC low the latch stays clear.
module tb_ttl_hit_latch;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, func = 0;
  logic [63:0] ttl, hits, expq;

  ttl_hit_latch dut (.bx_clk (clk), .rst (rst), .func (func), .ttl_hit (ttl), .hits (hits));
  always #48 clk = ~clk;

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ttl = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 200; n++) begin
      ttl  = {$urandom, $urandom};
      func = (n % 50) < 40;
      expq = func ? ttl : 64'h0;
      @(posedge clk); #1;
      checks++;
      if (hits !== expq) begin failures++; $display("FAIL func %0b in %h out %h", func, ttl, hits); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
