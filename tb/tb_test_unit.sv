`timescale 1ns/1ps
// Testbench of test_unit: every MODE, both START levels and random GTL and TTL
// inputs; the expected channel pattern is written out per mode, and for the 64
// TTL outputs it must repeat in every group of 8.
module tb_test_unit;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  test_mode_e mode;
  logic start;
  logic [7:0] gtl, hit, exp_hit;
  logic [63:0] ttl, ttl_out, exp_ttl;

  test_unit dut (.mode (mode), .start (start), .gtl_hit (gtl), .ttl_hit (ttl),
                 .hit (hit), .ttl_out (ttl_out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      mode  = test_mode_e'(n % 4);
      start = n[2];
      gtl   = 8'($urandom);
      ttl   = {$urandom, $urandom};
      #1;
      case (n % 4)
        0: exp_hit = gtl;
        1: exp_hit = start ? 8'hFF : 8'h00;
        2: exp_hit = start ? 8'hAA : 8'h00;   // channels 2,4,6,8
        default: exp_hit = start ? 8'h55 : 8'h00; // channels 1,3,5,7
      endcase
      checks++;
      if (hit !== exp_hit) begin
        failures++;
        $display("mode %0d start %0b gtl %h: hit %h expected %h", n % 4, start, gtl, hit, exp_hit);
      end
      exp_ttl = (n % 4 == 0) ? ttl : {8{exp_hit}};
      checks++;
      if (ttl_out !== exp_ttl) begin
        failures++;
        $display("mode %0d start %0b: ttl_out %h expected %h", n % 4, start, ttl_out, exp_ttl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
