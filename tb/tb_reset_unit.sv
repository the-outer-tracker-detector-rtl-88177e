`timescale 1ns/1ps
// Testbench of reset_unit: RESET asserts all three domain resets at once and
// each is released on the second edge of its own clock after RESET falls.
module tb_reset_unit;
  int checks = 0, failures = 0;
  logic rst_in = 0, bx = 0, ga = 0, rc = 0;
  logic bx_rst, ga_rst, rd_rst;

  reset_unit dut (.rst_in (rst_in), .bx_clk (bx), .gauge_clk (ga), .rd_clk (rc),
                  .bx_rst (bx_rst), .gauge_rst (ga_rst), .rd_rst (rd_rst));
  always #48 bx = ~bx;
  always #50 ga = ~ga;
  always #18.5 rc = ~rc;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %t", what, $time); end
  endtask

  task automatic count_release(input int which);
    int n;
    n = 0;
    case (which)
      0: begin while (bx_rst) begin @(posedge bx); #0.1; n++; end end
      1: begin while (ga_rst) begin @(posedge ga); #0.1; n++; end end
      default: begin while (rd_rst) begin @(posedge rc); #0.1; n++; end end
    endcase
    check(n == 2, $sformatf("domain %0d released after %0d edges", which, n));
  endtask

  initial begin
    for (int k = 0; k < 3; k++) begin
      #(137 + 50 * k);
      rst_in = 1; #1;
      check(bx_rst && ga_rst && rd_rst, "asynchronous assertion");
      #(300); rst_in = 0;
      fork
        count_release(0);
        count_release(1);
        count_release(2);
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
