`timescale 1ns/1ps
// Testbench of chip_select_unit: all combinations of preselect, address and
// strapped identity.
module tb_chip_select_unit;
  int checks = 0, failures = 0;
  logic pre, sel;
  logic [3:0] addr, id;

  chip_select_unit dut (.chip_preselect (pre), .chip_addr (addr), .chip_id (id), .selected (sel));

  initial begin
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < 16; a++)
        for (int i = 0; i < 16; i++) begin
          pre = p[0]; addr = 4'(a); id = 4'(i);
          #1;
          checks++;
          if (sel !== (p == 1 && a == i)) begin failures++; $display("FAIL p%0d a%0d i%0d", p, a, i); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
