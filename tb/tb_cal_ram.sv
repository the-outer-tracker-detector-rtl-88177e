`timescale 1ns/1ps
// Testbench of cal_ram: reset values (offset 0, gain and correction 1.0 =
// 1024), random channel writes against a reference copy, correction writes,
// and an out-of-range address that must change nothing.
module tb_cal_ram;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, we = 0, cwe = 0;
  logic [3:0] addr = 0;
  logic signed [OFS_W-1:0] wofs = 0;
  logic [GAIN_W-1:0] wgain = 0;
  logic [CORR_W-1:0] wcorr = 0, corr, rcorr;
  logic signed [OFS_W-1:0] ofs [N_CALCH];
  logic [GAIN_W-1:0] gain [N_CALCH];
  int rofs [N_CALCH];
  int rgain [N_CALCH];

  cal_ram dut (.clk (clk), .rst (rst), .ch_we (we), .ch_addr (addr), .ch_offset (wofs),
    .ch_gain (wgain), .corr_we (cwe), .corr_in (wcorr), .offset (ofs), .gain (gain), .corr (corr));
  always #50 clk = ~clk;

  task automatic compare();
    for (int i = 0; i < N_CALCH; i++) begin
      checks += 2;
      if (int'(ofs[i]) != rofs[i]) begin failures++; $display("FAIL offset %0d", i); end
      if (int'(gain[i]) != rgain[i]) begin failures++; $display("FAIL gain %0d", i); end
    end
    checks++;
    if (corr != rcorr) begin failures++; $display("FAIL corr"); end
  endtask

  initial begin
    for (int i = 0; i < N_CALCH; i++) begin rofs[i] = 0; rgain[i] = 1024; end
    rcorr = 1024;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    compare();
    for (int n = 0; n < 200; n++) begin
      addr  = 4'($urandom_range(0, 9));      // 9 is outside the memory
      wofs  = OFS_W'($signed($urandom_range(0, 40)) - 20);
      wgain = GAIN_W'($urandom);
      wcorr = CORR_W'($urandom);
      we    = $urandom % 2;
      cwe   = ($urandom % 4) == 0;
      @(posedge clk); #1;
      if (we && addr < 9) begin rofs[addr] = int'(wofs); rgain[addr] = int'(wgain); end
      if (cwe) rcorr = wcorr;
      we = 0; cwe = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
