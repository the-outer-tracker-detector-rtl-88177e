`timescale 1ns/1ps
// Testbench of pipeline: writes a known pattern into every cell at the running
// BX number (more than one full turn, so the ring wraps), then reads cells
// 20..120 crossings old on FLT ACCEPT and checks data and the one-clock latency.
module tb_pipeline;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, rd_en = 0, rd_valid;
  logic [6:0] wr_addr = 0, rd_addr = 0;
  time_t wd [N_CH];
  time_t rdat [N_CH];
  int bx = 0;

  pipeline #(.N_CH (8), .W (8), .DEPTH (128)) dut (
    .clk (clk), .rst (rst), .wr_addr (wr_addr), .wr_data (wd), .rd_en (rd_en),
    .rd_addr (rd_addr), .rd_data (rdat), .rd_valid (rd_valid));
  always #48 clk = ~clk;

  function automatic time_t pat(input int b, input int ch);
    return 8'(b * 7 + ch * 31 + (b >> 7));
  endfunction

  // Free-running BX counter and data source.
  always @(posedge clk) if (!rst) bx <= bx + 1;
  always_comb begin
    wr_addr = 7'(bx);
    for (int i = 0; i < N_CH; i++) wd[i] = pat(bx, i);
  end

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    repeat (300) @(posedge clk);       // pipeline filled, wrapped twice
    for (int n = 0; n < 60; n++) begin
      int age, want;
      #1;
      age = 20 + (n * 17) % 100;
      want = bx - age;
      rd_addr = 7'(want);
      rd_en = 1;
      @(posedge clk); #1;
      rd_en = 0;
      checks++;
      if (!rd_valid) begin failures++; $display("FAIL rd_valid not one clock after accept"); end
      for (int i = 0; i < N_CH; i++) begin
        checks++;
        if (rdat[i] !== pat(want, i)) begin
          failures++; $display("FAIL bx %0d ch %0d: %h exp %h", want, i, rdat[i], pat(want, i));
        end
      end
      @(posedge clk); #1;
      checks++;
      if (rd_valid) begin failures++; $display("FAIL rd_valid stays high"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
