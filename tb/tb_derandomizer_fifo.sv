`timescale 1ns/1ps
// Testbench of derandomizer_fifo: BX clock 96 ns writes, 37 ns readout clock.
// Pushes 20 events with no reads: 16 fit, overflow rises, 4 are lost. Then reads
// every channel in turn and checks order and content; overflow must clear.
// Finally interleaves pushes and pops with a reference queue per channel.
module tb_derandomizer_fifo;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1, push = 0, ovf, lost;
  logic [7:0] din [8];
  logic [7:0] dout [8];
  logic [7:0] pop = '0, empty;
  int lost_count = 0;
  byte unsigned q [8][$];

  derandomizer_fifo #(.N_CH (8), .W (8), .DEPTH (16)) dut (
    .wclk (wclk), .wrst (wrst), .push (push), .din (din), .overflow (ovf), .lost (lost),
    .rclk (rclk), .rrst (rrst), .pop (pop), .dout (dout), .empty (empty));
  always #48 wclk = ~wclk;
  always #18.5 rclk = ~rclk;
  always @(posedge wclk) if (lost) lost_count++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic push_event(input int ev);
    @(posedge wclk); #1;
    for (int i = 0; i < 8; i++) din[i] = 8'(ev * 8 + i);
    if (!ovf) for (int i = 0; i < 8; i++) q[i].push_back(8'(ev * 8 + i));
    push = 1;
    @(posedge wclk); #1 push = 0;
  endtask

  task automatic read_one(input int ch);
    @(posedge rclk); #1;
    if (!empty[ch]) begin
      check(dout[ch] == q[ch][0], $sformatf("ch %0d data %0d exp %0d", ch, dout[ch], q[ch][0]));
      void'(q[ch].pop_front());
      pop[ch] = 1;
      @(posedge rclk); #1 pop = '0;
    end
  endtask

  initial begin
    #5ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) din[i] = 0;
    repeat (3) @(posedge wclk);
    #1 wrst = 0; rrst = 0;
    for (int ev = 0; ev < 20; ev++) push_event(ev);
    repeat (4) @(posedge wclk);
    check(ovf == 1'b1, "overflow high with 16 events stored");
    check(lost_count == 4, $sformatf("4 events lost, saw %0d", lost_count));
    for (int i = 0; i < 8; i++) check(q[i].size() == 16, "reference holds 16");
    repeat (4) @(posedge rclk);
    // read everything, channel by channel
    for (int e = 0; e < 16; e++)
      for (int ch = 0; ch < 8; ch++) read_one(ch);
    repeat (6) @(posedge rclk); #1;
    check(empty == 8'hFF, "all empty after reading");
    repeat (4) @(posedge wclk); #1;
    check(ovf == 1'b0, "overflow cleared");
    // interleaved traffic
    for (int ev = 100; ev < 140; ev++) begin
      push_event(ev);
      repeat (3) @(posedge rclk);
      for (int ch = 0; ch < 8; ch++) read_one(ch);
    end
    repeat (10) @(posedge rclk);
    for (int ch = 0; ch < 8; ch++) while (q[ch].size() > 0) read_one(ch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
