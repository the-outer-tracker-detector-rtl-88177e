`timescale 1ns/1ps
// Testbench of pcu: a stand-in for 16 chips returns byte f(event, chip, channel)
// for the addressed channel and counts read strobes. The link side accepts
// bytes with a random stall pattern. For three events the 144-byte block must
// hold the header, the 128 bytes in chip/channel order, and a trailer with the
// XOR of the data, the overflow flags and the event number; every data byte must
// come with exactly one read strobe at the right address. With the link never
// stalling a block must take 144 clocks.
module tb_pcu;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, ready_in = 0, pre, rd, bv, br = 1;
  logic [15:0] ovf = 16'hA5C3;
  logic [3:0] caddr;
  logic [2:0] haddr;
  logic [7:0] bout;
  time_t bus;
  logic [15:0] evc;
  int ev = 0, nrd = 0;
  byte unsigned blk [$];
  bit stall_random = 0;

  pcu #(.N_CHIPS (16)) dut (.clk (clk), .rst (rst), .board_addr (8'h3C), .events_ready (ready_in),
    .overflow (ovf), .bus_data (bus), .chip_preselect (pre), .chip_addr (caddr), .chan_addr (haddr),
    .rd (rd), .byte_out (bout), .byte_valid (bv), .byte_ready (br), .event_count (evc));
  always #18.5 clk = ~clk;

  function automatic byte unsigned f(input int e, input int c, input int h);
    return 8'(e * 37 + c * 11 + h * 3 + 1);
  endfunction

  assign bus = pre ? f(ev, caddr, haddr) : 8'h00;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (bv && br) blk.push_back(bout);
    if (rd) begin
      check(pre, "read strobe only while preselected");
      check(int'(caddr) * 8 + int'(haddr) == nrd % 128, "read address in sequence");
      nrd <= nrd + 1;
    end
    if (stall_random) br <= ($urandom % 3) != 0;
    else              br <= 1'b1;
  end

  initial begin
    #5ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    #1 rst = 0;
    repeat (10) @(posedge clk);
    check(!bv, "nothing sent without events");
    for (ev = 0; ev < 3; ev++) begin
      int t0, t1;
      byte unsigned x;
      stall_random = (ev != 0);
      blk.delete();
      #1 ready_in = 1;
      @(posedge clk); #1 ready_in = 0;
      t0 = $rtoi($realtime);
      wait (blk.size() == 144);
      t1 = $rtoi($realtime);
      if (ev == 0) check((t1 - t0) / 37 <= 146, $sformatf("block took %0d clocks", (t1 - t0) / 37));
      @(posedge clk); #1;
      check(!bv, "block ends after 144 bytes");
      check(blk[0] == 8'hB5 && blk[1] == 8'h3C && blk[2] == 8'(ev >> 8) && blk[3] == 8'(ev) && blk[4] == 8'd128,
            "header");
      x = 0;
      for (int k = 0; k < 128; k++) begin
        check(blk[8 + k] == f(ev, k / 8, k % 8), $sformatf("data byte %0d", k));
        x ^= blk[8 + k];
      end
      check(blk[136] == x, "checksum");
      check(blk[137] == 8'hA5 && blk[138] == 8'hC3, "overflow flags");
      check(blk[139] == 8'(ev) && blk[143] == 8'hE5, "trailer");
      check(nrd == 128 * (ev + 1), $sformatf("read strobes %0d", nrd));
      check(evc == 16'(ev + 1), "event counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
