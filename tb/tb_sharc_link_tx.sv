`timescale 1ns/1ps
// Testbench of sharc_link_tx: a receiver model collects a nibble on every link
// clock transition and rebuilds the bytes. Sends 144 random bytes (one event
// block) with the acknowledge held high and checks content and that it takes
// 288 clocks (4 bits per clock), then repeats with acknowledge toggling and
// checks that no word starts while it is low.
module tb_sharc_link_tx;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, bv = 0, br, lack = 1, lclk, lclk_q = 0;
  logic [7:0] b = 0;
  logic [3:0] ldata;
  logic [15:0] words;
  byte unsigned sent [$];
  byte unsigned got [$];
  logic [7:0] acc;
  int nib = 0, nib_in_word = 0, first_nib_cyc = -1, last_nib_cyc = 0, cyc = 0;

  sharc_link_tx dut (.clk (clk), .rst (rst), .byte_in (b), .byte_valid (bv), .byte_ready (br),
    .lack (lack), .lclk (lclk), .ldata (ldata), .words_sent (words));
  always #18.5 clk = ~clk;

  // receiver
  always @(posedge clk) begin
    cyc <= cyc + 1;
    lclk_q <= lclk;
    if (!rst && lclk != lclk_q) begin
      if (first_nib_cyc < 0) first_nib_cyc <= cyc;
      last_nib_cyc <= cyc;
      if (nib % 2 == 0) acc[7:4] = ldata;
      else begin acc[3:0] = ldata; got.push_back(acc); end
      nib <= nib + 1;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_block(input int n);
    #1;
    for (int k = 0; k < n; k++) begin
      byte unsigned v;
      v = 8'($urandom);
      sent.push_back(v);
      b = v; bv = 1;
      do @(posedge clk); while (!br);
      #1;
    end
    bv = 0;
  endtask

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    send_block(144);
    repeat (30) @(posedge clk);
    check(got.size() == 144, $sformatf("144 bytes received, got %0d", got.size()));
    check(words == 24, "24 words of 48 bits");
    check(last_nib_cyc - first_nib_cyc + 1 == 288, $sformatf("block took %0d clocks, expected 288",
          last_nib_cyc - first_nib_cyc + 1));
    // back-pressure
    fork
      send_block(144);
      begin
        repeat (40) begin
          int nib0;
          @(posedge clk); #1 lack = 0;
          nib0 = nib;
          repeat (20) @(posedge clk);
          // at most the rest of a word already started may arrive
          check(nib - nib0 <= 12, "no new word while acknowledge is low");
          #1 lack = 1;
          repeat (7) @(posedge clk);
        end
      end
    join
    lack = 1;
    repeat (400) @(posedge clk);
    check(got.size() == 288, $sformatf("288 bytes received, got %0d", got.size()));
    for (int k = 0; k < sent.size() && k < got.size(); k++)
      check(got[k] == sent[k], $sformatf("byte %0d: %h exp %h", k, got[k], sent[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
