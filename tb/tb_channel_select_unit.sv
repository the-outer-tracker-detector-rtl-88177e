`timescale 1ns/1ps
// Testbench of channel_select_unit: random FIFO heads and empty flags; checks
// the bus value, output enable, the single pop line and the empty report.
module tb_channel_select_unit;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic sel, rd, oe, ce;
  logic [2:0] ch;
  time_t fd [N_CH];
  logic [7:0] fe, pop;
  time_t data;

  channel_select_unit dut (.selected (sel), .chan_addr (ch), .rd (rd), .fifo_dout (fd),
    .fifo_empty (fe), .fifo_pop (pop), .data (data), .data_oe (oe), .chan_empty (ce));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic [7:0] ep;
      sel = ($urandom % 4) != 0;
      rd  = $urandom % 2;
      ch  = 3'($urandom);
      fe  = 8'($urandom);
      for (int i = 0; i < N_CH; i++) fd[i] = 8'($urandom);
      #1;
      ep = '0;
      ep[ch] = sel && rd && !fe[ch];
      check(oe == sel, "output enable follows selection");
      check(data == (sel ? fd[ch] : 8'h00), "bus shows addressed channel");
      check(pop == ep, $sformatf("pop %b exp %b", pop, ep));
      check(ce == fe[ch], "empty of addressed channel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
