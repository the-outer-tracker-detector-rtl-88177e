`timescale 1ns/1ps
// Trigger-rate workload of tdc_board, every parameter at its default.
// After reset and the start-up calibration, crossings with random hits (20 %
// occupancy) are accepted 10 BX after they happen, and every 144-byte block is
// rebuilt from the link and compared with the expected calibrated times.
//  Phase A: random (exponentially distributed) trigger intervals with a mean of
//           20 us, i.e. the 50 kHz design trigger rate, system clock 27 MHz.
//           No event may be lost and the overflow flag must stay low.
//  Phase B: periodic triggers every 104 BX (9.98 us, 100.2 kHz) with the
//           system clock at its 30 MHz maximum: a block takes 288 clocks =
//           9.6 us, so again nothing may be lost.
//  Phase C: the same 100.2 kHz with the 27 MHz clock: a block takes 10.67 us,
//           so the derandomizers fill up; overflow and event loss must occur,
//           and every trigger must end as either a block or a lost event.
//           Block contents are not compared in this phase.
// Hit times are never an exact multiple of the 480 ps bin, so the delay-line
// model's real-valued division and the integer expectation agree.
module tb_tdc_board_rate;
  import tdc_pkg::*;
  localparam int NC = 16;
  localparam int GAIN = (1 << 18) / 208;
  localparam int LAT = 10;                   // trigger latency, BX
  int checks = 0, failures = 0;

  logic sys = 0, bx = 0, ga = 0, reset = 1;
  logic [6:0] bxn = 0, fltn = 0;
  logic acc = 0, lack = 1;
  logic [NC-1:0][7:0] gtl = '0, hit_out;
  logic [NC-1:0][63:0] ttl = '0;
  logic lclk, lclk_q = 0;
  logic [3:0] ldata;
  logic led_r, led_o, led_a, led_f, calr;
  realtime sys_half = 18.519;                // 27 MHz

  tdc_board dut (
    .sys_clk (sys), .bx_clk (bx), .gauge_clk (ga), .reset (reset), .board_addr (8'h17),
    .bx_number (bxn), .flt_accept (acc), .flt_number (fltn), .start (1'b0), .mode (MODE_CH),
    .func (1'b0), .or_en (1'b0), .gtl_hit (gtl), .ttl_hit (ttl), .hit_out (hit_out),
    .lack (lack), .lclk (lclk), .ldata (ldata), .led_reset (led_r), .led_overflow (led_o),
    .led_accept (led_a), .led_fault (led_f), .cal_ready (calr));

  always #48 bx = ~bx;
  always #50 ga = ~ga;
  always #(sys_half) sys = ~sys;

  int edge_n = 0, n_lost = 0, n_ovf_bx = 0;
  always @(posedge bx) begin
    edge_n++;
    #1 bxn = 7'(edge_n);
  end
  always @(posedge bx) if (!reset) begin
    if (dut.g_chip[0].u_chip.event_lost) n_lost++;
    if (led_o) n_ovf_bx++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ------------------------------------------------------------ link receiver
  byte unsigned exp_blocks [$][$];
  byte unsigned cur [$];
  logic [7:0] acc_b;
  int nib = 0, n_blocks = 0;
  bit compare = 1;

  always @(posedge sys) begin
    lclk_q <= lclk;
    if (!reset && lclk != lclk_q) begin
      if (nib % 2 == 0) acc_b[7:4] = ldata;
      else begin
        acc_b[3:0] = ldata;
        cur.push_back(acc_b);
        if (cur.size() == 144) begin
          check_block();
          cur.delete();
        end
      end
      nib <= nib + 1;
    end
  end

  task automatic check_block();
    byte unsigned x;
    n_blocks++;
    if (!compare) return;
    check(cur[0] == 8'hB5 && cur[1] == 8'h17 && cur[143] == 8'hE5, "block frame");
    if (exp_blocks.size() == 0) begin check(0, "unexpected block"); return; end
    x = 0;
    for (int k = 0; k < 128; k++) begin
      check(cur[8 + k] == exp_blocks[0][k],
            $sformatf("block %0d chip %0d ch %0d: %0d exp %0d", n_blocks, k / 8, k % 8, cur[8 + k], exp_blocks[0][k]));
      x ^= cur[8 + k];
    end
    check(cur[136] == x, "checksum");
    void'(exp_blocks.pop_front());
  endtask

  // ---------------------------------------------------------------- stimulus
  function automatic int expect_time(input int dt_ps);
    int t;
    t = ((dt_ps / 480) * GAIN) / 1024;
    return t > 254 ? 254 : t;
  endfunction

  // A crossing with random hits, accepted LAT crossings later.
  task automatic event_at_next_edge();
    int addr;
    byte unsigned b [$];
    @(posedge bx); #1;
    addr = (edge_n + 1) % 128;
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < 8; i++)
        if ($urandom_range(0, 99) < 20) begin
          automatic int cc = c, ii = i;
          automatic int d = $urandom_range(13, 186) * 480 + $urandom_range(20, 460);
          b.push_back(8'(expect_time(d)));
          fork begin
            #((95000 - d) * 1ps) gtl[cc][ii] = 1;
            #2ns gtl[cc][ii] = 0;
          end join_none
        end else b.push_back(8'hFF);
    exp_blocks.push_back(b);
    repeat (LAT) @(posedge bx);
    #2 acc = 1; fltn = 7'(addr);
    @(posedge bx); #2 acc = 0;
  endtask

  task automatic drain(input int blocks);
    for (int w = 0; w < 2000000 && n_blocks < blocks; w++) @(posedge sys);
    check(n_blocks == blocks, $sformatf("blocks received %0d exp %0d", n_blocks, blocks));
  endtask

  initial begin
    #60ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int gap, t0, issued, b0, l0;
    repeat (3) @(posedge bx);
    #3 reset = 0;
    wait (calr);

    // Phase A: 50 kHz mean, random intervals, 27 MHz
    t0 = edge_n;
    for (int n = 0; n < 150; n++) begin
      gap = int'(-($ln(real'($urandom_range(1, 1000000)) / 1.0e6)) * 208.3) - (LAT + 2);
      if (gap > 0) repeat (gap) @(posedge bx);
      event_at_next_edge();
    end
    drain(150);
    $display("phase A: 150 events in %0.1f us (%0.1f kHz), lost %0d, overflow BX %0d",
             (edge_n - t0) * 0.096, 150.0 / ((edge_n - t0) * 0.096e-3), n_lost, n_ovf_bx);
    check(n_lost == 0 && n_ovf_bx == 0, "50 kHz: no loss, no overflow");

    // Phase B: 100.2 kHz periodic, 30 MHz system clock
    sys_half = 16.667;
    repeat (20) @(posedge bx);
    t0 = edge_n;
    for (int n = 0; n < 200; n++) begin
      while (edge_n < t0 + n * 104) @(posedge bx);
      event_at_next_edge();
    end
    drain(350);
    $display("phase B: 200 events at 100.2 kHz with a 30 MHz clock, lost %0d, overflow BX %0d", n_lost, n_ovf_bx);
    check(n_lost == 0 && n_ovf_bx == 0, "100 kHz at 30 MHz: no loss, no overflow");
    check(exp_blocks.size() == 0, "all expected blocks received");

    // Phase C: 100.2 kHz periodic, 27 MHz system clock: must overflow
    sys_half = 18.519;
    compare = 0;
    repeat (20) @(posedge bx);
    b0 = n_blocks; l0 = n_lost;
    t0 = edge_n;
    issued = 0;
    while (n_lost == l0 && issued < 400) begin
      while (edge_n < t0 + issued * 104) @(posedge bx);
      event_at_next_edge();
      issued++;
    end
    repeat (20) @(posedge bx);
    for (int w = 0; w < 200000 && (n_blocks - b0) + (n_lost - l0) < issued; w++) @(posedge sys);
    $display("phase C: %0d events at 100.2 kHz with a 27 MHz clock: %0d blocks, %0d lost",
             issued, n_blocks - b0, n_lost - l0);
    check(n_lost > l0 && n_ovf_bx > 0, "100 kHz at 27 MHz: overflow and loss occur");
    check(led_f, "fault LED after loss");
    check((n_blocks - b0) + (n_lost - l0) == issued, "every trigger gives a block or a lost event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
