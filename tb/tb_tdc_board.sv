`timescale 1ns/1ps
// End-to-end testbench of tdc_board (16 chips, 128 channels). BX clock 96 ns,
// gauge clock 100 ns, system clock 27 MHz. A link receiver rebuilds the
// 144-byte event blocks from the nibble stream and compares each with the
// expected block: header, 128 calibrated times (2.56 counts/ns, 255 = no hit)
// in chip/channel order, trailer with checksum. Mechanisms exercised and
// counted (each must occur): start-up calibration, re-calibration (period
// shortened to 300 gauge clocks), trigger hit outputs, OR of neighbouring
// outputs, test modes ALL/EVEN/ODD, hit-register mode (FUNC) with and without
// a test pattern, pipeline
// wrap-around, link back-pressure, FIFO overflow with event loss and the fault
// LED, and a drift of the gate delay of every line from 0.48 ns to 0.50 ns
// that the re-calibration must correct (correction factor 1064/1024, applied
// to all 128 channels). Also checks the 288-clock (4 bits per clock) block transfer time.
module tb_tdc_board;
  import tdc_pkg::*;
  localparam int NC = 16;
  localparam int GAIN = (1 << 18) / 208;
  int checks = 0, failures = 0;

  logic sys = 0, bx = 0, ga = 0, reset = 1;
  logic [6:0] bxn = 0, fltn = 0;
  logic acc = 0, start = 0, func = 0, or_en = 0, lack = 1;
  test_mode_e mode = MODE_CH;
  logic [NC-1:0][7:0] gtl = '0, hit_out;
  logic [NC-1:0][63:0] ttl = '0;
  logic lclk, lclk_q = 0;
  logic [3:0] ldata;
  logic led_r, led_o, led_a, led_f, calr;

  tdc_board #(.RECAL_CYCLES (300), .ACCEPT_STRETCH (20)) dut (
    .sys_clk (sys), .bx_clk (bx), .gauge_clk (ga), .reset (reset), .board_addr (8'h42),
    .bx_number (bxn), .flt_accept (acc), .flt_number (fltn), .start (start), .mode (mode),
    .func (func), .or_en (or_en), .gtl_hit (gtl), .ttl_hit (ttl), .hit_out (hit_out),
    .lack (lack), .lclk (lclk), .ldata (ldata), .led_reset (led_r), .led_overflow (led_o),
    .led_accept (led_a), .led_fault (led_f), .cal_ready (calr));

  always #48 bx = ~bx;
  always #50 ga = ~ga;
  always #18.5 sys = ~sys;

  int edge_n = 0;
  always @(posedge bx) begin
    edge_n++;
    #1 bxn = 7'(edge_n);
  end

  // mechanism counters
  int n_cal = 0, n_recal = 0, n_hitout = 0, n_or = 0, n_all = 0, n_even = 0, n_odd = 0;
  int n_func = 0, n_wrap = 0, n_backp = 0, n_ovf = 0, n_lost = 0, n_fault = 0, n_blocks = 0;
  int n_acc_led = 0, n_drift = 0, n_func_test = 0;
  always @(posedge ga) if (dut.g_chip[0].u_chip.recal_done) n_recal++;
  always @(posedge bx) begin
    if (!reset && dut.g_chip[0].u_chip.event_lost) n_lost++;
    if (led_a) n_acc_led++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------- link receiver
  byte unsigned exp_blocks [$][$];
  byte unsigned cur [$];
  logic [7:0] acc_b;
  int nib = 0, cyc = 0, blk_first = 0;
  logic [15:0] ev_no = 0;

  always @(posedge sys) begin
    cyc <= cyc + 1;
    lclk_q <= lclk;
    if (!reset && lclk != lclk_q) begin
      if (cur.size() == 0 && nib % 2 == 0) blk_first = cyc;
      if (nib % 2 == 0) acc_b[7:4] = ldata;
      else begin
        acc_b[3:0] = ldata;
        cur.push_back(acc_b);
        if (cur.size() == 144) begin
          check_block(cyc - blk_first + 1);
          cur.delete();
        end
      end
      nib <= nib + 1;
    end
  end

  task automatic check_block(input int clocks);
    byte unsigned x;
    n_blocks++;
    if (lack_stayed_high) check(clocks == 288, $sformatf("block took %0d clocks, expected 288", clocks));
    check(cur[0] == 8'hB5 && cur[1] == 8'h42 && cur[2] == ev_no[15:8] && cur[3] == ev_no[7:0] && cur[4] == 128,
          $sformatf("header of block %0d", ev_no));
    x = 0;
    if (exp_blocks.size() == 0) check(0, "unexpected block");
    else begin
      for (int k = 0; k < 128; k++) begin
        check(cur[8 + k] == exp_blocks[0][k],
              $sformatf("block %0d chip %0d ch %0d: %0d exp %0d", ev_no, k / 8, k % 8, cur[8 + k], exp_blocks[0][k]));
        x ^= cur[8 + k];
      end
      void'(exp_blocks.pop_front());
    end
    check(cur[136] == x && cur[139] == ev_no[7:0] && cur[143] == 8'hE5, "trailer");
    ev_no++;
  endtask

  bit lack_stayed_high = 1;

  // ------------------------------------------------------------- stimulus
  byte unsigned store [128][$];  // expected 128 bytes per pipeline address

  // Present bin in ps and the correction factor expected after re-calibration.
  int bin_ps = 480, corr_exp = 1024;
  real drift_bin = 0.48;
  logic [CORR_W-1:0] corr_of [NC];
  for (genvar c = 0; c < NC; c++) begin : g_drift_c
    assign corr_of[c] = dut.g_chip[c].u_chip.corr;
    for (genvar g = 0; g < N_CALCH; g++) begin : g_drift_l
      always @(drift_bin) dut.g_chip[c].u_chip.g_dl[g].u_dl.bin_ns = drift_bin;
    end
  end

  // floor(floor(floor(dt / bin) * G / 1024) * corr / 1024), limited to 254.
  // Hit times are never an exact multiple of the bin (see random_crossing), so
  // the model's real-valued division gives the same floor.
  function automatic int expect_time(input int dt_ps);
    int t;
    t = ((dt_ps / bin_ps) * GAIN) / 1024;
    t = (t * corr_exp) / 1024;
    return t > 254 ? 254 : t;
  endfunction

  // One crossing: random hits on every chip; returns the pipeline address.
  task automatic random_crossing(output int addr, input int occupancy_pct);
    int dts [NC][8];
    logic [NC-1:0][7:0] m;
    @(posedge bx); #1;
    addr = (edge_n + 1) % 128;
    store[addr].delete();
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < 8; i++) begin
        m[c][i]   = ($urandom % 100) < occupancy_pct;
        dts[c][i] = m[c][i] ? $urandom_range(13, 180) * bin_ps + $urandom_range(20, bin_ps - 20) : -1;
        store[addr].push_back(m[c][i] ? 8'(expect_time(dts[c][i])) : 8'hFF);
        if (m[c][i]) begin
          automatic int cc = c, ii = i, d = dts[c][i];
          fork begin
            #((95000 - d) * 1ps) gtl[cc][ii] = 1;
            #2ns gtl[cc][ii] = 0;
          end join_none
        end
      end
    @(posedge bx); @(posedge bx); #1;
    check(hit_out == m, "trigger hit outputs of all 128 channels");
    n_hitout++;
  endtask

  task automatic accept(input int addr);
    @(posedge bx); #2;
    acc = 1; fltn = 7'(addr);
    @(posedge bx); #2 acc = 0;
  endtask

  task automatic test_pulse(input test_mode_e md, input int dt_ps, output int addr);
    mode = md;
    @(posedge bx); #1;
    addr = (edge_n + 1) % 128;
    #((95000 - dt_ps) * 1ps) start = 1;
    #2ns start = 0;
    store[addr].delete();
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < 8; i++) begin
        bit on;
        on = (md == MODE_ALL) || (md == MODE_EVEN && i[0]) || (md == MODE_ODD && !i[0]);
        store[addr].push_back(on ? 8'(expect_time(dt_ps)) : 8'hFF);
      end
    @(posedge bx); @(posedge bx); #1;
    for (int c = 0; c < NC; c++)
      check(hit_out[c] == (md == MODE_ALL ? 8'hFF : md == MODE_EVEN ? 8'hAA : 8'h55), "test mode hit outputs");
    mode = MODE_CH;
  endtask

  task automatic queue_expected(input int addr);
    byte unsigned b [$];
    b = store[addr];
    exp_blocks.push_back(b);
  endtask

  task automatic wait_blocks(input int n);
    for (int w = 0; w < 200000 && n_blocks < n; w++) @(posedge sys);
    check(n_blocks == n, $sformatf("blocks received %0d exp %0d", n_blocks, n));
  endtask

  initial begin
    #50ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int a, a0, t_first;
    repeat (3) @(posedge bx);
    #3 reset = 0;
    wait (calr);
    n_cal++;

    // normal events
    for (int n = 0; n < 6; n++) begin
      random_crossing(a, 20);
      repeat ($urandom_range(2, 40)) @(posedge bx);
      queue_expected(a);
      accept(a);
      wait_blocks(n + 1);
    end
    check(n_acc_led > 0, "accept LED lit");

    // OR of neighbouring trigger outputs
    or_en = 1;
    @(posedge bx); #1;
    fork begin
      #((95000 - 30000) * 1ps) gtl[3][0] = 1; gtl[9][6] = 1;
      #2ns gtl[3][0] = 0; gtl[9][6] = 0;
    end join_none
    @(posedge bx); @(posedge bx); #1;
    check(hit_out[3] == 8'b0000_0011 && hit_out[9] == 8'b1100_0000, "OR of neighbouring channels");
    n_or++;
    or_en = 0;

    // test modes
    test_pulse(MODE_ALL, 50000, a);  queue_expected(a); accept(a); n_all++;
    test_pulse(MODE_EVEN, 20000, a); queue_expected(a); accept(a); n_even++;
    test_pulse(MODE_ODD, 70000, a);  queue_expected(a); accept(a); n_odd++;
    wait_blocks(9);

    // hit-register mode
    func = 1;
    @(posedge bx); #2;
    for (int c = 0; c < NC; c++) ttl[c] = {$urandom, $urandom};
    @(posedge bx); #1;
    a = edge_n % 128;
    store[a].delete();
    for (int c = 0; c < NC; c++) for (int i = 0; i < 8; i++) store[a].push_back(ttl[c][8*i +: 8]);
    #2 ttl = '0;
    repeat (3) @(posedge bx);
    queue_expected(a); accept(a);
    wait_blocks(10);
    n_func++;

    // hit-register mode with test pattern EVEN: START held across a BX edge
    @(posedge bx); #2;
    mode = MODE_EVEN; start = 1;
    @(posedge bx); #1;
    a = edge_n % 128;
    #2 start = 0; mode = MODE_CH;
    store[a].delete();
    for (int k = 0; k < 128; k++) store[a].push_back(8'hAA);
    repeat (3) @(posedge bx);
    queue_expected(a); accept(a);
    wait_blocks(11);
    func = 0; n_func_test++;

    // pipeline wrap-around: a crossing accepted 100 BX later (after > 128
    // writes since the run began the ring has wrapped many times)
    random_crossing(a0, 30);
    repeat (100) @(posedge bx);
    queue_expected(a0); accept(a0);
    wait_blocks(12);
    if (edge_n > 256) n_wrap++;

    // back-pressure and overflow: receiver not ready, 19 triggers
    lack = 0;
    lack_stayed_high = 0;
    for (int n = 0; n < 19; n++) begin
      random_crossing(a, 10);
      if (n < 16) queue_expected(a);
      accept(a);
    end
    repeat (5) @(posedge bx);
    check(led_o, "overflow LED");
    if (led_o) n_ovf++;
    check(led_f, "fault LED after lost events");
    if (led_f) n_fault++;
    check(n_blocks == 12, "no block while acknowledge low");
    n_backp++;
    repeat (300) @(posedge sys);
    #1 lack = 1;
    t_first = cyc;
    wait_blocks(28);
    // 16 queued blocks back to back: 288 clocks each plus a start-up latency
    $display("16 back-to-back blocks took %0d system clocks", cyc - t_first);
    check((cyc - t_first) <= 16 * 288 + 30, $sformatf("16 blocks in %0d clocks", cyc - t_first));
    check(!led_o, "overflow cleared");
    check(n_lost == 3, $sformatf("3 events lost, saw %0d", n_lost));

    // re-calibration must have happened meanwhile
    wait (n_recal > 0);

    // drift of the gate delay on every chip, corrected by re-calibration
    drift_bin = 0.50;
    a0 = n_recal;
    wait (n_recal >= a0 + 2);
    for (int c = 0; c < NC; c++)
      check(corr_of[c] == 12'd1064, $sformatf("chip %0d correction factor after drift", c));
    bin_ps = 500; corr_exp = 1064;
    for (int n = 0; n < 3; n++) begin
      random_crossing(a, 50);
      repeat (3) @(posedge bx);
      queue_expected(a);
      accept(a);
      wait_blocks(29 + n);
    end
    n_drift++;

    $display("mechanisms: cal=%0d recal=%0d drift=%0d hitout=%0d or=%0d all=%0d even=%0d odd=%0d func=%0d functest=%0d wrap=%0d backpressure=%0d overflow=%0d lost=%0d fault=%0d blocks=%0d",
             n_cal, n_recal, n_drift, n_hitout, n_or, n_all, n_even, n_odd, n_func, n_func_test, n_wrap, n_backp, n_ovf, n_lost, n_fault, n_blocks);
    check(n_cal > 0, "calibration happened");
    check(n_recal > 0, "re-calibration happened");
    check(n_drift > 0, "drift corrected");
    check(n_hitout > 0 && n_or > 0, "hit outputs and OR");
    check(n_all > 0 && n_even > 0 && n_odd > 0, "test modes");
    check(n_func > 0, "hit-register mode");
    check(n_func_test > 0, "test pattern in hit-register mode");
    check(n_wrap > 0, "pipeline wrap-around");
    check(n_backp > 0 && n_ovf > 0 && n_lost > 0 && n_fault > 0, "back-pressure, overflow, loss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
