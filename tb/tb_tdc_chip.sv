`timescale 1ns/1ps
// Testbench of tdc_chip. BX clock 96 ns, gauge clock 100 ns, readout clock 37 ns.
// After reset it waits for the start-up calibration, then:
//  - sends crossings with random hits at random times before the BX edge and
//    checks the trigger hit outputs one BX later;
//  - accepts them at random trigger latencies and reads them through chip and
//    channel select; each time must be floor(floor(dt/0.48 ns) * G / 1024) with
//    G = floor(2^18 / 208), i.e. 2.56 counts per ns, and 255 for no hit;
//  - checks the OR of neighbouring hit outputs, the EVEN test mode driven by
//    START, the FUNC hit-register mode (also with a test pattern), FIFO overflow with event loss, the
//    3-BX accept-to-derandomizer latency and that re-calibration happens;
//  - then lets the gate delay of all nine lines drift from 0.48 ns to 0.50 ns
//    (as with a temperature change): after the next re-calibration the
//    correction factor must be floor(1024 * 208 / 200) = 1064 and read-out times
//    floor(floor(floor(dt/0.50 ns) * G / 1024) * 1064 / 1024).
// Hit times are never an exact multiple of the bin, so the floor of the model's
// real-valued division cannot fall on the other side of a bin boundary.
module tb_tdc_chip;
  import tdc_pkg::*;
  localparam int GAIN = (1 << 18) / 208;   // 100 ns = 208 bins of 0.48 ns
  int checks = 0, failures = 0;

  logic bx = 0, ga = 0, rc = 0, reset = 1;
  logic [7:0] gtl = 0, hit_out;
  logic [63:0] ttl = 0;
  logic start = 0, func = 0, or_en = 0, acc = 0, pre = 0, rd = 0;
  test_mode_e mode = MODE_CH;
  logic [6:0] bxn = 0, fltn = 0;
  logic [3:0] caddr = 0;
  logic [2:0] haddr = 0;
  time_t data;
  logic oe, cempty, ovf, lost, calr;
  int edge_n = 0, recals = 0, losts = 0;
  int exp_t [128][8];
  logic [7:0] exp_hits [int];

  tdc_chip #(.RECAL_CYCLES (300)) dut (
    .bx_clk (bx), .gauge_clk (ga), .rd_clk (rc), .reset (reset),
    .gtl_hit (gtl), .ttl_hit (ttl), .start (start), .mode (mode), .func (func), .or_en (or_en),
    .hit_out (hit_out), .bx_number (bxn), .flt_accept (acc), .flt_number (fltn),
    .chip_id (4'd5), .chip_preselect (pre), .chip_addr (caddr), .chan_addr (haddr), .rd (rd),
    .data (data), .data_oe (oe), .chan_empty (cempty), .fifo_overflow (ovf), .event_lost (lost),
    .cal_ready (calr));

  always #48 bx = ~bx;
  always #50 ga = ~ga;
  always #18.5 rc = ~rc;

  always @(posedge bx) begin
    edge_n++;
    #1 bxn = 7'(edge_n);
  end
  always @(posedge bx) if (lost) losts++;
  always @(posedge ga) if (dut.recal_done) recals++;

  // Bin width of every delay line; changed once to model a drift.
  real drift_bin = 0.48;
  for (genvar g = 0; g < N_CALCH; g++) begin : g_drift
    always @(drift_bin) dut.g_dl[g].u_dl.bin_ns = drift_bin;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int expect_time(input int dt_ps);
    int raw;
    raw = dt_ps / 480;
    if (raw > 254) raw = 254;
    return ((raw * GAIN) / 1024 > 254) ? 254 : (raw * GAIN) / 1024;
  endfunction

  function automatic int expect_drift(input int dt_ps);
    int t;
    t = ((dt_ps / 500) * GAIN) / 1024;
    t = (t * 1064) / 1024;
    return t > 254 ? 254 : t;
  endfunction

  // Hits dts[i] ps before the next-but-current BX edge; returns that edge's number.
  task automatic crossing(input int dts [8], output int e);
    @(posedge bx); #1;
    e = edge_n + 1;
    for (int i = 0; i < 8; i++) begin
      automatic int ii = i;
      automatic int d  = dts[i];
      if (d >= 0)
        fork begin
          #((95000 - d) * 1ps) gtl[ii] = 1;
          #2ns gtl[ii] = 0;
        end join_none
    end
  endtask

  task automatic accept(input int addr);
    @(posedge bx); #2;
    acc = 1; fltn = 7'(addr);
    @(posedge bx); #2 acc = 0;
  endtask

  task automatic read_event(input int exp_v [8], input string what);
    for (int w = 0; w < 40 && cempty; w++) @(posedge rc);
    for (int ch = 0; ch < 8; ch++) begin
      @(posedge rc); #1;
      pre = 1; caddr = 4'd5; haddr = 3'(ch);
      #1;
      check(!cempty, $sformatf("%s: channel %0d has data", what, ch));
      check(oe, "output enabled when selected");
      check(int'(data) == exp_v[ch], $sformatf("%s: ch %0d time %0d exp %0d", what, ch, data, exp_v[ch]));
      rd = 1;
      @(posedge rc); #1 rd = 0; pre = 0;
    end
  endtask

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int dts [8];
    int ev [8];
    int e, t0;
    logic [7:0] m;
    repeat (3) @(posedge bx);
    #3 reset = 0;
    wait (calr);
    check(dut.gain[0] == 14'(GAIN) && dut.offset[3] == 0, "calibration constants");

    // ---- normal crossings, hit outputs and readout
    for (int n = 0; n < 12; n++) begin
      m = 8'($urandom);
      for (int i = 0; i < 8; i++) dts[i] = m[i] ? $urandom_range(13, 186) * 480 + $urandom_range(20, 460) : -1;
      crossing(dts, e);
      for (int i = 0; i < 8; i++) exp_t[e % 128][i] = m[i] ? expect_time(dts[i]) : 255;
      @(posedge bx); #1;          // edge e: crossing latched
      @(posedge bx); #1;          // edge e+1: hit outputs
      check(hit_out == m, $sformatf("hit outputs %b exp %b", hit_out, m));
      repeat ($urandom_range(0, 30)) @(posedge bx);
      accept(e % 128);
      t0 = edge_n;
      while (cempty) @(posedge rc);
      check(edge_n - t0 <= 4, $sformatf("accept to derandomizer took %0d BX", edge_n - t0));
      for (int i = 0; i < 8; i++) ev[i] = exp_t[e % 128][i];
      read_event(ev, "normal");
    end

    // ---- OR of neighbouring channels on the hit outputs
    or_en = 1;
    dts = '{20000, -1, 30000, -1, -1, 40000, -1, -1};
    crossing(dts, e);
    @(posedge bx); @(posedge bx); #1;
    check(hit_out == 8'b0010_1111, $sformatf("OR hit outputs %b", hit_out));
    or_en = 0;

    // ---- test mode EVEN: START 40 ns before the edge fires channels 2,4,6,8
    mode = MODE_EVEN;
    @(posedge bx); #1;
    e = edge_n + 1;
    #((95000 - 40000) * 1ps) start = 1;
    #2ns start = 0;
    @(posedge bx); @(posedge bx); #1;
    check(hit_out == 8'b1010_1010, $sformatf("EVEN mode hit outputs %b", hit_out));
    mode = MODE_CH;
    accept(e % 128);
    for (int i = 0; i < 8; i++) ev[i] = i[0] ? expect_time(40000) : 255;
    repeat (8) @(posedge rc);
    read_event(ev, "even mode");

    // ---- FUNC: 64-channel hit register
    func = 1;
    @(posedge bx); #2;
    ttl = {$urandom, $urandom};
    gtl = 8'hFF;                           // GTL inputs must be ignored
    @(posedge bx); #1;
    e = edge_n;                             // latched at this edge, stored under e
    #2 gtl = 0;
    for (int i = 0; i < 8; i++) ev[i] = int'(ttl[8*i +: 8]);
    @(posedge bx); @(posedge bx);
    accept(e % 128);
    repeat (8) @(posedge rc);
    read_event(ev, "hit register");
    ttl = 0;

    // ---- FUNC with test mode ODD: START held across a BX edge sets TTL inputs
    //      1,3,5,7 of every group, i.e. 0x55 in every byte
    @(posedge bx); #2;
    mode = MODE_ODD; start = 1;
    @(posedge bx); #1;
    e = edge_n;
    #2 start = 0; mode = MODE_CH;
    @(posedge bx); @(posedge bx);
    accept(e % 128);
    for (int i = 0; i < 8; i++) ev[i] = 8'h55;
    repeat (8) @(posedge rc);
    read_event(ev, "hit register test mode");
    func = 0;

    // ---- overflow: 18 accepts without readout
    for (int n = 0; n < 18; n++) accept((edge_n + 64) % 128);
    repeat (4) @(posedge bx);
    check(ovf, "FIFO overflow flag");
    check(losts == 2, $sformatf("two events lost, saw %0d", losts));
    for (int n = 0; n < 16; n++)
      for (int ch = 0; ch < 8; ch++) begin
        @(posedge rc); #1 pre = 1; caddr = 5; haddr = 3'(ch); rd = 1;
        @(posedge rc); #1 rd = 0; pre = 0;
      end
    repeat (6) @(posedge rc); #1;
    check(cempty, "derandomizer drained");
    repeat (4) @(posedge bx);
    check(!ovf, "overflow cleared");

    // ---- re-calibration
    wait (recals >= 1);
    check(dut.corr == 12'd1024, "correction factor 1.0 with a stable bin");

    // ---- drift of the gate delay, corrected by re-calibration
    drift_bin = 0.50;
    t0 = recals;
    wait (recals >= t0 + 2);
    check(dut.corr == 12'd1064, $sformatf("correction factor %0d after drift, exp 1064", dut.corr));
    for (int n = 0; n < 6; n++) begin
      for (int i = 0; i < 8; i++) dts[i] = $urandom_range(13, 180) * 500 + $urandom_range(20, 480);
      crossing(dts, e);
      for (int i = 0; i < 8; i++) ev[i] = expect_drift(dts[i]);
      repeat (3) @(posedge bx);
      accept(e % 128);
      read_event(ev, "after drift");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
