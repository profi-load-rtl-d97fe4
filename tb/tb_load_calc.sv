// tb_load_calc -- self-checking test of the load calculator.
//
// Checks the worked examples of the design's evaluation (40 frames of
// P = 1514 at 25 %: S = 1538, I = 4626; 750 frames of P = 60 at 25 %:
// S = 84, I = 264; 25 % for 20 ms at 100 Mbps: F = 744; VLAN-tagged
// P = 1020 at 50 % for a 1 s burst: S = 1048, F = 5963), random parameter
// sets against the equations evaluated here in 64-bit arithmetic, the
// rejection of out-of-range load and packet size, and the latency bound
// of 2 * 64 + 4 clocks.
module tb_load_calc;
  import profiload_pkg::*;

  logic clk, rst_n = 0, start = 0;
  cfg_t cfg = '0;
  logic busy, done, err;
  logic [SIZE_W-1:0] frame_size;
  logic [GAP_W-1:0]  gap;
  logic [CNT_W-1:0]  frames;
  int checks = 0, failures = 0;
  int maxlat = 0;

  load_calc dut (.*);

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic calc(input cfg_t c, output int lat);
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
  endtask

  function automatic cfg_t mk(input mode_e m, input rate_e r, input int p, input int l,
                              input bit vlan, input int nf, input longint t);
    cfg_t c = '0;
    c.mode = m; c.rate = r; c.pkt_size = PKT_W'(p); c.load_pct = 7'(l);
    c.vlan_en = vlan; c.num_frames = CNT_W'(nf); c.time_us = TIME_W'(t);
    c.burst_us = TIME_W'(t); c.num_bursts = 32'd20;
    return c;
  endfunction

  task automatic expect_ok(input string name, input cfg_t c, input longint s,
                           input longint i, input longint f);
    int lat;
    calc(c, lat);
    check({name, " err"}, longint'(err), 0);
    check({name, " S"}, longint'(frame_size), s);
    check({name, " I"}, longint'(gap), i);
    check({name, " F"}, longint'(frames), f);
    check({name, " latency bound"}, longint'(lat <= 2 * 64 + 6), 1);
    if (lat > maxlat) maxlat = lat;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int lat;
    cfg_t c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    expect_ok("case1 long", mk(MODE_FRAME, RATE_100M, 1514, 25, 0, 40, 0), 1538, 4626, 40);
    expect_ok("case1 short", mk(MODE_FRAME, RATE_100M, 60, 25, 0, 750, 0), 84, 264, 750);
    expect_ok("case2 20ms", mk(MODE_TIME, RATE_100M, 60, 25, 0, 0, 20000), 84, 264, 744);
    expect_ok("case3 burst", mk(MODE_BURST, RATE_100M, 1020, 50, 1, 0, 1000000), 1048, 1060, 5963);
    expect_ok("full load", mk(MODE_TIME, RATE_1G, 60, 100, 0, 0, 1000), 84, 12, 1488);
    for (int t = 0; t < 200; t++) begin
      longint s, i, f, p, l, tt, r;
      bit v;
      p  = 60 + $urandom % (1514 - 60 + 1);
      l  = 1 + $urandom % 100;
      v  = 1'($urandom);
      tt = longint'($urandom) * (1 + $urandom % 300);
      c  = mk(mode_e'($urandom % 3), rate_e'($urandom % 2), int'(p), int'(l), v,
              int'($urandom), tt);
      r  = (c.rate == RATE_1G) ? 1000 : 100;
      s  = p + 24 + (v ? 4 : 0);
      i  = 12 + (s * (100 - l)) / l;
      if (c.mode == MODE_FRAME) f = longint'(c.num_frames);
      else begin
        f = (r * l * tt) / (800 * s);
        if (f > 64'hFFFF_FFFF) f = 64'hFFFF_FFFF;
      end
      expect_ok($sformatf("random %0d", t), c, s, i, f);
    end
    // rejected parameters
    calc(mk(MODE_FRAME, RATE_100M, 60, 0, 0, 1, 0), lat);    check("L=0 err", err, 1);
    calc(mk(MODE_FRAME, RATE_100M, 60, 101, 0, 1, 0), lat);  check("L=101 err", err, 1);
    calc(mk(MODE_FRAME, RATE_100M, 59, 50, 0, 1, 0), lat);   check("P=59 err", err, 1);
    calc(mk(MODE_FRAME, RATE_100M, 1515, 50, 0, 1, 0), lat); check("P=1515 err", err, 1);
    calc(mk(MODE_FRAME, RATE_100M, 1514, 100, 0, 1, 0), lat); check("P=1514 L=100 ok", err, 0);
    $display("longest calculation: %0d clocks", maxlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
