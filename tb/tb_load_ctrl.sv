// tb_load_ctrl -- self-checking test of the run sequencer.
//
// The controller is connected to the calculator, the byte timing and the
// frame builder, as in the generator. For each of the three features the
// test counts the frames seen on the line, the length of every frame, the
// idle cycles between frames and between bursts, and compares them and the
// controller's own counters with values worked out here from the
// equations: a frame every S/L byte times, the run lasting F * S / L byte
// times per burst plus the sleeps, and no run longer than the requested
// duration. It also checks a refused run (load 0 %) and an abort.
module tb_load_ctrl;
  import profiload_pkg::*;

  localparam int CLK_MHZ = 125;

  logic clk, rst_n = 0;
  cfg_t cfg = '0;
  logic start = 0, abort = 0;
  logic calc_start, calc_busy, calc_done, calc_err;
  logic [SIZE_W-1:0] calc_s;
  logic [GAP_W-1:0]  calc_i;
  logic [CNT_W-1:0]  calc_f;
  cfg_t run_cfg;
  logic byte_tick, tick_sync, frame_req, accept, builder_idle;
  logic busy, done, err, sleeping;
  logic [CNT_W-1:0]  frames_sent, bursts_sent;
  logic [ELAP_W-1:0] elapsed;
  tx_byte_t tx;
  int checks = 0, failures = 0;

  load_ctrl dut (
    .clk, .rst_n, .cfg, .start, .abort,
    .calc_start, .calc_done, .calc_err, .calc_frames(calc_f),
    .run_cfg, .byte_tick, .tick_sync, .frame_req, .accept, .builder_idle,
    .busy, .done, .err, .sleeping, .frames_sent, .bursts_sent, .elapsed
  );
  load_calc u_calc (.clk, .rst_n, .start(calc_start), .cfg(run_cfg), .busy(calc_busy),
                    .done(calc_done), .err(calc_err), .frame_size(calc_s), .gap(calc_i),
                    .frames(calc_f));
  rate_tick #(.CLK_MHZ(CLK_MHZ)) u_tick (.clk, .rst_n, .rate(run_cfg.rate), .sync(tick_sync),
                                         .byte_tick);
  frame_builder u_build (.clk, .rst_n, .cfg(run_cfg), .gap(calc_i), .byte_tick, .frame_req,
                         .accept, .idle(builder_idle), .tx);

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  // Line monitor: frame starts, frame lengths in cycles, idle stretches.
  int n_frames, bad_len, first_start, last_end, cyc;
  int idle_run, n_long_idle, long_idle_len, short_idle_bad;
  int exp_frame_cyc, exp_gap_cyc, long_idle_min;
  logic prev_en;
  int cur_len;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    prev_en <= tx.en;
    if (tx.en) begin
      cur_len <= cur_len + 1;
      if (!prev_en) begin
        n_frames <= n_frames + 1;
        if (first_start < 0) first_start <= cyc;
        if (n_frames > 0) begin
          if (idle_run >= long_idle_min) begin
            n_long_idle <= n_long_idle + 1;
            long_idle_len <= idle_run;
          end else if (idle_run != exp_gap_cyc) short_idle_bad <= short_idle_bad + 1;
        end
      end
      idle_run <= 0;
    end else begin
      idle_run <= idle_run + 1;
      if (prev_en) begin
        if (cur_len != exp_frame_cyc) bad_len <= bad_len + 1;
        last_end <= cyc;
        cur_len <= 0;
      end
    end
  end

  task automatic clear_monitor(input int frame_cyc, input int gap_cyc, input int long_min);
    @(negedge clk);
    n_frames = 0; bad_len = 0; first_start = -1; last_end = -1; idle_run = 0;
    n_long_idle = 0; long_idle_len = 0; short_idle_bad = 0; cur_len = 0;
    exp_frame_cyc = frame_cyc; exp_gap_cyc = gap_cyc; long_idle_min = long_min;
  endtask

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic go(input cfg_t c);
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    repeat (40) @(negedge clk);
  endtask

  // Run one configuration and check everything against the equations.
  task automatic run_case(input string name, input cfg_t c, input longint exp_f,
                          input longint exp_bursts);
    longint s, wire_b, i, tpb, per_burst, sleep_cyc, total;
    s = longint'(c.pkt_size) + 24 + (c.vlan_en ? 4 : 0);
    wire_b = s - 12;
    i = 12 + (s * (100 - longint'(c.load_pct))) / longint'(c.load_pct);
    tpb = (c.rate == RATE_1G) ? 1 : 10;
    per_burst = exp_f * (wire_b + i) * tpb;
    sleep_cyc = longint'(c.sleep_us) * CLK_MHZ;
    total = exp_bursts * per_burst + (exp_bursts - 1) * sleep_cyc;
    clear_monitor(int'(wire_b * tpb), int'(i * tpb), int'(i * tpb + 1));
    go(c);
    check({name, " err"}, err, 0);
    check({name, " F from calculator"}, calc_f, exp_f);
    check({name, " frames on line"}, n_frames, exp_f * exp_bursts);
    check({name, " frames_sent"}, frames_sent, exp_f * exp_bursts);
    check({name, " bursts_sent"}, bursts_sent, exp_bursts);
    check({name, " frame lengths"}, bad_len, 0);
    check({name, " gaps inside bursts"}, short_idle_bad, 0);
    check({name, " elapsed cycles"}, elapsed, total);
    check({name, " line span"}, last_end - first_start, total - i * tpb);
    if (exp_bursts > 1) begin
      check({name, " sleeps seen"}, n_long_idle, exp_bursts - 1);
      check({name, " idle between bursts"}, long_idle_len, i * tpb + sleep_cyc);
    end
    if (c.mode == MODE_TIME)
      check({name, " within T"}, longint'(elapsed <= c.time_us * CLK_MHZ), 1);
    if (c.mode == MODE_BURST)
      check({name, " burst within interval"}, longint'(per_burst <= c.burst_us * CLK_MHZ), 1);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    cfg_t c;
    cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c = '0;
    c.dst_mac = 48'h122A_3B4D_1121; c.src_mac = 48'h122A_3B4D_EEDA;
    c.ethertype = PROFINET_ETHERTYPE;
    // frame feature: 5 short frames at 25 % on Fast Ethernet
    c.mode = MODE_FRAME; c.rate = RATE_100M; c.pkt_size = PKT_W'(60); c.load_pct = 7'd25;
    c.num_frames = 32'd5;
    run_case("frame", c, 5, 1);
    // time feature: 50 % for 200 us, F = 100*50*200/(800*84) = 14
    c.mode = MODE_TIME; c.load_pct = 7'd50; c.time_us = TIME_W'(200);
    run_case("time", c, 14, 1);
    // burst feature: 3 bursts of 100 us, 20 us sleep, tagged P=128 at 50 %, 1 Gbps
    // F = 1000*50*100/(800*156) = 40
    c.mode = MODE_BURST; c.rate = RATE_1G; c.pkt_size = PKT_W'(128); c.vlan_en = 1'b1;
    c.vlan_pri = 3'd7; c.num_bursts = 32'd3; c.burst_us = TIME_W'(100); c.sleep_us = TIME_W'(20);
    run_case("burst", c, 40, 3);
    // refused run
    c.load_pct = 7'd0;
    clear_monitor(0, 0, 1);
    go(c);
    check("L=0 err", err, 1);
    check("L=0 no frames", n_frames, 0);
    // abort in the middle of a long frame-feature run
    c.mode = MODE_FRAME; c.rate = RATE_1G; c.load_pct = 7'd10; c.vlan_en = 1'b0;
    c.pkt_size = PKT_W'(100); c.num_frames = 32'd1000;
    clear_monitor(112, 12 + 124 * 9, 1 + 12 + 124 * 9);
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    repeat (3000) @(negedge clk);
    abort = 1;
    @(negedge clk);
    abort = 0;
    repeat (3000) @(negedge clk);
    check("abort ends run", done, 1);
    check("abort stops early", longint'(frames_sent < 10), 1);
    check("abort frames on line", n_frames, frames_sent);
    check("abort frames complete", bad_len, 0);
    check("abort line quiet", tx.en, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
