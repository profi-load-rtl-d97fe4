// tb_profiload_top -- end-to-end test of the load generator.
//
// Drives the generator only through its register bus, as the processor
// would, and receives all four load ports with frame-checking receiver
// models. Runs, at small sizes: the frame feature at 100 Mbps, the time
// feature at 1 Gbps, the burst feature with VLAN tags and sleep intervals,
// a refused configuration, an abort, and a rewrite of the registers while
// a run is going on, on every one of the four ports. Each run is checked
// for: the frame count, every frame's content and CRC, the spacing of
// frame starts (S / L byte times), the sleep between bursts, the values the
// generator reports back (S, I, F, frames, bursts, elapsed cycles) and
// silence on the ports not selected. Every mechanism must have happened at
// least once.
module tb_profiload_top;
  import profiload_pkg::*;

  localparam int CLK_MHZ = 125;

  logic clk, rst_n = 0;
  logic wr_en = 0;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic busy, done;
  tx_byte_t [3:0] port_tx;
  logic tx_strobe;
  int checks = 0, failures = 0;

  profiload_top dut (.*);

  initial begin
    clk = 0;
    forever #4 clk = ~clk;
  end

  cfg_t exp = '0;
  logic rx_clear = 0;
  int rx_frames[4], rx_bad[4];
  longint st0[$], st1[$], st2[$], st3[$];
  line_checker rx0 (.clk, .clear(rx_clear), .strobe(tx_strobe), .tx(port_tx[0]), .exp,
                    .frames(rx_frames[0]), .bad(rx_bad[0]), .starts(st0));
  line_checker rx1 (.clk, .clear(rx_clear), .strobe(tx_strobe), .tx(port_tx[1]), .exp,
                    .frames(rx_frames[1]), .bad(rx_bad[1]), .starts(st1));
  line_checker rx2 (.clk, .clear(rx_clear), .strobe(tx_strobe), .tx(port_tx[2]), .exp,
                    .frames(rx_frames[2]), .bad(rx_bad[2]), .starts(st2));
  line_checker rx3 (.clk, .clear(rx_clear), .strobe(tx_strobe), .tx(port_tx[3]), .exp,
                    .frames(rx_frames[3]), .bad(rx_bad[3]), .starts(st3));

  // mechanisms seen
  int m_frame, m_time, m_burst, m_sleep, m_vlan, m_100m, m_1g, m_err, m_abort, m_reconf;
  int m_port[4];

  task automatic check(input string what, input longint got, input longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_addr = 5'(a); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk);
    rd_addr = 5'(a);
    @(negedge clk);
    d = rd_data;
  endtask

  function automatic logic [31:0] ctrl_word(input cfg_t c, input bit st);
    return {24'd0, c.vlan_en, c.port, c.rate, c.mode, 1'b0, st};
  endfunction

  task automatic write_cfg(input cfg_t c);
    wr(1, 32'(c.load_pct));
    wr(2, c.dst_mac[31:0]);  wr(3, 32'(c.dst_mac[47:32]));
    wr(4, c.src_mac[31:0]);  wr(5, 32'(c.src_mac[47:32]));
    wr(6, 32'(c.ethertype));
    wr(7, {16'd0, c.vlan_pri, c.vlan_cfi, c.vlan_id});
    wr(8, 32'(c.pkt_size));
    wr(9, c.num_frames);
    wr(10, c.time_us[31:0]);  wr(11, 32'(c.time_us[39:32]));
    wr(12, c.num_bursts);
    wr(13, c.burst_us[31:0]); wr(14, 32'(c.burst_us[39:32]));
    wr(15, c.sleep_us[31:0]); wr(16, 32'(c.sleep_us[39:32]));
    wr(0, ctrl_word(c, 1'b0));
  endtask

  function automatic longint nth_start(input int p, input int i);
    case (p)
      0: return st0[i];
      1: return st1[i];
      2: return st2[i];
      default: return st3[i];
    endcase
  endfunction

  // Full run through the registers; checks everything against the equations.
  task automatic run(input string name, input cfg_t c, input longint exp_f,
                     input longint exp_bursts, input bit reconf);
    longint s, i, tpb, period, per_burst, sleep_cyc, total, e;
    logic [31:0] d, d2;
    int p, bad_spacing, n_sleeps;
    s = longint'(c.pkt_size) + 24 + (c.vlan_en ? 4 : 0);
    i = 12 + (s * (100 - longint'(c.load_pct))) / longint'(c.load_pct);
    tpb = (c.rate == RATE_1G) ? 1 : 10;
    period = (s - 12 + i) * tpb;
    per_burst = exp_f * period;
    sleep_cyc = longint'(c.sleep_us) * CLK_MHZ;
    total = exp_bursts * per_burst + (exp_bursts - 1) * sleep_cyc;
    p = int'(c.port);
    write_cfg(c);
    exp = c;
    @(negedge clk); rx_clear = 1; @(negedge clk); rx_clear = 0;
    wr(0, ctrl_word(c, 1'b1));
    if (reconf) begin
      // rewrite the parameters while the run is going on: the run keeps its own
      repeat (200) @(negedge clk);
      check({name, " busy during rewrite"}, busy, 1);
      wr(6, 32'h0000_0800); wr(8, 32'd1514); wr(1, 32'd99);
      m_reconf++;
    end
    @(negedge clk);
    wait (done);
    @(negedge clk);
    repeat (20) @(negedge clk);
    rd(17, d);
    check({name, " status done, no error"}, d[2:0], 3'b010);
    rd(18, d); check({name, " S"}, d, s);
    rd(19, d); check({name, " I"}, d, i);
    rd(20, d); check({name, " F"}, d, exp_f);
    rd(21, d); check({name, " frames reported"}, d, exp_f * exp_bursts);
    rd(22, d); check({name, " bursts reported"}, d, exp_bursts);
    rd(23, d); rd(24, d2); e = {d2[15:0], d};
    check({name, " elapsed cycles"}, e, total);
    check({name, " frames received"}, rx_frames[p], exp_f * exp_bursts);
    check({name, " bad frames"}, rx_bad[p], 0);
    for (int q = 0; q < 4; q++)
      if (q != p) check($sformatf("%s port %0d silent", name, q), rx_frames[q], 0);
    bad_spacing = 0; n_sleeps = 0;
    for (int k = 1; k < rx_frames[p]; k++) begin
      longint dt = nth_start(p, k) - nth_start(p, k - 1);
      if (dt == period + sleep_cyc && k % exp_f == 0) n_sleeps++;
      else if (dt != period) bad_spacing++;
    end
    check({name, " frame spacing S/L"}, bad_spacing, 0);
    check({name, " sleeps"}, n_sleeps, exp_bursts - 1);
    if (c.mode == MODE_FRAME) m_frame++;
    if (c.mode == MODE_TIME) begin
      m_time++;
      check({name, " within T"}, longint'(e <= longint'(c.time_us) * CLK_MHZ), 1);
    end
    if (c.mode == MODE_BURST) m_burst++;
    m_sleep += n_sleeps;
    if (c.vlan_en) m_vlan++;
    if (c.rate == RATE_1G) m_1g++; else m_100m++;
    m_port[p]++;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    cfg_t c;
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c = '0;
    c.dst_mac = 48'h122A_3B4D_1121;
    c.src_mac = 48'h122A_3B4D_EEDA;
    c.ethertype = PROFINET_ETHERTYPE;

    // frame feature, 5 short frames at 25 %, Fast Ethernet, port A
    c.mode = MODE_FRAME; c.rate = RATE_100M; c.port = 2'd0;
    c.pkt_size = PKT_W'(60); c.load_pct = 7'd25; c.num_frames = 32'd5;
    run("frame", c, 5, 1, 0);

    // time feature, 70 % for 100 us at 1 Gbps, port C: F = 1000*70*100/(800*280) = 31
    c.mode = MODE_TIME; c.rate = RATE_1G; c.port = 2'd2;
    c.pkt_size = PKT_W'(256); c.load_pct = 7'd70; c.time_us = TIME_W'(100);
    run("time", c, 31, 1, 1);

    // burst feature, VLAN priority 7, 50 %, 3 bursts of 3 ms with 50 us sleep,
    // Fast Ethernet, port D: F = 100*50*3000/(800*1048) = 17
    c.mode = MODE_BURST; c.rate = RATE_100M; c.port = 2'd3;
    c.pkt_size = PKT_W'(1020); c.load_pct = 7'd50; c.vlan_en = 1'b1;
    c.vlan_pri = 3'd7; c.vlan_cfi = 1'b0; c.vlan_id = 12'd125;
    c.num_bursts = 32'd3; c.burst_us = TIME_W'(3000); c.sleep_us = TIME_W'(50);
    run("burst", c, 17, 3, 0);

    // frame feature at 1 Gbps on port B, other Ethertype, full load
    c.mode = MODE_FRAME; c.rate = RATE_1G; c.port = 2'd1; c.vlan_en = 1'b0;
    c.ethertype = 16'h0800; c.pkt_size = PKT_W'(128); c.load_pct = 7'd100;
    c.num_frames = 32'd20;
    run("full load", c, 20, 1, 0);

    // refused configuration
    c.load_pct = 7'd0;
    write_cfg(c);
    wr(0, ctrl_word(c, 1'b1));
    repeat (2) @(negedge clk);
    wait (done);
    @(negedge clk);
    rd(17, d);
    check("refused: error flag", d[2], 1);
    if (d[2]) m_err++;

    // abort a long run on port B
    c.load_pct = 7'd10; c.num_frames = 32'd100000;
    write_cfg(c);
    exp = c;
    @(negedge clk); rx_clear = 1; @(negedge clk); rx_clear = 0;
    wr(0, ctrl_word(c, 1'b1));
    repeat (5000) @(negedge clk);
    wr(0, ctrl_word(c, 1'b0) | 32'h2);
    repeat (3000) @(negedge clk);
    rd(17, d);
    check("abort: run ended", d[1:0], 2'b10);
    rd(21, d);
    check("abort: frames reported = received", d, rx_frames[1]);
    check("abort: stopped early", longint'(d < 10 && d > 0), 1);
    check("abort: frames intact", rx_bad[1], 0);
    if (d < 10) m_abort++;

    check("mechanism frame feature", longint'(m_frame > 0), 1);
    check("mechanism time feature", longint'(m_time > 0), 1);
    check("mechanism burst feature", longint'(m_burst > 0), 1);
    check("mechanism sleep interval", longint'(m_sleep > 0), 1);
    check("mechanism VLAN tag", longint'(m_vlan > 0), 1);
    check("mechanism 100 Mbps", longint'(m_100m > 0), 1);
    check("mechanism 1 Gbps", longint'(m_1g > 0), 1);
    check("mechanism refused run", longint'(m_err > 0), 1);
    check("mechanism abort", longint'(m_abort > 0), 1);
    check("mechanism rewrite during run", longint'(m_reconf > 0), 1);
    for (int q = 0; q < 4; q++) check($sformatf("mechanism port %0d", q), longint'(m_port[q] > 0), 1);
    $display("mechanisms: frame %0d time %0d burst %0d sleep %0d vlan %0d 100M %0d 1G %0d err %0d abort %0d rewrite %0d ports %0d/%0d/%0d/%0d",
             m_frame, m_time, m_burst, m_sleep, m_vlan, m_100m, m_1g, m_err, m_abort, m_reconf,
             m_port[0], m_port[1], m_port[2], m_port[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
