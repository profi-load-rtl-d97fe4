// tb_profiload_workloads -- the evaluation runs of the generator, at its
// default parameters (125 MHz clock), checked to the clock cycle.
//
//   1. 40 long frames (P = 1514) at 25 % on Fast Ethernet: S = 1538,
//      I = 12 + 4614 = 4626, one frame every 492.16 us (61520 clocks).
//   2. 750 short frames (P = 60) at 25 %: S = 84, I = 264, a frame every
//      26.88 us (3360 clocks).
//   3. 25 % of short frames for 20 ms: F = 744 frames, lasting
//      744 * 26.88 us = 19.99872 ms, 1.28 us short of the 20 ms.
//   4. VLAN-tagged (priority 7) P = 1020 at 50 % in bursts of 1 s with 1 s
//      sleep: S = 1048, F = 5963 frames per burst, a frame every 167.68 us.
//      Two bursts are run here (the full twenty would be 39 s of simulated
//      time); every burst is identical.
// Each run is driven through the registers and received by a frame
// checker; the test compares the computed S, I, F, the frame count, the
// content of every frame, the spacing of every frame start, the sleep and
// the elapsed time reported back with the values above.
module tb_profiload_workloads;
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
  int rx_frames, rx_bad;
  longint st[$];
  line_checker rx (.clk, .clear(rx_clear), .strobe(tx_strobe), .tx(port_tx[0]), .exp,
                   .frames(rx_frames), .bad(rx_bad), .starts(st));

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

  function automatic logic [31:0] ctrl_word(input cfg_t c, input bit st_bit);
    return {24'd0, c.vlan_en, c.port, c.rate, c.mode, 1'b0, st_bit};
  endfunction

  task automatic run(input string name, input cfg_t c, input longint exp_s, input longint exp_i,
                     input longint exp_f, input longint bursts, input longint period,
                     input longint exp_elapsed);
    logic [31:0] d, d2;
    longint e;
    int bad_spacing, n_sleeps;
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
    exp = c;
    @(negedge clk); rx_clear = 1; @(negedge clk); rx_clear = 0;
    wr(0, ctrl_word(c, 1'b1));
    repeat (2) @(negedge clk);
    wait (done);
    @(negedge clk);
    repeat (20) @(negedge clk);
    rd(17, d); check({name, " no error"}, d[2], 0);
    rd(18, d); check({name, " S"}, d, exp_s);
    rd(19, d); check({name, " I"}, d, exp_i);
    rd(20, d); check({name, " F"}, d, exp_f);
    rd(21, d); check({name, " frames reported"}, d, exp_f * bursts);
    rd(22, d); check({name, " bursts reported"}, d, bursts);
    rd(23, d); rd(24, d2); e = {d2[15:0], d};
    check({name, " elapsed clocks"}, e, exp_elapsed);
    check({name, " frames received"}, rx_frames, exp_f * bursts);
    check({name, " bad frames"}, rx_bad, 0);
    bad_spacing = 0; n_sleeps = 0;
    for (int k = 1; k < st.size(); k++) begin
      longint dt = st[k] - st[k - 1];
      if (bursts > 1 && k % exp_f == 0 && dt == period + longint'(c.sleep_us) * CLK_MHZ)
        n_sleeps++;
      else if (dt != period) bad_spacing++;
    end
    check({name, " frame start spacing"}, bad_spacing, 0);
    check({name, " sleeps"}, n_sleeps, bursts - 1);
    $display("%s: S=%0d I=%0d F=%0d frames=%0d elapsed=%0d clocks (%0d ns)", name, exp_s, exp_i,
             exp_f, rx_frames, e, e * 1000 / CLK_MHZ);
  endtask

  initial begin
    repeat (64'd400_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    cfg_t c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c = '0;
    c.dst_mac = 48'h122A_3B4D_1121;
    c.src_mac = 48'h122A_3B4D_EEDA;
    c.ethertype = PROFINET_ETHERTYPE;
    c.rate = RATE_100M;
    c.load_pct = 7'd25;

    c.mode = MODE_FRAME; c.pkt_size = PKT_W'(1514); c.num_frames = 32'd40;
    run("case 1, 40 long frames at 25 %", c, 1538, 4626, 40, 1, 61520, 40 * 61520);

    c.pkt_size = PKT_W'(60); c.num_frames = 32'd750;
    run("case 1, 750 short frames at 25 %", c, 84, 264, 750, 1, 3360, 750 * 3360);

    c.mode = MODE_TIME; c.time_us = TIME_W'(20000);
    run("case 2, 25 % for 20 ms", c, 84, 264, 744, 1, 3360, 744 * 3360);
    check("case 2 T' = 19.99872 ms", 744 * 3360 * 1000 / CLK_MHZ, 19998720);

    c.mode = MODE_BURST; c.load_pct = 7'd50; c.pkt_size = PKT_W'(1020);
    c.vlan_en = 1'b1; c.vlan_pri = 3'd7; c.vlan_id = 12'd0;
    c.num_bursts = 32'd2; c.burst_us = TIME_W'(1000000); c.sleep_us = TIME_W'(1000000);
    run("case 3, 50 % VLAN bursts of 1 s, 1 s sleep", c, 1048, 1060, 5963, 2, 20960,
        2 * 5963 * 20960 + 125000000);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
