// tb_profiload_regs -- self-checking test of the register bank.
//
// Checks the reset values, writes random values to every parameter
// register and checks both the configuration fields and the read-back,
// checks that CTRL bits 0 and 1 give one-cycle start and abort pulses, and
// that the read-only words show the status inputs.
module tb_profiload_regs;
  import profiload_pkg::*;

  logic clk, rst_n = 0;
  logic wr_en = 0;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  cfg_t cfg;
  logic start, abort;
  logic st_busy = 0, st_done = 0, st_err = 0, st_sleeping = 0;
  logic [SIZE_W-1:0] calc_s = '0;
  logic [GAP_W-1:0]  calc_i = '0;
  logic [CNT_W-1:0]  calc_f = '0, frames_sent = '0, bursts_sent = '0;
  logic [ELAP_W-1:0] elapsed = '0;
  int checks = 0, failures = 0;
  int n_start, n_abort;

  profiload_regs dut (.*);

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  always @(posedge clk) begin
    if (start) n_start <= n_start + 1;
    if (abort) n_abort <= n_abort + 1;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
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

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [31:0] v, d;
    logic [47:0] mac;
    repeat (3) @(negedge clk);
    rst_n = 1;
    n_start = 0; n_abort = 0;
    check("reset ethertype", cfg.ethertype, 16'h8892);
    check("reset pkt_size", cfg.pkt_size, 60);
    check("reset load", cfg.load_pct, 100);
    check("reset mode", cfg.mode, MODE_FRAME);
    rd(6, d); check("read reset ethertype", d, 32'h8892);

    // CTRL without start
    wr(0, 32'h0000_00B8);  // vlan, port 1, 1G, burst
    check("mode", cfg.mode, MODE_BURST);
    check("rate", cfg.rate, RATE_1G);
    check("port", cfg.port, 1);
    check("vlan_en", cfg.vlan_en, 1);
    check("no start yet", n_start, 0);
    rd(0, d); check("read ctrl", d, 32'hB8);
    // start pulse and abort pulse
    wr(0, 32'h0000_0001);
    @(negedge clk);
    check("one start pulse", n_start, 1);
    check("start low again", start, 0);
    check("ctrl rewritten", cfg.mode, MODE_FRAME);
    wr(0, 32'h0000_0002);
    @(negedge clk);
    check("one abort pulse", n_abort, 1);
    check("start count unchanged", n_start, 1);

    v = $urandom; wr(1, v); check("load", cfg.load_pct, v[6:0]);
    rd(1, d); check("read load", d, {25'd0, v[6:0]});
    mac = 48'({$urandom, $urandom});
    wr(2, mac[31:0]); wr(3, {16'hFFFF, mac[47:32]});
    check("dst mac", cfg.dst_mac, mac);
    rd(3, d); check("read dst hi", d, {16'd0, mac[47:32]});
    mac = 48'({$urandom, $urandom});
    wr(4, mac[31:0]); wr(5, {16'd0, mac[47:32]});
    check("src mac", cfg.src_mac, mac);
    rd(4, d); check("read src lo", d, mac[31:0]);
    wr(6, 32'h0000_0800); check("ethertype", cfg.ethertype, 16'h0800);
    wr(7, 32'h0000_E07D);
    check("vlan pri", cfg.vlan_pri, 7); check("vlan cfi", cfg.vlan_cfi, 0);
    check("vlan id", cfg.vlan_id, 125);
    rd(7, d); check("read vlan", d, 32'hE07D);
    wr(8, 32'd1514); check("pkt size", cfg.pkt_size, 1514);
    v = $urandom; wr(9, v); check("num frames", cfg.num_frames, v);
    wr(10, 32'h1234_5678); wr(11, 32'h0000_00AB); check("time", cfg.time_us, 40'hAB_1234_5678);
    v = $urandom; wr(12, v); check("num bursts", cfg.num_bursts, v);
    wr(13, 32'd1000000); wr(14, 32'd0); check("burst", cfg.burst_us, 40'd1000000);
    wr(15, 32'd500); wr(16, 32'd1); check("sleep", cfg.sleep_us, 40'h01_0000_01F4);
    rd(16, d); check("read sleep hi", d, 1);
    rd(13, d); check("read burst lo", d, 1000000);

    // status words
    st_busy = 1; st_done = 0; st_err = 1; st_sleeping = 1;
    calc_s = 12'd1538; calc_i = 24'd4626; calc_f = 32'd744;
    frames_sent = 32'd119260; bursts_sent = 32'd20; elapsed = 48'h0001_2345_6789;
    rd(17, d); check("status", d, 32'b1101);
    rd(18, d); check("S", d, 1538);
    rd(19, d); check("I", d, 4626);
    rd(20, d); check("F", d, 744);
    rd(21, d); check("frames", d, 119260);
    rd(22, d); check("bursts", d, 20);
    rd(23, d); check("elapsed lo", d, 32'h2345_6789);
    rd(24, d); check("elapsed hi", d, 32'h0001);
    rd(31, d); check("unmapped", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
