// tb_rate_tick -- self-checking test of the byte-time strobe.
//
// With the default 125 MHz clock a byte lasts 10 clocks at 100 Mbps and
// one clock at 1 Gbps; a second instance at 250 MHz must give 20 and 2.
// Also checks that `sync` suppresses the strobe on its own cycle and
// restarts it on the next one.
module tb_rate_tick;
  import profiload_pkg::*;

  logic clk, rst_n = 0;
  rate_e rate = RATE_100M;
  logic sync = 0;
  logic tick125, tick250;
  int checks = 0, failures = 0;

  rate_tick                  u125 (.clk, .rst_n, .rate, .sync, .byte_tick(tick125));
  rate_tick #(.CLK_MHZ(250)) u250 (.clk, .rst_n, .rate, .sync, .byte_tick(tick250));

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Count strobes of both instances over n clocks; also the spacing.
  task automatic measure(input int n, output int c125, output int c250,
                         output int gap125, output int gap250);
    int last125, last250;
    c125 = 0; c250 = 0; gap125 = -1; gap250 = -1; last125 = -1; last250 = -1;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if (tick125) begin
        if (last125 >= 0) begin
          if (gap125 == -1) gap125 = i - last125;
          else if (gap125 != i - last125) gap125 = -2;
        end
        last125 = i; c125++;
      end
      if (tick250) begin
        if (last250 >= 0) begin
          if (gap250 == -1) gap250 = i - last250;
          else if (gap250 != i - last250) gap250 = -2;
        end
        last250 = i; c250++;
      end
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int a, b, ga, gb;
    repeat (3) @(negedge clk);
    rst_n = 1;
    measure(200, a, b, ga, gb);
    check("100M ticks in 200 clocks @125", a, 20);
    check("100M spacing @125", ga, 10);
    check("100M spacing @250", gb, 20);
    rate = RATE_1G;
    @(negedge clk);
    measure(200, a, b, ga, gb);
    check("1G ticks in 200 clocks @125", a, 200);
    check("1G spacing @250", gb, 2);
    rate = RATE_100M;
    repeat (13) @(negedge clk);
    sync = 1;
    #1 check("no tick during sync", int'(tick125), 0);
    @(negedge clk);
    sync = 0;
    #1 check("tick right after sync", int'(tick125), 1);
    check("tick right after sync @250", int'(tick250), 1);
    for (int i = 1; i < 10; i++) begin
      @(negedge clk);
      #1 check($sformatf("no tick %0d after sync", i), int'(tick125), 0);
    end
    @(negedge clk);
    #1 check("tick 10 after sync", int'(tick125), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
