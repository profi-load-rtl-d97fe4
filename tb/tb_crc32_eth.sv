// tb_crc32_eth -- self-checking test of the Ethernet CRC-32 generator.
//
// Checks the standard check value (CRC-32 of "123456789" is 0xCBF43926),
// random byte strings against a bit-serial reference model written with the
// normal (non-reflected) polynomial 0x04C11DB7, and that clear restarts the
// computation.
module tb_crc32_eth;
  logic clk, rst_n = 0, clear = 0, en = 0;
  logic [7:0] data = '0;
  logic [31:0] fcs;
  int checks = 0, failures = 0;

  crc32_eth dut (.*);

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  // Reference: MSB-first CRC on bit-reversed bytes, result bit-reversed.
  function automatic logic [31:0] ref_crc(input logic [7:0] bytes[], input int n);
    logic [31:0] c;
    logic [31:0] r;
    logic fb;
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < n; i++)
      for (int b = 0; b < 8; b++) begin
        fb = c[31] ^ bytes[i][b];
        c = {c[30:0], 1'b0};
        if (fb) c ^= 32'h04C1_1DB7;
      end
    for (int b = 0; b < 32; b++) r[b] = c[31-b];
    return ~r;
  endfunction

  task automatic feed(input logic [7:0] bytes[], input int n);
    @(negedge clk); clear = 1; en = 0;
    @(negedge clk); clear = 0;
    for (int i = 0; i < n; i++) begin
      en = 1; data = bytes[i];
      @(negedge clk);
    end
    en = 0;
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [7:0] v[];
    logic [31:0] held;
    int n;
    v = new[9];
    foreach (v[i]) v[i] = 8'h31 + 8'(i);
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("reset value", fcs, 32'h0);
    feed(v, 9);
    check("check value 123456789", fcs, 32'hCBF4_3926);
    check("reference on 123456789", fcs, ref_crc(v, 9));
    for (int t = 0; t < 40; t++) begin
      n = 1 + ($urandom % 200);
      v = new[n];
      foreach (v[i]) v[i] = 8'($urandom);
      feed(v, n);
      check($sformatf("random string %0d len %0d", t, n), fcs, ref_crc(v, n));
    end
    // en low holds the value
    held = fcs;
    data = 8'hA5;
    repeat (3) @(negedge clk);
    check("hold without en", fcs, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
