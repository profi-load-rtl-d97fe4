// rate_tick -- byte-time strobe for the selected Ethernet line rate.
//
// The generator runs from one system clock of CLK_MHZ MHz. One byte on the
// wire lasts 80 ns at 100 Mbps and 8 ns at 1 Gbps, so with the default
// 125 MHz clock `byte_tick` is high every 10th cycle at 100 Mbps and on
// every cycle at 1 Gbps. Every part of the generator that moves one byte
// slot forward does so on a cycle with `byte_tick` high.
//
// `sync` restarts the divider: `byte_tick` is low while `sync` is high, high
// on the cycle after it, then every CYC_100M (or CYC_1G) cycles. This lets a run, and each burst
// after a sleep interval, start on a clean byte boundary.
//
// The two line rates are the paper's (Fast and Gigabit Ethernet); the
// single clock and its 125 MHz default (the usual gigabit byte clock) are
// this design's choice.
module rate_tick
  import profiload_pkg::*;
#(
  parameter int unsigned CLK_MHZ = 125
) (
  input  logic  clk,
  input  logic  rst_n,
  input  rate_e rate,
  input  logic  sync,
  output logic  byte_tick
);

  localparam int unsigned CYC_100M = CLK_MHZ * 8 / 100;   // clocks per byte at 100 Mbps
  localparam int unsigned CYC_1G   = CLK_MHZ * 8 / 1000;  // clocks per byte at 1 Gbps
  localparam int unsigned CW       = $clog2(CYC_100M + 1);

  initial begin
    assert (CYC_1G >= 1 && CYC_1G * 1000 == CLK_MHZ * 8)
      else $error("CLK_MHZ must be a whole multiple of 125");
  end

  logic [CW-1:0] cnt_q;
  logic [CW-1:0] last;

  assign last      = (rate == RATE_1G) ? CW'(CYC_1G - 1) : CW'(CYC_100M - 1);
  assign byte_tick = (cnt_q == '0) && !sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              cnt_q <= '0;
    else if (sync)           cnt_q <= '0;
    else if (cnt_q >= last)  cnt_q <= '0;
    else                     cnt_q <= cnt_q + 1'b1;
  end

endmodule
