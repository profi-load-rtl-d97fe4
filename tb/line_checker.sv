// line_checker -- receiver model for the generator's testbenches.
//
// Watches one load port. A byte slot begins on each cycle with `strobe`
// high; bytes with `en` high are collected into a frame, and when `en`
// falls the frame is checked against the configuration `exp`: total
// length, preamble and delimiter, both MAC addresses, VLAN tag, Ethertype,
// the incrementing payload and the CRC-32 (recomputed here bit by bit).
// `frames` counts frames seen, `bad` those with any mismatch; `starts`
// keeps the clock cycle at which each frame's first byte appeared, for the
// timing checks of the testbench. `clear` resets all of it.
module line_checker
  import profiload_pkg::*;
(
  input  logic     clk,
  input  logic     clear,
  input  logic     strobe,
  input  tx_byte_t tx,
  input  cfg_t     exp,
  output int       frames,
  output int       bad,
  output longint   starts[$]
);

  logic [7:0] buf_q[$];
  longint     cyc = 0;
  logic       prev_en = 0;

  function automatic bit frame_ok(input logic [7:0] b[$], input cfg_t c);
    int n, k, hdr;
    logic [31:0] crc, fcs;
    logic fb;
    n = 8 + int'(c.pkt_size) + (c.vlan_en ? 4 : 0) + 4;
    if (b.size() != n) return 0;
    for (int i = 0; i < 7; i++) if (b[i] != 8'h55) return 0;
    if (b[7] != 8'hD5) return 0;
    for (int i = 0; i < 6; i++) begin
      if (b[8 + i]  != c.dst_mac[8*(5-i) +: 8]) return 0;
      if (b[14 + i] != c.src_mac[8*(5-i) +: 8]) return 0;
    end
    k = 20;
    if (c.vlan_en) begin
      if ({b[20], b[21]} != 16'h8100) return 0;
      if ({b[22], b[23]} != {c.vlan_pri, c.vlan_cfi, c.vlan_id}) return 0;
      k = 24;
    end
    if ({b[k], b[k+1]} != c.ethertype) return 0;
    hdr = k + 2;
    for (int i = hdr; i < n - 4; i++) if (b[i] != 8'(i - hdr)) return 0;
    crc = 32'hFFFF_FFFF;
    for (int i = 8; i < n - 4; i++)
      for (int j = 0; j < 8; j++) begin
        fb = crc[31] ^ b[i][j];
        crc = {crc[30:0], 1'b0};
        if (fb) crc ^= 32'h04C1_1DB7;
      end
    for (int j = 0; j < 32; j++) fcs[j] = ~crc[31-j];
    if ({b[n-1], b[n-2], b[n-3], b[n-4]} != fcs) return 0;
    return 1;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (clear) begin
      frames = 0;
      bad = 0;
      starts = {};
      buf_q = {};
      prev_en <= 1'b0;
    end else if (strobe) begin
      prev_en <= tx.en;
      if (tx.en) begin
        if (!prev_en) begin
          buf_q = {};
          starts.push_back(cyc);
        end
        buf_q.push_back(tx.data);
      end else if (prev_en) begin
        frames++;
        if (!frame_ok(buf_q, exp)) bad++;
      end
    end
  end

endmodule
