// tb_frame_builder -- self-checking test of the frame builder.
//
// Sends bursts of back-to-back frames (untagged and VLAN-tagged, several
// packet sizes, byte ticks every clock and every third clock) and compares
// every byte slot on the line with a frame assembled here from the
// configuration: preamble, delimiter, addresses, tag, Ethertype,
// incrementing payload and a CRC-32 computed bit by bit. The gap between
// frames must be exactly `gap` idle slots.
module tb_frame_builder;
  import profiload_pkg::*;

  logic clk, rst_n = 0;
  cfg_t cfg = '0;
  logic [GAP_W-1:0] gap = GAP_W'(12);
  logic byte_tick, frame_req = 0;
  logic accept, idle;
  tx_byte_t tx;
  int checks = 0, failures = 0;
  int tick_period = 1;

  frame_builder dut (.*);

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  // Byte tick: every tick_period clocks.
  int tcnt;
  initial tcnt = 0;
  always @(posedge clk) begin
    tcnt <= (tcnt + 1 >= tick_period) ? 0 : tcnt + 1;
  end
  assign byte_tick = (tcnt == 0);

  // Record one entry per byte slot: {en, data} just after each tick edge.
  logic [8:0] slots[$];
  always @(posedge clk) begin
    if (rst_n && byte_tick) begin
      #1 slots.push_back({tx.en, tx.data});
    end
  end

  function automatic logic [31:0] ref_fcs(input logic [7:0] b[$]);
    logic [31:0] c;
    logic fb;
    logic [31:0] r;
    c = 32'hFFFF_FFFF;
    foreach (b[i])
      for (int k = 0; k < 8; k++) begin
        fb = c[31] ^ b[i][k];
        c = {c[30:0], 1'b0};
        if (fb) c ^= 32'h04C1_1DB7;
      end
    for (int k = 0; k < 32; k++) r[k] = c[31-k];
    return ~r;
  endfunction

  // Expected wire bytes of one frame.
  function automatic void ref_frame(input cfg_t c, output logic [7:0] w[$]);
    logic [7:0] body[$];
    logic [31:0] f;
    int hdr;
    for (int i = 5; i >= 0; i--) body.push_back(c.dst_mac[8*i +: 8]);
    for (int i = 5; i >= 0; i--) body.push_back(c.src_mac[8*i +: 8]);
    if (c.vlan_en) begin
      body.push_back(8'h81); body.push_back(8'h00);
      body.push_back({c.vlan_pri, c.vlan_cfi, c.vlan_id[11:8]});
      body.push_back(c.vlan_id[7:0]);
    end
    body.push_back(c.ethertype[15:8]); body.push_back(c.ethertype[7:0]);
    hdr = body.size();
    for (int i = 0; i < int'(c.pkt_size) - 14; i++) body.push_back(8'(i));
    f = ref_fcs(body);
    w = {};
    repeat (7) w.push_back(8'h55);
    w.push_back(8'hD5);
    foreach (body[i]) w.push_back(body[i]);
    for (int i = 0; i < 4; i++) w.push_back(f[8*i +: 8]);
  endfunction

  task automatic run(input cfg_t c, input int g, input int nframes, input int period);
    logic [7:0] w[$];
    int n, pos, first;
    bit ok;
    @(negedge clk);
    cfg = c; gap = GAP_W'(g); tick_period = period;
    ref_frame(c, w);
    slots = {};
    n = 0;
    frame_req = 1;
    while (n < nframes) begin
      @(posedge clk);
      if (accept) n++;
      #1;
      if (n == nframes) frame_req = 0;
    end
    // wait until the last gap is over
    while (!idle) @(posedge clk);
    repeat (3 * period + 2) @(posedge clk);
    // find the first frame byte
    first = -1;
    foreach (slots[i]) if (slots[i][8] && first < 0) first = i;
    checks++;
    if (first < 0) begin failures++; $display("FAIL no frame seen"); return; end
    pos = first;
    for (int f = 0; f < nframes; f++) begin
      ok = 1;
      foreach (w[i]) begin
        if (pos + i >= slots.size() || slots[pos + i] !== {1'b1, w[i]}) begin
          if (ok) $display("FAIL frame %0d byte %0d: got %03h expected %03h (P=%0d vlan=%0d)",
                           f, i, (pos + i < slots.size()) ? slots[pos + i] : 9'h1ff, {1'b1, w[i]},
                           c.pkt_size, c.vlan_en);
          ok = 0;
        end
      end
      checks++; if (!ok) failures++;
      pos += w.size();
      ok = 1;
      for (int i = 0; i < g; i++)
        if (pos + i >= slots.size() || slots[pos + i][8] !== 1'b0) ok = 0;
      if (f < nframes - 1 && !(pos + g < slots.size() && slots[pos + g][8])) ok = 0;
      checks++;
      if (!ok) begin failures++; $display("FAIL gap after frame %0d (gap %0d)", f, g); end
      pos += g;
    end
    // nothing after the last frame
    ok = 1;
    for (int i = pos; i < slots.size(); i++) if (slots[i][8]) ok = 0;
    checks++; if (!ok) begin failures++; $display("FAIL extra frame bytes"); end
    checks++;
    if (w.size() != 8 + int'(c.pkt_size) + (c.vlan_en ? 4 : 0) + 4) begin
      failures++; $display("FAIL wire length");
    end
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
    repeat (3) @(negedge clk);
    rst_n = 1;
    c = '0;
    c.dst_mac = 48'h122A_3B4D_1121;
    c.src_mac = 48'h122A_3B4D_EEDA;
    c.ethertype = PROFINET_ETHERTYPE;
    c.pkt_size = PKT_W'(60);
    run(c, 12, 3, 1);                    // short frames, minimum gap, 1 Gbps pacing
    run(c, 252 + 12, 2, 3);              // 25 % gap of a short frame, slower ticks
    c.vlan_en = 1; c.vlan_pri = 3'd7; c.vlan_cfi = 1'b0; c.vlan_id = 12'd125;
    c.pkt_size = PKT_W'(128);
    run(c, 40, 3, 1);                    // tagged
    for (int t = 0; t < 6; t++) begin
      c.dst_mac = 48'({$urandom, $urandom});
      c.src_mac = 48'({$urandom, $urandom});
      c.ethertype = 16'($urandom);
      c.vlan_en = 1'($urandom);
      {c.vlan_pri, c.vlan_cfi, c.vlan_id} = 16'($urandom);
      c.pkt_size = PKT_W'(60 + $urandom % 400);
      run(c, 12 + $urandom % 50, 2, 1 + $urandom % 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
