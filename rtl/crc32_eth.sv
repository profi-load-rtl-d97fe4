// crc32_eth -- Ethernet frame check sequence generator.
//
// Folds one byte per enabled clock into the IEEE 802.3 CRC-32 (reflected
// polynomial 0xEDB88320, start value 0xFFFFFFFF, least significant bit of
// each byte first). `fcs` is the complemented register, i.e. the value to be
// appended to the frame, sent as fcs[7:0] first and fcs[31:24] last.
//
// Timing: `clear` and `en` take effect at the next clock edge; `fcs` then
// covers every byte folded in since the last clear. `clear` wins over `en`.
//
// The paper only names the 4-byte frame check sequence of the frame; the
// standard Ethernet CRC is used because the frames must be accepted by
// Profinet devices and analysers.
module crc32_eth (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        en,
  input  logic [7:0]  data,
  output logic [31:0] fcs
);

  logic [31:0] crc_q, crc_d;

  always_comb begin
    crc_d = crc_q;
    for (int b = 0; b < 8; b++) begin
      if (crc_d[0] ^ data[b]) crc_d = (crc_d >> 1) ^ 32'hEDB8_8320;
      else                    crc_d = crc_d >> 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     crc_q <= 32'hFFFF_FFFF;
    else if (clear) crc_q <= 32'hFFFF_FFFF;
    else if (en)    crc_q <= crc_d;
  end

  assign fcs = ~crc_q;

endmodule
