// frame_builder -- puts one frame and its interframe gap on the line, one
// byte per byte time.
//
// A frame is sent as: 7 preamble octets 0x55, the start delimiter 0xD5,
// destination MAC, source MAC, an optional 4-byte VLAN tag (TPID 0x8100,
// then priority, CFI and VLAN id), the Ethertype, payload up to P bytes from
// the destination MAC on, and the 4-byte FCS. MAC addresses go out most
// significant octet first; the FCS least significant octet first. The frame
// is followed by `gap` idle byte slots (en low). The frame layout and the
// P / overhead accounting follow the paper; the payload content, which the
// paper leaves to the host's packet tools, is an incrementing byte count
// starting at 0x00 (this design's choice).
//
// Handshake: `frame_req` is a level. On a cycle with `byte_tick` high in
// which the builder is idle and `frame_req` is high, `accept` is high and
// the first preamble octet appears on `tx` after that clock edge. The
// builder is busy for (frame bytes + gap) byte ticks and is idle again on
// the tick that would start the next frame, so frames requested back to
// back are exactly frame bytes + `gap` byte times apart. `cfg` and `gap`
// must stay stable while a frame is sent (the controller holds them for the
// whole run). `tx` changes only on byte_tick edges and holds in between.
module frame_builder
  import profiload_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic [GAP_W-1:0] gap,
  input  logic             byte_tick,
  input  logic             frame_req,
  output logic             accept,
  output logic             idle,
  output tx_byte_t         tx
);

  typedef enum logic [1:0] {B_IDLE, B_FRAME, B_GAP} bstate_e;
  bstate_e st_q;

  localparam int unsigned IW = PKT_W + 2;

  logic [IW-1:0]    idx_q;       // index of the byte now on the line
  logic [GAP_W-1:0] gap_q;       // gap slots still to send after this one
  logic [IW-1:0]    idx_n;
  logic [IW-1:0]    hdr_end;     // first payload index
  logic [IW-1:0]    pay_end;     // first FCS index
  logic [IW-1:0]    last_idx;    // last FCS index
  logic [7:0]       byte_n;
  logic             crc_en, crc_clear;
  logic [31:0]      fcs;
  logic [15:0]      tci;

  crc32_eth u_crc (
    .clk, .rst_n,
    .clear(crc_clear),
    .en   (crc_en),
    .data (byte_n),
    .fcs
  );

  assign tci      = {cfg.vlan_pri, cfg.vlan_cfi, cfg.vlan_id};
  assign hdr_end  = cfg.vlan_en ? IW'(26) : IW'(22);
  // 8 octets of preamble and delimiter, then P bytes (+4 with VLAN).
  assign pay_end  = IW'(8) + IW'(cfg.pkt_size) + (cfg.vlan_en ? IW'(VLAN_BYTES) : '0);
  assign last_idx = pay_end + IW'(FCS_BYTES - 1);

  assign idle   = (st_q == B_IDLE);
  assign accept = idle && byte_tick && frame_req;

  // Index of the byte that goes on the line at the next tick.
  assign idx_n = (st_q == B_FRAME) ? idx_q + 1'b1 : '0;

  // Octet at index idx_n.
  always_comb begin
    logic [IW-1:0] k;
    byte_n = 8'h00;
    k      = idx_n;
    if (k < IW'(7))                       byte_n = PREAMBLE_OCTET;
    else if (k == IW'(7))                 byte_n = SFD_OCTET;
    else if (k < IW'(14))                 byte_n = cfg.dst_mac[8*(13-k) +: 8];
    else if (k < IW'(20))                 byte_n = cfg.src_mac[8*(19-k) +: 8];
    else if (k < hdr_end - IW'(2)) begin  // VLAN tag
      case (k)
        IW'(20):  byte_n = VLAN_TPID[15:8];
        IW'(21):  byte_n = VLAN_TPID[7:0];
        IW'(22):  byte_n = tci[15:8];
        default:  byte_n = tci[7:0];
      endcase
    end
    else if (k == hdr_end - IW'(2))       byte_n = cfg.ethertype[15:8];
    else if (k == hdr_end - IW'(1))       byte_n = cfg.ethertype[7:0];
    else if (k < pay_end)                 byte_n = 8'(k - hdr_end);
    else begin
      case (2'(k - pay_end))
        2'd0:    byte_n = fcs[7:0];
        2'd1:    byte_n = fcs[15:8];
        2'd2:    byte_n = fcs[23:16];
        default: byte_n = fcs[31:24];
      endcase
    end
  end

  // The CRC covers destination MAC through payload.
  assign crc_clear = accept;
  assign crc_en    = byte_tick && (st_q == B_FRAME) && idx_n >= IW'(8) && idx_n < pay_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= B_IDLE;
      idx_q <= '0;
      gap_q <= '0;
      tx    <= '0;
    end else if (byte_tick) begin
      case (st_q)
        B_IDLE: begin
          if (frame_req) begin
            st_q    <= B_FRAME;
            idx_q   <= '0;
            tx.en   <= 1'b1;
            tx.data <= byte_n;
          end else begin
            tx <= '0;
          end
        end
        B_FRAME: begin
          if (idx_q == last_idx) begin
            // first gap slot; at least the 12-byte minimum gap follows
            tx    <= '0;
            gap_q <= gap - 1'b1;
            st_q  <= (gap <= GAP_W'(1)) ? B_IDLE : B_GAP;
          end else begin
            idx_q   <= idx_n;
            tx.en   <= 1'b1;
            tx.data <= byte_n;
          end
        end
        B_GAP: begin
          tx    <= '0;
          gap_q <= gap_q - 1'b1;
          if (gap_q == GAP_W'(1)) st_q <= B_IDLE;
        end
        default: st_q <= B_IDLE;
      endcase
    end
  end

  // The gap handed in never undercuts the 12-byte minimum interframe gap.
  a_min_gap: assert property (@(posedge clk) disable iff (!rst_n)
                              accept |-> gap >= GAP_W'(IFG_MIN_BYTES));

endmodule
