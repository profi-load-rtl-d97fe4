// profiload_regs -- register bank between the processor side and the load
// generator.
//
// The processor writes the run parameters the user entered in the HMI and
// reads back what the generator computed and did. A simple synchronous bus
// is used: `wr_en` writes `wr_data` to word `wr_addr` at the clock edge;
// `rd_data` is the word at `rd_addr`, registered (one cycle of latency).
// Writing CTRL with bit 0 set produces a one-cycle `start` pulse, with
// bit 1 set a one-cycle `abort` pulse; the other CTRL bits are stored.
//
//   addr  name        bits
//   0x00  CTRL        0 start (pulse), 1 abort (pulse), 3:2 mode
//                     (0 frame, 1 time, 2 burst), 4 rate (0 100 Mbps,
//                     1 1 Gbps), 6:5 load port (0 A .. 3 D), 7 VLAN enable
//   0x01  LOAD        6:0 load in percent
//   0x02  DST_LO      destination MAC bits 31:0   (0x03 DST_HI bits 47:32)
//   0x04  SRC_LO      source MAC bits 31:0        (0x05 SRC_HI bits 47:32)
//   0x06  ETHERTYPE   15:0
//   0x07  VLAN        15:13 priority, 12 CFI, 11:0 VLAN id
//   0x08  PKT_SIZE    10:0 P in bytes
//   0x09  NUM_FRAMES  frame feature count
//   0x0A  TIME_LO     time feature duration, us (0x0B TIME_HI bits 39:32)
//   0x0C  NUM_BURSTS
//   0x0D  BURST_LO    burst interval, us (0x0E BURST_HI bits 39:32)
//   0x0F  SLEEP_LO    sleep interval, us (0x10 SLEEP_HI bits 39:32)
//   0x11  STATUS      0 busy, 1 done, 2 error, 3 sleeping (read only)
//   0x12  CALC_S      frame size S (read only)
//   0x13  CALC_I      interframe gap I (read only)
//   0x14  CALC_F      frames per run or burst F (read only)
//   0x15  FRAMES      frames sent (read only)
//   0x16  BURSTS      bursts sent (read only)
//   0x17  ELAPSED_LO  elapsed clock cycles 31:0 (0x18 ELAPSED_HI 47:32)
//
// The list of fields is the paper's HMI input list; the address map, the
// bus and the reset values are this design's. After reset the Ethertype is
// the Profinet 0x8892, P is 60 (the smallest size used in the paper), the
// load is 100 % and every other field is zero.
module profiload_regs
  import profiload_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [4:0]        wr_addr,
  input  logic [31:0]       wr_data,
  input  logic [4:0]        rd_addr,
  output logic [31:0]       rd_data,
  output cfg_t              cfg,
  output logic              start,
  output logic              abort,
  input  logic              st_busy,
  input  logic              st_done,
  input  logic              st_err,
  input  logic              st_sleeping,
  input  logic [SIZE_W-1:0] calc_s,
  input  logic [GAP_W-1:0]  calc_i,
  input  logic [CNT_W-1:0]  calc_f,
  input  logic [CNT_W-1:0]  frames_sent,
  input  logic [CNT_W-1:0]  bursts_sent,
  input  logic [ELAP_W-1:0] elapsed
);

  typedef enum logic [4:0] {
    A_CTRL = 5'h00, A_LOAD = 5'h01, A_DST_LO = 5'h02, A_DST_HI = 5'h03,
    A_SRC_LO = 5'h04, A_SRC_HI = 5'h05, A_ETYPE = 5'h06, A_VLAN = 5'h07,
    A_PKT = 5'h08, A_NFRAMES = 5'h09, A_TIME_LO = 5'h0A, A_TIME_HI = 5'h0B,
    A_NBURSTS = 5'h0C, A_BURST_LO = 5'h0D, A_BURST_HI = 5'h0E,
    A_SLEEP_LO = 5'h0F, A_SLEEP_HI = 5'h10, A_STATUS = 5'h11,
    A_CALC_S = 5'h12, A_CALC_I = 5'h13, A_CALC_F = 5'h14, A_FRAMES = 5'h15,
    A_BURSTS = 5'h16, A_ELAP_LO = 5'h17, A_ELAP_HI = 5'h18
  } addr_e;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg           <= '0;
      cfg.ethertype <= PROFINET_ETHERTYPE;
      cfg.pkt_size  <= PKT_W'(60);
      cfg.load_pct  <= 7'd100;
      start         <= 1'b0;
      abort         <= 1'b0;
    end else begin
      start <= 1'b0;
      abort <= 1'b0;
      if (wr_en) begin
        case (addr_e'(wr_addr))
          A_CTRL: begin
            start       <= wr_data[0];
            abort       <= wr_data[1];
            cfg.mode    <= mode_e'(wr_data[3:2]);
            cfg.rate    <= rate_e'(wr_data[4]);
            cfg.port    <= wr_data[6:5];
            cfg.vlan_en <= wr_data[7];
          end
          A_LOAD:     cfg.load_pct         <= wr_data[6:0];
          A_DST_LO:   cfg.dst_mac[31:0]    <= wr_data;
          A_DST_HI:   cfg.dst_mac[47:32]   <= wr_data[15:0];
          A_SRC_LO:   cfg.src_mac[31:0]    <= wr_data;
          A_SRC_HI:   cfg.src_mac[47:32]   <= wr_data[15:0];
          A_ETYPE:    cfg.ethertype        <= wr_data[15:0];
          A_VLAN:     {cfg.vlan_pri, cfg.vlan_cfi, cfg.vlan_id} <= wr_data[15:0];
          A_PKT:      cfg.pkt_size         <= wr_data[PKT_W-1:0];
          A_NFRAMES:  cfg.num_frames       <= wr_data;
          A_TIME_LO:  cfg.time_us[31:0]    <= wr_data;
          A_TIME_HI:  cfg.time_us[39:32]   <= wr_data[7:0];
          A_NBURSTS:  cfg.num_bursts       <= wr_data;
          A_BURST_LO: cfg.burst_us[31:0]   <= wr_data;
          A_BURST_HI: cfg.burst_us[39:32]  <= wr_data[7:0];
          A_SLEEP_LO: cfg.sleep_us[31:0]   <= wr_data;
          A_SLEEP_HI: cfg.sleep_us[39:32]  <= wr_data[7:0];
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else begin
      case (addr_e'(rd_addr))
        A_CTRL:     rd_data <= {24'd0, cfg.vlan_en, cfg.port, cfg.rate, cfg.mode, 2'b00};
        A_LOAD:     rd_data <= {25'd0, cfg.load_pct};
        A_DST_LO:   rd_data <= cfg.dst_mac[31:0];
        A_DST_HI:   rd_data <= {16'd0, cfg.dst_mac[47:32]};
        A_SRC_LO:   rd_data <= cfg.src_mac[31:0];
        A_SRC_HI:   rd_data <= {16'd0, cfg.src_mac[47:32]};
        A_ETYPE:    rd_data <= {16'd0, cfg.ethertype};
        A_VLAN:     rd_data <= {16'd0, cfg.vlan_pri, cfg.vlan_cfi, cfg.vlan_id};
        A_PKT:      rd_data <= 32'(cfg.pkt_size);
        A_NFRAMES:  rd_data <= cfg.num_frames;
        A_TIME_LO:  rd_data <= cfg.time_us[31:0];
        A_TIME_HI:  rd_data <= {24'd0, cfg.time_us[39:32]};
        A_NBURSTS:  rd_data <= cfg.num_bursts;
        A_BURST_LO: rd_data <= cfg.burst_us[31:0];
        A_BURST_HI: rd_data <= {24'd0, cfg.burst_us[39:32]};
        A_SLEEP_LO: rd_data <= cfg.sleep_us[31:0];
        A_SLEEP_HI: rd_data <= {24'd0, cfg.sleep_us[39:32]};
        A_STATUS:   rd_data <= {28'd0, st_sleeping, st_err, st_done, st_busy};
        A_CALC_S:   rd_data <= 32'(calc_s);
        A_CALC_I:   rd_data <= 32'(calc_i);
        A_CALC_F:   rd_data <= calc_f;
        A_FRAMES:   rd_data <= frames_sent;
        A_BURSTS:   rd_data <= bursts_sent;
        A_ELAP_LO:  rd_data <= elapsed[31:0];
        A_ELAP_HI:  rd_data <= {16'd0, elapsed[47:32]};
        default:    rd_data <= '0;
      endcase
    end
  end

endmodule
