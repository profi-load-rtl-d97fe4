// load_calc -- works out the frame size, interframe gap and frame count of
// a run from the user's parameters.
//
// With P the packet size (MAC addresses, Ethertype and payload), the frame
// occupies S = P + 24 byte times on the line (7 preamble, 1 delimiter,
// 4 FCS, 12 minimum gap), or P + 28 with a VLAN tag. To hold a load of L %
// each frame is followed by
//     I = I_d + I_L,   I_d = 12,   I_L = S * (1/L - 1) = floor(S*(100-L)/L)
// byte times of idle line, so that one frame starts every S/L byte times.
// For the time and burst features the number of frames that fit in the
// duration T (microseconds) at line rate R (Mbit/s) is
//     F = floor(R * L * T / (800 * S)),
// i.e. F = R / (8 S) * L * T rounded down, so that the run never lasts
// longer than T. For the frame feature F is the user's frame count.
// These equations are the paper's; rounding both divisions down, the
// microsecond time unit and the accepted range of P and L are this
// design's choices.
//
// Interface: a `start` pulse samples `cfg`; `done` pulses when `frame_size`,
// `gap` and `frames` are valid (they then hold), about 67 clocks later for
// the frame feature and at most 2 * 64 + 6 for the others. `err` is set
// with `done` when L is not 1..100 or P not 60..1514; the other outputs are
// then meaningless. The divisions share one
// 64-bit sequential divider.
module load_calc
  import profiload_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfg_t              cfg,
  output logic              busy,
  output logic              done,
  output logic              err,
  output logic [SIZE_W-1:0] frame_size,  // S, byte times
  output logic [GAP_W-1:0]  gap,         // I, byte times
  output logic [CNT_W-1:0]  frames       // F
);

  localparam int unsigned P_MIN = 60;
  localparam int unsigned P_MAX = 1514;

  typedef enum logic [2:0] {C_IDLE, C_GAP_GO, C_GAP_WAIT, C_F_GO, C_F_WAIT} cstate_e;
  cstate_e st_q;

  logic             div_start, div_busy, div_done;
  logic [63:0]      div_a, div_b, div_q, div_r;
  logic [SIZE_W-1:0] s_q;
  logic [6:0]       l_q;
  logic [TIME_W-1:0] t_q;
  logic [9:0]       r_mbps;
  mode_e            mode_q;
  rate_e            rate_q;
  logic [CNT_W-1:0] nframes_q;

  seq_div #(.W(64)) u_div (
    .clk, .rst_n,
    .start    (div_start),
    .dividend (div_a),
    .divisor  (div_b),
    .busy     (div_busy),
    .done     (div_done),
    .quotient (div_q),
    .remainder(div_r)
  );

  assign r_mbps = (rate_q == RATE_1G) ? 10'd1000 : 10'd100;

  always_comb begin
    div_start = 1'b0;
    div_a     = '0;
    div_b     = 64'd1;
    case (st_q)
      C_GAP_GO: begin
        div_start = 1'b1;
        div_a     = 64'(s_q) * 64'(7'd100 - l_q);
        div_b     = 64'(l_q);
      end
      C_F_GO: begin
        div_start = 1'b1;
        div_a     = 64'(r_mbps) * 64'(l_q) * 64'(t_q);
        div_b     = 64'd800 * 64'(s_q);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= C_IDLE;
      busy       <= 1'b0;
      done       <= 1'b0;
      err        <= 1'b0;
      frame_size <= '0;
      gap        <= '0;
      frames     <= '0;
      s_q        <= '0;
      l_q        <= '0;
      t_q        <= '0;
      mode_q     <= MODE_FRAME;
      rate_q     <= RATE_100M;
      nframes_q  <= '0;
    end else begin
      done <= 1'b0;
      case (st_q)
        C_IDLE: if (start) begin
          busy       <= 1'b1;
          err        <= 1'b0;
          s_q        <= SIZE_W'(cfg.pkt_size) + SIZE_W'(OVERHEAD_BYTES)
                        + (cfg.vlan_en ? SIZE_W'(VLAN_BYTES) : '0);
          l_q        <= cfg.load_pct;
          t_q        <= (cfg.mode == MODE_BURST) ? cfg.burst_us : cfg.time_us;
          mode_q     <= cfg.mode;
          rate_q     <= cfg.rate;
          nframes_q  <= cfg.num_frames;
          if (cfg.load_pct == 7'd0 || cfg.load_pct > 7'd100 ||
              cfg.pkt_size < PKT_W'(P_MIN) || cfg.pkt_size > PKT_W'(P_MAX)) begin
            err  <= 1'b1;
            done <= 1'b1;
            busy <= 1'b0;
          end else begin
            st_q <= C_GAP_GO;
          end
        end
        C_GAP_GO: begin
          frame_size <= s_q;
          st_q       <= C_GAP_WAIT;
        end
        C_GAP_WAIT: if (div_done) begin
          gap <= GAP_W'(IFG_MIN_BYTES) + GAP_W'(div_q);
          if (mode_q == MODE_FRAME) begin
            frames <= nframes_q;
            done   <= 1'b1;
            busy   <= 1'b0;
            st_q   <= C_IDLE;
          end else begin
            st_q <= C_F_GO;
          end
        end
        C_F_GO: st_q <= C_F_WAIT;
        C_F_WAIT: if (div_done) begin
          frames <= (div_q > 64'(CNT_W'('1))) ? '1 : CNT_W'(div_q);
          done   <= 1'b1;
          busy   <= 1'b0;
          st_q   <= C_IDLE;
        end
        default: st_q <= C_IDLE;
      endcase
    end
  end

endmodule
