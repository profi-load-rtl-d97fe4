// load_ctrl -- sequences one load-generation run.
//
// A `start` pulse latches the configuration (it then stays fixed for the
// run, so the registers can be rewritten meanwhile) and asks the load
// calculator for S, I and F. Then the run follows the chosen feature:
//   frame feature (case 1)  F = user's count, sent with gap I;
//   time feature  (case 2)  F frames that fit in T, sent with gap I;
//   burst feature (case 3)  `num_bursts` bursts of the F frames that fit in
//                           the burst interval, each burst after the first
//                           preceded by the sleep interval.
// While frames remain, `frame_req` is held high and each `accept` from the
// frame builder counts one frame. A burst ends on the first byte tick at
// which the builder is idle after its last frame, i.e. when the last
// frame's gap has been sent; the whole run thus lasts F * S / L byte times
// per burst plus the sleeps, the T' = E_L * F of the paper. Between bursts
// the line is idle for `sleep_us` * CLK_MHZ clock cycles (at least 3), then
// the byte timing is resynchronised and the next burst begins.
//
// `abort` ends a run gracefully: no new frame is requested, the frame on the
// line and its gap complete, then the run finishes. The counters the user
// reads back afterwards are `frames_sent`, `bursts_sent` and `elapsed`
// (clock cycles from the start of the first frame to the end of the last
// gap, sleeps included).
//
// The three features, the gap between frames and the sleep between bursts
// follow the paper. That a burst is not padded to the full burst interval
// before its sleep starts, the graceful abort and the cycle-count report
// are this design's choices.
module load_ctrl
  import profiload_pkg::*;
#(
  parameter int unsigned CLK_MHZ = 125
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start,
  input  logic              abort,
  // load calculator
  output logic              calc_start,
  input  logic              calc_done,
  input  logic              calc_err,
  input  logic [CNT_W-1:0]  calc_frames,
  // frame builder and byte timing
  output cfg_t              run_cfg,
  input  logic              byte_tick,
  output logic              tick_sync,
  output logic              frame_req,
  input  logic              accept,
  input  logic              builder_idle,
  // status
  output logic              busy,
  output logic              done,      // set at the end of a run, cleared by start
  output logic              err,       // run refused by the calculator
  output logic              sleeping,
  output logic [CNT_W-1:0]  frames_sent,
  output logic [CNT_W-1:0]  bursts_sent,
  output logic [ELAP_W-1:0] elapsed
);

  typedef enum logic [2:0] {S_IDLE, S_CALC_GO, S_CALC, S_RUN, S_SLEEP} state_e;
  state_e st_q;

  logic [CNT_W-1:0]     f_q;          // frames per run / burst
  logic [CNT_W-1:0]     left_q;       // frames still to request in this burst
  logic [CNT_W-1:0]     bursts_left_q;
  logic [TIME_W+7:0]    sleep_q;
  logic                 timing_q;
  logic                 burst_end;

  assign calc_start = (st_q == S_CALC_GO);
  assign frame_req  = (st_q == S_RUN) && (left_q != '0);
  assign burst_end  = (st_q == S_RUN) && (left_q == '0) && builder_idle && byte_tick;
  assign sleeping   = (st_q == S_SLEEP);
  assign busy       = (st_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q          <= S_IDLE;
      run_cfg       <= '0;
      f_q           <= '0;
      left_q        <= '0;
      bursts_left_q <= '0;
      sleep_q       <= '0;
      timing_q      <= 1'b0;
      tick_sync     <= 1'b0;
      done          <= 1'b0;
      err           <= 1'b0;
      frames_sent   <= '0;
      bursts_sent   <= '0;
      elapsed       <= '0;
    end else begin
      tick_sync <= 1'b0;
      if (timing_q) elapsed <= elapsed + 1'b1;

      case (st_q)
        S_IDLE: if (start) begin
          run_cfg     <= cfg;
          done        <= 1'b0;
          err         <= 1'b0;
          frames_sent <= '0;
          bursts_sent <= '0;
          elapsed     <= '0;
          st_q        <= S_CALC_GO;
        end
        S_CALC_GO: st_q <= S_CALC;
        S_CALC: if (calc_done) begin
          if (calc_err) begin
            err  <= 1'b1;
            done <= 1'b1;
            st_q <= S_IDLE;
          end else if (calc_frames == '0 ||
                       (run_cfg.mode == MODE_BURST && run_cfg.num_bursts == '0) || abort) begin
            done <= 1'b1;                    // nothing fits: finished at once
            st_q <= S_IDLE;
          end else begin
            f_q           <= calc_frames;
            left_q        <= calc_frames;
            bursts_left_q <= (run_cfg.mode == MODE_BURST) ? run_cfg.num_bursts : CNT_W'(1);
            tick_sync     <= 1'b1;
            st_q          <= S_RUN;
          end
        end
        S_RUN: begin
          if (accept) begin
            left_q      <= left_q - 1'b1;
            frames_sent <= frames_sent + 1'b1;
            timing_q    <= 1'b1;
          end
          if (abort) begin
            left_q        <= '0;
            bursts_left_q <= CNT_W'(1);
          end
          if (burst_end) begin
            bursts_sent <= bursts_sent + 1'b1;
            if (bursts_left_q <= CNT_W'(1)) begin
              timing_q <= 1'b0;
              done     <= 1'b1;
              st_q     <= S_IDLE;
            end else begin
              bursts_left_q <= bursts_left_q - 1'b1;
              sleep_q       <= (TIME_W+8)'(run_cfg.sleep_us) * (TIME_W+8)'(CLK_MHZ);
              st_q          <= S_SLEEP;
            end
          end
        end
        S_SLEEP: begin
          if (abort) begin
            timing_q <= 1'b0;
            done     <= 1'b1;
            st_q     <= S_IDLE;
          end else if (sleep_q <= (TIME_W+8)'(3)) begin
            // The cycle with tick_sync high and the byte tick after it make
            // up the last two cycles of the sleep; that tick starts the
            // first frame of the next burst.
            left_q    <= f_q;
            tick_sync <= 1'b1;
            st_q      <= S_RUN;
          end else begin
            sleep_q <= sleep_q - 1'b1;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // A frame is only requested while running, and only accepted when asked for.
  a_accept_req: assert property (@(posedge clk) accept |-> frame_req);

endmodule
