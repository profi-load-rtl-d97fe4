// profiload_top -- the Profi-Load network load generator.
//
// Generates Ethernet (by default Profinet, Ethertype 0x8892) traffic at a
// chosen share L of the line rate: every frame is followed by enough idle
// byte times that one frame starts every S/L byte times. It runs one of
// three features per run: a given number of frames, as many frames as fit
// in a given time, or a number of bursts separated by a sleep interval.
//
//   profiload_regs  processor-side registers: parameters in, results out
//   load_ctrl       run sequencer (features, bursts, sleep, counters)
//   load_calc       S, gap I and frame count F from the parameters
//   rate_tick       byte-time strobe for 100 Mbps or 1 Gbps
//   frame_builder   frame bytes, FCS and gap onto the line
//
// The byte stream is routed to the selected one of four load ports
// (A..D); the other ports stay idle. Per port, `port_tx[n].en` and
// `.data` form a byte-wide transmit interface towards a MAC/PHY: a new
// byte slot begins on each cycle with `tx_strobe` high (every cycle at
// 1 Gbps with the 125 MHz default clock, every 10th at 100 Mbps) and the
// values hold for the slot. The PHYs, the processor and its software, and
// the platform's bridge between them are outside this design; the
// register bus ports stand where the processor connects.
//
// The features, the frame model and the equations follow the paper; the
// one-clock structure, the register bus and the port routing are this
// design's own.
module profiload_top
  import profiload_pkg::*;
#(
  parameter int unsigned CLK_MHZ = 125
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor register bus
  input  logic               wr_en,
  input  logic [4:0]         wr_addr,
  input  logic [31:0]        wr_data,
  input  logic [4:0]         rd_addr,
  output logic [31:0]        rd_data,
  // run status (also readable in STATUS)
  output logic               busy,
  output logic               done,
  // load ports A..D
  output tx_byte_t [3:0]     port_tx,
  output logic               tx_strobe
);

  cfg_t              cfg, run_cfg;
  logic              start, abort, err, sleeping;
  logic              calc_start, calc_done, calc_err;
  logic [SIZE_W-1:0] calc_s;
  logic [GAP_W-1:0]  calc_i;
  logic [CNT_W-1:0]  calc_f;
  logic              byte_tick, tick_sync, frame_req, accept, builder_idle;
  logic [CNT_W-1:0]  frames_sent, bursts_sent;
  logic [ELAP_W-1:0] elapsed;
  tx_byte_t          tx;

  profiload_regs u_regs (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .cfg, .start, .abort,
    .st_busy(busy), .st_done(done), .st_err(err), .st_sleeping(sleeping),
    .calc_s, .calc_i, .calc_f, .frames_sent, .bursts_sent, .elapsed
  );

  load_calc u_calc (
    .clk, .rst_n,
    .start     (calc_start),
    .cfg       (run_cfg),
    .busy      (),
    .done      (calc_done),
    .err       (calc_err),
    .frame_size(calc_s),
    .gap       (calc_i),
    .frames    (calc_f)
  );

  load_ctrl #(.CLK_MHZ(CLK_MHZ)) u_ctrl (
    .clk, .rst_n, .cfg, .start, .abort,
    .calc_start, .calc_done, .calc_err, .calc_frames(calc_f),
    .run_cfg, .byte_tick, .tick_sync, .frame_req, .accept, .builder_idle,
    .busy, .done, .err, .sleeping, .frames_sent, .bursts_sent, .elapsed
  );

  rate_tick #(.CLK_MHZ(CLK_MHZ)) u_tick (
    .clk, .rst_n,
    .rate     (run_cfg.rate),
    .sync     (tick_sync),
    .byte_tick
  );

  frame_builder u_build (
    .clk, .rst_n,
    .cfg      (run_cfg),
    .gap      (calc_i),
    .byte_tick,
    .frame_req,
    .accept,
    .idle     (builder_idle),
    .tx
  );

  // Load port selection.
  always_comb begin
    port_tx = '0;
    port_tx[run_cfg.port] = tx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_strobe <= 1'b0;
    else        tx_strobe <= byte_tick;
  end

endmodule
