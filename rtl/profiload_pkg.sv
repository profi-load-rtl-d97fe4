// profiload_pkg -- types and constants shared by the Profi-Load network
// load generator.
//
// The byte counts of the Ethernet frame overhead (7-byte preamble, 1-byte
// start delimiter, 4-byte frame check sequence, 12-byte minimum interframe
// gap, 4-byte VLAN tag) and the Profinet Ethertype 0x8892 are those of the
// paper's frame model. The configuration struct carries the fields the user
// enters for a run (load %, MAC addresses, Ethertype, VLAN fields, packet
// size, load port, line rate and the chosen feature). The widths of those
// fields, and the choice of microseconds as the time unit, are this
// design's own.
package profiload_pkg;

  localparam int unsigned PREAMBLE_BYTES = 7;
  localparam int unsigned SFD_BYTES      = 1;
  localparam int unsigned FCS_BYTES      = 4;
  localparam int unsigned IFG_MIN_BYTES  = 12;
  localparam int unsigned VLAN_BYTES     = 4;
  // Overhead O of an untagged frame: preamble + SFD + FCS + minimum gap = 24.
  localparam int unsigned OVERHEAD_BYTES = PREAMBLE_BYTES + SFD_BYTES + FCS_BYTES + IFG_MIN_BYTES;

  localparam logic [7:0]  PREAMBLE_OCTET     = 8'h55;
  localparam logic [7:0]  SFD_OCTET          = 8'hD5;
  localparam logic [15:0] VLAN_TPID          = 16'h8100;
  localparam logic [15:0] PROFINET_ETHERTYPE = 16'h8892;

  // Field widths.
  localparam int unsigned PKT_W   = 11;  // P up to 2047 bytes (paper: 60..1514)
  localparam int unsigned SIZE_W  = 12;  // S = P + overhead
  localparam int unsigned GAP_W   = 24;  // I in byte times (L = 1 %: 99 * S)
  localparam int unsigned CNT_W   = 32;  // frame and burst counts
  localparam int unsigned TIME_W  = 40;  // durations in microseconds (about 12.7 days)
  localparam int unsigned ELAP_W  = 48;  // elapsed time in clock cycles

  // The three features of the HMI; only one is used per run.
  typedef enum logic [1:0] {
    MODE_FRAME = 2'd0,   // case 1: F frames at L %
    MODE_TIME  = 2'd1,   // case 2: L % for a duration T
    MODE_BURST = 2'd2    // case 3: bursts of L % separated by a sleep interval
  } mode_e;

  typedef enum logic {
    RATE_100M = 1'b0,    // Fast Ethernet
    RATE_1G   = 1'b1     // Gigabit Ethernet
  } rate_e;

  // Everything the user supplies for one run.
  typedef struct packed {
    mode_e              mode;
    rate_e              rate;
    logic [1:0]         port;        // load port A..D
    logic [6:0]         load_pct;    // L in percent, 1..100
    logic [47:0]        dst_mac;     // first octet of the address in [47:40]
    logic [47:0]        src_mac;
    logic [15:0]        ethertype;
    logic               vlan_en;
    logic [2:0]         vlan_pri;
    logic               vlan_cfi;
    logic [11:0]        vlan_id;
    logic [PKT_W-1:0]   pkt_size;    // P = MACs + Ethertype + payload, bytes
    logic [CNT_W-1:0]   num_frames;  // frame feature
    logic [TIME_W-1:0]  time_us;     // time feature
    logic [CNT_W-1:0]   num_bursts;  // burst feature
    logic [TIME_W-1:0]  burst_us;    // burst interval
    logic [TIME_W-1:0]  sleep_us;    // sleep interval
  } cfg_t;

  // One byte slot on the line towards a port.
  typedef struct packed {
    logic       en;     // a frame byte is on the line in this slot
    logic [7:0] data;
  } tx_byte_t;

endpackage
