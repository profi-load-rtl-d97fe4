# Profi-Load: a hardware generator of controlled Profinet network load

Industrial devices on a Profinet network (PLCs, I/O devices, drives) have to
keep their real-time behaviour when the network gets busy. Testing that needs
a traffic source that puts a *known, steady share* of the line rate on the
wire: 25 % of a 100 Mbit/s link, say, for exactly 40 frames, or for 20 ms, or
in bursts with quiet periods between them. Software packet generators cannot
place frames with that accuracy; an FPGA can.

The idea is simple. A frame of S byte times (everything it occupies on the
wire, including the minimum 12-byte interframe gap) carries a load of L if a
new frame starts every S / L byte times. So the generator sends a frame, then
keeps the line idle for exactly as long as needed, and repeats. Everything
else in this design (three ways of deciding how many frames to send,
bursts, the register interface, port selection) is built around holding that
period to the byte.

This repository holds synthesizable SystemVerilog for that generator, one
clock domain, with self-checking testbenches. It is an RTL rendering of the
load-generation method described for the Profi-Load framework (Khaliq et al.,
"Profi-Load: An FPGA-Based Solution for Generating Network Load in Profinet
Communication"). That work ran the method on a commercial FPGA test platform
through its scripting layer; the gateware here is an independent, dedicated
implementation of the same behaviour, and everything about its internal
structure is this design's own (see *Where this design departs* below).

## 1. What a frame costs on the wire

The user gives the packet size **P**: destination MAC (6) + source MAC (6) +
Ethertype (2) + payload. Around it the line carries a fixed overhead **O**:

| part | bytes |
|---|---|
| preamble (0x55 ...) | 7 |
| start-of-frame delimiter (0xD5) | 1 |
| VLAN tag, only if enabled (0x8100 + priority/CFI/id) | 4 |
| frame check sequence (CRC-32) | 4 |
| minimum interframe gap | 12 |

**S = P + 24** untagged, **P + 28** tagged. Examples: P = 1514 gives
S = 1538; P = 60 gives S = 84; P = 1020 with a tag gives S = 1048.
The bytes actually driven (`en` high) per frame are S − 12.

On the wire the frame is: 7 × 0x55, 0xD5, destination MAC and source MAC
(most significant octet first), optional tag 0x81 0x00 {pri[2:0], cfi,
id[11:8]} {id[7:0]}, Ethertype (high octet first), payload, FCS (least
significant octet first). The payload is an incrementing byte count
0x00, 0x01, ... The FCS is the IEEE 802.3 CRC-32 over destination MAC through
payload, so frames pass any analyser.

## 2. Holding a load: the gap

With L the load as a fraction (the registers take whole percent 1..100):

    I_L = S × (1/L − 1)          extra gap, byte times
    I   = 12 + I_L               total idle byte times after each frame

Frame (S − 12 bytes) plus gap (I bytes) is S + I_L = S / L byte times: one
frame start every S / L. In the hardware I_L = floor(S × (100 − L) / L).

| run | S | I_L | I | frame period | at 100 Mbit/s |
|---|---|---|---|---|---|
| P = 1514, 25 % | 1538 | 4614 | 4626 | 6152 B | 492.16 µs |
| P = 60, 25 % | 84 | 252 | 264 | 336 B | 26.88 µs |
| P = 1020 + tag, 50 % | 1048 | 1048 | 1060 | 2096 B | 167.68 µs |

When S × (100 − L) is not a multiple of L the rounding makes the load
slightly higher than asked, by less than one byte time per frame period
(e.g. P = 128 at 30 %: S = 152, I_L = 354 instead of 354.67).

## 3. The three features

One run uses exactly one feature, chosen in CTRL.mode.

**Frame feature (mode 0).** Send F frames, F given by the user, with gap I.
The run lasts F × S / L byte times.

**Time feature (mode 1).** Hold the load for a duration T (microseconds).
The number of frames is

    F = floor( R × L% × T / (800 × S) )        R in Mbit/s, T in µs

i.e. R / (8 S) frames per second at full rate, times L, times T. Rounding
down means the run never exceeds T: 25 % of 84-byte frames for 20 ms gives
F = 744 and a run of 744 × 26.88 µs = 19.99872 ms; a 745th frame would
overrun. The shortfall (here 1.28 µs) is inherent, not an error.

**Burst feature (mode 2).** `num_bursts` bursts; each burst is a
time-feature run over the burst interval (F computed once from `burst_us`),
and between two bursts the line is idle for the sleep interval. There is no
sleep after the last burst, and a burst is not stretched to fill its
interval: it ends with the gap after its last frame, then the sleep begins.
Twenty 1-s bursts of 50 % tagged 1048-byte frames with 1 s sleep are
20 × 5963 frames and 20 × 0.99985 s + 19 × 1 s ≈ 39 s.

```
 burst 1 (F frames, period S/L)      sleep        burst 2 ...
|#___#___#___ ... #___|..................|#___#___ ...
 #: frame (S-12 bytes)  _: gap (I bytes)   .: sleep_us x CLK_MHZ clocks
```

A run reports back the frames sent, the bursts sent and the elapsed time in
clock cycles (first byte of the first frame to the end of the last gap,
sleeps included), so the user sees how many frames fitted and how long it
took.

## 4. Timing: why the period is exact

All of the generator runs from one clock, `CLK_MHZ` = 125 MHz by default.
`rate_tick` produces `byte_tick`, high on the first cycle of each byte slot:
every cycle at 1 Gbit/s (8 ns per byte), every 10th cycle at 100 Mbit/s
(80 ns). Nothing moves on the line except on a byte tick, so all timing is
counted in whole byte slots.

The frame builder and the controller meet through a level/accept handshake
that costs no slots:

- the controller holds `frame_req` high while frames remain in the burst;
- on a byte tick, if the builder is idle and `frame_req` is high, `accept`
  is high (combinationally) and the first preamble byte goes on the line at
  that clock edge;
- the builder then sends S − 12 frame bytes and I idle slots, and becomes
  idle again *at the start of the last idle slot*, so that the very next
  byte tick can start the next frame.

Consecutive frames therefore start exactly (S − 12 + I) byte ticks apart;
there are no bubbles at either rate, including 1 Gbit/s where every cycle is
a tick. The controller ends a burst on the first byte tick at which the
builder is idle with no frames left, which is the end of the last gap.

The sleep interval is counted in clock cycles (`sleep_us × CLK_MHZ`). Its
last two cycles restart the byte timing (`tick_sync` clears the divider, and
no tick is issued on that cycle), so every burst starts on a fresh byte
boundary and the idle time between bursts is exactly I byte times plus the
sleep. A sleep is at least 3 clock cycles.

The configuration is copied into the controller when a run starts, so the
registers may be rewritten during a run (to prepare the next one) without
disturbing it.

## 5. Blocks

```
 register bus ──► profiload_regs ──cfg──► load_ctrl ──run_cfg──► load_calc (seq_div)
        ▲               ▲ start/abort        │  ▲ S, I, F ◄────────────┘
        └─ status, S, I, F, counters ────────┘  │
                                              frame_req / accept / idle
 rate_tick ──byte_tick──► frame_builder (crc32_eth) ──tx──► port select ──► port_tx[A..D]
```

| file | role |
|---|---|
| `profiload_pkg.sv` | constants (overhead byte counts, 0x8892, 0x8100), mode and rate enums, `cfg_t`, `tx_byte_t` |
| `profiload_regs.sv` | register bank: parameters in, start/abort pulses, status and results out |
| `load_calc.sv` | S, I and F from the parameters; one shared 64-bit sequential divider (`seq_div.sv`); ≤ 134 clocks |
| `load_ctrl.sv` | run sequencer: features, bursts, sleep, abort, frame/burst/elapsed counters |
| `rate_tick.sv` | byte-slot strobe for 100 Mbit/s or 1 Gbit/s, with resynchronisation |
| `frame_builder.sv` | frame bytes, VLAN tag, payload, FCS, then the gap |
| `crc32_eth.sv` | byte-wide Ethernet CRC-32 |
| `profiload_top.sv` | wires the above and routes the stream to the selected load port |

Size after generic synthesis (no technology mapping): about 500 word-level
cells and 1400 flip-flops, most of them configuration registers and the
64-bit divider.

## 6. Interfaces of the top

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (125 MHz default); asynchronous active-low reset |
| `wr_en`, `wr_addr`, `wr_data` | in | 1, 5, 32 | register write, taking effect at the clock edge |
| `rd_addr`, `rd_data` | in/out | 5, 32 | register read, data one clock later |
| `busy`, `done` | out | 1 | run in progress; last run finished (cleared by the next start) |
| `port_tx[3:0]` | out | {en, data[7:0]} each | byte stream per load port A..D; idle on ports not selected |
| `tx_strobe` | out | 1 | a new byte slot begins on this cycle; `port_tx` holds for the slot |

`port_tx` is a byte-per-slot stream meant for a MAC/PHY adapter: at 1 Gbit/s
and 125 MHz it is GMII-like (one byte per clock); at 100 Mbit/s a byte holds
for 10 clocks and an adapter would split it into MII nibbles. The PHYs
themselves are not part of this design.

### Register map (32-bit words)

| addr | name | contents |
|---|---|---|
| 0x00 | CTRL | bit 0 start (pulse), 1 abort (pulse), 3:2 mode (0 frame, 1 time, 2 burst), 4 rate (0 = 100 Mbit/s, 1 = 1 Gbit/s), 6:5 port (0 = A .. 3 = D), 7 VLAN enable |
| 0x01 | LOAD | 6:0 load in percent, 1..100 |
| 0x02 / 0x03 | DST_LO / DST_HI | destination MAC [31:0] / [47:32] |
| 0x04 / 0x05 | SRC_LO / SRC_HI | source MAC [31:0] / [47:32] |
| 0x06 | ETHERTYPE | 15:0 (reset 0x8892, Profinet) |
| 0x07 | VLAN | 15:13 priority, 12 CFI, 11:0 id |
| 0x08 | PKT_SIZE | P, 60..1514 (reset 60) |
| 0x09 | NUM_FRAMES | frame feature |
| 0x0A / 0x0B | TIME | time feature, µs, 40 bits |
| 0x0C | NUM_BURSTS | burst feature |
| 0x0D / 0x0E | BURST | burst interval, µs, 40 bits |
| 0x0F / 0x10 | SLEEP | sleep interval, µs, 40 bits |
| 0x11 | STATUS (ro) | 0 busy, 1 done, 2 error, 3 sleeping |
| 0x12 / 0x13 / 0x14 | CALC_S / CALC_I / CALC_F (ro) | S, I, F of the last run |
| 0x15 / 0x16 | FRAMES / BURSTS (ro) | frames and bursts sent |
| 0x17 / 0x18 | ELAPSED (ro) | elapsed clock cycles, 48 bits |

A run is started by writing CTRL with bit 0 set (mode, rate, port and VLAN
bits are taken from the same write). A load of 0 or above 100 %, or P outside
60..1514, is refused: STATUS shows done and error and nothing is sent.
An abort lets the frame on the line and its gap finish, then ends the run.
Typical sequence: write 0x01..0x10, write CTRL with start, poll STATUS.done,
read 0x12..0x18.

## 7. Where this design departs from, or adds to, the described method

Taken from the described method: the frame model (P, overhead of preamble,
delimiter, FCS, 12-byte minimum gap and optional 4-byte tag), the gap
equation I = 12 + S(1/L − 1), the frame-count equation F = R/(8S)·L·T with
the run never exceeding T, the three features used one at a time, equal
burst and sleep intervals for all bursts, the user parameters (load %, MACs,
Ethertype, VLAN id/priority/CFI, packet size, load port A–D, line rate of
100 Mbit/s or 1 Gbit/s, frame count, duration, burst count, burst and sleep
intervals) and reporting frames sent and time spent.

This design's own choices:

- All computation and sequencing is in gateware. The original framework
  computed and scripted the run on a processor-plus-FPGA test platform; its
  processor, web interface, script interpreter, processor-to-logic bridge
  and traffic monitor are not reproduced. The register bus stands where a
  processor would connect.
- One 125 MHz clock and byte-slot strobes, rather than separate MII/GMII
  clocks; the PHY adaptation is left outside.
- Integer load percent; durations in microseconds (40 bits, ≈ 12.7 days);
  both divisions round down; P limited to 60..1514.
- Payload is an incrementing byte pattern (the original built packets with a
  host packet library).
- A burst is not padded to its full interval before its sleep starts.
- Graceful abort, configuration latched at start, elapsed time in clock
  cycles, the register map and reset values.
- Not built: variable burst and sleep intervals per burst (mentioned only
  as a possible extension), and receiving or monitoring traffic.

## 8. Simulation and verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Build any of them with plain Verilator 5:

    verilator --binary --timing -Wno-fatal -y rtl -y tb \
        rtl/profiload_pkg.sv tb/tb_profiload_top.sv --top-module tb_profiload_top
    ./obj_dir/Vtb_profiload_top

| testbench | what it checks |
|---|---|
| `tb_crc32_eth` | CRC-32 check value of "123456789" (0xCBF43926), random strings against a bit-serial reference |
| `tb_frame_builder` | every byte of tagged and untagged frames against a reference frame, gap length, tick spacing 1 and 3 clocks |
| `tb_load_calc` | the worked examples above, 200 random parameter sets against 64-bit arithmetic, refusals, latency |
| `tb_rate_tick` | 10 / 1 clocks per byte at 125 MHz, 20 / 2 at 250 MHz, resynchronisation |
| `tb_load_ctrl` | the three features with real calculator and builder: frame counts, lengths, gaps, sleep, elapsed cycles, refusal, abort |
| `tb_profiload_regs` | reset values, every field, start/abort pulses, status read-back |
| `tb_profiload_top` | end to end through the register bus on all four ports: all features, both rates, VLAN, refusal, abort, rewrite during a run; fails if any of these never happened |
| `tb_profiload_workloads` | the evaluation runs below at the default parameters, to the clock cycle (about 5 minutes) |

`tb/line_checker.sv` is the receiver model the top-level benches share: it
rebuilds each frame from the line, checks every field and the FCS, and keeps
the cycle of every frame start.

Results of `tb_profiload_workloads` at 125 MHz, 100 Mbit/s:

| run | S | I | F | frame period | elapsed |
|---|---|---|---|---|---|
| 40 frames, P = 1514, 25 % | 1538 | 4626 | 40 | 61520 clk = 492.16 µs | 19.6864 ms |
| 750 frames, P = 60, 25 % | 84 | 264 | 750 | 3360 clk = 26.88 µs | 20.16 ms |
| 25 %, P = 60, T = 20 ms | 84 | 264 | 744 | 3360 clk | 19.99872 ms |
| 50 %, P = 1020 tagged, 1 s bursts, 1 s sleep | 1048 | 1060 | 5963 / burst | 20960 clk = 167.68 µs | 2 bursts: 2.99975 s |

The elapsed times include the gap after the last frame. A measurement from
the first frame's start to the last frame's last byte is shorter by that
gap, I byte times.

For comparison, the published measurements of the original platform were
19.57 ms (oscilloscope) and 19.17 ms (packet capture) for the 40 long
frames and 18.14 ms (packet capture) for the 750 short ones, against ideal
first-start-to-last-byte spans of 19.316 ms and 20.139 ms. Capture
timestamps on a PC are coarse, which the original authors also note; the
per-frame period of 492.16 µs and 26.88 µs and the 20 ms run of 744 frames
ending 1.28 µs early were measured exactly as this design produces them.
In the published burst capture, the first frame of the second burst follows
the last frame of the first by about 1.0005 s, i.e. the sleep starts when
the burst's frames end, as here.

Limits of the verification: the burst run is simulated for two of the twenty
bursts of the original evaluation (all bursts are identical; the full run is
39 s of simulated time); nothing here has been run on an FPGA or against a
real PHY; the testbench CRC reference and the RTL implement the same
standard, independently written.

## 9. Changing it

- **Clock.** `CLK_MHZ` on `profiload_top` (and thus `rate_tick`,
  `load_ctrl`) must be a multiple of 125 so a byte is a whole number of
  clocks at both rates.
- **Field widths** (`PKT_W`, `GAP_W`, `CNT_W`, `TIME_W`, `ELAP_W`) are in
  `profiload_pkg`. Raising `P_MAX` in `load_calc` for jumbo frames needs
  wider `PKT_W` and `SIZE_W` as well (14 bits for 9000-byte frames).
- **Payload.** The pattern is one line in `frame_builder` (the `k < pay_end`
  branch); the CRC follows whatever is sent.
- **Rounding.** Both divisions are in `load_calc`; the remainder of the
  divider is available if a fractional-gap accumulator is wanted.
