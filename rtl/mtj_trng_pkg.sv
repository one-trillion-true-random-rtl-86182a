// mtj_trng_pkg: types and default settings shared by the MTJ random bit
// generator firmware.
//
// The generator drives a magnetic tunnel junction (MTJ) through a repeating
// pulse cycle of four phases: reset, verify, write, measure. Each phase is a
// window of sample-clock ticks inside the cycle and closes a set of the eight
// analog switches that connect DAC channels to the summing amplifier.
// pulse_cfg_t bundles those windows; net_cfg_t holds the addresses used for
// the UDP frames; status_t collects the run counters.
//
// The defaults follow the published operating point where it is given: a
// 468.75 MHz sample clock and a pulse cycle near 10.9 MHz, i.e. 43 ticks.
// The phase windows, switch assignments and sample offsets are not published
// and are this design's own choice.
package mtj_trng_pkg;

  localparam int unsigned N_SW = 8;   // DAC channels / analog switches
  localparam int unsigned TW   = 8;   // width of every tick count

  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_RESET   = 3'd1,
    PH_VERIFY  = 3'd2,
    PH_WRITE   = 3'd3,
    PH_MEASURE = 3'd4
  } phase_e;

  // index of each phase in pulse_cfg_t.win
  localparam int unsigned W_RESET   = 0;
  localparam int unsigned W_VERIFY  = 1;
  localparam int unsigned W_WRITE   = 2;
  localparam int unsigned W_MEASURE = 3;

  typedef struct packed {
    logic [TW-1:0]   start;    // first tick of the window
    logic [TW-1:0]   len;      // ticks in the window, 0 = phase unused
    logic [N_SW-1:0] sw_mask;  // switches closed during the window
  } window_t;

  typedef struct packed {
    logic [TW-1:0] period;       // ticks per pulse cycle
    window_t [3:0] win;          // reset, verify, write, measure
    logic [TW-1:0] verify_ofs;   // sample tick, counted from verify start
    logic [TW-1:0] measure_ofs;  // sample tick, counted from measure start
  } pulse_cfg_t;

  typedef struct packed {
    logic [47:0] src_mac;
    logic [47:0] dst_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
  } net_cfg_t;

  typedef struct packed {
    logic [47:0] bit_count;      // random bits produced (sample clock)
    logic [31:0] reset_errors;   // verify saw the junction in P (sample clock)
    logic [31:0] dropped_words;  // words lost to a full queue (sample clock)
    logic [31:0] frames_sent;    // UDP frames handed to the MAC (Ethernet clock)
  } status_t;

  // 468.75 MHz / 10.9 MHz = 43.0 ticks per cycle.
  localparam logic [TW-1:0] DEFAULT_PERIOD = 8'd43;

  // Channels 1-4 are taken as the positive outputs and 5-8 as the inverted
  // ones. Reset uses channel 1, verify 2, write 5 (negative), measure 3.
  localparam pulse_cfg_t DEFAULT_PULSE_CFG = '{
    period:      DEFAULT_PERIOD,
    win:         '{ // [3] measure, [2] write, [1] verify, [0] reset
                    '{start: 8'd25, len: 8'd6, sw_mask: 8'b0000_0100},
                    '{start: 8'd17, len: 8'd5, sw_mask: 8'b0001_0000},
                    '{start: 8'd9,  len: 8'd6, sw_mask: 8'b0000_0010},
                    '{start: 8'd0,  len: 8'd7, sw_mask: 8'b0000_0001}},
    verify_ofs:  8'd4,
    measure_ofs: 8'd4
  };

  // Locally administered MAC addresses, private IPv4 addresses.
  localparam net_cfg_t DEFAULT_NET_CFG = '{
    src_mac:  48'h02_00_00_00_00_01,
    dst_mac:  48'h02_00_00_00_00_02,
    src_ip:   {8'd192, 8'd168, 8'd1, 8'd10},
    dst_ip:   {8'd192, 8'd168, 8'd1, 8'd1},
    src_port: 16'd5000,
    dst_port: 16'd5001
  };

endpackage
