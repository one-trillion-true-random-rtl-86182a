// mtj_trng_top: FPGA firmware of a true random number generator built on a
// stochastically switched magnetic tunnel junction (MTJ).
//
// Each random bit is one pulse cycle of the junction: a large reset pulse
// forces the antiparallel (AP, high resistance) state, a small verify pulse
// checks that it did, a short write pulse of the opposite polarity flips the
// junction to the parallel (P) state with a probability near one half, and a
// small measure pulse reads the result (P = 1, AP = 0).
//
//   pulse_sequencer  counts the cycle in sample-clock ticks and drives sw_en,
//                    the eight analog switches that add DAC voltages into the
//                    junction drive; strobes the verify and measure samples
//   state_sampler    synchronises mtj_in (thresholded amplifier output),
//                    takes the random bit, counts reset errors
//   bit_packer       packs bits into 64-bit words, counts bits
//   bit_queue        dual-clock FIFO from clk_smp to clk_eth, drops when full
//   udp_framer       sends PAYLOAD_WORDS words per UDP frame to the 10G MAC
//
// Clocks: clk_smp is the 468.75 MHz sample clock (43 ticks per 10.9 MHz pulse
// cycle with the default settings); clk_eth is the MAC user clock, assumed to
// be 156.25 MHz with a 64-bit stream. Each clock has its own synchronous,
// active-low reset. status.frames_sent belongs to clk_eth, the other status
// counters to clk_smp.
//
// Outside this module: the DAC, analog switches, inverting and summing
// amplifiers, the junction, the transimpedance amplifier and the Ethernet
// MAC/PHY. The division into blocks follows the published setup; the clock
// crossing, framing and configuration inputs are this design's own.
module mtj_trng_top
  import mtj_trng_pkg::*;
#(
  parameter int unsigned Q_ADDR_W      = 9,
  parameter int unsigned PAYLOAD_WORDS = 128
) (
  input  logic            clk_smp,
  input  logic            rst_smp_n,
  input  logic            clk_eth,
  input  logic            rst_eth_n,
  input  logic            enable,
  input  pulse_cfg_t      pulse_cfg,
  input  net_cfg_t        net_cfg,
  // analog board
  output logic [N_SW-1:0] sw_en,
  input  logic            mtj_in,
  // 10G Ethernet MAC transmit stream
  output logic [63:0]     tx_tdata,
  output logic [7:0]      tx_tkeep,
  output logic            tx_tvalid,
  output logic            tx_tlast,
  input  logic            tx_tready,
  output status_t         status
);

  phase_e          phase;
  logic            verify_strobe, measure_strobe, cycle_start;
  logic            bit_valid, bit_val, reset_err;
  logic            word_valid;
  logic [63:0]     word;
  logic            q_full, q_empty, q_pop;
  logic [63:0]     q_data;
  logic [Q_ADDR_W:0] q_count;

  pulse_sequencer u_seq (
    .clk            (clk_smp),
    .rst_n          (rst_smp_n),
    .enable         (enable),
    .cfg            (pulse_cfg),
    .sw_en          (sw_en),
    .phase          (phase),
    .verify_strobe  (verify_strobe),
    .measure_strobe (measure_strobe),
    .cycle_start    (cycle_start)
  );

  state_sampler #(.SYNC_STAGES(2), .ERR_W(32)) u_smp (
    .clk             (clk_smp),
    .rst_n           (rst_smp_n),
    .mtj_in          (mtj_in),
    .verify_strobe   (verify_strobe),
    .measure_strobe  (measure_strobe),
    .bit_valid       (bit_valid),
    .bit_out         (bit_val),
    .reset_err       (reset_err),
    .reset_err_count (status.reset_errors)
  );

  bit_packer #(.WORD_W(64), .CNT_W(48)) u_pack (
    .clk        (clk_smp),
    .rst_n      (rst_smp_n),
    .bit_valid  (bit_valid),
    .bit_in     (bit_val),
    .word_valid (word_valid),
    .word_out   (word),
    .bit_count  (status.bit_count)
  );

  bit_queue #(.DATA_W(64), .ADDR_W(Q_ADDR_W)) u_q (
    .wclk          (clk_smp),
    .wrst_n        (rst_smp_n),
    .wr_en         (word_valid),
    .wr_data       (word),
    .wr_full       (q_full),
    .wr_drop_count (status.dropped_words),
    .rclk          (clk_eth),
    .rrst_n        (rst_eth_n),
    .rd_en         (q_pop),
    .rd_data       (q_data),
    .rd_empty      (q_empty),
    .rd_count      (q_count)
  );

  udp_framer #(.PAYLOAD_WORDS(PAYLOAD_WORDS), .CNT_W(Q_ADDR_W + 1)) u_udp (
    .clk         (clk_eth),
    .rst_n       (rst_eth_n),
    .net         (net_cfg),
    .q_count     (q_count),
    .q_data      (q_data),
    .q_pop       (q_pop),
    .tx_tdata    (tx_tdata),
    .tx_tkeep    (tx_tkeep),
    .tx_tvalid   (tx_tvalid),
    .tx_tlast    (tx_tlast),
    .tx_tready   (tx_tready),
    .frame_count (status.frames_sent)
  );

  initial assert (PAYLOAD_WORDS <= (1 << Q_ADDR_W))
    else $error("mtj_trng_top: queue smaller than one payload");

  // The framer only pops words it has seen queued.
  a_pop_not_empty: assert property (@(posedge clk_eth) disable iff (!rst_eth_n) q_pop |-> !q_empty)
    else $error("mtj_trng_top: framer popped an empty queue");

endmodule
