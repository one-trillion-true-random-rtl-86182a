// tb_mtj_trng_top_full: the same end-to-end test as tb_mtj_trng_top, with the
// top at its default sizes (512-word queue, 1024-byte payload) and fewer
// frames around the long MAC stall. It uses the model of the analog board and
// junction (mtj_board_model).
//
// The junction switches with probability 1/2 on each write pulse and, at
// RESET_FAIL_PPM, fails to reset. The testbench records the state the model
// ends each write pulse in (the true coin flip) and packs those bits into
// 64-bit words exactly as the bit order of the design defines (oldest bit in
// bit 7 of byte 0). Every UDP payload word the MAC interface delivers must be
// the next of those words, except words the queue dropped while full; the
// number skipped must equal the design's dropped-word count.
//
// Phases: normal running with a MAC that stalls at random; a long MAC stall
// that overflows the queue; normal running again. Also checked: one bit per
// 43 sample clocks (10.9 MHz at 468.75 MHz), the reset-error count against
// the model, the frame count, and that each mechanism (bit 0, bit 1, reset
// error, MAC stall, queue overflow, frame sent) happened.
`timescale 1ps/1ps
module tb_mtj_trng_top_full;
  import mtj_trng_pkg::*;
  localparam int Q_AW = 9;     // the design defaults
  localparam int PW   = 128;
  localparam int FRAMES_BEFORE = 2;    // frames before the long stall
  localparam int FRAMES_AFTER  = 2;    // frames after it

  logic clk_smp = 0, clk_eth = 0, rst_smp_n = 0, rst_eth_n = 0, enable = 0;
  pulse_cfg_t pulse_cfg;
  net_cfg_t net_cfg;
  logic [7:0] sw_en;
  logic mtj_in;
  logic [63:0] tx_tdata;
  logic [7:0] tx_tkeep;
  logic tx_tvalid, tx_tlast, tx_tready = 0;
  status_t status;
  logic p_state, written_valid, written_state;
  int reset_fail_count;
  int checks = 0, failures = 0;
  bit stall_all = 0;

  always #1067 clk_smp = ~clk_smp;     // 468.75 MHz
  always #3200 clk_eth = ~clk_eth;     // 156.25 MHz

  mtj_trng_top dut (.*);

  mtj_board_model #(.P_SWITCH_PPM(500000), .RESET_FAIL_PPM(20000)) board (
    .clk(clk_smp), .sw_en, .mtj_in, .p_state, .written_valid, .written_state,
    .reset_fail_count);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // expected words from the model's coin flips
  logic [63:0] exp_words [$];
  logic [63:0] acc = 0;
  int nb = 0, ones = 0, zeros = 0;
  always @(posedge clk_smp) if (written_valid && enable) begin
    acc[8*(nb/8) + 7 - nb%8] = written_state;
    if (written_state) ones++; else zeros++;
    nb++;
    if (nb == 64) begin exp_words.push_back(acc); acc = 0; nb = 0; end
  end

  // receive frames
  logic [7:0] fb [$];
  int frames = 0, words_rx = 0, skipped = 0, stalls = 0;
  always @(posedge clk_eth) if (rst_eth_n) begin
    if (tx_tvalid && !tx_tready) stalls++;
    if (tx_tvalid && tx_tready) begin
      for (int b = 0; b < 8; b++) if (tx_tkeep[b]) fb.push_back(tx_tdata[8*b +: 8]);
      if (tx_tlast) begin
        chk(fb.size() == 42 + 8 * PW, $sformatf("frame %0d length %0d", frames, fb.size()));
        chk({fb[18], fb[19]} == 16'(frames), "ip identification");
        for (int w = 0; w < PW && fb.size() == 42 + 8 * PW; w++) begin
          logic [63:0] got;
          bit found;
          found = 0;
          for (int b = 0; b < 8; b++) got[8*b +: 8] = fb[42 + 8*w + b];
          while (exp_words.size() > 0 && !found) begin
            if (exp_words[0] == got) found = 1;
            else skipped++;
            void'(exp_words.pop_front());
          end
          words_rx++;
          chk(found, $sformatf("payload word %0d of frame %0d not among generated words", w, frames));
        end
        fb.delete();
        frames++;
      end
    end
  end

  always @(negedge clk_eth) tx_tready <= !stall_all && ($urandom_range(0, 4) != 0);

  initial begin
    longint b0;
    pulse_cfg = DEFAULT_PULSE_CFG;
    net_cfg   = DEFAULT_NET_CFG;
    repeat (4) @(posedge clk_eth);
    rst_smp_n = 1; rst_eth_n = 1;
    @(negedge clk_smp) enable = 1;

    // rate: one bit per 43 sample clocks
    repeat (500) @(negedge clk_smp);
    b0 = longint'(status.bit_count);
    repeat (43 * 200) @(negedge clk_smp);
    chk(longint'(status.bit_count) - b0 == 200, $sformatf("bit rate: %0d bits in 8600 clocks", longint'(status.bit_count) - b0));

    wait (frames == FRAMES_BEFORE);
    chk(status.dropped_words == 0, "drops while the MAC kept up");
    stall_all = 1;
    // hold the MAC long enough for the queue to overflow
    repeat (((1 << Q_AW) + 2 * PW + 4) * 64 * 43) @(posedge clk_smp);
    chk(status.dropped_words > 0, "queue did not overflow during MAC stall");
    stall_all = 0;
    wait (frames == FRAMES_BEFORE + FRAMES_AFTER + (1 << Q_AW) / PW);
    @(negedge clk_smp);
    chk(status.frames_sent == 32'(frames), "frames_sent");
    chk(skipped == int'(status.dropped_words), $sformatf("skipped %0d words, design dropped %0d", skipped, status.dropped_words));
    chk(status.reset_errors == 32'(reset_fail_count), $sformatf("reset errors %0d, model %0d", status.reset_errors, reset_fail_count));
    chk(status.bit_count >= 48'(64 * words_rx), "bit_count");
    // every mechanism happened
    chk(ones > 0,                 "no bit 1");
    chk(zeros > 0,                "no bit 0");
    chk(reset_fail_count > 0,     "no reset error");
    chk(stalls > 0,               "no MAC stall");
    chk(status.dropped_words > 0, "no queue overflow");
    chk(frames > 0,               "no frame");
    $display("frames %0d words %0d ones %0d zeros %0d reset_errors %0d stalls %0d dropped %0d",
             frames, words_rx, ones, zeros, status.reset_errors, stalls, status.dropped_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((FRAMES_BEFORE + FRAMES_AFTER + 8) * PW * 64 * 43 + ((1 << Q_AW) + 2 * PW + 4) * 64 * 43) @(posedge clk_smp);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
