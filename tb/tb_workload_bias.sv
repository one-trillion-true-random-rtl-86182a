// tb_workload_bias: the long run of the published experiment, shortened.
//
// The published run produced 2x10^12 raw bits whose switching probability
// drifted: P = 0.5 + eps with eps = +0.027 over the first half of the run
// and eps = -0.0015 over the second. The host split the stream into halves
// and XORed them bit by bit, which leaves a bias of about -2*eps1*eps2.
// Here the junction model switches with P = 0.527 for the first HALF_BITS
// bits and P = 0.4985 for the next HALF_BITS, the reset never fails, and the
// generator runs at its default sizes. The testbench plays the host: it
// reads the UDP payloads (bytes in order, MSB first), checks every bit
// against the junction model, prints the switching probability per bin of
// BIN_BITS bits, and checks, within four standard deviations, the bias of
// each half and of their XOR. It also checks that no reset error was counted
// and that no word was dropped.
`timescale 1ps/1ps
module tb_workload_bias;
  import mtj_trng_pkg::*;
  localparam int HALF_BITS = 40960;     // 5 frames of 8192 bits
  localparam int BIN_BITS  = 8192;

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

  always #1067 clk_smp = ~clk_smp;
  always #3200 clk_eth = ~clk_eth;

  mtj_trng_top dut (.*);

  mtj_board_model #(.P_SWITCH_PPM(527000), .RESET_FAIL_PPM(0)) board (
    .clk(clk_smp), .sw_en, .mtj_in, .p_state, .written_valid, .written_state,
    .reset_fail_count);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // coin flips from the model; drift to the second probability half way
  bit flips [$];
  int made = 0;
  always @(posedge clk_smp) if (written_valid && enable) begin
    flips.push_back(written_state);
    made++;
    if (made == HALF_BITS) board.p_switch_ppm = 498500;
  end

  // host: unpack payloads
  bit rx [$];
  logic [7:0] fb [$];
  int frames = 0;
  always @(posedge clk_eth) if (rst_eth_n && tx_tvalid && tx_tready) begin
    for (int b = 0; b < 8; b++) if (tx_tkeep[b]) fb.push_back(tx_tdata[8*b +: 8]);
    if (tx_tlast) begin
      for (int i = 42; i < fb.size(); i++)
        for (int k = 7; k >= 0; k--) rx.push_back(fb[i][k]);
      fb.delete();
      frames++;
    end
  end

  always @(negedge clk_eth) tx_tready <= ($urandom_range(0, 9) != 0);

  function automatic real eps_of(int from, int n);
    int ones = 0;
    for (int i = from; i < from + n; i++) ones += rx[i];
    return real'(ones) / real'(n) - 0.5;
  endfunction

  initial begin
    int mism = 0, xones = 0;
    real e1, e2, ex, sigma;
    pulse_cfg = DEFAULT_PULSE_CFG;
    net_cfg   = DEFAULT_NET_CFG;
    repeat (4) @(posedge clk_eth);
    rst_smp_n = 1; rst_eth_n = 1;
    @(negedge clk_smp) enable = 1;
    wait (rx.size() >= 2 * HALF_BITS);
    @(negedge clk_smp);

    for (int i = 0; i < 2 * HALF_BITS; i++) if (rx[i] != flips[i]) mism++;
    chk(mism == 0, $sformatf("%0d received bits differ from the junction's flips", mism));

    for (int b = 0; b < 2 * HALF_BITS / BIN_BITS; b++)
      $display("bin %0d: P = %0.4f", b, 0.5 + eps_of(b * BIN_BITS, BIN_BITS));

    sigma = 0.5 / $sqrt(real'(HALF_BITS));
    e1 = eps_of(0, HALF_BITS);
    e2 = eps_of(HALF_BITS, HALF_BITS);
    for (int i = 0; i < HALF_BITS; i++) xones += rx[i] ^ rx[HALF_BITS + i];
    ex = real'(xones) / real'(HALF_BITS) - 0.5;
    $display("eps first half %0.4f, second half %0.4f, XOR %0.5f (sigma %0.4f)", e1, e2, ex, sigma);
    chk(e1 > 0.027 - 4 * sigma && e1 < 0.027 + 4 * sigma, "first-half bias");
    chk(e2 > -0.0015 - 4 * sigma && e2 < -0.0015 + 4 * sigma, "second-half bias");
    chk(ex > -4 * sigma && ex < 4 * sigma, "XOR bias");
    chk(status.reset_errors == 0, "reset errors with a perfect reset");
    chk(status.dropped_words == 0, "words dropped");
    chk(status.frames_sent == 32'(frames), "frames_sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * HALF_BITS * 43 + 20 * 8192 * 43) @(posedge clk_smp);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
