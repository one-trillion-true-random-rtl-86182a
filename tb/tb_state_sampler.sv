// tb_state_sampler: checks bit capture, polarity, the synchroniser delay and
// the reset-error counter.
//
// mtj_in is driven with random levels; verify and measure strobes come at
// random times. The testbench keeps its own history of mtj_in and expects
// every output one clock after its strobe, equal to mtj_in two clocks before
// the strobe (the synchroniser depth). Reset errors are counted in the
// testbench and compared with reset_err_count.
`timescale 1ns/1ps
module tb_state_sampler;
  logic clk = 0, rst_n = 0;
  logic mtj_in = 0, verify_strobe = 0, measure_strobe = 0;
  logic bit_valid, bit_out, reset_err;
  logic [31:0] reset_err_count;
  int checks = 0, failures = 0;
  int exp_errs = 0, ones = 0, zeros = 0;
  logic [3:0] hist;   // hist[0] = mtj_in applied for the coming edge
  logic vs_d, ms_d, exp_level;

  always #1 clk = ~clk;

  state_sampler #(.SYNC_STAGES(2), .ERR_W(32)) dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    hist = '0;
    vs_d = 0; ms_d = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // outputs here come from the edge just passed; its strobes (vs_d,
      // ms_d) sampled the synchronised level = mtj_in as applied two edges
      // earlier (hist[2]; hist[0] is the value applied for that edge)
      exp_level = hist[2];
      checks++;
      if (bit_valid !== ms_d || reset_err !== (vs_d && exp_level)) begin
        failures++;
        $display("FAIL n=%0d bit_valid=%b/%b reset_err=%b", n, bit_valid, ms_d, reset_err);
      end
      if (ms_d) begin
        checks++;
        if (bit_out !== exp_level) begin failures++; $display("FAIL n=%0d bit %b/%b", n, bit_out, exp_level); end
        if (exp_level) ones++; else zeros++;
      end
      if (vs_d && exp_level) exp_errs++;
      checks++;
      if (reset_err_count !== 32'(exp_errs)) begin
        failures++; $display("FAIL n=%0d err count %0d/%0d", n, reset_err_count, exp_errs);
      end
      // new stimulus for the coming edge
      mtj_in         = 1'($urandom_range(0, 1));
      verify_strobe  = ($urandom_range(0, 9) == 0);
      measure_strobe = ($urandom_range(0, 6) == 0);
      hist = {hist[2:0], mtj_in};
      vs_d = verify_strobe; ms_d = measure_strobe;
    end
    checks++;
    if (ones == 0 || zeros == 0 || exp_errs == 0) begin
      failures++; $display("FAIL stimulus did not cover 0, 1 and reset errors");
    end
    $display("bits: %0d ones, %0d zeros, %0d reset errors", ones, zeros, exp_errs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
