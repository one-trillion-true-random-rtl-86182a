// tb_pulse_sequencer: checks the reset/verify/write/measure pulse cycle.
//
// Runs the default 43-tick cycle, then a second configuration with another
// period and windows, then pauses with enable low. For every clock the
// expected switch mask, phase and strobes are computed in the testbench from
// its own tick count (the outputs lag the tick by one clock) and compared.
// Also checks that cycle_start repeats every cfg.period clocks (the pulse
// rate) and counts the closed-switch ticks per phase in the default cycle.
`timescale 1ns/1ps
module tb_pulse_sequencer;
  import mtj_trng_pkg::*;

  logic clk = 0, rst_n = 0, enable = 0;
  pulse_cfg_t cfg;
  logic [7:0] sw_en;
  phase_e phase;
  logic verify_strobe, measure_strobe, cycle_start;
  int checks = 0, failures = 0;

  always #1.0667 clk = ~clk;   // 468.75 MHz

  pulse_sequencer dut (.*);

  // expected outputs for tick t under configuration c
  function automatic void expect_for(input pulse_cfg_t c, input int t,
                                     output logic [7:0] m, output phase_e p,
                                     output logic vs, output logic ms);
    phase_e names[4] = '{PH_RESET, PH_VERIFY, PH_WRITE, PH_MEASURE};
    m = '0; p = PH_IDLE;
    for (int k = 3; k >= 0; k--)
      if (t >= int'(c.win[k].start) && t < int'(c.win[k].start) + int'(c.win[k].len)) begin
        m = c.win[k].sw_mask; p = names[k];
      end
    vs = (c.win[1].len != 0) && (t == int'(c.win[1].start) + int'(c.verify_ofs));
    ms = (c.win[3].len != 0) && (t == int'(c.win[3].start) + int'(c.measure_ofs));
  endfunction

  task automatic run_cycles(input pulse_cfg_t c, input int ncycles);
    int t = 0;
    int last_start = -1, n = 0;
    logic [7:0] m; phase_e p; logic vs, ms;
    cfg = c;
    enable = 1;
    @(posedge clk);            // counter leaves 0 here; outputs show tick 0 next
    for (int k = 0; k < ncycles * int'(c.period); k++) begin
      @(negedge clk);
      expect_for(c, t, m, p, vs, ms);
      checks++;
      if (sw_en !== m || phase !== p || verify_strobe !== vs || measure_strobe !== ms
          || cycle_start !== (t == 0)) begin
        failures++;
        $display("FAIL tick %0d: sw_en=%h/%h phase=%s/%s vs=%b/%b ms=%b/%b cs=%b",
                 t, sw_en, m, phase.name(), p.name(), verify_strobe, vs, measure_strobe, ms, cycle_start);
      end
      if (cycle_start) begin
        if (last_start >= 0) begin
          checks++;
          if (n - last_start != int'(c.period)) begin
            failures++;
            $display("FAIL cycle length %0d, expected %0d", n - last_start, c.period);
          end
        end
        last_start = n;
      end
      n++;
      t = (t + 1) % int'(c.period);
    end
  endtask

  initial begin
    pulse_cfg_t c2;
    int on_ticks [4];
    cfg = DEFAULT_PULSE_CFG;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // outputs stay quiet while disabled
    repeat (5) @(negedge clk);
    checks++;
    if (sw_en !== 0 || verify_strobe || measure_strobe) begin
      failures++; $display("FAIL outputs active while disabled");
    end

    // default cycle: 43 ticks = 10.9 MHz at 468.75 MHz
    checks++;
    if (DEFAULT_PULSE_CFG.period != 43) begin failures++; $display("FAIL default period"); end
    fork
      run_cycles(DEFAULT_PULSE_CFG, 4);
      begin
        on_ticks = '{0, 0, 0, 0};
        repeat (2 * 43) begin
          @(negedge clk);
          if (sw_en == 8'h01) on_ticks[0]++;
          if (sw_en == 8'h02) on_ticks[1]++;
          if (sw_en == 8'h10) on_ticks[2]++;
          if (sw_en == 8'h04) on_ticks[3]++;
        end
      end
    join
    // two full cycles seen in 86 ticks: 7 + 6 + 5 + 6 ticks each
    checks++;
    if (on_ticks[0] != 14 || on_ticks[1] != 12 || on_ticks[2] != 10 || on_ticks[3] != 12) begin
      failures++;
      $display("FAIL switch-on ticks %0d %0d %0d %0d", on_ticks[0], on_ticks[1], on_ticks[2], on_ticks[3]);
    end

    // restart with another configuration (inputs change on falling edges)
    @(negedge clk);
    enable = 0;
    @(negedge clk);
    c2 = DEFAULT_PULSE_CFG;
    c2.period       = 8'd20;
    c2.win[0]       = '{start: 8'd1,  len: 8'd3, sw_mask: 8'h81};
    c2.win[1]       = '{start: 8'd5,  len: 8'd2, sw_mask: 8'h02};
    c2.win[2]       = '{start: 8'd8,  len: 8'd2, sw_mask: 8'h60};
    c2.win[3]       = '{start: 8'd12, len: 8'd4, sw_mask: 8'h0C};
    c2.verify_ofs   = 8'd1;
    c2.measure_ofs  = 8'd2;
    run_cycles(c2, 5);

    enable = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (sw_en !== 0 || phase !== PH_IDLE) begin failures++; $display("FAIL not idle after disable"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
