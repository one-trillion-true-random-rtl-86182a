// pulse_sequencer: the cyclic reset / verify / write / measure state machine
// that shapes the voltage pulses applied to the magnetic tunnel junction.
//
// A tick counter runs from 0 to cfg.period-1 and wraps, so one pulse cycle
// (one random bit) takes cfg.period ticks of the sample clock. At each tick
// the counter is compared with the four phase windows of cfg; the window that
// contains it selects the phase and the set of analog switches to close. The
// switches connect DAC channels to a summing amplifier, so the junction sees
// the sum of the selected channel voltages. Outside all windows every switch
// is open and the junction sees 0 V. If windows overlap, the earlier phase
// in the order reset, verify, write, measure wins.
//
// Two one-tick strobes tell the sampler when to look at the junction current:
// verify_strobe at verify start + cfg.verify_ofs and measure_strobe at measure
// start + cfg.measure_ofs. cycle_start marks tick 0.
//
// Timing: all outputs are registered and change together, one clock after the
// counter value they are decoded from. An offset counts from the tick at which
// sw_en first shows the phase's mask, so it must cover the analog settling
// and the input synchroniser of the sampler.
//
// From the published design: the phase order, eight switched DAC channels
// and, by default, a 43-tick cycle (468.75 MHz / 43 = 10.9 MHz). The window
// positions, the switch per phase and the run-time configuration are this
// design's own. enable low (or reset) holds the counter at 0 with all
// switches open.
module pulse_sequencer
  import mtj_trng_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  pulse_cfg_t        cfg,
  output logic [N_SW-1:0]   sw_en,
  output phase_e            phase,
  output logic              verify_strobe,
  output logic              measure_strobe,
  output logic              cycle_start
);

  logic [TW-1:0] tick;
  logic          last_tick;

  assign last_tick = (tick >= cfg.period - TW'(1));

  always_ff @(posedge clk) begin
    if (!rst_n || !enable) tick <= '0;
    else if (last_tick)    tick <= '0;
    else                   tick <= tick + TW'(1);
  end

  // true when t lies in [start, start+len)
  function automatic logic in_window(logic [TW-1:0] t, window_t w);
    logic [TW:0] end_excl;
    end_excl = {1'b0, w.start} + {1'b0, w.len};
    return ({1'b0, t} >= {1'b0, w.start}) && ({1'b0, t} < end_excl);
  endfunction

  phase_e          phase_d;
  logic [N_SW-1:0] sw_d;

  always_comb begin
    phase_d = PH_IDLE;
    sw_d    = '0;
    if (in_window(tick, cfg.win[W_RESET])) begin
      phase_d = PH_RESET;   sw_d = cfg.win[W_RESET].sw_mask;
    end else if (in_window(tick, cfg.win[W_VERIFY])) begin
      phase_d = PH_VERIFY;  sw_d = cfg.win[W_VERIFY].sw_mask;
    end else if (in_window(tick, cfg.win[W_WRITE])) begin
      phase_d = PH_WRITE;   sw_d = cfg.win[W_WRITE].sw_mask;
    end else if (in_window(tick, cfg.win[W_MEASURE])) begin
      phase_d = PH_MEASURE; sw_d = cfg.win[W_MEASURE].sw_mask;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      sw_en          <= '0;
      phase          <= PH_IDLE;
      verify_strobe  <= 1'b0;
      measure_strobe <= 1'b0;
      cycle_start    <= 1'b0;
    end else begin
      sw_en          <= sw_d;
      phase          <= phase_d;
      verify_strobe  <= (cfg.win[W_VERIFY].len != '0) &&
                        (tick == cfg.win[W_VERIFY].start + cfg.verify_ofs);
      measure_strobe <= (cfg.win[W_MEASURE].len != '0) &&
                        (tick == cfg.win[W_MEASURE].start + cfg.measure_ofs);
      cycle_start    <= (tick == '0);
    end
  end

  // The sample points must fall inside their windows and the cycle must hold
  // at least two ticks.
  property p_cfg_ok;
    @(posedge clk) disable iff (!rst_n || !enable)
      (cfg.period >= TW'(2)) &&
      (cfg.verify_ofs  < cfg.win[W_VERIFY].len  || cfg.win[W_VERIFY].len  == '0) &&
      (cfg.measure_ofs < cfg.win[W_MEASURE].len || cfg.win[W_MEASURE].len == '0);
  endproperty
  a_cfg_ok: assert property (p_cfg_ok) else $error("pulse_sequencer: bad pulse configuration");

endmodule
