// state_sampler: turns the amplified junction current into random bits.
//
// The transimpedance amplifier output reaches the FPGA as a one-bit signal:
// high when the junction carries a large current (parallel state, low
// resistance) and low otherwise. It is asynchronous to the sample clock, so it
// first passes a SYNC_STAGES-flop synchroniser. On measure_strobe the
// synchronised level is the random bit of this pulse cycle: P = 1, AP = 0.
// On verify_strobe the junction should just have been reset to AP; a high
// level there is a reset error, which is pulsed on reset_err and counted in a
// saturating counter.
//
// Timing: bit_out/bit_valid and reset_err appear one clock after their strobe
// and reflect mtj_in as it was SYNC_STAGES clocks before the strobe.
//
// The polarity (P = 1) and the verify step follow the published procedure. The
// synchroniser, the saturating error counter and the choice to keep the bit
// of a cycle whose verify failed are this design's own.
module state_sampler #(
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned ERR_W       = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mtj_in,
  input  logic             verify_strobe,
  input  logic             measure_strobe,
  output logic             bit_valid,
  output logic             bit_out,
  output logic             reset_err,
  output logic [ERR_W-1:0] reset_err_count
);

  logic [SYNC_STAGES-1:0] sync;
  logic                   level;

  always_ff @(posedge clk) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[SYNC_STAGES-2:0], mtj_in};
  end
  assign level = sync[SYNC_STAGES-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bit_valid       <= 1'b0;
      bit_out         <= 1'b0;
      reset_err       <= 1'b0;
      reset_err_count <= '0;
    end else begin
      bit_valid <= measure_strobe;
      if (measure_strobe) bit_out <= level;
      reset_err <= verify_strobe && level;
      if (verify_strobe && level && (reset_err_count != '1))
        reset_err_count <= reset_err_count + ERR_W'(1);
    end
  end

  initial assert (SYNC_STAGES >= 2) else $error("state_sampler: SYNC_STAGES must be at least 2");

endmodule
