// mtj_board_model: behavioural model (not synthesizable) of the analog board
// and the junction, for testbenches only.
//
// Eight DAC channel voltages (mV, parameters) are summed for every closed
// switch. The junction is a two-state device: P (1 kOhm) or AP (2 kOhm). A
// drive of at least RESET_MV puts it in AP when the pulse ends, except that
// with probability RESET_FAIL_PPM it stays as it was (a reset error). A drive
// at or below WRITE_MV flips AP to P when the pulse ends with probability
// P_SWITCH_PPM (held in p_switch_ppm, which a testbench may change to model
// drift). The transimpedance amplifier and the FPGA input threshold are
// modelled as "current above THRESH_UA", delayed by DELAY sample clocks.
//
// p_state is the junction state (1 = P). At each end of a write pulse the
// model records the new state in written_state / written_valid, so a
// testbench can compare the bits the firmware reports with what happened;
// reset_fail_count counts the failed resets a verify read can see.
module mtj_board_model #(
  parameter int CH1_MV = 450, CH2_MV = 150, CH3_MV = 150, CH4_MV = 0,
  parameter int CH5_MV = -300, CH6_MV = -300, CH7_MV = -300, CH8_MV = -300,
  parameter int R_P_OHM        = 1000,
  parameter int R_AP_OHM       = 2000,
  parameter int THRESH_UA      = 100,
  parameter int RESET_MV       = 400,
  parameter int WRITE_MV       = -200,
  parameter int P_SWITCH_PPM   = 500000,
  parameter int RESET_FAIL_PPM = 0,
  parameter int DELAY          = 1
) (
  input  logic       clk,
  input  logic [7:0] sw_en,
  output logic       mtj_in,
  output logic       p_state,
  output logic       written_valid,
  output logic       written_state,
  output int         reset_fail_count   // failed resets that left it in P
);

  int   ch_mv [8];
  int   p_switch_ppm = P_SWITCH_PPM;   // a testbench may change it at run time
  int   v_mv, i_ua;
  logic in_reset, in_write, was_reset, was_write;
  logic [DELAY:0] pipe;

  initial begin
    ch_mv = '{CH1_MV, CH2_MV, CH3_MV, CH4_MV, CH5_MV, CH6_MV, CH7_MV, CH8_MV};
    p_state       = 1'b0;
    was_reset     = 1'b0;
    was_write     = 1'b0;
    pipe          = '0;
    written_valid = 1'b0;
    written_state = 1'b0;
    reset_fail_count = 0;
  end

  always_comb begin
    v_mv = 0;
    for (int c = 0; c < 8; c++) if (sw_en[c]) v_mv += ch_mv[c];
    i_ua     = v_mv * 1000 / (p_state ? R_P_OHM : R_AP_OHM);
    in_reset = (v_mv >= RESET_MV);
    in_write = (v_mv <= WRITE_MV);
  end

  always @(posedge clk) begin
    written_valid <= 1'b0;
    if (was_reset && !in_reset) begin
      if (($urandom % 1000000) >= RESET_FAIL_PPM) p_state <= 1'b0;
      else if (p_state) reset_fail_count <= reset_fail_count + 1;
    end
    if (was_write && !in_write) begin
      if (!p_state && (($urandom % 1000000) < p_switch_ppm)) begin
        p_state       <= 1'b1;
        written_state <= 1'b1;
      end else begin
        written_state <= p_state;
      end
      written_valid <= 1'b1;
    end
    was_reset <= in_reset;
    was_write <= in_write;
    pipe      <= {pipe[DELAY-1:0], (i_ua > THRESH_UA)};
  end

  assign mtj_in = pipe[DELAY-1];

endmodule
