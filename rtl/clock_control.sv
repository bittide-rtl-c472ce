// clock_control: proportional bittide clock controller with FINC/FDEC output.
//
// Once every SAMPLE_PERIOD cycles of the always-on clock the controller reads
// the occupancies beta_j of all links selected by link_mask (0 = half full)
// and computes the relative correction
//
//     c_rel = k_p * sum_j beta_j
//
// It keeps c_est, the correction already applied to the clock board, as the
// running sum of all earlier pulse directions, and chooses the direction
//
//     c_inc = +1 if c_rel > c_est,  -1 if c_rel < c_est,  0 otherwise
//
// A +1 becomes a pulse on finc, a -1 a pulse on fdec; c_est then moves by one
// step. This is the paper's controller. Both corrections are kept in units of
// one clock-board step f_s, so c_est is an integer (number of FINC minus number
// of FDEC pulses), and the gain k_p is given in steps per frame of summed
// occupancy as the fixed-point number KP_NUM / 2^KP_FRAC (default 0.25; the
// paper gives k_p = 0.25 without a unit, and the step-unit reading is this
// design's). The paper uses a floating-point pipeline; this design uses
// integers, which the step-unit scaling makes exact.
//
// Timing: the occupancies are registered and summed on the sample strobe
// (cycle 0), c_rel is formed and compared in cycle 1, and the pulse starts in
// cycle 2 and lasts PULSE_CYCLES cycles. At most one pulse is sent per sample
// period, so PULSE_CYCLES must be below SAMPLE_PERIOD. SAMPLE_PERIOD = 125
// gives the paper's 1 MHz sample rate for a 125 MHz always-on clock (the
// always-on clock frequency is this design's assumption).
//
// Interface: clk/rst (always-on domain), enable, link_mask, occupancy[links];
// finc/fdec pulses; telemetry beta_sum, c_est, speed_change, sample_valid.
module clock_control #(
  parameter int unsigned NUM_LINKS     = bittide_pkg::NUM_LINKS,
  parameter int unsigned OCC_W         = bittide_pkg::OCC_W,
  parameter int unsigned CEST_W        = bittide_pkg::CEST_W,
  parameter int unsigned SAMPLE_PERIOD = 125,
  parameter int unsigned KP_NUM        = 64,
  parameter int unsigned KP_FRAC       = 8,
  parameter int unsigned PULSE_CYCLES  = 1,
  localparam int unsigned SUM_W        = OCC_W + $clog2(NUM_LINKS + 1),
  localparam int unsigned PROD_W       = SUM_W + 17
) (
  input  logic                               clk,
  input  logic                               rst,
  input  logic                               enable,
  input  logic [NUM_LINKS-1:0]               link_mask,
  input  logic signed [NUM_LINKS-1:0][OCC_W-1:0] occupancy,
  output logic                               finc,
  output logic                               fdec,
  output logic signed [SUM_W-1:0]            beta_sum,
  output logic signed [CEST_W-1:0]           c_est,
  output bittide_pkg::speed_change_e         speed_change,
  output logic                               sample_valid
);
  import bittide_pkg::*;

  localparam int unsigned CNT_W   = $clog2(SAMPLE_PERIOD + 1);
  localparam int unsigned PULSE_W = $clog2(PULSE_CYCLES + 1);

  logic [CNT_W-1:0]         sample_cnt;
  logic                     strobe;
  logic                     sum_valid;
  logic signed [SUM_W-1:0]  sum_now;
  logic signed [PROD_W-1:0] c_rel_fx;   // c_rel in steps, KP_FRAC fraction bits
  logic signed [PROD_W-1:0] c_est_fx;   // c_est in the same format
  speed_change_e            decision;
  logic [PULSE_W-1:0]       pulse_cnt;
  speed_change_e            pulse_dir;

  // sample strobe at SAMPLE_PERIOD intervals
  always_ff @(posedge clk) begin
    if (rst || !enable) begin
      sample_cnt <= '0;
      strobe     <= 1'b0;
    end else if (sample_cnt == CNT_W'(SAMPLE_PERIOD - 1)) begin
      sample_cnt <= '0;
      strobe     <= 1'b1;
    end else begin
      sample_cnt <= sample_cnt + 1'b1;
      strobe     <= 1'b0;
    end
  end

  // sum of the occupancies of the links in use
  always_comb begin
    sum_now = '0;
    for (int j = 0; j < int'(NUM_LINKS); j++)
      if (link_mask[j]) sum_now += SUM_W'($signed(occupancy[j]));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      beta_sum  <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= strobe;
      if (strobe) beta_sum <= sum_now;
    end
  end

  assign c_rel_fx = PROD_W'(beta_sum) * $signed({1'b0, 16'(KP_NUM)});
  assign c_est_fx = PROD_W'(c_est) <<< KP_FRAC;

  always_comb begin
    if (c_rel_fx > c_est_fx)      decision = SPEED_INC;
    else if (c_rel_fx < c_est_fx) decision = SPEED_DEC;
    else                          decision = SPEED_NONE;
  end

  always_ff @(posedge clk) begin
    if (rst || !enable) begin
      c_est        <= '0;
      speed_change <= SPEED_NONE;
      sample_valid <= 1'b0;
      pulse_cnt    <= '0;
      pulse_dir    <= SPEED_NONE;
    end else begin
      sample_valid <= sum_valid;
      if (sum_valid) begin
        speed_change <= decision;
        unique case (decision)
          SPEED_INC: c_est <= c_est + 1'b1;
          SPEED_DEC: c_est <= c_est - 1'b1;
          default:   ;
        endcase
        pulse_dir <= decision;
        pulse_cnt <= (decision == SPEED_NONE) ? '0 : PULSE_W'(PULSE_CYCLES);
      end else if (pulse_cnt != '0) begin
        pulse_cnt <= pulse_cnt - 1'b1;
      end
    end
  end

  assign finc = (pulse_cnt != '0) && (pulse_dir == SPEED_INC);
  assign fdec = (pulse_cnt != '0) && (pulse_dir == SPEED_DEC);

  a_one_direction: assert property (@(posedge clk) !(finc && fdec));

  initial begin
    assert (PULSE_CYCLES < SAMPLE_PERIOD) else $error("PULSE_CYCLES must be below SAMPLE_PERIOD");
    assert (KP_NUM < 65536) else $error("KP_NUM must fit in 16 bits");
  end
endmodule
