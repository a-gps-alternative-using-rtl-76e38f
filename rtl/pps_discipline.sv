// pps_discipline: regenerates the central node's 1PPS at the receiver from
// the local 1PPS and the timing offset T.
//
// A counter measures Fclk ticks since the last local 1PPS edge (it also
// wraps by itself after TICKS_PER_SEC ticks). The corrected pulse
// `pps_corrected` is issued when the counter equals T rounded to whole ticks,
// taken modulo TICKS_PER_SEC: the local second shifted by T, which is where
// the central node's second lies once the time of flight is removed. T is
// latched from each `t_valid`. `pps_out` is the receiver's time output: the
// local 1PPS in the calibration stage (when it is GNSS time) and the
// corrected one in the implementation stage.
//
// The paper writes the corrected pulse as 1PPS_local + (1 - T) for a chirp
// of one second and notes that shorter chirps work if a whole number of them
// fits in a second (320 here). This design fires at 1PPS_local + T (mod 1 s)
// under its own sign convention for T (see timing_estimator), which places
// the pulse at the same instant.
//
// Timing: `pps_corrected` and `pps_out` are registered one-cycle pulses that
// follow the tick they mark by one cycle (for T = 0, the cycle after the
// local edge).
module pps_discipline
  import ptn_pkg::*;
#(
  parameter int unsigned TICKS_PER_SEC = FCLK_HZ
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            pps_edge,      // synchronised local 1PPS
  input  stage_e                          stage,
  input  logic                            t_valid,
  input  logic signed [FINE_W+FRAC_W-1:0] t_off,
  output logic                            pps_corrected,
  output logic                            pps_out
);
  localparam int unsigned CW = $clog2(TICKS_PER_SEC);

  logic [CW-1:0] cnt, cnt_now, target;
  logic          have_t;

  // T rounded to whole ticks, then modulo one second
  logic signed [FINE_W:0] t_ticks;
  assign t_ticks = (FINE_W+1)'((t_off + (FINE_W+FRAC_W)'(1 << (FRAC_W - 1))) >>> FRAC_W);

  assign cnt_now = pps_edge ? '0 : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt           <= '0;
      target        <= '0;
      have_t        <= 1'b0;
      pps_corrected <= 1'b0;
      pps_out       <= 1'b0;
    end else begin
      cnt <= (cnt_now == CW'(TICKS_PER_SEC - 1)) ? '0 : cnt_now + 1'b1;
      if (t_valid) begin
        have_t <= 1'b1;
        if (t_ticks < 0) target <= CW'(TICKS_PER_SEC + int'(t_ticks));
        else             target <= CW'(t_ticks);
      end
      pps_corrected <= have_t && (cnt_now == target);
      pps_out       <= (stage == STAGE_CALIBRATION) ? pps_edge
                                                    : (have_t && (cnt_now == target));
    end
  end
endmodule
