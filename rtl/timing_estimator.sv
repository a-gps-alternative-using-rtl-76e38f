// timing_estimator: stage control and timing offset of a receiver.
//
// While GNSS is available (`gnss_valid` high) the receiver is in the
// calibration stage: every demodulation index D goes to the moving average
// that builds TOF_bar (`ma_enable`). When GNSS is lost the receiver enters
// the implementation stage: TOF_bar is frozen and each new D gives the timing
// offset
//   T = D - TOF_bar
// in fine steps (1/Fclk) with FRAC_W fractional bits. D and TOF_bar are
// positions on a circle of one chirp period (32,768 steps), so T is taken
// modulo that period and read as a signed number in [-16384, 16384). A
// positive T means the transmitter's second started T steps after the local
// one. T is also produced during calibration, where it should stay near 0.
// `gnss_valid` is resynchronised by two flip-flops.
//
// The stage definitions and T = D - TOF_bar are the paper's; the modular
// arithmetic, the fixed-point format and the return to calibration when
// GNSS comes back are this design's.
//
// Timing: `t_valid` pulses one cycle after `d_valid` (T uses the TOF_bar
// from before that D).
module timing_estimator
  import ptn_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             gnss_valid,
  input  logic                             d_valid,
  input  logic [FINE_W-1:0]                d_index,
  input  logic                             tof_have,
  input  logic [FINE_W+FRAC_W-1:0]         tof_bar,
  output stage_e                           stage,
  output logic                             ma_enable,
  output logic                             t_valid,
  output logic signed [FINE_W+FRAC_W-1:0]  t_off,
  output logic                             stage_change
);
  logic [1:0] gsync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gsync        <= 2'b11;      // start in calibration
      stage        <= STAGE_CALIBRATION;
      stage_change <= 1'b0;
      t_valid      <= 1'b0;
      t_off        <= '0;
    end else begin
      gsync        <= {gsync[0], gnss_valid};
      stage_change <= 1'b0;
      if (gsync[1] && stage != STAGE_CALIBRATION) begin
        stage        <= STAGE_CALIBRATION;
        stage_change <= 1'b1;
      end else if (!gsync[1] && stage != STAGE_IMPLEMENTATION) begin
        stage        <= STAGE_IMPLEMENTATION;
        stage_change <= 1'b1;
      end
      t_valid <= d_valid && tof_have;
      if (d_valid) t_off <= signed'({d_index, {FRAC_W{1'b0}}} - tof_bar);
    end
  end

  assign ma_enable = (stage == STAGE_CALIBRATION);
endmodule
