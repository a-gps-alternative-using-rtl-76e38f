// moving_average: running estimate of the time of flight, TOF_bar, from the
// demodulation indices D observed in the calibration stage.
//
// The last LEN observations are kept in a circular history buffer and their
// sum is updated with each new one (add the new, subtract the one that
// leaves the window). Until LEN observations have been seen the mean is over
// those there are, so the output is the cumulative mean
// (1/n) * sum_{j=1..n} D_j of the paper's calibration formula and, once the
// window is full, a moving average over LEN. The mean is computed with
// FRAC_W fractional bits by a restoring divider that takes NUM_W+1 cycles.
// Observations are taken only while `enable` is high (calibration stage);
// `clear` empties the window.
//
// LEN defaults to 2,000, the number of calibration observations in the
// paper's experiment (its simulations used 900). The history buffer, the
// divider and the fixed-point format are this design's.
//
// Timing: `avg_valid` pulses when a new mean is ready, about 35 cycles after
// the observation; `avg` holds its value until the next one.
module moving_average #(
  parameter int unsigned LEN = 2000
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clear,
  input  logic                             enable,
  input  logic                             obs_valid,
  input  logic [ptn_pkg::FINE_W-1:0]       obs,
  output logic                             avg_valid,
  output logic [ptn_pkg::FINE_W+ptn_pkg::FRAC_W-1:0] avg,
  output logic                             have_avg,   // at least one observation
  output logic                             window_full
);
  import ptn_pkg::*;

  localparam int unsigned CW    = $clog2(LEN + 1);
  localparam int unsigned PW    = (LEN > 1) ? $clog2(LEN) : 1;
  localparam int unsigned SUM_W = FINE_W + CW;
  localparam int unsigned NUM_W = SUM_W + FRAC_W;

  logic [FINE_W-1:0] hist [LEN];
  logic [PW-1:0]     ptr;
  logic [CW-1:0]     count;
  logic [SUM_W-1:0]  sum;

  // divider
  logic              div_busy;
  logic [$clog2(NUM_W+1)-1:0] div_i;
  logic [NUM_W-1:0]  div_num;     // shifts out quotient bits' dividend
  logic [CW:0]       div_rem;
  logic [NUM_W-1:0]  div_q;
  logic [CW-1:0]     div_den;

  wire take = obs_valid && enable && !clear;

  always_ff @(posedge clk) begin
    if (take) hist[ptr] <= obs;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; count <= '0; sum <= '0;
    end else if (clear) begin
      ptr <= '0; count <= '0; sum <= '0;
    end else if (take) begin
      if (count == CW'(LEN)) sum <= sum + SUM_W'(obs) - SUM_W'(hist[ptr]);
      else begin
        sum   <= sum + SUM_W'(obs);
        count <= count + 1'b1;
      end
      ptr <= (ptr == PW'(LEN - 1)) ? '0 : ptr + 1'b1;
    end
  end

  assign have_avg    = (count != '0);
  assign window_full = (count == CW'(LEN));

  // restoring division (sum << FRAC_W) / count, started one cycle after take
  logic start_div;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_div <= 1'b0;
    else        start_div <= take;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_busy  <= 1'b0;
      div_i     <= '0;
      div_num   <= '0;
      div_rem   <= '0;
      div_q     <= '0;
      div_den   <= '0;
      avg_valid <= 1'b0;
      avg       <= '0;
    end else begin
      avg_valid <= 1'b0;
      if (clear) begin
        div_busy <= 1'b0;
        avg      <= '0;
      end else if (start_div) begin
        div_busy <= 1'b1;
        div_i    <= '0;
        div_num  <= {sum, {FRAC_W{1'b0}}};
        div_rem  <= '0;
        div_q    <= '0;
        div_den  <= count;
      end else if (div_busy) begin
        logic [CW:0] trial;
        trial    = {div_rem[CW-1:0], div_num[NUM_W-1]};
        div_num  <= div_num << 1;
        if (trial >= (CW+1)'(div_den)) begin
          div_rem <= trial - (CW+1)'(div_den);
          div_q   <= {div_q[NUM_W-2:0], 1'b1};
        end else begin
          div_rem <= trial;
          div_q   <= {div_q[NUM_W-2:0], 1'b0};
        end
        div_i <= div_i + 1'b1;
        if (div_i == ($clog2(NUM_W+1))'(NUM_W - 1)) begin
          div_busy  <= 1'b0;
          avg_valid <= 1'b1;
          avg       <= (FINE_W+FRAC_W)'(trial >= (CW+1)'(div_den) ?
                                         {div_q[NUM_W-2:0], 1'b1} : {div_q[NUM_W-2:0], 1'b0});
        end
      end
    end
  end
endmodule
