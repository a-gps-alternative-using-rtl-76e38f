// impulse_clipper: impulsive-noise mitigation on the receiver's ADC samples
// by clipping at a threshold T = M * N90.
//
// Each sample x is passed on unchanged when |x| < T and replaced by
// T * sgn(x) otherwise. N90, the 90th percentile of |x|, is measured over
// windows of WIN samples taken while `measure_en` is high: a 64-bin
// histogram of |x| (bins 32 codes wide) is filled, then scanned in 64
// cycles for the first bin at which the running count reaches 90 % of WIN;
// N90 is that bin's upper edge. The multiple M is an input in unsigned
// 4.4 fixed point (M = 2 is 8'h20). Until the first window has been
// measured, or with `clip_en` low, samples pass unclipped.
//
// The clipping rule and T = N90 * M follow the paper's thresholding
// technique; the histogram estimator of the percentile, its resolution, the
// window length and the number format of M are this design's.
//
// Timing: one register stage; `y` and `clipped` follow `x` by one cycle.
module impulse_clipper
  import ptn_pkg::*;
#(
  parameter int unsigned WIN = 4096
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] x,
  input  logic                    clip_en,
  input  logic                    measure_en,
  input  logic [7:0]              m_q44,
  output logic signed [ADC_W-1:0] y,
  output logic                    clipped,
  output logic [ADC_W-1:0]        threshold,   // current T (magnitude)
  output logic                    have_threshold
);
  localparam int unsigned NB    = 64;
  localparam int unsigned BIN_SH = ADC_W - 1 - $clog2(NB);   // 5: 32 codes per bin
  localparam int unsigned CNT_W = $clog2(WIN + 1);
  localparam int unsigned NEED  = (WIN * 9 + 9) / 10;        // ceil(0.9 * WIN)

  typedef enum logic {H_COUNT, H_SCAN} hstate_e;

  logic [CNT_W-1:0] hist [NB];
  logic [CNT_W-1:0] nsamp, cum;
  logic [$clog2(NB)-1:0] scan_i;
  logic             found;
  hstate_e          hs;

  logic [ADC_W-1:0] ax;          // |x|, saturated to 2047
  logic [$clog2(NB)-1:0] xbin;

  always_comb begin
    ax   = x[ADC_W-1] ? ADC_W'(-x) : ADC_W'(x);
    if (ax[ADC_W-1]) ax = {1'b0, {(ADC_W-1){1'b1}}};   // -2048
    xbin = ax[ADC_W-2:BIN_SH];
  end

  // Scan step: running count including the current bin, and the threshold
  // that bin would give.
  logic [CNT_W-1:0] cum_next;
  logic [ADC_W+7:0] t_cand;
  always_comb begin
    cum_next = cum + hist[scan_i];
    // N90 = upper edge of the bin; T = N90 * M (M in 4.4)
    t_cand = (((ADC_W+8)'(scan_i) + 1'b1) << BIN_SH) * (ADC_W+8)'(m_q44) >> 4;
  end

  // ---- percentile estimator ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NB; i++) hist[i] <= '0;
      nsamp          <= '0;
      cum            <= '0;
      scan_i         <= '0;
      found          <= 1'b0;
      hs             <= H_COUNT;
      threshold      <= {1'b0, {(ADC_W-1){1'b1}}};
      have_threshold <= 1'b0;
    end else begin
      case (hs)
        H_COUNT: if (measure_en) begin
          hist[xbin] <= hist[xbin] + 1'b1;
          nsamp      <= nsamp + 1'b1;
          if (nsamp == CNT_W'(WIN - 1)) begin
            hs     <= H_SCAN;
            scan_i <= '0;
            cum    <= '0;
            found  <= 1'b0;
          end
        end
        H_SCAN: begin
          cum          <= cum_next;
          hist[scan_i] <= '0;
          if (!found && cum_next >= CNT_W'(NEED)) begin
            found          <= 1'b1;
            threshold      <= (t_cand > (ADC_W+8)'((1 << (ADC_W - 1)) - 1)) ?
                              {1'b0, {(ADC_W-1){1'b1}}} : ADC_W'(t_cand);
            have_threshold <= 1'b1;
          end
          scan_i <= scan_i + 1'b1;
          if (scan_i == '1) begin
            hs    <= H_COUNT;
            nsamp <= '0;
          end
        end
        default: hs <= H_COUNT;
      endcase
    end
  end

  // ---- clipping ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= '0;
      clipped <= 1'b0;
    end else if (clip_en && have_threshold && ax >= threshold) begin
      y       <= x[ADC_W-1] ? -signed'(threshold) : signed'(threshold);
      clipped <= 1'b1;
    end else begin
      y       <= x;
      clipped <= 1'b0;
    end
  end
endmodule
