// peak_search: arg max over the 1,024 FFT bins of one symbol.
//
// For each streamed bin it forms the squared magnitude re^2 + im^2 and keeps
// the largest (the first one on a tie). With the last bin it emits the peak
// bin, its squared magnitude and the symbol's fine-shift tag. Squared
// magnitude is this design's choice of magnitude measure; the paper only
// asks for the index of the maximum correlation result.
//
// Timing: `peak_valid` pulses two cycles after `in_last`.
module peak_search
  import ptn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fft_cplx_t          in_data,
  input  logic [SF-1:0]      in_bin,
  input  logic               in_last,
  input  logic [OS_LOG2-1:0] in_h,
  output logic               peak_valid,
  output peak_t              peak
);
  logic               v_r, last_r;
  logic [SF-1:0]      bin_r;
  logic [OS_LOG2-1:0] h_r;
  logic [MAG_W-1:0]   mag_r;
  peak_t              best;
  logic               better;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_r <= 1'b0; last_r <= 1'b0; bin_r <= '0; h_r <= '0; mag_r <= '0;
    end else begin
      v_r    <= in_valid;
      last_r <= in_valid && in_last;
      if (in_valid) begin
        bin_r <= in_bin;
        h_r   <= in_h;
        mag_r <= MAG_W'(in_data.re * in_data.re) + MAG_W'(in_data.im * in_data.im);
      end
    end
  end

  // bin 0 starts a new search
  assign better = (bin_r == '0) || (mag_r > best.mag);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best       <= '0;
      peak       <= '0;
      peak_valid <= 1'b0;
    end else begin
      peak_valid <= 1'b0;
      if (v_r) begin
        if (better) begin
          best.bin <= bin_r;
          best.mag <= mag_r;
        end
        best.shift <= h_r;
        if (last_r) begin
          peak_valid <= 1'b1;
          peak.bin   <= better ? bin_r : best.bin;
          peak.mag   <= better ? mag_r : best.mag;
          peak.shift <= h_r;
        end
      end
    end
  end
endmodule
