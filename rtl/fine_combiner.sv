// fine_combiner: pieces the 32 progressively shifted chirp results of one
// cycle into the oversampled correlation c of length s * 2^SF = 32,768 and
// returns its arg max as the demodulation index D.
//
// Chirp h of a cycle was advanced by h fine steps at the transmitter, so its
// FFT bin i is entry 32*((1024 - i) mod 1024) + h of c, counted leftwards
// from the reference line (index 0 = the base chirp with no delay; a delay of
// one LoRa sample moves a peak one bin to the left). The arg max of c is
// therefore the (bin, h) pair with the largest peak over the cycle:
//   D = 32 * ((1024 - bin) mod 1024) + h     [fine steps of 1/Fclk].
// The block keeps the best peak as the results for h = 0..31 arrive and
// emits D after h = 31. A cycle in which a result is missing (a dropped
// symbol, or reception that began mid-cycle) yields no D.
//
// The combination rule follows the paper's oversampled correlation and its
// definition of D as the arg max measured from the reference line; the
// counting of results is this design's.
//
// Timing: `d_valid` pulses one cycle after the h = 31 result.
module fine_combiner
  import ptn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              peak_valid,
  input  peak_t             peak,
  output logic              d_valid,
  output logic [FINE_W-1:0] d_index,
  output logic [MAG_W-1:0]  d_mag
);
  peak_t              best;
  logic [OS_LOG2:0]   count;
  peak_t              nbest;
  logic [OS_LOG2:0]   ncount;

  always_comb begin
    if (peak.shift == '0) begin
      nbest  = peak;
      ncount = 1;
    end else begin
      nbest  = (peak.mag > best.mag) ? peak : best;
      ncount = count + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best    <= '0;
      count   <= '0;
      d_valid <= 1'b0;
      d_index <= '0;
      d_mag   <= '0;
    end else begin
      d_valid <= 1'b0;
      if (peak_valid) begin
        best  <= nbest;
        count <= ncount;
        if (peak.shift == '1 && ncount == (OS_LOG2+1)'(OS)) begin
          d_valid <= 1'b1;
          d_index <= {SF'(-nbest.bin), nbest.shift};
          d_mag   <= nbest.mag;
        end
      end
    end
  end
endmodule
