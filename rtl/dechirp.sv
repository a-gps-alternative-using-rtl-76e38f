// dechirp: multiplies each baseband LoRa sample by the 1PPS-aligned
// downchirp, d(n) = r(n) * conj(chirp(n)), which turns a chirp delayed by D
// samples into a tone whose FFT peaks D bins left of the reference line.
//
// The block presents the sample index `in_n` to the downchirp RAM
// (`chirp_addr`), holds the sample for the RAM's one-cycle read latency and
// then forms the complex product. The 16 x 10-bit product is shifted right
// by 9 into the 18-bit FFT word. The operation is the paper's dechirp
// equation; the widths and scaling are this design's.
//
// Timing: `out_valid` follows `in_valid` by two cycles; tags travel along.
module dechirp
  import ptn_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  bb_cplx_t                  in_data,
  input  logic [SF-1:0]             in_n,
  input  logic [OS_LOG2-1:0]        in_h,
  output logic [SF-1:0]             chirp_addr,
  input  logic signed [CHIRP_W-1:0] chirp_re,
  input  logic signed [CHIRP_W-1:0] chirp_im,
  output logic                      out_valid,
  output fft_cplx_t                 out_data,
  output logic [SF-1:0]             out_n,
  output logic [OS_LOG2-1:0]        out_h
);
  localparam int unsigned PW = BB_W + CHIRP_W + 1;

  logic                 v_r;
  bb_cplx_t             x_r;
  logic [SF-1:0]        n_r;
  logic [OS_LOG2-1:0]   h_r;
  logic signed [PW-1:0] pr, pi;

  assign chirp_addr = in_n;

  always_comb begin
    pr = PW'(x_r.re) * PW'(chirp_re) - PW'(x_r.im) * PW'(chirp_im);
    pi = PW'(x_r.re) * PW'(chirp_im) + PW'(x_r.im) * PW'(chirp_re);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_r       <= 1'b0;
      x_r       <= '0;
      n_r       <= '0;
      h_r       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_n     <= '0;
      out_h     <= '0;
    end else begin
      v_r <= in_valid;
      if (in_valid) begin
        x_r <= in_data;
        n_r <= in_n;
        h_r <= in_h;
      end
      out_valid <= v_r;
      if (v_r) begin
        out_data.re <= FFT_W'(pr >>> 9);
        out_data.im <= FFT_W'(pi >>> 9);
        out_n       <= n_r;
        out_h       <= h_r;
      end
    end
  end
endmodule
