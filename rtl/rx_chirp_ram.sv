// rx_chirp_ram: the receiver's pair of 10-bit RAMs holding the real and
// imaginary parts of the baseband downchirp used for dechirping.
//
// Word n (n = 0..1023) holds exp(-j*2*pi*theta(n)) with
//   theta(n) = n^2/(2*1024) - n/2   [cycles],
// the conjugate of a chirp sweeping -B/2..+B/2, which is what the
// transmitted chirp becomes after rx_downconverter's mixer. In units of
// 2^-11 cycle theta is (n*n - 1024*n) mod 2048, exactly.
//
// The paper gives the two 10-bit RAMs read at Sclk and the downchirp of its
// dechirp equation, printed as exp(-j*2*pi*n^2/2^SF). This design uses
// exp(-j*pi*n^2/2^SF) instead, the phase whose derivative is the chirp's
// instantaneous frequency (k+n)/2^SF * B that the paper's symbol definition
// names: with the printed 2*pi a delay of one sample would move the peak by
// two FFT bins and the chirp would need twice the bandwidth. The -n/2 term
// is the centring on 0 Hz chosen in the downconverter.
//
// After reset a loader fills both RAMs from the sine table in 1,024 cycles
// and raises `ready`. The read port is synchronous (one cycle).
module rx_chirp_ram
  import ptn_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [SF-1:0]             raddr,
  output logic signed [CHIRP_W-1:0] rdata_re,
  output logic signed [CHIRP_W-1:0] rdata_im,
  output logic                      ready
);
  logic signed [CHIRP_W-1:0] mem_re [NBINS];
  logic signed [CHIRP_W-1:0] mem_im [NBINS];

  logic [SF-1:0]           waddr;
  logic [9:0]              idx;
  logic signed [LUT_W-1:0] s_val, c_val;
  logic signed [CHIRP_W-1:0] w_re, w_im;

  always_comb begin
    logic [21:0] sq;
    logic [10:0] th11;
    sq   = 22'(waddr) * 22'(waddr);
    th11 = sq[10:0] - 11'({waddr, 10'b0});   // n^2 - 1024 n  (mod 2048)
    idx  = 10'((12'(th11) + 12'd1) >> 1);     // round to the 1,024 table
  end

  sine_lut u_lut (.addr_a(idx),          .sin_a(s_val),
                  .addr_b(idx + 10'd256), .sin_b(c_val));

  // exp(-j theta) = cos(theta) - j sin(theta); top 10 of the 12 table bits
  assign w_re = CHIRP_W'(c_val >>> (LUT_W - CHIRP_W));
  assign w_im = CHIRP_W'((-s_val) >>> (LUT_W - CHIRP_W));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waddr <= '0;
      ready <= 1'b0;
    end else if (!ready) begin
      waddr <= waddr + 1'b1;
      if (waddr == SF'(NBINS - 1)) ready <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!ready) begin
      mem_re[waddr] <= w_re;
      mem_im[waddr] <= w_im;
    end
    rdata_re <= mem_re[raddr];
    rdata_im <= mem_im[raddr];
  end
endmodule
