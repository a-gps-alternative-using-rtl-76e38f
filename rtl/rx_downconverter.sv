// rx_downconverter: brings the received passband chirp to complex baseband
// and decimates it from Fclk to the LoRa sample rate Sclk = Fclk/32.
//
// A numerically controlled oscillator (17-bit phase, +17673 per tick, i.e.
// 1.25 MHz + B/2 = 1.41384 MHz) drives a quadrature mixer, x*cos and -x*sin,
// so that the chirp, which the transmitter sweeps from the carrier up to
// carrier + B, is centred on 0 Hz. Each branch is then low-pass filtered and
// decimated by a two-stage CIC decimator with R = 32, whose output at the
// `dump` tick (the last tick of a LoRa sample) is the average of the 63 ticks
// centred on the first tick of that sample. The sample index and chirp
// index given with `dump` travel with the data (`bb_n`, `bb_h`).
//
// The paper only says the receiver downconverts to baseband; the mixer
// frequency, the CIC filter, its order and the scaling are this design's
// choices. Scaling assumes a 12-bit ADC near full scale; the result is cut to
// 16 bits by an arithmetic right shift of 17.
//
// Timing: `bb_valid` pulses five cycles after the `dump` tick; one pulse per
// 32 input ticks.
module rx_downconverter
  import ptn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc,
  input  logic                    dump,
  input  logic [SF-1:0]           tag_n,
  input  logic [OS_LOG2-1:0]      tag_h,
  output bb_cplx_t                bb,
  output logic                    bb_valid,
  output logic [SF-1:0]           bb_n,
  output logic [OS_LOG2-1:0]      bb_h
);
  localparam int unsigned PW = ADC_W + LUT_W;  // mixer product width
  localparam int unsigned IW = PW + 2 * OS_LOG2 + 1;  // CIC register width

  logic [16:0] phase;
  logic [9:0]  lo_idx;
  logic signed [LUT_W-1:0] lo_sin, lo_cos;

  // pipeline registers
  logic signed [ADC_W-1:0] x_r;
  logic [9:0]              lo_idx_r;
  logic signed [PW-1:0]    p_re, p_im;
  logic [3:0]              dly;               // dump delay line
  logic [SF-1:0]           n_d [4];
  logic [OS_LOG2-1:0]      h_d [4];
  logic signed [IW-1:0]    i1_re, i1_im, i2_re, i2_im;
  logic signed [IW-1:0]    z1_re, z1_im, z2_re, z2_im;
  logic signed [IW-1:0]    c1_re, c1_im, c2_re, c2_im;

  sine_lut u_lut (.addr_a(lo_idx_r),          .sin_a(lo_sin),
                  .addr_b(lo_idx_r + 10'd256), .sin_b(lo_cos));

  assign lo_idx = 10'((phase + 17'd64) >> 7);

  always_comb begin
    c1_re = i2_re - z1_re;
    c1_im = i2_im - z1_im;
    c2_re = c1_re - z2_re;
    c2_im = c1_im - z2_im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= '0;
      x_r      <= '0;
      lo_idx_r <= '0;
      p_re     <= '0;
      p_im     <= '0;
      dly      <= '0;
      i1_re <= '0; i1_im <= '0; i2_re <= '0; i2_im <= '0;
      z1_re <= '0; z1_im <= '0; z2_re <= '0; z2_im <= '0;
      bb       <= '0;
      bb_valid <= 1'b0;
      bb_n     <= '0;
      bb_h     <= '0;
      for (int i = 0; i < 4; i++) begin
        n_d[i] <= '0;
        h_d[i] <= '0;
      end
    end else begin
      // stage 0: register the ADC sample and the oscillator phase
      phase    <= phase + 17'(RX_LO_INC17);
      x_r      <= adc;
      lo_idx_r <= lo_idx;
      // stage 1: quadrature mixer, x * exp(-j*theta)
      p_re <= PW'(x_r) * PW'(lo_cos);
      p_im <= -(PW'(x_r) * PW'(lo_sin));
      // stages 2-3: two integrators
      i1_re <= i1_re + IW'(p_re);
      i1_im <= i1_im + IW'(p_im);
      i2_re <= i2_re + i1_re;
      i2_im <= i2_im + i1_im;
      // dump and tags follow the sample through the four stages
      dly    <= {dly[2:0], dump};
      n_d[0] <= tag_n;
      h_d[0] <= tag_h;
      for (int i = 1; i < 4; i++) begin
        n_d[i] <= n_d[i-1];
        h_d[i] <= h_d[i-1];
      end
      // decimated rate: two combs
      bb_valid <= dly[3];
      if (dly[3]) begin
        z1_re <= i2_re;
        z1_im <= i2_im;
        z2_re <= c1_re;
        z2_im <= c1_im;
        bb.re <= BB_W'(c2_re >>> 17);
        bb.im <= BB_W'(c2_im >>> 17);
        bb_n  <= n_d[3];
        bb_h  <= h_d[3];
      end
    end
  end
endmodule
