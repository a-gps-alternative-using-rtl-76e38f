// ptn_receiver: the substation receiver of the precision timing network.
//
// Chain: impulse_clipper (impulsive-noise clipping of the ADC samples at
// M * N90) -> rx_frame_timer (frame on the local 1PPS) -> rx_downconverter
// (passband to complex baseband at Sclk) -> dechirp (with the downchirp from
// rx_chirp_ram) -> fft1024 -> peak_search -> fine_combiner (D from the 32
// shifted chirps of a cycle) -> moving_average (TOF_bar, calibration only)
// and timing_estimator (stage, T = D - TOF_bar) -> pps_discipline (corrected
// 1PPS).
//
// One D is produced per 32-chirp cycle (100 ms at Fclk = 10.48576 MHz),
// about 6,200 cycles after the last chirp of the cycle has been received.
// Nothing is processed until the downchirp RAM is loaded (`ready`) and the
// first local 1PPS edge has been seen.
//
// Parameters: MA_LEN, the moving-average window (paper: 2,000 observations
// in the experiment); TICKS_PER_SEC, Fclk ticks per local second, which must
// be a multiple of 32,768 so that whole chirps fill a second.
module ptn_receiver
  import ptn_pkg::*;
#(
  parameter int unsigned MA_LEN        = 2000,
  parameter int unsigned TICKS_PER_SEC = FCLK_HZ
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic signed [ADC_W-1:0]         adc_data,
  input  logic                            pps_local,
  input  logic                            gnss_valid,
  input  logic                            ma_clear,
  input  logic                            clip_en,       // enable clipping
  input  logic                            clip_measure,  // samples feed N90
  input  logic [7:0]                      clip_m,        // M, unsigned 4.4
  output logic [ADC_W-1:0]                clip_threshold,
  output logic                            clip_have_threshold,
  output logic                            clipped,
  output logic                            ready,
  output logic                            d_valid,
  output logic [FINE_W-1:0]               d_index,
  output logic [MAG_W-1:0]                d_mag,
  output logic                            tof_valid,
  output logic [FINE_W+FRAC_W-1:0]        tof_bar,
  output logic                            tof_window_full,
  output logic                            t_valid,
  output logic signed [FINE_W+FRAC_W-1:0] t_off,
  output stage_e                          stage,
  output logic                            stage_change,
  output logic                            pps_corrected,
  output logic                            pps_out,
  output logic                            fft_overrun
);
  // clipped ADC samples
  logic signed [ADC_W-1:0] adc_c;

  // frame
  logic [FINE_W-1:0]  m;
  logic [SF-1:0]      n;
  logic [OS_LOG2-1:0] h;
  logic               dump, pps_edge, active;

  // baseband
  bb_cplx_t           bb;
  logic               bb_valid;
  logic [SF-1:0]      bb_n;
  logic [OS_LOG2-1:0] bb_h;

  // dechirp
  logic [SF-1:0]             chirp_addr;
  logic signed [CHIRP_W-1:0] chirp_re, chirp_im;
  logic                      dc_valid;
  fft_cplx_t                 dc_data;
  logic [SF-1:0]             dc_n;
  logic [OS_LOG2-1:0]        dc_h;

  // fft
  logic               f_valid, f_last, f_busy;
  fft_cplx_t          f_data;
  logic [SF-1:0]      f_bin;
  logic [OS_LOG2-1:0] f_h;

  logic               pk_valid;
  peak_t              pk;

  logic               ma_enable, have_tof;

  rx_frame_timer u_timer (
    .clk, .rst_n, .pps_local, .m, .n, .h, .dump, .pps_edge, .active);

  impulse_clipper u_clip (
    .clk, .rst_n, .x(adc_data), .clip_en, .measure_en(clip_measure), .m_q44(clip_m),
    .y(adc_c), .clipped, .threshold(clip_threshold), .have_threshold(clip_have_threshold)
  );

  rx_downconverter u_ddc (
    .clk, .rst_n, .adc(adc_c), .dump(dump && ready), .tag_n(n), .tag_h(h),
    .bb, .bb_valid, .bb_n, .bb_h);

  rx_chirp_ram u_chirp (
    .clk, .rst_n, .raddr(chirp_addr), .rdata_re(chirp_re), .rdata_im(chirp_im),
    .ready);

  dechirp u_dechirp (
    .clk, .rst_n, .in_valid(bb_valid), .in_data(bb), .in_n(bb_n), .in_h(bb_h),
    .chirp_addr, .chirp_re, .chirp_im,
    .out_valid(dc_valid), .out_data(dc_data), .out_n(dc_n), .out_h(dc_h));

  fft1024 u_fft (
    .clk, .rst_n, .in_valid(dc_valid), .in_data(dc_data), .in_n(dc_n), .in_h(dc_h),
    .out_valid(f_valid), .out_data(f_data), .out_bin(f_bin), .out_last(f_last),
    .out_h(f_h), .busy(f_busy), .overrun(fft_overrun));

  peak_search u_peak (
    .clk, .rst_n, .in_valid(f_valid), .in_data(f_data), .in_bin(f_bin),
    .in_last(f_last), .in_h(f_h), .peak_valid(pk_valid), .peak(pk));

  fine_combiner u_fine (
    .clk, .rst_n, .peak_valid(pk_valid), .peak(pk),
    .d_valid, .d_index, .d_mag);

  moving_average #(.LEN(MA_LEN)) u_ma (
    .clk, .rst_n, .clear(ma_clear), .enable(ma_enable), .obs_valid(d_valid),
    .obs(d_index), .avg_valid(tof_valid), .avg(tof_bar), .have_avg(have_tof),
    .window_full(tof_window_full));

  timing_estimator u_est (
    .clk, .rst_n, .gnss_valid, .d_valid, .d_index, .tof_have(have_tof),
    .tof_bar, .stage, .ma_enable, .t_valid, .t_off, .stage_change);

  pps_discipline #(.TICKS_PER_SEC(TICKS_PER_SEC)) u_pps (
    .clk, .rst_n, .pps_edge, .stage, .t_valid, .t_off, .pps_corrected, .pps_out);
endmodule
