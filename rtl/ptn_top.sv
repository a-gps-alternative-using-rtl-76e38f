// ptn_top: one precision-timing-network node with both halves of the link,
// the central-node transmitter and the substation receiver.
//
// The transmitter sends a GNSS-aligned (or, after GNSS loss, atomic-clock
// aligned) chirp beacon to the DAC; the receiver takes ADC samples of the
// line, measures the demodulation index D of each 32-chirp cycle against its
// own 1PPS, learns the time of flight while it has GNSS and, after GNSS is
// lost, outputs the timing offset T and a corrected 1PPS. A central node
// uses the transmitter half, a substation the receiver half; the two halves
// share no state. The converters, the line coupling, the GNSS receivers and
// the atomic clock are outside the chip, so their signals are ports. The
// receiver clips impulsive noise at M * N90 (M from `rx_clip_m`, 4.4 format)
// before it mixes the line signal down.
//
// Clocks: `fclk` is the GNSS-disciplined 10.48576 MHz clock of both halves;
// `dac_clk` is CIC_R times fclk. Parameters keep the paper's sizes by
// default; MA_LEN and TICKS_PER_SEC may be reduced for simulation.
module ptn_top
  import ptn_pkg::*;
#(
  parameter int unsigned MA_LEN        = 2000,
  parameter int unsigned TICKS_PER_SEC = FCLK_HZ,
  parameter int unsigned CIC_R         = 6,
  parameter int unsigned CIC_N         = 3
) (
  input  logic                            fclk,
  input  logic                            dac_clk,
  input  logic                            rst_n,
  // central node
  input  logic                            tx_pps_gnss,
  input  logic                            tx_pps_atomic,
  input  logic                            tx_gnss_valid,
  output logic signed [DAC_W-1:0]         tx_sample,
  output logic signed [DAC_W-1:0]         dac_data,
  output logic [OS_LOG2-1:0]              tx_shift,
  output logic                            tx_on_atomic,
  output logic                            tx_ready,
  // substation
  input  logic signed [ADC_W-1:0]         adc_data,
  input  logic                            rx_pps_local,
  input  logic                            rx_gnss_valid,
  input  logic                            rx_ma_clear,
  input  logic                            rx_clip_en,
  input  logic                            rx_clip_measure,
  input  logic [7:0]                      rx_clip_m,
  output logic [ADC_W-1:0]                rx_clip_threshold,
  output logic                            rx_clip_have_threshold,
  output logic                            rx_clipped,
  output logic                            rx_ready,
  output logic                            rx_d_valid,
  output logic [FINE_W-1:0]               rx_d_index,
  output logic                            rx_tof_valid,
  output logic [FINE_W+FRAC_W-1:0]        rx_tof_bar,
  output logic                            rx_tof_window_full,
  output logic                            rx_t_valid,
  output logic signed [FINE_W+FRAC_W-1:0] rx_t_off,
  output stage_e                          rx_stage,
  output logic                            rx_stage_change,
  output logic                            rx_pps_corrected,
  output logic                            rx_pps_out,
  output logic                            rx_fft_overrun
);
  logic                tx_chirp_start, tx_pps_edge;
  logic [MAG_W-1:0]    d_mag;

  ptn_transmitter #(.CIC_R(CIC_R), .CIC_N(CIC_N)) u_tx (
    .clk(fclk), .dac_clk, .rst_n,
    .pps_gnss(tx_pps_gnss), .pps_atomic(tx_pps_atomic), .gnss_valid(tx_gnss_valid),
    .tx_sample, .tx_shift, .tx_chirp_start, .tx_pps_edge,
    .on_atomic(tx_on_atomic), .ready(tx_ready), .dac_data);

  ptn_receiver #(.MA_LEN(MA_LEN), .TICKS_PER_SEC(TICKS_PER_SEC)) u_rx (
    .clk(fclk), .rst_n, .adc_data, .pps_local(rx_pps_local),
    .gnss_valid(rx_gnss_valid), .ma_clear(rx_ma_clear),
    .clip_en(rx_clip_en), .clip_measure(rx_clip_measure), .clip_m(rx_clip_m),
    .clip_threshold(rx_clip_threshold), .clip_have_threshold(rx_clip_have_threshold),
    .clipped(rx_clipped), .ready(rx_ready),
    .d_valid(rx_d_valid), .d_index(rx_d_index), .d_mag,
    .tof_valid(rx_tof_valid), .tof_bar(rx_tof_bar),
    .tof_window_full(rx_tof_window_full),
    .t_valid(rx_t_valid), .t_off(rx_t_off), .stage(rx_stage),
    .stage_change(rx_stage_change), .pps_corrected(rx_pps_corrected),
    .pps_out(rx_pps_out), .fft_overrun(rx_fft_overrun));
endmodule
