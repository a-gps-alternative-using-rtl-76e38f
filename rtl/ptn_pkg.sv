// ptn_pkg: constants and types shared by the precision-timing-network
// (PTN) transmitter and receiver.
//
// The numbers follow the experimental configuration of the chirp beacon:
// spreading factor 10 (1,024 base samples per chirp), oversampling factor
// s = 32 (32,768 fine samples per chirp), a GNSS-disciplined fast clock Fclk
// of 10.485760 MHz, a LoRa bandwidth of Fclk/32 = 327.68 kHz, a carrier of
// 1.25 MHz and a chirp period of 3.125 ms (320 chirps per second). One fine
// step is one Fclk period, 95.367 ns.
//
// The word widths (12-bit converters and sine table, 16-bit baseband, 18-bit
// FFT words) are this design's own choices; only the 10-bit width of the
// receiver's base-chirp RAMs comes from the prototype description.
package ptn_pkg;

  // ---- chirp geometry ----------------------------------------------------
  localparam int unsigned SF        = 10;              // spreading factor
  localparam int unsigned NBINS     = 1 << SF;         // 2^SF = 1024
  localparam int unsigned OS_LOG2   = 5;
  localparam int unsigned OS        = 1 << OS_LOG2;    // s = 32 fine shifts
  localparam int unsigned FINE_W    = SF + OS_LOG2;    // 15-bit sample counter
  localparam int unsigned FINE_N    = 1 << FINE_W;     // 32,768 fine samples

  // ---- clocking ------------------------------------------------------------
  localparam int unsigned FCLK_HZ   = 10_485_760;      // ticks per second
  localparam int unsigned CHIRPS_PER_SEC = FCLK_HZ / FINE_N; // 320

  // Phase increments in units of 2^-17 cycle per Fclk tick.
  // Carrier 1.25 MHz / 10.48576 MHz = 15625 / 2^17 exactly.
  localparam int unsigned CARRIER_INC17 = 15625;
  // Receiver local oscillator: carrier + B/2, so that the chirp, which sweeps
  // carrier .. carrier+B, lands symmetric around 0 Hz (B/2 = 2^12/2^17).
  localparam int unsigned RX_LO_INC17   = 15625 + 2048;

  // ---- word widths -----------------------------------------------------------
  localparam int unsigned LUT_W   = 12;   // sine table / DAC / ADC sample
  localparam int unsigned DAC_W   = 12;
  localparam int unsigned ADC_W   = 12;
  localparam int unsigned CHIRP_W = 10;   // receiver base-chirp RAMs
  localparam int unsigned BB_W    = 16;   // decimated baseband sample
  localparam int unsigned FFT_W   = 18;   // FFT data word (each of re, im)
  localparam int unsigned MAG_W   = 2 * FFT_W; // squared magnitude

  // Fractional bits carried by the TOF estimate and the timing offset.
  localparam int unsigned FRAC_W  = 8;

  typedef logic signed [BB_W-1:0]  bb_t;
  typedef logic signed [FFT_W-1:0] fft_t;

  typedef struct packed {
    bb_t re;
    bb_t im;
  } bb_cplx_t;

  typedef struct packed {
    fft_t re;
    fft_t im;
  } fft_cplx_t;

  // One FFT result summarised by its peak.
  typedef struct packed {
    logic [SF-1:0]      bin;   // arg max over the 2^SF bins
    logic [MAG_W-1:0]   mag;   // squared magnitude at that bin
    logic [OS_LOG2-1:0] shift; // fine shift h of the chirp it came from
  } peak_t;

  // Receiver stage.
  typedef enum logic {
    STAGE_CALIBRATION    = 1'b0,  // GNSS available: learn the TOF
    STAGE_IMPLEMENTATION = 1'b1   // GNSS lost: correct with the learned TOF
  } stage_e;

endpackage
