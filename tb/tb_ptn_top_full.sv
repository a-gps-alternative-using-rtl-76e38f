// tb_ptn_top_full: one complete calibrate-then-hold operation of the
// timing network with every parameter of the top at its default (a real
// 10,485,760-tick second, a 2,000-observation moving average). The line is
// modelled as a 39-tick delay plus noise, and the impulse clipper runs
// with M = 2 (at full signal level it only trims the largest samples). Three 32-chirp
// cycles of calibration must give a stable D and TOF_bar; after GNSS is
// lost at both ends and the receiver's next local second starts 25 ticks
// late, T must be -25 (+-2) ticks and the corrected 1PPS, at the end of that
// second, must land on the central node's second. About 21 million Fclk
// cycles are simulated.
module tb_ptn_top_full;
  import ptn_pkg::*;
  localparam int TPS = FCLK_HZ;        // the top's own default second
  localparam int X = 39;
  logic fclk = 0, dac_clk = 0, rst_n = 0;
  logic tx_pps_gnss = 0, tx_pps_atomic = 0, tx_gnss_valid = 1;
  logic signed [DAC_W-1:0] tx_sample, dac_data;
  logic [OS_LOG2-1:0] tx_shift;
  logic tx_on_atomic, tx_ready;
  logic signed [ADC_W-1:0] adc_data = '0;
  logic rx_pps_local = 0, rx_gnss_valid = 1, rx_ma_clear = 0;
  logic rx_ready, rx_d_valid, rx_tof_valid, rx_tof_window_full, rx_t_valid;
  logic rx_stage_change, rx_pps_corrected, rx_pps_out, rx_fft_overrun;
  logic [FINE_W-1:0] rx_d_index;
  logic [FINE_W+FRAC_W-1:0] rx_tof_bar;
  logic signed [FINE_W+FRAC_W-1:0] rx_t_off;
  stage_e rx_stage;
  logic rx_clip_en = 1, rx_clip_measure = 1;
  logic [7:0] rx_clip_m = 8'h20;
  logic [ADC_W-1:0] rx_clip_threshold;
  logic rx_clip_have_threshold, rx_clipped;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint S0 = 40000;
  int E = 0;
  logic signed [DAC_W-1:0] line [X];
  // mechanism counters
  int n_wrap = 0, n_d = 0, n_full = 0, n_stage = 0, n_atomic = 0, n_t = 0, n_corr = 0;
  int n_overrun = 0;
  int last_d = -1;
  longint last_corr = -1, last_out = -1;
  logic [OS_LOG2-1:0] prev_shift = '0;

  always #6 fclk = ~fclk;
  always #1 dac_clk = ~dac_clk;

  ptn_top dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic int noise();
    int s;
    s = 0;
    for (int i = 0; i < 4; i++) s += int'($urandom_range(400)) - 200;
    return s;
  endfunction

  // line model, 1PPS sources
  always @(negedge fclk) begin
    longint k;
    int v;
    cyc++;
    v = int'(line[X-1]) + noise();
    if (v > 2047) v = 2047;
    if (v < -2048) v = -2048;
    adc_data = ADC_W'(v);
    for (int i = X - 1; i > 0; i--) line[i] = line[i-1];
    line[0] = tx_sample;
    k = cyc - S0;
    tx_pps_gnss   = (k >= 0) && (k % TPS < 5);
    tx_pps_atomic = (k >= 0) && (k % TPS < 5);      // the atomic clock keeps time
    k = cyc - S0 - E;
    rx_pps_local  = (k >= 0) && (k % TPS < 5);
  end

  always @(posedge fclk) begin
    #1;
    if (tx_shift == '0 && prev_shift == '1) n_wrap++;
    prev_shift = tx_shift;
    if (rx_d_valid) begin n_d++; last_d = int'(rx_d_index); end
    if (rx_tof_window_full) n_full++;
    if (rx_stage_change) n_stage++;
    if (tx_on_atomic && tx_pps_atomic) n_atomic++;
    if (rx_t_valid && rx_stage == STAGE_IMPLEMENTATION) n_t++;
    if (rx_pps_corrected && rx_stage == STAGE_IMPLEMENTATION) begin n_corr++; last_corr = cyc; end
    if (rx_pps_out && rx_stage == STAGE_CALIBRATION) last_out = cyc;
    if (rx_fft_overrun) n_overrun++;
  end

  task automatic wait_d(output int d);
    int n0;
    n0 = n_d;
    while (n_d == n0) @(posedge fclk);
    d = last_d;
    repeat (100) @(posedge fclk);
  endtask

  initial begin
    repeat (23_000_000) @(posedge fclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, d_cal, cal_align, e;
    real tof;
    foreach (line[i]) line[i] = '0;
    repeat (3) @(posedge fclk);
    rst_n = 1;
    // ---- calibration: three 32-chirp cycles ----
    wait_d(d);
    wait_d(d_cal);
    wait_d(d);
    check(d - d_cal >= -2 && d - d_cal <= 2, $sformatf("D stable: %0d then %0d", d_cal, d));
    check(d >= X - 6 && d <= X + 8, $sformatf("D = %0d for a %0d-tick line", d, X));
    tof = real'(rx_tof_bar) / 256.0;
    check(tof > real'(d) - 2.0 && tof < real'(d) + 2.0, $sformatf("TOF_bar %f", tof));
    cal_align = int'((last_out - S0) % TPS);
    // ---- implementation: GNSS lost; from the next second the local 1PPS
    // is 25 ticks late and the transmitter follows its atomic clock ----
    tx_gnss_valid = 0;
    rx_gnss_valid = 0;
    E = 25;
    while (cyc < S0 + TPS + 100) @(posedge fclk);
    wait_d(d);               // cycle that straddled the new local second
    wait_d(d);
    e = int'(rx_t_off);
    check(rx_stage == STAGE_IMPLEMENTATION, "implementation stage");
    check(e > -(E + 2) * 256 && e < -(E - 2) * 256,
          $sformatf("T = %f ticks for a %0d-tick drift", real'(e) / 256.0, E));
    last_corr = -1;
    while (last_corr < 0) @(posedge fclk);
    check(((last_corr - S0) % TPS) - cal_align >= -2 && ((last_corr - S0) % TPS) - cal_align <= 2,
          $sformatf("corrected 1PPS at %0d, calibration 1PPS at %0d",
                    (last_corr - S0) % TPS, cal_align));
    check(n_wrap > 0, "fine-shift cycle wrapped");
    check(n_d > 0, "D produced");
        check(n_stage > 0, "stage changed");
    check(n_atomic > 0, "transmitter ran on the atomic 1PPS");
    check(n_t > 0, "T produced in implementation");
    check(n_corr > 0, "corrected 1PPS produced");
    check(n_overrun == 0, "no FFT overrun");
    $display("mechanisms: wraps=%0d D=%0d full=%0d stage=%0d atomic=%0d T=%0d corr=%0d",
             n_wrap, n_d, n_full, n_stage, n_atomic, n_t, n_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
