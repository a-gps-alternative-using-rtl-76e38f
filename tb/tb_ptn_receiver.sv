// tb_ptn_receiver: the substation receiver against a beacon synthesised in
// floating point by the testbench (upconverted chirp, chirp h of each
// 32-chirp cycle advanced by h/Fclk, delayed by X ticks, with added noise).
// The second is shortened to one 32-chirp cycle (TICKS_PER_SEC = 1,048,576)
// and the moving average to 2 observations; the impulse clipper runs with
// M = 2.
//  1. X = 0: D gives the receiver's fixed offset K (must be within +-6 ticks).
//  2. X = 337 after clearing the average: D = K + 337 (+-2), and TOF_bar
//     converges to it.
//  3. GNSS lost, local 1PPS now 25 ticks late: the stage changes, TOF_bar is
//     frozen, D = K + 312 (+-2), T = -25 (+-2) ticks, and the corrected
//     1PPS falls on the central node's second (+-2 ticks).
module tb_ptn_receiver;
  import ptn_pkg::*;
  localparam int TPS = FINE_N * OS;
  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc_data = '0;
  logic pps_local = 0, gnss_valid = 1, ma_clear = 0;
  logic ready, d_valid, tof_valid, tof_window_full, t_valid, stage_change;
  logic pps_corrected, pps_out, fft_overrun;
  logic [FINE_W-1:0] d_index;
  logic [MAG_W-1:0] d_mag;
  logic [FINE_W+FRAC_W-1:0] tof_bar;
  logic signed [FINE_W+FRAC_W-1:0] t_off;
  stage_e stage;
  logic clip_en = 1, clip_measure = 1;
  logic [7:0] clip_m = 8'h20;
  logic [ADC_W-1:0] clip_threshold;
  logic clip_have_threshold, clipped;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;
  real chirp [FINE_N];
  longint cyc = 0;
  longint S0 = 3000;           // tick of the central node's first second
  int X = 0;                   // line delay in ticks
  int E = 0;                   // local 1PPS lateness in ticks
  int last_d = -1, n_d = 0, overruns = 0;
  longint last_corr = -1;

  always #5 clk = ~clk;

  ptn_receiver #(.MA_LEN(2), .TICKS_PER_SEC(TPS)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic real noise();
    real s;
    s = 0;
    for (int i = 0; i < 4; i++) s += real'($urandom_range(1000)) / 1000.0 - 0.5;
    return s * 1.7;             // about unit variance
  endfunction

  // line and local clock
  always @(negedge clk) begin
    longint u, j, m, k;
    real v;
    cyc++;
    u = cyc - S0 - X;
    v = 0;
    if (u >= 0) begin
      j = (u / FINE_N) % OS; m = u % FINE_N;
      v = 1400.0 * chirp[(m + j) % FINE_N];
    end
    v = v + 300.0 * noise();
    adc_data = ADC_W'($rtoi($floor(v + 0.5)));
    k = cyc - S0 - E;
    pps_local = (k >= 0) && (k % TPS < 5);
  end

  always @(posedge clk) begin
    #1;
    if (fft_overrun) overruns++;
    if (d_valid) begin last_d = int'(d_index); n_d++; end
    if (pps_corrected) last_corr = cyc;
  end

  task automatic wait_d(output int d);
    int n0;
    n0 = n_d;
    while (n_d == n0) @(posedge clk);
    d = last_d;
    repeat (100) @(posedge clk);
  endtask

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, k0;
    real tr;
    longint tx_sec;
    for (int m = 0; m < FINE_N; m++) begin
      real t, ph;
      t  = real'(m) / 32.0;
      ph = 1.25e6 * real'(m) / 10.48576e6 + t * t / 2048.0;
      chirp[m] = $cos(2.0 * PI * ph);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. zero delay
    wait_d(d);
    k0 = (d >= FINE_N / 2) ? d - FINE_N : d;    // D is modulo one chirp
    check(k0 >= -6 && k0 <= 6, $sformatf("receiver offset K = %0d", k0));
    // 2. delay 337
    X = 337;
    @(negedge clk) ma_clear = 1; @(negedge clk) ma_clear = 0;
    wait_d(d);                  // cycle that straddled the change
    wait_d(d);
    check(d >= k0 + 335 && d <= k0 + 339, $sformatf("D = %0d, exp %0d", d, k0 + 337));
    wait_d(d);
    check(d >= k0 + 335 && d <= k0 + 339, $sformatf("D = %0d, exp %0d", d, k0 + 337));
    tr = real'(tof_bar) / 256.0;
    check(tr > real'(k0) + 335.0 && tr < real'(k0) + 339.0, $sformatf("TOF_bar %f", tr));
    check(tof_window_full && stage == STAGE_CALIBRATION, "window full in calibration");
    // 3. GNSS lost, local clock late by 25 ticks
    gnss_valid = 0;
    E = 25;
    wait_d(d);
    wait_d(d);
    check(stage == STAGE_IMPLEMENTATION, "implementation stage");
    check(d >= k0 + 310 && d <= k0 + 314, $sformatf("D = %0d, exp %0d", d, k0 + 312));
    check(real'(tof_bar) / 256.0 == tr, "TOF_bar frozen");
    check(t_off > -27 * 256 && t_off < -23 * 256,
          $sformatf("T = %f ticks", real'(t_off) / 256.0));
    // the corrected 1PPS, at the end of this second: compare with the
    // central node's second (S0 + k*TPS), seen through the same 3-cycle
    // synchroniser and output register as the local one (+4)
    last_corr = -1;
    while (last_corr < 0) @(posedge clk);
    tx_sec = ((last_corr - S0 + TPS / 2) / TPS) * TPS + S0;
    check(last_corr - tx_sec >= 2 && last_corr - tx_sec <= 6,
          $sformatf("corrected 1PPS %0d ticks from the central second", last_corr - tx_sec));
    check(overruns == 0, "no FFT overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
