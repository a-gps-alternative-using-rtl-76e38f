// tb_ptn_transmitter: the central node's output. After a GNSS 1PPS the Fclk
// samples must be the upconverted base chirp, with chirp h of the cycle
// advanced by h samples (reference computed in floating point), for the
// first three chirps and across the shift wrap; the DAC-rate output must
// track the Fclk samples (normalised correlation above 0.95 at the best
// lag). With GNSS declared invalid the GNSS 1PPS is ignored and the atomic
// clock's 1PPS restarts the sequence.
module tb_ptn_transmitter;
  import ptn_pkg::*;
  logic clk = 0, dac_clk = 0, rst_n = 0;
  logic pps_gnss = 0, pps_atomic = 0, gnss_valid = 1;
  logic signed [DAC_W-1:0] tx_sample, dac_data;
  logic [OS_LOG2-1:0] tx_shift;
  logic tx_chirp_start, tx_pps_edge, on_atomic, ready;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;
  real chirp [FINE_N];
  longint cyc = 0;
  longint pps_cyc = -1;

  always #6 clk = ~clk;
  always #1 dac_clk = ~dac_clk;
  always @(posedge clk) cyc++;

  ptn_transmitter dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic int ref_at(input longint u);   // u = ticks since chirp 0
    longint j, m;
    if (u < 0) return 0;
    j = u / FINE_N; m = u % FINE_N;
    return $rtoi($floor(chirp[(m + j % OS) % FINE_N] + 0.5));
  endfunction

  // check tx_sample over a span, given the cycle where sample 0 appears
  task automatic check_span(input longint t0, input longint from_u, input int len);
    int e, d, bad;
    bad = 0;
    while (cyc < t0 + from_u) @(posedge clk);
    for (int i = 0; i < len; i++) begin
      #1;
      e = ref_at(cyc - t0);
      d = int'(tx_sample) - e;
      if (d > 8 || d < -8) bad++;
      @(posedge clk);
    end
    check(bad == 0, $sformatf("%0d samples off near u=%0d", bad, from_u));
  endtask

  task automatic pulse(input bit atomic);
    @(negedge clk);
    if (atomic) pps_atomic = 1; else pps_gnss = 1;
    repeat (4) @(negedge clk);
    pps_gnss = 0; pps_atomic = 0;
  endtask

  // sample-0 alignment: tx_sample shows m = 0 two cycles after the cycle in
  // which the sequencer's counter is 0 (RAM read, then output register)
  always @(posedge clk) begin
    #1;
    if (tx_chirp_start && tx_shift == 0 && pps_cyc < 0) pps_cyc = cyc + 2;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DAC output against the Fclk samples
  real acc_xy, acc_xx, acc_yy;
  int dac_n = 0;
  logic signed [DAC_W-1:0] tx_hist [$];
  always @(posedge dac_clk) begin
    tx_hist.push_back(tx_sample);
    if (tx_hist.size() > 64) void'(tx_hist.pop_front());
  end

  initial begin
    real best, c;
    for (int m = 0; m < FINE_N; m++) begin
      real t, ph;
      t  = real'(m) / 32.0;
      ph = 1.25e6 * real'(m) / 10.48576e6 + t * t / 2048.0;
      chirp[m] = 2047.0 * $cos(2.0 * PI * ph);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    repeat (10) @(posedge clk);
    check(tx_sample == 0, "silent before the first 1PPS");
    pulse(0);
    wait (pps_cyc >= 0);
    check_span(pps_cyc, 0, 3 * FINE_N);
    // DAC correlation over 2,000 DAC samples at lags 0..40
    best = 0;
    for (int lag = 0; lag < 40; lag++) begin
      acc_xy = 0; acc_xx = 0; acc_yy = 0;
      for (int i = 0; i < 600; i++) begin
        @(posedge dac_clk); #0.1;
        if (tx_hist.size() > lag) begin
          real x, y;
          x = real'(tx_hist[tx_hist.size() - 1 - lag]);
          y = real'(dac_data);
          acc_xy += x * y; acc_xx += x * x; acc_yy += y * y;
        end
      end
      c = acc_xy / $sqrt(acc_xx * acc_yy + 1.0);
      if (c > best) best = c;
    end
    check(best > 0.95, $sformatf("DAC correlation %f", best));
    // later in the cycle: across the shift wrap 31 -> 0
    check_span(pps_cyc, 32 * FINE_N - 50, 100);
    // GNSS lost: atomic 1PPS takes over
    gnss_valid = 0;
    pps_cyc = -1;
    pulse(0);
    repeat (10) @(posedge clk);
    check(pps_cyc < 0 && on_atomic, "GNSS 1PPS ignored");
    pulse(1);
    wait (pps_cyc >= 0);
    check_span(pps_cyc, 0, FINE_N + 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
