// tb_impulse_clipper: drives windows of random samples (Gaussian-like noise
// of several scales with sparse large impulses) into the clipper with a
// short window (WIN = 1000). After each window the threshold must equal
// M * N90 computed by the testbench's own histogram of the same samples, for
// several multiples M (2, 1.75, 1, and 8, which saturates). Every output
// sample is checked against the clipping rule using the input and the
// threshold present at the same clock edge, including the pass-through before the
// first measurement and with clipping disabled.
module tb_impulse_clipper;
  import ptn_pkg::*;
  localparam int WIN = 1000;
  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] x = '0;
  logic clip_en = 1, measure_en = 0;
  logic [7:0] m_q44 = 8'h20;
  logic signed [ADC_W-1:0] y;
  logic clipped;
  logic [ADC_W-1:0] threshold;
  logic have_threshold;
  int checks = 0, failures = 0, nclip = 0;

  // values seen at the clock edge, for the clipping check
  logic signed [ADC_W-1:0] x_q;
  logic [ADC_W-1:0] thr_q;
  logic en_q, have_q;

  always #5 clk = ~clk;

  impulse_clipper #(.WIN(WIN)) dut (.*);

  always @(posedge clk) begin
    int ax, ey, ec;
    x_q = x; thr_q = threshold; en_q = clip_en; have_q = have_threshold;
    ax = (int'(x_q) < 0) ? -int'(x_q) : int'(x_q);
    if (ax > 2047) ax = 2047;
    if (en_q && have_q && ax >= int'(thr_q)) begin
      ey = (int'(x_q) < 0) ? -int'(thr_q) : int'(thr_q); ec = 1;
    end else begin
      ey = int'(x_q); ec = 0;
    end
    #1;
    if (rst_n) begin
      checks++;
      if (int'(y) != ey || int'(clipped) != ec) begin
        failures++;
        if (failures < 10) $display("FAIL clip x=%0d thr=%0d y=%0d exp %0d", int'(x_q),
                                    int'(thr_q), int'(y), ey);
      end
      nclip += ec;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gauss(int sd);
    int s = 0;
    for (int k = 0; k < 12; k++) s += int'($urandom_range(2000)) - 1000;
    return (s * sd) / 1000;
  endfunction

  function automatic logic signed [ADC_W-1:0] sat(int v);
    if (v > 2047) return 12'sd2047;
    if (v < -2048) return -12'sd2048;
    return ADC_W'(v);
  endfunction

  initial begin
    int sds [6] = '{100, 300, 40, 700, 200, 1500};
    logic [7:0] ms [6] = '{8'h20, 8'h1C, 8'h10, 8'h80, 8'h20, 8'h20};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // before any measurement: pass-through
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); x = sat(gauss(500));
    end
    for (int w = 0; w < 6; w++) begin
      int hist [64];
      int cum, b, t, taken;
      foreach (hist[i]) hist[i] = 0;
      m_q44 = ms[w];
      clip_en = (w != 4);
      taken = 0;
      while (taken < WIN) begin
        int v, a;
        @(negedge clk);
        v = gauss(sds[w]);
        if ($urandom_range(50) == 0) v = ($urandom_range(1) ? 1 : -1) * 1900;
        if ($urandom_range(500) == 0) v = -2048;
        x = sat(v);
        measure_en = ($urandom_range(7) != 0);
        if (measure_en) begin
          a = (int'(x) < 0) ? -int'(x) : int'(x);
          if (a > 2047) a = 2047;
          hist[a >> 5]++;
          taken++;
        end
      end
      @(negedge clk); measure_en = 0;
      cum = 0; b = -1;
      for (int i = 0; i < 64 && b < 0; i++) begin
        cum += hist[i];
        if (cum >= 900) b = i;
      end
      t = ((b + 1) * 32 * int'(ms[w])) >> 4;
      if (t > 2047) t = 2047;
      for (int i = 0; i < 80; i++) begin
        @(negedge clk); x = sat(gauss(sds[w] * 2));
      end
      checks++;
      if (int'(threshold) != t || !have_threshold) begin
        failures++;
        $display("FAIL window %0d threshold %0d exp %0d", w, int'(threshold), t);
      end
      // clip some impulses with the new threshold
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        x = ($urandom_range(4) == 0) ? sat(($urandom_range(1) ? 1 : -1) * 2047) : sat(gauss(sds[w]));
      end
    end
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (nclip == 0) begin failures++; $display("FAIL nothing clipped"); end
    $display("clipped %0d samples", nclip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
