// tb_cic_interpolator: drives the CIC interpolator (R = 6, N = 3) with a
// random input at one sample per R clocks and compares every output with a
// floating-point reference: the zero-stuffed input convolved with three
// length-R boxcars and divided by R^(N-1). The fixed pipeline latency is
// found first (it must be the same for all samples), then every sample is
// checked to within 2 LSB. A constant input must come out unchanged.
module tb_cic_interpolator;
  localparam int R = 6, N = 3, NS = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [11:0] in_data = '0;
  logic signed [11:0] out_data;
  int checks = 0, failures = 0;
  int x [NS];
  int y [NS*R + 40];
  real h [3*R];
  real ref_y [NS*R + 40];

  always #5 clk = ~clk;

  cic_interpolator #(.R(R), .N(N), .IN_W(12), .OUT_W(12)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real b1 [3*R], b2 [3*R];
    int best_lag, lag_err, e, best_err;
    // impulse response of three cascaded boxcars
    for (int i = 0; i < 3*R; i++) begin b1[i] = (i < R) ? 1.0 : 0.0; b2[i] = 0; h[i] = 0; end
    for (int i = 0; i < 3*R; i++) for (int k = 0; k < R; k++) if (i + k < 3*R) b2[i+k] += b1[i];
    for (int i = 0; i < 3*R; i++) for (int k = 0; k < R; k++) if (i + k < 3*R) h[i+k] += b2[i];
    for (int i = 0; i < NS; i++)
      x[i] = (i < 100) ? 1000 : int'($urandom_range(3000)) - 1500;
    for (int n = 0; n < NS*R + 40; n++) begin
      ref_y[n] = 0;
      for (int k = 0; k < 3*R; k++)
        if (n - k >= 0 && (n - k) % R == 0 && (n - k) / R < NS)
          ref_y[n] += h[k] * real'(x[(n - k) / R]);
      ref_y[n] = ref_y[n] / real'(R * R);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NS*R + 40; n++) begin
      @(negedge clk);
      in_valid = (n % R == 0) && (n / R < NS);
      in_data  = in_valid ? 12'(x[n / R]) : '0;
      @(posedge clk); #1;
      y[n] = int'(out_data);
    end
    // find the pipeline latency
    best_lag = -1; best_err = 1 << 30;
    for (int lag = 0; lag < 10; lag++) begin
      lag_err = 0;
      for (int n = 0; n < NS*R; n++) begin
        e = y[n + lag] - $rtoi(ref_y[n]);
        if (e < 0) e = -e;
        if (e > lag_err) lag_err = e;
      end
      if (lag_err < best_err) begin best_err = lag_err; best_lag = lag; end
    end
    $display("latency %0d cycles, max error %0d", best_lag, best_err);
    for (int n = 0; n < NS*R; n++) begin
      e = y[n + best_lag] - $rtoi(ref_y[n]);
      checks++;
      if (e > 2 || e < -2) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got %0d exp %f", n, y[n + best_lag], ref_y[n]);
      end
    end
    // steady DC: output equals the constant input
    checks++;
    if (y[80*R] < 998 || y[80*R] > 1002) begin failures++; $display("FAIL DC gain %0d", y[80*R]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
