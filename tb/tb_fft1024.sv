// tb_fft1024: checks the 1,024-point FFT against a direct DFT computed in
// floating point by the testbench, for (1) a pure tone on bin 300,
// (2) a random frame and (3) a dechirped-like tone between bins. Outputs
// must match X[k]/1024 to within 6 LSB (12-bit twiddles, ten rounded stages). Frames are fed one sample per 8
// cycles so that frame k+1 fills while frame k is transformed (ping-pong);
// each result must start within 5,200 cycles of its last input sample. A
// final frame fed one sample per cycle arrives while the engine is busy and
// must raise `overrun`.
module tb_fft1024;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fft_cplx_t in_data = '0;
  logic [SF-1:0] in_n = '0;
  logic [OS_LOG2-1:0] in_h = '0;
  logic out_valid, out_last, busy, overrun;
  fft_cplx_t out_data;
  logic [SF-1:0] out_bin;
  logic [OS_LOG2-1:0] out_h;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;
  int xr [3][NBINS], xi [3][NBINS];
  int frame_out = 0, bin_cnt = 0, overruns = 0;
  longint t_last_in [3];
  longint cyc = 0;
  real cosr [NBINS], sinr [NBINS];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fft1024 dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // reference DFT bin k of frame f, divided by N
  task automatic dft(input int f, input int k, output real yr, output real yi);
    yr = 0; yi = 0;
    for (int n = 0; n < NBINS; n++) begin
      int idx;
      idx = (k * n) % NBINS;
      yr += real'(xr[f][n]) * cosr[idx] + real'(xi[f][n]) * sinr[idx];
      yi += real'(xi[f][n]) * cosr[idx] - real'(xr[f][n]) * sinr[idx];
    end
    yr = yr / 1024.0; yi = yi / 1024.0;
  endtask

  always @(posedge clk) begin
    #1;
    if (overrun) overruns++;
    if (out_valid && frame_out < 3) begin
      real yr, yi;
      if (bin_cnt == 0)
        check(cyc - t_last_in[frame_out] <= 5200 + 20,
              $sformatf("latency %0d", cyc - t_last_in[frame_out]));
      dft(frame_out, int'(out_bin), yr, yi);
      check(out_bin == SF'(bin_cnt) && out_h == OS_LOG2'(frame_out + 5) &&
            real'(out_data.re) - yr < 6.0 && yr - real'(out_data.re) < 6.0 &&
            real'(out_data.im) - yi < 6.0 && yi - real'(out_data.im) < 6.0,
            $sformatf("frame %0d bin %0d got %0d,%0d exp %f,%f", frame_out, int'(out_bin),
                      int'(out_data.re), int'(out_data.im), yr, yi));
      bin_cnt++;
      if (out_last) begin
        check(bin_cnt == NBINS, "1024 bins");
        bin_cnt = 0; frame_out++;
      end
    end
  end

  task automatic send(input int f, input int gap);
    for (int n = 0; n < NBINS; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_data.re = FFT_W'(xr[f % 3][n]); in_data.im = FFT_W'(xi[f % 3][n]);
      in_n = SF'(n); in_h = OS_LOG2'(f + 5);
      if (n == NBINS - 1 && f < 3) t_last_in[f] = cyc + 1;
      repeat (gap - 1) begin @(negedge clk); in_valid = 0; end
      if (gap == 1) ;
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NBINS; i++) begin
      cosr[i] = $cos(2.0 * PI * real'(i) / 1024.0);
      sinr[i] = $sin(2.0 * PI * real'(i) / 1024.0);
    end
    for (int n = 0; n < NBINS; n++) begin
      xr[0][n] = $rtoi($floor(20000.0 * $cos(2.0 * PI * 300.0 * real'(n) / 1024.0) + 0.5));
      xi[0][n] = $rtoi($floor(20000.0 * $sin(2.0 * PI * 300.0 * real'(n) / 1024.0) + 0.5));
      xr[1][n] = int'($urandom_range(60000)) - 30000;
      xi[1][n] = int'($urandom_range(60000)) - 30000;
      xr[2][n] = $rtoi($floor(15000.0 * $cos(2.0 * PI * 700.4 * real'(n) / 1024.0) + 0.5));
      xi[2][n] = $rtoi($floor(15000.0 * $sin(2.0 * PI * 700.4 * real'(n) / 1024.0) + 0.5));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(0, 8);
    send(1, 8);
    send(2, 8);
    wait (frame_out == 3);
    repeat (10) @(posedge clk);
    // back-to-back at full rate: the second frame completes while busy
    send(0, 1);
    send(1, 1);
    repeat (20) @(posedge clk);
    check(overruns == 1, $sformatf("overrun count %0d", overruns));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
