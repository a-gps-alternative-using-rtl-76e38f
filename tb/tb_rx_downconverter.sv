// tb_rx_downconverter: feeds a passband tone at 1.25 MHz + B/2 + B/8 (B =
// 327.68 kHz) and checks the decimated baseband output: one sample per 32
// input ticks, tags carried along, a phase advance of exactly 2*pi/8 per
// sample, and the magnitude predicted from the tone amplitude, the mixer's
// factor 1/2, the two-stage CIC response at B/8 and the output shift.
// A tone at the image side (1.25 MHz + B/2 - B/8) must give -2*pi/8.
module tb_rx_downconverter;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc = '0;
  logic dump = 0;
  logic [SF-1:0] tag_n = '0;
  logic [OS_LOG2-1:0] tag_h = '0;
  bb_cplx_t bb;
  logic bb_valid;
  logic [SF-1:0] bb_n;
  logic [OS_LOG2-1:0] bb_h;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;

  always #5 clk = ~clk;

  rx_downconverter dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run_tone(input real f_off, input real exp_step);
    real f, amp, g, exp_mag, prev_ph, ph, d, mag;
    int nsamp, t, last_valid;
    f = (1.25e6 + 163840.0 + f_off) / 10.48576e6;   // cycles per tick
    amp = 2000.0;
    g = $sin(PI * 32.0 * f_off / 10.48576e6) / (32.0 * $sin(PI * f_off / 10.48576e6));
    exp_mag = amp * 2047.0 / 2.0 * 1024.0 * g * g / 131072.0;
    nsamp = 0; t = 0; last_valid = -1;
    for (int i = 0; i < 32 * 200; i++) begin
      @(negedge clk);
      adc   = 12'($rtoi($floor(amp * $cos(2.0 * PI * f * real'(i)) + 0.5)));
      dump  = (i % 32 == 31);
      tag_n = SF'(i / 32);
      tag_h = OS_LOG2'(i / 32);
      @(posedge clk); #1;
      if (bb_valid) begin
        if (last_valid >= 0) check(i - last_valid == 32, "one sample per 32 ticks");
        last_valid = i;
        ph  = $atan2(real'(bb.im), real'(bb.re));
        mag = $sqrt(real'(bb.re) * real'(bb.re) + real'(bb.im) * real'(bb.im));
        if (nsamp > 4) begin
          d = ph - prev_ph;
          while (d > PI) d -= 2.0 * PI;
          while (d < -PI) d += 2.0 * PI;
          check(d > exp_step - 0.01 && d < exp_step + 0.01,
                $sformatf("phase step %f exp %f", d, exp_step));
          check(mag > exp_mag * 0.98 && mag < exp_mag * 1.02,
                $sformatf("magnitude %f exp %f", mag, exp_mag));
          check(bb_n == SF'(nsamp) && bb_h == OS_LOG2'(nsamp), $sformatf("tags %0d %0d exp %0d", bb_n, bb_h, nsamp));
        end
        prev_ph = ph;
        nsamp++;
      end
    end
    check(nsamp >= 198, $sformatf("sample count %0d", nsamp));
    // drain the pipeline so the next tone starts clean
    @(negedge clk); dump = 0;
    repeat (10) @(posedge clk);
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tone(40960.0, 2.0 * PI / 8.0);
    run_tone(-40960.0, -2.0 * PI / 8.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
