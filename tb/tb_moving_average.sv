// tb_moving_average: with a window of LEN = 5 (reduced from 2,000 to keep
// the test short; the logic does not depend on LEN), random observations
// must give floor(256 * sum / n) over the last min(n, 5) of them, with
// observations ignored while `enable` is low and the window emptied by
// `clear`. A second instance at the default LEN (2,000) is run through 2,100
// observations to check the full-size window and its wrap.
module tb_moving_average;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear = 0, enable = 1, obs_valid = 0;
  logic [FINE_W-1:0] obs = '0;
  logic avg_valid, have_avg, window_full;
  logic [FINE_W+FRAC_W-1:0] avg;
  logic avg_valid2, have2, full2;
  logic [FINE_W+FRAC_W-1:0] avg2;
  int checks = 0, failures = 0;
  int hist [$], hist2 [$];

  always #5 clk = ~clk;

  moving_average #(.LEN(5)) dut (.*);
  moving_average dut2 (.clk, .rst_n, .clear, .enable, .obs_valid, .obs,
                       .avg_valid(avg_valid2), .avg(avg2), .have_avg(have2),
                       .window_full(full2));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic put(input int v, input bit take);
    longint s, s2;
    int lat;
    @(negedge clk);
    obs = FINE_W'(v); obs_valid = 1;
    @(negedge clk); obs_valid = 0;
    if (take) begin
      hist.push_back(v); if (hist.size() > 5) void'(hist.pop_front());
      hist2.push_back(v); if (hist2.size() > 2000) void'(hist2.pop_front());
      lat = 0;
      while (!avg_valid && lat < 100) begin @(posedge clk); #1; lat++; end
      check(lat < 60, $sformatf("divider latency %0d", lat));
      s = 0; foreach (hist[i]) s += hist[i];
      check(longint'(avg) == (s * 256) / hist.size(),
            $sformatf("avg %0d exp %0d", avg, (s * 256) / hist.size()));
      check(window_full == (hist.size() == 5), "window_full");
      while (!avg_valid2) begin @(posedge clk); #1; end
      s2 = 0; foreach (hist2[i]) s2 += hist2[i];
      check(longint'(avg2) == (s2 * 256) / hist2.size(),
            $sformatf("avg2 %0d exp %0d (n=%0d)", avg2, (s2 * 256) / hist2.size(), hist2.size()));
    end else begin
      repeat (60) @(posedge clk); #1;
      check(!avg_valid, "no update while disabled");
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk); #1;
    check(!have_avg, "empty after reset");
    for (int i = 0; i < 12; i++) put(int'($urandom_range(32767)), 1);
    enable = 0;
    put(12345, 0);
    enable = 1;
    for (int i = 0; i < 2100; i++) put(1000 + int'($urandom_range(200)), 1);
    check(full2, "default window full after 2,000");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    @(posedge clk); #1;
    check(!have_avg && !have2, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
