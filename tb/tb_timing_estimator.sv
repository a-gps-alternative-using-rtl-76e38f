// tb_timing_estimator: checks the stage control (calibration while GNSS is
// valid, implementation after its loss, back on its return, each change
// flagged once), the moving-average enable, and T = D - TOF_bar taken
// modulo one chirp (32,768 steps) as a signed number with 8 fractional
// bits, against values computed in the testbench.
module tb_timing_estimator;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic gnss_valid = 1, d_valid = 0, tof_have = 1;
  logic [FINE_W-1:0] d_index = '0;
  logic [FINE_W+FRAC_W-1:0] tof_bar = '0;
  stage_e stage;
  logic ma_enable, t_valid, stage_change;
  logic signed [FINE_W+FRAC_W-1:0] t_off;
  int checks = 0, failures = 0, changes = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (stage_change) changes++;

  timing_estimator dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic one(input int d, input int tof);
    int e;
    @(negedge clk);
    d_index = FINE_W'(d); tof_bar = (FINE_W+FRAC_W)'(tof); d_valid = 1;
    @(negedge clk); d_valid = 0;
    e = d * 256 - tof;
    while (e >= 32768 * 128) e -= 32768 * 256;
    while (e < -32768 * 128) e += 32768 * 256;
    check(t_valid == tof_have && int'(t_off) == e,
          $sformatf("T %0d exp %0d (D %0d TOF %0d)", t_off, e, d, tof));
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk); #1;
    check(stage == STAGE_CALIBRATION && ma_enable, "calibration with GNSS");
    for (int i = 0; i < 50; i++)
      one(int'($urandom_range(32767)), int'($urandom_range(32768 * 256 - 1)));
    one(5, 32760 * 256);              // wraps forward
    one(32760, 5 * 256 + 77);         // wraps backward
    gnss_valid = 0;
    repeat (4) @(posedge clk); #1;
    check(stage == STAGE_IMPLEMENTATION && !ma_enable && changes == 1, "implementation after loss");
    for (int i = 0; i < 20; i++)
      one(int'($urandom_range(32767)), int'($urandom_range(32768 * 256 - 1)));
    tof_have = 0;
    one(100, 0);
    tof_have = 1;
    gnss_valid = 1;
    repeat (4) @(posedge clk); #1;
    check(stage == STAGE_CALIBRATION && changes == 2, "back to calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
