// tb_pps_discipline: with a 4,096-tick second, local 1PPS edges every 4,096
// ticks and a series of offsets T (positive, negative, fractional), the
// corrected pulse must come once per second, at local edge + round(T) modulo
// the second (one registered cycle later). `pps_out` must follow the local
// 1PPS in calibration and the corrected pulse in implementation.
module tb_pps_discipline;
  import ptn_pkg::*;
  localparam int TPS = 4096;
  logic clk = 0, rst_n = 0;
  logic pps_edge = 0, t_valid = 0;
  stage_e stage = STAGE_CALIBRATION;
  logic signed [FINE_W+FRAC_W-1:0] t_off = '0;
  logic pps_corrected, pps_out;
  int checks = 0, failures = 0;
  longint cyc = 0, last_edge = 0;
  int target = -1;
  int pulses = 0;

  always #5 clk = ~clk;

  pps_discipline #(.TICKS_PER_SEC(TPS)) dut (.*);

  // local 1PPS edges and the checker
  always @(posedge clk) begin
    #1;
    cyc++;
    if (pps_corrected) begin
      int since;
      pulses++;
      since = int'(cyc - 1 - last_edge);
      if (since >= TPS) since -= TPS;
      checks++;
      if (target < 0 || since != target) begin
        failures++;
        if (failures < 10) $display("FAIL corrected pulse at %0d exp %0d", since, target);
      end
    end
    if (pps_out) begin
      checks++;
      if (stage == STAGE_CALIBRATION ? (cyc - 1 != last_edge) : !pps_corrected) begin
        failures++; $display("FAIL pps_out");
      end
    end
  end

  initial forever begin
    @(negedge clk);
    if (cyc % TPS == 10) begin pps_edge = 1; last_edge = cyc; end
    else pps_edge = 0;
  end

  task automatic set_t(input int t_fix);   // T in 1/256 ticks
    int r;
    @(negedge clk);
    t_off = (FINE_W+FRAC_W)'(t_fix); t_valid = 1;
    @(negedge clk); t_valid = 0;
    r = (t_fix + 128) >>> 8;
    target = (r < 0) ? r + TPS : r;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3 * TPS) @(posedge clk);
    checks++;
    if (pulses != 0) begin failures++; $display("FAIL pulse before any T"); end
    stage = STAGE_IMPLEMENTATION;
    set_t(37 * 256);        p0 = pulses; repeat (3 * TPS) @(posedge clk);
    checks++; if (pulses - p0 != 3) begin failures++; $display("FAIL pulses %0d", pulses - p0); end
    set_t(-20 * 256);       repeat (2 * TPS) @(posedge clk);
    set_t(100 * 256 + 130); repeat (2 * TPS) @(posedge clk);
    set_t(-3 * 256 - 100);  repeat (2 * TPS) @(posedge clk);
    set_t(0);               repeat (2 * TPS) @(posedge clk);
    stage = STAGE_CALIBRATION;
    repeat (2 * TPS) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
