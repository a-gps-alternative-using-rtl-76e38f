// tb_tx_sequencer: checks the transmitter's sample counter and shift logic.
// After a GNSS 1PPS the address must run m + h with m counting 0..32767 and
// h advancing once per chirp; a second 1PPS restarts both; with GNSS invalid
// the GNSS 1PPS is ignored and the atomic-clock 1PPS restarts the sequence.
// The expected values come from a counter model kept in the testbench.
module tb_tx_sequencer;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pps_gnss = 0, pps_atomic = 0, gnss_valid = 1;
  logic [FINE_W-1:0] addr;
  logic [OS_LOG2-1:0] shift;
  logic chirp_start, pps_edge, active, on_atomic;
  int checks = 0, failures = 0;
  int exp_m, exp_h;
  int cyc = 0, cyc0;
  always @(posedge clk) cyc++;

  always #5 clk = ~clk;

  tx_sequencer dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  task automatic pulse(input bit atomic);
    @(negedge clk);
    if (atomic) pps_atomic = 1; else pps_gnss = 1;
    repeat (5) @(negedge clk);
    pps_gnss = 0; pps_atomic = 0;
  endtask

  // wait for the edge, then follow the expected sequence for ncyc cycles
  task automatic follow(input int ncyc);
    int guard;
    guard = 0;
    while (!pps_edge && guard < 20) begin @(posedge clk); #1; guard++; end
    check(pps_edge, "pps edge seen");
    exp_m = 0; exp_h = 0;
    @(posedge clk); #1;
    for (int i = 0; i < ncyc; i++) begin
      check(addr == FINE_W'(exp_m + exp_h) && shift == OS_LOG2'(exp_h) &&
            chirp_start == (exp_m == 0),
            $sformatf("cycle %0d addr %0d exp %0d h %0d", i, addr, exp_m + exp_h, exp_h));
      exp_m++;
      if (exp_m == FINE_N) begin exp_m = 0; exp_h++; end
      @(posedge clk); #1;
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
    repeat (10) @(posedge clk); #1;
    check(!active, "idle before first 1PPS");
    fork pulse(0); follow(3 * FINE_N + 100); join
    // restart mid-chirp on the next 1PPS
    fork pulse(0); follow(FINE_N + 50); join
    // GNSS lost: the GNSS pulse is ignored, the atomic pulse restarts
    cyc0 = cyc;
    gnss_valid = 0;
    @(posedge clk); #1;
    check(on_atomic, "atomic selected");
    pulse(0);
    repeat (5) @(posedge clk); #1;
    check(addr == FINE_W'(exp_m + exp_h + (cyc - cyc0)), $sformatf("GNSS 1PPS ignored while invalid: %0d vs %0d", addr, exp_m + exp_h + (cyc - cyc0)));
    fork pulse(1); follow(2 * FINE_N + 10); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
