// tb_rx_frame_timer: after a local 1PPS the fine counter m, the LoRa sample
// index n = m/32, the Sclk strobe (every 32 ticks, on m mod 32 = 31) and the
// chirp index h (advancing each 32,768 ticks) must follow a model kept in the
// testbench; a later 1PPS restarts them.
module tb_rx_frame_timer;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0, pps_local = 0;
  logic [FINE_W-1:0] m;
  logic [SF-1:0] n;
  logic [OS_LOG2-1:0] h;
  logic dump, pps_edge, active;
  int checks = 0, failures = 0, dumps;

  always #5 clk = ~clk;

  rx_frame_timer dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run(input int ncyc);
    int em, eh;
    @(negedge clk); pps_local = 1;
    while (!pps_edge) begin @(posedge clk); #1; end
    @(negedge clk); pps_local = 0;
    em = 0; eh = 0; dumps = 0;
    @(posedge clk); #1;
    for (int i = 0; i < ncyc; i++) begin
      check(m == FINE_W'(em) && n == SF'(em / 32) && h == OS_LOG2'(eh) &&
            dump == (em % 32 == 31), $sformatf("tick %0d m=%0d h=%0d", i, m, h));
      if (dump) dumps++;
      em++;
      if (em == FINE_N) begin em = 0; eh++; end
      @(posedge clk); #1;
    end
    check(dumps == ncyc / 32, $sformatf("Sclk strobes %0d", dumps));
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk); #1;
    check(!active && !dump, "idle before 1PPS");
    run(2 * FINE_N + 64);
    run(FINE_N + 320);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
