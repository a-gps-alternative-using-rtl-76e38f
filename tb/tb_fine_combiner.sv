// tb_fine_combiner: feeds cycles of 32 chirp peaks (h = 0..31) with random
// bins and magnitudes and checks D = 32*((1024 - bin) mod 1024) + h of the
// largest one, one cycle after the h = 31 result. A cycle with a missing
// result, or one entered mid-way, must produce no D.
module tb_fine_combiner;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic peak_valid = 0;
  peak_t peak = '0;
  logic d_valid;
  logic [FINE_W-1:0] d_index;
  logic [MAG_W-1:0] d_mag;
  int checks = 0, failures = 0, outs = 0;

  always #5 clk = ~clk;

  fine_combiner dut (.*);

  always @(posedge clk) if (d_valid) outs++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_cycle(input int first_h, input int skip_h, input bit expect_out);
    int best_b, best_h, d_exp, outs0;
    longint best_m;
    best_m = -1; outs0 = outs;
    for (int h = first_h; h < OS; h++) begin
      int b; longint m;
      if (h == skip_h) continue;
      b = int'($urandom_range(NBINS - 1));
      m = longint'($urandom_range(1 << 30)) * 8;
      if (m > best_m) begin best_m = m; best_b = b; best_h = h; end
      @(negedge clk);
      peak_valid = 1; peak.bin = SF'(b); peak.mag = MAG_W'(m); peak.shift = OS_LOG2'(h);
      @(negedge clk); peak_valid = 0;
      repeat ($urandom_range(5)) @(negedge clk);
    end
    @(posedge clk); #1;
    d_exp = 32 * ((NBINS - best_b) % NBINS) + best_h;
    checks++;
    if (expect_out) begin
      if (outs != outs0 + 1 || int'(d_index) != d_exp || longint'(d_mag) != best_m) begin
        failures++;
        $display("FAIL D %0d exp %0d (outs %0d)", d_index, d_exp, outs - outs0);
      end
    end else if (outs != outs0) begin
      failures++;
      $display("FAIL incomplete cycle produced a D");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_cycle(5, -1, 0);          // reception began mid-cycle
    for (int c = 0; c < 30; c++) send_cycle(0, -1, 1);
    send_cycle(0, 17, 0);          // a dropped symbol
    send_cycle(0, -1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
