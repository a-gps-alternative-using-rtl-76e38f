// tb_peak_search: streams random FFT frames (with one dominant bin, and with
// pure noise where ties are possible) into the peak search and compares the
// reported bin, squared magnitude and tag with the arg max the testbench
// computes itself (first index on a tie).
module tb_peak_search;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  fft_cplx_t in_data = '0;
  logic [SF-1:0] in_bin = '0;
  logic [OS_LOG2-1:0] in_h = '0;
  logic peak_valid;
  peak_t peak;
  int checks = 0, failures = 0, frames_seen = 0;
  int exp_bin [$];
  longint exp_mag [$];
  int exp_h [$];

  always #5 clk = ~clk;

  peak_search dut (.*);

  always @(posedge clk) begin
    #1;
    if (peak_valid) begin
      int eb, eh; longint em;
      eb = exp_bin.pop_front(); em = exp_mag.pop_front(); eh = exp_h.pop_front();
      checks++;
      frames_seen++;
      if (int'(peak.bin) != eb || longint'(peak.mag) != em || int'(peak.shift) != eh) begin
        failures++;
        $display("FAIL peak bin %0d mag %0d exp bin %0d mag %0d", int'(peak.bin),
                 longint'(peak.mag), eb, em);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      int best_b, pk, r, i, span;
      longint best_m, mg;
      pk = int'($urandom_range(NBINS - 1));
      span = (f % 4 == 3) ? 3 : 2000;       // small values make ties likely
      best_m = -1; best_b = 0;
      for (int b = 0; b < NBINS; b++) begin
        r = int'($urandom_range(2 * span)) - span;
        i = int'($urandom_range(2 * span)) - span;
        if (b == pk && f % 4 != 3) begin r = 60000 + f; i = -50000; end
        mg = longint'(r) * r + longint'(i) * i;
        if (mg > best_m) begin best_m = mg; best_b = b; end
        @(negedge clk);
        in_valid = 1; in_data.re = FFT_W'(r); in_data.im = FFT_W'(i);
        in_bin = SF'(b); in_last = (b == NBINS - 1); in_h = OS_LOG2'(f);
        if ($urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
      end
      exp_bin.push_back(best_b); exp_mag.push_back(best_m); exp_h.push_back(f % 32);
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (frames_seen != 40) begin failures++; $display("FAIL frames %0d", frames_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
