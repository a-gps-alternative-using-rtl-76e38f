// tb_rx_chirp_ram: the downchirp RAMs must hold 511*exp(-j*pi*(n^2/1024 - n))
// for n = 0..1023 (to within the table's phase step and the 10-bit
// truncation) after a 1,024-cycle load, read with one cycle of latency.
module tb_rx_chirp_ram;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [SF-1:0] raddr = '0;
  logic signed [CHIRP_W-1:0] rdata_re, rdata_im;
  logic ready;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;

  always #5 clk = ~clk;

  rx_chirp_ram dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    real th, er, ei;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc < NBINS - 1 || cyc > NBINS + 2) begin failures++; $display("FAIL load %0d", cyc); end
    for (int n = 0; n < NBINS; n++) begin
      @(negedge clk); raddr = SF'(n);
      @(negedge clk);
      th = PI * (real'(n) * real'(n) / 1024.0 - real'(n));
      er = 511.75 * $cos(th);
      ei = -511.75 * $sin(th);
      checks++;
      if ((real'(rdata_re) - er) > 4.0 || (er - real'(rdata_re)) > 4.0 || (real'(rdata_im) - ei) > 4.0 || (ei - real'(rdata_im)) > 4.0) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got %0d,%0d exp %f,%f", n, rdata_re, rdata_im, er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
