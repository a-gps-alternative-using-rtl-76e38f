// tb_tx_chirp_ram: checks that the transmitter RAM is filled with the
// upconverted base chirp cos(2*pi*(fc*m/Fclk + (m/32)^2/2048)) in 32,768
// cycles. The reference is evaluated in floating point; the tolerance covers
// the 1,024-entry table's phase step.
module tb_tx_chirp_ram;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [FINE_W-1:0] raddr = '0;
  logic signed [DAC_W-1:0] rdata;
  logic ready;
  int checks = 0, failures = 0;
  int cyc;

  always #5 clk = ~clk;

  tx_chirp_ram dut (.*);

  function automatic int ref_val(input int m);
    real t, ph;
    t  = real'(m) / 32.0;
    ph = 1.25e6 * real'(m) / 10.48576e6 + t * t / 2048.0;
    return $rtoi($floor(2047.0 * $cos(2.0 * 3.14159265358979 * ph) + 0.5));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, diff;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc < FINE_N - 1 || cyc > FINE_N + 2) begin
      failures++; $display("FAIL load took %0d cycles", cyc);
    end
    for (int i = 0; i < 3000; i++) begin
      int m;
      m = (i < 1000) ? i : int'($urandom_range(FINE_N - 1));
      @(negedge clk); raddr = FINE_W'(m);
      @(negedge clk);
      e    = ref_val(m);
      diff = int'(rdata) - e;
      checks++;
      if (diff > 8 || diff < -8) begin
        failures++;
        if (failures < 10) $display("FAIL m=%0d got %0d exp %0d", m, rdata, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
