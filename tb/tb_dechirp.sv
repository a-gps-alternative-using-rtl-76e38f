// tb_dechirp: random baseband samples against a random downchirp table held
// by the testbench (answering the block's address one cycle later, like the
// RAM). Each output must be the exact complex product shifted right by 9,
// two cycles after its input, with its tags.
module tb_dechirp;
  import ptn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  bb_cplx_t in_data = '0;
  logic [SF-1:0] in_n = '0;
  logic [OS_LOG2-1:0] in_h = '0;
  logic [SF-1:0] chirp_addr;
  logic signed [CHIRP_W-1:0] chirp_re, chirp_im;
  logic out_valid;
  fft_cplx_t out_data;
  logic [SF-1:0] out_n;
  logic [OS_LOG2-1:0] out_h;
  int checks = 0, failures = 0;
  int tre [NBINS], tim [NBINS];
  longint q_re [$], q_im [$];
  int q_n [$], q_h [$];

  always #5 clk = ~clk;

  dechirp dut (.*);

  always_ff @(posedge clk) begin
    chirp_re <= CHIRP_W'(tre[chirp_addr]);
    chirp_im <= CHIRP_W'(tim[chirp_addr]);
  end

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      longint er, ei;
      checks++;
      er = q_re.pop_front(); ei = q_im.pop_front();
      if (out_data.re != FFT_W'(er >>> 9) || out_data.im != FFT_W'(ei >>> 9) ||
          out_n != SF'(q_n.pop_front()) || out_h != OS_LOG2'(q_h.pop_front())) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d,%0d exp %0d,%0d", out_data.re, out_data.im, er >>> 9, ei >>> 9);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xr, xi, n;
    for (int i = 0; i < NBINS; i++) begin
      tre[i] = int'($urandom_range(1023)) - 512;
      tim[i] = int'($urandom_range(1023)) - 512;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      if (in_valid) begin
        xr = int'($urandom_range(65535)) - 32768;
        xi = int'($urandom_range(65535)) - 32768;
        n  = int'($urandom_range(NBINS - 1));
        in_data.re = BB_W'(xr); in_data.im = BB_W'(xi);
        in_n = SF'(n); in_h = OS_LOG2'(i);
        q_re.push_back(longint'(xr) * tre[n] - longint'(xi) * tim[n]);
        q_im.push_back(longint'(xr) * tim[n] + longint'(xi) * tre[n]);
        q_n.push_back(n); q_h.push_back(i % 32);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q_re.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q_re.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
