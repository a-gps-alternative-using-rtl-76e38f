// fft1024: 2^SF-point (1,024) FFT of one dechirped LoRa symbol.
//
// The FFT is what turns one dechirp into the full set of 1,024 chirp
// correlations: bin i of the result is the correlation of the received
// symbol with the base chirp cyclically shifted by i samples.
//
// Architecture: an iterative, in-place radix-2 decimation-in-time FFT with
// one butterfly per clock and two memory banks used as a ping-pong pair.
// Incoming samples (index `in_n`) are written in bit-reversed order into the
// fill bank. When sample 1,023 arrives and the engine is idle the banks swap:
// the engine runs 10 stages of 512 butterflies on the full bank while the
// next symbol fills the other. Each butterfly scales its outputs by 1/2 with
// rounding, so the transform is divided by 1,024 and cannot overflow. After
// the last stage the 1,024 bins are streamed out in natural order, one per
// clock, with `out_bin`, and the symbol's tag (`in_h`, the fine-shift index)
// travels along. Twiddles exp(-j*2*pi*k/1024) come from the sine table.
//
// A symbol completes every 32,768 cycles; the engine needs 5,120 + 1,024
// cycles, so it is idle long before the next symbol. If a symbol completes
// while the engine is busy, `overrun` pulses and that symbol is dropped.
//
// The paper gives only that an FFT of 2^SF points follows the dechirp; the
// architecture, scaling and widths are this design's.
module fft1024
  import ptn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fft_cplx_t          in_data,
  input  logic [SF-1:0]      in_n,
  input  logic [OS_LOG2-1:0] in_h,
  output logic               out_valid,
  output fft_cplx_t          out_data,
  output logic [SF-1:0]      out_bin,
  output logic               out_last,
  output logic [OS_LOG2-1:0] out_h,
  output logic               busy,
  output logic               overrun
);
  typedef enum logic [1:0] {S_IDLE, S_BFLY, S_OUT} state_e;

  localparam int unsigned TW = FFT_W + 2;

  fft_cplx_t mem [2][NBINS];

  state_e             state;
  logic               wb;            // bank being filled
  logic               cb;            // bank being transformed
  logic [3:0]         stage;
  logic [SF-2:0]      j;             // butterfly within the stage
  logic [SF-1:0]      k;             // output bin
  logic [OS_LOG2-1:0] tag;

  // butterfly addressing
  logic [SF-1:0] a_addr, b_addr, half, pos, tw_k;
  fft_cplx_t     xa, xb, ya, yb;
  logic signed [LUT_W-1:0] w_sin, w_cos;

  function automatic logic [SF-1:0] bitrev(input logic [SF-1:0] v);
    for (int i = 0; i < SF; i++) bitrev[i] = v[SF-1-i];
  endfunction

  function automatic fft_t half_round(input logic signed [TW-1:0] v);
    logic signed [TW-1:0] r;
    r = (v + TW'(1)) >>> 1;
    if (r > TW'((1 << (FFT_W - 1)) - 1))  return {1'b0, {(FFT_W-1){1'b1}}};
    else if (r < -TW'(1 << (FFT_W - 1)))  return {1'b1, {(FFT_W-1){1'b0}}};
    else                                  return FFT_W'(r);
  endfunction

  always_comb begin
    half   = SF'(1) << stage;
    pos    = SF'(j) & (half - 1'b1);
    a_addr = ((SF'(j) >> stage) << (stage + 1)) | pos;
    b_addr = a_addr | half;
    tw_k   = pos << (4'(SF - 1) - stage);
  end

  sine_lut u_lut (.addr_a(tw_k),           .sin_a(w_sin),
                  .addr_b(tw_k + 10'd256), .sin_b(w_cos));

  always_comb begin
    logic signed [FFT_W+LUT_W:0]    pr, pi;
    logic signed [FFT_W+LUT_W+12:0] sr, si;
    logic signed [TW-1:0] tr, ti;
    xa = mem[cb][a_addr];
    xb = mem[cb][b_addr];
    // t = xb * exp(-j*2*pi*k/N) = xb * (cos - j sin)
    pr = (FFT_W+LUT_W+1)'(xb.re) * w_cos + (FFT_W+LUT_W+1)'(xb.im) * w_sin;
    pi = (FFT_W+LUT_W+1)'(xb.im) * w_cos - (FFT_W+LUT_W+1)'(xb.re) * w_sin;
    // the table's unit is 2047; divide by it as x * 2049 / 2^22, rounded
    sr = ((FFT_W+LUT_W+13)'(pr) <<< 11) + (FFT_W+LUT_W+13)'(pr);
    si = ((FFT_W+LUT_W+13)'(pi) <<< 11) + (FFT_W+LUT_W+13)'(pi);
    tr = TW'((sr + (FFT_W+LUT_W+13)'(1 << 21)) >>> 22);
    ti = TW'((si + (FFT_W+LUT_W+13)'(1 << 21)) >>> 22);
    ya.re = half_round(TW'(xa.re) + tr);
    ya.im = half_round(TW'(xa.im) + ti);
    yb.re = half_round(TW'(xa.re) - tr);
    yb.im = half_round(TW'(xa.im) - ti);
  end

  wire last_in = in_valid && (in_n == SF'(NBINS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      wb        <= 1'b0;
      cb        <= 1'b1;
      stage     <= '0;
      j         <= '0;
      k         <= '0;
      tag       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_bin   <= '0;
      out_last  <= 1'b0;
      out_h     <= '0;
      overrun   <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      overrun   <= 1'b0;
      if (last_in) begin
        if (state == S_IDLE) begin
          wb    <= ~wb;
          cb    <= wb;
          tag   <= in_h;
          stage <= '0;
          j     <= '0;
          state <= S_BFLY;
        end else begin
          overrun <= 1'b1;
        end
      end
      case (state)
        S_BFLY: begin
          j <= j + 1'b1;
          if (j == '1) begin
            stage <= stage + 1'b1;
            if (stage == 4'(SF - 1)) begin
              state <= S_OUT;
              k     <= '0;
            end
          end
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_data  <= mem[cb][k];
          out_bin   <= k;
          out_h     <= tag;
          out_last  <= (k == '1);
          k         <= k + 1'b1;
          if (k == '1) state <= S_IDLE;
        end
        default: ;
      endcase
    end
  end

  // memory writes: input samples into the fill bank, butterflies in place
  always_ff @(posedge clk) begin
    if (in_valid) mem[wb][bitrev(in_n)] <= in_data;
    if (state == S_BFLY) begin
      mem[cb][a_addr] <= ya;
      mem[cb][b_addr] <= yb;
    end
  end

  assign busy = (state != S_IDLE);
endmodule
