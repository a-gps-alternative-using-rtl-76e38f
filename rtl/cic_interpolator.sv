// cic_interpolator: cascaded integrator-comb interpolator that raises the
// transmit sample rate to the DAC rate.
//
// N comb stages run at the input rate (one step per `in_valid`), the comb
// output is zero-stuffed to the output rate, and N integrators run on every
// DAC clock. The DC gain of that structure is R^(N-1); the output is scaled
// back by a fixed multiply-and-shift and saturated to OUT_W bits.
//
// The paper names a CIC interpolator in front of a 65 MSPS DAC and nothing
// else. The order N = 3 and the ratio R = 6 are this design's choices (65
// MSPS / 10.48576 MHz = 6.2 is not an integer; with R = 6 the DAC runs at
// 62.9 MSPS). `in_valid` must be high once every R clocks of `clk`.
//
// Timing: `out_data` is registered; an input step reaches the output after
// the comb register and the N integrators.
module cic_interpolator #(
  parameter int unsigned R     = 6,
  parameter int unsigned N     = 3,
  parameter int unsigned IN_W  = 12,
  parameter int unsigned OUT_W = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned GAIN   = R ** (N - 1);
  localparam int unsigned GROW   = $clog2(GAIN * R) + N;
  localparam int unsigned W      = IN_W + GROW;
  localparam int unsigned NSHIFT = 16;
  localparam int unsigned NMUL   = ((1 << NSHIFT) + GAIN / 2) / GAIN;
  localparam int unsigned SHIFT_OUT = NSHIFT + IN_W - OUT_W;

  logic signed [W-1:0] comb_d [N];   // comb delay elements
  logic signed [W-1:0] comb_q;       // comb output, held between inputs
  logic signed [W-1:0] integ [N];
  logic signed [W-1:0] comb_v [N+1];

  always_comb begin
    comb_v[0] = W'(in_data);
    for (int i = 0; i < N; i++) comb_v[i+1] = comb_v[i] - comb_d[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        comb_d[i] <= '0;
        integ[i]  <= '0;
      end
      comb_q   <= '0;
      out_data <= '0;
    end else begin
      if (in_valid) begin
        for (int i = 0; i < N; i++) comb_d[i] <= comb_v[i];
        comb_q <= comb_v[N];
      end else begin
        comb_q <= '0;                      // zero stuffing
      end
      integ[0] <= integ[0] + comb_q;
      for (int i = 1; i < N; i++) integ[i] <= integ[i] + integ[i-1];
      out_data <= sat(integ[N-1]);
    end
  end

  function automatic logic signed [OUT_W-1:0] sat(input logic signed [W-1:0] v);
    logic signed [W+NSHIFT+1:0] p;
    logic signed [W+NSHIFT+1:0] s;
    p = (W+NSHIFT+2)'(v) * signed'((W+NSHIFT+2)'(NMUL));
    s = p >>> SHIFT_OUT;
    if (s > (W+NSHIFT+2)'((1 << (OUT_W - 1)) - 1))       return {1'b0, {(OUT_W-1){1'b1}}};
    else if (s < -(W+NSHIFT+2)'(1 << (OUT_W - 1)))       return {1'b1, {(OUT_W-1){1'b0}}};
    else                                                 return OUT_W'(s);
  endfunction
endmodule
