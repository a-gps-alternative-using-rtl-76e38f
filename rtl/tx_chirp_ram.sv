// tx_chirp_ram: the transmitter's 32,768-point RAM holding one full
// upconverted base chirp, sampled at Fclk.
//
// Word m holds cos(2*pi*phi(m)) scaled to 12 bits, with
//   phi(m) = fc*m/Fclk + (m/32)^2 / (2*1024)   [cycles]
// i.e. a 1.25 MHz carrier plus a chirp that sweeps linearly from 0 to the
// LoRa bandwidth B = Fclk/32 over 1,024 LoRa samples. In units of 2^-21 cycle
// this is  phi21(m) = m*m + 250000*m  (mod 2^21), exactly, because
// 1.25 MHz / 10.48576 MHz = 15625/2^17.
//
// After reset an internal loader writes the 32,768 words, one per cycle,
// from the sine table, and then raises `ready`. (The paper calls the RAM
// pre-allocated; filling it from the formula after reset is this design's
// way of doing that without a 32K-entry data file.) The read port is
// synchronous: `rdata` shows word `raddr` one cycle later.
module tx_chirp_ram
  import ptn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [FINE_W-1:0]       raddr,
  output logic signed [DAC_W-1:0] rdata,
  output logic                    ready
);
  logic signed [DAC_W-1:0] mem [FINE_N];

  logic [FINE_W-1:0] waddr;
  logic [20:0]       phi21;
  logic [9:0]        lut_addr;
  logic signed [LUT_W-1:0] lut_cos, lut_unused;

  // phi21 = waddr^2 + 250000*waddr  (mod 2^21)
  always_comb begin
    logic [41:0] sq;
    logic [41:0] lin;
    sq       = 42'(waddr) * 42'(waddr);
    lin      = 42'(waddr) * 42'd250000;
    phi21    = sq[20:0] + lin[20:0];
    // round to the 1,024-entry table and shift by a quarter cycle for cosine
    lut_addr = 10'((phi21 + 21'd1024) >> 11) + 10'd256;
  end

  sine_lut u_lut (.addr_a(lut_addr), .sin_a(lut_cos),
                  .addr_b(10'd0),    .sin_b(lut_unused));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waddr <= '0;
      ready <= 1'b0;
    end else if (!ready) begin
      waddr <= waddr + 1'b1;
      if (waddr == FINE_W'(FINE_N - 1)) ready <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!ready) mem[waddr] <= lut_cos;
    rdata <= mem[raddr];
  end
endmodule
