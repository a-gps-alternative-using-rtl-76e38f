// ptn_transmitter: the central node's chirp beacon.
//
// tx_sequencer restarts the chirp sequence on each 1PPS (GNSS, or the atomic
// clock when GNSS is lost) and addresses tx_chirp_ram with the sample counter
// plus the chirp's fine shift, so that chirp h of every 32-chirp cycle is
// the upconverted base chirp advanced by h/Fclk. The RAM output, registered,
// is `tx_sample` at Fclk (32,768 samples, 3.125 ms per chirp). It is handed
// to the DAC clock domain and interpolated there by cic_interpolator to the
// DAC rate (`dac_data`).
//
// Clock crossing (this design's): `tx_sample` is held in a register for a
// whole Fclk cycle and a toggle flips with each new sample; in the DAC domain
// the toggle passes two flip-flops and each change captures the held sample.
// This is safe when the DAC clock is at least four times Fclk (it is 6x).
// Until the chirp RAM is loaded and a 1PPS has been seen, `tx_sample` is 0.
module ptn_transmitter
  import ptn_pkg::*;
#(
  parameter int unsigned CIC_R = 6,
  parameter int unsigned CIC_N = 3
) (
  input  logic                    clk,        // Fclk
  input  logic                    dac_clk,    // CIC_R * Fclk
  input  logic                    rst_n,
  input  logic                    pps_gnss,
  input  logic                    pps_atomic,
  input  logic                    gnss_valid,
  output logic signed [DAC_W-1:0] tx_sample,
  output logic [OS_LOG2-1:0]      tx_shift,
  output logic                    tx_chirp_start,
  output logic                    tx_pps_edge,
  output logic                    on_atomic,
  output logic                    ready,
  output logic signed [DAC_W-1:0] dac_data
);
  logic [FINE_W-1:0]       addr;
  logic                    active, active_r;
  logic signed [DAC_W-1:0] ram_q;
  logic                    tgl;

  tx_sequencer u_seq (
    .clk, .rst_n, .pps_gnss, .pps_atomic, .gnss_valid,
    .addr, .shift(tx_shift), .chirp_start(tx_chirp_start), .pps_edge(tx_pps_edge),
    .active, .on_atomic);

  tx_chirp_ram u_ram (.clk, .rst_n, .raddr(addr), .rdata(ram_q), .ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_r  <= 1'b0;
      tx_sample <= '0;
      tgl       <= 1'b0;
    end else begin
      active_r  <= active && ready;
      tx_sample <= active_r ? ram_q : '0;
      tgl       <= ~tgl;
    end
  end

  // ---- DAC clock domain ---------------------------------------------------
  logic [2:0]              tsync;
  logic signed [DAC_W-1:0] cap;
  logic                    cap_v;

  always_ff @(posedge dac_clk or negedge rst_n) begin
    if (!rst_n) begin
      tsync <= '0;
      cap   <= '0;
      cap_v <= 1'b0;
    end else begin
      tsync <= {tsync[1:0], tgl};
      cap_v <= tsync[2] ^ tsync[1];
      if (tsync[2] ^ tsync[1]) cap <= tx_sample;
    end
  end

  cic_interpolator #(.R(CIC_R), .N(CIC_N), .IN_W(DAC_W), .OUT_W(DAC_W)) u_cic (
    .clk(dac_clk), .rst_n, .in_valid(cap_v), .in_data(cap), .out_data(dac_data));
endmodule
