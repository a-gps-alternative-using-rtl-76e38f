// rx_frame_timer: the receiver's chirp frame, aligned to its local 1PPS.
//
// The receiver's downchirp must start on the 1PPS rising edge, exactly as the
// transmitter's chirp does. This block restarts a 15-bit fine-sample counter
// `m` (one count per Fclk tick) and a 5-bit chirp counter `h` on each local
// 1PPS edge. From `m` it derives the LoRa sample index n = m/32 and the Sclk
// strobe `dump`, high on the last Fclk tick of each LoRa sample (every 32
// ticks, so Sclk = Fclk/32 = 327.68 kHz). `h` is the chirp's position in the
// 32-chirp cycle and therefore equals the fine shift the transmitter applied
// to the chirp that arrives in this frame.
//
// During the calibration stage the local 1PPS comes from GNSS; after GNSS is
// lost it is the receiver's free-running 1PPS, and this block does not care
// which. Timing: `m` is 0 in the cycle after the synchronised edge, matching
// tx_sequencer, so a zero-delay link gives the same m at both ends.
module rx_frame_timer
  import ptn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pps_local,
  output logic [FINE_W-1:0]  m,        // fine tick within the chirp
  output logic [SF-1:0]      n,        // LoRa sample index within the chirp
  output logic [OS_LOG2-1:0] h,        // chirp index in the 32-chirp cycle
  output logic               dump,     // last tick of LoRa sample n
  output logic               pps_edge, // synchronised local 1PPS edge
  output logic               active
);
  pps_sync u_sync (.clk, .rst_n, .pps_i(pps_local), .edge_o(pps_edge));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m      <= '0;
      h      <= '0;
      active <= 1'b0;
    end else if (pps_edge) begin
      m      <= '0;
      h      <= '0;
      active <= 1'b1;
    end else if (active) begin
      m <= m + 1'b1;
      if (m == FINE_W'(FINE_N - 1)) h <= h + 1'b1;
    end
  end

  assign n    = m[FINE_W-1:OS_LOG2];
  assign dump = active && (m[OS_LOG2-1:0] == '1);
endmodule
