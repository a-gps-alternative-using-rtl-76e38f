// tx_sequencer: sample counter and fine-shift logic of the central-node
// transmitter.
//
// On every rising edge of the selected 1PPS the 15-bit sample counter `m`
// and the 5-bit shift counter `h` restart at zero, so the first chirp of each
// second starts on the second. `m` advances once per Fclk tick and wraps after
// 32,768 ticks (one chirp, 3.125 ms); at each wrap `h` advances, so the chirps
// of a 32-chirp cycle carry fine shifts 0, 1, ... 31. The RAM address is
// m + h (mod 32,768): chirp h is the base chirp advanced by h Fclk ticks, i.e.
// h/32 of a LoRa sample. Before the first 1PPS the sequencer is idle and
// `active` is low.
//
// The 1PPS source is the GNSS 1PPS while `gnss_valid` is high and the atomic
// clock's 1PPS otherwise (the central node switches to its atomic clock when
// GNSS fails). Both are resynchronised by pps_sync.
//
// From the paper: 15-bit counter, one shift per chirp, 32 shifts per cycle,
// alignment to the 1PPS, switch to the atomic clock. This design's choices:
// the shift is applied as an address advance (the paper does not give the
// direction), the counter runs at Fclk (the paper's text says Fclk/2 in one
// place but its table of parameters needs Fclk), and the restart on every
// 1PPS.
//
// Timing: `m` and `shift` are registered and `addr` is their sum; `addr` is
// 0 in the cycle after `pps_edge`.
module tx_sequencer
  import ptn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pps_gnss,
  input  logic              pps_atomic,
  input  logic              gnss_valid,
  output logic [FINE_W-1:0] addr,       // chirp RAM read address
  output logic [OS_LOG2-1:0] shift,     // fine shift h of the current chirp
  output logic              chirp_start,// high while m == 0
  output logic              pps_edge,   // selected 1PPS edge (one cycle)
  output logic              active,     // a 1PPS has been seen
  output logic              on_atomic   // atomic clock is the time source
);
  logic edge_gnss, edge_atomic;
  logic [FINE_W-1:0] m;

  pps_sync u_sync_gnss   (.clk, .rst_n, .pps_i(pps_gnss),   .edge_o(edge_gnss));
  pps_sync u_sync_atomic (.clk, .rst_n, .pps_i(pps_atomic), .edge_o(edge_atomic));

  assign on_atomic = ~gnss_valid;
  assign pps_edge  = gnss_valid ? edge_gnss : edge_atomic;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m      <= '0;
      shift  <= '0;
      active <= 1'b0;
    end else if (pps_edge) begin
      m      <= '0;
      shift  <= '0;
      active <= 1'b1;
    end else if (active) begin
      m <= m + 1'b1;
      if (m == FINE_W'(FINE_N - 1)) shift <= shift + 1'b1;
    end
  end

  assign addr        = m + FINE_W'(shift);
  assign chirp_start = active && (m == '0);
endmodule
