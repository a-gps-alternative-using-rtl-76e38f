// pps_sync: brings an asynchronous one-pulse-per-second signal into the
// Fclk domain and marks its rising edge.
//
// Two flip-flops resynchronise the pulse, a third holds the previous level,
// and `edge_o` is high for exactly one cycle after each rising edge. The
// latency from the pin to `edge_o` is three clock cycles; every 1PPS in the
// design goes through this same block, so the latency cancels between the
// transmitter and the receiver. (Helper of this design; the paper only says
// that chirps are aligned to the 1PPS rising edge.)
module pps_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic pps_i,
  output logic edge_o
);
  logic [2:0] sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sh <= '0;
    else        sh <= {sh[1:0], pps_i};
  end

  assign edge_o = sh[1] & ~sh[2];
endmodule
