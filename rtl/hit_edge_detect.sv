// hit_edge_detect -- hit pulse detection for the comparator channels.
//
// Each front-end channel delivers an asynchronous hit pulse (the comparator
// output, after the differential input buffer). The instrument checks for
// photon hits every 5 ns, so this block samples all lines on every edge of
// the 200 MHz system clock. Each line passes a SYNC_STAGES-deep flip-flop
// synchroniser; a rising edge (0 in the previous sample, 1 now) is reported
// as a one-cycle pulse on hit_edge. A pulse therefore yields exactly one hit
// however many samples it stays high; it must be high across at least one
// sampling edge to be seen.
//
// Timing: hit_edge rises SYNC_STAGES + 1 clock cycles after the first
// sampling edge that sees hit_in high.
//
// The 5 ns sampling period follows the instrument; the synchroniser depth and
// rising-edge rule are this design's choices.
module hit_edge_detect #(
  parameter int unsigned NCH         = 64,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [NCH-1:0] hit_in,
  output logic [NCH-1:0] hit_edge
);

  logic [SYNC_STAGES-1:0][NCH-1:0] sync_q;
  logic [NCH-1:0]                  prev_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q   <= '0;
      prev_q   <= '0;
      hit_edge <= '0;
    end else begin
      sync_q[0] <= hit_in;
      for (int s = 1; s < int'(SYNC_STAGES); s++) sync_q[s] <= sync_q[s-1];
      prev_q   <= sync_q[SYNC_STAGES-1];
      hit_edge <= sync_q[SYNC_STAGES-1] & ~prev_q;
    end
  end

endmodule
