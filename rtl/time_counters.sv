// time_counters -- GNSS-disciplined photon time stamp.
//
// The time of a photon is kept in two counters, as in the instrument: a
// pulse-per-second (PPS) counter, and a counter of the GNSS 10 MHz reference
// clock that returns to zero at every PPS. Together they give the time with
// 100 ns resolution: t = T0 + pps_cnt seconds + tick_cnt x 100 ns, where T0
// is the last PPS edge before the run started.
//
// Both GNSS signals arrive asynchronously and are sampled in the system clock
// domain (200 MHz) through two-stage synchronisers; their rising edges are
// counted. On a PPS edge tick_cnt becomes 0 (even if a 10 MHz edge falls in
// the same cycle) and pps_cnt increments. run_start clears pps_cnt only (to 1
// if a PPS edge is counted in that same cycle); tick_cnt runs on, so its value
// at the run start, recorded in the run-start packet, places the start within
// the second and every packet of the run refers to the same PPS edge T0.
// Before the first PPS after reset, tick_cnt counts from reset.
//
// Timing: a counter changes 3 cycles after the sampling edge that first sees
// its input high.
//
// The two counters and the reset of the 10 MHz counter at each PPS follow the
// instrument; the widths, the synchronisers and clearing only the PPS count at
// run start are this design's choices.
module time_counters #(
  parameter int unsigned TICK_W = 24,
  parameter int unsigned PPS_W  = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              run_start,
  input  logic              clk10_in,
  input  logic              pps_in,
  output logic [PPS_W-1:0]  pps_cnt,
  output logic [TICK_W-1:0] tick_cnt
);

  logic [2:0] clk10_sr, pps_sr;   // two sync stages + previous sample
  logic       clk10_rise, pps_rise;

  always_ff @(posedge clk) begin
    if (rst) begin
      clk10_sr <= '0;
      pps_sr   <= '0;
    end else begin
      clk10_sr <= {clk10_sr[1:0], clk10_in};
      pps_sr   <= {pps_sr[1:0], pps_in};
    end
  end

  assign clk10_rise = clk10_sr[1] & ~clk10_sr[2];
  assign pps_rise   = pps_sr[1] & ~pps_sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_cnt  <= '0;
      tick_cnt <= '0;
    end else begin
      pps_cnt <= (run_start ? '0 : pps_cnt) + PPS_W'(pps_rise);
      if (pps_rise)        tick_cnt <= '0;
      else if (clk10_rise) tick_cnt <= tick_cnt + 1'b1;
    end
  end

endmodule
