// data_gen -- photon data generation.
//
// While a run is enabled, every 5 ns sample in which at least one channel
// reports a hit produces one packet: the hit pattern of all channels together
// with the PPS and 10 MHz counter values of that sample (layout in
// imony_pkg::packet_t). Samples without a hit produce nothing. When run_en
// rises, the block emits run_start for one cycle (which also clears the PPS
// counter) and writes a run-start packet (header HDR_RUN, pps_cnt 0, the
// 10 MHz count of that cycle, hit pattern zero) that marks the start of the
// run within the current second; hits in that one cycle are not recorded.
//
// The packet is registered, so it is written one cycle after the sample:
// fifo_wr = pkt_valid and not fifo_full. A packet that meets a full buffer is
// dropped and counted in lost_cnt (saturating, cleared at run start).
//
// Combining hit pattern and both counters into one packet per hit follows the
// instrument; the packet layout, the run-start packet and the drop-and-count
// overflow rule are this design's choices.
module data_gen
  import imony_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              run_en,
  input  logic [NCH-1:0]    hit_edge,
  input  logic [PPS_W-1:0]  pps_cnt,
  input  logic [TICK_W-1:0] tick_cnt,
  output logic              run_start,
  output logic              running,
  output logic              fifo_wr,
  output packet_t           fifo_data,
  input  logic              fifo_full,
  output logic [31:0]       lost_cnt
);

  logic    run_en_q;
  logic    pkt_valid;
  packet_t pkt;

  assign run_start = run_en & ~run_en_q;
  assign running   = run_en_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      run_en_q  <= 1'b0;
      pkt_valid <= 1'b0;
      pkt       <= '0;
    end else begin
      run_en_q  <= run_en;
      pkt_valid <= 1'b0;
      if (run_start) begin
        pkt_valid <= 1'b1;
        pkt       <= '{header: HDR_RUN, pps_cnt: '0, tick_cnt: tick_cnt, hits: '0};
      end else if (run_en_q && run_en && (|hit_edge)) begin
        pkt_valid <= 1'b1;
        pkt       <= '{header: HDR_HIT, pps_cnt: pps_cnt, tick_cnt: tick_cnt, hits: hit_edge};
      end
    end
  end

  assign fifo_wr   = pkt_valid & ~fifo_full;
  assign fifo_data = pkt;

  always_ff @(posedge clk) begin
    if (rst || run_start) lost_cnt <= '0;
    else if (pkt_valid && fifo_full && lost_cnt != '1) lost_cnt <= lost_cnt + 1'b1;
  end

endmodule
