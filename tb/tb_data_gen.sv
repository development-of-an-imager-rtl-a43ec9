// tb_data_gen -- self-checking test of photon data generation.
//
// Random hit patterns (mostly empty samples), random counter values, a run
// enable that switches on and off, and a random buffer-full flag drive the
// block. A cycle model written here predicts, for every cycle, whether a
// packet is written, its header, time and hit pattern, and the lost-packet
// count. Counters of the mechanisms seen (hit packets, run-start packets,
// drops) must all be non-zero at the end.
module tb_data_gen;
  import imony_pkg::*;

  logic clk = 0, rst = 1, run_en = 0, fifo_full = 0;
  logic [NCH-1:0] hit_edge = '0;
  logic [PPS_W-1:0] pps_cnt = '0;
  logic [TICK_W-1:0] tick_cnt = '0;
  logic run_start, running, fifo_wr;
  packet_t fifo_data;
  logic [31:0] lost_cnt;
  int checks = 0, failures = 0;
  int n_hit = 0, n_run = 0, n_drop = 0;

  data_gen dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  bit      m_run_q = 0, m_valid = 0;
  packet_t m_pkt;
  int      m_lost = 0;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 20000; k++) begin
      // new stimulus on the falling edge
      if ($urandom_range(0, 999) == 0) run_en = ~run_en;
      if (k == 5) run_en = 1;
      hit_edge  = ($urandom_range(0, 3) == 0) ? {$urandom, $urandom} & {$urandom, $urandom} : '0;
      pps_cnt   = $urandom;
      tick_cnt  = 24'($urandom);
      fifo_full = ($urandom_range(0, 9) == 0);
      #0.1;
      // combinational checks in this cycle
      checks++;
      if (run_start !== (run_en && !m_run_q)) begin failures++; $display("FAIL run_start k=%0d", k); end
      checks++;
      if (fifo_wr !== (m_valid && !fifo_full) || (fifo_wr && fifo_data !== m_pkt)) begin
        failures++; $display("FAIL write k=%0d got %0b %h exp %0b %h", k, fifo_wr, fifo_data, m_valid, m_pkt);
      end
      if (fifo_wr && m_pkt.header == HDR_HIT) n_hit++;
      if (fifo_wr && m_pkt.header == HDR_RUN) n_run++;
      if (m_valid && fifo_full) n_drop++;
      checks++;
      if (lost_cnt !== 32'(m_lost)) begin failures++; $display("FAIL lost %0d exp %0d", lost_cnt, m_lost); end
      @(posedge clk);
      // model update for this edge
      if (run_en && !m_run_q) m_lost = 0;
      else if (m_valid && fifo_full) m_lost++;
      if (run_en && !m_run_q) begin
        m_valid = 1; m_pkt = '{header: HDR_RUN, pps_cnt: 0, tick_cnt: tick_cnt, hits: 0};
      end else if (m_run_q && run_en && hit_edge != 0) begin
        m_valid = 1; m_pkt = '{header: HDR_HIT, pps_cnt: pps_cnt, tick_cnt: tick_cnt, hits: hit_edge};
      end else m_valid = 0;
      m_run_q = run_en;
      @(negedge clk);
    end
    checks++; if (n_hit == 0 || n_run == 0 || n_drop == 0) begin
      failures++; $display("FAIL mechanisms hit=%0d run=%0d drop=%0d", n_hit, n_run, n_drop);
    end
    $display("hit packets %0d, run-start packets %0d, drops %0d", n_hit, n_run, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
