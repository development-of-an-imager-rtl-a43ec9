// tb_time_counters -- self-checking test of the GNSS time counters.
//
// A 10 MHz reference (period 100 ns) and a PPS pulse every PPS_TICKS reference
// cycles (shortened from 10^7 to keep the run short) are generated with a
// phase offset to the 200 MHz system clock. An independent model counts the
// generated edges: a PPS edge increments the seconds count and zeroes the
// tick count, any other reference edge increments the tick count, a run
// start zeroes the seconds count only. The counters are compared with the
// model midway between reference edges; run starts are issued every seventh
// reference cycle in the low phase. A directed part checks the 3-cycle
// latency of a PPS edge, that a run start leaves the tick count alone, and a
// run start that coincides with a counted PPS edge (seconds count 1).
module tb_time_counters;
  localparam int PPS_TICKS = 37;

  logic clk = 0, rst = 1, run_start = 0, clk10_in = 0, pps_in = 0;
  logic [31:0] pps_cnt;
  logic [23:0] tick_cnt;
  int checks = 0, failures = 0;
  int m_pps = 0, m_tick = 0;
  bit gen_on = 0;
  int n_rs = 0;

  time_counters #(.TICK_W(24), .PPS_W(32)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference generator and model
  initial begin
    int n = 0;
    wait (gen_on);
    #1.3;
    forever begin
      n++;
      clk10_in = 1;
      if (n % PPS_TICKS == 0) begin pps_in = 1; m_pps++; m_tick = 0; end
      else m_tick++;
      #25 ;
      #25 ;   // midpoint of the high phase: compare
      checks++;
      if (pps_cnt != 32'(m_pps) || tick_cnt != 24'(m_tick)) begin
        failures++;
        $display("FAIL t=%0t pps %0d/%0d tick %0d/%0d", $time, pps_cnt, m_pps, tick_cnt, m_tick);
      end
      clk10_in = 0;
      #20 pps_in = 0;
      if (n % 7 == 3) begin
        #10 run_start = 1; m_pps = 0; n_rs++;
        #5  run_start = 0;
        #15;
      end else #30;
    end
  end

  initial begin
    int lat;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    // directed latency check of a single PPS edge
    repeat (3) @(negedge clk);
    pps_in = 1;
    lat = 0;
    while (pps_cnt == 0 && lat < 10) begin @(posedge clk); #0.1; lat++; end
    checks++; if (lat != 3) begin failures++; $display("FAIL pps latency %0d", lat); end
    checks++; if (!(pps_cnt == 1 && tick_cnt == 0)) begin failures++; $display("FAIL after pps"); end
    @(negedge clk) pps_in = 0;
    // three reference edges, then a run start: seconds cleared, ticks kept
    repeat (3) begin
      @(negedge clk) clk10_in = 1;
      repeat (4) @(negedge clk);
      clk10_in = 0;
      repeat (4) @(negedge clk);
    end
    checks++; if (tick_cnt != 3) begin failures++; $display("FAIL tick %0d", tick_cnt); end
    @(negedge clk) run_start = 1;
    @(negedge clk) run_start = 0;
    checks++; if (pps_cnt != 0 || tick_cnt != 3) begin failures++; $display("FAIL run_start %0d %0d", pps_cnt, tick_cnt); end
    // a PPS, then a run start in the very cycle the next PPS edge is counted
    @(negedge clk) pps_in = 1;
    repeat (4) @(negedge clk);
    pps_in = 0;
    repeat (4) @(negedge clk);
    checks++; if (pps_cnt != 1) begin failures++; $display("FAIL second pps"); end
    pps_in = 1;
    repeat (2) @(negedge clk);
    run_start = 1;
    @(negedge clk) run_start = 0;
    checks++; if (pps_cnt != 1 || tick_cnt != 0) begin failures++; $display("FAIL coincident run_start %0d %0d", pps_cnt, tick_cnt); end
    repeat (2) @(negedge clk);
    pps_in = 0;
    repeat (4) @(negedge clk);
    m_pps = 1;
    // free-running comparison over several seconds
    gen_on = 1;
    #(PPS_TICKS * 100ns * 5 + 50ns);
    checks++; if (n_rs < 3) begin failures++; $display("FAIL too few run starts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
