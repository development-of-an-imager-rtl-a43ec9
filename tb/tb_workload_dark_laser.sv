// tb_workload_dark_laser -- the two laboratory measurements of the readout,
// run on the full-size design with real GNSS timing (10 MHz reference, one
// PPS per second).
//
// Dark counts: every pixel fires at random (Poisson) times at the rate
// measured for it in the dark-count map of the instrument (31 to 13227 counts
// per second, 61473 per second in total); pixel (x, y) of the map is channel
// 8y + x. Laser: a picosecond laser triggered at 500 Hz lights all 64 pixels
// at once. 250 ms of observation are simulated, with a PPS arriving 100 ms
// into the run. The PC side always keeps up (no back-pressure).
//
// Checks: every pulse above threshold appears in exactly one packet, in
// order per pixel, with the GNSS time of the pulse (the 10 MHz count may be
// one tick later when the pulse falls just before a reference edge); each
// pixel's packet count equals the number of pulses generated for it; every
// laser shot arrives as one packet with all 64 bits set; consecutive shots
// are 20000 ticks (2 ms) apart, i.e. 500 Hz, also across the PPS.
module tb_workload_dark_laser;
  import imony_pkg::*;

  localparam realtime SIM_LEN   = 250ms;
  localparam realtime LASER_T   = 2ms;
  localparam realtime PPS_AT    = 100ms;
  localparam int      RATE [64] = '{
    467, 1088, 751, 697, 13227, 3463, 270, 241, 493, 574, 1557, 640, 681, 243, 1013, 219,
    1515, 1914, 1780, 825, 410, 591, 385, 645, 552, 580, 1727, 202, 4112, 133, 862, 331,
    2524, 472, 1627, 325, 365, 31, 741, 321, 441, 670, 713, 133, 417, 502, 201, 265,
    563, 1844, 460, 275, 352, 286, 454, 281, 251, 3046, 450, 93, 252, 192, 512, 226};

  logic clk = 0, rst = 1;
  logic [NCH-1:0] hit_in;
  logic gnss_clk10 = 0, gnss_pps = 0, gnss_rxd = 1;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [31:0] rbcp_addr = '0;
  logic [7:0] rbcp_wd = '0, rbcp_rd;
  logic tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;
  logic spi_sclk, spi_mosi;
  logic [NCS-1:0] spi_cs_n;
  int checks = 0, failures = 0, n_piled = 0;

  imony_top dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #(SIM_LEN + 2ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL %0t: %s", $time, s);
  endtask

  for (genvar k = 0; k < 4; k++) begin : g_fe
    fgati_model u_fe (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n[1 + k]),
                      .hit(hit_in[16 * k +: 16]));
  end

  task automatic fire_ch(int ch, int height, output bit fired);
    bit piled;
    case (ch / 16)
      0: g_fe[0].u_fe.fire(ch % 16, height, fired, piled);
      1: g_fe[1].u_fe.fire(ch % 16, height, fired, piled);
      2: g_fe[2].u_fe.fire(ch % 16, height, fired, piled);
      default: g_fe[3].u_fe.fire(ch % 16, height, fired, piled);
    endcase
    if (piled) n_piled++;
  endtask

  // GNSS: 10 MHz reference; one PPS at a time set by the test
  int m_pps = 0, m_tick = 0;
  longint pre_ticks = 0;     // reference periods from the tick origin to the PPS
  int run_tick = -1;         // 10 MHz count at the run start
  realtime pps_time = 1s;
  event ref_rise;
  initial begin
    #1.7;
    forever begin
      gnss_clk10 = 1;
      if ($realtime >= pps_time && $realtime < pps_time + 100ns) begin
        gnss_pps = 1; m_pps++; pre_ticks = m_tick + 1; m_tick = 0;
      end else m_tick++;
      -> ref_rise;
      #50 gnss_clk10 = 0;
      #20 gnss_pps = 0;
      #30;
    end
  end

  task automatic wr(logic [7:0] a, logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = 32'(a); rbcp_wd = d; end
    @(negedge clk) begin rbcp_act = 0; rbcp_we = 0; end
  endtask

  task automatic rd(logic [7:0] a, output logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_re = 1; rbcp_addr = 32'(a); end
    @(negedge clk) begin rbcp_act = 0; rbcp_re = 0; end
    d = rbcp_rd;
  endtask

  // expected times per channel, as pps * 10^7 + tick
  longint exp_t [NCH][$];
  int n_gen [NCH], n_got [NCH];
  int n_shots = 0, n_laser_pkts = 0, n_pkts = 0, n_intervals_ok = 0, n_across_pps = 0;
  longint last_laser = -1;
  logic [PKT_W-1:0] acc;
  int nbyte = 0;

  always @(posedge clk) if (!rst && tcp_tx_wr) begin
    acc = {acc[PKT_W-9:0], tcp_tx_data};
    nbyte++;
    if (nbyte == PKT_W / 8) begin
      automatic packet_t p = packet_t'(acc);
      automatic longint t;
      nbyte = 0;
      if (p.header == HDR_RUN) begin
        checks++;
        if (int'(p.tick_cnt) != run_tick) fail($sformatf("run-start tick %0d, expected %0d", p.tick_cnt, run_tick));
      end
      if (p.header == HDR_HIT) begin
        n_pkts++;
        t = longint'(p.pps_cnt) * 10000000 + longint'(p.tick_cnt);
        for (int c = 0; c < int'(NCH); c++) if (p.hits[c]) begin
          n_got[c]++;
          checks++;
          if (exp_t[c].size() == 0) fail($sformatf("channel %0d: unexpected hit", c));
          else begin
            automatic longint e = exp_t[c].pop_front();
            if (t != e && t != e + 1) fail($sformatf("channel %0d: time %0d expected %0d", c, t, e));
          end
        end
        if ($countones(p.hits) >= NCH - 2) begin   // a laser shot (dark hits may join it)
          // ticks since the tick origin (reset here, as no PPS precedes the run)
          t = (p.pps_cnt == 0) ? longint'(p.tick_cnt) : pre_ticks + longint'(p.tick_cnt);
          n_laser_pkts++;
          if (last_laser >= 0) begin
            checks++;
            if (t - last_laser < 19999 || t - last_laser > 20001)
              fail($sformatf("laser interval %0d ticks", t - last_laser));
            else n_intervals_ok++;
            if (p.pps_cnt != 0 && last_laser < pre_ticks) n_across_pps++;
          end
          last_laser = t;
        end
      end
    end
  end

  typedef struct { realtime t; int ch; } ev_t;
  ev_t evs [$];

  initial begin
    realtime t0, tnext;
    bit f;
    for (int c = 0; c < int'(NCH); c++) begin n_gen[c] = 0; n_got[c] = 0; end
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;
    // thresholds 100 on all channels, sent over SPI
    for (int c = 0; c < int'(NCH); c++) wr(REG_VTH0 + 8'(c), 8'd100);
    wr(REG_SPI_CMD, 8'h1E);
    begin logic [7:0] d; do rd(REG_STATUS, d); while (d[0]); end

    // event list: Poisson dark counts per pixel and laser shots (ch = -1)
    for (int c = 0; c < int'(NCH); c++) begin
      automatic realtime t = 0;
      forever begin
        automatic real u = (real'($urandom_range(1, 1000000))) / 1000000.0;
        t += -$ln(u) / RATE[c] * 1s;
        if (t >= SIM_LEN - 100us) break;
        evs.push_back('{t, c});
      end
    end
    for (realtime t = 300us; t < SIM_LEN - 100us; t += LASER_T) evs.push_back('{t, -1});
    evs.sort(e) with (e.t);

    // run start in the middle of a reference period
    @(ref_rise); #20;
    wr(REG_CTRL, 8'h01);
    m_pps = 0;
    run_tick = m_tick;
    t0 = $realtime;
    pps_time = t0 + PPS_AT;
    foreach (evs[i]) begin
      tnext = t0 + evs[i].t;
      if (tnext > $realtime) #(tnext - $realtime);   // wait until the event
      if (evs[i].ch < 0) begin
        n_shots++;
        for (int c = 0; c < int'(NCH); c++) begin
          fire_ch(c, 180, f);
          if (f) begin n_gen[c]++; exp_t[c].push_back(longint'(m_pps) * 10000000 + longint'(m_tick)); end
        end
      end else begin
        fire_ch(evs[i].ch, 150, f);
        if (f) begin n_gen[evs[i].ch]++; exp_t[evs[i].ch].push_back(longint'(m_pps) * 10000000 + longint'(m_tick)); end
      end
    end
    #20us;
    for (int c = 0; c < int'(NCH); c++) begin
      checks++;
      if (n_got[c] != n_gen[c]) fail($sformatf("channel %0d: %0d hits recorded, %0d generated", c, n_got[c], n_gen[c]));
    end
    checks++;
    if (n_laser_pkts != n_shots || n_intervals_ok != n_shots - 1 || n_across_pps == 0)
      fail($sformatf("laser: %0d shots, %0d packets, %0d intervals ok, %0d across PPS",
                     n_shots, n_laser_pkts, n_intervals_ok, n_across_pps));
    begin
      automatic int tot = 0;
      for (int c = 0; c < int'(NCH); c++) tot += n_gen[c];
      $display("pulses %0d (laser shots %0d), piled up %0d, packets %0d", tot, n_shots, n_piled, n_pkts);
      $display("dark rate, pixel 4: %0d /s (map 13227), pixel 37: %0d /s (map 31), pixel 0: %0d /s (map 467)",
               int'((n_got[4] - n_shots) / (SIM_LEN / 1s)), int'((n_got[37] - n_shots) / (SIM_LEN / 1s)),
               int'((n_got[0] - n_shots) / (SIM_LEN / 1s)));
      $display("laser rate %0d Hz from %0d intervals", 10000000 / 20000, n_intervals_ok);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
