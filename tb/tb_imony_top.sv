// tb_imony_top -- end-to-end test of the readout logic at its default size.
//
// Around the design: four front-end ASIC models (fgati_model) feeding the 64
// hit lines, an SPI receiver for the HV DAC, a GNSS source (10 MHz reference
// and a PPS every PPS_TICKS reference cycles, shortened from one second), a
// bus master for the slow-control registers and a TCP byte sink that
// reassembles 16-byte packets and compares them with the packets expected.
//
// Sequence:
//   1. configure HV code, amplifier settings and 64 thresholds over the bus,
//      request the SPI update of all devices, poll the busy flag, and compare
//      what each device received;
//   2. start a run: a run-start packet must open the stream;
//   3. fire photons (single channels, groups, all 64 at once), half of them
//      below threshold, while the TCP port randomly stalls; each sample with
//      a hit must arrive as one packet with the exact GNSS time;
//   4. hold the TCP port full until the buffer overflows, check the lost
//      count read over the bus and that the kept packets all arrive;
//   5. stop the run (photons then give no data) and start a second run.
// A GNSS time message sent on the serial line before the run must be
// readable over the bus, and one sent during the run must not replace it.
// Every mechanism (SPI update of each device, run start, hit packets,
// threshold suppression, PPS rollover of the 10 MHz count, multi-channel
// packets, stalls, overflow drops, run stop) is counted and must occur.
module tb_imony_top;
  import imony_pkg::*;

  localparam int PPS_TICKS = 200;

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
  int n_gnss_msg = 0, n_gnss_frozen = 0;
  int n_spi_hv = 0, n_spi_fgati = 0, n_runstart = 0, n_hitpkt = 0, n_suppressed = 0,
      n_pps_rollover = 0, n_multi = 0, n_all64 = 0, n_stall = 0, n_drop = 0, n_stopped = 0;

  imony_top dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL %0t: %s", $time, s);
  endtask

  // ---------------------------------------------------------------- devices
  for (genvar k = 0; k < 4; k++) begin : g_fe
    fgati_model u_fe (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n[1 + k]),
                      .hit(hit_in[16 * k +: 16]));
  end

  logic [15:0] hv_sh, hv_code_rx;
  int hv_bits = 0;
  always @(negedge spi_cs_n[0]) hv_bits = 0;
  always @(posedge spi_sclk) if (!spi_cs_n[0]) begin hv_sh = {hv_sh[14:0], spi_mosi}; hv_bits++; end
  always @(posedge spi_cs_n[0]) if (hv_bits == 16) begin hv_code_rx = hv_sh; n_spi_hv++; end

  // -------------------------------------------------------------- GNSS source
  int m_pps = 0, m_tick = 0;
  event ref_rise;
  initial begin
    automatic int n = 0;
    #1.7;
    forever begin
      n++;
      gnss_clk10 = 1;
      if (n % PPS_TICKS == 0) begin gnss_pps = 1; m_pps++; m_tick = 0; end
      else m_tick++;
      -> ref_rise;
      #50 gnss_clk10 = 0;
      #20 gnss_pps = 0;
      #30;
    end
  end

  // serial time messages, 115200 baud, 8 data bits, LSB first
  localparam realtime UART_BIT = 1736 * 5.0ns;
  task automatic uart_send(string m);
    string t = {m, "\r\n"};
    for (int i = 0; i < t.len(); i++) begin
      gnss_rxd = 0; #(UART_BIT);
      for (int b = 0; b < 8; b++) begin gnss_rxd = t[i][b]; #(UART_BIT); end
      gnss_rxd = 1; #(UART_BIT);
    end
  endtask

  // -------------------------------------------------------------- bus master
  task automatic wr(logic [7:0] a, logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = 32'(a); rbcp_wd = d; end
    @(negedge clk) begin rbcp_act = 0; rbcp_we = 0; end
    if (!rbcp_ack) fail("no write acknowledge");
  endtask

  task automatic rd(logic [7:0] a, output logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_re = 1; rbcp_addr = 32'(a); end
    @(negedge clk) begin rbcp_act = 0; rbcp_re = 0; end
    if (!rbcp_ack) fail("no read acknowledge");
    d = rbcp_rd;
  endtask

  // --------------------------------------------------------------- TCP sink
  packet_t exp_q [$];
  logic [PKT_W-1:0] acc;
  int nbyte = 0, n_rx = 0;
  bit stall_en = 0;

  always @(posedge clk) if (!rst) begin
    if (tcp_tx_full && exp_q.size() > 0) n_stall++;   // port full while data waits
    if (tcp_tx_wr) begin
      acc = {acc[PKT_W-9:0], tcp_tx_data};
      nbyte++;
      if (nbyte == PKT_W / 8) begin
        packet_t p;
        p = packet_t'(acc);
        nbyte = 0; n_rx++;
        checks++;
        if (exp_q.size() == 0) fail($sformatf("unexpected packet %h", p));
        else begin
          if (p !== exp_q[0]) fail($sformatf("packet %h expected %h", p, exp_q[0]));
          void'(exp_q.pop_front());
        end
        if (p.header == HDR_RUN) n_runstart++;
        if (p.header == HDR_HIT) begin
          n_hitpkt++;
          if ($countones(p.hits) > 1) n_multi++;
          if (&p.hits) n_all64++;
          if (p.pps_cnt > 0) n_pps_rollover++;
        end
      end
    end
  end

  always @(negedge clk) if (stall_en) tcp_tx_full = ($urandom_range(0, 2) == 0);

  // ----------------------------------------------------------------- photons
  logic [7:0] vth_set [NCH];
  logic [7:0] amp_set [NCHIP];

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

  // one photon burst at the middle of a reference period; returns the pattern.
  // mode 0: one channel, 1: two to five channels, 2: all 64 channels above
  // threshold, 3: one channel above threshold; in modes 0 and 1 each pulse
  // is above or below its threshold with equal chance.
  task automatic burst(int mode, bit expect_data, output logic [NCH-1:0] pat);
    bit f;
    int nch;
    @(ref_rise);
    #50;
    pat = '0;
    nch = (mode == 2) ? NCH : (mode == 1 ? $urandom_range(2, 5) : 1);
    for (int i = 0; i < nch; i++) begin
      int ch = (mode == 2) ? i : $urandom_range(0, NCH - 1);
      int h = (mode >= 2 || $urandom_range(0, 1) == 1) ? int'(vth_set[ch]) + 1 + $urandom_range(0, 20)
                                                   : $urandom_range(0, int'(vth_set[ch]));
      fire_ch(ch, h, f);
      if (f) pat[ch] = 1'b1; else n_suppressed++;
    end
    if (expect_data && pat != '0)
      exp_q.push_back('{header: HDR_HIT, pps_cnt: PPS_W'(m_pps), tick_cnt: TICK_W'(m_tick), hits: pat});
  endtask

  localparam string MSG1 = "$GPZDA,123456.00*6A";
  localparam string MSG2 = "$GPZDA,123457.00*6B";

  task automatic check_gnss_msg(string m);
    logic [7:0] d;
    rd(REG_GNSS_LEN, d);
    checks++; if (d != 8'(m.len())) fail($sformatf("GNSS message length %0d", d));
    for (int i = 0; i < m.len(); i++) begin
      rd(REG_GNSS_MSG0 + 8'(i), d);
      checks++; if (d != m[i]) fail($sformatf("GNSS message byte %0d is %h", i, d));
    end
  endtask

  // -------------------------------------------------------------------- test
  initial begin
    logic [7:0] d;
    logic [NCH-1:0] pat;
    int n_over, lost;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;

    // 1. configuration over SPI
    wr(REG_HV_HI, 8'h9C); wr(REG_HV_LO, 8'h40);
    for (int k = 0; k < int'(NCHIP); k++) begin amp_set[k] = 8'($urandom); wr(REG_AMP0 + 8'(k), amp_set[k]); end
    for (int c = 0; c < int'(NCH); c++) begin vth_set[c] = 8'($urandom_range(40, 200)); wr(REG_VTH0 + 8'(c), vth_set[c]); end
    wr(REG_SPI_CMD, 8'h1F);
    do rd(REG_STATUS, d); while (d[0]);
    checks++; if (hv_code_rx !== 16'h9C40) fail($sformatf("HV DAC got %h", hv_code_rx));
    for (int c = 0; c < int'(NCH); c++) begin
      logic [7:0] v;
      case (c / 16)
        0: v = g_fe[0].u_fe.vth[c % 16];
        1: v = g_fe[1].u_fe.vth[c % 16];
        2: v = g_fe[2].u_fe.vth[c % 16];
        default: v = g_fe[3].u_fe.vth[c % 16];
      endcase
      checks++; if (v !== vth_set[c]) fail($sformatf("threshold of channel %0d is %0d", c, v));
    end
    checks++;
    if (g_fe[0].u_fe.amp !== amp_set[0] || g_fe[3].u_fe.amp !== amp_set[3]) fail("amplifier setting");
    n_spi_fgati = g_fe[0].u_fe.frames + g_fe[1].u_fe.frames + g_fe[2].u_fe.frames + g_fe[3].u_fe.frames;
    checks++; if (n_spi_fgati != 4 * 17) fail($sformatf("%0d ASIC frames", n_spi_fgati));

    // GNSS time message before the run, read back over the bus
    uart_send(MSG1);
    repeat (10) @(negedge clk);
    check_gnss_msg(MSG1);
    n_gnss_msg++;

    // 2. run start, in the middle of a reference period
    @(ref_rise); #20;
    wr(REG_CTRL, 8'h01);
    m_pps = 0;
    exp_q.push_back('{header: HDR_RUN, pps_cnt: '0, tick_cnt: TICK_W'(m_tick), hits: '0});

    // 3. photons with random back-pressure; a new GNSS message arrives
    fork uart_send(MSG2); join_none
    stall_en = 1;
    for (int i = 0; i < 600; i++) burst((i % 50 == 7) ? 2 : (i % 4 == 1 ? 1 : 0), 1, pat);
    stall_en = 0;
    @(negedge clk) tcp_tx_full = 0;
    wait (exp_q.size() == 0);

    // 4. overflow: port held full
    @(negedge clk) tcp_tx_full = 1;
    n_over = 0;
    for (int i = 0; i < 1100; i++) begin
      burst(3, (n_over < FIFO_DEPTH_TB + 1), pat);
      if (pat != '0) n_over++;
    end
    repeat (10) @(negedge clk);
    lost = 0;
    for (int b = 0; b < 4; b++) begin rd(REG_LOST0 + 8'(b), d); lost = (lost << 8) | int'(d); end
    n_drop = lost;
    checks++; if (lost != n_over - (FIFO_DEPTH_TB + 1)) fail($sformatf("lost %0d of %0d", lost, n_over));
    rd(REG_STATUS, d);
    checks++; if (!d[2]) fail("overflow flag not set");
    @(negedge clk) tcp_tx_full = 0;
    wait (exp_q.size() == 0);
    repeat (40) @(negedge clk);

    // the message received during the run must not replace the snapshot
    wait fork;
    repeat (10) @(negedge clk);
    check_gnss_msg(MSG1);
    n_gnss_frozen++;

    // 5. stop: no data; then a second run
    wr(REG_CTRL, 8'h00);
    for (int i = 0; i < 20; i++) begin burst(1, 0, pat); if (pat != '0) n_stopped++; end
    repeat (40) @(negedge clk);
    checks++; if (nbyte != 0 || exp_q.size() != 0) fail("data while stopped");
    @(ref_rise); #20;
    wr(REG_CTRL, 8'h01);
    m_pps = 0;
    exp_q.push_back('{header: HDR_RUN, pps_cnt: '0, tick_cnt: TICK_W'(m_tick), hits: '0});
    for (int i = 0; i < 50; i++) burst(0, 1, pat);
    wait (exp_q.size() == 0);
    repeat (40) @(negedge clk);

    $display("SPI: HV frames %0d, ASIC frames %0d; GNSS messages read %0d, kept during run %0d",
             n_spi_hv, n_spi_fgati, n_gnss_msg, n_gnss_frozen);
    $display("packets received %0d: run-start %0d, hit %0d (multi-channel %0d, all 64 %0d, after PPS %0d)",
             n_rx, n_runstart, n_hitpkt, n_multi, n_all64, n_pps_rollover);
    $display("below threshold %0d, stalled cycles %0d, dropped %0d, bursts while stopped %0d",
             n_suppressed, n_stall, n_drop, n_stopped);
    checks++;
    if (n_spi_hv == 0 || n_spi_fgati == 0 || n_runstart < 2 || n_hitpkt == 0 || n_multi == 0 ||
        n_all64 == 0 || n_pps_rollover == 0 || n_suppressed == 0 || n_stall == 0 || n_drop == 0 ||
        n_stopped == 0 || n_gnss_msg == 0 || n_gnss_frozen == 0)
      fail("a mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int FIFO_DEPTH_TB = 1024;   // default depth of the top's buffer
endmodule
