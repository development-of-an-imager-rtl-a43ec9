// tb_spi_master -- self-checking test of the SPI shift engine.
//
// An SPI mode-0 receiver written here samples MOSI on each rising SCLK edge
// while a chip select is low and records which select was used. Random
// frames to random targets are sent; each received frame must equal the data
// sent, exactly one select must have been low, SCLK must run at clk/(2*DIV),
// and done must come (2*FRAME_W + 3) * DIV cycles after start.
module tb_spi_master;
  localparam int unsigned NCS = 5, FW = 16, DIV = 10;

  logic clk = 0, rst = 1, start = 0;
  logic [$clog2(NCS)-1:0] cs_sel = '0;
  logic [FW-1:0] data = '0;
  logic busy, done, sclk, mosi;
  logic [NCS-1:0] cs_n;
  int checks = 0, failures = 0;

  // receiver model
  logic [FW-1:0] rx;
  int nbits = 0, rx_cs = -1;
  realtime last_rise = 0, period = 0;

  spi_master #(.NCS(NCS), .FRAME_W(FW), .DIV(DIV)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge sclk) begin
    if (&cs_n) begin failures++; $display("FAIL sclk edge without chip select"); end
    rx = {rx[FW-2:0], mosi};
    nbits++;
    if (last_rise > 0) period = $realtime - last_rise;
    last_rise = $realtime;
  end

  always @(negedge clk) if (!rst && !(&cs_n)) begin
    if ($countones(~cs_n) != 1) begin failures++; $display("FAIL several selects"); end
    for (int i = 0; i < int'(NCS); i++) if (!cs_n[i]) rx_cs = i;
  end

  initial begin
    int cyc;
    logic [FW-1:0] d;
    logic [$clog2(NCS)-1:0] t;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 40; k++) begin
      d = FW'($urandom); t = $clog2(NCS)'($urandom_range(0, NCS - 1));
      nbits = 0; rx_cs = -1; last_rise = 0;
      @(negedge clk) begin start = 1; data = d; cs_sel = t; end
      @(negedge clk) begin start = 0; data = '0; end
      cyc = 0;   // edges counted from the one that takes start
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (rx !== d || nbits != int'(FW) || rx_cs != int'(t)) begin
        failures++; $display("FAIL frame %h got %h bits %0d cs %0d/%0d", d, rx, nbits, rx_cs, t);
      end
      checks++;
      if (cyc != int'((2 * FW + 3) * DIV)) begin failures++; $display("FAIL frame took %0d cycles", cyc); end
      checks++;
      if (period != 2 * DIV * 5.0) begin failures++; $display("FAIL sclk period %0t", period); end
      checks++;
      if (!(&cs_n) || sclk || busy) begin failures++; $display("FAIL idle state after frame"); end
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
