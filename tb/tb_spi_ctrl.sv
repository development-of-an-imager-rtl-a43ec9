// tb_spi_ctrl -- self-checking test of the SPI command sequencer.
//
// A stand-in for the shift engine answers every frame_start with frame_done
// a few cycles later and logs (target, data). Update requests for the HV DAC
// and the four front-end ASICs, alone and together, must produce exactly
// the expected frames in order: the DAC code; for ASIC k the 16 channel
// thresholds {j, vth[16k+j]} then {0x10, amp[k]}. A request repeated while
// its target is being served must cause a second full update.
module tb_spi_ctrl;
  import imony_pkg::*;

  logic clk = 0, rst = 1;
  logic [NCS-1:0] req = '0;
  cfg_t cfg;
  logic busy, frame_start, frame_done = 0;
  logic [$clog2(NCS)-1:0] frame_cs;
  logic [SPI_FRAME_W-1:0] frame_data;
  int checks = 0, failures = 0;

  typedef struct { int cs; logic [15:0] data; } frame_t;
  frame_t got [$], exp [$];

  spi_ctrl dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // shift-engine stand-in
  initial begin
    forever begin
      @(posedge clk);
      if (!rst && frame_start) begin
        got.push_back('{int'(frame_cs), frame_data});
        repeat ($urandom_range(2, 6)) @(posedge clk);
        #0.1 frame_done = 1;
        @(posedge clk) #0.1 frame_done = 0;
      end
    end
  end

  function automatic void expect_target(int t);
    if (t == 0) exp.push_back('{0, cfg.hv_code});
    else begin
      for (int j = 0; j < 16; j++) exp.push_back('{t, {8'(j), cfg.vth[(t - 1) * 16 + j]}});
      exp.push_back('{t, {8'h10, cfg.amp[t - 1]}});
    end
  endfunction

  task automatic run_req(logic [NCS-1:0] r);
    @(negedge clk) req = r;
    @(negedge clk) req = '0;
    for (int t = 0; t < int'(NCS); t++) if (r[t]) expect_target(t);
    wait (!busy);
    repeat (10) @(negedge clk);
    checks++;
    if (got.size() != exp.size()) begin
      failures++; $display("FAIL req %b: %0d frames, expected %0d", r, got.size(), exp.size());
    end
    for (int i = 0; i < got.size() && i < exp.size(); i++) begin
      checks++;
      if (got[i].cs != exp[i].cs || got[i].data !== exp[i].data) begin
        failures++; $display("FAIL frame %0d: %0d/%h expected %0d/%h", i, got[i].cs, got[i].data, exp[i].cs, exp[i].data);
      end
    end
    got.delete(); exp.delete();
  endtask

  initial begin
    cfg.hv_code = 16'hBEEF;
    for (int k = 0; k < int'(NCHIP); k++) cfg.amp[k] = 8'($urandom);
    for (int c = 0; c < int'(NCH); c++) cfg.vth[c] = 8'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    run_req(5'b00001);
    run_req(5'b00100);
    run_req(5'b11111);
    run_req(5'b10010);
    // repeat while served: ASIC 0 requested again halfway through its update
    @(negedge clk) req = 5'b00010;
    @(negedge clk) req = '0;
    expect_target(1);
    wait (got.size() == 8);
    @(negedge clk) req = 5'b00010;
    @(negedge clk) req = '0;
    expect_target(1);
    wait (!busy);
    repeat (10) @(negedge clk);
    checks++;
    if (got.size() != 34) begin failures++; $display("FAIL repeated request gave %0d frames", got.size()); end
    got.delete(); exp.delete();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
