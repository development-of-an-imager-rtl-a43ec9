// tb_rbcp_regs -- self-checking test of the slow-control register bank.
//
// Writes random values to every writable register through the bus, reads
// every address back and compares with a model of the register map; checks
// that each access is acknowledged exactly one cycle later, that the
// configuration outputs (run enable, HV code, amplifier settings,
// thresholds) follow the writes, that the SPI command register gives a
// one-cycle request pulse, and that status, lost count and the GNSS message
// read the inputs.
module tb_rbcp_regs;
  import imony_pkg::*;

  logic clk = 0, rst = 1;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0;
  logic [31:0] rbcp_addr = '0;
  logic [7:0] rbcp_wd = '0, rbcp_rd;
  logic rbcp_ack, run_en;
  logic [NCS-1:0] spi_req;
  cfg_t cfg;
  logic spi_busy = 0, running = 0;
  logic [31:0] lost_cnt = '0;
  logic [GNSS_MSG_LEN-1:0][7:0] gnss_msg;
  logic [7:0] gnss_len = 8'd37;
  logic [7:0] model [256];
  int checks = 0, failures = 0;

  rbcp_regs dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = 32'(a); rbcp_wd = d; end
    @(negedge clk) begin rbcp_act = 0; rbcp_we = 0; end
    checks++; if (!rbcp_ack) begin failures++; $display("FAIL no write ack at %h", a); end
    @(negedge clk);
    checks++; if (rbcp_ack) begin failures++; $display("FAIL ack longer than a cycle"); end
  endtask

  task automatic rd(int a, output logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_re = 1; rbcp_addr = 32'(a); end
    @(negedge clk) begin rbcp_act = 0; rbcp_re = 0; end
    checks++; if (!rbcp_ack) begin failures++; $display("FAIL no read ack at %h", a); end
    d = rbcp_rd;
  endtask

  function automatic bit writable(int a);
    return a == 0 || a == 4 || a == 5 || (a >= 8 && a < 12) || (a >= 16 && a < 80);
  endfunction

  initial begin
    logic [7:0] d;
    int n_req = 0;
    for (int a = 0; a < 256; a++) model[a] = 0;
    for (int i = 0; i < int'(GNSS_MSG_LEN); i++) begin
      gnss_msg[i] = 8'($urandom);
      model[int'(REG_GNSS_MSG0) + i] = gnss_msg[i];
    end
    model[REG_GNSS_LEN] = gnss_len;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int a = 0; a < 128; a++) begin
      d = 8'($urandom);
      if (a == 0) d[0] = 1;
      if (a == 1) continue;
      wr(a, d);
      if (writable(a)) model[a] = (a == 0) ? {7'd0, d[0]} : d;
    end
    // config outputs
    checks++; if (run_en !== 1'b1) begin failures++; $display("FAIL run_en"); end
    checks++; if (cfg.hv_code !== {model[4], model[5]}) begin failures++; $display("FAIL hv_code"); end
    for (int k = 0; k < int'(NCHIP); k++) begin
      checks++; if (cfg.amp[k] !== model[8 + k]) begin failures++; $display("FAIL amp %0d", k); end
    end
    for (int c = 0; c < int'(NCH); c++) begin
      checks++; if (cfg.vth[c] !== model[16 + c]) begin failures++; $display("FAIL vth %0d", c); end
    end
    // status and lost count inputs
    spi_busy = 1; running = 1; lost_cnt = 32'hA1B2C3D4;
    model[2] = 8'b111; model[12] = 8'hA1; model[13] = 8'hB2; model[14] = 8'hC3; model[15] = 8'hD4;
    for (int a = 0; a < 256; a++) begin
      rd(a, d);
      checks++;
      if (d !== model[a]) begin failures++; $display("FAIL read %h: %h expected %h", a, d, model[a]); end
    end
    // SPI command: a one-cycle request pulse
    fork
      begin
        repeat (6) begin @(posedge clk); #0.1 if (spi_req != 0) begin
          n_req++;
          checks++; if (spi_req !== 5'b10101) begin failures++; $display("FAIL spi_req %b", spi_req); end
        end end
      end
      wr(1, 8'b10101);
    join
    checks++; if (n_req != 1) begin failures++; $display("FAIL spi_req pulses %0d", n_req); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
