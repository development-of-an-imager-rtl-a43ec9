// tb_gnss_uart_rx -- self-checking test of the GNSS serial receiver.
//
// Sends random characters at the default bit rate (8 data bits, LSB first,
// one stop bit) with random idle gaps and a baud-rate error of about 1%, and
// checks each received byte against the byte sent, including when and how
// often byte_valid pulses. A character with a low stop bit (frame error) and
// a short glitch on the idle line must produce no byte.
module tb_gnss_uart_rx;
  localparam int unsigned CPB = 1736;
  localparam realtime BIT = CPB * 5.0ns * 1.01;

  logic clk = 0, rst = 1, rxd = 1;
  logic byte_valid;
  logic [7:0] byte_data;
  logic [7:0] exp_q [$];
  int checks = 0, failures = 0, n_rx = 0;

  gnss_uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && byte_valid) begin
    n_rx++;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected byte %h at %0t", byte_data, $time); end
    else begin
      if (byte_data !== exp_q[0]) begin failures++; $display("FAIL byte %h expected %h", byte_data, exp_q[0]); end
      void'(exp_q.pop_front());
    end
  end

  task automatic send(logic [7:0] b, bit stop_ok);
    rxd = 0; #(BIT);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; #(BIT); end
    rxd = stop_ok; #(BIT);
    rxd = 1;
  endtask

  initial begin
    logic [7:0] b;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    #(BIT);
    for (int k = 0; k < 60; k++) begin
      b = 8'($urandom);
      if (k % 15 == 7) begin
        $display("frame error char %h at %0t", b, $time);
        send(b, 0);            // frame error: dropped
        #(BIT * 2);
      end else begin
        exp_q.push_back(b);
        send(b, 1);
      end
      if (k % 10 == 3) begin rxd = 0; #(BIT / 8); rxd = 1; end   // glitch
      #(BIT * $urandom_range(0, 3));
    end
    #(BIT * 2);
    checks++;
    if (exp_q.size() != 0 || n_rx != 56) begin failures++; $display("FAIL %0d bytes received, %0d missing", n_rx, exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
