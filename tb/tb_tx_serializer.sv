// tb_tx_serializer -- self-checking test of the TCP byte transmitter.
//
// A queue stands in for the buffer (fall-through: fifo_data shows the head
// word while not empty, fifo_rd pops it). Random packets are sent with a
// randomly asserted tcp_tx_full; every byte written must be the next byte of
// the expected stream (packets in order, most significant byte first), no
// byte may be written while full is high, and with full held low a run of
// packets must take 17 cycles per 128-bit packet.
module tb_tx_serializer;
  localparam int unsigned W = 128;

  logic clk = 0, rst = 1, tcp_tx_full = 0;
  logic fifo_empty, fifo_rd, tcp_tx_wr;
  logic [W-1:0] fifo_data;
  logic [7:0] tcp_tx_data;
  logic [W-1:0] q [$];
  byte unsigned exp_bytes [$];
  int checks = 0, failures = 0, n_stall = 0;

  // queue head shown on the fall-through port, refreshed after every change
  function automatic void show_head();
    fifo_empty = (q.size() == 0);
    fifo_data  = fifo_empty ? '0 : q[0];
  endfunction
  initial show_head();

  tx_serializer #(.WIDTH(W)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic add_pkt();
    logic [W-1:0] w = {$urandom, $urandom, $urandom, $urandom};
    q.push_back(w);
    show_head();
    for (int b = W/8 - 1; b >= 0; b--) exp_bytes.push_back(w[8*b +: 8]);
  endtask

  // byte monitor
  always @(posedge clk) if (!rst) begin
    if (tcp_tx_wr) begin
      checks++;
      if (tcp_tx_full) begin failures++; $display("FAIL write while full"); end
      if (exp_bytes.size() == 0) begin failures++; $display("FAIL unexpected byte"); end
      else begin
        if (tcp_tx_data !== exp_bytes[0]) begin
          failures++; $display("FAIL byte %h exp %h", tcp_tx_data, exp_bytes[0]);
        end
        void'(exp_bytes.pop_front());
      end
    end
    if (fifo_rd) begin
      #0.1;   // pop after the DUT has taken the head word at this edge
      void'(q.pop_front());
      show_head();
    end
  end

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // random back-pressure
    for (int k = 0; k < 20000; k++) begin
      if ($urandom_range(0, 19) == 0) add_pkt();
      tcp_tx_full = ($urandom_range(0, 3) == 0);
      if (tcp_tx_full && dut.busy_q) n_stall++;
      @(negedge clk);
    end
    tcp_tx_full = 0;
    wait (exp_bytes.size() == 0);
    repeat (3) @(negedge clk);
    // throughput: 10 packets back to back
    for (int i = 0; i < 10; i++) add_pkt();
    t0 = $time;
    wait (exp_bytes.size() == 0);
    @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 5 != 10 * 17) begin failures++; $display("FAIL 10 packets took %0d cycles", (t1 - t0) / 5); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    $display("stalled cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
