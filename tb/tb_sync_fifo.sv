// tb_sync_fifo -- self-checking test of the packet buffer.
//
// Random writes and reads (never a write into a full buffer without a read,
// never a read from an empty one) against a queue model: every cycle the
// test compares empty, full, count and the head word, and it checks that the
// buffer fills to exactly DEPTH words and that simultaneous read and write
// when full keep it full. Run at a depth of 16 to reach full often.
module tb_sync_fifo;
  localparam int unsigned W = 128, D = 16;

  logic clk = 0, rst = 1, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(D):0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, n_full = 0, n_full_rw = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 20000; k++) begin
      bias = (k / 1000) % 2 ? 3 : 7;   // alternate filling and draining phases
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == D) || count !== ($clog2(D)+1)'(q.size())
          || (q.size() > 0 && rd_data !== q[0])) begin
        failures++; $display("FAIL k=%0d size %0d count %0d empty %0b full %0b", k, q.size(), count, empty, full);
      end
      if (full) n_full++;
      rd_en = (q.size() > 0) && ($urandom_range(0, 9) >= bias);
      wr_en = ($urandom_range(0, 9) < bias) && (q.size() < D || rd_en);
      if (full && rd_en && wr_en) n_full_rw++;
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
      @(negedge clk);
    end
    checks++; if (n_full == 0 || n_full_rw == 0) begin failures++; $display("FAIL full not reached"); end
    $display("cycles full %0d, read+write when full %0d", n_full, n_full_rw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
