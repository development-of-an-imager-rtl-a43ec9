// tb_hit_edge_detect -- self-checking test of the hit edge detector.
//
// Drives random hit patterns on all 64 channels (changed on the falling
// clock edge) and compares hit_edge, after every rising edge, with an
// independent model: the edge for sample k is in[k-S] & ~in[k-S-1] with S the
// synchroniser depth. A directed part checks that a pulse lasting several
// samples yields exactly one hit, SYNC_STAGES + 1 cycles after it is sampled.
module tb_hit_edge_detect;
  localparam int unsigned NCH = 64;
  localparam int unsigned S   = 2;

  logic clk = 0, rst = 1;
  logic [NCH-1:0] hit_in = '0, hit_edge;
  logic [NCH-1:0] hist [$];
  int checks = 0, failures = 0;

  hit_edge_detect #(.NCH(NCH), .SYNC_STAGES(S)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [NCH-1:0] exp, string what);
    checks++;
    if (hit_edge !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, hit_edge, exp);
    end
  endtask

  initial begin
    int cnt, lat;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < S + 2; i++) hist.push_back('0);
    // random part
    for (int k = 0; k < 2000; k++) begin
      hit_in = {$urandom, $urandom} & {$urandom, $urandom};
      @(posedge clk) hist.push_back(hit_in);
      @(negedge clk);
      check(hist[hist.size()-1-S] & ~hist[hist.size()-2-S], "random");
    end
    // directed: one long pulse on channel 5 gives one edge, latency S+1
    @(negedge clk) hit_in = '0;
    repeat (5) @(negedge clk);
    hit_in[5] = 1'b1;
    cnt = 0; lat = -1;
    for (int c = 1; c <= 20; c++) begin
      @(posedge clk); #0.1;
      if (hit_edge[5]) begin cnt++; if (lat < 0) lat = c; end
    end
    checks++; if (cnt != 1) begin failures++; $display("FAIL pulse gave %0d edges", cnt); end
    checks++; if (lat != int'(S) + 1) begin failures++; $display("FAIL latency %0d", lat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
