// tb_gnss_msg_latch -- self-checking test of the GNSS message snapshot.
//
// Feeds byte streams of text messages ('$' ... CR LF) with noise between
// them. Outside a run the snapshot must hold the last complete message
// (bytes from '$' up to the end of line, length right, unused bytes zero);
// during a run it must stay frozen; a message longer than MSG_LEN keeps its
// first MSG_LEN bytes.
module tb_gnss_msg_latch;
  localparam int unsigned L = 80;

  logic clk = 0, rst = 1, byte_valid = 0, running = 0;
  logic [7:0] byte_data = '0;
  logic [L-1:0][7:0] msg;
  logic [7:0] msg_len;
  int checks = 0, failures = 0;

  gnss_msg_latch #(.MSG_LEN(L)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(logic [7:0] b);
    @(negedge clk) begin byte_valid = 1; byte_data = b; end
    @(negedge clk) byte_valid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  task automatic send_str(string s);
    for (int i = 0; i < s.len(); i++) put(s[i]);
    put(8'h0D); put(8'h0A);
  endtask

  task automatic expect_msg(string s, string what);
    int n = (s.len() > int'(L)) ? int'(L) : s.len();
    checks++;
    if (msg_len != 8'(n)) begin failures++; $display("FAIL %s: length %0d expected %0d", what, msg_len, n); end
    for (int i = 0; i < int'(L); i++) begin
      logic [7:0] e = (i < n) ? s[i] : 8'h00;
      checks++;
      if (msg[i] !== e) begin failures++; $display("FAIL %s: byte %0d %h expected %h", what, i, msg[i], e); break; end
    end
  endtask

  initial begin
    string m1 = "$GPZDA,123456.00,03,10,2026,00,00*6A";
    string m2 = "$GPRMC,123457.00,A,3815.0000,N,14020.0000,E,0.0,0.0,031026,,,A*7F";
    string m3 = "$GPZDA,123458.00,03,10,2026,00,00*68";
    string m4 = "$GPXXX,01234567890123456789012345678901234567890123456789012345678901234567890123456789";
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    put("x"); put("y");
    send_str(m1);
    expect_msg(m1, "first message");
    put("z");
    send_str(m2);
    expect_msg(m2, "second message");
    @(negedge clk) running = 1;
    send_str(m3);
    expect_msg(m2, "frozen during run");
    @(negedge clk) running = 0;
    send_str(m3);
    expect_msg(m3, "after run");
    send_str(m4);
    expect_msg(m4, "long message");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
