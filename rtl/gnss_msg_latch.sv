// gnss_msg_latch -- keeps the GNSS time message for the PC.
//
// At the start of an observation run the PC needs the absolute GNSS time
// that the run's relative counters (PPS count, 10 MHz count) start from.
// This block collects the text messages arriving from gnss_uart_rx: a '$'
// starts a new message, the bytes up to the carriage return or line feed are
// stored (at most MSG_LEN, further bytes are ignored), and the end of line
// completes it. While no run is going, each completed message replaces the
// snapshot; during a run the snapshot stays frozen, so it holds the last
// message completed before the run started. The snapshot (msg, msg_len) is
// read by the PC through the register bank.
//
// Timing: the snapshot changes in the cycle after the end-of-line byte.
//
// Sending the GNSS time to the PC at run start follows the instrument; the
// message framing, the freeze during a run and the register readout are this
// design's choices.
module gnss_msg_latch #(
  parameter int unsigned MSG_LEN = 80
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       byte_valid,
  input  logic [7:0]                 byte_data,
  input  logic                       running,
  output logic [MSG_LEN-1:0][7:0]    msg,
  output logic [7:0]                 msg_len
);

  logic [MSG_LEN-1:0][7:0] line_q;
  logic [7:0]              len_q;
  logic                    in_msg_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      line_q   <= '0;
      len_q    <= '0;
      in_msg_q <= 1'b0;
      msg      <= '0;
      msg_len  <= '0;
    end else if (byte_valid) begin
      if (byte_data == "$") begin
        in_msg_q  <= 1'b1;
        line_q    <= '0;
        line_q[0] <= byte_data;
        len_q     <= 8'd1;
      end else if (in_msg_q && (byte_data == 8'h0D || byte_data == 8'h0A)) begin
        in_msg_q <= 1'b0;
        if (!running) begin
          msg     <= line_q;
          msg_len <= len_q;
        end
      end else if (in_msg_q && len_q < 8'(MSG_LEN)) begin
        line_q[len_q] <= byte_data;
        len_q         <= len_q + 1'b1;
      end
    end
  end

endmodule
