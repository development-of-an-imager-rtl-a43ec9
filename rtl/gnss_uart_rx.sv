// gnss_uart_rx -- serial receiver for the GNSS receiver's time messages.
//
// Besides the 10 MHz reference and the PPS pulse, the GNSS receiver sends its
// time and position as text messages on a serial line. This block receives
// that line in the usual asynchronous format: idle high, one start bit (low),
// eight data bits least significant first, one stop bit (high). The input is
// synchronised with two flip-flops; a falling edge starts a character, which
// is confirmed at the middle of the start bit and then sampled at the middle
// of each bit, CLKS_PER_BIT system clocks apart. A character whose stop bit
// is low is discarded (frame error).
//
// Output: byte_valid pulses for one cycle with byte_data, about 9.5 bit
// times after the start edge.
//
// That the GNSS serial data reaches the FPGA follows the instrument; the
// character format and baud rate (115200 baud by default: 200 MHz / 1736)
// are this design's assumptions.
module gnss_uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 1736
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic       byte_valid,
  output logic [7:0] byte_data
);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_t;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT);

  logic [2:0]    rx_sr;      // two sync stages + previous sample
  logic          rx;
  state_t        state_q;
  logic [CW-1:0] cnt_q;
  logic [2:0]    bit_q;
  logic [7:0]    sh_q;

  assign rx = rx_sr[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_sr      <= '1;
      state_q    <= IDLE;
      cnt_q      <= '0;
      bit_q      <= '0;
      sh_q       <= '0;
      byte_valid <= 1'b0;
      byte_data  <= '0;
    end else begin
      rx_sr      <= {rx_sr[1:0], rxd};
      byte_valid <= 1'b0;
      unique case (state_q)
        IDLE: if (rx_sr[2] && !rx) begin            // falling edge
          state_q <= START;
          cnt_q   <= CW'(CLKS_PER_BIT / 2 - 1);
        end
        START: if (cnt_q == '0) begin
          if (!rx) begin
            state_q <= DATA;
            cnt_q   <= CW'(CLKS_PER_BIT - 1);
            bit_q   <= '0;
          end else state_q <= IDLE;               // glitch
        end else cnt_q <= cnt_q - 1'b1;
        DATA: if (cnt_q == '0) begin
          sh_q  <= {rx, sh_q[7:1]};
          cnt_q <= CW'(CLKS_PER_BIT - 1);
          bit_q <= bit_q + 1'b1;
          if (bit_q == 3'd7) state_q <= STOP;
        end else cnt_q <= cnt_q - 1'b1;
        STOP: if (cnt_q == '0) begin
          state_q <= IDLE;
          if (rx) begin
            byte_valid <= 1'b1;
            byte_data  <= sh_q;
          end
        end else cnt_q <= cnt_q - 1'b1;
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
