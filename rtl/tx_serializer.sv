// tx_serializer -- sends buffered packets to the Ethernet TCP byte port.
//
// The Ethernet core (a TCP/IP offload core outside this design) accepts one
// byte per clock through tcp_tx_wr / tcp_tx_data and raises tcp_tx_full when
// it cannot take more. This block takes a packet from the head of the buffer
// (fall-through read port: fifo_rd pops it into a holding register), then
// offers its WIDTH/8 bytes most significant byte first. A byte is written in
// every cycle in which a packet is held and tcp_tx_full is low; while the
// core is full the block stalls on the current byte. The next packet is
// fetched in the cycle after the last byte, so a stream of packets uses
// (WIDTH/8 + 1) cycles per packet without stalls.
//
// Forwarding the buffer to the Ethernet link follows the instrument; the byte
// order and the write/full byte interface are this design's choices.
module tx_serializer #(
  parameter int unsigned WIDTH = 128
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             fifo_empty,
  input  logic [WIDTH-1:0] fifo_data,
  output logic             fifo_rd,
  input  logic             tcp_tx_full,
  output logic             tcp_tx_wr,
  output logic [7:0]       tcp_tx_data
);

  localparam int unsigned NBYTE = WIDTH / 8;
  localparam int unsigned BW    = $clog2(NBYTE);

  logic [WIDTH-1:0] word_q;
  logic [BW-1:0]    idx_q;
  logic             busy_q;

  assign fifo_rd     = !busy_q && !fifo_empty;
  assign tcp_tx_wr   = busy_q && !tcp_tx_full;
  assign tcp_tx_data = word_q[WIDTH-1 -: 8];

  always_ff @(posedge clk) begin
    if (rst) begin
      word_q <= '0;
      idx_q  <= '0;
      busy_q <= 1'b0;
    end else if (fifo_rd) begin
      word_q <= fifo_data;
      idx_q  <= '0;
      busy_q <= 1'b1;
    end else if (tcp_tx_wr) begin
      word_q <= word_q << 8;
      idx_q  <= idx_q + 1'b1;
      if (idx_q == BW'(NBYTE - 1)) busy_q <= 1'b0;
    end
  end

endmodule
