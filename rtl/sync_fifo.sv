// sync_fifo -- packet buffer between data generation and the Ethernet link.
//
// A single-clock first-in first-out memory of DEPTH words of WIDTH bits,
// written as a register array with read and write pointers one bit wider than
// the address (the extra bit tells full from empty). The read side is
// first-word-fall-through: rd_data shows the oldest word whenever empty is
// low, and rd_en removes it. A write and a read in the same cycle are both
// performed, also when the buffer is full. Writing when full (without a read)
// or reading when empty is a protocol error, flagged by assertions.
//
// Timing: a word written in cycle n is visible on rd_data in cycle n+1.
//
// The buffer itself follows the instrument; depth, width and the
// fall-through read port are this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;

  assign count   = wr_ptr - rd_ptr;
  assign empty   = (wr_ptr == rd_ptr);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && (!full || rd_en)) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (wr_en && (!full || rd_en)) wr_ptr <= wr_ptr + 1'b1;
      if (rd_en && !empty)           rd_ptr <= rd_ptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty));

endmodule
