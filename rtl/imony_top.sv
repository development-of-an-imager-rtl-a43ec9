// imony_top -- FPGA logic of the 64-channel photon-counting imager readout.
//
// Data path: the 64 comparator hit lines (after the differential input
// buffers) are sampled every 5 ns by hit_edge_detect; data_gen combines each
// sample that has a hit with the GNSS time kept by time_counters (PPS count
// and 10 MHz count since the last PPS) into a 128-bit packet; the packets
// wait in sync_fifo and tx_serializer sends them byte by byte to the TCP port
// of the Ethernet core.
//
// Control path: the PC writes settings through the Ethernet core's RBCP bus
// into rbcp_regs; on command, spi_ctrl and spi_master send the HV DAC code and
// the front-end ASIC thresholds and gains over SPI. Writing the run-enable
// bit starts a run: the PPS counter is cleared and a run-start packet,
// holding the 10 MHz count at that moment, opens the data stream. The GNSS receiver's serial time messages are
// received by gnss_uart_rx; gnss_msg_latch keeps the last one completed
// before the run started, which the PC reads as the run's absolute time.
//
// The Ethernet core, the GNSS receiver, the input buffers and the clock
// generator are outside this module; their signals are ports. All logic runs
// on clk, the 200 MHz sampling clock derived from the GNSS reference.
//
// The block structure and connections follow the instrument's FPGA block
// diagram; interfaces, widths and the register and packet formats are this
// design's choices.
module imony_top
  import imony_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned SPI_DIV    = 10,
  parameter int unsigned UART_CLKS_PER_BIT = 1736
) (
  input  logic                    clk,
  input  logic                    rst,
  // front-end ASIC comparator outputs, one per pixel
  input  logic [NCH-1:0]          hit_in,
  // GNSS receiver
  input  logic                    gnss_clk10,
  input  logic                    gnss_pps,
  input  logic                    gnss_rxd,
  // Ethernet core: RBCP slow-control bus
  input  logic                    rbcp_act,
  input  logic [31:0]             rbcp_addr,
  input  logic                    rbcp_we,
  input  logic [7:0]              rbcp_wd,
  input  logic                    rbcp_re,
  output logic                    rbcp_ack,
  output logic [7:0]              rbcp_rd,
  // Ethernet core: TCP transmit byte port
  input  logic                    tcp_tx_full,
  output logic                    tcp_tx_wr,
  output logic [7:0]              tcp_tx_data,
  // SPI to HV DAC (cs 0) and front-end ASICs (cs 1..4)
  output logic                    spi_sclk,
  output logic                    spi_mosi,
  output logic [NCS-1:0]          spi_cs_n
);

  logic [NCH-1:0]            hit_edge;
  logic [PPS_W-1:0]          pps_cnt;
  logic [TICK_W-1:0]         tick_cnt;
  logic                      run_en, run_start, running;
  logic                      fifo_wr, fifo_full, fifo_rd, fifo_empty;
  packet_t                   fifo_wdata;
  logic [PKT_W-1:0]          fifo_rdata;
  logic [31:0]               lost_cnt;
  logic [NCS-1:0]            spi_req;
  cfg_t                      cfg;
  logic                      spi_busy;
  logic                      frame_start, frame_done;
  logic [$clog2(NCS)-1:0]    frame_cs;
  logic [SPI_FRAME_W-1:0]    frame_data;
  logic                      uart_valid;
  logic [7:0]                uart_byte;
  logic [GNSS_MSG_LEN-1:0][7:0] gnss_msg;
  logic [7:0]                gnss_len;

  hit_edge_detect #(.NCH(NCH)) u_edge (
    .clk, .rst, .hit_in, .hit_edge
  );

  time_counters #(.TICK_W(TICK_W), .PPS_W(PPS_W)) u_time (
    .clk, .rst, .run_start, .clk10_in(gnss_clk10), .pps_in(gnss_pps),
    .pps_cnt, .tick_cnt
  );

  data_gen u_gen (
    .clk, .rst, .run_en, .hit_edge, .pps_cnt, .tick_cnt,
    .run_start, .running, .fifo_wr, .fifo_data(fifo_wdata),
    .fifo_full, .lost_cnt
  );

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(fifo_wr), .wr_data(fifo_wdata), .full(fifo_full),
    .rd_en(fifo_rd), .rd_data(fifo_rdata), .empty(fifo_empty), .count()
  );

  tx_serializer #(.WIDTH(PKT_W)) u_tx (
    .clk, .rst, .fifo_empty, .fifo_data(fifo_rdata), .fifo_rd,
    .tcp_tx_full, .tcp_tx_wr, .tcp_tx_data
  );

  rbcp_regs u_regs (
    .clk, .rst, .rbcp_act, .rbcp_addr, .rbcp_we, .rbcp_wd, .rbcp_re,
    .rbcp_ack, .rbcp_rd, .run_en, .spi_req, .cfg,
    .spi_busy, .running, .lost_cnt, .gnss_msg, .gnss_len
  );

  gnss_uart_rx #(.CLKS_PER_BIT(UART_CLKS_PER_BIT)) u_uart (
    .clk, .rst, .rxd(gnss_rxd), .byte_valid(uart_valid), .byte_data(uart_byte)
  );

  gnss_msg_latch #(.MSG_LEN(GNSS_MSG_LEN)) u_msg (
    .clk, .rst, .byte_valid(uart_valid), .byte_data(uart_byte), .running,
    .msg(gnss_msg), .msg_len(gnss_len)
  );

  spi_ctrl u_spi_ctrl (
    .clk, .rst, .req(spi_req), .cfg, .busy(spi_busy),
    .frame_start, .frame_cs, .frame_data, .frame_done
  );

  spi_master #(.NCS(NCS), .FRAME_W(SPI_FRAME_W), .DIV(SPI_DIV)) u_spi (
    .clk, .rst, .start(frame_start), .cs_sel(frame_cs), .data(frame_data),
    .busy(), .done(frame_done),
    .sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n)
  );

endmodule
