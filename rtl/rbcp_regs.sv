// rbcp_regs -- slow-control register bank on the RBCP bus.
//
// The PC reads and writes the instrument settings through the Ethernet core's
// remote bus (RBCP): byte-wide accesses with an address, a one-cycle write
// strobe (rbcp_we with rbcp_wd) or read strobe (rbcp_re), answered by a
// one-cycle rbcp_ack in the following cycle (with rbcp_rd for reads). Only
// the low 8 address bits are decoded; unmapped addresses read as 0 and
// ignore writes but are still acknowledged.
//
// Register map (see imony_pkg): run enable; SPI update command (writing 1s
// pulses spi_req for one cycle, reads as 0); status; HV DAC code; amplifier
// setting of each front-end ASIC; threshold of each of the 64 channels; lost
// packet count; the GNSS time message kept for the run start (length and
// bytes, read only). All settings reset to 0.
//
// A register bank on the RBCP bus whose contents become SPI commands follows
// the instrument; the map, the decoding and the widths are this design's
// choices.
module rbcp_regs
  import imony_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             rbcp_act,
  input  logic [31:0]      rbcp_addr,
  input  logic             rbcp_we,
  input  logic [7:0]       rbcp_wd,
  input  logic             rbcp_re,
  output logic             rbcp_ack,
  output logic [7:0]       rbcp_rd,
  output logic             run_en,
  output logic [NCS-1:0]   spi_req,
  output cfg_t             cfg,
  input  logic             spi_busy,
  input  logic             running,
  input  logic [31:0]      lost_cnt,
  input  logic [GNSS_MSG_LEN-1:0][7:0] gnss_msg,
  input  logic [7:0]       gnss_len
);

  logic [7:0] a;
  logic [7:0] rd_val;

  assign a = rbcp_addr[7:0];

  always_comb begin
    rd_val = '0;
    if (a == REG_CTRL)        rd_val = {7'd0, run_en};
    else if (a == REG_STATUS) rd_val = {5'd0, (lost_cnt != '0), running, spi_busy};
    else if (a == REG_HV_HI)  rd_val = cfg.hv_code[15:8];
    else if (a == REG_HV_LO)  rd_val = cfg.hv_code[7:0];
    else if (a >= REG_AMP0 && a < REG_AMP0 + 8'(NCHIP))
      rd_val = cfg.amp[a - REG_AMP0];
    else if (a >= REG_LOST0 && a < REG_LOST0 + 8'd4)
      rd_val = lost_cnt[8 * (3 - (a - REG_LOST0)) +: 8];
    else if (a >= REG_VTH0 && a < REG_VTH0 + 8'(NCH))
      rd_val = cfg.vth[a - REG_VTH0];
    else if (a == REG_GNSS_LEN) rd_val = gnss_len;
    else if (a >= REG_GNSS_MSG0 && a < REG_GNSS_MSG0 + 8'(GNSS_MSG_LEN))
      rd_val = gnss_msg[a - REG_GNSS_MSG0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      run_en   <= 1'b0;
      spi_req  <= '0;
      cfg      <= '0;
      rbcp_ack <= 1'b0;
      rbcp_rd  <= '0;
    end else begin
      spi_req  <= '0;
      rbcp_ack <= rbcp_act && (rbcp_we || rbcp_re);
      if (rbcp_act && rbcp_re) rbcp_rd <= rd_val;
      if (rbcp_act && rbcp_we) begin
        if (a == REG_CTRL)         run_en            <= rbcp_wd[0];
        else if (a == REG_SPI_CMD) spi_req           <= rbcp_wd[NCS-1:0];
        else if (a == REG_HV_HI)   cfg.hv_code[15:8] <= rbcp_wd;
        else if (a == REG_HV_LO)   cfg.hv_code[7:0]  <= rbcp_wd;
        else if (a >= REG_AMP0 && a < REG_AMP0 + 8'(NCHIP))
          cfg.amp[a - REG_AMP0] <= rbcp_wd;
        else if (a >= REG_VTH0 && a < REG_VTH0 + 8'(NCH))
          cfg.vth[a - REG_VTH0] <= rbcp_wd;
      end
    end
  end

  a_not_both: assert property (@(posedge clk) disable iff (rst) !(rbcp_we && rbcp_re));

endmodule
