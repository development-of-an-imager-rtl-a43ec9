// imony_pkg -- constants and types shared by the photon-counter readout logic.
//
// The readout serves a 64-pixel (8 x 8) Geiger-mode APD sensor read by four
// 16-channel analog front-end ASICs. Every 5 ns sample in which at least one
// pixel fired becomes one 128-bit packet:
//
//   [127:120] header    HDR_HIT for photon data, HDR_RUN for the run-start mark
//   [119: 88] pps_cnt   GNSS pulse-per-second pulses since the run started
//   [ 87: 64] tick_cnt  10 MHz reference cycles since the last PPS (100 ns units)
//   [ 63:  0] hits      one bit per pixel, bit n = channel n
//
// The channel counts follow the instrument; the packet layout, the counter
// widths, the register map and the SPI frame format are choices of this
// design, since the instrument description gives none of them.
package imony_pkg;

  localparam int unsigned NCH         = 64;  // sensor pixels / comparator channels
  localparam int unsigned NCHIP       = 4;   // front-end ASICs
  localparam int unsigned CH_PER_CHIP = 16;  // channels per front-end ASIC
  localparam int unsigned TICK_W      = 24;  // holds 10^7 ticks per second
  localparam int unsigned PPS_W       = 32;  // seconds since run start
  localparam int unsigned PKT_W       = 128;
  localparam int unsigned NCS         = NCHIP + 1;  // SPI targets: HV DAC + ASICs
  localparam int unsigned SPI_FRAME_W = 16;

  localparam logic [7:0] HDR_HIT = 8'hA5;
  localparam logic [7:0] HDR_RUN = 8'h5A;

  typedef struct packed {
    logic [7:0]        header;
    logic [PPS_W-1:0]  pps_cnt;
    logic [TICK_W-1:0] tick_cnt;
    logic [NCH-1:0]    hits;
  } packet_t;

  // ---------------------------------------------------------------------
  // Register map (byte addresses on the slow-control bus, 8-bit data).
  // ---------------------------------------------------------------------
  localparam logic [7:0] REG_CTRL    = 8'h00; // bit0 run enable
  localparam logic [7:0] REG_SPI_CMD = 8'h01; // write 1s: bit0 HV, bit1+k ASIC k (self-clearing)
  localparam logic [7:0] REG_STATUS  = 8'h02; // ro: bit0 SPI busy, bit1 running, bit2 overflow seen
  localparam logic [7:0] REG_HV_HI   = 8'h04; // HV DAC code [15:8]
  localparam logic [7:0] REG_HV_LO   = 8'h05; // HV DAC code [7:0]
  localparam logic [7:0] REG_AMP0    = 8'h08; // 0x08..0x0B amplifier setting of ASIC 0..3
  localparam logic [7:0] REG_LOST0   = 8'h0C; // 0x0C..0x0F ro lost-packet count, MSB first
  localparam logic [7:0] REG_VTH0    = 8'h10; // 0x10..0x4F threshold of channel 0..63
  localparam logic [7:0] REG_GNSS_LEN  = 8'h80; // ro length of the GNSS time message
  localparam logic [7:0] REG_GNSS_MSG0 = 8'h81; // ro 0x81..0xD0 message bytes, first byte first

  localparam int unsigned GNSS_MSG_LEN = 80;   // bytes kept of one GNSS text message

  // SPI chip-select indices.
  localparam int unsigned CS_HV = 0;        // HV DAC; ASIC k uses CS 1+k

  // ASIC frame: {address, data}. Address 0..15 = channel threshold, AMP = gain.
  localparam logic [7:0] FGATI_ADDR_AMP = 8'h10;

  typedef struct packed {
    logic [15:0]                hv_code;
    logic [NCHIP-1:0][7:0]      amp;
    logic [NCH-1:0][7:0]        vth;
  } cfg_t;

endpackage
