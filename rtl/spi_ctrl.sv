// spi_ctrl -- turns slow-control register contents into SPI commands.
//
// The PC writes settings into the register bank and then requests an update
// of one or more devices (req, one bit per SPI target: bit 0 the HV DAC, bit
// 1+k front-end ASIC k). Requests are remembered in a pending mask and served
// lowest target first, one SPI frame at a time through spi_master:
//
//   HV DAC      one frame: the 16-bit DAC code cfg.hv_code
//   ASIC k      16 frames {channel index j, cfg.vth[16k + j]} for j = 0..15,
//               then one frame {FGATI_ADDR_AMP, cfg.amp[k]}
//
// Values are read from cfg when each frame starts. A target's pending bit is
// cleared when its update begins, so a request that arrives while it is being
// served makes it pending again and the latest values are always sent. busy is high while anything is pending or sending.
//
// Programming the HV DAC and the ASIC thresholds and gain over SPI from
// register values follows the instrument; the frame contents and order are
// this design's choices, as the device command formats are not given.
module spi_ctrl
  import imony_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic [NCS-1:0]            req,
  input  cfg_t                      cfg,
  output logic                      busy,
  output logic                      frame_start,
  output logic [$clog2(NCS)-1:0]    frame_cs,
  output logic [SPI_FRAME_W-1:0]    frame_data,
  input  logic                      frame_done
);

  localparam int unsigned TW = $clog2(NCS);

  typedef enum logic [1:0] {S_IDLE, S_START, S_WAIT} state_t;

  state_t           state_q;
  logic [NCS-1:0]   pend_q;
  logic [TW-1:0]    tgt_q;
  logic [4:0]       idx_q;          // frame index within an ASIC update, 0..16
  logic [TW-1:0]    first_tgt;
  logic             last_frame;
  logic [NCS-1:0]   clr;

  always_comb begin
    first_tgt = '0;
    for (int t = NCS - 1; t >= 0; t--) if (pend_q[t]) first_tgt = TW'(t);
  end

  assign last_frame = (tgt_q == TW'(CS_HV)) || (idx_q == 5'(CH_PER_CHIP));

  always_comb begin
    frame_data = cfg.hv_code;
    if (tgt_q != TW'(CS_HV)) begin
      if (idx_q == 5'(CH_PER_CHIP))
        frame_data = {FGATI_ADDR_AMP, cfg.amp[tgt_q - 1'b1]};
      else
        frame_data = {8'(idx_q), cfg.vth[(32'(tgt_q) - 1) * CH_PER_CHIP + 32'(idx_q)]};
    end
  end

  assign frame_cs    = tgt_q;
  assign frame_start = (state_q == S_START);
  assign busy        = (state_q != S_IDLE) || (pend_q != '0);

  always_comb begin
    clr = '0;
    if (state_q == S_IDLE && pend_q != '0) clr[first_tgt] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      pend_q  <= '0;
      tgt_q   <= '0;
      idx_q   <= '0;
    end else begin
      pend_q <= (pend_q & ~clr) | req;
      unique case (state_q)
        S_IDLE: if (pend_q != '0) begin
          tgt_q   <= first_tgt;
          idx_q   <= '0;
          state_q <= S_START;
        end
        S_START: state_q <= S_WAIT;
        S_WAIT: if (frame_done) begin
          if (last_frame) state_q <= S_IDLE;
          else begin
            idx_q   <= idx_q + 1'b1;
            state_q <= S_START;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
