// spi_master -- SPI shift engine for the on-board slow-control devices.
//
// Sends one FRAME_W-bit frame, most significant bit first, to one of NCS
// devices (the HV DAC and the front-end ASICs), each with its own active-low
// chip select. SPI mode 0: SCLK idles low, MOSI changes while SCLK is low and
// is stable at each rising SCLK edge, where the device samples it. SCLK runs
// at clk / (2*DIV) (10 MHz from 200 MHz by default).
//
// Protocol: pulse start for one cycle while busy is low, with cs_sel and data
// valid in that cycle. The block asserts cs_n[cs_sel], waits half an SCLK
// period, clocks out FRAME_W bits, waits half a period, releases cs_n and
// pulses done. done is high (2*FRAME_W + 3) * DIV cycles after the clock
// edge that takes start (350 cycles, 1.75 us, by default). DIV must be 2 or
// more.
//
// That the devices are programmed over SPI follows the instrument; mode,
// bit order, frame length and clock rate are this design's choices.
module spi_master #(
  parameter int unsigned NCS     = 5,
  parameter int unsigned FRAME_W = 16,
  parameter int unsigned DIV     = 10
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       start,
  input  logic [$clog2(NCS)-1:0]     cs_sel,
  input  logic [FRAME_W-1:0]         data,
  output logic                       busy,
  output logic                       done,
  output logic                       sclk,
  output logic                       mosi,
  output logic [NCS-1:0]             cs_n
);

  typedef enum logic [1:0] {IDLE, LEAD, SHIFT, TRAIL} state_t;

  localparam int unsigned HW = $clog2(FRAME_W * 2 + 1);

  state_t                   state_q;
  logic [$clog2(DIV)-1:0]   div_q;
  logic [HW-1:0]            half_q;     // half SCLK periods left in SHIFT
  logic [FRAME_W-1:0]       sh_q;
  logic                     tick;

  assign tick = (div_q == '0);
  assign busy = (state_q != IDLE);
  assign mosi = sh_q[FRAME_W-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= IDLE;
      div_q   <= '0;
      half_q  <= '0;
      sh_q    <= '0;
      sclk    <= 1'b0;
      cs_n    <= '1;
      done    <= 1'b0;
    end else begin
      done  <= 1'b0;
      div_q <= tick ? $clog2(DIV)'(DIV - 1) : div_q - 1'b1;
      unique case (state_q)
        IDLE: if (start) begin
          state_q      <= LEAD;
          sh_q         <= data;
          cs_n         <= '1;
          cs_n[cs_sel] <= 1'b0;
          div_q        <= $clog2(DIV)'(DIV - 1);
        end
        LEAD: if (tick) begin
          state_q <= SHIFT;
          half_q  <= HW'(2 * FRAME_W);
        end
        SHIFT: if (tick) begin
          if (half_q == '0) begin
            state_q <= TRAIL;
          end else begin
            half_q <= half_q - 1'b1;
            sclk   <= ~sclk;
            if (sclk) sh_q <= sh_q << 1;   // falling edge: next bit
          end
        end
        TRAIL: if (tick) begin
          state_q <= IDLE;
          cs_n    <= '1;
          done    <= 1'b1;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (rst) start |-> !busy);

endmodule
