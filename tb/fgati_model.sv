// fgati_model -- behavioural stand-in for one 16-channel front-end ASIC
// (transimpedance amplifier + comparator per channel), for simulation only.
//
// Configuration arrives over SPI (mode 0, 16-bit frames, MSB first, while
// cs_n is low) in the frame format the readout logic uses: {address, data}
// with address 0..15 setting the threshold of that channel and address 0x10
// the amplifier setting. The analog part is reduced to a comparison: when
// the test calls fire(ch, height), the channel's comparator output goes high
// for PULSE_NS if height is above the channel's threshold; photons closer
// together than that on one channel give a single pulse. The real chip's
// register map and analog behaviour are not modelled.
module fgati_model #(
  parameter realtime PULSE_NS = 8ns
) (
  input  logic        sclk,
  input  logic        mosi,
  input  logic        cs_n,
  output logic [15:0] hit
);
  logic [7:0]  vth [16];
  logic [7:0]  amp;
  logic [15:0] sh;
  int          nbit;
  int          frames;

  initial begin
    hit = '0; amp = '0; frames = 0; nbit = 0; sh = '0;
    for (int i = 0; i < 16; i++) vth[i] = 8'hFF;
  end

  always @(negedge cs_n) nbit = 0;
  always @(posedge sclk) if (!cs_n) begin sh = {sh[14:0], mosi}; nbit++; end
  always @(posedge cs_n) if (nbit == 16) begin
    frames++;
    if (sh[15:8] < 8'd16) vth[sh[11:8]] = sh[7:0];
    else if (sh[15:8] == 8'h10) amp = sh[7:0];
  end

  // fired = 1 when the comparator gives a new pulse; returns at once. A
  // photon arriving while the output is high, or within PULSE_NS after it
  // fell, piles up with the previous one and gives no new pulse (piled = 1).
  realtime last_fall [16];
  initial for (int i = 0; i < 16; i++) last_fall[i] = -1s;

  task automatic fire(input int ch, input int height, output bit fired, output bit piled);
    fired = 1'b0;
    piled = 1'b0;
    if (height > int'(vth[ch])) begin
      if (hit[ch] || $realtime < last_fall[ch] + PULSE_NS) piled = 1'b1;
      else begin
        fired = 1'b1;
        last_fall[ch] = $realtime + PULSE_NS;
        fork begin hit[ch] = 1'b1; #(PULSE_NS); hit[ch] = 1'b0; end join_none
      end
    end
  endtask
endmodule
