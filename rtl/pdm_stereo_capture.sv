// pdm_stereo_capture: dual-edge sampling of 16 stereo PDM lines.
//
// Each data line is shared by two PDM microphones in stereo mode: one drives
// its bit after the rising edge of the microphone clock, the other after the
// falling edge, and each bit is latched on the opposite edge. The falling-edge
// bank therefore latches the rising-edge microphones, and on the next rising
// edge the falling-edge microphones are latched together with that bank into
// one word that holds one PDM bit of every microphone for one clock period.
// The word is kept until the next period (the temporary store the recorder
// copies into SDRAM after a trigger).
//
// Word layout (this design's choice): bit 2p is the rising-edge microphone on
// line p, bit 2p+1 the falling-edge microphone on line p.
// Timing: word changes on every rising edge of mclk and holds the period
// that started one rising edge earlier. Runs entirely in the mclk domain with
// an asynchronous active-low reset.
module pdm_stereo_capture #(
  parameter int unsigned PINS = hiris_pkg::PDM_PINS
) (
  input  logic              mclk,
  input  logic              rst_n,
  input  logic [PINS-1:0]   pdm,
  output logic [2*PINS-1:0] word
);
  logic [PINS-1:0] rise_mics;   // latched on the falling edge

  always_ff @(negedge mclk or negedge rst_n) begin
    if (!rst_n) rise_mics <= '0;
    else        rise_mics <= pdm;
  end

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n) word <= '0;
    else begin
      for (int p = 0; p < PINS; p++) begin
        word[2*p]   <= rise_mics[p];
        word[2*p+1] <= pdm[p];
      end
    end
  end

endmodule
