// pdm_mic_model: behavioural model of 2*PINS PDM MEMS microphones in stereo
// pairs (not synthesizable; the real parts are analog sigma-delta ADCs).
//
// Line p is shared by two microphones: channel 2p drives its bit DRIVE_NS
// after each rising clock edge, channel 2p+1 after each falling edge. The
// bits are pdm_ref_pkg::pdm_bit(NODE, ch, k), k counting rising edges from 0.
// period_index gives k of the period in progress.
module pdm_mic_model #(
  parameter int unsigned PINS     = 16,
  parameter int unsigned NODE     = 0,
  parameter realtime     DRIVE_NS = 2.0
) (
  input  logic            mclk,
  output logic [PINS-1:0] pdm,
  output int unsigned     period_index
);
  import pdm_ref_pkg::*;

  int unsigned k = 0;
  bit started = 0;

  initial pdm = '0;

  always @(posedge mclk) begin
    if (started) k = k + 1;
    started = 1;
    period_index = k;
    #(DRIVE_NS * 1ns);
    for (int p = 0; p < PINS; p++) pdm[p] = pdm_bit(NODE, 2*p, k);
  end

  always @(negedge mclk) begin
    #(DRIVE_NS * 1ns);
    for (int p = 0; p < PINS; p++) pdm[p] = pdm_bit(NODE, 2*p+1, k);
  end

endmodule
