// subordinate_node: acquisition node for one group of 32 microphones.
//
// One of the 32 identical nodes. Its 16 data lines carry the PDM bits of 32
// microphones in stereo mode; pdm_stereo_capture samples them on both edges
// of the shared microphone clock into one 32-bit word per period.
// sample_recorder copies these words into the node's SDRAM once the trigger
// from the primary node is seen, until the programmed number of samples is
// stored; readout_streamer then returns the recording to the host as a byte
// stream for the node's USB link.
//
// Interface: the node runs on mclk (4.5 MHz), the clock the primary node
// distributes, with an asynchronous active-low reset. num_samples and
// rd_start come from the host side of the node (its USB link, not modelled
// here). A readout request during a recording is ignored; a readout sends
// num_samples words, or fewer if the last recording wrote fewer. The SDRAM is
// reached through a word write port and a word read port with rd_valid; the
// SDRAM controller and chip are outside this module.
module subordinate_node #(
  parameter int unsigned PINS   = hiris_pkg::PDM_PINS,
  parameter int unsigned ADDR_W = hiris_pkg::ADDR_W
) (
  input  logic                mclk,
  input  logic                rst_n,
  input  logic                trig,
  input  logic [PINS-1:0]     pdm,
  input  logic [ADDR_W:0]     num_samples,
  input  logic                rd_start,
  output logic                sd_we,
  output logic [ADDR_W-1:0]   sd_waddr,
  output logic [2*PINS-1:0]   sd_wdata,
  output logic                sd_re,
  output logic [ADDR_W-1:0]   sd_raddr,
  input  logic                sd_rvalid,
  input  logic [2*PINS-1:0]   sd_rdata,
  output logic [7:0]          usb_tdata,
  output logic                usb_tvalid,
  input  logic                usb_tready,
  output logic                recording,
  output logic                rec_done,
  output logic                clipped,
  output logic                retrig,
  output logic                rd_busy,
  output logic                rd_done
);
  logic [2*PINS-1:0] word;
  logic [ADDR_W:0]   rec_words, rd_words;

  // A readout never goes past the words the last recording wrote.
  assign rd_words = (num_samples > rec_words) ? rec_words : num_samples;

  pdm_stereo_capture #(.PINS(PINS)) u_cap (
    .mclk, .rst_n, .pdm, .word
  );

  sample_recorder #(.ADDR_W(ADDR_W), .WORD_W(2*PINS)) u_rec (
    .mclk, .rst_n, .trig, .word, .num_samples,
    .sd_we, .sd_addr(sd_waddr), .sd_wdata,
    .rec_words, .recording, .done(rec_done), .clipped, .retrig
  );

  readout_streamer #(.ADDR_W(ADDR_W), .WORD_W(2*PINS)) u_rd (
    .clk(mclk), .rst_n, .start(rd_start && !recording), .num_words(rd_words),
    .rd_re(sd_re), .rd_addr(sd_raddr), .rd_valid(sd_rvalid), .rd_data(sd_rdata),
    .tdata(usb_tdata), .tvalid(usb_tvalid), .tready(usb_tready),
    .busy(rd_busy), .done(rd_done)
  );

endmodule
