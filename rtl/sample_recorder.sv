// sample_recorder: trigger-started recording of PDM words into SDRAM.
//
// The subordinate node samples its microphones continuously; only when the
// primary node's trigger arrives does it copy the words into its 64 MB SDRAM,
// one 32-bit word per microphone clock period (18 MB/s), at consecutive
// addresses from 0, until the programmed number of samples is stored.
//
// Operation: trig is sampled on the rising mclk edge (the primary changes it
// on falling edges). The first rising edge that sees it high starts a
// recording: the word present at that edge is written to address 0 and one
// word per following edge until num_samples words are written. num_samples is
// latched at the start; a count of 0 records nothing; a count above the
// capacity (2^ADDR_W words, about 3.7 s) is clipped to the capacity and
// reported by the sticky clipped flag. Triggers during a recording are
// ignored (retrig pulse). rec_words counts the words written by the current
// or last recording. done rises after the last write and stays high until
// the next recording starts.
// The write port has no back-pressure: the SDRAM controller must accept one
// word per mclk period, which is this design's assumption.
module sample_recorder #(
  parameter int unsigned ADDR_W = hiris_pkg::ADDR_W,
  parameter int unsigned WORD_W = hiris_pkg::WORD_W
) (
  input  logic              mclk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic [WORD_W-1:0] word,
  input  logic [ADDR_W:0]   num_samples,
  output logic              sd_we,
  output logic [ADDR_W-1:0] sd_addr,
  output logic [WORD_W-1:0] sd_wdata,
  output logic [ADDR_W:0]   rec_words,
  output logic              recording,
  output logic              done,
  output logic              clipped,
  output logic              retrig
);
  localparam logic [ADDR_W:0] CAP = (ADDR_W+1)'(1) << ADDR_W;

  logic            trig_q;
  logic [ADDR_W:0] target, count;

  wire start = trig && !trig_q;

  assign rec_words = count;

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q    <= 1'b0;
      target    <= '0;
      count     <= '0;
      recording <= 1'b0;
      done      <= 1'b0;
      clipped   <= 1'b0;
      retrig    <= 1'b0;
      sd_we     <= 1'b0;
      sd_addr   <= '0;
      sd_wdata  <= '0;
    end else begin
      trig_q <= trig;
      sd_we  <= 1'b0;
      retrig <= 1'b0;
      if (!recording) begin
        if (start) begin
          done    <= 1'b0;
          clipped <= (num_samples > CAP);
          if (num_samples != 0) begin
            target    <= (num_samples > CAP) ? CAP : num_samples;
            recording <= 1'b1;
            sd_we     <= 1'b1;
            sd_addr   <= '0;
            sd_wdata  <= word;
            count     <= (ADDR_W+1)'(1);
          end else begin
            count <= '0;
            done  <= 1'b1;
          end
        end
      end else begin
        if (start) retrig <= 1'b1;
        if (count == target) begin
          recording <= 1'b0;
          done      <= 1'b1;
        end else begin
          sd_we    <= 1'b1;
          sd_addr  <= count[ADDR_W-1:0];
          sd_wdata <= word;
          count    <= count + 1'b1;
        end
      end
    end
  end

  // Every write lies inside the recording being made (and so inside the SDRAM).
  a_in_range: assert property (@(posedge mclk) disable iff (!rst_n)
    sd_we |-> ((ADDR_W+1)'(sd_addr) < target))
    else $error("sample_recorder: write beyond the programmed length");

endmodule
