// dac_sequencer: waveform playback of the primary node's DAC.
//
// For active (pulse-echo) measurements the primary node's DAC plays a stored
// sequence, e.g. a broadband chirp, started together with the subordinate
// nodes; an external amplifier and transducer emit it. Two sources exist:
// * uploaded: a DEPTH-word memory that the host fills through the write port
//   (wr_*); len sets how many samples a playback uses (0 plays nothing);
// * predefined: the hyperbolic chirp of chirp_gen (CHIRP_LEN samples), chosen
//   by use_chirp, which is sampled at start. chirp_gen needs 41 cycles per
//   sample, so this source needs DIV >= 43.
//
// Operation: sample k appears on the (1 + k*DIV)-th clock edge after the edge
// that samples start, with a one-cycle update strobe; so one new sample every
// DIV cycles. After the last sample has been
// held for DIV cycles the output returns to IDLE_CODE (mid-scale). A start
// while playing is ignored. The memory is read synchronously one sample
// ahead, so writing the memory during playback changes what is played.
// From the sensor: DAC started with the trigger, sequence either predefined
// or uploaded by the host. Own choices: 12-bit codes, 4096-sample memory,
// 1 MS/s (DIV = 180 at 180 MHz), the mid-scale idle level.
module dac_sequencer #(
  parameter int unsigned DAC_W     = hiris_pkg::DAC_W,
  parameter int unsigned AW        = 12,
  parameter int unsigned DIV       = 180,
  parameter logic [DAC_W-1:0] IDLE_CODE = DAC_W'(1 << (DAC_W - 1))
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW:0]      len,
  input  logic             use_chirp,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [DAC_W-1:0] wr_data,
  output logic [DAC_W-1:0] dac_data,
  output logic             dac_update,
  output logic             busy
);
  localparam int unsigned DEPTH = 1 << AW;
  localparam int unsigned TW    = (DIV > 1) ? $clog2(DIV) : 1;
  localparam int unsigned CHIRP_LEN = 2000;
  // sample counter width: enough for the memory and for the chirp
  localparam int unsigned LW = (AW + 1 > $clog2(CHIRP_LEN + 1)) ? AW + 1 : $clog2(CHIRP_LEN + 1);

  logic [DAC_W-1:0] mem [DEPTH];
  logic [DAC_W-1:0] rd_q;
  logic [LW-1:0]    idx;
  logic [LW-1:0]    play_len;
  logic [TW-1:0]    tick;
  logic             chirp_mode, chirp_adv, chirp_ready;
  logic [DAC_W-1:0] chirp_code;

  wire chirp_restart = !busy && start && use_chirp;

  chirp_gen #(.DAC_W(DAC_W), .LEN(CHIRP_LEN)) u_chirp (
    .clk, .rst_n, .restart(chirp_restart), .advance(chirp_adv),
    .code(chirp_code), .ready(chirp_ready)
  );

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_q <= mem[idx[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx        <= '0;
      play_len   <= '0;
      tick       <= '0;
      busy       <= 1'b0;
      chirp_mode <= 1'b0;
      chirp_adv  <= 1'b0;
      dac_data   <= IDLE_CODE;
      dac_update <= 1'b0;
    end else begin
      dac_update <= 1'b0;
      chirp_adv  <= 1'b0;
      if (!busy) begin
        idx <= '0;
        if (start && (use_chirp || len != 0)) begin
          busy       <= 1'b1;
          chirp_mode <= use_chirp;
          play_len   <= use_chirp ? LW'(CHIRP_LEN) : LW'(len);
          tick       <= TW'(DIV - 1);
        end
      end else if (tick == TW'(DIV - 1)) begin
        tick       <= '0;
        dac_update <= 1'b1;
        if (idx == play_len) begin
          busy     <= 1'b0;
          idx      <= '0;
          dac_data <= IDLE_CODE;
        end else begin
          dac_data  <= chirp_mode ? chirp_code : rd_q;
          chirp_adv <= chirp_mode;
          idx       <= idx + 1'b1;
        end
      end else begin
        tick <= tick + 1'b1;
      end
    end
  end

  initial begin
    assert (DIV >= 2) else $error("dac_sequencer: DIV must be at least 2");
  end

  // The chirp's next sample must be ready when it is due.
  always_ff @(posedge clk) begin
    if (busy && chirp_mode && tick == TW'(DIV - 1) && idx != play_len)
      assert (chirp_ready) else $error("dac_sequencer: chirp sample not ready (DIV too small)");
  end

endmodule
