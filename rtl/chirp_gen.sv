// chirp_gen: the predefined DAC waveform, a hyperbolic chirp made sample by
// sample.
//
// In a hyperbolic chirp the period, not the frequency, changes linearly in
// time. The generator keeps the period P(n) of sample n, in samples, as a
// fixed-point number with FR fraction bits: P(0) = FS_HZ/F_START_HZ, and each
// step adds the constant DP so that sample LEN-1 has period FS_HZ/F_STOP_HZ.
// The phase (PH_W bits, one full cycle = 2^PH_W) advances by 1/P(n) from
// sample n to n+1. That reciprocal comes from a serial restoring divider,
// 2^(PH_W+FR) / P(n), one quotient bit per clock (DIV_CYC = PH_W+FR+1
// cycles). The sine of the phase is a parabola with one correction term,
// y = p + 0.225*(p*|p| - p), within about 0.1 % of full scale. It is offset
// to mid-scale and scaled to +-AMP codes.
//
// Interface: restart sets sample 0 (phase 0, code = mid-scale). advance,
// allowed only while ready is high, computes the next sample; ready drops for
// DIV_CYC cycles and code changes when ready returns. code is combinational
// from the phase register.
//
// From the sensor: a DAC sequence predefined in the firmware, and a broadband
// hyperbolic chirp as the emitted signal of active measurements. Own
// choices: the waveform's numbers (100 kHz down to 25 kHz, the band the
// sensor targets, over 2000 samples = 2 ms at 1 MS/s, amplitude 2047 codes,
// no window) and the sine approximation.
module chirp_gen #(
  parameter int unsigned DAC_W      = hiris_pkg::DAC_W,
  parameter int unsigned FS_HZ      = 1000000,
  parameter int unsigned F_START_HZ = 100000,
  parameter int unsigned F_STOP_HZ  = 25000,
  parameter int unsigned LEN        = 2000,
  parameter int unsigned AMP        = 2047,
  parameter int unsigned FR         = 16,
  parameter int unsigned PH_W       = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             advance,
  output logic [DAC_W-1:0] code,
  output logic             ready
);
  localparam int unsigned NW      = PH_W + FR + 1;   // numerator bits
  localparam int unsigned DIV_CYC = NW;
  localparam int unsigned PW      = 40;              // period register bits
  localparam longint      P0_Q    = (longint'(FS_HZ) << FR) / longint'(F_START_HZ);
  localparam longint      P1_Q    = (longint'(FS_HZ) << FR) / longint'(F_STOP_HZ);
  localparam longint      DP      = (P1_Q - P0_Q) / (longint'(LEN) - 1);
  localparam int          MID     = 1 << (DAC_W - 1);
  localparam int          AMP_S   = AMP;             // signed copy for the product

  logic signed [PW-1:0] period;      // P(n), FR fraction bits
  logic [PH_W-1:0]      phase;
  logic [NW-1:0]        num_sh;      // numerator bits still to bring down
  logic [PW-1:0]        rem;         // always below the period
  logic [PH_W-2:0]      quo;         // low quotient bits (phase wraps)
  logic [$clog2(NW+1)-1:0] cnt;

  // One restoring-division step.
  logic [PW:0] rem_s;
  logic        take;
  always_comb begin
    rem_s = {rem, num_sh[NW-1]};
    take  = rem_s >= (PW+1)'(period);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      period <= PW'(P0_Q);
      phase  <= '0;
      num_sh <= '0;
      rem    <= '0;
      quo    <= '0;
      cnt    <= '0;
      ready  <= 1'b1;
    end else if (restart) begin
      period <= PW'(P0_Q);
      phase  <= '0;
      cnt    <= '0;
      ready  <= 1'b1;
    end else if (ready) begin
      if (advance) begin
        num_sh <= NW'(1) << (NW - 1);
        rem    <= '0;
        quo    <= '0;
        cnt    <= ($bits(cnt))'(DIV_CYC);
        ready  <= 1'b0;
      end
    end else begin
      rem    <= PW'(take ? rem_s - (PW+1)'(period) : rem_s);
      quo    <= {quo[PH_W-3:0], take};
      num_sh <= num_sh << 1;
      cnt    <= cnt - 1'b1;
      if (cnt == 1) begin
        phase  <= phase + {quo, take};
        period <= period + PW'(DP);
        ready  <= 1'b1;
      end
    end
  end

  // Sine of the phase. u = phase as a signed Q1.15 fraction of a half cycle
  // (-1 .. 1 for -180 .. 180 degrees); p = 4u(1-|u|); y = p + 0.225(p|p| - p).
  logic signed [16:0] u, au, y, ay;
  logic signed [35:0] prod;
  logic signed [35:0] z;
  logic signed [17:0] y2;
  logic signed [31:0] out;
  always_comb begin
    u    = 17'(signed'(phase[PH_W-1 -: 16]));
    au   = (u < 0) ? -u : u;
    prod = 36'(u) * 36'(17'sd32768 - au);
    y    = 17'(prod >>> 13);
    ay   = (y < 0) ? -y : y;
    z    = ((36'(y) * 36'(ay)) >>> 15) - 36'(y);
    y2   = 18'(36'(y) + ((z * 36'sd7373) >>> 15));
    out  = 32'(MID) + 32'((36'(y2) * 36'(AMP_S)) >>> 15);
    if (out < 0)                           code = '0;
    else if (out > (1 << DAC_W) - 1)       code = '1;
    else                                   code = DAC_W'(out);
  end

  initial begin
    assert (F_START_HZ <= FS_HZ / 2 && F_STOP_HZ <= FS_HZ / 2)
      else $error("chirp_gen: chirp frequencies must be below FS_HZ/2");
    assert (LEN >= 2) else $error("chirp_gen: LEN must be at least 2");
    assert (AMP < MID) else $error("chirp_gen: AMP exceeds half scale");
  end

  always_ff @(posedge clk) begin
    if (advance) assert (ready) else $error("chirp_gen: advance while busy");
  end

endmodule
