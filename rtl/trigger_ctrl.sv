// trigger_ctrl: synchronous measurement trigger of the primary node.
//
// A measurement starts on a host command (cmd_trig, one-cycle pulse) or on a
// rising edge of the external TTL / RS-485 trigger input (synchronised by two
// flip-flops). The request waits for the next falling edge of the microphone
// clock (fall_next from mic_clock_gen) and then, on that edge, raises all
// TRIG_PINS trigger lines and the external trigger output together and gives
// the DAC sequencer a one-cycle start pulse. The lines stay high for
// PULSE_MCLK microphone clock periods and drop on a falling edge again, so
// every subordinate node, which samples the trigger on the rising edge of the
// same clock, sees it in the same clock period.
//
// A request that arrives while one is pending or the pulse is being sent is
// dropped and reported by a one-cycle dropped pulse; n_trig counts the pulses
// sent. From the sensor: 16 trigger pins pulsed together, external trigger in
// and out, DAC started with the nodes. Own choices: the pulse length, the
// alignment to the falling clock edge, dropping overlapping requests.
module trigger_ctrl #(
  parameter int unsigned TRIG_PINS  = hiris_pkg::TRIG_PINS,
  parameter int unsigned PULSE_MCLK = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_trig,
  input  logic                 ext_trig_in,
  input  logic                 fall_next,
  output logic [TRIG_PINS-1:0] trig_out,
  output logic                 ext_trig_out,
  output logic                 dac_start,
  output logic                 dropped,
  output logic [15:0]          n_trig
);
  localparam int unsigned PW = $clog2(PULSE_MCLK + 1);

  typedef enum logic [1:0] {T_IDLE, T_PEND, T_PULSE} state_t;

  state_t        state;
  logic [2:0]    ext_sync;
  logic [PW-1:0] left;

  wire ext_rise = ext_sync[1] & ~ext_sync[2];
  wire req      = cmd_trig | ext_rise;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_sync     <= '0;
      state        <= T_IDLE;
      left         <= '0;
      trig_out     <= '0;
      ext_trig_out <= 1'b0;
      dac_start    <= 1'b0;
      dropped      <= 1'b0;
      n_trig       <= '0;
    end else begin
      ext_sync  <= {ext_sync[1:0], ext_trig_in};
      dac_start <= 1'b0;
      dropped   <= 1'b0;
      unique case (state)
        T_IDLE: if (req) state <= T_PEND;
        T_PEND: begin
          if (req) dropped <= 1'b1;
          if (fall_next) begin
            state        <= T_PULSE;
            left         <= PW'(PULSE_MCLK);
            trig_out     <= '1;
            ext_trig_out <= 1'b1;
            dac_start    <= 1'b1;
            n_trig       <= n_trig + 1'b1;
          end
        end
        T_PULSE: begin
          if (req) dropped <= 1'b1;
          if (fall_next) begin
            if (left == PW'(1)) begin
              state        <= T_IDLE;
              trig_out     <= '0;
              ext_trig_out <= 1'b0;
            end
            left <= left - 1'b1;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  initial begin
    assert (PULSE_MCLK >= 1) else $error("trigger_ctrl: PULSE_MCLK must be at least 1");
  end

endmodule
