// uart_rx: 8N1 serial receiver for the primary node's host link.
//
// The primary node talks to the host through a USB-to-UART bridge, a
// low-speed but reliable path that only carries commands. This receiver
// synchronises the line with two flip-flops, waits for a falling edge, checks
// the start bit at its middle, then samples eight data bits (LSB first) and
// the stop bit each CLKS_PER_BIT cycles later. A good frame gives a one-cycle
// valid pulse with the byte; a frame whose stop bit is low gives a one-cycle
// frame_err pulse and no byte.
//
// Timing: valid rises about 9.5 bit times after the start edge. The bit rate
// (115200 baud at 180 MHz) is an own choice; the paper names only the bridge.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 1563
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;

  state_t        state;
  logic [1:0]    sync;
  logic [CW-1:0] tick;
  logic [2:0]    bitn;
  logic [7:0]    shreg;

  wire rx = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= S_IDLE;
      tick      <= '0;
      bitn      <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        S_IDLE: if (!rx) begin
          state <= S_START;
          tick  <= CW'(CLKS_PER_BIT / 2);
        end
        S_START: begin
          if (tick != 0) tick <= tick - 1'b1;
          else if (rx) state <= S_IDLE;          // glitch, not a start bit
          else begin
            state <= S_DATA;
            tick  <= CW'(CLKS_PER_BIT - 1);
            bitn  <= '0;
          end
        end
        S_DATA: begin
          if (tick != 0) tick <= tick - 1'b1;
          else begin
            shreg <= {rx, shreg[7:1]};
            tick  <= CW'(CLKS_PER_BIT - 1);
            if (bitn == 3'd7) state <= S_STOP;
            bitn <= bitn + 1'b1;
          end
        end
        S_STOP: begin
          if (tick != 0) tick <= tick - 1'b1;
          else begin
            state <= S_IDLE;
            if (rx) begin
              data  <= shreg;
              valid <= 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
