// primary_node: clock, trigger and DAC master of the sensor.
//
// The primary node orchestrates the 32 subordinate nodes. Its timer
// (mic_clock_gen) produces four synchronous microphone clocks that external
// 1:8 buffers fan out to all nodes and microphones. Host commands arrive over
// a UART link (uart_rx, primary_cmd); a measurement command or an edge on the
// external trigger input makes trigger_ctrl pulse the 16 trigger lines and the
// external trigger output on a falling microphone-clock edge and start the
// DAC sequencer (dac_sequencer: uploaded sequence or predefined chirp) at the
// same moment.
//
// Interface: clk is the node clock (180 MHz by default, 40 cycles per
// microphone clock period). uart_rxd and ext_trig_in are asynchronous inputs.
// The partition follows the paper's block diagram of the primary node; the
// command protocol, bit rate and DAC details are this design's own.
module primary_node #(
  parameter int unsigned MCLK_DIV     = hiris_pkg::MCLK_DIV,
  parameter int unsigned CLKS_PER_BIT = 1563,
  parameter int unsigned PULSE_MCLK   = 2,
  parameter int unsigned DAC_AW       = 12,
  parameter int unsigned DAC_DIV      = 180
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            uart_rxd,
  input  logic                            ext_trig_in,
  output logic [hiris_pkg::N_CLK_OUT-1:0] mclk_out,
  output logic [hiris_pkg::TRIG_PINS-1:0] trig_out,
  output logic                            ext_trig_out,
  output logic [hiris_pkg::DAC_W-1:0]     dac_data,
  output logic                            dac_update,
  output logic                            dac_busy,
  output logic [15:0]                     n_trig,
  output logic                            trig_dropped,
  output logic                            cmd_error
);
  import hiris_pkg::*;

  logic [7:0]        rx_data;
  logic              rx_valid, rx_ferr, bad_cmd;
  logic              cmd_trig, clk_en, rise_next, fall_next, dac_start;
  logic [DAC_AW:0]   dac_len;
  logic              use_chirp;
  logic              dac_we;
  logic [DAC_AW-1:0] dac_waddr;
  logic [DAC_W-1:0]  dac_wdata;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rxd(uart_rxd),
    .data(rx_data), .valid(rx_valid), .frame_err(rx_ferr)
  );

  primary_cmd #(.DAC_W(DAC_W), .DAC_AW(DAC_AW)) u_cmd (
    .clk, .rst_n, .rx_data, .rx_valid,
    .trig(cmd_trig), .clk_en, .dac_len, .use_chirp, .dac_we, .dac_waddr, .dac_wdata,
    .bad_cmd
  );

  mic_clock_gen #(.DIV(MCLK_DIV), .N_OUT(N_CLK_OUT)) u_clk (
    .clk, .rst_n, .en(clk_en), .mclk(mclk_out), .rise_next, .fall_next
  );

  trigger_ctrl #(.TRIG_PINS(TRIG_PINS), .PULSE_MCLK(PULSE_MCLK)) u_trig (
    .clk, .rst_n, .cmd_trig, .ext_trig_in, .fall_next,
    .trig_out, .ext_trig_out, .dac_start, .dropped(trig_dropped), .n_trig
  );

  dac_sequencer #(.DAC_W(DAC_W), .AW(DAC_AW), .DIV(DAC_DIV)) u_dac (
    .clk, .rst_n, .start(dac_start), .len(dac_len), .use_chirp,
    .wr_en(dac_we), .wr_addr(dac_waddr), .wr_data(dac_wdata),
    .dac_data, .dac_update, .busy(dac_busy)
  );

  assign cmd_error = rx_ferr | bad_cmd;

endmodule
