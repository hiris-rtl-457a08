// hiris_top: the HiRIS acquisition system, one primary and 32 subordinate nodes.
//
// 1024 PDM microphones in 32 groups of 32 are read by 32 subordinate nodes.
// The primary node generates four synchronous microphone clocks; each feeds a
// 1:8 fan-out buffer, giving 32 copies. Copy n clocks microphone group n
// (mic_clk[n]) and subordinate node n, so every microphone is sampled on the
// same clock edge. The primary node's 16 trigger lines each go to two nodes
// (line n/2 to node n), so all nodes start recording in the same clock period.
// The fan-out buffers have no logic function and appear here as wiring.
//
// Ports outside the digital design: the microphones' data lines (pdm), each
// node's SDRAM (word write and read ports), each node's USB link (byte stream
// plus the host's sample count and readout request), the primary node's UART
// line, the external trigger input and output, and the DAC codes with their
// strobe and busy flag.
// Which trigger line serves which node and which buffer serves which node are
// this design's choices.
module hiris_top #(
  parameter int unsigned NODES        = hiris_pkg::N_NODES,
  parameter int unsigned MCLK_DIV     = hiris_pkg::MCLK_DIV,
  parameter int unsigned CLKS_PER_BIT = 1563,
  parameter int unsigned ADDR_W       = hiris_pkg::ADDR_W
) (
  input  logic                                        clk_sys,
  input  logic                                        rst_n,
  // primary node
  input  logic                                        uart_rxd,
  input  logic                                        ext_trig_in,
  output logic                                        ext_trig_out,
  output logic [hiris_pkg::DAC_W-1:0]                 dac_data,
  output logic                                        dac_update,
  output logic                                        dac_busy,
  output logic [15:0]                                 n_trig,
  output logic                                        trig_dropped,
  output logic                                        cmd_error,
  // front end
  output logic [NODES-1:0]                            mic_clk,
  input  logic [NODES-1:0][hiris_pkg::PDM_PINS-1:0]   pdm,
  // per-node SDRAM ports
  output logic [NODES-1:0]                            sd_we,
  output logic [NODES-1:0][ADDR_W-1:0]                sd_waddr,
  output logic [NODES-1:0][hiris_pkg::WORD_W-1:0]     sd_wdata,
  output logic [NODES-1:0]                            sd_re,
  output logic [NODES-1:0][ADDR_W-1:0]                sd_raddr,
  input  logic [NODES-1:0]                            sd_rvalid,
  input  logic [NODES-1:0][hiris_pkg::WORD_W-1:0]     sd_rdata,
  // per-node USB side
  input  logic [NODES-1:0][ADDR_W:0]                  num_samples,
  input  logic [NODES-1:0]                            rd_start,
  output logic [NODES-1:0][7:0]                       usb_tdata,
  output logic [NODES-1:0]                            usb_tvalid,
  input  logic [NODES-1:0]                            usb_tready,
  output logic [NODES-1:0]                            recording,
  output logic [NODES-1:0]                            rec_done,
  output logic [NODES-1:0]                            clipped,
  output logic [NODES-1:0]                            retrig,
  output logic [NODES-1:0]                            rd_busy,
  output logic [NODES-1:0]                            rd_done
);
  import hiris_pkg::*;

  localparam int unsigned NODES_PER_CLK  = (NODES + N_CLK_OUT - 1) / N_CLK_OUT;
  localparam int unsigned NODES_PER_TRIG = (NODES + TRIG_PINS - 1) / TRIG_PINS;

  logic [N_CLK_OUT-1:0] mclk_out;
  logic [TRIG_PINS-1:0] trig_out;

  primary_node #(.MCLK_DIV(MCLK_DIV), .CLKS_PER_BIT(CLKS_PER_BIT)) u_primary (
    .clk(clk_sys), .rst_n, .uart_rxd, .ext_trig_in,
    .mclk_out, .trig_out, .ext_trig_out,
    .dac_data, .dac_update, .dac_busy, .n_trig, .trig_dropped, .cmd_error
  );

  for (genvar n = 0; n < NODES; n++) begin : g_node
    // 1:8 clock fan-out buffer output and trigger line of this node
    wire node_clk  = mclk_out[n / NODES_PER_CLK];
    wire node_trig = trig_out[n / NODES_PER_TRIG];

    assign mic_clk[n] = node_clk;

    subordinate_node #(.PINS(PDM_PINS), .ADDR_W(ADDR_W)) u_node (
      .mclk(node_clk), .rst_n, .trig(node_trig), .pdm(pdm[n]),
      .num_samples(num_samples[n]), .rd_start(rd_start[n]),
      .sd_we(sd_we[n]), .sd_waddr(sd_waddr[n]), .sd_wdata(sd_wdata[n]),
      .sd_re(sd_re[n]), .sd_raddr(sd_raddr[n]),
      .sd_rvalid(sd_rvalid[n]), .sd_rdata(sd_rdata[n]),
      .usb_tdata(usb_tdata[n]), .usb_tvalid(usb_tvalid[n]), .usb_tready(usb_tready[n]),
      .recording(recording[n]), .rec_done(rec_done[n]), .clipped(clipped[n]),
      .retrig(retrig[n]), .rd_busy(rd_busy[n]), .rd_done(rd_done[n])
    );
  end

  initial begin
    assert (NODES <= N_CLK_OUT * CLK_FANOUT) else $error("hiris_top: more nodes than clock buffer outputs");
    assert (NODES <= TRIG_PINS * 2) else $error("hiris_top: more nodes than trigger lines can serve");
  end

endmodule
