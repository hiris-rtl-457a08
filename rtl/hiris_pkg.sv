// hiris_pkg: constants shared by the HiRIS acquisition RTL.
//
// HiRIS is a 1024-microphone ultrasound array: 32 groups of 32 PDM MEMS
// microphones, each group read by one subordinate node, all orchestrated by
// one primary node that distributes a common 4.5 MHz microphone clock and a
// common trigger. The numbers below (32 nodes, 16 stereo data lines per node,
// 4 clock outputs fanned out 1:8, 16 trigger pins, 4.5 MHz, 64 MB of SDRAM
// per node) are those of the sensor. The 180 MHz primary clock (40 cycles per
// microphone clock period), the 24-bit word address (64 MiB / 4-byte words)
// and the 12-bit DAC are choices of this design.
package hiris_pkg;

  localparam int unsigned N_NODES      = 32;   // subordinate nodes
  localparam int unsigned PDM_PINS     = 16;   // stereo PDM data lines per node
  localparam int unsigned CH_PER_NODE  = 2 * PDM_PINS; // 32 microphones per node
  localparam int unsigned N_CLK_OUT    = 4;    // timer outputs of the primary node
  localparam int unsigned CLK_FANOUT   = 8;    // 1:8 clock buffers
  localparam int unsigned TRIG_PINS    = 16;   // trigger GPIOs of the primary node
  localparam int unsigned MIC_CLK_HZ   = 4_500_000;
  localparam int unsigned SYS_CLK_HZ   = 180_000_000;            // assumed
  localparam int unsigned MCLK_DIV     = SYS_CLK_HZ / MIC_CLK_HZ; // 40

  localparam int unsigned WORD_W       = CH_PER_NODE;  // one word = one clock period, 32 channels
  localparam int unsigned ADDR_W       = 24;           // 2^24 words x 4 bytes = 64 MiB

  localparam int unsigned DAC_W        = 12;           // assumed DAC resolution

endpackage
