// mic_clock_gen: the primary node's microphone clock timer.
//
// One counter divides the primary clock by DIV and drives N_OUT output
// flip-flops from the same compare, so all outputs switch on the same clock
// edge (the sensor uses four synchronous 4.5 MHz timer outputs, each feeding a
// 1:8 clock buffer). The output is high for the first DIV/2 counts of each
// period. Two strobes announce the next edge one primary cycle ahead:
// fall_next is high in the cycle before the outputs fall, rise_next in the
// cycle before they rise; the trigger logic uses fall_next to change the
// trigger lines on a falling microphone-clock edge, half a period away from
// the rising edge on which the subordinate nodes sample them.
//
// Timing: with en high the period is exactly DIV cycles of clk; the first
// rising edge comes one cycle after en goes high. With en low the outputs are
// held low. From the sensor: 4 outputs, 4.5 MHz. Own choices: the 180 MHz
// primary clock (DIV = 40), the duty cycle for odd DIV, the enable.
module mic_clock_gen #(
  parameter int unsigned DIV   = hiris_pkg::MCLK_DIV,
  parameter int unsigned N_OUT = hiris_pkg::N_CLK_OUT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  output logic [N_OUT-1:0] mclk,
  output logic             rise_next,
  output logic             fall_next
);
  localparam int unsigned HALF = DIV / 2;
  localparam int unsigned CW   = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt, cnt_nxt;

  always_comb begin
    cnt_nxt = (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;
  end

  // Invariant: mclk == (cnt < HALF) while enabled.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= CW'(DIV - 1);
      mclk <= '0;
    end else if (en) begin
      cnt  <= cnt_nxt;
      mclk <= {N_OUT{cnt_nxt < CW'(HALF)}};
    end else begin
      cnt  <= CW'(DIV - 1);
      mclk <= '0;
    end
  end

  assign rise_next = en && (cnt == CW'(DIV - 1));
  assign fall_next = en && (cnt == CW'(HALF - 1));

  initial begin
    assert (DIV >= 2) else $error("mic_clock_gen: DIV must be at least 2");
  end

endmodule
