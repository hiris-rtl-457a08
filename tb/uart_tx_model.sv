// uart_tx_model: behavioural 8N1 serial transmitter standing in for the
// host's USB-to-UART bridge (not synthesizable). send() transmits one byte,
// LSB first, CLKS_PER_BIT cycles of clk per bit, one stop bit and one idle bit.
module uart_tx_model #(
  parameter int unsigned CLKS_PER_BIT = 8
) (
  input  logic clk,
  output logic txd
);
  initial txd = 1'b1;

  task automatic send(logic [7:0] b);
    @(negedge clk) txd = 1'b0;
    repeat (CLKS_PER_BIT) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      txd = b[i];
      repeat (CLKS_PER_BIT) @(negedge clk);
    end
    txd = 1'b1;
    repeat (2 * CLKS_PER_BIT) @(negedge clk);
  endtask
endmodule
