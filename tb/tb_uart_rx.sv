// tb_uart_rx: sends random 8N1 frames (16 cycles per bit) and checks each
// received byte, the time from start edge to valid, and that a frame with a
// low stop bit gives frame_err and no byte.
module tb_uart_rx;
  localparam int unsigned CPB = 16;

  logic clk = 0, rst_n = 0, rxd = 1;
  logic [7:0] data;
  logic valid, frame_err;
  int checks = 0, failures = 0;
  int n_valid = 0, n_ferr = 0;
  logic [7:0] last;
  int t_valid;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && valid) begin n_valid++; last = data; t_valid = cyc; end
    if (rst_n && frame_err) n_ferr++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic send(logic [7:0] b, logic stop);
    rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop; repeat (CPB) @(negedge clk);
    rxd = 1; repeat (CPB) @(negedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      v = $urandom % 256;
      t0 = cyc;
      send(8'(v), 1'b1);
      check(n_valid == i + 1, $sformatf("one byte per frame %0d %0d", n_valid, t_valid - t0));
      check(last == 8'(v), "byte value");
      // valid comes in the middle of the stop bit: 9.5 bits plus sync delay
      check(t_valid - t0 >= 9 * CPB + CPB / 2 && t_valid - t0 <= 9 * CPB + CPB / 2 + 6, "valid timing");
    end
    send(8'hA5, 1'b0);
    check(n_ferr == 1, "frame error reported");
    check(n_valid == 40, "no byte from a bad frame");
    send(8'h3C, 1'b1);
    check(last == 8'h3C && n_valid == 41, "recovers after frame error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
