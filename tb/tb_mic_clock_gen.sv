// tb_mic_clock_gen: checks the microphone clock timer at its default divider
// (40 primary cycles = one 4.5 MHz period at 180 MHz): period, high time,
// that all four outputs are identical, that rise_next/fall_next come exactly
// one cycle before the edges, and that the clocks stop when disabled.
module tb_mic_clock_gen;
  localparam int unsigned DIV = 40;
  localparam int unsigned N   = 4;

  logic clk = 0, rst_n = 0, en = 0;
  logic [N-1:0] mclk;
  logic rise_next, fall_next;
  int checks = 0, failures = 0;

  mic_clock_gen #(.DIV(DIV), .N_OUT(N)) dut (.*);

  always #2.5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, last_rise = -1, last_fall = -1, n_rise = 0;
  logic prev = 0, prev_rn = 0, prev_fn = 0;

  always @(posedge clk) begin
    cyc++;
    prev_rn = rise_next;   // values before this edge
    prev_fn = fall_next;
    #0.1;
    check(mclk == {N{mclk[0]}}, "outputs identical");
    if (mclk[0] && !prev) begin
      check(prev_rn, "rise_next before rising edge");
      if (last_rise >= 0) check(cyc - last_rise == DIV, "period is DIV cycles");
      last_rise = cyc;
      n_rise++;
    end
    if (!mclk[0] && prev) begin
      check(prev_fn, "fall_next before falling edge");
      check(cyc - last_rise == DIV / 2, "high time is DIV/2 cycles");
      last_fall = cyc;
    end
    if (prev_rn) check(mclk[0] && !prev, "rise_next followed by rising edge");
    if (prev_fn) check(!mclk[0] && prev, "fall_next followed by falling edge");
    prev    = mclk[0];
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(mclk == 0, "low while disabled");
    @(negedge clk) en = 1;
    repeat (DIV * 20) @(posedge clk);
    check(n_rise == 20, "20 periods in 20*DIV cycles");
    @(negedge clk) en = 0;
    repeat (DIV * 2) @(posedge clk);
    check(mclk == 0 && !rise_next && !fall_next, "stopped when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
