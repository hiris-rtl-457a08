// tb_trigger_ctrl: drives the trigger controller with a model of the
// microphone clock phase (fall_next every DIV cycles) and checks that a host
// or external request gives one pulse on all 16 lines and the external
// output, rising on the cycle after fall_next and lasting PULSE_MCLK*DIV
// cycles, with a single DAC start pulse on the rising cycle; that requests
// during a pulse are dropped and counted; and that n_trig counts pulses.
module tb_trigger_ctrl;
  localparam int unsigned DIV = 40, PULSE = 2, PINS = 16;

  logic clk = 0, rst_n = 1, cmd_trig = 0, ext_trig_in = 0, fall_next;
  logic [PINS-1:0] trig_out;
  logic ext_trig_out, dac_start, dropped;
  logic [15:0] n_trig;
  int checks = 0, failures = 0;

  trigger_ctrl #(.TRIG_PINS(PINS), .PULSE_MCLK(PULSE)) dut (.*);

  always #2.5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc++;
  assign fall_next = (cyc % DIV) == 7;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor pulses.
  int n_pulse = 0, n_start = 0, n_drop = 0, rise_cyc = -1;
  logic prev = 0, prev_fn = 0;
  always @(posedge clk) begin
    prev_fn = fall_next;
    #0.1;
    if (rst_n) begin
      check(trig_out == {PINS{trig_out[0]}} && ext_trig_out == trig_out[0], "all lines together");
      if (trig_out[0] && !prev) begin
        n_pulse++;
        rise_cyc = cyc;
        check(prev_fn, "rises on the edge after fall_next");
        check(dac_start, "DAC start with the rising edge");
      end
      if (!trig_out[0] && prev) begin
        check(prev_fn, "falls on the edge after fall_next");
        check(cyc - rise_cyc == PULSE * DIV, "pulse lasts PULSE_MCLK periods");
      end
      if (dac_start) n_start++;
      if (dropped) n_drop++;
      prev = trig_out[0];
    end
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    cmd_trig = 1; @(negedge clk); cmd_trig = 0;
    repeat (4 * DIV) @(negedge clk);
    check(n_pulse == 1 && n_start == 1 && n_trig == 1, "host request gives one pulse");
    // external trigger, then a second request while the first is pending
    ext_trig_in = 1; repeat (5) @(negedge clk);
    cmd_trig = 1; @(negedge clk); cmd_trig = 0;
    repeat (DIV) @(negedge clk);
    cmd_trig = 1; @(negedge clk); cmd_trig = 0;
    ext_trig_in = 0;
    repeat (4 * DIV) @(negedge clk);
    check(n_pulse == 2 && n_start == 2 && n_trig == 2, "external request gives one pulse");
    check(n_drop == 2, "overlapping requests dropped");
    // external input held high gives no new pulse; a new edge does
    repeat (4 * DIV) @(negedge clk);
    check(n_pulse == 2, "no pulse without an edge");
    ext_trig_in = 1; repeat (5) @(negedge clk); ext_trig_in = 0;
    repeat (4 * DIV) @(negedge clk);
    check(n_pulse == 3 && n_trig == 3, "second external edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
