// tb_chirp_gen: checks the predefined hyperbolic chirp against a
// double-precision reference (chirp_ref_pkg) at the default waveform
// (100 kHz to 25 kHz over 2000 samples).
//
// The testbench restarts the generator, reads sample 0, then advances 1999
// times, waiting for ready each time. It checks every code to within 6 codes
// of the reference (sine approximation plus rounding) and the divider time
// (ready low for exactly 41 cycles per sample, so one sample per 180-cycle
// DAC period is easily met). It also checks that a restart in the middle
// brings back sample 0 and the same sequence, and counts how many codes
// reach near full scale (the chirp uses the DAC's whole range).
module tb_chirp_gen;
  import chirp_ref_pkg::*;
  localparam int unsigned LEN = 2000, TOL = 6;

  logic clk = 0, rst_n = 1, restart = 0, advance = 0;
  logic [11:0] code;
  logic ready;
  int checks = 0, failures = 0;
  real ref_c [$];

  chirp_gen dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int max_err = 0, n_bad = 0, n_peak = 0, bad_time = 0;

  task automatic run(int n);
    for (int i = 0; i < n; i++) begin
      int err, busy_cyc;
      err = int'(code) - int'($rtoi(ref_c[i] + 0.5));
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      if (err > TOL) begin
        n_bad++;
        if (n_bad < 5) $display("sample %0d: code %0d reference %.2f", i, code, ref_c[i]);
      end
      checks++;
      if (err > TOL) failures++;
      if (code > 4080 || code < 16) n_peak++;
      if (i == n - 1) break;
      advance = 1; @(negedge clk); advance = 0;
      busy_cyc = 0;
      while (!ready) begin busy_cyc++; @(negedge clk); end
      if (busy_cyc != 41) bad_time++;
      check(busy_cyc == 41, $sformatf("sample %0d: 41 divider cycles", i + 1));
    end
  endtask

  initial begin
    chirp_codes(1000000, 100000, 25000, LEN, 2047, 16, 12, ref_c);
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(code == 12'd2048 && ready, "sample 0 is mid-scale after reset");
    run(LEN);
    check(n_bad == 0, $sformatf("all %0d samples within %0d codes (max error %0d)", LEN, TOL, max_err));
    check(bad_time == 0, "41 cycles per sample");
    check(n_peak > 20, $sformatf("near-full-scale codes reached (%0d)", n_peak));
    // restart in the middle of a sequence
    repeat (3) begin advance = 1; @(negedge clk); advance = 0; while (!ready) @(negedge clk); end
    restart = 1; @(negedge clk); restart = 0;
    check(code == 12'd2048, "restart returns to sample 0");
    n_bad = 0; max_err = 0;
    run(100);
    check(n_bad == 0, $sformatf("sequence repeats after restart (max error %0d)", max_err));
    $display("max error %0d codes", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
