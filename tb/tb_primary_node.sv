// tb_primary_node: commands the primary node over its UART (8 cycles per
// bit) and checks: the four microphone clocks run at DIV = 40 cycles; a
// sequence uploaded with 'W'/'L' is played by the DAC two cycles after the
// 'T' command's trigger pulse rises; the pulse is on all 16 lines and the
// external output, rises and falls with a falling microphone-clock edge and
// lasts two clock periods; the external trigger input starts a measurement
// too; a trigger during a pulse is dropped; 'C' 0 stops the clocks; an unknown
// opcode raises cmd_error; after 'S' 1 a trigger plays the predefined
// 2000-sample chirp (values against the reference), and 'S' 0 returns to the
// uploaded sequence.
module tb_primary_node;
  import chirp_ref_pkg::*;
  localparam int unsigned CPB = 8, DIV = 40, DAC_DIV = 48, NS = 8;

  logic clk = 0, rst_n = 1, ext_trig_in = 0;
  logic uart_rxd;
  logic [3:0] mclk_out;
  logic [15:0] trig_out;
  logic ext_trig_out, dac_update, dac_busy, trig_dropped, cmd_error;
  logic [11:0] dac_data;
  logic [15:0] n_trig;
  int checks = 0, failures = 0;
  logic [11:0] seq [NS];

  primary_node #(.MCLK_DIV(DIV), .CLKS_PER_BIT(CPB), .DAC_DIV(DAC_DIV)) dut (.*);
  uart_tx_model #(.CLKS_PER_BIT(CPB)) host (.clk, .txd(uart_rxd));

  always #2.778 clk = ~clk;   // 180 MHz

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  int mrise = -1, mperiod_bad = 0, n_mrise = 0;
  int t_rise = -1, n_pulse = 0, n_drop = 0, n_err = 0, pulse_bad = 0;
  logic pm = 0, pt = 0;
  logic [11:0] dac_got [$];
  int dac_cyc [$];
  always @(posedge clk) begin
    cyc++;
    #0.1;
    if (rst_n) begin
      if (mclk_out != {4{mclk_out[0]}}) mperiod_bad++;
      if (mclk_out[0] && !pm) begin
        if (mrise >= 0 && cyc - mrise != DIV) mperiod_bad++;
        mrise = cyc; n_mrise++;
      end
      if (trig_out != {16{trig_out[0]}} || ext_trig_out != trig_out[0]) pulse_bad++;
      if (trig_out[0] && !pt) begin
        t_rise = cyc; n_pulse++;
        if (!(pm && !mclk_out[0])) pulse_bad++;    // with a falling clock edge
      end
      if (!trig_out[0] && pt) begin
        if (!(pm && !mclk_out[0])) pulse_bad++;
        if (cyc - t_rise != 2 * DIV) pulse_bad++;
      end
      if (dac_update) begin dac_got.push_back(dac_data); dac_cyc.push_back(cyc); end
      if (trig_dropped) n_drop++;
      if (cmd_error) n_err++;
      pm = mclk_out[0];
      pt = trig_out[0];
    end
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      seq[i] = 12'($urandom);
      host.send("W"); host.send(8'h00); host.send(8'(i));
      host.send(8'(seq[i] >> 8)); host.send(8'(seq[i]));
    end
    host.send("L"); host.send(8'h00); host.send(8'(NS));
    check(dac_got.size() == 0, "DAC silent before the trigger");
    host.send("T");
    repeat (4 * DIV) @(negedge clk);
    check(n_pulse == 1 && n_trig == 1, "T gives one trigger pulse");
    check(pulse_bad == 0, "pulse on all lines, aligned to falling clock edges, two periods long");
    repeat ((NS + 2) * DAC_DIV) @(negedge clk);
    check(dac_got.size() == NS + 1, "DAC played the sequence");
    for (int i = 0; i < NS && i < dac_got.size(); i++) begin
      check(dac_got[i] == seq[i], $sformatf("DAC sample %0d", i));
      check(dac_cyc[i] == t_rise + 2 + i * DAC_DIV, $sformatf("DAC sample %0d starts with the trigger %0d %0d", i, dac_cyc[i], t_rise));
    end
    // external trigger, and a host trigger while that pulse is out
    ext_trig_in = 1;
    host.send("T");      // completes while the external pulse is out
    ext_trig_in = 0;
    repeat (4 * DIV) @(negedge clk);
    check(n_pulse == 2 && n_trig == 2, $sformatf("external input triggers %0d %0d", n_pulse, n_trig));
    check(n_drop >= 1, "trigger during a pulse dropped");
    check(mperiod_bad == 0 && n_mrise > 100, "four synchronous clocks of DIV cycles");
    host.send("C"); host.send(8'h00);
    repeat (2 * DIV) @(negedge clk);
    n_mrise = 0;
    repeat (4 * DIV) @(negedge clk);
    check(n_mrise == 0 && mclk_out == 0, "C 0 stops the clocks");
    host.send("C"); host.send(8'h01);
    repeat (4 * DIV) @(negedge clk);
    check(n_mrise >= 3, "C 1 restarts the clocks");
    host.send(8'h5A);
    repeat (4) @(negedge clk);
    check(n_err == 1, "unknown opcode flagged");
    // predefined chirp
    begin
      real ref_c [$];
      int n_bad;
      chirp_codes(1000000, 100000, 25000, 2000, 2047, 16, 12, ref_c);
      repeat ((NS + 2) * DAC_DIV) @(negedge clk);
      host.send("S"); host.send(8'h01);
      dac_got.delete(); dac_cyc.delete();
      host.send("T");
      repeat (2002 * DAC_DIV + 8 * DIV) @(negedge clk);
      check(dac_got.size() == 2001, $sformatf("S 1: chirp of 2000 samples played (%0d updates)", dac_got.size()));
      n_bad = 0;
      for (int i = 0; i < 2000 && i < dac_got.size(); i++) begin
        int err;
        err = int'(dac_got[i]) - int'($rtoi(ref_c[i] + 0.5));
        if (err > 6 || err < -6) n_bad++;
      end
      check(n_bad == 0, "chirp values match the reference");
      check(dac_cyc[0] == t_rise + 2, "chirp starts with the trigger");
      host.send("S"); host.send(8'h00);
      dac_got.delete();
      host.send("T");
      repeat (4 * DIV + (NS + 2) * DAC_DIV) @(negedge clk);
      check(dac_got.size() == NS + 1 && dac_got[0] == seq[0], "S 0: uploaded sequence again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
