// tb_primary_cmd: feeds command bytes to the decoder and checks the trigger
// pulse, clock enable, sequence length (with clipping), sample writes and
// the bad-command pulse, and the DAC source select ('S').
module tb_primary_cmd;
  logic clk = 0, rst_n = 0;
  logic [7:0] rx_data = 0;
  logic rx_valid = 0;
  logic trig, clk_en, dac_we, bad_cmd, use_chirp;
  logic [12:0] dac_len;
  logic [11:0] dac_waddr, dac_wdata;
  int checks = 0, failures = 0;
  int n_trig = 0, n_we = 0, n_bad = 0;
  logic [11:0] wa, wd;

  primary_cmd #(.DAC_W(12), .DAC_AW(12)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n) begin
      if (trig) n_trig++;
      if (bad_cmd) n_bad++;
      if (dac_we) begin n_we++; wa = dac_waddr; wd = dac_wdata; end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic byte_in(logic [7:0] b);
    @(negedge clk); rx_data = b; rx_valid = 1;
    @(negedge clk); rx_valid = 0;
    repeat (1 + $urandom % 3) @(negedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(clk_en == 1, "clocks on after reset");
    byte_in("T");
    repeat (2) @(posedge clk);
    check(n_trig == 1, "T gives one trigger");
    byte_in("C"); byte_in(8'h00);
    check(clk_en == 0, "C 0 stops clocks");
    byte_in("C"); byte_in(8'h01);
    check(clk_en == 1, "C 1 starts clocks");
    check(use_chirp == 0, "uploaded sequence selected after reset");
    byte_in("S"); byte_in(8'h01);
    check(use_chirp == 1, "S 1 selects the predefined chirp");
    byte_in("S"); byte_in(8'h00);
    check(use_chirp == 0, "S 0 selects the uploaded sequence");
    byte_in("L"); byte_in(8'h01); byte_in(8'h23);
    check(dac_len == 13'h123, "L sets length");
    byte_in("L"); byte_in(8'hFF); byte_in(8'hFF);
    check(dac_len == 13'd4096, "L clips to memory size");
    for (int i = 0; i < 20; i++) begin
      a = $urandom % 4096; d = $urandom % 4096;
      byte_in("W"); byte_in(8'(a >> 8)); byte_in(8'(a)); byte_in(8'(d >> 8)); byte_in(8'(d));
      check(n_we == i + 1 && wa == 12'(a) && wd == 12'(d), "W writes sample");
    end
    byte_in(8'h99);
    repeat (2) @(posedge clk);
    check(n_bad == 1, "unknown opcode flagged");
    byte_in("T");
    repeat (2) @(posedge clk);
    check(n_trig == 2, "decoder resynchronises after bad opcode");
    check(n_we == 20, "no stray writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
