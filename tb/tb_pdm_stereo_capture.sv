// tb_pdm_stereo_capture: drives 16 stereo lines from the PDM microphone
// model (bits appear 2 ns after each clock edge, as from real microphones)
// and checks that every captured word equals the reference word of the
// period that started one rising edge earlier, channel c at bit c.
module tb_pdm_stereo_capture;
  import pdm_ref_pkg::*;
  localparam int unsigned PINS = 16;

  logic mclk = 0, rst_n = 1;
  logic [PINS-1:0] pdm;
  logic [2*PINS-1:0] word;
  int unsigned k;
  int checks = 0, failures = 0;

  pdm_stereo_capture #(.PINS(PINS)) dut (.mclk, .rst_n, .pdm, .word);
  pdm_mic_model #(.PINS(PINS), .NODE(5)) mics (.mclk, .pdm, .period_index(k));

  always #111.111 mclk = ~mclk;   // 4.5 MHz

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n = 0;
  always @(posedge mclk) begin
    #1;
    if (rst_n && n > 2) begin
      checks++;
      if (word !== ref_word(5, k - 1)) begin
        failures++;
        $display("FAIL period %0d: got %h expected %h", k - 1, word, ref_word(5, k - 1));
      end
    end
    n++;
  end

  initial begin
    #1 rst_n = 0;
    #500 rst_n = 1;
    repeat (2000) @(posedge mclk);
    #5;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
