// tb_longest_recording: the longest continuous recording one node can hold,
// with the node at its default size (2^24-word, 64 MiB SDRAM address space).
//
// The host asks for 2^24 + 1000 words, more than fits; the node must clip the
// request to 2^24 words (3.73 s at 4.5 MHz, covering the 3.55 s quoted for
// 64 MB at 18 MB/s), raise clipped, and write every address 0 .. 2^24-1
// exactly once, one word per clock period. Every 4099th word is compared
// with the reference PDM word of its period (checking all 16.7 million would
// only slow the run down); all addresses are checked.
module tb_longest_recording;
  import pdm_ref_pkg::*;
  localparam int unsigned PINS = 16, AW = 24, NODE = 17;
  localparam int unsigned CAP = 1 << AW;

  logic mclk = 0, rst_n = 1, trig = 0, rd_start = 0, usb_tready = 1;
  logic [PINS-1:0] pdm;
  logic [AW:0] num_samples = (AW+1)'(CAP + 1000);
  logic sd_we, sd_re, usb_tvalid;
  logic sd_rvalid = 0;
  logic [AW-1:0] sd_waddr, sd_raddr;
  logic [31:0] sd_wdata;
  logic [31:0] sd_rdata = 0;
  logic [7:0] usb_tdata;
  logic recording, rec_done, clipped, retrig, rd_busy, rd_done;
  int unsigned k;
  int checks = 0, failures = 0;
  bit live = 0;

  subordinate_node dut (.*);
  pdm_mic_model #(.PINS(PINS), .NODE(NODE)) mics (.mclk, .pdm, .period_index(k));

  always #111.111 mclk = ~mclk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #4s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned n_wr = 0;
  int bad_addr = 0, bad_word = 0, n_sampled = 0;
  int unsigned first_k = 0, last_k = 0;
  always @(posedge mclk) begin
    #1;
    if (live && sd_we) begin
      if (n_wr == 0) first_k = k;
      last_k = k;
      if (sd_waddr != AW'(n_wr)) bad_addr++;
      if (n_wr % 4099 == 0) begin
        n_sampled++;
        if (sd_wdata != ref_word(NODE, k - 2)) bad_word++;
      end
      n_wr++;
    end
  end

  initial begin
    #1 rst_n = 0;
    #500 rst_n = 1;
    live = 1;
    repeat (10) @(negedge mclk);
    trig = 1; repeat (2) @(negedge mclk); trig = 0;
    repeat (100) @(negedge mclk);
    check(recording, "recording started");
    while (recording) @(negedge mclk);
    repeat (5) @(negedge mclk);
    check(n_wr == CAP, $sformatf("2^24 words written (got %0d)", n_wr));
    check(bad_addr == 0, "every address written once, in order");
    check(bad_word == 0 && n_sampled > 4000, $sformatf("sampled words match (%0d checked)", n_sampled));
    check(last_k - first_k == CAP - 1, "one word per clock period");
    check(clipped && rec_done, "request clipped to the SDRAM size");
    $display("recorded %0d words = %.3f s of 32 microphones", n_wr, real'(n_wr) / 4.5e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
