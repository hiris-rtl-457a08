// tb_sample_recorder: feeds a known word sequence (word = period number)
// and checks that a trigger starts a recording of exactly num_samples
// consecutive words at addresses 0.., one write per clock, starting with the
// word present at the first clock that sees the trigger; that done follows
// the last write; that a retrigger is ignored and flagged; that a length of
// zero records nothing; and that a length above capacity is clipped.
module tb_sample_recorder;
  localparam int unsigned AW = 8, W = 32;

  logic mclk = 0, rst_n = 1, trig = 0;
  logic [W-1:0] word = 0;
  logic [AW:0] num_samples = 0;
  logic sd_we, recording, done, clipped, retrig;
  logic [AW-1:0] sd_addr;
  logic [AW:0] rec_words;
  logic [W-1:0] sd_wdata;
  int checks = 0, failures = 0;

  sample_recorder #(.ADDR_W(AW), .WORD_W(W)) dut (.*);

  always #10 mclk = ~mclk;
  int unsigned cyc = 0;
  // word changes just after each rising edge, like the capture register
  always @(posedge mclk) begin cyc++; #1 word = W'(cyc); end

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

  int n_wr = 0, n_retrig = 0, first_cyc = 0, last_cyc = 0, done_cyc = 0;
  logic [W-1:0] first_word = 0;
  bit bad_seq = 0;
  logic done_q = 0;
  always @(posedge mclk) begin
    #0.5;
    if (rst_n) begin
      if (sd_we) begin
        if (n_wr == 0) begin first_cyc = cyc; first_word = sd_wdata; end
        else if (sd_wdata != first_word + W'(n_wr) || sd_addr != AW'(n_wr)) bad_seq = 1;
        if (n_wr == 0 && sd_addr != 0) bad_seq = 1;
        last_cyc = cyc;
        n_wr++;
      end
      if (retrig) n_retrig++;
      if (done && !done_q) done_cyc = cyc;
      done_q = done;
    end
  end

  task automatic record(int n, int retrig_after, int expect_n);
    int trig_cyc;
    n_wr = 0; done_cyc = 0; bad_seq = 0;
    num_samples = (AW+1)'(n);
    @(negedge mclk); trig = 1; trig_cyc = cyc + 1;   // seen at the next rising edge
    repeat (3) @(negedge mclk); trig = 0;
    if (retrig_after > 0) begin
      repeat (retrig_after) @(negedge mclk); trig = 1;
      repeat (2) @(negedge mclk); trig = 0;
    end
    repeat (expect_n + 10) @(negedge mclk);
    check(n_wr == expect_n, $sformatf("%0d writes (got %0d)", expect_n, n_wr));
    check(!bad_seq, "consecutive words at consecutive addresses");
    check(done && !recording, "done after recording");
    check(rec_words == (AW+1)'(expect_n), "rec_words reports the words written");
    if (expect_n > 0) begin
      // word present at the trigger edge is the edge count of the previous edge
      check(first_word == W'(trig_cyc - 1), "first word is the one at the trigger edge");
      check(first_cyc == trig_cyc, "first write on the trigger edge");
      check(last_cyc - first_cyc == expect_n - 1, "one write per clock period");
      check(done_cyc == last_cyc + 1, $sformatf("done one period after the last write %0d %0d", done_cyc, last_cyc));
    end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge mclk);
    rst_n = 1;
    repeat (5) @(negedge mclk);
    check(!recording && !done && !sd_we, "idle after reset");
    record(50, 0, 50);
    check(!clipped && n_retrig == 0, "no clip, no retrigger");
    record(40, 10, 40);
    check(n_retrig == 1, "retrigger during recording flagged");
    record(0, 0, 0);
    record(300, 0, 256);
    check(clipped, "length above capacity clipped");
    record(1, 0, 1);
    check(!clipped, "clip flag cleared by next recording");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
