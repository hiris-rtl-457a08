// tb_dac_sequencer: loads a random sequence, plays it and checks every
// sample value and the cycle it appears on (sample k at 2 + k*DIV cycles
// after the start cycle), the return to mid-scale, that a start during
// playback is ignored, and that length 0 plays nothing. A second instance
// (DIV = 48, enough for the chirp divider) plays the predefined chirp: 2000
// samples, each within 6 codes of the double-precision reference and on its
// cycle, then mid-scale.
module tb_dac_sequencer;
  import chirp_ref_pkg::*;
  localparam int unsigned AW = 5, DIV = 6, W = 12;

  logic clk = 0, rst_n = 1, start = 0, wr_en = 0;
  logic [AW:0] len = 0;
  logic [AW-1:0] wr_addr = 0;
  logic [W-1:0] wr_data = 0, dac_data;
  logic dac_update, busy;
  logic use_chirp = 0;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [1 << AW];

  dac_sequencer #(.DAC_W(W), .AW(AW), .DIV(DIV)) dut (.*);

  localparam int unsigned DIV_C = 48, CLEN = 2000;
  logic start_c = 0, dac_update_c, busy_c;
  logic [W-1:0] dac_data_c;
  dac_sequencer #(.DAC_W(W), .AW(AW), .DIV(DIV_C)) dut_c (
    .clk, .rst_n, .start(start_c), .len((AW+1)'(0)), .use_chirp(1'b1),
    .wr_en(1'b0), .wr_addr(AW'(0)), .wr_data(W'(0)),
    .dac_data(dac_data_c), .dac_update(dac_update_c), .busy(busy_c)
  );
  int cupd_cyc [$];
  logic [W-1:0] cupd_val [$];
  always @(posedge clk) begin
    #0.1;
    if (rst_n && dac_update_c) begin
      cupd_cyc.push_back(cyc);
      cupd_val.push_back(dac_data_c);
    end
  end

  task automatic play_chirp();
    int t0, n_bad_v = 0, n_bad_t = 0, max_err = 0;
    real ref_c [$];
    chirp_codes(1000000, 100000, 25000, CLEN, 2047, 16, W, ref_c);
    @(negedge clk); start_c = 1;
    t0 = cyc + 1;
    @(negedge clk); start_c = 0;
    repeat ((CLEN + 2) * DIV_C + 5) @(negedge clk);
    check(cupd_cyc.size() == CLEN + 1, $sformatf("chirp: %0d updates (got %0d)", CLEN + 1, cupd_cyc.size()));
    for (int k = 0; k < CLEN && k < cupd_cyc.size(); k++) begin
      int err;
      err = int'(cupd_val[k]) - int'($rtoi(ref_c[k] + 0.5));
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      if (err > 6) n_bad_v++;
      if (cupd_cyc[k] != t0 + 1 + k * DIV_C) n_bad_t++;
    end
    check(n_bad_v == 0, $sformatf("chirp sample values (max error %0d codes)", max_err));
    check(n_bad_t == 0, "chirp sample timing");
    check(dac_data_c == 12'h800 && !busy_c, "idle at mid-scale after the chirp");
  endtask

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Record every update with its cycle.
  int upd_cyc [$];
  logic [W-1:0] upd_val [$];
  always @(posedge clk) begin
    #0.1;
    if (rst_n && dac_update) begin
      upd_cyc.push_back(cyc);
      upd_val.push_back(dac_data);
    end
  end

  task automatic play(int n, int extra_start_at);
    int t0;
    upd_cyc.delete(); upd_val.delete();
    @(negedge clk); len = (AW+1)'(n); start = 1;
    t0 = cyc + 1;                // the edge that samples start
    @(negedge clk); start = 0;
    if (extra_start_at > 0) begin
      repeat (extra_start_at) @(negedge clk);
      start = 1; @(negedge clk); start = 0;
    end
    repeat ((n + 2) * DIV + 5) @(negedge clk);
    check(upd_cyc.size() == n + (n > 0 ? 1 : 0), "one update per sample plus return to idle");
    for (int k = 0; k < n && k < upd_cyc.size(); k++) begin
      check(upd_val[k] == ref_mem[k], $sformatf("sample %0d value", k));
      check(upd_cyc[k] == t0 + 1 + k * DIV, $sformatf("sample %0d timing", k));
    end
    check(dac_data == 12'h800 && !busy, "idle at mid-scale");
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(dac_data == 12'h800, "mid-scale after reset");
    for (int a = 0; a < (1 << AW); a++) begin
      ref_mem[a] = W'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = AW'(a); wr_data = ref_mem[a];
    end
    @(negedge clk); wr_en = 0;
    play(1 << AW, 0);
    play(7, 3 * DIV);
    play(0, 0);
    play_chirp();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
