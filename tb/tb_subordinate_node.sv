// tb_subordinate_node: one node with its 32 microphones (PDM model), its
// SDRAM (model) and a host that reads the recording back. A trigger pulse,
// changing on falling clock edges as the primary node drives it, starts a
// recording of N words. Checks: N writes, one per clock period, at addresses
// 0..N-1; each written word is the reference PDM word of its period (the
// write after rising edge j holds period j-2); a readout request during the
// recording is ignored; the readout returns the N words as 4N bytes,
// little-endian, in address order.
module tb_subordinate_node;
  import pdm_ref_pkg::*;
  localparam int unsigned PINS = 16, AW = 12, NODE = 9, N = 700;

  logic mclk = 0, rst_n = 1, trig = 0, rd_start = 0, usb_tready = 0;
  logic [PINS-1:0] pdm;
  logic [AW:0] num_samples = AW'(N);
  logic sd_we, sd_re, sd_rvalid, usb_tvalid;
  logic [AW-1:0] sd_waddr, sd_raddr;
  logic [31:0] sd_wdata, sd_rdata;
  logic [7:0] usb_tdata;
  logic recording, rec_done, clipped, retrig, rd_busy, rd_done;
  int unsigned k;
  int checks = 0, failures = 0;

  subordinate_node #(.PINS(PINS), .ADDR_W(AW)) dut (.*);
  pdm_mic_model #(.PINS(PINS), .NODE(NODE)) mics (.mclk, .pdm, .period_index(k));
  sdram_model #(.ADDR_W(AW), .MAX_LAT(3)) mem (
    .clk(mclk), .we(sd_we), .waddr(sd_waddr), .wdata(sd_wdata),
    .re(sd_re), .raddr(sd_raddr), .rvalid(sd_rvalid), .rdata(sd_rdata)
  );

  always #111.111 mclk = ~mclk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_wr = 0, bad_word = 0, bad_addr = 0, first_k = -1, last_k = -1;
  logic [7:0] got [$];
  always @(posedge mclk) begin
    if (rst_n && usb_tvalid && usb_tready) got.push_back(usb_tdata);   // values at the edge
    #1;
    if (rst_n) begin
      if (sd_we) begin
        if (first_k < 0) first_k = k;
        last_k = k;
        if (sd_waddr != AW'(n_wr)) bad_addr++;
        if (sd_wdata != ref_word(NODE, k - 2)) bad_word++;
        n_wr++;
      end
    end
  end
  always @(negedge mclk) usb_tready = ($urandom % 4) != 0;

  initial begin
    int trig_k;
    #1 rst_n = 0;
    #500 rst_n = 1;
    repeat (20) @(negedge mclk);
    trig = 1; trig_k = k + 1;           // first seen at the next rising edge
    repeat (2) @(negedge mclk); trig = 0;
    repeat (10) @(negedge mclk);
    rd_start = 1; @(negedge mclk); rd_start = 0;
    check(recording && !rd_busy, "readout refused while recording");
    repeat (N) @(negedge mclk);
    check(rec_done && !recording, "recording finished");
    check(n_wr == N, $sformatf("%0d words written (got %0d)", N, n_wr));
    check(bad_addr == 0, "consecutive addresses from 0");
    check(bad_word == 0, "each word is its period's PDM bits");
    check(first_k == trig_k, "recording starts on the trigger edge");
    check(last_k - first_k == N - 1, "one word per clock period");
    rd_start = 1; @(negedge mclk); rd_start = 0;
    while (rd_busy) @(negedge mclk);
    check(got.size() == 4 * N, $sformatf("%0d bytes read out (got %0d)", 4 * N, got.size()));
    for (int i = 0; i < 4 * N && i < got.size(); i += 4)
      check({got[i+3], got[i+2], got[i+1], got[i]} == ref_word(NODE, trig_k - 2 + i / 4),
            $sformatf("read-back word %0d", i / 4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
