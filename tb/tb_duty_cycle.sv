// tb_duty_cycle: one full record-and-read cycle of a subordinate node at its
// default size, the cycle behind the 20 % measurement duty cycle.
//
// The host asks for a 70 ms measurement (315,000 words at 4.5 MHz). After the
// recording ends it requests the readout, with the USB side always ready
// (USB 2.0 high speed is far faster than the 4.5 MB/s the node sends). The
// SDRAM model keeps every word and answers reads after 1..3 cycles. The test
// checks every one of the 1,260,000 bytes against the reference PDM words,
// that recording takes 70 ms and that the readout sends one byte per clock
// period, so that recording plus readout takes 350 ms: 70 ms of measurement
// every 350 ms is the 20 % duty cycle.
module tb_duty_cycle;
  import pdm_ref_pkg::*;
  localparam int unsigned PINS = 16, AW = 24, NODE = 5;
  localparam int unsigned N = 315000;

  logic mclk = 0, rst_n = 1, trig = 0, rd_start = 0, usb_tready = 1;
  logic [PINS-1:0] pdm;
  logic [AW:0] num_samples = (AW+1)'(N);
  logic sd_we, sd_re, usb_tvalid, sd_rvalid;
  logic [AW-1:0] sd_waddr, sd_raddr;
  logic [31:0] sd_wdata, sd_rdata;
  logic [7:0] usb_tdata;
  logic recording, rec_done, clipped, retrig, rd_busy, rd_done;
  int unsigned k;
  int checks = 0, failures = 0;
  bit live = 0;

  subordinate_node dut (.*);
  pdm_mic_model #(.PINS(PINS), .NODE(NODE)) mics (.mclk, .pdm, .period_index(k));
  sdram_model #(.ADDR_W(AW), .MAX_LAT(3), .KEEP(1 << 19)) sdram (
    .clk(mclk), .we(sd_we), .waddr(sd_waddr), .wdata(sd_wdata),
    .re(sd_re), .raddr(sd_raddr), .rvalid(sd_rvalid), .rdata(sd_rdata)
  );

  always #111.111 mclk = ~mclk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // recording side: count cycles with a write and note the first period
  int unsigned n_wr = 0, rec_cycles = 0, first_k = 0;
  always @(posedge mclk) begin
    #1;
    if (live && sd_we) begin
      if (n_wr == 0) first_k = k;
      n_wr++;
    end
    if (live && recording) rec_cycles++;
  end

  // readout side: compare every byte, count busy cycles
  longint unsigned n_bytes = 0;
  int unsigned rd_cycles = 0, bad_bytes = 0;
  logic [31:0] cur;
  always @(posedge mclk) begin
    if (live && usb_tvalid && usb_tready) begin
      if (n_bytes % 4 == 0) cur = ref_word(NODE, first_k - 2 + 32'(n_bytes / 4));
      if (usb_tdata != cur[8 * (n_bytes % 4) +: 8]) begin
        if (bad_bytes < 5) $display("byte %0d: got %h expected %h", n_bytes, usb_tdata, cur[8 * (n_bytes % 4) +: 8]);
        bad_bytes++;
      end
      n_bytes++;
    end
    if (live && rd_busy) rd_cycles++;
  end

  initial begin
    real t_rec, t_rd, duty;
    #1 rst_n = 0;
    #500 rst_n = 1;
    live = 1;
    repeat (10) @(negedge mclk);
    trig = 1; repeat (2) @(negedge mclk); trig = 0;
    repeat (5) @(negedge mclk);
    check(recording, "recording started");
    while (recording) @(negedge mclk);
    repeat (2) @(negedge mclk);
    check(n_wr == N && !clipped, $sformatf("%0d words recorded (got %0d)", N, n_wr));
    rd_start = 1; @(negedge mclk); rd_start = 0;
    repeat (2) @(negedge mclk);
    check(rd_busy, "readout started");
    while (rd_busy) @(negedge mclk);
    repeat (5) @(negedge mclk);
    check(n_bytes == 4 * N, $sformatf("%0d bytes sent (got %0d)", 4 * N, n_bytes));
    check(bad_bytes == 0, $sformatf("every byte matches its microphone sample (%0d wrong)", bad_bytes));
    check(rec_cycles == N, $sformatf("recording lasts %0d periods (got %0d)", N, rec_cycles));
    check(rd_cycles <= 4 * N + 8, $sformatf("readout one byte per period (%0d periods)", rd_cycles));
    t_rec = real'(rec_cycles) / 4.5e6;
    t_rd  = real'(rd_cycles) / 4.5e6;
    duty  = t_rec / (t_rec + t_rd);
    check(duty > 0.1999, $sformatf("duty cycle %.4f", duty));
    $display("recording %.3f ms, readout %.3f ms (%.2f MB/s), duty cycle %.2f %%",
             1e3 * t_rec, 1e3 * t_rd, real'(n_bytes) / t_rd / 1e6, 100.0 * duty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
