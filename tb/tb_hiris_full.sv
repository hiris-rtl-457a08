// tb_hiris_full: one complete measurement with the design at its default
// size: 32 nodes, 1024 microphones, 180 MHz primary clock divided by 40 to
// 4.5 MHz, 115200-baud host link, 2^24-word (64 MiB) SDRAM per node.
//
// The host sends 'T'; every node records 315000 words, i.e. 70 ms of all 32
// of its microphones (1.26 MB per node, 40 MB in all). Every SDRAM write of
// every node is checked against the reference PDM word of its period, as it
// happens. Afterwards the host reads back the first 256 words of every node
// (the SDRAM models keep only those) and checks the bytes.
// Also checked: all nodes start in the same clock period, the recording
// lasts 315000 clock periods (70 ms), i.e. 4 bytes per 222 ns = 18 MB/s.
module tb_hiris_full;
  import pdm_ref_pkg::*;
  localparam int unsigned NODES = 32, AW = 24, CPB = 1563, N = 315_000, NRD = 256;

  logic clk_sys = 0, rst_n = 1, uart_rxd, ext_trig_in = 0;
  logic ext_trig_out, dac_update, dac_busy, trig_dropped, cmd_error;
  logic [11:0] dac_data;
  logic [15:0] n_trig;
  logic [NODES-1:0] mic_clk;
  logic [NODES-1:0][15:0] pdm;
  logic [NODES-1:0] sd_we, sd_re, sd_rvalid;
  logic [NODES-1:0][AW-1:0] sd_waddr, sd_raddr;
  logic [NODES-1:0][31:0] sd_wdata, sd_rdata;
  logic [NODES-1:0][AW:0] num_samples;
  logic [NODES-1:0] rd_start = 0, usb_tready = '1, usb_tvalid;
  logic [NODES-1:0][7:0] usb_tdata;
  logic [NODES-1:0] recording, rec_done, clipped, retrig, rd_busy, rd_done;
  int checks = 0, failures = 0;
  bit live = 0;   // monitors count only after reset

  hiris_top dut (.*);
  uart_tx_model #(.CLKS_PER_BIT(CPB)) host (.clk(clk_sys), .txd(uart_rxd));

  always #2.778 clk_sys = ~clk_sys;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #120ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_wr [NODES];
  int bad [NODES];
  int first_k [NODES];
  int last_k [NODES];
  int n_bytes [NODES];
  int bad_byte [NODES];
  int unsigned kk [NODES];
  realtime t_first [NODES];
  realtime t_last [NODES];

  for (genvar n = 0; n < NODES; n++) begin : g_node
    pdm_mic_model #(.PINS(16), .NODE(n)) mics (.mclk(mic_clk[n]), .pdm(pdm[n]), .period_index(kk[n]));
    sdram_model #(.ADDR_W(AW), .MAX_LAT(3), .KEEP(NRD)) mem (
      .clk(mic_clk[n]), .we(sd_we[n]), .waddr(sd_waddr[n]), .wdata(sd_wdata[n]),
      .re(sd_re[n]), .raddr(sd_raddr[n]), .rvalid(sd_rvalid[n]), .rdata(sd_rdata[n])
    );
    always @(posedge mic_clk[n]) begin
      if (live && usb_tvalid[n] && usb_tready[n]) begin
        if (usb_tdata[n] != ref_word(n, first_k[n] - 2 + n_bytes[n] / 4)[8 * (n_bytes[n] % 4) +: 8])
          bad_byte[n]++;
        n_bytes[n]++;
      end
      #1;
      if (live && sd_we[n]) begin
        if (n_wr[n] == 0) begin first_k[n] = kk[n]; t_first[n] = $realtime; end
        last_k[n] = kk[n];
        t_last[n] = $realtime;
        if (sd_waddr[n] != AW'(n_wr[n]) || sd_wdata[n] != ref_word(n, kk[n] - 2)) bad[n]++;
        n_wr[n]++;
      end
    end
  end

  initial begin
    for (int n = 0; n < NODES; n++) begin
      num_samples[n] = (AW+1)'(N);
      n_wr[n] = 0; bad[n] = 0; first_k[n] = -1; last_k[n] = -1; n_bytes[n] = 0; bad_byte[n] = 0;
    end
    #1 rst_n = 0;
    repeat (3) @(negedge clk_sys);
    rst_n = 1;
    live = 1;
    repeat (100) @(negedge clk_sys);
    host.send("T");
    repeat (400) @(negedge clk_sys);
    check(n_trig == 1 && recording == '1, "trigger reached all nodes");
    while (recording != '0) @(negedge clk_sys);
    repeat (100) @(negedge clk_sys);
    for (int n = 0; n < NODES; n++) begin
      check(n_wr[n] == N, $sformatf("node %0d wrote %0d words", n, n_wr[n]));
      check(bad[n] == 0, $sformatf("node %0d words and addresses (%0d bad)", n, bad[n]));
      check(first_k[n] == first_k[0], $sformatf("node %0d started with node 0", n));
      check(last_k[n] - first_k[n] == N - 1, $sformatf("node %0d one word per period", n));
    end
    $display("recording: %0d words per node, %.3f ms, %.2f MB/s per node",
             N, (t_last[0] - t_first[0]) / 1ms, 4.0 * (N - 1) / ((t_last[0] - t_first[0]) / 1s) / 1.0e6);
    check((t_last[0] - t_first[0]) > 69.9ms && (t_last[0] - t_first[0]) < 70.1ms, "70 ms recording");
    check(rec_done == '1 && clipped == '0, "all done, none clipped");
    // read back the first NRD words of every node
    for (int n = 0; n < NODES; n++) num_samples[n] = (AW+1)'(NRD);
    @(negedge mic_clk[0]); rd_start = '1; @(negedge mic_clk[0]); rd_start = '0;
    while (rd_busy != '0) @(negedge mic_clk[0]);
    repeat (4) @(negedge mic_clk[0]);
    for (int n = 0; n < NODES; n++) begin
      check(n_bytes[n] == 4 * NRD, $sformatf("node %0d read-back bytes %0d", n, n_bytes[n]));
      check(bad_byte[n] == 0, $sformatf("node %0d read-back data", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
