// tb_hiris_top: end-to-end test of the whole sensor with all 32 nodes, the
// 1024 microphones modelled, one SDRAM model per node and a host on the
// primary node's UART (8 cycles per bit to keep the run short) and on each
// node's USB stream. The SDRAM is shrunk to 2^10 words so that clipping of an
// over-long recording can be seen.
//
// Sequence: upload a 4-sample DAC sequence; 'T' starts a 300-word recording
// on every node (node 3 asks for 2000 words and is clipped to 1024); during
// the recording a readout request is refused, an external trigger edge makes
// the primary send a second pulse that every node ignores, and a host 'T'
// sent during that pulse is dropped; then every node is read out and its
// bytes compared with the reference PDM words; 'S' 1 and 'T' then play the
// predefined chirp on the DAC during a second measurement; finally 'C' 0 stops
// the microphone clocks and an unknown opcode raises cmd_error.
// Checks: every SDRAM write holds the reference word of its period; all 32
// nodes start in the same clock period; write counts; DAC samples; read-back
// bytes; and that each mechanism above happened at least once.
module tb_hiris_top;
  import pdm_ref_pkg::*;
  localparam int unsigned NODES = 32, AW = 10, CPB = 8, DIV = 40, N = 300, NCLIP = 2000;

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
  logic [NODES-1:0] rd_start = 0, usb_tready = 0, usb_tvalid;
  logic [NODES-1:0][7:0] usb_tdata;
  logic [NODES-1:0] recording, rec_done, clipped, retrig, rd_busy, rd_done;
  int checks = 0, failures = 0;
  bit live = 0;   // monitors count only after reset

  hiris_top #(.NODES(NODES), .MCLK_DIV(DIV), .CLKS_PER_BIT(CPB), .ADDR_W(AW)) dut (.*);
  uart_tx_model #(.CLKS_PER_BIT(CPB)) host (.clk(clk_sys), .txd(uart_rxd));

  always #2.778 clk_sys = ~clk_sys;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- per-node models and monitors ----
  int n_wr [NODES];
  int bad_word [NODES];
  int bad_addr [NODES];
  int first_k [NODES];
  int n_retrig [NODES];
  int n_bytes [NODES];
  int bad_byte [NODES];
  int unsigned kk [NODES];

  for (genvar n = 0; n < NODES; n++) begin : g_node
    pdm_mic_model #(.PINS(16), .NODE(n)) mics (.mclk(mic_clk[n]), .pdm(pdm[n]), .period_index(kk[n]));
    sdram_model #(.ADDR_W(AW), .MAX_LAT(3)) mem (
      .clk(mic_clk[n]), .we(sd_we[n]), .waddr(sd_waddr[n]), .wdata(sd_wdata[n]),
      .re(sd_re[n]), .raddr(sd_raddr[n]), .rvalid(sd_rvalid[n]), .rdata(sd_rdata[n])
    );
    always @(posedge mic_clk[n]) begin
      if (live && usb_tvalid[n] && usb_tready[n]) begin
        // byte i of the stream is byte i%4 of word i/4, word a = period first_k-2+a
        if (usb_tdata[n] != ref_word(n, first_k[n] - 2 + n_bytes[n] / 4)[8 * (n_bytes[n] % 4) +: 8])
          bad_byte[n]++;
        n_bytes[n]++;
      end
      #1;
      if (live) begin
        if (sd_we[n]) begin
          if (n_wr[n] == 0) first_k[n] = kk[n];
          if (sd_waddr[n] != AW'(n_wr[n])) bad_addr[n]++;
          if (sd_wdata[n] != ref_word(n, kk[n] - 2)) bad_word[n]++;
          n_wr[n]++;
        end
        if (retrig[n]) n_retrig[n]++;
      end
    end
    always @(negedge mic_clk[n]) usb_tready[n] = ($urandom % 4) != 0;
  end

  // ---- primary-side monitors ----
  int n_drop = 0, n_err = 0, n_mrise = 0;
  logic [11:0] dac_got [$];
  bit pbusy = 0;
  int n_busy_rise = 0;
  logic pm = 0;
  always @(posedge clk_sys) begin
    #0.1;
    if (live) begin
      if (trig_dropped) n_drop++;
      if (cmd_error) n_err++;
      if (dac_update) dac_got.push_back(dac_data);
      if (dac_busy && !pbusy) n_busy_rise++;
      pbusy = dac_busy;
      if (mic_clk[0] && !pm) n_mrise++;
      pm = mic_clk[0];
    end
  end

  // mechanism counters
  int m_host_trig = 0, m_ext_trig = 0, m_drop = 0, m_retrig = 0, m_clip = 0,
      m_rd_refused = 0, m_dac = 0, m_clk_stop = 0, m_bad_cmd = 0, m_sync_start = 0,
      m_chirp = 0;

  initial begin
    logic [11:0] seq [4];
    int all_ok;
    for (int n = 0; n < NODES; n++) begin
      num_samples[n] = (n == 3) ? (AW+1)'(NCLIP > (1 << AW) ? (1 << AW) + 1 : NCLIP) : (AW+1)'(N);
      n_wr[n] = 0; bad_word[n] = 0; bad_addr[n] = 0; first_k[n] = -1;
      n_retrig[n] = 0; n_bytes[n] = 0; bad_byte[n] = 0;
    end
    #1 rst_n = 0;
    repeat (3) @(negedge clk_sys);
    rst_n = 1;
    live = 1;
    for (int i = 0; i < 4; i++) begin
      seq[i] = 12'($urandom);
      host.send("W"); host.send(8'h00); host.send(8'(i));
      host.send(8'(seq[i] >> 8)); host.send(8'(seq[i]));
    end
    host.send("L"); host.send(8'h00); host.send(8'd4);
    host.send("T");
    repeat (4 * DIV) @(negedge clk_sys);
    check(n_trig == 1, "host command triggered");
    if (n_trig == 1) m_host_trig++;
    check(recording == '1, "all nodes recording");
    // readout request during the recording
    @(negedge mic_clk[0]); rd_start = '1; @(negedge mic_clk[0]); rd_start = '0;
    check(rd_busy == '0, "readout refused while recording");
    if (rd_busy == '0) m_rd_refused++;
    // external trigger with a host trigger arriving during its pulse
    repeat (20 * DIV) @(negedge clk_sys);
    ext_trig_in = 1;
    host.send("T");
    ext_trig_in = 0;
    repeat (4 * DIV) @(negedge clk_sys);
    check(n_trig == 2, "external input triggered");
    if (n_trig == 2) m_ext_trig++;
    check(n_drop >= 1, "host trigger during the pulse dropped");
    if (n_drop >= 1) m_drop++;
    // wait for the recordings
    while (recording != '0) @(negedge clk_sys);
    repeat (4 * DIV) @(negedge clk_sys);
    check(rec_done == '1, "all nodes done");
    all_ok = 1;
    for (int n = 0; n < NODES; n++) begin
      if (n_wr[n] != ((n == 3) ? (1 << AW) : N)) all_ok = 0;
      if (bad_word[n] != 0 || bad_addr[n] != 0) all_ok = 0;
      if (n_retrig[n] != 1) all_ok = 0;
      if (first_k[n] != first_k[0]) all_ok = 0;
    end
    check(all_ok == 1, "every node recorded its words, ignored the retrigger");
    for (int n = 0; n < NODES; n++) begin
      check(n_wr[n] == ((n == 3) ? (1 << AW) : N), $sformatf("node %0d write count %0d", n, n_wr[n]));
      check(bad_word[n] == 0 && bad_addr[n] == 0, $sformatf("node %0d words and addresses", n));
    end
    begin
      int same;
      same = 1;
      for (int n = 1; n < NODES; n++) if (first_k[n] != first_k[0]) same = 0;
      check(same == 1, "all nodes start in the same clock period");
      m_sync_start += same;
    end
    m_retrig = n_retrig[0];
    check(clipped[3] && !clipped[0], "over-long recording clipped");
    if (clipped[3]) m_clip++;
    check(dac_got.size() >= 5, "DAC played");
    check(n_busy_rise >= 1, "dac_busy raised during playback");
    for (int i = 0; i < 4 && i < dac_got.size(); i++) check(dac_got[i] == seq[i], $sformatf("DAC sample %0d", i));
    if (dac_got.size() >= 5) m_dac++;
    // read out every node
    @(negedge mic_clk[0]); rd_start = '1; @(negedge mic_clk[0]); rd_start = '0;
    while (rd_busy != '0) @(negedge mic_clk[0]);
    repeat (4) @(negedge mic_clk[0]);
    for (int n = 0; n < NODES; n++) begin
      int exp_b;
      exp_b = 4 * ((n == 3) ? (1 << AW) : N);
      check(n_bytes[n] == exp_b, $sformatf("node %0d read-back bytes %0d", n, n_bytes[n]));
      check(bad_byte[n] == 0, $sformatf("node %0d read-back data", n));
    end
    // predefined chirp with a second measurement
    begin
      int n_full;
      host.send("S"); host.send(8'h01);
      dac_got.delete();
      host.send("T");
      repeat (2002 * 180 + 8 * DIV) @(negedge clk_sys);
      n_full = 0;
      foreach (dac_got[i]) if (dac_got[i] > 12'd4000 || dac_got[i] < 12'd95) n_full++;
      check(dac_got.size() == 2001 && dac_got[0] == 12'd2048 && dac_got[2000] == 12'd2048,
            $sformatf("predefined chirp played (%0d updates)", dac_got.size()));
      check(n_full > 20, "chirp swings over the DAC's range");
      if (dac_got.size() == 2001 && n_full > 20) m_chirp++;
    end
    // clocks off
    host.send("C"); host.send(8'h00);
    repeat (2 * DIV) @(negedge clk_sys);
    n_mrise = 0;
    repeat (5 * DIV) @(negedge clk_sys);
    check(n_mrise == 0 && mic_clk == '0, "clocks stopped");
    if (n_mrise == 0) m_clk_stop++;
    host.send(8'hEE);
    repeat (4) @(negedge clk_sys);
    check(n_err == 1, "bad command flagged");
    if (n_err == 1) m_bad_cmd++;

    $display("mechanisms: host_trigger=%0d ext_trigger=%0d dropped_trigger=%0d retrigger_ignored=%0d clipped=%0d readout_refused=%0d dac_playback=%0d clock_stop=%0d bad_command=%0d synchronous_start=%0d predefined_chirp=%0d",
             m_host_trig, m_ext_trig, m_drop, m_retrig, m_clip, m_rd_refused, m_dac, m_clk_stop, m_bad_cmd, m_sync_start, m_chirp);
    check(m_host_trig > 0, "mechanism host trigger seen");
    check(m_ext_trig > 0, "mechanism external trigger seen");
    check(m_drop > 0, "mechanism dropped trigger seen");
    check(m_retrig > 0, "mechanism retrigger ignored seen");
    check(m_clip > 0, "mechanism clipping seen");
    check(m_rd_refused > 0, "mechanism readout refused seen");
    check(m_dac > 0, "mechanism DAC playback seen");
    check(m_clk_stop > 0, "mechanism clock stop seen");
    check(m_bad_cmd > 0, "mechanism bad command seen");
    check(m_sync_start > 0, "mechanism synchronous start seen");
    check(m_chirp > 0, "mechanism predefined chirp seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
