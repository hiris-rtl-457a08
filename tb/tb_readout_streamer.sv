// tb_readout_streamer: fills an SDRAM model with random words, streams
// num_words of them out under a random tready pattern and checks the byte
// sequence (little-endian words in address order), the done pulse, that a
// start while busy is ignored and that zero words sends nothing. With tready
// held high it also checks the full rate: one byte every clock cycle from the
// first byte to the last (4.5 MB/s on the 4.5 MHz node clock).
module tb_readout_streamer;
  localparam int unsigned AW = 10, W = 32;

  logic clk = 0, rst_n = 1, start = 0, tready = 0;
  logic [AW:0] num_words = 0;
  logic rd_re, rd_valid, tvalid, busy, done;
  logic [AW-1:0] rd_addr;
  logic [W-1:0] rd_data;
  logic [7:0] tdata;
  logic we = 0;
  logic [AW-1:0] waddr = 0;
  logic [31:0] wdata = 0;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [1 << AW];

  readout_streamer #(.ADDR_W(AW), .WORD_W(W)) dut (.*);
  sdram_model #(.ADDR_W(AW), .MAX_LAT(5)) mem (
    .clk, .we, .waddr, .wdata, .re(rd_re), .raddr(rd_addr), .rvalid(rd_valid), .rdata(rd_data)
  );

  always #5 clk = ~clk;

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

  logic [7:0] got [$];
  int n_done = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (tvalid && tready) got.push_back(tdata);
      if (done) n_done++;
    end
  end
  bit full_rate = 0;
  longint first_t = -1, last_t = 0;
  always @(posedge clk) begin
    if (rst_n && tvalid && tready) begin
      if (first_t < 0) first_t = $time;
      last_t = $time;
    end
  end
  always @(negedge clk) tready = full_rate || (($urandom % 3) != 0);

  task automatic stream(int n, bit restart);
    got.delete(); n_done = 0;
    @(negedge clk); num_words = (AW+1)'(n); start = 1;
    @(negedge clk); start = 0;
    if (restart) begin
      repeat (20) @(negedge clk);
      num_words = 3; start = 1; @(negedge clk); start = 0;
    end
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    check(got.size() == 4 * n, $sformatf("%0d bytes (got %0d)", 4 * n, got.size()));
    check(n_done == 1, "one done pulse");
    for (int i = 0; i < got.size() && i < 4 * n; i++)
      check(got[i] == ref_mem[i / 4][8 * (i % 4) +: 8], $sformatf("byte %0d", i));
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < (1 << AW); a++) begin
      ref_mem[a] = $urandom;
      @(negedge clk); we = 1; waddr = AW'(a); wdata = ref_mem[a];
    end
    @(negedge clk); we = 0;
    stream(1, 0);
    stream(37, 1);
    stream(0, 0);
    stream(1 << AW, 0);
    full_rate = 1; first_t = -1;
    stream(256, 0);
    check((last_t - first_t) / 10 == 4 * 256 - 1,
          $sformatf("full rate: %0d bytes over %0d cycles", 4 * 256, (last_t - first_t) / 10 + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
