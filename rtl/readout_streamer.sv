// readout_streamer: sends a recording from SDRAM to the host as bytes.
//
// After a measurement each subordinate node returns its recording to the
// host over its own USB serial port. On start the streamer reads words
// 0 .. num_words-1 from SDRAM and emits each as four bytes, least significant
// byte first, on a valid/ready byte stream towards the USB device.
//
// To keep the byte stream busy while the SDRAM answers, reads are pipelined:
// a read (rd_re for one cycle with rd_addr) may be issued every cycle as long
// as the words in flight plus the words waiting in a FIFO_DEPTH-word prefetch
// FIFO stay within FIFO_DEPTH. The SDRAM side must return data in request
// order, one rd_valid per read, with any latency. With a read latency below
// about 4 cycles and tready held high the stream sends one byte every cycle:
// 4.5 MB/s on the 4.5 MHz node clock.
//
// tvalid, once high, stays high with tdata unchanged until tready is seen.
// done pulses for one cycle after the last byte; start while busy is
// ignored; num_words is latched at start and 0 sends nothing.
// The paper states only that each node sends its data over its serial port;
// byte order, read pipelining and handshake are this design's own.
module readout_streamer #(
  parameter int unsigned ADDR_W     = hiris_pkg::ADDR_W,
  parameter int unsigned WORD_W     = hiris_pkg::WORD_W,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W:0]   num_words,
  output logic              rd_re,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_valid,
  input  logic [WORD_W-1:0] rd_data,
  output logic [7:0]        tdata,
  output logic              tvalid,
  input  logic              tready,
  output logic              busy,
  output logic              done
);
  localparam int unsigned NB = WORD_W / 8;
  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [WORD_W-1:0]       fifo [FIFO_DEPTH];
  logic [PW-1:0]           wr_ptr, rd_ptr;
  logic [CW-1:0]           fcount, inflight;
  logic [ADDR_W:0]         total, req_idx, sent;
  logic [WORD_W-1:0]       shreg;
  logic [$clog2(NB+1)-1:0] left;

  // Byte side: the current word finishes when its last byte is taken.
  wire word_end = tvalid && tready && (left == 0);
  wire can_load = !tvalid || word_end;
  wire pop      = can_load && (fcount != 0);
  wire issue    = busy && (req_idx != total) &&
                  ((CW+1)'(fcount) + (CW+1)'(inflight) < (CW+1)'(FIFO_DEPTH));

  always_ff @(posedge clk) begin
    if (rd_valid) fifo[wr_ptr] <= rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      total    <= '0;
      req_idx  <= '0;
      sent     <= '0;
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      fcount   <= '0;
      inflight <= '0;
      shreg    <= '0;
      left     <= '0;
      rd_re    <= 1'b0;
      rd_addr  <= '0;
      tdata    <= '0;
      tvalid   <= 1'b0;
      done     <= 1'b0;
    end else begin
      rd_re <= 1'b0;
      done  <= 1'b0;

      if (!busy) begin
        if (start) begin
          if (num_words == 0) done <= 1'b1;
          else begin
            busy    <= 1'b1;
            total   <= num_words;
            req_idx <= '0;
            sent    <= '0;
          end
        end
      end else begin
        // read requests
        if (issue) begin
          rd_re   <= 1'b1;
          rd_addr <= req_idx[ADDR_W-1:0];
          req_idx <= req_idx + 1'b1;
        end
        // returning data into the FIFO
        if (rd_valid) wr_ptr <= wr_ptr + 1'b1;
        inflight <= inflight + CW'(issue) - CW'(rd_valid);
        fcount   <= fcount + CW'(rd_valid) - CW'(pop);

        // byte stream
        if (tvalid && tready && left != 0) begin
          tdata <= shreg[7:0];
          shreg <= shreg >> 8;
          left  <= left - 1'b1;
        end
        if (word_end) sent <= sent + 1'b1;
        if (pop) begin
          tdata  <= fifo[rd_ptr][7:0];
          shreg  <= fifo[rd_ptr] >> 8;
          left   <= ($bits(left))'(NB - 1);
          tvalid <= 1'b1;
          rd_ptr <= rd_ptr + 1'b1;
        end else if (word_end) begin
          tvalid <= 1'b0;
        end
        if (word_end && sent + 1'b1 == total) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Stream rule: a byte offered is held until it is taken.
  logic       tvalid_q, tready_q;
  logic [7:0] tdata_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tvalid_q <= 1'b0;
      tready_q <= 1'b0;
      tdata_q  <= '0;
    end else begin
      tvalid_q <= tvalid;
      tready_q <= tready;
      tdata_q  <= tdata;
      if (tvalid_q && !tready_q) begin
        assert (tvalid && tdata == tdata_q)
          else $error("readout_streamer: byte withdrawn before it was taken");
      end
    end
  end

  initial begin
    assert (WORD_W % 8 == 0) else $error("readout_streamer: WORD_W must be whole bytes");
    assert (FIFO_DEPTH >= 1 && (FIFO_DEPTH & (FIFO_DEPTH - 1)) == 0)
      else $error("readout_streamer: FIFO_DEPTH must be a power of two");
  end

endmodule
