// sdram_model: behavioural model of one node's SDRAM as seen through the
// controller's word ports (not synthesizable; the real part is an external
// SDRAM chip behind the microcontroller's memory controller).
//
// Writes are taken every cycle. Reads may be issued every cycle; each returns
// its word with rvalid, in request order, after a random latency of
// 1..MAX_LAT cycles (never earlier than the previous read's data). Only
// addresses below KEEP are stored (sparse, to allow long recordings); reading
// any other address returns 32'hDEAD_BEEF. Unwritten stored addresses read
// as 0.
module sdram_model #(
  parameter int unsigned ADDR_W  = 24,
  parameter int unsigned MAX_LAT = 4,
  parameter int unsigned KEEP    = 1 << 20
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [31:0]       wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic              rvalid,
  output logic [31:0]       rdata
);
  logic [31:0] mem [int unsigned];
  longint unsigned cyc = 0, last_due = 0;
  longint unsigned due_q [$];
  logic [31:0]     data_q [$];

  initial begin
    rvalid = 0;
    rdata  = 0;
  end

  always @(posedge clk) begin
    longint unsigned due;
    int unsigned wa, ra;
    wa = 32'(waddr);
    ra = 32'(raddr);
    cyc++;
    rvalid <= 1'b0;
    if (we && wa < KEEP) mem[wa] = wdata;
    if (due_q.size() > 0 && due_q[0] <= cyc) begin
      void'(due_q.pop_front());
      rvalid <= 1'b1;
      rdata  <= data_q.pop_front();
    end
    if (re) begin
      due = cyc + 1 + 64'($urandom % MAX_LAT);
      if (due <= last_due) due = last_due + 1;
      last_due = due;
      due_q.push_back(due);
      if (ra >= KEEP)          data_q.push_back(32'hDEAD_BEEF);
      else if (mem.exists(ra)) data_q.push_back(mem[ra]);
      else                        data_q.push_back('0);
    end
  end

endmodule
