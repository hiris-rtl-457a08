// primary_cmd: host command decoder of the primary node.
//
// The host starts every measurement by sending a command to the primary node,
// and can upload the sequence the DAC plays. The byte protocol is this
// design's own (the paper does not give one):
//   'T'                    start a measurement (trig pulse)
//   'C' b                  microphone clocks on (b[0]=1) or off
//   'L' nh nl              DAC sequence length = {nh,nl} samples
//   'W' ah al dh dl        DAC sample {dh,dl} (low DAC_W bits) at address {ah,al}
//   'S' b                  DAC source: predefined chirp (b[0]=1) or uploaded
// Any other first byte is dropped with a one-cycle bad_cmd pulse.
// Multi-byte arguments are big-endian.
//
// Timing: every output pulse (trig, dac_we) comes one cycle after the valid
// byte that completes the command. clk_en resets to 1 so the microphones are
// clocked from power-up; use_chirp resets to 0 (uploaded sequence).
module primary_cmd #(
  parameter int unsigned DAC_W    = hiris_pkg::DAC_W,
  parameter int unsigned DAC_AW   = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        rx_data,
  input  logic              rx_valid,
  output logic              trig,
  output logic              clk_en,
  output logic [DAC_AW:0]   dac_len,
  output logic              use_chirp,
  output logic              dac_we,
  output logic [DAC_AW-1:0] dac_waddr,
  output logic [DAC_W-1:0]  dac_wdata,
  output logic              bad_cmd
);
  localparam logic [7:0] OP_TRIG = 8'h54; // 'T'
  localparam logic [7:0] OP_CLK  = 8'h43; // 'C'
  localparam logic [7:0] OP_LEN  = 8'h4C; // 'L'
  localparam logic [7:0] OP_WR   = 8'h57; // 'W'
  localparam logic [7:0] OP_SRC  = 8'h53; // 'S'

  logic [7:0]  op;
  logic [2:0]  nargs;     // argument bytes still expected
  logic [31:0] args;

  // Value of the argument register including the byte arriving now.
  wire [31:0] args_nxt = {args[23:0], rx_data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op        <= '0;
      nargs     <= '0;
      args      <= '0;
      trig      <= 1'b0;
      clk_en    <= 1'b1;
      dac_len   <= '0;
      use_chirp <= 1'b0;
      dac_we    <= 1'b0;
      dac_waddr <= '0;
      dac_wdata <= '0;
      bad_cmd   <= 1'b0;
    end else begin
      trig    <= 1'b0;
      dac_we  <= 1'b0;
      bad_cmd <= 1'b0;
      if (rx_valid) begin
        if (nargs == 0) begin
          op <= rx_data;
          unique case (rx_data)
            OP_TRIG: trig  <= 1'b1;
            OP_CLK:  nargs <= 3'd1;
            OP_SRC:  nargs <= 3'd1;
            OP_LEN:  nargs <= 3'd2;
            OP_WR:   nargs <= 3'd4;
            default: bad_cmd <= 1'b1;
          endcase
        end else begin
          args  <= args_nxt;
          nargs <= nargs - 1'b1;
          if (nargs == 3'd1) begin
            unique case (op)
              OP_CLK: clk_en <= rx_data[0];
              OP_SRC: use_chirp <= rx_data[0];
              OP_LEN: begin
                // Lengths beyond the sequence memory are clipped to its size.
                if (args_nxt[15:0] > 16'(1 << DAC_AW)) dac_len <= (DAC_AW+1)'(1 << DAC_AW);
                else                                   dac_len <= args_nxt[DAC_AW:0];
              end
              OP_WR: begin
                dac_we    <= 1'b1;
                dac_waddr <= args_nxt[16 +: DAC_AW];
                dac_wdata <= args_nxt[DAC_W-1:0];
              end
              default: ;
            endcase
          end
        end
      end
    end
  end

endmodule
