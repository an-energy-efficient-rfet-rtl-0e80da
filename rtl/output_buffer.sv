// output_buffer: holds the results of one tile, L channels by M lanes of W=8
// bits, and writes them back into the activation ping-pong buffer so that they
// become the next layer's activations. cap stores vals and, in the same cycle,
// nout (results per channel) and o_addr (first row). The results are laid out
// as one byte string, result j of channel c at byte j*L + c, cut into rows of
// ROW_BYTES bytes (the last row padded with zeros) and written one row per
// cycle from row o_addr on. busy is high from the cycle after cap until the
// last row is written; done pulses with the last write.
// The layout is this design's choice.
module output_buffer #(
  parameter int unsigned L         = 8,
  parameter int unsigned M         = 16,
  parameter int unsigned ROW_BYTES = 25,
  parameter int unsigned AW        = 6
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cap,
  input  logic [L-1:0][M-1:0][7:0]    vals,
  input  logic [$clog2(M+1)-1:0]      nout,
  input  logic [AW-1:0]               o_addr,
  output logic                        wr_en,
  output logic [AW-1:0]               wr_addr,
  output logic [ROW_BYTES-1:0][7:0]   wr_data,
  output logic                        busy,
  output logic                        done
);
  localparam int unsigned MAXROWS = (L * M + ROW_BYTES - 1) / ROW_BYTES;
  localparam int unsigned RW      = $clog2(MAXROWS + 1);

  logic [L-1:0][M-1:0][7:0] q;
  logic [$clog2(M+1)-1:0]   nout_q;
  logic [RW-1:0]            nrows, n_q, r_q;
  logic [AW-1:0]            a_q;

  assign nrows = RW'((int'(nout) * L + ROW_BYTES - 1) / ROW_BYTES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      r_q  <= '0;
      n_q  <= '0;
      a_q  <= '0;
    end else if (cap) begin
      busy <= (nrows != 0);
      r_q  <= '0;
      n_q  <= nrows;
      a_q  <= o_addr;
    end else if (busy) begin
      r_q <= r_q + 1'b1;
      a_q <= a_q + 1'b1;
      if (r_q + 1'b1 == n_q) busy <= 1'b0;
    end
  end
  always_ff @(posedge clk) if (cap) begin
    q      <= vals;
    nout_q <= nout;
  end

  assign wr_en   = busy;
  assign wr_addr = a_q;
  assign done    = busy && (r_q + 1'b1 == n_q);
  // byte b of row r is byte f = r*ROW_BYTES + b of the result string, that is
  // result f/L of channel f%L; a row counter value selects among the rows
  for (genvar b = 0; b < ROW_BYTES; b++) begin : g_byte
    always_comb begin
      wr_data[b] = 8'd0;
      for (int r = 0; r < int'(MAXROWS); r++)
        if (int'(r_q) == r && (r * ROW_BYTES + b) / L < int'(nout_q)
            && (r * ROW_BYTES + b) / L < int'(M))
          wr_data[b] = q[(r * ROW_BYTES + b) % L][((r * ROW_BYTES + b) / L) % M];
    end
  end
endmodule
