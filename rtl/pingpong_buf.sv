// pingpong_buf: two-bank on-chip buffer organised in rows of ROW_BYTES bytes,
// one row being the data of one MAC unit. While one bank is read into a shift
// register, the other can be filled, either by the off-chip memory (ext port,
// EXT_ROWS consecutive rows per beat) or by the output buffer (int port, one
// row; it wins over ext if both hit the same row). The row port and the host
// port each read one row; both reads are registered (data one cycle after the
// address). Row addresses wrap around the bank.
// The paper gives the ping-pong scheme; the row organisation, sizes and port
// widths are this design's choice.
module pingpong_buf #(
  parameter int unsigned ROWS      = 64,
  parameter int unsigned ROW_BYTES = 25,
  parameter int unsigned EXT_ROWS  = 8,
  parameter int unsigned AW        = $clog2(ROWS)
) (
  input  logic                                   clk,
  // off-chip fill port
  input  logic                                   ext_we,
  input  logic                                   ext_bank,
  input  logic [AW-1:0]                          ext_addr,
  input  logic [EXT_ROWS-1:0][ROW_BYTES-1:0][7:0] ext_data,
  // output-buffer write-back port
  input  logic                                   int_we,
  input  logic                                   int_bank,
  input  logic [AW-1:0]                          int_addr,
  input  logic [ROW_BYTES-1:0][7:0]              int_data,
  // row read port to the shift register
  input  logic                                   rd_en,
  input  logic                                   rd_bank,
  input  logic [AW-1:0]                          rd_addr,
  output logic [ROW_BYTES-1:0][7:0]              rd_row,
  // host read-back port
  input  logic                                   hr_bank,
  input  logic [AW-1:0]                          hr_addr,
  output logic [ROW_BYTES-1:0][7:0]              hr_row
);
  logic [ROW_BYTES*8-1:0] mem [2*ROWS];

  always_ff @(posedge clk) begin
    if (ext_we)
      for (int i = 0; i < EXT_ROWS; i++)
        mem[{ext_bank, AW'(ext_addr + AW'(i))}] <= ext_data[i];
    if (int_we)
      mem[{int_bank, int_addr}] <= int_data;
    if (rd_en)
      rd_row <= mem[{rd_bank, rd_addr}];
    hr_row <= mem[{hr_bank, hr_addr}];
  end
endmodule
