// shift_reg: activation or weight shift register. It is filled one row of
// ROW_BYTES bytes per cycle from a ping-pong buffer: with shift high, row_in
// enters at the top row and every row moves down by one, so after ROWS shifts
// the first row loaded sits in row 0. With hold high the whole register is
// copied into a hold register, whose contents (vals) feed the SNG. The hold
// copy frees the shift register to load the next tile while the current tile
// streams its bits, which is how the load/compute pipelining is realised here.
// Data registers are not reset; nothing reads them before they are loaded.
module shift_reg #(
  parameter int unsigned ROWS      = 16,
  parameter int unsigned ROW_BYTES = 25
) (
  input  logic                                 clk,
  input  logic                                 shift,
  input  logic [ROW_BYTES-1:0][7:0]            row_in,
  input  logic                                 hold,
  output logic [ROWS-1:0][ROW_BYTES-1:0][7:0]  vals
);
  logic [ROWS-1:0][ROW_BYTES-1:0][7:0] sr;
  always_ff @(posedge clk) begin
    if (shift) begin
      sr[ROWS-1] <= row_in;
      for (int r = 0; r < ROWS - 1; r++) sr[r] <= sr[r+1];
    end
    if (hold) vals <= sr;
  end
endmodule
