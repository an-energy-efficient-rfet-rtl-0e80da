// s2b: stochastic-to-binary converter. It counts the ones of one stream over
// the K cycles of a bitstream: clr starts a new count (the bit of that cycle
// counted if en is high), en marks the cycles that belong to the stream.
// value gives the count scaled to W bits, count * 2^W / K, saturated at
// 2^W - 1 (so K ones read as 255 for W=8). The scaling is this design's
// choice. value follows the registered count combinationally.
module s2b #(
  parameter int unsigned K = 32,
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic         bit_i,
  output logic [W-1:0] value
);
  localparam int unsigned CW = $clog2(K + 1);
  logic [CW-1:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   cnt <= '0;
    else if (clr) cnt <= CW'(en & bit_i);
    else if (en)  cnt <= cnt + CW'(bit_i);
  end
  logic [CW+W-1:0] scaled;
  assign scaled = ((CW+W)'(cnt) << W) / (CW+W)'(K);
  assign value  = (scaled > (CW+W)'((1 << W) - 1)) ? W'((1 << W) - 1) : W'(scaled);
endmodule
