// b2s: binary-to-stochastic converter placed after the MAC counts. The binary
// sum (SUM_W bits, holding up to NIN product ones) is scaled to the PCC width,
// value = sum * 2^W / 2^SUM_W, and converted by an RFET NAND/NOR PCC driven by
// the activation random number (RNG X). A second PCC converts the bipolar zero
// of the same scale, NIN/2, with the same random number; the two streams are
// fully correlated, which lets an OR gate act as ReLU = max(x, 0). The scaling
// and the value of the zero reference are this design's choice.
// Combinational.
module b2s #(
  parameter int unsigned SUM_W = 9,
  parameter int unsigned NIN   = 400,
  parameter int unsigned W     = 8
) (
  input  logic [SUM_W-1:0] sum,
  input  logic [W-1:0]     rnd,
  output logic             bit_o,
  output logic             zero_bit
);
  localparam int unsigned ZERO_VAL = (NIN << W) >> (SUM_W + 1);
  localparam logic [W-1:0] ZERO = W'(ZERO_VAL);

  logic [SUM_W+W-1:0] wide;
  logic [W-1:0]       val;
  assign wide = (SUM_W+W)'(sum) << W;
  assign val  = W'(wide >> SUM_W);

  rfet_pcc #(.N(W)) u_pcc_sum  (.x(val),  .r(rnd), .o(bit_o));
  rfet_pcc #(.N(W)) u_pcc_zero (.x(ZERO), .r(rnd), .o(zero_bit));
endmodule
