// mac: stochastic multiply-accumulate unit. NIN XNOR gates multiply the
// bipolar activation and weight streams bit by bit, and an NIN-input parallel
// counter adds the NIN product bits of the cycle into a binary count 0..NIN.
// A bipolar stream of ones-density p stands for 2p-1, and XNOR of two
// independent bipolar streams is their product. Purely combinational: the
// count of cycle t comes from the stream bits of cycle t.
module mac #(
  parameter int unsigned NIN = 25,
  parameter int unsigned W   = $clog2(NIN + 1)
) (
  input  logic [NIN-1:0] a_bits,
  input  logic [NIN-1:0] w_bits,
  output logic [W-1:0]   count
);
  logic [NIN-1:0] prod;
  assign prod = ~(a_bits ^ w_bits);   // bipolar multipliers (XNOR)
  apc #(.N(NIN), .W(W)) u_apc (.in_bits(prod), .count(count));
endmodule
