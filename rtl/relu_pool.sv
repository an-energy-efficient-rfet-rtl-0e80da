// relu_pool: the optional ReLU and max-pooling stage of a channel, done on
// correlated stochastic streams. ReLU of lane j is the OR of its sum stream
// and the zero stream made with the same random number: for fully correlated
// streams OR approximates the maximum. Pooling ORs the ReLU streams of four
// MAC lanes (4j..4j+3, one 2x2 window) into output j, j < M/4. With relu_en
// or pool_en low the stage is bypassed. Outputs of pooled-away lanes are 0.
// The lane-to-window mapping is this design's choice. Combinational.
module relu_pool #(
  parameter int unsigned M = 16
) (
  input  logic         relu_en,
  input  logic         pool_en,
  input  logic [M-1:0] sum_bits,
  input  logic [M-1:0] zero_bits,
  output logic [M-1:0] out_bits
);
  logic [M-1:0] relu;
  assign relu = relu_en ? (sum_bits | zero_bits) : sum_bits;
  always_comb begin
    out_bits = relu;
    if (pool_en) begin
      out_bits = '0;
      for (int j = 0; j < M / 4; j++)
        out_bits[j] = |relu[4*j +: 4];
    end
  end
endmodule
