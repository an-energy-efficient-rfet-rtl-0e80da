// adder_tree: the selectable adder tree that follows the MAC units of a
// channel. For a fully connected layer a neuron has more inputs than one MAC
// holds, so with fc_mode high the tree adds the counts of all M MACs into one
// sum (M*NIN inputs per neuron). For convolution layers the tree is bypassed:
// the channel then uses the per-MAC counts and the tree output is held at zero
// so that the tree does not switch. The tree is built from full adders. The
// paper names the tree and its bypass; its structure and the all-or-nothing
// grouping are this design's choice. Combinational.
module adder_tree #(
  parameter int unsigned M  = 16,
  parameter int unsigned W  = 5,
  parameter int unsigned SW = W + $clog2(M)
) (
  input  logic                fc_mode,
  input  logic [M-1:0][W-1:0] counts,
  output logic [SW-1:0]       sum
);
  logic [M-1:0][W-1:0] gated;
  assign gated = fc_mode ? counts : '0;
  adder_tree_sum #(.M(M), .W(W), .SW(SW)) u_sum (.vals(gated), .sum(sum));
endmodule
