// adder_tree_sum: binary tree of full-adder ripple adders that adds M unsigned
// W-bit numbers. The M inputs are split in two halves, each half is summed by
// a smaller tree, and one ripple adder joins the two sums. Combinational.
// Note: when this recursive module is linted on its own as the top, verilator
// reports the sub-counts of the top split as undriven. They are driven by
// the smaller instances; the warning does not appear when the module sits
// under any parent, and simulation of it alone is correct.
module adder_tree_sum #(
  parameter int unsigned M  = 16,
  parameter int unsigned W  = 5,
  parameter int unsigned SW = W + $clog2(M)
) (
  input  logic [M-1:0][W-1:0] vals,
  output logic [SW-1:0]       sum
);
  if (M == 1) begin : g_leaf
    assign sum = SW'(vals[0]);
  end else begin : g_split
    localparam int unsigned MA = M / 2;
    localparam int unsigned MB = M - MA;
    localparam int unsigned SA = W + $clog2(MA);
    localparam int unsigned SB = W + $clog2(MB);
    localparam int unsigned SM = (SA > SB) ? SA : SB;
    logic [SA-1:0] sa;
    logic [SB-1:0] sb;
    logic [SM:0]   s;
    adder_tree_sum #(.M(MA), .W(W), .SW(SA)) u_a (.vals(vals[MA-1:0]), .sum(sa));
    adder_tree_sum #(.M(MB), .W(W), .SW(SB)) u_b (.vals(vals[M-1:MA]), .sum(sb));
    rfet_ripple_adder #(.W(SM)) u_add (.a(SM'(sa)), .b(SM'(sb)), .cin(1'b0), .s(s));
    assign sum = SW'(s);
  end
endmodule
