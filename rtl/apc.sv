// apc: accumulative parallel counter. Every cycle it counts the ones among N
// input bits and gives the count in binary (0..N). It is built only from full
// adders, following the classic structure of a 15-input counter: two counters
// of 7 inputs whose counts are added by a ripple of full adders, with the 15th
// input as the carry-in, and each 7-input counter built the same way from
// 3-input full adders. Here the rule is applied recursively for any N:
// N inputs = counter(A) + counter(B) + 1 carry-in, A = (N-1)/2, B = N-1-A.
// Up to three inputs are one full adder. Purely combinational, no clock.
// Note: when this recursive module is linted on its own as the top, verilator
// reports the sub-counts of the top split as undriven. They are driven by
// the smaller instances; the warning does not appear when the module sits
// under any parent, and simulation of it alone is correct.
module apc #(
  parameter int unsigned N = 25,
  parameter int unsigned W = $clog2(N + 1)
) (
  input  logic [N-1:0] in_bits,
  output logic [W-1:0] count
);
  if (N <= 3) begin : g_leaf
    logic [2:0] x;
    logic       s, c;
    always_comb begin
      x = '0;
      x[N-1:0] = in_bits;
    end
    rfet_full_adder u_fa (.a(x[0]), .b(x[1]), .cin(x[2]), .sum(s), .cout(c));
    logic [1:0] cnt2;
    assign cnt2  = {c, s};
    assign count = W'(cnt2);
  end else begin : g_split
    localparam int unsigned NA = (N - 1) / 2;
    localparam int unsigned NB = N - 1 - NA;
    localparam int unsigned WA = $clog2(NA + 1);
    localparam int unsigned WB = $clog2(NB + 1);
    localparam int unsigned WS = (WA > WB) ? WA : WB;
    logic [WA-1:0] ca;
    logic [WB-1:0] cb;
    logic [WS:0]   s;
    apc #(.N(NA), .W(WA)) u_a (.in_bits(in_bits[NA-1:0]),     .count(ca));
    apc #(.N(NB), .W(WB)) u_b (.in_bits(in_bits[N-2:NA]),     .count(cb));
    rfet_ripple_adder #(.W(WS)) u_add (
      .a(WS'(ca)), .b(WS'(cb)), .cin(in_bits[N-1]), .s(s));
    assign count = W'(s);
  end
endmodule
