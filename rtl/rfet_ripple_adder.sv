// rfet_ripple_adder: W-bit ripple-carry adder made of rfet_full_adder cells,
// with a carry input. Used to join two partial counts in the parallel counter
// and to add MAC counts in the adder tree. Output is W+1 bits. Combinational.
module rfet_ripple_adder #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W:0]   s
);
  logic [W:0] c;
  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_fa
    rfet_full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(s[i]), .cout(c[i+1]));
  end
  assign s[W] = c[W];
endmodule
