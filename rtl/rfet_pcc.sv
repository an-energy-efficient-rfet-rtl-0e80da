// rfet_pcc: probability conversion circuit built as a chain of RFET NAND/NOR
// reconfigurable gates. Stage i (1..N) takes the previous stage output O_i-1
// (0 for the first stage) and the random bit R_i; its programming input decides
// the function: 0 gives NAND(O_i-1, R_i), 1 gives NOR(O_i-1, R_i). The bits
// X_i of the binary input program the stages, with an inverter on every X_i of
// even index when N is even, and of odd index when N is odd. With this rule the
// chain does what a MUX chain does: the output is 1 with probability close to
// X / 2^N (exactly X / 2^N for even N; for odd N a small constant 2^-N is added).
// x[0] is X_1, the least significant bit. Purely combinational: one stochastic
// bit per clock cycle for each new random number.
module rfet_pcc #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] r,
  output logic         o
);
  logic [N:0] chain;   // chain[i] = O_i, chain[0] = 0
  assign chain[0] = 1'b0;
  for (genvar i = 1; i <= N; i++) begin : g_stage
    // inverter insertion rule: invert X_i when i has the same parity as N
    localparam bit INV = ((i % 2) == (N % 2));
    logic prog;
    assign prog = INV ? ~x[i-1] : x[i-1];
    // reconfigurable NAND/NOR gate
    assign chain[i] = prog ? ~(chain[i-1] | r[i-1]) : ~(chain[i-1] & r[i-1]);
  end
  assign o = chain[N];
endmodule
