// lfsr_rns: random number source, a maximum-length Fibonacci LFSR of W bits.
// Each enabled cycle the register shifts up by one and the XOR of the tap bits
// enters at bit 0, so the state runs through all 2^W-1 non-zero values. The
// whole state is the random number R_1..R_W handed to the PCCs (rnd[i] = R_i+1).
// The tap sets are standard primitive polynomials (for W=8: x^8+x^6+x^5+x^4+1);
// the paper asks only for a primitive polynomial, so the choice is this design's.
// Reset loads SEED (must be non-zero). The state advances only while en is high.
module lfsr_rns #(
  parameter int unsigned W    = 8,
  parameter logic [W-1:0] SEED = W'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] rnd
);
  // Tap mask: bit (t-1) set for every term x^t of the feedback polynomial.
  function automatic logic [W-1:0] taps(input int unsigned w);
    logic [31:0] m;
    case (w)
      3:  m = 32'h0000_0006;  // x^3+x^2+1
      4:  m = 32'h0000_000C;  // x^4+x^3+1
      5:  m = 32'h0000_0014;  // x^5+x^3+1
      6:  m = 32'h0000_0030;  // x^6+x^5+1
      7:  m = 32'h0000_0060;  // x^7+x^6+1
      8:  m = 32'h0000_00B8;  // x^8+x^6+x^5+x^4+1
      9:  m = 32'h0000_0110;  // x^9+x^5+1
      10: m = 32'h0000_0240;  // x^10+x^7+1
      11: m = 32'h0000_0500;  // x^11+x^9+1
      12: m = 32'h0000_0829;  // x^12+x^6+x^4+x+1
      default: m = 32'h0000_B400; // 16: x^16+x^14+x^13+x^11+1
    endcase
    return W'(m);
  endfunction

  localparam logic [W-1:0] TAPS = taps(W);

  logic [W-1:0] state;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= {state[W-2:0], ^(state & TAPS)};
  end
  assign rnd = state;

  initial assert (SEED != '0) else $error("lfsr_rns: SEED must be non-zero");
endmodule
