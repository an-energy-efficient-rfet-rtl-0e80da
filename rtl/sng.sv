// sng: stochastic number generator bank. One LFSR random number source is
// shared by NUM probability conversion circuits, so all NUM values of the bank
// are turned into streams from the same random number each cycle (one SNG for
// the activations, one per channel for the weights). The random number is also
// given out on rnd, because the B2S converters reuse the activation RNS.
// Timing: bits is combinational from vals and the current LFSR state; the LFSR
// advances on each clock edge with en high.
module sng #(
  parameter int unsigned NUM  = 400,
  parameter int unsigned W    = 8,
  parameter logic [W-1:0] SEED = W'(1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [NUM-1:0][W-1:0] vals,
  output logic [NUM-1:0]        bits,
  output logic [W-1:0]          rnd
);
  lfsr_rns #(.W(W), .SEED(SEED)) u_rns (.clk, .rst_n, .en, .rnd);
  for (genvar n = 0; n < NUM; n++) begin : g_pcc
    rfet_pcc #(.N(W)) u_pcc (.x(vals[n]), .r(rnd), .o(bits[n]));
  end
endmodule
