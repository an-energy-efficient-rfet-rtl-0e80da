// rfet_full_adder: one-bit full adder in the form of the compact RFET adder.
// The RFET version needs only two reconfigurable gates: a three-input XOR gives
// the sum and a three-input majority gate gives the carry. This module keeps
// exactly that split (one XOR3, one MAJ3); the transistor networks of the RFET
// cells are not modelled, only their logic functions. Purely combinational.
module rfet_full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  // XOR3 gate
  assign sum  = a ^ b ^ cin;
  // MAJ3 gate
  assign cout = (a & b) | (a & cin) | (b & cin);
endmodule
