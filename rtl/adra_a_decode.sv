// adra_a_decode: recovers operand bit A from the three ADRA sense amplifiers.
//
// ADRA senses OR, B and AND of the two asserted cells of a column. A is then
// a single OAI gate: A = ~( ~(AB) & (B | ~(A+B)) ). Check: for (A,B) = (0,0)
// and (0,1) the product term is 1 and A = 0; for (1,0) the OR term is 0 and
// for (1,1) the NAND term is 0, so A = 1. Together with the B sense amplifier
// this is a one-cycle two-bit read. The equation as typeset reads A~B in the
// first factor; that literal form is identically 0 and gives A = 1 always, so
// the NAND of the AND sense output (the only reading that works) is used.
// Combinational.
module adra_a_decode (
  input  logic sa_nand,   // ~(A & B), complement output of the AND sense amp
  input  logic sa_nor,    // ~(A + B), complement output of the OR sense amp
  input  logic sa_b,      // B
  output logic a
);
  always_comb a = ~(sa_nand & (sa_b | sa_nor));
endmodule
