// adra_compute_module: the per-column add/subtract cell (CM) fed by the three
// ADRA sense amplifiers.
//
// Inputs are the sense-amplifier outputs of one column for the word pair
// (A in the VGREAD1 row, B in the VGREAD2 row): OR = A+B, AND = AB and B, and
// their complements. No operand bit has to be read a second time.
//   - A NOR of B and NOR(A,B) gives A & ~B, the generate term of A - B.
//   - A NOR of AND and NOR(A,B) gives A ^ B.
//   - An inverter gives ~(A ^ B), the propagate term of A + ~B.
//   - Two 2:1 multiplexers steered by SELECT pick generate and propagate:
//     SELECT = 0 adds (AB, A^B), SELECT = 1 subtracts (A~B, ~(A^B)).
//   - SUM = propagate XOR CIN; CARRY is the inverted AOI21 of
//     (propagate & CIN) and generate, i.e. generate | propagate & CIN.
// The gate list (NOR, NOR, inverter, two multiplexers, XOR, AOI21 and output
// inverter) and SELECT's meaning follow the add/subtract cell of the design;
// which multiplexer leg is taken for SELECT = 0 is derived from that meaning.
// The XOR output (the second NOR) is also brought out so that the periphery
// can deliver bitwise XOR without a further gate. Purely combinational.
module adra_compute_module (
  input  logic sa_or,      // A + B
  input  logic sa_nor,     // ~(A + B)
  input  logic sa_and,     // A & B
  input  logic sa_b,       // B
  input  logic select,     // 0: add, 1: subtract
  input  logic cin,
  output logic sum,
  output logic carry,
  output logic xor_ab      // A ^ B
);
  logic a_nb;       // A & ~B
  logic x, xn;      // A ^ B and its complement
  logic gen, prop;
  logic aoi21;

  always_comb begin
    a_nb   = ~(sa_b | sa_nor);
    x      = ~(sa_and | sa_nor);
    xn     = ~x;
    gen    = select ? a_nb : sa_and;
    prop   = select ? xn : x;
    sum    = prop ^ cin;
    aoi21  = ~((prop & cin) | gen);
    carry  = ~aoi21;
    xor_ab = x;
  end

  // sa_or is a port of the cell as drawn; the add/subtract path only needs
  // its complement.
  logic unused_or;
  assign unused_or = sa_or;
endmodule
