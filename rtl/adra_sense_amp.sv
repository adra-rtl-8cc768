// adra_sense_amp: behavioural model of a current sense amplifier (analog part).
//
// Each ADRA column has three of these on its senseline, with references
// I_REF-OR, I_REF-B and I_REF-AND placed between the four possible senseline
// current levels. The amplifier resolves '1' when the senseline current is
// above its reference and gives both the true and the complement output, as
// the compute module takes both. When not enabled it outputs '0' (complement
// '1'). Currents are integers in nanoamperes. The comparison is evaluated
// combinationally; the real amplifier's timing is not modelled.
module adra_sense_amp #(
  parameter int unsigned I_REF_NA = 765
) (
  input  logic        en,
  input  int unsigned i_sl_na,   // senseline current
  output logic        out,
  output logic        out_b
);
  always_comb begin
    out   = en && (i_sl_na > I_REF_NA);
    out_b = ~out;
  end
endmodule
