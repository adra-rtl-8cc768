// tb_adra_sense_amp: three amplifiers at the OR, B and AND references. Each
// of the four senseline current levels of an ADRA column, plus 0 A, is
// applied; the outputs must give OR, B and AND of the operand pair, the
// complements must be their inverses, and a disabled amplifier must read '0'.
// The gap between neighbouring levels must exceed the 1 uA sense margin.
module tb_adra_sense_amp;
  import adra_pkg::*;
  logic        en;
  int unsigned i_sl_na;
  logic o_or, ob_or, o_b, ob_b, o_and, ob_and;
  int checks = 0, failures = 0;

  adra_sense_amp #(.I_REF_NA(NA_REF_OR))  u_or  (.en, .i_sl_na, .out(o_or),  .out_b(ob_or));
  adra_sense_amp #(.I_REF_NA(NA_REF_B))   u_b   (.en, .i_sl_na, .out(o_b),   .out_b(ob_b));
  adra_sense_amp #(.I_REF_NA(NA_REF_AND)) u_and (.en, .i_sl_na, .out(o_and), .out_b(ob_and));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int unsigned i, input logic e, input logic a, input logic b);
    en = e; i_sl_na = i;
    #1;
    checks += 4;
    if (o_or  !== (e & (a | b))) begin failures++; $display("FAIL or  i=%0d", i); end
    if (o_b   !== (e & b))       begin failures++; $display("FAIL b   i=%0d", i); end
    if (o_and !== (e & a & b))   begin failures++; $display("FAIL and i=%0d", i); end
    if ({ob_or, ob_b, ob_and} !== ~{o_or, o_b, o_and}) begin failures++; $display("FAIL compl"); end
  endtask

  initial begin
    // Levels: (A,B) = (0,0), (1,0), (0,1), (1,1) in increasing current.
    apply(NA_SL00, 1, 0, 0);
    apply(NA_SL10, 1, 1, 0);
    apply(NA_SL01, 1, 0, 1);
    apply(NA_SL11, 1, 1, 1);
    apply(0,       1, 0, 0);
    apply(NA_SL11, 0, 1, 1);
    // Single-row read at VGREAD2: the B amplifier alone resolves the bit.
    apply(NA_LRS2, 1, 0, 1);
    apply(NA_HRS2, 1, 0, 0);
    checks += 3;
    if (NA_SL10 - NA_SL00 <= NA_SENSE_MARGIN) failures++;
    if (NA_SL01 - NA_SL10 <= NA_SENSE_MARGIN) failures++;
    if (NA_SL11 - NA_SL01 <= NA_SENSE_MARGIN) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
