// tb_adra_compute_module: exhaustive check of the add/subtract cell.
// For every operand pair (A,B), SELECT and carry in, the sense-amplifier
// inputs are formed from A and B and SUM, CARRY and XOR are compared with a
// full adder on A, B ^ SELECT and CIN.
module tb_adra_compute_module;
  logic sa_or, sa_nor, sa_and, sa_b, select, cin, sum, carry, xor_ab;
  int checks = 0, failures = 0;

  adra_compute_module dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic a, b, bb, exp_sum, exp_carry;
      a = v[0]; b = v[1]; select = v[2]; cin = v[3];
      sa_or = a | b; sa_nor = ~(a | b); sa_and = a & b; sa_b = b;
      #1;
      bb        = b ^ select;
      exp_sum   = a ^ bb ^ cin;
      exp_carry = (a & bb) | (a & cin) | (bb & cin);
      checks += 3;
      if (sum !== exp_sum)     begin failures++; $display("FAIL sum v=%0d", v); end
      if (carry !== exp_carry) begin failures++; $display("FAIL carry v=%0d", v); end
      if (xor_ab !== (a ^ b))  begin failures++; $display("FAIL xor v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
