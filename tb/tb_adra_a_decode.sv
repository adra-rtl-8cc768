// tb_adra_a_decode: checks that the OAI gate returns operand A for all four
// operand pairs, given the NAND, NOR and B sense outputs they produce.
module tb_adra_a_decode;
  logic sa_nand, sa_nor, sa_b, a;
  int checks = 0, failures = 0;

  adra_a_decode dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      logic ea, eb;
      ea = v[1]; eb = v[0];
      sa_nand = ~(ea & eb); sa_nor = ~(ea | eb); sa_b = eb;
      #1;
      checks++;
      if (a !== ea) begin failures++; $display("FAIL A=%0d B=%0d got %0d", ea, eb, a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
