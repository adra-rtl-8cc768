// tb_adra_row_decoder: every address of the default 1024-row decoder, enabled
// and disabled; the output must be one-hot at the address, or all zero.
module tb_adra_row_decoder;
  localparam int ROWS = 1024;
  logic            en;
  logic [9:0]      addr;
  logic [ROWS-1:0] sel;
  int checks = 0, failures = 0;

  adra_row_decoder dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < ROWS; a++) begin
      logic [ROWS-1:0] exp;
      exp = '0; exp[a] = 1'b1;
      addr = 10'(a);
      en = 1'b1; #1;
      checks++;
      if (sel !== exp) begin failures++; $display("FAIL addr %0d", a); end
      en = 1'b0; #1;
      checks++;
      if (sel !== '0) begin failures++; $display("FAIL disabled addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
