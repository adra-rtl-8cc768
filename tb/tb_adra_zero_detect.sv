// tb_adra_zero_detect: the AND tree at 32 inputs (default) and at an odd
// width of 5. Zero, every one-hot word and random words are applied; the flag
// must be set for the zero word only.
module tb_adra_zero_detect;
  logic [31:0] d32;
  logic [4:0]  d5;
  logic        z32, z5;
  int checks = 0, failures = 0;

  adra_zero_detect            dut32 (.d(d32), .zero(z32));
  adra_zero_detect #(.N(5))   dut5  (.d(d5),  .zero(z5));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [31:0] v);
    d32 = v; d5 = v[4:0];
    #1;
    checks += 2;
    if (z32 !== (v == 0))      begin failures++; $display("FAIL 32 %h", v); end
    if (z5  !== (v[4:0] == 0)) begin failures++; $display("FAIL 5 %h", v[4:0]); end
  endtask

  initial begin
    apply(0);
    for (int i = 0; i < 32; i++) apply(32'd1 << i);
    repeat (500) apply($urandom & $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
