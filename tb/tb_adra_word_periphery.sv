// tb_adra_word_periphery: one 32-bit word's periphery. For random and corner
// operand pairs the senseline currents the array would produce (VGREAD1 row
// holds A, VGREAD2 row holds B) are applied; A, B, AND, OR, XOR, the 33-bit
// sum or difference and the lt/eq comparison flags are checked against
// arithmetic on the operands. Single-row currents check the read of B.
module tb_adra_word_periphery;
  import adra_pkg::*;
  localparam int N = 32;
  int unsigned i_sl_na [N];
  logic sa_en, select, lt, eq;
  logic [N-1:0] a, b, and_ab, or_ab, xor_ab;
  logic [N:0] sum;
  int checks = 0, failures = 0;
  int n_lt = 0, n_eq = 0, n_gt = 0;

  adra_word_periphery #(.N(N)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [N-1:0] va, input logic [N-1:0] vb, input logic sel);
    logic signed [N:0] exp;
    for (int i = 0; i < N; i++)
      i_sl_na[i] = (va[i] ? NA_LRS1 : NA_HRS1) + (vb[i] ? NA_LRS2 : NA_HRS2);
    sa_en = 1; select = sel;
    #1;
    exp = sel ? $signed({va[N-1], va}) - $signed({vb[N-1], vb})
              : $signed({va[N-1], va}) + $signed({vb[N-1], vb});
    checks += 6;
    if (a !== va || b !== vb) begin failures++; $display("FAIL operands %h %h", a, b); end
    if (and_ab !== (va & vb)) begin failures++; $display("FAIL and"); end
    if (or_ab !== (va | vb))  begin failures++; $display("FAIL or"); end
    if (xor_ab !== (va ^ vb)) begin failures++; $display("FAIL xor"); end
    if (sum !== exp) begin failures++; $display("FAIL sum %h exp %h", sum, exp); end
    if (sel) begin
      if (lt !== ($signed(va) < $signed(vb)) || eq !== (va == vb)) begin
        failures++; $display("FAIL cmp %h %h lt=%0d eq=%0d", va, vb, lt, eq);
      end
      if (va == vb) n_eq++; else if ($signed(va) < $signed(vb)) n_lt++; else n_gt++;
    end
  endtask

  initial begin
    apply(32'h8000_0000, 32'h7fff_ffff, 1);
    apply(32'h7fff_ffff, 32'h8000_0000, 1);
    apply(32'h7fff_ffff, 32'h7fff_ffff, 0);
    apply(32'h0, 32'h0, 1);
    repeat (500) begin
      logic [N-1:0] x;
      x = $urandom;
      apply(x, ($urandom_range(3) == 0) ? x : $urandom, 1'($urandom));
    end
    // Single-row read: only the VGREAD2 row is asserted.
    repeat (20) begin
      logic [N-1:0] vb;
      vb = $urandom;
      for (int i = 0; i < N; i++) i_sl_na[i] = vb[i] ? NA_LRS2 : NA_HRS2;
      #1;
      checks++;
      if (b !== vb) begin failures++; $display("FAIL single read"); end
    end
    checks++;
    if (n_lt == 0 || n_eq == 0 || n_gt == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
