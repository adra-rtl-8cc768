// tb_adra_addsub: the 33-stage add/subtract chain at its default width of 32
// bits. Random and corner operands (most negative, most positive, equal,
// zero) are applied as sense outputs; the (N+1)-bit result is compared with
// sign-extended addition or subtraction, and XOR with A ^ B.
module tb_adra_addsub;
  localparam int N = 32;
  logic [N-1:0] sa_or, sa_nor, sa_and, sa_b, xor_ab;
  logic         select;
  logic [N:0]   sum;
  int checks = 0, failures = 0;

  adra_addsub #(.N(N)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [N-1:0] a, input logic [N-1:0] b, input logic sel);
    logic signed [N:0] ea, eb, exp;
    sa_or = a | b; sa_nor = ~(a | b); sa_and = a & b; sa_b = b; select = sel;
    #1;
    ea  = {a[N-1], a};
    eb  = {b[N-1], b};
    exp = sel ? ea - eb : ea + eb;
    checks += 2;
    if (sum !== exp) begin
      failures++;
      $display("FAIL a=%h b=%h sel=%0d got %h exp %h", a, b, sel, sum, exp);
    end
    if (xor_ab !== (a ^ b)) begin failures++; $display("FAIL xor"); end
  endtask

  initial begin
    logic [N-1:0] corner [6];
    corner = '{32'h8000_0000, 32'h7fff_ffff, 32'h0, 32'h1, 32'hffff_ffff, 32'h1234_5678};
    foreach (corner[i]) foreach (corner[j]) for (int s = 0; s < 2; s++)
      apply(corner[i], corner[j], s[0]);
    repeat (2000) apply($urandom, $urandom, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
