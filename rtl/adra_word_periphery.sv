// adra_word_periphery: everything under the columns of one N-bit word.
//
// Per column: three sense amplifiers on the senseline with the OR, B and AND
// references, and the OAI gate that recovers A from them. Per word: the
// (N+1)-stage add/subtract chain of compute modules and the AND-tree zero
// detector. Outputs are the two operand words A (row at VGREAD1) and B (row at
// VGREAD2), their bitwise AND, OR and XOR, the (N+1)-bit sum or difference,
// and, for a subtraction, the comparison: lt = sign of A - B (A < B), eq = all
// N low difference bits zero (A == B); A > B is neither. For a single-row
// read only B is meaningful. Operands are signed two's complement.
// Combinational from senseline currents to outputs; the macro registers them.
module adra_word_periphery
  import adra_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  int unsigned i_sl_na [N],
  input  logic        sa_en,
  input  logic        select,     // 0: add, 1: subtract / compare
  output logic [N-1:0] a,
  output logic [N-1:0] b,
  output logic [N-1:0] and_ab,
  output logic [N-1:0] or_ab,
  output logic [N-1:0] xor_ab,
  output logic [N:0]   sum,
  output logic         lt,
  output logic         eq
);
  logic [N-1:0] sa_or, sa_nor, sa_and, sa_nand, sa_b, sa_bn;

  for (genvar i = 0; i < N; i++) begin : g_col
    adra_sense_amp #(.I_REF_NA(NA_REF_OR)) u_sa_or (
      .en(sa_en), .i_sl_na(i_sl_na[i]), .out(sa_or[i]), .out_b(sa_nor[i]));
    adra_sense_amp #(.I_REF_NA(NA_REF_B)) u_sa_b (
      .en(sa_en), .i_sl_na(i_sl_na[i]), .out(sa_b[i]), .out_b(sa_bn[i]));
    adra_sense_amp #(.I_REF_NA(NA_REF_AND)) u_sa_and (
      .en(sa_en), .i_sl_na(i_sl_na[i]), .out(sa_and[i]), .out_b(sa_nand[i]));
    adra_a_decode u_adec (
      .sa_nand(sa_nand[i]), .sa_nor(sa_nor[i]), .sa_b(sa_b[i]), .a(a[i]));
  end

  adra_addsub #(.N(N)) u_addsub (
    .sa_or(sa_or), .sa_nor(sa_nor), .sa_and(sa_and), .sa_b(sa_b),
    .select(select), .sum(sum), .xor_ab(xor_ab));

  adra_zero_detect #(.N(N)) u_zero (.d(sum[N-1:0]), .zero(eq));

  assign b      = sa_b;
  assign and_ab = sa_and;
  assign or_ab  = sa_or;
  assign lt     = sum[N];

  logic [N-1:0] unused_bn;
  assign unused_bn = sa_bn;
endmodule
