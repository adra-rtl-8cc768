// adra_addsub: ripple chain of N+1 compute modules giving the (N+1)-bit
// two's-complement sum (SELECT = 0) or difference A - B (SELECT = 1) of two
// N-bit words held in two rows of the array.
//
// One compute module sits under each of the N columns of the word; the carry
// of stage i is the carry in of stage i+1, and the carry in of stage 0 is
// SELECT ('0' for addition, '1' for subtraction, completing ~B + 1). An extra
// (N+1)-th module takes the carry of stage N-1 and the same sense outputs as
// stage N-1 (sign extension of both operands), so the result never overflows.
// Its SUM is the sign of the result, which is what the comparison uses.
// Column i carries bit i of the word (bit 0 is the least significant), a
// choice of this design. Combinational, N+1 carry stages deep.
module adra_addsub #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] sa_or,
  input  logic [N-1:0] sa_nor,
  input  logic [N-1:0] sa_and,
  input  logic [N-1:0] sa_b,
  input  logic         select,   // 0: A + B, 1: A - B
  output logic [N:0]   sum,      // sum[N] is the sign of the result
  output logic [N-1:0] xor_ab
);
  logic [N+1:0] c;
  assign c[0] = select;

  for (genvar i = 0; i <= N; i++) begin : g_cm
    // Stage N re-uses the sense outputs of the most significant column.
    localparam int unsigned K = (i < N) ? i : N - 1;
    logic x;
    adra_compute_module u_cm (
      .sa_or (sa_or[K]),
      .sa_nor(sa_nor[K]),
      .sa_and(sa_and[K]),
      .sa_b  (sa_b[K]),
      .select(select),
      .cin   (c[i]),
      .sum   (sum[i]),
      .carry (c[i+1]),
      .xor_ab(x)
    );
    if (i < N) begin : g_x
      assign xor_ab[i] = x;
    end else begin : g_nx
      logic unused_x;
      assign unused_x = x;
    end
  end

  logic unused_cout;
  assign unused_cout = c[N+1];
endmodule
