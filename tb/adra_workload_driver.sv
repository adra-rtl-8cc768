// adra_workload_driver: testbench helper for tb_adra_workloads. Instantiates
// an adra_cim_macro of SIZE x SIZE cells with 32-bit words, writes 16 random
// rows and runs the parallelism sweep of 32-bit subtractions described in
// tb_adra_workloads, counting checks and failures.
module adra_workload_driver
  import adra_pkg::*;
#(
  parameter int SIZE = 256
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int WB = 32, NW = SIZE / WB, AW = $clog2(SIZE), NROWS = 16;
  logic req_valid, req_ready, rsp_valid;
  op_t  req_op, rsp_op;
  logic [AW-1:0] req_row_a, req_row_b;
  logic [NW-1:0] req_word_en, rsp_lt, rsp_eq;
  logic [SIZE-1:0] req_wdata, rsp_a, rsp_b, rsp_and, rsp_or, rsp_xor;
  logic [NW-1:0][WB:0] rsp_sum;
  logic [SIZE-1:0] mem [NROWS];

  adra_cim_macro #(.ROWS(SIZE), .COLS(SIZE), .WORD_BITS(WB)) dut (.*);

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %0d: %s at %0t", SIZE, what, $time); end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    req_valid = 0; req_op = OP_NOP; req_row_a = 0; req_row_b = 0;
    req_word_en = '0; req_wdata = '0;
    wait (rst_n);
    @(posedge clk); #1;
    for (int r = 0; r < NROWS; r++) begin
      for (int w = 0; w < NW; w++) mem[r][w*WB +: WB] = $urandom;
      if (r == 1) mem[r][WB-1:0] = mem[0][WB-1:0];   // one equal pair
      req_valid = 1; req_op = OP_WRITE; req_row_a = AW'(r); req_wdata = mem[r];
      @(posedge clk); #1;
      req_valid = 0;
      @(posedge clk); #1;
    end
    for (int k = 1; k <= NW; k++) begin
      int ra, rb;
      ra = (k == 1) ? 0 : $urandom_range(NROWS - 1);
      rb = (k == 1) ? 1 : (ra + 1 + $urandom_range(NROWS - 2)) % NROWS;
      req_valid = 1; req_op = OP_SUB; req_row_a = AW'(ra); req_row_b = AW'(rb);
      req_word_en = NW'((64'd1 << k) - 1);
      @(posedge clk); #1;
      req_valid = 0;
      chk(rsp_valid && rsp_op == OP_SUB, "response after one cycle");
      for (int w = 0; w < NW; w++) begin
        logic [WB-1:0] va, vb;
        va = mem[ra][w*WB +: WB];
        vb = mem[rb][w*WB +: WB];
        if (w < k) begin
          chk(rsp_sum[w] == $signed({va[WB-1], va}) - $signed({vb[WB-1], vb}), "difference");
          chk(rsp_lt[w] == ($signed(va) < $signed(vb)) && rsp_eq[w] == (va == vb), "comparison");
        end else begin
          chk(rsp_b[w*WB +: WB] == 0 && rsp_a[w*WB +: WB] == 0, "unselected word");
        end
      end
    end
    done = 1;
  end
endmodule
