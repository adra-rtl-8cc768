// tb_adra_cim_macro_full: the macro at its default size (1024 x 1024 cells,
// 32 words of 32 bits per row). Three rows are written with random words
// (row 7 partly a copy of row 3 so equality occurs), then one single-row read,
// one dual-row subtraction with comparison and one dual-row addition are
// issued back to back, and every word of every response is checked against
// arithmetic on the written data, one cycle after its request.
module tb_adra_cim_macro_full;
  import adra_pkg::*;
  localparam int ROWS = 1024, COLS = 1024, WB = 32, NW = 32, AW = 10;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid;
  op_t  req_op, rsp_op;
  logic [AW-1:0] req_row_a, req_row_b;
  logic [NW-1:0] req_word_en, rsp_lt, rsp_eq;
  logic [COLS-1:0] req_wdata, rsp_a, rsp_b, rsp_and, rsp_or, rsp_xor;
  logic [NW-1:0][WB:0] rsp_sum;
  logic [COLS-1:0] ra_data, rb_data, rc_data;
  int checks = 0, failures = 0;

  adra_cim_macro dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic write_row(input int row, input logic [COLS-1:0] data);
    req_valid = 1; req_op = OP_WRITE; req_row_a = AW'(row); req_wdata = data;
    @(posedge clk); #1;
    req_valid = 0;
    chk(!req_ready, "write stall");
    @(posedge clk); #1;
  endtask

  task automatic check_cim(input op_t op, input logic [COLS-1:0] a, input logic [COLS-1:0] b);
    chk(rsp_valid && rsp_op == op, "response valid");
    chk(rsp_a == a && rsp_b == b, "two-bit read");
    chk(rsp_and == (a & b) && rsp_or == (a | b) && rsp_xor == (a ^ b), "bitwise");
    for (int w = 0; w < NW; w++) begin
      logic [WB-1:0] va, vb;
      va = a[w*WB +: WB];
      vb = b[w*WB +: WB];
      if (op == OP_SUB) begin
        chk(rsp_sum[w] == $signed({va[WB-1], va}) - $signed({vb[WB-1], vb}), "difference");
        chk(rsp_lt[w] == ($signed(va) < $signed(vb)) && rsp_eq[w] == (va == vb), "compare");
      end else begin
        chk(rsp_sum[w] == $signed({va[WB-1], va}) + $signed({vb[WB-1], vb}), "sum");
      end
    end
  endtask

  initial begin
    req_valid = 0; req_op = OP_NOP; req_row_a = 0; req_row_b = 0;
    req_word_en = '1; req_wdata = '0;
    for (int i = 0; i < COLS / 32; i++) begin
      ra_data[i*32 +: 32] = $urandom;
      rc_data[i*32 +: 32] = $urandom;
    end
    for (int i = 0; i < COLS / 32; i++)
      rb_data[i*32 +: 32] = (i % 2 == 0) ? ra_data[i*32 +: 32] : $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    write_row(3, ra_data);
    write_row(7, rb_data);
    write_row(1000, rc_data);
    // Back-to-back: read, subtract, add.
    req_valid = 1; req_op = OP_READ; req_row_a = 1000; req_word_en = '1;
    @(posedge clk); #1;
    chk(rsp_valid && rsp_b == rc_data, "single-row read");
    req_op = OP_SUB; req_row_a = 3; req_row_b = 7;
    @(posedge clk); #1;
    check_cim(OP_SUB, ra_data, rb_data);
    req_op = OP_ADD; req_row_a = 1000; req_row_b = 3;
    @(posedge clk); #1;
    req_valid = 0;
    check_cim(OP_ADD, rc_data, ra_data);
    @(posedge clk); #1;
    chk(!rsp_valid, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
