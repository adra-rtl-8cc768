// tb_adra_cim_macro: end-to-end test of the macro at 32 rows x 64 columns with
// 8-bit words (8 words per row). A reference copy of the memory is kept in
// the testbench. Rows are written with random signed words, then random
// reads, additions and subtractions follow, mostly back to back; every
// response is checked one cycle after its request against arithmetic on the
// reference copy (operands, AND/OR/XOR, 9-bit sum or difference, lt/eq).
// Each mechanism of the design is counted and must occur at least once:
// single-row read, dual-row add, dual-row subtract, A<B, A==B, A>B, a sum that
// needs the extra (n+1)-th stage, a two-phase write with its stall cycle,
// partial parallelism (words left out read as zero) and back-to-back issue.
module tb_adra_cim_macro;
  import adra_pkg::*;
  localparam int ROWS = 32, COLS = 64, WB = 8, NW = COLS / WB, AW = 5;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid;
  op_t  req_op, rsp_op;
  logic [AW-1:0] req_row_a, req_row_b;
  logic [NW-1:0] req_word_en, rsp_lt, rsp_eq;
  logic [COLS-1:0] req_wdata, rsp_a, rsp_b, rsp_and, rsp_or, rsp_xor;
  logic [NW-1:0][WB:0] rsp_sum;
  logic [COLS-1:0] mem [ROWS];
  int checks = 0, failures = 0;
  int n_read = 0, n_add = 0, n_sub = 0, n_lt = 0, n_eq = 0, n_gt = 0;
  int n_ovf = 0, n_write = 0, n_stall = 0, n_partial = 0, n_b2b = 0;

  adra_cim_macro #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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
    #1 chk(req_ready, "ready for write");
    @(posedge clk); #1;
    chk(!req_ready, "stall in write set phase");
    if (!req_ready) n_stall++;
    req_valid = 0;
    @(posedge clk); #1;
    mem[row] = data;
    n_write++;
  endtask

  // Issue one read/CiM request; returns after the response has been checked.
  // If keep is set the next request follows in the very next cycle.
  task automatic access(input op_t op, input int ra, input int rb, input logic [NW-1:0] we);
    req_valid = 1; req_op = op; req_row_a = AW'(ra); req_row_b = AW'(rb);
    req_word_en = we;
    #1 chk(req_ready, "ready");
    @(posedge clk); #1;
    req_valid = 0;
    chk(rsp_valid && rsp_op == op, "response one cycle later");
    if (we != '1) n_partial++;
    for (int w = 0; w < NW; w++) begin
      logic [WB-1:0] va, vb, ga, gb;
      logic signed [WB:0] exp;
      ga = rsp_a[w*WB +: WB];
      gb = rsp_b[w*WB +: WB];
      if (!we[w]) begin
        chk(gb == 0 && rsp_and[w*WB +: WB] == 0 && rsp_or[w*WB +: WB] == 0, "unselected word idle");
        continue;
      end
      if (op == OP_READ) begin
        chk(gb == mem[ra][w*WB +: WB], "read data");
        continue;
      end
      va = mem[ra][w*WB +: WB];
      vb = mem[rb][w*WB +: WB];
      exp = (op == OP_SUB) ? $signed({va[WB-1], va}) - $signed({vb[WB-1], vb})
                           : $signed({va[WB-1], va}) + $signed({vb[WB-1], vb});
      chk(ga == va && gb == vb, "two-bit read of both operands");
      chk(rsp_and[w*WB +: WB] == (va & vb) && rsp_or[w*WB +: WB] == (va | vb)
          && rsp_xor[w*WB +: WB] == (va ^ vb), "bitwise");
      chk(rsp_sum[w] == exp, "sum/difference");
      if (exp[WB] != exp[WB-1]) n_ovf++;
      if (op == OP_SUB) begin
        chk(rsp_lt[w] == ($signed(va) < $signed(vb)) && rsp_eq[w] == (va == vb), "compare");
        if (va == vb) n_eq++; else if ($signed(va) < $signed(vb)) n_lt++; else n_gt++;
      end
    end
    if (op == OP_READ) n_read++; else if (op == OP_ADD) n_add++; else n_sub++;
  endtask

  initial begin
    req_valid = 0; req_op = OP_NOP; req_row_a = 0; req_row_b = 0;
    req_word_en = '1; req_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int r = 0; r < ROWS; r++) write_row(r, {$urandom, $urandom});
    // Rows 0 and 1 equal, so equality is exercised.
    write_row(1, mem[0]);
    // Back-to-back: three requests in consecutive cycles.
    for (int k = 0; k < 3; k++) begin
      req_valid = 1; req_op = OP_SUB; req_row_a = AW'(2 + k); req_row_b = AW'(3 + k);
      req_word_en = '1;
      #1 chk(req_ready, "b2b ready");
      @(posedge clk); #1;
      chk(rsp_valid, "b2b response");
      for (int w = 0; w < NW; w++) begin
        logic [WB-1:0] va, vb;
        va = mem[2 + k][w*WB +: WB];
        vb = mem[3 + k][w*WB +: WB];
        chk(rsp_sum[w] == $signed({va[WB-1], va}) - $signed({vb[WB-1], vb}), "b2b difference");
      end
      n_b2b++;
    end
    req_valid = 0;
    access(OP_SUB, 0, 1, '1);
    access(OP_ADD, 0, 1, '1);
    for (int t = 0; t < 300; t++) begin
      int ra, rb;
      ra = $urandom_range(ROWS - 1);
      rb = (ra + 1 + $urandom_range(ROWS - 2)) % ROWS;
      access(op_t'($urandom_range(1, 3)), ra, rb, (t % 4 == 0) ? NW'($urandom) : '1);
      if (t % 25 == 0) write_row(ra, {$urandom, $urandom});
    end
    $display("mechanisms: read=%0d add=%0d sub=%0d lt=%0d eq=%0d gt=%0d overflow=%0d write=%0d stall=%0d partial=%0d b2b=%0d",
             n_read, n_add, n_sub, n_lt, n_eq, n_gt, n_ovf, n_write, n_stall, n_partial, n_b2b);
    chk(n_read > 0, "read happened");
    chk(n_add > 0, "add happened");
    chk(n_sub > 0, "sub happened");
    chk(n_lt > 0 && n_eq > 0 && n_gt > 0, "all compare outcomes happened");
    chk(n_ovf > 0, "extra stage used");
    chk(n_write > 0 && n_stall > 0, "write and stall happened");
    chk(n_partial > 0, "partial parallelism happened");
    chk(n_b2b > 0, "back-to-back issue happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
