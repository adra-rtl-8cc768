// tb_adra_controller: the access sequencer with 16 rows, 16 columns and 4-bit
// words. Checks per operation: which decoders are enabled and with which
// rows, SELECT, sense enable, write phases over two cycles with req_ready low
// in the second, column enables from the word mask, and rsp_valid one cycle
// after each read or CiM request.
module tb_adra_controller;
  import adra_pkg::*;
  localparam int ROWS = 16, COLS = 16, WB = 4, NW = 4;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready;
  op_t  req_op, rsp_op;
  logic [3:0] req_row_a, req_row_b, dec1_addr, dec2_addr;
  logic [NW-1:0] req_word_en;
  logic [COLS-1:0] req_wdata, col_en, wdata;
  logic dec1_en, dec2_en, sa_en, select, cap_en, rsp_valid;
  wr_phase_t wr_phase;
  int checks = 0, failures = 0;

  adra_controller #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic issue(input op_t op, input int ra, input int rb,
                       input logic [NW-1:0] we, input logic [COLS-1:0] wd);
    logic [COLS-1:0] exp_col;
    req_valid = 1; req_op = op; req_row_a = 4'(ra); req_row_b = 4'(rb);
    req_word_en = we; req_wdata = wd;
    #1;
    for (int w = 0; w < NW; w++) exp_col[w*WB +: WB] = {WB{we[w]}};
    chk(req_ready, "ready");
    case (op)
      OP_READ: begin
        chk(!dec1_en && dec2_en && dec2_addr == 4'(ra), "read decoders");
        chk(sa_en && cap_en && wr_phase == WR_NONE && col_en == exp_col, "read enables");
      end
      OP_ADD, OP_SUB: begin
        chk(dec1_en && dec1_addr == 4'(ra) && dec2_en && dec2_addr == 4'(rb), "cim decoders");
        chk(sa_en && cap_en && col_en == exp_col, "cim enables");
        chk(select == (op == OP_SUB), "select");
      end
      OP_WRITE: begin
        chk(!dec1_en && dec2_en && dec2_addr == 4'(ra) && wr_phase == WR_RESET, "write reset");
        chk(!sa_en && !cap_en, "write no sense");
      end
      default: ;
    endcase
    @(posedge clk); #1;
    req_valid = 0;
    chk(rsp_valid == (op != OP_WRITE), "rsp_valid");
    if (op != OP_WRITE) chk(rsp_op == op, "rsp_op");
    if (op == OP_WRITE) begin
      chk(!req_ready && dec2_en && dec2_addr == 4'(ra) && wr_phase == WR_SET, "write set");
      chk(wdata == wd, "write data");
      @(posedge clk); #1;
      chk(req_ready && !rsp_valid, "write done");
    end
  endtask

  initial begin
    req_valid = 0; req_op = OP_NOP; req_row_a = 0; req_row_b = 0;
    req_word_en = 0; req_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    issue(OP_WRITE, 3, 0, '1, 16'hbeef);
    issue(OP_READ, 3, 0, 4'b1010, 0);
    issue(OP_ADD, 3, 5, 4'b1111, 0);
    issue(OP_SUB, 7, 2, 4'b0110, 0);
    repeat (40) begin
      int ra, rb;
      ra = $urandom_range(ROWS - 1);
      rb = (ra + 1 + $urandom_range(ROWS - 2)) % ROWS;
      issue(op_t'($urandom_range(1, 4)), ra, rb, 4'($urandom), 16'($urandom));
    end
    // Idle: nothing must be driven.
    @(posedge clk); #1;
    chk(!dec1_en && !dec2_en && !sa_en && !rsp_valid, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
