// tb_fefet_array: 8 x 8 array model. Rows are written with the two-phase
// voltages (row at VRESET, then VSET with '0' columns inhibited), then rows
// are read singly at VGREAD2 and in pairs at VGREAD1/VGREAD2; the senseline
// currents are compared with sums of the expected cell currents. Cells on
// other rows must keep their data, and columns without VREAD carry no current.
module tb_fefet_array;
  import adra_pkg::*;
  localparam int ROWS = 8, COLS = 8;
  logic        clk = 0;
  int          wl_mv   [ROWS];
  int          rbl_mv  [COLS];
  int          sl_mv   [COLS];
  int unsigned i_sl_na [COLS];
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  fefet_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    foreach (wl_mv[r]) wl_mv[r] = 0;
    foreach (rbl_mv[c]) begin rbl_mv[c] = 0; sl_mv[c] = 0; end
  endtask

  task automatic write_row(input int row, input logic [COLS-1:0] data);
    idle();
    wl_mv[row] = MV_VRESET;
    @(posedge clk); #1;
    wl_mv[row] = MV_VSET;
    foreach (sl_mv[c]) if (!data[c]) begin sl_mv[c] = MV_VINHIBIT; rbl_mv[c] = MV_VINHIBIT; end
    @(posedge clk); #1;
    idle();
    ref_mem[row] = data;
  endtask

  task automatic read_check(input int ra, input int rb, input logic [COLS-1:0] en);
    idle();
    if (ra >= 0) wl_mv[ra] = int'(MV_VGREAD1);
    wl_mv[rb] = int'(MV_VGREAD2);
    foreach (rbl_mv[c]) if (en[c]) rbl_mv[c] = int'(MV_VREAD);
    #1;
    for (int c = 0; c < COLS; c++) begin
      int unsigned exp;
      exp = 0;
      if (en[c]) begin
        if (ra >= 0) exp += ref_mem[ra][c] ? NA_LRS1 : NA_HRS1;
        exp += ref_mem[rb][c] ? NA_LRS2 : NA_HRS2;
      end
      checks++;
      if (i_sl_na[c] != exp) begin
        failures++;
        $display("FAIL rows %0d/%0d col %0d got %0d exp %0d", ra, rb, c, i_sl_na[c], exp);
      end
    end
  endtask

  initial begin
    idle();
    @(posedge clk); #1;
    for (int r = 0; r < ROWS; r++) write_row(r, 8'($urandom));
    for (int t = 0; t < 50; t++) begin
      int ra, rb;
      ra = $urandom_range(ROWS - 1);
      rb = (ra + 1 + $urandom_range(ROWS - 2)) % ROWS;
      read_check(t % 4 == 0 ? -1 : ra, rb, (t % 5 == 0) ? 8'($urandom) : 8'hff);
      if (t % 10 == 0) write_row(ra, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
