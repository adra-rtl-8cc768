// tb_adra_wordline_driver: 16-row driver. Random pairs of rows are selected
// by the two decoders in read mode and one row in each write phase; every
// wordline voltage is compared with the expected level.
module tb_adra_wordline_driver;
  import adra_pkg::*;
  localparam int ROWS = 16;
  logic [ROWS-1:0] sel1, sel2;
  wr_phase_t       wr_phase;
  int              wl_mv [ROWS];
  int checks = 0, failures = 0;

  adra_wordline_driver #(.ROWS(ROWS)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int ra, rb;
      ra = $urandom_range(ROWS - 1);
      rb = $urandom_range(ROWS - 1);
      if (rb == ra) rb = (ra + 1) % ROWS;
      sel1 = '0; sel2 = '0;
      wr_phase = wr_phase_t'(t % 3);
      if (wr_phase == WR_NONE) sel1[ra] = 1'b1;
      sel2[rb] = 1'b1;
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int exp;
        exp = 0;
        if (r == rb)
          exp = (wr_phase == WR_RESET) ? MV_VRESET :
                (wr_phase == WR_SET)   ? MV_VSET : int'(MV_VGREAD2);
        else if (r == ra && wr_phase == WR_NONE)
          exp = int'(MV_VGREAD1);
        checks++;
        if (wl_mv[r] != exp) begin
          failures++;
          $display("FAIL t=%0d row %0d got %0d exp %0d", t, r, wl_mv[r], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
