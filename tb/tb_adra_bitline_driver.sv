// tb_adra_bitline_driver: 16-column driver. Random column enables and write
// data in each phase; RBL and SL voltages are compared with VREAD/0 V for
// enabled read columns, 0 V in the reset phase and inhibit/0 V in the set
// phase.
module tb_adra_bitline_driver;
  import adra_pkg::*;
  localparam int COLS = 16;
  logic [COLS-1:0] col_en, wdata;
  wr_phase_t       wr_phase;
  int              rbl_mv [COLS];
  int              sl_mv  [COLS];
  int checks = 0, failures = 0;

  adra_bitline_driver #(.COLS(COLS)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 150; t++) begin
      col_en   = 16'($urandom);
      wdata    = 16'($urandom);
      wr_phase = wr_phase_t'(t % 3);
      #1;
      for (int c = 0; c < COLS; c++) begin
        int er, es;
        er = 0; es = 0;
        if (wr_phase == WR_NONE && col_en[c]) er = int'(MV_VREAD);
        if (wr_phase == WR_SET && !wdata[c]) begin er = MV_VINHIBIT; es = MV_VINHIBIT; end
        checks++;
        if (rbl_mv[c] != er || sl_mv[c] != es) begin
          failures++;
          $display("FAIL t=%0d col %0d rbl %0d sl %0d", t, c, rbl_mv[c], sl_mv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
