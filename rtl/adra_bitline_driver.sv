// adra_bitline_driver: behavioural model of the bitline/senseline drivers
// (analog part: it outputs voltages).
//
// For a read or CiM access the read bitline (RBL) of every enabled column is
// driven to VREAD (1 V) with its senseline (SL) at 0 V; the columns of words
// left out of the operation are left at 0 V, so only the selected RBLs are
// charged (the discharged-bitline style of operation, which wastes nothing on
// half-selected words). Writes follow a global-reset / selective-set scheme:
// in the reset phase every column is at 0 V so the row at VRESET is cleared;
// in the set phase columns that must hold '1' stay at 0 V while columns that
// must hold '0' are raised to an inhibit level (1.85 V, this design's choice)
// so their gate-source voltage stays below the coercive voltage. Outputs are
// integers in millivolts; combinational.
module adra_bitline_driver
  import adra_pkg::*;
#(
  parameter int unsigned COLS = 1024
) (
  input  logic [COLS-1:0] col_en,    // columns taking part in a read/CiM
  input  wr_phase_t       wr_phase,
  input  logic [COLS-1:0] wdata,     // row data for the set phase
  output int              rbl_mv [COLS],
  output int              sl_mv  [COLS]
);
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      rbl_mv[c] = 0;
      sl_mv[c]  = 0;
      if (wr_phase == WR_SET) begin
        if (!wdata[c]) begin
          rbl_mv[c] = MV_VINHIBIT;
          sl_mv[c]  = MV_VINHIBIT;
        end
      end else if (wr_phase == WR_NONE) begin
        if (col_en[c]) rbl_mv[c] = int'(MV_VREAD);
      end
    end
  end
endmodule
