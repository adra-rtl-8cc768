// fefet_array: behavioural model of the 1T-FeFET non-volatile memory array
// (analog, process-specific part).
//
// Each bitcell is one FeFET between a read bitline (RBL) and a senseline (SL)
// along the column, gated by the row's wordline. Its bit is the ferroelectric
// polarisation: +P (low resistance, '1') or -P (high resistance, '0').
//   Write: at the rising edge of clk a cell whose gate-source voltage
//   (wordline minus senseline) exceeds VC = 2.2 V becomes '1', one below
//   -VC becomes '0', and any other cell keeps its state.
//   Read: with RBL - SL = VREAD, a cell whose wordline is at VGREAD1 passes
//   I_LRS1 or I_HRS1 and one at VGREAD2 passes I_LRS2 or I_HRS2; the SL current
//   of a column is the sum over its asserted cells. Cells whose wordline is at
//   0 V, or at any other level, pass no current (leakage is not modelled).
// The current values come from adra_pkg and are this model's own; only their
// ordering matters to the digital periphery. The state is non-volatile and is
// not reset. clk only times the write pulse.
module fefet_array
  import adra_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 1024
) (
  input  logic        clk,
  input  int          wl_mv   [ROWS],
  input  int          rbl_mv  [COLS],
  input  int          sl_mv   [COLS],
  output int unsigned i_sl_na [COLS]
);
  logic [COLS-1:0] cells [ROWS];

  // Write: polarisation switches where |VGS| exceeds the coercive voltage.
  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (wl_mv[r] > MV_VC || wl_mv[r] < -MV_VC) begin
        for (int c = 0; c < COLS; c++) begin
          if (wl_mv[r] - sl_mv[c] > MV_VC)       cells[r][c] <= 1'b1;
          else if (wl_mv[r] - sl_mv[c] < -MV_VC) cells[r][c] <= 1'b0;
        end
      end
    end
  end

  // Read: senseline current is the sum of the asserted cells' currents.
  always_comb begin
    for (int c = 0; c < COLS; c++) i_sl_na[c] = 0;
    for (int r = 0; r < ROWS; r++) begin
      if (wl_mv[r] == int'(MV_VGREAD1) || wl_mv[r] == int'(MV_VGREAD2)) begin
        for (int c = 0; c < COLS; c++) begin
          if (rbl_mv[c] - sl_mv[c] == int'(MV_VREAD)) begin
            if (wl_mv[r] == int'(MV_VGREAD1))
              i_sl_na[c] += cells[r][c] ? NA_LRS1 : NA_HRS1;
            else
              i_sl_na[c] += cells[r][c] ? NA_LRS2 : NA_HRS2;
          end
        end
      end
    end
  end
endmodule
