// adra_wordline_driver: behavioural model of the final wordline-driver stages
// (analog part: it outputs voltages).
//
// ADRA needs two wordlines at two different gate voltages. The row picked by
// row decoder 1 is driven to VGREAD1 (0.83 V) and the row picked by row
// decoder 2 to VGREAD2 (1 V); a single-row read uses decoder 2 alone. During a
// write the row of decoder 2 is driven to VRESET (-5 V) in the reset phase and
// to VSET (3.7 V) in the set phase. Using decoder 2 for writes, and letting
// decoder 2 win if both pick the same row, are this design's choices (the
// controller never asks for that). All other wordlines stay at 0 V. Outputs
// are integers in millivolts, one per row; combinational.
module adra_wordline_driver
  import adra_pkg::*;
#(
  parameter int unsigned ROWS = 1024
) (
  input  logic [ROWS-1:0] sel1,      // from row decoder 1
  input  logic [ROWS-1:0] sel2,      // from row decoder 2
  input  wr_phase_t       wr_phase,
  output int              wl_mv [ROWS]
);
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      wl_mv[r] = 0;
      if (wr_phase == WR_RESET) begin
        if (sel2[r]) wl_mv[r] = MV_VRESET;
      end else if (wr_phase == WR_SET) begin
        if (sel2[r]) wl_mv[r] = MV_VSET;
      end else begin
        if (sel1[r]) wl_mv[r] = int'(MV_VGREAD1);
        if (sel2[r]) wl_mv[r] = int'(MV_VGREAD2);
      end
    end
  end
endmodule
