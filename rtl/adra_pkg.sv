// adra_pkg: types and constants shared by the ADRA computing-in-memory macro.
//
// The bias voltages are the evaluation conditions of the design: VREAD = 1 V on
// the read bitline, VGREAD2 = 1 V and VGREAD1 = 0.83 V on the two asserted
// wordlines, VSET = 3.7 V and VRESET = -5 V for writes. The coercive voltage
// VC = 2.2 V is the coercive field (2.2 MV/cm) times the ferroelectric
// thickness (10 nm). Voltages are carried as integers in millivolts and
// senseline currents as integers in nanoamperes so that the behavioural
// models stay two-state and synthesizable-looking.
//
// The cell currents (I_LRS1/I_HRS1 at VGREAD1, I_LRS2/I_HRS2 at VGREAD2) and the
// write-inhibit voltage are this design's own choices: only their ordering
// (I_HRS1+I_HRS2 < I_LRS1+I_HRS2 < I_HRS1+I_LRS2 < I_LRS1+I_LRS2) and a sense
// margin above 1 uA are required. The three sense references sit midway
// between neighbouring senseline current levels.
package adra_pkg;

  // Bias voltages in millivolts.
  localparam int unsigned MV_VREAD   = 1000;
  localparam int unsigned MV_VGREAD1 = 830;
  localparam int unsigned MV_VGREAD2 = 1000;
  localparam int          MV_VSET    = 3700;
  localparam int          MV_VRESET  = -5000;
  localparam int          MV_VC      = 2200;
  // Bitline/senseline level that keeps a cell from being set while its row
  // sees VSET (VGS = 3.7 V - 1.85 V = 1.85 V < VC).
  localparam int          MV_VINHIBIT = 1850;

  // Cell read currents in nanoamperes (assumed values, see header).
  localparam int unsigned NA_HRS1 = 1;
  localparam int unsigned NA_LRS1 = 1500;
  localparam int unsigned NA_HRS2 = 15;
  localparam int unsigned NA_LRS2 = 3000;

  // Senseline current levels of the four input vectors (A,B).
  localparam int unsigned NA_SL00 = NA_HRS1 + NA_HRS2;
  localparam int unsigned NA_SL10 = NA_LRS1 + NA_HRS2;
  localparam int unsigned NA_SL01 = NA_HRS1 + NA_LRS2;
  localparam int unsigned NA_SL11 = NA_LRS1 + NA_LRS2;

  // Sense amplifier references, midway between neighbouring levels.
  localparam int unsigned NA_REF_OR  = (NA_SL00 + NA_SL10) / 2;
  localparam int unsigned NA_REF_B   = (NA_SL10 + NA_SL01) / 2;
  localparam int unsigned NA_REF_AND = (NA_SL01 + NA_SL11) / 2;

  // Minimum senseline current difference the sense amplifiers must resolve.
  localparam int unsigned NA_SENSE_MARGIN = 1000;

  // Write phase driven onto the selected row and the columns.
  typedef enum logic [1:0] {
    WR_NONE  = 2'd0,
    WR_RESET = 2'd1,   // row at VRESET: every cell of the row to HRS ('0')
    WR_SET   = 2'd2    // row at VSET: cells not inhibited to LRS ('1')
  } wr_phase_t;

  // Operations accepted by the macro.
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_READ  = 3'd1,   // single-row read, one wordline at VGREAD2
    OP_ADD   = 3'd2,   // dual-row CiM, SELECT = 0: A + B (and AND/OR/XOR, A, B)
    OP_SUB   = 3'd3,   // dual-row CiM, SELECT = 1: A - B and comparison
    OP_WRITE = 3'd4    // two-phase write: reset the row, then set the '1' bits
  } op_t;

endpackage
