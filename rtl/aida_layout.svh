// aida_layout.svh: bit-column map of one CAM row (one processing unit, PU).
// Expects parameters M (weight bits), K (output bits), CIW (column index
// bits), RIW (position-in-row bits) and OIW (output index bits) in scope.
// Column 0 is the least significant bit of the row word. Field order follows
// the CAM map of the paper (temporary, row flag, column index, weight, B, C);
// the RI and OI fields and the exact positions are this design's choice.
`ifndef AIDA_LAYOUT_SVH
`define AIDA_LAYOUT_SVH
`define AIDA_LAYOUT \
  localparam int unsigned T_AND_COL   = 0; \
  localparam int unsigned T_CARRY_COL = 1; \
  localparam int unsigned FLAG_BASE   = 2; \
  localparam int unsigned CI_BASE     = 4; \
  localparam int unsigned RI_BASE     = CI_BASE + CIW; \
  localparam int unsigned W_BASE      = RI_BASE + RIW; \
  localparam int unsigned B_BASE      = W_BASE + M; \
  localparam int unsigned OI_BASE     = B_BASE + K; \
  localparam int unsigned C_BASE      = OI_BASE + OIW;
`endif
