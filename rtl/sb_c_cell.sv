// sb_c_cell -- behavioural model of the 10-T coupling (C) cell.
// A 6-T SRAM core stores the edge weight J_mn (Q). Two read stacks hang off
// it: the left stack sinks current from RBL while RWL pulses, the right one
// from RBLB while RWLB pulses, and each conducts only when Q = 1. With RWL
// carrying x_m = +1 and RWLB carrying x_m = -1, the cell realises the ternary
// product -beta*J_mn*x_m as a differential bitline discharge:
//     Q=0: no current   Q=1,RWL: i on RBL (-dV)   Q=1,RWLB: i on RBLB (+dV)
// The current per cell (set on chip by V_bias,C and the access-transistor
// size) is the input i_unit_na. Storage is transparent while WWL is high and
// the write bitlines carry a differential value, as in a 6-T cell; this is
// a level-sensitive latch by intent. This is not synthesizable logic: it
// stands in for a custom analog cell. The truth table follows the chip; the
// current value is this design's number.
module sb_c_cell (
  input  logic wwl,
  input  logic wbl,
  input  logic wblb,
  input  logic rwl,
  input  logic rwlb,
  input  int   i_unit_na,
  output int   i_bl_na,
  output int   i_blb_na,
  output logic q
);

  timeunit 1ps;
  timeprecision 1ps;

  always_latch begin
    if (wwl && (wbl != wblb)) q <= wbl;
  end

  assign i_bl_na  = (q && rwl)  ? i_unit_na : 0;
  assign i_blb_na = (q && rwlb) ? i_unit_na : 0;

endmodule
