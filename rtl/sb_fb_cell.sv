// sb_fb_cell -- behavioural model of the 10-T self-feedback (FB) cell that
// sits on the diagonal of the array. Same storage and write port as the
// coupling cell, but the read stacks are crossed: with Q = 1 an RWL pulse
// (x = +1) sinks current from RBLB and an RWLB pulse (x = -1) from RBL, so
// the cell adds +alpha*x to its own column. The per-cell current (set on chip
// by V_bias,FB) is the input i_unit_na. Storage is a level-sensitive latch by
// intent (SRAM core). Not synthesizable logic: it stands in for a custom
// analog cell. The crossed connection follows the chip; the current value is
// this design's number.
module sb_fb_cell (
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

  assign i_bl_na  = (q && rwlb) ? i_unit_na : 0;
  assign i_blb_na = (q && rwl)  ? i_unit_na : 0;

endmodule
