// sb_noise_cell -- behavioural model of the 4-T noise-injection cell, one per
// column in the extra noise row. Two access transistors (gated by the noise
// row's RWL and RWLB) connect RBL or RBLB to a pull-down whose gate is the
// DAC voltage V_N, so during the pulse it sinks a current set by V_N from
// the side chosen by the PRBS polarity bit. The device law is modelled as a
// linear transconductance, i = GM_NA_PER_MV * V_N, with no threshold; the
// chip does not give it, so this is this design's simplification. Not
// synthesizable logic: it stands in for an analog cell.
module sb_noise_cell #(
  parameter int GM_NA_PER_MV = 2
) (
  input  logic rwl,
  input  logic rwlb,
  input  int   v_n_mv,
  output int   i_bl_na,
  output int   i_blb_na
);

  timeunit 1ps;
  timeprecision 1ps;

  int i_n;

  assign i_n      = (v_n_mv > 0) ? GM_NA_PER_MV * v_n_mv : 0;
  assign i_bl_na  = rwl  ? i_n : 0;
  assign i_blb_na = rwlb ? i_n : 0;

endmodule
