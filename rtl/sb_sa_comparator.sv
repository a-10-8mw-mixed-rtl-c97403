// sb_sa_comparator -- behavioural model of one column's strong-arm latch
// comparator with its SR-latch output stage. At a rising clock edge with
// fire (LoopClk) high it compares the two bitline voltages plus the row-wide
// calibration differential (Cal_P on the RBL side, Cal_N on the RBLB side):
//     x = +1 (1) if V_BL + Cal_P >= V_BLB + Cal_N, else -1 (0)
// and the SR latch holds x until the next decision, giving the static node
// state that is fed back to the wordline drivers. A BL discharged more than
// its BLB therefore yields -1, as the SB update requires. Exact ties resolve
// to +1 here (a real latch resolves them randomly); reset gives -1. The
// comparator/SR-latch structure and calibration input follow the chip.
module sb_sa_comparator (
  input  logic clk,
  input  logic rst_n,
  input  logic fire,
  input  int   v_bl_uv,
  input  int   v_blb_uv,
  input  int   cal_p_uv,
  input  int   cal_n_uv,
  output logic x
);

  timeunit 1ps;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x <= 1'b0;
    else if (fire) x <= (longint'(v_bl_uv) + longint'(cal_p_uv)) >=
                           (longint'(v_blb_uv) + longint'(cal_n_uv));
  end

endmodule
