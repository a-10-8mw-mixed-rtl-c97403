// sb_bitline_pair -- behavioural model of one read-bitline pair (RBL, RBLB)
// with its precharge devices. While precharge is high both lines sit at VDD.
// Otherwise each line loses charge to the current its cells sink, and its
// voltage falls by dV = (1/C_BL) * integral(i dt); with the currents of the
// column's cells this realises dV_BL = dt_WL/C_BL * (i_BLB - i_BL) between
// the two lines. The currents are piecewise constant between simulation
// events, so the integral is summed exactly event by event from $time
// (1 ps units). A line cannot fall below 0 V.
// Units: current in nA, time in ps, capacitance in fF, voltage in uV
// (1 nA * 1 ps / 1 fF = 1 uV). The 200 fF and 1.8 V follow the chip; the
// absence of leakage is this design's simplification. Not synthesizable.
module sb_bitline_pair #(
  parameter int C_BL_FF = sb_pkg::C_BL_FF,
  parameter int VDD_MV  = sb_pkg::VDD_MV
) (
  input  logic precharge,
  input  int   i_bl_na,
  input  int   i_blb_na,
  output int   v_bl_uv,
  output int   v_blb_uv
);

  timeunit 1ps;
  timeprecision 1ps;

  localparam longint VDD_UV = longint'(VDD_MV) * 1000;

  localparam longint C_FF   = longint'(C_BL_FF);

  longint d_bl_uv;    // accumulated drop, RBL
  longint d_blb_uv;   // accumulated drop, RBLB
  longint t_last;
  longint i_bl_q;
  longint i_blb_q;
  logic   pre_q;

  initial begin
    d_bl_uv  = 0;
    d_blb_uv = 0;
    t_last   = 0;
    i_bl_q   = 0;
    i_blb_q  = 0;
    pre_q    = 1'b1;
  end

  always @(precharge, i_bl_na, i_blb_na) begin : integrate
    longint dt;
    dt = longint'($time) - t_last;
    if (!pre_q && dt > 0) begin
      d_bl_uv  = d_bl_uv  + (i_bl_q  * dt) / C_FF;
      d_blb_uv = d_blb_uv + (i_blb_q * dt) / C_FF;
      if (d_bl_uv  > VDD_UV) d_bl_uv  = VDD_UV;
      if (d_blb_uv > VDD_UV) d_blb_uv = VDD_UV;
    end
    if (precharge) begin
      d_bl_uv  = 0;
      d_blb_uv = 0;
    end
    t_last  = longint'($time);
    i_bl_q  = longint'(i_bl_na);
    i_blb_q = longint'(i_blb_na);
    pre_q   = precharge;
  end

  assign v_bl_uv  = int'(VDD_UV - d_bl_uv);
  assign v_blb_uv = int'(VDD_UV - d_blb_uv);

endmodule
