// sb_noise_dac -- behavioural model of the mixed-signal noise generation DAC
// that produces the gate voltage V_N of the noise-injection cells.
// Random part: a current mirror copies I_REF into four binary-weighted
// branches (8:4:2:1) switched by PRBS bits Noise[3:0], so the output current
// is uniformly distributed over 16 levels:
//     I = I_REF/16 * (8*N3 + 4*N2 + 2*N1 + N0)
// Decay part: the current flows into a resistor network: R_max (to V_min,
// always connected) in parallel with branches R, 2R, ... 128R switched by
// Decay[7] ... Decay[0]. Its conductance G = 1/R_max + Decay/(128*R) grows
// linearly with the decay code, so V_N = (I + V_min/R_max)/G falls as 1/Decay,
// the nonlinear decay the chip uses. V_N is limited to VDD. A new value is
// produced at each rising edge of precharge, which is when the chip triggers
// the DAC. Branch weights and the Decay-to-resistor mapping follow the chip;
// the I_REF/16 unit current and the resistor values are this design's
// numbers. Units: current nA, conductance nS, voltage mV. Not synthesizable.
module sb_noise_dac #(
  parameter int R_OHM    = 400,
  parameter int RMAX_OHM = 3200,
  parameter int V_MIN_MV = 0,
  parameter int VDD_MV   = sb_pkg::VDD_MV
) (
  input  logic       precharge,
  input  logic [3:0] noise_mag,
  input  logic [7:0] decay,
  input  int         i_ref_na,
  output int         v_n_mv
);

  timeunit 1ps;
  timeprecision 1ps;

  localparam longint RMAX = longint'(RMAX_OHM);
  localparam longint RUNIT = longint'(R_OHM) * 128;
  localparam longint VDD   = longint'(VDD_MV);

  int v_q;

  initial v_q = 0;

  function automatic int dac_mv(logic [3:0] code, logic [7:0] d, int iref);
    longint i_na, g_ns, v;
    i_na = (longint'(iref) * longint'(code)) / 16
         + (longint'(V_MIN_MV) * 64'd1000000) / RMAX;
    g_ns = 64'd1000000000 / RMAX
         + (longint'(d) * 64'd1000000000) / RUNIT;
    v = (i_na * 1000) / g_ns;
    if (v > VDD) v = VDD;
    if (v < 0)      v = 0;
    return int'(v);
  endfunction

  always @(posedge precharge) v_q <= dac_mv(noise_mag, decay, i_ref_na);

  assign v_n_mv = v_q;

endmodule
