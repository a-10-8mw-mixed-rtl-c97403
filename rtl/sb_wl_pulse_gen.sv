// sb_wl_pulse_gen -- behavioural model of the wordline pulse generator. The
// 100 MHz clock passes through a chain of STAGES buffers of delay TAU_PS each
// (on chip: capacitively loaded buffers); combining the clock with the
// inverse of its delayed copy gives a pulse that starts at every rising
// clock edge and lasts taps*TAU_PS. The input taps tunes the line by
// choosing which buffer output ends the pulse: taps = STAGES gives the
// nominal 4 ns, smaller values shorter pulses, 0 none; values above STAGES
// act as STAGES. en gates the pulse so only the evaluation cycle of each
// iteration fires the wordlines.
// The tunable delay line and the 4 ns width follow the chip; the stage
// count, the tap-select form of the tuning and the logic of the combining
// gate are this design's choice.
// Not synthesizable: the delays are '#' delays.
module sb_wl_pulse_gen #(
  parameter int STAGES = 8,
  parameter int TAU_PS = 500
) (
  input  logic clk,
  input  logic en,
  input  logic [$clog2(STAGES+1)-1:0] taps,
  output logic pulse
);

  timeunit 1ps;
  timeprecision 1ps;

  logic [STAGES:0] tap;
  logic            dly;

  assign tap[0] = clk;
  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    assign #(TAU_PS) tap[i+1] = tap[i];
  end

  // tuning: the pulse ends when the edge leaves buffer 'taps' (clamped to
  // the length of the line; 0 taps gives no pulse)
  always_comb begin
    dly = tap[STAGES];
    for (int i = 0; i <= STAGES; i++)
      if (i == int'(taps)) dly = tap[i];
  end

  assign pulse = en & clk & ~dly;

endmodule
