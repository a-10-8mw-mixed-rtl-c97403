// sb_wl_driver -- read-wordline drivers of the SB array, one per row plus the
// noise-injection row. For each row m a multiplexer (select En) takes either
// the initial state x_init[m] or the state fed back from comparator m; the
// wordline pulse is then steered to RWL[m] when the spin is +1 (logic 1) or to
// RWLB[m] when it is -1. So each row carries its spin as a differential pulse
// and no wordline pulses outside the pulse window. The noise row is steered
// the same way by PRBS bit Noise[4]. Purely combinational; the pulse width is
// set upstream by the delay-line pulse generator.
// The per-row mux, the differential RWL/RWLB encoding and the mapping
// "RWL pulses for x = +1" (from the cell truth table) follow the chip; the
// polarity of En and of Noise[4] are this design's choice.
module sb_wl_driver
  import sb_pkg::*;
#(
  parameter int N = N_SPINS
) (
  input  logic [N-1:0] x_init,
  input  logic [N-1:0] x_fb,
  input  logic         en_fb,
  input  logic         pulse,
  input  logic         noise_pol,
  output logic [N-1:0] x_cur,
  output logic [N-1:0] rwl,
  output logic [N-1:0] rwlb,
  output logic         rwl_n,
  output logic         rwlb_n
);

  timeunit 1ps;
  timeprecision 1ps;

  always_comb begin
    x_cur  = en_fb ? x_fb : x_init;
    rwl    = {N{pulse}} &  x_cur;
    rwlb   = {N{pulse}} & ~x_cur;
    rwl_n  = pulse &  noise_pol;
    rwlb_n = pulse & ~noise_pol;
  end

endmodule
