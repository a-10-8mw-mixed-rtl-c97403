// sb_iter_counter -- 12-bit iteration counter of the decaying-noise path.
// At every LoopClk (loop_en) the register adds DecayStep to itself, so the
// count grows with the number of SB iterations at a programmable rate; the
// count drives the scaling logic and through it the resistive noise DAC.
// clear restarts it at zero for a new run. The accumulate-DecayStep structure
// follows the chip; saturation at the maximum (instead of wrapping, which
// would restore full noise late in a run) is this design's choice.
// Timing: count updates on the clock edge ending a cycle with loop_en = 1.
module sb_iter_counter
  import sb_pkg::*;
#(
  parameter int W      = ITER_W,
  parameter int SW     = STEP_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              loop_en,
  input  logic [SW-1:0]     decay_step,
  output logic [W-1:0]      count
);

  timeunit 1ps;
  timeprecision 1ps;

  logic [W:0] sum;

  assign sum = {1'b0, count} + (W+1)'(decay_step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count <= '0;
    else if (clear)   count <= '0;
    else if (loop_en) count <= sum[W] ? '1 : sum[W-1:0];
  end

endmodule
