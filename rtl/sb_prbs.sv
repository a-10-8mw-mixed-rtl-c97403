// sb_prbs -- pseudo-random bit sequence generator feeding the noise path.
// A Fibonacci LFSR (x^15 + x^14 + 1, maximal length 32767) advances once per
// PRC enable. Its five lowest bits are the noise outputs: Noise[3:0] select the
// binary-weighted current-mirror branches of the noise DAC and Noise[4] sets
// the wordline polarity of the noise-injection row.
// Timing: noise changes on the clock edge that ends a cycle with prc = 1.
// The five outputs and the XOR-feedback shift register follow the chip; the
// polynomial, length, bit order and reset seed are this design's choice.
module sb_prbs
  import sb_pkg::*;
#(
  parameter int W = LFSR_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               prc,        // advance one step
  input  logic               seed_load,  // load seed (has priority)
  input  logic [W-1:0]       seed,
  output logic [NOISE_W-1:0] noise
);

  timeunit 1ps;
  timeprecision 1ps;

  logic [W-1:0] lfsr;
  logic         fb;

  assign fb = lfsr[W-1] ^ lfsr[W-2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         lfsr <= '1;
    else if (seed_load) lfsr <= (seed == '0) ? '1 : seed;  // all-zero locks up
    else if (prc)       lfsr <= {lfsr[W-2:0], fb};
  end

  assign noise = lfsr[NOISE_W-1:0];

endmodule
