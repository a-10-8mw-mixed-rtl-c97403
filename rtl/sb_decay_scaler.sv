// sb_decay_scaler -- "scaling logic" between the 12-bit iteration counter and
// the 8-bit decay code of the resistive noise DAC. The decay code is the
// count shifted right by a programmable amount and saturated to 8 bits, so
// the code rises monotonically with the iteration count at a selectable rate.
// Purely combinational. The 12-bit input and 8-bit output follow the chip;
// the shift-and-saturate mapping is this design's choice (the chip only says
// the decay value is an "adjusted" count).
module sb_decay_scaler
  import sb_pkg::*;
#(
  parameter int IN_W  = ITER_W,
  parameter int OUT_W = DECAY_W
) (
  input  logic [IN_W-1:0]    count,
  input  logic [SHIFT_W-1:0] shift,
  output logic [OUT_W-1:0]   decay
);

  timeunit 1ps;
  timeprecision 1ps;

  logic [IN_W-1:0] shifted;

  always_comb begin
    shifted = count >> shift;
    if (shifted > IN_W'({OUT_W{1'b1}})) decay = '1;
    else                                decay = shifted[OUT_W-1:0];
  end

endmodule
