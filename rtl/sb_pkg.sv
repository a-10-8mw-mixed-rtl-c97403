// sb_pkg -- constants and types shared by the simulated-bifurcation (SB) Ising
// solver. The solver updates N binary spins per iteration as
//   x[k+1] = sgn(alpha*x[k] - beta*J*x[k] + zeta[k])
// with the matrix-vector product done as a current-domain MAC in a 10-T SRAM
// array. Array size (64x64), the 12-bit iteration count, the 8-bit decay code,
// the 5 PRBS noise bits, the 100 MHz clock, the 4 ns wordline pulse, the 200 fF
// bitline and the 1.8 V supply follow the published chip. The serial scan
// frame and its command codes are this design's own choice.
package sb_pkg;

  timeunit 1ps;
  timeprecision 1ps;

  localparam int N_SPINS  = 64;    // rows = columns of the coupling array
  localparam int ROW_W    = $clog2(N_SPINS);
  localparam int ITER_W   = 12;    // iteration counter width
  localparam int DECAY_W  = 8;     // resistive-DAC decay code width
  localparam int NOISE_W  = 5;     // Noise[3:0] magnitude + Noise[4] polarity
  localparam int STEP_W   = 8;     // DecayStep width
  localparam int SHIFT_W  = 4;     // scaling-logic shift width
  localparam int LFSR_W   = 15;    // PRBS register length

  // Analog constants used by the behavioural models
  localparam int CLK_PS   = 10000; // 100 MHz reference clock
  localparam int PULSE_PS = 4000;  // read-wordline pulse width
  localparam int C_BL_FF  = 200;   // bitline capacitance
  localparam int VDD_MV   = 1800;  // supply

  // Serial scan chain: frame = {data, addr, cmd}, shifted in LSB first
  typedef enum logic [2:0] {
    CMD_NOP        = 3'd0,
    CMD_WRITE_ROW  = 3'd1,  // write data into array row addr
    CMD_SET_INIT   = 3'd2,  // data = initial spin vector x_i
    CMD_SET_CFG    = 3'd3,  // data = run configuration (sb_cfg_t)
    CMD_START      = 3'd4,  // start a solver run
    CMD_READ_STATE = 3'd5,  // capture {.., done, node states} for shift-out
    CMD_SET_SEED   = 3'd6   // data[LFSR_W-1:0] = PRBS seed
  } scan_cmd_e;

  localparam int FRAME_W = 3 + ROW_W + N_SPINS;

  typedef struct packed {
    logic [SHIFT_W-1:0] decay_shift; // scaling-logic right shift
    logic [STEP_W-1:0]  decay_step;  // DecayStep added per LoopClk
    logic [ITER_W-1:0]  num_iter;    // SB iterations per run
  } sb_cfg_t;

  localparam int CFG_W = $bits(sb_cfg_t);

endpackage
