// sb_ising_top -- mixed-signal simulated-bifurcation Ising solver.
// Closed loop per iteration k (three 100 MHz cycles, 30 ns):
//   1. precharge : all read bitlines to VDD; the noise DAC takes a new random
//                  code and the current decay code and sets V_N; the PRBS steps
//   2. evaluate  : a 4 ns wordline pulse carries every spin x_m onto RWL/RWLB
//                  of its row and the PRBS polarity onto the noise row; every
//                  column sums coupling, self-feedback and noise currents on
//                  its bitline pair (the MAC of the SB update)
//   3. decide    : on the rising edge that starts this cycle every column's
//                  strong-arm comparator takes sgn(V_BL - V_BLB) as x_n(k+1),
//                  held in its SR latch and routed back to the row drivers
// An external host uses the serial scan chain to write J (with ones on the
// diagonal for the self-feedback cells) row by row, to set the initial spins,
// the iteration count, the noise decay rate and the PRBS seed, to start a
// run and to read back the spins (also visible on node_state).
// Analog bias inputs are numbers: i_c_na / i_fb_na are the per-cell currents
// set on chip by V_bias,C / V_bias,FB (beta / alpha), i_ref_na is I_REF of the
// noise DAC (noise strength), cal_p_uv / cal_n_uv the comparator calibration
// differential, wl_taps the wordline pulse width in 500 ps delay-line stages
// (8 for the nominal 4 ns). The block structure follows the chip; the scan frame, the
// three-phase sequence encoding and all analog numbers are this design's.
// Mixed: the digital control is synthesizable, the array, noise DAC, pulse
// generator and comparators are behavioural models.
module sb_ising_top
  import sb_pkg::*;
#(
  parameter int N = N_SPINS
) (
  input  logic         clk,
  input  logic         rst_n,
  // serial scan chain
  input  logic         scan_en,
  input  logic         scan_in,
  input  logic         scan_update,
  output logic         scan_out,
  // analog biases and calibration
  input  int           i_c_na,
  input  int           i_fb_na,
  input  int           i_ref_na,
  input  int           cal_p_uv,
  input  int           cal_n_uv,
  // wordline pulse width: delay-line stages of 500 ps (8 = 4 ns)
  input  logic [3:0]   wl_taps,
  // observation
  output logic [N-1:0] node_state,
  output logic         busy,
  output logic         done,
  output logic [ITER_W-1:0] iter_count,
  output int           v_n_mv
);

  timeunit 1ps;
  timeprecision 1ps;

  localparam int AW = $clog2(N);

  // scan chain outputs
  logic              wr_valid;
  logic [AW-1:0]     wr_row;
  logic [N-1:0]      wr_data;
  logic [N-1:0]      x_init;
  sb_cfg_t           cfg;
  logic              seed_load;
  logic [LFSR_W-1:0] seed;
  logic              start;

  // SRAM write port
  logic [N-1:0] wwl, wbl, wblb;
  logic         wr_busy;

  // sequencing
  logic precharge, wl_en, loop_en, prc, en_fb, iter_clear;
  logic [ITER_W-1:0] iter_idx;

  // noise path
  logic [NOISE_W-1:0] noise;
  logic [DECAY_W-1:0] decay;

  // loop
  logic         pulse;
  logic [N-1:0] x_cur, rwl, rwlb;
  logic         rwl_n, rwlb_n;
  int           v_bl_uv  [N];
  int           v_blb_uv [N];
  logic [N-1:0] q_mat    [N];

  sb_scan_chain #(.N(N)) u_scan (
    .clk, .rst_n, .scan_en, .scan_in, .scan_update, .scan_out,
    .wr_valid, .wr_row, .wr_data, .x_init, .cfg, .seed_load, .seed, .start,
    .node_state, .busy, .done);

  sb_sram_ctrl #(.N(N)) u_sram_ctrl (
    .clk, .rst_n, .wr_valid, .wr_row, .wr_data, .wwl, .wbl, .wblb, .busy(wr_busy));

  sb_controller u_ctrl (
    .clk, .rst_n, .start, .num_iter(cfg.num_iter), .precharge, .wl_en, .loop_en,
    .prc, .en_fb, .iter_clear, .busy, .done, .iter_idx);

  sb_prbs u_prbs (
    .clk, .rst_n, .prc, .seed_load, .seed, .noise);

  sb_iter_counter u_iter (
    .clk, .rst_n, .clear(iter_clear), .loop_en, .decay_step(cfg.decay_step),
    .count(iter_count));

  sb_decay_scaler u_scale (
    .count(iter_count), .shift(cfg.decay_shift), .decay);

  sb_noise_dac u_dac (
    .precharge, .noise_mag(noise[3:0]), .decay, .i_ref_na, .v_n_mv);

  sb_wl_pulse_gen u_pulse (
    .clk, .en(wl_en), .taps(wl_taps), .pulse);

  sb_wl_driver #(.N(N)) u_wl (
    .x_init, .x_fb(node_state), .en_fb, .pulse, .noise_pol(noise[4]),
    .x_cur, .rwl, .rwlb, .rwl_n, .rwlb_n);

  sb_cim_array #(.N(N)) u_array (
    .precharge, .wwl, .wbl, .wblb, .rwl, .rwlb, .rwl_n, .rwlb_n,
    .i_c_na, .i_fb_na, .v_n_mv, .v_bl_uv, .v_blb_uv, .q_mat);

  for (genvar n = 0; n < N; n++) begin : g_cmp
    sb_sa_comparator u_cmp (
      .clk, .rst_n, .fire(loop_en), .v_bl_uv(v_bl_uv[n]), .v_blb_uv(v_blb_uv[n]),
      .cal_p_uv, .cal_n_uv, .x(node_state[n]));
  end

endmodule
