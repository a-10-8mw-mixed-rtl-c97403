// sb_cim_array -- behavioural model of the N x N 10-T SRAM compute-in-memory
// array with its row of 4-T noise-injection cells and the precharged read
// bitline pairs. Row m carries spin x_m on RWL[m]/RWLB[m]; column n collects
// the currents of its N cells (the diagonal one, m == n, is a self-feedback
// cell, all others coupling cells) plus its noise cell, on RBL[n] and RBLB[n].
// During the wordline pulse these currents discharge the bitline pair, so
// after the pulse
//   V_BLB[n] - V_BL[n] ~ (t_pulse/C_BL) * ( i_fb*J_nn*x_n - i_c*sum_m J_mn*x_m
//                                          + noise )
// which is the argument of sgn() in the SB update. Cells are written through
// WWL (one row at a time) and WBL/WBLB (one per column). The cell currents
// i_c_na and i_fb_na stand for the effect of V_bias,C and V_bias,FB; v_n_mv
// is the noise DAC output V_N. q_mat exposes the stored bits for observation.
// The array organisation, cell placement and shared bias lines follow the
// chip; currents are this design's numbers. Not synthesizable.
module sb_cim_array #(
  parameter int N = sb_pkg::N_SPINS,
  parameter int GM_NA_PER_MV = 2
) (
  input  logic         precharge,
  input  logic [N-1:0] wwl,
  input  logic [N-1:0] wbl,
  input  logic [N-1:0] wblb,
  input  logic [N-1:0] rwl,
  input  logic [N-1:0] rwlb,
  input  logic         rwl_n,
  input  logic         rwlb_n,
  input  int           i_c_na,
  input  int           i_fb_na,
  input  int           v_n_mv,
  output int           v_bl_uv  [N],
  output int           v_blb_uv [N],
  output logic [N-1:0] q_mat    [N]
);

  timeunit 1ps;
  timeprecision 1ps;

  int cell_bl  [N][N];   // [row][col]
  int cell_blb [N][N];
  int nz_bl    [N];
  int nz_blb   [N];
  int col_bl   [N];
  int col_blb  [N];

  for (genvar m = 0; m < N; m++) begin : g_row
    for (genvar n = 0; n < N; n++) begin : g_col
      if (m == n) begin : g_fb
        sb_fb_cell u_cell (
          .wwl(wwl[m]), .wbl(wbl[n]), .wblb(wblb[n]), .rwl(rwl[m]), .rwlb(rwlb[m]),
          .i_unit_na(i_fb_na), .i_bl_na(cell_bl[m][n]), .i_blb_na(cell_blb[m][n]),
          .q(q_mat[m][n]));
      end else begin : g_c
        sb_c_cell u_cell (
          .wwl(wwl[m]), .wbl(wbl[n]), .wblb(wblb[n]), .rwl(rwl[m]), .rwlb(rwlb[m]),
          .i_unit_na(i_c_na), .i_bl_na(cell_bl[m][n]), .i_blb_na(cell_blb[m][n]),
          .q(q_mat[m][n]));
      end
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_column
    sb_noise_cell #(.GM_NA_PER_MV(GM_NA_PER_MV)) u_noise (
      .rwl(rwl_n), .rwlb(rwlb_n), .v_n_mv(v_n_mv),
      .i_bl_na(nz_bl[n]), .i_blb_na(nz_blb[n]));

    always_comb begin
      col_bl[n]  = nz_bl[n];
      col_blb[n] = nz_blb[n];
      for (int m = 0; m < N; m++) begin
        col_bl[n]  += cell_bl[m][n];
        col_blb[n] += cell_blb[m][n];
      end
    end

    sb_bitline_pair u_bl (
      .precharge(precharge), .i_bl_na(col_bl[n]), .i_blb_na(col_blb[n]),
      .v_bl_uv(v_bl_uv[n]), .v_blb_uv(v_blb_uv[n]));
  end

endmodule
