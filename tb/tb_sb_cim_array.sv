// tb_sb_cim_array -- writes a random matrix into an 8x8 array through the
// write wordlines/bitlines, then for random spin vectors, noise polarity and
// V_N applies one precharge and one 4 ns differential wordline pulse and
// checks every column's two bitline voltages against the MAC computed here:
//   I_BL[n]  = i_c*#{m != n: J_mn=1, x_m=+1} + i_fb*(J_nn & x_n=-1) + i_N*pol
//   I_BLB[n] = i_c*#{m != n: J_mn=1, x_m=-1} + i_fb*(J_nn & x_n=+1) + i_N*!pol
//   V = VDD - I * 4000 ps / 200 fF (floored at 0)
module tb_sb_cim_array;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 8;
  logic precharge = 1, rwl_n = 0, rwlb_n = 0;
  logic [N-1:0] wwl = '0, wbl = '0, wblb = '0, rwl = '0, rwlb = '0;
  int i_c = 1500, i_fb = 4000, v_n = 0;
  int v_bl [N], v_blb [N];
  logic [N-1:0] q_mat [N];
  logic [N-1:0] J [N];
  int checks = 0, failures = 0, floors = 0;

  sb_cim_array #(.N(N)) dut (.precharge, .wwl, .wbl, .wblb, .rwl, .rwlb, .rwl_n, .rwlb_n,
    .i_c_na(i_c), .i_fb_na(i_fb), .v_n_mv(v_n), .v_bl_uv(v_bl), .v_blb_uv(v_blb), .q_mat);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] x;
    logic pol;
    longint ibl, iblb, ebl, eblb;
    // program
    for (int m = 0; m < N; m++) begin
      J[m] = 8'($urandom);
      wbl = J[m]; wblb = ~J[m]; #100;
      wwl[m] = 1; #100; wwl[m] = 0; #100;
      wbl = '0; wblb = '0; #100;
    end
    for (int m = 0; m < N; m++) begin
      checks++;
      if (q_mat[m] != J[m]) failures++;
    end
    for (int t = 0; t < 200; t++) begin
      x   = 8'($urandom);
      pol = 1'($urandom);
      v_n = $urandom_range(0, 900);
      if (t % 10 == 9) begin        // overdrive: the floor at 0 V
        i_c = 40000; i_fb = 40000; v_n = 1800;
      end else begin
        i_c = $urandom_range(500, 3000); i_fb = $urandom_range(0, 6000);
      end
      precharge = 1; #3000;
      precharge = 0; #1000;
      rwl = x; rwlb = ~x; rwl_n = pol; rwlb_n = ~pol;
      #4000;
      rwl = '0; rwlb = '0; rwl_n = 0; rwlb_n = 0;
      #2000;
      for (int n = 0; n < N; n++) begin
        ibl = 0; iblb = 0;
        for (int m = 0; m < N; m++) begin
          if (J[m][n]) begin
            if (m == n) begin
              if (x[m]) iblb += i_fb; else ibl += i_fb;
            end else begin
              if (x[m]) ibl += i_c; else iblb += i_c;
            end
          end
        end
        if (pol) ibl += 2 * v_n; else iblb += 2 * v_n;
        ebl  = 1800000 - ibl * 4000 / 200;
        eblb = 1800000 - iblb * 4000 / 200;
        if (ebl < 0)  begin ebl = 0;  floors++; end
        if (eblb < 0) begin eblb = 0; floors++; end
        checks++;
        if (v_bl[n] != int'(ebl) || v_blb[n] != int'(eblb)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d: %0d/%0d expected %0d/%0d", t, n, v_bl[n], v_blb[n], ebl, eblb);
        end
      end
    end
    checks++;
    if (floors == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
