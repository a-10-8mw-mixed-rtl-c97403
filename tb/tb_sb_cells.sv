// tb_sb_cells -- truth tables of the coupling, self-feedback and noise cells:
// write through WWL/WBL/WBLB, hold when WWL is low or WBL == WBLB, and the
// current each cell sinks on RBL/RBLB for every (Q, RWL, RWLB) combination.
module tb_sb_cells;
  timeunit 1ps;
  timeprecision 1ps;

  logic wwl = 0, wbl = 0, wblb = 0, rwl = 0, rwlb = 0;
  int   i_unit = 1234, v_n = 0;
  int   c_bl, c_blb, f_bl, f_blb, n_bl, n_blb;
  logic c_q, f_q;
  int checks = 0, failures = 0;

  sb_c_cell  u_c (.wwl, .wbl, .wblb, .rwl, .rwlb, .i_unit_na(i_unit), .i_bl_na(c_bl), .i_blb_na(c_blb), .q(c_q));
  sb_fb_cell u_f (.wwl, .wbl, .wblb, .rwl, .rwlb, .i_unit_na(i_unit), .i_bl_na(f_bl), .i_blb_na(f_blb), .q(f_q));
  sb_noise_cell u_n (.rwl, .rwlb, .v_n_mv(v_n), .i_bl_na(n_bl), .i_blb_na(n_blb));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic write(logic d);
    wbl = d; wblb = ~d; #10;
    wwl = 1; #10;
    wwl = 0; #10;
    wbl = 0; wblb = 0; #10;
  endtask

  initial begin
    for (int q = 0; q < 2; q++) begin
      write(q[0]);
      expect_(c_q == q[0] && f_q == q[0], "write");
      // hold: WWL low with opposite data, WWL high with equal bitlines
      wbl = ~q[0]; wblb = q[0]; #10;
      wbl = 0; wblb = 0; wwl = 1; #10; wwl = 0; #10;
      expect_(c_q == q[0] && f_q == q[0], "hold");
      for (int w = 0; w < 3; w++) begin
        rwl = (w == 1); rwlb = (w == 2);
        #10;
        // coupling cell: RWL -> RBL, RWLB -> RBLB, only if Q=1
        expect_(c_bl  == ((q == 1 && w == 1) ? i_unit : 0), "C cell RBL");
        expect_(c_blb == ((q == 1 && w == 2) ? i_unit : 0), "C cell RBLB");
        // feedback cell: crossed
        expect_(f_bl  == ((q == 1 && w == 2) ? i_unit : 0), "FB cell RBL");
        expect_(f_blb == ((q == 1 && w == 1) ? i_unit : 0), "FB cell RBLB");
      end
    end
    // noise cell: current GM * V_N on the pulsed side, none for V_N <= 0
    for (int k = 0; k < 20; k++) begin
      v_n = $urandom_range(0, 1800) - 100;
      rwl = (k % 3 == 1); rwlb = (k % 3 == 2);
      #10;
      expect_(n_bl  == ((rwl  && v_n > 0) ? 2 * v_n : 0), "noise RBL");
      expect_(n_blb == ((rwlb && v_n > 0) ? 2 * v_n : 0), "noise RBLB");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
