// tb_sb_ising_top -- end-to-end test of the full-size (64-spin) solver, driven
// only through its scan chain and bias ports, the way a host would drive the
// chip. For every run it writes the whole array (J plus ones on the diagonal,
// zeros in unused rows), sets the initial spins, configuration and PRBS seed,
// starts the run and, at every LoopClk decision, recomputes each column's
// bitline voltages from the SB update equation and compares the resulting
// spin with the chip's. Runs:
//   1. 60-node complete bipartite graph K30,30, no noise (known max cut 900)
//   2. 60-node random graph, 50% density, with decaying noise
//   3. same graph with a comparator calibration offset
//   3b. a shorter (3 ns) wordline pulse set through the delay-line taps
//   4. heavy cell current so that bitlines bottom out at 0 V
//   5. three trials on each of 2 random 60-node graphs; the best of each
//      three must reach 88% of the cut found by a greedy local search
// It counts each mechanism (precharge/pulse iterations, feedback select, both
// noise polarities, noise decay, bitline floor, calibration changing a
// decision, scan read-back, shortened pulse) and fails if one never happened.
module tb_sb_ising_top;
  import sb_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N  = 64;
  localparam int G  = 60;          // graph size used by the chip's benchmarks
  localparam int FW = 3 + 6 + N;

  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_update = 0, scan_out;
  int   i_c = 1000, i_fb = 7000, i_ref = 0, cal_p = 0, cal_n = 0;
  logic [N-1:0] node_state;
  logic busy, done;
  logic [11:0] iter_count;
  int   v_n_mv;
  logic [3:0] taps = 4'd8;         // wordline pulse: 8 x 500 ps = 4 ns

  sb_ising_top dut (
    .clk, .rst_n, .scan_en, .scan_in, .scan_update, .scan_out,
    .i_c_na(i_c), .i_fb_na(i_fb), .i_ref_na(i_ref), .cal_p_uv(cal_p), .cal_n_uv(cal_n), .wl_taps(taps),
    .node_state, .busy, .done, .iter_count, .v_n_mv);

  always #5000 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_iter = 0, n_fb_sel = 0, n_pol_pos = 0, n_pol_neg = 0, n_decay = 0;
  int n_floor = 0, n_cal_flip = 0, n_readback = 0, n_noise_flip = 0, n_short = 0;

  logic [N-1:0] J [N];
  logic [N-1:0] x_model;
  logic [FW-1:0] got;
  logic         checking = 0;
  int           first_vn, last_vn;

  initial begin
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- host side ----------------
  task automatic frame(logic [2:0] cmd, logic [5:0] addr, logic [N-1:0] data);
    logic [FW-1:0] f;
    f = {data, addr, cmd};
    for (int i = 0; i < FW; i++) begin
      @(negedge clk);
      scan_en = 1; scan_in = f[i];
      got[i] = scan_out;
    end
    @(negedge clk);
    scan_en = 0; scan_update = 1;
    @(negedge clk);
    scan_update = 0;
    repeat (4) @(negedge clk);     // let a row write finish
  endtask

  task automatic program_array();
    for (int m = 0; m < N; m++) frame(CMD_WRITE_ROW, 6'(m), J[m]);
    for (int m = 0; m < N; m++)
      expect_(dut.u_array.q_mat[m] == J[m], "array contents");
  endtask

  task automatic run(logic [N-1:0] x0, int iters, int step, int shift, logic [14:0] seed);
    frame(CMD_SET_INIT, 0, x0);
    frame(CMD_SET_CFG, 0, N'({4'(shift), 8'(step), 12'(iters)}));
    frame(CMD_SET_SEED, 0, N'(seed));
    x_model  = x0;
    first_vn = -1;
    checking = 1;
    frame(CMD_START, 0, '0);
    while (!done) @(negedge clk);
    checking = 0;
    expect_(node_state == x_model, "final state");
    frame(CMD_READ_STATE, 0, '0);
    frame(CMD_NOP, 0, '0);
    expect_(got[FW-1 -: N] == node_state && got[1] == 1'b1, "scan read-back");
    n_readback++;
  endtask

  // ---------------- reference model of one SB iteration ----------------
  function automatic logic decide(int n, logic [N-1:0] x, int vn, logic pol, int calp, int caln,
                                  output logic floored);
    longint ibl, iblb, vbl, vblb;
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
    if (pol) ibl += 2 * vn; else iblb += 2 * vn;
    // dV = I * t / 200 fF with t = taps * 500 ps (uV per nA: 20 at 4 ns)
    vbl  = 1800000 - ibl * longint'(taps) * 500 / 200;
    vblb = 1800000 - iblb * longint'(taps) * 500 / 200;
    floored = (vbl < 0) || (vblb < 0);
    if (vbl < 0)  vbl = 0;
    if (vblb < 0) vblb = 0;
    return (vbl + calp) >= (vblb + caln);
  endfunction

  // check every decision of the loop
  always @(posedge clk) begin
    if (checking && dut.loop_en) begin : chk
      logic [N-1:0] x_next;
      logic pol, fl, d0, dn;
      int   vn;
      pol = dut.noise[4];
      vn  = v_n_mv;
      expect_(dut.u_ctrl.en_fb == (n_iter_run != 0), "En select");
      if (dut.u_ctrl.en_fb) n_fb_sel++;
      if (taps != 4'd8) n_short++;
      if (vn > 0) begin
        if (pol) n_pol_pos++; else n_pol_neg++;
      end
      if (first_vn < 0) first_vn = vn;
      last_vn = vn;
      for (int n = 0; n < N; n++) begin
        x_next[n] = decide(n, x_model, vn, pol, cal_p, cal_n, fl);
        if (fl) n_floor++;
        d0 = decide(n, x_model, vn, pol, 0, 0, fl);
        if (d0 != x_next[n]) n_cal_flip++;
        dn = decide(n, x_model, 0, pol, cal_p, cal_n, fl);
        if (dn != x_next[n]) n_noise_flip++;
      end
      #1;
      expect_(node_state == x_next, $sformatf("iteration %0d decision", n_iter_run));
      x_model = x_next;
      n_iter++;
      n_iter_run++;
    end
  end

  int n_iter_run;
  always @(posedge clk) if (dut.u_ctrl.iter_clear) n_iter_run <= 0;

  // ---------------- graphs ----------------
  function automatic int cut_of(logic [N-1:0] x);
    int c = 0;
    for (int a = 0; a < G; a++)
      for (int b = a + 1; b < G; b++)
        if (J[a][b] && x[a] != x[b]) c++;
    return c;
  endfunction

  task automatic random_graph(int density_pct);
    for (int m = 0; m < N; m++) J[m] = '0;
    for (int a = 0; a < G; a++)
      for (int b = a + 1; b < G; b++)
        if ($urandom_range(0, 99) < density_pct) begin
          J[a][b] = 1'b1;
          J[b][a] = 1'b1;
        end
    for (int a = 0; a < G; a++) J[a][a] = 1'b1;   // self-feedback cells
  endtask

  // best cut from many greedy single-flip descents (reference for accuracy)
  function automatic int greedy_best(int restarts);
    int best = 0;
    for (int r = 0; r < restarts; r++) begin
      logic [N-1:0] x;
      logic improved;
      x = {$urandom, $urandom};
      do begin
        improved = 0;
        for (int a = 0; a < G; a++) begin
          int gain = 0;
          for (int b = 0; b < G; b++)
            if (b != a && J[a][b]) gain += (x[a] == x[b]) ? 1 : -1;
          if (gain > 0) begin
            x[a] = ~x[a];
            improved = 1;
          end
        end
      end while (improved);
      if (cut_of(x) > best) best = cut_of(x);
    end
    return best;
  endfunction

  int cut, best_cut, ref_cut, sum_acc, n_trials;
  int fb_run = 7000, iref_run = 200000, step_run = 100, shift_run = 4;

  initial begin
    logic [N-1:0] part;
    void'($value$plusargs("ifb=%d", fb_run));
    void'($value$plusargs("iref=%d", iref_run));
    void'($value$plusargs("step=%d", step_run));
    void'($value$plusargs("shift=%d", shift_run));
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. K30,30, no noise
    part = '0;
    for (int a = 0; a < G; a++) part[a] = (a % 2);
    for (int m = 0; m < N; m++) J[m] = '0;
    for (int a = 0; a < G; a++) begin
      for (int b = 0; b < G; b++) if (part[a] != part[b]) J[a][b] = 1'b1;
      J[a][a] = 1'b1;
    end
    program_array();
    i_ref = 0;
    run({$urandom, $urandom}, 20, 0, 0, 15'h1);
    cut = cut_of(node_state);
    $display("K30,30 without noise: cut %0d of 900", cut);
    expect_(cut == 900, "K30,30 ground state found");

    // 2. random 50% graph with decaying noise
    random_graph(50);
    program_array();
    i_ref = iref_run; i_fb = fb_run;
    run({$urandom, $urandom}, 20, step_run, shift_run, 15'h5a5a);
    expect_(last_vn < first_vn || first_vn == 0, "noise decays");
    if (last_vn < first_vn) n_decay++;
    $display("random graph: cut %0d, V_N %0d mV -> %0d mV", cut_of(node_state), first_vn, last_vn);

    // 3. calibration offset
    cal_p = 30000; cal_n = 0;
    run({$urandom, $urandom}, 10, 200, 4, 15'h0f0f);
    cal_p = 0;

    // 3b. shorter wordline pulse from the tunable delay line (3 ns)
    taps = 4'd6;
    run({$urandom, $urandom}, 8, 100, 4, 15'h0123);
    taps = 4'd8;

    // 4. bitline floor
    i_c = 40000; i_fb = 40000;
    run({$urandom, $urandom}, 4, 0, 0, 15'h3);
    i_c = 1000; i_fb = fb_run;

    // 5. MAXCUT quality on random graphs
    sum_acc = 0; n_trials = 0;
    for (int g = 0; g < 2; g++) begin
      random_graph(50);
      program_array();
      ref_cut = greedy_best(200);
      best_cut = 0;
      for (int t = 0; t < 3; t++) begin
        run({$urandom, $urandom}, 20, step_run, shift_run, 15'($urandom));
        cut = cut_of(node_state);
        if (cut > best_cut) best_cut = cut;
        sum_acc += (cut * 1000) / ref_cut;
        n_trials++;
        $display("graph %0d trial %0d: cut %0d, reference %0d", g, t, cut, ref_cut);
      end
      expect_(best_cut * 100 >= ref_cut * 88, "best of 3 trials at least 88% of the greedy reference");
    end
    $display("mean accuracy vs. greedy reference: %0d.%0d %%", sum_acc / n_trials / 10, (sum_acc / n_trials) % 10);

    $display("mechanisms: iterations=%0d feedback=%0d pol+=%0d pol-=%0d decay=%0d floor=%0d cal_flip=%0d noise_flip=%0d readback=%0d short_pulse=%0d",
             n_iter, n_fb_sel, n_pol_pos, n_pol_neg, n_decay, n_floor, n_cal_flip, n_noise_flip, n_readback, n_short);
    expect_(n_iter > 0,       "iterations ran");
    expect_(n_fb_sel > 0,     "feedback select used");
    expect_(n_pol_pos > 0,    "noise injected on RBL");
    expect_(n_pol_neg > 0,    "noise injected on RBLB");
    expect_(n_decay > 0,      "noise decay");
    expect_(n_floor > 0,      "bitline floor reached");
    expect_(n_cal_flip > 0,   "calibration changed a decision");
    expect_(n_noise_flip > 0, "noise changed a decision");
    expect_(n_readback > 0,   "scan read-back");
    expect_(n_short > 0,      "shortened wordline pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
