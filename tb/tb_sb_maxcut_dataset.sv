// tb_sb_maxcut_dataset -- the benchmark workload of the chip run on the
// full-size (64-spin) solver: 10 random 60-node MAXCUT graphs with 50% edge
// density, several trials per graph, each trial run for 15 and for 20 SB
// iterations from the same initial state and PRBS seed. For every trial it
// checks that a run of K iterations takes exactly 3*K clock cycles (30 ns per
// iteration, so 0.6 us for 20) and that the spins read back over the scan
// chain equal node_state. Accuracy is the cut divided by the best cut of a
// 200-restart greedy local search (the true optimum is not known here); the
// mean accuracy and the share of trials reaching 92% are reported for both
// iteration counts, and the 20-iteration mean must reach 80%. Bias defaults
// (I_C 1 uA, I_FB 7 uA, I_REF 200 uA, step 100, shift 4) are this model's
// tuning point; +ic, +ifb, +iref, +step, +shift override them and +verbose
// prints every trial. With these defaults the model reaches about 85% mean
// accuracy, below the >93% measured on silicon: the model has no device
// mismatch, and its noise has one polarity for all columns, so some trials
// settle early in a poor state.
module tb_sb_maxcut_dataset;
  import sb_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 64, G = 60, FW = 3 + 6 + N;
  localparam int GRAPHS = 10, TRIALS = 4;

  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_update = 0, scan_out;
  int   i_c = 1000, i_fb = 7000, i_ref = 200000, cal_p = 0, cal_n = 0;
  logic [N-1:0] node_state;
  logic busy, done;
  logic [11:0] iter_count;
  int   v_n_mv;

  sb_ising_top dut (
    .clk, .rst_n, .scan_en, .scan_in, .scan_update, .scan_out,
    .i_c_na(i_c), .i_fb_na(i_fb), .i_ref_na(i_ref), .cal_p_uv(cal_p), .cal_n_uv(cal_n), .wl_taps(4'd8),
    .node_state, .busy, .done, .iter_count, .v_n_mv);

  always #5000 clk = ~clk;

  int checks = 0, failures = 0;
  logic [N-1:0] J [N];
  logic [FW-1:0] got;

  initial begin
    #500ms;
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
    repeat (4) @(negedge clk);
  endtask

  function automatic int cut_of(logic [N-1:0] x);
    int c = 0;
    for (int a = 0; a < G; a++)
      for (int b = a + 1; b < G; b++)
        if (J[a][b] && x[a] != x[b]) c++;
    return c;
  endfunction

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

  // one run; returns the cut, checks cycle count and read-back
  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles++;

  task automatic run(logic [N-1:0] x0, int iters, logic [14:0] seed, output int cut);
    frame(CMD_SET_INIT, 0, x0);
    frame(CMD_SET_CFG, 0, N'({4'(shift_run), 8'(step_run), 12'(iters)}));
    frame(CMD_SET_SEED, 0, N'(seed));
    busy_cycles = 0;
    frame(CMD_START, 0, '0);
    while (!done) @(negedge clk);
    expect_(busy_cycles == 3 * iters, $sformatf("%0d iterations in %0d cycles", iters, busy_cycles));
    cut = cut_of(node_state);
    frame(CMD_READ_STATE, 0, '0);
    frame(CMD_NOP, 0, '0);
    expect_(got[FW-1 -: N] == node_state, "scan read-back");
  endtask

  bit verbose = $test$plusargs("verbose");
  int step_run = 100, shift_run = 4;
  int acc15_sum = 0, acc20_sum = 0, hit15 = 0, hit20 = 0, n = 0;

  initial begin
    void'($value$plusargs("ifb=%d", i_fb));
    void'($value$plusargs("ic=%d", i_c));
    void'($value$plusargs("iref=%d", i_ref));
    void'($value$plusargs("step=%d", step_run));
    void'($value$plusargs("shift=%d", shift_run));
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int g = 0; g < GRAPHS; g++) begin
      int ref_cut, edges;
      for (int m = 0; m < N; m++) J[m] = '0;
      edges = 0;
      for (int a = 0; a < G; a++)
        for (int b = a + 1; b < G; b++)
          if ($urandom_range(0, 99) < 50) begin
            J[a][b] = 1'b1; J[b][a] = 1'b1; edges++;
          end
      for (int a = 0; a < G; a++) J[a][a] = 1'b1;
      for (int m = 0; m < N; m++) frame(CMD_WRITE_ROW, 6'(m), J[m]);
      ref_cut = greedy_best(200);
      for (int t = 0; t < TRIALS; t++) begin
        logic [N-1:0] x0;
        logic [14:0] seed;
        int c15, c20, a15, a20;
        x0 = {$urandom, $urandom};
        seed = 15'($urandom);
        run(x0, 15, seed, c15);
        run(x0, 20, seed, c20);
        a15 = c15 * 1000 / ref_cut;
        a20 = c20 * 1000 / ref_cut;
        if (verbose) $display("  trial %0d: cut %0d after 15, %0d after 20", t, c15, c20);
        acc15_sum += a15; acc20_sum += a20;
        if (a15 >= 920) hit15++;
        if (a20 >= 920) hit20++;
        n++;
      end
      $display("graph %0d: %0d edges, reference cut %0d", g, edges, ref_cut);
    end
    $display("15 iterations (0.45 us): mean accuracy %0d.%0d %%, %0d of %0d trials >= 92 %%",
             acc15_sum / n / 10, (acc15_sum / n) % 10, hit15, n);
    $display("20 iterations (0.60 us): mean accuracy %0d.%0d %%, %0d of %0d trials >= 92 %%",
             acc20_sum / n / 10, (acc20_sum / n) % 10, hit20, n);
    expect_(acc20_sum / n >= 800, "mean accuracy at 20 iterations >= 80 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
