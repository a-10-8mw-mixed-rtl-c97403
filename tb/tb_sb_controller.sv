// tb_sb_controller -- runs the sequencer for several iteration counts and
// checks, cycle by cycle, the three-phase pattern (precharge, pulse+LoopClk,
// settle), the 30 ns (3-cycle) iteration period, En switching to feedback
// after the first decision, done after exactly 3*num_iter cycles, and that
// num_iter = 0 and start-while-busy are ignored.
module tb_sb_controller;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, rst_n = 0, start = 0;
  logic [11:0] num_iter = '0, iter_idx;
  logic precharge, wl_en, loop_en, prc, en_fb, iter_clear, busy, done;
  int checks = 0, failures = 0;

  sb_controller dut (.*);

  always #5000 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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

  task automatic run(int n);
    int loops;
    time t_first, t_last_loop;
    @(negedge clk);
    num_iter = 12'(n);
    start = 1;
    #1;
    expect_(iter_clear == 1, "iter_clear with start");
    @(negedge clk);
    start = 0;
    loops = 0;
    for (int c = 0; c < 3 * n; c++) begin
      // phase c%3 : 0 PRE, 1 EVAL, 2 SETTLE
      expect_(busy == 1, "busy");
      expect_(precharge == (c % 3 == 0), "precharge phase");
      expect_(prc == (c % 3 == 0), "prc phase");
      expect_(wl_en == (c % 3 == 1), "wl_en phase");
      expect_(loop_en == (c % 3 == 1), "loop_en phase");
      expect_(en_fb == (c >= 2), "En select");
      expect_(iter_idx == 12'(c / 3), "iteration index");
      if (c == 1) start = 1;      // start while busy: ignored
      if (loop_en) begin
        if (loops == 0) t_first = $time;
        t_last_loop = $time;
        loops++;
      end
      @(negedge clk);
      start = 0;
    end
    expect_(busy == 0 && done == 1, "done after 3*num_iter cycles");
    expect_(loops == n, "one LoopClk per iteration");
    if (n > 1) expect_((t_last_loop - t_first) == time'((n - 1) * 30000), "30 ns per iteration");
    repeat (3) begin
      @(negedge clk);
      expect_(busy == 0 && loop_en == 0 && precharge == 0, "stays idle");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    run(1);
    run(5);
    run(20);
    // num_iter = 0 is ignored
    @(negedge clk);
    num_iter = 0; start = 1;
    @(negedge clk);
    start = 0;
    expect_(busy == 0, "num_iter 0 ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
