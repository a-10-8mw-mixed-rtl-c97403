// tb_sb_prbs -- checks the PRBS generator against an independent model of
// x^15 + x^14 + 1 (computed as a Galois-free bit loop), including hold
// without prc, seed loading, the zero-seed guard and the full 32767 period.
module tb_sb_prbs;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, rst_n = 0, prc = 0, seed_load = 0;
  logic [14:0] seed = '0;
  logic [4:0]  noise;
  int checks = 0, failures = 0;

  sb_prbs dut (.*);

  always #5000 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [14:0] step(logic [14:0] s);
    logic b;
    b = s[14] ^ s[13];
    return {s[13:0], b};
  endfunction

  task automatic check(logic [14:0] m, string what);
    checks++;
    if (noise !== m[4:0]) begin
      failures++;
      $display("FAIL %s: noise=%h expected=%h", what, noise, m[4:0]);
    end
  endtask

  logic [14:0] model;
  logic [14:0] start_state;
  int period;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    model = '1;
    @(negedge clk);
    check(model, "reset");
    // advance 300 steps with prc randomly on/off
    for (int i = 0; i < 300; i++) begin
      prc = $urandom_range(0, 1);
      @(posedge clk);
      if (prc) model = step(model);
      @(negedge clk);
      check(model, "step");
    end
    // seed load
    prc = 1; seed_load = 1; seed = 15'h1234;
    @(posedge clk); @(negedge clk);
    model = 15'h1234; check(model, "seed");
    seed = 15'h0;
    @(posedge clk); @(negedge clk);
    model = '1; check(model, "zero seed");
    seed_load = 0;
    // full period: returns to the start state after exactly 32767 steps
    start_state = dut.lfsr;
    period = 0;
    do begin
      @(posedge clk); @(negedge clk);
      period++;
    end while (dut.lfsr != start_state && period < 40000);
    checks++;
    if (period != 32767) begin
      failures++;
      $display("FAIL period %0d", period);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
