// tb_sb_wl_pulse_gen -- 100 MHz clock with the enable toggled per cycle the
// way the controller drives it, and the delay-line tuning stepped through
// 8, 6, 3, 1, 0 and 12 taps. Every pulse is measured: it must start at the
// enabled rising clock edge, last taps x 500 ps (12 is clamped to the 8
// stages of the line, 0 gives no pulse), and no pulse may appear in a
// disabled cycle.
module tb_sb_wl_pulse_gen;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, en = 0, pulse;
  logic [3:0] taps = 4'd8;
  int checks = 0, failures = 0, n_pulses = 0, n_expected = 0;
  time t_rise, t_edge;

  sb_wl_pulse_gen dut (.*);

  always #5000 clk = ~clk;

  function automatic time width_of(logic [3:0] t);
    return (t > 8 ? 8 : t) * 500;
  endfunction

  always @(posedge clk) begin
    t_edge <= $time;
  end

  always @(posedge pulse) begin
    t_rise = $time;
  end

  always @(negedge pulse) begin
    if ($time > t_rise) begin        // ignore zero-width glitches
      n_pulses++;
      checks += 2;
      if ($time - t_rise != width_of(taps)) begin
        failures++;
        $display("FAIL width %0t with %0d taps", $time - t_rise, taps);
      end
      if (t_rise != t_edge) begin
        failures++;
        $display("FAIL start %0t vs edge %0t", t_rise, t_edge);
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [3:0] SETTINGS [6] = '{4'd8, 4'd6, 4'd3, 4'd1, 4'd0, 4'd12};

  initial begin
    repeat (3) @(posedge clk);
    for (int i = 0; i < 360; i++) begin
      if (i % 60 == 0) taps <= SETTINGS[i / 60];
      en <= (i % 3 == 1) || (i % 60 > 40 && i % 2 == 0);
      @(posedge clk);
      if (en && taps != 0) n_expected++;
    end
    en <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_pulses != n_expected) begin
      failures++;
      $display("FAIL pulses %0d expected %0d", n_pulses, n_expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
