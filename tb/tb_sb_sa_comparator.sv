// tb_sb_sa_comparator -- random bitline voltages and calibration offsets;
// the latch must only change at a clock edge with fire high, must give +1
// exactly when V_BL + Cal_P >= V_BLB + Cal_N and must hold otherwise.
module tb_sb_sa_comparator;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, rst_n = 0, fire = 0, x;
  int v_bl = 0, v_blb = 0, cal_p = 0, cal_n = 0;
  int checks = 0, failures = 0;
  logic model;

  sb_sa_comparator dut (.clk, .rst_n, .fire, .v_bl_uv(v_bl), .v_blb_uv(v_blb),
                        .cal_p_uv(cal_p), .cal_n_uv(cal_n), .x);

  always #5000 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0;
    repeat (2) @(posedge clk);
    checks++;
    if (x !== 1'b0) failures++;
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      v_bl  = $urandom_range(0, 1800000);
      v_blb = (i % 7 == 0) ? v_bl : $urandom_range(0, 1800000);
      cal_p = (i % 3 == 0) ? $urandom_range(0, 20000) : 0;
      cal_n = (i % 5 == 0) ? $urandom_range(0, 20000) : 0;
      fire  = $urandom_range(0, 2) != 0;
      @(posedge clk);
      if (fire) model = (v_bl + cal_p) >= (v_blb + cal_n);
      #1;
      checks++;
      if (x != model) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d x=%0d model=%0d", i, x, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
