// tb_sb_noise_dac -- checks V_N against the resistor/current-mirror equation
// evaluated in real arithmetic: V_N = min(VDD, I_REF/16*code / G), with
// G = 1/3200 + decay/(128*400) siemens, for random codes and decay values;
// the value must only change at a rising edge of precharge, must be uniform
// over the 16 codes, and must fall as the decay code grows.
module tb_sb_noise_dac;
  timeunit 1ps;
  timeprecision 1ps;

  logic precharge = 0;
  logic [3:0] noise_mag = 0;
  logic [7:0] decay = 0;
  int i_ref = 300000, v_n;
  int checks = 0, failures = 0;

  sb_noise_dac dut (.precharge, .noise_mag, .decay, .i_ref_na(i_ref), .v_n_mv(v_n));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ref_mv(int code, int d, int iref);
    real i, g, v;
    i = iref * 1.0e-9 * code / 16.0;
    g = 1.0 / 3200.0 + d / (128.0 * 400.0);
    v = i / g * 1000.0;
    if (v > 1800.0) v = 1800.0;
    return v;
  endfunction

  task automatic expect_(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t v_n=%0d", what, $time, v_n);
    end
  endtask

  initial begin
    int prev;
    real r;
    #100;
    for (int k = 0; k < 400; k++) begin
      noise_mag = 4'($urandom);
      decay     = 8'($urandom);
      i_ref     = $urandom_range(0, 600000);
      prev = v_n;
      #100;
      expect_(v_n == prev, "no change without precharge");
      precharge = 1; #100;
      r = ref_mv(noise_mag, decay, i_ref);
      expect_((v_n - r) < 1.0 && (r - v_n) < 1.0, "V_N equation");
      precharge = 0; #100;
    end
    // top of range, no decay: 300 uA * 15/16 * 3200 ohm = 900 mV
    i_ref = 300000; noise_mag = 15; decay = 0;
    precharge = 1; #100; precharge = 0; #100;
    expect_(v_n == 900, "full scale 900 mV");
    // monotonic decay for a fixed code
    prev = 100000;
    for (int d = 0; d < 256; d += 15) begin
      decay = 8'(d);
      precharge = 1; #100; precharge = 0; #100;
      expect_(v_n <= prev, "monotonic decay");
      prev = v_n;
    end
    expect_(prev < 900 / 8, "decayed by over 8x at the top code");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
