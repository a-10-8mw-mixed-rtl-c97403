// tb_sb_bitline_pair -- precharge to VDD, then piecewise-constant currents
// for known times; the voltage drop must be I*t/C (nA*ps/fF = uV) summed over
// the segments, each line separately, floored at 0 V, and reset by the next
// precharge.
module tb_sb_bitline_pair;
  timeunit 1ps;
  timeprecision 1ps;

  logic precharge = 1;
  int i_bl = 0, i_blb = 0, v_bl, v_blb;
  int checks = 0, failures = 0;
  longint e_bl, e_blb;

  sb_bitline_pair dut (.precharge, .i_bl_na(i_bl), .i_blb_na(i_blb), .v_bl_uv(v_bl), .v_blb_uv(v_blb));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t: v_bl=%0d (%0d) v_blb=%0d (%0d)", what, $time, v_bl, e_bl, v_blb, e_blb);
    end
  endtask

  initial begin
    #1000;
    e_bl = 1800000; e_blb = 1800000;
    expect_(v_bl == 1800000 && v_blb == 1800000, "precharged");
    for (int trial = 0; trial < 40; trial++) begin
      precharge = 1; #3000;
      precharge = 0; #500;
      e_bl = 0; e_blb = 0;
      for (int seg = 0; seg < 4; seg++) begin
        int a, b, t;
        a = $urandom_range(0, 60000);
        b = $urandom_range(0, 60000);
        t = $urandom_range(100, 2000);
        i_bl = a; i_blb = b;
        #(t);
        e_bl  += (longint'(a) * t) / 200;
        e_blb += (longint'(b) * t) / 200;
        if (e_bl > 1800000)  e_bl = 1800000;
        if (e_blb > 1800000) e_blb = 1800000;
      end
      i_bl = 0; i_blb = 0;
      #1000;
      e_bl = 1800000 - e_bl; e_blb = 1800000 - e_blb;
      expect_(v_bl == int'(e_bl) && v_blb == int'(e_blb), "integrated drop");
    end
    // the floor: a large current for a long time leaves the line at 0 V
    precharge = 1; #1000; precharge = 0;
    i_bl = 90000; #8000; i_bl = 0; #100;
    e_bl = 0; e_blb = 1800000;
    expect_(v_bl == 0 && v_blb == 1800000, "floor at 0 V");
    precharge = 1; #100;
    e_bl = 1800000;
    expect_(v_bl == 1800000, "precharge restores");
    // no discharge while precharging
    i_bl = 50000; #2000; i_bl = 0; #10;
    expect_(v_bl == 1800000, "no drop during precharge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
