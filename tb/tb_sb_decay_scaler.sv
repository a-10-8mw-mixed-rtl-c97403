// tb_sb_decay_scaler -- exhaustive check of count (12 bit) x shift (4 bit)
// against decay = min(255, floor(count / 2^shift)).
module tb_sb_decay_scaler;
  timeunit 1ps;
  timeprecision 1ps;

  logic [11:0] count;
  logic [3:0]  shift;
  logic [7:0]  decay;
  int checks = 0, failures = 0, expv;

  sb_decay_scaler dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin
      for (int c = 0; c < 4096; c++) begin
        count = 12'(c);
        shift = 4'(s);
        #1;
        expv = c / (1 << s);
        if (expv > 255) expv = 255;
        checks++;
        if (decay != 8'(expv)) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d s=%0d decay=%0d exp=%0d", c, s, decay, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
