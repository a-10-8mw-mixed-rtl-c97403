// tb_sb_iter_counter -- random LoopClk enables and DecayStep values against
// an accumulate-and-saturate model; also checks clear.
module tb_sb_iter_counter;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, rst_n = 0, clear = 0, loop_en = 0;
  logic [7:0]  decay_step = '0;
  logic [11:0] count;
  int checks = 0, failures = 0, saturations = 0;
  int model;

  sb_iter_counter dut (.*);

  always #5000 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      loop_en    = $urandom_range(0, 3) != 0;
      decay_step = 8'($urandom);
      clear      = ($urandom_range(0, 199) == 0);
      @(posedge clk);
      if (clear) model = 0;
      else if (loop_en) begin
        model = model + decay_step;
        if (model > 4095) begin
          model = 4095;
          saturations++;
        end
      end
      #1;
      checks++;
      if (count != 12'(model)) begin
        failures++;
        $display("FAIL cycle %0d count=%0d model=%0d", i, count, model);
      end
    end
    checks++;
    if (saturations == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
