// tb_sb_sram_ctrl -- issues row writes and checks the three-phase write:
// bitlines set up first, a single one-hot WWL cycle for the addressed row,
// bitlines held one more cycle, then everything released. A request during a
// write must be dropped. A small array of latches driven by WWL/WBL/WBLB
// checks that the data really lands in the right row.
module tb_sb_sram_ctrl;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 64;
  logic clk = 0, rst_n = 0, wr_valid = 0, busy;
  logic [5:0]   wr_row = '0;
  logic [N-1:0] wr_data = '0, wwl, wbl, wblb;
  logic [N-1:0] mem   [N];
  logic [N-1:0] model [N];
  int checks = 0, failures = 0;

  sb_sram_ctrl dut (.*);

  always #5000 clk = ~clk;

  // cell array written the way a 6-T cell is
  always_latch begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (wwl[r] && (wbl[c] != wblb[c])) mem[r][c] <= wbl[c];
  end

  initial begin
    repeat (20000) @(posedge clk);
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

  initial begin
    for (int r = 0; r < N; r++) begin
      mem[r] = '0;
      model[r] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 300; i++) begin
      logic [5:0]   row;
      logic [N-1:0] d;
      row = 6'($urandom);
      d   = {$urandom, $urandom};
      @(negedge clk);
      expect_(wwl == 0 && wbl == 0 && wblb == 0 && !busy, "idle lines");
      wr_valid = 1; wr_row = row; wr_data = d;
      @(negedge clk);                       // SETUP
      wr_valid = 1; wr_row = row + 1; wr_data = ~d;   // must be ignored
      expect_(busy && wwl == 0 && wbl == d && wblb == ~d, "setup");
      @(negedge clk);                       // PULSE
      wr_valid = 0;
      expect_(wwl == (N'(1) << row) && wbl == d && wblb == ~d, "pulse");
      @(negedge clk);                       // HOLD
      expect_(wwl == 0 && wbl == d && wblb == ~d, "hold");
      model[row] = d;
    end
    @(negedge clk);
    for (int r = 0; r < N; r++) expect_(mem[r] == model[r], "row contents");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
