// tb_sb_scan_chain -- shifts frames {data, addr, cmd} in LSB first and checks
// every command's effect: row-write request, initial state, configuration,
// PRBS seed, start pulse, and read-back of node state / busy / done by
// shifting the captured frame out.
module tb_sb_scan_chain;
  import sb_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 64;
  localparam int FW = 3 + 6 + N;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_update = 0, scan_out;
  logic wr_valid, seed_load, start;
  logic [5:0] wr_row;
  logic [N-1:0] wr_data, x_init, node_state = '0;
  sb_cfg_t cfg;
  logic [14:0] seed;
  logic busy = 0, done = 0;
  int checks = 0, failures = 0;
  int n_wr, n_seed, n_start;

  sb_scan_chain dut (.*);

  always #5000 clk = ~clk;

  always @(posedge clk) begin
    if (wr_valid)  n_wr++;
    if (seed_load) n_seed++;
    if (start)     n_start++;
  end

  initial begin
    repeat (100000) @(posedge clk);
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

  logic [FW-1:0] got;

  task automatic frame(logic [2:0] cmd, logic [5:0] addr, logic [N-1:0] data);
    logic [FW-1:0] f;
    f = {data, addr, cmd};
    for (int i = 0; i < FW; i++) begin
      @(negedge clk);
      scan_en = 1; scan_in = f[i];
      got[i] = scan_out;            // previous contents come out meanwhile
    end
    @(negedge clk);
    scan_en = 0; scan_update = 1;
    @(negedge clk);
    scan_update = 0;
  endtask

  initial begin
    logic [N-1:0] d;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    n_wr = 0; n_seed = 0; n_start = 0;
    for (int i = 0; i < 20; i++) begin
      d = {$urandom, $urandom};
      frame(CMD_WRITE_ROW, 6'(i * 3), d);
      expect_(wr_row == 6'(i * 3) && wr_data == d, "write row fields");
    end
    repeat (2) @(negedge clk);
    expect_(n_wr == 20, $sformatf("one write pulse per frame (%0d)", n_wr));
    d = {$urandom, $urandom};
    frame(CMD_SET_INIT, 0, d);
    expect_(x_init == d, "initial state");
    frame(CMD_SET_CFG, 0, N'({4'd3, 8'd17, 12'd20}));
    expect_(cfg.num_iter == 20 && cfg.decay_step == 17 && cfg.decay_shift == 3, "config");
    frame(CMD_SET_SEED, 0, N'(15'h2abc));
    repeat (2) @(negedge clk);
    expect_(seed == 15'h2abc && n_seed == 1, "seed");
    frame(CMD_START, 0, '0);
    repeat (2) @(negedge clk);
    expect_(n_start == 1 && x_init == d, "start pulse, state kept");
    frame(CMD_NOP, 0, '1);
    repeat (2) @(negedge clk);
    expect_(n_wr == 20 && n_start == 1, "nop has no effect");
    // read-back
    node_state = {$urandom, $urandom};
    busy = 1; done = 0;
    frame(CMD_READ_STATE, 0, '0);
    frame(CMD_NOP, 0, '0);         // shifts the captured frame out
    expect_(got[FW-1 -: N] == node_state, "read node state");
    expect_(got[1] == 0 && got[2] == 1, "read done/busy");
    busy = 0; done = 1;
    frame(CMD_READ_STATE, 0, '0);
    frame(CMD_NOP, 0, '0);
    expect_(got[1] == 1 && got[2] == 0, "read done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
