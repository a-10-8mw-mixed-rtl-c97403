// tb_sb_wl_driver -- random states, select and pulse values; checks that
// the pulse lands on RWL for +1 and on RWLB for -1 and never outside the
// pulse, and that the noise row follows its polarity bit.
module tb_sb_wl_driver;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 64;
  logic [N-1:0] x_init, x_fb, x_cur, rwl, rwlb;
  logic en_fb, pulse, noise_pol, rwl_n, rwlb_n;
  int checks = 0, failures = 0;
  logic [N-1:0] sel;

  sb_wl_driver dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      x_init    = {$urandom, $urandom};
      x_fb      = {$urandom, $urandom};
      en_fb     = 1'($urandom);
      pulse     = 1'($urandom);
      noise_pol = 1'($urandom);
      #10;
      sel = en_fb ? x_fb : x_init;
      for (int m = 0; m < N; m++) begin
        checks++;
        if (rwl[m] != (pulse && sel[m]) || rwlb[m] != (pulse && !sel[m]) || x_cur[m] != sel[m]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d", m);
        end
      end
      checks++;
      if (rwl_n != (pulse && noise_pol) || rwlb_n != (pulse && !noise_pol)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
