// sb_controller -- Ising-CIM controller. Sequences one SB iteration every
// three cycles of the 100 MHz reference clock (30 ns per iteration):
//   PRE   : bitlines precharged (precharge = 1); the PRBS advances (prc) and
//           the noise DAC samples its code at the start of this phase
//   EVAL  : wl_en = 1, so the wordline pulse fires at the edge that starts
//           this cycle and discharges the bitlines; loop_en = 1, so the
//           comparators and the iteration counter act on the edge that ends
//           it, i.e. the rising edge that starts the third cycle
//   SETTLE: comparator/SR-latch outputs travel back to the wordline drivers
// The first iteration of a run reads the initial state (en_fb = 0); after the
// first decision en_fb = 1 and the loop runs on its own outputs. After
// num_iter iterations the controller returns to IDLE with done = 1 and the
// node states stay in the comparator latches. start while busy is ignored.
// The 30 ns, three-cycle iteration, the decision at the third rising edge and
// the precharge-triggered noise follow the chip; phase encoding, start/done
// handshake and single-clock enables in place of LoopClk/PRC clocks are this
// design's choices.
module sb_controller
  import sb_pkg::*;
#(
  parameter int W = ITER_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num_iter,
  output logic         precharge,
  output logic         wl_en,
  output logic         loop_en,
  output logic         prc,
  output logic         en_fb,
  output logic         iter_clear,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] iter_idx
);

  timeunit 1ps;
  timeprecision 1ps;

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_EVAL, S_SETTLE} state_e;

  state_e state;
  logic   last;

  assign last = (iter_idx == num_iter - W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      iter_idx <= '0;
      en_fb    <= 1'b0;
      done     <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start && num_iter != '0) begin
          state    <= S_PRE;
          iter_idx <= '0;
          en_fb    <= 1'b0;
          done     <= 1'b0;
        end
        S_PRE:  state <= S_EVAL;
        S_EVAL: begin
          state <= S_SETTLE;
          en_fb <= 1'b1;
        end
        S_SETTLE: begin
          if (last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state    <= S_PRE;
            iter_idx <= iter_idx + W'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign precharge  = (state == S_PRE);
  assign prc        = (state == S_PRE);
  assign wl_en      = (state == S_EVAL);
  assign loop_en    = (state == S_EVAL);
  assign busy       = (state != S_IDLE);
  assign iter_clear = (state == S_IDLE) && start;

endmodule
