// sb_sram_ctrl -- SRAM controller and write peripherals of the 10-T array.
// A row write (wr_valid with wr_row and wr_data) takes three cycles:
//   SETUP: WBL/WBLB driven with the row data and its complement
//   PULSE: write wordline WWL[wr_row] high
//   HOLD : WWL low again while WBL/WBLB keep the data, so the cells latch it
// Outside a write, WBL = WBLB = 0 (no cell can be written). A request during a
// write is ignored; busy flags the write. Row data bit n goes to column n, so
// the diagonal bit of each row programs that row's self-feedback cell.
// The WWL/WBL/WBLB write port follows the chip; the three-phase timing and
// the request interface are this design's choice.
module sb_sram_ctrl
  import sb_pkg::*;
#(
  parameter int N = N_SPINS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_valid,
  input  logic [$clog2(N)-1:0] wr_row,
  input  logic [N-1:0]         wr_data,
  output logic [N-1:0]         wwl,
  output logic [N-1:0]         wbl,
  output logic [N-1:0]         wblb,
  output logic                 busy
);

  timeunit 1ps;
  timeprecision 1ps;

  typedef enum logic [1:0] {W_IDLE, W_SETUP, W_PULSE, W_HOLD} wstate_e;

  wstate_e              st;
  logic [$clog2(N)-1:0] row_q;
  logic [N-1:0]         data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= W_IDLE;
      row_q  <= '0;
      data_q <= '0;
    end else begin
      unique case (st)
        W_IDLE: if (wr_valid) begin
          st     <= W_SETUP;
          row_q  <= wr_row;
          data_q <= wr_data;
        end
        W_SETUP: st <= W_PULSE;
        W_PULSE: st <= W_HOLD;
        W_HOLD:  st <= W_IDLE;
        default: st <= W_IDLE;
      endcase
    end
  end

  always_comb begin
    wwl  = '0;
    wbl  = '0;
    wblb = '0;
    if (st != W_IDLE) begin
      wbl  =  data_q;
      wblb = ~data_q;
    end
    if (st == W_PULSE) wwl[row_q] = 1'b1;
  end

  assign busy = (st != W_IDLE);

endmodule
