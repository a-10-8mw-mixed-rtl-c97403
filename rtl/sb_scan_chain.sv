// sb_scan_chain -- serial scan interface through which an external host
// programs and reads the solver. While scan_en is high one bit per clock
// enters at scan_in and the register shifts towards bit 0, whose value is
// scan_out. A frame is FRAME_W bits, {data[N-1:0], addr, cmd[2:0]}, sent
// LSB first (cmd bit 0 first). A one-cycle scan_update then executes it:
//   CMD_WRITE_ROW  : one-cycle row-write request (addr, data) to the SRAM
//                    controller
//   CMD_SET_INIT   : data becomes the initial spin vector
//   CMD_SET_CFG    : data[CFG_W-1:0] becomes the run configuration
//   CMD_SET_SEED   : one-cycle PRBS seed load with data[LFSR_W-1:0]
//   CMD_START      : one-cycle start pulse to the controller
//   CMD_READ_STATE : the register is loaded with {node_state, .., busy, done}
//                    in the frame's data/addr fields, to be shifted out next
// The chip has a serial scan chain driven by an FPGA; everything about its
// frame, commands and timing here is this design's own choice.
module sb_scan_chain
  import sb_pkg::*;
#(
  parameter int N = N_SPINS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 scan_en,
  input  logic                 scan_in,
  input  logic                 scan_update,
  output logic                 scan_out,
  // row writes
  output logic                 wr_valid,
  output logic [$clog2(N)-1:0] wr_row,
  output logic [N-1:0]         wr_data,
  // run set-up
  output logic [N-1:0]         x_init,
  output sb_cfg_t              cfg,
  output logic                 seed_load,
  output logic [LFSR_W-1:0]    seed,
  output logic                 start,
  // read-back
  input  logic [N-1:0]         node_state,
  input  logic                 busy,
  input  logic                 done
);

  timeunit 1ps;
  timeprecision 1ps;

  localparam int AW = $clog2(N);
  localparam int FW = 3 + AW + N;

  logic [FW-1:0]  sr;
  scan_cmd_e      cmd;
  logic [AW-1:0]  addr;
  logic [N-1:0]   data;

  assign cmd      = scan_cmd_e'(sr[2:0]);
  assign addr     = sr[3 +: AW];
  assign data     = sr[3 + AW +: N];
  assign scan_out = sr[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr        <= '0;
      wr_valid  <= 1'b0;
      wr_row    <= '0;
      wr_data   <= '0;
      x_init    <= '0;
      cfg       <= '0;
      seed_load <= 1'b0;
      seed      <= '0;
      start     <= 1'b0;
    end else begin
      wr_valid  <= 1'b0;
      seed_load <= 1'b0;
      start     <= 1'b0;
      if (scan_en) begin
        sr <= {scan_in, sr[FW-1:1]};
      end else if (scan_update) begin
        unique case (cmd)
          CMD_WRITE_ROW: begin
            wr_valid <= 1'b1;
            wr_row   <= addr;
            wr_data  <= data;
          end
          CMD_SET_INIT:   x_init <= data;
          CMD_SET_CFG:    cfg    <= sb_cfg_t'(data[CFG_W-1:0]);
          CMD_SET_SEED: begin
            seed_load <= 1'b1;
            seed      <= data[LFSR_W-1:0];
          end
          CMD_START:      start <= 1'b1;
          CMD_READ_STATE: sr    <= {node_state, AW'(0), busy, done, 1'b0};
          default: ;
        endcase
      end
    end
  end

endmodule
