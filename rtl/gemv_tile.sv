// gemv_tile: one IMAGine GEMV tile.
//
// A tile controller decodes the instruction stream and produces one block
// control word per cycle; a pipelined fanout tree (FAN_LEVELS levels of
// FANOUT) copies the word to the ROWS x COLS PiCaSO-IM blocks of the PIM
// array. Each array row cascades to the neighbouring tiles through
// east_in / west_out; partial sums move east to west.
// Interface: instr_valid/instr from the top-level fanout tree; busy is the
// controller's busy flag; wb_bit/wb_en show the writes into the leftmost
// PE of every row (used only in the leftmost tile column).
// Timing: a control word reaches the blocks FAN_LEVELS cycles after it
// leaves the controller; all tiles see the same latency, so the whole
// engine runs in lock-step.
//
// Follows the paper: controller, fanout tree (2 levels, fanout 4) and a
// 12x2 PIM array per tile. TROW/TCOL place the tile so its blocks get
// their global {row, column} IDs.
module gemv_tile
  import imagine_pkg::*;
#(
  parameter int unsigned ROWS       = 12,
  parameter int unsigned COLS       = 2,
  parameter int unsigned TROW       = 0,
  parameter int unsigned TCOL       = 0,
  parameter int unsigned COL_BITS   = 5,
  parameter int unsigned FAN_LEVELS = 2,
  parameter int unsigned FANOUT     = 4,
  parameter bit          PIPE_A     = 1'b1,
  parameter bit          PIPE_B     = 1'b0,
  parameter bit          PIPE_C     = 1'b0,
  parameter int unsigned DEPTH      = imagine_pkg::DEPTH
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               instr_valid,
  input  logic [INSTR_W-1:0] instr,
  output logic               busy,
  input  logic [ROWS-1:0]    east_in,
  output logic [ROWS-1:0]    west_out,
  output logic [ROWS-1:0]    wb_bit,
  output logic [ROWS-1:0]    wb_en
);
  pim_ctrl_t          ctrl;
  logic [CTRL_W-1:0]  fan [ROWS*COLS];
  pim_ctrl_t          blk_ctrl [ROWS*COLS];

  tile_controller #(.PIPE_A(PIPE_A), .PIPE_B(PIPE_B), .PIPE_C(PIPE_C)) u_ctrl (
    .clk, .rst, .instr_valid, .instr,
    .ctrl_out (ctrl),
    .busy
  );

  fanout_tree #(.W(CTRL_W), .LEVELS(FAN_LEVELS), .FANOUT(FANOUT), .N_OUT(ROWS*COLS)) u_fan (
    .clk,
    .din  (ctrl),
    .dout (fan)
  );

  for (genvar k = 0; k < ROWS*COLS; k++) begin : g_cast
    assign blk_ctrl[k] = pim_ctrl_t'(fan[k]);
  end

  pim_array #(
    .ROWS(ROWS), .COLS(COLS), .ROW0(TROW*ROWS), .COL0(TCOL*COLS),
    .COL_BITS(COL_BITS), .DEPTH(DEPTH)
  ) u_array (
    .clk, .rst,
    .ctrl (blk_ctrl),
    .east_in, .west_out, .wb_bit, .wb_en
  );
endmodule
