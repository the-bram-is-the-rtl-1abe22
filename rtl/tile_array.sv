// tile_array: the TILE_ROWS x TILE_COLS array of GEMV tiles.
//
// Tile (r, c) takes its instruction from output r*TILE_COLS + c of the
// top-level fanout tree. Each row of blocks runs east to west across all
// tiles of a tile row: tile (r, c)'s east_in is tile (r, c+1)'s west_out,
// and the east end of every row reads 0. The west end is the leftmost
// block column, whose leftmost PEs' writes (wb_bit/wb_en, one per block
// row, row 0 on top) leave the array for the column shift registers.
// busy is the busy flag of tile (0, 0); all tiles run the same stream in
// lock-step, so one tile stands for all.
//
// Follows the paper: a parameterized 2D tile array cascaded east to west.
// The 14 x 12 default arrangement of the 168 tiles is this design's
// assumption; the paper gives the total (4032 RAMB18 blocks, 64K PEs on the
// Alveo U55) but not the grid.
module tile_array
  import imagine_pkg::*;
#(
  parameter int unsigned TILE_ROWS  = 14,
  parameter int unsigned TILE_COLS  = 12,
  parameter int unsigned ROWS       = 12,
  parameter int unsigned COLS       = 2,
  parameter int unsigned FAN_LEVELS = 2,
  parameter int unsigned FANOUT     = 4,
  parameter bit          PIPE_A     = 1'b1,
  parameter bit          PIPE_B     = 1'b0,
  parameter bit          PIPE_C     = 1'b0,
  parameter int unsigned DEPTH      = imagine_pkg::DEPTH,
  localparam int unsigned NTILE     = TILE_ROWS * TILE_COLS,
  localparam int unsigned NROW      = TILE_ROWS * ROWS
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [INSTR_W:0]   tile_in [NTILE],   // {valid, instruction}
  output logic               busy,
  output logic [NROW-1:0]    wb_bit,
  output logic [NROW-1:0]    wb_en
);
  localparam int unsigned COL_BITS = (TILE_COLS * COLS > 1) ? $clog2(TILE_COLS * COLS) : 1;

  // the {row, column} block ID must fit ID_W bits
  initial assert (COL_BITS + $clog2(NROW) <= ID_W)
    else $error("block ID of %0d rows x %0d columns does not fit", NROW, TILE_COLS*COLS);

  logic [ROWS-1:0] west [TILE_ROWS][TILE_COLS+1];  // west[r][c] = east_in of tile c
  logic [NTILE-1:0] t_busy;

  for (genvar r = 0; r < TILE_ROWS; r++) begin : g_tr
    assign west[r][TILE_COLS] = '0;
    for (genvar c = 0; c < TILE_COLS; c++) begin : g_tc
      logic [ROWS-1:0] wo, wbb, wbe;
      gemv_tile #(
        .ROWS(ROWS), .COLS(COLS), .TROW(r), .TCOL(c), .COL_BITS(COL_BITS),
        .FAN_LEVELS(FAN_LEVELS), .FANOUT(FANOUT),
        .PIPE_A(PIPE_A), .PIPE_B(PIPE_B), .PIPE_C(PIPE_C), .DEPTH(DEPTH)
      ) u_tile (
        .clk, .rst,
        .instr_valid (tile_in[r*TILE_COLS + c][INSTR_W]),
        .instr       (tile_in[r*TILE_COLS + c][INSTR_W-1:0]),
        .busy        (t_busy[r*TILE_COLS + c]),
        .east_in     (west[r][c+1]),
        .west_out    (wo),
        .wb_bit      (wbb),
        .wb_en       (wbe)
      );
      assign west[r][c] = wo;
      if (c == 0) begin : g_left
        assign wb_bit[r*ROWS +: ROWS] = wbb;
        assign wb_en [r*ROWS +: ROWS] = wbe;
      end
    end
  end

  assign busy = t_busy[0];
endmodule
