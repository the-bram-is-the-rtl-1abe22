// imagine_top: IMAGine, a processing-in-memory GEMV engine built from
// block-RAM based bit-serial PEs.
//
// Structure: the front end writes 30-bit instructions through the input
// registers; a top-level fanout tree (TOP_FAN_LEVELS levels of TOP_FANOUT)
// copies them to every GEMV tile; each tile's controller expands them into
// control words for its 12x2 PiCaSO-IM blocks (16 PEs each). Partial sums
// move east to west; the bits written into the leftmost PE of each block
// row shift into the column shift registers, which are read out through
// FIFO-out one element per cycle.
// The busy flag of tile (0, 0) comes back through a TOP_FAN_LEVELS-deep
// pipeline so the input registers can hold off the next instruction while
// a multicycle instruction runs.
//
// Ports:
//   in_valid / in_ready / in_instr   FIFO-in side, one instruction per
//                                    transfer
//   out_shift                        read the output column: one element
//                                    per cycle while high
//   out_valid / out_data             FIFO-out side, OUT_PIPE = 2 cycles
//                                    after out_shift
//   busy                             an instruction is still in flight;
//                                    when it is low, all results are in
//                                    the column shift registers
// Timing: all tiles execute in lock-step. A single-cycle instruction
// reaches the blocks 1 + TOP_FAN_LEVELS + (2 + PIPE_A + PIPE_B + PIPE_C)
// + FAN_LEVELS cycles after it is accepted.
//
// Defaults are the Alveo U55 configuration: 168 tiles of 12x2 blocks =
// 4032 RAMB18 blocks = 64,512 PEs, tile fanout trees of 2 levels and
// fanout 4, controller stage A enabled. The 14 x 12 tile grid and the
// top-level tree (4 levels of 4, covering 256 >= 168 tiles) are assumed.
module imagine_top
  import imagine_pkg::*;
#(
  parameter int unsigned TILE_ROWS      = 14,
  parameter int unsigned TILE_COLS      = 12,
  parameter int unsigned PIM_ROWS       = 12,
  parameter int unsigned PIM_COLS       = 2,
  parameter int unsigned TOP_FAN_LEVELS = 4,
  parameter int unsigned TOP_FANOUT     = 4,
  parameter int unsigned FAN_LEVELS     = 2,
  parameter int unsigned FANOUT         = 4,
  parameter bit          PIPE_A         = 1'b1,
  parameter bit          PIPE_B         = 1'b0,
  parameter bit          PIPE_C         = 1'b0,
  parameter int unsigned OUT_W          = 72,
  parameter int unsigned DEPTH          = imagine_pkg::DEPTH
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [INSTR_W-1:0]      in_instr,
  input  logic                    out_shift,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data,
  output logic                    busy
);
  localparam int unsigned NTILE = TILE_ROWS * TILE_COLS;
  localparam int unsigned NROW  = TILE_ROWS * PIM_ROWS;
  // issue -> busy at tile (0,0) -> back at the input registers, with margin
  localparam int unsigned RT_LAT = 2 * TOP_FAN_LEVELS + 4;

  logic               iss_valid, busy_tile, busy_ret, ir_busy;
  logic [INSTR_W-1:0] iss_instr;
  logic [PREC_W-1:0]  width_w;
  logic [INSTR_W:0]   tile_in [NTILE];
  logic [NROW-1:0]    wb_bit, wb_en;

  input_regs #(.RT_LAT(RT_LAT)) u_in (
    .clk, .rst, .in_valid, .in_ready, .in_instr,
    .out_valid (iss_valid),
    .out_instr (iss_instr),
    .busy_ret,
    .width_w,
    .busy      (ir_busy)
  );

  fanout_tree #(.W(INSTR_W+1), .LEVELS(TOP_FAN_LEVELS), .FANOUT(TOP_FANOUT), .N_OUT(NTILE)) u_fan (
    .clk,
    .din  ({iss_valid, iss_instr}),
    .dout (tile_in)
  );

  tile_array #(
    .TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .ROWS(PIM_ROWS), .COLS(PIM_COLS),
    .FAN_LEVELS(FAN_LEVELS), .FANOUT(FANOUT),
    .PIPE_A(PIPE_A), .PIPE_B(PIPE_B), .PIPE_C(PIPE_C), .DEPTH(DEPTH)
  ) u_tiles (
    .clk, .rst, .tile_in,
    .busy   (busy_tile),
    .wb_bit, .wb_en
  );

  // busy return pipeline, as deep as the fanout tree
  logic [TOP_FAN_LEVELS:0] busy_pipe;
  assign busy_pipe[0] = busy_tile;
  for (genvar k = 1; k <= TOP_FAN_LEVELS; k++) begin : g_ret
    always_ff @(posedge clk) begin
      if (rst) busy_pipe[k] <= 1'b0;
      else     busy_pipe[k] <= busy_pipe[k-1];
    end
  end
  assign busy_ret = busy_pipe[TOP_FAN_LEVELS];

  col_shift_regs #(.NROW(NROW), .OUT_W(OUT_W)) u_out (
    .clk, .rst, .wb_bit, .wb_en, .width_w,
    .shift (out_shift),
    .out_valid, .out_data
  );

  // The tile busy flag falls when the controller has issued the last
  // control word; that word still has to pass the controller's output
  // register (and stage C) and the tile fanout tree before its write-back
  // reaches the column shift registers. busy covers that flush time.
  localparam int unsigned FLUSH = 1 + int'(PIPE_C) + FAN_LEVELS;
  logic [FLUSH:0] flush_pipe;
  assign flush_pipe[0] = busy_tile;
  for (genvar k = 1; k <= FLUSH; k++) begin : g_flush
    always_ff @(posedge clk) begin
      if (rst) flush_pipe[k] <= 1'b0;
      else     flush_pipe[k] <= flush_pipe[k-1];
    end
  end

  assign busy = ir_busy || busy_ret || (|flush_pipe);
endmodule
