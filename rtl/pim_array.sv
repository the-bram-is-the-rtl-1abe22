// pim_array: the ROWS x COLS array of PiCaSO-IM blocks inside a GEMV tile.
//
// All blocks take the same control word, from the tile fanout tree: block
// (r, c) reads ctrl[r*COLS + c]. Within each row the blocks are chained
// east to west: block c's east_in is block c+1's west_out; the east end
// of a row is the array's east_in and the west end its west_out, so arrays
// of neighbouring tiles cascade. Block IDs are {ROW0 + r, COL0 + c}, with
// COL_BITS bits for the column, where ROW0/COL0 is the tile's origin.
// wb_bit / wb_en of column 0 (the leftmost PE of each row) leave the array.
//
// Follows the paper: a 12x2 array per tile (Sec. V-C) with east/west
// cascading. The ID layout is this design's own.
module pim_array
  import imagine_pkg::*;
#(
  parameter int unsigned ROWS     = 12,
  parameter int unsigned COLS     = 2,
  parameter int unsigned ROW0     = 0,
  parameter int unsigned COL0     = 0,
  parameter int unsigned COL_BITS = 5,
  parameter int unsigned DEPTH    = imagine_pkg::DEPTH
) (
  input  logic            clk,
  input  logic            rst,
  input  pim_ctrl_t       ctrl [ROWS*COLS],
  input  logic [ROWS-1:0] east_in,
  output logic [ROWS-1:0] west_out,
  output logic [ROWS-1:0] wb_bit,
  output logic [ROWS-1:0] wb_en
);
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [COLS:0]  chain;    // chain[c] = east_in of block c, chain[COLS] = array east_in
    logic [COLS-1:0] wbb, wbe;
    assign chain[COLS] = east_in[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam logic [ID_W-1:0] BID = ID_W'(((ROW0 + r) << COL_BITS) | (COL0 + c));
      logic wo;
      picaso_im #(.DEPTH(DEPTH)) u_blk (
        .clk, .rst,
        .ctrl     (ctrl[r*COLS + c]),
        .id       (BID),
        .east_in  (chain[c+1]),
        .west_out (wo),
        .wb_bit   (wbb[c]),
        .wb_en    (wbe[c])
      );
      if (c > 0) begin : g_link
        assign chain[c] = wo;
      end else begin : g_west
        assign west_out[r] = wo;
        assign chain[0]    = 1'b0;
      end
    end
    assign wb_bit[r] = wbb[0];
    assign wb_en[r]  = wbe[0];
  end
endmodule
