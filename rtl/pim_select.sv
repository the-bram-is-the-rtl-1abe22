// pim_select: block-ID based selection of a PiCaSO-IM block.
//
// A SELECT instruction broadcasts an ID mask and an ID value; every block
// whose ID agrees with the value in all masked bits sets its select flag,
// every other block clears it. A zero mask selects all blocks, which is
// also the state after reset. The ID is {row, column} of the block in the
// whole engine, so masks can pick rows, columns or single blocks.
// The flag is used one cycle after the SELECT reaches the block.
//
// The paper says only that block-ID based selection logic was added; the
// mask/value match is this design's choice.
module pim_select
  import imagine_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic [ID_W-1:0] id,
  input  logic            sel_we,
  input  logic [ID_W-1:0] mask,
  input  logic [ID_W-1:0] value,
  output logic            selected
);
  always_ff @(posedge clk) begin
    if (rst)         selected <= 1'b1;
    else if (sel_we) selected <= ((id ^ value) & mask) == '0;
  end
endmodule
