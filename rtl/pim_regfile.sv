// pim_regfile: the register file of one PiCaSO-IM block, standing for one
// RAMB18 tile.
//
// Each word holds one bit position of all NPE PEs: bit i of word w is bit w
// of PE i's register file, so a bit-serial operand of N bits occupies N
// consecutive words. Two read addresses are served per cycle (ports A and
// B of the dual-port BRAM) and one word is written per cycle, at a
// pipelined copy of the port-A address.
//
// Timing: reads are synchronous, data appears the cycle after the address
// (the BRAM output register). A read and a write of the same word in one
// cycle return the old word (read-first).
//
// The paper gives the one-RAMB18-per-block mapping and two simultaneous
// addresses; modelling the write as a third access in the same cycle is
// this design's choice (the real tile would time-share port A). The memory
// is not reset; a block's contents are defined only after they are written.
module pim_regfile #(
  parameter int unsigned NPE   = 16,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic [AW-1:0]  addr_a,
  input  logic [AW-1:0]  addr_b,
  output logic [NPE-1:0] rd_a,
  output logic [NPE-1:0] rd_b,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [NPE-1:0] wdata
);
  logic [NPE-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    rd_a <= mem[addr_a];
    rd_b <= mem[addr_b];
    if (we) mem[waddr] <= wdata;
  end
endmodule
