// pim_netnode: east-to-west network node of a PiCaSO-IM block.
//
// One register per block on the row's east-to-west chain. When the block
// is a sender (`send` and the block is selected) the node loads the block's
// own bit (PE 0 of the port-B word); otherwise it forwards east-in. A bit
// therefore travels one block per cycle, and a sender h blocks east of a
// receiver reaches it after h register stages: binary hopping with h = 1,
// 2, 4, ... needs no intermediate copies into register files.
//
// The paper keeps only the east-to-west part of PiCaSO's network and names
// the node; the one-register-per-block hop is this design's choice.
module pim_netnode (
  input  logic clk,
  input  logic rst,
  input  logic send,
  input  logic local_bit,
  input  logic east_in,
  output logic west_out
);
  always_ff @(posedge clk) begin
    if (rst) west_out <= 1'b0;
    else     west_out <= send ? local_bit : east_in;
  end
endmodule
