// pim_opmux: operand multiplexer of a PiCaSO-IM block.
//
// It forms the two operands of the 16 bit-serial ALUs from the words read
// out of the register file. x is always the port-A word. y is one of
//   - the port-B word (ordinary two-operand instructions),
//   - the port-B word folded by d = 2^(fold-1) PEs: PE i gets the bit of
//     PE i+d, and 0 where i+d is outside the block. Repeating the fold with
//     d = 8, 4, 2, 1 adds up all 16 PEs into PE 0 without copying data
//     (zero-copy in-block reduction),
//   - the east-in network bit, given to every PE (receive of a transfer),
//   - immediate data from the instruction (external write).
// Output registers x_q / y_q form the OpMux pipeline stage (one cycle).
//
// The paper names the OpMux and its zero-copy in-block reduction; the fold
// pattern and the operand choices are this design's own.
module pim_opmux
  import imagine_pkg::*;
#(
  parameter int unsigned NPE = 16
) (
  input  logic              clk,
  input  logic [NPE-1:0]    rd_a,
  input  logic [NPE-1:0]    rd_b,
  input  logic [FOLD_W-1:0] fold,
  input  logic              is_tx,
  input  logic              east_in,
  input  logic              ext,
  input  logic [NPE-1:0]    ext_data,
  output logic [NPE-1:0]    x_q,
  output logic [NPE-1:0]    y_q
);
  logic [NPE-1:0] y_d, folded;
  logic [4:0]     shamt;

  always_comb begin
    shamt  = (fold == '0) ? 5'd0 : 5'(1 << (fold - 1));
    folded = rd_b >> shamt;
    if (ext)               y_d = ext_data;
    else if (is_tx)        y_d = {NPE{east_in}};
    else if (fold != '0)   y_d = folded;
    else                   y_d = rd_b;
  end

  always_ff @(posedge clk) begin
    x_q <= rd_a;
    y_q <= y_d;
  end
endmodule
