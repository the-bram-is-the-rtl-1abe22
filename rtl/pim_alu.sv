// pim_alu: the NPE bit-serial ALUs of a PiCaSO-IM block.
//
// Each PE has a carry flip-flop and a two-bit Booth register. A serial
// operation presents one bit of each operand per cycle, LSB first, with
// `first` set on the LSB; the carry then starts at 0 (ADD) or 1 (SUB, which
// adds the inverted y). ALU_BOOTH performs one step of Booth radix-2
// multiplication: the PE's Booth pair {y_i, y_(i-1)} chooses x + y (01),
// x - y (10) or x unchanged (00, 11), where x is the partial product bit
// and y the multiplicand bit. `booth_ld` shifts the next multiplier bit
// (given on y) into the pair; `booth_first` makes y_(-1) zero.
// The result is registered (ALU pipeline stage, one cycle) and written
// back to the register file the following cycle.
//
// The paper states bit-serial PEs with Booth radix-2 taken from PiCaSO; the
// datapath details here are this design's own.
module pim_alu
  import imagine_pkg::*;
#(
  parameter int unsigned NPE = 16
) (
  input  logic           clk,
  input  logic           rst,
  input  alu_op_e        op,
  input  logic           first,
  input  logic           booth_ld,
  input  logic           booth_first,
  input  logic [NPE-1:0] x,
  input  logic [NPE-1:0] y,
  output logic [NPE-1:0] r_q
);
  logic [NPE-1:0] carry, booth_cur, booth_prev;
  logic [NPE-1:0] r_d, c_d;

  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      logic sub, add, yb, cin;
      sub = (op == ALU_SUB) || (op == ALU_BOOTH && booth_cur[i] && !booth_prev[i]);
      add = (op == ALU_ADD) || (op == ALU_BOOTH && !booth_cur[i] && booth_prev[i]);
      yb  = sub ? ~y[i] : y[i];
      cin = first ? sub : carry[i];
      c_d[i] = carry[i];
      unique case (op)
        ALU_ZERO: r_d[i] = 1'b0;
        ALU_CPY:  r_d[i] = y[i];
        ALU_ADD, ALU_SUB, ALU_BOOTH: begin
          if (add || sub) begin
            r_d[i] = x[i] ^ yb ^ cin;
            c_d[i] = (x[i] & yb) | (x[i] & cin) | (yb & cin);
          end else begin
            r_d[i] = x[i];
          end
        end
        default:  r_d[i] = x[i];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      carry      <= '0;
      booth_cur  <= '0;
      booth_prev <= '0;
      r_q        <= '0;
    end else begin
      carry <= c_d;
      r_q   <= r_d;
      if (booth_ld) begin
        booth_prev <= booth_first ? '0 : booth_cur;
        booth_cur  <= y;
      end
    end
  end
endmodule
