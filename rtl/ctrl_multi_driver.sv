// ctrl_multi_driver: multicycle driver (FSM) of the tile controller.
//
// On `start` it spends one cycle loading its parameters (instruction fields
// plus N, W and the auxiliary address from Op-Params), then emits one
// control word per cycle until the instruction is done, then BLOCK_PIPE
// idle cycles so the blocks' pipelines drain, then pulses `done`.
// Sequences (W = width, N = precision, j = bit index, LSB first):
//   ADD/SUB A,B,fold  W words: A+j op= B+j (fold: y from another PE).
//                     W + 4 cycles in all.
//   CLEAR A           W words writing zero at A+j.
//   MULT P,X          CLEAR P, then for i = 0..N-1: one word loading
//                     multiplier bit Y+i (Y = aux) into the Booth pair,
//                     then W-i Booth words P+i+j op= X+min(j,N-1), the
//                     multiplicand being sign-extended. Result: P (W bits)
//                     = X * Y, two's complement. Needs W >= N+3.
//   TX A,hop          W+hop words: bit A+k leaves on the network for
//                     k < W; receivers write east-in at their pointer for
//                     k >= hop (the bit sent hop words earlier).
//   TXADD A,hop       as TX, but for k >= hop every block adds the bit
//                     received to bit k-hop of its own A (port A) and
//                     writes the sum at its pointer: one binary-hopping
//                     level, data movement overlapped with the addition,
//                     W + hop + 4 cycles in all.
//
// The paper gives the multicycle driver, its extra parameter-load cycle and
// the instructions ADD, SUB and MULT, and the three-address overlap of
// movement and addition that TXADD implements; the sequences are this
// design's.
module ctrl_multi_driver
  import imagine_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  instr_t            instr,
  input  logic [PREC_W-1:0] prec_n,
  input  logic [PREC_W-1:0] width_w,
  input  logic [ADDR_W-1:0] aux,
  output pim_ctrl_t         ctrl,
  output logic              active,
  output logic              done
);
  typedef enum logic [2:0] {
    M_IDLE, M_LOAD, M_CLEAR, M_BLD, M_BSTEP, M_ADD, M_TX, M_DRAIN
  } mstate_e;

  mstate_e           st;
  opcode_e           op;
  logic [ADDR_W-1:0] a, b, y;
  logic [FOLD_W-1:0] fold;
  logic [HOP_W-1:0]  hop;
  logic [PREC_W-1:0] n, w;
  logic [8:0]        j;       // bit counter (up to W + hop)
  logic [PREC_W-1:0] i;       // Booth step
  logic [1:0]        dcnt;
  logic              last_bit;

  always_comb begin
    unique case (st)
      M_ADD, M_CLEAR: last_bit = (j == 9'(w) - 9'd1);
      M_BSTEP:        last_bit = (j == 9'(w) - 9'(i) - 9'd1);
      M_TX:           last_bit = (j == 9'(w) + 9'(hop) - 9'd1);
      default:        last_bit = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= M_IDLE;
      op   <= OP_NOP;
      a    <= '0; b <= '0; y <= '0; fold <= '0; hop <= '0;
      n    <= '0; w <= '0; j <= '0; i <= '0; dcnt <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (start) begin
          op   <= instr.op;
          a    <= instr.a;
          b    <= instr.b;
          fold <= instr.fold;
          hop  <= instr.b[ADDR_W-1 -: HOP_W];
          st   <= M_LOAD;
        end
        M_LOAD: begin
          n <= prec_n;
          w <= width_w;
          y <= aux;
          j <= '0;
          i <= '0;
          unique case (op)
            OP_ADD, OP_SUB:    st <= M_ADD;
            OP_MULT, OP_CLEAR: st <= M_CLEAR;
            OP_TX, OP_TXADD:   st <= M_TX;
            default:           st <= M_DRAIN;
          endcase
        end
        M_ADD, M_TX: begin
          j <= j + 1'b1;
          if (last_bit) st <= M_DRAIN;
        end
        M_CLEAR: begin
          j <= j + 1'b1;
          if (last_bit) st <= (op == OP_MULT) ? M_BLD : M_DRAIN;
        end
        M_BLD: begin
          j  <= '0;
          st <= M_BSTEP;
        end
        M_BSTEP: begin
          j <= j + 1'b1;
          if (last_bit) begin
            if (i == n - 1'b1) st <= M_DRAIN;
            else begin
              i  <= i + 1'b1;
              st <= M_BLD;
            end
          end
        end
        M_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 2'(BLOCK_PIPE - 1)) begin
            dcnt <= '0;
            st   <= M_IDLE;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  assign active = (st != M_IDLE);
  assign done   = (st == M_DRAIN) && (dcnt == 2'(BLOCK_PIPE - 1));

  // control word of the current cycle
  always_comb begin
    logic [ADDR_W-1:0] jx;
    ctrl = CTRL_IDLE;
    jx   = (j >= 9'(n)) ? ADDR_W'(n - 1'b1) : ADDR_W'(j);
    unique case (st)
      M_ADD: begin
        ctrl.op     = (op == OP_SUB) ? ALU_SUB : ALU_ADD;
        ctrl.first  = (j == '0);
        ctrl.we     = 1'b1;
        ctrl.fold   = fold;
        ctrl.addr_a = a + ADDR_W'(j);
        ctrl.addr_b = b + ADDR_W'(j);
      end
      M_CLEAR: begin
        ctrl.op     = ALU_ZERO;
        ctrl.we     = 1'b1;
        ctrl.addr_a = a + ADDR_W'(j);
      end
      M_BLD: begin
        ctrl.booth_ld    = 1'b1;
        ctrl.booth_first = (i == '0);
        ctrl.addr_b      = y + ADDR_W'(i);
      end
      M_BSTEP: begin
        ctrl.op     = ALU_BOOTH;
        ctrl.first  = (j == '0);
        ctrl.we     = 1'b1;
        ctrl.addr_a = a + ADDR_W'(i) + ADDR_W'(j);
        ctrl.addr_b = b + jx;
      end
      M_TX: begin
        ctrl.op     = (op == OP_TXADD) ? ALU_ADD : ALU_CPY;
        ctrl.first  = (j == 9'(hop));
        ctrl.acc    = (op == OP_TXADD);
        ctrl.send   = (j < 9'(w));
        ctrl.addr_a = a + ADDR_W'(j - 9'(hop));
        ctrl.addr_b = a + ADDR_W'(j);
        ctrl.is_tx  = (j >= 9'(hop));
        ctrl.we     = (j >= 9'(hop));
      end
      default: ;
    endcase
  end
endmodule
