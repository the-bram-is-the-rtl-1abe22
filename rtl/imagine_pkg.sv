// imagine_pkg: types and constants shared by the IMAGine GEMV engine.
//
// The engine is a 2D array of GEMV tiles. Every tile holds a controller and
// a 12x2 array of PiCaSO-IM blocks; every block is one RAMB18-sized register
// file whose 16 bit columns are 16 bit-serial processing elements (PEs).
// The front end sends 30-bit instructions; each tile controller turns them
// into the per-cycle control word `pim_ctrl_t` that all blocks of the tile
// receive through a pipelined fanout tree.
//
// What follows the paper: the 30-bit instruction width, 16 PEs per block
// (one RAMB18 tile per block, 64K PEs on 4032 RAMB18 tiles), the ADD, SUB
// and MULT multicycle instructions, the pointer register, block-ID select
// and east-to-west movement. The opcode values, the field layout of the
// instruction and the exact control word are this design's own choices,
// since the paper does not print them.
package imagine_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NPE     = 16;    // PEs (bit columns) per block
  localparam int unsigned DEPTH   = 1024;  // words (bit positions) per PE
  localparam int unsigned ADDR_W  = 10;    // $clog2(DEPTH)
  localparam int unsigned INSTR_W = 30;    // instruction width
  localparam int unsigned ID_W    = 13;    // block ID {row, col}
  localparam int unsigned PREC_W  = 7;     // precision / width fields
  localparam int unsigned HOP_W   = 8;     // hop distance field of TX
  localparam int unsigned FOLD_W  = 3;     // in-block fold field
  localparam int unsigned IMM_W   = 2 * ID_W; // immediate carried to blocks

  // Latency of a block from control word to register-file write-back:
  // read (1) + OpMux (1) + ALU (1). Multicycle sequences end with this many
  // idle cycles so that the next instruction sees all results.
  localparam int unsigned BLOCK_PIPE = 3;

  // ---------------------------------------------------------- instruction
  // Bit 3 of the opcode marks instructions run by the multicycle driver.
  typedef enum logic [3:0] {
    OP_NOP      = 4'h0,
    OP_WRITE    = 4'h1,  // [25:16] addr, [15:0] one word (bit of 16 PEs)
    OP_SELECT   = 4'h2,  // [25:13] ID mask, [12:0] ID value
    OP_SETPTR   = 4'h3,  // [25:16] pointer value
    OP_SETPARAM = 4'h4,  // [25:19] N, [18:12] W, [11:2] aux address
    OP_ADD      = 4'h8,  // [25:16] A (dest, src1), [15:6] B, [5:3] fold
    OP_SUB      = 4'h9,  // as ADD, A = A - B
    OP_MULT     = 4'hA,  // [25:16] P (W bits) = X [15:6] (N bits) * Y (aux)
    OP_TX       = 4'hB,  // [25:16] source addr, [15:8] hop distance
    OP_CLEAR    = 4'hC,  // [25:16] A: W bits set to zero
    OP_TXADD    = 4'hD   // [25:16] A, [15:8] hop: TX of A fused with ADD,
                         // sum written at the pointer
  } opcode_e;

  typedef struct packed {
    opcode_e            op;
    logic [ADDR_W-1:0]  a;       // [25:16]
    logic [ADDR_W-1:0]  b;       // [15:6]
    logic [FOLD_W-1:0]  fold;    // [5:3]
    logic [2:0]         rsvd;    // [2:0]
  } instr_t;

  function automatic logic is_multi(input logic [3:0] op);
    return op[3];
  endfunction

  // ------------------------------------------------------------ ALU ops
  typedef enum logic [2:0] {
    ALU_NOP   = 3'd0,
    ALU_ADD   = 3'd1,  // r = x + y (+carry)
    ALU_SUB   = 3'd2,  // r = x - y
    ALU_CPY   = 3'd3,  // r = y
    ALU_BOOTH = 3'd4,  // r = x + y, x - y or x, by the Booth pair of the PE
    ALU_ZERO  = 3'd5   // r = 0
  } alu_op_e;

  // ------------------------------------------------------ block control
  // One control word per cycle, broadcast to every block of a tile.
  typedef struct packed {
    alu_op_e           op;
    logic              first;       // first bit of a serial op: init carry
    logic              we;          // write the ALU result back
    logic              booth_ld;    // load multiplier bit into Booth pair
    logic              booth_first; // multiplier bit 0: previous bit is 0
    logic [FOLD_W-1:0] fold;        // OpMux: y from PE i + 2^(fold-1)
    logic              is_tx;       // port A from pointer, y = east-in
    logic              acc;         // with is_tx: port A keeps addr_a, write at pointer
    logic              send;        // selected blocks drive west-out
    logic              ext;         // y = immediate data, selected only
    logic              sel_we;      // load the block select flag
    logic              ptr_we;      // load the pointer register
    logic [ADDR_W-1:0] addr_a;
    logic [ADDR_W-1:0] addr_b;
    logic [IMM_W-1:0]  imm;         // write data or {ID mask, ID value}
  } pim_ctrl_t;

  localparam int unsigned CTRL_W = $bits(pim_ctrl_t);

  localparam pim_ctrl_t CTRL_IDLE = '{op: ALU_NOP, fold: '0, addr_a: '0,
                                      addr_b: '0, imm: '0, default: 1'b0};

endpackage
